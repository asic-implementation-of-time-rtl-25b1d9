// tb_fir_sym_par: streams random blocks with random gaps through a reduced
// parallel symmetric FIR (16 lanes, 15 taps) and compares every output with
// a sample-by-sample convolution of the whole stream.  Also checks the
// one-cycle latency, that the history survives input gaps, and that new
// coefficients take effect for the next block (reconfiguration).
module tb_fir_sym_par;
  import tddbp_ref_pkg::*;
  localparam int unsigned LANES = 16, TAPS = 15, SIG_W = 9, COEF_W = 6;
  localparam int unsigned K = (TAPS - 1) / 2;
  localparam int unsigned ACC_W = SIG_W + 1 + COEF_W + 1 + $clog2(K + 1);
  localparam int NBLK = 60;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [SIG_W-1:0]  in_re[LANES], in_im[LANES];
  logic signed [COEF_W-1:0] coef_re[K+1], coef_im[K+1];
  logic signed [ACC_W-1:0]  out_re[LANES], out_im[LANES];

  fir_sym_par #(.LANES(LANES), .TAPS(TAPS), .SIG_W(SIG_W), .COEF_W(COEF_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, gaps = 0, reconfigs = 0;
  longint xr[], xi[];
  longint hr[2][], hi[2][];   // coefficient set per half of the stream
  int     out_blk = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  // Checker: compare each valid output block with the reference
  int in_cycles[$];
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      begin
        int c_in;
        c_in = in_cycles.pop_front();
        if (cycle != c_in + 1) begin
          failures++;
          $display("FAIL latency: block %0d out at %0d, in at %0d", out_blk, cycle, c_in);
        end
      end
      for (int i = 0; i < LANES; i++) begin
        longint er, ei;
        ref_fir(xr, xi, out_blk * LANES + i, TAPS, hr[out_blk >= NBLK / 2],
                hi[out_blk >= NBLK / 2], er, ei);
        checks++;
        if (longint'(out_re[i]) != er || longint'(out_im[i]) != ei) begin
          failures++;
          if (failures < 10)
            $display("FAIL blk %0d lane %0d: (%0d,%0d) expected (%0d,%0d)",
                     out_blk, i, out_re[i], out_im[i], er, ei);
        end
      end
      out_blk++;
    end
  end

  initial begin
    xr = new[NBLK * LANES];
    xi = new[NBLK * LANES];
    foreach (xr[n]) begin
      xr[n] = longint'($signed(SIG_W'($urandom)));
      xi[n] = longint'($signed(SIG_W'($urandom)));
    end
    for (int s = 0; s < 2; s++) begin
      hr[s] = new[K + 1];
      hi[s] = new[K + 1];
      foreach (hr[s][k]) begin
        hr[s][k] = longint'($signed(COEF_W'($urandom)));
        hi[s][k] = longint'($signed(COEF_W'($urandom)));
      end
    end
    // extreme coefficients in the second set to exercise the full width
    hr[1][0] = -(1 << (COEF_W - 1));
    hi[1][0] = -(1 << (COEF_W - 1));
    for (int k = 0; k <= K; k++) begin
      coef_re[k] = COEF_W'(hr[0][k]);
      coef_im[k] = COEF_W'(hi[0][k]);
    end
    foreach (in_re[i]) begin in_re[i] = '0; in_im[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      if (b == NBLK / 2) begin
        for (int k = 0; k <= K; k++) begin
          coef_re[k] = COEF_W'(hr[1][k]);
          coef_im[k] = COEF_W'(hi[1][k]);
        end
        reconfigs++;
      end
      // random gap before the block
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        gaps++;
        repeat ($urandom_range(1, 3)) @(negedge clk);
      end
      in_valid = 1;
      for (int i = 0; i < LANES; i++) begin
        in_re[i] = SIG_W'(xr[b * LANES + i]);
        in_im[i] = SIG_W'(xi[b * LANES + i]);
      end
      in_cycles.push_back(cycle);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(posedge clk);
    if (out_blk != NBLK) begin failures++; $display("FAIL got %0d blocks", out_blk); end
    if (gaps == 0 || reconfigs == 0) begin failures++; $display("FAIL gap/reconfig not exercised"); end
    $display("gaps %0d, reconfigurations %0d", gaps, reconfigs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
