// tb_tddbp_step: one TD-DBP stage with and without the nonlinear step,
// reduced to 16 lanes (15 taps and all word lengths as in the main
// configuration).  Both are programmed through the register port, fed the
// same random stream with gaps, reprogrammed half way, and compared block by
// block (data and clip flags) with the reference model.  The two-cycle
// latency is checked, and so is that filter clipping, short-copy clipping,
// output clipping and halfway rounding all occur.
module tb_tddbp_step;
  import tddbp_pkg::*;
  import tddbp_ref_pkg::*;
  localparam int unsigned L = 16;
  localparam int unsigned K = (TAPS - 1) / 2;
  localparam int NBLK = 40;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic cfg_we[2];
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic signed [SIG_W-1:0] in_re[L], in_im[L];
  logic out_valid[2], clip_fir[2], clip_nl[2];
  logic signed [SIG_W-1:0] out_re[2][L], out_im[2][L];

  for (genvar d = 0; d < 2; d++) begin : g_dut
    tddbp_step #(.LANES(L), .HAS_NL(d == 0)) dut (
      .clk, .rst_n, .cfg_we(cfg_we[d]), .cfg_addr, .cfg_wdata,
      .in_valid, .in_re, .in_im,
      .out_valid(out_valid[d]), .out_re(out_re[d]), .out_im(out_im[d]),
      .clip_fir(clip_fir[d]), .clip_nl(clip_nl[d]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, gaps = 0;
  int blk_in_cycle[int];     // input cycle -> block
  int out_blk[2] = '{0, 0};
  longint xr[], xi[];
  stage_cfg_t cfg[2][2];     // [dut][set]
  longint yr[2][], yi[2][];
  bit     cf[2][], cn[2][];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int d = 0; d < 2; d++) begin
        bit exp_v;
        exp_v = blk_in_cycle.exists(cycle - 2);
        checks++;
        if (out_valid[d] != exp_v) begin
          failures++;
          $display("FAIL dut %0d: out_valid %0b at cycle %0d", d, out_valid[d], cycle);
        end
        if (out_valid[d] && exp_v) begin
          int b;
          b = blk_in_cycle[cycle - 2];
          checks++;
          if (b != out_blk[d]) failures++;
          checks++;
          if (clip_fir[d] != cf[d][b] || clip_nl[d] != cn[d][b]) begin
            failures++;
            $display("FAIL dut %0d blk %0d flags %b%b exp %b%b", d, b,
                     clip_fir[d], clip_nl[d], cf[d][b], cn[d][b]);
          end
          for (int i = 0; i < L; i++) begin
            checks++;
            if (longint'(out_re[d][i]) != yr[d][b*L+i] || longint'(out_im[d][i]) != yi[d][b*L+i]) begin
              failures++;
              if (failures < 10)
                $display("FAIL dut %0d blk %0d lane %0d: (%0d,%0d) exp (%0d,%0d)", d, b, i,
                         out_re[d][i], out_im[d][i], yr[d][b*L+i], yi[d][b*L+i]);
            end
          end
          out_blk[d]++;
        end
      end
    end
  end

  function automatic stage_cfg_t random_cfg();
    stage_cfg_t c;
    c.hr = new[K + 1];
    c.hi = new[K + 1];
    c.hr[0] = $urandom_range(20, 31);
    c.hi[0] = longint'($urandom_range(0, 8)) - 4;
    for (int k = 1; k <= K; k++) begin
      c.hr[k] = longint'($urandom_range(0, 12)) - 6;
      c.hi[k] = longint'($urandom_range(0, 12)) - 6;
    end
    c.shift = $urandom_range(4, 5);
    c.gamma = longint'($signed(GAM_W'($urandom)));
    return c;
  endfunction

  task automatic load_cfg(int d, stage_cfg_t c);
    for (int a = 0; a <= K + 2; a++) begin
      @(negedge clk);
      cfg_we[d] = 1;
      cfg_addr  = CFG_AW'(a);
      if (a <= K)          cfg_wdata = CFG_DW'({COEF_W'(c.hi[a]), COEF_W'(c.hr[a])});
      else if (a == K + 1) cfg_wdata = CFG_DW'(c.shift);
      else                 cfg_wdata = CFG_DW'(GAM_W'(c.gamma));
    end
    @(negedge clk);
    cfg_we[d] = 0;
  endtask

  initial begin
    cfg_we = '{0, 0};
    foreach (in_re[i]) begin in_re[i] = '0; in_im[i] = '0; end
    xr = new[NBLK * L];
    xi = new[NBLK * L];
    foreach (xr[n]) begin
      // mostly moderate samples, some at full scale to provoke clipping
      if ($urandom_range(0, 7) == 0) begin
        xr[n] = longint'($signed(SIG_W'($urandom)));
        xi[n] = longint'($signed(SIG_W'($urandom)));
      end else begin
        xr[n] = longint'($urandom_range(0, 200)) - 100;
        xi[n] = longint'($urandom_range(0, 200)) - 100;
      end
    end
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 2; s++) cfg[d][s] = random_cfg();
    for (int d = 0; d < 2; d++)
      ref_stage(xr, xi, L, TAPS, cfg[d][0], cfg[d][1], NBLK / 2, d == 0,
                SIG_W, NLQ_W, FAC_W, NL_SHIFT, yr[d], yi[d], cf[d], cn[d]);
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_cfg(0, cfg[0][0]);
    load_cfg(1, cfg[1][0]);
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      if (b == NBLK / 2) begin
        in_valid = 0;
        repeat (3) @(negedge clk);       // let the last old block leave
        load_cfg(0, cfg[0][1]);
        load_cfg(1, cfg[1][1]);
      end
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        gaps++;
        repeat ($urandom_range(1, 3)) @(negedge clk);
      end
      in_valid = 1;
      for (int i = 0; i < L; i++) begin
        in_re[i] = SIG_W'(xr[b * L + i]);
        in_im[i] = SIG_W'(xi[b * L + i]);
      end
      blk_in_cycle[cycle] = b;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (out_blk[0] != NBLK || out_blk[1] != NBLK) begin
      failures++;
      $display("FAIL blocks out %0d %0d", out_blk[0], out_blk[1]);
    end
    checks++;
    if (n_clip_fir == 0 || n_clip_nlq == 0 || n_clip_out == 0 || n_round_half == 0 || gaps == 0) begin
      failures++;
      $display("FAIL mechanism never exercised");
    end
    $display("filter clips %0d, short-copy clips %0d, factor clips %0d, output clips %0d, halves %0d, gaps %0d",
             n_clip_fir, n_clip_nlq, n_clip_fac, n_clip_out, n_round_half, gaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
