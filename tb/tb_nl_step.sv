// tb_nl_step: compares the nonlinear step with the reference model for
// hand-picked and random samples and coefficients, and shows that every
// saturation point (short copy, output) and the halfway rounding occur.
module tb_nl_step;
  import tddbp_ref_pkg::*;
  import tddbp_pkg::*;

  logic signed [SIG_W-1:0] x_re, x_im, y_re, y_im;
  logic signed [GAM_W-1:0] gamma;
  logic clip_nlq, clip_fac, clip_out;
  int checks = 0, failures = 0;
  int n_nlq = 0, n_out = 0, n_rot = 0;

  nl_step dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint xr, longint xi, longint g);
    longint er, ei;
    bit c1, c2, c3;
    x_re = SIG_W'(xr); x_im = SIG_W'(xi); gamma = GAM_W'(g);
    #1;
    ref_nl(xr, xi, g, SIG_W, NLQ_W, FAC_W, NL_SHIFT, er, ei, c1, c2, c3);
    checks++;
    if (longint'(y_re) != er || longint'(y_im) != ei ||
        clip_nlq != c1 || clip_fac != c2 || clip_out != c3) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=(%0d,%0d) g=%0d: y=(%0d,%0d) exp (%0d,%0d) flags %b%b%b/%b%b%b",
                 xr, xi, g, y_re, y_im, er, ei, clip_nlq, clip_fac, clip_out, c1, c2, c3);
    end
    if (c1) n_nlq++;
    if (c3) n_out++;
    if (er != xr || ei != xi) n_rot++;
  endtask

  initial begin
    // gamma = 0: the factor is exactly 1, the sample passes unchanged
    x_re = 9'sd100; x_im = -9'sd37; gamma = '0; #1;
    checks++; if (y_re !== 9'sd100 || y_im !== -9'sd37) failures++;
    // x = 128 (short copy 8), |x|^2 = 64, gamma = 64: f = 4096/512 = 8,
    // y = 128 * (1 + j*8/128) = 128 + 8j
    x_re = 9'sd128; x_im = '0; gamma = 8'sd64; #1;
    checks++; if (y_re !== 9'sd128 || y_im !== 9'sd8) failures++;
    for (int xr = -256; xr < 256; xr += 17)
      for (int xi = -256; xi < 256; xi += 23)
        for (int g = -128; g < 128; g += 31) check(xr, xi, g);
    for (int r = 0; r < 20000; r++)
      check(longint'($signed(SIG_W'($urandom))), longint'($signed(SIG_W'($urandom))),
            longint'($signed(GAM_W'($urandom))));
    check(255, 255, 127);
    check(-256, 255, -128);
    if (n_nlq == 0 || n_out == 0 || n_rot == 0 || n_round_half == 0) begin
      failures++;
      $display("FAIL mechanism missing: nlq %0d out %0d rot %0d half %0d",
               n_nlq, n_out, n_rot, n_round_half);
    end
    $display("short-copy clips %0d, output clips %0d, rotated %0d, halves %0d",
             n_nlq, n_out, n_rot, n_round_half);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
