// tb_tddbp: end-to-end test of the full backpropagation chain at its
// default size (33 stages, 96 lanes, 15 taps, 9-bit signal, 6-bit
// coefficients).  Every stage is programmed through the register port with
// its own random filter, shift and nonlinear coefficient; a random stream
// with input gaps is sent through, all stages are reprogrammed half way
// (after the chain has drained), and the stream continues.  Each output
// block and, for every stage, the clip flags of each block are compared with
// the reference model.  Checked as well: the 2*STEPS-cycle latency, that the
// last stage never reports nonlinear clipping (it has no nonlinear step),
// and that filter clipping, short-copy clipping, output clipping, halfway
// rounding, input gaps and reprogramming each happened.
module tb_tddbp;
  import tddbp_pkg::*;
  import tddbp_ref_pkg::*;
  localparam int unsigned L = LANES;
  localparam int unsigned K = (TAPS - 1) / 2;
  localparam int unsigned STEP_W = $clog2(STEPS);
  localparam int NBLK = 10;

  logic clk = 0, rst_n = 0, in_valid = 0, cfg_we = 0;
  logic [STEP_W-1:0] cfg_step = '0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic signed [SIG_W-1:0] in_re[L], in_im[L], out_re[L], out_im[L];
  logic out_valid;
  logic [STEPS-1:0] clip_fir, clip_nl;

  tddbp dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, gaps = 0, reconfigs = 0, out_blk = 0;
  int last_nl_flags = 0, nonzero = 0, n_big = 0;
  int blk_in_cycle[int];
  longint sr[STEPS+1][], si[STEPS+1][];
  bit     cf[STEPS][], cn[STEPS][];
  stage_cfg_t cfg[STEPS][2];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n) begin
      // clip flags of every stage, aligned with that stage's output
      for (int s = 0; s < STEPS; s++) begin
        int c_in;
        bit ef, en;
        c_in = cycle - 2 * (s + 1);
        ef = 0;
        en = 0;
        if (blk_in_cycle.exists(c_in)) begin
          ef = cf[s][blk_in_cycle[c_in]];
          en = cn[s][blk_in_cycle[c_in]];
        end
        checks++;
        if (clip_fir[s] != ef || clip_nl[s] != en) begin
          failures++;
          if (failures < 10)
            $display("FAIL stage %0d flags %b%b exp %b%b at cycle %0d", s, clip_fir[s], clip_nl[s], ef, en, cycle);
        end
      end
      if (clip_nl[STEPS-1]) last_nl_flags++;
      checks++;
      if (out_valid != blk_in_cycle.exists(cycle - 2 * STEPS)) begin
        failures++;
        $display("FAIL out_valid %0b at cycle %0d", out_valid, cycle);
      end
      if (out_valid) begin
        int b;
        b = blk_in_cycle.exists(cycle - 2 * STEPS) ? blk_in_cycle[cycle - 2 * STEPS] : -1;
        checks++;
        if (b != out_blk) failures++;
        for (int i = 0; i < L; i++) begin
          longint er, ei;
          er = sr[STEPS][out_blk*L+i];
          ei = si[STEPS][out_blk*L+i];
          if (er != 0 || ei != 0) nonzero++;
          if (er > 64 || er < -64 || ei > 64 || ei < -64) n_big++;
          checks++;
          if (longint'(out_re[i]) != er || longint'(out_im[i]) != ei) begin
            failures++;
            if (failures < 10)
              $display("FAIL blk %0d lane %0d: (%0d,%0d) exp (%0d,%0d)", out_blk, i,
                       out_re[i], out_im[i], er, ei);
          end
        end
        out_blk++;
      end
    end
  end

  function automatic stage_cfg_t random_cfg();
    stage_cfg_t c;
    c.hr = new[K + 1];
    c.hi = new[K + 1];
    // gain near 1 (h(0) about 2^4 at shift 4) so that the signal neither
    // dies out nor only clips over 33 stages
    c.hr[0] = $urandom_range(14, 18);
    c.hi[0] = longint'($urandom_range(0, 4)) - 2;
    for (int k = 1; k <= K; k++) begin
      c.hr[k] = longint'($urandom_range(0, 4)) - 2;
      c.hi[k] = longint'($urandom_range(0, 4)) - 2;
    end
    c.shift = 4;
    c.gamma = longint'($signed(GAM_W'($urandom)));
    return c;
  endfunction

  task automatic load_cfg(int s, stage_cfg_t c);
    for (int a = 0; a <= K + 2; a++) begin
      @(negedge clk);
      cfg_we   = 1;
      cfg_step = STEP_W'(s);
      cfg_addr = CFG_AW'(a);
      if (a <= K)          cfg_wdata = CFG_DW'({COEF_W'(c.hi[a]), COEF_W'(c.hr[a])});
      else if (a == K + 1) cfg_wdata = CFG_DW'(c.shift);
      else                 cfg_wdata = CFG_DW'(GAM_W'(c.gamma));
    end
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    foreach (in_re[i]) begin in_re[i] = '0; in_im[i] = '0; end
    sr[0] = new[NBLK * L];
    si[0] = new[NBLK * L];
    foreach (sr[0][n]) begin
      if ($urandom_range(0, 7) == 0) begin
        sr[0][n] = longint'($signed(SIG_W'($urandom)));
        si[0][n] = longint'($signed(SIG_W'($urandom)));
      end else begin
        sr[0][n] = longint'($urandom_range(0, 200)) - 100;
        si[0][n] = longint'($urandom_range(0, 200)) - 100;
      end
    end
    for (int s = 0; s < STEPS; s++) begin
      cfg[s][0] = random_cfg();
      cfg[s][1] = random_cfg();
      ref_stage(sr[s], si[s], L, TAPS, cfg[s][0], cfg[s][1], NBLK / 2, s != STEPS - 1,
                SIG_W, NLQ_W, FAC_W, NL_SHIFT, sr[s+1], si[s+1], cf[s], cn[s]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < STEPS; s++) load_cfg(s, cfg[s][0]);
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      if (b == NBLK / 2) begin
        in_valid = 0;
        repeat (2 * STEPS + 2) @(negedge clk);   // drain the chain
        for (int s = 0; s < STEPS; s++) load_cfg(s, cfg[s][1]);
        reconfigs++;
      end
      if ($urandom_range(0, 2) == 0) begin
        in_valid = 0;
        gaps++;
        repeat ($urandom_range(1, 3)) @(negedge clk);
      end
      in_valid = 1;
      for (int i = 0; i < L; i++) begin
        in_re[i] = SIG_W'(sr[0][b * L + i]);
        in_im[i] = SIG_W'(si[0][b * L + i]);
      end
      blk_in_cycle[cycle] = b;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (2 * STEPS + 4) @(posedge clk);
    checks++;
    if (out_blk != NBLK) begin failures++; $display("FAIL %0d blocks out", out_blk); end
    checks++;
    if (last_nl_flags != 0) begin failures++; $display("FAIL last stage reported nonlinear clipping"); end
    $display("filter clips %0d, short-copy clips %0d, factor clips %0d, output clips %0d, halves %0d, gaps %0d, reconfigurations %0d, nonzero outputs %0d, outputs above 64 %0d",
             n_clip_fir, n_clip_nlq, n_clip_fac, n_clip_out, n_round_half, gaps, reconfigs, nonzero, n_big);
    checks++;
    if (n_clip_fir == 0 || n_clip_nlq == 0 || n_clip_out == 0 || n_round_half == 0 ||
        gaps == 0 || reconfigs == 0 || n_big == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
