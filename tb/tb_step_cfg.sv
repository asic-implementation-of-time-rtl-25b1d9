// tb_step_cfg: writes every register of one step's configuration block,
// reads the outputs back, checks that writes without cfg_we or to unused
// addresses change nothing, that a write shows one cycle later, and that
// reset clears everything.
module tb_step_cfg;
  import tddbp_pkg::*;
  localparam int unsigned K = (TAPS - 1) / 2;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic signed [COEF_W-1:0] coef_re[K+1], coef_im[K+1];
  logic [SHIFT_W-1:0] fir_shift;
  logic signed [GAM_W-1:0] gamma;

  step_cfg dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [CFG_DW-1:0] model[K+3];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_all(string what);
    for (int k = 0; k <= K; k++) begin
      checks++;
      if (coef_re[k] !== model[k][COEF_W-1:0] || coef_im[k] !== model[k][2*COEF_W-1:COEF_W]) begin
        failures++;
        $display("FAIL %s: h(%0d) = (%0d,%0d)", what, k, coef_re[k], coef_im[k]);
      end
    end
    checks++;
    if (fir_shift !== model[K+1][SHIFT_W-1:0] || gamma !== model[K+2][GAM_W-1:0]) begin
      failures++;
      $display("FAIL %s: shift %0d gamma %0d", what, fir_shift, gamma);
    end
  endtask

  task automatic write(int a, logic [CFG_DW-1:0] d, bit we = 1);
    @(negedge clk);
    cfg_we = we; cfg_addr = CFG_AW'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
    if (we && a <= K + 2) model[a] = d;
  endtask

  initial begin
    foreach (model[a]) model[a] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_all("after reset");
    for (int a = 0; a <= K + 2; a++) begin
      logic [CFG_DW-1:0] d;
      d = CFG_DW'($urandom);
      @(negedge clk);
      cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = d;
      @(posedge clk); #1;
      cfg_we = 0;
      model[a] = d;
      expect_all($sformatf("write %0d", a));
    end
    write(3, 16'hffff, 0);          // no write enable
    expect_all("no enable");
    for (int a = K + 3; a < 2 ** CFG_AW; a++) write(a, CFG_DW'($urandom));
    expect_all("unused addresses");
    write(K + 2, 16'h0080);         // gamma = -128
    write(0, 16'h0fff);             // h(0) = -1 - 1j
    expect_all("rewrites");
    checks++;
    if (gamma !== -8'sd128 || coef_re[0] !== -6'sd1) failures++;
    rst_n = 0; #1;
    foreach (model[a]) model[a] = '0;
    expect_all("reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
