// step_cfg: configuration registers of one TD-DBP step, which make the
// CD filter reconfigurable (new impulse responses can be loaded at run
// time) and hold the step's scaling and nonlinear coefficient.
//
// The register map is this design's own; only the fact that the filter is
// reconfigurable comes from the paper.  Registers are written through a
// single write port; a write takes effect in the clock cycle after it:
//
//   addr 0 .. K   coefficient h(addr):  wdata[COEF_W-1:0]        real part
//                                       wdata[2*COEF_W-1:COEF_W] imaginary part
//   addr K+1      filter output shift:  wdata[SHIFT_W-1:0]
//   addr K+2      nonlinear coefficient gamma*delta: wdata[GAM_W-1:0] (signed)
//
// Writes to other addresses are ignored.  Reset clears all registers, which
// gives an all-zero filter until coefficients are loaded.
module step_cfg #(
  parameter int unsigned TAPS    = tddbp_pkg::TAPS,
  parameter int unsigned COEF_W  = tddbp_pkg::COEF_W,
  parameter int unsigned SHIFT_W = tddbp_pkg::SHIFT_W,
  parameter int unsigned GAM_W   = tddbp_pkg::GAM_W,
  parameter int unsigned CFG_AW  = tddbp_pkg::CFG_AW,
  parameter int unsigned CFG_DW  = tddbp_pkg::CFG_DW,
  localparam int unsigned K      = (TAPS - 1) / 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic [CFG_DW-1:0]        cfg_wdata,
  output logic signed [COEF_W-1:0] coef_re[K+1],
  output logic signed [COEF_W-1:0] coef_im[K+1],
  output logic [SHIFT_W-1:0]       fir_shift,
  output logic signed [GAM_W-1:0]  gamma
);
  localparam int unsigned ADDR_SHIFT = K + 1;
  localparam int unsigned ADDR_GAMMA = K + 2;

  initial begin
    assert (2 * COEF_W <= CFG_DW && GAM_W <= CFG_DW && SHIFT_W <= CFG_DW)
      else $error("CFG_DW too narrow for a register");
    assert (ADDR_GAMMA < 2 ** CFG_AW) else $error("CFG_AW too narrow for the register map");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= K; k++) begin
        coef_re[k] <= '0;
        coef_im[k] <= '0;
      end
      fir_shift <= '0;
      gamma     <= '0;
    end else if (cfg_we) begin
      for (int k = 0; k <= K; k++) begin
        if (int'(cfg_addr) == k) begin
          coef_re[k] <= cfg_wdata[COEF_W-1:0];
          coef_im[k] <= cfg_wdata[2*COEF_W-1:COEF_W];
        end
      end
      if (int'(cfg_addr) == ADDR_SHIFT) fir_shift <= cfg_wdata[SHIFT_W-1:0];
      if (int'(cfg_addr) == ADDR_GAMMA) gamma     <= cfg_wdata[GAM_W-1:0];
    end
  end
endmodule
