// tddbp: time-domain digital backpropagation engine, a chain of STEPS (33)
// split-step stages with one step per 100-km span, 96 samples per clock
// (at 416.7 MHz this is 40 GSa/s, i.e. 20 GBd at 2 samples per symbol).
//
// Each stage is a tddbp_step with its own registers, so every stage can
// hold its own deep-learned CD filter.  As in the symmetric split-step
// method used by the paper, the last stage has no nonlinear step.
//
// Interface: blocks of LANES complex samples in and out with a valid flag;
// the configuration port writes register cfg_addr of stage cfg_step (see
// step_cfg for the register map).  clip_fir/clip_nl give, per stage, the
// saturation flags of the block leaving that stage.
// Timing: latency 2*STEPS clock cycles; the filters together delay the
// sample stream by STEPS*(TAPS-1)/2 samples.
module tddbp #(
  parameter int unsigned STEPS  = tddbp_pkg::STEPS,
  parameter int unsigned LANES  = tddbp_pkg::LANES,
  parameter int unsigned TAPS   = tddbp_pkg::TAPS,
  parameter int unsigned SIG_W  = tddbp_pkg::SIG_W,
  parameter int unsigned COEF_W = tddbp_pkg::COEF_W,
  localparam int unsigned STEP_W = $clog2(STEPS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_we,
  input  logic [STEP_W-1:0]             cfg_step,
  input  logic [tddbp_pkg::CFG_AW-1:0]  cfg_addr,
  input  logic [tddbp_pkg::CFG_DW-1:0]  cfg_wdata,
  input  logic                          in_valid,
  input  logic signed [SIG_W-1:0]       in_re [LANES],
  input  logic signed [SIG_W-1:0]       in_im [LANES],
  output logic                          out_valid,
  output logic signed [SIG_W-1:0]       out_re[LANES],
  output logic signed [SIG_W-1:0]       out_im[LANES],
  output logic [STEPS-1:0]              clip_fir,
  output logic [STEPS-1:0]              clip_nl
);
  logic                    s_valid[STEPS+1];
  logic signed [SIG_W-1:0] s_re[STEPS+1][LANES], s_im[STEPS+1][LANES];

  assign s_valid[0] = in_valid;
  assign s_re[0]    = in_re;
  assign s_im[0]    = in_im;

  for (genvar s = 0; s < STEPS; s++) begin : g_step
    tddbp_step #(
      .LANES(LANES), .TAPS(TAPS), .SIG_W(SIG_W), .COEF_W(COEF_W),
      .HAS_NL(s != STEPS - 1)
    ) u_step (
      .clk, .rst_n,
      .cfg_we(cfg_we && (int'(cfg_step) == s)), .cfg_addr, .cfg_wdata,
      .in_valid(s_valid[s]), .in_re(s_re[s]), .in_im(s_im[s]),
      .out_valid(s_valid[s+1]), .out_re(s_re[s+1]), .out_im(s_im[s+1]),
      .clip_fir(clip_fir[s]), .clip_nl(clip_nl[s]));
  end

  assign out_valid = s_valid[STEPS];
  assign out_re    = s_re[STEPS];
  assign out_im    = s_im[STEPS];
endmodule
