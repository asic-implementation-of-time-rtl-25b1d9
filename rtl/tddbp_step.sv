// tddbp_step: one split-step stage of time-domain digital backpropagation,
// processing LANES (96) consecutive complex samples per clock cycle.
//
// Datapath per stage (symmetric split-step, one step per span):
//   fir_sym_par   linear step, CD filter H(z), full-precision result
//   sig_quant     requantize the filter output to SIG_W bits, scaled by the
//                 programmable power-of-two shift fir_shift
//   nl_step       nonlinear step x*(1 + j*gamma*|x|^2), per lane
// The last stage of the chain has no nonlinear step (HAS_NL = 0); the
// requantized filter output is then the stage output.  step_cfg holds the
// coefficients, the shift and gamma.
//
// Word lengths, lane count and filter length follow the paper.  The two
// pipeline registers (after the filter and at the stage output) and the
// per-cycle clip flags are choices of this design.
//
// Interface: in_valid/in_re/in_im carry a block of LANES samples (lane 0
// oldest); out_* carry the processed block.  clip_fir is high when any
// lane's filter requantizer saturated, clip_nl when any lane's nonlinear
// step saturated (short copy, factor or output); both are aligned with out_*.
// Timing: latency 2 clock cycles; in addition the symmetric filter delays
// the sample stream by K = (TAPS-1)/2 samples.
module tddbp_step #(
  parameter int unsigned LANES  = tddbp_pkg::LANES,
  parameter int unsigned TAPS   = tddbp_pkg::TAPS,
  parameter int unsigned SIG_W  = tddbp_pkg::SIG_W,
  parameter int unsigned COEF_W = tddbp_pkg::COEF_W,
  parameter bit          HAS_NL = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cfg_we,
  input  logic [tddbp_pkg::CFG_AW-1:0]  cfg_addr,
  input  logic [tddbp_pkg::CFG_DW-1:0]  cfg_wdata,
  input  logic                          in_valid,
  input  logic signed [SIG_W-1:0]       in_re [LANES],
  input  logic signed [SIG_W-1:0]       in_im [LANES],
  output logic                          out_valid,
  output logic signed [SIG_W-1:0]       out_re[LANES],
  output logic signed [SIG_W-1:0]       out_im[LANES],
  output logic                          clip_fir,
  output logic                          clip_nl
);
  import tddbp_pkg::*;
  localparam int unsigned K     = (TAPS - 1) / 2;
  localparam int unsigned ACC_W = SIG_W + 1 + COEF_W + 1 + $clog2(K + 1);

  logic signed [COEF_W-1:0] coef_re[K+1], coef_im[K+1];
  logic [SHIFT_W-1:0]       fir_shift;
  logic signed [GAM_W-1:0]  gamma;

  step_cfg #(.TAPS(TAPS), .COEF_W(COEF_W)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .coef_re, .coef_im, .fir_shift, .gamma);

  logic                    f_valid;
  logic signed [ACC_W-1:0] f_re[LANES], f_im[LANES];

  fir_sym_par #(.LANES(LANES), .TAPS(TAPS), .SIG_W(SIG_W), .COEF_W(COEF_W)) u_fir (
    .clk, .rst_n, .in_valid, .in_re, .in_im, .coef_re, .coef_im,
    .out_valid(f_valid), .out_re(f_re), .out_im(f_im));

  logic signed [SIG_W-1:0] q_re[LANES], q_im[LANES], y_re[LANES], y_im[LANES];
  logic [LANES-1:0] cq_re, cq_im, c_nlq, c_fac, c_out;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    sig_quant #(.IN_W(ACC_W), .OUT_W(SIG_W), .SHIFT_W(SHIFT_W)) u_q_re (
      .din(f_re[i]), .shift(fir_shift), .dout(q_re[i]), .clipped(cq_re[i]));
    sig_quant #(.IN_W(ACC_W), .OUT_W(SIG_W), .SHIFT_W(SHIFT_W)) u_q_im (
      .din(f_im[i]), .shift(fir_shift), .dout(q_im[i]), .clipped(cq_im[i]));
    if (HAS_NL) begin : g_nl
      nl_step #(.SIG_W(SIG_W)) u_nl (
        .x_re(q_re[i]), .x_im(q_im[i]), .gamma,
        .y_re(y_re[i]), .y_im(y_im[i]),
        .clip_nlq(c_nlq[i]), .clip_fac(c_fac[i]), .clip_out(c_out[i]));
    end else begin : g_lin
      assign y_re[i]  = q_re[i];
      assign y_im[i]  = q_im[i];
      assign c_nlq[i] = 1'b0;
      assign c_fac[i] = 1'b0;
      assign c_out[i] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      clip_fir  <= 1'b0;
      clip_nl   <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        out_re[i] <= '0;
        out_im[i] <= '0;
      end
    end else begin
      out_valid <= f_valid;
      clip_fir  <= f_valid && (|cq_re || |cq_im);
      clip_nl   <= f_valid && (|c_nlq || |c_fac || |c_out);
      if (f_valid) begin
        out_re <= y_re;
        out_im <= y_im;
      end
    end
  end
endmodule
