// nl_step: nonlinear part of one TD-DBP step for a single complex sample.
//
// The Kerr phase rotation x*exp(j*phi*|x|^2) is replaced by its first-order
// Taylor expansion x*(1 + j*phi*|x|^2), with phi = gamma*delta the
// programmable nonlinear coefficient of the step.  The datapath follows the
// published fixed-point model:
//   1. a copy of the SIG_W-bit sample is requantized to NLQ_W (5) bits,
//   2. |x|^2 = re^2 + im^2 of that copy gives POW_W (10) unsigned bits,
//   3. f = gamma * |x|^2, requantized to FAC_W signed bits, is the
//      imaginary part of the factor 1 + j*f; the real part "1" is the
//      constant 2^(FAC_W-1), so no multiplier is spent on it,
//   4. the full-resolution sample is multiplied by the factor, giving
//      SIG_W + FAC_W bits ("9+a"): re' = re*2^(FAC_W-1) - im*f,
//      im' = im*2^(FAC_W-1) + re*f,
//   5. the product is requantized back to SIG_W bits.
// All requantizers round half up and clip (sig_quant).
//
// Own choices: FAC_W = 8 with FAC_W-1 fractional bits (the factor is
// 1 + j*f with f in [-1, 1)), the GAM_W-bit signed coefficient and its
// scaling shift NL_SHIFT; the sign of gamma decides the rotation direction.
//
// Interface: x_re/x_im in, y_re/y_im out, gamma coefficient, clip flags of
// the three requantizers.
// Timing: purely combinational.
module nl_step #(
  parameter int unsigned SIG_W    = tddbp_pkg::SIG_W,
  parameter int unsigned NLQ_W    = tddbp_pkg::NLQ_W,
  parameter int unsigned POW_W    = tddbp_pkg::POW_W,
  parameter int unsigned FAC_W    = tddbp_pkg::FAC_W,
  parameter int unsigned GAM_W    = tddbp_pkg::GAM_W,
  parameter int unsigned NL_SHIFT = tddbp_pkg::NL_SHIFT
) (
  input  logic signed [SIG_W-1:0] x_re,
  input  logic signed [SIG_W-1:0] x_im,
  input  logic signed [GAM_W-1:0] gamma,
  output logic signed [SIG_W-1:0] y_re,
  output logic signed [SIG_W-1:0] y_im,
  output logic                    clip_nlq,   // short copy saturated
  output logic                    clip_fac,   // factor f saturated
  output logic                    clip_out    // output saturated
);
  localparam int unsigned GP_W  = GAM_W + POW_W + 1;   // gamma * |x|^2
  localparam int unsigned MUL_W = SIG_W + FAC_W;       // "9+a"
  localparam int unsigned SH_W  = 5;

  initial begin
    assert (POW_W >= 2 * NLQ_W) else $error("POW_W too small for |x|^2 of NLQ_W-bit samples");
  end

  // 1. short copy of the sample
  logic signed [NLQ_W-1:0] q_re, q_im;
  logic                    q_clip_re, q_clip_im;
  sig_quant #(.IN_W(SIG_W), .OUT_W(NLQ_W), .SHIFT_W(SH_W)) u_q_re (
    .din(x_re), .shift(SH_W'(SIG_W - NLQ_W)), .dout(q_re), .clipped(q_clip_re));
  sig_quant #(.IN_W(SIG_W), .OUT_W(NLQ_W), .SHIFT_W(SH_W)) u_q_im (
    .din(x_im), .shift(SH_W'(SIG_W - NLQ_W)), .dout(q_im), .clipped(q_clip_im));

  // 2. |x|^2 and 3. gamma * |x|^2
  logic        [POW_W-1:0] pow;
  logic signed [GP_W-1:0]  gp;
  logic signed [FAC_W-1:0] fac;
  always_comb begin
    pow = POW_W'(q_re * q_re) + POW_W'(q_im * q_im);
    gp  = GP_W'(gamma) * GP_W'(signed'({1'b0, pow}));
  end
  sig_quant #(.IN_W(GP_W), .OUT_W(FAC_W), .SHIFT_W(SH_W)) u_q_fac (
    .din(gp), .shift(SH_W'(NL_SHIFT)), .dout(fac), .clipped(clip_fac));

  // 4. x * (1 + j*f)
  logic signed [MUL_W-1:0] m_re, m_im;
  always_comb begin
    m_re = (MUL_W'(x_re) <<< (FAC_W - 1)) - MUL_W'(x_im) * MUL_W'(fac);
    m_im = (MUL_W'(x_im) <<< (FAC_W - 1)) + MUL_W'(x_re) * MUL_W'(fac);
  end

  // 5. back to SIG_W bits
  logic c_re, c_im;
  sig_quant #(.IN_W(MUL_W), .OUT_W(SIG_W), .SHIFT_W(SH_W)) u_q_out_re (
    .din(m_re), .shift(SH_W'(FAC_W - 1)), .dout(y_re), .clipped(c_re));
  sig_quant #(.IN_W(MUL_W), .OUT_W(SIG_W), .SHIFT_W(SH_W)) u_q_out_im (
    .din(m_im), .shift(SH_W'(FAC_W - 1)), .dout(y_im), .clipped(c_im));
  assign clip_out = c_re | c_im;

  // Rounding a SIG_W-bit sample to NLQ_W bits can only clip at the
  // positive end (e.g. +255 -> +16 -> +15)
  assign clip_nlq = q_clip_re | q_clip_im;
endmodule
