// tddbp_pkg: word lengths and sizes shared by the time-domain digital
// backpropagation (TD-DBP) datapath.
//
// The defaults describe the main configuration: 96 samples processed per
// clock cycle, 33 split-step stages (one per 100-km span), 15-tap
// symmetric chromatic-dispersion (CD) filters with 6-bit complex
// coefficients and a 9-bit complex signal.  The 5-bit and 10-bit words of
// the nonlinear step are the ones of the published fixed-point model.
// The width of the nonlinear factor (FAC_W), the width of the nonlinear
// coefficient (GAM_W), its scaling shift (NL_SHIFT) and the register
// interface widths are choices of this implementation.
package tddbp_pkg;

  // Parallelism and algorithm sizes
  localparam int unsigned LANES    = 96;  // samples per clock (40 GSa/s at 416.7 MHz)
  localparam int unsigned TAPS     = 15;  // CD filter length T = 2K+1
  localparam int unsigned STEPS    = 33;  // split-step stages M

  // Word lengths
  localparam int unsigned SIG_W    = 9;   // signal, real and imaginary part
  localparam int unsigned COEF_W   = 6;   // CD filter coefficient, real and imaginary part
  localparam int unsigned NLQ_W    = 5;   // signal copy used for |x|^2
  localparam int unsigned POW_W    = 10;  // |x|^2
  localparam int unsigned FAC_W    = 8;   // imaginary part of 1 + j*gamma*delta*|x|^2 ("a")
  localparam int unsigned GAM_W    = 8;   // programmable gamma*delta coefficient
  localparam int unsigned NL_SHIFT = 9;   // scaling of gamma*delta*|x|^2 to FAC_W bits
  localparam int unsigned SHIFT_W  = 5;   // width of the programmable filter output shift

  // Configuration register port
  localparam int unsigned CFG_AW   = 5;   // register address within one step
  localparam int unsigned CFG_DW   = 32;  // register write data

  // Signed saturation limits of a w-bit two's complement word
  function automatic longint sat_max(int unsigned w);
    return (longint'(1) <<< (w - 1)) - 1;
  endfunction

  function automatic longint sat_min(int unsigned w);
    return -(longint'(1) <<< (w - 1));
  endfunction

endpackage
