// sig_quant: signal requantizer placed wherever a word is shortened in the
// TD-DBP datapath (after the CD filter, before |x|^2, after the nonlinear
// multiplication).
//
// The input is divided by 2^shift with the low-cost rounding the datapath
// uses everywhere: half a unit of the target least significant bit is added
// and the result is truncated (an arithmetic shift, i.e. floor).  Halves
// therefore always round up, which keeps the error nearly unbiased over
// many cascaded steps, unlike plain truncation.  The shifted value is then
// clipped to the OUT_W-bit two's complement range, since the signal has
// Gaussian-like statistics and an occasional clip is cheaper than a longer
// word.  Power-of-two scaling (a shift) is how the datapath propagates its
// fixed-point scale factors.
//
// Interface: din (IN_W bits signed), shift (0 .. IN_W), dout (OUT_W bits
// signed), clipped (high when saturation changed the value).
// Timing: purely combinational.
module sig_quant #(
  parameter int unsigned IN_W    = 20,
  parameter int unsigned OUT_W   = 9,
  parameter int unsigned SHIFT_W = 5
) (
  input  logic signed [IN_W-1:0]    din,
  input  logic        [SHIFT_W-1:0] shift,
  output logic signed [OUT_W-1:0]   dout,
  output logic                      clipped
);
  // One guard bit so that adding the rounding constant cannot overflow
  localparam int unsigned EXT_W = IN_W + 1;
  localparam logic signed [EXT_W-1:0] MAXV = EXT_W'(tddbp_pkg::sat_max(OUT_W));
  localparam logic signed [EXT_W-1:0] MINV = EXT_W'(tddbp_pkg::sat_min(OUT_W));

  logic signed [EXT_W-1:0] half, rounded, scaled;

  always_comb begin
    if (shift == '0) half = '0;
    else             half = EXT_W'(1) <<< (shift - 1'b1);
    rounded = EXT_W'(din) + half;
    scaled  = rounded >>> shift;
    if (scaled > MAXV) begin
      dout    = OUT_W'(MAXV);
      clipped = 1'b1;
    end else if (scaled < MINV) begin
      dout    = OUT_W'(MINV);
      clipped = 1'b1;
    end else begin
      dout    = OUT_W'(scaled);
      clipped = 1'b0;
    end
  end
endmodule
