// fir_sym_par: block-parallel, reconfigurable, symmetric complex FIR filter
// that performs the linear (chromatic dispersion) part of one TD-DBP step.
//
// Every clock cycle a block of LANES consecutive complex samples arrives
// (lane 0 is the oldest).  The filter has T = TAPS = 2K+1 taps
// h(-K) .. h(K) with h(-k) = h(k), as the CD impulse response is even in
// time, so only the K+1 coefficients h(0) .. h(K) are stored and each
// symmetric pair of samples is added before it is multiplied:
//
//   y[n] = h(0) x[n] + sum_{k=1..K} h(k) (x[n-k] + x[n+k])
//
// This halves the number of complex multipliers (K+1 instead of 2K+1 per
// lane).  The filter is made causal by delaying it K samples: output lane i
// of a block is y[] centred on input sample i-K of the same block, so the
// last 2K samples of the previous block are kept in a history register.
// Coefficients are inputs, so the filter is reprogrammed by writing new
// values (see step_cfg).  The products and the sum are kept at full
// precision (ACC_W bits) and handed to the requantizer.
//
// Following the paper: parallel symmetric FIR with tap sharing, 96 lanes,
// 15 taps.  Own choices: the block/history arrangement, one register stage,
// four real multipliers per complex product, reset of the history to zero.
//
// Interface: in_valid qualifies a block; the history advances only on a
// valid block, so gaps in the input stream are allowed.
// Timing: out_* is registered, one clock after the block it belongs to.
module fir_sym_par #(
  parameter int unsigned LANES  = tddbp_pkg::LANES,
  parameter int unsigned TAPS   = tddbp_pkg::TAPS,
  parameter int unsigned SIG_W  = tddbp_pkg::SIG_W,
  parameter int unsigned COEF_W = tddbp_pkg::COEF_W,
  localparam int unsigned K     = (TAPS - 1) / 2,
  localparam int unsigned ACC_W = SIG_W + 1 + COEF_W + 1 + $clog2(K + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [SIG_W-1:0]  in_re  [LANES],
  input  logic signed [SIG_W-1:0]  in_im  [LANES],
  input  logic signed [COEF_W-1:0] coef_re[K+1],
  input  logic signed [COEF_W-1:0] coef_im[K+1],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_re [LANES],
  output logic signed [ACC_W-1:0]  out_im [LANES]
);
  localparam int unsigned HIST = 2 * K;
  localparam int unsigned WIN  = LANES + HIST;
  localparam int unsigned PA_W = SIG_W + 1;           // pre-added pair
  localparam int unsigned PR_W = PA_W + COEF_W + 1;   // complex product part

  initial begin
    assert (TAPS % 2 == 1 && TAPS >= 3) else $error("TAPS must be odd and at least 3");
    assert (LANES >= HIST) else $error("LANES must be at least TAPS-1");
  end

  logic signed [SIG_W-1:0] hist_re[HIST], hist_im[HIST];
  logic signed [SIG_W-1:0] win_re [WIN],  win_im [WIN];
  logic signed [ACC_W-1:0] acc_re [LANES], acc_im[LANES];

  // Window: history of the previous block followed by the current block
  always_comb begin
    for (int j = 0; j < HIST; j++) begin
      win_re[j] = hist_re[j];
      win_im[j] = hist_im[j];
    end
    for (int j = 0; j < LANES; j++) begin
      win_re[HIST+j] = in_re[j];
      win_im[HIST+j] = in_im[j];
    end
  end

  // Pre-add symmetric pairs, multiply by the shared coefficient, sum
  always_comb begin
    logic signed [PA_W-1:0] pa_re, pa_im;
    logic signed [PR_W-1:0] pr_re, pr_im;
    for (int i = 0; i < LANES; i++) begin
      acc_re[i] = '0;
      acc_im[i] = '0;
      for (int k = 0; k <= K; k++) begin
        if (k == 0) begin
          pa_re = PA_W'(win_re[i+K]);
          pa_im = PA_W'(win_im[i+K]);
        end else begin
          pa_re = PA_W'(win_re[i+K-k]) + PA_W'(win_re[i+K+k]);
          pa_im = PA_W'(win_im[i+K-k]) + PA_W'(win_im[i+K+k]);
        end
        pr_re = PR_W'(pa_re * coef_re[k]) - PR_W'(pa_im * coef_im[k]);
        pr_im = PR_W'(pa_re * coef_im[k]) + PR_W'(pa_im * coef_re[k]);
        acc_re[i] = acc_re[i] + ACC_W'(pr_re);
        acc_im[i] = acc_im[i] + ACC_W'(pr_im);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < HIST; j++) begin
        hist_re[j] <= '0;
        hist_im[j] <= '0;
      end
      for (int i = 0; i < LANES; i++) begin
        out_re[i] <= '0;
        out_im[i] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int j = 0; j < HIST; j++) begin
          hist_re[j] <= in_re[LANES-HIST+j];
          hist_im[j] <= in_im[LANES-HIST+j];
        end
        out_re <= acc_re;
        out_im <= acc_im;
      end
    end
  end
endmodule
