// tddbp_ref_pkg: bit-true reference model of the TD-DBP datapath, used by
// the testbenches to compute expected outputs independently of the RTL.
// It works on plain integers sample by sample over a whole stream, the way
// the fixed-point system model describes the algorithm, rather than on
// parallel blocks with a history register like the hardware.
package tddbp_ref_pkg;

  // Event counters, so that testbenches can show each mechanism occurred
  int unsigned n_round_half;  // a value exactly halfway between two results
  int unsigned n_clip;        // any saturation in ref_rq

  // Round half up to 'sh' fewer fractional bits, then clip to 'w' bits
  function automatic longint ref_rq(longint v, int sh, int w, output bit clip);
    longint r, lo, hi;
    if (sh > 0) begin
      if ((v & ((longint'(1) << sh) - 1)) == (longint'(1) << (sh - 1))) n_round_half++;
      r = v + (longint'(1) << (sh - 1));
      // floor division by 2^sh
      if (r >= 0) r = r / (longint'(1) << sh);
      else        r = -((-r + (longint'(1) << sh) - 1) / (longint'(1) << sh));
    end else begin
      r = v;
    end
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    clip = 1'b0;
    if (r > hi) begin r = hi; clip = 1'b1; end
    if (r < lo) begin r = lo; clip = 1'b1; end
    if (clip) n_clip++;
    return r;
  endfunction

  // Nonlinear step: x * (1 + j*f), f = Q(gamma * |Q5(x)|^2)
  function automatic void ref_nl(
    input  longint xr, input longint xi, input longint gamma,
    input  int sig_w, input int nlq_w, input int fac_w, input int nl_shift,
    output longint yr, output longint yi,
    output bit c_nlq, output bit c_fac, output bit c_out);
    longint qr, qi, p, f, mr, mi;
    bit c1, c2;
    qr = ref_rq(xr, sig_w - nlq_w, nlq_w, c1);
    qi = ref_rq(xi, sig_w - nlq_w, nlq_w, c2);
    c_nlq = c1 | c2;
    p = qr * qr + qi * qi;
    f = ref_rq(gamma * p, nl_shift, fac_w, c_fac);
    mr = xr * (longint'(1) << (fac_w - 1)) - xi * f;
    mi = xi * (longint'(1) << (fac_w - 1)) + xr * f;
    yr = ref_rq(mr, fac_w - 1, sig_w, c1);
    yi = ref_rq(mi, fac_w - 1, sig_w, c2);
    c_out = c1 | c2;
  endfunction

  // Full-precision symmetric FIR output centred K samples before n; samples
  // before the start of the stream are zero.  h(-k) = h(k).
  function automatic void ref_fir(
    input longint xr[], input longint xi[], input int n, input int taps,
    input longint hr[], input longint hi[],
    output longint yr, output longint yi);
    int kk;
    longint sr, si;
    kk = (taps - 1) / 2;
    yr = 0;
    yi = 0;
    for (int t = -kk; t <= kk; t++) begin
      int idx;
      int a;
      idx = n - kk + t;
      a   = (t < 0) ? -t : t;
      sr  = (idx >= 0) ? xr[idx] : 0;
      si  = (idx >= 0) ? xi[idx] : 0;
      yr += sr * hr[a] - si * hi[a];
      yi += sr * hi[a] + si * hr[a];
    end
  endfunction

  // Settings of one stage; a stage may switch to a second set of settings
  // from block 'switch_blk' on (reconfiguration between blocks)
  typedef struct {
    longint hr[];
    longint hi[];
    int     shift;
    longint gamma;
  } stage_cfg_t;

  // One whole stage over a stream of nblk blocks of 'lanes' samples:
  // filter, requantize, nonlinear step (if has_nl).  Returns the output
  // stream and, per block, whether any filter or nonlinear requantizer
  // clipped.  Counts the requantizer clips that occurred.
  int unsigned n_clip_fir, n_clip_nlq, n_clip_fac, n_clip_out;

  function automatic void ref_stage(
    input  longint xr[], input longint xi[], input int lanes, input int taps,
    input  stage_cfg_t c0, input stage_cfg_t c1, input int switch_blk, input bit has_nl,
    input  int sig_w, input int nlq_w, input int fac_w, input int nl_shift,
    output longint yr[], output longint yi[], output bit cf[], output bit cn[]);
    int nblk;
    nblk = xr.size() / lanes;
    yr = new[xr.size()];
    yi = new[xr.size()];
    cf = new[nblk];
    cn = new[nblk];
    for (int b = 0; b < nblk; b++) begin
      stage_cfg_t c;
      c = (b >= switch_blk) ? c1 : c0;
      cf[b] = 0;
      cn[b] = 0;
      for (int i = 0; i < lanes; i++) begin
        int n;
        longint ar, ai, qr, qi;
        bit k1, k2, k3;
        n = b * lanes + i;
        ref_fir(xr, xi, n, taps, c.hr, c.hi, ar, ai);
        qr = ref_rq(ar, c.shift, sig_w, k1);
        qi = ref_rq(ai, c.shift, sig_w, k2);
        if (k1 | k2) begin cf[b] = 1; n_clip_fir++; end
        if (has_nl) begin
          ref_nl(qr, qi, c.gamma, sig_w, nlq_w, fac_w, nl_shift, yr[n], yi[n], k1, k2, k3);
          if (k1) n_clip_nlq++;
          if (k2) n_clip_fac++;
          if (k3) n_clip_out++;
          if (k1 | k2 | k3) cn[b] = 1;
        end else begin
          yr[n] = qr;
          yi[n] = qi;
        end
      end
    end
  endfunction

endpackage
