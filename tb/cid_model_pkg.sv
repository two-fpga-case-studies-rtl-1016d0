// cid_model_pkg -- reference model of the crystal identification chain and
// a pulse generator, for the testbenches.
//
// cid_ref() computes, from one raw 36-word event, what the four hardware
// stages must produce: baseline = floor(mean of the first BL_N words),
// corrected words, largest corrected word with its neighbours, parabolic
// amplitude, normalised words sat((x*floor(2**30/amp)) >>> 16) and the
// interpolated half-height crossing time.  It is written directly from those
// formulas, independently of the RTL.  make_pulse() builds a raw event: a
// baseline level with noise and a fast-rise, exponential-decay pulse of a
// given height starting at a given fractional sample position.
package cid_model_pkg;
  import cid_pkg::*;

  typedef int frame_t [N_SAMPLES];

  typedef struct {
    int baseline, peak_idx, amplitude, crossed, t_half;
  } ref_res_t;

  function automatic void make_pulse(output frame_t raw, input int level, input int height,
                                     input real t0, input int noise);
    real t, v;
    for (int i = 0; i < N_SAMPLES; i++) begin
      t = real'(i) - t0;
      v = (t <= 0.0) ? 0.0 : real'(height) * (1.0 - $exp(-t / 1.2)) * $exp(-t / 9.0) / 0.75;
      raw[i] = level + int'(v) + ((noise > 0) ? int'($urandom_range(0, 2 * noise)) - noise : 0);
      if (raw[i] < 0) raw[i] = 0;
      if (raw[i] > 65535) raw[i] = 65535;
    end
  endfunction

  function automatic void cid_ref(input frame_t raw, output ref_res_t r, output frame_t nrm);
    frame_t c;
    int sum, mi, ym, yp, a, b, amp, half, ci;
    longint rc, p;
    sum = 0;
    for (int i = 0; i < BL_N; i++) sum += raw[i];
    r.baseline = sum / BL_N;
    for (int i = 0; i < N_SAMPLES; i++) c[i] = raw[i] - r.baseline;
    mi = 0;
    for (int i = 1; i < N_SAMPLES; i++) if (c[i] > c[mi]) mi = i;
    ym = (mi == 0) ? c[mi] : c[mi - 1];
    yp = (mi == N_SAMPLES - 1) ? c[mi] : c[mi + 1];
    a = c[mi] - ym;
    b = c[mi] - yp;
    if (c[mi] <= 0) amp = 0;
    else if (a + b == 0) amp = c[mi];
    else amp = c[mi] + int'((longint'(a - b) * longint'(a - b)) / (longint'(8) * longint'(a + b)));
    r.peak_idx  = mi;
    r.amplitude = amp;
    rc = (longint'(1) << (NORM_FRAC + 16)) / longint'((amp == 0) ? 1 : amp);
    for (int i = 0; i < N_SAMPLES; i++) begin
      p = (longint'(c[i]) * rc) >>> 16;
      if (p > 131071) p = 131071;
      if (p < -131072) p = -131072;
      nrm[i] = int'(p);
    end
    half = 1 << (NORM_FRAC - 1);
    ci = -1;
    for (int i = 0; i < N_SAMPLES; i++) if (nrm[i] >= half) begin ci = i; break; end
    r.crossed = (ci >= 0);
    if (ci <= 0) r.t_half = 0;
    else r.t_half = (ci - 1) * (1 << PH_FRAC) + ((half - nrm[ci-1]) * (1 << PH_FRAC)) / (nrm[ci] - nrm[ci-1]);
  endfunction
endpackage
