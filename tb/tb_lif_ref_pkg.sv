// tb_lif_ref_pkg: reference model of the LIF neuron used by the testbenches.
//
// Written independently of the RTL: the decay factors are computed with real
// arithmetic (beta ** dt) and the shifts with integer floor division, then the
// update equation U' = fire(sat(decay(U, dt) + W)) is applied step by step.
// Arguments mirror the neuron's configuration: decay kind (0 = multiplier,
// 1 = shifter), beta as BETA_Q / 2^frac, the shifter's n, threshold and
// reset kind (0 = zero, 1 = subtract). Widths are the neuron's defaults:
// 9-bit potential, 6-bit weights.
package tb_lif_ref_pkg;

  localparam int UMAX = 255;
  localparam int UMIN = -256;

  function automatic int floor_div_pow2(int u, int k);
    int d;
    d = 1 << k;
    if (u >= 0) return u / d;
    return -((-u + d - 1) / d);
  endfunction

  // coefficient of the multiplier variant, rounded to frac bits
  function automatic int ref_coef(int beta_q, int frac, int dt);
    real b;
    b = real'(beta_q) / real'(1 << frac);
    return int'($floor((b ** dt) * real'(1 << frac) + 0.5));
  endfunction

  // shift code of the shifter variant: {keep, sub, k} packed as keep*64+sub*16+k
  function automatic int ref_code(int shift_n, int dt);
    real v, c, err, best;
    int r;
    if (dt == 0) return 64;
    v = (1.0 - 1.0 / real'(1 << shift_n)) ** dt;
    best = 1.0e9;
    r = 16 + 1;
    for (int k = 1; k <= 15; k++) begin
      c = 1.0 - 1.0 / real'(1 << k);
      err = (v > c) ? v - c : c - v;
      if (err < best) begin best = err; r = 16 + k; end
      c = 1.0 / real'(1 << k);
      err = (v > c) ? v - c : c - v;
      if (err < best) begin best = err; r = k; end
    end
    return r;
  endfunction

  function automatic int ref_shift_apply(int u, int code);
    int k;
    k = code % 16;
    if (code >= 64) return u;
    if (code >= 16) return u - floor_div_pow2(u, k);
    return floor_div_pow2(u, k);
  endfunction

  function automatic int ref_decay(int u, int dt, int decay_kind,
                                   int beta_q, int frac, int shift_n);
    if (decay_kind == 0) return floor_div_pow2(u * ref_coef(beta_q, frac, dt), frac);
    return ref_shift_apply(u, ref_code(shift_n, dt));
  endfunction

  function automatic int ref_sat(int s);
    if (s > UMAX) return UMAX;
    if (s < UMIN) return UMIN;
    return s;
  endfunction

  // returns the potential after the firing check; spike through 'spk'
  function automatic int ref_fire(int u, int vth, int reset_kind, output bit spk);
    spk = (u > vth);
    if (!spk) return u;
    if (reset_kind == 1) return u - vth;
    return 0;
  endfunction

  function automatic int wrap9(int u);
    int v;
    v = u & 511;
    return (v > 255) ? v - 512 : v;
  endfunction

endpackage
