// tb_oselm_ref_pkg: bit-exact software model of the core's arithmetic and
// of its two operations, used by the testbenches as the expected values.
//
// The model is written from the algorithm, not from the RTL: Q20 words,
// products truncated toward minus infinity after a 20-bit arithmetic right
// shift, sums and products saturated to 32 bits, quotients truncated in
// magnitude. predict() and train() perform the same operations in the same
// order as the hardware sequencers are specified to (hidden node by hidden
// node, inputs in order), so results must match bit for bit. A real-valued
// helper converts words for tolerance checks against floating point.
package tb_oselm_ref_pkg;
  import oselm_pkg::*;

  function automatic fx_t r_mul(input fx_t a, input fx_t b);
    longint p;
    p = longint'(a) * longint'(b);
    p = p >>> FRAC;
    if (p > longint'(FX_MAX)) return FX_MAX;
    if (p < longint'(FX_MIN)) return FX_MIN;
    return fx_t'(p);
  endfunction

  function automatic fx_t r_add(input fx_t a, input fx_t b, input bit sub = 0);
    longint s;
    s = sub ? longint'(a) - longint'(b) : longint'(a) + longint'(b);
    if (s > longint'(FX_MAX)) return FX_MAX;
    if (s < longint'(FX_MIN)) return FX_MIN;
    return fx_t'(s);
  endfunction

  function automatic fx_t r_div(input fx_t n, input fx_t d);
    longint un, ud, uq, q;
    bit neg;
    neg = (n < 0) ^ (d < 0);
    if (d == 0) return (n < 0) ? FX_MIN : FX_MAX;
    un = (n < 0) ? -longint'(n) : longint'(n);
    ud = (d < 0) ? -longint'(d) : longint'(d);
    uq = (un <<< FRAC) / ud;
    q  = neg ? -uq : uq;
    if (q > longint'(FX_MAX)) return FX_MAX;
    if (q < longint'(FX_MIN)) return FX_MIN;
    return fx_t'(q);
  endfunction

  function automatic fx_t r_relu(input fx_t v);
    return (v < 0) ? 0 : v;
  endfunction

  function automatic fx_t r_clip1(input fx_t v);
    if (v > FX_ONE) return FX_ONE;
    if (v < -FX_ONE) return -FX_ONE;
    return v;
  endfunction

  // -0.5 + k / (n_act - 1), in Q20
  function automatic fx_t r_act(input int k, input int n_act);
    return fx_t'(-(1 <<< (FRAC - 1)) + k * ((1 <<< FRAC) / (n_act - 1)));
  endfunction

  function automatic fx_t to_fx(input real v);
    real s;
    s = v * real'(1 <<< FRAC);
    if (s >= 2147483647.0)  return FX_MAX;
    if (s <= -2147483648.0) return FX_MIN;
    return fx_t'($rtoi(s));
  endfunction

  function automatic real to_real(input fx_t v);
    return real'(v) / real'(1 <<< FRAC);
  endfunction

  // Hidden row h = ReLU([s, act(k)] alpha + b)
  function automatic void hidden(input fx_t s[], input int k, input int n_act,
                                 input fx_t alpha[], input fx_t bias[], input int n_hid,
                                 ref fx_t h[]);
    int n_in;
    fx_t x[];
    fx_t acc;
    n_in = s.size() + 1;
    x = new[n_in];
    for (int i = 0; i < n_in - 1; i++) x[i] = s[i];
    x[n_in-1] = r_act(k, n_act);
    h = new[n_hid];
    for (int j = 0; j < n_hid; j++) begin
      acc = bias[j];
      for (int i = 0; i < n_in; i++) acc = r_add(acc, r_mul(x[i], alpha[i*n_hid + j]));
      h[j] = r_relu(acc);
    end
  endfunction

  function automatic fx_t predict1(input fx_t s[], input int k, input int n_act,
                                   input fx_t alpha[], input fx_t bias[], input fx_t beta[],
                                   input int n_hid);
    fx_t h[];
    fx_t q;
    hidden(s, k, n_act, alpha, bias, n_hid, h);
    q = 0;
    for (int j = 0; j < n_hid; j++) q = r_add(q, r_mul(h[j], beta[j]));
    return q;
  endfunction

  // One sequential OS-ELM step; updates beta and p in place, returns the
  // clipped teacher value.
  function automatic fx_t train(input fx_t s[], input int a, input int n_act,
                                input fx_t r, input bit d, input fx_t maxq, input fx_t gamma,
                                input fx_t alpha[], input fx_t bias[], ref fx_t beta[],
                                ref fx_t p[], input int n_hid);
    fx_t t, y, err, sacc, rinv, w;
    fx_t h[];
    fx_t u[];
    t = d ? r : r_add(r, r_mul(gamma, maxq));
    t = r_clip1(t);
    hidden(s, a, n_act, alpha, bias, n_hid, h);
    y = 0;
    for (int j = 0; j < n_hid; j++) y = r_add(y, r_mul(h[j], beta[j]));
    err = r_add(t, y, 1);
    u = new[n_hid];
    sacc = FX_ONE;
    for (int i = 0; i < n_hid; i++) begin
      u[i] = 0;
      for (int j = 0; j < n_hid; j++) u[i] = r_add(u[i], r_mul(p[i*n_hid + j], h[j]));
      sacc = r_add(sacc, r_mul(h[i], u[i]));
    end
    rinv = r_div(FX_ONE, sacc);
    for (int i = 0; i < n_hid; i++) begin
      w = r_mul(u[i], rinv);
      beta[i] = r_add(beta[i], r_mul(w, err));
      for (int j = 0; j < n_hid; j++) p[i*n_hid + j] = r_add(p[i*n_hid + j], r_mul(w, u[j]), 1);
    end
    return t;
  endfunction
endpackage
