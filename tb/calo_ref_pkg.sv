// calo_ref_pkg: reference arithmetic for the decoder testbenches.
//
// A second, independent model of the fixed-point rules, written with real
// numbers instead of shifts and masks: rq() rounds a real to a <w, w-f> word
// (nearest, ties to even, saturating) and returns its raw integer; rv() turns a
// raw integer back into a real. All values involved stay below 2^53, where a
// double is exact, so the reference is bit exact. On top of these sit models of
// one element of each layer type: dense layer, batch norm, leaky ReLU,
// softmax with its exp / reciprocal tables and sigmoid with its table.
package calo_ref_pkg;

  typedef longint raw_q[$];

  function automatic real p2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real rv(longint raw, int f);
    return real'(raw) * p2(-f);
  endfunction

  // round x to f fractional bits in a signed w-bit word; w = 0: no saturation
  function automatic longint rq(real x, int w, int f);
    real y, fl, fr, mx;
    longint q;
    y  = x * p2(f);
    fl = $floor(y);
    fr = y - fl;
    q  = longint'(fl);
    if (fr > 0.5) q = q + 1;
    else if (fr == 0.5 && (q % 2 != 0)) q = q + 1;
    if (w > 0) begin
      mx = p2(w - 1);
      if (real'(q) > mx - 1.0) q = longint'(mx - 1.0);
      if (real'(q) < -mx)      q = longint'(-mx);
    end
    return q;
  endfunction

  // dense: y_j = sum_k x_k w_kj + b_j, with product format (mw, mf; mw = 0
  // keeps the exact product), accumulator (aw, af) and result (rw, rf)
  function automatic raw_q dense(raw_q x, int xf, raw_q w, int n_out, int wf,
                                 raw_q b, int bf, int mw, int mf,
                                 int aw, int af, int rw, int rf);
    raw_q y;
    for (int j = 0; j < n_out; j++) begin
      real acc;
      acc = rv(rq(rv(b[j], bf), aw, af), af);
      for (int k = 0; k < x.size(); k++) begin
        real p;
        p = rv(x[k], xf) * rv(w[k * n_out + j], wf);
        if (mw > 0) p = rv(rq(p, mw, mf), mf);
        acc = rv(rq(acc + p, aw, af), af);
      end
      y.push_back(rq(acc, rw, rf));
    end
    return y;
  endfunction

  function automatic longint bn(longint x, longint scale, longint bias);
    real p;
    p = rv(rq(rv(x, 10) * rv(scale, 12), 18, 10), 10);
    return rq(p + rv(bias, 12), 16, 10);
  endfunction

  function automatic longint lrelu(longint x, longint alpha);
    if (x >= 0) return x;
    return rq(rv(x, 10) * rv(alpha, 6), 16, 10);
  endfunction

  function automatic raw_q softmax(raw_q x);
    raw_q y, e;
    longint mx;
    real sum, inv, s18;
    mx = x[0];
    foreach (x[i]) if (x[i] > mx) mx = x[i];
    sum = 0.0;
    foreach (x[i]) begin
      real d, dq;
      d  = rv(rq(rv(x[i] - mx, 10), 16, 10), 10);
      dq = $floor(d * 16.0) / 16.0;                 // top ten bits of <16,6>
      e.push_back(rq($exp(dq), 18, 10));
      sum = rv(rq(sum + rv(e[i], 10), 20, 12), 12);
    end
    s18 = rv(rq(sum, 18, 10), 10);
    s18 = $floor(s18 * 4.0) / 4.0;                  // top ten bits of <18,8>
    inv = (s18 == 0.0) ? rv(131071, 10) : rv(rq(1.0 / s18, 18, 10), 10);
    foreach (x[i]) y.push_back(rq(rv(e[i], 10) * inv, 16, 10));
    return y;
  endfunction

  function automatic longint sigmoid(longint x, int xf);
    real a;
    a = $floor(rv(x, xf) * 64.0) + 512.0;
    if (a < 0.0)    a = 0.0;
    if (a > 1023.0) a = 1023.0;
    return rq(1.0 / (1.0 + $exp(-(a - 512.0) / 64.0)), 18, 10);
  endfunction

endpackage
