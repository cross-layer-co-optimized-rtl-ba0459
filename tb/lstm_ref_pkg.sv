// lstm_ref_pkg: bit-accurate reference model of the accelerator's
// arithmetic for the testbenches, written independently of the RTL with
// 64-bit integers.
//
// A fixed-point value is held as its integer mantissa. q() rounds a value
// half away from zero on the magnitude, dropping sh fractional bits, and
// clamps it to ow bits. Products are rounded to the operation format,
// sums are exact. Activation coefficients are derived here from the real
// polynomial coefficients as round(coef * 2^13). The network model runs
// the whole window: 20 cells over nsteps samples, FC1 with ReLU on the
// final cell states (or hidden states), FC2, and the MAX.
package lstm_ref_pkg;

  typedef longint sl;

  // configuration of one run
  typedef struct {
    int pb, pf, ob, of_;
    bit fc_from_h;
  } cfg_t;

  function automatic sl q(sl v, int sh, int ow);
    sl r, mx, mn;
    if (sh == 0) r = v;
    else if (v >= 0) r = (v + (sl'(1) << (sh - 1))) >>> sh;
    else r = -(((-v) + (sl'(1) << (sh - 1))) >>> sh);
    mx = (sl'(1) << (ow - 1)) - 1;
    mn = -(sl'(1) << (ow - 1));
    if (r > mx) r = mx;
    if (r < mn) r = mn;
    return r;
  endfunction

  function automatic sl mul(sl a, int af, sl b, int bf, int ow, int of_);
    return q(a * b, af + bf - of_, ow);
  endfunction

  function automatic sl coef(real c);
    if (c >= 0) return sl'($rtoi(c * 8192.0 + 0.5));
    else        return -sl'($rtoi(-c * 8192.0 + 0.5));
  endfunction

  // x: full-width value with of_ fractional bits; tanh_fn selects tanh
  function automatic sl act(sl x, bit tanh_fn, int ob, int of_);
    real a, b, c;
    sl one, xq, t1, s1, t2, y;
    one = sl'(1) << of_;
    if (!tanh_fn) begin
      if (x <= -6 * one) return 0;
      if (x > 6 * one) return one;
      if (x <= -3 * one)  begin a = 0.00642;  b = 0.07176; c = 0.20323; end
      else if (x <= 0)    begin a = 0.04059;  b = 0.27269; c = 0.50195; end
      else if (x <= 3*one) begin a = -0.04058; b = 0.27266; c = 0.49805; end
      else                begin a = -0.00642; b = 0.07175; c = 0.79675; end
    end else begin
      if (x <= -3 * one) return -one;
      if (x > 3 * one) return one;
      if (x <= -one)      begin a = 0.09007;  b = 0.46527; c = -0.39814; end
      else if (x <= 0)    begin a = 0.31592;  b = 1.08381; c = 0.00314;  end
      else if (x <= one)  begin a = -0.31676; b = 1.08538; c = -0.00349; end
      else                begin a = -0.09013; b = 0.46509; c = 0.39878;  end
    end
    xq = q(x, 0, ob);
    t1 = mul(coef(a), 13, xq, of_, ob, of_);
    s1 = t1 * (sl'(1) << (13 - of_)) + coef(b);
    t2 = mul(s1, 13, xq, of_, ob, of_);
    y  = t2 * (sl'(1) << (13 - of_)) + coef(c);
    return q(y, 13 - of_, ob);
  endfunction

  // dot product of word w (25 slots) with vec (20) and x (4, FxP(10,8))
  function automatic sl dot(input sl w[25], input sl vec[20], input sl x[4], bit lstm, cfg_t k);
    sl s;
    s = (lstm ? w[24] : w[20]) * (sl'(1) << (k.of_ - k.pf));
    for (int j = 0; j < 20; j++) s += mul(w[j], k.pf, vec[j], k.of_, k.ob, k.of_);
    if (lstm) for (int j = 0; j < 4; j++) s += mul(w[20+j], k.pf, x[j], 8, k.ob, k.of_);
    return s;
  endfunction

  // network state between samples
  typedef struct {
    sl c[20];
    sl h[20];
  } state_t;

  // one sample through all 20 cells; params P[102][25]
  function automatic void step(input sl P[102][25], input sl x[4], inout state_t st, input cfg_t k);
    sl hn[20], g[4], w[25], cs, th;
    for (int n = 0; n < 20; n++) begin
      for (int gi = 0; gi < 4; gi++) begin
        for (int j = 0; j < 25; j++) w[j] = P[4*n+gi][j];
        g[gi] = act(dot(w, st.h, x, 1'b1, k), gi == 2, k.ob, k.of_);
      end
      cs = mul(g[1], k.of_, st.c[n], k.of_, k.ob, k.of_) + mul(g[0], k.of_, g[2], k.of_, k.ob, k.of_);
      th = act(cs, 1'b1, k.ob, k.of_);
      hn[n] = mul(g[3], k.of_, th, k.of_, k.ob, k.of_);
      st.c[n] = q(cs, 0, k.ob);
    end
    st.h = hn;
  endfunction

  // FC1 + ReLU, FC2 and MAX; returns the class, fills the two outputs
  function automatic int classify(input sl P[102][25], input state_t st, input cfg_t k, output sl o0, output sl o1);
    sl v[20], f1[20], w[25], x0[4], o[2];
    x0 = '{default: 0};
    v = k.fc_from_h ? st.h : st.c;
    for (int j = 0; j < 20; j++) begin
      for (int i = 0; i < 25; i++) w[i] = P[80+j][i];
      f1[j] = q(dot(w, v, x0, 1'b0, k), 0, k.ob);
      if (f1[j] < 0) f1[j] = 0;
    end
    for (int j = 0; j < 2; j++) begin
      for (int i = 0; i < 25; i++) w[i] = P[100+j][i];
      o[j] = q(dot(w, f1, x0, 1'b0, k), 0, k.ob);
    end
    o0 = o[0];
    o1 = o[1];
    return (o[1] > o[0]) ? 1 : 0;
  endfunction

  // random parameter set: gate weights and FC weights within +-range
  // (in parameter LSBs); FC words use 21 slots, the rest are zero
  function automatic void rand_params(output sl P[102][25], input int pb, input int range);
    for (int a = 0; a < 102; a++)
      for (int j = 0; j < 25; j++) begin
        if (a >= 80 && j > 20) P[a][j] = 0;
        else P[a][j] = sl'($signed($urandom_range(2 * range, 0))) - sl'(range);
      end
  endfunction

endpackage
