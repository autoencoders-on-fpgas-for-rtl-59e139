// ae_ref_pkg -- bit-exact reference model of the encoder, for testbenches.
//
// Written with plain 64-bit integer arithmetic and explicit floor division, a
// different formulation from the RTL's shifted fixed-point expressions, so that
// a testbench compares the hardware with an independent calculation of the
// same number formats (truncation toward minus infinity, saturation).
package ae_ref_pkg;

  function automatic longint floor_div_pow2(longint v, int sh);
    longint d;
    d = longint'(1) << sh;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (longint'(1) << (w - 1)) - 1;
    lo = -(longint'(1) << (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // batch normalization: value x/2^in_frac * s/2^s_frac + b/2^out_frac, in out_frac
  function automatic longint ref_bn(longint x, longint s, longint b,
                                    int in_frac, int s_frac, int out_frac, int out_w);
    longint num;
    int     sh;
    sh  = in_frac + s_frac - out_frac;
    num = x * s + b * (longint'(1) << sh);
    return sat(floor_div_pow2(num, sh), out_w);
  endfunction

  function automatic longint ref_lrelu(longint x, longint alpha, int alpha_frac);
    if (x >= 0) return x;
    return floor_div_pow2(x * alpha, alpha_frac);
  endfunction

  // one output of a dense layer; x, b in activation format, w with w_frac bits
  function automatic longint ref_dense_dot(longint x[], longint w[], longint b,
                                           int w_frac, int out_w);
    longint s;
    s = b * (longint'(1) << w_frac);
    foreach (x[i]) s += x[i] * w[i];
    return sat(floor_div_pow2(s, w_frac), out_w);
  endfunction

  // exp(lv / 2^frac) with 2*frac fraction bits, saturated to exp_w bits
  function automatic longint ref_exp(longint lv, int frac, int exp_w);
    real r;
    r = $exp(real'(lv) / real'(longint'(1) << frac)) * real'(longint'(1) << (2 * frac));
    if (r >= real'((longint'(1) << exp_w) - 1)) return (longint'(1) << exp_w) - 1;
    return longint'($floor(r));
  endfunction

  // KL score with 2*frac fraction bits
  function automatic longint ref_kl(longint mu[], longint lv[], int frac, int exp_w, int score_w);
    longint tot, t, one;
    one = longint'(1) << (2 * frac);
    tot = 0;
    foreach (mu[i]) begin
      t = mu[i] * mu[i] + ref_exp(lv[i], frac, exp_w) - lv[i] * (longint'(1) << frac) - one;
      if (t < 0) t = 0;
      tot += t;
    end
    tot = tot / 2;
    if (tot > (longint'(1) << score_w) - 1) tot = (longint'(1) << score_w) - 1;
    return tot;
  endfunction

  function automatic longint s8(logic [7:0] b);
    return longint'($signed(b));
  endfunction

endpackage
