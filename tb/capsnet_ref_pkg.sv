// Reference models for the testbenches of the approximate softmax and squash
// units. They are written with real arithmetic ($floor, $sqrt, ** on reals)
// from the formulas of each unit, not from the RTL's shifts and tables, and
// return the integer codes the RTL must produce. exact_* give the exact
// functions, used to bound the approximation error.
package capsnet_ref_pkg;

  // floor( (1+v) * 2^u * 2^of ),  a = u + v,  u integer, v in [0,1); a > 0 -> 1.0
  function automatic int pow2_ref(real a, int of);
    real u, v, r;
    if (a > 0.0) return 1 << of;
    u = $floor(a);
    v = a - u;
    r = (1.0 + v) * (2.0 ** u) * (2.0 ** of);
    return int'($floor(r));
  endfunction

  // log2 F ~ w + (k-1), F = f / 2^in_frac, result code with out_frac bits (k-1 truncated)
  function automatic int log2_ref(longint f, int in_frac, int of);
    int w;
    real val, k;
    w = -in_frac;
    while ((f >> (w + in_frac + 1)) != 0) w++;
    val = real'(f) / (2.0 ** in_frac);
    k = val / (2.0 ** w);
    return w * (1 << of) + int'($floor((k - 1.0) * (2.0 ** of)));
  endfunction

  // e^a with a = a_code / 2^5 (<= 0): scale by 369/256, floor to 5 fraction bits, pow2
  function automatic int exp_ref(int a_code);
    real t;
    t = $floor(real'(a_code) * 369.0 / 256.0);
    return pow2_ref(t / 32.0, 8);
  endfunction

  // two-range square-root table: S in [0,4) step 1/32, [4,64) step 1/2, else saturate
  function automatic int sqrt_ref(longint s);
    real sv, centre;
    int r;
    sv = real'(s) / 1024.0;
    if (sv < 4.0)       centre = ($floor(sv * 32.0) + 0.5) / 32.0;
    else if (sv < 64.0) centre = ($floor(sv * 2.0) + 0.5) / 2.0;
    else return 255;
    r = int'($floor($sqrt(centre) * 32.0 + 0.5));
    return (r > 255) ? 255 : r;
  endfunction

  function automatic int coef_lut_ref(int n_code, int thr);
    real n;
    if (n_code < thr) return 0;
    n = real'(n_code) / 32.0;
    return int'($floor(256.0 * n / (1.0 + n * n) + 0.5));
  endfunction

  // squashing coefficient, pow2 = 0 for squash-exp, 1 for squash-pow2
  function automatic int coef_ref(int n_code, bit pow2);
    int thr, e, c;
    thr = pow2 ? 32 : 24;
    if (n_code >= thr) return coef_lut_ref(n_code, thr);
    e = pow2 ? pow2_ref(-real'(n_code) / 32.0, 8) : exp_ref(-n_code);
    c = 256 - e;
    return (c > 255) ? 255 : c;
  endfunction

  // y = sat8( floor( x * coef / 2^6 ) )   (Q3.5 * Q0.8 -> Q1.7)
  function automatic int squash_y_ref(int x, int coef);
    int p;
    p = int'($floor(real'(x) * real'(coef) / 64.0));
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return p;
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real exact_coef(real n);
    return n / (1.0 + n * n);
  endfunction

endpackage
