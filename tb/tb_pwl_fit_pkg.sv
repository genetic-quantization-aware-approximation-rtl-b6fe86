// tb_pwl_fit_pkg: test-side helpers for the pwl unit.
//
// - fref(): the exact non-linear functions (GELU in its tanh form, HSWISH,
//   EXP, reciprocal, reciprocal square root).
// - fit(): fills an N-entry table by chords between uniformly spaced
//   breakpoints over [lo, hi]: k_i = (f(e1)-f(e0))/(e1-e0), b_i = f(e0)-k_i*e0,
//   both rounded to LAMBDA fraction bits and saturated to 8 bits; breakpoints
//   are quantized to the input grid, round(clip(p / S)) with S = 2^-s.
//   (Uniform chords stand in for the offline genetic search, whose output is
//   only a set of table contents.)
// - ref_core(): integer reference of the core, written directly from the
//   segment definition rather than from the RTL structure.
package tb_pwl_fit_pkg;

  typedef enum int {F_GELU, F_HSWISH, F_EXP, F_DIV, F_RSQRT} func_e;

  localparam int N      = 8;   // default number of entries
  localparam int NMAX   = 16;  // largest table the helpers handle
  localparam int LAMBDA = 5;

  // entries 0..n-1 of k and b, 0..n-2 of p are used
  typedef struct {
    int k [NMAX];
    int b [NMAX];
    int p [NMAX-1];
  } table_t;

  function automatic real fref(func_e f, real x);
    real r;
    case (f)
      F_GELU:   r = 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
      F_HSWISH: begin
        real t = x + 3.0;
        if (t < 0.0) t = 0.0;
        if (t > 6.0) t = 6.0;
        r = x * t / 6.0;
      end
      F_EXP:    r = $exp(x);
      F_DIV:    r = 1.0 / x;
      default:  r = 1.0 / $sqrt(x);
    endcase
    return r;
  endfunction

  function automatic int rnd_sat(real v, int lo, int hi);
    int r = int'($floor(v + 0.5));
    if (r < lo) r = lo;
    if (r > hi) r = hi;
    return r;
  endfunction

  // s: input scale exponent (S = 2^-s); the wide modes use s = LAMBDA.
  // n: number of entries (n-1 breakpoints).
  function automatic table_t fit(func_e f, real lo, real hi, int s, int n = N);
    table_t t;
    real e0, e1, k, b, step, sc;
    for (int i = 0; i < NMAX; i++) begin t.k[i] = 0; t.b[i] = 0; end
    for (int i = 0; i < NMAX - 1; i++) t.p[i] = 0;
    step = (hi - lo) / n;
    sc   = 2.0 ** s;
    for (int i = 0; i < n; i++) begin
      e0 = lo + i * step;
      e1 = lo + (i + 1) * step;
      k  = (fref(f, e1) - fref(f, e0)) / (e1 - e0);
      b  = fref(f, e0) - k * e0;
      t.k[i] = rnd_sat(k * (2.0 ** LAMBDA), -128, 127);
      t.b[i] = rnd_sat(b * (2.0 ** LAMBDA), -128, 127);
      if (i < n - 1) t.p[i] = rnd_sat(e1 * sc, -128, 127);
    end
    return t;
  endfunction

  function automatic int ref_seg(table_t t, int q, int n = N);
    for (int i = 0; i < n - 1; i++) if (q < t.p[i]) return i;
    return n - 1;
  endfunction

  function automatic int ref_core(table_t t, int q, int s, int n = N);
    int i = ref_seg(t, q, n);
    return t.k[i] * q + t.b[i] * (2 ** s);
  endfunction

  // Reference of the wide (DIV / RSQRT) path, written from the published
  // sub-range table: sub-range, scale shift, rounding and clipping of the
  // scaled input, segment equation with an intercept shift of LAMBDA, and
  // the output shift that leaves 16 fraction bits.
  typedef struct {
    int y;        // expected output, 16 fraction bits
    int seg;      // expected segment
    int rng;      // expected sub-range 0..3
    bit clipped;  // scaled input was clipped to 127
  } wide_ref_t;

  function automatic wide_ref_t ref_wide(table_t t, func_e f, int xv, int n = N);
    wide_ref_t r;
    real x = real'(xv) / 32.0;
    int sh, qq, post;
    if (f == F_DIV) begin
      if (x >= 256.0)     begin r.rng = 3; sh = 6;  end
      else if (x >= 32.0) begin r.rng = 2; sh = 6;  end
      else if (x >= 4.0)  begin r.rng = 1; sh = 3;  end
      else                begin r.rng = 0; sh = 0;  end
      post = sh;
    end else begin
      if (x >= 1024.0)    begin r.rng = 3; sh = 12; end
      else if (x >= 64.0) begin r.rng = 2; sh = 8;  end
      else if (x >= 4.0)  begin r.rng = 1; sh = 4;  end
      else                begin r.rng = 0; sh = 0;  end
      post = sh / 2;
    end
    qq = int'($floor(real'(xv) / (2.0 ** sh) + 0.5));
    r.clipped = (qq > 127);
    if (r.clipped) qq = 127;
    r.seg = ref_seg(t, qq, n);
    r.y   = ref_core(t, qq, LAMBDA, n) * (2 ** (6 - post));
    return r;
  endfunction

endpackage
