// fa_pkg: shared types and elaboration-time math for the interval-split
// table-based function approximator.
//
// The hardware itself only needs constants (sub-interval bounds, spacings,
// reciprocals, BRAM base addresses, table contents). They are derived here at
// elaboration time from the partition P and the error bound E_a, following the
// rules of the reference/interval-splitting method:
//   spacing  delta_j = sqrt(8 * E_a / max |f''(x)|) over [p_j, p_j+1)
//   entries  K_j     = ceil((p_j+1 - p_j) / delta_j) + 1
// The spacing is rounded down to a whole number of input LSBs so that the
// error bound still holds on the fixed-point grid (a choice of this design).
// max |f''| is found by sampling the sub-interval at 4097 evenly spaced points
// including both ends; for the monotone f'' of log, exp and tan this is exact.
// None of these functions end up in logic: they are only called to build
// localparams.
package fa_pkg;

  // Benchmark functions of the evaluation. FN_SIGMOID is 1/(1+e^-x).
  typedef enum logic [2:0] {
    FN_LOG     = 3'd0,
    FN_EXP     = 3'd1,
    FN_TAN     = 3'd2,
    FN_TANH    = 3'd3,
    FN_SIGMOID = 3'd4,
    FN_GAUSS   = 3'd5
  } func_e;

  localparam int unsigned D2_SAMPLES = 4096;

  function automatic real fn_eval(func_e fn, real x);
    case (fn)
      FN_LOG:     return $ln(x);
      FN_EXP:     return $exp(x);
      FN_TAN:     return $tan(x);
      FN_TANH:    return $tanh(x);
      FN_SIGMOID: return 1.0 / (1.0 + $exp(-x));
      FN_GAUSS:   return $exp(-x * x / 2.0);
      default:    return 0.0;
    endcase
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // |f''(x)| of each benchmark function
  function automatic real fn_d2abs(func_e fn, real x);
    real t, s;
    case (fn)
      FN_LOG:     return 1.0 / (x * x);
      FN_EXP:     return $exp(x);
      FN_TAN: begin
        t = $tan(x);
        return fabs(2.0 * t * (1.0 + t * t));
      end
      FN_TANH: begin
        t = $tanh(x);
        return fabs(2.0 * t * (1.0 - t * t));
      end
      FN_SIGMOID: begin
        s = 1.0 / (1.0 + $exp(-x));
        return fabs(s * (1.0 - s) * (1.0 - 2.0 * s));
      end
      FN_GAUSS:   return fabs((x * x - 1.0) * $exp(-x * x / 2.0));
      default:    return 0.0;
    endcase
  endfunction

  function automatic real d2_max(func_e fn, real a, real b);
    real m, v;
    m = 0.0;
    for (int unsigned i = 0; i <= D2_SAMPLES; i++) begin
      v = fn_d2abs(fn, a + (b - a) * real'(i) / real'(D2_SAMPLES));
      if (v > m) m = v;
    end
    return m;
  endfunction

  // Largest spacing meeting E_a on [lo, hi), in input LSBs (at least 1).
  function automatic longint spacing_lsb(func_e fn, real ea, longint lo, longint hi,
                                         int frac_x);
    real scale, d, m;
    longint dl;
    scale = 2.0 ** frac_x;
    m = d2_max(fn, real'(lo) / scale, real'(hi) / scale);
    if (m <= 0.0) return hi - lo;
    d = $sqrt(8.0 * ea / m) * scale;
    dl = longint'($floor(d));
    if (dl < 1) dl = 1;
    if (dl > hi - lo) dl = hi - lo;
    return dl;
  endfunction

  // Number of stored breakpoints of a sub-interval (Eq. 12)
  function automatic longint entries(longint lo, longint hi, longint delta);
    return (hi - lo + delta - 1) / delta + 1;
  endfunction

  // ceil(2^inv_frac / delta): reciprocal of the spacing, rounded up so that
  // the address generator never lands one breakpoint too low.
  function automatic longint reciprocal(longint delta, int inv_frac);
    longint one;
    one = longint'(1) <<< inv_frac;
    return (one + delta - 1) / delta;
  endfunction

  // Round f(x) to the output format with saturation.
  function automatic longint quantize(real v, int w, int frac, bit sgn);
    real r, lim_hi, lim_lo;
    r = v * (2.0 ** frac);
    lim_hi = sgn ? (2.0 ** (w - 1)) - 1.0 : (2.0 ** w) - 1.0;
    lim_lo = sgn ? -(2.0 ** (w - 1)) : 0.0;
    r = $floor(r + 0.5);
    if (r > lim_hi) r = lim_hi;
    if (r < lim_lo) r = lim_lo;
    return longint'(r);
  endfunction

  // ---------------------------------------------------------------------
  // Per-sub-interval constant arrays. A partition has at most MAX_INT
  // sub-intervals (the evaluation goes up to 29); unused entries are 0.
  // ---------------------------------------------------------------------
  localparam int MAX_INT = 32;
  typedef longint seg_arr_t [MAX_INT+1];

  // Default configuration: log(x) on [0.625, 15.625), E_a = 9.5367e-7,
  // input (0,32,28), output (1,32,29), hierarchical segmentation into n = 4
  // sub-intervals P = {0.625, 1.405, 3.085, 6.85, 15.625} (bounds in input
  // LSBs, i.e. value * 2^28).
  localparam func_e  DEF_FUNC  = FN_LOG;
  localparam real    DEF_EA    = 9.5367e-7;
  localparam bit     DEF_S_X   = 1'b0;
  localparam int     DEF_W_X   = 32;
  localparam int     DEF_F_X   = 28;
  localparam bit     DEF_S_Y   = 1'b1;
  localparam int     DEF_W_Y   = 32;
  localparam int     DEF_F_Y   = 29;
  localparam int     DEF_N_INT = 4;
  localparam seg_arr_t DEF_BOUNDS = '{0: 64'd167772160, 1: 64'd377151816, 2: 64'd828123382,
                                      3: 64'd1838782874, 4: 64'd4194304000, default: 0};
  // 1/delta carries INV_FRAC fraction bits relative to one input LSB.
  localparam int     DEF_INV_FRAC = 48;
  // Fraction bits of the interpolation weight (x - x_i)/delta.
  localparam int     DEF_T_FRAC   = 24;

  function automatic seg_arr_t seg_spacing(func_e fn, real ea, seg_arr_t bounds, int n,
                                           int frac_x);
    seg_arr_t r = '{default: 0};
    for (int j = 0; j < n; j++) r[j] = spacing_lsb(fn, ea, bounds[j], bounds[j+1], frac_x);
    return r;
  endfunction

  function automatic seg_arr_t seg_inv(seg_arr_t delta, int n, int inv_frac);
    seg_arr_t r = '{default: 0};
    for (int j = 0; j < n; j++) r[j] = reciprocal(delta[j], inv_frac);
    return r;
  endfunction

  // BRAM base address of each sub-interval; entry n is the total footprint M_F.
  function automatic seg_arr_t seg_base(seg_arr_t bounds, seg_arr_t delta, int n);
    seg_arr_t r = '{default: 0};
    for (int j = 0; j < n; j++) r[j+1] = r[j] + entries(bounds[j], bounds[j+1], delta[j]);
    return r;
  endfunction

  // Largest local index i that may be used as the left breakpoint (K_j - 2),
  // so that i+1 still lies inside the sub-interval's part of the table.
  function automatic seg_arr_t seg_last(seg_arr_t bounds, seg_arr_t delta, int n);
    seg_arr_t r = '{default: 0};
    for (int j = 0; j < n; j++) r[j] = entries(bounds[j], bounds[j+1], delta[j]) - 2;
    return r;
  endfunction

  function automatic longint total_entries(seg_arr_t bounds, seg_arr_t delta, int n);
    longint t = 0;
    for (int j = 0; j < n; j++) t += entries(bounds[j], bounds[j+1], delta[j]);
    return t;
  endfunction

  function automatic int clog2_min1(longint v);
    int b = 1;
    while ((longint'(1) <<< b) < v) b++;
    return b;
  endfunction

  // Bits needed to hold 0..v
  function automatic int bits_for(longint v);
    int b = 1;
    while ((longint'(1) <<< b) <= v) b++;
    return b;
  endfunction

  function automatic longint arr_max(seg_arr_t a, int n);
    longint m = 0;
    for (int j = 0; j < n; j++) if (a[j] > m) m = a[j];
    return m;
  endfunction

endpackage
