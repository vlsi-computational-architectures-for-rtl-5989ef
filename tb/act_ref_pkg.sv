// act_ref_pkg: reference models used by the testbenches, written from the
// definitions of the transform rather than from the hardware structure.
//
// * act210_ref: 210*V_k of the null-mean ACT, straight from
//   S_k = (1/k) sum_{m<k} v(16m/k - 1/2) with the sample positions folded into
//   [-1/2, 15/2] by the even symmetry v(r) = v(15 - r), and
//   V_k = 2 sum_{l <= 7/k} mu(l) S_{kl}; all in exact integers (420*S_k).
// * mean_ref: sum of round(x_i * round(w_i 2^cf) / 2^cf), the bit-true mean.
// * interp / dct_ref: the interpolation v(r) = sum_n w_n(r) v_n with the
//   Dirichlet kernel, and the orthonormal DCT-II, in floating point.
package act_ref_pkg;

  // sample positions in port order, as numerator/denominator
  localparam int RNUM [10] = '{-1, 15, 29, 7, 27, 59, 13, 25, 57, 89};
  localparam int RDEN [10] = '{ 2,  2,  6, 2, 10, 10,  6, 14, 14, 14};

  function automatic real rpos(int i);
    return real'(RNUM[i]) / real'(RDEN[i]);
  endfunction

  function automatic int mobius(int n);
    case (n)
      1: return 1;  2: return -1; 3: return -1; 4: return 0;
      5: return -1; 6: return 1;  7: return -1;
      default: return 0;
    endcase
  endfunction

  // port index of the sample at r = num/den (after folding), -1 if none
  function automatic int find_r(longint num, longint den);
    for (int i = 0; i < 10; i++)
      if (num * RDEN[i] == longint'(RNUM[i]) * den) return i;
    return -1;
  endfunction

  // 420*S_k in integer units of the input LSB
  function automatic longint s420(longint x [10], int k);
    longint acc, num, den;
    int idx;
    acc = 0;
    for (int m = 0; m < k; m++) begin
      num = 32 * m - k;         // r = (32m - k) / (2k)
      den = 2 * k;
      if (num * 2 > 15 * den) num = 15 * den - num;   // fold r -> 15 - r
      idx = find_r(num, den);
      if (idx < 0) $fatal(1, "sample position not in the set");
      acc += x[idx];
    end
    return acc * (420 / k);
  endfunction

  // 210*V_k, k = 1..7
  function automatic longint act210_ref(longint x [10], int k);
    longint acc;
    acc = 0;
    for (int l = 1; l * k <= 7; l++) acc += mobius(l) * s420(x, k * l);
    return acc;
  endfunction

  // Mertens function M(n)
  function automatic int mertens(int n);
    int acc;
    acc = 0;
    for (int m = 1; m <= n; m++) acc += mobius(m);
    return acc;
  endfunction

  // mean weights w/8, in the order of the set R as published
  function automatic real wmean_r(int i);
    real w [10];
    w = '{0.131763492716950, 0.498388117552161, -0.313306526814540,
          0.018837637958148, 0.389746948996966, -0.178465262210960,
          0.166302458810496, 0.269801852271683, -0.131541981375149,
          0.148473262094246};
    return w[i];
  endfunction

  // the same weight for port index p: find p's position in R = {-1/2, 25/14, 13/6,
  // 27/10, 7/2, 57/14, 29/6, 59/10, 89/14, 15/2}
  function automatic real wmean_port(int p);
    int rn [10];
    int rd [10];
    rn = '{-1, 25, 13, 27, 7, 57, 29, 59, 89, 15};
    rd = '{ 2, 14,  6, 10, 2, 14,  6, 10, 14,  2};
    for (int i = 0; i < 10; i++)
      if (rn[i] == RNUM[p] && rd[i] == RDEN[p]) return wmean_r(i);
    return 0.0;
  endfunction

  function automatic longint qround(real c, int frac);
    real s;
    s = c * (2.0 ** frac);
    return (s >= 0.0) ? longint'($floor(s + 0.5)) : -longint'($floor(-s + 0.5));
  endfunction

  // floor(a / 2^sh) for signed a
  function automatic longint fdiv(longint a, int sh);
    longint d;
    d = longint'(1) << sh;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  // a / 2^sh rounded to nearest, ties towards plus infinity
  function automatic longint rdiv(longint a, int sh);
    return fdiv(a + (longint'(1) << (sh - 1)), sh);
  endfunction

  function automatic longint mean_ref(longint x [10], int cf);
    longint acc;
    acc = 0;
    for (int i = 0; i < 10; i++) acc += rdiv(x[i] * qround(wmean_port(i), cf), cf);
    return acc;
  endfunction

  // Dirichlet kernel D_n(x)
  function automatic real dirichlet(int n, real x);
    real s;
    s = $sin(x / 2.0);
    if (s < 1e-12 && s > -1e-12) return real'(2 * n + 1);
    return $sin((real'(n) + 0.5) * x) / s;
  endfunction

  localparam real PI = 3.14159265358979323846;

  // v(r) interpolated from the 8 uniform samples
  function automatic real interp(real v [8], real r);
    real acc;
    acc = 0.0;
    for (int n = 0; n < 8; n++)
      acc += v[n] * (dirichlet(7, PI / 8.0 * (real'(n) + r + 1.0))
                   + dirichlet(7, PI / 8.0 * (real'(n) - r))) / 16.0;
    return acc;
  endfunction

  // orthonormal DCT-II coefficient k
  function automatic real dct_ref(real v [8], int k);
    real acc;
    acc = 0.0;
    for (int n = 0; n < 8; n++)
      acc += v[n] * $cos(PI * real'(k) * (2.0 * real'(n) + 1.0) / 16.0);
    return acc * ((k == 0) ? $sqrt(1.0 / 8.0) : 0.5);
  endfunction

  // random real in [-a, a)
  function automatic real urand(real a);
    return a * (2.0 * (real'($urandom) / 4294967296.0) - 1.0);
  endfunction

endpackage
