// act_pkg: constants shared by the 8-point arithmetic cosine transform (ACT) datapath.
//
// The ACT computes the 8-point DCT from ten non-uniformly spaced samples v(r),
// r in {-1/2, 25/14, 13/6, 27/10, 7/2, 57/14, 29/6, 59/10, 89/14, 15/2}.
// Every port of the design carries those samples in the order in which the
// architecture diagram draws them (input points 1..10), given by sample_e.
//
// Word-lengths: a signal at a given point of the signal flow graph is
// L + DL_<point> bits wide with L-1 fractional bits everywhere; the DL_ values
// are the published word-length increases. Mean weights are the column sums of
// the pseudo-inverse of the interpolation matrix divided by 8 (published to 15
// digits), listed in port order. Nothing in this package is an own choice
// except the names and the helper function used to quantise constants.
package act_pkg;

  localparam int N  = 8;   // DCT length
  localparam int NR = 10;  // number of non-uniform samples
  localparam int NK = 7;   // number of AC coefficients V1..V7

  // Input order (points 1..10 of the null-mean ACT, 36..45 of the mean block).
  typedef enum int {
    R_M1_2   = 0,  // r = -1/2
    R_15_2   = 1,  // r = 15/2
    R_29_6   = 2,  // r = 29/6
    R_7_2    = 3,  // r = 7/2
    R_27_10  = 4,  // r = 27/10
    R_59_10  = 5,  // r = 59/10
    R_13_6   = 6,  // r = 13/6
    R_25_14  = 7,  // r = 25/14
    R_57_14  = 8,  // r = 57/14
    R_89_14  = 9   // r = 89/14
  } sample_e;

  // Word-length increase per quantization point, null-mean ACT (points 1-35).
  localparam int DL_IN   = 0;   // 1-10
  localparam int DL_X2   = 2;   // 11-18
  localparam int DL_SUM  = 3;   // 19-22, 24
  localparam int DL_P23  = 1;   // 23
  localparam int DL_P25  = 10;  // 25, 26, 31
  localparam int DL_P27  = 12;  // 27, 32, 34
  localparam int DL_P28  = 11;  // 28-30
  localparam int DL_P33  = 13;  // 33, 35
  // Mean block and Mertens correction (points 36-66).
  localparam int DL_MIN  = 0;   // 36-55
  localparam int DL_P56  = 1;   // 56
  localparam int DL_P57  = 13;  // 57, 59, 61, 62
  localparam int DL_P58  = 11;  // 58
  localparam int DL_P60  = 14;  // 60
  localparam int DL_P63  = 12;  // 63-66

  // Integer scale of the null-mean block: lcm(1..7) = 420, giving outputs 210*V_k.
  localparam int SCALE = 420;

  localparam real SQRT2 = 1.4142135623730951;

  // Mean weight (w/8) for the sample at port index i.
  function automatic real mean_weight(int i);
    case (i)
      R_M1_2:  return  0.131763492716950;
      R_15_2:  return  0.148473262094246;
      R_29_6:  return  0.166302458810496;
      R_7_2:   return  0.389746948996966;
      R_27_10: return  0.018837637958148;
      R_59_10: return  0.269801852271683;
      R_13_6:  return -0.313306526814540;
      R_25_14: return  0.498388117552161;
      R_57_14: return -0.178465262210960;
      R_89_14: return -0.131541981375149;
      default: return  0.0;
    endcase
  endfunction

  // Round a real constant to an integer multiple of 2^-frac (nearest, ties away from zero).
  function automatic longint quantize(real c, int frac);
    real s;
    s = c * (2.0 ** frac);
    if (s >= 0.0) return longint'($floor(s + 0.5));
    else          return -longint'($floor(-s + 0.5));
  endfunction

endpackage
