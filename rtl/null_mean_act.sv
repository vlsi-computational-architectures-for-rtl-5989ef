// null_mean_act: Architecture I, the 8-point arithmetic cosine transform for
// null-mean signals, computed exactly with additions and integer constants.
//
// The ACT averages are S_k = (1/k) * sum_{m<k} v(16m/k - 1/2); using the even
// symmetry of the sampled signal each needs only the ten samples of the input
// port, some of them twice (the factors 2 below). The DCT follows by Moebius
// inversion, V_k = 2 * sum_l mu(l) S_{kl}. To stay in integers the 1/k of S_k
// is replaced by 420/k (420 = lcm(1..7)), so every output is 210*V_k.
//
//   k*S_k  (points 19-24):  1*S1 = x1                     (no adder)
//                            2*S2 = x1 + x2                (23)
//                            3*S3 = x1 + 2x3               (24)
//                            4*S4 = x1 + x2 + 2x4          (19)
//                            5*S5 = x1 + 2x5 + 2x6         (20)
//                            6*S6 = x1 + x2 + 2x3 + 2x7    (21)
//                            7*S7 = x1 + 2x8 + 2x9 + 2x10  (22)
//   420*S_k (points 25-31):  constants 420, 210, 140, 105, 84, 70, 60
//   Moebius (points 32-35):  V1 = S1 + S6 - S2 - S3 - S5 - S7  (32, 33)
//                            V2 = S2 - S4 - S6                 (34)
//                            V3 = S3 - S6                      (35)
//                            V4..V7 = S4..S7
// where x1..x10 are the samples in port order (see act_pkg::sample_e) and
// the numbers in brackets are the quantization points of the published signal
// flow graph. The graph, the constants and the word-lengths L + Delta L of every
// point follow the architecture.
//
// Timing (this design's choice of register placement): registers at the
// input (1-10), at 19-24, at 25-31, at 32/34/35 and at 33; the x2 at 11-18 is
// wiring. Latency 5 cycles, a new vector every cycle. in_valid travels
// alongside and comes out as out_valid; only the valid bits are reset.
// Outputs are sign-extended to the widest output, L+13 bits, with L-1
// fractional bits.
module null_mean_act
  import act_pkg::*;
#(
  parameter int unsigned L = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [L-1:0]       v_in  [NR],
  output logic                      out_valid,
  output logic signed [L+DL_P33-1:0] v_out [NK]
);

  localparam int unsigned LATENCY = 5;

  typedef logic signed [L+DL_IN-1:0]  p_in_t;   // 1-10
  typedef logic signed [L+DL_X2-1:0]  p_x2_t;   // 11-18
  typedef logic signed [L+DL_SUM-1:0] p_sum_t;  // 19-22, 24
  typedef logic signed [L+DL_P23-1:0] p23_t;    // 23
  typedef logic signed [L+DL_P25-1:0] p25_t;    // 25, 26, 31
  typedef logic signed [L+DL_P27-1:0] p27_t;    // 27, 32, 34
  typedef logic signed [L+DL_P28-1:0] p28_t;    // 28-30
  typedef logic signed [L+DL_P33-1:0] p33_t;    // 33, 35, outputs

  // ---- stage 1: input registers (points 1-10) ----
  p_in_t x [NR];
  always_ff @(posedge clk) x <= v_in;

  // points 11-18: 2 * x3 .. 2 * x10 (shift, no register)
  p_x2_t x2 [NR];
  always_comb
    for (int i = 0; i < NR; i++) x2[i] = p_x2_t'(x[i]) <<< 1;

  // ---- stage 2: k*S_k (points 19-24) ----
  p_in_t  x1_d;
  p_sum_t p19, p20, p21, p22, p24;
  p23_t   p23;
  always_ff @(posedge clk) begin
    x1_d <= x[R_M1_2];
    p23  <= p23_t'(x[R_M1_2]) + p23_t'(x[R_15_2]);
    p24  <= p_sum_t'(x[R_M1_2]) + p_sum_t'(x2[R_29_6]);
    p19  <= p_sum_t'(x[R_M1_2]) + p_sum_t'(x[R_15_2]) + p_sum_t'(x2[R_7_2]);
    p20  <= p_sum_t'(x[R_M1_2]) + p_sum_t'(x2[R_27_10]) + p_sum_t'(x2[R_59_10]);
    p21  <= p_sum_t'(x[R_M1_2]) + p_sum_t'(x[R_15_2]) + p_sum_t'(x2[R_29_6])
          + p_sum_t'(x2[R_13_6]);
    p22  <= p_sum_t'(x[R_M1_2]) + p_sum_t'(x2[R_25_14]) + p_sum_t'(x2[R_57_14])
          + p_sum_t'(x2[R_89_14]);
  end

  // ---- stage 3: 420*S_k by shift-and-add constant multipliers (points 25-31) ----
  p25_t m25, m26, m31;
  p27_t m27;
  p28_t m28, m29, m30;
  shift_add_mult #(.K(420), .WI(L+DL_IN),  .WO(L+DL_P25)) u_m25 (.x(x1_d), .y(m25));
  shift_add_mult #(.K(210), .WI(L+DL_P23), .WO(L+DL_P25)) u_m26 (.x(p23),  .y(m26));
  shift_add_mult #(.K(140), .WI(L+DL_SUM), .WO(L+DL_P27)) u_m27 (.x(p24),  .y(m27));
  shift_add_mult #(.K(105), .WI(L+DL_SUM), .WO(L+DL_P28)) u_m28 (.x(p19),  .y(m28));
  shift_add_mult #(.K(84),  .WI(L+DL_SUM), .WO(L+DL_P28)) u_m29 (.x(p20),  .y(m29));
  shift_add_mult #(.K(70),  .WI(L+DL_SUM), .WO(L+DL_P28)) u_m30 (.x(p21),  .y(m30));
  shift_add_mult #(.K(60),  .WI(L+DL_SUM), .WO(L+DL_P25)) u_m31 (.x(p22),  .y(m31));

  p25_t s1, s2, s7;   // points 25, 26, 31
  p27_t s3;           // point 27
  p28_t s4, s5, s6;   // points 28, 29, 30
  always_ff @(posedge clk) begin
    s1 <= m25; s2 <= m26; s3 <= m27; s4 <= m28;
    s5 <= m29; s6 <= m30; s7 <= m31;
  end

  // ---- stage 4: first Moebius adders (points 32, 34, 35) ----
  p27_t p32, p34;
  p33_t p35;
  p25_t s2_d, s7_d;
  p27_t s3_d;
  p28_t s4_d, s5_d, s6_d;
  always_ff @(posedge clk) begin
    p32 <= p27_t'(s1) + p27_t'(s6);
    p34 <= p27_t'(s2) - p27_t'(s4) - p27_t'(s6);
    p35 <= p33_t'(s3) - p33_t'(s6);
    s2_d <= s2; s3_d <= s3; s4_d <= s4; s5_d <= s5; s6_d <= s6; s7_d <= s7;
  end

  // ---- stage 5: V1 (point 33) and output registers ----
  p33_t v1_q, v2_q, v3_q, v4_q, v5_q, v6_q, v7_q;
  always_ff @(posedge clk) begin
    v1_q <= p33_t'(p32) - p33_t'(s2_d) - p33_t'(s3_d) - p33_t'(s5_d) - p33_t'(s7_d);
    v2_q <= p33_t'(p34);
    v3_q <= p35;
    v4_q <= p33_t'(s4_d);
    v5_q <= p33_t'(s5_d);
    v6_q <= p33_t'(s6_d);
    v7_q <= p33_t'(s7_d);
  end

  assign v_out[0] = v1_q;
  assign v_out[1] = v2_q;
  assign v_out[2] = v3_q;
  assign v_out[3] = v4_q;
  assign v_out[4] = v5_q;
  assign v_out[5] = v6_q;
  assign v_out[6] = v7_q;

  // ---- valid pipeline ----
  logic [LATENCY-1:0] vld;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  assign out_valid = vld[LATENCY-1];

endmodule
