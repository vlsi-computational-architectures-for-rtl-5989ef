// act_arch2: Architecture II, the 8-point DCT of an arbitrary signal from its
// ten non-uniform samples (arithmetic cosine transform with mean correction).
//
// The ten samples feed two blocks side by side: the null-mean ACT
// (null_mean_act), which gives 210*V_k as if the mean were zero, and the mean
// calculation block (mean_calc), which gives vbar. vbar is scaled by 420 with
// a shift-and-add multiplier (point 58); the Mertens correction block adds the
// mean's contribution to V1..V7, and V0 = sqrt(8)*vbar appears scaled by 210 as
// sqrt(2)*420*vbar (point 57). The block diagram, the constants 420 and
// sqrt(2), and the word-lengths follow the architecture; the register
// placement and the valid signal are this design's own.
//
// Interface: v_in[0..9] are L-bit samples with L-1 fractional bits in the
// order of act_pkg::sample_e; outputs keep L-1 fractional bits: v0 is
// 210*V_0 (L+13 bits), v_out[k-1] is 210*V_k (L+14 bits).
// Timing: one vector per cycle, out_valid follows in_valid after 6 cycles
// (mean 3 + x420 register 1 + alignment 1, null-mean ACT 5, Mertens 1).
// Two assertions check that the mean path and the null-mean path stay in step
// and that out_valid follows in_valid by 6 cycles; they are disabled while
// rst_n is low, so rst_n is read both as the asynchronous reset of the valid
// bits and synchronously by the assertions, which lint reports and which is
// intended.
module act_arch2
  import act_pkg::*;
#(
  parameter int unsigned L  = 12,
  parameter int unsigned CF = L - 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [L-1:0]        v_in [NR],
  output logic                       out_valid,
  output logic signed [L+DL_P57-1:0] v0,
  output logic signed [L+DL_P60-1:0] v_out [NK]
);

  localparam int unsigned LATENCY = 6;

  // ---- mean value (points 36-56) ----
  logic                       mean_valid;
  logic signed [L+DL_P56-1:0] vbar;
  mean_calc #(.L(L), .CF(CF)) u_mean (
    .clk, .rst_n, .in_valid,
    .v_in,
    .out_valid (mean_valid),
    .vbar
  );

  // ---- 420 * vbar (point 58) ----
  logic signed [L+DL_P58-1:0] vbar420_c, p58, p58_d;
  shift_add_mult #(.K(SCALE), .WI(L+DL_P56), .WO(L+DL_P58)) u_m58 (.x(vbar), .y(vbar420_c));
  always_ff @(posedge clk) p58 <= vbar420_c;

  // ---- V0 = sqrt(2) * 420 * vbar (point 57) ----
  logic signed [L+DL_P57-1:0] v0_c, p57;
  frac_const_mult #(.COEF(SQRT2), .CF(CF), .WI(L+DL_P58), .WO(L+DL_P57)) u_m57 (
    .x (p58), .y (v0_c)
  );
  always_ff @(posedge clk) p57 <= v0_c;

  // align 58 with the null-mean outputs and 57 with the Mertens outputs
  delay_line #(.WIDTH(L+DL_P58), .DEPTH(1)) u_d58 (.clk, .d(p58), .q(p58_d));
  delay_line #(.WIDTH(L+DL_P57), .DEPTH(1)) u_d57 (.clk, .d(p57), .q(v0));

  // ---- null-mean ACT (points 1-35) ----
  logic                       act_valid;
  logic signed [L+DL_P33-1:0] v_nm [NK];
  null_mean_act #(.L(L)) u_act (
    .clk, .rst_n, .in_valid,
    .v_in,
    .out_valid (act_valid),
    .v_out     (v_nm)
  );

  // ---- Mertens correction (points 58-66) ----
  mertens_correction #(.L(L)) u_mert (
    .clk, .rst_n,
    .in_valid  (act_valid),
    .v_in      (v_nm),
    .vbar420   (p58_d),
    .out_valid,
    .v_out
  );

  // The mean path reaches the Mertens block in step with the null-mean ACT.
  logic [1:0] mean_vld_d;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mean_vld_d <= '0;
    else        mean_vld_d <= {mean_vld_d[0], mean_valid};

  a_mean_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                   mean_vld_d[1] == act_valid)
    else $error("mean and null-mean paths out of step");

  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              out_valid == $past(in_valid, LATENCY))
    else $error("out_valid does not follow in_valid by LATENCY cycles");

endmodule
