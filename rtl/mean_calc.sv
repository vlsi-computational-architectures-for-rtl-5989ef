// mean_calc: the mean value of the signal, computed from its ten non-uniform
// samples only.
//
// The non-uniform samples are an interpolation v_r = W v of the eight uniform
// samples v; W has full column rank, so v = W+ v_r and the mean is
// vbar = (w/8) . v_r with w the column sums of the pseudo-inverse W+. This
// block is that dot product: ten constant multipliers (act_pkg::mean_weight,
// coefficients quantised to CF fractional bits) and a ten-input adder.
// The structure, the weights and the word-lengths (inputs and products L bits,
// sum L+1 bits, all with L-1 fractional bits) follow the architecture.
//
// Timing (own choice): registers at the inputs (points 36-45), at the
// products (46-55) and at the sum (56); latency 3 cycles, one vector per
// cycle. Ten independent full-scale inputs can drive the sum past the L+1 bit
// range (sum of |weights| is 2.25); samples of one signal bounded by 1 cannot.
module mean_calc
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
  output logic signed [L+DL_P56-1:0] vbar
);

  localparam int unsigned LATENCY = 3;

  typedef logic signed [L+DL_MIN-1:0] p_in_t;   // 36-55
  typedef logic signed [L+DL_P56-1:0] p56_t;    // 56

  // points 36-45
  p_in_t x [NR];
  always_ff @(posedge clk) x <= v_in;

  // points 46-55
  p_in_t prod [NR];
  p_in_t prod_q [NR];
  for (genvar i = 0; i < NR; i++) begin : g_mul
    frac_const_mult #(
      .COEF (mean_weight(i)),
      .CF   (CF),
      .WI   (L + DL_MIN),
      .WO   (L + DL_MIN)
    ) u_mul (
      .x (x[i]),
      .y (prod[i])
    );
  end
  always_ff @(posedge clk) prod_q <= prod;

  // point 56
  always_ff @(posedge clk) begin
    p56_t acc;
    acc = '0;
    for (int i = 0; i < NR; i++) acc = acc + p56_t'(prod_q[i]);
    vbar <= acc;
  end

  logic [LATENCY-1:0] vld;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  assign out_valid = vld[LATENCY-1];

endmodule
