// mertens_correction: turns the null-mean ACT outputs into the DCT of a
// signal with non-zero mean.
//
// For a signal with mean vbar the ACT sum picks up an error proportional to
// the Mertens function M(n) = mu(1)+...+mu(n): V_k = ACT_k - 2 vbar M(floor(7/k)).
// With M(7) = -2, M(3) = -1, M(2) = 0 and M(1) = 1, and everything scaled by
// 210, the correction is +840 vbar for V1, +420 vbar for V2, none for V3 and
// -420 vbar for V4..V7. The input vbar420 (point 58) is already 420*vbar;
// 840*vbar (point 59) is a left shift. The connections and the word-lengths
// (58: L+11, 59/61/62: L+13, 60: L+14, 63-66: L+12) follow the architecture.
//
// Timing: v_in and vbar420 must be aligned; results are registered (points
// 60-66), latency 1 cycle. Outputs are sign-extended to L+14 bits.
module mertens_correction
  import act_pkg::*;
#(
  parameter int unsigned L = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [L+DL_P33-1:0] v_in [NK],
  input  logic signed [L+DL_P58-1:0] vbar420,
  output logic                       out_valid,
  output logic signed [L+DL_P60-1:0] v_out [NK]
);

  typedef logic signed [L+DL_P57-1:0] p59_t;   // 59, 61, 62
  typedef logic signed [L+DL_P60-1:0] p60_t;   // 60
  typedef logic signed [L+DL_P63-1:0] p63_t;   // 63-66

  p59_t p59;
  assign p59 = p59_t'(vbar420) <<< 1;

  p60_t p60;
  p59_t p61, p62;
  p63_t p63 [4];
  always_ff @(posedge clk) begin
    p60 <= p60_t'(v_in[0]) + p60_t'(p59);
    p61 <= p59_t'(v_in[1]) + p59_t'(vbar420);
    p62 <= p59_t'(v_in[2]);
    for (int k = 0; k < 4; k++) p63[k] <= p63_t'(v_in[3+k]) - p63_t'(vbar420);
  end

  assign v_out[0] = p60;
  assign v_out[1] = p60_t'(p61);
  assign v_out[2] = p60_t'(p62);
  for (genvar k = 0; k < 4; k++) begin : g_out
    assign v_out[3+k] = p60_t'(p63[k]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
