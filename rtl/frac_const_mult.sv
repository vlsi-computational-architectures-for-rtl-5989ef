// frac_const_mult: multiply a signed fixed-point word by a real constant.
//
// COEF is quantised at elaboration to Q = round(COEF * 2^CF). The product
// x*Q is rounded to the nearest multiple of 2^CF (half an LSB is added, then
// an arithmetic shift right by CF bits), so the output keeps the fractional
// weight of the input, and is then cut to WO bits. This is one of the constant multipliers of the
// non-null-mean architecture (the ten mean weights and sqrt(2)).
//
// Interface: x (WI bits, signed) -> y (WO bits, signed), combinational.
// The architecture fixes the fractional bit count of all signals at L-1; using
// CF = L-1 bits for the coefficient too and rounding coefficient and product
// are this design's own choices. (Rounding rather than truncating the ten
// products of the mean removes a bias of five LSBs from the mean, which the
// Mertens correction multiplies by up to four; with truncation the accuracy of
// the non-null-mean transform falls about 18 dB short of the published one.)
module frac_const_mult #(
  parameter real         COEF = 1.4142135623730951,
  parameter int unsigned CF   = 11,
  parameter int unsigned WI   = 12,
  parameter int unsigned WO   = 13
) (
  input  logic signed [WI-1:0] x,
  output logic signed [WO-1:0] y
);

  localparam longint Q = act_pkg::quantize(COEF, int'(CF));
  localparam int unsigned WQ = 64;
  localparam int unsigned WP = WI + WQ;

  typedef logic signed [WP-1:0] prod_t;
  typedef logic signed [WQ-1:0] coef_t;

  prod_t p;
  assign p = prod_t'(x) * prod_t'(coef_t'(Q));
  assign y = WO'((p + (prod_t'(1) <<< (CF - 1))) >>> CF);

endmodule
