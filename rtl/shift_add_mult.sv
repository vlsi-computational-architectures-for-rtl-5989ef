// shift_add_mult: multiply a signed word by a positive integer constant K
// without a multiplier.
//
// K is recoded at elaboration time into canonical signed digits (the
// non-adjacent form of Booth recoding), so that K = sum d_i 2^i with
// d_i in {-1, 0, +1} and no two adjacent non-zero digits. The product is the
// sum of the shifted copies x<<i with the signs d_i: one adder or subtractor
// per non-zero digit beyond the first. For the constants of the null-mean ACT
// this gives 3 adders for 420, 210 and 105, 2 for 140, 84 and 70, and 1 for 60.
//
// Interface: x (WI bits, signed) -> y (WO bits, signed), purely combinational;
// the caller registers the result. The sum is formed modulo 2^WO, so y equals
// K*x exactly whenever K*x fits in WO bits, which the word-lengths of the
// design guarantee. Using shift-and-add structures for integer constants
// follows the architecture; the choice of the non-adjacent form is this
// design's own.
module shift_add_mult #(
  parameter int unsigned K  = 420,
  parameter int unsigned WI = 12,
  parameter int unsigned WO = 22
) (
  input  logic signed [WI-1:0] x,
  output logic signed [WO-1:0] y
);

  localparam int unsigned ND = 34;  // digits needed for any 32-bit K

  // Signed digit i of the non-adjacent form of k.
  function automatic int csd_digit(longint unsigned k, int i);
    longint unsigned n;
    int d;
    n = k;
    d = 0;
    for (int j = 0; j <= i; j++) begin
      if (n[0]) begin
        d = (n[1:0] == 2'b11) ? -1 : 1;
        n = (d == 1) ? n - 1 : n + 1;
      end else begin
        d = 0;
      end
      n = n >> 1;
    end
    return d;
  endfunction

  typedef logic signed [WO-1:0] word_t;

  word_t xe;
  assign xe = word_t'(x);

  always_comb begin
    word_t acc;
    acc = '0;
    for (int i = 0; i < ND; i++) begin
      if (i < WO) begin
        if (csd_digit(longint'(K), i) == 1)       acc = acc + (xe <<< i);
        else if (csd_digit(longint'(K), i) == -1) acc = acc - (xe <<< i);
      end
    end
    y = acc;
  end

endmodule
