// delay_line: a chain of DEPTH registers, used to keep operands that travel
// through different numbers of pipeline stages aligned in time.
//
// Interface: q is d delayed by DEPTH clock cycles (DEPTH = 0 is a wire).
// No reset: it carries data only; the valid bits that qualify the data are
// reset in the blocks that use it. Delay balancing is implied by a fully
// pipelined datapath; the module itself is this design's own.
module delay_line #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[DEPTH-1];
  end

endmodule
