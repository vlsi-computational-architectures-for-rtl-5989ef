// tb_delay_line: drives a random word every cycle into a 3-deep delay line and
// checks that each word reappears exactly 3 cycles later.
module tb_delay_line;
  localparam int W = 8;
  localparam int D = 3;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [W-1:0] d, q;
  logic [W-1:0] hist [$];

  delay_line #(.WIDTH(W), .DEPTH(D)) dut (.clk, .d, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (t >= D) begin
        checks++;
        if (q != hist[t-D]) begin
          failures++;
          $display("FAIL t=%0d q=%0h expected %0h", t, q, hist[t-D]);
        end
      end
      d = W'($urandom);
      hist.push_back(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
