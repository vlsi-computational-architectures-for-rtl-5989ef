// tb_shift_add_mult: checks the shift-and-add constant multiplier for every
// constant the ACT datapath uses (420, 210, 140, 105, 84, 70, 60) against an
// ordinary product, on the extreme inputs and on random ones. Combinational;
// each check samples the output 1 ns after the input changes.
module tb_shift_add_mult;
  localparam int WI = 15;
  localparam int WO = 25;
  localparam int NC = 7;
  localparam int KS [NC] = '{420, 210, 140, 105, 84, 70, 60};

  int checks = 0, failures = 0;
  logic signed [WI-1:0] x;
  logic signed [WO-1:0] y [NC];

  for (genvar c = 0; c < NC; c++) begin : g_dut
    shift_add_mult #(.K(KS[c]), .WI(WI), .WO(WO)) dut (.x(x), .y(y[c]));
  end

  task automatic check_all();
    #1;
    for (int c = 0; c < NC; c++) begin
      longint exp;
      exp = longint'(x) * KS[c];
      checks++;
      if (longint'(y[c]) != exp) begin
        failures++;
        $display("FAIL K=%0d x=%0d y=%0d expected %0d", KS[c], x, y[c], exp);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0;                      check_all();
    x = {1'b1, {(WI-1){1'b0}}};  check_all();   // most negative
    x = {1'b0, {(WI-1){1'b1}}};  check_all();   // most positive
    x = 1;                       check_all();
    x = -1;                      check_all();
    repeat (500) begin
      x = WI'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
