// tb_frac_const_mult: checks the fractional constant multiplier for a few of
// the design's constants (two mean weights of either sign and sqrt(2)) at
// 11 fractional bits: y must equal round(x * round(c * 2^11) / 2^11), ties upwards.
module tb_frac_const_mult;
  import act_ref_pkg::*;
  localparam int CF = 11;
  localparam int WI = 12;
  localparam int WO = 14;
  localparam int NC = 4;
  localparam real CS [NC] = '{0.498388117552161, -0.313306526814540,
                              0.018837637958148, 1.4142135623730951};

  int checks = 0, failures = 0;
  logic signed [WI-1:0] x;
  logic signed [WO-1:0] y [NC];

  for (genvar c = 0; c < NC; c++) begin : g_dut
    frac_const_mult #(.COEF(CS[c]), .CF(CF), .WI(WI), .WO(WO)) dut (.x(x), .y(y[c]));
  end

  task automatic check_all();
    #1;
    for (int c = 0; c < NC; c++) begin
      longint exp;
      exp = rdiv(longint'(x) * qround(CS[c], CF), CF);
      checks++;
      if (longint'(y[c]) != exp) begin
        failures++;
        $display("FAIL c=%f x=%0d y=%0d expected %0d", CS[c], x, y[c], exp);
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
    x = 0;      check_all();
    x = 1;      check_all();
    x = -1;     check_all();
    x = 12'sh7ff; check_all();
    x = 12'sh800; check_all();
    repeat (500) begin
      x = WI'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
