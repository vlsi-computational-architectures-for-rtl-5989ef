// tb_mertens_correction: self-checking test of the Mertens correction block.
// Random null-mean ACT outputs and random 420*vbar values are applied every
// cycle; each output must equal V_k(in) - M(floor(7/k)) * 420*vbar, with the
// Mertens function M computed from the Moebius function, one cycle later.
module tb_mertens_correction;
  import act_pkg::*;
  import act_ref_pkg::*;

  localparam int L = 12;
  localparam int NV = 2000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [L+DL_P33-1:0] v_in [NK];
  logic signed [L+DL_P58-1:0] vbar420;
  logic out_valid;
  logic signed [L+DL_P60-1:0] v_out [NK];
  longint exp_v [NK];
  bit pending = 0;

  mertens_correction #(.L(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint b, a [NK];
    for (int k = 0; k < NK; k++) v_in[k] = '0;
    vbar420 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk);
      // check the previous vector
      checks++;
      if (out_valid !== pending) begin
        failures++;
        $display("FAIL out_valid %0b expected %0b", out_valid, pending);
      end
      if (pending) for (int k = 0; k < NK; k++) begin
        checks++;
        if (longint'(v_out[k]) != exp_v[k]) begin
          failures++;
          $display("FAIL V%0d = %0d expected %0d", k + 1, v_out[k], exp_v[k]);
        end
      end
      // new vector: V_k(in) within the range of a null-mean ACT output
      b = longint'($signed((L+DL_P58)'($urandom)));
      if (n == 0) b = -(longint'(1) << (L + DL_P58 - 1));
      for (int k = 0; k < NK; k++) a[k] = longint'($signed((L+DL_P28)'($urandom)));
      in_valid = ($urandom_range(0, 4) != 0);
      vbar420 = (L+DL_P58)'(b);
      for (int k = 0; k < NK; k++) begin
        v_in[k] = (L+DL_P33)'(a[k]);
        exp_v[k] = a[k] - mertens(7 / (k + 1)) * b;
      end
      pending = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
