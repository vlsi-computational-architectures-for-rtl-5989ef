// tb_null_mean_act: self-checking test of the null-mean ACT (Architecture I).
//
// Part 1, bit-true: random full-scale sample vectors, with random idle cycles
// between them, are compared with act210_ref (210*V_k from the ACT definition
// in exact integers). Every result must appear exactly 5 cycles after its
// input and one vector is accepted per cycle.
// Part 2, transform: random null-mean 8-point signals are interpolated to the
// ten sample positions, rounded to L bits and transformed; the outputs divided
// by 210 must match the floating-point DCT to within the input rounding
// (12 * 2^-L), which shows that the architecture is exact for null-mean input.
module tb_null_mean_act;
  import act_pkg::*;
  import act_ref_pkg::*;

  localparam int L   = 12;
  localparam int LAT = 5;
  localparam int N1  = 3000;   // bit-true vectors
  localparam int N2  = 1000;   // null-mean signals

  typedef struct {
    longint cyc;
    longint v [NK];
    real    dct [NK];
    bit     is_real;
  } exp_t;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [L-1:0] v_in [NR];
  logic out_valid;
  logic signed [L+DL_P33-1:0] v_out [NK];
  longint cyc = 0;
  exp_t q [$];
  int sent = 0, got = 0, back_to_back = 0, bubbles = 0;
  real max_err = 0.0;

  null_mean_act #(.L(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d received %0d", sent, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare outputs
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    got++;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL: output without input");
    end else begin
      e = q.pop_front();
      if (cyc - e.cyc != LAT) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cyc - e.cyc, LAT);
      end
      for (int k = 0; k < NK; k++) begin
        checks++;
        if (e.is_real) begin
          real got_v, err;
          got_v = real'(v_out[k]) / 210.0 / (2.0 ** (L - 1));
          err = got_v - e.dct[k];
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          if (err > 12.0 * (2.0 ** (-L)) + 1e-9) begin
            failures++;
            $display("FAIL null-mean V%0d = %f, DCT %f", k + 1, got_v, e.dct[k]);
          end
        end else if (longint'(v_out[k]) != e.v[k]) begin
          failures++;
          $display("FAIL V%0d = %0d expected %0d", k + 1, v_out[k], e.v[k]);
        end
      end
    end
  end

  task automatic drive(input longint x [NR], input bit is_real, input real d [NK]);
    exp_t e;
    in_valid = 1'b1;
    for (int i = 0; i < NR; i++) v_in[i] = L'(x[i]);
    e.cyc = cyc;
    e.is_real = is_real;
    for (int k = 0; k < NK; k++) begin
      e.v[k] = act210_ref(x, k + 1);
      e.dct[k] = d[k];
    end
    q.push_back(e);
    sent++;
  endtask

  initial begin
    longint x [NR];
    real d [NK];
    real v [8];
    real m;
    bit prev;
    for (int i = 0; i < NR; i++) v_in[i] = '0;
    for (int k = 0; k < NK; k++) d[k] = 0.0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = 0;
    for (int n = 0; n < N1 + N2; ) begin
      @(negedge clk);
      #1;
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        for (int i = 0; i < NR; i++) v_in[i] = L'($urandom);
        if (prev) bubbles++;
        prev = 0;
      end else begin
        if (n < N1) begin
          for (int i = 0; i < NR; i++) x[i] = longint'($signed(L'($urandom)));
          if (n < 2) for (int i = 0; i < NR; i++) x[i] = (n == 0) ? -(longint'(1) << (L-1))
                                                                  : (longint'(1) << (L-1)) - 1;
          drive(x, 0, d);
        end else begin
          m = 0.0;
          for (int j = 0; j < 8; j++) begin v[j] = urand(0.45); m += v[j] / 8.0; end
          for (int j = 0; j < 8; j++) v[j] -= m;
          for (int i = 0; i < NR; i++) x[i] = qround(interp(v, rpos(i)), L - 1);
          for (int k = 0; k < NK; k++) d[k] = dct_ref(v, k + 1);
          drive(x, 1, d);
        end
        if (prev) back_to_back++;
        prev = 1;
        n++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (got != sent || q.size() != 0) begin
      failures++;
      $display("FAIL: sent %0d received %0d", sent, got);
    end
    checks++;
    if (back_to_back == 0 || bubbles == 0) begin
      failures++;
      $display("FAIL: back-to-back %0d, bubbles %0d", back_to_back, bubbles);
    end
    $display("null-mean signals: max |V_k - DCT_k| = %g (bound %g)", max_err, 12.0 * (2.0 ** (-L)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
