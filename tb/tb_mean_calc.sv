// tb_mean_calc: self-checking test of the mean calculation block.
//
// Part 1, bit-true: random sample vectors (each sample within 0.85 of full
// scale, so that the L+1 bit sum cannot wrap) against mean_ref, the sum of
// round(x_i * round(w_i 2^(L-1)) / 2^(L-1)) with the published weights.
// Part 2: random 8-point signals with non-zero mean are interpolated to the
// ten sample positions; the block must return their mean to within the
// rounding of inputs, weights and products (32 * 2^-L).
// Latency must be 3 cycles; vectors arrive back to back and with gaps.
module tb_mean_calc;
  import act_pkg::*;
  import act_ref_pkg::*;

  localparam int L   = 12;
  localparam int CF  = L - 1;
  localparam int LAT = 3;
  localparam int N1  = 3000;
  localparam int N2  = 1000;

  typedef struct {
    longint cyc;
    longint m;
    real    mr;
    bit     is_real;
  } exp_t;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [L-1:0] v_in [NR];
  logic out_valid;
  logic signed [L+DL_P56-1:0] vbar;
  longint cyc = 0;
  exp_t q [$];
  int sent = 0, got = 0;
  real max_err = 0.0;

  mean_calc #(.L(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    got++;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL: output without input");
    end else begin
      e = q.pop_front();
      if (cyc - e.cyc != longint'(LAT)) begin
        failures++;
        $display("FAIL: latency %0d", cyc - e.cyc);
      end
      checks++;
      if (e.is_real) begin
        real err;
        err = real'(vbar) / (2.0 ** (L - 1)) - e.mr;
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        if (err > 32.0 * (2.0 ** (-L))) begin
          failures++;
          $display("FAIL mean %f expected %f", real'(vbar) / (2.0 ** (L - 1)), e.mr);
        end
      end else if (longint'(vbar) != e.m) begin
        failures++;
        $display("FAIL vbar %0d expected %0d", vbar, e.m);
      end
    end
  end

  initial begin
    longint x [NR];
    real v [8];
    exp_t e;
    longint lim;
    lim = longint'(0.85 * (2.0 ** (L - 1)));
    for (int i = 0; i < NR; i++) v_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N1 + N2; ) begin
      @(negedge clk);
      #1;
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        for (int i = 0; i < NR; i++) v_in[i] = L'($urandom);
      end else begin
        e.cyc = cyc;
        if (n < N1) begin
          for (int i = 0; i < NR; i++)
            x[i] = longint'($urandom_range(0, 2 * 32'(lim))) - lim;
          e.is_real = 0;
          e.mr = 0.0;
        end else begin
          real c;
          bit ok;
          // draw until every interpolated sample is inside [-1, 1)
          do begin
            c = urand(0.4);
            e.mr = 0.0;
            for (int j = 0; j < 8; j++) begin v[j] = c + urand(0.45); e.mr += v[j] / 8.0; end
            ok = 1;
            for (int i = 0; i < NR; i++) begin
              x[i] = qround(interp(v, rpos(i)), L - 1);
              if (x[i] >= (longint'(1) << (L - 1)) || x[i] < -(longint'(1) << (L - 1))) ok = 0;
            end
          end while (!ok);
          e.is_real = 1;
        end
        e.m = mean_ref(x, CF);
        for (int i = 0; i < NR; i++) v_in[i] = L'(x[i]);
        in_valid = 1;
        q.push_back(e);
        sent++;
        n++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (got != sent) begin
      failures++;
      $display("FAIL: sent %0d received %0d", sent, got);
    end
    $display("signal means: max error %g", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
