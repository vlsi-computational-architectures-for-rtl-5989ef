// tb_act_arch2: end-to-end test of the non-null-mean ACT (Architecture II) at
// its default parameters (L = 12).
//
// Part 1, bit-true: random sample vectors (within 0.85 of full scale) against
// a model built from the transform's definitions: 210*V_k of the null-mean ACT
// minus M(floor(7/k)) * 420*vbar, with vbar the bit-true mean, and
// 210*V_0 = round(420*vbar * round(sqrt(2) 2^(L-1)) / 2^(L-1)).
// Part 2, transform: random 8-point signals, half of them with null mean and
// half with an offset, interpolated to the ten sample positions; outputs
// divided by 210 must match the floating-point DCT V_0..V_7 to within the
// fixed-point error budget (64 * 2^-L). The mean square error is reported
// as a PSNR against full scale.
// Also checked: latency 6, one vector per cycle, and that each mechanism was
// exercised: back-to-back input, idle cycles, vectors with a non-zero mean
// correction, null-mean signals and offset signals.
module tb_act_arch2;
  import act_pkg::*;
  import act_ref_pkg::*;

  localparam int L   = 12;      // must match the top's default
  localparam int CF  = L - 1;
  localparam int LAT = 6;
  localparam int N1  = 4000;
  localparam int N2  = 2000;

  typedef struct {
    longint cyc;
    longint v [N];
    real    dct [N];
    bit     is_real;
  } exp_t;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [L-1:0] v_in [NR];
  logic out_valid;
  logic signed [L+DL_P57-1:0] v0;
  logic signed [L+DL_P60-1:0] v_out [NK];
  longint cyc = 0;
  exp_t q [$];
  int sent = 0, got = 0;
  int n_b2b = 0, n_bubble = 0, n_corrected = 0, n_nullmean = 0, n_offset = 0;
  real max_err = 0.0, sq_err = 0.0;
  int  n_sq = 0;

  act_arch2 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d received %0d", sent, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    longint g [N];
    got++;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL: output without input");
    end else begin
      e = q.pop_front();
      if (cyc - e.cyc != longint'(LAT)) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cyc - e.cyc, LAT);
      end
      g[0] = longint'(v0);
      for (int k = 1; k < N; k++) g[k] = longint'(v_out[k-1]);
      for (int k = 0; k < N; k++) begin
        checks++;
        if (e.is_real) begin
          real gv, err;
          gv = real'(g[k]) / 210.0 / (2.0 ** (L - 1));
          err = gv - e.dct[k];
          sq_err += err * err;
          n_sq++;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          if (err > 64.0 * (2.0 ** (-L))) begin
            failures++;
            $display("FAIL V%0d = %f, DCT %f", k, gv, e.dct[k]);
          end
        end else if (g[k] != e.v[k]) begin
          failures++;
          $display("FAIL V%0d = %0d expected %0d", k, g[k], e.v[k]);
        end
      end
    end
  end

  function automatic bit in_range(longint x [NR]);
    for (int i = 0; i < NR; i++)
      if (x[i] >= (longint'(1) << (L - 1)) || x[i] < -(longint'(1) << (L - 1))) return 0;
    return 1;
  endfunction

  initial begin
    longint x [NR];
    real v [8];
    exp_t e;
    longint lim, m420;
    bit prev;
    lim = longint'(0.85 * (2.0 ** (L - 1)));
    for (int i = 0; i < NR; i++) v_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = 0;
    for (int n = 0; n < N1 + N2; ) begin
      @(negedge clk);
      #1;
      if ($urandom_range(0, 4) == 0) begin
        in_valid = 0;
        for (int i = 0; i < NR; i++) v_in[i] = L'($urandom);
        if (prev) n_bubble++;
        prev = 0;
      end else begin
        e.cyc = cyc;
        if (n < N1) begin
          for (int i = 0; i < NR; i++)
            x[i] = longint'($urandom_range(0, 2 * 32'(lim))) - lim;
          e.is_real = 0;
        end else begin
          bit nullmean;
          nullmean = n[0];
          do begin
            real c, mu;
            c = nullmean ? 0.0 : urand(0.35);
            mu = 0.0;
            for (int j = 0; j < 8; j++) begin v[j] = c + urand(0.45); mu += v[j] / 8.0; end
            if (nullmean) for (int j = 0; j < 8; j++) v[j] -= mu;
            for (int i = 0; i < NR; i++) x[i] = qround(interp(v, rpos(i)), L - 1);
          end while (!in_range(x));
          for (int k = 0; k < N; k++) e.dct[k] = dct_ref(v, k);
          e.is_real = 1;
          if (nullmean) n_nullmean++; else n_offset++;
        end
        m420 = 420 * mean_ref(x, CF);
        if (m420 != 0) n_corrected++;
        e.v[0] = rdiv(m420 * qround(1.4142135623730951, CF), CF);
        for (int k = 1; k < N; k++) e.v[k] = act210_ref(x, k) - mertens(7 / k) * m420;
        for (int i = 0; i < NR; i++) v_in[i] = L'(x[i]);
        in_valid = 1;
        q.push_back(e);
        sent++;
        if (prev) n_b2b++;
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
    $display("mechanisms: back-to-back %0d, idle gaps %0d, mean-corrected %0d, null-mean signals %0d, offset signals %0d",
             n_b2b, n_bubble, n_corrected, n_nullmean, n_offset);
    checks += 5;
    if (n_b2b == 0)       begin failures++; $display("FAIL: no back-to-back input"); end
    if (n_bubble == 0)    begin failures++; $display("FAIL: no idle gap"); end
    if (n_corrected == 0) begin failures++; $display("FAIL: no mean correction"); end
    if (n_nullmean == 0)  begin failures++; $display("FAIL: no null-mean signal"); end
    if (n_offset == 0)    begin failures++; $display("FAIL: no offset signal"); end
    $display("signals: max |V_k - DCT_k| = %g, PSNR (full scale 1) = %0.1f dB",
             max_err, 10.0 * $log10(1.0 / (sq_err / real'(n_sq))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
