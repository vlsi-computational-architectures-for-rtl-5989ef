// tb_act_workload: accuracy sweep over the input word-length L, as in the
// published evaluation: 10,000 random 8-point signals per word-length
// L = 8, 12, 16, 20, 24, 28, 32, streamed back to back.
//
// For every L one null-mean ACT (Architecture I) receives null-mean signals
// and one non-null-mean ACT (Architecture II) receives signals with a random
// offset. The ten non-uniform samples come from the interpolation formula and
// are rounded to L bits. Each output divided by 210 is compared with the
// floating-point DCT: Architecture I must be within the input rounding
// (12 * 2^-L), Architecture II within its fixed-point budget (64 * 2^-L).
// PSNR against full scale and the maximum error are printed per L. Latencies
// 5 and 6 are checked on every vector.
module tb_act_workload;
  import act_pkg::*;
  import act_ref_pkg::*;

  localparam int NL = 7;
  localparam int LS [NL] = '{8, 12, 16, 20, 24, 28, 32};
  localparam int NV = 10000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  longint cyc = 0;
  event ev_drive;
  bit   drive_on = 0;
  real  vr_nm [NR];      // samples of the null-mean signal
  real  vr_any [NR];     // samples of the offset signal
  real  dct_nm [N];
  real  dct_any [N];
  real  se1 [NL], se2 [NL], mx1 [NL], mx2 [NL];
  int   n1 [NL], n2 [NL];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (NV + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NL; g++) begin : g_lane
    localparam int L = LS[g];
    typedef struct { longint cyc; real d [N]; } exp_t;

    logic in_valid = 0;
    logic signed [L-1:0] x_nm [NR];
    logic signed [L-1:0] x_any [NR];
    logic out_valid1, out_valid2;
    logic signed [L+DL_P33-1:0] y1 [NK];
    logic signed [L+DL_P57-1:0] y0;
    logic signed [L+DL_P60-1:0] y2 [NK];
    exp_t q1 [$];
    exp_t q2 [$];

    null_mean_act #(.L(L)) u_a1 (
      .clk, .rst_n, .in_valid, .v_in(x_nm), .out_valid(out_valid1), .v_out(y1));
    act_arch2 #(.L(L)) u_a2 (
      .clk, .rst_n, .in_valid, .v_in(x_any), .out_valid(out_valid2), .v0(y0), .v_out(y2));

    always @(ev_drive) begin
      exp_t e1, e2;
      in_valid = drive_on;
      if (drive_on) begin
        for (int i = 0; i < NR; i++) begin
          x_nm[i]  = L'(qround(vr_nm[i], L - 1));
          x_any[i] = L'(qround(vr_any[i], L - 1));
        end
        e1.cyc = cyc; e2.cyc = cyc;
        for (int k = 0; k < N; k++) begin e1.d[k] = dct_nm[k]; e2.d[k] = dct_any[k]; end
        q1.push_back(e1);
        q2.push_back(e2);
      end
    end

    always @(negedge clk) if (rst_n) begin
      if (out_valid1) begin
        exp_t e;
        e = q1.pop_front();
        checks++;
        if (cyc - e.cyc != 5) begin failures++; $display("FAIL L=%0d arch I latency", L); end
        for (int k = 1; k < N; k++) begin
          real err;
          err = real'(y1[k-1]) / 210.0 / (2.0 ** (L - 1)) - e.d[k];
          se1[g] += err * err;
          n1[g]++;
          if (err < 0) err = -err;
          if (err > mx1[g]) mx1[g] = err;
          checks++;
          if (err > 12.0 * (2.0 ** (-L)) + 1e-12) begin
            failures++;
            $display("FAIL L=%0d arch I V%0d error %g", L, k, err);
          end
        end
      end
      if (out_valid2) begin
        exp_t e;
        e = q2.pop_front();
        checks++;
        if (cyc - e.cyc != 6) begin failures++; $display("FAIL L=%0d arch II latency", L); end
        for (int k = 0; k < N; k++) begin
          real err, gv;
          gv = (k == 0) ? real'(y0) : real'(y2[k-1]);
          err = gv / 210.0 / (2.0 ** (L - 1)) - e.d[k];
          se2[g] += err * err;
          n2[g]++;
          if (err < 0) err = -err;
          if (err > mx2[g]) mx2[g] = err;
          checks++;
          if (err > 64.0 * (2.0 ** (-L)) + 1e-12) begin
            failures++;
            $display("FAIL L=%0d arch II V%0d error %g", L, k, err);
          end
        end
      end
    end
  end

  function automatic bit inside_unit(real a [NR]);
    for (int i = 0; i < NR; i++) if (a[i] > 0.99 || a[i] < -0.99) return 0;
    return 1;
  endfunction

  initial begin
    real v [8];
    real w [8];
    real mu, c;
    for (int g = 0; g < NL; g++) begin se1[g] = 0; se2[g] = 0; mx1[g] = 0; mx2[g] = 0; n1[g] = 0; n2[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NV; n++) begin
      do begin
        mu = 0.0;
        c = urand(0.3);
        for (int j = 0; j < 8; j++) begin v[j] = urand(0.4); w[j] = c + urand(0.4); mu += v[j] / 8.0; end
        for (int j = 0; j < 8; j++) v[j] -= mu;
        for (int i = 0; i < NR; i++) begin
          vr_nm[i]  = interp(v, rpos(i));
          vr_any[i] = interp(w, rpos(i));
        end
      end while (!inside_unit(vr_nm) || !inside_unit(vr_any));
      for (int k = 0; k < N; k++) begin dct_nm[k] = dct_ref(v, k); dct_any[k] = dct_ref(w, k); end
      @(negedge clk);
      drive_on = 1;
      ->ev_drive;
    end
    @(negedge clk);
    drive_on = 0;
    ->ev_drive;
    repeat (10) @(negedge clk);
    for (int g = 0; g < NL; g++) begin
      checks++;
      if (n1[g] != 7 * NV || n2[g] != 8 * NV) begin
        failures++;
        $display("FAIL L=%0d: %0d / %0d results", LS[g], n1[g], n2[g]);
      end
      $display("L=%2d  arch I: PSNR %6.1f dB max err %9.3g   arch II: PSNR %6.1f dB max err %9.3g",
               LS[g], 10.0 * $log10(real'(n1[g]) / se1[g]), mx1[g],
               10.0 * $log10(real'(n2[g]) / se2[g]), mx2[g]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
