// tb_time_sync: correlation length 64, windows of 500 lags.  A random
// 12-bit complex reference is loaded; the input is noise with the
// reference sequence (scaled) embedded at lag 200 of the first window and
// pure noise in the second.  A model computes every kappa[d] (exact integer
// square root of |sum y[d+n] conj(p[n])|^2), the first argmax, the sum and
// the NSP test; the DUT must match exactly, kappa must appear two cycles
// after the last sample of its lag, and the first window must pass the test
// while the second fails it.
module tb_time_sync;
  import fdx_pkg::*;
  localparam int N = 64, NC = 500, L = 200, NIN = 3 * NC + N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ref_we = 0;
  logic [5:0] ref_addr = '0;
  logic signed [11:0] ref_re = '0, ref_im = '0;
  logic in_valid = 0;
  logic signed [15:0] in_re = '0, in_im = '0;
  logic kappa_valid, res_valid, nsp_pass;
  logic [16+12+6:0] kappa, peak;
  logic [16+12+6+1+9:0] kappa_sum;
  logic [8:0] tau_hat;
  int checks = 0, failures = 0;

  time_sync #(.N(N), .NC(NC)) dut (.clk(clk), .rst_n(rst_n), .ref_we(ref_we), .ref_addr(ref_addr), .ref_re(ref_re),
    .ref_im(ref_im), .in_valid(in_valid), .in_re(in_re), .in_im(in_im), .kappa_valid(kappa_valid), .kappa(kappa),
    .res_valid(res_valid), .tau_hat(tau_hat), .peak(peak), .kappa_sum(kappa_sum), .nsp_pass(nsp_pass));

  int pr [N], pi_ [N];
  int yr [NIN], yi [NIN];
  longint kap [NIN];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint isqrt(input longint v);
    longint r;
    r = longint'($sqrt(real'(v)));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  int kcount = 0, rcount = 0, cyc = 0, last_in_cyc [NIN];
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && kappa_valid) begin
      checks++;
      if (longint'(kappa) != kap[kcount] || cyc - last_in_cyc[kcount + N - 1] != 2) begin
        failures++;
        if (failures < 10) $display("FAIL lag %0d kappa %0d exp %0d (latency %0d)", kcount, kappa, kap[kcount], cyc - last_in_cyc[kcount + N - 1]);
      end
      kcount <= kcount + 1;
    end
    if (rst_n && res_valid) begin
      longint best, sum;
      int bd;
      logic pass;
      best = -1; sum = 0; bd = 0;
      for (int d = rcount * NC; d < (rcount + 1) * NC; d++) begin
        sum += kap[d];
        if (kap[d] > best) begin best = kap[d]; bd = d % NC; end
      end
      pass = best * NC * 16 > sum * 64;
      checks++;
      if (int'(tau_hat) != bd || longint'(peak) != best || longint'(kappa_sum) != sum || nsp_pass != pass ||
          (rcount == 0 && (!pass || bd != L)) || (rcount == 1 && pass)) begin
        failures++;
        $display("FAIL window %0d: tau %0d exp %0d peak %0d exp %0d pass %b exp %b", rcount, tau_hat, bd, peak, best, nsp_pass, pass);
      end
      rcount <= rcount + 1;
    end
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      pr[n] = int'($signed(12'($urandom))); pi_[n] = int'($signed(12'($urandom)));
    end
    for (int t = 0; t < NIN; t++) begin
      yr[t] = int'($urandom % 201) - 100; yi[t] = int'($urandom % 201) - 100;
      if (t >= L && t < L + N) begin yr[t] += pr[t - L] / 2; yi[t] += pi_[t - L] / 2; end
    end
    for (int d = 0; d + N <= NIN; d++) begin
      longint sr, si;
      sr = 0; si = 0;
      for (int n = 0; n < N; n++) begin
        sr += longint'(yr[d + n]) * pr[n] + longint'(yi[d + n]) * pi_[n];
        si += longint'(yi[d + n]) * pr[n] - longint'(yr[d + n]) * pi_[n];
      end
      kap[d] = isqrt(sr * sr + si * si);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      ref_we = 1; ref_addr = 6'(n); ref_re = 12'(pr[n]); ref_im = 12'(pi_[n]);
    end
    @(negedge clk);
    ref_we = 0;
    for (int t = 0; t < NIN; t++) begin
      @(negedge clk);
      in_valid = 0;
      while ($urandom % 5 == 0) @(negedge clk);
      in_valid = 1; in_re = 16'(yr[t]); in_im = 16'(yi[t]);
      last_in_cyc[t] = cyc;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (rcount != 3 || kcount != NIN - N + 1) begin failures++; $display("FAIL windows %0d lags %0d", rcount, kcount); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
