// tb_chan_est: pilots of a channel that is linear in the subcarrier index
// are written on the every-third-subcarrier grid (in two passes, as the two
// pilot symbols of a slot would); the interpolated estimate is then read at
// every subcarrier and compared with the true channel (exact for a linear
// channel up to rounding), and with the last grid value beyond it.
module tb_chan_est;
  import fdx_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic pil_valid = 0;
  sc_idx_t pil_k = 0, rd_k = 0;
  fd_cplx_t pil_y;
  h_cplx_t est;
  int checks = 0, failures = 0;

  chan_est dut (.clk(clk), .pil_valid(pil_valid), .pil_k(pil_k), .pil_y(pil_y),
                .rd_k(rd_k), .est(est));

  real a_re, a_im, b_re, b_im;
  function automatic real h_re(input int k); return a_re + b_re * k; endfunction
  function automatic real h_im(input int k); return a_im + b_im * k; endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pil_y = '0;
    for (int trial = 0; trial < 3; trial++) begin
      // channel in units of 2^-12, |h| up to about 3, slope up to 7 LSB per subcarrier
      a_re = real'($signed(13'($urandom))); a_im = real'($signed(13'($urandom)));
      b_re = real'($signed(12'($urandom))) / 300.0; b_im = real'($signed(12'($urandom))) / 300.0;
      for (int pass = 0; pass < 2; pass++) begin
        for (int k = pass * 3; k < 1200; k += 6) begin
          real hr, hi;
          hr = h_re(k) / 4096.0; hi = h_im(k) / 4096.0;
          @(negedge clk);
          pil_valid = 1; pil_k = sc_idx_t'(k);
          // y = h * A(1+j)
          pil_y.re = 16'($rtoi(real'(QAMP) * (hr - hi) + (hr - hi >= 0 ? 0.5 : -0.5)));
          pil_y.im = 16'($rtoi(real'(QAMP) * (hr + hi) + (hr + hi >= 0 ? 0.5 : -0.5)));
        end
      end
      @(negedge clk);
      pil_valid = 0;
      for (int k = 0; k < 1200; k++) begin
        real er, ei;
        int kk;
        kk = (k > 1197) ? 1197 : k;
        rd_k = sc_idx_t'(k);
        #1;
        er = real'(est.re) - h_re(kk);
        ei = real'(est.im) - h_im(kk);
        checks++;
        if (er > 2.5 || er < -2.5 || ei > 2.5 || ei < -2.5) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d est=%0d,%0d exp=%f,%f", k, est.re, est.im, h_re(kk), h_im(kk));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
