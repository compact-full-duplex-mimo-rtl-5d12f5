// tb_si_rebuild: writes own-pilot observations of a self-interference
// channel that is linear in the subcarrier index, then feeds random QPSK
// own symbols x_S and checks y_hat = g[k] x_S[k] one cycle later.
module tb_si_rebuild;
  import fdx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pil_valid = 0, in_valid = 0, out_valid;
  sc_idx_t pil_k = 0, in_k = 0;
  fd_cplx_t pil_y, x_s, y_hat;
  h_cplx_t g_est;
  int checks = 0, failures = 0;

  si_rebuild dut (.clk(clk), .rst_n(rst_n), .pil_valid(pil_valid), .pil_k(pil_k), .pil_y(pil_y),
                  .in_valid(in_valid), .in_k(in_k), .x_s(x_s), .out_valid(out_valid),
                  .y_hat(y_hat), .g_est(g_est));

  real a_re, a_im, b_re, b_im;
  function automatic real g_re(input int k); return a_re + b_re * k; endfunction
  function automatic real g_im(input int k); return a_im + b_im * k; endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pil_y = '0; x_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      a_re = real'($signed(13'($urandom))) / 4096.0; a_im = real'($signed(13'($urandom))) / 4096.0;
      b_re = real'($signed(12'($urandom))) / 4096.0 / 1200.0; b_im = real'($signed(12'($urandom))) / 4096.0 / 1200.0;
      for (int k = 0; k < 1200; k += 3) begin
        @(negedge clk);
        pil_valid = 1; pil_k = sc_idx_t'(k);
        pil_y.re = 16'($rtoi(real'(QAMP) * (g_re(k) - g_im(k))));
        pil_y.im = 16'($rtoi(real'(QAMP) * (g_re(k) + g_im(k))));
      end
      @(negedge clk);
      pil_valid = 0;
      for (int k = 0; k < 1197; k++) begin
        real xr, xi, er, ei;
        in_valid = 1; in_k = sc_idx_t'(k);
        x_s.re = ($urandom % 2) ? -16'(QAMP) : 16'(QAMP);
        x_s.im = ($urandom % 2) ? -16'(QAMP) : 16'(QAMP);
        xr = real'(x_s.re); xi = real'(x_s.im);
        er = g_re(k) * xr - g_im(k) * xi;
        ei = g_re(k) * xi + g_im(k) * xr;
        @(negedge clk);
        checks++;
        if (!out_valid || real'(y_hat.re) - er > 6.0 || er - real'(y_hat.re) > 6.0 ||
            real'(y_hat.im) - ei > 6.0 || ei - real'(y_hat.im) > 6.0) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d got %0d,%0d exp %f,%f", k, y_hat.re, y_hat.im, er, ei);
        end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
