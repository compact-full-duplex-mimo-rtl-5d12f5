// tb_lpf: impulse, DC and random inputs.  The expected output is worked
// out here from the filter definition (Hamming-windowed sinc, cut-off 0.03,
// 65 taps, coefficients quantised to 14 bits with unity DC gain): each
// output is the rounded sum over the last 65 inputs scaled back by 2^13,
// one cycle after the input.  The impulse response must be symmetric about
// tap 32 (linear phase) and a constant input must come out unchanged.
module tb_lpf;
  import fdx_pkg::*;
  localparam int NTAP = 65, CW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  adc_cplx_t in = '0;
  logic signed [15:0] out_re, out_im;
  int checks = 0, failures = 0;

  lpf dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(in), .out_valid(out_valid),
           .out_re(out_re), .out_im(out_im));

  int c [NTAP];
  int hist_re [NTAP], hist_im [NTAP];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_out(input int h [NTAP]);
    longint acc;
    acc = 0;
    for (int l = 0; l < NTAP; l++) acc += longint'(h[l]) * c[l];
    acc = (acc + (longint'(1) << (CW - 2))) >>> (CW - 1);
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  task automatic push(input int re, input int im);
    for (int l = NTAP - 1; l > 0; l--) begin hist_re[l] = hist_re[l-1]; hist_im[l] = hist_im[l-1]; end
    hist_re[0] = re; hist_im[0] = im;
    @(negedge clk);
    in_valid = 1; in.re = 14'(re); in.im = 14'(im);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || int'(out_re) != expect_out(hist_re) || int'(out_im) != expect_out(hist_im)) begin
      failures++;
      if (failures < 10) $display("FAIL out %0d,%0d exp %0d,%0d", out_re, out_im, expect_out(hist_re), expect_out(hist_im));
    end
  endtask

  initial begin
    real pi, x, w, s, tot, sc, cut;
    pi = 3.141592653589793; cut = 0.03; tot = 0.0;
    for (int i = 0; i < NTAP; i++) begin
      x = real'(i) - 32.0;
      w = 0.54 - 0.46 * $cos(2.0 * pi * i / 64.0);
      s = (i == 32) ? 2.0 * cut : $sin(2.0 * pi * cut * x) / (pi * x);
      tot += s * w;
    end
    sc = 8192.0 / tot;
    for (int i = 0; i < NTAP; i++) begin
      x = real'(i) - 32.0;
      w = 0.54 - 0.46 * $cos(2.0 * pi * i / 64.0);
      s = (i == 32) ? 2.0 * cut : $sin(2.0 * pi * cut * x) / (pi * x);
      c[i] = $rtoi(s * w * sc + ((s * w >= 0.0) ? 0.5 : -0.5));
      hist_re[i] = 0; hist_im[i] = 0;
    end
    for (int i = 0; i < NTAP / 2; i++) begin
      checks++;
      if (c[i] != c[NTAP - 1 - i]) failures++;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // impulse: the output is the scaled coefficient sequence
    push(8191, -8192);
    for (int i = 1; i < NTAP + 5; i++) push(0, 0);
    // DC: unity gain after the filter has filled
    for (int i = 0; i < NTAP + 10; i++) push(1000, -700);
    checks++;
    if (out_re < 998 || out_re > 1002 || out_im < -702 || out_im > -698) begin
      failures++; $display("FAIL DC gain %0d %0d", out_re, out_im);
    end
    // random
    for (int i = 0; i < 3000; i++) push(int'($signed(14'($urandom))), int'($signed(14'($urandom))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
