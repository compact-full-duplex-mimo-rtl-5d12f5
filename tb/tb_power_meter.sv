// tb_power_meter: random two-antenna samples with random gaps, window of
// 100 samples; each window's sum must equal the exact sum of squares and
// the mean must be within one LSB of sum / WIN.  The result must pulse one
// cycle after the last sample of the window.
module tb_power_meter;
  import fdx_pkg::*;
  localparam int WIN = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  adc_cplx_t y1, y2;
  logic [2*ADC_W+1+$clog2(WIN):0] sum;
  logic [2*ADC_W+1:0] mean;
  int checks = 0, failures = 0;

  power_meter #(.WIN(WIN)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .y1(y1), .y2(y2),
                                .out_valid(out_valid), .sum(sum), .mean(mean));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    y1 = '0; y2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      acc = 0;
      for (int n = 0; n < WIN; n++) begin
        @(negedge clk);
        in_valid = 0;
        while ($urandom % 4 == 0) @(negedge clk);
        in_valid = 1;
        if (w % 2 == 0) begin
          y1 = adc_cplx_t'($urandom); y2 = adc_cplx_t'($urandom);
        end else begin
          y1.re = 14'($signed(7'($urandom))); y1.im = 14'($signed(7'($urandom)));
          y2.re = 14'($signed(7'($urandom))); y2.im = 14'($signed(7'($urandom)));
        end
        acc += longint'(y1.re) * y1.re + longint'(y1.im) * y1.im +
               longint'(y2.re) * y2.re + longint'(y2.im) * y2.im;
        checks++;
        if (out_valid) begin failures++; $display("FAIL early out_valid"); end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || longint'(sum) != acc ||
          longint'(mean) - acc / WIN > 1 || acc / WIN - longint'(mean) > 1) begin
        failures++;
        $display("FAIL window %0d: valid %b sum %0d exp %0d mean %0d", w, out_valid, sum, acc, mean);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
