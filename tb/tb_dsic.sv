// tb_dsic: random samples; checks r = y - self_talk - cross_talk with
// saturation to 16 bits and the one-cycle latency.
module tb_dsic;
  import fdx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  fd_cplx_t y, st, ct, r;
  int checks = 0, failures = 0;

  dsic dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .y(y), .self_talk(st),
            .cross_talk(ct), .out_valid(out_valid), .r(r));

  function automatic logic signed [15:0] sat(input int v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y = '0; st = '0; ct = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int er, ei;
      @(negedge clk);
      in_valid = 1;
      if (i % 2 == 0) begin
        y.re = 16'($urandom); y.im = 16'($urandom);
        st.re = 16'($urandom); st.im = 16'($urandom);
        ct.re = 16'($urandom); ct.im = 16'($urandom);
      end else begin
        y.re = 16'($signed(12'($urandom))); y.im = 16'($signed(12'($urandom)));
        st.re = 16'($signed(11'($urandom))); st.im = 16'($signed(11'($urandom)));
        ct.re = 16'($signed(10'($urandom))); ct.im = 16'($signed(10'($urandom)));
      end
      er = int'(y.re) - int'(st.re) - int'(ct.re);
      ei = int'(y.im) - int'(st.im) - int'(ct.im);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || r.re != sat(er) || r.im != sat(ei)) begin
        failures++;
        $display("FAIL %0d: got %0d,%0d exp %0d,%0d", i, r.re, r.im, sat(er), sat(ei));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
