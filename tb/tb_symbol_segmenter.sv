// tb_symbol_segmenter: small numerology (symbol 20 samples with a 4-sample
// CP, 3 symbols per slot, 10 slots, half-frame 600 samples) with random
// gaps in the sample stream.  A timing index is given, later a different
// one.  An independent model works out from each sample's index whether it
// must come out and with which bin, symbol and slot; outputs must follow
// one cycle after the sample, and nothing may come out while waiting for a
// new boundary.
module tb_symbol_segmenter;
  import fdx_pkg::*;
  localparam int SYM = 20, CPL = 4, SPS = 3, HF = SYM * SPS * 10, OFF = 50;
  localparam int D_W = $clog2(HF);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, tau_valid = 0;
  logic [D_W-1:0] tau = '0;
  adc_cplx_t in1 = '0, in2 = '0, out1, out2;
  logic out_valid, out_sof, running;
  logic [$clog2(SYM - CPL)-1:0] out_bin;
  slot_t out_slot;
  sym_t out_sym;
  int checks = 0, failures = 0;

  symbol_segmenter #(.HF(HF), .SYM_LEN(SYM), .CP(CPL), .SPS(SPS), .OFFSET(OFF)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in1(in1), .in2(in2), .tau_valid(tau_valid), .tau(tau),
    .out_valid(out_valid), .out_sof(out_sof), .out_bin(out_bin), .out_slot(out_slot), .out_sym(out_sym),
    .out1(out1), .out2(out2), .running(running));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0, n_rearm = 0;
  initial begin
    int i, b, st;   // sample index, boundary, state 0 idle 1 armed 2 run
    int start;
    i = 0; st = 0; b = 0; start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 8 * HF; step++) begin
      logic ev, eo;
      int rel;
      @(negedge clk);
      tau_valid = 0;
      in_valid = 0;
      // new timing index at two moments
      if (step == 37 || step == 4 * HF + 11) begin
        int t, nb;
        t = (step == 37) ? 123 : 311;
        nb = (t - OFF + HF) % HF;
        tau_valid = 1; tau = D_W'(t);
        if (st == 0 || nb != b) begin st = 1; b = nb; n_rearm++; end
        // a sample offered together with tau is counted but not segmented
        in_valid = $urandom % 2;
        in1 = adc_cplx_t'(i); in2 = adc_cplx_t'(~i);
        if (in_valid) i++;
        @(negedge clk);
        tau_valid = 0;
        in_valid = 0;
        checks++;
        if (out_valid) begin failures++; $display("FAIL output on tau cycle"); end
        continue;
      end
      if ($urandom % 4 == 0) begin
        @(negedge clk);   // idle cycle, nothing should come out
        checks++;
        if (out_valid) begin failures++; $display("FAIL output without input"); end
        continue;
      end
      in_valid = 1;
      in1 = adc_cplx_t'(i); in2 = adc_cplx_t'(~i);
      if (st == 1 && (i % HF) == b) begin st = 2; start = i; end
      ev = 0; eo = 0; rel = 0;
      if (st == 2) begin
        rel = (i - start) % HF;
        ev = (rel % SYM) >= CPL;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid != ev) begin
        failures++;
        if (failures < 10) $display("FAIL sample %0d valid %b exp %b", i, out_valid, ev);
      end else if (ev) begin
        n_out++;
        checks++;
        if (int'(out_bin) != rel % SYM - CPL || int'(out_sym) != (rel / SYM) % SPS ||
            int'(out_slot) != rel / (SYM * SPS) || out_sof != (rel % SYM == CPL) ||
            out1 != adc_cplx_t'(i) || out2 != adc_cplx_t'(~i) || !running) begin
          failures++;
          if (failures < 10) $display("FAIL sample %0d bin %0d sym %0d slot %0d", i, out_bin, out_sym, out_slot);
        end
      end
      i++;
    end
    checks++;
    if (n_out < 1000 || n_rearm != 2) begin failures++; $display("FAIL outputs %0d rearm %0d", n_out, n_rearm); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
