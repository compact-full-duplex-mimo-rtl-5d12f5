// tb_tx_mapper: one half-frame and a bit of the next, for node 1 / Tx
// antenna 1 and node 2 / Tx antenna 2, with random gaps in the bit supply
// and random back-pressure.  Every accepted element is checked against an
// independent model of the grid: position in slot/symbol/subcarrier order;
// the PSS table on subcarriers 569..630 of slot 0 symbol 5 for antenna 1
// only; the pilot A(1+j) on the instance's own CRS port and zero on the
// other ports' positions; QPSK of the bits offered otherwise.  The number of
// data elements per half-frame (54800) is checked too.
module tb_tx_mapper;
  import fdx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pss_we = 0;
  logic [5:0] pss_addr = '0;
  fd_cplx_t pss_data = '0;
  logic [1:0] bits_valid = '0, bits_ready, re_valid, re_ready = '0;
  logic [1:0] bits [2];
  re_pos_t re_pos [2];
  fd_cplx_t re [2];
  re_kind_e re_kind [2];
  int checks = 0, failures = 0;

  tx_mapper #(.NODE(1), .ANT(0)) u0 (.clk(clk), .rst_n(rst_n), .pss_we(pss_we), .pss_addr(pss_addr), .pss_data(pss_data),
    .bits_valid(bits_valid[0]), .bits(bits[0]), .bits_ready(bits_ready[0]), .re_valid(re_valid[0]), .re_ready(re_ready[0]),
    .re_pos(re_pos[0]), .re(re[0]), .re_kind(re_kind[0]));
  tx_mapper #(.NODE(2), .ANT(1)) u1 (.clk(clk), .rst_n(rst_n), .pss_we(pss_we), .pss_addr(pss_addr), .pss_data(pss_data),
    .bits_valid(bits_valid[1]), .bits(bits[1]), .bits_ready(bits_ready[1]), .re_valid(re_valid[1]), .re_ready(re_ready[1]),
    .re_pos(re_pos[1]), .re(re[1]), .re_kind(re_kind[1]));

  fd_cplx_t tab [NPSS];
  int cnt [2], ndata [2];
  localparam int TOTAL = 72000 + 3000;

  function automatic int port_of(input int sym, input int k);
    case (sym)
      0: return (k % 6 == 0) ? 0 : (k % 6 == 3) ? 1 : -1;
      3: return (k % 6 == 3) ? 0 : (k % 6 == 0) ? 1 : -1;
      1: return (k % 6 == 0) ? 2 : (k % 6 == 3) ? 3 : -1;
      4: return (k % 6 == 3) ? 2 : (k % 6 == 0) ? 3 : -1;
      default: return -1;
    endcase
  endfunction

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits[0] = '0; bits[1] = '0;
    cnt[0] = 0; cnt[1] = 0; ndata[0] = 0; ndata[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NPSS; n++) begin
      @(negedge clk);
      tab[n] = fd_cplx_t'($urandom);
      pss_we = 1; pss_addr = 6'(n); pss_data = tab[n];
    end
    @(negedge clk);
    pss_we = 0;
    while (cnt[0] < TOTAL || cnt[1] < TOTAL) begin
      for (int u = 0; u < 2; u++) begin
        bits_valid[u] = ($urandom % 5) != 0;
        bits[u] = 2'($urandom);
        re_ready[u] = (($urandom % 4) != 0) && cnt[u] < TOTAL;
      end
      #1;
      for (int u = 0; u < 2; u++) begin
        if (re_valid[u] && re_ready[u]) begin
          int e, slot, sym, k, my_port, p;
          fd_cplx_t ev;
          re_kind_e ek;
          e = cnt[u] % 72000;
          slot = e / 7200; sym = (e / 1200) % 6; k = e % 1200;
          my_port = (u == 0) ? 0 : 3;
          p = port_of(sym, k);
          ev = '0; ek = RE_EMPTY;
          if (slot == 0 && sym == 5) begin
            if (u == 0 && k >= 569 && k <= 630) begin ev = tab[k - 569]; ek = RE_PSS; end
          end else if (p >= 0) begin
            if (p == my_port) begin ev.re = 16'd2048; ev.im = 16'd2048; ek = RE_PILOT; end
          end else begin
            ev.re = bits[u][0] ? -16'sd2048 : 16'sd2048;
            ev.im = bits[u][1] ? -16'sd2048 : 16'sd2048;
            ek = RE_DATA;
          end
          checks++;
          if (re_pos[u].slot != slot_t'(slot) || re_pos[u].sym != sym_t'(sym) || re_pos[u].k != sc_idx_t'(k) ||
              re[u] != ev || re_kind[u] != ek || bits_ready[u] != (ek == RE_DATA)) begin
            failures++;
            if (failures < 10) $display("FAIL u%0d e %0d: pos %0d/%0d/%0d kind %0d re %0d,%0d exp kind %0d re %0d,%0d",
                                        u, e, re_pos[u].slot, re_pos[u].sym, re_pos[u].k, re_kind[u], re[u].re, re[u].im, ek, ev.re, ev.im);
          end
          if (ek == RE_DATA && cnt[u] < 72000) ndata[u]++;
          cnt[u]++;
        end else if (re_ready[u] && !re_valid[u]) begin
          // a stall may only come from missing bits on a data element
          checks++;
          if (bits_valid[u]) begin failures++; $display("FAIL u%0d stalled with bits available", u); end
        end
      end
      @(negedge clk);
    end
    for (int u = 0; u < 2; u++) begin
      checks++;
      if (ndata[u] != 54800) begin failures++; $display("FAIL u%0d data elements %0d", u, ndata[u]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
