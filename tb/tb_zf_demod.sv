// tb_zf_demod: random well-conditioned 2x2 channels and random QPSK symbol
// pairs; r = H x (plus small noise) is fed with H; the decided bits must
// equal the sent bits two cycles later, and out_data must flag data
// elements only (pilots and the PSS symbol excluded).
module tb_zf_demod;
  import fdx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, out_data;
  re_pos_t in_pos, out_pos;
  fd_cplx_t r1, r2;
  h_cplx_t h11, h12, h21, h22;
  logic [3:0] bits;
  logic signed [50:0] z1r, z1i, z2r, z2i;
  int checks = 0, failures = 0;

  zf_demod dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pos(in_pos), .r1(r1), .r2(r2),
                .h11(h11), .h12(h12), .h21(h21), .h22(h22), .out_valid(out_valid),
                .out_data(out_data), .out_pos(out_pos), .bits(bits),
                .z1_re(z1r), .z1_im(z1i), .z2_re(z2r), .z2_im(z2i));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [17:0] rq(input real v);
    return 18'($rtoi(v * 4096.0));
  endfunction

  logic [3:0] exp_bits [$];
  logic       exp_data [$];

  initial begin
    in_pos = '0; r1 = '0; r2 = '0; h11 = '0; h12 = '0; h21 = '0; h22 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      real H [2][2][2];   // [i][j][re/im]
      real x [2][2];
      real y [2][2];
      logic [3:0] b;
      // diagonal-dominant channel with random phases
      for (int a = 0; a < 2; a++)
        for (int c = 0; c < 2; c++) begin
          real mag, ph;
          mag = (a == c) ? 0.6 + 0.4 * ($urandom % 1000) / 1000.0 : 0.3 * ($urandom % 1000) / 1000.0;
          ph  = 6.283185307 * ($urandom % 1000) / 1000.0;
          H[a][c][0] = mag * $cos(ph); H[a][c][1] = mag * $sin(ph);
        end
      b = 4'($urandom);
      x[0][0] = b[0] ? -2048.0 : 2048.0; x[0][1] = b[1] ? -2048.0 : 2048.0;
      x[1][0] = b[2] ? -2048.0 : 2048.0; x[1][1] = b[3] ? -2048.0 : 2048.0;
      for (int a = 0; a < 2; a++) begin
        y[a][0] = 0; y[a][1] = 0;
        for (int c = 0; c < 2; c++) begin
          y[a][0] += H[a][c][0] * x[c][0] - H[a][c][1] * x[c][1];
          y[a][1] += H[a][c][0] * x[c][1] + H[a][c][1] * x[c][0];
        end
        y[a][0] += real'(int'($urandom % 41) - 20);
        y[a][1] += real'(int'($urandom % 41) - 20);
      end
      @(negedge clk);
      in_valid = 1;
      in_pos.slot = slot_t'($urandom % 10);
      in_pos.sym  = sym_t'($urandom % 6);
      in_pos.k    = sc_idx_t'($urandom % 1200);
      h11 = '{re: rq(H[0][0][0]), im: rq(H[0][0][1])};
      h12 = '{re: rq(H[0][1][0]), im: rq(H[0][1][1])};
      h21 = '{re: rq(H[1][0][0]), im: rq(H[1][0][1])};
      h22 = '{re: rq(H[1][1][0]), im: rq(H[1][1][1])};
      r1 = '{re: 16'($rtoi(y[0][0])), im: 16'($rtoi(y[0][1]))};
      r2 = '{re: 16'($rtoi(y[1][0])), im: 16'($rtoi(y[1][1]))};
      exp_bits.push_back(b);
      // data element: not a CRS position (k%6 in {0,3} on symbols 0,1,3,4)
      // and not the PSS symbol (slot 0, symbol 5)
      exp_data.push_back(!(((in_pos.sym == 0) || (in_pos.sym == 1) || (in_pos.sym == 3) || (in_pos.sym == 4)) &&
                           ((in_pos.k % 6 == 0) || (in_pos.k % 6 == 3))) &&
                         !(in_pos.slot == 0 && in_pos.sym == 5));
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_bits.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_bits.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // compare outputs in order; the first output appears two cycles after the first input
  int cyc = 0, first_in = -1;
  logic seen_first = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && first_in < 0) first_in <= cyc;
    if (rst_n && out_valid) begin
      logic [3:0] eb;
      logic ed;
      if (!seen_first) begin
        seen_first <= 1;
        checks++;
        if (cyc - first_in != 2) begin failures++; $display("FAIL latency %0d", cyc - first_in); end
      end
      eb = exp_bits.pop_front();
      ed = exp_data.pop_front();
      checks++;
      if (bits != eb || out_data != ed) begin
        failures++;
        if (failures < 10) $display("FAIL bits %b exp %b data %b exp %b", bits, eb, out_data, ed);
      end
    end
  end
endmodule
