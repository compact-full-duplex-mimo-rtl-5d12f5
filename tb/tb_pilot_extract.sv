// tb_pilot_extract: drives every resource element of a half-frame with a
// random value through four instances (node 1 and node 2, desired and
// self-interference) and checks pil_valid/pil_k/pil_y one cycle later
// against the four-port CRS layout written out here as a table:
//   symbol 0: k%6==0 port 0, k%6==3 port 1     symbol 3: k%6==3 port 0, k%6==0 port 1
//   symbol 1: k%6==0 port 2, k%6==3 port 3     symbol 4: k%6==3 port 2, k%6==0 port 3
module tb_pilot_extract;
  import fdx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  re_pos_t in_pos;
  fd_cplx_t in_y;
  logic [1:0] pv [4];
  sc_idx_t pk [4];
  fd_cplx_t py [4];
  int checks = 0, failures = 0;

  pilot_extract #(.NODE(1), .SI(1'b0)) u0 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pos(in_pos), .in_y(in_y), .pil_valid(pv[0]), .pil_k(pk[0]), .pil_y(py[0]));
  pilot_extract #(.NODE(1), .SI(1'b1)) u1 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pos(in_pos), .in_y(in_y), .pil_valid(pv[1]), .pil_k(pk[1]), .pil_y(py[1]));
  pilot_extract #(.NODE(2), .SI(1'b0)) u2 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pos(in_pos), .in_y(in_y), .pil_valid(pv[2]), .pil_k(pk[2]), .pil_y(py[2]));
  pilot_extract #(.NODE(2), .SI(1'b1)) u3 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_pos(in_pos), .in_y(in_y), .pil_valid(pv[3]), .pil_k(pk[3]), .pil_y(py[3]));

  // port of a position, -1 for none
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int npil [4];
  initial begin
    in_pos = '0; in_y = '0;
    for (int u = 0; u < 4; u++) npil[u] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int slot = 0; slot < 2; slot++)
      for (int sym = 0; sym < 6; sym++)
        for (int k = 0; k < 1200; k++) begin
          int p;
          @(negedge clk);
          in_valid = ($urandom % 8) != 0;
          in_pos = '{slot: slot_t'(slot), sym: sym_t'(sym), k: sc_idx_t'(k)};
          in_y = fd_cplx_t'($urandom);
          p = in_valid ? port_of(sym, k) : -1;
          @(negedge clk);
          for (int u = 0; u < 4; u++) begin
            int node, si, base;
            logic [1:0] e;
            node = (u < 2) ? 1 : 2;
            si = u % 2;
            // desired = partner's ports, SI = own ports
            base = ((node == 1) ^ (si == 1)) ? 2 : 0;
            e = {p == base + 1, p == base};
            checks++;
            if (pv[u] != e || (p >= 0 && (pk[u] != sc_idx_t'(k) || py[u] != in_y))) begin
              failures++;
              if (failures < 10) $display("FAIL u%0d sym %0d k %0d got %b exp %b", u, sym, k, pv[u], e);
            end
            if (e != 0) npil[u]++;
          end
          in_valid = 0;
        end
    // each instance sees pilots of two ports on two symbols per slot
    for (int u = 0; u < 4; u++) begin
      checks++;
      if (npil[u] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
