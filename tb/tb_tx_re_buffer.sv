// tb_tx_re_buffer: writes a stream of random elements in grid order over
// more than one half-frame and, while writing, reads back random elements
// of the last DEPTH symbols, comparing them with a copy kept by the
// testbench (indexed by the absolute symbol number).
module tb_tx_re_buffer;
  import fdx_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0;
  re_pos_t wr_pos, rd_pos;
  fd_cplx_t wr_re, rd_re;
  int checks = 0, failures = 0;

  tx_re_buffer #(.DEPTH(DEPTH)) dut (.clk(clk), .wr_valid(wr_valid), .wr_pos(wr_pos), .wr_re(wr_re),
                                     .rd_pos(rd_pos), .rd_re(rd_re));

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fd_cplx_t model [int];   // key: absolute symbol * 2048 + k

  initial begin
    wr_pos = '0; rd_pos = '0; wr_re = '0;
    for (int s = 0; s < 70; s++) begin
      int slot, sym;
      slot = (s % 60) / 6; sym = s % 6;
      for (int k = 0; k < 1200; k += 1 + ($urandom % 3 == 0 ? 0 : 0)) begin
        @(negedge clk);
        wr_valid = 1;
        wr_pos = '{slot: slot_t'(slot), sym: sym_t'(sym), k: sc_idx_t'(k)};
        wr_re = fd_cplx_t'($urandom);
        model[s * 2048 + k] = wr_re;
        // read an element of an older, complete symbol (up to DEPTH-1 back)
        if (s >= DEPTH - 1) begin
          int bs, bk;
          bs = s - 1 - int'($urandom % (DEPTH - 1));
          bk = int'($urandom % 1200);
          rd_pos = '{slot: slot_t'((bs % 60) / 6), sym: sym_t'(bs % 6), k: sc_idx_t'(bk)};
          #1;
          checks++;
          if (rd_re != model[bs * 2048 + bk]) begin
            failures++;
            if (failures < 10) $display("FAIL sym %0d k %0d", bs, bk);
          end
        end
      end
    end
    @(negedge clk);
    wr_valid = 0;
    // whole last symbol read back after the writes
    for (int k = 0; k < 1200; k++) begin
      rd_pos = '{slot: slot_t'((69 % 60) / 6), sym: sym_t'(69 % 6), k: sc_idx_t'(k)};
      #1;
      checks++;
      if (rd_re != model[69 * 2048 + k]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
