// tx_re_buffer: store of the node's own transmitted resource elements.
//
// The rebuilding units need x_S,j[k], the symbol this node sent on Tx
// antenna j at subcarrier k, when the received symbol it interferes with
// comes out of the Rx FFT, a few OFDM symbols later.  This buffer keeps the
// last DEPTH OFDM symbols of one antenna, addressed by (symbol number in
// the half-frame mod DEPTH, subcarrier).  DEPTH must divide 60 so that the
// addressing is continuous across half-frames.  Using block RAM as
// temporary storage between the Tx and Rx streams follows the prototype;
// the depth and addressing are this design's choices.
//
// Interface: write port wr_valid/wr_pos/wr_re (one element per cycle);
// read port rd_pos -> rd_re, combinational from the stored contents.
module tx_re_buffer
  import fdx_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic     clk,
  input  logic     wr_valid,
  input  re_pos_t  wr_pos,
  input  fd_cplx_t wr_re,
  input  re_pos_t  rd_pos,
  output fd_cplx_t rd_re
);

  localparam int unsigned A_W = $clog2(DEPTH * NSC);

  fd_cplx_t mem [DEPTH * NSC];

  function automatic logic [A_W-1:0] addr(input re_pos_t p);
    logic [6:0] s;
    s = 7'(p.slot) * 7'(SYM_PER_SLOT) + 7'(p.sym);
    return A_W'((32'(s) % DEPTH) * NSC + 32'(p.k));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_valid) mem[addr(wr_pos)] <= wr_re;
  end

  assign rd_re = mem[addr(rd_pos)];

endmodule
