// pilot_extract: picks the CRS pilots of two Tx ports out of one Rx
// subcarrier stream.
//
// Each full duplex node sends CRS on two of the four LTE antenna ports
// (node 1: ports 0/1, node 2: ports 2/3), so at a node the pilots of the
// partner's ports give the desired channel and those of its own ports give
// the self-interference channel.  Parameter SI selects which pair this
// instance extracts (SI=0: partner's ports = 'desired signal', SI=1: own
// ports = 'self-interference'); NODE (1 or 2) says which node this is.
// The pilot positions are those of fdx_pkg (four-port CRS layout); the
// port-to-node assignment and the stream format are this design's choices.
//
// Interface: one resource element per cycle with its grid position.  The
// pilot outputs are registered (one cycle): pil_valid[j] marks a pilot of
// Tx antenna j (0 or 1) of the selected node, with its subcarrier index and
// received value.
module pilot_extract
  import fdx_pkg::*;
#(
  parameter int unsigned NODE = 1,
  parameter bit          SI   = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  re_pos_t    in_pos,
  input  fd_cplx_t   in_y,
  output logic [1:0] pil_valid,
  output sc_idx_t    pil_k,
  output fd_cplx_t   pil_y
);

  localparam logic [1:0] OWN_BASE  = (NODE == 1) ? 2'd0 : 2'd2;
  localparam logic [1:0] PART_BASE = (NODE == 1) ? 2'd2 : 2'd0;
  localparam logic [1:0] BASE      = SI ? OWN_BASE : PART_BASE;

  logic       is_p;
  logic [1:0] port;
  always_comb begin
    is_p = in_valid && crs_is_pilot(in_pos.sym, in_pos.k);
    port = crs_port(in_pos.sym, in_pos.k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pil_valid <= '0;
      pil_k     <= '0;
      pil_y     <= '0;
    end else begin
      pil_valid[0] <= is_p && (port == BASE);
      pil_valid[1] <= is_p && (port == BASE + 2'd1);
      if (in_valid) begin
        pil_k <= in_pos.k;
        pil_y <= in_y;
      end
    end
  end

endmodule
