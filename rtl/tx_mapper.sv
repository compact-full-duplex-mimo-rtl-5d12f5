// tx_mapper: resource-grid builder of one Tx antenna ("LTE OFDM PHY Tx").
//
// Walks the half-frame grid (10 slots x 6 symbols x 1200 subcarriers, in
// that order) and emits the frequency-domain value of every resource element
// for the IFFT:
//  * the PSS symbol (last symbol of slot 0): the 62-entry PSS table on the
//    subcarriers next to DC on Tx antenna 1, nothing elsewhere; Tx antenna 2
//    sends a NULL symbol;
//  * CRS positions: the pilot A(1+j) on this antenna's own port, zero on the
//    positions of the other three ports (left empty for them);
//  * every other element: uncoded QPSK, A(+-1 +-j), from two input bits
//    (bit 0 -> +A, first bit on I, as in LTE).
// The frame layout, the four-port CRS pattern and uncoded QPSK follow the
// prototype; the constant pilot value, the PSS table loaded by the host
// (the Zadoff-Chu values for the chosen root index) and the stream
// interface are this design's choices.  IFFT and cyclic prefix insertion
// are done by the vendor IFFT core after this block.
//
// Interface: re_valid/re_ready handshake, one element per accepted cycle,
// with its grid position re_pos.  A data element is offered only when
// bits_valid is high, and its two bits are taken (bits_ready) in the cycle
// the element is accepted.  Elements are combinational from the grid
// counters; the counters advance on each accepted element.
module tx_mapper
  import fdx_pkg::*;
#(
  parameter int unsigned NODE = 1,      // 1 or 2
  parameter int unsigned ANT  = 0       // 0: Tx antenna 1, 1: Tx antenna 2
) (
  input  logic        clk,
  input  logic        rst_n,
  // PSS table load (used on Tx antenna 1)
  input  logic        pss_we,
  input  logic [5:0]  pss_addr,
  input  fd_cplx_t    pss_data,
  // data bits
  input  logic        bits_valid,
  input  logic [1:0]  bits,
  output logic        bits_ready,
  // resource elements to the IFFT
  output logic        re_valid,
  input  logic        re_ready,
  output re_pos_t     re_pos,
  output fd_cplx_t    re,
  output re_kind_e    re_kind
);

  localparam logic [1:0] MY_PORT = 2'((NODE - 1) * 2 + ANT);

  fd_cplx_t pss_tab [NPSS];
  always_ff @(posedge clk) begin
    if (pss_we && pss_addr < 6'(NPSS)) pss_tab[pss_addr] <= pss_data;
  end

  slot_t   slot;
  sym_t    sym;
  sc_idx_t k;

  always_comb begin
    re       = '0;
    re_kind  = RE_EMPTY;
    if (is_pss_symbol(slot, sym)) begin
      if (ANT == 0 && is_pss_sc(k)) begin
        re      = pss_tab[pss_index(k)];
        re_kind = RE_PSS;
      end
    end else if (crs_is_pilot(sym, k)) begin
      if (crs_port(sym, k) == MY_PORT) begin
        re.re   = FD_W'(QAMP);
        re.im   = FD_W'(QAMP);
        re_kind = RE_PILOT;
      end
    end else begin
      re.re   = bits[0] ? -FD_W'(QAMP) : FD_W'(QAMP);
      re.im   = bits[1] ? -FD_W'(QAMP) : FD_W'(QAMP);
      re_kind = RE_DATA;
    end
    re_valid   = (re_kind != RE_DATA) || bits_valid;
    bits_ready = (re_kind == RE_DATA) && re_ready;
    re_pos     = '{slot: slot, sym: sym, k: k};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      sym  <= '0;
      k    <= '0;
    end else if (re_valid && re_ready) begin
      if (k == sc_idx_t'(NSC - 1)) begin
        k <= '0;
        if (sym == sym_t'(SYM_PER_SLOT - 1)) begin
          sym  <= '0;
          slot <= (slot == slot_t'(SLOT_PER_HF - 1)) ? '0 : slot + 1'b1;
        end else begin
          sym <= sym + 1'b1;
        end
      end else begin
        k <= k + 1'b1;
      end
    end
  end

endmodule
