// re_indexer: maps FFT output bins to used-subcarrier indices.
//
// The Rx FFT delivers bins 0..2047 in natural order.  The 1200 used
// subcarriers are the 600 bins below DC (bins 1448..2047 -> k = 0..599) and
// the 600 bins above DC (bins 1..600 -> k = 600..1199); DC and the guard
// bins are dropped.  The LTE-style mapping around an unused DC carrier is
// this design's reading of the 1200-subcarrier, 2048-point numerology.
//
// Interface: fft_valid with bin index, slot/symbol labels and one value per
// Rx antenna; the output (registered, one cycle) carries the grid position.
module re_indexer
  import fdx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fft_valid,
  input  logic [10:0] fft_bin,
  input  slot_t       fft_slot,
  input  sym_t        fft_sym,
  input  fd_cplx_t    fft1,
  input  fd_cplx_t    fft2,
  output logic        out_valid,
  output re_pos_t     out_pos,
  output fd_cplx_t    out1,
  output fd_cplx_t    out2
);

  localparam int unsigned HALF = NSC / 2;   // 600

  logic    used;
  sc_idx_t k;
  always_comb begin
    used = 1'b0;
    k    = '0;
    if (fft_bin >= 11'd1 && fft_bin <= 11'(HALF)) begin
      used = 1'b1;
      k    = sc_idx_t'(fft_bin - 11'd1 + 11'(HALF));
    end else if (fft_bin >= 11'(NFFT - HALF)) begin
      used = 1'b1;
      k    = sc_idx_t'(fft_bin - 11'(NFFT - HALF));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      out1      <= '0;
      out2      <= '0;
    end else begin
      out_valid <= fft_valid && used;
      if (fft_valid) begin
        out_pos <= '{slot: fft_slot, sym: fft_sym, k: k};
        out1    <= fft1;
        out2    <= fft2;
      end
    end
  end

endmodule
