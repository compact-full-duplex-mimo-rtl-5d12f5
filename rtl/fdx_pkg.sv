// fdx_pkg: types, constants and helper functions shared by the full duplex
// 2x2 MIMO PHY.
//
// Numerology (follows the prototype): 30.72 MS/s, 2048-point FFT, extended
// cyclic prefix of 512 samples, 6 OFDM symbols per 0.5 ms slot, 10 slots per
// 5 ms half-frame (153,600 samples), 1200 used subcarriers.  The PSS is sent
// in the last symbol of the first slot of each half-frame on Tx antenna 1;
// Tx antenna 2 is silent (NULL) in that symbol.
//
// Cell-specific reference signals (CRS) use the LTE four-port layout: ports
// 0/1 belong to full duplex node 1, ports 2/3 to node 2.  Inside each slot
// (symbol s = 0..5, used-subcarrier index k):
//   s=0: k%6==0 -> port 0, k%6==3 -> port 1
//   s=3: k%6==3 -> port 0, k%6==0 -> port 1
//   s=1: k%6==0 -> port 2, k%6==3 -> port 3
//   s=4: k%6==3 -> port 2, k%6==0 -> port 3
// Every pilot position of one port is left empty on the other three antennas.
//
// Word widths are this design's choice: ADC samples are 14 bit (the
// converter's resolution), frequency-domain samples 16 bit, channel
// estimates 18 bit with 12 fractional bits.
package fdx_pkg;

  // ---- numerology ---------------------------------------------------------
  localparam int unsigned NFFT       = 2048;
  localparam int unsigned NCP        = 512;
  localparam int unsigned NSYM_LEN   = NFFT + NCP;          // 2560
  localparam int unsigned SYM_PER_SLOT = 6;
  localparam int unsigned SLOT_PER_HF  = 10;
  localparam int unsigned HF_LEN     = NSYM_LEN * SYM_PER_SLOT * SLOT_PER_HF; // 153600
  localparam int unsigned NSC        = 1200;                // used subcarriers
  localparam int unsigned NPSS       = 62;                  // PSS length
  localparam int unsigned PSS_SLOT   = 0;
  localparam int unsigned PSS_SYM    = 5;
  // Position of the first FFT sample of the PSS symbol inside a half-frame.
  localparam int unsigned PSS_FFT_START = PSS_SYM * NSYM_LEN + NCP;   // 13312

  // ---- word widths --------------------------------------------------------
  localparam int unsigned ADC_W  = 14;   // time-domain Rx sample
  localparam int unsigned FD_W   = 16;   // frequency-domain sample
  localparam int unsigned H_W    = 18;   // channel estimate
  localparam int unsigned H_FRAC = 12;   // fractional bits of a channel estimate

  // QPSK / pilot amplitude on each of I and Q (2^11).
  localparam int unsigned QAMP_LOG2 = 11;
  localparam int signed   QAMP      = 1 << QAMP_LOG2;

  typedef logic [10:0] sc_idx_t;   // 0..1199
  typedef logic [3:0]  slot_t;     // 0..9
  typedef logic [2:0]  sym_t;      // 0..5

  typedef struct packed {
    logic signed [ADC_W-1:0] re;
    logic signed [ADC_W-1:0] im;
  } adc_cplx_t;

  typedef struct packed {
    logic signed [FD_W-1:0] re;
    logic signed [FD_W-1:0] im;
  } fd_cplx_t;

  typedef struct packed {
    logic signed [H_W-1:0] re;
    logic signed [H_W-1:0] im;
  } h_cplx_t;

  // Position of a resource element in the half-frame grid.
  typedef struct packed {
    slot_t   slot;
    sym_t    sym;
    sc_idx_t k;
  } re_pos_t;

  typedef enum logic [1:0] {
    RE_DATA  = 2'd0,
    RE_PILOT = 2'd1,
    RE_PSS   = 2'd2,
    RE_EMPTY = 2'd3
  } re_kind_e;

  // CRS lookup: does (sym, k) carry a pilot, and of which port (0..3)?
  function automatic logic crs_is_pilot(input sym_t sym, input sc_idx_t k);
    logic [2:0] m;
    m = 3'(k % 6);
    return (sym == 3'd0 || sym == 3'd1 || sym == 3'd3 || sym == 3'd4) &&
           (m == 3'd0 || m == 3'd3);
  endfunction

  function automatic logic [1:0] crs_port(input sym_t sym, input sc_idx_t k);
    logic shifted;  // k%6 == 3
    shifted = (k % 6) == 3;
    case (sym)
      3'd0:    return shifted ? 2'd1 : 2'd0;
      3'd3:    return shifted ? 2'd0 : 2'd1;
      3'd1:    return shifted ? 2'd3 : 2'd2;
      default: return shifted ? 2'd2 : 2'd3;   // sym 4
    endcase
  endfunction

  // PSS resource element: the 62 subcarriers next to DC in the PSS symbol.
  // Used-subcarrier index 599 is DC-1, 600 is DC+1.
  function automatic logic is_pss_symbol(input slot_t slot, input sym_t sym);
    return slot == slot_t'(PSS_SLOT) && sym == sym_t'(PSS_SYM);
  endfunction

  function automatic logic is_pss_sc(input sc_idx_t k);
    return k >= sc_idx_t'(569) && k <= sc_idx_t'(630);
  endfunction

  // Index 0..61 into the PSS table for k in 569..630
  // (table index = paper subcarrier index +31 below DC, +30 above DC).
  function automatic logic [5:0] pss_index(input sc_idx_t k);
    return 6'(k - sc_idx_t'(569));
  endfunction

  // Resource elements that carry desired data: no pilot of any port and not
  // the PSS symbol.
  function automatic logic is_data_re(input slot_t slot, input sym_t sym, input sc_idx_t k);
    return !crs_is_pilot(sym, k) && !is_pss_symbol(slot, sym);
  endfunction

  // Saturate a wide signed value to FD_W bits.
  function automatic logic signed [FD_W-1:0] sat_fd(input logic signed [39:0] v);
    localparam logic signed [39:0] MAXV = 40'sd32767;
    localparam logic signed [39:0] MINV = -40'sd32768;
    if (v > MAXV)      return 16'sh7fff;
    else if (v < MINV) return 16'sh8000;
    else               return v[FD_W-1:0];
  endfunction

endpackage
