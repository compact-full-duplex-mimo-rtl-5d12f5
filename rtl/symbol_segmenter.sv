// symbol_segmenter: OFDM symbol segmentation for the two Rx FFTs.
//
// Once the synchronizer has a timing index tau (the position, inside the
// half-frame sample count, of the first FFT sample of the PSS symbol as seen
// after the low-pass filter), the half-frame boundary in the raw sample
// stream is  b = (tau - OFFSET) mod HF  with OFFSET = position of the PSS FFT
// window in the frame (5*2560+512) plus the filter's group delay.  From the
// next time the raw sample counter reaches b, every 2560-sample symbol is
// cut: the 512 cyclic-prefix samples are dropped and the 2048 following
// samples of both Rx antennas are passed on with their bin index, slot
// (0..9) and symbol (0..5) number.  Segmenting from a start point inside
// the cyclic prefix follows the prototype's timing figure; the state
// machine and the re-arming on a changed boundary are this design's.
//
// Interface: raw samples of Rx 1 and Rx 2 with in_valid (one per cycle at
// most); tau_valid/tau load a new timing index.  Outputs are registered one
// cycle after the input sample; out_sof marks bin 0 of a symbol.  The raw
// sample counter starts at 0 with the first sample after reset, the same
// origin the time_sync lag counters use.
module symbol_segmenter
  import fdx_pkg::*;
#(
  parameter int unsigned HF      = HF_LEN,
  parameter int unsigned SYM_LEN = NSYM_LEN,
  parameter int unsigned CP      = NCP,
  parameter int unsigned SPS     = SYM_PER_SLOT,
  parameter int unsigned OFFSET  = PSS_FFT_START + 32,
  localparam int unsigned D_W    = $clog2(HF),
  localparam int unsigned B_W    = $clog2(SYM_LEN - CP)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  adc_cplx_t       in1,
  input  adc_cplx_t       in2,
  input  logic            tau_valid,
  input  logic [D_W-1:0]  tau,
  output logic            out_valid,
  output logic            out_sof,
  output logic [B_W-1:0]  out_bin,
  output slot_t           out_slot,
  output sym_t            out_sym,
  output adc_cplx_t       out1,
  output adc_cplx_t       out2,
  output logic            running
);

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_RUN} state_e;
  state_e state;

  logic [D_W-1:0] n;          // raw sample counter modulo HF
  logic [D_W-1:0] bnd;        // half-frame boundary
  logic [$clog2(SYM_LEN)-1:0] off;
  sym_t  sym;
  slot_t slot;

  logic [D_W:0]   b_calc;
  always_comb begin
    if ({1'b0, tau} >= (D_W+1)'(OFFSET)) b_calc = {1'b0, tau} - (D_W+1)'(OFFSET);
    else                                 b_calc = {1'b0, tau} + (D_W+1)'(HF) - (D_W+1)'(OFFSET);
  end

  // position of the current sample inside the symbol
  logic                       start_now;
  logic [$clog2(SYM_LEN)-1:0] cur_off;
  sym_t                       cur_sym;
  slot_t                      cur_slot;
  always_comb begin
    start_now = (state == S_ARMED) && (n == bnd);
    cur_off   = start_now ? '0 : off;
    cur_sym   = start_now ? '0 : sym;
    cur_slot  = start_now ? '0 : slot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n         <= '0;
      bnd       <= '0;
      off       <= '0;
      sym       <= '0;
      slot      <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_bin   <= '0;
      out_slot  <= '0;
      out_sym   <= '0;
      out1      <= '0;
      out2      <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (tau_valid && (state == S_IDLE || b_calc[D_W-1:0] != bnd)) begin
        bnd   <= b_calc[D_W-1:0];
        state <= S_ARMED;
      end else if (in_valid) begin
        n <= (n == D_W'(HF - 1)) ? '0 : n + 1'b1;
        if (start_now || state == S_RUN) begin
          state <= S_RUN;
          sym   <= cur_sym;     // zero on the first sample after (re-)arming
          slot  <= cur_slot;
          if (cur_off >= ($clog2(SYM_LEN))'(CP)) begin
            out_valid <= 1'b1;
            out_sof   <= cur_off == ($clog2(SYM_LEN))'(CP);
            out_bin   <= B_W'(cur_off - ($clog2(SYM_LEN))'(CP));
            out_slot  <= cur_slot;
            out_sym   <= cur_sym;
            out1      <= in1;
            out2      <= in2;
          end
          if (cur_off == ($clog2(SYM_LEN))'(SYM_LEN - 1)) begin
            off <= '0;
            if (cur_sym == sym_t'(SPS - 1)) begin
              sym  <= '0;
              slot <= (cur_slot == slot_t'(SLOT_PER_HF - 1)) ? '0 : cur_slot + 1'b1;
            end else begin
              sym <= cur_sym + 1'b1;
            end
          end else begin
            off <= cur_off + 1'b1;
          end
        end
      end
      // a sample and a new tau in the same cycle: count the sample anyway
      if (tau_valid && in_valid && (state == S_IDLE || b_calc[D_W-1:0] != bnd))
        n <= (n == D_W'(HF - 1)) ? '0 : n + 1'b1;
    end
  end

  assign running = (state == S_RUN);

endmodule
