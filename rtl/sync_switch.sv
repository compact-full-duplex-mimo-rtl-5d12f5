// sync_switch: NSP index switching for full duplex timing synchronization.
//
// Takes the window results of the two time_sync units (index 1: PSS of the
// partner = desired signal, index 2: own PSS = self-interference) and
// applies steps 4 and 5 of the synchronization algorithm:
//   alpha1 > th and alpha2 > th : tau1 = tau_hat1, tau2 = tau_hat2
//   alpha1 > th, alpha2 <= th   : tau1 = tau2 = tau_hat1  (partner close)
//   alpha1 <= th, alpha2 > th   : tau1 = tau2 = tau_hat2  (poor link)
//   neither                     : no update, wait for the next window
// The decision rule follows the prototype.  Waiting for both results before
// deciding (they normally arrive in the same cycle), the held outputs and
// the 'locked' flag are this design's choices.
//
// Timing: the decision is registered; upd_valid pulses one cycle after the
// later of the two result pulses.  tau1/tau2 hold their last value.
module sync_switch
  import fdx_pkg::*;
#(
  parameter int unsigned D_W = $clog2(HF_LEN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           res1_valid,
  input  logic [D_W-1:0] tau_hat1,
  input  logic           pass1,
  input  logic           res2_valid,
  input  logic [D_W-1:0] tau_hat2,
  input  logic           pass2,
  output logic           upd_valid,   // pulses when tau1/tau2 were updated
  output logic           fail_valid,  // pulses when neither test passed
  output logic [1:0]     sel_case,    // 0: none, 1: both, 2: desired only, 3: SI only
  output logic [D_W-1:0] tau1,        // timing for the desired signal
  output logic [D_W-1:0] tau2,        // timing for the self-interference
  output logic           locked       // at least one update since reset
);

  typedef enum logic [1:0] {
    CASE_NONE = 2'd0,
    CASE_BOTH = 2'd1,
    CASE_DES  = 2'd2,
    CASE_SI   = 2'd3
  } case_e;

  logic           have1, have2;
  logic [D_W-1:0] t1_q, t2_q;
  logic           p1_q, p2_q;

  // current view including results arriving this cycle
  logic           h1, h2, a1, a2;
  logic [D_W-1:0] t1, t2;
  case_e          c;
  always_comb begin
    h1 = have1 | res1_valid;
    h2 = have2 | res2_valid;
    a1 = res1_valid ? pass1 : p1_q;
    a2 = res2_valid ? pass2 : p2_q;
    t1 = res1_valid ? tau_hat1 : t1_q;
    t2 = res2_valid ? tau_hat2 : t2_q;
    unique case ({a1, a2})
      2'b11:   c = CASE_BOTH;
      2'b10:   c = CASE_DES;
      2'b01:   c = CASE_SI;
      default: c = CASE_NONE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have1 <= 1'b0; have2 <= 1'b0;
      t1_q  <= '0;   t2_q  <= '0;
      p1_q  <= 1'b0; p2_q  <= 1'b0;
      upd_valid  <= 1'b0;
      fail_valid <= 1'b0;
      sel_case   <= CASE_NONE;
      tau1       <= '0;
      tau2       <= '0;
      locked     <= 1'b0;
    end else begin
      upd_valid  <= 1'b0;
      fail_valid <= 1'b0;
      if (h1 && h2) begin
        have1 <= 1'b0;
        have2 <= 1'b0;
        sel_case <= c;
        unique case (c)
          CASE_BOTH: begin tau1 <= t1; tau2 <= t2; end
          CASE_DES:  begin tau1 <= t1; tau2 <= t1; end
          CASE_SI:   begin tau1 <= t2; tau2 <= t2; end
          default:   ;
        endcase
        if (c != CASE_NONE) begin
          upd_valid <= 1'b1;
          locked    <= 1'b1;
        end else begin
          fail_valid <= 1'b1;
        end
      end else begin
        if (res1_valid) begin have1 <= 1'b1; t1_q <= tau_hat1; p1_q <= pass1; end
        if (res2_valid) begin have2 <= 1'b1; t2_q <= tau_hat2; p2_q <= pass2; end
      end
    end
  end

endmodule
