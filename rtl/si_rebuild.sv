// si_rebuild: self-interference rebuilding for one Tx-to-Rx path.
//
// A self-talk (Tx j to Rx j) or cross-talk (Tx j to Rx i, i != j) rebuilding
// unit.  It estimates the self-interference channel g_ij[k] from the node's
// own CRS pilots of Tx port j seen at Rx port i (chan_est), and for every
// received subcarrier k rebuilds the interference that the node's own
// transmitted symbol x_S,j[k] causes there:
//     y_hat[k] = g_ij[k] * x_S,j[k]
// Rebuilding per subcarrier after the FFT, from the own pilots, follows the
// prototype.  Rounding and saturation to 16 bits are this design's.
//
// Interface: pilot write port as in chan_est; in_valid/in_k/x_s present one
// subcarrier per cycle and out_valid/y_hat follow one cycle later.
module si_rebuild
  import fdx_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     pil_valid,
  input  sc_idx_t  pil_k,
  input  fd_cplx_t pil_y,
  input  logic     in_valid,
  input  sc_idx_t  in_k,
  input  fd_cplx_t x_s,
  output logic     out_valid,
  output fd_cplx_t y_hat,
  output h_cplx_t  g_est
);

  chan_est u_est (
    .clk       (clk),
    .pil_valid (pil_valid),
    .pil_k     (pil_k),
    .pil_y     (pil_y),
    .rd_k      (in_k),
    .est       (g_est)
  );

  localparam int unsigned P_W = H_W + FD_W + 2;
  typedef logic signed [P_W-1:0] prod_t;

  prod_t p_re, p_im;
  always_comb begin
    p_re = prod_t'(g_est.re) * prod_t'(x_s.re) - prod_t'(g_est.im) * prod_t'(x_s.im);
    p_im = prod_t'(g_est.re) * prod_t'(x_s.im) + prod_t'(g_est.im) * prod_t'(x_s.re);
    p_re = (p_re + (prod_t'(1) <<< (H_FRAC - 1))) >>> H_FRAC;
    p_im = (p_im + (prod_t'(1) <<< (H_FRAC - 1))) >>> H_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y_hat     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y_hat.re <= sat_fd(40'(p_re));
        y_hat.im <= sat_fd(40'(p_im));
      end
    end
  end

endmodule
