// dsic: digital self-interference canceler of one Rx port.
//
// Subtracts the rebuilt self-talk and cross-talk of this Rx port from the
// received subcarrier sample:
//     r_i[k] = y_i[k] - (g_ii[k] x_S,i[k] + g_ij[k] x_S,j[k])
// The subtraction per subcarrier follows the prototype; saturation to 16
// bits is this design's choice.
//
// Interface: y, self_talk and cross_talk must belong to the same subcarrier
// in the cycle in_valid is high; out_valid/r follow one cycle later.
module dsic
  import fdx_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  fd_cplx_t y,
  input  fd_cplx_t self_talk,
  input  fd_cplx_t cross_talk,
  output logic     out_valid,
  output fd_cplx_t r
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        r.re <= sat_fd(40'(y.re) - 40'(self_talk.re) - 40'(cross_talk.re));
        r.im <= sat_fd(40'(y.im) - 40'(self_talk.im) - 40'(cross_talk.im));
      end
    end
  end

endmodule
