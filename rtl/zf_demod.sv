// zf_demod: 2x2 zero-forcing MIMO detection and QPSK hard decision.
//
// For every data subcarrier the two desired streams are recovered from the
// self-interference-free samples r = y - y_S with the zero-forcing matrix
// F = (H^H H)^-1 H^H, which for a square 2x2 H is H^-1 = adj(H) / det(H):
//     x_hat = adj(H) r / det(H),  adj(H) = [h22 -h12; -h21 h11]
// Uncoded QPSK only needs the signs of x_hat.  Dividing by det is the same
// as multiplying by conj(det) / |det|^2 and |det|^2 > 0, so the unit forms
// z = adj(H) r conj(det) and decides on its signs: no divider is needed.
// z (x_hat scaled by |det|^2) is also output.  ZF detection follows the
// prototype; the divider-free form, the widths and the QPSK bit mapping
// (bit 0 -> +, as in LTE, first bit on I) are this design's choices.
//
// Interface: one subcarrier per cycle with its grid position; the result is
// registered two cycles later.  out_data is high for data resource elements
// (not a pilot of any port and not the PSS symbol); bits[1:0] belong to
// stream 1, bits[3:2] to stream 2.
module zf_demod
  import fdx_pkg::*;
#(
  localparam int unsigned A_W  = 2 * H_W + 2,         // det before scaling
  localparam int unsigned U_W  = H_W + FD_W + 2,      // adj(H) r before scaling
  localparam int unsigned DS_W = A_W - H_FRAC,        // scaled det
  localparam int unsigned US_W = U_W - H_FRAC,        // scaled adj(H) r
  localparam int unsigned Z_W  = DS_W + US_W + 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  re_pos_t  in_pos,
  input  fd_cplx_t r1,
  input  fd_cplx_t r2,
  input  h_cplx_t  h11,
  input  h_cplx_t  h12,
  input  h_cplx_t  h21,
  input  h_cplx_t  h22,
  output logic     out_valid,
  output logic     out_data,
  output re_pos_t  out_pos,
  output logic [3:0] bits,
  output logic signed [Z_W-1:0] z1_re,
  output logic signed [Z_W-1:0] z1_im,
  output logic signed [Z_W-1:0] z2_re,
  output logic signed [Z_W-1:0] z2_im
);

  typedef logic signed [A_W-1:0] a_t;
  typedef logic signed [U_W-1:0] u_t;
  typedef logic signed [Z_W-1:0] z_t;

  // complex multiply helpers
  function automatic a_t hh_re(input h_cplx_t a, input h_cplx_t b);
    return a_t'(a.re) * a_t'(b.re) - a_t'(a.im) * a_t'(b.im);
  endfunction
  function automatic a_t hh_im(input h_cplx_t a, input h_cplx_t b);
    return a_t'(a.re) * a_t'(b.im) + a_t'(a.im) * a_t'(b.re);
  endfunction
  function automatic u_t hr_re(input h_cplx_t a, input fd_cplx_t b);
    return u_t'(a.re) * u_t'(b.re) - u_t'(a.im) * u_t'(b.im);
  endfunction
  function automatic u_t hr_im(input h_cplx_t a, input fd_cplx_t b);
    return u_t'(a.re) * u_t'(b.im) + u_t'(a.im) * u_t'(b.re);
  endfunction

  // ---- stage 1: det(H) and adj(H) r ----------------------------------------
  a_t det_re, det_im;
  u_t u1_re, u1_im, u2_re, u2_im;
  always_comb begin
    det_re = hh_re(h11, h22) - hh_re(h12, h21);
    det_im = hh_im(h11, h22) - hh_im(h12, h21);
    u1_re  = hr_re(h22, r1) - hr_re(h12, r2);
    u1_im  = hr_im(h22, r1) - hr_im(h12, r2);
    u2_re  = hr_re(h11, r2) - hr_re(h21, r1);
    u2_im  = hr_im(h11, r2) - hr_im(h21, r1);
  end

  logic                      s1_valid;
  re_pos_t                   s1_pos;
  logic signed [DS_W-1:0]    s1_dre, s1_dim;
  logic signed [US_W-1:0]    s1_u1re, s1_u1im, s1_u2re, s1_u2im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_pos   <= '0;
      s1_dre   <= '0; s1_dim  <= '0;
      s1_u1re  <= '0; s1_u1im <= '0;
      s1_u2re  <= '0; s1_u2im <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_pos  <= in_pos;
        s1_dre  <= DS_W'(det_re >>> H_FRAC);
        s1_dim  <= DS_W'(det_im >>> H_FRAC);
        s1_u1re <= US_W'(u1_re >>> H_FRAC);
        s1_u1im <= US_W'(u1_im >>> H_FRAC);
        s1_u2re <= US_W'(u2_re >>> H_FRAC);
        s1_u2im <= US_W'(u2_im >>> H_FRAC);
      end
    end
  end

  // ---- stage 2: z = u conj(det), QPSK decision -------------------------------
  z_t z1r, z1i, z2r, z2i;
  always_comb begin
    z1r = z_t'(s1_u1re) * z_t'(s1_dre) + z_t'(s1_u1im) * z_t'(s1_dim);
    z1i = z_t'(s1_u1im) * z_t'(s1_dre) - z_t'(s1_u1re) * z_t'(s1_dim);
    z2r = z_t'(s1_u2re) * z_t'(s1_dre) + z_t'(s1_u2im) * z_t'(s1_dim);
    z2i = z_t'(s1_u2im) * z_t'(s1_dre) - z_t'(s1_u2re) * z_t'(s1_dim);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= 1'b0;
      out_pos   <= '0;
      bits      <= '0;
      z1_re <= '0; z1_im <= '0; z2_re <= '0; z2_im <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_pos  <= s1_pos;
        out_data <= is_data_re(s1_pos.slot, s1_pos.sym, s1_pos.k);
        bits     <= {z2i[Z_W-1], z2r[Z_W-1], z1i[Z_W-1], z1r[Z_W-1]};
        z1_re <= z1r; z1_im <= z1i; z2_re <= z2r; z2_im <= z2i;
      end
    end
  end

endmodule
