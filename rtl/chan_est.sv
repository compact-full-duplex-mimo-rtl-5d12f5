// chan_est: per-subcarrier channel estimate of one Tx-to-Rx path from CRS.
//
// At each pilot of the path the least-squares estimate
//     h[k] = y[k] p*[k] / |p[k]|^2
// is stored.  With y = h A(1+j), y p* = 2A^2 h, and with H_FRAC = log2(A)+1
// the estimate in fixed point is just y_re+y_im + j(y_im-y_re).  The pilot symbol is this design's choice: the same QPSK point
// p = A(1+j), A = 2^QAMP_LOG2, on every pilot, so the division is a shift.  A port has pilots every 6 subcarriers in two symbols per slot,
// offset by 3, so together they fill a grid of every third subcarrier; the
// grid holds the newest estimate of each point (400 entries for 1200
// subcarriers).  Reading subcarrier k linearly interpolates between grid
// points floor(k/3) and floor(k/3)+1 (the last points hold their value).
// Least squares on the CRS follows the prototype; the grid, the linear
// interpolation (the prototype uses an FIR interpolator whose taps are not
// published) and the widths are this design's.
//
// Interface: pil_valid/pil_k/pil_y write a pilot (one per cycle at most).
// The read port is combinational: est for rd_k from the stored grid, so a
// pilot written at a clock edge is seen by reads after that edge.  The
// grid RAM is not reset; it is valid once one slot of pilots has passed.
module chan_est
  import fdx_pkg::*;
#(
  parameter int unsigned NGRID = NSC / 3,
  parameter int unsigned LS_SHIFT = QAMP_LOG2 + 1 - H_FRAC
) (
  input  logic     clk,
  input  logic     pil_valid,
  input  sc_idx_t  pil_k,
  input  fd_cplx_t pil_y,
  input  sc_idx_t  rd_k,
  output h_cplx_t  est
);

  localparam int unsigned G_W = $clog2(NGRID);

  h_cplx_t grid [NGRID];

  // least-squares estimate of the incoming pilot
  logic signed [FD_W+1:0] ls_re, ls_im;
  h_cplx_t                ls;
  always_comb begin
    ls_re = (FD_W+2)'(pil_y.re) + (FD_W+2)'(pil_y.im);
    ls_im = (FD_W+2)'(pil_y.im) - (FD_W+2)'(pil_y.re);
    ls.re = H_W'(ls_re >>> LS_SHIFT);
    ls.im = H_W'(ls_im >>> LS_SHIFT);
  end

  always_ff @(posedge clk) begin
    if (pil_valid) grid[G_W'(pil_k / 3)] <= ls;
  end

  // interpolated read
  logic [G_W-1:0]       g0, g1;
  logic [1:0]           w;
  logic signed [H_W+3:0] acc_re, acc_im;
  logic signed [H_W+21:0] q_re, q_im;
  always_comb begin
    g0 = G_W'(rd_k / 3);
    w  = 2'(rd_k % 3);
    g1 = (g0 == G_W'(NGRID - 1)) ? g0 : g0 + 1'b1;
    acc_re = (H_W+4)'(grid[g0].re) * (H_W+4)'(3 - w) + (H_W+4)'(grid[g1].re) * (H_W+4)'(w);
    acc_im = (H_W+4)'(grid[g0].im) * (H_W+4)'(3 - w) + (H_W+4)'(grid[g1].im) * (H_W+4)'(w);
    // divide by 3: x * 43691 / 2^17, rounded
    q_re = ((H_W+22)'(acc_re) * (H_W+22)'(43691) + (H_W+22)'(1 << 16)) >>> 17;
    q_im = ((H_W+22)'(acc_im) * (H_W+22)'(43691) + (H_W+22)'(1 << 16)) >>> 17;
    if (w == 2'd0) begin
      est = grid[g0];
    end else begin
      est.re = H_W'(q_re);
      est.im = H_W'(q_im);
    end
  end

endmodule
