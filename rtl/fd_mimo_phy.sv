// fd_mimo_phy: full duplex 2x2 MIMO baseband PHY of one node.
//
// Transmit side: two tx_mapper units build the resource grid of Tx antennas
// 1 and 2 (QPSK data, own CRS port, empty positions for the other three
// ports, PSS or NULL symbol) and hand it to the IFFT core; every element is
// also stored in a tx_re_buffer per antenna for the canceler.
//
// Receive side, time domain: the Rx 1 samples are low-pass filtered (lpf)
// and correlated with the partner's PSS (time_sync 'desired', root u(1))
// and with the node's own PSS (time_sync 'self-interference', root u(2)).
// sync_switch applies the NSP index switching rule and the chosen timing of
// the desired signal drives the symbol_segmenter, which cuts CP-free
// 2048-sample symbols of both Rx antennas for the FFT cores.  Two
// power_meter units give the half-frame received energy and the 20-half-
// frame noise variance.
//
// Receive side, frequency domain (after the FFT): re_indexer labels the used
// subcarriers; per Rx port i two pilot_extract units separate the partner's
// and the own CRS; four chan_est units estimate the desired channel H; four
// si_rebuild units (self-talk g_ii x_S,i and cross-talk g_ij x_S,j) estimate
// the self-interference channels and rebuild the interference from the
// stored Tx symbols; two dsic units subtract it; zf_demod detects the two
// desired QPSK streams.  The block structure follows the prototype's PHY
// diagram; stream formats, widths and pipeline timing are this design's.
//
// Pipeline after the FFT (cycles after re_indexer output, stage 0):
// pilots are written at stage 1, rebuilt interference is ready at stage 1,
// the canceled samples r1/r2 at stage 2 (rx_res_*), detected bits at stage 4
// (det_*).  FFT and IFFT cores, converters and the host are outside: their
// streams are ports.  The host loads the two ideal PSS correlation
// references (ref_*) and the PSS table (pss_*) after reset.
module fd_mimo_phy
  import fdx_pkg::*;
#(
  parameter int unsigned NODE      = 1,
  parameter int unsigned LPF_NTAP  = 65,
  parameter int unsigned SYNC_N    = NFFT,
  parameter int unsigned ALPHA_TH  = 64,          // NSP threshold, Q.4 (4.0)
  parameter int unsigned TXB_DEPTH = 4,
  parameter int unsigned NOISE_HF  = 20,          // half-frames for noise variance
  localparam int unsigned D_W      = $clog2(HF_LEN)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host: correlation references (ref_sel 0: desired PSS, 1: own PSS)
  input  logic                   ref_we,
  input  logic                   ref_sel,
  input  logic [$clog2(SYNC_N)-1:0] ref_addr,
  input  logic signed [11:0]     ref_re,
  input  logic signed [11:0]     ref_im,
  // host: PSS table of Tx antenna 1
  input  logic                   pss_we,
  input  logic [5:0]             pss_addr,
  input  fd_cplx_t               pss_data,
  // Tx data bits, one pair per data element and antenna
  input  logic [1:0]             bits_valid,
  input  logic [1:0][1:0]        bits,
  output logic [1:0]             bits_ready,
  // Tx resource elements to the IFFT cores (both antennas together)
  output logic                   tx_valid,
  input  logic                   tx_ready,
  output re_pos_t                tx_pos,
  output fd_cplx_t [1:0]         tx_re,
  // ADC samples
  input  logic                   adc_valid,
  input  adc_cplx_t              adc1,
  input  adc_cplx_t              adc2,
  // segmented samples to the Rx FFT cores
  output logic                   seg_valid,
  output logic                   seg_sof,
  output logic [10:0]            seg_bin,
  output slot_t                  seg_slot,
  output sym_t                   seg_sym,
  output adc_cplx_t              seg1,
  output adc_cplx_t              seg2,
  // Rx FFT outputs
  input  logic                   fft_valid,
  input  logic [10:0]            fft_bin,
  input  slot_t                  fft_slot,
  input  sym_t                   fft_sym,
  input  fd_cplx_t               fft1,
  input  fd_cplx_t               fft2,
  // synchronization status
  output logic                   sync_upd,
  output logic                   sync_fail,
  output logic [1:0]             sync_case,
  output logic [D_W-1:0]         tau1,
  output logic [D_W-1:0]         tau2,
  output logic                   sync_locked,
  // canceled subcarrier samples
  output logic                   rx_res_valid,
  output re_pos_t                rx_res_pos,
  output fd_cplx_t               rx_res1,
  output fd_cplx_t               rx_res2,
  // detected data
  output logic                   det_valid,
  output re_pos_t                det_pos,
  output logic [3:0]             det_bits,
  // link-quality measurements
  output logic                   energy_valid,
  output logic [2*ADC_W+1:0]     energy_mean,
  output logic                   noise_valid,
  output logic [2*ADC_W+1:0]     noise_mean
);

  // ======================= transmit side ==================================
  logic [1:0]     m_valid, m_ready;
  re_pos_t [1:0]  m_pos;
  re_kind_e       m_kind [2];

  for (genvar a = 0; a < 2; a++) begin : g_tx
    tx_mapper #(.NODE(NODE), .ANT(a)) u_map (
      .clk        (clk),
      .rst_n      (rst_n),
      .pss_we     (pss_we),
      .pss_addr   (pss_addr),
      .pss_data   (pss_data),
      .bits_valid (bits_valid[a]),
      .bits       (bits[a]),
      .bits_ready (bits_ready[a]),
      .re_valid   (m_valid[a]),
      .re_ready   (m_ready[a]),
      .re_pos     (m_pos[a]),
      .re         (tx_re[a]),
      .re_kind    (m_kind[a])
    );
  end

  // both antennas advance together
  assign tx_valid   = m_valid[0] & m_valid[1];
  assign m_ready[0] = tx_ready & m_valid[1];
  assign m_ready[1] = tx_ready & m_valid[0];
  assign tx_pos     = m_pos[0];

  // ======================= Rx time domain =================================
  logic                 yf_valid;
  logic signed [15:0]   yf_re, yf_im;

  lpf #(.NTAP(LPF_NTAP)) u_lpf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (adc_valid),
    .in        (adc1),
    .out_valid (yf_valid),
    .out_re    (yf_re),
    .out_im    (yf_im)
  );

  logic [1:0]           ts_res_valid, ts_pass;
  logic [D_W-1:0]       ts_tau [2];

  for (genvar i = 0; i < 2; i++) begin : g_sync
    localparam int unsigned KW = 16 + 12 + $clog2(SYNC_N) + 1;
    logic [KW-1:0]            kappa, peak;
    logic                     kappa_valid;
    logic [KW+$clog2(HF_LEN):0] ksum;
    time_sync #(.N(SYNC_N), .NC(HF_LEN), .ALPHA_TH(ALPHA_TH)) u_ts (
      .clk         (clk),
      .rst_n       (rst_n),
      .ref_we      (ref_we && (ref_sel == 1'(i))),
      .ref_addr    (ref_addr),
      .ref_re      (ref_re),
      .ref_im      (ref_im),
      .in_valid    (yf_valid),
      .in_re       (yf_re),
      .in_im       (yf_im),
      .kappa_valid (kappa_valid),
      .kappa       (kappa),
      .res_valid   (ts_res_valid[i]),
      .tau_hat     (ts_tau[i]),
      .peak        (peak),
      .kappa_sum   (ksum),
      .nsp_pass    (ts_pass[i])
    );
  end

  sync_switch #(.D_W(D_W)) u_sw (
    .clk        (clk),
    .rst_n      (rst_n),
    .res1_valid (ts_res_valid[0]),
    .tau_hat1   (ts_tau[0]),
    .pass1      (ts_pass[0]),
    .res2_valid (ts_res_valid[1]),
    .tau_hat2   (ts_tau[1]),
    .pass2      (ts_pass[1]),
    .upd_valid  (sync_upd),
    .fail_valid (sync_fail),
    .sel_case   (sync_case),
    .tau1       (tau1),
    .tau2       (tau2),
    .locked     (sync_locked)
  );

  logic seg_running;
  symbol_segmenter #(.OFFSET(PSS_FFT_START + (LPF_NTAP - 1) / 2)) u_seg (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (adc_valid),
    .in1       (adc1),
    .in2       (adc2),
    .tau_valid (sync_upd),
    .tau       (tau1),
    .out_valid (seg_valid),
    .out_sof   (seg_sof),
    .out_bin   (seg_bin),
    .out_slot  (seg_slot),
    .out_sym   (seg_sym),
    .out1      (seg1),
    .out2      (seg2),
    .running   (seg_running)
  );

  localparam int unsigned EW = 2 * ADC_W + 1 + $clog2(HF_LEN) + 1;
  localparam int unsigned NW = 2 * ADC_W + 1 + $clog2(NOISE_HF * HF_LEN) + 1;
  logic [EW-1:0] energy_sum;
  logic [NW-1:0] noise_sum;

  power_meter #(.WIN(HF_LEN)) u_energy (
    .clk (clk), .rst_n (rst_n), .in_valid (adc_valid), .y1 (adc1), .y2 (adc2),
    .out_valid (energy_valid), .sum (energy_sum), .mean (energy_mean)
  );
  power_meter #(.WIN(NOISE_HF * HF_LEN)) u_noise (
    .clk (clk), .rst_n (rst_n), .in_valid (adc_valid), .y1 (adc1), .y2 (adc2),
    .out_valid (noise_valid), .sum (noise_sum), .mean (noise_mean)
  );

  // ======================= Rx frequency domain ============================
  // stage 0
  logic     s0_valid;
  re_pos_t  s0_pos;
  fd_cplx_t s0_y [2];

  re_indexer u_idx (
    .clk       (clk),
    .rst_n     (rst_n),
    .fft_valid (fft_valid),
    .fft_bin   (fft_bin),
    .fft_slot  (fft_slot),
    .fft_sym   (fft_sym),
    .fft1      (fft1),
    .fft2      (fft2),
    .out_valid (s0_valid),
    .out_pos   (s0_pos),
    .out1      (s0_y[0]),
    .out2      (s0_y[1])
  );

  // own transmitted symbols of both antennas for this element
  fd_cplx_t xs [2];
  for (genvar a = 0; a < 2; a++) begin : g_txb
    tx_re_buffer #(.DEPTH(TXB_DEPTH)) u_txb (
      .clk      (clk),
      .wr_valid (tx_valid && tx_ready),
      .wr_pos   (m_pos[a]),
      .wr_re    (tx_re[a]),
      .rd_pos   (s0_pos),
      .rd_re    (xs[a])
    );
  end

  // stage 1 / 2 registers of the element stream
  logic     s1_valid, s2_valid;
  re_pos_t  s1_pos, s2_pos;
  fd_cplx_t s1_y [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s1_pos   <= '0;
      s2_pos   <= '0;
      s1_y[0]  <= '0;
      s1_y[1]  <= '0;
    end else begin
      s1_valid <= s0_valid;
      s2_valid <= s1_valid;
      s1_pos   <= s0_pos;
      s2_pos   <= s1_pos;
      s1_y[0]  <= s0_y[0];
      s1_y[1]  <= s0_y[1];
    end
  end

  h_cplx_t  h [2][2];     // h[i][j]: partner Tx j -> own Rx i
  fd_cplx_t rb [2][2];    // rb[i][j]: rebuilt g_ij x_S,j at Rx i
  logic     rb_valid [2][2];
  h_cplx_t  g [2][2];
  fd_cplx_t r [2];
  logic     r_valid [2];

  for (genvar i = 0; i < 2; i++) begin : g_rx
    logic [1:0] des_pv, si_pv;
    sc_idx_t    des_k, si_k;
    fd_cplx_t   des_y, si_y;

    pilot_extract #(.NODE(NODE), .SI(1'b0)) u_pe_des (
      .clk (clk), .rst_n (rst_n), .in_valid (s0_valid), .in_pos (s0_pos), .in_y (s0_y[i]),
      .pil_valid (des_pv), .pil_k (des_k), .pil_y (des_y)
    );
    pilot_extract #(.NODE(NODE), .SI(1'b1)) u_pe_si (
      .clk (clk), .rst_n (rst_n), .in_valid (s0_valid), .in_pos (s0_pos), .in_y (s0_y[i]),
      .pil_valid (si_pv), .pil_k (si_k), .pil_y (si_y)
    );

    for (genvar j = 0; j < 2; j++) begin : g_tx_port
      chan_est u_h (
        .clk (clk), .pil_valid (des_pv[j]), .pil_k (des_k), .pil_y (des_y),
        .rd_k (s2_pos.k), .est (h[i][j])
      );
      si_rebuild u_rb (
        .clk (clk), .rst_n (rst_n),
        .pil_valid (si_pv[j]), .pil_k (si_k), .pil_y (si_y),
        .in_valid (s0_valid), .in_k (s0_pos.k), .x_s (xs[j]),
        .out_valid (rb_valid[i][j]), .y_hat (rb[i][j]), .g_est (g[i][j])
      );
    end

    // self-talk is g_ii x_S,i, cross-talk g_ij x_S,j (j != i)
    dsic u_dsic (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_valid   (s1_valid),
      .y          (s1_y[i]),
      .self_talk  (rb[i][i]),
      .cross_talk (rb[i][1-i]),
      .out_valid  (r_valid[i]),
      .r          (r[i])
    );
  end

  assign rx_res_valid = r_valid[0];
  assign rx_res_pos   = s2_pos;
  assign rx_res1      = r[0];
  assign rx_res2      = r[1];

  logic    zf_valid, zf_data;
  re_pos_t zf_pos;
  logic signed [50:0] z1r, z1i, z2r, z2i;   // x_hat scaled by |det|^2, not used further
  zf_demod u_zf (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s2_valid),
    .in_pos    (s2_pos),
    .r1        (r[0]),
    .r2        (r[1]),
    .h11       (h[0][0]),
    .h12       (h[0][1]),
    .h21       (h[1][0]),
    .h22       (h[1][1]),
    .out_valid (zf_valid),
    .out_data  (zf_data),
    .out_pos   (zf_pos),
    .bits      (det_bits),
    .z1_re     (z1r),
    .z1_im     (z1i),
    .z2_re     (z2r),
    .z2_im     (z2i)
  );

  assign det_valid = zf_valid && zf_data;
  assign det_pos   = zf_pos;

endmodule
