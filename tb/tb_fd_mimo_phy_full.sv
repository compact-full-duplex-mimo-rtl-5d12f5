// tb_fd_mimo_phy_full: the end-to-end test of tb_fd_mimo_phy with the
// design at its default parameters (full 2048-sample correlators, default
// NSP threshold, 20-half-frame noise window).  Both PSSs are sent in every
// half-frame (the index switching cases are covered by tb_fd_mimo_phy), and
// 21 half-frames are simulated so that the noise window completes.  The
// partner, the air and the FFT cores are modelled as described there.
module tb_fd_mimo_phy_full;
  import fdx_pkg::*;
  localparam int SYNC_N   = 2048;
  localparam int NOISE_HF = 20;
  localparam int LPF_NTAP = 65;
  localparam int N_HF     = 21;       // half-frames simulated
  localparam int TAU_EXP  = 5 * NSYM_LEN + NCP + (LPF_NTAP - 1) / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ref_we = 0, ref_sel = 0;
  logic [$clog2(SYNC_N)-1:0] ref_addr = '0;
  logic signed [11:0] ref_re = '0, ref_im = '0;
  logic pss_we = 0;
  logic [5:0] pss_addr = '0;
  fd_cplx_t pss_data = '0;
  logic [1:0] bits_valid = '0, bits_ready;
  logic [1:0][1:0] bits = '0;
  logic tx_valid, tx_ready = 0;
  re_pos_t tx_pos;
  fd_cplx_t [1:0] tx_re;
  logic adc_valid = 0;
  adc_cplx_t adc1 = '0, adc2 = '0;
  logic seg_valid, seg_sof;
  logic [10:0] seg_bin;
  slot_t seg_slot;
  sym_t seg_sym;
  adc_cplx_t seg1, seg2;
  logic fft_valid = 0;
  logic [10:0] fft_bin = '0;
  slot_t fft_slot = '0;
  sym_t fft_sym = '0;
  fd_cplx_t fft1 = '0, fft2 = '0;
  logic sync_upd, sync_fail, sync_locked;
  logic [1:0] sync_case;
  logic [17:0] tau1, tau2;
  logic rx_res_valid;
  re_pos_t rx_res_pos;
  fd_cplx_t rx_res1, rx_res2;
  logic det_valid;
  re_pos_t det_pos;
  logic [3:0] det_bits;
  logic energy_valid, noise_valid;
  logic [2*ADC_W+1:0] energy_mean, noise_mean;

  fd_mimo_phy dut (.*);

  int checks = 0, failures = 0;

  // ---------------- PSS waveforms ----------------
  real pss_f_re [2][NFFT], pss_f_im [2][NFFT];   // [0] partner root 25, [1] own root 29
  real zc_re [2][NPSS], zc_im [2][NPSS];
  localparam real PI = 3.141592653589793;

  task automatic make_pss(input int idx, input int u);
    for (int n = 0; n < NPSS; n++) begin
      real ph;
      ph = (n < 31) ? -PI * u * n * (n + 1) / 63.0 : -PI * u * (n + 1) * (n + 2) / 63.0;
      zc_re[idx][n] = $cos(ph); zc_im[idx][n] = $sin(ph);
    end
    for (int t = 0; t < NFFT; t++) begin
      real sr, si;
      sr = 0; si = 0;
      for (int n = 0; n < NPSS; n++) begin
        int f;
        real a;
        f = (n < 31) ? n - 31 : n - 30;
        a = 2.0 * PI * f * t / NFFT;
        sr += zc_re[idx][n] * $cos(a) - zc_im[idx][n] * $sin(a);
        si += zc_re[idx][n] * $sin(a) + zc_im[idx][n] * $cos(a);
      end
      pss_f_re[idx][t] = sr; pss_f_im[idx][t] = si;
    end
  endtask

  // ---------------- partner grid and channels ----------------
  logic [1:0] pbits [SLOT_PER_HF][SYM_PER_SLOT][NSC][2];
  fd_cplx_t   own_tx [SLOT_PER_HF * SYM_PER_SLOT][NSC][2];
  real hd_re [2][2], hd_im [2][2], g_re [2][2], g_im [2][2];

  function automatic int port_of(input int sym, input int k);
    case (sym)
      0: return (k % 6 == 0) ? 0 : (k % 6 == 3) ? 1 : -1;
      3: return (k % 6 == 3) ? 0 : (k % 6 == 0) ? 1 : -1;
      1: return (k % 6 == 0) ? 2 : (k % 6 == 3) ? 3 : -1;
      4: return (k % 6 == 3) ? 2 : (k % 6 == 0) ? 3 : -1;
      default: return -1;
    endcase
  endfunction

  // partner's element on its antenna j (ports 2+j)
  task automatic partner_x(input int slot, input int sym, input int k, input int j,
                           output real xr, output real xi);
    int p;
    p = port_of(sym, k);
    xr = 0; xi = 0;
    if (slot == 0 && sym == 5) begin
      if (j == 0 && k >= 569 && k <= 630) begin
        xr = $rtoi(2048.0 * zc_re[0][k - 569]); xi = $rtoi(2048.0 * zc_im[0][k - 569]);
      end
    end else if (p >= 0) begin
      if (p == 2 + j) begin xr = 2048; xi = 2048; end
    end else begin
      xr = pbits[slot][sym][k][j][0] ? -2048 : 2048;
      xi = pbits[slot][sym][k][j][1] ? -2048 : 2048;
    end
  endtask

  // ---------------- counters ----------------
  int n_case [4];
  int n_fail = 0, n_stall_bp = 0, n_stall_bits = 0, n_cancel = 0, n_det = 0;
  int n_energy = 0, n_noise = 0, n_seg = 0, n_biterr = 0;

  initial begin
    repeat (N_HF * HF_LEN + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC history for segment checks ----------------
  adc_cplx_t hist1 [4096], hist2 [4096];
  int adc_n = 0;               // samples sent so far
  int adc_taken = 0;           // samples taken by the design
  always @(posedge clk) if (adc_valid) adc_taken <= adc_taken + 1;
  longint e_sum [N_HF];

  // PSS presence per half-frame: bit 0 partner, bit 1 own
  function automatic logic [1:0] pss_on(input int hf);
    case (hf)
      default: return 2'b11;
    endcase
  endfunction

  initial begin
    for (int c = 0; c < 4; c++) n_case[c] = 0;
    make_pss(0, 25);
    make_pss(1, 29);
    for (int s = 0; s < SLOT_PER_HF; s++)
      for (int y = 0; y < SYM_PER_SLOT; y++)
        for (int k = 0; k < NSC; k++) begin
          pbits[s][y][k][0] = 2'($urandom);
          pbits[s][y][k][1] = 2'($urandom);
        end
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        real m, ph;
        m = (i == j) ? 0.7 + 0.2 * ($urandom % 100) / 100.0 : 0.25 * ($urandom % 100) / 100.0;
        ph = 2.0 * PI * ($urandom % 1000) / 1000.0;
        hd_re[i][j] = m * $cos(ph); hd_im[i][j] = m * $sin(ph);
        m = (i == j) ? 1.2 + 0.3 * ($urandom % 100) / 100.0 : 0.6 * ($urandom % 100) / 100.0;
        ph = 2.0 * PI * ($urandom % 1000) / 1000.0;
        g_re[i][j] = m * $cos(ph); g_im[i][j] = m * $sin(ph);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // host loads: references (first SYNC_N samples of the PSS window) and PSS table
    for (int r = 0; r < 2; r++)
      for (int t = 0; t < SYNC_N; t++) begin
        @(negedge clk);
        ref_we = 1; ref_sel = 1'(r); ref_addr = ($clog2(SYNC_N))'(t);
        ref_re = 12'($rtoi(pss_f_re[r][t] * 150.0));
        ref_im = 12'($rtoi(pss_f_im[r][t] * 150.0));
      end
    for (int n = 0; n < NPSS; n++) begin
      @(negedge clk);
      ref_we = 0; pss_we = 1; pss_addr = 6'(n);
      pss_data.re = 16'($rtoi(2048.0 * zc_re[1][n]));
      pss_data.im = 16'($rtoi(2048.0 * zc_im[1][n]));
    end
    @(negedge clk);
    pss_we = 0;
    // ADC stream: one sample per cycle
    for (int hf = 0; hf < N_HF; hf++) begin
      e_sum[hf] = 0;
      for (int n = 0; n < HF_LEN; n++) begin
        real r1, i1, r2, i2;
        int m;
        logic [1:0] on;
        on = pss_on(hf);
        r1 = real'(int'($urandom % 61) - 30); i1 = real'(int'($urandom % 61) - 30);
        r2 = real'(int'($urandom % 61) - 30); i2 = real'(int'($urandom % 61) - 30);
        m = n - 5 * NSYM_LEN;
        if (m >= 0 && m < NSYM_LEN) begin
          int t;
          t = (m < NCP) ? NFFT - NCP + m : m - NCP;
          // partner PSS via its Tx 1, own PSS via own Tx 1; amplitude 60 per tone
          if (on[0]) begin
            r1 += 60.0 * (0.9 * pss_f_re[0][t]);  i1 += 60.0 * (0.9 * pss_f_im[0][t]);
            r2 += 60.0 * (0.7 * pss_f_im[0][t]);  i2 += 60.0 * (-0.7 * pss_f_re[0][t]);
          end
          if (on[1]) begin
            r1 += 60.0 * (1.3 * pss_f_re[1][t]);  i1 += 60.0 * (1.3 * pss_f_im[1][t]);
            r2 += 60.0 * (-0.5 * pss_f_re[1][t]); i2 += 60.0 * (0.5 * pss_f_im[1][t]);
          end
        end
        @(negedge clk);
        adc_valid = 1;
        adc1.re = 14'($rtoi(r1)); adc1.im = 14'($rtoi(i1));
        adc2.re = 14'($rtoi(r2)); adc2.im = 14'($rtoi(i2));
        hist1[adc_n % 4096] = adc1; hist2[adc_n % 4096] = adc2;
        adc_n++;
        e_sum[hf] += longint'(adc1.re) * adc1.re + longint'(adc1.im) * adc1.im +
                     longint'(adc2.re) * adc2.re + longint'(adc2.im) * adc2.im;
      end
    end
    @(negedge clk);
    adc_valid = 0;
    repeat (6000) @(negedge clk);
    // every mechanism must have happened
    checks++; if (n_case[1] == 0) begin failures++; $display("FAIL: no sync case 1 (both)"); end
    checks++; if (n_stall_bp == 0) begin failures++; $display("FAIL: no Tx back-pressure stall"); end
    checks++; if (n_stall_bits == 0) begin failures++; $display("FAIL: no Tx bit starvation stall"); end
    checks++; if (n_seg == 0) begin failures++; $display("FAIL: no segmented symbol"); end
    checks++; if (n_cancel == 0) begin failures++; $display("FAIL: no cancellation checked"); end
    checks++; if (n_det == 0) begin failures++; $display("FAIL: no detection checked"); end
    checks++; if (n_energy == 0) begin failures++; $display("FAIL: no energy window"); end
    checks++; if (n_noise == 0) begin failures++; $display("FAIL: no noise window"); end
    $display("mechanisms: case1 %0d case2 %0d case3 %0d fail %0d bp-stall %0d bit-stall %0d seg-symbols %0d cancel %0d det %0d (bit errors %0d) energy %0d noise %0d",
             n_case[1], n_case[2], n_case[3], n_fail, n_stall_bp, n_stall_bits, n_seg, n_cancel, n_det, n_biterr, n_energy, n_noise);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- sync checks ----------------
  int n_res = 0;
  always @(posedge clk) begin
    if (rst_n && (sync_upd || sync_fail)) begin
      int exp_case;
      logic [1:0] on;
      on = pss_on(n_res);
      exp_case = (on == 2'b11) ? 1 : (on == 2'b01) ? 2 : (on == 2'b10) ? 3 : 0;
      checks++;
      if (int'(sync_case) != exp_case || (sync_upd && (tau1 != 18'(TAU_EXP) || tau2 != 18'(TAU_EXP)))) begin
        failures++;
        $display("FAIL sync result %0d: case %0d exp %0d tau %0d/%0d exp %0d", n_res, sync_case, exp_case, tau1, tau2, TAU_EXP);
      end
      if (sync_upd) n_case[sync_case]++;
      if (sync_fail) n_fail++;
      n_res <= n_res + 1;
    end
  end

  // NSP values of both correlators, for information
  always @(posedge clk) begin
    if (rst_n && dut.g_sync[0].u_ts.res_valid)
      $display("window result: desired peak %0d mean %0d tau %0d | SI peak %0d mean %0d tau %0d",
               dut.g_sync[0].u_ts.peak, dut.g_sync[0].u_ts.kappa_sum / HF_LEN, dut.g_sync[0].u_ts.tau_hat,
               dut.g_sync[1].u_ts.peak, dut.g_sync[1].u_ts.kappa_sum / HF_LEN, dut.g_sync[1].u_ts.tau_hat);
  end

  // ---------------- energy / noise ----------------
  int n_ew = 0;
  always @(posedge clk) begin
    if (rst_n && energy_valid) begin
      longint em;
      em = e_sum[n_ew] / HF_LEN;
      checks++;
      if (longint'(energy_mean) - em > 1 || em - longint'(energy_mean) > 1) begin
        failures++;
        $display("FAIL energy %0d exp %0d", energy_mean, em);
      end
      n_energy++;
      n_ew <= n_ew + 1;
    end
    if (rst_n && noise_valid) n_noise++;
  end

  // ---------------- Tx side: pacing, bits, capture ----------------
  int tx_syms = 0, seg_syms = 0;
  logic tx_allow;
  assign tx_allow = tx_syms <= seg_syms && seg_syms > 0;
  always @(negedge clk) begin
    tx_ready <= tx_allow && ($urandom % 16 != 0);
    bits_valid[0] <= ($urandom % 16 != 0);
    bits_valid[1] <= ($urandom % 16 != 0);
    bits[0] <= 2'($urandom);
    bits[1] <= 2'($urandom);
  end
  always @(posedge clk) begin
    if (rst_n && tx_valid && !tx_ready && tx_allow) n_stall_bp++;
    if (!tx_valid && tx_ready) n_stall_bits++;
    if (rst_n && tx_valid && tx_ready) begin
      own_tx[int'(tx_pos.slot) * 6 + int'(tx_pos.sym)][tx_pos.k][0] = tx_re[0];
      own_tx[int'(tx_pos.slot) * 6 + int'(tx_pos.sym)][tx_pos.k][1] = tx_re[1];
      if (tx_pos.k == sc_idx_t'(NSC - 1)) tx_syms <= tx_syms + 1;
    end
  end

  // ---------------- segmenter check and FFT model ----------------
  int fft_q [$];               // symbols (slot*6+sym) waiting for the FFT model
  always @(posedge clk) begin
    if (rst_n && seg_valid) begin
      int idx;
      // sample index of this output: the ADC sample was taken by the clock
      // edge before this one
      idx = adc_taken - 1;
      if (seg_sof) begin
        seg_syms <= seg_syms + 1;
        n_seg++;
      end
      // expected grid position from the absolute index (half-frame boundary at 0)
      checks++;
      if ((idx % HF_LEN) / NSYM_LEN != int'(seg_slot) * 6 + int'(seg_sym) ||
          (idx % NSYM_LEN) - NCP != int'(seg_bin) ||
          hist1[idx % 4096] != seg1 || hist2[idx % 4096] != seg2) begin
        failures++;
        if (failures < 10) $display("FAIL seg idx %0d slot %0d sym %0d bin %0d", idx, seg_slot, seg_sym, seg_bin);
      end
      if (seg_bin == 11'd2047) begin
        fft_q.push_back(int'(seg_slot) * 6 + int'(seg_sym));
      end
    end
  end

  initial begin
    forever begin
      @(posedge clk);
      if (fft_q.size() > 0) begin
        int s, y, sy;
        sy = fft_q.pop_front();
        s = sy / 6; y = sy % 6;
        for (int b = 0; b < NFFT; b++) begin
          int k;
          real yr [2], yi [2];
          k = (b >= 1 && b <= 600) ? 599 + b : (b >= 1448) ? b - 1448 : -1;
          yr[0] = 0; yi[0] = 0; yr[1] = 0; yi[1] = 0;
          if (k >= 0) begin
            for (int i = 0; i < 2; i++) begin
              for (int j = 0; j < 2; j++) begin
                real xr, xi, or_, oi;
                partner_x(s, y, k, j, xr, xi);
                or_ = real'(own_tx[s * 6 + y][k][j].re);
                oi  = real'(own_tx[s * 6 + y][k][j].im);
                yr[i] += hd_re[i][j] * xr - hd_im[i][j] * xi + g_re[i][j] * or_ - g_im[i][j] * oi;
                yi[i] += hd_re[i][j] * xi + hd_im[i][j] * xr + g_re[i][j] * oi + g_im[i][j] * or_;
              end
              yr[i] += real'(int'($urandom % 9) - 4);
              yi[i] += real'(int'($urandom % 9) - 4);
            end
          end
          @(negedge clk);
          fft_valid = 1; fft_bin = 11'(b); fft_slot = slot_t'(s); fft_sym = sym_t'(y);
          fft1.re = 16'($rtoi(yr[0])); fft1.im = 16'($rtoi(yi[0]));
          fft2.re = 16'($rtoi(yr[1])); fft2.im = 16'($rtoi(yi[1]));
        end
        @(negedge clk);
        fft_valid = 0;
      end
    end
  end

  // ---------------- cancellation and detection checks ----------------
  // counted from the first symbol after all channel estimates exist
  // (slot 0, symbol 5 of the first received half-frame onwards: the pilots
  // of symbol 4 are written while symbol 4 itself is detected)
  int rx_syms_seen = 0;
  always @(posedge clk) begin
    if (rst_n && rx_res_valid && rx_res_pos.k == sc_idx_t'(NSC - 1)) rx_syms_seen <= rx_syms_seen + 1;
    if (rst_n && rx_res_valid && rx_syms_seen >= 6) begin
      real er [2], ei [2];
      fd_cplx_t got [2];
      got[0] = rx_res1; got[1] = rx_res2;
      for (int i = 0; i < 2; i++) begin
        er[i] = 0; ei[i] = 0;
        for (int j = 0; j < 2; j++) begin
          real xr, xi;
          partner_x(int'(rx_res_pos.slot), int'(rx_res_pos.sym), int'(rx_res_pos.k), j, xr, xi);
          er[i] += hd_re[i][j] * xr - hd_im[i][j] * xi;
          ei[i] += hd_re[i][j] * xi + hd_im[i][j] * xr;
        end
        checks++;
        if (real'(got[i].re) - er[i] > 40.0 || er[i] - real'(got[i].re) > 40.0 ||
            real'(got[i].im) - ei[i] > 40.0 || ei[i] - real'(got[i].im) > 40.0) begin
          failures++;
          if (failures < 10) $display("FAIL residual rx%0d slot %0d sym %0d k %0d: %0d,%0d exp %f,%f", i,
                                      rx_res_pos.slot, rx_res_pos.sym, rx_res_pos.k, got[i].re, got[i].im, er[i], ei[i]);
        end
      end
      n_cancel++;
    end
    if (rst_n && det_valid && rx_syms_seen >= 6) begin
      logic [3:0] eb;
      eb = {pbits[det_pos.slot][det_pos.sym][det_pos.k][1], pbits[det_pos.slot][det_pos.sym][det_pos.k][0]};
      checks++;
      if (det_bits != eb) begin
        failures++;
        n_biterr++;
        if (n_biterr < 10) $display("FAIL bits slot %0d sym %0d k %0d: %b exp %b", det_pos.slot, det_pos.sym, det_pos.k, det_bits, eb);
      end
      n_det++;
    end
  end
endmodule
