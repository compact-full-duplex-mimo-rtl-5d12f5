// time_sync: PSS cross-correlator, peak finder and NSP feasibility test.
//
// One instance looks for the PSS of the partner node (desired signal,
// root index u(1)) and one for the node's own PSS (self-interference, root
// u(2)).  For every lag d of a search window of NC lags it computes
//     kappa[d] = | sum_{n=0}^{N-1} y_f[n+d] p*[n] |          (steps 2)
// where p[n] is the ideal time-domain PSS (N-point IDFT of the Zadoff-Chu
// sequence), keeps the first lag with the largest kappa (tau_hat, step 3)
// and the sum of kappa over the window, and at the end of the window tests
//     alpha = kappa[tau_hat] / (sum kappa / NC)  >  alpha_th   (step 4)
// without a divider:  kappa[tau_hat] * NC * 2^AF > ALPHA_TH * sum.
// The equations and the correlation length follow the prototype.  The
// search window (one half-frame, where exactly one PSS falls), the threshold
// value, the word widths, the exact integer magnitude and the loadable
// reference memory are this design's choices.  The reference is written
// through ref_we/ref_addr/ref_re/ref_im (conjugation is done inside), as a
// host would load it after reset.
//
// Timing: one input sample per cycle at most (in_valid).  Lags are counted
// from the first sample after reset: the lag d belongs to the correlation
// whose first sample is input number d, and it is ready once input d+N-1 has
// arrived.  tau_hat is reported modulo NC (for NC = half-frame length it is
// the position inside the half-frame).  kappa_valid/kappa give the
// correlator output two cycles after its last input sample; res_valid
// pulses one cycle after the last kappa of a window.
module time_sync
  import fdx_pkg::*;
#(
  parameter int unsigned N        = NFFT,     // correlation length
  parameter int unsigned NC       = HF_LEN,   // lags per search window
  parameter int unsigned IN_W     = 16,
  parameter int unsigned REF_W    = 12,
  parameter int unsigned AF       = 4,        // fraction bits of ALPHA_TH
  parameter int unsigned ALPHA_TH = 64,       // 4.0 in Q.4
  localparam int unsigned C_W = IN_W + REF_W + $clog2(N) + 1,  // correlation sum
  localparam int unsigned K_W = C_W,                           // magnitude
  localparam int unsigned S_W = K_W + $clog2(NC) + 1           // sum of kappa
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // reference sequence p[n] load port
  input  logic                        ref_we,
  input  logic [$clog2(N)-1:0]        ref_addr,
  input  logic signed [REF_W-1:0]     ref_re,
  input  logic signed [REF_W-1:0]     ref_im,
  // filtered receive samples y_f[n]
  input  logic                        in_valid,
  input  logic signed [IN_W-1:0]      in_re,
  input  logic signed [IN_W-1:0]      in_im,
  // correlator output
  output logic                        kappa_valid,
  output logic [K_W-1:0]              kappa,
  // one result per search window
  output logic                        res_valid,
  output logic [$clog2(NC)-1:0]       tau_hat,
  output logic [K_W-1:0]              peak,
  output logic [S_W-1:0]              kappa_sum,
  output logic                        nsp_pass
);

  localparam int unsigned D_W = $clog2(NC);

  typedef logic signed [C_W-1:0] corr_t;

  // ---------------- reference taps and correlator --------------------------
  // Transposed-form correlator: the partial sum acc of tap m has collected
  // y_f[t-j] conj(p[N-1-m-j]) for j = 0..N-1-m-1, so acc[0] completes the
  // sum of lag t-N+1 when sample t arrives.
  logic [$clog2(N):0] fill;          // inputs seen, saturating at N-1

  for (genvar m = 0; m < int'(N); m++) begin : g_tap
    // each tap keeps its own coefficient p[N-1-m]
    logic signed [REF_W-1:0] c_re, c_im;
    always_ff @(posedge clk) begin
      if (ref_we && ref_addr == ($clog2(N))'(N - 1 - m)) begin
        c_re <= ref_re;
        c_im <= ref_im;
      end
    end
    corr_t pr_re, pr_im, nx_re, nx_im;
    corr_t acc_re, acc_im;
    always_comb begin
      pr_re = corr_t'(in_re) * corr_t'(c_re) + corr_t'(in_im) * corr_t'(c_im);
      pr_im = corr_t'(in_im) * corr_t'(c_re) - corr_t'(in_re) * corr_t'(c_im);
    end
    if (m == int'(N) - 1) begin : g_last
      assign nx_re = pr_re;
      assign nx_im = pr_im;
    end else begin : g_mid
      assign nx_re = g_tap[m+1].acc_re + pr_re;
      assign nx_im = g_tap[m+1].acc_im + pr_im;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc_re <= '0;
        acc_im <= '0;
      end else if (in_valid) begin
        acc_re <= nx_re;
        acc_im <= nx_im;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fill <= '0;
    else if (in_valid && fill < ($clog2(N)+1)'(N - 1)) fill <= fill + 1'b1;
  end

  // ---------------- stage 1: correlation register -------------------------
  // acc[0] after the edge that took sample t is the complete sum for lag
  // t-N+1; s1_valid marks it.
  logic  s1_valid;
  corr_t s1_re, s1_im;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid && (fill == ($clog2(N)+1)'(N - 1));
  end
  assign s1_re = g_tap[0].acc_re;
  assign s1_im = g_tap[0].acc_im;

  // ---------------- stage 2: magnitude (exact integer square root) --------
  function automatic logic [K_W-1:0] isqrt(input logic [2*C_W-1:0] v);
    logic [2*C_W-1:0] rem, root, bitv;
    rem  = v;
    root = '0;
    bitv = (2*C_W)'(1) << (2*C_W - 2);
    for (int i = 0; i < int'(C_W); i++) begin
      if (rem >= root + bitv) begin
        rem  = rem - (root + bitv);
        root = (root >> 1) + bitv;
      end else begin
        root = root >> 1;
      end
      bitv = bitv >> 2;
    end
    return root[K_W-1:0];
  endfunction

  typedef logic signed [2*C_W-1:0] wide_t;
  wide_t mag2;
  always_comb begin
    mag2 = wide_t'(s1_re) * wide_t'(s1_re) + wide_t'(s1_im) * wide_t'(s1_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kappa_valid <= 1'b0;
      kappa       <= '0;
    end else begin
      kappa_valid <= s1_valid;
      if (s1_valid) kappa <= isqrt(mag2);
    end
  end

  // ---------------- stage 3: peak search over one window ------------------
  logic [D_W-1:0] d;
  logic [D_W-1:0] best_d;
  logic [K_W-1:0] best_k;
  logic [S_W-1:0] sum_k;

  logic [D_W-1:0] nxt_best_d;
  logic [K_W-1:0] nxt_best_k;
  logic [S_W-1:0] nxt_sum;
  always_comb begin
    if (d == '0 || kappa > best_k) begin
      nxt_best_d = d;
      nxt_best_k = kappa;
    end else begin
      nxt_best_d = best_d;
      nxt_best_k = best_k;
    end
    nxt_sum = (d == '0) ? S_W'(kappa) : sum_k + S_W'(kappa);
  end

  localparam int unsigned T_W = S_W + 16;
  logic [T_W-1:0] lhs, rhs;
  always_comb begin
    lhs = (T_W'(nxt_best_k) * T_W'(NC)) << AF;
    rhs = T_W'(nxt_sum) * T_W'(ALPHA_TH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d         <= '0;
      best_d    <= '0;
      best_k    <= '0;
      sum_k     <= '0;
      res_valid <= 1'b0;
      tau_hat   <= '0;
      peak      <= '0;
      kappa_sum <= '0;
      nsp_pass  <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (kappa_valid) begin
        best_d <= nxt_best_d;
        best_k <= nxt_best_k;
        sum_k  <= nxt_sum;
        if (d == D_W'(NC - 1)) begin
          d         <= '0;
          res_valid <= 1'b1;
          tau_hat   <= nxt_best_d;
          peak      <= nxt_best_k;
          kappa_sum <= nxt_sum;
          nsp_pass  <= lhs > rhs;
        end else begin
          d <= d + 1'b1;
        end
      end
    end
  end

endmodule
