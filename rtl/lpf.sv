// lpf: complex low-pass FIR filter in front of the timing synchronizers.
//
// The PSS occupies only the 62 subcarriers next to DC (about +-465 kHz at
// 30.72 MS/s), so low-pass filtering the Rx 1 samples removes most of the
// data subcarriers before the PSS correlation (synchronization step 1):
//     y_f[n] = sum_{l=0}^{N_f} y[n-l] f[l]
// The filter form and its input (Rx antenna 1) follow the prototype.  The
// impulse response is this design's own choice, since none is published: a
// Hamming-windowed sinc of NTAP taps with cut-off CUTOFF (fraction of the
// sample rate), quantised to CW-bit signed coefficients whose sum is about
// 2^(CW-1) (unity DC gain).  The coefficients are computed at elaboration.
//
// Interface: one complex sample per cycle when in_valid is high.  out_valid
// follows in_valid by one cycle; the filter's group delay is (NTAP-1)/2
// samples on top of that.  Output is the rounded sum scaled back by
// 2^(CW-1) and saturated to OUT_W bits.
module lpf
  import fdx_pkg::*;
#(
  parameter int unsigned NTAP   = 65,     // N_f + 1
  parameter int unsigned CW     = 14,     // coefficient width
  parameter int unsigned OUT_W  = 16,
  parameter real         CUTOFF = 0.03    // cut-off / sample rate
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  adc_cplx_t               in,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);

  localparam int unsigned ACC_W = ADC_W + CW + $clog2(NTAP) + 1;

  typedef logic signed [CW-1:0] coef_arr_t [NTAP];

  function automatic coef_arr_t make_coefs();
    coef_arr_t c;
    real pi, x, w, s, scale, total;
    pi    = 3.141592653589793;
    total = 0.0;
    for (int i = 0; i < int'(NTAP); i++) begin
      x = real'(i) - real'(NTAP - 1) / 2.0;
      w = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / real'(NTAP - 1));
      s = (x == 0.0) ? 2.0 * CUTOFF : $sin(2.0 * pi * CUTOFF * x) / (pi * x);
      total += s * w;
    end
    scale = real'(1 << (CW - 1)) / total;
    for (int i = 0; i < int'(NTAP); i++) begin
      x = real'(i) - real'(NTAP - 1) / 2.0;
      w = 0.54 - 0.46 * $cos(2.0 * pi * real'(i) / real'(NTAP - 1));
      s = (x == 0.0) ? 2.0 * CUTOFF : $sin(2.0 * pi * CUTOFF * x) / (pi * x);
      c[i] = CW'($rtoi(s * w * scale + ((s * w >= 0.0) ? 0.5 : -0.5)));
    end
    return c;
  endfunction

  localparam coef_arr_t COEF = make_coefs();

  adc_cplx_t dline [NTAP];   // dline[l] = y[n-l]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(NTAP); l++) dline[l] <= '0;
    end else if (in_valid) begin
      dline[0] <= in;
      for (int l = 1; l < int'(NTAP); l++) dline[l] <= dline[l-1];
    end
  end

  // Taps over the new sample and the NTAP-1 stored ones.
  logic signed [ACC_W-1:0] acc_re, acc_im;
  always_comb begin
    acc_re = ACC_W'(in.re) * ACC_W'(COEF[0]);
    acc_im = ACC_W'(in.im) * ACC_W'(COEF[0]);
    for (int l = 1; l < int'(NTAP); l++) begin
      acc_re += ACC_W'(dline[l-1].re) * ACC_W'(COEF[l]);
      acc_im += ACC_W'(dline[l-1].im) * ACC_W'(COEF[l]);
    end
  end

  function automatic logic signed [OUT_W-1:0] scale_sat(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] r;
    logic signed [ACC_W-1:0] maxv, minv;
    r    = (a + (ACC_W'(1) <<< (CW - 2))) >>> (CW - 1);
    maxv = ACC_W'((1 << (OUT_W - 1)) - 1);
    minv = -ACC_W'(1 << (OUT_W - 1));
    if (r > maxv)      return {1'b0, {(OUT_W-1){1'b1}}};
    else if (r < minv) return {1'b1, {(OUT_W-1){1'b0}}};
    else               return r[OUT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_re <= scale_sat(acc_re);
        out_im <= scale_sat(acc_im);
      end
    end
  end

endmodule
