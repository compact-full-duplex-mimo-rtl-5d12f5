// power_meter: windowed average of the received power ||y[n]||^2.
//
// Sums |y1[n]|^2 + |y2[n]|^2 (both Rx antennas, the squared Frobenius norm
// of the received vector) over WIN samples and outputs the sum and the mean.
// With the transmitters off and WIN = 20 half-frames it is the noise
// variance calculator; with WIN = one half-frame it is the energy detector
// of the received signal.  Link quality is then (E||y||^2 - s2) / s2.
// The windows follow the prototype; the mean by a constant reciprocal
// (2^RS / WIN, rounded) instead of a divider is this design's choice, as is
// leaving the link-quality division to the host.
//
// Interface: in_valid with two ADC samples; out_valid pulses one cycle
// after the last sample of each window with sum and mean of that window.
module power_meter
  import fdx_pkg::*;
#(
  parameter int unsigned WIN = HF_LEN,
  localparam int unsigned SUM_W = 2 * ADC_W + 1 + $clog2(WIN) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  adc_cplx_t        y1,
  input  adc_cplx_t        y2,
  output logic             out_valid,
  output logic [SUM_W-1:0] sum,
  output logic [2*ADC_W+1:0] mean
);

  // RS = SUM_W makes the reciprocal exact enough for a mean within one LSB
  localparam int unsigned RS    = SUM_W;
  localparam longint unsigned RECIP = ((64'd1 << RS) + 64'(WIN / 2)) / 64'(WIN);

  logic [$clog2(WIN)-1:0] cnt;
  logic [SUM_W-1:0]       acc;
  logic [2*ADC_W+1:0]     p;

  function automatic logic [2*ADC_W+1:0] sq(input logic signed [ADC_W-1:0] v);
    logic signed [2*ADC_W+1:0] w;
    w = (2*ADC_W+2)'(v);
    return w * w;
  endfunction

  always_comb begin
    p = sq(y1.re) + sq(y1.im) + sq(y2.re) + sq(y2.im);
  end

  logic [SUM_W-1:0] acc_n;
  assign acc_n = acc + SUM_W'(p);

  logic [SUM_W+RS-1:0] scaled;
  assign scaled = (SUM_W+RS)'(acc_n) * (SUM_W+RS)'(RECIP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      sum       <= '0;
      mean      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt == ($clog2(WIN))'(WIN - 1)) begin
          cnt       <= '0;
          acc       <= '0;
          out_valid <= 1'b1;
          sum       <= acc_n;
          mean      <= (2*ADC_W+2)'(scaled >> RS);
        end else begin
          cnt <= cnt + 1'b1;
          acc <= acc_n;
        end
      end
    end
  end

endmodule
