// iq_demod: direct (orthogonal) demodulation of one RF channel. Each 40 MHz
// ADC sample is multiplied by the two reference signals, cos and sin, as
// described in the paper; the 2f product is removed afterwards by fir_lpf.
// I = adc*cos/2^15, Q = -adc*sin/2^15, so that after low-pass filtering a
// signal A*cos(wt+p) gives (I,Q) = (A/2)(AMP/2^15)(cos p, sin p). The
// scaling and sign are this design's choice.
// Interface: adc sample_t, cos_r/sin_r sample_t references, iq_t out.
// Timing: one registered stage, one result per clock.
module iq_demod (
  input  logic              clk,
  input  llrf_pkg::sample_t adc,
  input  llrf_pkg::sample_t cos_r,
  input  llrf_pkg::sample_t sin_r,
  output llrf_pkg::iq_t     iq
);
  logic signed [31:0] pi, pq;
  assign pi = adc * cos_r;
  assign pq = adc * sin_r;
  always_ff @(posedge clk) begin
    iq.i <= llrf_pkg::IQ_W'(pi >>> 15);
    iq.q <= -llrf_pkg::IQ_W'(pq >>> 15);
  end
endmodule
