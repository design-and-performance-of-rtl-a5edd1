// sig_chain: one RF signal processing channel as the paper describes it for
// most loops: 40 MHz samples are demodulated against the DDS reference pair
// (iq_demod), low-pass filtered by a 70-tap FIR on I and on Q (fir_lpf), and
// converted to amplitude and phase by CORDIC (cordic_vec).
// Interface: adc sample; cos_r/sin_r reference; outputs the filtered vector
// iq, its amplitude amp (amp_t) and phase ph (phase_t, relative to the
// reference). Timing: iq lags the ADC by 2 clocks plus the FIR response;
// amp/ph lag iq by STAGES+2 clocks. One result per clock.
module sig_chain #(
  parameter int NTAPS  = 70,
  parameter int STAGES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  llrf_pkg::sample_t adc,
  input  llrf_pkg::sample_t cos_r,
  input  llrf_pkg::sample_t sin_r,
  output llrf_pkg::iq_t     iq,
  output llrf_pkg::amp_t    amp,
  output llrf_pkg::phase_t  ph
);
  import llrf_pkg::*;
  iq_t raw;
  logic [IQ_W-1:0] amp_w;

  iq_demod u_dem (.clk(clk), .adc(adc), .cos_r(cos_r), .sin_r(sin_r), .iq(raw));
  fir_lpf #(.W(IQ_W), .NTAPS(NTAPS)) u_fi (.clk(clk), .rst_n(rst_n), .x(raw.i), .y(iq.i));
  fir_lpf #(.W(IQ_W), .NTAPS(NTAPS)) u_fq (.clk(clk), .rst_n(rst_n), .x(raw.q), .y(iq.q));
  cordic_vec #(.W(IQ_W), .STAGES(STAGES)) u_vec (.clk(clk), .en(1'b1), .i(iq.i), .q(iq.q),
                                                 .amp(amp_w), .ph(ph));
  assign amp = (amp_w > IQ_W'(16'hFFFF)) ? 16'hFFFF : amp_w[15:0];
endmodule
