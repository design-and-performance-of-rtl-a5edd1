// blc_ff: beam loading compensation by feedforward. The fundamental of the
// beam signal (wall current monitor channel, demodulated and filtered by
// sig_chain) is given a programmable gain and phase and added to the RF
// drive with opposite sign, as the paper describes.
// How it works: out = -(beam * c) / 2^14 with c = c_re + j*c_im a complex
// gain in Q2.14 (16384 = gain 1 at 0 degrees), saturated to 18 bits.
// Interface: en, beam (iq_t), c_re, c_im; out (iq_t, zero when en=0).
// Timing: registered, 1 clock.
module blc_ff (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  llrf_pkg::iq_t      beam,
  input  logic signed [15:0] c_re,
  input  logic signed [15:0] c_im,
  output llrf_pkg::iq_t      out
);
  logic signed [34:0] pr, pq;
  logic signed [20:0] sr, sq;
  assign pr = beam.i * c_re - beam.q * c_im;
  assign pq = beam.i * c_im + beam.q * c_re;
  assign sr = 21'(-(pr >>> 14));
  assign sq = 21'(-(pq >>> 14));

  function automatic logic signed [17:0] sat18(input logic signed [20:0] v);
    if (v > 21'sd131071)       return 18'sd131071;
    else if (v < -21'sd131071) return -18'sd131071;
    else                       return 18'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else if (!en) out <= '0;
    else begin
      out.i <= sat18(sr);
      out.q <= sat18(sq);
    end
  end
endmodule
