// sync_phase_loop: synchronous phase loop, damping synchrotron oscillation.
// The beam phase (from the fast current transformer channel) is compared
// with the phase of the accelerating voltage; the deviation from the
// programmed synchronous phase, with its slow part removed, is turned into
// a damping component that the drive synthesis adds at 90 degrees to the
// RF drive (see iq_mod). The paper gives the comparison and the 90-degree
// injection; the high-pass (exponential average, time constant 2^HP_SH
// clocks = 1.6 ms by default) and the proportional gain kd/2^8 are this
// design's choices.
// Interface: beam_ph, cav_ph, phis_sp (phase_t), en, kd; outputs damp
// (signed 16, amplitude of the quadrature component) and osc (oscillation
// phase). Timing: registered, 1 clock.
module sync_phase_loop #(
  parameter int HP_SH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  llrf_pkg::phase_t   beam_ph,
  input  llrf_pkg::phase_t   cav_ph,
  input  llrf_pkg::phase_t   phis_sp,
  input  logic signed [15:0] kd,
  output logic signed [15:0] damp,
  output llrf_pkg::phase_t   osc
);
  localparam int AW = 16 + HP_SH + 1;
  llrf_pkg::phase_t   e;
  logic signed [AW-1:0] avg;
  logic signed [16:0]   hp;
  logic signed [33:0]   p;

  assign e  = beam_ph - cav_ph - phis_sp;
  assign hp = 17'(e) - 17'(avg >>> HP_SH);
  assign p  = hp * kd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avg <= '0; damp <= '0; osc <= '0;
    end else begin
      avg <= avg + AW'(hp);
      osc <= 16'(hp);
      if (!en)                       damp <= '0;
      else if ((p >>> 8) > 34'sd32767)  damp <= 16'sd32767;
      else if ((p >>> 8) < -34'sd32767) damp <= -16'sd32767;
      else                           damp <= 16'(p >>> 8);
    end
  end
endmodule
