// iq_mod: RF drive synthesis. Builds the drive vector from the voltage-loop
// amplitude and the phase-loop phase, adds the synchronous-phase damping
// component at +90 degrees to the drive phase and the beam loading
// compensation vector, and up-converts the sum with the DDS reference to
// the 16-bit DAC sample: rf = (I*cos - Q*sin)/2^15.
// The paper states what is added to the drive; building the vector with
// two CORDICs and up-converting digitally is this design's choice.
// Interface: amp (amp_t), ph (phase_t), damp (signed 16, sign selects +90 or
// -90 degrees), blc (iq_t), cos_r/sin_r reference; rf (sample_t).
// Timing: rf follows amp/ph by STAGES+4 clocks, blc by 2 clocks.
module iq_mod #(
  parameter int STAGES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  llrf_pkg::amp_t     amp,
  input  llrf_pkg::phase_t   ph,
  input  logic signed [15:0] damp,
  input  llrf_pkg::iq_t      blc,
  input  llrf_pkg::sample_t  cos_r,
  input  llrf_pkg::sample_t  sin_r,
  output llrf_pkg::sample_t  rf
);
  import llrf_pkg::*;
  logic signed [16:0] x0, y0, x1, y1;
  logic [15:0]        dmag;
  phase_t             dang;
  logic signed [19:0] si, sq;
  logic signed [36:0] prod;
  logic signed [21:0] rs;

  assign dmag = damp[15] ? 16'(-damp) : 16'(damp);
  assign dang = damp[15] ? ph - DEG90 : ph + DEG90;

  cordic_rot #(.W(16), .STAGES(STAGES)) u_drv (.clk(clk), .en(1'b1), .mag(amp),
      .ang(ph), .x(x0), .y(y0));
  cordic_rot #(.W(16), .STAGES(STAGES)) u_dmp (.clk(clk), .en(1'b1), .mag(dmag),
      .ang(dang), .x(x1), .y(y1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      si <= '0; sq <= '0; rf <= '0;
    end else begin
      si <= 20'(x0) + 20'(x1) + 20'(blc.i);
      sq <= 20'(y0) + 20'(y1) + 20'(blc.q);
      if (rs > 22'sd32767)       rf <= 16'sd32767;
      else if (rs < -22'sd32768) rf <= -16'sd32768;
      else                       rf <= 16'(rs);
    end
  end

  assign prod = si * cos_r - sq * sin_r;
  assign rs   = 22'(prod >>> 15);
endmodule
