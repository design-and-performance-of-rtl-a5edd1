// dds: direct digital synthesizer producing the RF reference pair
// cos/sin at the frequency set by a tuning word (f = ftw * 40 MHz / 2^32).
// In the paper both the RF drive and the demodulation reference come from
// DDS, and the initial phase of the reference is set by the timing system at
// beam injection: here 'sync' clears the phase accumulator. The phase
// accumulator width, the CORDIC sine generator and the output amplitude
// are this design's own choices.
// Interface: ftw (FTW_W bits), ph_off (phase_t added to the accumulator),
// sync (clears phase). Outputs cos_o/sin_o are signed OUT_W bits with peak
// AMP, and phase_o is the accumulator phase that produced them.
// Timing: the output follows the accumulator by STAGES+2 clocks.
module dds #(
  parameter int          FTW_W  = 32,
  parameter int          OUT_W  = 16,
  parameter int          STAGES = 16,
  parameter int unsigned AMP    = 32000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sync,
  input  logic [FTW_W-1:0]         ftw,
  input  llrf_pkg::phase_t         ph_off,
  output logic signed [OUT_W-1:0]  cos_o,
  output logic signed [OUT_W-1:0]  sin_o
);
  logic [FTW_W-1:0]  acc;
  logic signed [OUT_W:0] xr, yr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    acc <= '0;
    else if (sync) acc <= '0;
    else           acc <= acc + ftw;

  cordic_rot #(.W(OUT_W), .STAGES(STAGES)) u_rot (
    .clk(clk), .en(1'b1), .mag(OUT_W'(AMP)),
    .ang(llrf_pkg::phase_t'(acc[FTW_W-1 -: 16]) + ph_off),
    .x(xr), .y(yr));

  assign cos_o = OUT_W'(xr);
  assign sin_o = OUT_W'(yr);
endmodule
