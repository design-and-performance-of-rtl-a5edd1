// phase_loop: cavity phase loop. Locks the phase of the accelerating
// voltage to the RF reference (whose initial phase is set at injection).
// It compensates the phase shift of the tune loops and the amplifier chain
// by moving the phase of the RF drive. PI control is this design's choice.
// How it works: err = ph_sp - ph_meas in phase_t, wrapping modulo 360 deg,
// so the loop always corrects the short way round. The integrator holds
// the drive phase with ISH extra fraction bits and also wraps modulo 360
// deg (a phase has no end stop); drive_ph = integ + kp*err/2^KSH.
// Interface: ph_meas (cavity phase vs reference), ph_sp, en, clr, kp, ki
// (signed 16); outputs drive_ph (phase_t, zero when disabled) and err.
// Timing: drive_ph and err registered, 1 clock after ph_meas.
module phase_loop #(
  parameter int KSH = 8,
  parameter int ISH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              clr,
  input  llrf_pkg::phase_t  ph_meas,
  input  llrf_pkg::phase_t  ph_sp,
  input  logic signed [15:0] kp,
  input  logic signed [15:0] ki,
  output llrf_pkg::phase_t  drive_ph,
  output llrf_pkg::phase_t  err
);
  localparam int IW = 16 + ISH;
  llrf_pkg::phase_t   e;
  logic signed [IW-1:0] integ, integ_n;
  logic signed [31:0]   pterm, iterm;

  assign e       = ph_sp - ph_meas;
  assign pterm   = e * kp;
  assign iterm   = e * ki;
  assign integ_n = integ + IW'(iterm);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0; drive_ph <= '0; err <= '0;
    end else begin
      err <= e;
      if (clr || !en) begin
        integ    <= '0;
        drive_ph <= '0;
      end else begin
        integ    <= integ_n;
        drive_ph <= 16'(integ_n >>> ISH) + 16'(pterm >>> KSH);
      end
    end
  end
endmodule
