// pi_ctrl: proportional-integral feedback controller used by the cavity
// voltage, cavity phase and tune loops. The paper names these loops as
// feedback loops but gives no control law; a PI controller with an
// anti-windup clamp is this design's choice.
// How it works: out = kp*err/2^KSH + I, where the integrator I (kept with
// ISH extra fraction bits) accumulates ki*err each enabled clock and is
// clamped to [lo, hi]; the sum is clamped to [lo, hi] as well.
// Interface: err signed EW bits; kp, ki signed 16-bit gains; lo/hi signed
// OW-bit limits; clr zeroes the integrator; en gates the update.
// Timing: out is registered, one clock after err.
module pi_ctrl #(
  parameter int EW  = 18,
  parameter int OW  = 18,
  parameter int KSH = 8,
  parameter int ISH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  logic signed [EW-1:0] err,
  input  logic signed [15:0]   kp,
  input  logic signed [15:0]   ki,
  input  logic signed [OW-1:0] lo,
  input  logic signed [OW-1:0] hi,
  output logic signed [OW-1:0] out
);
  localparam int IW = OW + ISH + 2;
  localparam int PW = EW + 16;
  logic signed [IW-1:0] integ, integ_n, lo_i, hi_i;
  logic signed [PW-1:0] pterm, iterm;
  logic signed [IW:0]   sum;

  assign pterm = err * kp;
  assign iterm = err * ki;
  assign lo_i  = IW'(lo) <<< ISH;
  assign hi_i  = IW'(hi) <<< ISH;

  always_comb begin
    integ_n = integ + IW'(iterm);
    if (integ_n > hi_i)      integ_n = hi_i;
    else if (integ_n < lo_i) integ_n = lo_i;
    sum = (IW+1)'(pterm >>> KSH) + (IW+1)'(integ_n >>> ISH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ <= '0;
      out   <= '0;
    end else if (clr) begin
      integ <= '0;
      out   <= '0;
    end else if (en) begin
      integ <= integ_n;
      if (sum > (IW+1)'(hi))      out <= hi;
      else if (sum < (IW+1)'(lo)) out <= lo;
      else                        out <= OW'(sum);
    end
  end
endmodule
