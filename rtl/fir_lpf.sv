// fir_lpf: NTAPS-tap FIR low-pass filter (70 taps in the paper, whose
// impulse response spans 70 samples = 1.75 us at 40 MHz). The paper gives
// the tap count but not the coefficients. The default set here is this
// design's choice: a Hamming-windowed sinc with 200 kHz cutoff,
//   h[n] = sinc(2*fc*(n-34.5)) * (0.54 - 0.46*cos(2*pi*n/69)), fc = 0.2/40,
// scaled so the taps sum to exactly 2^16 (unity DC gain) and rounded; the
// two centre taps absorb the rounding remainder. It passes the slow
// amplitude/phase modulation (-0.008 dB at 20 kHz) and suppresses the 2f
// mixing product (2.04-4.89 MHz) by about 46 dB. A plain 70-sample moving
// average would only reach about -21 dB there. Any coefficient set may be
// passed through COEF.
// How it works: transposed direct form; every clock the input is multiplied
// by all coefficients and added into a chain of NTAPS partial sums.
// Interface: x and y signed W bits; y = sum(COEF[k]*x[n-k]) / 2^16, saturated.
// Timing: one clock from x to the first contribution in y; the full
// response to a step settles NTAPS clocks later.
module fir_lpf #(
  parameter int W     = 18,
  parameter int NTAPS = 70,
  parameter int CW    = 16,
  parameter logic signed [CW-1:0] COEF [NTAPS] = '{
    16'sd118, 16'sd122, 16'sd133, 16'sd148, 16'sd170, 16'sd198, 16'sd232, 16'sd272, 16'sd317, 16'sd367,
    16'sd422, 16'sd482, 16'sd546, 16'sd614, 16'sd685, 16'sd759, 16'sd835, 16'sd912, 16'sd989, 16'sd1067,
    16'sd1144, 16'sd1220, 16'sd1294, 16'sd1365, 16'sd1432, 16'sd1496, 16'sd1555, 16'sd1610, 16'sd1658, 16'sd1701,
    16'sd1737, 16'sd1766, 16'sd1788, 16'sd1803, 16'sd1811, 16'sd1811, 16'sd1803, 16'sd1788, 16'sd1766, 16'sd1737,
    16'sd1701, 16'sd1658, 16'sd1610, 16'sd1555, 16'sd1496, 16'sd1432, 16'sd1365, 16'sd1294, 16'sd1220, 16'sd1144,
    16'sd1067, 16'sd989, 16'sd912, 16'sd835, 16'sd759, 16'sd685, 16'sd614, 16'sd546, 16'sd482, 16'sd422,
    16'sd367, 16'sd317, 16'sd272, 16'sd232, 16'sd198, 16'sd170, 16'sd148, 16'sd133, 16'sd122, 16'sd118}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  x,
  output logic signed [W-1:0]  y
);
  localparam int AW = W + CW + $clog2(NTAPS) + 1;
  logic signed [AW-1:0] acc [NTAPS];
  logic signed [AW-1:0] ys;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NTAPS; k++) acc[k] <= '0;
    end else begin
      for (int k = 0; k < NTAPS-1; k++)
        acc[k] <= acc[k+1] + AW'(x * COEF[k]);
      acc[NTAPS-1] <= AW'(x * COEF[NTAPS-1]);
    end
  end

  assign ys = acc[0] >>> CW;
  always_comb begin
    if (ys > AW'((1 <<< (W-1)) - 1))     y = {1'b0, {(W-1){1'b1}}};
    else if (ys < -AW'(1 <<< (W-1)))     y = {1'b1, {(W-1){1'b0}}};
    else                                 y = W'(ys);
  end
endmodule
