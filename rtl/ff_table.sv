// ff_table: cycle-to-cycle feedforward table for the 25 Hz operation.
// Following the paper, the feedforward value for each point of the cycle
// has two parts: the average of the modulation applied at that point in the
// past few cycles, and the error at that point multiplied by a factor.
// The average is taken here as an exponential average over about 2^AVG_SH
// cycles (the paper does not say how many cycles or how they are weighted);
// the factor is kff/2^KSH.
// How it works: two NBINS-entry memories indexed by the cycle bin. At each
// bin strobe with learn=1: avg[b] += (u - avg[b]) >>> AVG_SH and
// ff[b] = avg[b]_new + kff*err/2^KSH (saturated). During the cycle ff_o
// presents ff[bin] of the previous cycles. Both memories start at zero.
// Interface: bin, strobe (last clock of a bin), learn, u and err signed W,
// kff signed 16. Timing: ff_o is registered (1 clock after bin changes);
// a learned value is used in the following cycle.
module ff_table #(
  parameter int NBINS  = 2048,
  parameter int W      = 18,
  parameter int AVG_SH = 2,
  parameter int KSH    = 8
) (
  input  logic                      clk,
  input  logic [$clog2(NBINS)-1:0]  bin,
  input  logic                      strobe,
  input  logic                      learn,
  input  logic signed [W-1:0]       u,
  input  logic signed [W-1:0]       err,
  input  logic signed [15:0]        kff,
  output logic signed [W-1:0]       ff_o
);
  localparam int XW = W + 18;
  logic signed [W-1:0] avg_m [NBINS];
  logic signed [W-1:0] ff_m  [NBINS];
  logic signed [W+1:0] avg_n;
  logic signed [XW-1:0] ff_n;

  initial begin
    for (int k = 0; k < NBINS; k++) begin
      avg_m[k] = '0;
      ff_m[k]  = '0;
    end
  end

  always_comb begin
    avg_n = (W+2)'(avg_m[bin]) + (((W+2)'(u) - (W+2)'(avg_m[bin])) >>> AVG_SH);
    ff_n  = XW'(avg_n) + XW'((err * kff) >>> KSH);
  end

  always_ff @(posedge clk) begin
    if (strobe && learn) begin
      avg_m[bin] <= W'(avg_n);
      if (ff_n > XW'((1 <<< (W-1)) - 1))   ff_m[bin] <= {1'b0, {(W-1){1'b1}}};
      else if (ff_n < -XW'(1 <<< (W-1)))   ff_m[bin] <= {1'b1, {(W-1){1'b0}}};
      else                                 ff_m[bin] <= W'(ff_n);
    end
    ff_o <= ff_m[bin];
  end
endmodule
