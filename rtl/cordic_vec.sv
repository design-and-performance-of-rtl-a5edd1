// cordic_vec: pipelined CORDIC in vectoring mode. Converts a baseband vector
// (I, Q) into its amplitude and phase, as the paper's signal processing does
// after the low-pass filters. Pipeline and widths are this design's choice.
// How it works: a vector in the left half-plane is negated and 180 degrees
// added to the angle; STAGES micro-rotations then drive Q to zero while the
// rotated angles are summed (internal 2^20 = 360 degrees). The final X is
// the magnitude times the CORDIC gain 1.6468, compensated by 19898/2^15.
// Interface: i,q signed W bits; amp unsigned W bits (saturating); ph a
// llrf_pkg::phase_t. Latency STAGES+2 clocks, one result per clock when en=1.
module cordic_vec #(
  parameter int W      = 18,
  parameter int STAGES = 16
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic signed [W-1:0]   i,
  input  logic signed [W-1:0]   q,
  output logic [W-1:0]          amp,
  output llrf_pkg::phase_t      ph
);
  localparam int IW = W + 3;
  localparam int AW = 20;
  localparam int unsigned ATAN [18] = '{131072, 77376, 40884, 20753, 10417, 5213,
      2607, 1304, 652, 326, 163, 81, 41, 20, 10, 5, 3, 1};

  logic signed [IW-1:0] xs [STAGES+1];
  logic signed [IW-1:0] ys [STAGES+1];
  logic signed [AW-1:0] zs [STAGES+1];
  logic signed [IW+15:0] prod;

  always_ff @(posedge clk) if (en) begin
    if (i < 0) begin
      xs[0] <= -IW'(i);
      ys[0] <= -IW'(q);
      zs[0] <= AW'(1 << (AW-1));   // 180 degrees
    end else begin
      xs[0] <= IW'(i);
      ys[0] <= IW'(q);
      zs[0] <= '0;
    end
  end

  for (genvar k = 0; k < STAGES; k++) begin : g_st
    always_ff @(posedge clk) if (en) begin
      if (ys[k][IW-1]) begin
        xs[k+1] <= xs[k] - (ys[k] >>> k);
        ys[k+1] <= ys[k] + (xs[k] >>> k);
        zs[k+1] <= zs[k] - AW'(ATAN[k]);
      end else begin
        xs[k+1] <= xs[k] + (ys[k] >>> k);
        ys[k+1] <= ys[k] - (xs[k] >>> k);
        zs[k+1] <= zs[k] + AW'(ATAN[k]);
      end
    end
  end

  assign prod = (IW+16)'(xs[STAGES]) * 19898;
  always_ff @(posedge clk) if (en) begin
    if ((prod >>> 15) > (IW+16)'($signed({1'b0, {W{1'b1}}})))
      amp <= '1;
    else
      amp <= W'(prod >>> 15);
    // round the 20-bit angle to 16 bits
    ph <= llrf_pkg::phase_t'((zs[STAGES] + 20'sd8) >>> 4);
  end
endmodule
