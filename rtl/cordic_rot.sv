// cordic_rot: pipelined CORDIC in rotation mode. Converts a magnitude and an
// angle into the rectangular vector (mag*cos, mag*sin).
// The paper uses CORDIC for its trigonometric functions; the pipeline
// structure, widths and gain compensation are this design's own choice.
// How it works: the magnitude is first multiplied by the CORDIC gain
// reciprocal K = 0.60725 (19898/2^15), the start vector is pre-rotated by a
// multiple of 90 degrees chosen by the two top angle bits, and STAGES
// micro-rotations by atan(2^-i) drive the residual angle to zero. The angle
// is carried internally with 4 extra fraction bits (2^20 = 360 degrees),
// the vector with 4 guard bits;
// the micro-rotation table is round(atan(2^-i)/(2*pi)*2^20).
// Interface: mag is unsigned W bits, ang a llrf_pkg::phase_t; x,y are signed
// W+1 bits. Latency: STAGES+2 clock cycles, one result per clock when en=1.
module cordic_rot #(
  parameter int W      = 16,
  parameter int STAGES = 16
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic [W-1:0]          mag,
  input  llrf_pkg::phase_t      ang,
  output logic signed [W:0]     x,
  output logic signed [W:0]     y
);
  localparam int GB = 4;       // guard bits below the output LSB
  localparam int IW = W + 3 + GB;
  localparam int AW = 20;
  localparam int unsigned ATAN [18] = '{131072, 77376, 40884, 20753, 10417, 5213,
      2607, 1304, 652, 326, 163, 81, 41, 20, 10, 5, 3, 1};

  logic signed [IW-1:0] xs [STAGES+1];
  logic signed [IW-1:0] ys [STAGES+1];
  logic signed [AW-1:0] zs [STAGES+1];
  logic signed [IW-1:0] mk;
  logic [1:0]           quad_q;
  logic signed [AW-1:0] ang_q;

  // stage A: gain compensation
  always_ff @(posedge clk) if (en) begin
    mk     <= IW'(($signed({1'b0, mag}) * 19898) >>> (15 - GB));
    quad_q <= ang[15:14];
    ang_q  <= AW'({2'b00, ang[13:0], 4'b0000});
  end

  // stage B: quadrant pre-rotation
  always_ff @(posedge clk) if (en) begin
    zs[0] <= ang_q;
    unique case (quad_q)
      2'd0: begin xs[0] <= mk;  ys[0] <= '0;  end
      2'd1: begin xs[0] <= '0;  ys[0] <= mk;  end
      2'd2: begin xs[0] <= -mk; ys[0] <= '0;  end
      default: begin xs[0] <= '0; ys[0] <= -mk; end
    endcase
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_st
    always_ff @(posedge clk) if (en) begin
      if (!zs[i][AW-1]) begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - AW'(ATAN[i]);
      end else begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + AW'(ATAN[i]);
      end
    end
  end

  // round away the guard bits
  assign x = (W+1)'((xs[STAGES] + IW'(1 << (GB-1))) >>> GB);
  assign y = (W+1)'((ys[STAGES] + IW'(1 << (GB-1))) >>> GB);
endmodule
