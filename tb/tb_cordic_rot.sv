// tb_cordic_rot: checks the rotation-mode CORDIC against floating-point
// cos/sin for random magnitudes and angles over all four quadrants, with a
// new input every clock, and checks the STAGES+2 clock latency.
// The description names CORDIC for the trigonometry; the 3-LSB tolerance is
// this bench's own.
module tb_cordic_rot;
  localparam int STAGES = 16;
  localparam int L = STAGES + 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] mag;
  llrf_pkg::phase_t ang;
  logic signed [16:0] x, y;
  real exq [$], eyq [$];

  cordic_rot #(.W(16), .STAGES(STAGES)) dut (.clk(clk), .en(1'b1), .mag(mag), .ang(ang), .x(x), .y(y));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real th, ex, ey;
    mag = 0; ang = 0;
    for (int n = 0; n < 600 + L; n++) begin
      @(negedge clk);
      if (n >= L) begin
        ex = exq.pop_front(); ey = eyq.pop_front();
        checks++;
        if ((x - ex) > 3.0 || (ex - x) > 3.0 || (y - ey) > 3.0 || (ey - y) > 3.0) begin
          failures++;
          $display("FAIL n=%0d x=%0d y=%0d expected %f %f", n, x, y, ex, ey);
        end
      end
      mag = (n % 7 == 0) ? 16'd32767 : 16'($urandom_range(0, 32767));
      ang = 16'($urandom);
      th  = real'(ang) * 2.0 * 3.14159265358979 / 65536.0;
      exq.push_back(real'(mag) * $cos(th));
      eyq.push_back(real'(mag) * $sin(th));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
