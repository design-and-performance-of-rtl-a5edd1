// tb_fir_lpf: checks the 70-tap FIR. (1) Random input against a direct
// convolution with the impulse response the filter is meant to have
// (Hamming-windowed sinc, computed here in floating point and rounded the
// same way). (2) A DC step reaches its final value exactly 70 clocks after
// it enters (the 1.75 us span at 40 MHz). (3) A tone at 2.044 MHz, the
// lowest 2f mixing product, is attenuated below 1%.
// The 70 taps and 1.75 us follow the described system; the coefficients and
// the 1% limit are this design's own.
module tb_fir_lpf;
  localparam int N = 70;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  logic signed [17:0] x, y;
  int h [N];
  int hist [N];

  fir_lpf dut (.clk(clk), .rst_n(rst_n), .x(x), .y(y));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real hr [N]; real sum; real m; int isum; longint acc; int peak;
    // reference taps
    sum = 0.0;
    for (int n = 0; n < N; n++) begin
      m = real'(n) - 34.5;
      hr[n] = $sin(2.0*3.14159265358979*0.005*m) / (3.14159265358979*m)
              * (0.54 - 0.46*$cos(2.0*3.14159265358979*real'(n)/69.0));
      sum += hr[n];
    end
    isum = 0;
    for (int n = 0; n < N; n++) begin h[n] = int'(hr[n]/sum*65536.0); isum += h[n]; end
    h[34] += (65536 - isum) / 2; h[35] += (65536 - isum) - (65536 - isum) / 2;
    for (int n = 0; n < N; n++) hist[n] = 0;
    rst_n = 0; x = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // (1) random input
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      x = 18'($signed($urandom_range(0, 200000)) - 100000);
      for (int k = N-1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = int'(x);
      @(posedge clk); #1;
      acc = 0;
      for (int k = 0; k < N; k++) acc += longint'(hist[k]) * h[k];
      checks++;
      if (longint'(y) != (acc >>> 16)) begin
        failures++; if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, y, acc >>> 16);
      end
    end
    // (2) step: zero the pipeline, then apply a constant
    @(negedge clk); x = 0;
    repeat (N + 2) @(negedge clk);
    x = 18'sd100000;
    for (int n = 1; n <= N + 5; n++) begin
      @(negedge clk);
      if (n == N - 1) begin checks++; if (y == 18'sd100000) begin failures++; $display("FAIL step settled early"); end end
      if (n == N) begin checks++; if (y != 18'sd100000) begin failures++; $display("FAIL step %0d at %0d", y, n); end end
    end
    // (3) 2f tone
    peak = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      x = 18'(int'(100000.0 * $cos(2.0*3.14159265358979*2.044/40.0*real'(n))));
      if (n > 2*N && (int'(y) > peak || -int'(y) > peak))
        peak = (int'(y) > 0) ? int'(y) : -int'(y);
    end
    checks++;
    if (peak > 1000) begin failures++; $display("FAIL 2f ripple %0d", peak); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
