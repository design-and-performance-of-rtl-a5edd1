// tb_iq_demod: checks the two multipliers of the direct demodulator on
// random samples: I = adc*cos/2^15 and Q = -adc*sin/2^15, one clock later.
// Multiplying each sample by the two reference signals follows the described
// system; the scaling is this design's own.
module tb_iq_demod;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  llrf_pkg::sample_t adc, cr, sr;
  llrf_pkg::iq_t iq;
  int ei, eq;

  iq_demod dut (.clk(clk), .adc(adc), .cos_r(cr), .sin_r(sr), .iq(iq));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      adc = 16'($urandom); cr = 16'($urandom); sr = 16'($urandom);
      ei = (int'(adc) * int'(cr)) >>> 15;
      eq = -((int'(adc) * int'(sr)) >>> 15);
      @(negedge clk);
      checks++;
      if (int'(iq.i) != ei || int'(iq.q) != eq) begin
        failures++; $display("FAIL got %0d %0d exp %0d %0d", iq.i, iq.q, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
