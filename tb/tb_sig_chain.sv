// tb_sig_chain: drives one processing channel with a clean RF tone
// A*cos(wt+p) and the ideal reference pair AMP*cos(wt), AMP*sin(wt), at the
// injection and extraction frequencies and several phases, and checks that
// the settled amplitude equals A/2*AMP/2^15 within 1% and the phase equals
// p within 0.5 degree (the paper's regulation targets are 1% and 1 degree).
module tb_sig_chain;
  localparam real PI2 = 2.0 * 3.14159265358979;
  localparam real AMP = 32000.0;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  llrf_pkg::sample_t adc, cr, sr;
  llrf_pkg::iq_t iq;
  llrf_pkg::amp_t amp;
  llrf_pkg::phase_t ph;

  sig_chain dut (.clk(clk), .rst_n(rst_n), .adc(adc), .cos_r(cr), .sin_r(sr), .iq(iq), .amp(amp), .ph(ph));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tone(input real fmhz, input real a, input real pdeg);
    real th, ea; int ep, dp;
    ea = a / 2.0 * AMP / 32768.0;
    ep = int'(pdeg / 360.0 * 65536.0);
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      th = PI2 * fmhz / 40.0 * real'(n);
      cr  = 16'(int'(AMP * $cos(th)));
      sr  = 16'(int'(AMP * $sin(th)));
      adc = 16'(int'(a * $cos(th + pdeg / 360.0 * PI2)));
      if (n > 200 && n % 20 == 0) begin
        dp = int'(16'(ph - 16'(ep)));
        if (dp > 32767) dp -= 65536;
        checks += 2;
        if (real'(amp) > ea * 1.01 || real'(amp) < ea * 0.99) begin
          failures++; $display("FAIL amp f=%f p=%f got %0d exp %f", fmhz, pdeg, amp, ea);
        end
        if (dp > 91 || dp < -91) begin
          failures++; $display("FAIL ph f=%f p=%f got %0d exp %0d", fmhz, pdeg, ph, ep);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; adc = 0; cr = 0; sr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tone(1.022, 30000.0, 30.0);
    tone(1.022, 8000.0, -120.0);
    tone(2.444, 20000.0, 170.0);
    tone(2.444, 30000.0, -45.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
