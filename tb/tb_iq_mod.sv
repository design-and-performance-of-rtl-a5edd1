// tb_iq_mod: checks the RF drive synthesis against a floating-point model.
// With a rotating reference pair AMP*cos/sin(wt) and constant inputs, the
// DAC sample must equal V*cos(wt + arg) where the drive vector is
// amp*e^{j ph} + damp*e^{j(ph+90deg)} + blc. Cases: amplitude/phase only;
// with a positive and a negative damping component; with a beam loading
// vector. Tolerance: 0.3% of full scale.
// The 90-degree damping vector and the opposite-phase beam vector follow the
// described system; building the drive at baseband is this design's own.
module tb_iq_mod;
  localparam real PI2 = 2.0 * 3.14159265358979;
  localparam real AMP = 32000.0;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  llrf_pkg::amp_t amp;
  llrf_pkg::phase_t ph;
  logic signed [15:0] damp;
  llrf_pkg::iq_t blc;
  llrf_pkg::sample_t cr, sr, rf;

  iq_mod dut (.clk(clk), .rst_n(rst_n), .amp(amp), .ph(ph), .damp(damp), .blc(blc),
              .cos_r(cr), .sin_r(sr), .rf(rf));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int a, input real pdeg, input int d, input int bi, input int bq);
    real p, vi, vq, th, e, crr, srr;
    amp = 16'(a); ph = 16'(int'(pdeg / 360.0 * 65536.0)); damp = 16'(d);
    blc.i = 18'(bi); blc.q = 18'(bq);
    p  = real'(ph) / 65536.0 * PI2;
    vi = real'(a) * $cos(p) - real'(d) * $sin(p) + real'(bi);
    vq = real'(a) * $sin(p) + real'(d) * $cos(p) + real'(bq);
    for (int n = 0; n < 200; n++) begin
      th = PI2 * 1.7 / 40.0 * real'(n);
      cr = 16'(int'(AMP * $cos(th))); sr = 16'(int'(AMP * $sin(th)));
      crr = real'(cr); srr = real'(sr);
      @(posedge clk); #1;
      if (n > 40) begin
        e = (vi * crr - vq * srr) / 32768.0;
        checks++;
        if (real'(rf) - e > 100.0 || e - real'(rf) > 100.0) begin
          failures++; if (failures < 10) $display("FAIL a=%0d p=%f d=%0d got %0d exp %f", a, pdeg, d, rf, e);
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 0; amp = 0; ph = 0; damp = 0; blc = '0; cr = 0; sr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(30000, 0.0, 0, 0, 0);
    run(20000, 135.0, 0, 0, 0);
    run(20000, -60.0, 3000, 0, 0);
    run(20000, 200.0, -4000, 0, 0);
    run(15000, 30.0, 0, -5000, 7000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
