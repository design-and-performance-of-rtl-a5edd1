// tb_pi_ctrl: checks the PI controller: the pure proportional response,
// the integrator ramp per clock, clamping at the limits, the integrator
// clear and hold when disabled, against an independent integer model.
// The PI law checked here is this design's own; the description does not give
// the controller law.
module tb_pi_ctrl;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en, clr;
  logic signed [17:0] err, out;
  logic signed [15:0] kp, ki;

  pi_ctrl dut (.clk(clk), .rst_n(rst_n), .en(en), .clr(clr), .err(err), .kp(kp), .ki(ki),
               .lo(-18'sd50000), .hi(18'sd50000), .out(out));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(input longint e, input string m);
    checks++;
    if (longint'(out) != e) begin failures++; $display("FAIL %s got %0d exp %0d", m, out, e); end
  endtask

  initial begin
    longint integ, o;
    rst_n = 0; en = 0; clr = 0; err = 0; kp = 0; ki = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // proportional only: gain kp/256
    en = 1; kp = 16'sd512; ki = 0;
    for (int n = 0; n < 20; n++) begin
      err = 18'($signed($urandom_range(0, 40000)) - 20000);
      @(negedge clk);
      expect_out(2 * longint'(err), "P");
    end
    // integrator: ki/65536 per clock
    clr = 1; @(negedge clk); clr = 0;
    expect_out(0, "clr");
    kp = 0; ki = 16'sd16384; err = 18'sd4000; integ = 0;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      integ += longint'(err) * 16384;
      if (integ > 50000 * 65536) integ = 50000 * 65536;
      expect_out(integ >>> 16, "I");
    end
    // hold when disabled
    o = longint'(out); en = 0;
    repeat (5) @(negedge clk);
    expect_out(o, "hold");
    // negative limit with proportional
    en = 1; kp = 16'sd32767; err = -18'sd100000;
    @(negedge clk);
    expect_out(-50000, "lo clamp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
