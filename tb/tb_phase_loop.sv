// tb_phase_loop: closes the cavity phase loop around a plant that adds a
// fixed phase shift (as the amplifier chain and tune loops do) with a few
// clocks of delay. The loop must bring the cavity phase within 0.5 degree
// of the setpoint for shifts of both signs, including one near 180 degrees
// (wrap-around), and must output zero correction when disabled.
// Locking the cavity phase to the reference follows the described system; the
// PI law and its wrapping integrator are this design's own.
module tb_phase_loop;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en;
  llrf_pkg::phase_t meas, sp, drv, err, shift;
  llrf_pkg::phase_t dly [4];
  logic signed [15:0] kp, ki;

  phase_loop dut (.clk(clk), .rst_n(rst_n), .en(en), .clr(1'b0), .ph_meas(meas), .ph_sp(sp),
                  .kp(kp), .ki(ki), .drive_ph(drv), .err(err));

  always_ff @(posedge clk) begin
    dly[0] <= drv + shift;
    for (int k = 1; k < 4; k++) dly[k] <= dly[k-1];
  end
  assign meas = dly[3];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic settle(input int sh, input int s);
    int d;
    shift = 16'(sh); sp = 16'(s);
    repeat (2000) @(negedge clk);
    d = int'(16'(meas - sp));
    if (d > 32767) d -= 65536;
    checks++;
    if (d > 91 || d < -91) begin failures++; $display("FAIL shift %0d sp %0d: off by %0d", sh, s, d); end
  endtask

  initial begin
    rst_n = 0; en = 0; kp = 16'sd32; ki = 16'sd1024; sp = 0; shift = 0;
    for (int k = 0; k < 4; k++) dly[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (drv != 0) begin failures++; $display("FAIL drive not zero when disabled"); end
    en = 1;
    settle(5000, 0);
    settle(-9000, 0);
    settle(-9000, 2000);
    settle(31000, -1000);      // about 170 degrees
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
