// tb_amp_loop: closes the cavity voltage loop around a simple plant model
// (measured amplitude = 0.6 * drive, first-order lag of 16 clocks).
// (1) Feedback off and feedforward off: drive equals the setpoint.
// (2) Feedback on: the amplitude settles within 1% of a step setpoint
//     (18000, reachable with the drive below DAC full scale).
// (3) Feedforward only, learning over cycles (30) of a short bin pattern with a
//     rising setpoint: the worst end-of-bin error of the last cycle must be a tenth of
//     that of the first cycle (the learning effect the paper reports).
module tb_amp_loop;
  localparam int NB = 8, BC = 60;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, fb_en, ff_en, learn, strobe;
  logic [2:0] bin;
  llrf_pkg::amp_t meas, sp, drive;
  logic signed [17:0] err;
  logic signed [15:0] kp, ki, kff;
  real plant;

  amp_loop #(.NBINS(NB)) dut (.clk(clk), .rst_n(rst_n), .fb_en(fb_en), .ff_en(ff_en),
    .learn(learn), .clr(1'b0), .amp_meas(meas), .amp_sp(sp), .kp(kp), .ki(ki), .kff(kff),
    .bin(bin), .strobe(strobe), .drive(drive), .err(err));

  always_ff @(posedge clk) begin
    plant <= plant + (0.6 * real'(drive) - plant) / 16.0;
    meas  <= 16'(int'(plant));
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int e0, elast, emax;
    plant = 0.0; meas = 0;
    rst_n = 0; fb_en = 0; ff_en = 0; learn = 0; strobe = 0; bin = 0;
    sp = 0; kp = 0; ki = 0; kff = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (1) open loop
    sp = 16'd12345;
    repeat (3) @(negedge clk);
    chk(drive == 16'd12345, "open loop drive = setpoint");
    // (2) feedback
    fb_en = 1; kp = 16'sd64; ki = 16'sd2048; sp = 16'd18000;
    repeat (1500) @(negedge clk);
    chk(meas > 16'd17820 && meas < 16'd18180, $sformatf("feedback settle %0d", meas));
    chk(err == 18'(18000 - int'(meas)) || err == 18'(18000 - int'(meas)) + 1 ||
        err == 18'(18000 - int'(meas)) - 1, "error output");
    // (3) feedforward learning, feedback off
    fb_en = 0; ff_en = 1; learn = 1; kff = 16'sd256;
    e0 = 0; elast = 0;
    for (int c = 0; c < 30; c++) begin
      emax = 0;
      for (int b = 0; b < NB; b++) begin
        bin = 3'(b); sp = 16'(8000 + 1500 * b);
        for (int k = 0; k < BC; k++) begin
          strobe = (k == BC - 1);
          @(negedge clk);
          if (k > BC - 8 && (int'(err) > emax || -int'(err) > emax))
            emax = (int'(err) > 0) ? int'(err) : -int'(err);
        end
        strobe = 0;
      end
      if (c == 0) e0 = emax;
      elast = emax;
    end
    $display("feedforward: first-cycle max error %0d, last-cycle %0d", e0, elast);
    chk(e0 > 1000, "first cycle has a large error");
    chk(elast * 10 < e0, "feedforward reduces the error tenfold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
