// tb_tune_loop: a resonator model turns the bias current into a tuning
// phase: (ph_cav - ph_grid) = G*(bias - res[bin]), where res[bin] is the
// current that would tune the cavity at that point of the cycle; the supply
// follows the command with a lag. Checks: (1) the cavity loop (FF=1) with
// feedback settles within 1 degree of the setpoint on a constant target;
// (2) feedforward alone, learning over cycles with a sweeping target,
// cuts the worst tuning error tenfold; (3) the grid loop instance (FF=0)
// settles with feedback, and its feedforward enable has no effect.
// The cavity tune feedforward and feedback-only grid tune follow the
// described system; the PI law and the test plant are this bench's own.
module tb_tune_loop;
  localparam int NB = 8, BC = 60;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, fb_en, ff_en, learn, strobe;
  logic [2:0] bin;
  llrf_pkg::phase_t pc, pg, err, err2;
  logic [15:0] cmd, cmd2, meas, base;
  logic signed [15:0] kp, ki, kff;
  real sup, sup2;
  int res;

  tune_loop #(.FF(1'b1), .NBINS(NB)) dut (.clk(clk), .rst_n(rst_n), .fb_en(fb_en), .ff_en(ff_en),
    .learn(learn), .clr(1'b0), .ph_cav(pc), .ph_grid(pg), .sp(16'sd0), .kp(kp), .ki(ki),
    .kff(kff), .base(base), .bias_meas(meas), .bin(bin), .strobe(strobe), .bias_cmd(cmd), .err(err));

  // grid loop instance with its own resonator
  llrf_pkg::phase_t pc2;
  tune_loop #(.FF(1'b0), .NBINS(NB)) dut_g (.clk(clk), .rst_n(rst_n), .fb_en(1'b1), .ff_en(1'b1),
    .learn(1'b1), .clr(1'b0), .ph_cav(pc2), .ph_grid(16'sd0), .sp(16'sd500), .kp(16'sd64), .ki(16'sd1024),
    .kff(16'sd256), .base(16'd20000), .bias_meas(16'd0), .bin(bin), .strobe(strobe), .bias_cmd(cmd2), .err(err2));

  always_ff @(posedge clk) begin
    sup  <= sup + (real'(cmd) - sup) / 8.0;
    sup2 <= sup2 + (real'(cmd2) - sup2) / 4.0;
    meas <= 16'(int'(sup));
    pc   <= 16'(int'(0.5 * (sup - real'(res)))) + 16'sd3000;
    pc2  <= 16'(int'(0.8 * (sup2 - 24000.0)));
  end
  assign pg = 16'sd3000;   // common phase of grid and cavity: only the difference counts

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

  function automatic int absi(input int v); return v < 0 ? -v : v; endfunction

  initial begin
    int e0, emax, el;
    sup = 0.0; sup2 = 0.0; meas = 0; res = 30000;
    rst_n = 0; fb_en = 0; ff_en = 0; learn = 0; strobe = 0; bin = 0;
    kp = 0; ki = 0; kff = 0; base = 16'd20000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // (1) feedback on a fixed target (err = sp - G*(bias - res): a too low
    // current gives a positive error, so the gains are positive)
    fb_en = 1; kp = 16'sd64; ki = 16'sd1024;
    repeat (2000) @(negedge clk);
    chk(absi(int'(err)) < 182, $sformatf("cavity tune feedback error %0d", err));
    chk(absi(int'(cmd) - 30000) < 400, $sformatf("bias command %0d", cmd));
    chk(absi(int'(err2) ) < 182, $sformatf("grid tune feedback error %0d", err2));
    chk(absi(int'(cmd2) - 24625) < 100, $sformatf("grid bias command %0d", cmd2));
    // (2) feedforward only, sweeping target
    fb_en = 0; ff_en = 1; learn = 1; kff = 16'sd256;
    for (int c = 0; c < 30; c++) begin
      emax = 0;
      for (int b = 0; b < NB; b++) begin
        bin = 3'(b); res = 22000 + 2500 * b;
        for (int k = 0; k < BC; k++) begin
          strobe = (k == BC - 1);
          @(negedge clk);
          if (k > BC - 8 && absi(int'(err)) > emax) emax = absi(int'(err));
        end
        strobe = 0;
      end
      if (c == 0) e0 = emax;
      el = emax;
    end
    $display("tune feedforward: first-cycle max error %0d, last-cycle %0d", e0, el);
    chk(e0 > 1000, "first cycle has a large tuning error");
    chk(el * 10 < e0, "feedforward reduces the tuning error tenfold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
