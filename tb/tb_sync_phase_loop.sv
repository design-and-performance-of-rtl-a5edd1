// tb_sync_phase_loop: feeds a beam phase equal to cavity phase + synchronous
// phase + a constant offset + a synchrotron oscillation. The damping output
// must follow kd/256 times the oscillation (within 15%) with the constant
// offset removed (mean near zero), and must be zero when disabled.
// The beam-minus-cavity phase comparison follows the described system; the
// high-pass is this design's own.
module tb_sync_phase_loop;
  localparam int HP = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en;
  llrf_pkg::phase_t beam, cav, phis, osc;
  logic signed [15:0] kd, damp;

  sync_phase_loop #(.HP_SH(HP)) dut (.clk(clk), .rst_n(rst_n), .en(en), .beam_ph(beam),
    .cav_ph(cav), .phis_sp(phis), .kd(kd), .damp(damp), .osc(osc));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real o, maxd, mind, sum;
    rst_n = 0; en = 0; kd = 16'sd512; cav = 16'sd1000; phis = 16'sd3000; beam = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    maxd = -1e9; mind = 1e9; sum = 0.0;
    for (int n = 0; n < 6000; n++) begin
      o = 800.0 * $sin(2.0 * 3.14159265358979 * real'(n) / 100.0);
      beam = 16'(1000 + 3000 + 2500 + int'(o));   // 2500 = constant offset
      @(negedge clk);
      if (n == 100) begin
        checks++;
        if (damp != 0) begin failures++; $display("FAIL damp while disabled"); end
        en = 1;
      end
      if (n >= 4000) begin
        if (real'(damp) > maxd) maxd = real'(damp);
        if (real'(damp) < mind) mind = real'(damp);
        sum += real'(damp);
      end
    end
    $display("damp range %f .. %f, mean %f", mind, maxd, sum / 2000.0);
    checks += 3;
    if (maxd < 1360.0 || maxd > 1840.0) begin failures++; $display("FAIL max damp"); end
    if (mind > -1360.0 || mind < -1840.0) begin failures++; $display("FAIL min damp"); end
    if (sum / 2000.0 > 100.0 || sum / 2000.0 < -100.0) begin failures++; $display("FAIL mean"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
