// tb_cfg_regs: writes every register with a distinct value, reads all back,
// and checks that the decoded configuration fields carry the written values
// (enable bits individually, gains, setpoints), and that reset clears them.
// The register map it checks is this design's own; the description only says
// the host accesses registers on the carrier.
module tb_cfg_regs;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, we;
  logic [4:0] addr;
  logic [15:0] wdata, rdata;
  llrf_pkg::cfg_t cfg;

  cfg_regs dut (.clk(clk), .rst_n(rst_n), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata), .cfg(cfg));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    rst_n = 0; we = 0; addr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(cfg == '0, "reset value");
    for (int a = 1; a < 20; a++) begin
      we = 1; addr = 5'(a); wdata = 16'(a * 1111); @(negedge clk);
    end
    we = 0;
    for (int a = 1; a < 20; a++) begin
      addr = 5'(a); @(negedge clk);
      chk(rdata == 16'(a * 1111), $sformatf("readback %0d", a));
    end
    chk(cfg.amp_kp == 16'd1111 && cfg.amp_ki == 16'd2222 && cfg.amp_kff == 16'd3333, "amp gains");
    chk(cfg.ph_kp == 16'd4444 && cfg.ph_ki == 16'd5555 && cfg.sync_kd == 16'd6666, "phase gains");
    chk(cfg.ct_kp == 16'd7777 && cfg.ct_ki == 16'd8888 && cfg.ct_kff == 16'd9999, "tune gains");
    chk(cfg.gt_kp == 16'd11110 && cfg.gt_ki == 16'd12221, "grid gains");
    chk(cfg.ct_sp == 16'd13332 && cfg.gt_sp == 16'd14443, "tune setpoints");
    chk(cfg.blc_re == 16'd15554 && cfg.blc_im == 16'd16665, "blc gain");
    chk(cfg.orb_k == 16'd17776 && cfg.orb_sp == 16'd18887, "orbit");
    chk(cfg.bias_c_base == 16'd19998 && cfg.bias_g_base == 16'd21109, "bias bases");
    for (int b = 0; b < 10; b++) begin
      we = 1; addr = 0; wdata = 16'(1 << b); @(negedge clk); we = 0;
      chk({cfg.ff_learn, cfg.orbit_en, cfg.blc_en, cfg.gtune_en, cfg.ctune_ff_en,
           cfg.ctune_en, cfg.sync_en, cfg.ph_en, cfg.amp_ff_en, cfg.amp_en} == 10'(1 << b),
          $sformatf("enable bit %0d", b));
    end
    addr = 5'd25; @(negedge clk);
    chk(rdata == 0, "unmapped address reads zero");
    rst_n = 0; @(negedge clk); rst_n = 1;
    chk(cfg == '0, "cleared by reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
