// tb_llrf_full: end-to-end test of the LLRF controller with every parameter at
// its default: 2048 bins of 391 clocks (one 20 ms acceleration cycle at
// 40 MHz), 2.25 ms upload slots, 70-tap filters.
// The RF plant is the behavioural model rf_plant_model (cavity, grid
// circuit, beam); the drive's complex envelope and the reference are taken
// from inside the controller so the plant can work at baseband.
// Sequence: reset; load the frequency (1.022 -> 2.444 MHz), voltage and
// synchronous phase patterns over NB bins; set gains and enable every loop
// with feedforward learning on; run NCYC acceleration cycles, each started
// by the injection and data-cycle triggers; fire one more trigger so the
// last cycle's diagnostics become readable, and read them back.
// Checks: in the last cycle, after the first quarter and in the settled
// last quarter of every bin, the amplitude error
// stays within 1% and the cavity phase error within 1 degree (the paper's
// regulation targets), the tuning errors within 5 degrees; every mechanism
// (pattern cycle, reference phase reset, bin strobes, feedforward learning
// and use for voltage and tuning, both tune loops moving their supplies,
// phase correction, synchrotron damping, beam loading feedforward, orbit
// correction, upload time slot, capture bank ready) happens at least once;
// the capture buffer returns what the loops produced at the last bin.
module tb_llrf_full;
  import llrf_pkg::*;
  localparam int NB = 2048;
  localparam int NCYC = 1;
  localparam int BIN_CLKS = 391;
  localparam int unsigned CYC_CLKS = 800800;
  localparam real F0 = 1.022, F1 = 2.444;
  localparam real D2R = 3.14159265358979 / 180.0;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, trig_inj, trig_evt, host_we, cyc_active, cap_ready, upload_en, upload_start, op_time;
  sample_t adc_cav, adc_grid, adc_fct, adc_wcm, dac_rf;
  logic [15:0] bias_c_meas, bias_c_cmd, bias_g_cmd, host_addr;
  logic [31:0] host_wdata;
  logic [15:0] host_rdata;
  real res_c, phis_deg, phi_c;
  bit  beam_on;

  llrf_top dut (.clk(clk), .rst_n(rst_n), .trig_inj(trig_inj), .trig_evt(trig_evt),
    .carrier_id(3'd1), .adc_cav(adc_cav), .adc_grid(adc_grid), .adc_fct(adc_fct),
    .adc_wcm(adc_wcm), .bias_c_meas(bias_c_meas), .bpm_pos(16'sd500), .dac_rf(dac_rf),
    .bias_c_cmd(bias_c_cmd), .bias_g_cmd(bias_g_cmd), .host_we(host_we), .host_addr(host_addr),
    .host_wdata(host_wdata), .host_rdata(host_rdata), .cyc_active(cyc_active),
    .cap_ready(cap_ready), .upload_en(upload_en),
    .upload_start(upload_start), .op_time(op_time));

  rf_plant_model plant (.clk(clk), .drv_i(dut.u_mod.si), .drv_q(dut.u_mod.sq),
    .cos_r(dut.ref_cos), .sin_r(dut.ref_sin), .bias_c(bias_c_cmd), .bias_g(bias_g_cmd),
    .res_c(res_c), .phis_deg(phis_deg), .beam_on(beam_on), .adc_cav(adc_cav),
    .adc_grid(adc_grid), .adc_fct(adc_fct), .adc_wcm(adc_wcm), .bias_c_meas(bias_c_meas),
    .phi_c_deg(phi_c));

  // frequency of a bin and the patterns (shapes after the paper's cycle plot)
  function automatic real f_of(input int b);
    return F0 + (F1 - F0) * (1.0 - $cos(3.14159265358979 * real'(b) / real'(NB - 1))) / 2.0;
  endfunction
  function automatic int amp_of(input int b);
    real t;  // ms in a 20 ms cycle; kV = 35 + 25.3 t - 1.21 t^2, 165 kV -> 10000
    t = 20.0 * real'(b) / real'(NB);
    return int'((35.0 + 25.32 * t - 1.2086 * t * t) / 165.0 * 10000.0);
  endfunction
  function automatic real phis_of(input int b);
    return 45.0 * $sin(3.14159265358979 * real'(b) / real'(NB));
  endfunction

  // resonance current of the cavity follows the swept frequency
  always_comb begin
    res_c    = 15000.0 + 30000.0 * (real'(dut.pat_ftw) / 4294967296.0 * 40.0 - F0) / (F1 - F0);
    phis_deg = phis_of(int'(dut.bin));
  end

  // ---- watchdog ------------------------------------------------------------
  initial begin
    repeat (int'(CYC_CLKS) * (NCYC + 2) + 50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic host_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  // ---- mechanism counters --------------------------------------------------
  int n_cyc, n_sync, n_strobe, n_learn, n_ffamp, n_ffct, n_ct, n_gt, n_ph, n_damp, n_blc,
      n_orb, n_upl, n_rdy, n_op;
  logic [15:0] last_bc, last_bg;
  logic last_upl;
  int cur_cyc;
  int bin_clk = 0;
  int max_ae, max_pe, max_ce, max_ge;
  logic [15:0] cap_last [4];

  function automatic int absi(input int v); return v < 0 ? -v : v; endfunction

  always @(posedge clk) if (rst_n) begin
    if (dut.cyc_start) n_cyc++;
    if (trig_inj)      n_sync++;
    if (dut.strobe)    n_strobe++;
    if (dut.strobe && dut.learn) n_learn++;
    if (dut.u_amp.ff_o != 0 && dut.cfg.amp_ff_en) n_ffamp++;
    if (dut.u_ctune.g_ff.u_ff.ff_o != 0 && dut.cfg.ctune_ff_en) n_ffct++;
    if (bias_c_cmd != last_bc) n_ct++;
    if (bias_g_cmd != last_bg) n_gt++;
    if (dut.drv_ph != 0) n_ph++;
    if (dut.damp != 0) n_damp++;
    if (dut.blc_iq.i != 0 || dut.blc_iq.q != 0) n_blc++;
    if (dut.ftw_off != 0) n_orb++;
    if (upload_start) n_upl++;
    if (op_time) n_op++;
    if (cap_ready) n_rdy++;
    last_bc <= bias_c_cmd; last_bg <= bias_g_cmd; last_upl <= upload_en;
    // error statistics in the last cycle, after its first quarter, in the
    // last quarter of each bin (the patterns step from bin to bin)
    bin_clk = dut.strobe ? 0 : bin_clk + 1;
    if (cur_cyc == NCYC && dut.active && int'(dut.bin) >= NB / 4 && bin_clk >= BIN_CLKS * 3 / 4) begin
      if (absi(int'(dut.amp_err)) * 100 > int'(dut.amp_sp) && absi(int'(dut.amp_err)) > max_ae)
        max_ae = absi(int'(dut.amp_err));
      if (absi(int'(dut.ph_err)) > max_pe) max_pe = absi(int'(dut.ph_err));
      if (absi(int'(dut.ct_err)) > max_ce) max_ce = absi(int'(dut.ct_err));
      if (absi(int'(dut.gt_err)) > max_ge) max_ge = absi(int'(dut.gt_err));
    end
    if (cur_cyc == NCYC && dut.strobe && dut.active && int'(dut.bin) == NB - 1)
      for (int c = 0; c < 4; c++) cap_last[c] = dut.cap_d[c];
  end

  initial begin
    n_cyc = 0; n_sync = 0; n_strobe = 0; n_learn = 0; n_ffamp = 0; n_ffct = 0; n_ct = 0;
    n_gt = 0; n_ph = 0; n_damp = 0; n_blc = 0; n_orb = 0; n_upl = 0; n_rdy = 0; n_op = 0;
    last_bc = 0; last_bg = 0; last_upl = 0; cur_cyc = 0;
    max_ae = 0; max_pe = 0; max_ce = 0; max_ge = 0;
    rst_n = 0; trig_inj = 0; trig_evt = 0; host_we = 0; host_addr = 0; host_wdata = 0;
    beam_on = 1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // patterns
    for (int b = 0; b < NB; b++) begin
      host_write(16'h2000 | 16'(b), 32'(longint'(f_of(b) / 40.0 * 4294967296.0)));
      host_write(16'h4000 | 16'(b), 32'(amp_of(b)));
      host_write(16'h6000 | 16'(b), 32'(int'(phis_of(b) / 360.0 * 65536.0)));
    end
    // gains, setpoints, bases
    // integral gains are kept low for the ~100-clock delay around each loop
    // (filters, CORDICs, cavity and supply lags)
    host_write(16'd1, 32'd64);    host_write(16'd2, 32'd256);   host_write(16'd3, 32'd128);
    host_write(16'd4, 32'd64);    host_write(16'd5, 32'd128);   host_write(16'd6, 32'd64); 
    host_write(16'd7, 32'd64);    host_write(16'd8, 32'd128);   host_write(16'd9, 32'd128);
    host_write(16'd10, 32'd64);   host_write(16'd11, 32'd128);
    host_write(16'd12, 32'd0);    host_write(16'd13, 32'd0);
    host_write(16'd14, 32'd6000); host_write(16'd15, 32'd0);
    host_write(16'd16, 32'd16);   host_write(16'd17, 32'd0);
    host_write(16'd18, 32'd15000); host_write(16'd19, 32'd22000);
    host_write(16'd0, 32'h3FF);   // all loops and feedforward learning on
    // read back one register through the host port
    @(negedge clk); host_addr = 16'd19;
    @(negedge clk);
    chk(host_rdata == 16'd22000, "register readback");
    // let the loops lock at the injection values
    repeat (3000) @(negedge clk);
    for (int c = 1; c <= NCYC + 1; c++) begin
      cur_cyc = c;
      @(negedge clk); trig_inj = 1; trig_evt = 1;
      @(negedge clk); trig_inj = 0; trig_evt = 0;
      if (c == NCYC + 1) break;
      wait (!dut.active);
      repeat (2000) @(negedge clk);
      $display("cycle %0d done", c);
    end
    repeat (10) @(negedge clk);
    // read the last cycle's diagnostics at the last bin
    chk(cap_ready, "capture bank ready after the cycle");
    for (int c = 0; c < 4; c++) begin
      host_addr = 16'h8000 | 16'(c << 11) | 16'(NB - 1);
      @(negedge clk); @(negedge clk);
      chk(host_rdata == cap_last[c], $sformatf("capture ch %0d: %0d vs %0d", c, host_rdata, cap_last[c]));
    end
    $display("last cycle: max amp err beyond 1%% = %0d, max phase err = %0d (%f deg), cavity tune err = %0d, grid tune err = %0d",
             max_ae, max_pe, real'(max_pe) * 360.0 / 65536.0, max_ce, max_ge);
    chk(max_ae == 0, "amplitude error within 1% in the last cycle");
    chk(max_pe < 182, "cavity phase error within 1 degree in the last cycle");
    chk(max_ce < 910, "cavity tuning error within 5 degrees");
    chk(max_ge < 910, "grid tuning error within 5 degrees");
    $display("mechanisms: cycles=%0d ref_resets=%0d strobes=%0d ff_updates=%0d ff_amp_used=%0d ff_tune_used=%0d",
             n_cyc, n_sync, n_strobe, n_learn, n_ffamp, n_ffct);
    $display("            cav_tune_moves=%0d grid_tune_moves=%0d phase_corr=%0d damping=%0d blc=%0d orbit=%0d uploads=%0d ready=%0d op_time=%0d",
             n_ct, n_gt, n_ph, n_damp, n_blc, n_orb, n_upl, n_rdy, n_op);
    chk(n_cyc >= NCYC, "pattern cycles ran");
    chk(n_sync >= NCYC, "reference phase resets");
    chk(n_strobe == NCYC * NB, "bin strobes per cycle");
    chk(n_learn > 0, "feedforward learning updates");
    chk(n_ffamp > 0, "voltage feedforward applied");
    chk(n_ffct > 0, "tune feedforward applied");
    chk(n_ct > 0, "cavity tune loop moved its supply");
    chk(n_gt > 0, "grid tune loop moved its supply");
    chk(n_ph > 0, "phase loop corrected the drive phase");
    chk(n_damp > 0, "synchrotron damping component");
    chk(n_blc > 0, "beam loading feedforward");
    chk(n_orb > 0, "orbit frequency correction");
    chk(n_upl > 0, "upload time slot opened");
    chk(n_rdy > 0, "capture bank ready");
    chk(n_op > 0, "operating time after the upload slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
