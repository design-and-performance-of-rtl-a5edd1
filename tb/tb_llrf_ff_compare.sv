// tb_llrf_ff_compare: runs the whole controller through acceleration cycles
// twice, first with feedback only and then with feedback plus learned
// feedforward, and compares the errors of the two, the comparison of the
// voltage and cavity tuning errors with and without feedforward.
// The RF plant is the behavioural model rf_plant_model (cavity, grid
// circuit, beam) at baseband. Reduced time scale: 16 bins of 2000 clocks.
// Sequence: load the 1.022 -> 2.444 MHz frequency, voltage and synchronous
// phase patterns; enable every loop except the two feedforward paths and
// learning; run 2 cycles and record the worst relative voltage error and the
// worst cavity tuning error of the second (from the second bin on, in the
// last quarter of each bin). Then enable feedforward and learning, run 8
// cycles and record the same for the last one.
// Checks: the feedback-only run shows a clear voltage and tuning error; with
// feedforward the voltage error is less than half of it and within 1%, and
// the tuning error less than half of it; the tables were updated and used.
// The comparison itself mirrors the described voltage and tuning results
// with and without feedforward; the plant, gains and limits are this bench's
// own.
module tb_llrf_ff_compare;
  import llrf_pkg::*;
  localparam int NB = 16;
  localparam int NCYC = 8;
  localparam int BIN_CLKS = 2000;
  localparam int unsigned CYC_CLKS = 34000;
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

  llrf_top #(.NBINS(16), .BIN_CLKS(2000), .SLOT_CLKS(2000), .CYCLE_CLKS(40000)) dut (.clk(clk), .rst_n(rst_n), .trig_inj(trig_inj), .trig_evt(trig_evt),
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
    repeat (int'(CYC_CLKS) * (NCYC + 4) + 200000) @(posedge clk);
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

  int phase_id = 0;       // 1: feedback only, 2: with feedforward
  int cur_cyc = 0, meas_cyc = 0;
  int bin_clk = 0;
  int n_learn = 0;
  real ae_max;            // worst relative voltage error, percent
  int  ce_max;            // worst cavity tuning error, counts
  real ae_fb, ae_ff;
  int  ce_fb, ce_ff;

  function automatic int absi(input int v); return v < 0 ? -v : v; endfunction

  always @(posedge clk) if (rst_n) begin
    if (dut.strobe && dut.learn) n_learn++;
    bin_clk = dut.strobe ? 0 : bin_clk + 1;
    if (cur_cyc == meas_cyc && dut.active && int'(dut.bin) >= 1 && bin_clk >= BIN_CLKS * 3 / 4) begin
      if (100.0 * real'(absi(int'(dut.amp_err))) / real'(dut.amp_sp) > ae_max)
        ae_max = 100.0 * real'(absi(int'(dut.amp_err))) / real'(dut.amp_sp);
      if (absi(int'(dut.ct_err)) > ce_max) ce_max = absi(int'(dut.ct_err));
    end
  end

  task automatic run_cycles(input int n);
    for (int c = 1; c <= n; c++) begin
      cur_cyc = c;
      @(negedge clk); trig_inj = 1; trig_evt = 1;
      @(negedge clk); trig_inj = 0; trig_evt = 0;
      wait (!dut.active);
      repeat (2000) @(negedge clk);
    end
    cur_cyc = 0;
  endtask

  initial begin
    rst_n = 0; trig_inj = 0; trig_evt = 0; host_we = 0; host_addr = 0; host_wdata = 0;
    beam_on = 1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      host_write(16'h2000 | 16'(b), 32'(longint'(f_of(b) / 40.0 * 4294967296.0)));
      host_write(16'h4000 | 16'(b), 32'(amp_of(b)));
      host_write(16'h6000 | 16'(b), 32'(int'(phis_of(b) / 360.0 * 65536.0)));
    end
    host_write(16'd1, 32'd64);    host_write(16'd2, 32'd256);   host_write(16'd3, 32'd128);
    host_write(16'd4, 32'd64);    host_write(16'd5, 32'd128);   host_write(16'd6, 32'd64);
    host_write(16'd7, 32'd64);    host_write(16'd8, 32'd128);   host_write(16'd9, 32'd128);
    host_write(16'd10, 32'd64);   host_write(16'd11, 32'd128);
    host_write(16'd12, 32'd0);    host_write(16'd13, 32'd0);
    host_write(16'd14, 32'd6000); host_write(16'd15, 32'd0);
    host_write(16'd16, 32'd16);   host_write(16'd17, 32'd0);
    host_write(16'd18, 32'd15000); host_write(16'd19, 32'd22000);
    // feedback only: every loop on, amp_ff (bit 1), ctune_ff (bit 5) and
    // learning (bit 9) off
    host_write(16'd0, 32'h1DD);
    repeat (3000) @(negedge clk);
    phase_id = 1; ae_max = 0.0; ce_max = 0; meas_cyc = 2;
    run_cycles(2);
    ae_fb = ae_max; ce_fb = ce_max;
    // feedback and feedforward with learning
    host_write(16'd0, 32'h3FF);
    phase_id = 2; ae_max = 0.0; ce_max = 0; meas_cyc = NCYC;
    run_cycles(NCYC);
    ae_ff = ae_max; ce_ff = ce_max;
    $display("feedback only:       voltage error %f %%, cavity tuning error %f deg", ae_fb, real'(ce_fb) * 360.0 / 65536.0);
    $display("with feedforward:    voltage error %f %%, cavity tuning error %f deg", ae_ff, real'(ce_ff) * 360.0 / 65536.0);
    chk(ae_fb > 1.0, "feedback alone leaves a voltage error above 1%");
    chk(ae_ff * 2.0 < ae_fb, "feedforward at least halves the voltage error");
    chk(ae_ff < 1.0, "voltage error within 1% with feedforward");
    chk(ce_fb > 0 && ce_ff * 2 < ce_fb, "feedforward at least halves the cavity tuning error");
    chk(n_learn == NCYC * NB, "tables updated at every bin of the learning cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
