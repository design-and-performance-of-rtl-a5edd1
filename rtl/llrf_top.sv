// llrf_top: digital low-level RF controller of one RCS RF system (one
// ferrite cavity), as it runs in the FPGA of the LLRF carrier board.
// Four RF inputs (cavity voltage, tetrode grid voltage, fast current
// transformer, wall current monitor) are sampled at 40 MHz and, with the
// digital RF drive itself as a fifth channel, demodulated
// against a DDS reference whose frequency follows the programmed sweep, and
// converted to amplitude and phase. From them run the cavity voltage loop
// (feedback + feedforward), cavity phase loop, synchronous phase loop,
// cavity tune loop (feedback + feedforward), grid tune loop (feedback),
// beam loading feedforward and orbit feedback. The loop outputs form the RF
// drive (DAC) and the two bias supply commands. The analog direct RF
// feedback loop is outside this logic.
// Host access (through the CPCI bridge local bus), word address host_addr:
//   0x0000-0x001F  control registers (cfg_regs)
//   0x2000-0x27FF  frequency tuning word table (32 bit, per bin)
//   0x4000-0x47FF  cavity amplitude setpoint table
//   0x6000-0x67FF  synchronous phase setpoint table
//   0x8000-0x9FFF  capture buffer, channel = addr[12:11], bin = addr[10:0]
// host_rdata (16 bit) returns registers or capture data one clock after the
// address; host_wdata is 32 bits wide for the tuning words.
// From the system description: the 40 MHz direct sampling, the DDS
// reference reset at injection, the set of loops and their input signals,
// feedforward for the voltage and cavity tune loops only, and the 2.25 ms
// upload slots. This design's own: the address map, the fifth (drive)
// channel for the grid tune loop, and clearing the loop integrators at each
// cycle start when feedforward is on.
// Triggers: trig_inj (beam injection: starts the 20 ms pattern and resets the
// reference phase) and trig_evt (start of the 40 ms data cycle for the
// time-slot upload). The external bias supply current bias_c_meas is
// digitised outside and feeds the cavity tune feedforward.
module llrf_top #(
  parameter int NBINS    = llrf_pkg::NBINS,
  parameter int BIN_CLKS = llrf_pkg::BIN_CLKS,
  parameter int NTAPS    = 70,
  parameter int unsigned SLOT_CLKS  = 90_000,
  parameter int unsigned CYCLE_CLKS = 1_600_000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               trig_inj,
  input  logic               trig_evt,
  input  logic [2:0]         carrier_id,
  input  llrf_pkg::sample_t  adc_cav,
  input  llrf_pkg::sample_t  adc_grid,
  input  llrf_pkg::sample_t  adc_fct,
  input  llrf_pkg::sample_t  adc_wcm,
  input  logic [15:0]        bias_c_meas,
  input  logic signed [15:0] bpm_pos,
  output llrf_pkg::sample_t  dac_rf,
  output logic [15:0]        bias_c_cmd,
  output logic [15:0]        bias_g_cmd,
  input  logic               host_we,
  input  logic [15:0]        host_addr,
  input  logic [31:0]        host_wdata,
  output logic [15:0]        host_rdata,
  output logic               cyc_active,
  output logic               cap_ready,
  output logic               upload_en,
  output logic               upload_start,
  output logic               op_time
);
  import llrf_pkg::*;
  localparam int BW = $clog2(NBINS);

  cfg_t             cfg;
  logic [15:0]      reg_rdata, cap_rdata;
  logic             rd_cap_q;
  logic             active, strobe, cyc_start, cyc_end;
  logic [BW-1:0]    bin;
  logic [31:0]      pat_ftw;
  amp_t             amp_sp;
  phase_t           phs_sp;
  logic signed [31:0] ftw_off;
  sample_t          ref_cos, ref_sin;
  iq_t              iq_cav, iq_grid, iq_fct, iq_wcm, iq_drv, blc_iq;
  amp_t             a_cav, a_grid, a_fct, a_wcm, a_drv;
  phase_t           p_cav, p_grid, p_fct, p_wcm, p_drv;
  amp_t             drv_amp;
  phase_t           drv_ph, ph_err, ct_err, gt_err, osc;
  logic signed [17:0] amp_err;
  logic signed [15:0] damp;
  logic signed [15:0] cap_d [4];
  logic             learn;
  logic [2:0]       slot;
  logic             upload;

  // ---- host access -------------------------------------------------------
  cfg_regs u_regs (.clk(clk), .rst_n(rst_n),
    .we(host_we && host_addr[15:13] == 3'b000), .addr(host_addr[4:0]),
    .wdata(host_wdata[15:0]), .rdata(reg_rdata), .cfg(cfg));

  always_ff @(posedge clk) rd_cap_q <= host_addr[15];
  assign host_rdata = rd_cap_q ? cap_rdata : reg_rdata;

  // ---- cycle pattern and reference ---------------------------------------
  pattern_gen #(.NBINS(NBINS), .BIN_CLKS(BIN_CLKS)) u_pat (
    .clk(clk), .rst_n(rst_n), .trig(trig_inj),
    .wr_en(host_we && !host_addr[15] && host_addr[14:13] != 2'b00),
    .wr_sel(host_addr[14:13] - 2'd1), .wr_addr(host_addr[BW-1:0]), .wr_data(host_wdata),
    .active(active), .bin(bin), .strobe(strobe), .cyc_start(cyc_start), .cyc_end(cyc_end),
    .ftw(pat_ftw), .amp_sp(amp_sp), .phs_sp(phs_sp));

  orbit_fb u_orb (.clk(clk), .rst_n(rst_n), .en(cfg.orbit_en), .clr(!cfg.orbit_en),
    .strobe(strobe), .pos(bpm_pos), .sp(cfg.orb_sp), .k(cfg.orb_k), .ftw_off(ftw_off));

  dds u_dds (.clk(clk), .rst_n(rst_n), .sync(trig_inj), .ftw(pat_ftw + ftw_off),
    .ph_off('0), .cos_o(ref_cos), .sin_o(ref_sin));

  // ---- RF signal processing ----------------------------------------------
  sig_chain #(.NTAPS(NTAPS)) u_ch_cav  (.clk(clk), .rst_n(rst_n), .adc(adc_cav),
    .cos_r(ref_cos), .sin_r(ref_sin), .iq(iq_cav),  .amp(a_cav),  .ph(p_cav));
  sig_chain #(.NTAPS(NTAPS)) u_ch_grid (.clk(clk), .rst_n(rst_n), .adc(adc_grid),
    .cos_r(ref_cos), .sin_r(ref_sin), .iq(iq_grid), .amp(a_grid), .ph(p_grid));
  sig_chain #(.NTAPS(NTAPS)) u_ch_fct  (.clk(clk), .rst_n(rst_n), .adc(adc_fct),
    .cos_r(ref_cos), .sin_r(ref_sin), .iq(iq_fct),  .amp(a_fct),  .ph(p_fct));
  sig_chain #(.NTAPS(NTAPS)) u_ch_wcm  (.clk(clk), .rst_n(rst_n), .adc(adc_wcm),
    .cos_r(ref_cos), .sin_r(ref_sin), .iq(iq_wcm),  .amp(a_wcm),  .ph(p_wcm));
  // The RF drive sent to the DAC is demodulated the same way, so that the
  // grid tune loop compares grid and drive phases measured with equal
  // processing delay.
  sig_chain #(.NTAPS(NTAPS)) u_ch_drv  (.clk(clk), .rst_n(rst_n), .adc(dac_rf),
    .cos_r(ref_cos), .sin_r(ref_sin), .iq(iq_drv),  .amp(a_drv),  .ph(p_drv));

  // ---- control loops ------------------------------------------------------
  assign learn = cfg.ff_learn && active;
  // With feedforward on, the feedback integrators restart from zero at each
  // injection: the table already carries what the feedback did in earlier
  // cycles, and a value left over from the end of the previous cycle would
  // be counted twice.

  amp_loop #(.NBINS(NBINS)) u_amp (.clk(clk), .rst_n(rst_n), .fb_en(cfg.amp_en),
    .ff_en(cfg.amp_ff_en), .learn(learn), .clr(cyc_start && cfg.amp_ff_en), .amp_meas(a_cav), .amp_sp(amp_sp),
    .kp(cfg.amp_kp), .ki(cfg.amp_ki), .kff(cfg.amp_kff), .bin(bin), .strobe(strobe),
    .drive(drv_amp), .err(amp_err));

  phase_loop u_ph (.clk(clk), .rst_n(rst_n), .en(cfg.ph_en), .clr(1'b0), .ph_meas(p_cav),
    .ph_sp('0), .kp(cfg.ph_kp), .ki(cfg.ph_ki), .drive_ph(drv_ph), .err(ph_err));

  sync_phase_loop u_sync (.clk(clk), .rst_n(rst_n), .en(cfg.sync_en), .beam_ph(p_fct),
    .cav_ph(p_cav), .phis_sp(phs_sp), .kd(cfg.sync_kd), .damp(damp), .osc(osc));

  tune_loop #(.FF(1'b1), .NBINS(NBINS)) u_ctune (.clk(clk), .rst_n(rst_n),
    .fb_en(cfg.ctune_en), .ff_en(cfg.ctune_ff_en), .learn(learn),
    .clr(cyc_start && cfg.ctune_ff_en),
    .ph_cav(p_cav), .ph_grid(p_grid), .sp(cfg.ct_sp), .kp(cfg.ct_kp), .ki(cfg.ct_ki),
    .kff(cfg.ct_kff), .base(cfg.bias_c_base), .bias_meas(bias_c_meas), .bin(bin),
    .strobe(strobe), .bias_cmd(bias_c_cmd), .err(ct_err));

  // The grid tune loop compares the grid voltage phase with the phase of
  // the RF drive this controller sends, demodulated from the DAC samples.
  tune_loop #(.FF(1'b0), .NBINS(NBINS)) u_gtune (.clk(clk), .rst_n(rst_n),
    .fb_en(cfg.gtune_en), .ff_en(1'b0), .learn(1'b0), .clr(1'b0),
    .ph_cav(p_drv), .ph_grid(p_grid), .sp(cfg.gt_sp), .kp(cfg.gt_kp), .ki(cfg.gt_ki),
    .kff('0), .base(cfg.bias_g_base), .bias_meas('0), .bin(bin),
    .strobe(strobe), .bias_cmd(bias_g_cmd), .err(gt_err));

  blc_ff u_blc (.clk(clk), .rst_n(rst_n), .en(cfg.blc_en), .beam(iq_wcm),
    .c_re(cfg.blc_re), .c_im(cfg.blc_im), .out(blc_iq));

  // ---- RF drive -----------------------------------------------------------
  iq_mod u_mod (.clk(clk), .rst_n(rst_n), .amp(drv_amp), .ph(drv_ph), .damp(damp),
    .blc(blc_iq), .cos_r(ref_cos), .sin_r(ref_sin), .rf(dac_rf));

  // ---- diagnostics and data upload ----------------------------------------
  always_comb begin
    if (amp_err > 18'sd32767)       cap_d[0] = 16'sd32767;
    else if (amp_err < -18'sd32768) cap_d[0] = -16'sd32768;
    else                            cap_d[0] = 16'(amp_err);
    cap_d[1] = ph_err;
    cap_d[2] = ct_err;
    cap_d[3] = gt_err;
  end

  capture_buf #(.NBINS(NBINS), .NCH(4)) u_cap (.clk(clk), .rst_n(rst_n), .strobe(strobe),
    .active(active), .cyc_start(cyc_start), .bin(bin), .d(cap_d),
    .rd_ch(host_addr[12:11]), .rd_addr(host_addr[BW-1:0]), .rd_data(cap_rdata),
    .ready(cap_ready));

  slot_timer #(.SLOT_CLKS(SLOT_CLKS), .NSLOTS(8), .CYCLE_CLKS(CYCLE_CLKS)) u_slot (
    .clk(clk), .rst_n(rst_n), .trig(trig_evt), .id(carrier_id), .slot(slot),
    .upload(upload), .my_slot(upload_en), .my_start(upload_start), .operating(op_time));

  assign cyc_active = active;
endmodule
