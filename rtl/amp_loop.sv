// amp_loop: cavity voltage loop. Makes the measured cavity amplitude follow
// the programmed voltage pattern. As in the paper it combines feedback with
// an optional feedforward compensation that adds, per point of the cycle,
// the average modulation of past cycles plus the amplitude error times a
// factor (ff_table). The table value is itself a drive amplitude; the
// feedback output is added to it, so that at convergence the feedback
// contribution and the error both go to zero. The PI law and the
// behaviour with feedback off (drive = table value, or the setpoint itself
// when feedforward is off too) are this design's choices.
// Interface: amp_meas and amp_sp (amp_t); fb_en, ff_en, learn; PI gains kp,
// ki and feedforward factor kff (signed 16); bin/strobe from pattern_gen;
// clr zeroes the integrator (cycle start). drive is the amplitude sent to
// the RF drive synthesis, err the setpoint error (both registered).
// The drive is limited to [0, AMP_MAX], the DAC full scale by default.
// Timing: drive follows amp_meas by 2 clocks.
module amp_loop #(
  parameter int NBINS   = 2048,
  parameter int AMP_MAX = 32767   // drive limit: DAC full scale
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      fb_en,
  input  logic                      ff_en,
  input  logic                      learn,
  input  logic                      clr,
  input  llrf_pkg::amp_t            amp_meas,
  input  llrf_pkg::amp_t            amp_sp,
  input  logic signed [15:0]        kp,
  input  logic signed [15:0]        ki,
  input  logic signed [15:0]        kff,
  input  logic [$clog2(NBINS)-1:0]  bin,
  input  logic                      strobe,
  output llrf_pkg::amp_t            drive,
  output logic signed [17:0]        err
);
  logic signed [17:0] e, pi_o, ff_o, base;
  logic signed [19:0] sum;

  assign e = 18'(signed'({2'b00, amp_sp})) - 18'(signed'({2'b00, amp_meas}));

  pi_ctrl #(.EW(18), .OW(18)) u_pi (
    .clk(clk), .rst_n(rst_n), .en(fb_en), .clr(clr || !fb_en), .err(e), .kp(kp), .ki(ki),
    .lo(-18'sd65535), .hi(18'sd65535), .out(pi_o));

  ff_table #(.NBINS(NBINS), .W(18)) u_ff (
    .clk(clk), .bin(bin), .strobe(strobe), .learn(learn),
    .u(18'(signed'({2'b00, drive}))), .err(e), .kff(kff), .ff_o(ff_o));

  assign base = fb_en ? pi_o : (ff_en ? 18'sd0 : 18'(signed'({2'b00, amp_sp})));
  assign sum  = 20'(base) + (ff_en ? 20'(ff_o) : 20'sd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      drive <= '0;
      err   <= '0;
    end else begin
      err <= e;
      if (sum < 0)                 drive <= '0;
      else if (sum > 20'(AMP_MAX)) drive <= 16'(AMP_MAX);
      else                         drive <= sum[15:0];
    end
  end
endmodule
