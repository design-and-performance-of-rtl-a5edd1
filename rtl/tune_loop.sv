// tune_loop: resonance tuning loop driving a bias supply. With FF=1 it is
// the cavity tune loop (3300 A supply): feedback on the phase between the
// tetrode grid voltage and the cavity voltage, plus a feedforward table
// learnt from the actual bias current of past cycles and the tuning error,
// as the paper describes. With FF=0 it is the tetrode grid tune loop
// (10 A supply), which the paper says is feedback only and otherwise works
// the same way. PI control and the command format are this design's choice.
// How it works: tune phase = ph_cav - ph_grid, err = sp - tune phase; the
// PI output is added to the base current 'base', plus ff when ff_en.
// Interface: ph_cav, ph_grid, sp (phase_t); fb_en, ff_en, learn, clr; gains
// kp, ki, kff; base and bias_meas (unsigned 16, supply full scale = 65535);
// bin/strobe from pattern_gen; outputs bias_cmd (unsigned 16) and err.
// Timing: bias_cmd registered, 2 clocks after the phases.
module tune_loop #(
  parameter bit FF    = 1'b1,
  parameter int NBINS = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      fb_en,
  input  logic                      ff_en,
  input  logic                      learn,
  input  logic                      clr,
  input  llrf_pkg::phase_t          ph_cav,
  input  llrf_pkg::phase_t          ph_grid,
  input  llrf_pkg::phase_t          sp,
  input  logic signed [15:0]        kp,
  input  logic signed [15:0]        ki,
  input  logic signed [15:0]        kff,
  input  logic [15:0]               base,
  input  logic [15:0]               bias_meas,
  input  logic [$clog2(NBINS)-1:0]  bin,
  input  logic                      strobe,
  output logic [15:0]               bias_cmd,
  output llrf_pkg::phase_t          err
);
  llrf_pkg::phase_t   e;
  logic signed [17:0] pi_o, ff_o;
  logic signed [19:0] sum;

  assign e = sp - (ph_cav - ph_grid);

  pi_ctrl #(.EW(16), .OW(18)) u_pi (
    .clk(clk), .rst_n(rst_n), .en(fb_en), .clr(clr || !fb_en), .err(e), .kp(kp), .ki(ki),
    .lo(-18'sd65535), .hi(18'sd65535), .out(pi_o));

  if (FF) begin : g_ff
    ff_table #(.NBINS(NBINS), .W(18)) u_ff (
      .clk(clk), .bin(bin), .strobe(strobe), .learn(learn),
      .u(18'(signed'({2'b00, bias_meas})) - 18'(signed'({2'b00, base}))),
      .err(18'(e)), .kff(kff), .ff_o(ff_o));
  end else begin : g_noff
    assign ff_o = '0;
  end

  assign sum = 20'(signed'({4'b0000, base})) + 20'(pi_o) + ((FF && ff_en) ? 20'(ff_o) : 20'sd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_cmd <= '0; err <= '0;
    end else begin
      err <= e;
      if (sum < 0)                bias_cmd <= '0;
      else if (sum > 20'sd65535)  bias_cmd <= 16'hFFFF;
      else                        bias_cmd <= sum[15:0];
    end
  end
endmodule
