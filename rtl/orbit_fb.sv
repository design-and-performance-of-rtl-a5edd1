// orbit_fb: orbit feedback loop, which the paper reserves for adjusting the
// frequency setting from the beam position monitor (BPM) signal. The
// correction law is not given; here it is an integral law updated once per
// cycle bin: off += k*(pos - sp)/2^OSH, clamped to +/-LIM, and the offset
// is added to the frequency tuning word of the pattern.
// Interface: en, clr, pos and sp (signed 16, BPM units), k (signed 16),
// strobe (bin strobe); ftw_off (signed 32). Timing: updated on strobe.
module orbit_fb #(
  parameter int OSH = 4,
  parameter int LIM = 1 << 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               clr,
  input  logic               strobe,
  input  logic signed [15:0] pos,
  input  logic signed [15:0] sp,
  input  logic signed [15:0] k,
  output logic signed [31:0] ftw_off
);
  logic signed [16:0] e;
  logic signed [33:0] p, n;
  assign e = 17'(pos) - 17'(sp);
  assign p = e * k;
  assign n = 34'(ftw_off) + (p >>> OSH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            ftw_off <= '0;
    else if (clr)          ftw_off <= '0;
    else if (en && strobe) begin
      if (n > 34'(LIM))        ftw_off <= 32'(LIM);
      else if (n < -34'(LIM))  ftw_off <= -32'(LIM);
      else                     ftw_off <= 32'(n);
    end
  end
endmodule
