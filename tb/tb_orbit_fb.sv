// tb_orbit_fb: checks the orbit correction integrator: one update of
// k*(pos-sp)/16 per bin strobe while enabled, none without strobe or when
// disabled, clamping at +/-2^24, and clearing.
// The described orbit loop only corrects the frequency setting from the BPM;
// the integral law checked here is this design's own.
module tb_orbit_fb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en, clr, strobe;
  logic signed [15:0] pos, sp, k;
  logic signed [31:0] off;

  orbit_fb dut (.clk(clk), .rst_n(rst_n), .en(en), .clr(clr), .strobe(strobe), .pos(pos), .sp(sp), .k(k), .ftw_off(off));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint m;
    rst_n = 0; en = 0; clr = 0; strobe = 0; pos = 0; sp = 16'sd100; k = 16'sd300;
    repeat (2) @(negedge clk);
    rst_n = 1; m = 0;
    for (int n = 0; n < 300; n++) begin
      pos = 16'($signed($urandom_range(0, 4000)) - 2000);
      strobe = (n % 3 == 0);
      en = (n < 250) ? (n % 50 != 7) : 1'b1;
      if (n >= 250) begin pos = 16'sd30000; k = 16'sd32767; end
      if (en && strobe) begin
        m = m + ((longint'(pos - sp) * k) >>> 4);
        if (m > (1 << 24)) m = 1 << 24;
        if (m < -(1 << 24)) m = -(1 << 24);
      end
      @(negedge clk);
      checks++;
      if (longint'(off) != m) begin failures++; $display("FAIL n=%0d got %0d exp %0d", n, off, m); end
    end
    clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (off != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
