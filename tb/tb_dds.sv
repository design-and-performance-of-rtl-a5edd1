// tb_dds: checks the reference synthesizer. After 'sync' the output must be
// at phase 0 (cos = AMP, sin = 0) exactly STAGES+2 clocks later; the output
// must then follow AMP*cos/sin of the accumulated phase n*ftw/2^32 for
// the injection (1.022 MHz) and extraction (2.444 MHz) frequencies.
// The phase reset on the injection trigger follows the described system; the
// tolerance and test frequencies (the 1.022 to 2.444 MHz sweep ends) are
// taken from it too.
module tb_dds;
  localparam int STAGES = 16;
  localparam int L = STAGES + 2;
  localparam real AMP = 32000.0;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, sync;
  logic [31:0] ftw;
  logic signed [15:0] c, s;

  dds dut (.clk(clk), .rst_n(rst_n), .sync(sync), .ftw(ftw), .ph_off('0), .cos_o(c), .sin_o(s));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real fmhz);
    real th, ec, es;
    ftw = 32'(longint'(fmhz / 40.0 * 4294967296.0));
    @(negedge clk); sync = 1;
    @(negedge clk); sync = 0;
    // after this edge the accumulator holds 0; output appears L clocks on
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n >= L - 1) begin
        th = real'(longint'(n - (L - 1)) * longint'(ftw) % 64'h1_0000_0000) / 4294967296.0 * 2.0 * 3.14159265358979;
        ec = AMP * $cos(th); es = AMP * $sin(th);
        checks++;
        // 16-bit phase truncation: allow 2*pi/65536*AMP ~ 3 counts
        if ((c - ec) > 5.0 || (ec - c) > 5.0 || (s - es) > 5.0 || (es - s) > 5.0) begin
          failures++;
          if (failures < 10) $display("FAIL f=%f n=%0d got %0d %0d exp %f %f", fmhz, n, c, s, ec, es);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; sync = 0; ftw = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1.022);
    run(2.444);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
