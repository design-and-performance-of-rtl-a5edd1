// tb_ff_table: checks the cycle-to-cycle feedforward table over several
// cycles of NBINS bins: each bin's output is, in the next cycle, the
// exponential average (1/4 weight) of the applied modulation u plus
// kff*err/256, computed by an independent model; no update without learn.
// The update rule checked (average of past cycles plus error times a factor)
// follows the described feedforward; its exact weights are this design's own.
module tb_ff_table;
  localparam int NB = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] bin;
  logic strobe, learn;
  logic signed [17:0] u, err, ff;
  logic signed [15:0] kff;
  longint avg [NB], mff [NB];

  ff_table #(.NBINS(NB)) dut (.clk(clk), .bin(bin), .strobe(strobe), .learn(learn),
      .u(u), .err(err), .kff(kff), .ff_o(ff));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bin = 0; strobe = 0; learn = 0; u = 0; err = 0; kff = 16'sd128;
    for (int k = 0; k < NB; k++) begin avg[k] = 0; mff[k] = 0; end
    for (int c = 0; c < 6; c++) begin
      learn = (c != 4);
      for (int b = 0; b < NB; b++) begin
        @(negedge clk); bin = 3'(b); strobe = 0;
        @(negedge clk);
        checks++;
        if (longint'(ff) != mff[b]) begin
          failures++; $display("FAIL c=%0d b=%0d got %0d exp %0d", c, b, ff, mff[b]);
        end
        u = 18'(1000 * b + 500 * c); err = 18'($signed($urandom_range(0, 2000)) - 1000);
        strobe = 1;
        if (learn) begin
          avg[b] = avg[b] + ((longint'(u) - avg[b]) >>> 2);
          mff[b] = avg[b] + ((longint'(err) * 128) >>> 8);
        end
        @(negedge clk); strobe = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
