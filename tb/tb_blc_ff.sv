// tb_blc_ff: checks the beam loading feedforward on random beam vectors and
// complex gains: out = -(beam * c)/2^14, one clock later, and zero when
// disabled. A pure 180-degree check: c = 1 must give exactly -beam.
// Follows the described system: the beam vector is added with opposite phase
// after a gain and phase; the Q2.14 scaling checked here is this design's
// own.
module tb_blc_ff;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, en;
  llrf_pkg::iq_t beam, out;
  logic signed [15:0] cr, ci;

  blc_ff dut (.clk(clk), .rst_n(rst_n), .en(en), .beam(beam), .c_re(cr), .c_im(ci), .out(out));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    rst_n = 0; en = 0; beam = '0; cr = 0; ci = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    beam.i = 18'sd5000; beam.q = -18'sd7000; cr = 16'sd16384; ci = 0;
    @(negedge clk);
    checks++;
    if (out.i != 0 || out.q != 0) begin failures++; $display("FAIL output while disabled"); end
    en = 1;
    @(negedge clk);
    checks++;
    if (out.i != -18'sd5000 || out.q != 18'sd7000) begin failures++; $display("FAIL unity inversion"); end
    for (int n = 0; n < 500; n++) begin
      beam.i = 18'($signed($urandom_range(0, 100000)) - 50000);
      beam.q = 18'($signed($urandom_range(0, 100000)) - 50000);
      cr = 16'($urandom); ci = 16'($urandom_range(0, 16384));
      ei = -((longint'(beam.i) * cr - longint'(beam.q) * ci) >>> 14);
      eq = -((longint'(beam.i) * ci + longint'(beam.q) * cr) >>> 14);
      if (ei > 131071) ei = 131071; if (ei < -131071) ei = -131071;
      if (eq > 131071) eq = 131071; if (eq < -131071) eq = -131071;
      @(negedge clk);
      checks++;
      if (longint'(out.i) != ei || longint'(out.q) != eq) begin
        failures++; $display("FAIL got %0d %0d exp %0d %0d", out.i, out.q, ei, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
