// tb_capture_buf: writes two cycles of diagnostics and checks that after
// each cycle start the previous cycle is readable for all channels and
// bins while the new cycle is being written, and that 'ready' tells
// whether the readable bank holds a complete cycle.
// The double-buffered capture it checks is this design's own way of storing a
// cycle for upload in the carrier's time slot.
module tb_capture_buf;
  localparam int NB = 8, NCH = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, strobe, active, cs, ready;
  logic [2:0] bin, ra;
  logic [1:0] rc;
  logic signed [15:0] d [NCH];
  logic [15:0] rd;

  capture_buf #(.NBINS(NB), .NCH(NCH)) dut (.clk(clk), .rst_n(rst_n), .strobe(strobe), .active(active),
    .cyc_start(cs), .bin(bin), .d(d), .rd_ch(rc), .rd_addr(ra), .rd_data(rd), .ready(ready));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] val(input int cyc, input int c, input int b);
    return 16'(cyc * 1000 + c * 100 + b);
  endfunction

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    rst_n = 0; strobe = 0; active = 0; cs = 0; bin = 0; rc = 0; ra = 0;
    for (int c = 0; c < NCH; c++) d[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 1; cyc <= 3; cyc++) begin
      cs = 1; @(negedge clk); cs = 0;
      chk(ready == (cyc > 1), $sformatf("ready after start of cycle %0d", cyc));
      active = 1;
      for (int b = 0; b < NB; b++) begin
        bin = 3'(b);
        for (int c = 0; c < NCH; c++) d[c] = val(cyc, c, b);
        strobe = 1; @(negedge clk); strobe = 0;
        // read back the previous cycle meanwhile
        if (cyc > 1)
          for (int c = 0; c < NCH; c++) begin
            rc = 2'(c); ra = 3'(b);
            @(negedge clk);
            chk(rd == val(cyc - 1, c, b), $sformatf("cycle %0d ch %0d bin %0d: %0d", cyc - 1, c, b, rd));
          end
      end
      active = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
