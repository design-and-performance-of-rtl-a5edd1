// tb_pattern_gen: loads the three pattern tables, fires the injection
// trigger and checks that the bins advance every BIN_CLKS clocks, that the
// cycle lasts exactly NBINS*BIN_CLKS clocks, that each bin outputs its
// table entries, and that strobes and cycle start/end pulses are right.
// The 20 ms cycle follows the described system; the bin division checked here
// is this design's own.
module tb_pattern_gen;
  localparam int NB = 8, BC = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, trig, wr_en, active, strobe, cs, ce;
  logic [1:0] sel;
  logic [2:0] waddr, bin;
  logic [31:0] wdata, ftw;
  llrf_pkg::amp_t amp;
  llrf_pkg::phase_t phs;

  pattern_gen #(.NBINS(NB), .BIN_CLKS(BC)) dut (.clk(clk), .rst_n(rst_n), .trig(trig),
    .wr_en(wr_en), .wr_sel(sel), .wr_addr(waddr), .wr_data(wdata), .active(active), .bin(bin),
    .strobe(strobe), .cyc_start(cs), .cyc_end(ce), .ftw(ftw), .amp_sp(amp), .phs_sp(phs));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int nact, nstb, ncs, nce;
    rst_n = 0; trig = 0; wr_en = 0; sel = 0; waddr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int s = 0; s < 3; s++) begin
        wr_en = 1; sel = 2'(s); waddr = 3'(b); wdata = 32'(32'h1000_0000 * s + 100 * b + 7);
        @(negedge clk);
      end
    wr_en = 0;
    @(negedge clk);
    chk(!active, "idle");
    trig = 1; @(negedge clk); trig = 0;
    nact = 0; nstb = 0; ncs = 0; nce = 0;
    for (int n = 0; n < NB * BC + 20; n++) begin
      if (cs) ncs++;
      if (ce) nce++;
      if (active) begin
        nact++;
        chk(int'(bin) == (nact - 1) / BC, "bin index");
        chk(strobe == ((nact - 1) % BC == BC - 1), "strobe position");
        if (strobe) nstb++;
        if ((nact - 1) % BC == 2) begin
          chk(ftw == 32'(100 * int'(bin) + 7), "ftw table");
          chk(amp == 16'(100 * int'(bin) + 7), "amp table");
          chk(phs == 16'(100 * int'(bin) + 7), "phase table");
        end
      end
      @(negedge clk);
    end
    chk(nact == NB * BC, $sformatf("cycle length %0d", nact));
    chk(nstb == NB, "strobe count");
    chk(ncs == 1 && nce == 1, "start/end pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
