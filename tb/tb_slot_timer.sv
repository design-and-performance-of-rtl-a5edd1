// tb_slot_timer: with the time scale reduced (slot = 10 clocks instead of
// 2.25 ms, cycle = 200 clocks instead of 40 ms) checks, for every carrier
// number, that its upload window opens exactly at slot id*SLOT and lasts
// one slot, that the waiting time spans 8 slots, that the operating time
// follows it until the end of the cycle, and that the timer then stops.
// The 2.25 ms slots, 8 carriers and 40 ms cycle follow the described system.
module tb_slot_timer;
  localparam int S = 10, N = 8, C = 200;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, trig, upload, my_slot, my_start, operating;
  logic [2:0] id, slot;

  slot_timer #(.SLOT_CLKS(S), .NSLOTS(N), .CYCLE_CLKS(C)) dut (.clk(clk), .rst_n(rst_n),
    .trig(trig), .id(id), .slot(slot), .upload(upload), .my_slot(my_slot), .my_start(my_start),
    .operating(operating));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  initial begin
    int first, cnt, nst;
    rst_n = 0; trig = 0; id = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < N; c++) begin
      id = 3'(c);
      trig = 1; @(negedge clk); trig = 0;
      first = -1; cnt = 0; nst = 0;
      for (int t = 0; t < C + 20; t++) begin
        // t counts clocks since the trigger edge
        if (my_slot) begin if (first < 0) first = t; cnt++; end
        if (my_start) nst++;
        chk(upload == (t < N * S), $sformatf("upload at %0d", t));
        chk(operating == (t >= N * S && t < C), $sformatf("operating at %0d", t));
        if (t < N * S) chk(int'(slot) == t / S, "slot number");
        @(negedge clk);
      end
      chk(first == c * S, $sformatf("carrier %0d window starts at %0d", c, first));
      chk(cnt == S, $sformatf("carrier %0d window length %0d", c, cnt));
      chk(nst == 1, "one start pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
