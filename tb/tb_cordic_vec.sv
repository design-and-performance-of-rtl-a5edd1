// tb_cordic_vec: checks the vectoring-mode CORDIC: amplitude against
// sqrt(I^2+Q^2) and phase against atan2(Q,I) for random vectors in all
// quadrants, one per clock, with the STAGES+2 clock latency.
// The description names CORDIC for amplitude and phase; the tolerances are
// this bench's own.
module tb_cordic_vec;
  localparam int STAGES = 16;
  localparam int L = STAGES + 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [17:0] i, q;
  logic [17:0] amp;
  llrf_pkg::phase_t ph;
  real eaq [$];
  int  epq [$];

  cordic_vec #(.W(18), .STAGES(STAGES)) dut (.clk(clk), .en(1'b1), .i(i), .q(q), .amp(amp), .ph(ph));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ea; int ep; int dp;
    i = 0; q = 0;
    for (int n = 0; n < 600 + L; n++) begin
      @(negedge clk);
      if (n >= L) begin
        ea = eaq.pop_front(); ep = epq.pop_front();
        dp = int'(16'(ph - 16'(ep)));
        if (dp > 32767) dp -= 65536;
        checks += 2;
        if ((real'(amp) - ea) > 4.0 + ea*1e-4 || (ea - real'(amp)) > 4.0 + ea*1e-4) begin
          failures++; $display("FAIL amp n=%0d got %0d exp %f", n, amp, ea);
        end
        if (ea > 200.0 && (dp > 4 || dp < -4)) begin
          failures++; $display("FAIL ph n=%0d got %0d exp %0d", n, ph, ep);
        end
      end
      i = 18'($signed($urandom_range(0, 180000)) - 90000);
      q = 18'($signed($urandom_range(0, 180000)) - 90000);
      eaq.push_back($sqrt(real'(i)*real'(i) + real'(q)*real'(q)));
      epq.push_back(int'($atan2(real'(q), real'(i)) * 65536.0 / (2.0*3.14159265358979)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
