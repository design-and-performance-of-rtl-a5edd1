// slot_timer: data-transfer timing of one carrier in the 40 ms system cycle.
// Following the CPCI bus timing of the described system, the cycle starts
// with a waiting time in which the 8 carriers upload RF system data one
// after another, each in its own 2.25 ms slot (8 x 2.25 = 18 ms), followed
// by a 22 ms operating time in which the CPU stores the data. The event
// trigger starts the cycle; after CYCLE_CLKS the timer stops until the next
// trigger.
// Interface: trig (cycle event), id (this carrier's slot, 0..NSLOTS-1);
// outputs slot (current slot number), upload (in the waiting time), my_slot
// (own slot, when this carrier may transmit), operating, my_start (one clock
// at the start of the own slot). Timing: outputs registered.
module slot_timer #(
  parameter int unsigned SLOT_CLKS  = 90_000,     // 2.25 ms at 40 MHz
  parameter int unsigned NSLOTS     = 8,
  parameter int unsigned CYCLE_CLKS = 1_600_000   // 40 ms at 40 MHz
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       trig,
  input  logic [$clog2(NSLOTS)-1:0]  id,
  output logic [$clog2(NSLOTS)-1:0]  slot,
  output logic                       upload,
  output logic                       my_slot,
  output logic                       my_start,
  output logic                       operating
);
  localparam int CW = $clog2(CYCLE_CLKS + 1);
  localparam int SW = $clog2(SLOT_CLKS + 1);
  logic [CW-1:0] cyc;
  logic [SW-1:0] scnt;
  logic          run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cyc <= '0; scnt <= '0; slot <= '0;
      upload <= 1'b0; my_slot <= 1'b0; my_start <= 1'b0; operating <= 1'b0;
    end else begin
      my_start <= 1'b0;
      if (trig) begin
        run <= 1'b1; cyc <= '0; scnt <= '0; slot <= '0;
        upload <= 1'b1; operating <= 1'b0;
        my_slot  <= (id == '0);
        my_start <= (id == '0);
      end else if (run) begin
        cyc <= cyc + 1'b1;
        if (cyc == CW'(CYCLE_CLKS - 1)) begin
          run <= 1'b0; upload <= 1'b0; operating <= 1'b0; my_slot <= 1'b0;
        end else if (upload) begin
          if (scnt == SW'(SLOT_CLKS - 1)) begin
            scnt <= '0;
            if (slot == $bits(slot)'(NSLOTS - 1)) begin
              upload <= 1'b0; operating <= 1'b1; my_slot <= 1'b0;
            end else begin
              slot     <= slot + 1'b1;
              my_slot  <= (id == slot + 1'b1);
              my_start <= (id == slot + 1'b1);
            end
          end else begin
            scnt <= scnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
