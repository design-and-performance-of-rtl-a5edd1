// capture_buf: records loop diagnostics (cavity amplitude error, cavity
// phase error, cavity and grid tuning errors: the quantities the system's
// performance is judged by over one cycle) once per cycle bin, for upload
// to the host in the carrier's time slot. Because the upload of a cycle's
// data happens while the next cycle runs, the buffer has two banks: one is
// written during a cycle while the other, holding the previous cycle, is
// read. The per-bin sampling and the two-bank layout are this design's
// choice.
// How it works: at every bin strobe of an active cycle the NCH inputs are
// written at the bin address of the write bank. cyc_start swaps the banks;
// 'ready' then tells whether the bank now readable holds a complete cycle.
// Interface: strobe, active, bin, cyc_start from pattern_gen; d[NCH] signed
// 16; read port rd_ch/rd_addr -> rd_data (registered, 1 clock).
module capture_buf #(
  parameter int NBINS = 2048,
  parameter int NCH   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      strobe,
  input  logic                      active,
  input  logic                      cyc_start,
  input  logic [$clog2(NBINS)-1:0]  bin,
  input  logic signed [15:0]        d [NCH],
  input  logic [$clog2(NCH)-1:0]    rd_ch,
  input  logic [$clog2(NBINS)-1:0]  rd_addr,
  output logic [15:0]               rd_data,
  output logic                      ready
);
  localparam int BANK = NCH * NBINS;
  logic [15:0] mem [2*BANK];
  logic        wbank, done;

  always_ff @(posedge clk) begin
    if (strobe && active)
      for (int c = 0; c < NCH; c++)
        mem[(wbank ? BANK : 0) + c*NBINS + int'(bin)] <= d[c];
    rd_data <= mem[(wbank ? 0 : BANK) + int'(rd_ch)*NBINS + int'(rd_addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; done <= 1'b0; ready <= 1'b0;
    end else if (cyc_start) begin
      wbank <= ~wbank;
      ready <= done;
      done  <= 1'b0;
    end else if (strobe && active && bin == $bits(bin)'(NBINS-1)) begin
      done <= 1'b1;
    end
  end
endmodule
