// pattern_gen: cycle pattern generator. The RCS accelerates in 20 ms from
// injection to extraction, with the RF frequency sweeping 1.022 -> 2.444 MHz
// and the cavity voltage and synchronous phase following programmed
// curves. Three NBINS-entry tables hold the frequency tuning word, the
// amplitude setpoint and the synchronous phase setpoint per time bin.
// How it works: the injection trigger 'trig' starts the cycle; a counter
// advances the bin every BIN_CLKS clocks (2048 x 391 clocks = 20.02 ms at
// 40 MHz, the bin size being this design's choice) and the cycle ends after
// the last bin. Outside a cycle the bin-0 (injection) values are output.
// The tables are written by the host through wr_* (sel 0: ftw, 1: amplitude,
// 2: phase). The tables start at zero and must be loaded before use.
// Outputs: active, bin, strobe (last clock of each bin), cyc_start (one
// clock at trig), cyc_end (one clock after the last bin), and the
// registered table values for the current bin (one clock behind bin).
module pattern_gen #(
  parameter int NBINS    = 2048,
  parameter int BIN_CLKS = 391
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      trig,
  input  logic                      wr_en,
  input  logic [1:0]                wr_sel,
  input  logic [$clog2(NBINS)-1:0]  wr_addr,
  input  logic [31:0]               wr_data,
  output logic                      active,
  output logic [$clog2(NBINS)-1:0]  bin,
  output logic                      strobe,
  output logic                      cyc_start,
  output logic                      cyc_end,
  output logic [31:0]               ftw,
  output llrf_pkg::amp_t            amp_sp,
  output llrf_pkg::phase_t          phs_sp
);
  localparam int BW = $clog2(NBINS);
  localparam int CW = $clog2(BIN_CLKS + 1);
  logic [31:0]      t_ftw [NBINS];
  logic [15:0]      t_amp [NBINS];
  logic [15:0]      t_phs [NBINS];
  logic [CW-1:0]    cnt;

  initial begin
    for (int k = 0; k < NBINS; k++) begin
      t_ftw[k] = '0; t_amp[k] = '0; t_phs[k] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        2'd0: t_ftw[wr_addr] <= wr_data;
        2'd1: t_amp[wr_addr] <= wr_data[15:0];
        2'd2: t_phs[wr_addr] <= wr_data[15:0];
        default: ;
      endcase
    end
    ftw    <= t_ftw[bin];
    amp_sp <= t_amp[bin];
    phs_sp <= t_phs[bin];
  end

  assign strobe = active && (cnt == CW'(BIN_CLKS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; bin <= '0; cnt <= '0; cyc_start <= 1'b0; cyc_end <= 1'b0;
    end else begin
      cyc_start <= trig;
      cyc_end   <= 1'b0;
      if (trig) begin
        active <= 1'b1; bin <= '0; cnt <= '0;
      end else if (active) begin
        if (strobe) begin
          cnt <= '0;
          if (bin == BW'(NBINS - 1)) begin
            active  <= 1'b0;
            bin     <= '0;
            cyc_end <= 1'b1;
          end else begin
            bin <= bin + 1'b1;
          end
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
