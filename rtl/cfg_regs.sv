// cfg_regs: control registers of the LLRF loops, written by the host CPU
// over the carrier's local bus (through the CPCI bridge). The paper says
// the host accesses specified registers on the carriers; the register map
// and reset values (all loops off, gains zero) are this design's own.
// Map (word addresses, 16 bits used):
//   0 enables {ff_learn, orbit, blc, gtune, ctune_ff, ctune, sync, ph,
//              amp_ff, amp} (bit 9..0)
//   1 amp_kp  2 amp_ki  3 amp_kff  4 ph_kp  5 ph_ki  6 sync_kd
//   7 ct_kp   8 ct_ki   9 ct_kff  10 gt_kp 11 gt_ki 12 ct_sp 13 gt_sp
//  14 blc_re 15 blc_im 16 orb_k  17 orb_sp 18 bias_c_base 19 bias_g_base
// Interface: we, addr, wdata; rdata returns the addressed register one
// clock later; cfg is the decoded llrf_pkg::cfg_t.
module cfg_regs (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [4:0]      addr,
  input  logic [15:0]     wdata,
  output logic [15:0]     rdata,
  output llrf_pkg::cfg_t  cfg
);
  localparam int NREG = 20;
  logic [15:0] r [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NREG; k++) r[k] <= '0;
      rdata <= '0;
    end else begin
      if (we && int'(addr) < NREG) r[addr] <= wdata;
      rdata <= (int'(addr) < NREG) ? r[addr] : 16'h0000;
    end
  end

  always_comb begin
    {cfg.ff_learn, cfg.orbit_en, cfg.blc_en, cfg.gtune_en, cfg.ctune_ff_en,
     cfg.ctune_en, cfg.sync_en, cfg.ph_en, cfg.amp_ff_en, cfg.amp_en} = r[0][9:0];
    cfg.amp_kp = r[1];  cfg.amp_ki = r[2];  cfg.amp_kff = r[3];
    cfg.ph_kp  = r[4];  cfg.ph_ki  = r[5];  cfg.sync_kd = r[6];
    cfg.ct_kp  = r[7];  cfg.ct_ki  = r[8];  cfg.ct_kff  = r[9];
    cfg.gt_kp  = r[10]; cfg.gt_ki  = r[11];
    cfg.ct_sp  = r[12]; cfg.gt_sp  = r[13];
    cfg.blc_re = r[14]; cfg.blc_im = r[15];
    cfg.orb_k  = r[16]; cfg.orb_sp = r[17];
    cfg.bias_c_base = r[18]; cfg.bias_g_base = r[19];
  end
endmodule
