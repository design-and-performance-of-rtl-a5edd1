// llrf_pkg: types and constants shared by the LLRF signal chain and loops.
// All RF signals are sampled at 40 MHz (as in the described system); the
// whole design runs on that single sample clock. Fixed-point conventions,
// which are this design's own choice:
//   sample_t : 16-bit signed ADC/DAC sample (16-bit converters, per the
//              carrier block diagram)
//   phase_t  : 16-bit two's complement angle, 2^16 counts = 360 degrees,
//              so subtraction wraps correctly
//   amp_t    : 16-bit unsigned amplitude in ADC-count units
//   iq_t     : baseband vector, 18-bit signed I and Q
package llrf_pkg;
  localparam int unsigned FS_HZ      = 40_000_000;
  localparam int          SAMPLE_W   = 16;
  localparam int          PHASE_W    = 16;
  localparam int          IQ_W       = 18;
  // Cycle pattern: 20 ms accelerating time split into bins.
  localparam int unsigned NBINS      = 2048;
  localparam int unsigned BIN_CLKS   = 391;   // 2048*391/40MHz = 20.02 ms
  localparam int          BIN_W      = $clog2(NBINS);

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [PHASE_W-1:0]  phase_t;
  typedef logic        [15:0]         amp_t;
  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  // 90 degrees in phase_t counts
  localparam phase_t DEG90 = 16'sh4000;

  // Loop gains and setpoints written by the host CPU.
  typedef struct packed {
    logic        amp_en, amp_ff_en, ph_en, sync_en, ctune_en, ctune_ff_en,
                 gtune_en, blc_en, orbit_en, ff_learn;
    logic [15:0] amp_kp, amp_ki, amp_kff;
    logic [15:0] ph_kp, ph_ki;
    logic [15:0] sync_kd;
    logic [15:0] ct_kp, ct_ki, ct_kff;
    logic [15:0] gt_kp, gt_ki;
    phase_t      ct_sp, gt_sp;
    logic signed [15:0] blc_re, blc_im;
    logic [15:0] orb_k;
    logic signed [15:0] orb_sp;
    logic [15:0] bias_c_base, bias_g_base;
  } cfg_t;
endpackage
