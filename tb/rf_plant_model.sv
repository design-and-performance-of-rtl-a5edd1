// rf_plant_model: behavioural (non-synthesizable) stand-in for the
// high-power RF system around the controller, used only by the end-to-end
// testbenches. It works on the complex envelope of the RF drive and turns
// it back into 40 MHz ADC samples with the controller's own reference, so
// that frequency sweeps need no resampling.
//   grid  = GG * drive * exp(j*phi_g),   phi_g = PG0 + KG*(bias_g - RES_G)
//   cav  -> GC * grid * cos(phi_c) * exp(j*(phi_c + PC0)) - beam loading,
//           first-order lag of TAU clocks,  phi_c = KC*(bias_c_meas - res_c)
//   beam  = BEAM * exp(j*(arg(cav) + phis + osc(t))), osc = synchrotron
//           oscillation of OSC_AMP with period OSC_T clocks
//   fct/wcm samples carry the beam vector; bias_c_meas follows bias_c with
//   a lag of 16 clocks (bandwidth limit of the supply).
// Phases are in degrees, gains dimensionless, ADC samples = Re(v*e^{jwt}).
module rf_plant_model #(
  parameter real GG = 0.8, GC = 1.2, PG0 = 20.0, KG = -0.004, RES_G = 20000.0,
  parameter real PC0 = 0.0, KC = 0.004, TAU = 20.0,
  parameter real BEAM = 4000.0, KB = 0.3, OSC_AMP = 3.0, OSC_T = 4000.0
) (
  input  logic               clk,
  input  logic signed [19:0] drv_i,
  input  logic signed [19:0] drv_q,
  input  logic signed [15:0] cos_r,
  input  logic signed [15:0] sin_r,
  input  logic [15:0]        bias_c,
  input  logic [15:0]        bias_g,
  input  real                res_c,
  input  real                phis_deg,
  input  bit                 beam_on,
  output logic signed [15:0] adc_cav,
  output logic signed [15:0] adc_grid,
  output logic signed [15:0] adc_fct,
  output logic signed [15:0] adc_wcm,
  output logic [15:0]        bias_c_meas,
  output real                phi_c_deg
);
  localparam real D2R = 3.14159265358979 / 180.0;
  real ci = 0.0, cq = 0.0, bc = 0.0, t = 0.0;

  function automatic logic signed [15:0] to_adc(input real vi, input real vq,
                                                input logic signed [15:0] c, input logic signed [15:0] s);
    real v;
    v = (vi * real'(c) - vq * real'(s)) / 32000.0;
    if (v > 32767.0) v = 32767.0;
    if (v < -32768.0) v = -32768.0;
    return 16'(int'(v));
  endfunction

  always @(posedge clk) begin
    real pg, pc, gi, gq, ti, tq, a, bi, bq, ang, bmag;
    t  = t + 1.0;
    bc = bc + (real'(bias_c) - bc) / 16.0;
    pg = (PG0 + KG * (real'(bias_g) - RES_G)) * D2R;
    gi = GG * (real'(drv_i) * $cos(pg) - real'(drv_q) * $sin(pg));
    gq = GG * (real'(drv_i) * $sin(pg) + real'(drv_q) * $cos(pg));
    pc = KC * (bc - res_c);
    phi_c_deg = pc;
    a  = GC * $cos(pc * D2R);
    ti = a * (gi * $cos((pc + PC0) * D2R) - gq * $sin((pc + PC0) * D2R));
    tq = a * (gi * $sin((pc + PC0) * D2R) + gq * $cos((pc + PC0) * D2R));
    bmag = beam_on ? BEAM : 0.0;
    ang  = $atan2(cq, ci) + (phis_deg + OSC_AMP * $sin(2.0 * 3.14159265358979 * t / OSC_T)) * D2R;
    bi = bmag * $cos(ang);
    bq = bmag * $sin(ang);
    ci = ci + (ti - KB * bi - ci) / TAU;
    cq = cq + (tq - KB * bq - cq) / TAU;
    adc_grid    <= to_adc(gi, gq, cos_r, sin_r);
    adc_cav     <= to_adc(ci, cq, cos_r, sin_r);
    adc_fct     <= to_adc(bi, bq, cos_r, sin_r);
    adc_wcm     <= to_adc(bi, bq, cos_r, sin_r);
    bias_c_meas <= 16'(int'(bc));
  end
endmodule
