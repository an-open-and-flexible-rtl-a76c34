// dpe: differential phase extraction, from ADC samples to the phase increment.
//
// The chain follows the paper's block diagram: a reference oscillator at
// f_ref = k/2^48 f_clk (ref_nco), two multipliers forming I and Q (iq_mixer), a
// selectable low-pass filter on each arm (boxcar_lpf), a full-circle arctangent
// (cordic_atan2), the difference of successive phases (phase_diff) and the wrap into
// [-pi, pi) (phase_wrap). The output d(theta) is the phase advance of the input
// relative to the reference during one sample, 2^16 = 2*pi; it stays bounded however
// far the absolute phase runs, and its average over time is proportional to the
// frequency offset from f_ref.
// Interface: one ADC sample per clock. From the ADC port to dphase_o the latency is
// 1 (mixer) + 2 (filter) + 18 (arctangent) + 1 (diff) + 1 (wrap) = 23 clocks, 184 ns
// at 125 MHz (the paper reports 207 ns for its demodulation). i_o/q_o are the filtered
// I/Q for display.
module dpe import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc,
  input  logic [NCO_W-1:0]        ref_freq,
  input  lpf_sel_e                lpf_sel,
  output logic signed [IQ_W-1:0]  i_o,
  output logic signed [IQ_W-1:0]  q_o,
  output logic signed [PH_W-1:0]  dphase_o
);
  logic signed [TRIG_W-1:0] cos_r, sin_r;
  logic signed [IQ_W-1:0]   i_raw, q_raw;
  logic signed [PH_W-1:0]   theta;
  logic signed [PH_W:0]     dtheta_raw;

  ref_nco u_nco (.clk, .rst, .freq(ref_freq), .cos_o(cos_r), .sin_o(sin_r));

  iq_mixer u_mix (.clk, .rst, .x(adc), .cos_i(cos_r), .sin_i(sin_r), .i_o(i_raw), .q_o(q_raw));

  boxcar_lpf u_lpf_i (.clk, .rst, .sel(lpf_sel), .x(i_raw), .y(i_o));
  boxcar_lpf u_lpf_q (.clk, .rst, .sel(lpf_sel), .x(q_raw), .y(q_o));

  cordic_atan2 u_atan (.clk, .rst, .i_i(i_o), .q_i(q_o), .phase_o(theta));

  phase_diff u_diff (.clk, .rst, .phase_i(theta), .diff_o(dtheta_raw));

  phase_wrap u_wrap (.clk, .rst, .d_i(dtheta_raw), .d_o(dphase_o));
endmodule
