// dpll_top: two-channel digital phase-locked loop with its measurement tools.
//
// Each channel demodulates its ADC against a 48-bit reference oscillator and turns
// the input's phase into a bounded phase increment (dpe). Channel 1's increment drives
// its back end (loop filter, frequency counter, dither and lock-in, output summer);
// channel 2's back end takes, through signal_router, its own increment, channel 1's
// increment, or channel 1's output plus an offset - the three control scenarios.
// Either channel output can drive the internal VCO, and each DAC plays its channel's
// output or the VCO tone. The network analyzer adds its stimulus to the outputs
// chosen by glob.vna_inject and detects the selected signal; the scope captures two
// of six test points.
// Interface: one 14-bit sample per ADC and one 14-bit word per DAC every clock
// (125 MHz). Settings arrive as packed structs (chan_cfg_t, glob_cfg_t); results of
// the counters, lock-ins, analyzer and scope leave as ports. The link to the host is
// outside this module.
// Latency, ADC 1 to DAC 1 through channel 1: 23 (dpe) + 3 (back end) = 26 clocks
// (208 ns) without the VCO, 46 clocks (368 ns) through it.
module dpll_top import dpll_pkg::*; #(
  parameter int FC_GATE_CYCLES = 125_000_000
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc1,
  input  logic signed [ADC_W-1:0] adc2,
  output logic signed [DAC_W-1:0] dac1,
  output logic signed [DAC_W-1:0] dac2,
  input  chan_cfg_t               cfg1,
  input  chan_cfg_t               cfg2,
  input  glob_cfg_t               glob,
  input  logic                    vna_start,
  input  logic                    scope_arm,
  input  logic [13:0]             scope_rd_addr,
  output logic [31:0]             scope_rd_data,
  output logic                    scope_full,
  output logic signed [IQ_W-1:0]  i1, q1, i2, q2,
  output logic signed [PH_W-1:0]  dph1, dph2,
  output logic signed [OUT_W-1:0] out1, out2,
  output logic signed [ACC_W-1:0] fc1_count, fc2_count,
  output logic                    fc1_valid, fc2_valid,
  output logic signed [ACC_W-1:0] lockin1, lockin2,
  output logic                    lockin1_valid, lockin2_valid,
  output logic signed [ACC_W-1:0] vna_i, vna_q,
  output logic                    vna_busy, vna_done
);
  logic signed [PH_W-1:0]  ch2_err;
  logic signed [15:0]      vna_x;
  logic signed [OUT_W-1:0] vna_stim, stim1, stim2, vco_code, lf1;
  logic signed [DAC_W-1:0] vco_dac;
  logic signed [15:0]      tp [6];

  dpe u_dpe1 (.clk, .rst, .adc(adc1), .ref_freq(cfg1.ref_freq), .lpf_sel(cfg1.lpf_sel),
              .i_o(i1), .q_o(q1), .dphase_o(dph1));
  dpe u_dpe2 (.clk, .rst, .adc(adc2), .ref_freq(cfg2.ref_freq), .lpf_sel(cfg2.lpf_sel),
              .i_o(i2), .q_o(q2), .dphase_o(dph2));

  always_comb begin
    stim1 = glob.vna_inject[0] ? vna_stim : '0;
    stim2 = glob.vna_inject[1] ? vna_stim : '0;
  end

  channel_backend #(.FC_GATE_CYCLES(FC_GATE_CYCLES)) u_ch1 (
    .clk, .rst, .cfg(cfg1), .err(dph1), .stim(stim1), .out_o(out1), .lf_o(lf1),
    .fc_count_o(fc1_count), .fc_valid_o(fc1_valid),
    .lockin_o(lockin1), .lockin_valid_o(lockin1_valid));

  channel_backend #(.FC_GATE_CYCLES(FC_GATE_CYCLES)) u_ch2 (
    .clk, .rst, .cfg(cfg2), .err(ch2_err), .stim(stim2), .out_o(out2), .lf_o(),
    .fc_count_o(fc2_count), .fc_valid_o(fc2_valid),
    .lockin_o(lockin2), .lockin_valid_o(lockin2_valid));

  signal_router u_route (
    .ch2_src(glob.ch2_src), .seed_offset(glob.ch2_seed_offset), .vna_src(glob.vna_src),
    .vco_src(glob.vco_src), .dac1_use_vco(cfg1.dac_use_vco), .dac2_use_vco(cfg2.dac_use_vco),
    .adc1, .adc2, .dph1, .dph2, .lf1, .out1, .out2, .vco_dac,
    .ch2_err, .vna_x, .vco_code, .dac1, .dac2);

  vna u_vna (.clk, .rst, .start(vna_start), .freq(glob.vna_freq), .amp(glob.vna_amp),
             .settle(glob.vna_settle), .samples(glob.vna_samples), .x(vna_x), .stim_o(vna_stim), .busy_o(vna_busy),
             .acc_i_o(vna_i), .acc_q_o(vna_q), .done_o(vna_done));

  vco u_vco (.clk, .rst, .code(vco_code), .amp(glob.vco_amp), .dc(glob.vco_dc), .dac_o(vco_dac));

  always_comb begin
    tp[0] = 16'(adc1);
    tp[1] = dph1;
    tp[2] = out1;
    tp[3] = 16'(adc2);
    tp[4] = ch2_err;
    tp[5] = out2;
  end

  scope u_scope (.clk, .rst, .tp, .sel_a(glob.scope_sel_a), .sel_b(glob.scope_sel_b),
                 .arm(scope_arm), .rd_addr(scope_rd_addr), .rd_data(scope_rd_data),
                 .full_o(scope_full));
endmodule
