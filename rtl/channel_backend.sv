// channel_backend: everything of one DPLL channel after the phase detector.
//
// The loop error (a phase increment) feeds the PII^2D loop filter, the frequency
// counter and the lock-in detector in parallel. The loop filter output is summed
// with the user offset, the dither square wave and the network analyzer stimulus
// (stim, already gated by the top) to form the channel output. Both channels of the
// instrument use this module, the second being a duplicate of the first.
// Interface: cfg holds the channel's settings (dpll_pkg::chan_cfg_t). The output
// follows the error by 3 clocks (2 in the loop filter, 1 in the summer). lf_o is
// the loop filter's own output, one clock ahead of out_o; channel 1's is the seed of
// channel 2 in the cascaded scenario.
module channel_backend import dpll_pkg::*; #(
  parameter int FC_GATE_CYCLES = 125_000_000
) (
  input  logic                    clk,
  input  logic                    rst,
  input  chan_cfg_t               cfg,
  input  logic signed [PH_W-1:0]  err,
  input  logic signed [OUT_W-1:0] stim,
  output logic signed [OUT_W-1:0] out_o,
  output logic signed [OUT_W-1:0] lf_o,
  output logic signed [ACC_W-1:0] fc_count_o,
  output logic                    fc_valid_o,
  output logic signed [ACC_W-1:0] lockin_o,
  output logic                    lockin_valid_o
);
  logic signed [OUT_W-1:0] dith;
  logic                    dsign, dend;

  loop_filter u_lf (
    .clk, .rst, .lock_en(cfg.lock_en),
    .en_p(cfg.en_p), .en_i(cfg.en_i), .en_ii(cfg.en_ii), .en_d(cfg.en_d),
    .kp(cfg.kp), .ki(cfg.ki), .kii(cfg.kii), .kd(cfg.kd), .kdf(cfg.kdf),
    .x(err), .y(lf_o)
  );

  freq_counter #(.GATE_CYCLES(FC_GATE_CYCLES)) u_fc (
    .clk, .rst, .dphase(err), .count_o(fc_count_o), .valid_o(fc_valid_o)
  );

  dither u_dither (
    .clk, .rst, .en(cfg.dither_en), .amp(cfg.dither_amp), .half_period(cfg.dither_half),
    .sq_o(dith), .sign_o(dsign), .period_end_o(dend)
  );

  lockin u_lockin (
    .clk, .rst, .en(cfg.dither_en), .dphase(err), .sign(dsign), .period_end(dend),
    .periods(cfg.lockin_periods), .result_o(lockin_o), .valid_o(lockin_valid_o)
  );

  output_sum u_sum (
    .clk, .rst, .lf(lf_o), .offset(cfg.out_offset), .dith, .stim, .y(out_o)
  );
endmodule
