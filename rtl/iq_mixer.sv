// iq_mixer: the two multipliers of the I/Q demodulator.
//
// The ADC sample x is multiplied by the reference cosine (I) and by minus the reference
// sine (Q), so that for x = A cos(w t + phi) the low-frequency parts are
// (A/2) cos(phi) and (A/2) sin(phi) and atan2(Q, I) is the input phase phi relative to
// the reference. Products are scaled by 2^-13 to fit 16 bits (a 14-bit full-scale
// input times a 32000 peak reference gives about +/-32000) and registered.
// Interface: one sample per clock, one clock of latency. The scaling and the sign of
// Q are this design's choices.
module iq_mixer import dpll_pkg::*; #(
  parameter int IN_W   = ADC_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [IN_W-1:0]   x,
  input  logic signed [TRIG_W-1:0] cos_i,
  input  logic signed [TRIG_W-1:0] sin_i,
  output logic signed [IQ_W-1:0]  i_o,
  output logic signed [IQ_W-1:0]  q_o
);
  localparam int SH = IN_W + TRIG_W - 1 - IQ_W;
  logic signed [IN_W+TRIG_W-1:0] pi_, pq_;

  always_comb begin
    pi_ = x * cos_i;
    pq_ = -(x * sin_i);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      i_o <= '0; q_o <= '0;
    end else begin
      i_o <= IQ_W'(sat_s(64'(pi_ >>> SH), IQ_W));
      q_o <= IQ_W'(sat_s(64'(pq_ >>> SH), IQ_W));
    end
  end
endmodule
