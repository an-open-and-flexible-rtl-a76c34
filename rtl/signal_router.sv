// signal_router: the software-controlled multiplexers between the two channels.
//
//   ch2_err : input of channel 2's loop, selected by ch2_src -
//             CH2_OWN_PHASE  channel 2's own d(theta)    (two independent loops)
//             CH2_CH1_PHASE  channel 1's d(theta)        (two loops on one input)
//             CH2_CH1_OUT    channel 1's loop filter output + seed_offset,
//                            saturated
//                            (channel 2 keeps channel 1's actuator near a set point)
//   vna_x   : detector input of the network analyzer: ADC 1, ADC 2 (sign-extended to
//             16 bits) or either channel's d(theta)
//   vco_code: which channel's output drives the internal VCO (only one VCO exists)
//   dac1/2  : each DAC plays either its channel's output (14 MSBs) or the VCO tone.
// Purely combinational. The sources of each multiplexer follow the paper's block
// diagram. In the diagram the seed for the third scenario leaves channel 1 at the
// loop filter's sum, before the output offset, dither and stimulus are added; it is
// taken from there. The select encodings are this design's.
module signal_router import dpll_pkg::*; (
  input  ch2_src_e                ch2_src,
  input  logic signed [OUT_W-1:0] seed_offset,
  input  vna_src_e                vna_src,
  input  logic                    vco_src,
  input  logic                    dac1_use_vco,
  input  logic                    dac2_use_vco,
  input  logic signed [ADC_W-1:0] adc1,
  input  logic signed [ADC_W-1:0] adc2,
  input  logic signed [PH_W-1:0]  dph1,
  input  logic signed [PH_W-1:0]  dph2,
  input  logic signed [OUT_W-1:0] lf1,
  input  logic signed [OUT_W-1:0] out1,
  input  logic signed [OUT_W-1:0] out2,
  input  logic signed [DAC_W-1:0] vco_dac,
  output logic signed [PH_W-1:0]  ch2_err,
  output logic signed [15:0]      vna_x,
  output logic signed [OUT_W-1:0] vco_code,
  output logic signed [DAC_W-1:0] dac1,
  output logic signed [DAC_W-1:0] dac2
);
  always_comb begin
    unique case (ch2_src)
      CH2_CH1_PHASE: ch2_err = dph1;
      CH2_CH1_OUT:   ch2_err = PH_W'(sat_s(64'(lf1) + 64'(seed_offset), PH_W));
      default:       ch2_err = dph2;
    endcase

    unique case (vna_src)
      VNA_ADC1: vna_x = 16'(adc1);
      VNA_ADC2: vna_x = 16'(adc2);
      VNA_DPH1: vna_x = 16'(dph1);
      default:  vna_x = 16'(dph2);
    endcase

    vco_code = vco_src ? out2 : out1;
    dac1     = dac1_use_vco ? vco_dac : out1[OUT_W-1 -: DAC_W];
    dac2     = dac2_use_vco ? vco_dac : out2[OUT_W-1 -: DAC_W];
  end
endmodule
