// dpll_pkg: widths, control-word types and small arithmetic helpers shared by the
// digital phase-locked loop.
//
// Number formats used throughout:
//   * ADC and DAC samples are 14-bit two's complement (the converters of the board).
//   * Phases are "turn" fixed point: a PH_W-bit two's complement word where 2^PH_W
//     equals one full turn (2*pi), so +pi is 2^(PH_W-1). The CORDIC cores work with
//     32-bit turn angles internally.
//   * The loop output is a 16-bit two's complement word (-1 V .. +1 V at the DAC when
//     its 14 MSBs are used; 0 Hz .. fs/2 when the internal VCO is used).
// The 48-bit reference frequency word and the 16-bit loop output follow the paper;
// every other width and field below is a choice of this design.
package dpll_pkg;

  localparam int ADC_W   = 14;  // converter resolution (paper: 14-bit ADC/DAC)
  localparam int DAC_W   = 14;
  localparam int NCO_W   = 48;  // reference frequency word, f_ref = k/2^48 * f_clk
  localparam int TRIG_W  = 16;  // sine/cosine amplitude words
  localparam int IQ_W    = 16;  // I/Q after mixing and low-pass filtering
  localparam int PH_W    = 16;  // phase theta and phase increment d(theta)
  localparam int OUT_W   = 16;  // loop filter output (paper: 16 bits)
  localparam int GAIN_W  = 32;  // loop filter gain words
  localparam int ACC_W   = 64;  // lock-in, VNA and frequency counter accumulators
  localparam int ANG_W   = 32;  // CORDIC internal angle, 2^32 = one turn

  // I/Q low-pass bandwidth selection. Boxcar lengths 2, 4 and 16 at 125 MS/s give
  // -3 dB points of 31.3, 14.2 and 3.5 MHz.
  typedef enum logic [1:0] {
    LPF_31MHZ  = 2'd0,
    LPF_15MHZ  = 2'd1,
    LPF_3M75HZ = 2'd2
  } lpf_sel_e;

  // Input of the second channel's loop filter (the three control scenarios).
  typedef enum logic [1:0] {
    CH2_OWN_PHASE = 2'd0,  // independent loops: channel 2 demodulates its own ADC
    CH2_CH1_PHASE = 2'd1,  // two loops on one input: channel 1's d(theta)
    CH2_CH1_OUT   = 2'd2   // cascaded: channel 1's output plus an offset
  } ch2_src_e;

  // Input of the network analyzer's detector.
  typedef enum logic [1:0] {
    VNA_ADC1   = 2'd0,
    VNA_ADC2   = 2'd1,
    VNA_DPH1   = 2'd2,
    VNA_DPH2   = 2'd3
  } vna_src_e;

  // Per-channel loop settings.
  typedef struct packed {
    logic [NCO_W-1:0]         ref_freq;     // reference frequency word k
    lpf_sel_e                 lpf_sel;
    logic                     lock_en;      // 0 clears and holds the integrators
    logic                     en_p, en_i, en_ii, en_d;
    logic signed [GAIN_W-1:0] kp;           // Q16.16
    logic signed [GAIN_W-1:0] ki;           // units of 2^-32
    logic signed [GAIN_W-1:0] kii;          // units of 2^-48
    logic signed [GAIN_W-1:0] kd;           // Q16.16
    logic [15:0]              kdf;          // derivative roll-off coefficient, Q0.16
    logic signed [OUT_W-1:0]  out_offset;   // added after the loop filter
    logic                     dither_en;
    logic signed [OUT_W-1:0]  dither_amp;
    logic [31:0]              dither_half;  // half period of the square wave, cycles
    logic [15:0]              lockin_periods;
    logic                     dac_use_vco;  // 1: this DAC plays the VCO tone
  } chan_cfg_t;

  // Settings shared by both channels.
  typedef struct packed {
    ch2_src_e                 ch2_src;
    logic signed [OUT_W-1:0]  ch2_seed_offset;  // offset between ch1 output and ch2 input
    logic                     vco_src;          // 0: channel 1 output, 1: channel 2 output
    logic [15:0]              vco_amp;          // Q0.16 amplitude of the VCO tone
    logic signed [DAC_W-1:0]  vco_dc;           // DC offset of the VCO tone
    vna_src_e                 vna_src;
    logic [NCO_W-1:0]         vna_freq;
    logic signed [OUT_W-1:0]  vna_amp;
    logic [31:0]              vna_settle;       // clocks between stimulus start and detection
    logic [31:0]              vna_samples;      // integration length per point
    logic [1:0]               vna_inject;       // bit c: add stimulus to channel c+1 output
    logic [2:0]               scope_sel_a;      // test point on scope trace A
    logic [2:0]               scope_sel_b;      // test point on scope trace B
  } glob_cfg_t;

  // Arctangent of 2^-i in 32-bit turn units: round(atan(2^-i) / (2*pi) * 2^32).
  function automatic logic [ANG_W-1:0] cordic_atan(input int i);
    case (i)
      0:  return 32'd536870912;   1:  return 32'd316933406;
      2:  return 32'd167458907;   3:  return 32'd85004756;
      4:  return 32'd42667331;    5:  return 32'd21354465;
      6:  return 32'd10679838;    7:  return 32'd5340245;
      8:  return 32'd2670163;     9:  return 32'd1335087;
      10: return 32'd667544;      11: return 32'd333772;
      12: return 32'd166886;      13: return 32'd83443;
      14: return 32'd41722;       15: return 32'd20861;
      16: return 32'd10430;       17: return 32'd5215;
      18: return 32'd2608;        19: return 32'd1304;
      default: return '0;
    endcase
  endfunction

  // Clamp a 64-bit value into a signed W-bit range (W <= 63).
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
