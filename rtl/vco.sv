// vco: the internal voltage-controlled oscillator, a direct digital synthesizer.
//
// The 16-bit loop output sets the tone's frequency. Read as offset binary
// (-32768 -> code 0, +32767 -> code 65535) the code spans 0 Hz to the Nyquist
// frequency: code 0 is 0 Hz and code 2^16-1 is f_s/2 = 62.5 MHz, so the -1..+1 V
// range of the loop output becomes 31.25 MHz/V. A 48-bit accumulator advances by
// code * round(2^47 / 65535) per clock; its top 32 bits drive a CORDIC sine
// generator, and the sine is scaled by amp (Q0.16), shifted to 14 bits, offset by dc
// and saturated into the DAC word.
// Interface: one DAC word per clock; a code change reaches the DAC 20 clocks later.
// The frequency mapping, amplitude and DC offset follow the paper; the offset-binary
// reading of the code and the synthesizer structure are this design's choices.
module vco import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [OUT_W-1:0] code,
  input  logic [15:0]             amp,
  input  logic signed [DAC_W-1:0] dc,
  output logic signed [DAC_W-1:0] dac_o
);
  localparam longint K = ((longint'(1) <<< (NCO_W - 1)) + 32767) / 65535;

  logic [NCO_W-1:0]         acc;
  logic [15:0]              ucode;
  logic signed [TRIG_W-1:0] s, c_unused;
  logic signed [33:0]       scaled;

  always_comb begin
    ucode  = {~code[OUT_W-1], code[OUT_W-2:0]};
    scaled = 34'(s) * $signed({2'b0, amp});
  end

  always_ff @(posedge clk) begin
    if (rst) acc <= '0;
    else     acc <= acc + NCO_W'(ucode) * NCO_W'(K);
  end

  cordic_sincos u_sin (.clk, .rst, .phase_i(acc[NCO_W-1 -: ANG_W]), .cos_o(c_unused), .sin_o(s));

  always_ff @(posedge clk) begin
    if (rst) dac_o <= '0;
    else     dac_o <= DAC_W'(sat_s(64'(scaled >>> 18) + 64'(dc), DAC_W));
  end
endmodule
