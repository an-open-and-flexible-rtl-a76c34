// ref_nco: reference oscillator of the phase detector.
//
// A 48-bit phase accumulator advances by the frequency word k every clock, so the
// reference runs at f_ref = k / 2^48 * f_clk as the paper specifies. The top 32 bits
// of the accumulator drive a CORDIC rotator (cordic_sincos) that produces the cosine
// and sine of the reference phase with a peak of about 32000.
// Interface: freq may change at any clock; cos_o/sin_o lag the accumulator by the
// CORDIC latency (STAGES+2 clocks). After reset the phase is zero.
// The 48-bit accumulator follows the paper; the sine generator is this design's choice.
module ref_nco import dpll_pkg::*; (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [NCO_W-1:0]         freq,
  output logic signed [TRIG_W-1:0] cos_o,
  output logic signed [TRIG_W-1:0] sin_o
);
  logic [NCO_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (rst) acc <= '0;
    else     acc <= acc + freq;
  end

  cordic_sincos u_sincos (
    .clk, .rst,
    .phase_i (acc[NCO_W-1 -: ANG_W]),
    .cos_o, .sin_o
  );
endmodule
