// boxcar_lpf: selectable-bandwidth low-pass filter for one of the I/Q arms.
//
// The filter is a moving average over the last L samples, L = 2, 4 or 16 chosen by
// sel (LPF_31MHZ, LPF_15MHZ, LPF_3M75HZ). At 125 MS/s those lengths put the -3 dB
// point at 31.3, 14.2 and 3.5 MHz, the nearest boxcars to the three bandwidths the
// paper offers (31, 15.5 and 3.75 MHz). The sum is divided by L with an arithmetic
// shift, so the DC gain is one.
// Interface: x is shifted into a 16-deep delay line every clock; y is the registered
// average of the taps, two clocks after the newest sample enters. The bandwidths are
// the paper's; the boxcar form is this design's choice.
module boxcar_lpf import dpll_pkg::*; #(
  parameter int W = IQ_W
) (
  input  logic                clk,
  input  logic                rst,
  input  lpf_sel_e            sel,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int N = 16;
  logic signed [W-1:0]   taps [N];
  logic signed [W+4-1:0] s2, s4, s16;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) taps[k] <= '0;
    end else begin
      taps[0] <= x;
      for (int k = 1; k < N; k++) taps[k] <= taps[k-1];
    end
  end

  always_comb begin
    s2 = (W+4)'(taps[0]) + (W+4)'(taps[1]);
    s4 = s2 + (W+4)'(taps[2]) + (W+4)'(taps[3]);
    s16 = s4;
    for (int k = 4; k < N; k++) s16 += (W+4)'(taps[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else unique case (sel)
      LPF_31MHZ: y <= W'(s2 >>> 1);
      LPF_15MHZ: y <= W'(s4 >>> 2);
      default:   y <= W'(s16 >>> 4);
    endcase
  end
endmodule
