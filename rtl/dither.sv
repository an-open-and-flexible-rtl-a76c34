// dither: square-wave generator used to excite the controlled system.
//
// A counter toggles the wave every half_period clocks. While en is high sq_o is
// +amp in the first half of each period and -amp in the second; while en is low the
// output is zero and the counter is held at the start of a period. sign_o is 1 during
// the negative half and period_end_o pulses on the last clock of each full period, so
// a lock-in detector can integrate over whole periods.
// Interface: amplitude and half period (in clocks, at least 1) are plain settings.
// The paper gives a square wave of selectable amplitude and frequency; the setting
// format is this design's choice.
module dither import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [OUT_W-1:0] amp,
  input  logic [31:0]             half_period,
  output logic signed [OUT_W-1:0] sq_o,
  output logic                    sign_o,
  output logic                    period_end_o
);
  logic [31:0] cnt;
  logic        last;

  always_comb last = (cnt + 1 >= half_period);

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      cnt <= '0; sign_o <= 1'b0;
    end else if (last) begin
      cnt    <= '0;
      sign_o <= ~sign_o;
    end else begin
      cnt <= cnt + 1;
    end
  end

  always_comb begin
    sq_o         = !en ? '0 : (sign_o ? -amp : amp);
    period_end_o = en && sign_o && last;
  end
endmodule
