// phase_diff: numerical derivative of the measured phase.
//
// Each clock the previous phase sample is subtracted from the current one. The
// result is kept one bit wider than the phase (range -2*pi .. +2*pi) so that the
// wrapping into [-pi, pi) stays a separate step (phase_wrap), as in the paper's block
// diagram. Working on the increment instead of the phase keeps every word bounded
// even when the phase itself ramps without limit.
// Interface: one sample per clock, one clock of latency; the first difference after
// reset is taken against a zero phase.
module phase_diff import dpll_pkg::*; (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [PH_W-1:0] phase_i,
  output logic signed [PH_W:0]   diff_o
);
  logic signed [PH_W-1:0] prev;

  always_ff @(posedge clk) begin
    if (rst) begin
      prev <= '0; diff_o <= '0;
    end else begin
      prev   <= phase_i;
      diff_o <= (PH_W+1)'(phase_i) - (PH_W+1)'(prev);
    end
  end
endmodule
