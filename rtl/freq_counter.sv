// freq_counter: zero dead-time frequency counter on the phase increment.
//
// The phase increments d(theta) are summed over a gate of GATE_CYCLES clocks
// (125,000,000 = 1 s at 125 MHz, the paper's gate time). At the last clock of a gate
// the total, including that clock's sample, is published on count_o with a one-clock
// valid_o pulse and the sum restarts from zero on the next clock, so every sample
// belongs to exactly one gate and no time is lost between gates. The total is the
// phase advance of the input relative to the reference during the gate in units of
// 2^-16 turn, i.e. the mean frequency offset from f_ref is count_o / 2^16 / T_gate.
// The gate length follows the paper; the output format is this design's choice.
module freq_counter import dpll_pkg::*; #(
  parameter int GATE_CYCLES = 125_000_000,
  parameter int IN_W        = PH_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] dphase,
  output logic signed [ACC_W-1:0] count_o,
  output logic                   valid_o
);
  logic [31:0]             cyc;
  logic signed [ACC_W-1:0] acc, acc_nxt;

  always_comb acc_nxt = acc + ACC_W'(dphase);

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc <= '0; acc <= '0; count_o <= '0; valid_o <= 1'b0;
    end else if (cyc == 32'(GATE_CYCLES - 1)) begin
      cyc     <= '0;
      acc     <= '0;
      count_o <= acc_nxt;
      valid_o <= 1'b1;
    end else begin
      cyc     <= cyc + 1;
      acc     <= acc_nxt;
      valid_o <= 1'b0;
    end
  end
endmodule
