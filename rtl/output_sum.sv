// output_sum: the summing node after a channel's loop filter.
//
// Adds the loop filter output, the user offset, the dither square wave and the
// network analyzer's stimulus, and saturates the sum to the 16-bit output word, so
// that an offset near full scale clips instead of wrapping around.
// Interface: one clock of latency. The summing node is the paper's; saturation is
// this design's choice.
module output_sum import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [OUT_W-1:0] lf,
  input  logic signed [OUT_W-1:0] offset,
  input  logic signed [OUT_W-1:0] dith,
  input  logic signed [OUT_W-1:0] stim,
  output logic signed [OUT_W-1:0] y
);
  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= OUT_W'(sat_s(64'(lf) + 64'(offset) + 64'(dith) + 64'(stim), OUT_W));
  end
endmodule
