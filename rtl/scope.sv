// scope: two-trace capture memory behind the instrument's test points.
//
// Six test points are wired in: 0 ADC 1, 1 channel 1 d(theta), 2 channel 1 output,
// 3 ADC 2, 4 channel 2 loop input, 5 channel 2 output (6 and 7 read as zero). sel_a
// and sel_b pick the two traces. An arm pulse starts a capture of DEPTH consecutive
// samples of both traces into a DEPTH x 32 memory (trace A in the low half-word);
// full_o rises when the last sample is written and stays high until the next arm.
// Software then reads the memory through rd_addr/rd_data (one clock read latency) to
// show time traces, spectra and noise densities.
// The test points are the blue dots of the paper's block diagram; the depth, the
// two-trace format and the read port are this design's choices.
module scope import dpll_pkg::*; #(
  parameter int DEPTH = 16384,
  parameter int NTP   = 6
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [15:0]       tp [NTP],
  input  logic [2:0]               sel_a,
  input  logic [2:0]               sel_b,
  input  logic                     arm,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [31:0]              rd_data,
  output logic                     full_o
);
  localparam int AW = $clog2(DEPTH);

  logic [31:0]   mem [DEPTH];
  logic [AW-1:0] wa;
  logic          busy;
  logic [15:0]   a, b;

  always_comb begin
    a = (32'(sel_a) < NTP) ? tp[sel_a] : '0;
    b = (32'(sel_b) < NTP) ? tp[sel_b] : '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wa <= '0; busy <= 1'b0; full_o <= 1'b0;
    end else if (arm) begin
      wa <= '0; busy <= 1'b1; full_o <= 1'b0;
    end else if (busy) begin
      wa <= wa + 1;
      if (wa == AW'(DEPTH - 1)) begin
        busy <= 1'b0; full_o <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) mem[wa] <= {b, a};
    rd_data <= mem[rd_addr];
  end
endmodule
