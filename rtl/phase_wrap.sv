// phase_wrap: the modulo [-pi, pi) operator on the phase increment.
//
// The input is a phase difference in the range [-2*pi, 2*pi) with 2^PH_W = 2*pi. When
// it is at or above pi one turn is subtracted, when it is below -pi one turn is added,
// so that a jump of the arctangent across its +/-pi branch cut becomes the small
// increment it really is.
// Interface: one sample per clock, one clock of latency.
module phase_wrap import dpll_pkg::*; (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [PH_W:0]   d_i,
  output logic signed [PH_W-1:0] d_o
);
  localparam logic signed [PH_W:0] PI  = (PH_W+1)'(1) <<< (PH_W - 1);
  localparam logic signed [PH_W:0] TURN = (PH_W+1)'(1) <<< PH_W;
  logic signed [PH_W-1:0] w;

  always_comb begin
    if (d_i >= PI)       w = PH_W'(d_i - TURN);
    else if (d_i < -PI)  w = PH_W'(d_i + TURN);
    else                 w = PH_W'(d_i);
  end

  always_ff @(posedge clk) begin
    if (rst) d_o <= '0;
    else     d_o <= w;
  end
endmodule
