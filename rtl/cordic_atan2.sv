// cordic_atan2: pipelined vectoring CORDIC giving the full-circle angle of (I, Q).
//
// A first register moves vectors of the left half plane into the right one by
// negating both components and presetting the angle to pi. STAGES micro-rotations
// then drive Q towards zero, accumulating the rotation angle in 32-bit turn units,
// and a last register rounds the angle to PH_W bits (2^PH_W = 2*pi), so the output
// covers [-pi, pi) with wrap-around. The vector's magnitude does not matter.
// Interface: one (I, Q) pair per clock, phase_o follows STAGES+2 clocks later.
// The paper asks for an arctangent; the CORDIC method and widths are this design's.
module cordic_atan2 import dpll_pkg::*; #(
  parameter int IN_W   = IQ_W,
  parameter int STAGES = 16
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] i_i,
  input  logic signed [IN_W-1:0] q_i,
  output logic signed [PH_W-1:0] phase_o
);
  localparam int G  = 6;
  localparam int IW = IN_W + G + 2;

  logic signed [IW-1:0]    x [STAGES+1];
  logic signed [IW-1:0]    y [STAGES+1];
  logic signed [ANG_W-1:0] z [STAGES+1];

  always_ff @(posedge clk) begin
    if (rst) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0;
    end else if (i_i < 0) begin
      x[0] <= -(IW'(i_i) <<< G);
      y[0] <= -(IW'(q_i) <<< G);
      z[0] <= {1'b1, {(ANG_W-1){1'b0}}};   // pi
    end else begin
      x[0] <= IW'(i_i) <<< G;
      y[0] <= IW'(q_i) <<< G;
      z[0] <= '0;
    end
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) begin
        x[s+1] <= '0; y[s+1] <= '0; z[s+1] <= '0;
      end else if (!y[s][IW-1]) begin
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + signed'(cordic_atan(s));
      end else begin
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - signed'(cordic_atan(s));
      end
    end
  end

  logic [PH_W-1:0] zr;
  always_comb zr = PH_W'(ANG_W'(z[STAGES] + ANG_W'(1 << (ANG_W - PH_W - 1))) >> (ANG_W - PH_W));

  always_ff @(posedge clk) begin
    if (rst) phase_o <= '0;
    else     phase_o <= signed'(zr);
  end
endmodule
