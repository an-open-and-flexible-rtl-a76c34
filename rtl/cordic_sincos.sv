// cordic_sincos: pipelined CORDIC rotator that turns a phase into a cosine and a sine.
//
// The phase is a 32-bit "turn" word (2^32 = 2*pi). A first register folds the phase
// into [-pi/2, pi/2) by starting the vector on the negative x axis when the phase lies
// in the left half plane; STAGES shift-and-add micro-rotations then rotate the vector
// (AMP*K, 0) by the remaining angle, K = 0.60725 being the inverse CORDIC gain, so the
// vector ends at AMP*(cos, sin). A last register rounds away the guard bits.
// Interface: phase_i is sampled every clock; cos_o/sin_o follow STAGES+2 clocks later.
// Peak amplitude AMP and the CORDIC method are this design's choices; the paper only
// asks for the sine and cosine of the reference.
module cordic_sincos import dpll_pkg::*; #(
  parameter int STAGES = 16,
  parameter int AMP    = 32000
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [ANG_W-1:0]         phase_i,
  output logic signed [TRIG_W-1:0] cos_o,
  output logic signed [TRIG_W-1:0] sin_o
);
  localparam int G  = 3;                 // guard bits
  localparam int IW = TRIG_W + G + 2;    // internal width
  // AMP * K * 2^G, K ~ 39797/65536
  localparam longint X0 = ((longint'(AMP) <<< G) * 39797 + 32768) / 65536;

  logic signed [IW-1:0]    x [STAGES+1];
  logic signed [IW-1:0]    y [STAGES+1];
  logic signed [ANG_W-1:0] z [STAGES+1];

  // Stage 0: quadrant fold.
  always_ff @(posedge clk) begin
    if (rst) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0;
    end else begin
      y[0] <= '0;
      if (phase_i[ANG_W-1] != phase_i[ANG_W-2]) begin
        // |phase| >= pi/2: start on the negative axis and rotate by phase - pi.
        x[0] <= -IW'(X0);
        z[0] <= signed'(phase_i + {1'b1, {(ANG_W-1){1'b0}}});
      end else begin
        x[0] <= IW'(X0);
        z[0] <= signed'(phase_i);
      end
    end
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk) begin
      if (rst) begin
        x[s+1] <= '0; y[s+1] <= '0; z[s+1] <= '0;
      end else if (!z[s][ANG_W-1]) begin
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - signed'(cordic_atan(s));
      end else begin
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + signed'(cordic_atan(s));
      end
    end
  end

  logic signed [TRIG_W-1:0] xr, yr;
  always_comb begin
    xr = TRIG_W'((x[STAGES] + IW'(1 << (G - 1))) >>> G);
    yr = TRIG_W'((y[STAGES] + IW'(1 << (G - 1))) >>> G);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cos_o <= '0; sin_o <= '0;
    end else begin
      cos_o <= xr;
      sin_o <= yr;
    end
  end
endmodule
