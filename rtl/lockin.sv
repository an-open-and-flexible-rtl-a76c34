// lockin: lock-in detector of the dither square wave.
//
// The phase increment d(theta) is a measure of the controlled system's frequency. The
// detector adds it while the dither is in its positive half (sign = 0) and subtracts
// it in the negative half, over `periods` whole dither periods. The dither's own
// period_end pulse marks the period boundaries: accumulation starts after the first
// boundary seen and, at the boundary that completes the requested number of periods,
// the sum is published on result_o with a one-clock valid_o pulse and a new
// measurement starts at once. Divided by the dither amplitude and the number of
// samples, the result is the system's gain (frequency per output unit) with its sign.
// The paper names the lock-in measurement and its purpose; the detector form is this
// design's choice.
module lockin import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [PH_W-1:0]  dphase,
  input  logic                    sign,
  input  logic                    period_end,
  input  logic [15:0]             periods,
  output logic signed [ACC_W-1:0] result_o,
  output logic                    valid_o
);
  logic                    running;
  logic [15:0]             pcnt;
  logic signed [ACC_W-1:0] acc, acc_nxt;

  always_comb acc_nxt = sign ? acc - ACC_W'(dphase) : acc + ACC_W'(dphase);

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      running <= 1'b0; pcnt <= '0; acc <= '0; result_o <= '0; valid_o <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (!running) begin
        if (period_end) begin
          running <= 1'b1; pcnt <= '0; acc <= '0;
        end
      end else if (period_end) begin
        if (pcnt + 1 >= periods) begin
          result_o <= acc_nxt;
          valid_o  <= 1'b1;
          acc      <= '0;
          pcnt     <= '0;
        end else begin
          acc  <= acc_nxt;
          pcnt <= pcnt + 1;
        end
      end else begin
        acc <= acc_nxt;
      end
    end
  end
endmodule
