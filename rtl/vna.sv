// vna: built-in vector network analyzer, one frequency point per measurement.
//
// A start pulse begins a measurement: `settle` clocks with the stimulus on and the
// detector waiting for the system's transient to pass, then `samples` clocks of
// detection. Throughout, the analyzer emits the stimulus stim_o = amp * sin(2*pi*f t) (f = freq/2^48 * f_clk, from its own
// 48-bit oscillator), which the top adds to the selected channel outputs, and it
// correlates its input x with the sine and the cosine of the same oscillator:
//   acc_i = sum x*sin,  acc_q = sum x*cos   (sin/cos peak 32000),
// so that a response x = B sin(2*pi*f t + phi) gives atan2(acc_q, acc_i) = phi.
// When the last sample is in, acc_i_o/acc_q_o hold the sums and done_o pulses for one
// clock. The complex ratio of the response, (acc_i, acc_q) scaled by 2/(32000 N),
// to the stimulus amplitude is the transfer function at f; a frequency sweep is a
// series of such points set up by software. While idle stim_o is zero.
// The paper only says that the VNA measures transfer functions in magnitude and
// phase, also while the lock is active; the single-point correlator is this design's.
// Timing: done_o pulses settle + samples + 1 clocks after the start pulse.
module vna import dpll_pkg::*; (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [NCO_W-1:0]        freq,
  input  logic signed [OUT_W-1:0] amp,
  input  logic [31:0]             settle,
  input  logic [31:0]             samples,
  input  logic signed [15:0]      x,
  output logic signed [OUT_W-1:0] stim_o,
  output logic                    busy_o,
  output logic signed [ACC_W-1:0] acc_i_o,
  output logic signed [ACC_W-1:0] acc_q_o,
  output logic                    done_o
);
  logic signed [TRIG_W-1:0] c, s;
  logic [31:0]              cnt;
  logic                     settling;
  logic signed [ACC_W-1:0]  ai, aq, ai_nxt, aq_nxt;
  logic signed [31:0]       sp;

  ref_nco u_nco (.clk, .rst, .freq, .cos_o(c), .sin_o(s));

  always_comb begin
    ai_nxt = ai + ACC_W'(x) * ACC_W'(s);   // in phase with the stimulus
    aq_nxt = aq + ACC_W'(x) * ACC_W'(c);   // quadrature
    sp     = amp * s;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; ai <= '0; aq <= '0; busy_o <= 1'b0; done_o <= 1'b0; settling <= 1'b0;
      acc_i_o <= '0; acc_q_o <= '0; stim_o <= '0;
    end else begin
      done_o <= 1'b0;
      stim_o <= busy_o ? OUT_W'(sp >>> 15) : '0;
      if (!busy_o) begin
        if (start && samples != 0) begin
          busy_o <= 1'b1; cnt <= '0; ai <= '0; aq <= '0; settling <= (settle != 0);
        end
      end else if (settling) begin
        // stimulus on, detector waiting for the system's transient to pass
        if (cnt == settle - 1) begin
          settling <= 1'b0; cnt <= '0;
        end else begin
          cnt <= cnt + 1;
        end
      end else if (cnt == samples - 1) begin
        acc_i_o <= ai_nxt; acc_q_o <= aq_nxt;
        done_o  <= 1'b1;
        busy_o  <= 1'b0;
      end else begin
        ai  <= ai_nxt; aq <= aq_nxt;
        cnt <= cnt + 1;
      end
    end
  end
endmodule
