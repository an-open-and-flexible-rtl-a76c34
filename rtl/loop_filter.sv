// loop_filter: the PII^2D controller of one channel.
//
// Four branches act on the error x (the phase increment d(theta)) and are summed:
//   P  : Kp * x                                        Kp in Q16.16
//   I  : sum(Ki * x)                / 2^32              Ki in units of 2^-32
//   II : sum(sum(Kii * x) / 2^16)  / 2^32              Kii in units of 2^-48
//   D  : Kd * (f[n] - f[n-1])       / 2^32, with f a first-order low-pass of x,
//        f[n] = f[n-1] + kdf * (x*2^16 - f[n-1]) / 2^16 (kdf = f_df*2*pi/f_s in Q0.16)
// Because x is already a phase derivative, the branches act on the phase as
// I, P, D and D^2 terms. Each branch has an enable; the double integrator is normally
// left off. The integrators saturate where their contribution alone would fill the
// output range, which keeps them from winding up. While lock_en is low every state
// is cleared and the output is zero. The sum saturates to the 16-bit output word.
// Interface: one sample per clock; y reflects x two clocks later (terms are formed
// in the first clock, summed and saturated in the second).
// The branch structure and the 16-bit output follow the paper; the gain formats,
// anti-windup and lock_en behaviour are this design's choices.
module loop_filter import dpll_pkg::*; #(
  parameter int IN_W  = PH_W
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     lock_en,
  input  logic                     en_p, en_i, en_ii, en_d,
  input  logic signed [GAIN_W-1:0] kp, ki, kii, kd,
  input  logic [15:0]              kdf,
  input  logic signed [IN_W-1:0]   x,
  output logic signed [OUT_W-1:0]  y
);
  localparam int AW = 80;                                        // accumulator width
  localparam logic signed [AW-1:0] I_LIM  = AW'(1) <<< (OUT_W - 1 + 32);
  localparam logic signed [AW-1:0] II_LIM = AW'(1) <<< (OUT_W - 1 + 48);

  logic signed [AW-1:0] i_acc, ii_acc1, ii_acc2, f, f_prev, p_r;
  logic signed [AW-1:0] i_nxt, ii1_nxt, ii2_nxt, f_nxt, sum;

  function automatic logic signed [AW-1:0] clamp(input logic signed [AW-1:0] v,
                                                  input logic signed [AW-1:0] lim);
    if (v > lim)  return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

  always_comb begin
    i_nxt   = clamp(i_acc + AW'(x) * AW'(ki), I_LIM);
    ii1_nxt = clamp(ii_acc1 + AW'(x) * AW'(kii), II_LIM);
    ii2_nxt = clamp(ii_acc2 + (ii_acc1 >>> 16), I_LIM);
    f_nxt   = f + (((AW'(x) <<< 16) - f) * AW'($signed({1'b0, kdf})) >>> 16);
  end

  always_ff @(posedge clk) begin
    if (rst || !lock_en) begin
      i_acc <= '0; ii_acc1 <= '0; ii_acc2 <= '0; f <= '0; f_prev <= '0; p_r <= '0;
    end else begin
      p_r     <= (AW'(x) * AW'(kp)) >>> 16;
      i_acc   <= en_i  ? i_nxt   : '0;
      ii_acc1 <= en_ii ? ii1_nxt : '0;
      ii_acc2 <= en_ii ? ii2_nxt : '0;
      f       <= en_d  ? f_nxt   : '0;
      f_prev  <= f;
    end
  end

  always_comb begin
    sum = '0;
    if (en_p)  sum += p_r;
    if (en_i)  sum += i_acc >>> 32;
    if (en_ii) sum += ii_acc2 >>> 32;
    if (en_d)  sum += ((f - f_prev) * AW'(kd)) >>> 32;
  end

  always_ff @(posedge clk) begin
    if (rst || !lock_en) y <= '0;
    else if (sum > (AW'(1) <<< (OUT_W - 1)) - 1) y <= {1'b0, {(OUT_W-1){1'b1}}};
    else if (sum < -(AW'(1) <<< (OUT_W - 1)))    y <= {1'b1, {(OUT_W-1){1'b0}}};
    else y <= OUT_W'(sum);
  end
endmodule
