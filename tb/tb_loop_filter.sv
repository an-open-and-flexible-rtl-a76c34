// tb_loop_filter: directed and random checks of the PII^2D controller.
// Directed: proportional gain 3; integrator ramp (Ki = 1/4 on x = 8 gives +2 per
// sample); double integrator (a constant input gives a parabola); derivative of a
// step through the roll-off filter (alpha = 1/2 halves each sample); output
// saturation; anti-windup (after a long saturation the output must leave the rail
// within 40 samples of the error changing sign); lock_en low clears everything.
// Random: all branches enabled with random gains and inputs, compared every clock
// with a reference model of the documented equations in 128-bit arithmetic,
// including the two-clock latency.
module tb_loop_filter;
  import dpll_pkg::*;
  logic clk = 0, rst = 1;
  logic lock_en, en_p, en_i, en_ii, en_d;
  logic signed [31:0] kp, ki, kii, kd;
  logic [15:0] kdf;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;

  loop_filter dut (.clk, .rst, .lock_en, .en_p, .en_i, .en_ii, .en_d, .kp, .ki, .kii, .kd,
                   .kdf, .x, .y);
  always #4 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic setup(input bit p, i, ii, d);
    @(negedge clk);
    lock_en = 0; x = 0;
    @(negedge clk);
    {en_p, en_i, en_ii, en_d} = {p, i, ii, d};
    lock_en = 1;
  endtask

  // Reference model state
  typedef logic signed [127:0] w_t;
  w_t mi, m1, m2, mf, mfp, mp, msum;
  function automatic w_t clampw(w_t v, w_t lim);
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  initial begin
    int exp_v;
    logic signed [15:0] yq [$];
    {lock_en, en_p, en_i, en_ii, en_d} = 0;
    kp = 0; ki = 0; kii = 0; kd = 0; kdf = 0; x = 0;
    repeat (3) @(posedge clk);
    #1 rst = 0;

    // proportional
    kp = 3 <<< 16;
    setup(1, 0, 0, 0);
    x = 100;
    @(negedge clk); check(y == 0, "P latency 1");
    @(negedge clk); check(y == 300, $sformatf("P y=%0d", y));
    x = -1234;
    repeat (2) @(negedge clk); check(y == -3702, $sformatf("P neg y=%0d", y));
    // saturation
    x = 20000;
    repeat (2) @(negedge clk); check(y == 32767, $sformatf("P sat y=%0d", y));
    x = -20000;
    repeat (2) @(negedge clk); check(y == -32768, $sformatf("P sat- y=%0d", y));

    // integrator ramp
    ki = 32'sh4000_0000;    // 1/4
    setup(0, 1, 0, 0);
    x = 8;
    @(negedge clk);
    for (int k = 1; k <= 100; k++) begin
      @(negedge clk);
      check(y == 2 * k, $sformatf("I k=%0d y=%0d", k, y));
    end
    // anti-windup: saturate for a long time, then reverse
    x = 30000;
    repeat (5000) @(negedge clk);
    check(y == 32767, $sformatf("I sat y=%0d", y));
    x = -30000;
    begin
      int k = 0;
      while (y == 32767 && k < 1000) begin @(negedge clk); k++; end
      check(k <= 40, $sformatf("windup release after %0d", k));
    end
    // lock_en low clears
    lock_en = 0;
    @(negedge clk); check(y == 0, "lock off");

    // double integrator: Kii = 2^30 in 2^-48 units, x = 1024
    kii = 32'sh4000_0000;
    setup(0, 0, 1, 0);
    x = 1024;
    for (int k = 1; k <= 400; k++) begin
      @(negedge clk);
      // acc1 after m updates = 2^40*m; acc2 adds acc1>>16 from the previous
      // clock: after m updates acc2 = 2^24*m(m-1)/2; y after clock k = acc2(k-1)>>32
      exp_v = (k >= 2) ? int'((longint'(1 << 23) * longint'(k - 1) * longint'(k - 2)) >>> 32) : 0;
      check(y == 16'(exp_v), $sformatf("II k=%0d y=%0d exp=%0d", k, y, exp_v));
    end

    // derivative with roll-off alpha = 1/2, Kd = 1
    kd = 32'sh0001_0000; kdf = 16'h8000;
    setup(0, 0, 0, 1);
    x = 0;
    repeat (3) @(negedge clk);
    x = 1024;
    @(negedge clk);
    @(negedge clk);
    check(y == 512, $sformatf("D1 y=%0d", y));
    @(negedge clk); check(y == 256, $sformatf("D2 y=%0d", y));
    @(negedge clk); check(y == 128, $sformatf("D3 y=%0d", y));

    // random, all branches, against the model
    kp = 32'($urandom_range(0, 1 << 17)) - (1 << 16);
    ki = 32'($urandom_range(0, 1 << 26));
    kii = 32'($urandom_range(0, 1 << 22));
    kd = 32'($urandom_range(0, 1 << 17));
    kdf = 16'($urandom_range(1000, 60000));
    setup(1, 1, 1, 1);
    mi = 0; m1 = 0; m2 = 0; mf = 0; mfp = 0; mp = 0;
    yq = {16'sd0};
    for (int k = 0; k < 3000; k++) begin
      x = 16'($urandom_range(0, 2000)) - 16'sd1000;
      @(posedge clk);
      // output after this edge is built from the state before it
      msum = mp + (mi >>> 32) + (m2 >>> 32) + (((mf - mfp) * w_t'(kd)) >>> 32);
      msum = (msum > 32767) ? 32767 : (msum < -32768) ? -32768 : msum;
      yq.push_back(16'(msum));
      mp  = (w_t'(x) * w_t'(kp)) >>> 16;
      m2  = clampw(m2 + (m1 >>> 16), w_t'(1) <<< 47);
      mi  = clampw(mi + w_t'(x) * w_t'(ki), w_t'(1) <<< 47);
      m1  = clampw(m1 + w_t'(x) * w_t'(kii), w_t'(1) <<< 63);
      mfp = mf;
      mf  = mf + ((((w_t'(x) <<< 16) - mf) * w_t'($signed({1'b0, kdf}))) >>> 16);
      @(negedge clk);
      void'(yq.pop_front());
      check(y == yq[0], $sformatf("rand k=%0d y=%0d exp=%0d", k, y, yq[0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
