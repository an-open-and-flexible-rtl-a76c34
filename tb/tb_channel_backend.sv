// tb_channel_backend: one channel closed around a model plant.
// The plant turns the channel output into a frequency error, err = f0 + g*out
// delayed by 6 clocks, with g = +1/2 or -1/2 (a plant of either sign).
// 1. Lock: integral gain only (the integral of a frequency error), loop must pull
//    the error to zero; the output must settle at -f0/g, and the frequency counter
//    (gate 1000 clocks) must report the exact sum of the errors of its gate. The
//    loop filter output port must lead the channel output by one clock.
// 2. Lock-in: loop off, dither 400 LSB; the lock-in
//    result must have the plant's sign and match g*amp*20*(64-2*7) within 5 %
//    (half period 64 clocks, 10 periods, 7 clocks of loop delay).
// 3. Offset and stimulus reach the output unchanged when the loop is off.
module tb_channel_backend;
  import dpll_pkg::*;
  logic clk = 0, rst = 1;
  chan_cfg_t cfg;
  logic signed [15:0] err, stim, out, lf, lfp;
  logic signed [63:0] fc, li;
  logic fcv, liv;
  int checks = 0, failures = 0;
  int f0, gsign;
  logic signed [15:0] hist [8];

  channel_backend #(.FC_GATE_CYCLES(1000)) dut (.clk, .rst, .cfg, .err, .stim, .out_o(out), .lf_o(lf),
    .fc_count_o(fc), .fc_valid_o(fcv), .lockin_o(li), .lockin_valid_o(liv));
  always #4 clk = ~clk;

  // plant: err = f0 + g*out(n-6)
  always @(posedge clk) begin
    for (int k = 7; k > 0; k--) hist[k] <= hist[k-1];
    hist[0] <= out;
  end
  always_comb err = 16'(f0 + gsign * (int'(hist[5]) >>> 1));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    longint s;
    int nfc;
    cfg = '0; stim = 0; f0 = 0; gsign = 1;
    foreach (hist[k]) hist[k] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;

    // 1. lock, both plant signs (the gain sign follows the plant)
    for (int pass = 0; pass < 2; pass++) begin
      gsign = pass ? -1 : 1;
      f0 = pass ? -300 : 500;
      cfg = '0;
      @(negedge clk);
      cfg.lock_en = 1; cfg.en_i = 1;
      cfg.ki = -gsign * 32'sh0400_0000;   // 1/64, negative feedback
      repeat (6000) @(negedge clk);
      lfp = lf;
      for (int k = 0; k < 100; k++) begin
        @(negedge clk);
        check(err >= -1 && err <= 1, $sformatf("pass %0d err=%0d", pass, err));
        // no offset, dither or stimulus: the output is the loop filter's, one clock on
        check(out == lfp, $sformatf("pass %0d out=%0d lf=%0d", pass, out, lfp));
        lfp = lf;
      end
      check(out >= -2 * gsign * f0 - 4 && out <= -2 * gsign * f0 + 4, $sformatf("pass %0d out=%0d", pass, out));
    end
    // frequency counter: free-running error, compare a full gate
    cfg.lock_en = 0; f0 = 77;
    s = 0; nfc = 0;
    while (!fcv) @(negedge clk);
    for (int k = 0; k < 3000; k++) begin
      @(posedge clk); s += longint'(err);
      @(negedge clk);
      if (fcv) begin
        check(fc == s, $sformatf("fc=%0d exp=%0d", fc, s));
        s = 0; nfc++;
      end
    end
    check(nfc == 3, $sformatf("fc gates %0d", nfc));

    // 2. lock-in gain and sign
    for (int pass = 0; pass < 2; pass++) begin
      gsign = pass ? -1 : 1;
      f0 = 0;
      cfg = '0;
      @(negedge clk);
      cfg.dither_en = 1; cfg.dither_amp = 400; cfg.dither_half = 64; cfg.lockin_periods = 10;
      while (!liv) @(negedge clk);
      @(negedge clk);
      while (!liv) @(negedge clk);
      // expected: g*amp = 200 per sample over 20 half periods of 64 samples, of which
      // the 7 clocks of loop delay (summer + plant) after each edge count against
      check(gsign * li > 0, $sformatf("lock-in sign %0d", li));
      check(gsign * li > 200 * 20 * 50 * 95 / 100 && gsign * li < 200 * 20 * 50 * 105 / 100,
            $sformatf("lock-in value %0d", li));
    end

    // 3. offset and stimulus
    cfg = '0; cfg.out_offset = -1234; stim = 100;
    repeat (3) @(negedge clk);
    check(out == -1134, $sformatf("offset+stim out=%0d", out));
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
