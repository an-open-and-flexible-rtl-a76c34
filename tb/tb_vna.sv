// tb_vna: the stimulus is looped back through a model system with gain 1/2 and a
// delay of D clocks (sign inverted in a second run). For each test frequency the
// detected response (acc_i, acc_q) must have half the reference magnitude within
// 3 % and the phase -2*pi*f*D (plus pi when inverted) within 0.03 rad, relative to
// the stimulus phase (measured by a run with D = 0 and gain 1). The reference run's
// magnitude must be 7812.5*32000*N/2 within 3 %. done must arrive settle + N + 1
// clocks after start, and the stimulus must be zero outside a measurement.
module tb_vna;
  import dpll_pkg::*;
  logic clk = 0, rst = 1, start, busy, done;
  logic [47:0] freq;
  logic signed [15:0] amp, x, stim;
  logic [31:0] samples, settle;
  logic signed [63:0] ai, aq;
  int checks = 0, failures = 0;
  int D, gsgn;
  logic signed [15:0] line [64];

  vna dut (.clk, .rst, .start, .freq, .amp, .settle, .samples, .x, .stim_o(stim), .busy_o(busy),
           .acc_i_o(ai), .acc_q_o(aq), .done_o(done));
  always #4 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 63; k > 0; k--) line[k] <= line[k-1];
    line[0] <= stim;
  end
  always_comb x = (D == 0) ? 16'(gsgn * int'(stim)) : 16'(gsgn * (int'(line[D-1]) >>> 1));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic measure(output real mag, output real ph);
    int cyc = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == int'(samples + settle), $sformatf("done after %0d", cyc));
    mag = $sqrt(real'(ai) * real'(ai) + real'(aq) * real'(aq));
    ph  = $atan2(real'(aq), real'(ai));
    repeat (3) @(negedge clk);
    check(stim == 0, "stimulus idle");
  endtask

  function automatic real wrap(real a);
    while (a > 3.14159265) a -= 6.2831853;
    while (a < -3.14159265) a += 6.2831853;
    return a;
  endfunction

  initial begin
    real m0, p0, m1, p1, f, expect_ph;
    start = 0; amp = 16'sd8000; samples = 4096; settle = 100;
    foreach (line[k]) line[k] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    foreach (flist[fi]) begin
      f = flist[fi];
      freq = 48'(longint'(f * 281474976710656.0));
      D = 0; gsgn = 1;
      measure(m0, p0);
      // x = stim = amp/32768 * 32000 sin: |sum x*cos| ~ (8000*32000/32768) * 32000 * N / 2
      check(m0 > 7812.5 * 32000.0 * 4096.0 / 2.0 * 0.97 && m0 < 7812.5 * 32000.0 * 4096.0 / 2.0 * 1.03,
            $sformatf("ref mag %f", m0));
      for (int inv = 0; inv < 2; inv++) begin
        D = 20; gsgn = inv ? -1 : 1;
        measure(m1, p1);
        expect_ph = wrap(-6.2831853 * f * real'(D) + (inv ? 3.14159265 : 0.0));
        check(m1 / m0 > 0.485 && m1 / m0 < 0.515, $sformatf("f=%f mag ratio %f", f, m1 / m0));
        check(wrap(p1 - p0 - expect_ph) < 0.03 && wrap(p1 - p0 - expect_ph) > -0.03,
              $sformatf("f=%f phase %f exp %f", f, wrap(p1 - p0), expect_ph));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real flist [3] = '{0.01, 0.0625, 0.2};

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
