// tb_dpe: the phase extractor fed with synthetic ADC tones.
// 1. Reference at f_s/4 (its mixing image at f_s/2 falls on a null of every boxcar).
//    A tone offset by f_s/8192 must give d(theta) = 8 LSB per sample (65536/8192):
//    every 16-sample sum within 128 +/- 12 and two turns (131072 +/- 40) over 16384
//    samples, for each of the three filters. The phase crosses the +/-pi branch cut
//    every 8192 samples, so this also exercises the wrap.
// 2. A tone at the reference frequency with a +pi/2 phase step: the first response
//    (first non-zero increment) must appear 23 clocks after the step reaches the
//    ADC port, and the increments
//    must add up to 16384 (a quarter turn).
module tb_dpe;
  import dpll_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [13:0] adc;
  logic [47:0] ref_freq;
  lpf_sel_e lpf_sel;
  logic signed [15:0] i_o, q_o, dph;
  int checks = 0, failures = 0;
  longint unsigned n;
  real f_in, ph0;
  localparam real TWO_PI = 6.283185307179586;

  dpe dut (.clk, .rst, .adc, .ref_freq, .lpf_sel, .i_o, .q_o, .dphase_o(dph));
  always #4 clk = ~clk;

  // ADC model: 8000 * cos(2 pi f_in n + ph0), updated after each clock edge.
  always @(posedge clk) begin
    if (rst) n <= 0; else n <= n + 1;
  end
  always @(negedge clk) adc = 14'($rtoi(8000.0 * $cos(TWO_PI * f_in * real'(n) + ph0)));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic reset_dut();
    rst = 1; repeat (3) @(posedge clk); #1 rst = 0;
  endtask

  initial begin
    longint sum, blk;
    int first;
    ref_freq = 48'h4000_0000_0000;            // f_s / 4
    ph0 = 0.0;
    // 1. frequency offset
    for (int m = 0; m < 3; m++) begin
      lpf_sel = lpf_sel_e'(m);
      f_in = 0.25 + 1.0 / 8192.0;
      reset_dut();
      repeat (100) @(negedge clk);
      sum = 0;
      blk = 0;
      for (int k = 0; k < 16384; k++) begin
        @(negedge clk);
        sum += longint'(dph);
        blk += longint'(dph);
        if (k % 16 == 15) begin
          check(blk >= 128 - 12 && blk <= 128 + 12, $sformatf("sel %0d 16-sample sum=%0d", m, blk));
          blk = 0;
        end
      end
      check(sum >= 2 * 65536 - 40 && sum <= 2 * 65536 + 40, $sformatf("sel %0d sum=%0d", m, sum));
    end
    // 2. phase step, latency
    lpf_sel = LPF_15MHZ;
    f_in = 0.25;
    reset_dut();
    repeat (200) @(negedge clk);
    for (int k = 0; k < 50; k++) begin
      @(negedge clk);
      check(dph >= -2 && dph <= 2, $sformatf("idle dph=%0d", dph));
    end
    @(posedge clk); #1;
    ph0 = TWO_PI / 4.0;   // the ADC port shows the step from the next negedge
    @(negedge clk);       // step now at the ADC port; it is sampled at the next edge
    first = -1; sum = 0;
    for (int k = 1; k <= 60; k++) begin
      @(negedge clk);
      sum += longint'(dph);
      if (first < 0 && dph != 0) first = k;
    end
    check(first == 23, $sformatf("latency %0d", first));
    check(sum >= 16384 - 40 && sum <= 16384 + 40, $sformatf("step sum %0d", sum));
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
