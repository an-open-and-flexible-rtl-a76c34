// tb_vco: frequency, amplitude, DC offset and clipping of the internal VCO.
// For several codes the number of rising zero crossings of the DAC word over 20000
// samples must equal 20000*u/(2*65535) within 1 (u = code read as offset binary),
// i.e. code -32768 is 0 Hz and +32767 is f_s/2. With full amplitude the peak must be
// 8000 +/- 10 (32000*65535/2^18), half amplitude halves it, a DC offset shifts the
// mean, and an offset beyond the range clips at 8191.
module tb_vco;
  logic clk = 0, rst = 1;
  logic signed [15:0] code;
  logic [15:0] amp;
  logic signed [13:0] dc, dac;
  int checks = 0, failures = 0;

  vco dut (.clk, .rst, .code, .amp, .dc, .dac_o(dac));
  always #4 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic measure(output int crossings, output int peak, output int trough, output real mean);
    logic signed [13:0] prev;
    longint sum = 0;
    repeat (40) @(negedge clk);
    crossings = 0; peak = -100000; trough = 100000;
    prev = dac;
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      if (int'(prev) - int'(dc) < 0 && int'(dac) - int'(dc) >= 0) crossings++;
      if (dac > peak) peak = dac;
      if (dac < trough) trough = dac;
      sum += longint'(dac);
      prev = dac;
    end
    mean = real'(sum) / 20000.0;
  endtask

  initial begin
    int cr, pk, tr, u;
    real mean, expc;
    code = 0; amp = 16'hFFFF; dc = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    foreach (codes[ci]) begin
      code = 16'(codes[ci]);
      u = codes[ci] + 32768;
      measure(cr, pk, tr, mean);
      expc = 20000.0 * real'(u) / 131070.0;
      check(real'(cr) >= expc - 1.0 && real'(cr) <= expc + 1.0, $sformatf("code %0d crossings %0d exp %f", codes[ci], cr, expc));
      if (u > 300 && u < 20000) check(pk >= 7990 && pk <= 8010, $sformatf("code %0d peak %0d", codes[ci], pk));
    end
    code = -16'sd32768;
    measure(cr, pk, tr, mean);
    check(cr == 0 && pk == tr, "0 Hz gives a constant");
    code = -16'sd30000; amp = 16'h8000;
    measure(cr, pk, tr, mean);
    check(pk >= 3990 && pk <= 4010, $sformatf("half amplitude peak %0d", pk));
    dc = 14'sd1000;
    measure(cr, pk, tr, mean);
    check(mean > 990.0 && mean < 1010.0, $sformatf("dc mean %f", mean));
    dc = 14'sd5000; amp = 16'hFFFF;
    measure(cr, pk, tr, mean);
    check(pk == 8191, $sformatf("clip peak %0d", pk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int codes [5] = '{-30000, -20000, 0, 10000, 32767};

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
