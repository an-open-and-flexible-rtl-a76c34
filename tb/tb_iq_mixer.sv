// tb_iq_mixer: random samples and reference values; I = x*cos/2^13 and
// Q = -x*sin/2^13 (floor, saturated to 16 bits) must appear one clock later.
module tb_iq_mixer;
  logic clk = 0, rst = 1;
  logic signed [13:0] x;
  logic signed [15:0] c, s, i_o, q_o;
  int checks = 0, failures = 0;
  longint ei, eq;

  iq_mixer dut (.clk, .rst, .x, .cos_i(c), .sin_i(s), .i_o, .q_o);
  always #4 clk = ~clk;

  function automatic longint fl_sat(longint p);
    longint v = p >>> 13;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  initial begin
    x = 0; c = 0; s = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      x = 14'($urandom); c = 16'($urandom); s = 16'($urandom);
      if (n % 7 == 0) begin x = -14'sd8192; c = -16'sd32768; s = -16'sd32768; end
      ei = fl_sat(longint'(x) * longint'(c));
      eq = fl_sat(-(longint'(x) * longint'(s)));
      @(negedge clk);
      checks++;
      if (i_o != 16'(ei) || q_o != 16'(eq)) begin
        failures++;
        if (failures < 10) $display("x=%0d c=%0d s=%0d I=%0d/%0d Q=%0d/%0d", x, c, s, i_o, ei, q_o, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
