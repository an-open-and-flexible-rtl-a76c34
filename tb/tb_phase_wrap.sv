// tb_phase_wrap: all 17-bit inputs in a sweep plus random ones; the output one clock
// later must be the input moved by a whole turn (65536) into [-32768, 32767].
module tb_phase_wrap;
  logic clk = 0, rst = 1;
  logic signed [16:0] di;
  logic signed [15:0] dout;
  int checks = 0, failures = 0;
  int e;

  phase_wrap dut (.clk, .rst, .d_i(di), .d_o(dout));
  always #4 clk = ~clk;

  initial begin
    di = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int v = -65536; v < 65536; v += 97) begin
      @(negedge clk);
      di = 17'(v);
      e = v;
      if (e >= 32768) e -= 65536;
      if (e < -32768) e += 65536;
      @(negedge clk);
      checks++;
      if (int'(dout) != e) begin
        failures++;
        if (failures < 10) $display("in=%0d out=%0d exp=%0d", v, dout, e);
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
