// tb_output_sum: random and extreme terms; the output one clock later must be the
// four-term sum clipped to [-32768, 32767].
module tb_output_sum;
  logic clk = 0, rst = 1;
  logic signed [15:0] a, b, c, e, y;
  int checks = 0, failures = 0;
  longint s;

  output_sum dut (.clk, .rst, .lf(a), .offset(b), .dith(c), .stim(e), .y);
  always #4 clk = ~clk;

  initial begin
    a = 0; b = 0; c = 0; e = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 2000; k++) begin
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom); e = 16'($urandom);
      if (k % 3 == 0) begin a = a >>> 4; b = b >>> 4; c = c >>> 4; e = e >>> 4; end
      s = longint'(a) + longint'(b) + longint'(c) + longint'(e);
      s = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
      @(negedge clk);
      checks++;
      if (y != 16'(s)) begin
        failures++;
        if (failures < 10) $display("y=%0d exp=%0d", y, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
