// tb_phase_diff: random phases; the 17-bit output one clock later must be the exact
// signed difference of the last two inputs.
module tb_phase_diff;
  logic clk = 0, rst = 1;
  logic signed [15:0] ph;
  logic signed [16:0] d;
  int checks = 0, failures = 0;
  int prev, cur;

  phase_diff dut (.clk, .rst, .phase_i(ph), .diff_o(d));
  always #4 clk = ~clk;

  initial begin
    ph = 0; prev = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      cur = int'(ph);
      ph = (n % 5 == 0) ? 16'sh7fff : (n % 5 == 1) ? -16'sh8000 : 16'($urandom);
      @(negedge clk);
      // after this clock: diff of ph against cur
      checks++;
      if (int'(d) != int'(ph) - cur) begin
        failures++;
        if (failures < 10) $display("d=%0d exp=%0d", d, int'(ph) - cur);
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
