// tb_dither: square wave with half period 5: the output must be +amp for 5 clocks
// and -amp for 5, with period_end on the last clock of the negative half and sign
// high exactly in the negative half; disabled, the output is zero.
module tb_dither;
  logic clk = 0, rst = 1, en;
  logic signed [15:0] amp, sq;
  logic [31:0] half;
  logic sgn, pend;
  int checks = 0, failures = 0;

  dither dut (.clk, .rst, .en, .amp, .half_period(half), .sq_o(sq), .sign_o(sgn), .period_end_o(pend));
  always #4 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    en = 0; amp = 16'sd1000; half = 5;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (3) begin @(negedge clk); check(sq == 0 && !pend, "disabled"); end
    en = 1; #1;
    for (int k = 0; k < 100; k++) begin
      check(sq == ((k % 10 < 5) ? 16'sd1000 : -16'sd1000), $sformatf("k=%0d sq=%0d", k, sq));
      check(sgn == (k % 10 >= 5), $sformatf("k=%0d sign", k));
      check(pend == (k % 10 == 9), $sformatf("k=%0d period_end=%0d", k, pend));
      @(negedge clk);
    end
    half = 1; en = 0; @(negedge clk); en = 1; #1;
    for (int k = 0; k < 10; k++) begin
      check(sq == ((k % 2 == 0) ? 16'sd1000 : -16'sd1000), $sformatf("h1 k=%0d sq=%0d", k, sq));
      @(negedge clk);
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
