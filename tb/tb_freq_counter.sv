// tb_freq_counter: gate shortened to 100 clocks. Random increments; each published
// count must equal the sum of exactly the 100 samples of its gate (no sample lost or
// counted twice between gates) and valid must pulse every 100 clocks.
module tb_freq_counter;
  logic clk = 0, rst = 1;
  logic signed [15:0] d;
  logic signed [63:0] cnt_o;
  logic valid;
  int checks = 0, failures = 0;
  localparam int G = 100;

  freq_counter #(.GATE_CYCLES(G)) dut (.clk, .rst, .dphase(d), .count_o(cnt_o), .valid_o(valid));
  always #4 clk = ~clk;

  initial begin
    longint sum;
    int n, last_valid;
    d = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    sum = 0; n = 0; last_valid = -1;
    for (int k = 0; k < 2000; k++) begin
      d = (k % 300 < 100) ? 16'sd123 : 16'($urandom);
      @(posedge clk);
      sum += longint'(d);
      n++;
      @(negedge clk);
      if (valid) begin
        checks++;
        if (n != G || cnt_o != sum) begin
          failures++;
          if (failures < 10) $display("k=%0d n=%0d count=%0d exp=%0d", k, n, cnt_o, sum);
        end
        if (last_valid >= 0) begin
          checks++;
          if (k - last_valid != G) failures++;
        end
        last_valid = k;
        sum = 0; n = 0;
      end
    end
    checks++;
    if (last_valid < 0) failures++;
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
