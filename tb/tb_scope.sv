// tb_scope: a small memory (DEPTH 64). Test points carry distinct counters; after
// an arm pulse the memory must hold 64 consecutive samples of the two selected test
// points (A low, B high), full must rise exactly 65 clocks after arm, and samples
// taken after the capture must not overwrite it. Repeated with other selections.
module tb_scope;
  logic clk = 0, rst = 1, arm, full;
  logic signed [15:0] tp [6];
  logic [2:0] sa, sb;
  logic [5:0] ra;
  logic [31:0] rd;
  int checks = 0, failures = 0;
  logic [15:0] t;

  scope #(.DEPTH(64)) dut (.clk, .rst, .tp, .sel_a(sa), .sel_b(sb), .arm, .rd_addr(ra), .rd_data(rd), .full_o(full));
  always #4 clk = ~clk;

  always @(posedge clk) t <= rst ? 16'd0 : t + 1;
  always_comb for (int k = 0; k < 6; k++) tp[k] = 16'(t * (k + 1) + k * 1000);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    logic [15:0] t0;
    int wait_c;
    arm = 0; sa = 0; sb = 1; ra = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int pass = 0; pass < 3; pass++) begin
      sa = 3'(pass * 2); sb = 3'(pass + 3);
      repeat (5) @(negedge clk);
      arm = 1;
      @(negedge clk); arm = 0;
      t0 = t;   // first captured sample is taken at the next edge, with counter t0
      wait_c = 1;
      while (!full && wait_c < 200) begin @(negedge clk); wait_c++; end
      check(wait_c == 65, $sformatf("full after %0d", wait_c));
      repeat (20) @(negedge clk);
      for (int a = 0; a < 64; a++) begin
        ra = 6'(a);
        @(negedge clk);
        check(rd[15:0] == 16'((t0 + a) * (sa + 1) + sa * 1000) &&
              rd[31:16] == 16'((t0 + a) * (sb + 1) + sb * 1000),
              $sformatf("pass %0d addr %0d data %h", pass, a, rd));
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
