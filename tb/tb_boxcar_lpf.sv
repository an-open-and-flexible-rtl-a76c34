// tb_boxcar_lpf: random input; for each bandwidth setting the output after clock n
// must equal the floor average of the inputs taken at clocks n-1 .. n-L, L = 2, 4, 16.
module tb_boxcar_lpf;
  import dpll_pkg::*;
  logic clk = 0, rst = 1;
  lpf_sel_e sel;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;
  longint hist [$];

  boxcar_lpf dut (.clk, .rst, .sel, .x, .y);
  always #4 clk = ~clk;

  always @(posedge clk) if (!rst) hist.push_front(longint'(x));

  initial begin
    int L, sh;
    longint sum;
    x = 0; sel = LPF_31MHZ;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int m = 0; m < 3; m++) begin
      sel = lpf_sel_e'(m);
      L  = (m == 0) ? 2 : (m == 1) ? 4 : 16;
      sh = (m == 0) ? 1 : (m == 1) ? 2 : 4;
      for (int n = 0; n < 500; n++) begin
        @(negedge clk);
        if (n > 20) begin
          sum = 0;
          for (int k = 1; k <= L; k++) sum += hist[k];
          checks++;
          if (y != 16'(sum >>> sh)) begin
            failures++;
            if (failures < 10) $display("sel=%0d y=%0d exp=%0d", m, y, sum >>> sh);
          end
        end
        x = (n % 50 < 25) ? 16'($urandom) : ((n % 3 == 0) ? 16'sh7fff : -16'sh8000);
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
