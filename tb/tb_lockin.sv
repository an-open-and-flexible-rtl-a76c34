// tb_lockin: the detector is driven by a dither module (half period 8) and by an
// increment d = g*(+1/-1 following the square wave) + random noise. The published
// result must equal the signed sum over exactly `periods` whole periods computed by
// the testbench, and its sign must follow the sign of g.
module tb_lockin;
  import dpll_pkg::*;
  logic clk = 0, rst = 1, en;
  logic signed [15:0] d, sq;
  logic sgn, pend, valid;
  logic [15:0] periods;
  logic signed [63:0] res;
  int checks = 0, failures = 0;

  dither u_d (.clk, .rst, .en, .amp(16'sd1), .half_period(32'd8), .sq_o(sq), .sign_o(sgn), .period_end_o(pend));
  lockin dut (.clk, .rst, .en, .dphase(d), .sign(sgn), .period_end(pend), .periods, .result_o(res), .valid_o(valid));
  always #4 clk = ~clk;

  initial begin
    longint acc;
    bit running;
    int pc, g, nres;
    en = 0; d = 0; periods = 3;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    foreach (g_list[gi]) begin
      g = g_list[gi];
      en = 0; @(negedge clk); en = 1;
      running = 0; acc = 0; pc = 0; nres = 0;
      for (int k = 0; k < 400; k++) begin
        d = 16'(sgn ? -g : g) + 16'($urandom_range(0, 20)) - 16'sd10;
        @(posedge clk);
        // reference: same rule, computed from the values seen at this edge
        if (running) acc += sgn ? -longint'(d) : longint'(d);
        if (pend) begin
          if (!running) begin running = 1; acc = 0; pc = 0; end
          else begin
            pc++;
            if (pc == periods) begin
              @(negedge clk);
              checks++;
              if (!valid || res != acc) begin
                failures++;
                if (failures < 10) $display("g=%0d res=%0d exp=%0d valid=%0d", g, res, acc, valid);
              end
              checks++;
              if ((g > 0) != (res > 0)) failures++;
              nres++;
              acc = 0; pc = 0;
              continue;
            end
          end
        end
        @(negedge clk);
        checks++;
        if (valid) failures++;
      end
      checks++;
      if (nres < 3) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int g_list [3] = '{100, -57, 3};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
