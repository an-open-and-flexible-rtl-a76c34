// tb_ref_nco: checks the reference oscillator against an ideal cosine/sine.
// For several frequency words the expected phase after n clocks is n*k/2^48 turns;
// outputs are compared with 32000*cos/sin of that phase, delayed by the CORDIC
// latency, within 6 LSB. The latency itself is fixed by the comparison.
module tb_ref_nco;
  logic clk = 0, rst = 1;
  logic [47:0] freq;
  logic signed [15:0] c, s;
  int checks = 0, failures = 0;
  longint unsigned cnt;
  localparam int LAT = 18;

  ref_nco dut (.clk, .rst, .freq, .cos_o(c), .sin_o(s));
  always #4 clk = ~clk;

  always_ff @(posedge clk) if (rst) cnt <= 0; else cnt <= cnt + 1;

  task automatic run(input logic [47:0] k, input int n);
    real ph, ec, es;
    longint unsigned a;
    rst = 1; freq = k;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    repeat (n) begin
      @(negedge clk);
      if (cnt >= LAT) begin
        a  = ((cnt - LAT) * k) & 48'hFFFF_FFFF_FFFF;
        ph = 2.0 * 3.14159265358979 * real'(a) / 281474976710656.0;
        ec = 32000.0 * $cos(ph);
        es = 32000.0 * $sin(ph);
        checks++;
        if ((real'(c) - ec > 6.0) || (ec - real'(c) > 6.0) ||
            (real'(s) - es > 6.0) || (es - real'(s) > 6.0)) begin
          failures++;
          if (failures < 10) $display("nco k=%0h n=%0d cos %0d exp %f sin %0d exp %f", k, cnt, c, ec, s, es);
        end
      end
    end
  endtask

  initial begin
    run(48'h2000_0000_0000, 100);   // fs/8
    run(48'h1BA5_E353_F7CF, 300);   // ~54 MHz
    run(48'h0000_1234_5678, 100);   // very low frequency
    run(48'hF000_0000_0001, 100);   // negative frequency
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
