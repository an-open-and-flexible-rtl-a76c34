// tb_cordic_atan2: random vectors of all quadrants and magnitudes; the angle must
// match atan2(Q, I) in 2^16-per-turn units within 3 LSB plus 2000/|v| (mod one turn), 18 clocks
// after the vector is applied.
module tb_cordic_atan2;
  logic clk = 0, rst = 1;
  logic signed [15:0] i_i, q_i, ph;
  int checks = 0, failures = 0;
  int expq [$];
  int tolq [$];
  localparam int LAT = 18;

  cordic_atan2 dut (.clk, .rst, .i_i, .q_i, .phase_o(ph));
  always #4 clk = ~clk;

  initial begin
    real a;
    int e, d, tol;
    i_i = 0; q_i = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        e = expq.pop_front();
        tol = tolq.pop_front();
        d = int'(16'(ph - 16'(e)));
        d = (d > 32767) ? d - 65536 : d;
        checks++;
        if (d > tol || d < -tol) begin
          failures++;
          if (failures < 10) $display("n=%0d ph=%0d exp=%0d", n, ph, 16'(e));
        end
      end
      do begin
        i_i = 16'($urandom); q_i = 16'($urandom);
        if (n % 4 == 1) begin i_i = i_i >>> 6; q_i = q_i >>> 6; end
        if (n % 97 == 0) begin i_i = -16'sd32768; q_i = 16'sd0; end
      end while (i_i * i_i + q_i * q_i < 400);
      a = $atan2(real'(q_i), real'(i_i)) / (2.0 * 3.14159265358979) * 65536.0;
      expq.push_back($rtoi(a + ((a < 0) ? -0.5 : 0.5)));
      // quantization of the input limits the accuracy of short vectors
      tolq.push_back(3 + $rtoi(2000.0 / $sqrt(real'(i_i) * real'(i_i) + real'(q_i) * real'(q_i))));
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
