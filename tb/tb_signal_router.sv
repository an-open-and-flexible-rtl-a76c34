// tb_signal_router: every select value of every multiplexer with random data; each
// output must carry the source chosen, channel 1's loop filter output plus the seed offset
// must saturate, and each DAC must take the 14 MSBs of its channel or the VCO word.
module tb_signal_router;
  import dpll_pkg::*;
  ch2_src_e ch2_src;
  vna_src_e vna_src;
  logic vco_src, u1, u2;
  logic signed [15:0] seed, dph1, dph2, lf1, out1, out2, ch2_err, vna_x, vco_code;
  logic signed [13:0] adc1, adc2, vco_dac, dac1, dac2;
  int checks = 0, failures = 0;

  signal_router dut (.ch2_src, .seed_offset(seed), .vna_src, .vco_src, .dac1_use_vco(u1),
    .dac2_use_vco(u2), .adc1, .adc2, .dph1, .dph2, .lf1, .out1, .out2, .vco_dac, .ch2_err, .vna_x,
    .vco_code, .dac1, .dac2);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    int e;
    for (int k = 0; k < 500; k++) begin
      {adc1, adc2, vco_dac} = {14'($urandom), 14'($urandom), 14'($urandom)};
      {dph1, dph2, lf1, out1, out2, seed} = {16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom), 16'($urandom)};
      ch2_src = ch2_src_e'(k % 3);
      vna_src = vna_src_e'(k % 4);
      {vco_src, u1, u2} = 3'(k);
      #1;
      e = int'(lf1) + int'(seed);
      e = (e > 32767) ? 32767 : (e < -32768) ? -32768 : e;
      check(ch2_err == ((k % 3 == 0) ? dph2 : (k % 3 == 1) ? dph1 : 16'(e)), $sformatf("ch2 sel %0d", k % 3));
      check(vna_x == ((k % 4 == 0) ? 16'(adc1) : (k % 4 == 1) ? 16'(adc2) : (k % 4 == 2) ? dph1 : dph2),
            $sformatf("vna sel %0d", k % 4));
      check(vco_code == (vco_src ? out2 : out1), "vco sel");
      check(dac1 == (u1 ? vco_dac : out1[15:2]), "dac1");
      check(dac2 == (u2 ? vco_dac : out2[15:2]), "dac2");
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
