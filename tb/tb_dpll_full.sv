// tb_dpll_full: one complete lock operation of dpll_top at its default parameters
// (frequency-counter gate 1 s, scope depth 16384).
// DAC 1 plays the internal VCO, fed back to ADC 1 after 4 clocks; the reference is
// 27 MHz and the VCO starts about 95 kHz high. The loop is closed and must settle:
// the accumulated phase over 8000 samples must stay within 2000 LSB (0.03 turn),
// and the loop output must hold the VCO at the code of 27 MHz (-4457 within 2).
// A network-analyzer point is then taken on the locked loop and a full 16384-sample
// scope capture of ADC 1 is read back and compared. The 1 s counter gate is not
// reached in this run (125 million clocks).
module tb_dpll_full;
  import dpll_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [13:0] adc1, adc2, dac1, dac2;
  chan_cfg_t cfg1, cfg2;
  glob_cfg_t glob;
  logic vna_start, scope_arm, scope_full, fc1_valid, fc2_valid, li1_valid, li2_valid, vna_busy, vna_done;
  logic [13:0] scope_rd_addr;
  logic [31:0] scope_rd_data;
  logic signed [15:0] i1, q1, i2, q2, dph1, dph2, out1, out2;
  logic signed [63:0] fc1, fc2, li1, li2, vna_i, vna_q;
  int checks = 0, failures = 0;
  logic signed [13:0] dline [4];
  logic signed [13:0] adc1_hist [$];

  dpll_top dut (
    .clk, .rst, .adc1, .adc2, .dac1, .dac2, .cfg1, .cfg2, .glob, .vna_start, .scope_arm,
    .scope_rd_addr, .scope_rd_data, .scope_full, .i1, .q1, .i2, .q2, .dph1, .dph2,
    .out1, .out2, .fc1_count(fc1), .fc2_count(fc2), .fc1_valid, .fc2_valid,
    .lockin1(li1), .lockin2(li2), .lockin1_valid(li1_valid), .lockin2_valid(li2_valid),
    .vna_i, .vna_q, .vna_busy, .vna_done);

  always #4 clk = ~clk;

  always @(posedge clk) begin
    dline[0] <= dac1;
    for (int k = 1; k < 4; k++) dline[k] <= dline[k-1];
  end
  always_comb adc1 = dline[3];
  assign adc2 = '0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  initial begin
    longint s, o;
    int k;
    cfg1 = '0; cfg2 = '0; glob = '0;
    vna_start = 0; scope_arm = 0; scope_rd_addr = 0;
    foreach (dline[k]) dline[k] = 0;
    cfg1.ref_freq    = 48'(longint'(27.0 / 125.0 * 281474976710656.0));
    cfg1.lpf_sel     = LPF_3M75HZ;
    cfg1.dac_use_vco = 1;
    cfg1.out_offset  = -16'sd4457 + 16'sd100;
    cfg1.ki          = -32'sh0200_0000;
    glob.vco_amp     = 16'hFFFF;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (2000) @(negedge clk);
    cfg1.lock_en = 1; cfg1.en_i = 1;
    repeat (20000) @(negedge clk);
    s = 0; o = 0;
    for (k = 0; k < 8000; k++) begin
      @(negedge clk);
      s += longint'(dph1);
      o += longint'(out1);
    end
    check(s > -2000 && s < 2000, $sformatf("phase drift while locked %0d", s));
    // VCO code of 27 MHz is 28311 = -4457 + 32768; out1 holds it on average
    check(o / 8000 >= -4459 && o / 8000 <= -4455, $sformatf("mean output %0d", o / 8000));
    check(fc1_valid == 0, "no gate completes in this run");

    glob.vna_inject = 2'b01; glob.vna_src = VNA_DPH1;
    glob.vna_freq = 48'(longint'(0.001 * 281474976710656.0));
    glob.vna_amp = 16'sd20; glob.vna_settle = 2000; glob.vna_samples = 10000;
    @(negedge clk); vna_start = 1; @(negedge clk); vna_start = 0;
    k = 0;
    while (!vna_done && k < 20000) begin @(negedge clk); k++; end
    check(k == 12000, $sformatf("vna done after %0d", k));
    check(vna_i != 0 || vna_q != 0, "vna response");
    glob.vna_inject = 0;

    glob.scope_sel_a = 0; glob.scope_sel_b = 1;
    @(negedge clk); scope_arm = 1; @(negedge clk); scope_arm = 0;
    repeat (16384) begin @(posedge clk); adc1_hist.push_back(adc1); end
    while (!scope_full) @(negedge clk);
    for (k = 0; k < 16384; k += 7) begin
      scope_rd_addr = 14'(k);
      @(negedge clk); @(negedge clk);
      check(scope_rd_data[15:0] == 16'(adc1_hist[k]), $sformatf("scope %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
