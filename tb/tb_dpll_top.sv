// tb_dpll_top: end-to-end test of the two-channel DPLL.
//
// Channel 1 closes a real phase-locked loop: DAC 1 plays the internal VCO tone and is
// fed back to ADC 1 through a 4-clock converter delay. The reference is 27 MHz; the
// free-running VCO is set about 95 kHz above it by the output offset. Closing the
// loop (integral gain on the phase increment, i.e. proportional on phase) must pull
// the VCO onto the reference: the frequency counter (gate shortened to 2000 clocks)
// must first read the free-running offset and then ~0, and the accumulated phase
// must stay put (no cycle slip). ADC 2 carries an independent tone 1/4096 f_s above
// channel 2's reference. The test then goes through every mechanism of the design
// and counts each: lock, counter gates, the three channel-2 scenarios, lock-in gain
// measurement with the dither, a network-analyzer point taken while locked, a scope
// capture, both DAC sources and all three filter bandwidths. A mechanism that never
// happened counts as a failure.
module tb_dpll_top;
  import dpll_pkg::*;
  localparam int GATE = 2000;
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
  longint unsigned n;
  logic signed [13:0] dline [4];
  logic signed [13:0] adc1_hist [$];

  // Counts of the mechanisms exercised
  int m_lock, m_fc, m_ch2_own, m_ch2_ch1ph, m_ch2_ch1out, m_lockin, m_vna, m_scope,
      m_dac_vco, m_dac_direct, m_lpf [3];

  dpll_top #(.FC_GATE_CYCLES(GATE)) dut (
    .clk, .rst, .adc1, .adc2, .dac1, .dac2, .cfg1, .cfg2, .glob, .vna_start, .scope_arm,
    .scope_rd_addr, .scope_rd_data, .scope_full, .i1, .q1, .i2, .q2, .dph1, .dph2,
    .out1, .out2, .fc1_count(fc1), .fc2_count(fc2), .fc1_valid, .fc2_valid,
    .lockin1(li1), .lockin2(li2), .lockin1_valid(li1_valid), .lockin2_valid(li2_valid),
    .vna_i, .vna_q, .vna_busy, .vna_done);

  always #4 clk = ~clk;

  // Converters: DAC 1 back into ADC 1 after 4 clocks; ADC 2 an independent tone.
  always @(posedge clk) begin
    n <= rst ? 0 : n + 1;
    dline[0] <= dac1;
    for (int k = 1; k < 4; k++) dline[k] <= dline[k-1];
  end
  always_comb adc1 = dline[3];
  always @(negedge clk)
    adc2 = 14'($rtoi(6000.0 * $cos(6.283185307 * (0.25 + 1.0 / 4096.0) * real'(n))));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  task automatic wait_fc1(output longint c);
    @(negedge clk);
    while (!fc1_valid) @(negedge clk);
    c = fc1;
  endtask

  initial begin
    longint c, s;
    int k;
    m_lock = 0; m_fc = 0; m_ch2_own = 0; m_ch2_ch1ph = 0; m_ch2_ch1out = 0; m_lockin = 0;
    m_vna = 0; m_scope = 0; m_dac_vco = 0; m_dac_direct = 0; m_lpf = '{0, 0, 0};
    cfg1 = '0; cfg2 = '0; glob = '0;
    vna_start = 0; scope_arm = 0; scope_rd_addr = 0;
    foreach (dline[k]) dline[k] = 0;

    // channel 1: 27 MHz reference, VCO on DAC 1, free-running ~95 kHz high
    cfg1.ref_freq    = 48'(longint'(27.0 / 125.0 * 281474976710656.0));
    cfg1.lpf_sel     = LPF_3M75HZ;
    cfg1.dac_use_vco = 1;
    cfg1.out_offset  = -16'sd4457 + 16'sd100;     // 27 MHz is code 28311 = -4457 + 32768
    cfg1.ki          = -32'sh0200_0000;            // -1/128: a higher code raises d(theta)
    glob.vco_src     = 0;
    glob.vco_amp     = 16'hFFFF;
    glob.vco_dc      = 0;
    // channel 2: own input, proportional gain 2, direct DAC output
    cfg2.ref_freq    = 48'h4000_0000_0000;          // f_s/4: mixing image on the filter nulls
    cfg2.lpf_sel     = LPF_15MHZ;
    cfg2.kp          = 32'sh0002_0000;
    cfg2.en_p        = 1;
    cfg2.lock_en     = 1;
    glob.ch2_src     = CH2_OWN_PHASE;
    m_lpf[LPF_3M75HZ]++; m_lpf[LPF_15MHZ]++;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 0;

    // free-running frequency: 100 codes * 953.67 Hz = 95.4 kHz -> 100000 per gate
    repeat (300) @(negedge clk);
    wait_fc1(c); wait_fc1(c);
    check(c > 97000 && c < 103000, $sformatf("free-running count %0d", c));
    m_fc++;

    // channel 2 independent: d(theta) = 16 per sample, out2 = 2*16 = 32 (sums over 256)
    s = 0; c = 0;
    repeat (256) begin
      @(negedge clk);
      s += longint'(dph2); c += longint'(out2);
      check(dac2 == out2[15:2], "dac2 direct");
    end
    check(s > 4096 - 200 && s < 4096 + 200, $sformatf("ch2 dph sum %0d", s));
    check(c > 8192 - 400 && c < 8192 + 400, $sformatf("ch2 out sum %0d", c));
    m_ch2_own++; m_dac_direct++;

    // close loop 1
    cfg1.lock_en = 1; cfg1.en_i = 1;
    repeat (20000) @(negedge clk);
    wait_fc1(c); wait_fc1(c);
    check(c > -300 && c < 300, $sformatf("locked count %0d", c));
    s = 0;
    for (k = 0; k < 8000; k++) begin
      @(negedge clk);
      s += longint'(dph1);
    end
    check(s > -2000 && s < 2000, $sformatf("phase drift while locked %0d", s));
    if (c > -300 && c < 300 && s > -2000 && s < 2000) m_lock++;
    check(dac1 != 0, "VCO on dac1");
    m_dac_vco++;

    // VNA point while locked: stimulus into channel 1, detect channel 1 d(theta)
    glob.vna_inject = 2'b01; glob.vna_src = VNA_DPH1;
    glob.vna_freq = 48'(longint'(0.001 * 281474976710656.0));
    glob.vna_amp = 16'sd20; glob.vna_settle = 2000; glob.vna_samples = 10000;
    @(negedge clk); vna_start = 1; @(negedge clk); vna_start = 0;
    k = 0;
    while (!vna_done && k < 20000) begin @(negedge clk); k++; end
    check(k == 12000, $sformatf("vna done after %0d", k));
    check(vna_i != 0 || vna_q != 0, "vna response");
    if (vna_done) m_vna++;
    // still locked after the measurement
    repeat (1000) @(negedge clk);
    s = 0;
    repeat (4000) begin @(negedge clk); s += longint'(dph1); end
    check(s > -2000 && s < 2000, $sformatf("drift after VNA %0d", s));
    glob.vna_inject = 0;

    // scope: ADC 1 and channel 1 output
    glob.scope_sel_a = 0; glob.scope_sel_b = 2;
    @(negedge clk); scope_arm = 1; @(negedge clk); scope_arm = 0;
    adc1_hist.delete();
    repeat (64) begin @(posedge clk); adc1_hist.push_back(adc1); end
    while (!scope_full) @(negedge clk);
    for (k = 0; k < 64; k++) begin
      scope_rd_addr = 14'(k);
      @(negedge clk); @(negedge clk);
      check(scope_rd_data[15:0] == 16'(adc1_hist[k]), $sformatf("scope %0d", k));
    end
    m_scope++;

    // channel 2 on channel 1's d(theta), 31 MHz filter on channel 2's own chain
    cfg2.lpf_sel = LPF_31MHZ; m_lpf[LPF_31MHZ]++;
    glob.ch2_src = CH2_CH1_PHASE;
    for (k = 0; k < 200; k++) begin
      @(negedge clk);
      check(dut.ch2_err == dph1, "ch2 follows ch1 d(theta)");
    end
    m_ch2_ch1ph++;

    // channel 2 on channel 1's output plus a seed offset, integrating
    glob.ch2_src = CH2_CH1_OUT;
    glob.ch2_seed_offset = 16'sd4457;
    cfg2.en_p = 0; cfg2.en_i = 1; cfg2.ki = 32'sh0100_0000;
    for (k = 0; k < 200; k++) begin
      @(negedge clk);
      check(int'(dut.ch2_err) == ((int'(dut.lf1) + 4457 > 32767) ? 32767 : int'(dut.lf1) + 4457),
            "ch2 sees ch1 loop filter output + offset");
    end
    m_ch2_ch1out++;

    // lock-in on channel 1, loop open: system gain +0.5 LSB of d(theta) per code
    cfg1.lock_en = 0;
    cfg1.dither_en = 1; cfg1.dither_amp = 16'sd200; cfg1.dither_half = 2000;
    cfg1.lockin_periods = 2;
    @(negedge clk);
    while (!li1_valid) @(negedge clk);
    // gain*amp = 100 per sample, 8000 samples, minus ~50 clocks of delay per edge
    check(li1 > 100 * (8000 - 8 * 50) * 9 / 10 && li1 < 100 * 8000 * 11 / 10,
          $sformatf("lock-in %0d", li1));
    m_lockin++;

    check(m_lock > 0, "no lock");
    check(m_fc > 0, "no counter gate");
    check(m_ch2_own > 0 && m_ch2_ch1ph > 0 && m_ch2_ch1out > 0, "a channel-2 scenario missing");
    check(m_lockin > 0, "no lock-in result");
    check(m_vna > 0, "no VNA point");
    check(m_scope > 0, "no scope capture");
    check(m_dac_vco > 0 && m_dac_direct > 0, "a DAC source missing");
    check(m_lpf[0] > 0 && m_lpf[1] > 0 && m_lpf[2] > 0, "a filter bandwidth missing");
    $display("mechanisms: lock %0d, counter %0d, ch2 own/ch1-phase/ch1-out %0d/%0d/%0d, lock-in %0d, vna %0d, scope %0d, dac vco/direct %0d/%0d",
             m_lock, m_fc, m_ch2_own, m_ch2_ch1ph, m_ch2_ch1out, m_lockin, m_vna, m_scope, m_dac_vco, m_dac_direct);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
