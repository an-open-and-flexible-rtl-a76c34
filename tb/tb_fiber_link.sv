// tb_fiber_link: the Doppler-cancelled fiber link, with dpll_top at its default
// parameters closing the loop through a model of the optical path.
//
// Setup as in the published demonstration: the beat note is demodulated at
// f_ref = 54 MHz, and the internal VCO, at a quiescent 27 MHz, drives an AOM that
// the light crosses twice. The model of the optics is therefore:
//   beat phase[n] = 2 * VCO phase[n - D] + drift * n + fiber noise[n]
// The VCO phase is the 48-bit phase accumulator of the VCO. D = 438 clocks
// (3.5 us) stands for the AOM's 1.5 us and the fiber's 2.0 us round-trip delay.
// The laser beat is 5 kHz away from twice the VCO's quiescent frequency. The fiber
// noise is a 2 kHz phase tone of 0.25 turn. ADC 1 samples
// 6000 * cos(2 pi * beat phase).
//
// Only the integral gain is used: ki = -2^22 (Ki = -2^-10) gives a 19 kHz
// crossover. Through the VCO, one output code moves the doubled beat by 1907 Hz.
// That is 1 LSB of d(theta) per clock. With 4 us of loop delay in total, the
// expected residual of the 2 kHz tone is about 0.10 of its open-loop size. The test checks:
//   * the correlator sees the injected tone at its true size;
//   * the locked residual tone is between 0.05 and 0.20 of it;
//   * no cycle slip: the residual phase stays within 0.1 turn of its start;
//   * the mean output code is what the 5 kHz offset requires.
// Then the built-in network analyzer measures the noise rejection for a 3 kHz
// perturbation injected at the local end, as in the published closed-loop
// measurement. It adds its stimulus to channel 1's output, which drives the VCO,
// and detects channel 1's d(theta). One point is taken locked and one with the
// loop open. Their magnitude ratio is the rejection |1/(1+L)|, which the loop
// model puts at 0.154; the test accepts 12 % either side. Both windows are
// 125000 clocks (1 ms), so the 2 kHz fiber tone and the static drift drop out.
module tb_fiber_link;
  import dpll_pkg::*;
  localparam int    D      = 438;
  localparam real   TWO48  = 281474976710656.0;
  localparam real   FS     = 125.0e6;
  localparam real   FD     = 2.0e3;        // fiber noise tone
  localparam real   AMP    = 0.25;         // turns
  localparam real   DRIFT  = 5.0e3;        // beat offset, Hz
  localparam int    NMEAS  = 125000;       // two periods of the tone
  localparam real   PI     = 3.14159265358979;

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

  dpll_top dut (
    .clk, .rst, .adc1, .adc2, .dac1, .dac2, .cfg1, .cfg2, .glob, .vna_start, .scope_arm,
    .scope_rd_addr, .scope_rd_data, .scope_full, .i1, .q1, .i2, .q2, .dph1, .dph2,
    .out1, .out2, .fc1_count(fc1), .fc2_count(fc2), .fc1_valid, .fc2_valid,
    .lockin1(li1), .lockin2(li2), .lockin1_valid(li1_valid), .lockin2_valid(li2_valid),
    .vna_i, .vna_q, .vna_busy, .vna_done);

  always #4 clk = ~clk;

  // Optical path model.
  logic [47:0] vco_hist [D];
  int          wp = 0;
  longint      n = 0;
  logic [47:0] drift_k, ref_k;
  logic [47:0] beat_ph, noise_ph;
  real         noise_turns;

  always @(posedge clk) begin
    vco_hist[wp] <= dut.u_vco.acc;
    wp <= (wp == D - 1) ? 0 : wp + 1;
    n <= n + 1;
  end

  always_comb begin
    // vco_hist[wp] is the oldest entry, D clocks old
    noise_turns = AMP * $sin(2.0 * PI * FD * real'(n) / FS);
    noise_ph    = 48'(longint'(noise_turns * TWO48));
    beat_ph     = 48'(vco_hist[wp] << 1) + 48'(drift_k * 48'(n)) + noise_ph;
    adc1        = 14'($rtoi(6000.0 * $cos(2.0 * PI * real'(beat_ph) / TWO48)));
  end
  assign adc2 = '0;

  task automatic vna_point(output real mag);
    int k;
    @(negedge clk); vna_start = 1; @(negedge clk); vna_start = 0;
    k = 0;
    while (!vna_done && k < 200000) begin @(negedge clk); k++; end
    check(vna_done, "analyzer point completes");
    mag = $sqrt(real'(vna_i) * real'(vna_i) + real'(vna_q) * real'(vna_q));
  endtask

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Residual phase of the beat against the reference, in turns, in [-0.5, 0.5).
  function automatic real resid(input logic [47:0] b, input longint t);
    logic signed [47:0] r;
    r = signed'(b - 48'(ref_k * 48'(t)));
    return real'(r) / TWO48;
  endfunction

  initial begin
    real r0, r, ci, cq, ni, nq, tone, inj, maxdev, o, expect_code, m_cl, m_ol;
    cfg1 = '0; cfg2 = '0; glob = '0;
    vna_start = 0; scope_arm = 0; scope_rd_addr = 0;
    foreach (vco_hist[k]) vco_hist[k] = '0;
    ref_k   = 48'(longint'(54.0 / 125.0 * TWO48));
    drift_k = 48'(longint'(DRIFT / FS * TWO48));
    cfg1.ref_freq    = ref_k;
    cfg1.lpf_sel     = LPF_3M75HZ;
    cfg1.dac_use_vco = 1;
    cfg1.out_offset  = -16'sd4457;           // VCO code 28311: 27 MHz
    cfg1.ki          = -32'sh0040_0000;      // -2^22
    glob.vco_src     = 1'b0;
    glob.vco_amp     = 16'hFFFF;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 0;
    repeat (2000) @(negedge clk);
    cfg1.lock_en = 1; cfg1.en_i = 1;
    repeat (60000) @(negedge clk);

    r0 = resid(beat_ph, n);
    ci = 0; cq = 0; ni = 0; nq = 0; maxdev = 0; o = 0;
    for (int k = 0; k < NMEAS; k++) begin
      @(negedge clk);
      r = resid(beat_ph, n) - r0;
      if (r >= 0.5) r -= 1.0;
      if (r < -0.5) r += 1.0;
      if (r > maxdev) maxdev = r;
      if (-r > maxdev) maxdev = -r;
      ci += r * $cos(2.0 * PI * FD * real'(n) / FS);
      cq += r * $sin(2.0 * PI * FD * real'(n) / FS);
      ni += noise_turns * $cos(2.0 * PI * FD * real'(n) / FS);
      nq += noise_turns * $sin(2.0 * PI * FD * real'(n) / FS);
      o  += real'(out1);
    end
    tone = 2.0 * $sqrt(ci * ci + cq * cq) / NMEAS;
    inj  = 2.0 * $sqrt(ni * ni + nq * nq) / NMEAS;
    o    = o / NMEAS;
    // Code that puts twice the VCO frequency 5 kHz below 54 MHz, cancelling the drift.
    expect_code = (54.0e6 - DRIFT) / 2.0 / (62.5e6 / 65535.0) - 32768.0;
    $display("injected %f turn, residual %f turn (ratio %f), max dev %f turn, mean code %f (expect %f)",
             inj, tone, tone / inj, maxdev, o, expect_code);
    check(inj > 0.99 * AMP && inj < 1.01 * AMP, "correlator measures the injected tone");
    check(tone / inj > 0.05 && tone / inj < 0.20, "fiber noise suppressed by the loop gain");
    check(maxdev < 0.1, "no cycle slip while locked");
    check(o > expect_code - 1.5 && o < expect_code + 1.5, "output holds the offset frequency");

    // noise rejection at the local end, measured with the analyzer
    glob.vna_src     = VNA_DPH1;
    glob.vna_inject  = 2'b01;
    glob.vna_freq    = 48'(longint'(3.0e3 / FS * TWO48));
    glob.vna_amp     = 16'sd50;
    glob.vna_settle  = 30000;
    glob.vna_samples = NMEAS;
    vna_point(m_cl);
    cfg1.lock_en = 0;
    vna_point(m_ol);
    $display("analyzer at 3 kHz: locked %f, open %f, rejection %f (model 0.154)",
             m_cl, m_ol, m_cl / m_ol);
    check(m_ol > 0.0 && m_cl / m_ol > 0.88 * 0.154 && m_cl / m_ol < 1.12 * 0.154,
          "closed-loop rejection measured by the analyzer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
