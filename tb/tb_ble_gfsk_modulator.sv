// tb_ble_gfsk_modulator: self-checking testbench for ble_gfsk_modulator.
//
// Measures the output frequency from the phase step between consecutive I/Q
// samples (atan2 in floating point), averaged over one bit (16 samples):
//  - idle (active low): unmodulated carrier at the 2.5 MHz IF;
//  - long runs of ones / zeros: IF + 250 kHz / IF - 250 kHz within 10 kHz;
//  - alternating bits: the Gaussian-like smoothing must keep the peak deviation
//    clearly below 250 kHz but above 100 kHz;
//  - 200 random bits: the frequency averaged over each bit time must follow,
//    within 20 kHz, a floating-point model of three cascaded 8-sample moving
//    averages of the +/-1 level scaled to 250 kHz (best alignment searched:
//    it must come out at 6 clocks for this pipeline),
//    and its sign must give back every bit;
//  - amplitude sqrt(I^2+Q^2) within 3% of 127*16 (12-bit DAC);
//  - dac_valid falls 3*8+3 clocks after active.
`timescale 1ns/1ps
module tb_ble_gfsk_modulator;
  logic               clk = 0, rst_n = 0, active = 0, bit_in = 0;
  logic signed [11:0] dac_i, dac_q;
  logic               dac_valid;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979;

  ble_gfsk_modulator dut (.*);

  always #5 clk = ~clk;

  real fq[$];      // per-sample frequency in kHz
  real prev_ph = 0.0;
  real amp_err_max = 0.0;
  bit  amp_on = 0;
  always @(posedge clk) if (rst_n) begin
    real ph, d, a;
    ph = $atan2(real'(dac_q), real'(dac_i));
    d  = ph - prev_ph;
    while (d < -PI) d += 2 * PI;
    while (d >= PI) d -= 2 * PI;
    fq.push_back(d / (2 * PI) * 16000.0);
    prev_ph = ph;
    a = $sqrt(real'(dac_i) * dac_i + real'(dac_q) * dac_q);
    if (amp_on && fabs(a - 2032.0) / 2032.0 > amp_err_max) amp_err_max = fabs(a - 2032.0) / 2032.0;
  end

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic real avg_last(input int n);
    real s = 0.0;
    for (int k = fq.size() - n; k < fq.size(); k++) s += fq[k];
    return s / n;
  endfunction

  task automatic bits(input int n, input bit v);
    repeat (n * 16) begin @(negedge clk) active = 1; bit_in = v; end
  endtask

  initial begin
    real f, fmax, fmin;
    int  t_off, t_val;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (64) @(negedge clk);
    amp_on = 1;
    f = avg_last(32);
    check(fabs(f - 2500.0) < 10.0, $sformatf("idle carrier at %0.1f kHz", f));
    check(!dac_valid, "dac_valid low when idle");
    for (int r = 0; r < 4; r++) begin
      bits(5, 1);
      f = avg_last(16);
      check(fabs(f - 2750.0) < 10.0, $sformatf("ones at %0.1f kHz", f));
      check(dac_valid, "dac_valid while active");
      bits(5, 0);
      f = avg_last(16);
      check(fabs(f - 2250.0) < 10.0, $sformatf("zeros at %0.1f kHz", f));
    end
    fq.delete();
    for (int r = 0; r < 20; r++) bits(1, r % 2);
    fmax = 0; fmin = 1e9;

    for (int k = 64; k + 16 <= fq.size(); k++) begin
      real s;
      s = 0.0;
      for (int j = 0; j < 16; j++) s += fq[k + j];
      s /= 16.0;
      if (s > fmax) fmax = s;
      if (s < fmin) fmin = s;
    end
    check(fmax - 2500.0 < 240.0 && fmax - 2500.0 > 100.0, $sformatf("alternating: peak %0.1f kHz", fmax));
    check(2500.0 - fmin < 240.0 && 2500.0 - fmin > 100.0, $sformatf("alternating: low %0.1f kHz", fmin));
    // random data against a floating-point model of the frequency shaping
    begin
      bit  rb[$];
      real lv[$], m1[$], m2[$], m3[$];
      real best_err, e, fm, fmod;
      int  best_d, n0;
      rb.delete(); lv.delete(); m1.delete(); m2.delete(); m3.delete();
      fq.delete();
      for (int i = 0; i < 200; i++) rb.push_back(1'($urandom));
      foreach (rb[i]) bits(1, rb[i]);
      for (int i = 0; i < 64; i++) lv.push_back(rb[0] ? 1.0 : -1.0);   // steady before
      foreach (rb[i]) for (int k = 0; k < 16; k++) lv.push_back(rb[i] ? 1.0 : -1.0);
      foreach (lv[n]) begin
        real a, b, c;
        a = 0; b = 0; c = 0;
        for (int k = 0; k < 8; k++) if (n - k >= 0) a += lv[n - k];
        m1.push_back(a / 8.0);
        for (int k = 0; k < 8; k++) if (n - k >= 0) b += m1[n - k];
        m2.push_back(b / 8.0);
        for (int k = 0; k < 8; k++) if (n - k >= 0) c += m2[n - k];
        m3.push_back(c / 8.0);
      end
      // model sample j (j >= 64) belongs to bit (j-64)/16; fq[n] was measured
      // n clocks after the first random bit was presented, plus a pipeline delay
      best_err = 1e18; best_d = 0;
      for (int d = 0; d < 40; d++) begin
        e = 0.0;
        for (int i = 2; i < 198; i++) begin
          fm = 0.0; fmod = 0.0;
          for (int k = 0; k < 16; k++) begin
            fm   += fq[16 * i + k + d];
            fmod += 2500.0 + 250.0 * m3[64 + 16 * i + k];
          end
          e += (fm - fmod) * (fm - fmod);
        end
        if (e < best_err) begin best_err = e; best_d = d; end
      end
      check(best_d == 6, $sformatf("shaping delay %0d clocks, expected 6", best_d));
      for (int i = 2; i < 198; i++) begin
        fm = 0.0; fmod = 0.0;
        for (int k = 0; k < 16; k++) begin
          fm   += fq[16 * i + k + best_d];
          fmod += 2500.0 + 250.0 * m3[64 + 16 * i + k];
        end
        fm /= 16.0; fmod /= 16.0;
        check(fabs(fm - fmod) < 20.0, $sformatf("bit %0d: %0.1f kHz, model %0.1f kHz", i, fm, fmod));
        // bit decision from the centred window (shaping delay of about 10 samples)
        fm = 0.0;
        for (int k = 0; k < 16; k++) fm += fq[16 * i + k + best_d + 10];
        check((fm / 16.0 > 2500.0) == rb[i], $sformatf("bit %0d decoded wrongly", i));
      end
    end
    // dac_valid tail
    @(negedge clk) active = 0;
    t_off = 0;
    while (dac_valid) begin @(negedge clk); t_off++; end
    check(t_off == 27, $sformatf("dac_valid fell %0d clocks after active", t_off));
    check(amp_err_max < 0.03, $sformatf("amplitude error %0.3f", amp_err_max));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
