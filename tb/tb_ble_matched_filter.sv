// tb_ble_matched_filter: self-checking testbench for ble_matched_filter.
//
// Input samples come from the floating-point GFSK model of ble_tb_pkg (true
// Gaussian filter, random start phase, 4-bit quantisation). The k-th out_valid
// belongs to the k-th input sample. Checks:
//  - latency: out_valid follows in_valid by exactly 3 clocks;
//  - pure tones: after the buffer has filled, a tone at IF+250 kHz gives 1 and
//    at IF-250 kHz gives 0 on every sample, with the metric of the right sign;
//  - random GFSK packets without noise, with 0 and +/-40 kHz carrier offset:
//    the decision on the last sample of each bit (window aligned with the bit)
//    equals the bit, for every bit;
//  - in_valid gaps: samples held back by idle clocks give the same decisions.
`timescale 1ns/1ps
module tb_ble_matched_filter;
  import ble_tb_pkg::*;

  logic              clk = 0, rst_n = 0, in_valid = 0;
  logic signed [3:0] adc_i = 0, adc_q = 0;
  logic              out_valid, bit_dec;
  logic signed [36:0] metric;
  int checks = 0, failures = 0;

  ble_matched_filter dut (.*);

  always #5 clk = ~clk;

  bit dec[$];
  int met_sign[$];
  always @(posedge clk) if (out_valid) begin
    dec.push_back(bit_dec);
    met_sign.push_back(metric > 0 ? 1 : (metric < 0 ? -1 : 0));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic play(ref int si[$], ref int sq[$], input bit gaps);
    dec.delete(); met_sign.delete();
    foreach (si[n]) begin
      @(negedge clk);
      in_valid = 1; adc_i = 4'(si[n]); adc_q = 4'(sq[n]);
      if (gaps && ($urandom % 3 == 0)) begin
        @(negedge clk) in_valid = 0;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
  endtask

  task automatic tone(input real f_khz, input bit exp_bit);
    int si[$], sq[$];
    real ph = 2.0 * 3.14159265 * ($urandom % 100) / 100.0;
    for (int n = 0; n < 200; n++) begin
      si.push_back(q4(6.5 * $cos(ph)));
      sq.push_back(q4(6.5 * $sin(ph)));
      ph += 2.0 * 3.14159265 * f_khz / 16000.0;
    end
    play(si, sq, 0);
    for (int n = 16; n < 200; n++) begin
      check(dec[n] == exp_bit, $sformatf("tone %0.0f kHz sample %0d", f_khz, n));
      check(met_sign[n] == (exp_bit ? 1 : -1), "metric sign");
    end
  endtask

  task automatic packet(input real cfo, input bit gaps);
    int si[$], sq[$];
    bits_t b;
    repeat (200) b.push_back(1'($urandom));
    gfsk_iq(b, 2500.0, cfo, 6.5, 0.0, 0, 0, si, sq);
    play(si, sq, gaps);
    check(dec.size() == si.size(), "one decision per sample");
    for (int i = 1; i < b.size() - 1; i++)
      check(dec[16 * i + 15] == b[i], $sformatf("cfo %0.0f bit %0d", cfo, i));
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency
    @(negedge clk) in_valid = 1;
    t0 = $time;
    @(negedge clk) in_valid = 0;
    wait (out_valid);
    t1 = $time;
    check(t1 - t0 == 25, $sformatf("latency %0d ns", t1 - t0));  // 3 clocks: 30 ns from negedge = posedge+25
    repeat (3) @(negedge clk);
    tone(2750.0, 1);
    tone(2250.0, 0);
    packet(0.0, 0);
    packet(40.0, 0);
    packet(-40.0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
