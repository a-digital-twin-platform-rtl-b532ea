// tb_ble_clock_recovery: self-checking testbench for ble_clock_recovery.
//
// Drives per-sample decision streams made from random bits at 16 samples per
// bit, with a random start offset. To imitate a free-running (crystal-free)
// sample clock, some runs stretch or shrink one bit in every 25 by a sample
// (+/-2500 ppm). Starting at the first 0->1 transition, every bit must be
// recovered exactly once and in order. A long run without transitions must
// still give one bit every 16 samples (the rate check), and bit_valid must
// come one clock after the in_valid of the sample taken.
`timescale 1ns/1ps
module tb_ble_clock_recovery;
  logic clk = 0, rst_n = 0, in_valid = 0, bit_dec = 0;
  logic bit_valid, bit_out;
  int checks = 0, failures = 0;

  ble_clock_recovery dut (.*);

  always #5 clk = ~clk;

  bit got[$];
  int got_t[$];
  int sample_no = 0;
  bit collecting = 0;
  always @(posedge clk) if (bit_valid && collecting) begin got.push_back(bit_out); got_t.push_back(sample_no); end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic sample(input bit d);
    @(negedge clk) in_valid = 1; bit_dec = d;
    @(posedge clk); #1;
    sample_no++;
    if ($urandom % 4 == 0) begin @(negedge clk) in_valid = 0; end
  endtask

  task automatic run(input int drift);
    bit b[$];
    int len;
    got.delete(); got_t.delete();
    // settle on zeros, then random bits starting with 1
    collecting = 0;
    repeat (20 + $urandom % 16) sample(0);
    b.push_back(1);
    repeat (300) b.push_back(1'($urandom));
    @(negedge clk) in_valid = 0;
    repeat (2) @(negedge clk);
    collecting = 1;
    foreach (b[i]) begin
      len = 16;
      if (drift != 0 && i % 25 == 12) len += drift;
      repeat (len) sample(b[i]);
    end
    @(negedge clk) in_valid = 0;
    collecting = 0;
    repeat (2) @(negedge clk);
    // the final bit is followed by nothing, so it may or may not be taken
    check(got.size() >= b.size() - 1 && got.size() <= b.size(),
          $sformatf("drift %0d: %0d bits recovered of %0d", drift, got.size(), b.size()));
    for (int i = 0; i < b.size() - 1 && i < got.size(); i++)
      check(got[i] == b[i], $sformatf("drift %0d bit %0d", drift, i));
  endtask

  initial begin
    int t_start;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    run(-1);
    // rate: a 1 after zeros, then 40 bit times of ones
    got.delete(); got_t.delete();
    repeat (10) sample(0);
    @(negedge clk) in_valid = 0;
    repeat (2) @(negedge clk);
    collecting = 1;
    t_start = sample_no;
    repeat (16 * 40) sample(1);
    collecting = 0;
    check(got.size() == 40, $sformatf("%0d bits in 40 bit times", got.size()));
    for (int i = 1; i < got.size(); i++)
      check(got_t[i] - got_t[i-1] == 16, "one bit every 16 samples");
    check(got_t[0] - t_start == 8, $sformatf("first bit taken %0d samples after the transition", got_t[0] - t_start));
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
