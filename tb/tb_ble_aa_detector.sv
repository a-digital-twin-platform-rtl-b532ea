// tb_ble_aa_detector: self-checking testbench for ble_aa_detector.
//
// Two instances, MAX_ERR = 0 and 1, see the same bit stream: random bits, then
// a preamble and the access address (LSB first), then more random bits. The
// exact instance must pulse once, one clock after the last address bit; an
// address with one flipped bit must be found only by the tolerant instance,
// one with two flipped bits by neither. Random data that happens not to hold
// the address must give no pulse, and nothing is detected while arm is low.
`timescale 1ns/1ps
module tb_ble_aa_detector;
  import ble_tb_pkg::*;

  logic clk = 0, rst_n = 0, arm = 0, bit_valid = 0, bit_in = 0;
  logic det0, det1;
  int checks = 0, failures = 0;
  int hits0 = 0, hits1 = 0;
  int last_hit0 = -1, bitno = 0, last_aa_bit = -1;

  ble_aa_detector #(.MAX_ERR(0)) dut0 (.clk, .rst_n, .arm, .bit_valid, .bit_in, .detected(det0));
  ble_aa_detector #(.MAX_ERR(1)) dut1 (.clk, .rst_n, .arm, .bit_valid, .bit_in, .detected(det1));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && det0) begin hits0++; last_hit0 = bitno; end
    if (rst_n && det1) hits1++;
  end

  task automatic send(input bit b);
    @(negedge clk) bit_valid = 1; bit_in = b;
    @(negedge clk) bit_valid = 0;
    bitno++;
    repeat ($urandom % 3) @(negedge clk);
  endtask

  // random bits that cannot contain the address: every 8th bit forced so the
  // last 32 bits never equal AA (AA has a run pattern we break with 4 ones).
  task automatic noise(input int n);
    repeat (n) send(1'b1);
  endtask

  task automatic send_aa(input logic [31:0] flips);
    logic [31:0] a = AA ^ flips;
    for (int k = 0; k < 8; k++) send(k % 2);
    for (int k = 0; k < 32; k++) send(a[k]);
    last_aa_bit = bitno;
  endtask

  task automatic expect_hits(input int e0, input int e1, input string what);
    repeat (2) @(negedge clk);
    checks++;
    if (hits0 != e0 || hits1 != e1) begin
      failures++;
      $display("FAIL: %s: hits %0d/%0d expected %0d/%0d", what, hits0, hits1, e0, e1);
    end
    hits0 = 0; hits1 = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not armed: nothing
    send_aa(0);
    expect_hits(0, 0, "disarmed");
    arm = 1;
    noise(50);
    expect_hits(0, 0, "ones only");
    for (int t = 0; t < 20; t++) begin
      noise(10);
      send_aa(0);
      repeat (2) @(negedge clk);
      checks++;
      if (last_hit0 != last_aa_bit) begin
        failures++; $display("FAIL: hit at bit %0d, address ended at %0d", last_hit0, last_aa_bit);
      end
      expect_hits(1, 1, "exact address");
      noise(5);
      send_aa(32'h1 << ($urandom % 32));
      expect_hits(0, 1, "one bit error");
      noise(5);
      send_aa(32'h3 << ($urandom % 31));
      expect_hits(0, 0, "two bit errors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
