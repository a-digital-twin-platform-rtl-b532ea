// tb_ble_tx_framer: self-checking testbench for ble_tx_framer.
//
// Serves PDU bytes from a testbench array through the read port, starts the
// framer and samples tx_bit in the middle of every bit period. The sampled
// sequence must equal the reference on-air bits (preamble, access address,
// whitened PDU and CRC) for the three captured packets on channel 37 and for
// random PDUs on random channels. Also checks the timing: tx_bit may change
// only every SPB = 16 clocks, tx_active lasts exactly (64 + 8*pdu_len) * 16
// clocks (1 Mb/s at 16 MHz) and done pulses on the clock after it falls.
`timescale 1ns/1ps
module tb_ble_tx_framer;
  import ble_tb_pkg::*;

  logic       clk = 0, rst_n = 0, start = 0;
  logic [5:0] channel = 37, pdu_len = 0, rd_addr;
  logic [7:0] rd_data;
  logic       busy, tx_bit, tx_active, done;
  int checks = 0, failures = 0;
  byte unsigned mem[64];

  ble_tx_framer dut (.*);

  assign rd_data = mem[rd_addr];
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic send(input bytes_t pdu, input int ch);
    bits_t ref_b = packet_bits(pdu, ch);
    bits_t got;
    int active_clks = 0, t = 0, last_change = 0;
    bit prev, saw_done = 0;
    foreach (pdu[i]) mem[i] = pdu[i];
    pdu_len = 6'(pdu.size()); channel = 6'(ch);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    prev = tx_bit;
    while (tx_active) begin
      if (t % 16 == 8) got.push_back(tx_bit);
      if (tx_bit != prev) begin
        check(t % 16 == 0, $sformatf("bit edge at clock %0d", t));
        prev = tx_bit;
      end
      active_clks++; t++;
      @(negedge clk);
      if (done) saw_done = 1;
    end
    check(saw_done || done, "done after last bit");
    check(active_clks == ref_b.size() * 16, $sformatf("active %0d clocks, expected %0d", active_clks, ref_b.size() * 16));
    check(got.size() == ref_b.size(), "bit count");
    foreach (ref_b[i]) if (i < got.size()) check(got[i] == ref_b[i], $sformatf("bit %0d", i));
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(adv_ind_pdu(), 37);
    send(scan_req_pdu(), 37);
    send(scan_rsp_pdu(), 37);
    repeat (20) begin
      bytes_t p;
      int n;
      p.delete();
      n = 1 + $urandom % 37;
      p.push_back(8'($urandom));
      p.push_back(8'(n));
      repeat (n) p.push_back(8'($urandom));
      send(p, $urandom % 40);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
