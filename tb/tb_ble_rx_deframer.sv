// tb_ble_rx_deframer: self-checking testbench for ble_rx_deframer.
//
// Builds on-air bit sequences with the reference packet builder of ble_tb_pkg
// (the three captured packets on channel 37, then random PDUs of 1..37 payload
// bytes on random channels), pulses start where the access address ends and
// feeds the remaining bits. Checks every byte and its index, the header, that
// done comes exactly one clock after the last CRC bit, and crc_ok. A packet
// with one flipped bit must end with crc_ok = 0, and a header with a length
// above 37 must end the packet right after the header with crc_ok = 0.
`timescale 1ns/1ps
module tb_ble_rx_deframer;
  import ble_pkg::*;
  import ble_tb_pkg::*;

  logic       clk = 0, rst_n = 0, start = 0, bit_valid = 0, bit_in = 0;
  logic [5:0] channel = 37;
  logic       busy, byte_valid, done, crc_ok;
  logic [5:0] byte_idx;
  logic [7:0] byte_data;
  pdu_hdr_t   hdr;
  int checks = 0, failures = 0;

  ble_rx_deframer dut (.*);

  always #5 clk = ~clk;

  byte unsigned got[$];
  int           got_idx[$];
  always @(posedge clk) if (byte_valid) begin got.push_back(byte_data); got_idx.push_back(byte_idx); end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // feeds a packet; flip >= 0 inverts that on-air bit after the access address
  task automatic feed(input bytes_t pdu, input int ch, input int flip, input bit exp_ok,
                      input int exp_bytes);
    bits_t b = packet_bits(pdu, ch);
    bit seen_done = 0;
    bit ok_at_done = 0;
    int done_clk = -1, clk_no = 0, last_bit_clk = -1;
    got.delete(); got_idx.delete();
    channel = 6'(ch);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 40; i < b.size() && !seen_done; i++) begin
      bit_valid = 1; bit_in = b[i] ^ (i - 40 == flip);
      @(posedge clk); #1;
      last_bit_clk = clk_no;
      @(negedge clk); bit_valid = 0;
      clk_no++;
      if (done) begin seen_done = 1; ok_at_done = crc_ok; done_clk = clk_no - 1; end
      repeat ($urandom % 3) begin
        @(negedge clk);
        clk_no++;
        if (done && !seen_done) begin seen_done = 1; ok_at_done = crc_ok; done_clk = clk_no - 1; end
      end
    end
    @(posedge clk); #1;   // let the collector take a byte_valid issued with done
    check(seen_done, "done seen");
    check(done_clk == last_bit_clk, $sformatf("done one clock after last bit (%0d vs %0d)", done_clk, last_bit_clk));
    check(ok_at_done == exp_ok, $sformatf("crc_ok=%0d expected %0d", ok_at_done, exp_ok));
    check(got.size() == exp_bytes, $sformatf("byte count %0d expected %0d", got.size(), exp_bytes));
    if (flip < 0) begin
      for (int i = 0; i < got.size() && i < pdu.size(); i++) begin
        check(got[i] == pdu[i] && got_idx[i] == i, $sformatf("byte %0d = %h expected %h", i, got[i], pdu[i]));
      end
      check(hdr == {pdu[1], pdu[0]}, "header");
    end
    check(!busy, "idle after packet");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    feed(adv_ind_pdu(), 37, -1, 1, 24);
    feed(scan_req_pdu(), 37, -1, 1, 14);
    feed(scan_rsp_pdu(), 37, -1, 1, 15);
    repeat (60) begin
      bytes_t p;
      int n, ch;
      p.delete();
      n  = 1 + $urandom % 37;
      ch = $urandom % 40;
      p.push_back(8'($urandom) & 8'hCF);
      p.push_back(8'(n));
      repeat (n) p.push_back(8'($urandom));
      feed(p, ch, -1, 1, n + 2);
      feed(p, ch, 16 + ($urandom % (8 * n + 24)), 0, n + 2);   // corrupt payload or CRC
    end
    begin
      bytes_t p;
      p = '{8'h00, 8'd40, 8'h11, 8'h22, 8'h33};
      feed(p, 38, -1, 0, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
