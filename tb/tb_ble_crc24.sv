// tb_ble_crc24: self-checking testbench for ble_crc24.
//
// Feeds the three captured advertising PDUs and compares the CRC register with
// the sniffer's printed CRC values (bit-reversed, see ble_tb_pkg), then feeds
// 200 random PDUs and compares with the long-division reference crc_ref. Also
// checks that init restores the seed and that idle clocks (bit_en low) keep
// the register. One bit per clock; the CRC is valid the clock after the last bit.
`timescale 1ns/1ps
module tb_ble_crc24;
  import ble_tb_pkg::*;

  logic        clk = 0, rst_n = 0, init = 0, bit_en = 0, bit_in = 0;
  logic [23:0] crc;
  int checks = 0, failures = 0;

  ble_crc24 dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_pdu(input bytes_t pdu, output logic [23:0] r);
    bits_t b = bytes_to_bits(pdu);
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    foreach (b[i]) begin
      bit_en = 1; bit_in = b[i];
      @(negedge clk);
      if ((i % 7) == 3) begin bit_en = 0; bit_in = ~bit_in; @(negedge clk); end  // idle gap
    end
    bit_en = 0;
    r = crc;
  endtask

  initial begin
    logic [23:0] r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(crc == 24'h555555, "seed after reset");
    run_pdu(adv_ind_pdu(), r);
    check(r == bitrev24(SNIFF_CRC_ADV), $sformatf("ADV_IND crc %h", r));
    run_pdu(scan_req_pdu(), r);
    check(r == bitrev24(SNIFF_CRC_REQ), $sformatf("SCAN_REQ crc %h", r));
    run_pdu(scan_rsp_pdu(), r);
    check(r == bitrev24(SNIFF_CRC_RSP), $sformatf("SCAN_RSP crc %h", r));
    check(crc_ref(adv_ind_pdu()) == bitrev24(SNIFF_CRC_ADV), "reference model vs sniffer");
    repeat (200) begin
      bytes_t p;
      int n;
      p.delete();
      n = 3 + $urandom % 37;
      repeat (n) p.push_back(8'($urandom));
      run_pdu(p, r);
      check(r == crc_ref(p), $sformatf("random pdu len %0d: %h vs %h", n, r, crc_ref(p)));
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
