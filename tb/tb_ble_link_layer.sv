// tb_ble_link_layer: self-checking testbench for ble_link_layer.
//
// The framer and the receive chain are replaced by testbench processes: a
// framer model reads each PDU through tx_rd_addr/tx_rd_data when tx_start
// comes and answers with tx_done some time later; received packets are
// injected as byte streams with rx_busy, rx_byte_* and rx_done/rx_crc_ok.
// Timing parameters are shortened (T_IFS 10 us, listen 20 us, interval 50 us)
// so that many events fit. Checks:
//  - ADV_IND bytes equal the captured advertising PDU, channels cycle 37, 38,
//    39, and the interval after 39 lasts 50 us;
//  - rx_arm is high only while listening, never while transmitting;
//  - a SCAN_REQ to this AdvA with a good CRC is answered with the captured
//    SCAN_RSP exactly T_IFS after rx_done, on the same channel, the ScanA is
//    reported and counted;
//  - a request to another address, or with a bad CRC, is not answered.
`timescale 1ns/1ps
module tb_ble_link_layer;
  import ble_tb_pkg::*;

  localparam int T_IFS = 10, LISTEN = 20, INTERVAL = 50;

  logic        clk = 0, rst_n = 0, enable = 0;
  logic [47:0] adv_addr = ADV_ADDR;
  logic [5:0]  adv_data_len = 16, rsp_data_len = 7;
  logic        cfg_we = 0, cfg_sel = 0;
  logic [4:0]  cfg_addr = 0;
  logic [7:0]  cfg_wdata = 0;
  logic        tx_start, tx_done = 0;
  logic [5:0]  tx_len, tx_rd_addr = 0;
  logic [7:0]  tx_rd_data;
  logic        rx_arm, rx_busy = 0, rx_byte_valid = 0, rx_done = 0, rx_crc_ok = 0;
  logic [5:0]  rx_byte_idx = 0;
  logic [7:0]  rx_byte_data = 0;
  logic [5:0]  channel;
  logic        tx_on;
  logic [15:0] adv_count, scan_req_count;
  logic [47:0] last_scan_addr;
  int checks = 0, failures = 0;

  ble_link_layer #(.T_IFS_US(T_IFS), .LISTEN_US(LISTEN), .ADV_INTERVAL_US(INTERVAL)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ---- framer model -----------------------------------------------------------
  bytes_t      sent[$];
  int          sent_ch[$];
  int          sent_cyc[$];
  always @(posedge clk) begin
    if (rst_n && tx_start) begin
      bytes_t p;
      p.delete();
      sent_ch.push_back(channel);
      sent_cyc.push_back(int'($time / 10));
      for (int i = 0; i < tx_len; i++) begin
        tx_rd_addr = 6'(i);
        #1;
        p.push_back(tx_rd_data);
      end
      sent.push_back(p);
      repeat (200) @(posedge clk);
      #1 tx_done = 1;
      @(posedge clk) #1 tx_done = 0;
    end
  end

  // rx_arm must never be high while transmitting
  always @(posedge clk) if (rst_n && rx_arm && tx_on) begin failures++; $display("FAIL: rx_arm during tx"); end

  int done_cyc;
  task automatic inject(input bytes_t p, input bit ok);
    @(negedge clk) rx_busy = 1;
    foreach (p[i]) begin
      repeat (16) @(negedge clk);
      rx_byte_valid = 1; rx_byte_idx = 6'(i); rx_byte_data = p[i];
      @(negedge clk) rx_byte_valid = 0;
    end
    repeat (24 * 16) @(negedge clk);
    rx_done = 1; rx_crc_ok = ok; rx_busy = 0;
    done_cyc = int'(($time + 5) / 10);   // the posedge that samples rx_done
    @(negedge clk) rx_done = 0; rx_crc_ok = 0;
  endtask

  task automatic wait_listen();
    while (!rx_arm) @(negedge clk);
    repeat (40) @(negedge clk);
  endtask

  initial begin
    bytes_t adv, rsp, req, bad;
    adv = adv_ind_pdu(); rsp = scan_rsp_pdu(); req = scan_req_pdu();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configuration: AdvData and ScanRspData from the captured packets
    for (int i = 0; i < 16; i++) begin
      @(negedge clk) cfg_we = 1; cfg_sel = 0; cfg_addr = 5'(i); cfg_wdata = adv[8 + i];
    end
    for (int i = 0; i < 7; i++) begin
      @(negedge clk) cfg_we = 1; cfg_sel = 1; cfg_addr = 5'(i); cfg_wdata = rsp[8 + i];
    end
    @(negedge clk) cfg_we = 0; enable = 1;
    // first round: no scanner
    wait (sent.size() == 3);
    wait (sent.size() == 4);
    for (int i = 0; i < 4; i++) begin
      check(sent[i] == adv, $sformatf("ADV_IND %0d bytes", i));
      check(sent_ch[i] == 37 + (i % 3), $sformatf("ADV_IND %0d on channel %0d", i, sent_ch[i]));
    end
    // 3 ADV: tx (200+) + listen (320) each; interval 800 cycles between #2 and #3
    begin
      int gap, step;
      gap  = sent_cyc[3] - sent_cyc[2];
      step = sent_cyc[1] - sent_cyc[0];
      check(gap - step == INTERVAL * 16 + 1, $sformatf("interval: %0d extra cycles", gap - step));
    end
    check(adv_count >= 3, "adv_count");
    // scan request on channel 37 (fourth advertisement), good CRC
    wait_listen();
    check(channel == 37, "listening on 37");
    inject(req, 1);
    wait (sent.size() == 5);
    check(sent[4] == rsp, "SCAN_RSP bytes");
    check(sent_ch[4] == 37, "SCAN_RSP on the request channel");
    check(sent_cyc[4] - done_cyc == T_IFS * 16, $sformatf("SCAN_RSP %0d cycles after request, expected %0d", sent_cyc[4] - done_cyc, T_IFS * 16));
    @(negedge clk);
    wait (sent.size() == 6);
    check(sent_ch[5] == 38 && sent[5] == adv, "continues advertising on 38");
    check(scan_req_count == 1, "scan_req_count");
    check(last_scan_addr == SCAN_ADDR, "ScanA reported");
    // request to another device
    wait_listen();
    bad = req; bad[13] = 8'h11;
    inject(bad, 1);
    @(negedge clk);
    wait (sent.size() == 7);
    check(sent[6] == adv && sent_ch[6] == 39, "wrong AdvA not answered");
    // good request, bad CRC
    wait (sent.size() == 8);
    wait_listen();
    inject(req, 0);
    wait (sent.size() == 9);
    check(sent[8] == adv && sent_ch[8] == 38, "bad CRC not answered");
    check(scan_req_count == 1, "count unchanged");
    enable = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
