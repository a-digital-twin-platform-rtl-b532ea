// tb_ble_baseband_top: end-to-end testbench of the BLE baseband at full size.
//
// The top runs with all parameters at their defaults (150 us inter-frame
// space, 250 us listen window, 20 ms advertising interval). The testbench
// plays a scanning phone: it decodes what the baseband transmits with its own
// floating-point FM discriminator (atan2 phase steps, sliced at bit centres)
// and it transmits with the floating-point GFSK model of ble_tb_pkg, with a
// carrier offset and noise, quantised to the 4-bit ADC inputs. Reference
// packets are the captured active-scanning exchange.
//
// Sequence and checks:
//  1. ADV_IND on 37: on-air bits equal the reference packet bits.
//  2. The phone answers with SCAN_REQ 150 us later; the baseband must send the
//     reference SCAN_RSP on 37, starting 150 us +/- 2 us after the request.
//  3. ADV_IND on 38 (nobody answers: listen timeout) and on 39, where a
//     SCAN_REQ to another address must be ignored.
//  4. The next ADV_IND on 37 comes one advertising interval later.
//  5. Mode switch to receive-only on channel 12: a maximum-length packet
//     (37-byte payload) with -40 kHz offset must be counted good and be
//     readable from the PDU buffer; a copy with one flipped bit must be
//     counted bad.
// Every mechanism (advertising on each channel, scan response, listen timeout,
// address filtering, interval, packet detection, mode switch, CRC pass and
// fail, full PDU buffer) is counted and must have happened at least once.
`timescale 1ns/1ps
module tb_ble_baseband_top;
  import ble_pkg::*;
  import ble_tb_pkg::*;

  localparam real PI = 3.14159265358979;

  logic              clk = 0, rst_n = 0;
  logic              adc_valid = 1;
  logic signed [3:0] adc_i = 0, adc_q = 0;
  logic signed [11:0] dac_i, dac_q;
  logic              dac_valid, tx_en, rx_en, packet_detected;
  logic [5:0]        rf_channel;
  logic              rx_only = 0;
  logic [5:0]        rx_only_channel = 12;
  logic              adv_enable = 0;
  logic [47:0]       adv_addr = ADV_ADDR;
  logic [5:0]        adv_data_len = 16, rsp_data_len = 7;
  logic              cfg_we = 0, cfg_sel = 0;
  logic [4:0]        cfg_addr = 0;
  logic [7:0]        cfg_wdata = 0;
  logic [5:0]        rx_buf_raddr = 0;
  logic [7:0]        rx_buf_rdata;
  logic              rx_pkt_done, rx_crc_ok;
  pdu_hdr_t          rx_hdr;
  logic [15:0]       rx_good_count, rx_bad_count, adv_count, scan_req_count;
  logic [47:0]       last_scan_addr;

  ble_baseband_top dut (.*);

  always #31.25 clk = ~clk;   // 16 MHz

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters ----------------------------------------------------------
  int n_adv[3];
  int n_scan_rsp = 0, n_listen_timeout = 0, n_addr_filtered = 0, n_interval = 0;
  int n_detect = 0, n_rx_only = 0, n_crc_good = 0, n_crc_bad = 0, n_full_pdu = 0;
  always @(posedge clk) if (rst_n && packet_detected) n_detect++;

  // ---- clock count ---------------------------------------------------------------
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---- ADC drive: queued samples, otherwise weak noise ----------------------------
  int qi[$], qq[$];
  always @(negedge clk) begin
    if (qi.size() > 0) begin
      adc_i <= 4'(qi.pop_front());
      adc_q <= 4'(qq.pop_front());
    end else begin
      adc_i <= 4'(q4(0.6 * gauss_noise()));
      adc_q <= 4'(q4(0.6 * gauss_noise()));
    end
  end

  task automatic play(input bits_t b, input real cfo, input real sigma);
    int si[$], sq[$];
    gfsk_iq(b, 2500.0, cfo, 6.0, sigma, 32, 32, si, sq);
    foreach (si[n]) begin qi.push_back(si[n]); qq.push_back(sq[n]); end
  endtask

  // ---- DAC capture: one record per transmission ------------------------------------
  typedef struct { real f[$]; longint t_start; longint t_end; int ch; } txrec_t;
  txrec_t txq[$];
  txrec_t cur;
  bit     in_tx = 0;
  real    prev_ph = 0.0;
  always @(posedge clk) begin
    real ph, d;
    bit  dv;
    dv = rst_n && dac_valid;   // outputs are undefined before the first reset edge
    ph = $atan2(real'(dac_q), real'(dac_i));
    d  = ph - prev_ph;
    while (d < -PI) d += 2 * PI;
    while (d >= PI) d -= 2 * PI;
    prev_ph = ph;
    // back-to-back packets on different channels: cut the record at the hop
    if (dv && in_tx && rf_channel != 6'(cur.ch)) begin
      cur.t_end = cyc; txq.push_back(cur);
      in_tx = 0;
    end
    if (dv && !in_tx) begin
      in_tx = 1; cur.f.delete(); cur.t_start = cyc; cur.ch = rf_channel;
    end
    if (dv) cur.f.push_back(d / (2 * PI) * 16000.0);
    if (!dv && in_tx) begin
      in_tx = 0; cur.t_end = cyc; txq.push_back(cur);
    end
  end

  // Slice bits: mean frequency over 8 samples around the bit centre, with the
  // filter delay d found as the offset that best matches the reference (a
  // record cut at a channel hop starts with the previous packet's tail).
  function automatic int tx_errors(input txrec_t r, input bits_t ref_b);
    int best = 1 << 30;
    for (int d = 0; d < 64; d++) begin
      int err = 0;
      foreach (ref_b[i]) begin
        real s = 0.0;
        int c = 16 * i + d;
        if (c + 4 >= r.f.size()) begin
          if (i != ref_b.size() - 1) err++;   // only the last bit may be cut off
          continue;
        end
        for (int k = c - 4; k < c + 4; k++) if (k >= 0) s += r.f[k];
        if ((s / 8.0 > 2500.0) != ref_b[i]) err++;
      end
      if (err < best) best = err;
    end
    return best;
  endfunction

  task automatic wait_tx(input int n);
    while (txq.size() < n) @(posedge clk);
  endtask

  initial begin
    bytes_t adv = adv_ind_pdu(), rsp = scan_rsp_pdu(), req = scan_req_pdu(), other;
    longint t_req_end;
    int e;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk) cfg_we = 1; cfg_sel = 0; cfg_addr = 5'(i); cfg_wdata = adv[8 + i];
    end
    for (int i = 0; i < 7; i++) begin
      @(negedge clk) cfg_we = 1; cfg_sel = 1; cfg_addr = 5'(i); cfg_wdata = rsp[8 + i];
    end
    @(negedge clk) cfg_we = 0; adv_enable = 1;

    // 1. ADV_IND on 37
    wait_tx(1);
    e = tx_errors(txq[0], packet_bits(adv, 37));
    check(e == 0, $sformatf("ADV_IND on 37: %0d bit errors", e));
    check(txq[0].ch == 37, "first channel 37");
    if (e == 0 && txq[0].ch == 37) n_adv[0]++;
    // 2. SCAN_REQ 150 us after the end of the advertisement (dac_valid tail: 27 clocks)
    repeat (2400 - 27 - 32) @(posedge clk);
    t_req_end = cyc + 32 + 16 * 176;       // leading carrier + 176 bits
    play(packet_bits(req, 37), 30.0, 0.3);
    wait_tx(2);
    e = tx_errors(txq[1], packet_bits(rsp, 37));
    check(e == 0, $sformatf("SCAN_RSP: %0d bit errors", e));
    check(txq[1].ch == 37, "SCAN_RSP on 37");
    check(txq[1].t_start - t_req_end >= 2400 - 32 && txq[1].t_start - t_req_end <= 2400 + 32,
          $sformatf("SCAN_RSP %0d clocks after the request (150 us = 2400)", txq[1].t_start - t_req_end));
    check(last_scan_addr == SCAN_ADDR && scan_req_count == 1, "ScanA and count");
    if (e == 0) n_scan_rsp++;
    // 3. 38: no answer; 39: request to someone else
    wait_tx(3);
    e = tx_errors(txq[2], packet_bits(adv, 38));
    check(e == 0 && txq[2].ch == 38, "ADV_IND on 38");
    if (e == 0 && txq[2].ch == 38) n_adv[1]++;
    wait_tx(4);
    e = tx_errors(txq[3], packet_bits(adv, 39));
    check(e == 0 && txq[3].ch == 39, "ADV_IND on 39");
    if (e == 0 && txq[3].ch == 39) n_adv[2]++;
    check(txq[3].t_start - txq[2].t_end < 250 * 16 + 200, "38 listen ended by timeout");
    n_listen_timeout++;
    other = req; other[13] = 8'h12;          // AdvA of another device
    repeat (2400 - 27 - 32) @(posedge clk);
    play(packet_bits(other, 39), -20.0, 0.3);
    // 4. next advertisement after the interval
    wait_tx(5);
    check(txq[4].ch == 37 && tx_errors(txq[4], packet_bits(adv, 37)) == 0, "ADV_IND on 37 after interval");
    check(scan_req_count == 1, "request to another address ignored");
    if (scan_req_count == 1) n_addr_filtered++;
    check(txq[4].t_start - txq[3].t_end >= 20000 * 16 && txq[4].t_start - txq[3].t_end <= 20000 * 16 + 600 * 16,
          $sformatf("interval %0d clocks", txq[4].t_start - txq[3].t_end));
    n_interval++;
    // 5. receive-only mode
    rx_only = 1;
    repeat (6000) @(posedge clk);
    check(!tx_en && rx_en && rf_channel == 12, "receive-only mode");
    n_rx_only++;
    begin
      bytes_t p;
      bits_t b;
      int good0, bad0;
      good0 = rx_good_count;
      bad0  = rx_bad_count;
      p.push_back(8'h02);
      p.push_back(8'd37);
      repeat (37) p.push_back(8'($urandom));
      b = packet_bits(p, 12);
      check(b.size() == 376, "maximum packet is 376 bits");
      play(b, -40.0, 0.4);
      repeat (480 * 16) @(posedge clk);
      check(rx_good_count == good0 + 1, "maximum-length packet received");
      if (rx_good_count == good0 + 1) n_crc_good++;
      check(rx_hdr.length == 37 && rx_hdr.pdu_type == 4'h2, "header");
      for (int i = 0; i < 39; i++) begin
        @(negedge clk) rx_buf_raddr = 6'(i);
        @(negedge clk);
        check(rx_buf_rdata == p[i], $sformatf("PDU buffer byte %0d", i));
      end
      n_full_pdu++;
      b[40 + 100] = !b[40 + 100];
      play(b, 10.0, 0.3);
      repeat (480 * 16) @(posedge clk);
      check(rx_bad_count == bad0 + 1 && rx_good_count == good0 + 1, "corrupted packet counted bad");
      if (rx_bad_count == bad0 + 1) n_crc_bad++;
    end
    check(txq.size() == 5, "no transmission in receive-only mode");
    // mechanism coverage
    check(n_adv[0] > 0 && n_adv[1] > 0 && n_adv[2] > 0, "advertised on 37, 38, 39");
    check(n_scan_rsp > 0, "scan response");
    check(n_listen_timeout > 0, "listen timeout");
    check(n_addr_filtered > 0, "address filter");
    check(n_interval > 0, "advertising interval");
    check(n_detect >= 4, $sformatf("packet detections %0d", n_detect));
    check(n_rx_only > 0 && n_crc_good > 0 && n_crc_bad > 0 && n_full_pdu > 0, "receive-only, CRC good/bad, full buffer");
    $display("mechanisms: adv37=%0d adv38=%0d adv39=%0d scan_rsp=%0d listen_timeout=%0d addr_filtered=%0d interval=%0d detect=%0d rx_only=%0d crc_good=%0d crc_bad=%0d full_pdu=%0d",
             n_adv[0], n_adv[1], n_adv[2], n_scan_rsp, n_listen_timeout, n_addr_filtered, n_interval,
             n_detect, n_rx_only, n_crc_good, n_crc_bad, n_full_pdu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
