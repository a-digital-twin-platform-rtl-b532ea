// tb_ble_per_sweep: packet-error-rate sweep of the receive chain.
//
// Reproduces the sensitivity measurement flow: a transmitter sends
// maximum-length packets (37-byte payload, 376 bits on air, 368 without the
// preamble); a packet counts as recovered when it is detected, passes the CRC
// and every byte read back from the PDU buffer equals the packet sent, and as
// an error otherwise. The packet error rate is converted to the equivalent
// bit error rate BER = 1 - (1 - PER)^(1/368), so 30.8 % PER is 0.1 % BER.
// PKTS = 2000 packets are sent per point, as in the measurement this follows.
//
// The transmitter is the floating-point GFSK model of ble_tb_pkg, signal
// amplitude 6 LSB, with Gaussian noise of standard deviation sigma on I and Q
// before 4-bit quantisation. Two receiver oscillators are compared, which is
// the comparison the crystal-free design is about:
//   reference LO:    no frequency offset, no phase noise (crystal-referenced);
//   free-running LO: a random carrier offset of up to +/-50 kHz per packet
//                    and Wiener phase noise of 0.0111 rad per sample
//                    (-100 dBc/Hz at 1 MHz offset).
// The offset range and phase-noise level are this testbench's assumptions.
// The baseband runs at its default parameters in receive-only mode on
// channel 37.
//
// Checks: every packet accounted for; no errors at the lowest noise level;
// for each oscillator the sweep brackets the 30.8 % PER sensitivity point
// (some level below it, some above).
`timescale 1ns/1ps
module tb_ble_per_sweep;
  import ble_pkg::*;
  import ble_tb_pkg::*;

  localparam int  PKTS = 2000;
  localparam int  NLEV = 5;
  localparam real SIGMA[NLEV] = '{0.5, 1.5, 2.0, 2.5, 3.0};

  logic              clk = 0, rst_n = 0;
  logic signed [3:0] adc_i = 0, adc_q = 0;
  logic signed [11:0] dac_i, dac_q;
  logic              dac_valid, tx_en, rx_en, packet_detected;
  logic [5:0]        rf_channel;
  logic [5:0]        rx_buf_raddr = 0;
  logic [7:0]        rx_buf_rdata;
  logic              rx_pkt_done, rx_crc_ok;
  pdu_hdr_t          rx_hdr;
  logic [15:0]       rx_good_count, rx_bad_count, adv_count, scan_req_count;
  logic [47:0]       last_scan_addr;

  ble_baseband_top dut (
    .clk, .rst_n, .adc_valid(1'b1), .adc_i, .adc_q, .dac_i, .dac_q, .dac_valid,
    .tx_en, .rx_en, .rf_channel, .packet_detected,
    .rx_only(1'b1), .rx_only_channel(6'd37), .adv_enable(1'b0), .adv_addr(48'h0),
    .adv_data_len(6'd0), .rsp_data_len(6'd0), .cfg_we(1'b0), .cfg_sel(1'b0),
    .cfg_addr(5'd0), .cfg_wdata(8'd0), .rx_buf_raddr, .rx_buf_rdata, .rx_pkt_done,
    .rx_crc_ok, .rx_hdr, .rx_good_count, .rx_bad_count, .adv_count, .scan_req_count,
    .last_scan_addr
  );

  always #31.25 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int qi[$], qq[$];
  real sigma_now = 0.5;
  always @(negedge clk) begin
    if (qi.size() > 0) begin
      adc_i <= 4'(qi.pop_front());
      adc_q <= 4'(qq.pop_front());
    end else begin
      adc_i <= 4'(q4(sigma_now * gauss_noise()));
      adc_q <= 4'(q4(sigma_now * gauss_noise()));
    end
  end

  // one packet: 1 = recovered, 0 = error
  task automatic one_packet(input real sigma, input bit free_lo, output bit ok);
    bytes_t p;
    int si[$], sq[$];
    bit done_seen = 0, crc = 0;
    real cfo;
    p.delete();
    p.push_back(8'h02);
    p.push_back(8'd37);
    repeat (37) p.push_back(8'($urandom));
    cfo = free_lo ? real'(int'($urandom % 101) - 50) : 0.0;
    gfsk_iq_lo(packet_bits(p, 37), 2500.0, cfo, free_lo ? 0.0111 : 0.0, 6.0, sigma,
               64, 64, si, sq);
    foreach (si[n]) begin qi.push_back(si[n]); qq.push_back(sq[n]); end
    while (qi.size() > 0) begin
      @(posedge clk);
      if (rx_pkt_done && !done_seen) begin done_seen = 1; crc = rx_crc_ok; end
    end
    repeat (64) begin
      @(posedge clk);
      if (rx_pkt_done && !done_seen) begin done_seen = 1; crc = rx_crc_ok; end
    end
    ok = done_seen && crc;
    if (ok) begin
      for (int i = 0; i < 39; i++) begin
        @(negedge clk) rx_buf_raddr = 6'(i);
        @(negedge clk);
        if (rx_buf_rdata != p[i]) ok = 0;
      end
    end
  endtask

  initial begin
    real per[2][NLEV];
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (100) @(negedge clk);
    for (int lo = 0; lo < 2; lo++) begin
      bit below, above;
      below = 0; above = 0;
      for (int l = 0; l < NLEV; l++) begin
        int good, bad;
        real ber, snr_db;
        bit ok;
        good = 0; bad = 0;
        sigma_now = SIGMA[l];
        for (int k = 0; k < PKTS; k++) begin
          one_packet(SIGMA[l], lo == 1, ok);
          if (ok) good++; else bad++;
        end
        check(good + bad == PKTS, "every packet accounted for");
        per[lo][l] = real'(bad) / PKTS;
        ber        = 1.0 - $pow(1.0 - per[lo][l], 1.0 / 368.0);
        snr_db     = 10.0 * $log10(36.0 / (2.0 * SIGMA[l] * SIGMA[l]));
        if (per[lo][l] <= 0.308) below = 1; else above = 1;
        $display("%s LO  sigma %0.2f  SNR %5.1f dB  recovered %0d  errors %0d  PER %5.1f %%  BER %0.2e",
                 lo ? "free-running" : "reference   ", SIGMA[l], snr_db, good, bad,
                 100.0 * per[lo][l], ber);
      end
      check(per[lo][0] == 0.0, "no packet errors at the lowest noise level");
      check(below && above, "sweep brackets the 30.8 % PER point");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * NLEV * PKTS * 7000 + 100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
