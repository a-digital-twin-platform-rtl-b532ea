// ble_baseband_top: BLE 1M digital baseband for a crystal-free low-IF radio.
//
// Sits between an analog front end (LNA, low-IF mixer, free-running LO, 4-bit
// I/Q ADCs at 16 MHz on the receive side; I/Q DACs and up-converter on the
// transmit side) and the host. Everything runs on the 16 MHz sample clock.
//
//   receive:  adc_i/adc_q -> ble_matched_filter -> ble_clock_recovery
//             -> ble_aa_detector ("packet detected") -> ble_rx_deframer
//             -> ble_pdu_buffer (host read port) and the link layer
//   transmit: ble_link_layer -> ble_tx_framer -> ble_gfsk_modulator
//             -> dac_i/dac_q
//
// Two modes. With rx_only low and adv_enable high the link layer advertises
// and answers scan requests (active scanning, peripheral side). With rx_only
// high the link layer is held idle and the receiver is armed all the time:
// every packet it detects is written to the PDU buffer and counted as good
// (CRC correct) or bad, which is what a packet-error-rate measurement needs.
//
// Following the design this is built from: the split into matched-filter
// demodulation, bit-transition clock recovery, packet detection and the
// active-scanning flow, the 4-bit 16 MHz ADC interface and the packet detected
// signal fed back to the front end. This design's choices: the single clock,
// the rx_only mode switch, the host ports and the counters.
//
// Timing: adc_valid marks a sample (it may be high every clock). Received
// packets end with rx_pkt_done about 3 clocks plus half a bit after their last
// CRC bit. Transmitted packets start one clock after the link layer starts them.
module ble_baseband_top
  import ble_pkg::*;
#(
  parameter int unsigned ADC_W           = 4,
  parameter int unsigned DAC_W           = 12,
  parameter int          IF_KHZ          = 2500,
  parameter int unsigned MAX_AA_ERR      = 0,
  parameter int unsigned T_IFS_US        = 150,
  parameter int unsigned LISTEN_US       = 250,
  parameter int unsigned ADV_INTERVAL_US = 20000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // analog front end
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [ADC_W-1:0] adc_q,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic                    dac_valid,
  output logic                    tx_en,
  output logic                    rx_en,
  output logic [5:0]              rf_channel,
  output logic                    packet_detected,
  // host: mode and configuration
  input  logic                    rx_only,
  input  logic [5:0]              rx_only_channel,
  input  logic                    adv_enable,
  input  logic [47:0]             adv_addr,
  input  logic [5:0]              adv_data_len,
  input  logic [5:0]              rsp_data_len,
  input  logic                    cfg_we,
  input  logic                    cfg_sel,
  input  logic [4:0]              cfg_addr,
  input  logic [7:0]              cfg_wdata,
  // host: received packets
  input  logic [5:0]              rx_buf_raddr,
  output logic [7:0]              rx_buf_rdata,
  output logic                    rx_pkt_done,
  output logic                    rx_crc_ok,
  output pdu_hdr_t                rx_hdr,
  output logic [15:0]             rx_good_count,
  output logic [15:0]             rx_bad_count,
  // host: link layer status
  output logic [15:0]             adv_count,
  output logic [15:0]             scan_req_count,
  output logic [47:0]             last_scan_addr
);
  // ---- receive chain ---------------------------------------------------------
  logic       mf_valid, mf_bit;
  logic signed [2*(ADC_W + 8 + 1 + 4 + 1):0] mf_metric;
  logic       cr_valid, cr_bit;
  logic       ll_rx_arm, rx_arm, aa_hit;
  logic       df_busy, df_byte_valid, df_done, df_crc_ok;
  logic [5:0] df_byte_idx;
  logic [7:0] df_byte_data;
  pdu_hdr_t   df_hdr;
  logic [5:0] ll_channel;

  ble_matched_filter #(.ADC_W(ADC_W), .IF_KHZ(IF_KHZ)) u_mf (
    .clk, .rst_n, .in_valid(adc_valid), .adc_i, .adc_q,
    .out_valid(mf_valid), .bit_dec(mf_bit), .metric(mf_metric)
  );

  ble_clock_recovery u_cr (
    .clk, .rst_n, .in_valid(mf_valid), .bit_dec(mf_bit),
    .bit_valid(cr_valid), .bit_out(cr_bit)
  );

  assign rx_arm     = rx_only | ll_rx_arm;
  assign rf_channel = rx_only ? rx_only_channel : ll_channel;

  ble_aa_detector #(.MAX_ERR(MAX_AA_ERR)) u_aa (
    .clk, .rst_n, .arm(rx_arm && !df_busy), .bit_valid(cr_valid), .bit_in(cr_bit),
    .detected(aa_hit)
  );

  ble_rx_deframer u_df (
    .clk, .rst_n, .start(aa_hit), .channel(rf_channel),
    .bit_valid(cr_valid), .bit_in(cr_bit), .busy(df_busy),
    .byte_valid(df_byte_valid), .byte_idx(df_byte_idx), .byte_data(df_byte_data),
    .done(df_done), .crc_ok(df_crc_ok), .hdr(df_hdr)
  );

  ble_pdu_buffer u_buf (
    .clk, .we(df_byte_valid), .waddr(df_byte_idx), .wdata(df_byte_data),
    .raddr(rx_buf_raddr), .rdata(rx_buf_rdata)
  );

  assign packet_detected = aa_hit;
  assign rx_pkt_done     = df_done;
  assign rx_crc_ok       = df_crc_ok;
  assign rx_hdr          = df_hdr;
  assign rx_en           = rx_arm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_good_count <= '0;
      rx_bad_count  <= '0;
    end else if (df_done) begin
      if (df_crc_ok) rx_good_count <= rx_good_count + 1'b1;
      else           rx_bad_count  <= rx_bad_count + 1'b1;
    end
  end

  // ---- link layer -----------------------------------------------------------------
  logic       tx_start, tx_done, tx_busy, tx_bit, tx_active;
  logic [5:0] tx_len, tx_rd_addr;
  logic [7:0] tx_rd_data;
  logic       ll_tx_on;

  ble_link_layer #(
    .T_IFS_US(T_IFS_US), .LISTEN_US(LISTEN_US), .ADV_INTERVAL_US(ADV_INTERVAL_US)
  ) u_ll (
    .clk, .rst_n, .enable(adv_enable && !rx_only), .adv_addr, .adv_data_len, .rsp_data_len,
    .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata,
    .tx_start, .tx_len, .tx_rd_addr, .tx_rd_data, .tx_done,
    .rx_arm(ll_rx_arm), .rx_busy(df_busy), .rx_byte_valid(df_byte_valid),
    .rx_byte_idx(df_byte_idx), .rx_byte_data(df_byte_data), .rx_done(df_done),
    .rx_crc_ok(df_crc_ok), .channel(ll_channel), .tx_on(ll_tx_on),
    .adv_count, .scan_req_count, .last_scan_addr
  );

  // ---- transmit chain ---------------------------------------------------------------
  ble_tx_framer u_fr (
    .clk, .rst_n, .start(tx_start), .channel(ll_channel), .pdu_len(tx_len),
    .rd_addr(tx_rd_addr), .rd_data(tx_rd_data), .busy(tx_busy),
    .tx_bit, .tx_active, .done(tx_done)
  );

  ble_gfsk_modulator #(.IF_KHZ(IF_KHZ), .DAC_W(DAC_W)) u_mod (
    .clk, .rst_n, .active(tx_active), .bit_in(tx_bit),
    .dac_i, .dac_q, .dac_valid
  );

  assign tx_en = ll_tx_on | dac_valid;
endmodule
