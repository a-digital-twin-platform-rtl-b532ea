// ble_link_layer: advertiser state machine for BLE active scanning.
//
// Runs the peripheral side of an active-scanning event. For each advertising
// channel in the order 37, 38, 39 it sends an ADV_IND (AdvA + AdvData), then
// arms the receiver for a listen window. If a packet arrives it checks, while
// the bytes come in, that it is a SCAN_REQ with a 12-byte payload whose second
// address (AdvA) is this device's address, and that the CRC is good. Then,
// one inter-frame space after the request, it sends a SCAN_RSP (AdvA +
// ScanRspData) on the same channel. Whether or not a request came, it goes on
// to the next channel; after channel 39 it waits one advertising interval and
// starts again with 37.
//
//   IDLE -> ADV_START -> ADV_TX -> LISTEN -+-> (timeout) ----------> NEXT
//                                          +-> RX -+-> (no match) --> NEXT
//                                                  +-> IFS -> RSP_TX -> NEXT
//   NEXT -> ADV_START (channels 38, 39) | INTERVAL -> ADV_START (back to 37)
//
// The PDUs are not stored whole: the framer reads them byte by byte through
// tx_rd_addr/tx_rd_data, and this block assembles each byte on the fly from
// the header fields, the 48-bit address and two byte arrays (AdvData and
// ScanRspData, up to 31 bytes each) written through the cfg_* port.
//
// Following the design this is built from: the flow send ADV_IND, listen,
// on a SCAN_REQ send SCAN_RSP, continue advertising; the channel order; the
// packet contents (SCAN_REQ = ScanA + AdvA, SCAN_RSP = AdvA + data). There it
// is firmware; here it is hardware. This design's choices: the 150 us
// inter-frame space and 20 ms interval (BLE values), the listen window, TxAdd
// and RxAdd fixed to 0, and the configuration port.
//
// Timing: all outputs registered; tx_start is a one-clock pulse. The SCAN_RSP
// starts T_IFS_US after rx_done of the request.
module ble_link_layer
  import ble_pkg::*;
#(
  parameter int unsigned CLK_KHZ         = 16000,
  parameter int unsigned T_IFS_US        = 150,
  parameter int unsigned LISTEN_US       = 250,
  parameter int unsigned ADV_INTERVAL_US = 20000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [47:0] adv_addr,
  input  logic [5:0]  adv_data_len,
  input  logic [5:0]  rsp_data_len,
  // configuration write port: cfg_sel 0 = AdvData, 1 = ScanRspData
  input  logic        cfg_we,
  input  logic        cfg_sel,
  input  logic [4:0]  cfg_addr,
  input  logic [7:0]  cfg_wdata,
  // to the framer
  output logic        tx_start,
  output logic [5:0]  tx_len,
  input  logic [5:0]  tx_rd_addr,
  output logic [7:0]  tx_rd_data,
  input  logic        tx_done,
  // from the receive chain
  output logic        rx_arm,
  input  logic        rx_busy,
  input  logic        rx_byte_valid,
  input  logic [5:0]  rx_byte_idx,
  input  logic [7:0]  rx_byte_data,
  input  logic        rx_done,
  input  logic        rx_crc_ok,
  // channel and status
  output logic [5:0]  channel,
  output logic        tx_on,
  output logic [15:0] adv_count,
  output logic [15:0] scan_req_count,
  output logic [47:0] last_scan_addr
);
  localparam int unsigned CYC_US = CLK_KHZ / 1000;
  localparam int unsigned MAX_DATA = 31;

  typedef enum logic [3:0] {
    L_IDLE, L_ADV_START, L_ADV_TX, L_LISTEN, L_RX, L_IFS, L_RSP_TX, L_NEXT, L_INTERVAL
  } state_e;

  state_e      state;
  logic [31:0] timer;
  logic        send_rsp;        // PDU being sent: 0 = ADV_IND, 1 = SCAN_RSP
  logic [7:0]  adv_data [MAX_DATA];
  logic [7:0]  rsp_data [MAX_DATA];
  logic        req_ok;          // request bytes so far match a SCAN_REQ to us
  logic [47:0] scan_addr;

  // ---- configuration memories ------------------------------------------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr < 5'(MAX_DATA)) begin
      if (cfg_sel) rsp_data[cfg_addr] <= cfg_wdata;
      else         adv_data[cfg_addr] <= cfg_wdata;
    end
  end

  // ---- PDU byte source for the framer ------------------------------------------
  logic [5:0] data_len;
  logic [5:0] di;
  assign data_len = send_rsp ? rsp_data_len : adv_data_len;
  assign tx_len   = 6'd8 + data_len;
  assign di       = tx_rd_addr - 6'd8;

  always_comb begin
    if (tx_rd_addr == 6'd0)      tx_rd_data = {4'b0000, send_rsp ? PDU_SCAN_RSP : PDU_ADV_IND};
    else if (tx_rd_addr == 6'd1) tx_rd_data = {2'b00, tx_len - 6'd2};
    else if (tx_rd_addr < 6'd8)  tx_rd_data = adv_addr[8*(tx_rd_addr - 6'd2) +: 8];
    else if (di < 6'(MAX_DATA))  tx_rd_data = send_rsp ? rsp_data[di[4:0]] : adv_data[di[4:0]];
    else                         tx_rd_data = 8'h00;
  end

  // ---- request check while bytes arrive ------------------------------------
  logic byte_ok;
  always_comb begin
    byte_ok = 1'b1;
    if (rx_byte_idx == 6'd0)      byte_ok = (rx_byte_data[3:0] == PDU_SCAN_REQ);
    else if (rx_byte_idx == 6'd1) byte_ok = (rx_byte_data == 8'd12);
    else if (rx_byte_idx >= 6'd8 && rx_byte_idx < 6'd14)
      byte_ok = (rx_byte_data == adv_addr[8*(rx_byte_idx - 6'd8) +: 8]);
  end

  // ---- state machine ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= L_IDLE;
      timer          <= '0;
      send_rsp       <= 1'b0;
      channel        <= 6'd37;
      tx_start       <= 1'b0;
      tx_on          <= 1'b0;
      rx_arm         <= 1'b0;
      req_ok         <= 1'b0;
      scan_addr      <= '0;
      adv_count      <= '0;
      scan_req_count <= '0;
      last_scan_addr <= '0;
    end else begin
      tx_start <= 1'b0;
      if (timer != 0) timer <= timer - 1;
      unique case (state)
        L_IDLE: if (enable) begin
          channel <= 6'd37;
          state   <= L_ADV_START;
        end
        L_ADV_START: begin
          send_rsp <= 1'b0;
          tx_start <= 1'b1;
          tx_on    <= 1'b1;
          state    <= L_ADV_TX;
        end
        L_ADV_TX: if (tx_done) begin
          tx_on     <= 1'b0;
          adv_count <= adv_count + 1'b1;
          rx_arm    <= 1'b1;
          req_ok    <= 1'b1;
          timer     <= 32'(LISTEN_US * CYC_US);
          state     <= L_LISTEN;
        end
        L_LISTEN: begin
          if (rx_busy) state <= L_RX;
          else if (timer == 0) begin
            rx_arm <= 1'b0;
            state  <= L_NEXT;
          end
        end
        L_RX: begin
          if (rx_byte_valid) begin
            if (!byte_ok) req_ok <= 1'b0;
            if (rx_byte_idx >= 6'd2 && rx_byte_idx < 6'd8)
              scan_addr[8*(rx_byte_idx - 6'd2) +: 8] <= rx_byte_data;
          end
          if (rx_done) begin
            rx_arm <= 1'b0;
            if (rx_crc_ok && req_ok) begin
              last_scan_addr <= scan_addr;
              timer          <= 32'(T_IFS_US * CYC_US - 2);
              state          <= L_IFS;
            end else begin
              state <= L_NEXT;
            end
          end
        end
        L_IFS: if (timer == 0) begin
          send_rsp <= 1'b1;
          tx_start <= 1'b1;
          tx_on    <= 1'b1;
          state    <= L_RSP_TX;
        end
        L_RSP_TX: if (tx_done) begin
          tx_on          <= 1'b0;
          scan_req_count <= scan_req_count + 1'b1;
          state          <= L_NEXT;
        end
        L_NEXT: begin
          if (channel == 6'd39) begin
            channel <= 6'd37;
            timer   <= 32'(ADV_INTERVAL_US * CYC_US);
            state   <= L_INTERVAL;
          end else begin
            channel <= channel + 1'b1;
            state   <= enable ? L_ADV_START : L_IDLE;
          end
        end
        L_INTERVAL: if (timer == 0) state <= enable ? L_ADV_START : L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
