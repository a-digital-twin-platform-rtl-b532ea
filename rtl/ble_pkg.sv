// ble_pkg: constants and types shared by the BLE 1M digital baseband.
//
// Holds the BLE 4.0 link-layer constants used by the packet blocks (advertising
// access address, CRC-24 polynomial and seed, payload limit), the advertising PDU
// header layout and type codes, and a 64-point sine table shared by the
// matched-filter templates and the transmit NCO.
//
// The access address, CRC polynomial/seed, header layout and 37-byte payload
// limit follow the BLE 4.0 description this design is built from; the PDU type
// codes are those shown in a sniffer capture of an active-scanning exchange.
// The sine table resolution (64 points, amplitude 127) is this design's choice.
package ble_pkg;

  // ---- link layer constants ------------------------------------------------
  localparam logic [31:0] ADV_ACCESS_ADDR = 32'h8E89BED6;  // sent LSB first
  localparam logic [23:0] CRC_POLY        = 24'h00065B;
  localparam logic [23:0] CRC_INIT        = 24'h555555;
  localparam int unsigned PDU_MAX_PAYLOAD = 37;             // bytes after the header

  // ---- advertising PDU ------------------------------------------------------
  typedef enum logic [3:0] {
    PDU_ADV_IND  = 4'd0,
    PDU_SCAN_REQ = 4'd3,
    PDU_SCAN_RSP = 4'd4
  } pdu_type_e;

  // Header in transmission order: byte 0 = {RxAdd, TxAdd, RFU[1:0], Type[3:0]}
  // (bit 0 sent first), byte 1 = Length.
  typedef struct packed {
    logic [7:0] length;
    logic       rx_add;
    logic       tx_add;
    logic [1:0] rfu;
    logic [3:0] pdu_type;
  } pdu_hdr_t;

  // ---- sine table -------------------------------------------------------------
  // sin_q(i) = round(127 * sin(2*pi*i/64)) for i = 0..16; the other three
  // quarters follow by symmetry in sin64().
  function automatic logic signed [7:0] sin_q(input logic [3:0] i, input logic last);
    logic signed [7:0] v;
    if (last) return 8'sd127;
    unique case (i)
      4'd0:  v = 8'sd0;    4'd1:  v = 8'sd12;   4'd2:  v = 8'sd25;   4'd3:  v = 8'sd37;
      4'd4:  v = 8'sd49;   4'd5:  v = 8'sd60;   4'd6:  v = 8'sd71;   4'd7:  v = 8'sd81;
      4'd8:  v = 8'sd90;   4'd9:  v = 8'sd98;   4'd10: v = 8'sd106;  4'd11: v = 8'sd112;
      4'd12: v = 8'sd117;  4'd13: v = 8'sd122;  4'd14: v = 8'sd125;  default: v = 8'sd126;
    endcase
    return v;
  endfunction

  // sin(2*pi*ph/64) * 127 for a 6-bit phase.
  function automatic logic signed [7:0] sin64(input logic [5:0] ph);
    logic [4:0] q;       // position inside the half period, 0..31
    logic signed [7:0] m;
    q = ph[4:0];
    if (q <= 5'd16) m = sin_q(q[3:0], q == 5'd16);
    else            m = sin_q(4'(6'd32 - {1'b0, q}), 1'b0);
    return ph[5] ? -m : m;
  endfunction

  function automatic logic signed [7:0] cos64(input logic [5:0] ph);
    return sin64(ph + 6'd16);
  endfunction

  // Phase increment, in 1/65536 of a turn per sample, of a tone of f_khz
  // (may be negative) sampled at fs_khz.
  function automatic int fword(input int f_khz, input int fs_khz);
    return (f_khz * 65536) / fs_khz;
  endfunction

endpackage
