// ble_tx_framer: packet serialiser for the LE 1M transmitter.
//
// On start it sends, at one bit per SPB sample clocks, the 8-bit preamble, the
// 32-bit access address (LSB first), the PDU read byte by byte from the link
// layer (each byte LSB first) and the 24-bit CRC (register bit 23 first). The
// PDU bits update a ble_crc24 as they are sent; PDU and CRC bits are whitened
// by a ble_whitening LFSR seeded from the channel. The preamble is 0xAA or 0x55,
// whichever makes its last bit differ from the first access-address bit, so a
// packet opens with a run of bit transitions for the receiver's clock recovery.
//
// Packet fields, their order and the CRC/whitening rules follow the BLE 4.0
// description this design is built from; the address/data read port towards
// the link layer is this design's choice.
//
// Interface: pdu_len (2-byte header included) and channel are sampled at start.
// rd_addr selects a PDU byte and rd_data must return it in the same clock.
// Timing: tx_bit changes on the clock after start and then every SPB clocks;
// tx_active is high for exactly (8 + 32 + 8*pdu_len + 24) * SPB clocks, and
// done pulses on the clock after the last bit period.
module ble_tx_framer
  import ble_pkg::*;
#(
  parameter int unsigned SPB     = 16,
  parameter logic [31:0] AA      = ADV_ACCESS_ADDR
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [5:0] channel,
  input  logic [5:0] pdu_len,
  output logic [5:0] rd_addr,
  input  logic [7:0] rd_data,
  output logic       busy,
  output logic       tx_bit,
  output logic       tx_active,
  output logic       done
);
  typedef enum logic [2:0] {F_IDLE, F_PRE, F_AA, F_PDU, F_CRC, F_END} field_e;
  localparam logic [7:0] PREAMBLE = AA[0] ? 8'h55 : 8'hAA;
  localparam int unsigned CW = $clog2(SPB);

  field_e        field, field_n;
  logic [8:0]    k, k_n;        // bit number inside the field
  logic [8:0]    pdu_bits;
  logic [CW-1:0] cnt;
  logic          raw_n, wht_n;
  logic          advance;
  logic [23:0]   crc;

  // next field / bit at a bit boundary
  always_comb begin
    field_n = field;
    k_n     = k + 1'b1;
    unique case (field)
      F_IDLE: begin field_n = F_PRE; k_n = '0; end
      F_PRE:  if (k == 9'd7)  begin field_n = F_AA;  k_n = '0; end
      F_AA:   if (k == 9'd31) begin field_n = F_PDU; k_n = '0; end
      F_PDU:  if (k == pdu_bits - 1'b1) begin field_n = F_CRC; k_n = '0; end
      F_CRC:  if (k == 9'd23) begin field_n = F_END; k_n = '0; end
      default: begin field_n = F_END; k_n = '0; end
    endcase
  end

  assign rd_addr = k_n[8:3];
  always_comb begin
    unique case (field_n)
      F_PRE:   raw_n = PREAMBLE[k_n[2:0]];
      F_AA:    raw_n = AA[k_n[4:0]];
      F_PDU:   raw_n = rd_data[k_n[2:0]];
      F_CRC:   raw_n = crc[5'd23 - k_n[4:0]];
      default: raw_n = 1'b0;
    endcase
  end

  assign advance = busy ? (cnt == CW'(SPB - 1)) : start;

  ble_whitening u_white (
    .clk, .rst_n, .init(start && !busy), .channel,
    .bit_en(advance && (field_n == F_PDU || field_n == F_CRC)),
    .data_in(raw_n), .data_out(wht_n)
  );

  ble_crc24 u_crc (
    .clk, .rst_n, .init(start && !busy),
    .bit_en(advance && field_n == F_PDU), .bit_in(raw_n), .crc
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      field     <= F_IDLE;
      k         <= '0;
      cnt       <= '0;
      pdu_bits  <= '0;
      busy      <= 1'b0;
      tx_bit    <= 1'b0;
      tx_active <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy      <= 1'b1;
          pdu_bits  <= {pdu_len, 3'b000};
          field     <= field_n;
          k         <= k_n;
          cnt       <= '0;
          tx_bit    <= raw_n;
          tx_active <= 1'b1;
        end
      end else begin
        cnt <= (cnt == CW'(SPB - 1)) ? '0 : cnt + 1'b1;
        if (advance) begin
          field <= field_n;
          k     <= k_n;
          if (field_n == F_END) begin
            busy      <= 1'b0;
            tx_active <= 1'b0;
            done      <= 1'b1;
            field     <= F_IDLE;
          end else begin
            tx_bit <= (field_n == F_PDU || field_n == F_CRC) ? wht_n : raw_n;
          end
        end
      end
    end
  end
endmodule
