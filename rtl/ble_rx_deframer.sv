// ble_rx_deframer: receive-side packet framing after the access address.
//
// Started by the access-address detector, the block takes the recovered bits
// that follow and, bit by bit: dewhitens them with a ble_whitening LFSR seeded
// from the channel number, feeds the dewhitened PDU bits to a ble_crc24, and
// assembles bytes LSB first. Byte 0 and 1 form the PDU header (type, flags,
// Length); then Length payload bytes follow; then 24 CRC bits, compared one by
// one with the computed CRC register, bit 23 first. At the end it pulses done
// with crc_ok. A Length above MAX_PAYLOAD ends the packet at once with
// crc_ok = 0, because no valid advertising packet is that long.
//
// Following the design this is built from: header layout, payload limit of 37
// bytes, CRC and whitening rules. This design's choices: the early end on an
// oversize length and the byte-stream output.
//
// Interface: every completed byte appears for one clock on byte_valid with its
// index in the PDU (0 and 1 are the header). done/crc_ok/hdr are valid together.
// Timing: outputs are registered, one clock after the bit_valid of the last bit.
module ble_rx_deframer
  import ble_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = PDU_MAX_PAYLOAD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [5:0] channel,
  input  logic       bit_valid,
  input  logic       bit_in,
  output logic       busy,
  output logic       byte_valid,
  output logic [5:0] byte_idx,
  output logic [7:0] byte_data,
  output logic       done,
  output logic       crc_ok,
  output pdu_hdr_t   hdr
);
  typedef enum logic [1:0] {S_IDLE, S_PDU, S_CRC} state_e;
  state_e state;

  logic        d;           // dewhitened current bit
  logic [23:0] crc;
  logic [7:0]  sh;          // byte being assembled
  logic [2:0]  bitcnt;
  logic [5:0]  idx;         // index of the byte being assembled
  logic [4:0]  crc_cnt;
  logic        mismatch;
  logic [7:0]  len;
  logic [7:0]  byte_c;

  logic in_pdu;
  assign in_pdu = (state == S_PDU) && bit_valid;

  ble_whitening u_dewhiten (
    .clk, .rst_n, .init(start), .channel,
    .bit_en((state != S_IDLE) && bit_valid), .data_in(bit_in), .data_out(d)
  );

  ble_crc24 u_crc (
    .clk, .rst_n, .init(start), .bit_en(in_pdu), .bit_in(d), .crc
  );

  assign byte_c = {d, sh[7:1]};
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sh         <= '0;
      bitcnt     <= '0;
      idx        <= '0;
      crc_cnt    <= '0;
      mismatch   <= 1'b0;
      len        <= '0;
      byte_valid <= 1'b0;
      byte_idx   <= '0;
      byte_data  <= '0;
      done       <= 1'b0;
      crc_ok     <= 1'b0;
      hdr        <= '0;
    end else begin
      byte_valid <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_PDU;
          bitcnt   <= '0;
          idx      <= '0;
          crc_cnt  <= '0;
          mismatch <= 1'b0;
        end
        S_PDU: if (bit_valid) begin
          sh     <= byte_c;
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 3'd7) begin
            byte_valid <= 1'b1;
            byte_idx   <= idx;
            byte_data  <= byte_c;
            idx        <= idx + 1'b1;
            if (idx == 6'd0) hdr[7:0] <= byte_c;
            if (idx == 6'd1) begin
              hdr.length <= byte_c;
              len        <= byte_c;
              if (byte_c > 8'(MAX_PAYLOAD)) begin
                state  <= S_IDLE;
                done   <= 1'b1;
                crc_ok <= 1'b0;
              end else if (byte_c == 8'd0) begin
                state <= S_CRC;
              end
            end else if (idx > 6'd1 && {2'b00, idx} == len + 8'd1) begin
              state <= S_CRC;
            end
          end
        end
        S_CRC: if (bit_valid) begin
          crc_cnt <= crc_cnt + 1'b1;
          if (crc_cnt == 5'd23) begin
            state  <= S_IDLE;
            done   <= 1'b1;
            crc_ok <= !(mismatch || (d != crc[5'd23 - crc_cnt]));
          end else if (d != crc[5'd23 - crc_cnt]) begin
            mismatch <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
