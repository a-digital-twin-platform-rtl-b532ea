// ble_crc24: bit-serial BLE CRC-24.
//
// Computes the 24-bit link-layer CRC (polynomial 0x00065B, seed 0x555555) over
// the PDU, one bit per bit_en in transmission order (each byte LSB first). The
// register is an internal-XOR LFSR: the feedback bit is crc[23] xor the incoming
// bit and is xored into the polynomial taps. After the last PDU bit, crc holds
// the check value; it is transmitted crc[23] first. That order reproduces the
// CRC values a commercial sniffer shows for real advertising packets.
//
// Timing: init loads the seed on the next clock; each bit_en updates crc on the
// next clock. init has priority over bit_en.
module ble_crc24
  import ble_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic        bit_en,
  input  logic        bit_in,
  output logic [23:0] crc
);
  logic fb;
  assign fb = crc[23] ^ bit_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      crc <= CRC_INIT;
    else if (init)   crc <= CRC_INIT;
    else if (bit_en) crc <= {crc[22:0], 1'b0} ^ (fb ? CRC_POLY : 24'h0);
  end
endmodule
