// ble_whitening: BLE data whitening / dewhitening.
//
// A 7-bit LFSR with polynomial x^7 + x^4 + 1 whose output (position 6) is xored
// with each PDU and CRC bit. init seeds position 0 with 1 and positions 1..6 with
// the 6-bit channel number, most significant bit in position 1. Each bit_en
// advances the register: position 0 takes the old position 6, position 4 takes
// old position 3 xor old position 6, the others shift up by one. The same block
// whitens on transmit and dewhitens on receive.
//
// Timing: data_out = data_in ^ lfsr[6] is combinational for the current bit;
// bit_en moves to the next bit on the clock edge. init has priority.
module ble_whitening (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init,
  input  logic [5:0] channel,
  input  logic       bit_en,
  input  logic       data_in,
  output logic       data_out
);
  logic [6:0] lfsr;  // lfsr[k] = position k

  function automatic logic [6:0] seed(input logic [5:0] ch);
    logic [6:0] s;
    s[0] = 1'b1;
    for (int k = 1; k <= 6; k++) s[k] = ch[6-k];  // MSB of ch into position 1
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      lfsr <= seed(6'd37);
    else if (init)   lfsr <= seed(channel);
    else if (bit_en) lfsr <= {lfsr[5], lfsr[4], lfsr[3] ^ lfsr[6], lfsr[2], lfsr[1], lfsr[0], lfsr[6]};
  end

  assign data_out = data_in ^ lfsr[6];
endmodule
