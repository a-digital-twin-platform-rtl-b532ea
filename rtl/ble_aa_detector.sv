// ble_aa_detector: packet detection by access-address correlation.
//
// Every recovered bit is shifted into a 32-bit register from the top, so after
// 32 bits of a packet sent least-significant bit first the register equals the
// access address in its natural bit order. While armed, the block compares the
// register with the advertising access address 0x8E89BED6 and pulses detected
// when the number of differing bits is at most MAX_ERR. The preamble carries no
// information and is not needed: detection relies on the access address only.
// After a detection the history is cleared, so the same bits cannot match twice.
//
// Following the design this is built from: access address value, LSB-first
// order, the preamble being optional. This design's choice: the Hamming
// threshold (default 0 = exact match).
//
// Timing: detected is a registered one-clock pulse, one clock after the
// bit_valid of the last access-address bit.
module ble_aa_detector
  import ble_pkg::*;
#(
  parameter int unsigned       MAX_ERR = 0,
  parameter logic [31:0]       AA      = ADV_ACCESS_ADDR
) (
  input  logic clk,
  input  logic rst_n,
  input  logic arm,
  input  logic bit_valid,
  input  logic bit_in,
  output logic detected
);
  logic [31:0] sr, nxt;
  logic [5:0]  nbits;   // bits received since arming / last detection, saturates at 32
  logic [5:0]  hd;

  assign nxt = {bit_in, sr[31:1]};

  always_comb begin
    hd = '0;
    for (int k = 0; k < 32; k++) hd += 6'(nxt[k] ^ AA[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr       <= '0;
      nbits    <= '0;
      detected <= 1'b0;
    end else begin
      detected <= 1'b0;
      if (!arm) begin
        nbits <= '0;
      end else if (bit_valid) begin
        sr <= nxt;
        if (nbits >= 6'd31 && hd <= 6'(MAX_ERR)) begin
          detected <= 1'b1;
          nbits    <= '0;
        end else if (nbits != 6'd32) begin
          nbits <= nbits + 1'b1;
        end
      end
    end
  end
endmodule
