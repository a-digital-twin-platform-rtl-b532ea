// ble_pdu_buffer: byte memory for one received PDU.
//
// Holds the two header bytes and up to 37 payload bytes of the last packet the
// receiver deframed, so that the host side (link layer firmware or a packet
// error-rate tester) can read it back and compare it with what was expected.
// One write port (from the deframer byte stream) and one read port; the read
// data is registered (one clock latency) so the array maps to a RAM. The depth
// of 39 bytes is the longest advertising PDU; the memory organisation is this
// design's choice.
module ble_pdu_buffer #(
  parameter int unsigned DEPTH = 39,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [7:0]    wdata,
  input  logic [AW-1:0] raddr,
  output logic [7:0]    rdata
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
    rdata <= (raddr < AW'(DEPTH)) ? mem[raddr] : 8'h00;
  end
endmodule
