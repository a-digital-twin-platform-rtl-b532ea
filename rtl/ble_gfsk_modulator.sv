// ble_gfsk_modulator: GFSK I/Q sample generator for the LE 1M transmitter.
//
// The NRZ bit stream from the framer (one level per sample clock, SPB samples
// per bit) is mapped to +1/-1 (0 when idle) and smoothed by STAGES cascaded
// BOX_LEN-sample moving sums. By the central limit theorem the cascade is close
// to a Gaussian pulse shaping filter: three 8-sample boxes give a standard
// deviation of about 0.25 bit, near the BT = 0.5 filter of BLE. The smoothed
// level g (range +/-BOX_LEN^STAGES) scales the frequency deviation, and an NCO
// accumulates
//
//     phase += fword(IF) + g * fword(DEV) / BOX_LEN^STAGES   (1/65536 turn)
//
// so a run of ones sits at IF+DEV and a run of zeros at IF-DEV. The top six
// phase bits address the 64-point sine table, whose 8-bit values are placed in
// the upper bits of the DAC_W-bit outputs. When no packet is sent the NCO keeps
// running at IF (an unmodulated carrier), and dac_valid stays high until the
// filter has emptied.
//
// Following the design this is built from: GFSK with +/-250 kHz deviation and
// Gaussian-smoothed transitions, I/Q samples for 12-bit DACs. This design's
// choices: the moving-sum approximation of the Gaussian, the IF (same as the
// receiver, so transmitter and receiver can be looped back) and the NCO size.
//
// Timing: one output sample per clock; the frequency follows the input level
// with a group delay of STAGES*(BOX_LEN-1)/2 samples plus two registers.
module ble_gfsk_modulator
  import ble_pkg::*;
#(
  parameter int unsigned FS_KHZ  = 16000,
  parameter int          IF_KHZ  = 2500,
  parameter int          DEV_KHZ = 250,
  parameter int unsigned DAC_W   = 12,
  parameter int unsigned BOX_LEN = 8,
  parameter int unsigned STAGES  = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    active,
  input  logic                    bit_in,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic                    dac_valid
);
  localparam int unsigned SHIFT = STAGES * $clog2(BOX_LEN);   // log2(BOX_LEN^STAGES)
  localparam int unsigned GW    = SHIFT + 2;                   // signed smoothed level
  localparam int          FW_IF  = fword(IF_KHZ, FS_KHZ);
  localparam int          FW_DEV = fword(DEV_KHZ, FS_KHZ);

  typedef logic signed [GW-1:0] lvl_t;

  lvl_t lvl  [STAGES+1];            // lvl[0] = +/-1 input, lvl[s] = stage s sum
  lvl_t dly  [STAGES][BOX_LEN];     // delay line of each stage's input
  lvl_t acc  [STAGES];
  logic [15:0] phase;
  logic [$clog2(STAGES*BOX_LEN+4)-1:0] tail;   // samples until the filter is empty

  assign lvl[0] = active ? (bit_in ? lvl_t'(1) : lvl_t'(-1)) : lvl_t'(0);
  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    assign lvl[s+1] = acc[s];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        acc[s] <= '0;
        for (int j = 0; j < BOX_LEN; j++) dly[s][j] <= '0;
      end else begin
        acc[s] <= acc[s] + lvl[s] - dly[s][BOX_LEN-1];
        dly[s][0] <= lvl[s];
        for (int j = 1; j < BOX_LEN; j++) dly[s][j] <= dly[s][j-1];
      end
    end
  end

  logic signed [31:0] dfw;
  assign dfw = (32'(lvl[STAGES]) * FW_DEV) >>> SHIFT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      dac_i     <= '0;
      dac_q     <= '0;
      dac_valid <= 1'b0;
      tail      <= '0;
    end else begin
      phase <= phase + 16'(FW_IF) + 16'(dfw);
      dac_i <= DAC_W'(cos64(phase[15:10])) <<< (DAC_W - 8);
      dac_q <= DAC_W'(sin64(phase[15:10])) <<< (DAC_W - 8);
      if (active) tail <= $bits(tail)'(STAGES * BOX_LEN + 2);
      else if (tail != '0) tail <= tail - 1'b1;
      dac_valid <= active || (tail != '0);
    end
  end

  initial assert ((1 << $clog2(BOX_LEN)) == BOX_LEN) else $error("BOX_LEN must be a power of two");
endmodule
