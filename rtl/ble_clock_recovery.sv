// ble_clock_recovery: bit-transition clock recovery.
//
// Turns the per-sample decisions of the matched filter (SPB samples per bit)
// into one recovered bit per bit time. A position counter runs modulo SPB. Every
// time the decision changes value the counter is forced to 0, so the counter
// always measures the distance from the last observed bit transition; between
// transitions it free-runs, which carries the timing through runs of equal bits.
// The decision is sampled when the counter reaches SAMPLE_OFS. No multiplier is
// needed, which is the point of the transition-based approach.
//
// With a one-bit-time matched filter the decision flips when the window is
// about half into the new bit and the window is fully aligned with the bit
// SPB/2-1 samples later, hence the default SAMPLE_OFS = 7 for SPB = 16. The
// algorithm class (bit-transition detector, no multiplications) follows the
// design this is built from; the hard reset of the counter on every transition
// and the sampling offset are this design's choices.
//
// Timing: bit_valid/bit_out are registered, one clock after the in_valid sample
// that is taken; one bit every SPB in_valid samples when no transitions occur.
module ble_clock_recovery #(
  parameter int unsigned SPB        = 16,
  parameter int unsigned SAMPLE_OFS = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic bit_dec,
  output logic bit_valid,
  output logic bit_out
);
  localparam int unsigned CW = $clog2(SPB);
  logic [CW-1:0] cnt, pos;
  logic          prev;

  always_comb begin
    if (bit_dec != prev)                pos = '0;
    else if (cnt == CW'(SPB - 1))       pos = '0;
    else                                pos = cnt + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      prev      <= 1'b0;
      bit_valid <= 1'b0;
      bit_out   <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      if (in_valid) begin
        prev <= bit_dec;
        cnt  <= pos;
        if (pos == CW'(SAMPLE_OFS)) begin
          bit_valid <= 1'b1;
          bit_out   <= bit_dec;
        end
      end
    end
  end

  initial assert (SAMPLE_OFS < SPB) else $error("SAMPLE_OFS must be below SPB");
endmodule
