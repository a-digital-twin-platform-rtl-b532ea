// ble_matched_filter: low-IF non-coherent GFSK matched-filter demodulator.
//
// The receiver front end mixes the 2.4 GHz signal down to a low IF and samples
// it with signed ADC_W-bit I/Q ADCs. A GFSK '1' is then a tone at IF+DEV and a
// '0' a tone at IF-DEV. This block keeps the last TAPS samples (one bit time:
// 16 samples at 16 MHz for 1 Mb/s) in a shift buffer and correlates them with
// two complex exponential templates, one per tone:
//
//     C_f[n] = sum_{k=0}^{TAPS-1} x[n-TAPS+1+k] * exp(-j*2*pi*f*k/FS)
//
// The template phase is k*fword(f) in 1/65536 turn, looked up in the 64-point
// sine table of ble_pkg. Because only |C_f|^2 is used, the unknown carrier phase
// of the free-running LO drops out (non-coherent detection). Every sample the
// block outputs the decision bit_dec = (|C_hi|^2 > |C_lo|^2) and the signed
// difference as a soft metric.
//
// Following the design this is built from: a one-bit-time buffer, 4-bit I/Q at
// 16 MHz, one template per frequency deviation (+/-250 kHz). This design's own
// choices: the 2.5 MHz IF (the value used by the same front end for 802.15.4),
// 8-bit template amplitude, exact squared magnitudes, '1' = upper tone.
//
// Timing: one sample per in_valid; out_valid/bit_dec follow the sample that
// completes the window by three clocks (buffer, correlation and decision
// registers). in_valid may be high every clock.
module ble_matched_filter
  import ble_pkg::*;
#(
  parameter int unsigned ADC_W   = 4,
  parameter int unsigned FS_KHZ  = 16000,
  parameter int          IF_KHZ  = 2500,
  parameter int          DEV_KHZ = 250,
  parameter int unsigned TAPS    = 16,
  localparam int unsigned ACC_W  = ADC_W + 8 + 1 + $clog2(TAPS) + 1,
  localparam int unsigned E_W    = 2 * ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [ADC_W-1:0] adc_q,
  output logic                    out_valid,
  output logic                    bit_dec,
  output logic signed [E_W:0]     metric
);
  // ---- templates, fixed at elaboration ------------------------------------
  typedef logic signed [7:0] coef_t;
  localparam int FW_HI = fword(IF_KHZ + DEV_KHZ, FS_KHZ);
  localparam int FW_LO = fword(IF_KHZ - DEV_KHZ, FS_KHZ);

  function automatic logic [5:0] tap_phase(input int fw, input int k);
    logic [15:0] ph;
    ph = 16'(fw * k);
    return ph[15:10];
  endfunction

  // ---- one-bit-time sample buffer --------------------------------------------
  logic signed [ADC_W-1:0] buf_i [TAPS];
  logic signed [ADC_W-1:0] buf_q [TAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) begin
        buf_i[k] <= '0;
        buf_q[k] <= '0;
      end
    end else if (in_valid) begin
      // buf[TAPS-1] is the newest sample, buf[0] the oldest (template tap 0).
      for (int k = 0; k < TAPS - 1; k++) begin
        buf_i[k] <= buf_i[k+1];
        buf_q[k] <= buf_q[k+1];
      end
      buf_i[TAPS-1] <= adc_i;
      buf_q[TAPS-1] <= adc_q;
    end
  end

  // ---- correlators -------------------------------------------------------------
  // (xi + j xq)(c - j s) = (xi c + xq s) + j (xq c - xi s)
  logic signed [ACC_W-1:0] re_hi_c, im_hi_c, re_lo_c, im_lo_c;

  always_comb begin
    re_hi_c = '0; im_hi_c = '0; re_lo_c = '0; im_lo_c = '0;
    for (int k = 0; k < TAPS; k++) begin
      coef_t ch, sh, cl, sl;
      ch = cos64(tap_phase(FW_HI, k));
      sh = sin64(tap_phase(FW_HI, k));
      cl = cos64(tap_phase(FW_LO, k));
      sl = sin64(tap_phase(FW_LO, k));
      re_hi_c += ACC_W'(buf_i[k] * ch + buf_q[k] * sh);
      im_hi_c += ACC_W'(buf_q[k] * ch - buf_i[k] * sh);
      re_lo_c += ACC_W'(buf_i[k] * cl + buf_q[k] * sl);
      im_lo_c += ACC_W'(buf_q[k] * cl - buf_i[k] * sl);
    end
  end

  logic signed [ACC_W-1:0] re_hi, im_hi, re_lo, im_lo;
  logic                    v1, v2;
  logic [E_W-1:0]          e_hi, e_lo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {re_hi, im_hi, re_lo, im_lo} <= '0;
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_valid <= 1'b0;
      bit_dec   <= 1'b0;
      metric    <= '0;
    end else begin
      v1 <= in_valid;            // buffer now holds the new sample
      v2 <= v1;                  // correlations of that window registered
      out_valid <= v2;
      if (v1) begin
        re_hi <= re_hi_c; im_hi <= im_hi_c;
        re_lo <= re_lo_c; im_lo <= im_lo_c;
      end
      if (v2) begin
        bit_dec <= e_hi > e_lo;
        metric  <= $signed({1'b0, e_hi}) - $signed({1'b0, e_lo});
      end
    end
  end

  assign e_hi = E_W'(re_hi * re_hi) + E_W'(im_hi * im_hi);
  assign e_lo = E_W'(re_lo * re_lo) + E_W'(im_lo * im_lo);
endmodule
