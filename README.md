# A BLE 1M baseband for a crystal-free, low-IF radio

A crystal-free radio has no quartz reference. Its local oscillator runs free, so the
carrier can land tens of kHz away from where it should be and drift from packet to
packet. The receiver compensates with a low intermediate frequency: the 2.4 GHz
signal is mixed down to a few MHz instead of to zero, away from the oscillator's
flicker-noise region, and is then digitised by coarse 4-bit I/Q converters. This
RTL is the digital half of a Bluetooth Low Energy (LE 1M, Bluetooth 4.0) transceiver
built on that kind of front end. It:

- receives GFSK at 1 Mb/s from the 4-bit I/Q samples, with no carrier phase lock and no
  frequency correction;
- finds the advertising access address, de-whitens the packet, checks its CRC and
  stores the PDU;
- builds, CRC-protects, whitens and GFSK-modulates outgoing packets into I/Q DAC samples;
- runs the peripheral side of a BLE *active scanning* event as hardware. It sends
  ADV_IND on channels 37/38/39, listens after each one, and answers a SCAN_REQ
  addressed to it with a SCAN_RSP.

A receive-only mode turns the same chain into a packet-error-rate tester.

The core receiver idea is *non-coherent matched filtering*. One bit lasts 16 samples
(16 MHz sampling, 1 Mb/s). The demodulator correlates the most recent 16 samples
against the two tones a bit can be (IF + 250 kHz for a one, IF − 250 kHz for a zero)
and keeps only the correlation energies. The unknown carrier phase therefore cancels,
and moderate frequency offsets only cost some margin. Bit timing comes from watching
where the decision flips, which needs no multiplier.

Everything runs on one clock, the 16 MHz sample clock. All code is synthesizable
SystemVerilog (IEEE 1800-2017).

## Block map

```
            adc_i/adc_q (4-bit, 16 MS/s)
                 |
        ble_matched_filter ---- bit_dec, one per sample
                 |
        ble_clock_recovery ---- one bit per microsecond
                 |
          ble_aa_detector ----- packet_detected (to the front end / host)
                 |
          ble_rx_deframer ----- de-whitening + CRC-24 check, header, bytes
             |        |
   ble_pdu_buffer   ble_link_layer ---- advertising / scan-response state machine
   (host reads)           |
                    ble_tx_framer ---- preamble, access address, PDU, CRC, whitening
                          |
                  ble_gfsk_modulator ---- dac_i/dac_q (12-bit)
```

| File | Contents |
|---|---|
| `rtl/ble_pkg.sv` | Constants (access address, CRC polynomial and seed, 37-byte payload limit), the PDU header struct, the PDU type enum, and the sine table and frequency-word functions. |
| `rtl/ble_crc24.sv` | Bit-serial CRC-24 LFSR. |
| `rtl/ble_whitening.sv` | Bit-serial 7-bit whitening LFSR. |
| `rtl/ble_matched_filter.sv` | Two-tone non-coherent correlator. |
| `rtl/ble_clock_recovery.sv` | Bit-transition timing recovery. |
| `rtl/ble_aa_detector.sv` | Access-address correlator (packet detection). |
| `rtl/ble_rx_deframer.sv` | De-whitening, byte assembly, header capture and CRC check. |
| `rtl/ble_pdu_buffer.sv` | 39-byte receive PDU store. |
| `rtl/ble_tx_framer.sv` | Serialises one packet at 1 bit per 16 clocks. |
| `rtl/ble_gfsk_modulator.sv` | Gaussian-approximating frequency shaping and NCO. |
| `rtl/ble_link_layer.sv` | Advertiser state machine with the configuration store. |
| `rtl/ble_baseband_top.sv` | The top level. |

## Packet format, CRC and whitening

On air, an advertising packet is:

| Field | Size | Notes |
|---|---|---|
| Preamble | 8 bits | Alternating bits. 0xAA for this access address, so its last bit differs from the first access-address bit. |
| Access address | 32 bits | 0x8E89BED6, least significant bit first. |
| PDU | 2 + 0..37 bytes | Each byte least significant bit first. |
| CRC | 24 bits | |

The largest packet is 376 bits, or 368 without the preamble.

The first PDU byte holds the type in bits 0–3, two reserved bits, then TxAdd and RxAdd.
The second byte is the payload length. Types used here are ADV_IND = 0, SCAN_REQ = 3
and SCAN_RSP = 4. The payload starts with the 6-byte advertiser address (AdvA),
again sent least significant byte first. A SCAN_REQ carries the scanner's address
(ScanA) followed by the AdvA it is meant for.

**CRC.** The CRC is polynomial 0x00065B (x^24 + x^10 + x^9 + x^6 + x^4 + x^3 + x + 1),
seeded with 0x555555, and runs over the PDU bits in the order they are sent. It is
built as an internal-XOR (Galois) LFSR, shifting one bit per enable. The 24 CRC bits
are sent starting from register bit 23. In the receiver, the deframer compares each
received CRC bit with the matching register bit instead of running the register over
the CRC. A captured exchange from a commercial sniffer was used as the reference. Its
three CRCs (0x6B8EBC, 0xF16637 and 0x982883) are this register's contents bit-reversed,
which is how that tool displays them.

**Whitening.** Whitening XORs the PDU and CRC with a 7-bit LFSR sequence, x^7 + x^4 + 1.
The register is loaded with a 1 in position 0 and the channel number, most significant
bit first, in positions 1–6. The output bit is position 6. Applying the same sequence
again removes it. Both ends restart it at the first PDU bit.

## Receive chain

### Matched filter (`ble_matched_filter`)

A 16-entry shift buffer holds the last bit-time of I/Q samples. Every sample, two
complex correlations are formed:

    C_f = sum_k x[n-15+k] * exp(-j*2*pi*f*k/16 MHz),   f = IF +/- 250 kHz

The template phase is k times a 16-bit frequency word
(`fword(f) = f * 65536 / 16000`). The top 6 bits of that phase address a 64-point sine
table of amplitude 127. The decision is `bit_dec = |C_hi|^2 > |C_lo|^2`, and the signed
difference of the two energies comes out as `metric`.

- **Why non-coherent.** Squaring discards the phase, so the free-running oscillator's
  random phase does not matter.
- **Carrier offset.** An offset Δf moves both tones by Δf. The correlation loses energy
  roughly like sinc(Δf · 1 µs). With ±250 kHz tones, offsets of ±50 kHz still decode
  reliably (tested below).
- **Latency.** The filter registers the buffer, the correlations and the decision, so
  its latency is 3 clocks.
- **Intermediate frequency.** The IF is a parameter (`IF_KHZ`). The default is 2.5 MHz:
  the front end's nominal IF for its 802.15.4 mode, used here for BLE too.

### Clock recovery (`ble_clock_recovery`)

A counter runs from 0 to 15 and wraps. Whenever the per-sample decision changes value,
the counter is forced back to 0. When it reaches `SAMPLE_OFS` (7), the current decision
is taken as the bit.

- **Why offset 7.** With a one-bit-long correlator, the decision flips when the window
  is about half into the new bit. The window is then fully inside the bit 7 samples
  later.
- **Runs of equal bits.** Between transitions the counter free-runs, which carries the
  timing across runs of equal bits.
- **Preamble.** The alternating preamble gives eight transitions to lock on, but nothing
  depends on receiving it.

### Packet detection (`ble_aa_detector`)

Recovered bits shift in from the top of a 32-bit register, so after 32 bits the
register holds the access address in its normal bit order. While armed, the register
is compared with 0x8E89BED6. `detected` pulses when the Hamming distance is at most
`MAX_ERR` (default 0). The history is then cleared. At the top level the detector is
armed only while the deframer is idle, and `detected` is also brought out as
`packet_detected`.

### Deframer (`ble_rx_deframer`)

The deframer starts on `detected`, loading the de-whitener (with the channel number)
and the CRC. Each PDU bit is de-whitened, fed to the CRC, and shifted into a byte.
Each finished byte is emitted with its index, and bytes 0 and 1 are captured as
the header. The length byte sets where the PDU ends, and the 24 CRC bits that follow
are compared with the register. `done` pulses with `crc_ok`.

A length above 37 cannot be a valid BLE 4.0 advertising PDU. The packet is then ended
at once with `crc_ok = 0`, so the buffer cannot overrun.

### PDU buffer (`ble_pdu_buffer`)

The PDU buffer is 39 bytes (2 header + 37 payload), with one write port and a
registered read port. The host reads it after `rx_pkt_done`. Addresses past the end
read as 0.

## Transmit chain

### Framer (`ble_tx_framer`)

On `start` the framer loads the CRC and whitening registers and sends the following,
one bit every 16 clocks:

1. the preamble, chosen from the access address's first bit;
2. the access address;
3. the PDU bytes, fetched one per byte through a combinational read port;
4. the CRC.

PDU and CRC bits are whitened. `tx_active` frames the bits for the modulator and
`done` pulses at the end.

### GFSK modulator (`ble_gfsk_modulator`)

BLE uses Gaussian-filtered FSK with BT = 0.5. Here the Gaussian pulse is approximated
by three cascaded 8-sample moving sums over the ±1 bit level (sampled 16 times per
bit). This gives a smooth, nearly Gaussian frequency pulse with the right ±250 kHz
peak deviation and no multiplier in the filter. The filtered level scales a frequency
word. That word is added to the IF word in a 16-bit phase accumulator, and the top
6 bits look up cosine and sine for the 12-bit DACs.

`dac_valid` stays high for 27 clocks after the last bit, so the filter drains. The
testbenches check the result with an FM discriminator.

## Advertiser state machine (`ble_link_layer`)

```
IDLE -> ADV_START -> ADV_TX -> LISTEN -+-> timeout --------------> NEXT
                                       +-> RX -+-> not for us -----> NEXT
                                               +-> IFS -> RSP_TX -> NEXT
NEXT -> ADV_START (next channel) | INTERVAL -> ADV_START (channel 37)
```

**Advertising round.** With `adv_enable` high, the state machine works through
channels 37, 38 and 39. On each one it sends an ADV_IND (AdvA + AdvData), then arms
the receiver for a `LISTEN_US` window (250 µs).

**Answering a scan request.** The incoming packet is checked byte by byte as it
arrives. It must be a SCAN_REQ with a 12-byte payload whose AdvA field equals this
device's address. If it is, and the CRC is good, the block waits `T_IFS_US` (150 µs)
from the end of the request and sends a SCAN_RSP (AdvA + ScanRspData) on the same
channel. The scanner's address is reported in `last_scan_addr`, and `scan_req_count`
counts answered requests.

**Between rounds.** After channel 39 the state machine waits `ADV_INTERVAL_US`
(20 ms) before starting again.

**Building PDUs.** PDUs are never stored whole. The framer asks for byte *i*, and the
link layer computes it from the type and length, the 48-bit address, and the two
31-byte data stores. The host writes those stores through `cfg_we`/`cfg_sel`/`cfg_addr`/`cfg_wdata`.

## Top level (`ble_baseband_top`)

| Port group | Signals |
|---|---|
| Front end, receive | `adc_valid`, `adc_i`, `adc_q` (4-bit signed) |
| Front end, transmit | `dac_i`, `dac_q` (12-bit signed), `dac_valid` |
| Front end, control | `tx_en`, `rx_en`, `rf_channel` (BLE channel index 0–39), `packet_detected` |
| Mode | `rx_only`, `rx_only_channel`, `adv_enable` |
| Advertising content | `adv_addr`, `adv_data_len`, `rsp_data_len`, `cfg_*` |
| Received packets | `rx_buf_raddr`, `rx_buf_rdata`, `rx_pkt_done`, `rx_crc_ok`, `rx_hdr` |
| Counters | `rx_good_count`, `rx_bad_count`, `adv_count`, `scan_req_count`, `last_scan_addr` |

**Modes.** With `rx_only` high, the link layer stays idle and the receiver is armed
continuously on `rx_only_channel`. Every detected packet is stored and counted as good
or bad. This is the packet-error-rate set-up: the host compares the buffer with the
packet that was sent. With `rx_only` low and `adv_enable` high, the chip advertises as
described above.

**Top-level parameters.**

| Parameter | Default |
|---|---|
| `ADC_W` | 4 |
| `DAC_W` | 12 |
| `IF_KHZ` | 2500 |
| `MAX_AA_ERR` | 0 |
| `T_IFS_US` | 150 |
| `LISTEN_US` | 250 |
| `ADV_INTERVAL_US` | 20000 |

The sample rate (16 MHz), samples per bit (16) and the ±250 kHz deviation are fixed by
BLE LE 1M and this front end.

## Where this departs from the source design

- The baseband it follows ran its link layer (advertising, scan response) as firmware.
  Here it is a hardware state machine, so a single netlist can run the whole active-scan
  exchange.
- Values the source does not state were taken from the Bluetooth 4.0 specification or
  chosen here:
  - the BLE IF of 2.5 MHz;
  - 150 µs inter-frame space;
  - 20 ms advertising interval;
  - 250 µs listen window;
  - TxAdd = RxAdd = 0;
  - 31-byte data stores;
  - exact access-address match;
  - sampling offset 7;
  - 8-bit template and sine amplitude.
- The transmit Gaussian filter is approximated by three box filters rather than a true
  Gaussian. The receiver testbenches use a true Gaussian (BT = 0.5) transmitter model, so
  the receiver is not only tested against its own modulator.
- The 802.15.4 mode of the original front end is not included.
- Not included because they are not digital logic: the analog front ends (LNA, mixer,
  oscillator, ADC, DAC, power amplifier) and the measurement equipment.
- `mf_metric` (the soft decision) and the framer's busy flag are produced but not used
  at the top level. They are kept for observation.

## Measured receiver behaviour

`tb_ble_per_sweep` runs the sensitivity measurement in receive-only mode.

**Set-up.**

- Each packet is maximum length, with a 37-byte random payload.
- The signal amplitude is 6 LSB per rail. Gaussian noise of σ LSB per rail is added
  before 4-bit quantisation.
- A packet counts as recovered only if it is detected, its CRC passes, and all 39
  buffered bytes match.
- PER is converted to BER with BER = 1 − (1 − PER)^(1/368). So 30.8 % PER corresponds
  to the 0.1 % BER sensitivity limit.
- 2000 packets are sent per point, for two receiver oscillators:
  - a *reference* one, with no offset and no phase noise, standing in for a
    crystal-locked LO;
  - a *free-running* one, with a random carrier offset up to ±50 kHz per packet and
    random-walk phase noise of −100 dBc/Hz at 1 MHz.

The offset and phase-noise levels are assumptions of the test, not measured values.

| σ (LSB) | SNR (A²/2σ²) | PER, reference | BER, reference | PER, free-running | BER, free-running |
|---|---|---|---|---|---|
| 0.5 | 18.6 dB | 0 % | 0 | 0 % | 0 |
| 1.5 | 9.0 dB | 0.1 % | 2.7e-6 | 5.5 % | 1.5e-4 |
| 2.0 | 6.5 dB | 5.3 % | 1.5e-4 | 33.4 % | 1.1e-3 |
| 2.5 | 4.6 dB | 44.5 % | 1.6e-3 | 73.2 % | 3.6e-3 |
| 3.0 | 3.0 dB | 92.0 % | 6.9e-3 | 96.8 % | 9.3e-3 |

The 0.1 % BER point falls near 5 dB SNR, measured in the 16 MHz sampling bandwidth,
with the reference oscillator. The free-running one needs about 6.5 dB, so the
oscillator costs roughly 1.5–2 dB. Almost all of that cost comes from the frequency
offset: with the offset alone, the figures come out nearly the same. The non-coherent
correlator tolerates the offset but pays for it in energy. These are
simulated numbers for an idealised analog front end. They are not dBm figures.

## Verification

Each block has a self-checking testbench in `tb/`. Each one:

- compares against models written independently in `tb/ble_tb_pkg.sv`: a long-division
  CRC, a whitening sequence generator, a packet bit builder, and a floating-point GFSK
  I/Q generator with noise and 4-bit quantisation;
- prints `TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb_ble_crc24`, `tb_ble_whitening` | Random and captured packets, all 40 channels. |
| `tb_ble_matched_filter`, `tb_ble_clock_recovery` | Noisy GFSK with carrier offsets. The bit error count and timing are checked. |
| `tb_ble_aa_detector` | Exact, 1-bit and 2-bit errors, the disarmed case, and the error threshold. |
| `tb_ble_rx_deframer` | Random PDUs on random channels, corrupted bits, and oversize lengths. |
| `tb_ble_tx_framer` | Bit-exact against the reference bit builder, and the 16-clock bit period. |
| `tb_ble_gfsk_modulator` | Frequency at ±250 kHz around the IF, the smoothing against a floating-point model over 200 random bits, amplitude and the drain time. |
| `tb_ble_link_layer` | Channel order, PDU bytes, interval, the exact T_IFS in clocks, address filter and CRC filter. Runs with shortened timers. |
| `tb_ble_baseband_top` | The whole chip at default parameters: a full active-scanning exchange with the captured bytes, then receive-only mode. |
| `tb_ble_per_sweep` | The PER/BER sweep above, with 2000 packets per point. It runs for about 3.5 minutes. |

In `tb_ble_baseband_top`:

- **Active scanning.**
  - The transmitted I/Q is demodulated by an FM discriminator. Every bit must match the
    expected ADV_IND and SCAN_RSP.
  - The SCAN_REQ is sent 150 µs after the ADV_IND with a 30 kHz carrier offset. The
    SCAN_RSP must start 150 µs (±2 µs) after the request ends.
  - Channel 38 gets no request, so its listen window must time out.
  - Channel 39 gets a request for another address, which must be ignored.
  - The 20 ms interval is measured.
- **Receive-only mode.** A maximum-length packet with noise and a −40 kHz offset must
  be stored intact. A corrupted one must be counted bad.
- **Mechanisms.** The testbench counts each mechanism it exercised and fails if any
  count is zero.

### Simulating with Verilator

The packages must come first. The wildcard picks up `ble_pkg.sv` a second time, which
Verilator only warns about (MODDUP), hence `-Wno-fatal`. For example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/ble_pkg.sv tb/ble_tb_pkg.sv rtl/*.sv tb/tb_ble_baseband_top.sv \
    --top-module tb_ble_baseband_top -o sim
./obj_dir/sim
```

Replace the testbench file and top module name to run any other testbench. A block
testbench builds and runs in a few seconds. The full top-level test takes about 10 s,
most of it compilation. Add `+verilator+rand+reset+2` at run time to start registers at
random values. Every register that is read is reset, and the testbenches pass that way.

Without the testbench package, the RTL alone lints with:

```
verilator --lint-only -Wall -Wno-fatal rtl/ble_pkg.sv rtl/*.sv --top-module ble_baseband_top
```

Apart from the duplicate package, this reports only unused signals and bits. These are
the soft metric and framer busy flag named above, bits that fall off a shift register
or a product, and the low phase bits below the sine-table index.
