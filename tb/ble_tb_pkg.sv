// ble_tb_pkg: reference models and test vectors for the BLE baseband testbenches.
//
// Everything here is written independently of the RTL: a CRC-24 computed by
// polynomial long division on a bit queue, the whitening sequence generated
// from an explicit position array, a packet builder that produces the on-air
// bit sequence, and a floating-point GFSK modulator (true Gaussian filter,
// BT = 0.5) that produces quantised low-IF I/Q samples with optional carrier
// frequency offset, oscillator phase noise and Gaussian noise. The three
// packets of an active-scanning exchange (ADV_IND, SCAN_REQ, SCAN_RSP on
// channel 37) and the CRC values a
// commercial sniffer printed for them serve as fixed test vectors; the sniffer
// shows each CRC bit-reversed (first transmitted bit in the LSB).
package ble_tb_pkg;

  typedef byte unsigned bytes_t[$];
  typedef bit           bits_t[$];

  localparam logic [31:0] AA = 32'h8E89BED6;

  // ---- captured packets --------------------------------------------------------
  function automatic bytes_t adv_ind_pdu();
    return '{8'h00, 8'h16, 8'h99, 8'h92, 8'hB1, 8'hEB, 8'hD7, 8'h90,
             8'h02, 8'h01, 8'h02, 8'h0C, 8'hFF, 8'hB7, 8'h04, 8'hDE,
             8'h7E, 8'hC7, 8'hAB, 8'h1E, 8'h7E, 8'h57, 8'hCA, 8'h5E};
  endfunction
  function automatic bytes_t scan_req_pdu();
    return '{8'h43, 8'h0C, 8'h15, 8'hB6, 8'h94, 8'h1A, 8'h6F, 8'h56,
             8'h99, 8'h92, 8'hB1, 8'hEB, 8'hD7, 8'h90};
  endfunction
  function automatic bytes_t scan_rsp_pdu();
    return '{8'h04, 8'h0D, 8'h99, 8'h92, 8'hB1, 8'hEB, 8'hD7, 8'h90,
             8'h06, 8'h09, 8'h53, 8'h43, 8'h55, 8'h4D, 8'h33};
  endfunction
  localparam logic [23:0] SNIFF_CRC_ADV = 24'h6B8EBC;
  localparam logic [23:0] SNIFF_CRC_REQ = 24'hF16637;
  localparam logic [23:0] SNIFF_CRC_RSP = 24'h982883;
  localparam logic [47:0] ADV_ADDR  = 48'h90D7EBB19299;
  localparam logic [47:0] SCAN_ADDR = 48'h566F1A94B615;

  function automatic logic [23:0] bitrev24(input logic [23:0] v);
    logic [23:0] r;
    for (int k = 0; k < 24; k++) r[k] = v[23-k];
    return r;
  endfunction

  // ---- bits ------------------------------------------------------------------------
  function automatic bits_t bytes_to_bits(input bytes_t b);
    bits_t q;
    foreach (b[i]) for (int k = 0; k < 8; k++) q.push_back(b[i][k]);
    return q;
  endfunction

  // CRC by long division: the message (with the 24-bit seed folded into its
  // first 24 bits) times x^24, modulo x^24+x^10+x^9+x^6+x^4+x^3+x+1. Result in
  // "register" order: bit 23 is sent first.
  function automatic logic [23:0] crc_ref(input bytes_t pdu);
    bits_t m = bytes_to_bits(pdu);
    bit    r[$];
    bit    g[25] = '{1,0,0,0,0,0,0,0,0,0,0,0,0,0,1,1,0,0,1,0,1,1,0,1,1}; // x^24 .. x^0
    logic [23:0] res;
    logic [23:0] seed = 24'h555555;
    // dividend = (message xor seed on its first 24 bits) followed by 24 zeros;
    // a message shorter than 24 bits is padded by the seed alone.
    for (int i = 0; i < m.size() + 24; i++) r.push_back(i < m.size() ? m[i] : 1'b0);
    for (int i = 0; i < 24; i++) r[i] ^= seed[23-i];
    for (int i = 0; i + 24 < r.size(); i++)
      if (r[i]) for (int j = 0; j < 25; j++) r[i+j] ^= g[j];
    for (int k = 0; k < 24; k++) res[23-k] = r[r.size()-24+k];
    return res;
  endfunction

  // Whitening sequence: positions p[0..6]; p[0] = 1, p[1..6] = channel MSB first;
  // output p[6]; next state p[0] <- p[6], p[4] <- p[3]^p[6], p[k] <- p[k-1].
  function automatic bits_t whiten_seq(input int ch, input int n);
    bit p[7];
    bit q[7];
    bits_t s;
    p[0] = 1;
    for (int k = 1; k <= 6; k++) p[k] = (ch >> (6 - k)) & 1;
    repeat (n) begin
      s.push_back(p[6]);
      q[0] = p[6];
      for (int k = 1; k < 7; k++) q[k] = p[k-1];
      q[4] = p[3] ^ p[6];
      p = q;
    end
    return s;
  endfunction

  // On-air bits: preamble, access address, whitened PDU and CRC.
  function automatic bits_t packet_bits(input bytes_t pdu, input int ch);
    bits_t q, body, w;
    logic [23:0] c = crc_ref(pdu);
    for (int k = 0; k < 8; k++) q.push_back(k % 2 == (AA[0] ? 0 : 1));
    for (int k = 0; k < 32; k++) q.push_back(AA[k]);
    body = bytes_to_bits(pdu);
    for (int k = 23; k >= 0; k--) body.push_back(c[k]);
    w = whiten_seq(ch, body.size());
    foreach (body[i]) q.push_back(body[i] ^ w[i]);
    return q;
  endfunction

  // ---- floating-point GFSK modulator -----------------------------------------------
  // Gaussian pulse-shaped frequency, BT = 0.5, 16 samples per bit, modulation
  // index 0.5, at if_khz + cfo_khz. Samples are scaled by amp (full scale 7),
  // noise of standard deviation sigma is added, then rounded and clipped to
  // 4-bit signed. lead/trail add unmodulated carrier around the packet.
  function automatic real gauss_noise();
    real s = 0.0;
    repeat (12) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  function automatic int q4(input real v);
    int r = $rtoi(v + (v >= 0 ? 0.5 : -0.5));
    if (r > 7) r = 7;
    if (r < -8) r = -8;
    return r;
  endfunction

  function automatic void gfsk_iq(input bits_t b, input real if_khz, input real cfo_khz,
                                  input real amp, input real sigma, input int lead,
                                  input int trail, ref int si[$], ref int sq[$]);
    gfsk_iq_lo(b, if_khz, cfo_khz, 0.0, amp, sigma, lead, trail, si, sq);
  endfunction

  // As gfsk_iq, plus oscillator phase noise modelled as a random walk of the
  // carrier phase with pn_rad standard deviation per sample (Wiener phase
  // noise of a free-running oscillator: L(df) = dv / (pi df^2) with
  // pn_rad^2 = 2 pi dv / 16 MHz).
  function automatic void gfsk_iq_lo(input bits_t b, input real if_khz, input real cfo_khz,
                                     input real pn_rad, input real amp, input real sigma,
                                     input int lead, input int trail,
                                     ref int si[$], ref int sq[$]);
    localparam int SPB = 16;
    real h[];
    real hs, ph, f, t, sgm;
    int  nt, ns;
    real lvl[$];
    sgm = $sqrt($ln(2.0)) / (2.0 * 3.14159265358979 * 0.5) * SPB;  // samples
    nt  = 3 * SPB + 1;
    h   = new[nt];
    hs  = 0.0;
    for (int k = 0; k < nt; k++) begin
      t    = k - (nt - 1) / 2.0;
      h[k] = $exp(-t * t / (2.0 * sgm * sgm));
      hs  += h[k];
    end
    for (int i = 0; i < lead; i++) lvl.push_back(0.0);
    foreach (b[i]) for (int k = 0; k < SPB; k++) lvl.push_back(b[i] ? 1.0 : -1.0);
    for (int i = 0; i < trail; i++) lvl.push_back(0.0);
    ns = lvl.size();
    ph = 2.0 * 3.14159265358979 * real'($urandom % 1000) / 1000.0;
    for (int n = 0; n < ns; n++) begin
      f = 0.0;
      for (int k = 0; k < nt; k++) begin
        int j = n - k + (nt - 1) / 2;
        if (j >= 0 && j < ns) f += h[k] * lvl[j];
      end
      f  = if_khz + cfo_khz + 250.0 * f / hs;
      ph += 2.0 * 3.14159265358979 * f / 16000.0;
      if (pn_rad != 0.0) ph += pn_rad * gauss_noise();
      si.push_back(q4(amp * $cos(ph) + sigma * gauss_noise()));
      sq.push_back(q4(amp * $sin(ph) + sigma * gauss_noise()));
    end
  endfunction

endpackage
