// uwb_tb_pkg -- reference model shared by the transceiver testbenches.
//
// Holds its own copy of the pulse template and computes, sample by sample, the
// baseband waveform that an IR-UWB time-hopping packet should have: one sync bit
// period followed by the data bits, ns frames per bit, one pulse per frame in the
// chip named by the TH code, PPM shift for a one (PPM) or no pulse for a zero (OOK).
// The testbenches compare the RTL with this model and feed it to the receivers.
package uwb_tb_pkg;

  int unsigned m_nc = 3, m_chip_len = 24, m_ns = 1, m_code_len = 2, m_shift = 8;
  int unsigned m_s = 0, m_att = 0, m_ook = 0, m_nbits = 0;
  int unsigned m_code [16];
  int unsigned m_bits [256];

  localparam int TMPL [8] = '{-15, -50, 15, 100, 15, -50, -15, 0};

  function automatic int tmpl_at(int unsigned k, int unsigned s, int unsigned att);
    int v;
    v = TMPL[(k >> s) % 8];
    return v >>> att;
  endfunction

  // Start offset of the pulse of global frame g, or -1 if that frame has none.
  function automatic int pulse_start(int unsigned g);
    int unsigned p, b, frame_len;
    frame_len = m_nc * m_chip_len;
    p = g / m_ns;                       // bit period, 0 = sync
    if (p > m_nbits) return -1;
    b = (p == 0) ? 0 : m_bits[p-1];
    if (m_ook != 0 && p != 0 && b == 0) return -1;
    return int'(g * frame_len + m_code[g % m_code_len] * m_chip_len +
                ((m_ook == 0 && p != 0 && b != 0) ? m_shift : 0));
  endfunction

  // Model sample at offset tau from the first cycle of the packet's timer.
  function automatic int wave(int tau);
    int g, st, len;
    if (tau < 0) return 0;
    len = 8 << m_s;
    g = tau / int'(m_nc * m_chip_len);
    st = pulse_start(g);
    if (st < 0 || tau < st || tau >= st + len) return 0;
    return tmpl_at(tau - st, m_s, m_att);
  endfunction

  function automatic int unsigned bit_len();
    return m_ns * m_nc * m_chip_len;
  endfunction

  function automatic int unsigned clamp8(int v);
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

endpackage
