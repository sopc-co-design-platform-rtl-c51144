// uwb_transceiver_tb -- end-to-end test of the transceiver at its default sizes.
//
// The emitter output is looped back to the receiver input through a channel model
// kept here: a fixed delay and optional small uniform noise.  Every packet is
// configured through the register bus, sent through tx_valid/tx_ready and decoded.
// Checks: every decoded bit, the cycle of each PPM bit output, one data bit taken
// every ns*nc*chip_len cycles, lock and unlock.  Counted mechanisms, each of which
// must happen at least once: PPM packet, OOK packet, modulation switch, data rate
// change, TH code change, pulse stretch (spectrum occupation), attenuation (radio
// range), several pulses per bit, sync acquisition.
module uwb_transceiver_tb;
  import uwb_pkg::*;
  import uwb_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_addr = 0;
  logic [7:0] cfg_wdata = 0, cfg_rdata;
  logic tx_valid = 0, tx_bit = 0, tx_ready, tx_busy, tx_pulse;
  sample_t tx_sample, rx_sample;
  logic rx_valid, rx_bit, rx_locked;
  int checks = 0, failures = 0;

  uwb_transceiver dut (.*);
  always #5 clk = ~clk;

  // channel: delay line and noise
  localparam int DELAY = 37;
  sample_t line [DELAY];
  int noise = 0;
  always_ff @(posedge clk) begin
    line[0] <= tx_sample;
    for (int i = 1; i < DELAY; i++) line[i] <= line[i-1];
  end
  assign rx_sample = sample_t'(int'(line[DELAY-1]) +
                              (noise != 0 ? int'($urandom_range(2 * noise)) - noise : 0));

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_addr = 6'(a); cfg_wdata = 8'(d); cfg_we = 1;
    @(negedge clk); cfg_we = 0;
  endtask

  int n_ppm = 0, n_ook = 0, n_switch = 0, n_rate = 0, n_code = 0, n_stretch = 0;
  int n_att = 0, n_multi = 0, n_lock = 0;
  int last_mod = 0, last_bl = 0;
  int unsigned last_code [16];

  task automatic configure(input int ook, input int nc, input int cl, input int ns,
                           input int codel, input int shift, input int s, input int att,
                           input int nbits);
    int L, E, peak, v, changed;
    wr(0, ook); wr(1, nc); wr(2, cl); wr(3, ns); wr(4, codel); wr(5, shift);
    wr(6, s); wr(7, att); wr(14, nbits);
    changed = 0;
    for (int i = 0; i < 16; i++) begin
      m_code[i] = $urandom_range(nc - 1);
      if (m_code[i] != last_code[i] && i < codel) changed = 1;
      last_code[i] = m_code[i];
      wr(32 + i, m_code[i]);
    end
    m_nc = nc; m_chip_len = cl; m_ns = ns; m_code_len = codel; m_shift = shift;
    m_s = s; m_att = att; m_ook = ook; m_nbits = nbits;
    // thresholds from the expected received pulse
    L = 8 << s; E = 0; peak = 0;
    if (ook == 0) begin
      for (int j = 0; j < L; j++) E += tmpl_at(j, s, att) * tmpl_at(j, s, 0);
      v = E / 2;
    end else begin
      for (int j = 0; j < L + 2; j++) begin
        int f;
        f = (j < L ? tmpl_at(j, s, att) : 0) - (j >= 2 ? tmpl_at(j - 2, s, att) : 0);
        E += f * f;
        if (f * f > peak) peak = f * f;
      end
      v = peak / 3;
      E = ns * E / 2;
      wr(11, E & 255); wr(12, (E >> 8) & 255); wr(13, (E >> 16) & 255);
    end
    wr(8, v & 255); wr(9, (v >> 8) & 255); wr(10, (v >> 16) & 255);
    @(negedge clk);
    cfg_addr = 6'd2; #1 check(int'(cfg_rdata) == cl, "chip_len readback");
    if (ook != last_mod) n_switch++;
    if (last_bl != 0 && int'(bit_len()) != last_bl) n_rate++;
    if (changed) n_code++;
    if (s != 0) n_stretch++;
    if (att != 0) n_att++;
    if (ns > 1) n_multi++;
    last_mod = ook; last_bl = int'(bit_len());
  endtask

  task automatic packet(input int nbits);
    int idx, ts, bl, nout, nready, last_out, was_locked;
    bl = int'(bit_len());
    for (int i = 0; i < nbits; i++) m_bits[i] = $urandom_range(1);
    idx = 0; nout = 0; nready = 0; last_out = -1; was_locked = 0;
    ts = -1;
    for (int n = 0; n < (nbits + 1) * bl + DELAY + 60; n++) begin
      @(negedge clk);
      tx_valid = (idx < nbits);
      tx_bit   = (idx < nbits) ? m_bits[idx][0] : 1'b0;
      #1;
      if (ts < 0 && tx_valid && !tx_busy) ts = n;
      if (tx_ready) begin
        check(n == ts + (nready + 1) * bl, "data bit taken once per bit period");
        nready++; idx++;
      end
      if (rx_locked && !was_locked) n_lock++;
      was_locked = rx_locked;
      if (rx_valid) begin
        check(nout < nbits && rx_bit == m_bits[nout][0], $sformatf("decoded bit %0d", nout));
        if (m_ook == 0)
          check(n == ts + 2 + DELAY + (nout + 2) * bl + 2, $sformatf("PPM bit %0d time", nout));
        else if (last_out >= 0)
          check(n - last_out == bl, "OOK bit spacing");
        last_out = n; nout++;
      end
    end
    check(nout == nbits, $sformatf("bits decoded %0d of %0d", nout, nbits));
    check(!rx_locked && !tx_busy, "link idle after packet");
    if (nout == nbits) begin
      if (m_ook != 0) n_ook++; else n_ppm++;
    end
    repeat (20) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < DELAY; i++) line[i] = '0;
    for (int i = 0; i < 16; i++) last_code[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    // reset configuration: TH-PPM, Nc = 3, codes 2,0
    m_code[0] = 2; m_code[1] = 0; last_code[0] = 2; last_code[1] = 0;
    for (int i = 2; i < 16; i++) begin m_code[i] = (i + 2) % 3; last_code[i] = m_code[i]; end
    m_nc = 3; m_chip_len = 24; m_ns = 1; m_code_len = 2; m_shift = 8; m_s = 0; m_att = 0;
    m_ook = 0; m_nbits = 8;
    last_bl = int'(bit_len());
    packet(8);
    noise = 3;
    configure(0, 3, 24, 1, 2, 8, 0, 0, 16);  packet(16);
    configure(1, 3, 24, 1, 2, 0, 0, 0, 16);  packet(16);    // switch to OOK
    configure(1, 4, 40, 2, 3, 0, 1, 0, 10);  packet(10);    // OOK, stretch, 2 pulses/bit
    configure(0, 5, 40, 3, 7, 12, 1, 0, 8);  packet(8);     // back to PPM, new rate
    configure(0, 4, 30, 2, 5, 8, 0, 1, 10);  packet(10);    // attenuated
    configure(1, 6, 30, 1, 16, 0, 0, 1, 12); packet(12);    // OOK attenuated
    noise = 0;
    configure(0, 2, 48, 1, 4, 12, 2, 0, 6);  packet(6);     // longest pulse
    check(n_ppm > 0, "PPM packet");
    check(n_ook > 0, "OOK packet");
    check(n_switch > 0, "modulation switch");
    check(n_rate > 0, "data rate change");
    check(n_code > 0, "TH code change");
    check(n_stretch > 0, "pulse stretch");
    check(n_att > 0, "attenuation");
    check(n_multi > 0, "several pulses per bit");
    check(n_lock > 0, "sync acquired");
    $display("mechanisms: ppm=%0d ook=%0d switch=%0d rate=%0d code=%0d stretch=%0d att=%0d multi=%0d lock=%0d",
             n_ppm, n_ook, n_switch, n_rate, n_code, n_stretch, n_att, n_multi, n_lock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
