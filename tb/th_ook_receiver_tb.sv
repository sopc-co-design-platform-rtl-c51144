// th_ook_receiver_tb -- feeds reference TH-OOK packets (uwb_tb_pkg), delayed by a
// random channel delay and optionally with small noise, to the energy receiver.
// Checks every decoded bit, that bits come out exactly one bit period apart and near
// the expected cycle, the exact integrated energy without noise (ns times the filtered
// pulse energy for a one, zero for a zero, computed here with its own filter), the
// return to search after pkt_bits bits, and en low.
module th_ook_receiver_tb;
  import uwb_pkg::*;
  import uwb_tb_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, rx_valid, rx_bit, locked;
  uwb_cfg_t cfg = CFG_DEFAULT;
  th_code_t th_code [MAX_CODE_LEN];
  sample_t rx_sample = 0;
  logic [ENERGY_W-1:0] energy;
  int checks = 0, failures = 0;

  th_ook_receiver dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic packet(input int nc, input int cl, input int ns, input int codel,
                        input int s, input int att, input int nbits, input int noise);
    int d, bl, L, E1, peak, nout, last, p0, v;
    cfg.nc = 5'(nc); cfg.chip_len = 8'(cl); cfg.ns = 5'(ns); cfg.code_len = 5'(codel);
    cfg.stretch_log2 = 2'(s); cfg.pkt_bits = 8'(nbits);
    m_nc = nc; m_chip_len = cl; m_ns = ns; m_code_len = codel;
    m_s = s; m_att = att; m_ook = 1; m_nbits = nbits;
    for (int i = 0; i < 16; i++) begin
      m_code[i] = $urandom_range(nc - 1);
      th_code[i] = th_code_t'(m_code[i]);
    end
    for (int i = 0; i < nbits; i++) m_bits[i] = $urandom_range(1);
    L = 8 << s;
    E1 = 0; peak = 0;
    for (int j = 0; j < L + 2; j++) begin
      v = (j < L ? tmpl_at(j, s, att) : 0) - (j >= 2 ? tmpl_at(j - 2, s, att) : 0);
      E1 += v * v;
      if (v * v > peak) peak = v * v;
    end
    cfg.sync_thr = 24'(peak / 3);
    cfg.ook_thr  = 24'(ns * E1 / 2);
    bl = int'(bit_len());
    d = 10 + $urandom_range(50);
    p0 = d + 2 * bl - L + 1;   // bit 0 out if the energy crossing is the pulse's first sample
    nout = 0; last = -1;
    for (int n = 0; n < d + (nbits + 1) * bl + 40; n++) begin
      @(negedge clk);
      rx_sample = sample_t'(wave(n - d) + (noise ? int'($urandom_range(2 * noise)) - noise : 0));
      #1;
      if (rx_valid) begin
        if (nout == 0) check(n >= p0 && n <= p0 + L + 2, $sformatf("first bit out at %0d, expected %0d..%0d", n, p0, p0 + L + 2));
        else check(n - last == bl, "one bit per bit period");
        check(rx_bit == m_bits[nout][0], $sformatf("bit %0d value", nout));
        if (noise == 0)
          check(int'(energy) == (m_bits[nout] ? ns * E1 : 0), $sformatf("energy %0d", energy));
        last = n; nout++;
      end
    end
    check(nout == nbits, $sformatf("bits out %0d of %0d", nout, nbits));
    check(!locked, "back to search after the packet");
    rx_sample = 0;
    repeat (50) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 16; i++) th_code[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);
    packet(3, 24, 1, 2, 0, 0, 16, 0);
    packet(3, 24, 1, 2, 0, 0, 16, 3);
    packet(4, 40, 2, 3, 1, 0, 10, 0);
    packet(5, 70, 3, 7, 2, 0, 6, 0);
    packet(4, 26, 2, 5, 0, 1, 10, 0);
    packet(4, 26, 2, 5, 0, 1, 10, 1);
    en = 0;
    m_nbits = 4;
    for (int n = 0; n < 5 * int'(bit_len()); n++) begin
      @(negedge clk);
      rx_sample = sample_t'(wave(n));
      #1 check(!rx_valid && !locked, "disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
