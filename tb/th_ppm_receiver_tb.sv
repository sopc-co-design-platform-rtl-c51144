// th_ppm_receiver_tb -- feeds reference TH-PPM packets (uwb_tb_pkg), delayed by a
// random channel delay and optionally with small uniform noise, to the coherent
// receiver.  Checks every decoded bit, the cycle of each bit output (3 cycles after
// the last sample of its bit period), the exact correlation values without noise
// (ns * template energy on the sent side, ns * cross term on the other), the return
// to sync search after pkt_bits bits, two packets in a row, and en low.
module th_ppm_receiver_tb;
  import uwb_pkg::*;
  import uwb_tb_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, rx_valid, rx_bit, locked;
  uwb_cfg_t cfg = CFG_DEFAULT;
  th_code_t th_code [MAX_CODE_LEN];
  sample_t rx_sample = 0;
  corr_t corr0, corr1;
  int checks = 0, failures = 0;

  th_ppm_receiver dut (.*);
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
                        input int shift, input int s, input int att, input int nbits,
                        input int noise);
    int d, bl, L, E, X, nout, mf, thr;
    cfg.nc = 5'(nc); cfg.chip_len = 8'(cl); cfg.ns = 5'(ns); cfg.code_len = 5'(codel);
    cfg.ppm_shift = 8'(shift); cfg.stretch_log2 = 2'(s); cfg.pkt_bits = 8'(nbits);
    m_nc = nc; m_chip_len = cl; m_ns = ns; m_code_len = codel; m_shift = shift;
    m_s = s; m_att = att; m_ook = 0; m_nbits = nbits;
    for (int i = 0; i < 16; i++) begin
      m_code[i] = $urandom_range(nc - 1);
      th_code[i] = th_code_t'(m_code[i]);
    end
    for (int i = 0; i < nbits; i++) m_bits[i] = $urandom_range(1);
    L = 8 << s;
    E = 0; X = 0;
    for (int j = 0; j < L; j++) E += tmpl_at(j, s, att) * tmpl_at(j, s, 0);
    for (int j = shift; j < L; j++) X += tmpl_at(j, s, att) * tmpl_at(j - shift, s, 0);
    thr = E / 2;
    cfg.sync_thr = 24'(thr);
    bl = int'(bit_len());
    d = 10 + $urandom_range(50);
    nout = 0;
    for (int n = 0; n < d + (nbits + 1) * bl + 20; n++) begin
      @(negedge clk);
      rx_sample = sample_t'(wave(n - d) + (noise ? int'($urandom_range(2 * noise)) - noise : 0));
      #1;
      if (rx_valid) begin
        check(n == d + (nout + 2) * bl + 2, $sformatf("bit %0d out at %0d", nout, n));
        check(rx_bit == m_bits[nout][0], $sformatf("bit %0d value", nout));
        if (noise == 0) begin
          check(int'(m_bits[nout] ? corr1 : corr0) == ns * E, "correlation, sent template");
          check(int'(m_bits[nout] ? corr0 : corr1) == ns * X, "correlation, other template");
        end
        nout++;
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
    packet(3, 24, 1, 2, 8, 0, 0, 16, 0);
    packet(3, 24, 1, 2, 8, 0, 0, 16, 4);
    packet(4, 30, 2, 3, 10, 1, 0, 10, 0);
    packet(6, 20, 1, 16, 4, 0, 0, 12, 0);   // overlapping templates (shift < L)
    packet(5, 48, 3, 7, 12, 2, 0, 6, 0);
    packet(4, 26, 2, 5, 8, 0, 1, 10, 0);    // attenuated (shorter range)
    packet(4, 26, 2, 5, 8, 0, 1, 10, 2);
    // disabled receiver ignores a packet
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
