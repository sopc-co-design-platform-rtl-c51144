// th_ook_emitter_tb -- sends random packets through the TH-OOK emitter under several
// configurations (data rate, TH code, PPM shift, stretch, attenuation) and compares
// every output sample with the reference waveform of uwb_tb_pkg; checks that a bit is
// taken every ns*nc*chip_len cycles, the number of pulses, and the end of the packet.
module th_ook_emitter_tb;
  import uwb_pkg::*;
  import uwb_tb_pkg::*;
  logic clk = 0, rst_n = 0, tx_valid = 0, tx_bit = 0, tx_ready, tx_pulse, busy;
  uwb_cfg_t cfg = CFG_DEFAULT;
  th_code_t th_code [MAX_CODE_LEN];
  sample_t tx_sample;
  int checks = 0, failures = 0;

  th_ook_emitter dut (.*);
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
                        input int shift, input int s, input int att, input int nbits);
    int idx, n, nready, npulse, exp_pulse, bl, mism;
    cfg.nc = 5'(nc); cfg.chip_len = 8'(cl); cfg.ns = 5'(ns); cfg.code_len = 5'(codel);
    cfg.ppm_shift = 8'(shift); cfg.stretch_log2 = 2'(s); cfg.tx_att = 3'(att);
    m_nc = nc; m_chip_len = cl; m_ns = ns; m_code_len = codel; m_shift = shift;
    m_s = s; m_att = att; m_ook = 1; m_nbits = nbits;
    for (int i = 0; i < 16; i++) begin
      m_code[i] = $urandom_range(nc - 1);
      th_code[i] = th_code_t'(m_code[i]);
    end
    for (int i = 0; i < nbits; i++) m_bits[i] = $urandom_range(1);
    exp_pulse = 0;
    for (int g = 0; g < (nbits + 1) * ns; g++) if (pulse_start(g) >= 0) exp_pulse++;
    bl = int'(bit_len());
    idx = 0; nready = 0; npulse = 0; mism = 0;
    for (n = 0; n < (nbits + 1) * bl + 40; n++) begin
      @(negedge clk);
      tx_valid = (idx < nbits);
      tx_bit   = (idx < nbits) ? m_bits[idx][0] : 1'b0;
      #1;
      if (int'(tx_sample) != wave(n - 2)) mism++;
      if (tx_pulse) npulse++;
      if (tx_ready) begin
        check(n == (nready + 1) * bl, $sformatf("bit %0d taken at %0d", nready, n));
        nready++; idx++;
      end
      if (n == (nbits + 1) * bl + 30) check(!busy, "packet ended");
    end
    check(mism == 0, $sformatf("waveform mismatches %0d (nc=%0d cl=%0d ns=%0d s=%0d)", mism, nc, cl, ns, s));
    check(nready == nbits, "all bits taken");
    check(npulse == exp_pulse, $sformatf("pulses %0d expected %0d", npulse, exp_pulse));
    repeat (5) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 16; i++) th_code[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(!busy && tx_sample == 0, "idle after reset");
    packet(3, 24, 1, 2, 8, 0, 0, 12);
    packet(4, 30, 2, 3, 10, 1, 1, 10);
    packet(8, 40, 3, 16, 5, 0, 2, 6);
    packet(2, 70, 1, 5, 20, 2, 0, 8);
    packet(1, 12, 4, 1, 3, 0, 0, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
