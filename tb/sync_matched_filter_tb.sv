// sync_matched_filter_tb -- feeds single pulses (every stretch, random arrival time,
// optional small noise) to the matched filter; checks the aligned output value against
// the template energy computed here, the peak cycle s0 + L + 2, that a pulse below the
// threshold or with arm low gives no peak, and one peak per pulse.
module sync_matched_filter_tb;
  import uwb_pkg::*;
  import uwb_tb_pkg::*;
  logic clk = 0, rst_n = 0, arm = 0, peak;
  sample_t rx_sample = 0;
  logic [1:0] stretch_log2 = 0;
  logic [23:0] thr = 24'd8000;
  corr_t mf_out;
  int checks = 0, failures = 0;

  sync_matched_filter dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one pulse starting at cycle s0 (relative), observed for s0 + L + 20 cycles
  task automatic one(input int s, input int att, input int noise, input bit a, input bit expect_peak);
    int s0, L, energy, npk, pk_at;
    L = 8 << s; s0 = 5 + $urandom_range(20);
    stretch_log2 = 2'(s); arm = a;
    energy = 0;
    for (int k = 0; k < L; k++) energy += tmpl_at(k, s, att) * tmpl_at(k, s, 0);
    npk = 0; pk_at = -1;
    for (int n = 0; n < s0 + L + 20; n++) begin
      @(negedge clk);
      rx_sample = sample_t'(((n >= s0 && n < s0 + L) ? tmpl_at(n - s0, s, att) : 0) +
                            (noise ? int'($urandom_range(2 * noise)) - noise : 0));
      #1;
      if (noise == 0 && n == s0 + L + 1) check(int'(mf_out) == energy, $sformatf("aligned value s=%0d", s));
      if (peak) begin npk++; pk_at = n; end
    end
    rx_sample = 0;
    if (expect_peak) begin
      check(npk == 1, $sformatf("one peak s=%0d att=%0d (got %0d)", s, att, npk));
      check(pk_at == s0 + L + 2, $sformatf("peak time %0d expected %0d", pk_at, s0 + L + 2));
    end else
      check(npk == 0, "no peak expected");
    arm = 0;
    repeat (40) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (40) @(negedge clk);
    for (int r = 0; r < 4; r++) begin
      thr = 24'd8000;
      one(0, 0, 0, 1, 1);
      one(0, 0, 3, 1, 1);
      thr = 24'd12000;
      one(1, 0, 0, 1, 1);
      thr = 24'd30000;
      one(2, 0, 0, 1, 1);
      thr = 24'd8000;
      one(0, 2, 0, 1, 0);   // attenuated pulse below threshold
      one(0, 0, 0, 0, 0);   // not armed
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
