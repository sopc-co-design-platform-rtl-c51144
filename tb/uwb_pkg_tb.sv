// uwb_pkg_tb -- checks the shared package: pulse template values, zero DC content,
// template energy, pulse length per stretch and the receivers' sync countdown formula
// (nc - c0) * chip_len - L - 3, against numbers worked out here.
module uwb_pkg_tb;
  import uwb_pkg::*;
  int checks = 0, failures = 0;
  localparam int EXP [8] = '{-15, -50, 15, 100, 15, -50, -15, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int sum, energy;
    uwb_cfg_t c;
    sum = 0; energy = 0;
    for (int i = 0; i < 8; i++) begin
      check(int'(pulse_tmpl(3'(i))) == EXP[i], $sformatf("template %0d", i));
      sum += int'(pulse_tmpl(3'(i)));
      energy += int'(pulse_tmpl(3'(i))) * int'(pulse_tmpl(3'(i)));
    end
    check(sum == 0, "template has no DC");
    check(energy == 15900, "template energy");
    check(pulse_samples(2'd0) == 8 && pulse_samples(2'd1) == 16 && pulse_samples(2'd2) == 32,
          "pulse lengths");
    c = CFG_DEFAULT;
    check(c.nc == 3 && c.chip_len == 24, "reset framing");
    for (int nc = 2; nc <= 16; nc++)
      for (int c0 = 0; c0 < nc; c0 += 3)
        for (int s = 0; s <= 2; s++) begin
          c.nc = 5'(nc); c.chip_len = 8'(40 + nc); c.stretch_log2 = 2'(s);
          check(int'(sync_wait(c, th_code_t'(c0))) == (nc - c0) * (40 + nc) - (8 << s) - 3,
                $sformatf("sync_wait nc=%0d c0=%0d s=%0d", nc, c0, s));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
