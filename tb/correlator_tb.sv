// correlator_tb -- random samples and templates, random en, dump every few cycles;
// compares each dumped correlation with a sum computed here and checks clr.
module correlator_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, dump = 0, valid;
  sample_t x = 0, t = 0;
  corr_t corr;
  int checks = 0, failures = 0;

  correlator dut (.*);
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

  initial begin
    int sum, expv, pend;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sum = 0; pend = 0;
    for (int n = 0; n < 3000; n++) begin
      if (pend) begin
        check(valid && int'(corr) == expv, $sformatf("corr %0d expected %0d", corr, expv));
        pend = 0;
      end else check(!valid, "no stray valid");
      x = sample_t'($urandom); t = sample_t'($urandom);
      en = ($urandom_range(3) != 0);
      dump = ($urandom_range(15) == 0);
      clr = (n == 1500);
      if (clr) sum = 0;
      else begin
        if (en) sum += int'(x) * int'(t);
        if (dump) begin expv = sum; sum = 0; pend = 1; end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
