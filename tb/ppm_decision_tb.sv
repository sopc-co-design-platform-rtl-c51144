// ppm_decision_tb -- random correlation pairs (including ties and negatives); checks
// bit = corr1 > corr0, one cycle after in_valid, and that the bit holds otherwise.
module ppm_decision_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, valid, bit_out;
  corr_t corr0 = 0, corr1 = 0;
  int checks = 0, failures = 0;

  ppm_decision dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit expb, pend;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    pend = 0; expb = 0;
    for (int n = 0; n < 2000; n++) begin
      if (pend) check(valid && bit_out == expb, "decision");
      else check(!valid && bit_out == expb, "hold");
      in_valid = $urandom_range(1);
      corr0 = corr_t'(int'($urandom_range(200000)) - 100000);
      corr1 = ($urandom_range(7) == 0) ? corr0 : corr_t'(int'($urandom_range(200000)) - 100000);
      pend = in_valid;
      if (in_valid) expb = (int'(corr1) > int'(corr0));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
