// integrate_dump_tb -- random energies and windows; compares each dumped sum with one
// computed here, checks clr and the one-cycle output latency.
module integrate_dump_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, dump = 0, valid;
  logic [2*SAMPLE_W+1:0] e = 0;
  logic [ENERGY_W-1:0] energy;
  int checks = 0, failures = 0;

  integrate_dump dut (.*);
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
    longint sum, expv;
    bit pend;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sum = 0; pend = 0; expv = 0;
    for (int n = 0; n < 3000; n++) begin
      if (pend) check(valid && longint'(energy) == expv, "dumped energy");
      else check(!valid, "no stray valid");
      pend = 0;
      e = 18'($urandom_range(65536));
      en = (n % 24) < 10 || ($urandom_range(3) == 0);
      dump = ((n % 72) == 71) || ($urandom_range(15) == 0);
      clr = (n == 1000);
      if (clr) sum = 0;
      else begin
        if (en) sum += longint'(e);
        if (dump) begin expv = sum; sum = 0; pend = 1; end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
