// bp_filter_tb -- random input; checks y(n+1) = x[n] - x[n-2] computed here, and that
// a constant (DC) input is removed.
module bp_filter_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t x = 0;
  logic signed [SAMPLE_W:0] y;
  int checks = 0, failures = 0;
  int h [3];

  bp_filter dut (.*);
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
    repeat (2) @(negedge clk);
    rst_n = 1;
    h = '{0, 0, 0};
    for (int n = 0; n < 1000; n++) begin
      x = (n < 900) ? sample_t'($urandom) : sample_t'(-77);
      h[2] = h[1]; h[1] = h[0]; h[0] = int'(x);
      @(negedge clk);
      check(int'(y) == h[0] - h[2], $sformatf("y at %0d", n));
      if (n > 905) check(y == 0, "DC removed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
