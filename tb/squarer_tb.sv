// squarer_tb -- all input values, checks e = y*y one cycle later.
module squarer_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [SAMPLE_W:0] y = 0;
  logic [2*SAMPLE_W+1:0] e;
  int checks = 0, failures = 0;

  squarer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = -256; v < 256; v++) begin
      y = (SAMPLE_W+1)'(v);
      @(negedge clk);
      checks++;
      if (int'(e) != v * v) begin failures++; $display("FAIL %0d^2 = %0d", v, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
