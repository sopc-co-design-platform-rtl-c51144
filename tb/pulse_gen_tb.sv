// pulse_gen_tb -- triggers the pulse generator at every stretch and attenuation and
// compares each output sample with the template table held here (held 2**s samples,
// shifted right by att); checks the one-cycle latency, the pulse length and retrigger.
module pulse_gen_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, busy;
  logic [1:0] stretch_log2 = 0;
  logic [2:0] att = 0;
  sample_t sample;
  int checks = 0, failures = 0;
  localparam int T [8] = '{-15, -50, 15, 100, 15, -50, -15, 0};

  pulse_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
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
    @(negedge clk);
    check(sample == 0 && !busy, "idle");
    for (int s = 0; s <= 2; s++)
      for (int a = 0; a <= 3; a++) begin
        stretch_log2 = 2'(s); att = 3'(a);
        trig = 1; @(negedge clk); trig = 0;
        for (int k = 0; k < (8 << s); k++) begin
          check(busy && int'(sample) == (T[k >> s] >>> a), $sformatf("s=%0d a=%0d k=%0d", s, a, k));
          @(negedge clk);
        end
        check(!busy && sample == 0, "pulse ended");
        repeat (3) @(negedge clk);
      end
    // retrigger in the middle restarts the pulse
    stretch_log2 = 0; att = 0;
    trig = 1; @(negedge clk); trig = 0;
    repeat (3) @(negedge clk);
    trig = 1; @(negedge clk); trig = 0;
    check(int'(sample) == T[0], "retrigger restarts");
    @(negedge clk);
    check(int'(sample) == T[1], "retrigger second sample");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
