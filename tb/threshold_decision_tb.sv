// threshold_decision_tb -- random energies around random thresholds; checks
// bit = energy > thr one cycle after in_valid, and hold otherwise.
module threshold_decision_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, valid, bit_out;
  logic [ENERGY_W-1:0] energy = 0;
  logic [23:0] thr = 0;
  int checks = 0, failures = 0;

  threshold_decision dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit expb, pend;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expb = 0; pend = 0;
    for (int n = 0; n < 2000; n++) begin
      checks++;
      if (valid != pend || bit_out != expb) begin failures++; $display("FAIL at %0d", n); end
      thr = 24'($urandom_range(1000000));
      case ($urandom_range(2))
        0: energy = ENERGY_W'(thr);
        1: energy = ENERGY_W'(thr) + ENERGY_W'($urandom_range(1000));
        default: energy = ENERGY_W'($urandom_range(1000000));
      endcase
      in_valid = $urandom_range(1);
      pend = in_valid;
      if (in_valid) expb = (energy > ENERGY_W'(thr));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
