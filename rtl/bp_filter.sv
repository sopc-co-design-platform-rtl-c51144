// bp_filter -- band-pass filter at the input of the non-coherent OOK receiver.
//
// y[n] = x[n] - x[n-2]: zeros at DC and at half the sample rate, passband centred on a
// quarter of the sample rate, where the pulse template has most of its energy.  The
// paper draws a band-pass filter first in the energy-detection chain without giving
// it; these coefficients are this design's simplest choice.
// Timing: y is registered; the y for the sample presented in cycle n is out in n+1.
module bp_filter
  import uwb_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  sample_t                 x,
  output logic signed [SAMPLE_W:0] y
);

  sample_t x1, x2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0;
      x2 <= '0;
      y  <= '0;
    end else begin
      x1 <= x;
      x2 <= x1;
      y  <= (SAMPLE_W+1)'(x) - (SAMPLE_W+1)'(x2);
    end
  end

endmodule
