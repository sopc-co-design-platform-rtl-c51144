// ppm_decision -- bit decision of the coherent TH-PPM receiver.
//
// Compares the correlation with the template for "1" (corr1) against the one with
// the template for "0" (corr0) and outputs 1 if corr1 is larger, 0 otherwise (ties
// give 0).  The decision stage fed by the two correlators is the paper's; the
// comparison rule is the usual maximum-likelihood choice.
// Timing: bit and valid are registered, one cycle after in_valid.
module ppm_decision
  import uwb_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  corr_t corr0,
  input  corr_t corr1,
  output logic  valid,
  output logic  bit_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      bit_out <= 1'b0;
    end else begin
      valid <= in_valid;
      if (in_valid) bit_out <= (corr1 > corr0);
    end
  end

endmodule
