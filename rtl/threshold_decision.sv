// threshold_decision -- threshold detector of the energy-detection OOK receiver.
//
// Outputs 1 when the integrated energy of a bit period exceeds thr, else 0 (the
// paper's threshold block with output {0,1}).  The threshold is a run-time register.
// Timing: bit_out / valid registered, one cycle after in_valid.
module threshold_decision
  import uwb_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [ENERGY_W-1:0] energy,
  input  logic [23:0]         thr,
  output logic                valid,
  output logic                bit_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      bit_out <= 1'b0;
    end else begin
      valid <= in_valid;
      if (in_valid) bit_out <= (energy > ENERGY_W'(thr));
    end
  end

endmodule
