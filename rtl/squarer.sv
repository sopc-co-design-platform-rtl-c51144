// squarer -- square-law stage of the energy-detection receiver.
//
// e = y * y, the instantaneous energy of the filtered sample (the paper's ()^2 block).
// Timing: registered, e for the y of cycle n appears in cycle n+1.
module squarer
  import uwb_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic signed [SAMPLE_W:0]  y,
  output logic [2*SAMPLE_W+1:0]     e
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) e <= '0;
    else        e <= (2*SAMPLE_W+2)'(y * y);
  end

endmodule
