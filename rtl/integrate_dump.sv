// integrate_dump -- integrator over the window T of the energy-detection receiver.
//
// Adds the energy e in every cycle with en high (the integration window inside the
// TH-coded chip of each frame) and outputs the sum of one bit period: in a cycle with
// dump high the sum including that cycle goes to energy, valid rises for one cycle and
// the accumulator clears.  clr empties it.  Integration over T is the paper's; how T
// is placed and that frames of a bit are summed are this design's choices.
// Timing: energy / valid appear the cycle after dump.
module integrate_dump
  import uwb_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   en,
  input  logic                   dump,
  input  logic [2*SAMPLE_W+1:0]  e,
  output logic [ENERGY_W-1:0]    energy,
  output logic                   valid
);

  logic [ENERGY_W-1:0] acc, acc_next;

  assign acc_next = en ? acc + ENERGY_W'(e) : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      energy <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= dump;
      if (clr) begin
        acc <= '0;
      end else if (dump) begin
        energy <= acc_next;
        acc    <= '0;
      end else begin
        acc <= acc_next;
      end
    end
  end

endmodule
