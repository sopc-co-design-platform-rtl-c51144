// correlator -- multiply-accumulate correlator of the coherent receiver.
//
// Accumulates x * t (received sample times template sample) while en is high and
// outputs the sum of one bit period: in a cycle with dump high the sum including that
// cycle's product goes to corr, valid rises for one cycle and the accumulator clears.
// clr empties the accumulator.  Correlation with a template waveform follows the paper;
// the widths are this design's.
// Timing: corr / valid appear the cycle after dump.
module correlator
  import uwb_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clr,
  input  logic    en,
  input  logic    dump,
  input  sample_t x,
  input  sample_t t,
  output corr_t   corr,
  output logic    valid
);

  corr_t acc, acc_next;

  assign acc_next = en ? acc + corr_t'(x) * corr_t'(t) : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      corr  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= dump;
      if (clr) begin
        acc <= '0;
      end else if (dump) begin
        corr <= acc_next;
        acc  <= '0;
      end else begin
        acc <= acc_next;
      end
    end
  end

endmodule
