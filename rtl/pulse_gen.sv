// pulse_gen -- UWB pulse / template waveform generator.
//
// On trig it plays the 8-sample pulse template of uwb_pkg, each sample held for
// 2**stretch_log2 cycles (longer pulse, narrower occupied spectrum) and shifted right
// by att (lower amplitude, shorter radio range).  The emitters use it as their pulse
// source; the PPM receiver uses two as the template generators for "1" and "0".
// Pulse duration and amplitude as the means of spectrum-occupation and radio-range
// reconfiguration are this design's reading of the paper; the template is its own.
//
// Timing: sample shows template sample 0 in the cycle after trig and returns to 0
// after 8 << stretch_log2 samples.  A trig during a pulse restarts it.  busy is high
// while a pulse is being output.
module pulse_gen
  import uwb_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       trig,
  input  logic [1:0] stretch_log2,
  input  logic [2:0] att,
  output sample_t    sample,
  output logic       busy
);

  logic [4:0] cnt;   // position inside the stretched pulse, 0..31
  logic [5:0] len;
  logic [2:0] idx;

  assign len = pulse_samples(stretch_log2);
  assign idx = 3'(cnt >> stretch_log2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (trig) begin
      busy <= 1'b1;
      cnt  <= '0;
    end else if (busy) begin
      cnt <= cnt + 5'd1;
      if (6'(cnt) == len - 6'd1) busy <= 1'b0;
    end
  end

  sample_t shaped;
  assign shaped = pulse_tmpl(idx) >>> att;   // arithmetic: keeps the sign
  assign sample = busy ? shaped : sample_t'(0);

endmodule
