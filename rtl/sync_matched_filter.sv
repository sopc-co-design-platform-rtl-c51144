// sync_matched_filter -- matched-filter synchronisation of the coherent receiver.
//
// A direct-form FIR whose coefficients are the time-reversed (stretched) pulse
// template, so its output peaks when a received pulse lines up with the template.
// While arm is high, the first local maximum of the output above thr (a rise followed
// by a fall, so a slope seen just after arming does not count) raises peak for
// one cycle, and no more until arm has been low; the receiver uses it as the arrival time of the sync pulse.  A matched
// filter as the synchronisation technique follows the paper (which compares two
// versions without describing either); the peak rule is this design's choice.
//
// Timing: rx_sample is taken every cycle.  If the first sample of a pulse is presented
// in cycle s0, mf_out holds the aligned value in cycle s0 + L + 1 and peak rises in
// cycle s0 + L + 2, with L = 8 << stretch_log2.  TAPS (32) covers the longest pulse.
module sync_matched_filter
  import uwb_pkg::*;
#(
  parameter int TAPS = MAX_PULSE
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sample_t    rx_sample,
  input  logic [1:0] stretch_log2,
  input  logic [23:0] thr,
  input  logic       arm,
  output corr_t      mf_out,
  output logic       peak
);

  sample_t     win [TAPS];   // win[k] = sample presented k+1 cycles ago
  corr_t       y, y_prev;
  logic [5:0]  len;
  logic        above, fired, rising;

  assign len = pulse_samples(stretch_log2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) win[k] <= '0;
    end else begin
      win[0] <= rx_sample;
      for (int k = 1; k < TAPS; k++) win[k] <= win[k-1];
    end
  end

  // h[k] = p[L-1-k] for k < L, p[j] = template[j >> stretch].
  always_comb begin
    y = '0;
    for (int k = 0; k < TAPS; k++) begin
      if (6'(k) < len)
        y = y + corr_t'(win[k]) * corr_t'(pulse_tmpl(3'((len - 6'd1 - 6'(k)) >> stretch_log2)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mf_out <= '0;
      y_prev <= '0;
      fired  <= 1'b0;
      rising <= 1'b0;
    end else begin
      rising <= (mf_out > y_prev);
      mf_out <= y;
      y_prev <= mf_out;
      fired  <= arm && (fired || peak);
    end
  end

  assign above = !y_prev[CORR_W-1] && (unsigned'(y_prev) > thr);
  assign peak  = arm && !fired && rising && above && (mf_out < y_prev);

endmodule
