// th_ppm_receiver -- coherent time-hopping PPM receiver.
//
// Structure, as in the paper's coherent receiver: a synchronisation filter, a template
// generator for "1" and one for "0", one correlator per template and a decision.
//   SEARCH: the matched filter watches the input for the first pulse of a packet's
//           sync period (unshifted, in chip th_code[0] of frame 0).
//   WAIT:   from the peak time the start of frame 1 is known; a countdown of
//           (nc - th_code[0]) * chip_len - L - 3 cycles (L = pulse samples) starts the
//           frame timer there, aligned with the input samples.
//   RUN:    in the TH-coded chip of every frame the "0" template is fired at sample 0
//           and the "1" template at sample ppm_shift; both are correlated with the
//           input over the bit period and the larger correlation gives the bit.  The
//           rest of the sync bit (ns > 1) is discarded.  After cfg.pkt_bits data bits
//           the receiver returns to SEARCH.
// The sync preamble, the countdown and the fixed packet length are this design's choice.
//
// Interface: rx_sample one sample per clock; rx_valid / rx_bit one cycle per decoded
// bit, 3 cycles after the last sample of its bit period; corr0 / corr1 are the last
// correlations; locked is high outside SEARCH.  en low holds the receiver in SEARCH
// with the matched filter disarmed.  Correct only within the uwb_pkg configuration rule,
// which an assertion checks when a packet is acquired.
module th_ppm_receiver
  import uwb_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,
  input  uwb_cfg_t cfg,
  input  th_code_t th_code [MAX_CODE_LEN],
  input  sample_t  rx_sample,
  output logic     rx_valid,
  output logic     rx_bit,
  output logic     locked,
  output corr_t    corr0,
  output corr_t    corr1
);

  typedef enum logic [1:0] {SEARCH, WAIT, RUN} rx_state_t;
  rx_state_t state;

  logic        peak, start, stop, active, frame_end, bit_end;
  logic [7:0]  samp;
  logic [3:0]  chip, frame, code_idx;
  logic [12:0] cnt;
  logic [7:0]  nbits;
  logic        in_sync;
  corr_t       mf_out;
  sample_t     rx_d, tmpl0, tmpl1;
  logic        trig0, trig1, busy0, busy1, coded_chip;
  logic        dump, data_d1, data_d2, cv0, cv1;

  sync_matched_filter u_sync (
    .clk, .rst_n, .rx_sample, .stretch_log2(cfg.stretch_log2), .thr(cfg.sync_thr),
    .arm(en && state == SEARCH), .mf_out, .peak);

  assign start = (state == WAIT) && (cnt == '0);
  assign stop  = bit_end && !in_sync && (nbits == cfg.pkt_bits - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= SEARCH;
      cnt     <= '0;
      nbits   <= '0;
      in_sync <= 1'b0;
    end else if (!en) begin
      state   <= SEARCH;
    end else begin
      case (state)
        SEARCH: if (peak) begin
          state <= WAIT;
          cnt   <= sync_wait(cfg, th_code[0]) - 13'd1;
        end
        WAIT: if (cnt == '0) begin
          state   <= RUN;
          nbits   <= '0;
          in_sync <= (cfg.ns != 5'd1);
        end else begin
          cnt <= cnt - 13'd1;
        end
        RUN: if (bit_end) begin
          in_sync <= 1'b0;
          if (!in_sync) nbits <= nbits + 8'd1;
          if (stop) state <= SEARCH;
        end
        default: state <= SEARCH;
      endcase
    end
  end

  th_frame_timer u_timer (
    .clk, .rst_n, .cfg, .start, .start_frame(1'b1), .stop(stop || !en),
    .active, .samp, .chip, .frame, .code_idx, .frame_end, .bit_end);

  assign coded_chip = active && (chip == th_code[code_idx]);
  assign trig0 = coded_chip && (samp == 8'd0);
  assign trig1 = coded_chip && (samp == cfg.ppm_shift);

  pulse_gen u_tmpl1 (.clk, .rst_n, .trig(trig1), .stretch_log2(cfg.stretch_log2),
                     .att(3'd0), .sample(tmpl1), .busy(busy1));
  pulse_gen u_tmpl0 (.clk, .rst_n, .trig(trig0), .stretch_log2(cfg.stretch_log2),
                     .att(3'd0), .sample(tmpl0), .busy(busy0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_d    <= '0;
      dump    <= 1'b0;
      data_d1 <= 1'b0;
      data_d2 <= 1'b0;
    end else begin
      rx_d    <= rx_sample;
      dump    <= bit_end;
      data_d1 <= bit_end && !in_sync;
      data_d2 <= data_d1;
    end
  end

  correlator u_corr1 (.clk, .rst_n, .clr(start), .en(1'b1), .dump, .x(rx_d), .t(tmpl1),
                      .corr(corr1), .valid(cv1));
  correlator u_corr0 (.clk, .rst_n, .clr(start), .en(1'b1), .dump, .x(rx_d), .t(tmpl0),
                      .corr(corr0), .valid(cv0));

  ppm_decision u_dec (.clk, .rst_n, .in_valid(cv0 && data_d2), .corr0, .corr1,
                      .valid(rx_valid), .bit_out(rx_bit));

  assign locked = (state != SEARCH);

  // Configuration rule (uwb_pkg): both pulse positions fit in a chip with room for
  // the sync latency, and the sync chip exists.
  a_cfg_rule: assert property (@(posedge clk) disable iff (!rst_n)
    peak && state == SEARCH |->
      (9'(cfg.chip_len) >= 9'(pulse_samples(cfg.stretch_log2)) + 9'(cfg.ppm_shift) + 9'd4) &&
      (5'(th_code[0]) < cfg.nc));

endmodule
