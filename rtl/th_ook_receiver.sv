// th_ook_receiver -- non-coherent (energy detection) time-hopping OOK receiver.
//
// Chain, as in the paper's non-coherent OOK receiver: band-pass filter, squarer,
// integrator over a window T, threshold.  No template and no matched filter are used.
//   SEARCH: the first filtered energy sample above cfg.sync_thr marks the sync pulse
//           of a packet (chip th_code[0] of frame 0).
//   WAIT:   a countdown of (nc - th_code[0]) * chip_len - L - 3 cycles (L = pulse
//           samples) starts the frame timer, aligned with the energy stream so that the
//           detected sample lies L + 2 samples into the coded chip.
//   RUN:    the energy is integrated over T = 2L + 4 samples at the start of the
//           TH-coded chip of every frame and summed over the ns frames of a bit; above
//           cfg.ook_thr gives 1.  The rest of the sync bit (ns > 1) is discarded.  After
//           cfg.pkt_bits data bits the receiver returns to SEARCH.
// Timing from the energy crossing, the window T and the packet length are this design's
// choices: the paper gives the chain but not its timing.
//
// Interface: rx_sample one sample per clock; rx_valid / rx_bit one cycle per bit,
// 4 cycles after the last input sample of its bit period (2 in the filter and squarer,
// 2 in integrator and threshold); energy is the last bit's integrated energy.  en low
// holds the receiver in SEARCH.  Correct only within the uwb_pkg configuration rule,
// which an assertion checks when a packet is acquired.
module th_ook_receiver
  import uwb_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  uwb_cfg_t            cfg,
  input  th_code_t            th_code [MAX_CODE_LEN],
  input  sample_t             rx_sample,
  output logic                rx_valid,
  output logic                rx_bit,
  output logic                locked,
  output logic [ENERGY_W-1:0] energy
);

  typedef enum logic [1:0] {SEARCH, WAIT, RUN} rx_state_t;
  rx_state_t state;

  logic signed [SAMPLE_W:0] y;
  logic [2*SAMPLE_W+1:0]    e;
  logic        det, start, stop, active, frame_end, bit_end, in_win, ev, data_d1;
  logic [7:0]  samp;
  logic [3:0]  chip, frame, code_idx;
  logic [12:0] cnt;
  logic [7:0]  nbits;
  logic        in_sync;

  bp_filter u_bp  (.clk, .rst_n, .x(rx_sample), .y);
  squarer   u_sq  (.clk, .rst_n, .y, .e);

  assign det   = en && (state == SEARCH) && (24'(e) > cfg.sync_thr);
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
        SEARCH: if (det) begin
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

  assign in_win = active && (chip == th_code[code_idx]) &&
                  (9'(samp) < 9'({pulse_samples(cfg.stretch_log2), 1'b0}) + 9'd4);

  integrate_dump u_int (.clk, .rst_n, .clr(start), .en(in_win), .dump(bit_end), .e,
                        .energy, .valid(ev));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) data_d1 <= 1'b0;
    else        data_d1 <= bit_end && !in_sync;
  end

  threshold_decision u_thr (.clk, .rst_n, .in_valid(ev && data_d1), .energy,
                            .thr(cfg.ook_thr), .valid(rx_valid), .bit_out(rx_bit));

  assign locked = (state != SEARCH);

  // Configuration rule (uwb_pkg): the window T fits in a chip, the sync chip exists.
  a_cfg_rule: assert property (@(posedge clk) disable iff (!rst_n)
    det |-> (9'(cfg.chip_len) >= 9'({pulse_samples(cfg.stretch_log2), 1'b0}) + 9'd4) &&
            (5'(th_code[0]) < cfg.nc));

endmodule
