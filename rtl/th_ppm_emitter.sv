// th_ppm_emitter -- reconfigurable time-hopping PPM emitter.
//
// Sends one pulse per frame, in the chip given by the TH code entry th_code[code_idx].
// A binary zero puts the pulse at the start of that chip; a binary one delays it by
// cfg.ppm_shift cycles (pulse position modulation: bits differ by a time shift).
// Time hopping and PPM follow the paper.  Each packet opens with one synchronisation
// bit period whose pulses are all unshifted, so a receiver can find the frame timing;
// that preamble, and the valid/ready data interface, are this design's choices.
//
// Interface: a packet starts when tx_valid is seen while idle (busy low).  The bit
// for each data period is taken, with tx_ready high for one cycle, in the last cycle of
// the period before it (the first one at the end of the sync period).  If tx_valid is
// low at that point the packet ends.  tx_valid must stay high, with tx_bit stable,
// until tx_ready.
// Timing: a bit period is ns * nc * chip_len cycles, one sample per clock; tx_pulse
// is the trigger of each pulse and tx_sample carries the pulse one cycle later.
module th_ppm_emitter
  import uwb_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  uwb_cfg_t cfg,
  input  th_code_t th_code [MAX_CODE_LEN],
  input  logic     tx_valid,
  input  logic     tx_bit,
  output logic     tx_ready,
  output sample_t  tx_sample,
  output logic     tx_pulse,
  output logic     busy
);

  logic       active, frame_end, bit_end;
  logic [7:0] samp, pos;
  logic [3:0] chip, frame, code_idx;
  logic       sync_phase, cur_bit, pulse_busy, start, stop;

  assign start    = !active && !pulse_busy && tx_valid;
  assign tx_ready = bit_end && tx_valid;
  assign stop     = bit_end && !tx_valid;

  th_frame_timer u_timer (
    .clk, .rst_n, .cfg, .start, .start_frame(1'b0), .stop,
    .active, .samp, .chip, .frame, .code_idx, .frame_end, .bit_end);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_phase <= 1'b0;
      cur_bit    <= 1'b0;
    end else if (start) begin
      sync_phase <= 1'b1;
    end else if (bit_end) begin
      sync_phase <= 1'b0;
      if (tx_valid) cur_bit <= tx_bit;
    end
  end

  assign pos      = (!sync_phase && cur_bit) ? cfg.ppm_shift : 8'd0;
  assign tx_pulse = active && (chip == th_code[code_idx]) && (samp == pos);

  pulse_gen u_pulse (
    .clk, .rst_n, .trig(tx_pulse), .stretch_log2(cfg.stretch_log2), .att(cfg.tx_att),
    .sample(tx_sample), .busy(pulse_busy));

  assign busy = active || pulse_busy;

  // Source rule of the data handshake.
  a_valid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_bit));

endmodule
