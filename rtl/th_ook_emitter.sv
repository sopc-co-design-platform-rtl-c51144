// th_ook_emitter -- reconfigurable time-hopping OOK emitter.
//
// On-off keying: a binary one is a pulse in the chip given by the TH code entry
// th_code[code_idx] of each frame, a binary zero is no pulse.  OOK with time hopping
// follows the paper.  Each packet opens with one synchronisation bit period of pulses
// (sent like ones), so a receiver can find the frame timing; that preamble, the
// valid/ready interface and the run-time configuration are this design's choices.
//
// Interface: a packet starts when tx_valid is seen while idle (busy low).  The bit
// for each data period is taken, with tx_ready high for one cycle, in the last cycle of
// the period before it (the first one at the end of the sync period).  If tx_valid is
// low at that point the packet ends.  tx_valid must stay high, with tx_bit stable,
// until tx_ready.
// Timing: a bit period is ns * nc * chip_len cycles, one sample per clock; tx_pulse
// is the trigger of each pulse and tx_sample carries the pulse one cycle later.
module th_ook_emitter
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

  assign pos      = 8'd0;
  assign tx_pulse = active && (sync_phase || cur_bit) && (chip == th_code[code_idx]) && (samp == pos);

  pulse_gen u_pulse (
    .clk, .rst_n, .trig(tx_pulse), .stretch_log2(cfg.stretch_log2), .att(cfg.tx_att),
    .sample(tx_sample), .busy(pulse_busy));

  assign busy = active || pulse_busy;

  // Source rule of the data handshake.
  a_valid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_bit));

endmodule
