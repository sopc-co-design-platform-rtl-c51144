// uwb_pkg -- types and constants shared by the IR-UWB time-hopping transceiver.
//
// The transceiver works on a baseband sample stream, one signed sample per clock.
// A bit period is ns frames; a frame is nc chips (time slots); a chip is chip_len
// clock cycles.  In every frame one pulse may be sent, in the chip named by the
// time-hopping (TH) code for that frame.  All of these numbers live in the run-time
// configuration struct uwb_cfg_t, so the data rate, the TH code, the pulse duration
// (spectrum occupation) and the pulse amplitude (radio range) change without a new
// bitstream.  The framing (frames of Nc chips, one coded chip per frame) follows the
// time-hopping scheme of the paper; the field widths, the limits and the pulse template
// values are this design's own choices.
//
// Pulse template: 8 samples of a Gaussian-monocycle-like shape with zero sum, so it
// has no DC content:  -15 -50 15 100 15 -50 -15 0.  Stretching by 2**s repeats each
// sample 2**s times (longer pulse, narrower spectrum).
//
// Configuration rule for correct reception (checked by nobody in hardware):
//   PPM: chip_len >= (8 << stretch_log2) + ppm_shift + 4
//   OOK: chip_len >= 2 * (8 << stretch_log2) + 4
//   every TH code entry < nc, 1 <= ns, nc, code_len <= 16.
package uwb_pkg;

  localparam int SAMPLE_W         = 8;   // signed baseband sample width
  localparam int PULSE_LEN        = 8;   // template length at stretch 0
  localparam int MAX_STRETCH_LOG2 = 2;   // stretch 1, 2 or 4
  localparam int MAX_PULSE        = PULSE_LEN << MAX_STRETCH_LOG2;  // 32 samples
  localparam int MAX_NC           = 16;  // chips per frame
  localparam int MAX_NS           = 16;  // frames (pulses) per bit
  localparam int MAX_CODE_LEN     = 16;  // TH code period in frames
  localparam int CHIP_W           = 4;   // TH code entry width: log2(MAX_NC)
  localparam int CORR_W           = 24;  // correlator / matched filter width
  localparam int ENERGY_W         = 32;  // OOK energy accumulator width

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic [CHIP_W-1:0]          th_code_t;
  typedef logic signed [CORR_W-1:0]   corr_t;

  typedef enum logic {MOD_PPM = 1'b0, MOD_OOK = 1'b1} mod_t;

  typedef struct packed {
    mod_t        modulation;    // selects TH-PPM or TH-OOK emitter/receiver
    logic [4:0]  nc;            // chips per frame, 1..16
    logic [7:0]  chip_len;      // clock cycles per chip
    logic [4:0]  ns;            // frames per bit, 1..16
    logic [4:0]  code_len;      // TH code period in frames, 1..16
    logic [7:0]  ppm_shift;     // PPM time shift of a binary one, in cycles
    logic [1:0]  stretch_log2;  // pulse duration 8 << stretch_log2 (0..2)
    logic [2:0]  tx_att;        // emitted amplitude shifted right by tx_att
    logic [23:0] sync_thr;      // sync threshold (PPM: matched filter, OOK: energy)
    logic [23:0] ook_thr;       // OOK bit decision threshold on integrated energy
    logic [7:0]  pkt_bits;      // data bits per packet (receiver), 1..255
  } uwb_cfg_t;

  // Reset configuration: Nc = 3 chips per frame as drawn in the time-hopping figure.
  localparam uwb_cfg_t CFG_DEFAULT = '{
    modulation: MOD_PPM, nc: 5'd3, chip_len: 8'd24, ns: 5'd1, code_len: 5'd2,
    ppm_shift: 8'd8, stretch_log2: 2'd0, tx_att: 3'd0,
    sync_thr: 24'd8000, ook_thr: 24'd20000, pkt_bits: 8'd8};

  // Template sample i (0..7) of the unstretched pulse.
  function automatic sample_t pulse_tmpl(input logic [2:0] i);
    case (i)
      3'd0: return -8'sd15;
      3'd1: return -8'sd50;
      3'd2: return  8'sd15;
      3'd3: return  8'sd100;
      3'd4: return  8'sd15;
      3'd5: return -8'sd50;
      3'd6: return -8'sd15;
      default: return 8'sd0;
    endcase
  endfunction

  // Pulse length in samples for a given stretch.
  function automatic logic [5:0] pulse_samples(input logic [1:0] stretch_log2);
    return 6'(PULSE_LEN << stretch_log2);
  endfunction

  // Cycles from a detected sync event to the receiver's frame-timer start:
  // (nc - c0) * chip_len - pulse_samples - 3, see the receivers.
  function automatic logic [12:0] sync_wait(input uwb_cfg_t cfg, input th_code_t c0);
    logic [12:0] span;
    span = 13'(cfg.nc - 5'(c0)) * 13'(cfg.chip_len);
    return span - 13'(pulse_samples(cfg.stretch_log2)) - 13'd3;
  endfunction

endpackage
