// uwb_transceiver -- reconfigurable IR-UWB time-hopping baseband transceiver (top).
//
// Emitter side: a TH-PPM and a TH-OOK emitter turn a bit stream into a baseband
// pulse train, one sample per clock, for a pulse front end / DAC (tx_sample) or as
// pulse triggers (tx_pulse).  Receiver side: a coherent TH-PPM receiver (matched
// filter sync, two templates, two correlators, decision) and a non-coherent TH-OOK
// energy receiver decode the digitised received signal (rx_sample, from an ADC).
// The configuration registers set at run time the modulation, the data rate
// (chip_len, nc, ns), the TH code, the pulse duration (spectrum occupation) and the
// amplitude (radio range).  The PPM and OOK chains and the reconfigurable parameters
// follow the paper; putting both modulations in one transceiver behind a modulation
// register is this design's choice (the paper builds them as separate circuits).
//
// Interface: cfg_* is the register bus of uwb_cfg_regs; tx_valid/tx_bit/tx_ready is
// the emitter's data handshake; rx_valid/rx_bit one cycle per decoded bit.  Change the
// configuration only while tx_busy and rx_locked are low.
module uwb_transceiver
  import uwb_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // configuration bus
  input  logic       cfg_we,
  input  logic [5:0] cfg_addr,
  input  logic [7:0] cfg_wdata,
  output logic [7:0] cfg_rdata,
  // transmit data and pulse output
  input  logic       tx_valid,
  input  logic       tx_bit,
  output logic       tx_ready,
  output logic       tx_busy,
  output sample_t    tx_sample,
  output logic       tx_pulse,
  // received samples and decoded data
  input  sample_t    rx_sample,
  output logic       rx_valid,
  output logic       rx_bit,
  output logic       rx_locked
);

  uwb_cfg_t cfg;
  th_code_t th_code [MAX_CODE_LEN];
  logic     is_ook;

  uwb_cfg_regs u_regs (.clk, .rst_n, .wr_en(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata),
                       .rdata(cfg_rdata), .cfg, .th_code);

  assign is_ook = (cfg.modulation == MOD_OOK);

  // ---------------- emitters ----------------
  logic    ppm_ready, ook_ready, ppm_pulse, ook_pulse, ppm_busy, ook_busy;
  sample_t ppm_sample, ook_sample;

  th_ppm_emitter u_ppm_tx (.clk, .rst_n, .cfg, .th_code,
    .tx_valid(tx_valid && !is_ook), .tx_bit, .tx_ready(ppm_ready),
    .tx_sample(ppm_sample), .tx_pulse(ppm_pulse), .busy(ppm_busy));

  th_ook_emitter u_ook_tx (.clk, .rst_n, .cfg, .th_code,
    .tx_valid(tx_valid && is_ook), .tx_bit, .tx_ready(ook_ready),
    .tx_sample(ook_sample), .tx_pulse(ook_pulse), .busy(ook_busy));

  assign tx_ready  = is_ook ? ook_ready  : ppm_ready;
  assign tx_sample = is_ook ? ook_sample : ppm_sample;
  assign tx_pulse  = is_ook ? ook_pulse  : ppm_pulse;
  assign tx_busy   = ppm_busy || ook_busy;

  // ---------------- receivers ----------------
  logic  ppm_valid, ppm_bit, ppm_locked, ook_valid, ook_bit, ook_locked;
  corr_t corr0, corr1;
  logic [ENERGY_W-1:0] energy;

  th_ppm_receiver u_ppm_rx (.clk, .rst_n, .en(!is_ook), .cfg, .th_code, .rx_sample,
    .rx_valid(ppm_valid), .rx_bit(ppm_bit), .locked(ppm_locked), .corr0, .corr1);

  th_ook_receiver u_ook_rx (.clk, .rst_n, .en(is_ook), .cfg, .th_code, .rx_sample,
    .rx_valid(ook_valid), .rx_bit(ook_bit), .locked(ook_locked), .energy);

  assign rx_valid  = is_ook ? ook_valid  : ppm_valid;
  assign rx_bit    = is_ook ? ook_bit    : ppm_bit;
  assign rx_locked = is_ook ? ook_locked : ppm_locked;

endmodule
