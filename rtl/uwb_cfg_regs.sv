// uwb_cfg_regs -- run-time configuration registers of the IR-UWB transceiver.
//
// Holds every reconfigurable quantity: modulation, data rate (chip_len, nc, ns), TH
// code and its period, PPM shift, pulse stretch (spectrum occupation), emitted
// attenuation (radio range), thresholds and packet length.  Reconfiguring by register
// writes instead of reprogramming follows the paper's reconfigurability idea; the bus,
// the register map and the reset values are this design's own choice.
//
// Bus: write on wr_en at the clock edge; rdata is combinational.  Map (8-bit registers):
//   0 modulation (bit 0: 0 PPM, 1 OOK)   1 nc        2 chip_len    3 ns
//   4 code_len                           5 ppm_shift 6 stretch_log2 (clamped to 2)
//   7 tx_att  8..10 sync_thr bytes 0..2  11..13 ook_thr bytes 0..2  14 pkt_bits
//   32..47 TH code entries 0..15 (low 4 bits)
// Reset: uwb_pkg::CFG_DEFAULT, TH code 2,0,1,2,0,1,... (starts with 2,0 as user 1 of the
// time-hopping figure).
module uwb_cfg_regs
  import uwb_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [5:0]  addr,
  input  logic [7:0]  wdata,
  output logic [7:0]  rdata,
  output uwb_cfg_t    cfg,
  output th_code_t    th_code [MAX_CODE_LEN]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= CFG_DEFAULT;
      for (int i = 0; i < MAX_CODE_LEN; i++) th_code[i] <= th_code_t'((i + 2) % 3);
    end else if (wr_en) begin
      case (addr)
        6'd0:  cfg.modulation   <= mod_t'(wdata[0]);
        6'd1:  cfg.nc           <= wdata[4:0];
        6'd2:  cfg.chip_len     <= wdata;
        6'd3:  cfg.ns           <= wdata[4:0];
        6'd4:  cfg.code_len     <= wdata[4:0];
        6'd5:  cfg.ppm_shift    <= wdata;
        6'd6:  cfg.stretch_log2 <= (wdata > 8'd2) ? 2'd2 : wdata[1:0];
        6'd7:  cfg.tx_att       <= wdata[2:0];
        6'd8:  cfg.sync_thr[7:0]   <= wdata;
        6'd9:  cfg.sync_thr[15:8]  <= wdata;
        6'd10: cfg.sync_thr[23:16] <= wdata;
        6'd11: cfg.ook_thr[7:0]    <= wdata;
        6'd12: cfg.ook_thr[15:8]   <= wdata;
        6'd13: cfg.ook_thr[23:16]  <= wdata;
        6'd14: cfg.pkt_bits     <= wdata;
        default: if (addr[5:4] == 2'b10) th_code[addr[3:0]] <= wdata[3:0];
      endcase
    end
  end

  always_comb begin
    case (addr)
      6'd0:  rdata = {7'd0, cfg.modulation};
      6'd1:  rdata = {3'd0, cfg.nc};
      6'd2:  rdata = cfg.chip_len;
      6'd3:  rdata = {3'd0, cfg.ns};
      6'd4:  rdata = {3'd0, cfg.code_len};
      6'd5:  rdata = cfg.ppm_shift;
      6'd6:  rdata = {6'd0, cfg.stretch_log2};
      6'd7:  rdata = {5'd0, cfg.tx_att};
      6'd8:  rdata = cfg.sync_thr[7:0];
      6'd9:  rdata = cfg.sync_thr[15:8];
      6'd10: rdata = cfg.sync_thr[23:16];
      6'd11: rdata = cfg.ook_thr[7:0];
      6'd12: rdata = cfg.ook_thr[15:8];
      6'd13: rdata = cfg.ook_thr[23:16];
      6'd14: rdata = cfg.pkt_bits;
      default: rdata = (addr[5:4] == 2'b10) ? {4'd0, th_code[addr[3:0]]} : 8'd0;
    endcase
  end

endmodule
