// th_frame_timer -- time-hopping frame timer.
//
// Counts the position of the current clock cycle inside the time-hopping structure:
// samp (cycle inside the chip, 0..chip_len-1), chip (time slot inside the frame,
// 0..nc-1), frame (frame inside the bit, 0..ns-1) and code_idx (frame count modulo
// code_len, the index into the TH code).  The division of the channel into frames of
// nc chips follows the paper; one sample per clock is this design's choice.
//
// Timing: start (wins over stop) makes the next cycle the first counted one, at chip 0,
// sample 0 of global frame 0 (start_frame = 0) or global frame 1 (start_frame = 1, used
// by the receivers, which lock during frame 0).  stop ends counting after the current
// cycle.  frame_end / bit_end flag the last cycle of a frame / bit period while active.
module th_frame_timer
  import uwb_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  uwb_cfg_t   cfg,
  input  logic       start,
  input  logic       start_frame,
  input  logic       stop,
  output logic       active,
  output logic [7:0] samp,
  output logic [3:0] chip,
  output logic [3:0] frame,
  output logic [3:0] code_idx,
  output logic       frame_end,
  output logic       bit_end
);

  logic chip_end;
  assign chip_end  = active && (samp == cfg.chip_len - 8'd1);
  assign frame_end = chip_end && (5'(chip) == cfg.nc - 5'd1);
  assign bit_end   = frame_end && (5'(frame) == cfg.ns - 5'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      samp     <= '0;
      chip     <= '0;
      frame    <= '0;
      code_idx <= '0;
    end else if (start) begin
      active   <= 1'b1;
      samp     <= '0;
      chip     <= '0;
      frame    <= (start_frame && cfg.ns != 5'd1) ? 4'd1 : 4'd0;
      code_idx <= (start_frame && cfg.code_len != 5'd1) ? 4'd1 : 4'd0;
    end else if (stop) begin
      active   <= 1'b0;
    end else if (active) begin
      if (!chip_end) begin
        samp <= samp + 8'd1;
      end else begin
        samp <= '0;
        if (!frame_end) begin
          chip <= chip + 4'd1;
        end else begin
          chip     <= '0;
          frame    <= bit_end ? 4'd0 : frame + 4'd1;
          code_idx <= (5'(code_idx) == cfg.code_len - 5'd1) ? 4'd0 : code_idx + 4'd1;
        end
      end
    end
  end

endmodule
