// th_frame_timer_tb -- runs the frame timer under several configurations and compares
// samp/chip/frame/code_idx and the frame/bit end flags with counters kept here; checks
// the bit period length ns*nc*chip_len, start_frame = 1 and stop.
module th_frame_timer_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, start_frame = 0, stop = 0;
  uwb_cfg_t cfg = CFG_DEFAULT;
  logic active, frame_end, bit_end;
  logic [7:0] samp;
  logic [3:0] chip, frame, code_idx;
  int checks = 0, failures = 0;

  th_frame_timer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int nc, input int cl, input int ns, input int codel, input int sf);
    int s, c, f, g, last_be, nbe;
    cfg.nc = 5'(nc); cfg.chip_len = 8'(cl); cfg.ns = 5'(ns); cfg.code_len = 5'(codel);
    @(negedge clk); start = 1; start_frame = sf[0];
    @(negedge clk); start = 0;
    s = 0; c = 0; f = (sf != 0 && ns != 1) ? 1 : 0; g = (sf != 0 && codel != 1) ? 1 : 0;
    last_be = -1; nbe = 0;
    for (int t = 0; t < 3 * ns * nc * cl + 5; t++) begin
      check(active && samp == 8'(s) && chip == 4'(c) && frame == 4'(f) && code_idx == 4'(g),
            $sformatf("position t=%0d", t));
      check(frame_end == (s == cl-1 && c == nc-1), "frame_end");
      check(bit_end == (s == cl-1 && c == nc-1 && f == ns-1), "bit_end");
      if (bit_end) begin
        if (last_be >= 0) check(t - last_be == ns * nc * cl, "bit period length");
        last_be = t; nbe++;
      end
      @(negedge clk);
      if (++s == cl) begin
        s = 0;
        if (++c == nc) begin
          c = 0; f = (f + 1) % ns; g = (g + 1) % codel;
        end
      end
    end
    check(nbe >= 2, "bit ends seen");
    stop = 1; @(negedge clk); stop = 0;
    check(!active && !bit_end, "stopped");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!active, "idle after reset");
    run(3, 24, 1, 2, 0);
    run(3, 24, 1, 2, 1);
    run(4, 7, 3, 5, 1);
    run(1, 1, 2, 1, 0);
    run(16, 3, 2, 16, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
