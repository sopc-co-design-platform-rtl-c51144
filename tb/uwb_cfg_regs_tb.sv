// uwb_cfg_regs_tb -- checks reset values, write/read-back of every register, the
// stretch clamp and the TH code table of the configuration registers.
module uwb_cfg_regs_tb;
  import uwb_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [5:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  uwb_cfg_t cfg;
  th_code_t th_code [MAX_CODE_LEN];
  int checks = 0, failures = 0;

  uwb_cfg_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk); addr = 6'(a); wdata = 8'(d); wr_en = 1;
    @(negedge clk); wr_en = 0;
  endtask

  // read register a combinationally and compare with v
  task automatic chk_rd(input int a, input int v, input string what);
    addr = 6'(a);
    #1 check(int'(rdata) == v, what);
  endtask

  initial begin
    int v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk_rd(1, 3, "reset nc = 3");
    chk_rd(2, 24, "reset chip_len");
    chk_rd(32, 2, "reset code 0 = 2"); chk_rd(33, 0, "reset code 1 = 0");
    check(cfg.modulation == MOD_PPM, "reset modulation");
    // data registers
    for (int a = 1; a <= 14; a++) begin
      if (a == 6) continue;
      v = (a * 37 + 5) & 8'hff;
      if (a == 1 || a == 3 || a == 4) v &= 31;
      if (a == 7) v &= 7;
      wr(a, v);
      chk_rd(a, v, $sformatf("reg %0d readback", a));
    end
    check(cfg.nc == 5'((1*37+5)&31) && cfg.chip_len == 8'(2*37+5), "cfg fields");
    check(cfg.sync_thr == {8'(10*37+5), 8'(9*37+5), 8'(8*37+5)}, "sync_thr assembled");
    check(cfg.pkt_bits == 8'(14*37+5), "pkt_bits");
    wr(6, 1); check(cfg.stretch_log2 == 1, "stretch 1");
    wr(6, 7); check(cfg.stretch_log2 == 2, "stretch clamped to 2");
    wr(0, 1); check(cfg.modulation == MOD_OOK, "modulation OOK"); chk_rd(0, 1, "modulation readback");
    for (int i = 0; i < 16; i++) wr(32 + i, 15 - i);
    for (int i = 0; i < 16; i++) begin
      check(th_code[i] == th_code_t'(15 - i), $sformatf("code %0d", i));
      chk_rd(32 + i, 15 - i, $sformatf("code %0d readback", i));
    end
    chk_rd(20, 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
