// uwb_two_user_tb -- the two-user time-hopping example: three chips per frame, user 1
// sends data 0 1 with TH code 2 0 on its data frames, user 2 sends 1 1 with TH code 1 2.
// Two transceivers share one channel (sum of both emitters, fixed delay).  The code
// tables are {0,2} and {2,1}: entry 0 is used by the sync frame, entries 1, 0 by the two
// data frames, so the data frames carry the codes 2 0 and 1 2.  Checks the chip each
// user's data pulses land in (user 1: 2 then 0, user 2: 1 then 2, never the same chip)
// and that user 1's receiver decodes 0 1 from the shared channel.  User 2's receiver is
// not checked: both packets start together and the simple sync locks to the first pulse
// on the channel, which is user 1's.
module uwb_two_user_tb;
  import uwb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic we_a = 0, we_b = 0;
  logic [5:0] addr = 0;
  logic [7:0] wdata = 0, rd_a, rd_b;
  logic v_a = 0, v_b = 0, b_a = 0, b_b = 0, rdy_a, rdy_b, busy_a, busy_b, p_a, p_b;
  sample_t tx_a, tx_b, chan;
  logic rxv_a, rxb_a, lk_a, rxv_b, rxb_b, lk_b;
  int checks = 0, failures = 0;

  uwb_transceiver user1 (.clk, .rst_n, .cfg_we(we_a), .cfg_addr(addr), .cfg_wdata(wdata),
    .cfg_rdata(rd_a), .tx_valid(v_a), .tx_bit(b_a), .tx_ready(rdy_a), .tx_busy(busy_a),
    .tx_sample(tx_a), .tx_pulse(p_a), .rx_sample(chan), .rx_valid(rxv_a), .rx_bit(rxb_a),
    .rx_locked(lk_a));
  uwb_transceiver user2 (.clk, .rst_n, .cfg_we(we_b), .cfg_addr(addr), .cfg_wdata(wdata),
    .cfg_rdata(rd_b), .tx_valid(v_b), .tx_bit(b_b), .tx_ready(rdy_b), .tx_busy(busy_b),
    .tx_sample(tx_b), .tx_pulse(p_b), .rx_sample(chan), .rx_valid(rxv_b), .rx_bit(rxb_b),
    .rx_locked(lk_b));

  always #5 clk = ~clk;

  localparam int DELAY = 11;
  sample_t line [DELAY];
  always_ff @(posedge clk) begin
    line[0] <= sample_t'(int'(tx_a) + int'(tx_b));
    for (int i = 1; i < DELAY; i++) line[i] <= line[i-1];
  end
  assign chan = line[DELAY-1];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input bit user, input int a, input int d);
    @(negedge clk); addr = 6'(a); wdata = 8'(d); we_a = !user; we_b = user;
    @(negedge clk); we_a = 0; we_b = 0;
  endtask

  initial begin
    int ts, ia, ib, na, nb, pos, fl;
    int got [2] = '{0, 0};
    int slot_a [3] = '{0, 0, 0};
    int slot_b [3] = '{0, 0, 0};
    int bits_a [2] = '{0, 1};
    int bits_b [2] = '{1, 1};
    for (int i = 0; i < DELAY; i++) line[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // both users: TH-PPM, Nc = 3, 24 cycles per chip, one pulse per bit, 2-bit packets
    for (int u = 0; u < 2; u++) begin
      wr(u[0], 1, 3); wr(u[0], 2, 24); wr(u[0], 3, 1); wr(u[0], 4, 2); wr(u[0], 14, 2);
    end
    wr(0, 32, 0); wr(0, 33, 2);      // user 1
    wr(1, 32, 2); wr(1, 33, 1);      // user 2
    fl = 3 * 24;
    ia = 0; ib = 0; na = 0; nb = 0; ts = -1;
    for (int n = 0; n < 3 * fl + DELAY + 40; n++) begin
      @(negedge clk);
      v_a = (ia < 2); b_a = (ia < 2) ? bits_a[ia][0] : 1'b0;
      v_b = (ib < 2); b_b = (ib < 2) ? bits_b[ib][0] : 1'b0;
      #1;
      if (ts < 0) ts = n;
      if (rdy_a) ia++;
      if (rdy_b) ib++;
      // pulse triggers: timer position is n - ts - 1
      pos = n - ts - 1;
      if (p_a) begin if (na < 3) slot_a[na] = (pos % fl) / 24; na++; end
      if (p_b) begin if (nb < 3) slot_b[nb] = (pos % fl) / 24; nb++; end
      if (rxv_a) begin
        check(rxb_a == bits_a[got[0]][0], $sformatf("user 1 bit %0d", got[0]));
        got[0]++;
      end
    end
    check(na == 3 && nb == 3, "one pulse per frame for each user");
    check(slot_a[1] == 2 && slot_a[2] == 0, $sformatf("user 1 data chips %0d %0d, expected 2 0", slot_a[1], slot_a[2]));
    check(slot_b[1] == 1 && slot_b[2] == 2, $sformatf("user 2 data chips %0d %0d, expected 1 2", slot_b[1], slot_b[2]));
    check(slot_a[1] != slot_b[1] && slot_a[2] != slot_b[2], "no collision in data frames");
    check(got[0] == 2, "user 1 decoded two bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
