// uwb_ber_tb -- bit error count of the TH-PPM and TH-OOK links under noise.
//
// The transceiver's emitter is looped back to its receiver through a fixed delay plus
// approximately Gaussian noise (sum of four uniform values), at several noise levels,
// for 200-bit packets of each modulation at the reset configuration (Nc = 3,
// 24 cycles per chip, one pulse per bit).  Noise is applied only after the sync period,
// so both receivers are compared with correct timing.  Prints the error counts, and
// checks that both links are error-free without noise, that every packet delivers all
// its bits, and that the coherent PPM link makes no more errors than the
// energy-detection OOK link at every level, and strictly fewer at the highest.
module uwb_ber_tb;
  import uwb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_addr = 0;
  logic [7:0] cfg_wdata = 0, cfg_rdata;
  logic tx_valid = 0, tx_bit = 0, tx_ready, tx_busy, tx_pulse;
  sample_t tx_sample, rx_sample;
  logic rx_valid, rx_bit, rx_locked;
  int checks = 0, failures = 0;

  uwb_transceiver dut (.*);
  always #5 clk = ~clk;

  localparam int DELAY = 19;
  localparam int NBITS = 200;
  localparam int LEVELS = 4;
  localparam int AMP [LEVELS] = '{0, 9, 22, 35};   // uniform half-width, sigma ~ 1.15 * AMP
  sample_t line [DELAY];
  bit      noisy [DELAY];
  int      amp = 0;
  bit      noise_on = 0;

  function automatic sample_t add_noise(input sample_t s, input bit on);
    int v;
    v = int'(s);
    if (on && amp > 0)
      for (int k = 0; k < 4; k++) v += int'($urandom_range(2 * amp)) - amp;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return sample_t'(v);
  endfunction

  always_ff @(posedge clk) begin
    line[0]  <= tx_sample;
    noisy[0] <= noise_on;
    for (int i = 1; i < DELAY; i++) begin
      line[i]  <= line[i-1];
      noisy[i] <= noisy[i-1];
    end
  end
  assign rx_sample = add_noise(line[DELAY-1], noisy[DELAY-1]);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg_addr = 6'(a); cfg_wdata = 8'(d); cfg_we = 1;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int ook, output int errors);
    bit bits [NBITS];
    int idx, nout, bl;
    wr(0, ook);
    wr(14, NBITS);
    bl = 3 * 24;
    for (int i = 0; i < NBITS; i++) bits[i] = 1'($urandom_range(1));
    idx = 0; nout = 0; errors = 0;
    for (int n = 0; n < (NBITS + 1) * bl + DELAY + 40; n++) begin
      @(negedge clk);
      tx_valid = (idx < NBITS);
      tx_bit   = (idx < NBITS) ? bits[idx] : 1'b0;
      #1;
      if (tx_ready) begin
        idx++;
        noise_on = 1;
      end
      if (rx_valid) begin
        if (nout < NBITS && rx_bit != bits[nout]) errors++;
        nout++;
      end
    end
    noise_on = 0;
    check(nout == NBITS, $sformatf("%s: %0d of %0d bits delivered", ook ? "OOK" : "PPM", nout, NBITS));
    repeat (DELAY + 20) @(negedge clk);
  endtask

  initial begin
    int e_ppm, e_ook;
    for (int i = 0; i < DELAY; i++) begin line[i] = '0; noisy[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int l = 0; l < LEVELS; l++) begin
      amp = AMP[l];
      run(0, e_ppm);
      run(1, e_ook);
      $display("noise sigma ~%0d: PPM errors %0d / %0d, OOK errors %0d / %0d",
               (AMP[l] * 115) / 100, e_ppm, NBITS, e_ook, NBITS);
      if (l == 0) check(e_ppm == 0 && e_ook == 0, "no errors without noise");
      check(e_ppm <= e_ook, "PPM no worse than OOK");
      if (l == LEVELS - 1) check(e_ppm < e_ook, "PPM better than OOK at the highest noise");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
