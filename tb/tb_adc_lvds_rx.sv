// tb_adc_lvds_rx: self-checking test of the LVDS deserialiser and word aligner.
//
// For several starting bit phases the ADC model is reset and the receiver
// must lock within a bounded time, using at most WORD_W-1 bit-slips. Once
// locked, every word_valid must come exactly 16 clocks after the previous
// one (62.5 Msps at 1 Gbit/s per lane), every lane must carry its own channel
// number and two zero low bits, and all lanes must carry the same sample
// index, rising by one per sample period. A one-bit disturbance injected into
// the stream must drop the lock, count a lock loss, and lock again.
module tb_adc_lvds_rx;
  import ufa_pkg::*;

  localparam int unsigned N = NUM_CH;
  localparam int unsigned W = LVDS_WORD_W;

  logic clk = 1'b0, rst_n = 1'b1, slip = 1'b0;
  logic [7:0] phase;
  logic [N-1:0] din;
  logic fclk, word_valid, aligned;
  logic [N-1:0][W-1:0] words;
  logic [15:0] slips, lock_losses;
  int unsigned sample;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  afe5818_lvds_model #(.N_CH(N), .WORD_W(W)) u_adc (
    .clk, .rst_n, .phase, .slip, .wave_en(1'b0), .wave_code('0), .din, .fclk, .sample
  );

  adc_lvds_rx u_dut (
    .clk, .rst_n, .din, .fclk, .word_valid, .words, .aligned, .slips, .lock_losses
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Checks every word while aligned; prev_n < 0 means no previous word.
  int prev_n = -1;
  int last_valid_cyc = -1;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check_words(input int n_words);
    int got = 0;
    while (got < n_words) begin
      @(posedge clk);
      #0;
      if (word_valid) begin
        int n0;
        n0 = int'(words[0][9+2:2]);
        for (int c = 0; c < N; c++) begin
          check(words[c][15:12] == 4'(c), $sformatf("lane %0d channel field %h", c, words[c]));
          check(words[c][1:0] == 2'b00, "low bits zero");
          check(int'(words[c][11:2]) == n0, $sformatf("lane %0d sample index", c));
        end
        if (prev_n >= 0) begin
          check(n0 == ((prev_n + 1) % 1024), $sformatf("sample index %0d after %0d", n0, prev_n));
          check(cyc - last_valid_cyc == 16, $sformatf("word period %0d", cyc - last_valid_cyc));
        end
        prev_n = n0;
        last_valid_cyc = cyc;
        got++;
      end
    end
  endtask

  task automatic wait_lock(input int limit);
    int t = 0;
    while (!aligned && t < limit) begin
      @(posedge clk);
      t++;
    end
    check(aligned, "receiver locks");
  endtask

  initial begin
    for (int p = 0; p < 16; p += 5) begin
      rst_n = 1'b0;
      phase = 8'(p);
      prev_n = -1;
      repeat (4) @(posedge clk);
      rst_n = 1'b1;
      // at most 15 slips of 17 clocks plus 4 lock words of 16 clocks
      wait_lock(16 * 17 + 5 * 16 + 8);
      check(slips <= 16'(W - 1), $sformatf("slip count %0d for phase %0d", slips, p));
      check_words(40);
    end
    // one-bit disturbance: lock must drop and come back
    check(lock_losses == 0, "no lock loss before disturbance");
    @(posedge clk);
    slip = 1'b1;
    @(posedge clk);
    slip = 1'b0;
    repeat (40) @(posedge clk);
    check(lock_losses == 16'd1, $sformatf("lock loss counted (%0d)", lock_losses));
    wait_lock(16 * 17 + 5 * 16 + 8);
    prev_n = -1;
    check_words(20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
