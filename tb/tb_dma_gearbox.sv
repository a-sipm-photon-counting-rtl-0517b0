// tb_dma_gearbox: self-checking test of the sample-word gearbox and FIFO.
//
// Words arrive every 16 clocks, word[c] = {c[3:0], n[11:0]} for sample n, so
// every stream word tells which channel and sample it came from. The test
// builds the expected word sequence itself (samples from the first one after
// start, enabled channels in ascending order, four words per beat, lowest in
// the low bits) and compares each received beat with it. Cases: all 16
// channels, one channel, three channels (beats span samples), a run with a
// receiver that is not yet aligned at start, and a run where the sink stalls
// long enough to overflow the small FIFO. It also checks tlast on the last
// beat only, the beat count, and the overflow flag and dropped-beat count.
module tb_dma_gearbox;

  localparam int unsigned N     = 16;
  localparam int unsigned W     = 16;
  localparam int unsigned SW    = 64;
  localparam int unsigned DEPTH = 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic word_valid = 1'b0, aligned = 1'b1, start = 1'b0;
  logic [N-1:0][W-1:0] words;
  logic [N-1:0] ch_mask;
  logic [16:0] n_beats;
  logic capturing, overflow;
  logic [31:0] dropped_beats;
  logic [$clog2(DEPTH):0] fifo_level;
  logic tvalid, tready, tlast;
  logic [SW-1:0] tdata;
  bit sink_stall = 1'b0, sink_random = 1'b0;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  dma_gearbox #(.DEPTH(DEPTH)) u_dut (
    .clk, .rst_n, .word_valid, .words, .aligned, .start, .ch_mask, .n_beats,
    .capturing, .overflow, .dropped_beats, .fifo_level,
    .m_axis_tvalid(tvalid), .m_axis_tready(tready), .m_axis_tdata(tdata), .m_axis_tlast(tlast)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // source: a new sample every 16 clocks
  int unsigned n_sample = 0, tick = 0;
  always_ff @(posedge clk) begin
    tick <= (tick == 15) ? 0 : tick + 1;
    word_valid <= (tick == 15);
    if (tick == 15) begin
      for (int c = 0; c < N; c++) words[c] <= {4'(c), 12'(n_sample)};
      n_sample <= n_sample + 1;
    end
  end

  // sink
  always_ff @(posedge clk) tready <= !sink_stall && !(sink_random && $urandom_range(2) == 0);

  logic [W-1:0] got_words[$];
  int got_beats = 0, got_last = 0, last_pos = -1;
  always @(posedge clk) begin
    if (tvalid && tready) begin
      for (int k = 0; k < SW / W; k++) got_words.push_back(tdata[k*W +: W]);
      got_beats++;
      if (tlast) begin
        got_last++;
        last_pos = got_beats;
      end
    end
  end

  task automatic run(input logic [N-1:0] mask, input int beats, input bit stall_mid,
                     input bit start_unaligned);
    int first_n, idx, words_exp, bad;
    logic [W-1:0] exp_words[$];
    got_words.delete();
    got_beats = 0;
    got_last = 0;
    last_pos = -1;
    aligned = !start_unaligned;
    @(negedge clk);
    ch_mask = mask;
    n_beats = 17'(beats);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    if (start_unaligned) begin
      repeat (50) @(negedge clk);
      check(got_beats == 0 && fifo_level == 0, "no data while not aligned");
      aligned = 1'b1;
    end
    // the first sample taken is the next word_valid
    while (!word_valid) @(negedge clk);
    first_n = int'(words[0][11:0]);
    if (stall_mid) begin
      sink_stall = 1'b1;
      repeat (16 * 40) @(negedge clk);
      sink_stall = 1'b0;
    end
    idx = 0;
    while (capturing || tvalid) begin
      @(negedge clk);
      idx++;
      if (idx > 200000) break;
    end
    repeat (4) @(negedge clk);
    check(got_beats == beats, $sformatf("beat count %0d, expected %0d", got_beats, beats));
    check(got_last == 1 && last_pos == beats, "tlast only on the last beat");
    // expected word sequence
    words_exp = beats * SW / W;
    for (int n = first_n; exp_words.size() < 4 * words_exp; n++)
      for (int c = 0; c < N; c++)
        if (mask[c]) exp_words.push_back({4'(c), 12'(n)});
    if (!stall_mid) begin
      bad = 0;
      for (int i = 0; i < words_exp; i++)
        if (got_words[i] != exp_words[i]) begin
          if (bad < 5) $display("word %0d: got %h exp %h", i, got_words[i], exp_words[i]);
          bad++;
        end
      check(bad == 0, $sformatf("%0d stream words differ", bad));
      check(!overflow && dropped_beats == 0, "no overflow");
    end else begin
      // with dropped beats the stream is an ordered subsequence of whole beats
      int j = 0;
      bad = 0;
      for (int i = 0; i < words_exp; i += SW / W) begin
        while (j < exp_words.size() && exp_words[j] != got_words[i]) j += SW / W;
        if (j >= exp_words.size()) bad++;
        else for (int k = 0; k < SW / W; k++) if (got_words[i+k] != exp_words[j+k]) bad++;
      end
      check(bad == 0, $sformatf("%0d beats not in order after overflow", bad));
      check(overflow, "overflow flag set");
      check(dropped_beats > 0, $sformatf("dropped beats counted (%0d)", dropped_beats));
    end
  endtask

  initial begin
    ch_mask = '0;
    n_beats = '0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    sink_random = 1'b1;
    run(16'hFFFF, 40, 1'b0, 1'b0);
    run(16'h0020, 10, 1'b0, 1'b0);
    run(16'h8411, 21, 1'b0, 1'b1);
    sink_random = 1'b0;
    run(16'hFFFF, 60, 1'b1, 1'b0);
    check(!capturing, "idle after capture");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
