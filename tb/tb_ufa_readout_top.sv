// tb_ufa_readout_top: end-to-end test of the readout logic, from the ADC's
// serial LVDS lanes to words in processor memory.
//
// An ADC model drives 16 data lanes and the frame lane; an AXI memory model
// stands in for processor memory. Every stored 16-bit word carries its
// channel (bits 15:12) and sample index mod 1024 (bits 11:2), so the test can
// check any captured buffer: words in channel order of the mask, sample
// index rising by one per pass, no gaps unless an overflow or lock loss was
// reported. The DMA limit is cut to 4 kB and the FIFO to 16 beats so that
// every mechanism shows up in a short run. Each of these is counted and must
// happen at least once: bit-slip alignment, lock loss and re-lock, FIFO
// back-pressure from the memory side, FIFO overflow, length cut to the DMA
// limit, a burst split at a 4 kB boundary, single-channel capture, an error
// response, and the GPIO-to-SPI pin assignment. A single-channel capture must
// take 16 clocks per sample (62.5 Msps at 1 ns clocks).
module tb_ufa_readout_top;
  import ufa_pkg::*;

  localparam int unsigned N = NUM_CH, DMA_MAX = 4096, DEPTH = 16, WORDS = 4096;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [7:0] phase = 8'd7;
  logic slip = 1'b0;
  logic [N-1:0] adc_din;
  logic adc_fclk;
  int unsigned adc_sample;
  logic cap_start = 1'b0;
  logic [31:0] cap_addr, cap_len_bytes;
  logic [N-1:0] cap_ch_mask;
  logic rx_aligned, cap_capturing, cap_busy, cap_done, cap_error, cap_overflow;
  logic [15:0] rx_slips, rx_lock_losses;
  logic [31:0] cap_dropped_beats;
  logic [$clog2(DEPTH):0] fifo_level;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] wdata;
  logic [7:0] wstrb;
  logic [3:0] gpio_o = 4'h0;
  logic [0:0] gpio_i;
  logic spi_sclk, spi_sdata, spi_sen, adc_reset, spi_sdout = 1'b0;
  logic mem_stall = 1'b0, mem_random = 1'b0, bad_resp = 1'b0;
  int unsigned proto_errors, bursts, beats;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_slip_align = 0, n_lock_loss = 0, n_backpressure = 0, n_overflow = 0;
  int n_len_cut = 0, n_page_split = 0, n_single_ch = 0, n_err_resp = 0, n_gpio = 0;

  always #1 clk = ~clk;

  afe5818_lvds_model u_adc (
    .clk, .rst_n, .phase, .slip, .wave_en(1'b0), .wave_code('0), .din(adc_din), .fclk(adc_fclk), .sample(adc_sample)
  );

  ufa_readout_top #(.DMA_MAX(DMA_MAX), .DEPTH(DEPTH)) u_dut (
    .clk, .rst_n, .adc_din, .adc_fclk, .cap_start, .cap_addr, .cap_len_bytes, .cap_ch_mask,
    .rx_aligned, .rx_slips, .rx_lock_losses, .cap_capturing, .cap_busy, .cap_done,
    .cap_error, .cap_overflow, .cap_dropped_beats, .fifo_level,
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready),
    .gpio_o, .gpio_i, .adc_spi_sclk(spi_sclk), .adc_spi_sdata(spi_sdata), .adc_spi_sen(spi_sen),
    .adc_reset, .adc_spi_sdout(spi_sdout)
  );

  axi_mem_model #(.DATA_W(64), .WORDS(WORDS)) u_mem (
    .clk, .rst_n, .stall(mem_stall), .random_stall(mem_random), .bad_resp,
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready, .wdata, .wstrb, .wlast,
    .wvalid, .wready, .bresp, .bvalid, .bready, .proto_errors, .bursts, .beats
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // back-pressure: data waiting in the FIFO while memory is not ready
  always @(posedge clk) begin
    if (wvalid && !wready) n_backpressure++;
    if (awvalid && awready && awlen != 8'd15 && ((awaddr + (32'(awlen) + 1) * 8) % 4096) == 0)
      n_page_split++;
  end

  function automatic logic [15:0] mem_word(input logic [31:0] base, input int k);
    logic [63:0] b;
    b = u_mem.mem[(base / 8 + k / 4) % WORDS];
    return b[16 * (k % 4) +: 16];
  endfunction

  // Checks the stored words: ordered by mask, consecutive sample indices.
  // Returns the number of breaks in the sequence.
  function automatic int stream_breaks(input logic [31:0] base, input int nwords,
                                       input logic [N-1:0] mask);
    int breaks = 0;
    int ch, n, exp_ch, exp_n;
    for (int k = 0; k < nwords; k++) begin
      logic [15:0] w;
      w  = mem_word(base, k);
      ch = int'(w[15:12]);
      n  = int'(w[11:2]);
      if (w[1:0] != 2'b00 || !mask[ch]) breaks++;
      else if (k > 0 && (ch != exp_ch || n != exp_n)) breaks++;
      // next expected word
      exp_ch = ch;
      exp_n  = n;
      do begin
        exp_ch++;
        if (exp_ch == N) begin
          exp_ch = 0;
          exp_n  = (exp_n + 1) % 1024;
        end
      end while (!mask[exp_ch]);
    end
    return breaks;
  endfunction

  task automatic capture(input logic [31:0] addr, input int unsigned len,
                         input logic [N-1:0] mask, output int cycles, output int first_cyc);
    @(negedge clk);
    cap_addr = addr;
    cap_len_bytes = len;
    cap_ch_mask = mask;
    cap_start = 1'b1;
    @(negedge clk);
    cap_start = 1'b0;
    cycles = 1;
    first_cyc = -1;
    while (!cap_done && cycles < 500000) begin
      @(negedge clk);
      cycles++;
      if (first_cyc < 0 && wvalid) first_cyc = cycles;
    end
    check(cap_done && !cap_capturing && !cap_busy, "capture completes");
  endtask

  initial begin
    int cyc, fc, b0, bp0;
    cap_addr = '0;
    cap_len_bytes = '0;
    cap_ch_mask = '0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // alignment from an arbitrary bit phase
    while (!rx_aligned) @(negedge clk);
    if (rx_slips > 0) n_slip_align++;
    check(rx_slips > 0 && rx_slips < 16, $sformatf("locked after %0d slips", rx_slips));

    // 1. all channels, 2 kB starting 0xF40 (crosses 4 kB), random memory stalls
    mem_random = 1'b1;
    bp0 = n_backpressure;
    b0 = bursts;
    capture(32'h0F40, 2048, 16'hFFFF, cyc, fc);
    check(beats == 256, $sformatf("beats %0d", beats));
    check(stream_breaks(32'h0F40, 1024, 16'hFFFF) == 0, "16-channel stream in order");
    check(!cap_overflow && !cap_error, "no overflow, no error");
    check(bursts - b0 == 17, $sformatf("bursts %0d (split at 4 kB)", bursts - b0));
    mem_random = 1'b0;

    // 2. single channel, length above the DMA limit: cut to 4 kB
    b0 = beats;
    capture(32'h0000, 8192, 16'h0001, cyc, fc);
    if (beats - b0 == DMA_MAX / 8) n_len_cut++;
    check(beats - b0 == DMA_MAX / 8, $sformatf("length cut: %0d beats", beats - b0));
    check(stream_breaks(32'h0000, DMA_MAX / 2, 16'h0001) == 0, "single-channel stream in order");
    // 2048 samples at 16 clocks each, plus start-up and the last burst
    check(cyc >= 2047 * 16 && cyc <= 2048 * 16 + 80,
          $sformatf("single-channel capture took %0d clocks for 2048 samples", cyc));
    n_single_ch++;

    // 3. overflow: memory stalls while 16 channels stream in
    fork
      begin
        repeat (20) @(negedge clk);
        mem_stall = 1'b1;
        repeat (16 * 16) @(negedge clk);
        mem_stall = 1'b0;
      end
    join_none
    capture(32'h0000, 1024, 16'hFFFF, cyc, fc);
    if (cap_overflow) n_overflow++;
    check(cap_overflow && cap_dropped_beats > 0,
          $sformatf("overflow reported, %0d beats dropped", cap_dropped_beats));
    check(stream_breaks(32'h0000, 512, 16'hFFFF) > 0, "dropped beats leave a gap");

    // 4. lock loss in the middle of a capture
    fork
      begin
        repeat (200) @(negedge clk);
        slip = 1'b1;
        @(negedge clk);
        slip = 1'b0;
      end
    join_none
    capture(32'h0000, 2048, 16'h00FF, cyc, fc);
    if (rx_lock_losses > 0) n_lock_loss++;
    check(rx_lock_losses == 1 && rx_aligned, "lock lost once and regained");
    check(!cap_overflow, "no overflow during re-lock");

    // 5. error response from memory
    bad_resp = 1'b1;
    capture(32'h0000, 256, 16'hFFFF, cyc, fc);
    bad_resp = 1'b0;
    if (cap_error) n_err_resp++;
    check(cap_error, "error response reported");

    // 6. GPIO lines reach the SPI pins and back
    for (int v = 0; v < 16; v++) begin
      gpio_o = 4'(v);
      spi_sdout = v[0];
      #0.5;
      check({adc_reset, spi_sen, spi_sdata, spi_sclk} == 4'(v) && gpio_i[0] == v[0],
            "GPIO to SPI pin assignment");
    end
    n_gpio++;

    check(proto_errors == 0, $sformatf("%0d AXI protocol violations", proto_errors));
    $display("mechanisms: slip_align=%0d lock_loss=%0d backpressure=%0d overflow=%0d len_cut=%0d page_split=%0d single_ch=%0d err_resp=%0d gpio=%0d",
             n_slip_align, n_lock_loss, n_backpressure - bp0, n_overflow, n_len_cut,
             n_page_split, n_single_ch, n_err_resp, n_gpio);
    check(n_slip_align > 0, "bit-slip alignment happened");
    check(n_lock_loss > 0, "lock loss happened");
    check(n_backpressure > 0, "back-pressure happened");
    check(n_overflow > 0, "overflow happened");
    check(n_len_cut > 0, "length cut happened");
    check(n_page_split > 0, "4 kB burst split happened");
    check(n_single_ch > 0, "single-channel capture happened");
    check(n_err_resp > 0, "error response happened");
    check(n_gpio > 0, "GPIO pin assignment exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
