// tb_ufa_readout_full: the readout logic at its full default size (16
// channels, 512 kB single-pass DMA, 512-beat FIFO) running the two captures
// a 512 kB buffer allows.
//
//   1. One channel for a whole 512 kB buffer: 262144 samples of 2 bytes at
//      16 clocks (16 ns) each, 4.194 ms of signal. The buffer must hold one
//      unbroken run of channel-0 samples, and the capture must take
//      262144 x 16 clocks plus a short start-up and drain.
//   2. All 16 channels for a whole 512 kB buffer (16384 sample periods,
//      0.262 ms), with memory that drops its ready signals at random: the
//      FIFO must absorb the stalls with no overflow and the buffer must hold
//      every channel of every sample in order.
// Each stored word carries its channel (bits 15:12) and sample index mod
// 1024 (bits 11:2) from the ADC model, so the checks need no stored copy.
module tb_ufa_readout_full;
  import ufa_pkg::*;

  localparam int unsigned N = NUM_CH, WORDS = DMA_MAX_BYTES / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [7:0] phase = 8'd11;
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
  logic [$clog2(FIFO_DEPTH):0] fifo_level;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] wdata;
  logic [7:0] wstrb;
  logic [0:0] gpio_i;
  logic spi_sclk, spi_sdata, spi_sen, adc_reset;
  logic mem_random = 1'b0;
  int unsigned proto_errors, bursts, beats;
  int checks = 0, failures = 0;
  int max_level = 0;

  always #1 clk = ~clk;

  afe5818_lvds_model u_adc (
    .clk, .rst_n, .phase, .slip, .wave_en(1'b0), .wave_code('0), .din(adc_din), .fclk(adc_fclk), .sample(adc_sample)
  );

  ufa_readout_top u_dut (
    .clk, .rst_n, .adc_din, .adc_fclk, .cap_start, .cap_addr, .cap_len_bytes, .cap_ch_mask,
    .rx_aligned, .rx_slips, .rx_lock_losses, .cap_capturing, .cap_busy, .cap_done,
    .cap_error, .cap_overflow, .cap_dropped_beats, .fifo_level,
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready),
    .gpio_o(4'h0), .gpio_i, .adc_spi_sclk(spi_sclk), .adc_spi_sdata(spi_sdata),
    .adc_spi_sen(spi_sen), .adc_reset, .adc_spi_sdout(1'b0)
  );

  axi_mem_model #(.DATA_W(64), .WORDS(WORDS)) u_mem (
    .clk, .rst_n, .stall(1'b0), .random_stall(mem_random), .bad_resp(1'b0),
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready, .wdata, .wstrb, .wlast,
    .wvalid, .wready, .bresp, .bvalid, .bready, .proto_errors, .bursts, .beats
  );

  always @(posedge clk) if (int'(fifo_level) > max_level) max_level = int'(fifo_level);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int stream_breaks(input int nwords, input logic [N-1:0] mask);
    int breaks = 0;
    int ch, n, exp_ch, exp_n;
    for (int k = 0; k < nwords; k++) begin
      logic [63:0] b;
      logic [15:0] w;
      b  = u_mem.mem[k / 4];
      w  = b[16 * (k % 4) +: 16];
      ch = int'(w[15:12]);
      n  = int'(w[11:2]);
      if (w[1:0] != 2'b00 || !mask[ch]) breaks++;
      else if (k > 0 && (ch != exp_ch || n != exp_n)) breaks++;
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

  task automatic capture(input logic [N-1:0] mask, output int cycles);
    @(negedge clk);
    cap_addr = 32'h0;
    cap_len_bytes = DMA_MAX_BYTES;
    cap_ch_mask = mask;
    cap_start = 1'b1;
    @(negedge clk);
    cap_start = 1'b0;
    cycles = 1;
    while (!cap_done && cycles < 5000000) begin
      @(negedge clk);
      cycles++;
    end
    check(cap_done && !cap_busy && !cap_capturing, "capture completes");
  endtask

  initial begin
    int cyc, b0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    cap_addr = '0;
    cap_len_bytes = '0;
    cap_ch_mask = '0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!rx_aligned) @(negedge clk);

    // 1. one channel, 512 kB = 262144 samples
    b0 = beats;
    capture(16'h0001, cyc);
    $display("single channel: %0d beats in %0d clocks (%0d ns at 1 ns per bit)", beats - b0, cyc, cyc);
    check(beats - b0 == 65536, $sformatf("beats %0d", beats - b0));
    check(cyc >= 262143 * 16 && cyc <= 262144 * 16 + 100,
          $sformatf("%0d clocks for 262144 samples", cyc));
    check(stream_breaks(262144, 16'h0001) == 0, "channel-0 run unbroken");
    check(!cap_overflow && !cap_error, "no overflow, no error");

    // 2. sixteen channels, 512 kB = 16384 sample periods, random memory stalls
    mem_random = 1'b1;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    b0 = beats;
    max_level = 0;
    capture(16'hFFFF, cyc);
    $display("16 channels: %0d beats in %0d clocks, FIFO peak %0d beats", beats - b0, cyc, max_level);
    check(beats - b0 == 65536, $sformatf("beats %0d", beats - b0));
    check(cyc >= 16383 * 16 && cyc <= 16384 * 16 + 200,
          $sformatf("%0d clocks for 16384 sample periods", cyc));
    check(stream_breaks(262144, 16'hFFFF) == 0, "16-channel stream unbroken");
    check(!cap_overflow && !cap_error, "no overflow, no error");
    check(proto_errors == 0, "no AXI protocol violations");
    check(rx_lock_losses == 0, "no lock loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
