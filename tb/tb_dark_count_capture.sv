// tb_dark_count_capture: the dark-count measurement as a workload for the
// readout logic at its default size.
//
// The testbench synthesises what the shaped SiPM signal on one channel looks
// like in the dark and plays it through the ADC model: single-photoelectron
// pulses at random times (600 kcounts/s, the sensor's specified dark rate),
// 5 % of them doubled by optical crosstalk, 30 mV per photoelectron, a
// ~50 ns linear rise and a 600 ns exponential decay (the shaper's time
// constant), plus +-2 mV of uniform noise. The ADC's +-1 V range maps to
// 14-bit offset-binary codes (0 V = 8192, 0.122 mV per code).
//
// One 512 kB capture of channel 0 then records 262144 samples (4.194 ms).
// Checks:
//   * every stored sample equals the sample that was sent (found by lining
//     up the start of the buffer with the generated waveform);
//   * the capture takes 16 clocks per sample;
//   * a 15 mV threshold counter (re-armed below 12 mV) run on the stored
//     buffer finds the same pulses as on the generated waveform, at a rate
//     between half the generated one and the generated one: pulses that land
//     on the 600 ns tail of an earlier one are not counted separately;
//   * the pulse heights split into a 1-photoelectron peak near 30 mV and a
//     small 2-photoelectron peak near 60 mV.
module tb_dark_count_capture;
  import ufa_pkg::*;

  localparam int unsigned N = NUM_CH, WORDS = DMA_MAX_BYTES / 8;
  localparam int          NSAMP    = DMA_MAX_BYTES / 2;   // 262144
  localparam int          LEN      = NSAMP + 4096;        // generated samples
  localparam real         LSB_MV   = 2000.0 / 16384.0;    // mV per code
  localparam real         PE_MV    = 30.0;
  localparam real         TAU_S    = 600.0 / 16.0;        // decay, in samples
  localparam int          RISE_S   = 3;                   // ~50 ns rise
  localparam real         RATE_HZ  = 600.0e3;
  localparam real         TS       = 16.0e-9;
  localparam int          BASE     = 8192;
  localparam int          THR      = 123;                 // 15 mV in codes
  localparam int          REARM    = 98;                  // 12 mV

  logic clk = 1'b0, rst_n = 1'b1;
  logic [7:0] phase = 8'd3;
  logic [N-1:0] adc_din;
  logic adc_fclk;
  int unsigned adc_sample;
  logic [N-1:0][ADC_BITS-1:0] wave_code;
  logic cap_start = 1'b0;
  logic [31:0] cap_addr = '0, cap_len_bytes = '0;
  logic [N-1:0] cap_ch_mask = '0;
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
  int unsigned proto_errors, bursts, beats;
  int checks = 0, failures = 0;

  logic [ADC_BITS-1:0] wave [LEN];
  int n_pulses = 0, n_double = 0;

  always #1 clk = ~clk;

  always_comb begin
    for (int c = 0; c < N; c++) wave_code[c] = ADC_BITS'(BASE);
    wave_code[0] = (adc_sample < LEN) ? wave[adc_sample] : ADC_BITS'(BASE);
  end

  afe5818_lvds_model u_adc (
    .clk, .rst_n, .phase, .slip(1'b0), .wave_en(1'b1), .wave_code,
    .din(adc_din), .fclk(adc_fclk), .sample(adc_sample)
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
    .clk, .rst_n, .stall(1'b0), .random_stall(1'b1), .bad_resp(1'b0),
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

  // Shaped dark-count waveform, in mV, turned into ADC codes.
  task automatic make_wave();
    real mv [];
    real p_hit, a, v;
    int code;
    mv = new[LEN];
    for (int i = 0; i < LEN; i++) mv[i] = 0.0;
    p_hit = RATE_HZ * TS;
    for (int i = 0; i < LEN; i++) begin
      if (real'($urandom_range(999999)) < p_hit * 1.0e6) begin
        n_pulses++;
        a = PE_MV;
        if ($urandom_range(99) < 5) begin
          a = 2.0 * PE_MV;
          n_double++;
        end
        for (int k = 0; k < 400 && i + k < LEN; k++)
          mv[i + k] += (k < RISE_S) ? a * real'(k + 1) / real'(RISE_S)
                                    : a * $exp(-real'(k - RISE_S + 1) / TAU_S);
      end
    end
    for (int i = 0; i < LEN; i++) begin
      v = mv[i] + (real'($urandom_range(400)) / 100.0 - 2.0);
      code = BASE + int'(v / LSB_MV);
      if (code < 0) code = 0;
      if (code > 16383) code = 16383;
      wave[i] = ADC_BITS'(code);
    end
  endtask

  function automatic int stored(input int k);
    logic [63:0] b;
    b = u_mem.mem[k / 4];
    return int'(b[16 * (k % 4) + 2 +: ADC_BITS]);
  endfunction

  initial begin
    int cyc, s_start, s0, bad, cnt_mem, cnt_ref, n1, n2, pk;
    bit armed;
    real rate;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    make_wave();
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!rx_aligned) @(negedge clk);

    @(negedge clk);
    cap_len_bytes = DMA_MAX_BYTES;
    cap_ch_mask = 16'h0001;
    cap_start = 1'b1;
    s_start = int'(adc_sample);
    @(negedge clk);
    cap_start = 1'b0;
    cyc = 1;
    while (!cap_done && cyc < 5000000) begin
      @(negedge clk);
      cyc++;
    end
    check(cap_done && !cap_overflow && !cap_error, "capture done, no overflow or error");
    check(cyc >= (NSAMP - 1) * 16 && cyc <= NSAMP * 16 + 100,
          $sformatf("%0d clocks for %0d samples", cyc, NSAMP));

    // line the buffer up with the generated samples
    s0 = -1;
    for (int off = s_start - 8; off < s_start + 8 && s0 < 0; off++) begin
      bad = 0;
      for (int k = 0; k < 64; k++) if (stored(k) != int'(wave[off + k])) bad++;
      if (bad == 0) s0 = off;
    end
    check(s0 >= 0, "buffer start found in the generated waveform");
    if (s0 < 0) s0 = s_start;
    bad = 0;
    for (int k = 0; k < NSAMP; k++) if (stored(k) != int'(wave[s0 + k])) bad++;
    check(bad == 0, $sformatf("%0d stored samples differ from those sent", bad));

    // threshold counter with hysteresis, on the buffer and on the reference
    cnt_mem = 0;
    cnt_ref = 0;
    n1 = 0;
    n2 = 0;
    armed = 1'b1;
    for (int k = 0; k < NSAMP; k++) begin
      if (armed && stored(k) - BASE >= THR) begin
        cnt_mem++;
        armed = 1'b0;
        pk = 0;
        for (int j = k; j < k + 8 && j < NSAMP; j++) if (stored(j) - BASE > pk) pk = stored(j) - BASE;
        if (real'(pk) * LSB_MV < 45.0) n1++;
        else if (real'(pk) * LSB_MV < 75.0) n2++;
      end else if (stored(k) - BASE < REARM) armed = 1'b1;
    end
    armed = 1'b1;
    for (int k = 0; k < NSAMP; k++) begin
      if (armed && int'(wave[s0 + k]) - BASE >= THR) begin
        cnt_ref++;
        armed = 1'b0;
      end else if (int'(wave[s0 + k]) - BASE < REARM) armed = 1'b1;
    end
    rate = real'(cnt_mem) / (real'(NSAMP) * TS);
    $display("dark counts: %0d pulses generated over %0d samples, %0d found above 15 mV in the buffer (%0.0f kcps)",
             n_pulses, LEN, cnt_mem, rate / 1.0e3);
    $display("pulse heights: %0d in the 1 p.e. peak (15-45 mV), %0d in the 2 p.e. peak (45-75 mV), ratio %0.3f",
             n1, n2, real'(n2) / real'(n1));
    check(cnt_mem == cnt_ref, $sformatf("counts from buffer %0d and reference %0d", cnt_mem, cnt_ref));
    check(rate > 0.5 * RATE_HZ && rate <= RATE_HZ, $sformatf("count rate %0.0f cps", rate));
    check(real'(n2) / real'(n1) > 0.01 && real'(n2) / real'(n1) < 0.2, "2 p.e. peak is small");
    check(proto_errors == 0, "no AXI protocol violations");
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
