// tb_axi_dma_s2mm: self-checking test of the stream-to-memory DMA engine.
//
// A counting stream source (beat i carries {32'hA5A5_0000 | run, i}) feeds the
// engine, which writes into an AXI memory model that checks the write
// protocol. Cases:
//   1. 1000 bytes to 0x0FC0 with random stalls: 125 beats, the burst that
//      reaches the 4 kB boundary at 0x1000 must be split there.
//   2. a length above 512 kB: xfer_beats must be cut to 65536 beats and the
//      whole 512 kB must be written, with no stalls, in no more than
//      1.25 clocks per beat (the capture needs 0.25 beats per clock for 16
//      channels x 2 bytes x 62.5 Msps at 8 bytes per beat and 1 ns clocks).
//   3. error responses: the transfer completes and error is set.
//   4. zero length: done at once, nothing written.
// Memory contents, beat and burst counts, done/busy and protocol violations
// are checked against values computed here.
module tb_axi_dma_s2mm;

  localparam int unsigned AW = 32, DW = 64, WORDS = 65536 + 1024;

  logic clk = 1'b0, rst_n = 1'b1;
  logic start = 1'b0;
  logic [AW-1:0] dst_addr;
  logic [31:0] len_bytes;
  logic [16:0] xfer_beats;
  logic busy, done, error;
  logic tvalid, tready, tlast;
  logic [DW-1:0] tdata;
  logic [AW-1:0] awaddr;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [DW-1:0] wdata;
  logic [DW/8-1:0] wstrb;
  logic mem_stall = 1'b0, mem_random = 1'b0, bad_resp = 1'b0;
  int unsigned proto_errors, bursts, beats;
  bit src_random = 1'b0;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  axi_dma_s2mm u_dut (
    .clk, .rst_n, .start, .dst_addr, .len_bytes, .xfer_beats, .busy, .done, .error,
    .s_axis_tvalid(tvalid), .s_axis_tready(tready), .s_axis_tdata(tdata), .s_axis_tlast(tlast),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready)
  );

  axi_mem_model #(.ADDR_W(AW), .DATA_W(DW), .WORDS(WORDS)) u_mem (
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

  // counting source; a beat, once offered, stays until taken
  int unsigned src_idx = 0, run_id = 0;
  logic src_gap;
  always_ff @(posedge clk) src_gap <= src_random && ($urandom_range(3) == 0);
  assign tvalid = !src_gap || (tvalid_hold);
  logic tvalid_hold = 1'b0;
  always_ff @(posedge clk) begin
    tvalid_hold <= tvalid && !tready;
    if (tvalid && tready) src_idx <= src_idx + 1;
  end
  assign tdata = {32'hA5A5_0000 | 32'(run_id), 32'(src_idx)};
  assign tlast = 1'b0;

  task automatic transfer(input logic [AW-1:0] addr, input int unsigned len,
                          output int cycles);
    @(negedge clk);
    src_idx = 0;
    dst_addr = addr;
    len_bytes = len;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done && cycles < 1000000) begin
      @(negedge clk);
      cycles++;
    end
    check(done && !busy, "transfer done");
  endtask

  task automatic check_mem(input logic [AW-1:0] addr, input int unsigned n);
    int bad = 0;
    for (int unsigned i = 0; i < n; i++)
      if (u_mem.mem[addr / 8 + i] != {32'hA5A5_0000 | 32'(run_id), 32'(i)}) bad++;
    check(bad == 0, $sformatf("%0d memory words wrong", bad));
  endtask

  initial begin
    int cyc, b0, r0;
    dst_addr = '0;
    len_bytes = '0;
    for (int i = 0; i < WORDS; i++) u_mem.mem[i] = '0;
    rst_n = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. boundary split with random stalls on both sides
    run_id = 1;
    mem_random = 1'b1;
    src_random = 1'b1;
    len_bytes = 1000;
    #0 check(xfer_beats == 17'd125, "xfer_beats for 1000 bytes");
    b0 = bursts;
    transfer(32'h0000_0FC0, 1000, cyc);
    check(beats == 125, $sformatf("beats written %0d", beats));
    // 8 beats fit below 0x1000, then 117 beats = 7 full bursts + 5
    check(bursts - b0 == 9, $sformatf("bursts %0d", bursts - b0));
    check_mem(32'h0000_0FC0, 125);
    check(u_mem.mem[32'h0FC0 / 8 + 125] == '0, "no write past the end");
    check(!error, "no error");

    // 2. 512 kB cap, full speed
    run_id = 2;
    mem_random = 1'b0;
    src_random = 1'b0;
    len_bytes = 32'd1 << 22;
    #0 check(xfer_beats == 17'd65536, $sformatf("xfer_beats capped: %0d", xfer_beats));
    b0 = beats;
    transfer(32'h0000_0000, 32'd1 << 22, cyc);
    check(beats - b0 == 65536, $sformatf("beats written %0d", beats - b0));
    check(cyc <= 65536 * 5 / 4, $sformatf("%0d clocks for 65536 beats", cyc));
    check_mem(32'h0, 65536);

    // 3. error response
    run_id = 3;
    bad_resp = 1'b1;
    transfer(32'h0000_2000, 256, cyc);
    check(error, "error response flagged");
    bad_resp = 1'b0;
    check_mem(32'h2000, 32);

    // 4. zero length
    r0 = beats;
    transfer(32'h0000_3000, 4, cyc);
    check(beats == r0 && !error, "zero-beat transfer writes nothing");

    check(proto_errors == 0, $sformatf("%0d AXI protocol violations", proto_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
