// ufa_readout_top: programmable-logic part of the 16-channel SiPM readout.
//
// Data path: the ADC's serial LVDS lanes (one per channel, plus a frame lane)
// enter adc_lvds_rx, which deserialises them and aligns them to 16-bit sample
// words. dma_gearbox packs the words of the enabled channels into 64-bit
// stream beats and buffers them in a FIFO. axi_dma_s2mm writes the stream to
// processor memory over an AXI4 write port, one single-pass transfer of up
// to 512 kB per start.
//
// Control path: the processor drives the ADC's SPI control pins through
// general-purpose I/O lines; the logic only assigns GPIO lines to SPI pins
// (gpio_o[0] -> sclk, [1] -> sdata, [2] -> sen, [3] -> reset, and the ADC's
// sdout -> gpio_i[0]).
//
// Capture: cap_start (one clock) starts the DMA and arms the gearbox with the
// same beat count; the gearbox begins at the next aligned sample period and
// stops after that many beats. cap_done then rises and stays high until the
// next start. One clock is one LVDS bit period (1 ns at 1 Gbit/s), so one
// sample period is 16 clocks (16 ns, 62.5 Msps).
//
// The block structure follows the published data-flow diagram. The single
// clock domain (the real receiver would hand over from the LVDS clock to the
// AXI clock), the GPIO bit assignment and the plain control ports in place
// of processor registers are this design's own choices.
module ufa_readout_top
  import ufa_pkg::*;
#(
  parameter int unsigned N_CH     = NUM_CH,
  parameter int unsigned WORD_W   = LVDS_WORD_W,
  parameter int unsigned DATA_W   = AXI_DATA_W,
  parameter int unsigned ADDR_W   = AXI_ADDR_W,
  parameter int unsigned DMA_MAX  = DMA_MAX_BYTES,
  parameter int unsigned DEPTH    = FIFO_DEPTH,
  parameter int unsigned BEATS_W  = $clog2(DMA_MAX / (DATA_W / 8)) + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ADC LVDS lanes (after the differential input buffers)
  input  logic [N_CH-1:0]             adc_din,
  input  logic                        adc_fclk,
  // capture control from the processor
  input  logic                        cap_start,
  input  logic [ADDR_W-1:0]           cap_addr,
  input  logic [31:0]                 cap_len_bytes,
  input  logic [N_CH-1:0]             cap_ch_mask,
  // status
  output logic                        rx_aligned,
  output logic [15:0]                 rx_slips,
  output logic [15:0]                 rx_lock_losses,
  output logic                        cap_capturing,
  output logic                        cap_busy,
  output logic                        cap_done,
  output logic                        cap_error,
  output logic                        cap_overflow,
  output logic [31:0]                 cap_dropped_beats,
  output logic [$clog2(DEPTH):0]      fifo_level,
  // AXI4 write master to processor memory
  output logic [ADDR_W-1:0]           m_axi_awaddr,
  output logic [7:0]                  m_axi_awlen,
  output logic [2:0]                  m_axi_awsize,
  output logic [1:0]                  m_axi_awburst,
  output logic                        m_axi_awvalid,
  input  logic                        m_axi_awready,
  output logic [DATA_W-1:0]           m_axi_wdata,
  output logic [DATA_W/8-1:0]         m_axi_wstrb,
  output logic                        m_axi_wlast,
  output logic                        m_axi_wvalid,
  input  logic                        m_axi_wready,
  input  logic [1:0]                  m_axi_bresp,
  input  logic                        m_axi_bvalid,
  output logic                        m_axi_bready,
  // processor GPIO and the ADC's SPI control pins
  input  logic [3:0]                  gpio_o,
  output logic [0:0]                  gpio_i,
  output logic                        adc_spi_sclk,
  output logic                        adc_spi_sdata,
  output logic                        adc_spi_sen,
  output logic                        adc_reset,
  input  logic                        adc_spi_sdout
);

  logic                        word_valid;
  logic [N_CH-1:0][WORD_W-1:0] words;
  logic [BEATS_W-1:0]          xfer_beats;
  logic                        axis_tvalid, axis_tready, axis_tlast;
  logic [DATA_W-1:0]           axis_tdata;

  adc_lvds_rx #(.N_CH(N_CH), .WORD_W(WORD_W)) u_rx (
    .clk         (clk),
    .rst_n       (rst_n),
    .din         (adc_din),
    .fclk        (adc_fclk),
    .word_valid  (word_valid),
    .words       (words),
    .aligned     (rx_aligned),
    .slips       (rx_slips),
    .lock_losses (rx_lock_losses)
  );

  dma_gearbox #(
    .N_CH(N_CH), .WORD_W(WORD_W), .STREAM_W(DATA_W), .DEPTH(DEPTH), .BEATS_W(BEATS_W)
  ) u_gearbox (
    .clk           (clk),
    .rst_n         (rst_n),
    .word_valid    (word_valid),
    .words         (words),
    .aligned       (rx_aligned),
    .start         (cap_start),
    .ch_mask       (cap_ch_mask),
    .n_beats       (xfer_beats),
    .capturing     (cap_capturing),
    .overflow      (cap_overflow),
    .dropped_beats (cap_dropped_beats),
    .fifo_level    (fifo_level),
    .m_axis_tvalid (axis_tvalid),
    .m_axis_tready (axis_tready),
    .m_axis_tdata  (axis_tdata),
    .m_axis_tlast  (axis_tlast)
  );

  axi_dma_s2mm #(
    .ADDR_W(ADDR_W), .DATA_W(DATA_W), .DMA_MAX(DMA_MAX), .BEATS_W(BEATS_W)
  ) u_dma (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (cap_start),
    .dst_addr      (cap_addr),
    .len_bytes     (cap_len_bytes),
    .xfer_beats    (xfer_beats),
    .busy          (cap_busy),
    .done          (cap_done),
    .error         (cap_error),
    .s_axis_tvalid (axis_tvalid),
    .s_axis_tready (axis_tready),
    .s_axis_tdata  (axis_tdata),
    .s_axis_tlast  (axis_tlast),
    .m_axi_awaddr  (m_axi_awaddr),
    .m_axi_awlen   (m_axi_awlen),
    .m_axi_awsize  (m_axi_awsize),
    .m_axi_awburst (m_axi_awburst),
    .m_axi_awvalid (m_axi_awvalid),
    .m_axi_awready (m_axi_awready),
    .m_axi_wdata   (m_axi_wdata),
    .m_axi_wstrb   (m_axi_wstrb),
    .m_axi_wlast   (m_axi_wlast),
    .m_axi_wvalid  (m_axi_wvalid),
    .m_axi_wready  (m_axi_wready),
    .m_axi_bresp   (m_axi_bresp),
    .m_axi_bvalid  (m_axi_bvalid),
    .m_axi_bready  (m_axi_bready)
  );

  // GPIO pin assignment for the ADC's SPI control interface.
  assign adc_spi_sclk  = gpio_o[0];
  assign adc_spi_sdata = gpio_o[1];
  assign adc_spi_sen   = gpio_o[2];
  assign adc_reset     = gpio_o[3];
  assign gpio_i[0]     = adc_spi_sdout;

endmodule
