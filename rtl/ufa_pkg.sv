// ufa_pkg: constants shared by the SiPM readout logic.
//
// The readout digitises 16 SiPM channels with a 14-bit ADC at 62.5 Msps.
// The ADC sends each sample as a 16-bit word on its own LVDS lane at
// 1 Gbit/s (16 bits x 62.5 MHz), so one sample period is 16 bit periods.
// Captured samples are stored as 2 bytes each and moved to processor memory
// by a DMA engine whose single transfer is limited to 512 kB.
//
// Channel count, word width, ADC resolution and the 512 kB transfer limit
// follow the published system. The frame-lane pattern, the stream width,
// the FIFO depth and the burst length are this design's own choices.
package ufa_pkg;

  // Number of SiPM/ADC channels on one readout board.
  localparam int unsigned NUM_CH        = 16;
  // Serial word length per sample on each LVDS lane.
  localparam int unsigned LVDS_WORD_W   = 16;
  // ADC resolution; the code sits in the upper bits of the 16-bit word.
  localparam int unsigned ADC_BITS      = 14;
  // Largest single-pass DMA transfer, in bytes (512 kB).
  localparam int unsigned DMA_MAX_BYTES = 512 * 1024;
  // Width of the stream into the DMA and of the AXI4 write data bus.
  localparam int unsigned AXI_DATA_W    = 64;
  localparam int unsigned AXI_ADDR_W    = 32;
  // Beats per AXI4 write burst.
  localparam int unsigned AXI_BURST_LEN = 16;
  // Gearbox FIFO depth in stream beats.
  localparam int unsigned FIFO_DEPTH    = 512;

  // Frame-lane word: the frame clock is high for the first half of each
  // sample word and low for the second half (MSB sent first).
  localparam logic [LVDS_WORD_W-1:0] FRAME_PATTERN = 16'hFF00;

  // AXI4 response code for a successful write.
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // AXI4 burst type used by the DMA engine.
  localparam logic [1:0] BURST_INCR = 2'b01;

endpackage
