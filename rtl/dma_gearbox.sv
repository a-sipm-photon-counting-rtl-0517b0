// dma_gearbox: packs sample words into stream beats for the DMA engine and
// buffers them in a FIFO.
//
// Every sample period the receiver delivers one 16-bit word per channel. The
// gearbox copies them into a holding register and then walks the channels in
// order, one per clock, taking the words of the channels enabled in ch_mask.
// Taken words are packed, lowest channel first and little-endian, into
// STREAM_W-bit beats (four words per 64-bit beat); a beat may span two sample
// periods. Each full beat is written into the FIFO, whose output is an
// AXI4-Stream master (tvalid/tready/tdata/tlast).
//
// Capture control: a start pulse empties the FIFO, resets the packer and
// latches ch_mask and n_beats. Packing begins at the first sample period
// after start in which the receiver is aligned, and stops once n_beats beats
// have entered the FIFO; tlast marks the last of them. If the FIFO is full
// when a beat is ready, the beat is dropped, dropped_beats counts it and the
// sticky overflow flag is set until the next start. Capture then goes on, so
// the transfer still completes, with a gap that overflow reports.
//
// Requirement: N_CH <= WORD_W, because the channel walk (one channel per
// clock) must finish within one sample period (WORD_W clocks).
//
// The paper describes this stage only as a gearbox with a FIFO in front of
// the AXI4 DMA, storing 2 bytes per sample. The channel mask (the paper's test
// ran a single equipped channel), packing order, stream width, FIFO depth and
// overflow handling are this design's own choices.
module dma_gearbox
  import ufa_pkg::*;
#(
  parameter int unsigned N_CH      = NUM_CH,
  parameter int unsigned WORD_W    = LVDS_WORD_W,
  parameter int unsigned STREAM_W  = AXI_DATA_W,
  parameter int unsigned DEPTH     = FIFO_DEPTH,
  parameter int unsigned BEATS_W   = 17
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // from the LVDS receiver
  input  logic                        word_valid,
  input  logic [N_CH-1:0][WORD_W-1:0] words,
  input  logic                        aligned,
  // capture control
  input  logic                        start,
  input  logic [N_CH-1:0]             ch_mask,
  input  logic [BEATS_W-1:0]          n_beats,
  output logic                        capturing,
  output logic                        overflow,
  output logic [31:0]                 dropped_beats,
  output logic [$clog2(DEPTH):0]      fifo_level,
  // AXI4-Stream master
  output logic                        m_axis_tvalid,
  input  logic                        m_axis_tready,
  output logic [STREAM_W-1:0]         m_axis_tdata,
  output logic                        m_axis_tlast
);

  localparam int unsigned K     = STREAM_W / WORD_W;   // words per beat
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned CH_W  = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ARMED, S_RUN} state_e;
  state_e state;

  logic [N_CH-1:0][WORD_W-1:0] hold;
  logic [N_CH-1:0]             mask;
  logic [CH_W-1:0]             ch;
  logic                        walking;
  logic [K-1:0][WORD_W-1:0]    pack;
  logic [KW-1:0]               fill;
  logic [BEATS_W-1:0]          beats_left;

  logic                        take;
  logic                        beat_ready;
  logic [K-1:0][WORD_W-1:0]    beat;
  logic                        fifo_full, fifo_empty, fifo_wr;
  logic [STREAM_W:0]           fifo_out;

  // A word is taken when the walk reaches an enabled channel.
  assign take       = (state == S_RUN) && walking && mask[ch];
  assign beat_ready = take && (fill == KW'(K - 1));
  always_comb begin
    beat            = pack;
    beat[K-1]       = hold[ch];
  end
  assign fifo_wr    = beat_ready && !fifo_full;
  assign capturing  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      hold          <= '0;
      mask          <= '0;
      ch            <= '0;
      walking       <= 1'b0;
      pack          <= '0;
      fill          <= '0;
      beats_left    <= '0;
      overflow      <= 1'b0;
      dropped_beats <= '0;
    end else begin
      // channel walk
      if (walking) begin
        ch <= ch + 1'b1;
        if (ch == CH_W'(N_CH - 1)) walking <= 1'b0;
      end
      // packer
      if (take) begin
        pack[fill] <= hold[ch];
        fill       <= (fill == KW'(K - 1)) ? '0 : fill + 1'b1;
      end
      if (beat_ready) begin
        if (fifo_full) begin
          overflow      <= 1'b1;
          dropped_beats <= dropped_beats + 1'b1;
        end else begin
          beats_left <= beats_left - 1'b1;
          if (beats_left == BEATS_W'(1)) begin
            state   <= S_IDLE;
            walking <= 1'b0;
          end
        end
      end

      unique case (state)
        S_IDLE: ;
        S_ARMED: begin
          if (word_valid && aligned) begin
            state   <= S_RUN;
            hold    <= words;
            ch      <= '0;
            walking <= 1'b1;
          end
        end
        S_RUN: begin
          if (word_valid && !(beat_ready && !fifo_full && beats_left == BEATS_W'(1))) begin
            hold    <= words;
            ch      <= '0;
            walking <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase

      if (start) begin
        state         <= (n_beats == '0) ? S_IDLE : S_ARMED;
        mask          <= ch_mask;
        beats_left    <= n_beats;
        walking       <= 1'b0;
        fill          <= '0;
        overflow      <= 1'b0;
        dropped_beats <= '0;
      end
    end
  end

  sync_fifo #(.WIDTH(STREAM_W + 1), .DEPTH(DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .wr_en   (fifo_wr),
    .wr_data ({(beats_left == BEATS_W'(1)), beat}),
    .rd_en   (m_axis_tready),
    .rd_data (fifo_out),
    .full    (fifo_full),
    .empty   (fifo_empty),
    .level   (fifo_level)
  );

  assign m_axis_tvalid = !fifo_empty;
  assign m_axis_tdata  = fifo_out[STREAM_W-1:0];
  assign m_axis_tlast  = fifo_out[STREAM_W];

endmodule
