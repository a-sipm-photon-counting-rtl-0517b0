// adc_lvds_rx: LVDS deserialiser and 16-bit word aligner for the ADC lanes.
//
// The ADC sends every channel on its own serial lane, one 16-bit word per
// sample period, plus a frame lane that marks the word boundary. This block
// samples one bit per lane per clock (clk runs at the lane bit rate, 1 Gbit/s
// in the published system), shifts the bits into a register per lane and, at
// each word boundary, hands out all lanes' words at once.
//
// Word alignment: the boundary is set by a bit counter. At every boundary the
// frame lane's word is compared with FRAME_PATTERN. While it differs, the
// aligner "bit-slips": it makes the next word one bit longer, which moves the
// boundary of every lane by one bit. After LOCK_WORDS matching words in a row
// the receiver reports aligned and starts issuing word_valid. A mismatch while
// aligned drops the lock (lock_losses counts this) and the search restarts.
//
// Interface and timing:
//   din[c], fclk    serial bits, MSB of each word first, one per clk
//   words, word_valid  registered; word_valid is a one-clock pulse per sample
//                   period (every WORD_W clocks) while aligned, and words
//                   holds the last complete word of every lane until the next
//   aligned         high once locked
//   slips           number of bit-slips performed since reset
//
// The paper states that the logic deserialises the lanes and aligns them to
// 16-bit words. The frame pattern (high for the first half of the word), the
// MSB-first bit order, the single-clock bit-rate sampling (in place of a
// vendor SERDES primitive) and the lock count are this design's own choices.
module adc_lvds_rx
  import ufa_pkg::*;
#(
  parameter int unsigned                 N_CH          = NUM_CH,
  parameter int unsigned                 WORD_W        = LVDS_WORD_W,
  parameter logic        [WORD_W-1:0]    FRAME_WORD    = FRAME_PATTERN,
  parameter int unsigned                 LOCK_WORDS    = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_CH-1:0]               din,
  input  logic                          fclk,
  output logic                          word_valid,
  output logic [N_CH-1:0][WORD_W-1:0]   words,
  output logic                          aligned,
  output logic [15:0]                   slips,
  output logic [15:0]                   lock_losses
);

  localparam int unsigned CNT_W  = $clog2(WORD_W) + 1;
  localparam int unsigned LOCK_W = $clog2(LOCK_WORDS + 1);

  logic [N_CH-1:0][WORD_W-1:0] shreg, shreg_next;
  logic [WORD_W-1:0]           fshreg, fshreg_next;
  logic [CNT_W-1:0]            bit_cnt;
  logic [LOCK_W-1:0]           match_cnt;
  logic                        boundary, frame_ok;

  always_comb begin
    for (int c = 0; c < N_CH; c++) shreg_next[c] = {shreg[c][WORD_W-2:0], din[c]};
    fshreg_next = {fshreg[WORD_W-2:0], fclk};
    boundary    = (bit_cnt == CNT_W'(WORD_W - 1));
    frame_ok    = (fshreg_next == FRAME_WORD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg       <= '0;
      fshreg      <= '0;
      bit_cnt     <= '0;
      match_cnt   <= '0;
      aligned     <= 1'b0;
      word_valid  <= 1'b0;
      words       <= '0;
      slips       <= '0;
      lock_losses <= '0;
    end else begin
      shreg      <= shreg_next;
      fshreg     <= fshreg_next;
      word_valid <= 1'b0;
      bit_cnt    <= bit_cnt + 1'b1;
      if (boundary) begin
        bit_cnt <= '0;
        words   <= shreg_next;
        if (frame_ok) begin
          if (aligned) begin
            word_valid <= 1'b1;
          end else if (match_cnt == LOCK_W'(LOCK_WORDS - 1)) begin
            aligned    <= 1'b1;
            word_valid <= 1'b1;
          end else begin
            match_cnt <= match_cnt + 1'b1;
          end
        end else begin
          // Bit-slip: load all ones so the counter wraps to zero one clock
          // later, which makes the next word WORD_W+1 bits long.
          bit_cnt   <= '1;
          match_cnt <= '0;
          slips     <= slips + 1'b1;
          if (aligned) begin
            aligned     <= 1'b0;
            lock_losses <= lock_losses + 1'b1;
          end
        end
      end
    end
  end

endmodule
