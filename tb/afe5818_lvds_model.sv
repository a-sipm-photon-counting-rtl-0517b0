// afe5818_lvds_model: behavioural model of the ADC's serial LVDS outputs.
// Not synthesizable logic of the design; testbench use only.
//
// It plays the part of a 16-channel, 14-bit ADC that sends each sample as a
// 16-bit word per lane, MSB first, one bit per clock, with the 14-bit code in
// the upper bits and two zero bits below it. A frame lane carries the word
// FRAME_WORD in step with the data lanes. Sample codes are chosen so that a
// checker can tell channel and sample number from the word alone:
//   code[13:10] = channel number (low 4 bits), code[9:0] = sample index mod 1024.
// After reset the serial stream starts 'phase' bits into a word, so the
// receiver has to find the word boundary. A pulse on 'slip' repeats one bit
// on every lane, which moves the boundary by one bit (a link disturbance).
// 'sample' counts the words started since reset. With wave_en set, each
// lane sends wave_code[c] instead, so a testbench can play a waveform; it
// must hold wave_code steady while 'sample' is unchanged.
module afe5818_lvds_model #(
  parameter int unsigned           N_CH       = 16,
  parameter int unsigned           WORD_W     = 16,
  parameter int unsigned           ADC_W      = 14,
  parameter logic [WORD_W-1:0]     FRAME_WORD = 16'hFF00
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       phase,
  input  logic             slip,
  input  logic             wave_en,
  input  logic [N_CH-1:0][ADC_W-1:0] wave_code,
  output logic [N_CH-1:0]  din,
  output logic             fclk,
  output int unsigned      sample
);

  int unsigned bitpos;

  function automatic logic [WORD_W-1:0] word_of(int unsigned ch, int unsigned n);
    logic [ADC_W-1:0] code;
    code = ADC_W'(((ch & 15) << 10) | (n & 1023));
    return {code, (WORD_W - ADC_W)'(0)};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitpos <= 32'(phase) % WORD_W;
      sample <= 0;
      din    <= '0;
      fclk   <= 1'b0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        logic [WORD_W-1:0] w;
        w = wave_en ? {wave_code[c], (WORD_W - ADC_W)'(0)} : word_of(c, sample);
        din[c] <= w[WORD_W-1-bitpos];
      end
      fclk <= FRAME_WORD[WORD_W-1-bitpos];
      if (!slip) begin
        if (bitpos == WORD_W - 1) begin
          bitpos <= 0;
          sample <= sample + 1;
        end else begin
          bitpos <= bitpos + 1;
        end
      end
    end
  end

endmodule
