// audio_i2s_tx: I2S transmitter for the player path of the audio codec.
//
// Same frame as audio_i2s_rx: 32 bit clocks per sample period, 16-bit words
// MSB first, one bit clock after the word-select edge. At the start of every
// period (slot 0) the transmitter takes the next word from its source, or a
// zero when the source is empty (counted as an underrun), and sends it on
// both channels. Serial data changes on falling bit-clock edges (bclk_fall),
// with the slot that the new bit belongs to.
//
// Interface: take pulses when a word is taken from the source (have_word
// high); sd is the serial data to the codec.
// Timing: sd is registered and changes with the falling bit-clock edge.
//
// That the audio module has an I2S transmitter is from the SoC diagram; the
// frame format, the mono-to-stereo copy and zero fill on underrun are this
// design's choices.
module audio_i2s_tx #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         bclk_fall,
  input  logic [5:0]   slot,        // slot of the bit to put on sd
  input  logic         have_word,
  input  logic [W-1:0] word,
  output logic         take,
  output logic         underrun,
  output logic         sd
);
  logic [W-1:0] cur;
  logic [W-1:0] sel;
  logic [$clog2(W)-1:0] bit_idx;

  assign take     = en && bclk_fall && (slot == '0) && have_word;
  assign underrun = en && bclk_fall && (slot == '0) && !have_word;
  assign sel      = (slot == '0) ? (have_word ? word : '0) : cur;
  assign bit_idx  = $clog2(W)'(W - 1) - slot[$clog2(W)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      sd <= 1'b0;
    end else if (!en) begin
      sd <= 1'b0;
    end else if (bclk_fall) begin
      if (slot == '0) cur <= sel;
      sd <= sel[bit_idx];
    end
  end

endmodule
