// audio_i2s_rx: I2S receiver for the microphone path of the audio codec.
//
// Standard (Philips) I2S with the SoC as clock master: 32 bit clocks per
// sample period, word select low for the left and high for the right
// 16-bit channel, each word MSB first starting one bit clock after the
// word-select edge. The serial data is sampled on rising bit-clock edges,
// signalled by bclk_rise from the clock generator, together with the slot
// position of the bit (slot 0..31, left channel in 0..15). The left
// (microphone) word is delivered when its LSB has been received.
//
// Interface: sd (serial data from the codec, already synchronised), bclk_rise
// and slot from audio_i2s_clkgen; sample_valid pulses for one clock with
// sample, the new left-channel word.
// Timing: sample_valid one clock after the rising edge that took the LSB.
//
// That the audio module has an I2S receiver is from the SoC diagram; word
// length, mono left-channel use and master mode are this design's choices.
module audio_i2s_rx #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         sd,
  input  logic         bclk_rise,
  input  logic [5:0]   slot,        // 0..2W-1
  output logic         sample_valid,
  output logic [W-1:0] sample
);
  logic [W-1:0] shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift <= '0;
      sample <= '0;
      sample_valid <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (en && bclk_rise) begin
        shift <= {shift[W-2:0], sd};
        if (slot == 6'(W - 1)) begin
          sample <= {shift[W-2:0], sd};
          sample_valid <= 1'b1;
        end
      end
    end
  end

endmodule
