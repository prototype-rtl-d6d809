// audio_i2s_clkgen: bit clock and word select of the I2S master.
//
// Divides the system clock by 2 * div to form the bit clock; 2W bit clocks
// make one sample period. Besides the pins it gives one-clock strobes at the
// bit clock's rising and falling edges and the slot numbers the receiver and
// transmitter need. Word select changes with the falling edge one bit before
// the MSB of each channel (I2S timing): while the bit of slot k is on the
// wire (tx_slot = k, sent after a falling edge), word select already shows
// the channel of slot k + 1, so it is high for slots W-1 .. 2W-2. The
// receiver samples that bit on the following rising edge, with
// rx_slot = tx_slot.
//
// Interface: en starts the clock (stopped clocks rest low), div >= 1 is the
// half period in system clocks. A stopped clock rests in the last bit of the
// right channel (word select high), so the first falling edge after en
// drops word select and the codec starts its left word one bit later.
// Timing: all outputs registered.
//
// The source names I2S only; master mode, the programmable divider and the
// 16-bit stereo frame are this design's choices.
module audio_i2s_clkgen #(
  parameter int unsigned W = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [15:0] div,
  output logic        bclk,
  output logic        ws,
  output logic        rise,
  output logic        fall,
  output logic [5:0]  tx_slot,
  output logic [5:0]  rx_slot
);
  logic [15:0] cnt;
  logic [5:0]  k;
  logic [5:0]  k_next;
  logic        tick;

  assign tick   = en && (cnt + 16'd1 >= div);
  assign k_next = (k == 6'(2 * W - 1)) ? '0 : k + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      bclk <= 1'b0;
      ws <= 1'b1;
      k <= 6'(2 * W - 2);
      rise <= 1'b0;
      fall <= 1'b0;
      tx_slot <= '0;
      rx_slot <= '0;
    end else begin
      rise <= 1'b0;
      fall <= 1'b0;
      if (!en) begin
        cnt <= '0;
        bclk <= 1'b0;
        ws <= 1'b1;
        k <= 6'(2 * W - 2);
      end else if (tick) begin
        cnt <= '0;
        bclk <= !bclk;
        if (bclk) begin
          // Falling edge: next bit; word select shows the channel one bit early.
          fall <= 1'b1;
          k <= k_next;
          tx_slot <= k_next;
          ws <= (k_next >= 6'(W - 1)) && (k_next < 6'(2 * W - 1));
        end else begin
          rise <= 1'b1;
          rx_slot <= k;
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
