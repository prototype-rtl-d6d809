// i2s_codec_model: behavioural model of the audio codec's I2S slave port,
// for testbenches only (not synthesizable logic of the design).
//
// The codec follows the bit clock and word select of the master. A word
// starts on the second falling bit-clock edge after a word-select change
// and is sent and received MSB first, 16 bits per channel. Microphone words
// queued in mic_q are sent in the left channel, their complement in the
// right one (which the receiver must ignore); zeros when the queue is empty.
// Words received from the SoC are collected per channel in play_l and
// play_r.
module i2s_codec_model (
  input  logic bclk,
  input  logic ws,
  output logic sdin,     // codec -> SoC
  input  logic sdout     // SoC -> codec
);
  logic [15:0] mic_q [$];
  logic [15:0] play_l [$];
  logic [15:0] play_r [$];
  int sent = 0;

  logic        last_ws = 1'b1;   // an idle bus rests in the right channel
  logic        pending = 1'b0;
  logic        chan = 1'b0;
  int          bitpos = 16;
  logic [15:0] word = '0;
  logic [15:0] rx = '0;

  initial sdin = 1'b0;

  always @(negedge bclk) begin
    if (pending) begin
      pending = 1'b0;
      chan = last_ws;
      bitpos = 0;
      if (chan == 1'b0) begin
        if (mic_q.size() > 0) begin word = mic_q.pop_front(); sent++; end
        else word = '0;
      end else begin
        word = ~word;
      end
    end else begin
      bitpos++;
    end
    if (ws != last_ws) begin
      pending = 1'b1;
      last_ws = ws;
    end
    sdin = (bitpos < 16) ? word[15 - bitpos] : 1'b0;
  end

  always @(posedge bclk) begin
    if (bitpos < 16) begin
      rx = {rx[14:0], sdout};
      if (bitpos == 15) begin
        if (chan == 1'b0) play_l.push_back(rx);
        else              play_r.push_back(rx);
      end
    end
  end
endmodule
