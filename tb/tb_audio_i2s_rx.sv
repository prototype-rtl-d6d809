// tb_audio_i2s_rx: the I2S receiver with its clock generator against the
// codec model, at two clock dividers. 40 random microphone words must come
// out in order, each exactly once, followed by silence once the codec runs
// dry, with the right channel ignored, and one
// word per 32 bit clocks (64 * div system clocks) once running.
module tb_audio_i2s_rx;
  localparam int NW = 40;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] div = 16'd3;
  logic bclk, ws, rise, fall, sdin, sdout = 0;
  logic [5:0] tx_slot, rx_slot;
  logic sample_valid;
  logic [15:0] sample;
  int checks = 0, failures = 0, nout = 0, cyc = 0, t_prev = -1;
  logic [15:0] exp_q [$];

  audio_i2s_clkgen u_clk (.clk, .rst_n, .en, .div, .bclk, .ws, .rise, .fall, .tx_slot, .rx_slot);
  audio_i2s_rx dut (.clk, .rst_n, .en, .sd(sdin), .bclk_rise(rise), .slot(rx_slot), .sample_valid, .sample);
  i2s_codec_model codec (.bclk, .ws, .sdin, .sdout);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && sample_valid) begin
    // once the queue is drained the codec sends silence
    automatic logic [15:0] e = (exp_q.size() > 0) ? exp_q.pop_front() : 16'h0000;
    checks++;
    if (sample != e) begin
      failures++; $display("word %0d: got %h exp %h", nout, sample, e);
    end
    if (t_prev >= 0 && nout > 1) begin
      checks++;
      if (cyc - t_prev != 64 * int'(div)) begin failures++; $display("period %0d", cyc - t_prev); end
    end
    t_prev = cyc;
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < NW / 2; i++) begin
        automatic logic [15:0] w = 16'($urandom);
        codec.mic_q.push_back(w);
        exp_q.push_back(w);
      end
      t_prev = -1;
      nout = 0;
      @(negedge clk); en = 1;
      wait (exp_q.size() == 0);
      repeat (200) @(posedge clk);
      @(negedge clk); en = 0; div = 16'd1;
      repeat (20) @(posedge clk);
    end
    checks++;
    if (codec.sent != NW) begin failures++; $display("codec sent %0d", codec.sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
