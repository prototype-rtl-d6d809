// tb_audio_i2s_tx: the I2S transmitter with its clock generator against the
// codec model. A source of 30 random words, which runs dry twice for a few
// periods, feeds the transmitter. The codec must receive every word, in
// order, on both channels, with a zero word (and one underrun strobe) for
// every period that had no word; take must come once per 64 * div clocks.
module tb_audio_i2s_tx;
  localparam int NW = 30;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] div = 16'd2;
  logic bclk, ws, rise, fall, sdin, sd;
  logic [5:0] tx_slot, rx_slot;
  logic have_word, take, underrun;
  logic [15:0] word;
  logic [15:0] src_q [$];
  logic [15:0] exp_q [$];
  int checks = 0, failures = 0, cyc = 0, t_prev = -1, n_unf = 0, n_take = 0;

  audio_i2s_clkgen u_clk (.clk, .rst_n, .en, .div, .bclk, .ws, .rise, .fall, .tx_slot, .rx_slot);
  audio_i2s_tx dut (.clk, .rst_n, .en, .bclk_fall(fall), .slot(tx_slot), .have_word, .word,
                    .take, .underrun, .sd);
  i2s_codec_model codec (.bclk, .ws, .sdin, .sdout(sd));

  assign have_word = src_q.size() > 0;
  assign word = have_word ? src_q[0] : 16'h0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (take) begin
      exp_q.push_back(src_q.pop_front());
      n_take++;
    end
    if (underrun) begin
      exp_q.push_back(16'h0);
      n_unf++;
    end
    if (take || underrun) begin
      if (t_prev >= 0) begin
        checks++;
        if (cyc - t_prev != 64 * int'(div)) begin failures++; $display("period %0d", cyc - t_prev); end
      end
      t_prev = cyc;
    end
  end

  task automatic add_words(int n);
    for (int i = 0; i < n; i++) src_q.push_back(16'($urandom));
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    add_words(10);
    @(negedge clk); en = 1;
    wait (src_q.size() == 0);
    repeat (64 * 2 * 3) @(posedge clk);      // about three silent periods
    add_words(10);
    wait (src_q.size() == 0);
    repeat (64 * 2 * 2) @(posedge clk);
    add_words(10);
    wait (src_q.size() == 0);
    repeat (64 * 2 * 3) @(posedge clk);      // let the last words go out
    @(negedge clk); en = 0;
    repeat (10) @(posedge clk);
    // Every period handed one word (or a zero) that the codec must have heard
    // on both channels; the last period may still be on the wire.
    checks++;
    if (n_take != NW) begin failures++; $display("took %0d words", n_take); end
    checks++;
    if (n_unf < 4) begin failures++; $display("only %0d underruns", n_unf); end
    for (int i = 0; i < codec.play_l.size(); i++) begin
      checks += 2;
      if (i >= exp_q.size()) begin failures += 2; $display("extra word %0d", i); continue; end
      if (codec.play_l[i] != exp_q[i]) begin
        failures++; $display("left %0d: got %h exp %h", i, codec.play_l[i], exp_q[i]);
      end
      if (i < codec.play_r.size() && codec.play_r[i] != exp_q[i]) begin
        failures++; $display("right %0d: got %h exp %h", i, codec.play_r[i], exp_q[i]);
      end
    end
    checks++;
    if (codec.play_l.size() + 1 < exp_q.size()) begin
      failures++; $display("codec heard %0d of %0d words", codec.play_l.size(), exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
