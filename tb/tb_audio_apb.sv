// tb_audio_apb: the audio module through its APB registers, with the codec
// model on its I2S pins.
//
// Checks the register reset values and the CLKDIV floor; then records 24
// microphone words and plays 8 words, reading the RX FIFO through RXDATA
// whenever STATUS shows data, and compares both directions with the codec.
// It also checks: the interrupt follows RX data only when enabled, the RX
// overflow flag after the FIFO fills (16 words kept, later ones lost), the
// TX underrun flag after the TX FIFO runs dry, write-one-to-clear of both,
// the FIFO clear bit, sign extension of RXDATA and the sample period of
// 64 * CLKDIV clocks.
module tb_audio_apb;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr, irq;
  logic bclk, ws, sdin, sdout;
  int checks = 0, failures = 0;
  logic [15:0] mic [$];
  logic [15:0] play [$];

  audio_apb dut (.clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
                 .pslverr, .irq, .i2s_bclk(bclk), .i2s_ws(ws), .i2s_sdin(sdin), .i2s_sdout(sdout));
  i2s_codec_model codec (.bclk, .ws, .sdin, .sdout);

  always #5 clk = ~clk;
  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1;
    #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  // Sample period: cycles between RX FIFO writes.
  int cyc = 0, t_prev = -1, n_per = 0, per_bad = 0;
  always @(posedge clk) begin
    cyc++;
    if (!dut.rx_en) t_prev = -1;                       // restarts are not periods
    if (rst_n && dut.rx_v) begin
      if (t_prev >= 0 && cyc - t_prev != 64 * int'(dut.div)) per_bad++;
      if (t_prev >= 0) n_per++;
      t_prev = cyc;
    end
  end

  initial begin
    logic [31:0] d;
    int n, got;
    repeat (3) @(posedge clk); rst_n = 1;

    apb_read(12'h000, d); expect_eq("CTRL reset", d, 32'h0);
    apb_read(12'h004, d); expect_eq("STATUS reset", d, 32'h0);
    apb_read(12'h010, d); expect_eq("CLKDIV reset", d, 32'd98);
    apb_write(12'h010, 32'd0); apb_read(12'h010, d); expect_eq("CLKDIV floor", d, 32'd2);
    apb_write(12'h010, 32'd3); apb_read(12'h010, d); expect_eq("CLKDIV", d, 32'd3);
    expect_eq("pready", {31'd0, pready}, 32'd1);
    expect_eq("pslverr", {31'd0, pslverr}, 32'd0);

    // Record and play: words with both signs.
    for (int i = 0; i < 24; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      if (i == 0) w = 16'h8001;
      mic.push_back(w);
      codec.mic_q.push_back(w);
    end
    for (int i = 0; i < 8; i++) begin
      automatic logic [15:0] w = 16'($urandom);
      play.push_back(w);
      apb_write(12'h00C, {16'hdead, w});
    end
    apb_read(12'h004, d); expect_eq("TX level", d, 32'h0000_0800);
    apb_write(12'h000, 32'h3);                        // RX, TX on; no interrupt
    apb_read(12'h000, d); expect_eq("CTRL", d, 32'h3);
    wait (dut.rx_level != 0);
    repeat (2) @(posedge clk);
    expect_eq("irq masked", {31'd0, irq}, 32'd0);
    apb_write(12'h000, 32'h7);
    expect_eq("irq enabled", {31'd0, irq}, 32'd1);
    got = 0;
    while (got < 24) begin
      apb_read(12'h004, d);
      n = int'(d[4:0]);
      for (int k = 0; k < n; k++) begin
        apb_read(12'h008, d);
        expect_eq($sformatf("RX word %0d", got), d, {{16{mic[got][15]}}, mic[got]});
        got++;
      end
    end
    // The codec keeps sending silence: drain, then watch the interrupt drop.
    apb_write(12'h000, 32'h6);                        // RX off, TX on, irq on
    apb_write(12'h000, 32'hE);                        // clear FIFOs too
    apb_read(12'h004, d); expect_eq("RX level after clear", {27'd0, d[4:0]}, 32'd0);
    expect_eq("irq after clear", {31'd0, irq}, 32'd0);

    // Played words: the 8 written, then silence, on both channels.
    for (int i = 0; i < 8; i++) begin
      expect_eq($sformatf("played L %0d", i), {16'd0, codec.play_l[i]}, {16'd0, play[i]});
      expect_eq($sformatf("played R %0d", i), {16'd0, codec.play_r[i]}, {16'd0, play[i]});
    end
    expect_eq("silence after", {16'd0, codec.play_l[8]}, 32'd0);
    apb_read(12'h004, d); expect_eq("underrun flag", {31'd0, d[17]}, 32'd1);
    apb_write(12'h000, 32'h0);
    apb_write(12'h004, 32'h0002_0000);
    apb_read(12'h004, d); expect_eq("underrun cleared", {31'd0, d[17]}, 32'd0);

    // Overflow: record 20 words without reading; 16 stay.
    for (int i = 0; i < 20; i++) codec.mic_q.push_back(16'(i + 1));
    apb_write(12'h000, 32'h1);
    wait (codec.mic_q.size() == 0);
    repeat (64 * 3 * 2) @(posedge clk);
    apb_write(12'h000, 32'h0);
    apb_read(12'h004, d);
    expect_eq("RX level full", {27'd0, d[4:0]}, 32'd16);
    expect_eq("overflow flag", {31'd0, d[16]}, 32'd1);
    for (int i = 0; i < 16; i++) begin
      apb_read(12'h008, d); expect_eq($sformatf("kept word %0d", i), d, 32'(i + 1));
    end
    apb_write(12'h004, 32'h0001_0000);
    apb_read(12'h004, d); expect_eq("overflow cleared", d, 32'h0);

    checks++;
    if (n_per < 20 || per_bad != 0) begin
      failures++; $display("sample period: %0d measured, %0d wrong", n_per, per_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
