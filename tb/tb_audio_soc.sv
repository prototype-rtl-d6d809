// tb_audio_soc: end-to-end run of the SoC's custom part at its default
// sizes, with this testbench in the role of the processor and a codec model
// on the I2S pins.
//
// 1. Writes all 8 x 124 x 12 template features over AHB. Keyword 5's
//    template is the reference MFCC sequence of the spoken word; the others
//    are random.
// 2. Sets the audio module's bit clock to 128 system clocks per sample
//    (CLKDIV = 2), clears the accelerator, enables both interrupts and
//    starts recording. The codec sends one second (8000 samples) of a
//    synthetic word. On every audio interrupt the processor reads STATUS,
//    takes the waiting samples from RXDATA and writes each to the
//    accelerator's SAMPLE register.
// 3. After the 8000th sample it stops recording and waits for the
//    accelerator's interrupt, then reads the keyword, the best distance and
//    all distances, which must match distances computed here from the
//    reference model, and acknowledges the interrupt.
// 4. Answers through the player path: writes 16 words to TXDATA and checks
//    that the codec receives them on both channels.
// Mechanisms counted: audio interrupts, samples over I2S, frames, Mel filter
// boundaries, log2 outputs, keyword interrupts and played words; each must
// have occurred.
module tb_audio_soc;
  import kws_ref_pkg::*;
  localparam int NS = 8000, T = 124, K = 8, C = 12, KW = 5, NPLAY = 16;
  logic clk = 0, rst_n = 0;
  logic hsel = 0, hwrite = 0, hready, hreadyout, hresp, kws_irq;
  logic [31:0] haddr = 0, hwdata = 0, hrdata;
  logic [1:0] htrans = 0;
  logic psel = 0, penable = 0, pwrite = 0, pready, pslverr, audio_irq;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic i2s_bclk, i2s_ws, i2s_sdin, i2s_sdout;
  int checks = 0, failures = 0;
  int audio_irqs = 0, kws_irqs = 0, bnds = 0, logs = 0, frames_out = 0, ncep = 0, moved = 0;
  int s [NS];
  int ref_c [T][C];
  int tpl [K][T][C];
  logic [15:0] reply [NPLAY];

  assign hready = hreadyout;
  audio_soc dut (.*);
  i2s_codec_model codec (.bclk(i2s_bclk), .ws(i2s_ws), .sdin(i2s_sdin), .sdout(i2s_sdout));

  always #5 clk = ~clk;
  initial begin
    #200000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.u_kws.mf_valid && dut.u_kws.mf_ready) begin
      if (ncep % C == C - 1) frames_out++;
      ncep++;
    end
    if (dut.u_kws.u_feu.u_mel.fire && dut.u_kws.u_feu.u_mel.bnd) bnds++;
    if (dut.u_kws.u_feu.lg_v && dut.u_kws.u_feu.lg_r) logs++;
  end
  always @(posedge audio_irq) audio_irqs++;
  always @(posedge kws_irq) kws_irqs++;

  task automatic ahb_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 1; haddr = a;
    while (!hreadyout) @(negedge clk);
    @(posedge clk);
    @(negedge clk); hsel = 0; htrans = 2'b00; hwdata = d;
    while (!hreadyout) @(negedge clk);
    @(posedge clk); #1;
  endtask

  task automatic ahb_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 0; haddr = a;
    while (!hreadyout) @(negedge clk);
    @(posedge clk);
    @(negedge clk); hsel = 0; htrans = 2'b00;
    while (!hreadyout) @(negedge clk);
    d = hrdata;
    @(posedge clk); #1;
  endtask

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

  // Synthetic word: two formant-like tones whose pitch glides, an amplitude
  // envelope and noise.
  task automatic make_signal(real f1, real f2);
    for (int n = 0; n < NS; n++) begin
      real t = n / 8000.0;
      real env = $sin(PI * t) * $sin(PI * t);
      s[n] = rnd(env * (9000.0 * $sin(2.0 * PI * (f1 + 200.0 * t) * t)
                       + 4000.0 * $sin(2.0 * PI * (f2 - 300.0 * t) * t))) + $urandom_range(600) - 300;
    end
    for (int f = 0; f < T; f++) begin
      frame_t x;
      int c [NC];
      for (int n = 0; n < N; n++) x[n] = s[f * 64 + n];
      mfcc(x, c);
      for (int k = 0; k < C; k++) ref_c[f][k] = c[k];
    end
  endtask

  initial begin
    logic [31:0] r;
    longint d [K];
    int bk;
    bk = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    make_signal(420.0, 1800.0);
    for (int k = 0; k < K; k++)
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) tpl[k][i][c] = (k == KW) ? ref_c[i][c] : $urandom_range(60) - 30;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++)
          ahb_write(32'h10000 | (k << 13) | (i << 6) | (c << 2), 32'(8'(tpl[k][i][c])));
    foreach (d[k]) begin
      d[k] = 0;
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++)
          d[k] += longint'(iabs(ref_c[i][c] - tpl[k][i][c]));
      if (d[k] < d[bk]) bk = k;
    end
    check(bk == KW, "test set-up: nearest keyword");

    // Record: codec -> audio module -> processor -> accelerator.
    for (int n = 0; n < NS; n++) codec.mic_q.push_back(16'(s[n]));
    ahb_write(32'h0, 32'h3);                 // accelerator: clear, interrupt on
    apb_write(12'h010, 32'd2);               // 128 clocks per sample
    apb_write(12'h000, 32'h5);               // RX on, RX interrupt on
    while (moved < NS) begin
      int n;
      wait (audio_irq);
      apb_read(12'h004, r);
      n = int'(r[4:0]);
      check(r[16] == 1'b0, "RX FIFO overflow");
      for (int k = 0; k < n && moved < NS; k++) begin
        apb_read(12'h008, r);
        check(r[15:0] == 16'(s[moved]), $sformatf("sample %0d: %h exp %h", moved, r[15:0], 16'(s[moved])));
        ahb_write(32'h8, r);
        moved++;
      end
    end
    apb_write(12'h000, 32'h8);               // stop recording, empty the FIFOs

    fork
      begin wait (kws_irq); end
      begin repeat (20000) @(posedge clk); end
    join_any
    disable fork;
    check(kws_irq, "no keyword interrupt");
    ahb_read(32'h4, r);
    check(r[1:0] == 2'b11 && r[31:16] == 16'(T), $sformatf("STATUS %h", r));
    ahb_read(32'h10, r);
    check(r == 32'(bk), $sformatf("RESULT %0d exp %0d", r, bk));
    ahb_read(32'h14, r);
    check(longint'(r) == d[bk], $sformatf("BEST %0d exp %0d", r, d[bk]));
    for (int k = 0; k < K; k++) begin
      ahb_read(32'h80 + 4 * k, r);
      check(longint'(r) == d[k], $sformatf("DIST %0d: %0d exp %0d", k, r, d[k]));
    end
    ahb_write(32'hC, 32'h1);
    check(!kws_irq, "keyword interrupt not cleared");

    // Answer through the player path.
    for (int i = 0; i < NPLAY; i++) begin
      reply[i] = 16'(s[4000 + i]);
      apb_write(12'h00C, {16'd0, reply[i]});
    end
    codec.play_l.delete();
    codec.play_r.delete();
    apb_write(12'h000, 32'h2);               // TX on
    wait (codec.play_l.size() >= NPLAY && codec.play_r.size() >= NPLAY);
    apb_write(12'h000, 32'h0);
    for (int i = 0; i < NPLAY; i++)
      check(codec.play_l[i] == reply[i] && codec.play_r[i] == reply[i],
            $sformatf("played %0d: %h/%h exp %h", i, codec.play_l[i], codec.play_r[i], reply[i]));

    $display("audio interrupts %0d, samples moved %0d, keyword interrupts %0d, played %0d",
             audio_irqs, moved, kws_irqs, NPLAY);
    $display("frames %0d, Mel boundaries %0d, log2 values %0d", frames_out, bnds, logs);
    check(audio_irqs > 0, "mechanism: audio interrupt never happened");
    check(moved == NS && codec.sent >= NS, "mechanism: samples over I2S");
    check(kws_irqs == 1, "mechanism: keyword interrupt");
    check(frames_out == T, $sformatf("mechanism: frames %0d", frames_out));
    check(bnds >= T * M, "mechanism: Mel boundaries");
    check(logs >= T * M, "mechanism: log2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
