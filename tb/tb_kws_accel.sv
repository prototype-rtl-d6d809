// tb_kws_accel: end-to-end run of the accelerator at its default sizes,
// driven over AHB-Lite as the processor would.
//
// 1. Writes all 8 x 124 x 12 template features. Keyword 3's template is the
//    reference MFCC sequence of the first utterance; the others are random.
// 2. Utterance A: clears the accelerator and writes one second (8000
//    samples) of a synthetic word at the real-time rate, one sample every 50
//    cycles (8 kHz at a 400 kHz accelerator clock). Waits for the interrupt
//    and reads the result and all distances; they must match distances
//    computed here from the reference MFCCs. The latency of every frame, from
//    its last sample written to its last cepstrum taken by the TCU, must stay
//    within 1192 cycles (2.98 ms at 400 kHz).
// 3. Utterance B: a different signal written back to back at bus speed, so
//    the frame buffer fills and the bus sees wait states; keyword 6's
//    template is rewritten to be the nearest.
// Mechanisms counted: template writes, bus wait states, frames, overlapping
// frames, Mel filter boundaries, log2 outputs, interrupts and clears; each
// must have occurred.
module tb_kws_accel;
  import kws_ref_pkg::*;
  localparam int NS = 8000, T = 124, K = 8, C = 12, GAP = 50, LAT_MAX = 1192;
  logic clk = 0, rst_n = 0;
  logic hsel = 0, hwrite = 0, hready, hreadyout, hresp, irq;
  logic [31:0] haddr = 0, hwdata = 0, hrdata;
  logic [1:0] htrans = 0;
  int checks = 0, failures = 0;
  int waits = 0, irqs = 0, clears = 0, tplw = 0, bnds = 0, logs = 0, frames_out = 0;
  int cyc = 0, nsmp = 0, ncep = 0, max_lat = 0;
  int t_frame_in [T];
  int s [NS];
  int ref_c [T][C];
  int tpl [K][T][C];

  assign hready = hreadyout;
  kws_accel dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #100000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Probes for counting mechanisms and frame latency.
  always @(posedge clk) if (rst_n) begin
    if (dut.smp_valid && dut.smp_ready) begin
      if (nsmp >= 127 && (nsmp - 127) % 64 == 0 && (nsmp - 127) / 64 < T) t_frame_in[(nsmp - 127) / 64] = cyc;
      nsmp++;
    end
    if (dut.mf_valid && dut.mf_ready) begin
      if (ncep % C == C - 1 && ncep / C < T) begin
        if (cyc - t_frame_in[ncep / C] > max_lat) max_lat = cyc - t_frame_in[ncep / C];
        frames_out++;
      end
      ncep++;
    end
    if (dut.u_feu.u_mel.fire && dut.u_feu.u_mel.bnd) bnds++;
    if (dut.u_feu.lg_v && dut.u_feu.lg_r) logs++;
  end
  always @(posedge irq) irqs++;

  task automatic ahb_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 1; haddr = a;
    while (!hreadyout) @(negedge clk);
    @(posedge clk);
    @(negedge clk); hsel = 0; htrans = 2'b00; hwdata = d;
    while (!hreadyout) begin waits++; @(negedge clk); end
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

  task automatic write_template(int k);
    for (int i = 0; i < T; i++)
      for (int c = 0; c < C; c++) begin
        ahb_write(32'h10000 | (k << 13) | (i << 6) | (c << 2), 32'(8'(tpl[k][i][c])));
        tplw++;
      end
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

  task automatic run_utterance(int gap, int expect_kw);
    logic [31:0] r;
    longint d [K];
    int bk = 0;
    int t0;
    foreach (d[k]) begin
      d[k] = 0;
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) d[k] += longint'(iabs(ref_c[i][c] - tpl[k][i][c]));
      if (d[k] < d[bk]) bk = k;
    end
    check(bk == expect_kw, "test set-up: nearest keyword");
    ahb_write(32'h0, 32'h3);          // clear, interrupt enabled
    clears++;
    t0 = cyc;
    nsmp = 0; ncep = 0;
    for (int n = 0; n < NS; n++) begin
      ahb_write(32'h8, 32'(16'(s[n])));
      repeat (gap) @(posedge clk);
    end
    fork
      begin wait (irq); end
      begin repeat (20000) @(posedge clk); end
    join_any
    disable fork;
    check(irq, "no interrupt");
    $display("utterance: %0d cycles from clear to interrupt", cyc - t0);
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
    check(!irq, "interrupt not cleared");
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    make_signal(350.0, 1500.0);
    for (int k = 0; k < K; k++)
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) tpl[k][i][c] = (k == 3) ? ref_c[i][c] : $urandom_range(60) - 30;
    for (int k = 0; k < K; k++) write_template(k);

    // Utterance A at the real-time sample rate.
    run_utterance(GAP - 2, 3);
    $display("utterance A: longest frame latency %0d cycles (limit %0d)", max_lat, LAT_MAX);
    check(max_lat > 0 && max_lat <= LAT_MAX, "frame latency");
    check(frames_out == T, $sformatf("frames %0d", frames_out));

    // Utterance B back to back; keyword 6 becomes nearest.
    make_signal(500.0, 2200.0);
    for (int i = 0; i < T; i++)
      for (int c = 0; c < C; c++) begin
        automatic int v = ref_c[i][c] + $urandom_range(2) - 1;
        tpl[6][i][c] = (v > 127) ? 127 : (v < -128) ? -128 : v;
      end
    write_template(6);
    run_utterance(0, 6);

    $display("template writes %0d, wait states %0d, interrupts %0d, clears %0d", tplw, waits, irqs, clears);
    $display("frames %0d, Mel boundaries %0d, log2 values %0d", frames_out, bnds, logs);
    check(tplw == (K + 1) * T * C, "template writes");
    check(waits > 0, "mechanism: bus wait state never happened");
    check(irqs == 2, "mechanism: interrupts");
    check(clears == 2, "mechanism: clear");
    check(frames_out >= 2 * T, "mechanism: frames");
    check(bnds >= 2 * T * M, "mechanism: Mel boundaries");
    check(logs >= 2 * T * M, "mechanism: log2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
