// tb_kws_framing: 640 samples through the default 128/64 framing buffer with
// random input gaps and random output back-pressure. Expects frame f, sample
// r to be input sample 64 f + r, counts the frames and checks that the
// buffer did stall the writer at least once and that a clr empties it.
module tb_kws_framing;
  localparam int FRAME = 128, HOP = 64, NS = 640, NF = (NS - FRAME) / HOP + 1;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0, stalls = 0, nout = 0, nin = 0;
  logic [15:0] src [NS];

  kws_framing dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sink: random back-pressure, long pause at first so the buffer fills.
  always @(negedge clk) out_ready = (nout > 0 || $time > 4000) && ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = nout / FRAME;
    automatic int r = nout % FRAME;
    checks++;
    if (out_data !== src[f * HOP + r]) begin
      failures++;
      $display("frame %0d sample %0d: got %h exp %h", f, r, out_data, src[f * HOP + r]);
    end
    nout++;
  end
  always @(posedge clk) if (rst_n && in_valid && !in_ready) stalls++;

  initial begin
    foreach (src[i]) src[i] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (nin < NS) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      in_data = src[nin];
      @(posedge clk);
      if (in_valid && in_ready) nin++;
    end
    @(negedge clk); in_valid = 0;
    repeat (2000) @(posedge clk);
    checks++;
    if (nout != NF * FRAME + NS - NF * HOP) begin failures++; $display("outputs %0d", nout); end
    checks++;
    if (stalls == 0) begin failures++; $display("writer never stalled"); end
    // The tenth frame has emitted its 64 available samples and waits; clr drops it.
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (out_valid || !in_ready) begin failures++; $display("clr did not empty the buffer"); end
    $display("frames=%0d stalls=%0d", nout / FRAME, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
