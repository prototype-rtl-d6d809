// tb_kws_mel_filter: five frames of 128 power values (random, one constant,
// one of all-ones words that saturate) with random gaps and back-pressure.
// Each of the 20 outputs per frame is compared with the filter-major sum
// (sum_b P[b] w_f(b)) >> 8, the weights w_f recomputed here from the Mel
// scale. Bins 65..127 are filled with large values that must not count.
module tb_kws_mel_filter;
  import kws_ref_pkg::*;
  localparam int NFR = 5;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0, out_data;
  int checks = 0, failures = 0, nout = 0;
  longint p [NFR][N];
  longint e [NFR][M];

  kws_mel_filter dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = nout / M;
    automatic int k = nout % M;
    checks++;
    if (longint'(out_data) != e[f][k]) begin
      failures++; $display("frame %0d filter %0d: got %0d exp %0d", f, k, out_data, e[f][k]);
    end
    nout++;
  end

  initial begin
    for (int f = 0; f < NFR; f++) begin
      for (int b = 0; b < N; b++) begin
        p[f][b] = longint'($urandom_range(32'h0FFF_FFFF));
        if (f == 1) p[f][b] = 1000;
        if (f == 2) p[f][b] = 64'hFFFF_FFFF;
        if (b >= NB) p[f][b] = 64'hFFFF_FFFF;
      end
      for (int k = 0; k < M; k++) e[f][k] = mel(p[f], k);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NFR * N; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data = 32'(p[i / N][i % N]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NFR * M) begin failures++; $display("outputs %0d exp %0d", nout, NFR * M); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
