// tb_kws_feu: 448 samples of a tone mixture with noise (six complete frames
// of 128 samples at a 64-sample shift) through the whole feature extraction
// chain with random input gaps and output back-pressure. The 12 cepstra of
// each frame must equal the reference chain (pre-emphasis, window, FFT,
// power, Mel, log2, DCT computed frame by frame). Also reports the cycles
// from a frame's last sample taken to its last cepstrum.
module tb_kws_feu;
  import kws_ref_pkg::*;
  localparam int NS = 448, NF = (NS - N) / 64 + 1;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [15:0] in_data = 0;
  logic signed [7:0] out_data;
  int checks = 0, failures = 0, nout = 0, cyc = 0, t_last_in = 0;
  int s [NS];
  int e [NF][NC];

  kws_feu dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = nout / NC;
    automatic int k = nout % NC;
    checks++;
    if (int'(out_data) != e[f][k]) begin
      failures++; $display("frame %0d c%0d: got %0d exp %0d", f, k + 1, out_data, e[f][k]);
    end
    nout++;
  end

  initial begin
    for (int n = 0; n < NS; n++)
      s[n] = rnd(6000.0 * $sin(2.0 * PI * 300.0 * n / 8000.0) + 3000.0 * $sin(2.0 * PI * 1200.0 * n / 8000.0)
                 + 2000.0 * $sin(2.0 * PI * 2700.0 * n / 8000.0)) + $urandom_range(2000) - 1000;
    for (int f = 0; f < NF; f++) begin
      frame_t x;
      int c [NC];
      for (int n = 0; n < N; n++) x[n] = s[f * 64 + n];
      mfcc(x, c);
      for (int k = 0; k < NC; k++) e[f][k] = c[k];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NS; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data = 16'(s[i]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk); in_valid = 0;
    t_last_in = cyc;
    wait (nout == NF * NC);
    $display("last cepstrum %0d cycles after the last sample", cyc - t_last_in);
    repeat (100) @(posedge clk);
    checks++;
    if (nout != NF * NC) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
