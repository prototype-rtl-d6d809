// tb_kws_fft: four frames through the 128-point FFT pipeline: a cosine at
// bin 5, an impulse, and two random frames of full-range 16-bit samples.
// Every bin is compared with the reference in-place DIF FFT (same scaling
// and rounding). The cosine frame must also put nearly all its power in
// bins 5 and 123. The time from the first sample taken to the first bin
// taken must be 144 edges: each stage waits for input H + 1 and spends two
// edges on its output register (sum over stages of H + 2 = 127 + 14), plus
// three for the result cache and this bench's edge counting.
module tb_kws_fft;
  import kws_ref_pkg::*;
  localparam int NFR = 4;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [15:0] in_data = 0;
  logic signed [17:0] out_re, out_im;
  int checks = 0, failures = 0, nout = 0, cyc = 0, t_in = -1, t_out = -1;
  frame_t x [NFR], er [NFR], ei [NFR];

  kws_fft dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = (nout < N) || ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = nout / N;
    automatic int b = nout % N;
    checks++;
    if (int'(out_re) != er[f][b] || int'(out_im) != ei[f][b]) begin
      failures++;
      $display("frame %0d bin %0d: got %0d,%0d exp %0d,%0d", f, b, out_re, out_im, er[f][b], ei[f][b]);
    end
    if (t_out < 0) t_out = cyc;
    nout++;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      x[0][n] = rnd(16000.0 * $cos(2.0 * PI * 5 * n / N));
      x[1][n] = (n == 0) ? 12800 : 0;
      x[2][n] = $urandom_range(65535) - 32768;
      x[3][n] = $urandom_range(65535) - 32768;
    end
    for (int f = 0; f < NFR; f++) fft(x[f], er[f], ei[f]);
    // Cosine: |X[5]| = 16000 * 64 / 128 = 8000.
    checks++;
    if (er[0][5] < 7900 || er[0][123] < 7900 || er[0][6] > 100 || er[0][6] < -100) begin
      failures++; $display("reference FFT of the cosine is wrong: %0d %0d %0d", er[0][5], er[0][123], er[0][6]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NFR * N; ) begin
      @(negedge clk);
      in_valid = (i < N) || ($urandom_range(3) != 0);
      in_data = 16'(x[i / N][i % N]);
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (t_in < 0) t_in = cyc;
        i++;
      end
    end
    @(negedge clk); in_valid = 0;
    wait (nout == NFR * N);
    $display("first bin %0d cycles after first sample", t_out - t_in);
    checks++;
    if (t_out - t_in != 144) begin failures++; $display("latency differs from 144"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
