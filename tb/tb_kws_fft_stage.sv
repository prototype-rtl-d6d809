// tb_kws_fft_stage: stages 1 and 3 (general, twiddle multiplier), 6 (quarter)
// and 7 (last) of the 128-point FFT, each fed three random complex frames
// with random gaps and back-pressure. Each output is compared with the stage
// formula evaluated here: y[j] = (x[j] + x[j+H]) / 2 for j & H = 0, otherwise
// ((x[j-H] - x[j]) / 2) * W^t in Q15. On frame 0, which runs without stalls,
// the first output must be taken H + 3 clock edges after the first input
// (input H taken, one edge to fill the output register, one to take it, and
// one for the way this bench counts edges).
module tb_kws_fft_stage;
  import kws_ref_pkg::*;
  localparam int W = 18, NFR = 3;
  localparam int SL [4] = '{1, 3, 6, 7};
  logic clk = 0, rst_n = 0, clr = 0;
  int checks = 0, failures = 0;
  int xr [NFR][N], xi [NFR][N];
  int done_cnt = 0;

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic void stage_ref(int s, int f, int j, output int yr, output int yi);
    int h = N >> s;
    int lo = j & ~h, hi = j | h;
    int t = (j & (h - 1)) << (s - 1);
    int dr = (xr[f][lo] - xr[f][hi]) >>> 1, di = (xi[f][lo] - xi[f][hi]) >>> 1;
    if ((j & h) == 0) begin
      yr = (xr[f][lo] + xr[f][hi]) >>> 1; yi = (xi[f][lo] + xi[f][hi]) >>> 1;
    end else if (h >= 4) begin
      yr = int'((longint'(dr) * tw_c(t) - longint'(di) * tw_d(t)) >>> 15);
      yi = int'((longint'(dr) * tw_d(t) + longint'(di) * tw_c(t)) >>> 15);
    end else if (h == 2 && ((j & 1) != 0)) begin
      yr = di; yi = -dr;
    end else begin
      yr = dr; yi = di;
    end
  endfunction

  for (genvar g = 0; g < 4; g++) begin : g_dut
    logic in_valid = 0, in_ready, out_valid, out_ready = 0;
    logic signed [W-1:0] in_re = 0, in_im = 0, out_re, out_im;
    int nout = 0, nin = 0, cyc = 0, first_in = -1, first_out = -1;
    kws_fft_stage #(.W(W), .STAGE(SL[g])) dut (.*);

    always @(posedge clk) cyc++;
    // Frame 0 runs without gaps or back-pressure to measure latency.
    always @(negedge clk) out_ready = (nout < N) || ($urandom_range(3) != 0);
    always @(posedge clk) if (rst_n && out_valid && out_ready) begin
      automatic int yr, yi;
      stage_ref(SL[g], nout / N, nout % N, yr, yi);
      checks++;
      if (int'(out_re) != yr || int'(out_im) != yi) begin
        failures++;
        $display("stage %0d out %0d: got %0d,%0d exp %0d,%0d", SL[g], nout, out_re, out_im, yr, yi);
      end
      if (first_out < 0) first_out = cyc;
      nout++;
    end
    initial begin
      wait (rst_n);
      while (nin < NFR * N) begin
        @(negedge clk);
        in_valid = (nin < N) || ($urandom_range(3) != 0);
        in_re = W'(xr[nin / N][nin % N]);
        in_im = W'(xi[nin / N][nin % N]);
        @(posedge clk);
        if (in_valid && in_ready) begin
          if (first_in < 0) first_in = cyc;
          nin++;
        end
      end
      @(negedge clk); in_valid = 0;
      wait (nout == NFR * N);
      checks++;
      if (first_out - first_in != (N >> SL[g]) + 3) begin
        failures++;
        $display("stage %0d latency %0d exp %0d", SL[g], first_out - first_in, (N >> SL[g]) + 3);
      end
      done_cnt++;
    end
  end

  initial begin
    for (int f = 0; f < NFR; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = $urandom_range(65535) - 32768;
        xi[f][n] = (f == 0) ? 0 : $urandom_range(65535) - 32768;
      end
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done_cnt == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
