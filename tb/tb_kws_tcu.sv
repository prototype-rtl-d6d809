// tb_kws_tcu: the default TCU (8 keywords, 124-frame templates, 12 features)
// loaded with random templates, then two utterances of 124 random feature
// frames, separated by clr. In the first, keyword 5's template is the input
// plus small noise; in the second, keyword 2's template is nearest. All eight
// distances, the nearest keyword, its distance and the frame count are
// compared with sums of absolute differences computed here; done must rise
// only after the last frame, and in_ready must be low once done.
module tb_kws_tcu;
  localparam int C = 12, T = 124, K = 8;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready;
  logic signed [7:0] in_data = 0;
  logic tpl_we = 0;
  logic [2:0] tpl_kw = 0;
  logic [6:0] tpl_frame = 0;
  logic [3:0] tpl_coef = 0;
  logic [7:0] tpl_data = 0;
  logic done;
  logic [2:0] best_kw;
  logic [23:0] best_dist;
  logic [K-1:0][23:0] distances;
  logic [6:0] frames;
  int checks = 0, failures = 0;
  int tpl [K][T][C];
  int x [T][C];

  kws_tcu dut (.*);

  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic utterance(int near);
    longint d [K];
    int bk = 0;
    for (int i = 0; i < T; i++)
      for (int c = 0; c < C; c++) begin
        x[i][c] = $urandom_range(255) - 128;
        if (near >= 0) begin
          int v = x[i][c] + $urandom_range(4) - 2;
          tpl[near][i][c] = (v > 127) ? 127 : (v < -128) ? -128 : v;
        end
      end
    foreach (d[k]) begin
      d[k] = 0;
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) d[k] += longint'(iabs(x[i][c] - tpl[k][i][c]));
      if (d[k] < d[bk]) bk = k;
    end
    // Template of the near keyword rewritten.
    if (near >= 0)
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) begin
          @(negedge clk); tpl_we = 1; tpl_kw = 3'(near); tpl_frame = 7'(i); tpl_coef = 4'(c); tpl_data = 8'(tpl[near][i][c]);
        end
    @(negedge clk); tpl_we = 0; clr = 1; @(negedge clk); clr = 0;
    for (int n = 0; n < T * C; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data = 8'(x[n / C][n % C]);
      check(!done, "done before the last frame");
      @(posedge clk);
      if (in_valid && in_ready) n++;
    end
    @(negedge clk); in_valid = 0;
    repeat (K + 10) @(negedge clk);
    check(done, "done not raised");
    check(!in_ready, "in_ready high after done");
    check(int'(frames) == T, $sformatf("frames %0d", frames));
    for (int k = 0; k < K; k++)
      check(longint'(distances[k]) == d[k], $sformatf("distance %0d: got %0d exp %0d", k, distances[k], d[k]));
    check(int'(best_kw) == bk && bk == near, $sformatf("best %0d exp %0d", best_kw, bk));
    check(longint'(best_dist) == d[bk], "best distance");
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < T; i++)
        for (int c = 0; c < C; c++) begin
          tpl[k][i][c] = $urandom_range(255) - 128;
          @(negedge clk); tpl_we = 1; tpl_kw = 3'(k); tpl_frame = 7'(i); tpl_coef = 4'(c); tpl_data = 8'(tpl[k][i][c]);
        end
    @(negedge clk); tpl_we = 0;
    utterance(5);
    utterance(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
