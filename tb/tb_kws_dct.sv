// tb_kws_dct: six log-Mel vectors of 20 values in 0..32 (random, constant 32,
// alternating 0/32, and a ramp) with random gaps and back-pressure; each of
// the 12 cepstra per vector must equal sat8((sum_n C[k][n] x[n]) >> 6) with
// C[k][n] = round(127 cos(pi (k+1)(n+0.5)/20)). The time per vector without
// stalls, (K + 1) M + K cycles plus one edge of this bench's counting, is
// checked on the first vector.
module tb_kws_dct;
  import kws_ref_pkg::*;
  localparam int NV = 6;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [5:0] in_data = 0;
  logic signed [7:0] out_data;
  int checks = 0, failures = 0, nout = 0, cyc = 0, t0 = -1, t1 = -1;
  int x [NV][M], e [NV][NC];

  kws_dct dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = (nout < NC) || ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int v = nout / NC;
    automatic int k = nout % NC;
    checks++;
    if (int'(out_data) != e[v][k]) begin
      failures++; $display("vector %0d c%0d: got %0d exp %0d", v, k + 1, out_data, e[v][k]);
    end
    if (nout == NC - 1) t1 = cyc;
    nout++;
  end

  initial begin
    for (int v = 0; v < NV; v++) begin
      for (int n = 0; n < M; n++) begin
        x[v][n] = $urandom_range(32);
        if (v == 1) x[v][n] = 32;
        if (v == 2) x[v][n] = (n % 2 != 0) ? 32 : 0;
        if (v == 3) x[v][n] = n + 5;
      end
      for (int k = 0; k < NC; k++) e[v][k] = dct(x[v], k);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV * M; ) begin
      @(negedge clk);
      in_valid = (i < M) || ($urandom_range(3) != 0);
      in_data = 6'(x[i / M][i % M]);
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (t0 < 0) t0 = cyc;
        i++;
      end
    end
    @(negedge clk); in_valid = 0;
    wait (nout == NV * NC);
    $display("first vector: %0d cycles from first element to last cepstrum", t1 - t0);
    checks++;
    if (t1 - t0 != (NC + 1) * M + NC + 1) begin failures++; $display("expected %0d", (NC + 1) * M + NC + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
