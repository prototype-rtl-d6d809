// tb_kws_windowing: four random 128-sample frames (one of full-scale values)
// with random back-pressure; every output is compared with the reference
// y[n] = (x[n] * round(32767 (0.54 - 0.46 cos(2 pi n/127)))) >> 15.
module tb_kws_windowing;
  import kws_ref_pkg::*;
  localparam int NFR = 4;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0, nout = 0;
  frame_t x [NFR], y [NFR];

  kws_windowing dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (int'(out_data) != y[nout / N][nout % N]) begin
      failures++;
      $display("out %0d: got %0d exp %0d", nout, out_data, y[nout / N][nout % N]);
    end
    nout++;
  end

  initial begin
    for (int f = 0; f < NFR; f++) begin
      for (int n = 0; n < N; n++) begin
        automatic int v = int'($signed(16'($urandom)));
        if (f == 1) v = (n % 2 != 0) ? 32767 : -32768;   // full scale
        x[f][n] = v;
      end
      y[f] = window(x[f]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NFR * N; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data = 16'(x[i / N][i % N]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk); in_valid = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (nout != NFR * N) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
