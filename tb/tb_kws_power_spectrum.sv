// tb_kws_power_spectrum: 600 random bins (and the extremes) with random
// gaps and back-pressure; each output must equal re^2 + im^2, saturated to
// 32 bits, in order.
module tb_kws_power_spectrum;
  localparam int NV = 600;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [17:0] in_re = 0, in_im = 0;
  logic [31:0] out_data;
  int checks = 0, failures = 0, nout = 0;
  int vr [NV], vi [NV];

  kws_power_spectrum dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic longint p = longint'(vr[nout]) * vr[nout] + longint'(vi[nout]) * vi[nout];
    if (p > 64'hFFFF_FFFF) p = 64'hFFFF_FFFF;
    checks++;
    if (longint'(out_data) != p) begin
      failures++; $display("out %0d: got %0d exp %0d", nout, out_data, p);
    end
    nout++;
  end

  initial begin
    foreach (vr[i]) begin
      vr[i] = $urandom_range(65535) - 32768;
      vi[i] = $urandom_range(65535) - 32768;
    end
    vr[0] = -131072; vi[0] = -131072;   // saturates
    vr[1] = 0; vi[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_re = 18'(vr[i]); in_im = 18'(vi[i]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
