// tb_kws_log: the 33 powers of two, their neighbours, 0 and 2^32 - 1, then
// random values of random bit length, with random back-pressure. Each output
// must be the bit length of the input (32 - leading zeros).
module tb_kws_log;
  localparam int NV = 500;
  logic clk = 0, rst_n = 0, clr = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0;
  logic [5:0] out_data;
  int checks = 0, failures = 0, nout = 0, nv = 0;
  logic [31:0] v [NV];

  kws_log dut (.*);

  function automatic int bitlen(logic [31:0] x);
    for (int i = 31; i >= 0; i--) if (x[i]) return i + 1;
    return 0;
  endfunction

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (int'(out_data) != bitlen(v[nout])) begin
      failures++; $display("log(%h): got %0d exp %0d", v[nout], out_data, bitlen(v[nout]));
    end
    nout++;
  end

  initial begin
    v[nv++] = 0;
    v[nv++] = 32'hFFFF_FFFF;
    for (int i = 0; i < 32; i++) begin
      v[nv++] = 32'd1 << i;
      v[nv++] = (32'd1 << i) - 1;
      v[nv++] = (32'd1 << i) | 32'($urandom_range((1 << i) - 1));
    end
    while (nv < NV) v[nv++] = $urandom >> $urandom_range(31);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NV; ) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_data = v[i];
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
