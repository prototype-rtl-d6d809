// tb_kws_host_if: drives the AHB-Lite slave with single transfers and
// stands in for the accelerator. Checks the write address map (clr pulse,
// interrupt enable, sample hand-over with wait states while the buffer is
// not ready, template address decoding), the read address map (status,
// result, best distance, all distances, unmapped addresses) and the
// interrupt (set on the rising edge of done, masked by the enable, cleared
// by writing 1).
module tb_kws_host_if;
  localparam int K = 8, T = 124, C = 12;
  logic clk = 0, rst_n = 0;
  logic hsel = 0, hwrite = 0, hready, hreadyout, hresp, irq;
  logic [31:0] haddr = 0, hwdata = 0, hrdata;
  logic [1:0] htrans = 0;
  logic clr, smp_valid, smp_ready = 0, tpl_we;
  logic [15:0] smp_data;
  logic [2:0] tpl_kw;
  logic [6:0] tpl_frame;
  logic [3:0] tpl_coef;
  logic [7:0] tpl_data;
  logic done = 0;
  logic [2:0] best_kw = 3'd6;
  logic [23:0] best_dist = 24'h00_1234;
  logic [K-1:0][23:0] distances;
  logic [6:0] frames = 7'd124;
  int checks = 0, failures = 0, waits = 0, clr_pulses = 0, tpl_writes = 0;
  logic [15:0] got_smp [$];

  assign hready = hreadyout;
  kws_host_if dut (.*);

  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Accelerator side: buffer ready two cycles in five.
  int cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) smp_ready = (cyc % 5) >= 3;
  always @(posedge clk) begin
    if (smp_valid && smp_ready) got_smp.push_back(smp_data);
    if (clr) clr_pulses++;
    if (tpl_we) begin
      tpl_writes++;
      check(tpl_kw == 3'd5 && tpl_frame == 7'd100 && tpl_coef == 4'd11 && tpl_data == 8'hA7, "template fields");
    end
  end

  task automatic ahb_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 1; haddr = a;
    while (!hreadyout) @(negedge clk);
    @(posedge clk);
    @(negedge clk); hsel = 0; htrans = 2'b00; hwdata = d;
    while (!hreadyout) begin waits++; @(negedge clk); end
    @(posedge clk); #1;
  endtask

  task automatic ahb_read(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 0; haddr = a;
    while (!hreadyout) @(negedge clk);
    @(posedge clk);
    @(negedge clk); hsel = 0; htrans = 2'b00;
    while (!hreadyout) @(negedge clk);
    d = hrdata;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [31:0] r;
    for (int k = 0; k < K; k++) distances[k] = 24'(1000 * k + 7);
    repeat (3) @(posedge clk); rst_n = 1;
    check(hresp == 1'b0, "hresp");
    // Control.
    ahb_write(32'h0, 32'h1);
    check(clr_pulses == 1, "clr pulse");
    ahb_read(32'h0, r);
    check(r == 32'h0, "irq disabled after reset");
    ahb_write(32'h0, 32'h2);
    ahb_read(32'h0, r);
    check(r == 32'h2 && clr_pulses == 1, "irq enable, no clr");
    // Samples with wait states.
    for (int i = 0; i < 10; i++) ahb_write(32'h8, 32'(16'h100 + i));
    check(got_smp.size() == 10, $sformatf("samples taken %0d", got_smp.size()));
    foreach (got_smp[i]) check(got_smp[i] == 16'(16'h100 + i), "sample data");
    check(waits > 0, "no wait state seen");
    // Template: kw 5, frame 100, coef 11.
    ahb_write(32'h10000 | (5 << 13) | (100 << 6) | (11 << 2), 32'hA7);
    check(tpl_writes == 1, "one template write");
    // Reads.
    ahb_read(32'h10, r); check(r == 32'd6, "RESULT");
    ahb_read(32'h14, r); check(r == 32'h1234, "BEST");
    for (int k = 0; k < K; k++) begin
      ahb_read(32'h80 + 4 * k, r); check(r == 32'(1000 * k + 7), $sformatf("DIST %0d", k));
    end
    ahb_read(32'h40, r); check(r == 0, "unmapped read");
    ahb_read(32'h4, r); check(r == {16'd124, 16'd0}, $sformatf("STATUS idle %h", r));
    // Interrupt.
    check(!irq, "irq idle");
    @(negedge clk); done = 1;
    repeat (2) @(negedge clk);
    check(irq, "irq after done");
    ahb_read(32'h4, r); check(r[1:0] == 2'b11, "STATUS pending and done");
    ahb_write(32'hC, 32'h1);
    check(!irq, "irq cleared");
    ahb_write(32'h0, 32'h0);
    @(negedge clk); done = 0; @(negedge clk); done = 1; repeat (2) @(negedge clk);
    check(!irq, "irq masked");
    ahb_read(32'h4, r); check(r[1] == 1'b1, "pending while masked");
    $display("wait states %0d", waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
