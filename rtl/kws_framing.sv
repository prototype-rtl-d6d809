// kws_framing: splits a sample stream into (possibly overlapping) frames.
//
// A circular data buffer (the "data FIFO") is filled by a write counter. A
// read counter walks through the current frame, FRAME samples starting at
// the frame base; when a frame has been read out the base advances by HOP.
// With HOP < FRAME consecutive frames overlap and each sample is read more
// than once; with HOP == FRAME the block is a plain FIFO that marks vector
// boundaries. A sample is read out as soon as it has been written, so a
// frame starts to flow before it is complete.
//
// Interface: valid/ready streams on both sides. in_ready drops when the
// buffer holds DEPTH samples that are still needed. clr empties the buffer
// and restarts framing at the next written sample.
// Timing: one sample in and one out per cycle; out_data is registered, one
// cycle after the sample became readable.
//
// The structure (controller, write counter, data FIFO, read counter) follows
// the accelerator's block diagram; the buffer depth and the rule that a frame
// starts before it is complete are this design's choices.
module kws_framing #(
  parameter int unsigned W     = 16,
  parameter int unsigned FRAME = 128,
  parameter int unsigned HOP   = 64,
  parameter int unsigned DEPTH = 256   // power of two, >= FRAME
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  input  logic         out_ready
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned RW = $clog2(FRAME);

  logic [W-1:0]  mem [DEPTH];
  logic [PW:0]   wr_cnt, base;
  logic [RW-1:0] rd_idx;
  logic [PW:0]   fill;
  logic          avail, load;

  assign fill      = wr_cnt - base;
  assign in_ready  = (fill < (PW+1)'(DEPTH));
  assign avail     = (fill > (PW+1)'(rd_idx));
  assign load      = avail && (!out_valid || out_ready);

  // Write counter and data buffer.
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_cnt[PW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_cnt <= '0;
      base <= '0;
      rd_idx <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      wr_cnt <= '0;
      base <= '0;
      rd_idx <= '0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) wr_cnt <= wr_cnt + 1'b1;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (load) begin
        out_valid <= 1'b1;
        out_data <= mem[PW'(base + (PW+1)'(rd_idx))];
        if (rd_idx == RW'(FRAME - 1)) begin
          rd_idx <= '0;
          base <= base + (PW+1)'(HOP);
        end else begin
          rd_idx <= rd_idx + 1'b1;
        end
      end
    end
  end

endmodule
