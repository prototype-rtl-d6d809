// audio_fifo: small synchronous FIFO for the audio sample path.
//
// DEPTH entries (power of two) of W bits, first-word-fall-through: rd_data
// shows the oldest entry whenever empty is low; rd_en removes it. A write to
// a full FIFO is dropped and a read of an empty one ignored; level counts
// the entries. clr empties it.
// Timing: a written word is readable in the next cycle.
//
// Buffering in the audio module is not described in the source; the FIFOs
// are this design's choice, so that the processor can serve several
// samples per interrupt.
module audio_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic         do_wr, do_rd;

  assign level   = wp - rp;
  assign empty   = (wp == rp);
  assign full    = (level == (AW+1)'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (do_wr) mem[wp[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clr) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

endmodule
