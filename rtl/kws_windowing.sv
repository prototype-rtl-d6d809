// kws_windowing: multiplies each frame sample by a Hamming window coefficient.
//
// An address controller counts the position within the FRAME-sample frame and
// reads the coefficient memory; the product is scaled back by 2^15.
// Coefficients are unsigned Q15, w[n] = round(32767 (0.54 - 0.46 cos(2 pi n /
// (FRAME-1)))), read from COEF_FILE at elaboration.
//
// Interface: valid/ready stream in and out; clr restarts the frame position.
// Timing: one sample per cycle, one register stage.
//
// The Hamming window, coefficient memory, address controller, multiplier and
// scale are from the block diagram; the Q15 format is this design's choice.
module kws_windowing #(
  parameter int unsigned W         = 16,
  parameter int unsigned FRAME     = 128,
  parameter string       COEF_FILE = kws_pkg::HAMMING_FILE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                in_ready,
  output logic                out_valid,
  output logic signed [W-1:0] out_data,
  input  logic                out_ready
);
  localparam int unsigned RW = $clog2(FRAME);

  logic [15:0]            coef_mem [FRAME];
  logic [RW-1:0]          addr;
  logic signed [W+16:0]   prod;
  logic                   fire;

  initial $readmemh(COEF_FILE, coef_mem);

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign prod     = in_data * $signed({1'b0, coef_mem[addr]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      addr <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_data <= W'(prod >>> 15);
        addr <= (addr == RW'(FRAME - 1)) ? '0 : addr + 1'b1;
      end
    end
  end

endmodule
