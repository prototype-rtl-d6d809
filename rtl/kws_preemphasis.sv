// kws_preemphasis: first-order high-pass y[n] = x[n] - a * x[n-1].
//
// The coefficient is a = MULT / 2^SCALE, formed by a multiplier with a fixed
// multiplication factor followed by an arithmetic right shift (scale), as in
// the block diagram (delay, multiplier, scale, subtractor). The delay is
// cleared at the first sample of every FRAME-sample frame, so each frame is
// filtered on its own, and the result saturates to W bits.
//
// Interface: valid/ready stream in and out; clr restarts the frame position.
// Timing: one sample per cycle, one register stage.
//
// The filter structure follows the diagram; a = 31/32 (about 0.97), the
// per-frame restart and the saturation are this design's choices.
module kws_preemphasis #(
  parameter int unsigned W     = 16,
  parameter int unsigned FRAME = 128,
  parameter int unsigned MULT  = 31,
  parameter int unsigned SCALE = 5
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
  localparam int unsigned PW = W + 8;  // product width: MULT fits 8 bits

  logic [RW-1:0]       pos;
  logic signed [W-1:0] prev;
  logic signed [PW-1:0] prod, diff;
  logic signed [W-1:0] sat;
  logic                fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  always_comb begin
    prod = (PW'(prev) * $signed({1'b0, 7'(MULT)})) >>> SCALE;
    if (pos == '0) prod = '0;
    diff = PW'(in_data) - prod;
    if (diff > PW'(2**(W-1) - 1))       sat = W'(2**(W-1) - 1);
    else if (diff < -PW'(2**(W-1)))     sat = W'(-(2**(W-1)));
    else                                sat = diff[W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos <= '0;
      prev <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      pos <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_data <= sat;
        prev <= in_data;
        pos <= (pos == RW'(FRAME - 1)) ? '0 : pos + 1'b1;
      end
    end
  end

endmodule
