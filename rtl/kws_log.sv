// kws_log: integer base-2 logarithm by counting leading zeros.
//
// out = 32 - lzc(x), i.e. the position of the highest set bit plus one
// (floor(log2 x) + 1 for x > 0, and 0 for x = 0). The leading-zero count is
// a tree: stage 0 has 16 encoders, one per bit pair, giving an all-zero flag
// and a 1-bit count; stages 1 to 4 merge pairs of neighbours (8, 4, 2 and 1
// zero counters) into all-zero flags and counts one bit wider; a subtractor
// forms 32 - lzc.
//
// Interface: valid/ready streams, 32-bit value in, 6-bit value (0..32) out.
// Timing: the tree is combinational, followed by one output register.
//
// The encoder / zero-counter tree with 8, 8, 4, 2, 1 units and the final
// subtraction from 32 follow the block diagram; the 16 encoders are read from
// the two rows of eight encoders drawn in stage 0. The single register stage
// is this design's choice.
module kws_log (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  output logic        in_ready,
  output logic        out_valid,
  output logic [5:0]  out_data,
  input  logic        out_ready
);
  logic       z0 [16];  logic       c0 [16];
  logic       z1 [8];   logic [1:0] c1 [8];
  logic       z2 [4];   logic [2:0] c2 [4];
  logic       z3 [2];   logic [3:0] c3 [2];
  logic       z4;       logic [4:0] c4;
  logic [5:0] lzc;

  always_comb begin
    // Stage 0: bit-pair encoders, pair i covers bits 2i+1..2i.
    for (int i = 0; i < 16; i++) begin
      z0[i] = (in_data[2*i +: 2] == 2'b00);
      c0[i] = !in_data[2*i+1];
    end
    // Stages 1..4: zero counters merge the upper (odd) and lower (even) half.
    for (int i = 0; i < 8; i++) begin
      z1[i] = z0[2*i+1] && z0[2*i];
      c1[i] = z0[2*i+1] ? {1'b1, c0[2*i]} : {1'b0, c0[2*i+1]};
    end
    for (int i = 0; i < 4; i++) begin
      z2[i] = z1[2*i+1] && z1[2*i];
      c2[i] = z1[2*i+1] ? {1'b1, c1[2*i]} : {1'b0, c1[2*i+1]};
    end
    for (int i = 0; i < 2; i++) begin
      z3[i] = z2[2*i+1] && z2[2*i];
      c3[i] = z2[2*i+1] ? {1'b1, c2[2*i]} : {1'b0, c2[2*i+1]};
    end
    z4  = z3[1] && z3[0];
    c4  = z3[1] ? {1'b1, c3[0]} : {1'b0, c3[1]};
    lzc = z4 ? 6'd32 : {1'b0, c4};
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data <= '0;
    end else if (clr) begin
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data <= 6'd32 - lzc;
      end
    end
  end

endmodule
