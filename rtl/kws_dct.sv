// kws_dct: discrete cosine transform of the log-Mel vector into cepstra.
//
//   c_k = sat8( (sum_n C[k][n] * x[n]) >>> 6 ),  k = 0..K-1,
//   C[k][n] = round(127 cos(pi (k+1)(n+0.5)/M)),
// i.e. cepstral coefficients 1..K (coefficient 0, the frame energy, is left
// out). The computation is element-driven: when log-Mel element x[n] arrives
// (element counter n), the coefficient counter steps k through 0..K-1 and
// each step adds C[k][n] * x[n] to entry k of the MAC cache. The input vector
// is never stored; after the last element the cache holds all K sums, which
// are scaled, saturated and sent out in order.
//
// Interface: M unsigned X_W-bit elements per vector in (valid/ready),
// K signed Y_W-bit cepstra out (valid/ready). clr restarts a vector.
// Timing: K cycles per element (in_ready is high one cycle in K + 1), then
// K output cycles: (K + 1) M + K cycles per vector when never stalled.
//
// The element/coefficient counters, address controller, coefficient memory,
// MAC cache and scale follow the block diagram; the cepstra kept, the
// coefficient format and the scaling are this design's choices.
module kws_dct #(
  parameter int unsigned X_W      = 6,
  parameter int unsigned Y_W      = 8,
  parameter int unsigned M        = 20,
  parameter int unsigned K        = 12,
  parameter string       DCT_FILE = kws_pkg::DCT_FILE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  in_valid,
  input  logic [X_W-1:0]        in_data,
  output logic                  in_ready,
  output logic                  out_valid,
  output logic signed [Y_W-1:0] out_data,
  input  logic                  out_ready
);
  localparam int unsigned NW = $clog2(M);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned AW = X_W + 8 + $clog2(M) + 1;
  localparam int unsigned SHIFT = 6;

  typedef enum logic [1:0] {S_WAIT, S_MAC, S_OUT} state_t;

  logic signed [7:0]    coef_mem [M*K];
  logic signed [AW-1:0] cache [K];
  state_t               state;
  logic [NW-1:0]        elem;
  logic [KW-1:0]        k;
  logic [X_W-1:0]       x;
  logic signed [7:0]    c;
  logic signed [AW-1:0] sum, scaled;

  initial $readmemh(DCT_FILE, coef_mem);

  // Address controller: coefficient C[k][elem].
  assign c      = coef_mem[$clog2(M*K)'(k) * $clog2(M*K)'(M) + $clog2(M*K)'(elem)];
  always_comb begin
    sum = AW'($signed({1'b0, x})) * AW'(c);
    if (elem != '0) sum = sum + cache[k[$clog2(K)-1:0]];
  end
  assign scaled = cache[k[$clog2(K)-1:0]] >>> SHIFT;

  assign in_ready = (state == S_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_WAIT;
      elem <= '0;
      k <= '0;
      x <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
      for (int i = 0; i < int'(K); i++) cache[i] <= '0;
    end else if (clr) begin
      state <= S_WAIT;
      elem <= '0;
      k <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_WAIT: if (in_valid) begin
          x <= in_data;
          k <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          cache[k[$clog2(K)-1:0]] <= sum;
          if (k == KW'(K - 1)) begin
            k <= '0;
            if (elem == NW'(M - 1)) begin
              elem <= '0;
              state <= S_OUT;
            end else begin
              elem <= elem + 1'b1;
              state <= S_WAIT;
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        S_OUT: begin
          if (!out_valid || out_ready) begin
            if (k == KW'(K)) begin
              k <= '0;
              state <= S_WAIT;
            end else begin
              out_valid <= 1'b1;
              if (scaled > AW'(2**(Y_W-1) - 1))   out_data <= Y_W'(2**(Y_W-1) - 1);
              else if (scaled < -AW'(2**(Y_W-1))) out_data <= Y_W'(-(2**(Y_W-1)));
              else                                out_data <= scaled[Y_W-1:0];
              k <= k + 1'b1;
            end
          end
        end
        default: state <= S_WAIT;
      endcase
    end
  end

endmodule
