// kws_tcu: template classification unit with fixed-diagonal distance.
//
// Dynamic time warping would search every alignment between the input
// sequence and a template. Here the warping path is fixed to the diagonal:
// input frame i is compared only with template frame i, so the distance to
// keyword k is
//   D_k = sum_{i<T} sum_{c<C} | x_i[c] - t_k,i[c] |
// and the recognised keyword is the k with the smallest D_k (lowest index on
// a tie).
//
// The cache collects the C features of one input frame (coefficient counter).
// The address controller then reads frame i (element counter) of every
// template in parallel from the template memory, one word of C features per
// keyword, and a PE array of K rows by C columns forms the K row distances at
// once: each row is a chain of PEs passing a partial sum to the right. The
// row results are added to K distance accumulators. After T frames the
// control logic scans the K distances for the minimum and raises done.
//
// Interface: signed X_W-bit features in (valid/ready, C per frame); template
// write port (one feature per write, addressed by keyword, frame and
// feature); results: done (level, until clr), best keyword, its distance,
// all K distances and the number of frames taken. clr starts a new utterance
// and clears the distances; templates are kept.
// Timing: C cycles to collect a frame, one template read cycle and one
// accumulate cycle per frame, K + 1 cycles for the final comparison.
//
// The controller, cache, control logic, PE array, template memory, address
// controller and counters follow the block diagram, as does the reduction of
// DTW to a fixed diagonal distance; the L1 metric, the array shape (keywords
// by features), the template length T and the widths are this design's.
module kws_tcu #(
  parameter int unsigned X_W    = 8,
  parameter int unsigned C      = 12,
  parameter int unsigned T      = 124,
  parameter int unsigned K      = 8,
  parameter int unsigned DIST_W = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      in_valid,
  input  logic signed [X_W-1:0]     in_data,
  output logic                      in_ready,
  input  logic                      tpl_we,
  input  logic [$clog2(K)-1:0]      tpl_kw,
  input  logic [$clog2(T)-1:0]      tpl_frame,
  input  logic [$clog2(C)-1:0]      tpl_coef,
  input  logic [X_W-1:0]            tpl_data,
  output logic                      done,
  output logic [$clog2(K)-1:0]      best_kw,
  output logic [DIST_W-1:0]         best_dist,
  output logic [K-1:0][DIST_W-1:0]  distances,
  output logic [$clog2(T+1)-1:0]    frames
);
  localparam int unsigned CW = $clog2(C);
  localparam int unsigned KW = $clog2(K);
  localparam int unsigned TW = $clog2(T);
  localparam int unsigned S_W = X_W + 1 + $clog2(C);

  typedef enum logic [2:0] {S_COLLECT, S_READ, S_ACC, S_CMP, S_DONE} state_t;

  state_t                        state;
  logic [C-1:0][X_W-1:0]         cache;
  logic [CW-1:0]                 coef_cnt;
  logic [K-1:0][C-1:0][X_W-1:0]  tpl_row;
  logic [K-1:0][S_W-1:0]         row_dist;
  logic [KW:0]                   cmp_k;

  // Template memory: one bank per keyword, one word of C features per frame.
  for (genvar r = 0; r < int'(K); r++) begin : g_bank
    logic [C-1:0][X_W-1:0] mem [T];
    always_ff @(posedge clk) begin
      if (tpl_we && tpl_kw == KW'(r)) mem[tpl_frame][tpl_coef] <= tpl_data;
      if (state == S_READ) tpl_row[r] <= mem[frames[TW-1:0]];
    end
  end

  // PE array: K rows of C PEs, partial sums flowing left to right.
  for (genvar r = 0; r < int'(K); r++) begin : g_row
    logic [S_W-1:0] chain [C+1];
    assign chain[0] = '0;
    for (genvar cc = 0; cc < int'(C); cc++) begin : g_col
      kws_tcu_pe #(.X_W(X_W), .S_W(S_W)) u_pe (
        .x(cache[cc]), .t(tpl_row[r][cc]),
        .psum_in(chain[cc]), .psum_out(chain[cc+1])
      );
    end
    assign row_dist[r] = chain[C];
  end

  assign in_ready = (state == S_COLLECT);
  assign done     = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT;
      cache <= '0;
      coef_cnt <= '0;
      frames <= '0;
      distances <= '0;
      cmp_k <= '0;
      best_kw <= '0;
      best_dist <= '0;
    end else if (clr) begin
      state <= S_COLLECT;
      coef_cnt <= '0;
      frames <= '0;
      distances <= '0;
      cmp_k <= '0;
      best_kw <= '0;
      best_dist <= '0;
    end else begin
      unique case (state)
        S_COLLECT: if (in_valid) begin
          cache[coef_cnt] <= in_data;
          if (coef_cnt == CW'(C - 1)) begin
            coef_cnt <= '0;
            state <= S_READ;
          end else begin
            coef_cnt <= coef_cnt + 1'b1;
          end
        end
        S_READ: state <= S_ACC;
        S_ACC: begin
          for (int r = 0; r < int'(K); r++) distances[r] <= distances[r] + DIST_W'(row_dist[r]);
          frames <= frames + 1'b1;
          if (frames == ($clog2(T+1))'(T - 1)) begin
            state <= S_CMP;
            cmp_k <= '0;
          end else begin
            state <= S_COLLECT;
          end
        end
        S_CMP: begin
          if (cmp_k == (KW+1)'(K)) begin
            state <= S_DONE;
          end else begin
            if (cmp_k == '0 || distances[cmp_k[KW-1:0]] < best_dist) begin
              best_kw <= cmp_k[KW-1:0];
              best_dist <= distances[cmp_k[KW-1:0]];
            end
            cmp_k <= cmp_k + 1'b1;
          end
        end
        S_DONE: ;
        default: state <= S_COLLECT;
      endcase
    end
  end

endmodule
