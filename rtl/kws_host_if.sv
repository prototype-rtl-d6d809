// kws_host_if: AHB-Lite slave through which the processor drives the
// keyword-spotting accelerator.
//
// A three-state FSM follows the AHB address/data pipeline: IDLE (no data
// phase pending), WRITE and READ (data phase of a captured write or read).
// The write address map turns writes into control pulses, audio samples and
// template writes; the read address map selects status and results; the
// interrupt controller latches the end of a classification and raises irq
// while it is enabled.
//
// Address map (byte addresses, 32-bit accesses):
//   0x0000 CTRL    W: bit0 = 1 clears the accelerator for a new utterance,
//                     bit1 = interrupt enable.   R: bit1 = interrupt enable
//   0x0004 STATUS  R: bit0 done, bit1 interrupt pending, [31:16] frames taken
//   0x0008 SAMPLE  W: [15:0] next audio sample. The data phase is extended
//                     (HREADYOUT low) while the frame buffer is full.
//   0x000C IRQ     W: bit0 = 1 clears the pending interrupt
//   0x0010 RESULT  R: index of the nearest keyword
//   0x0014 BEST    R: its distance
//   0x0080 + 4k    R: distance to keyword k
//   0x10000 | kw << (2+CB+FB) | frame << (2+CB) | coef << 2
//                  W: [7:0] template feature, CB/FB = bits of coef/frame index
// Unmapped addresses read as 0 and ignore writes; HRESP is always OKAY.
//
// Timing: zero-wait-state except SAMPLE writes that meet a full buffer.
//
// The FSM states (IDLE, WRITE, READ), the write and read address maps and the
// interrupt control are those of the block diagram, and the AHB attachment is
// from the SoC diagram; the register map itself is this design's.
module kws_host_if #(
  parameter int unsigned K      = 8,
  parameter int unsigned T      = 124,
  parameter int unsigned C      = 12,
  parameter int unsigned DIST_W = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // AHB-Lite slave
  input  logic                      hsel,
  input  logic [31:0]               haddr,
  input  logic [1:0]                htrans,
  input  logic                      hwrite,
  input  logic [31:0]               hwdata,
  input  logic                      hready,
  output logic                      hreadyout,
  output logic [31:0]               hrdata,
  output logic                      hresp,
  output logic                      irq,
  // accelerator side
  output logic                      clr,
  output logic                      smp_valid,
  output logic [15:0]               smp_data,
  input  logic                      smp_ready,
  output logic                      tpl_we,
  output logic [$clog2(K)-1:0]      tpl_kw,
  output logic [$clog2(T)-1:0]      tpl_frame,
  output logic [$clog2(C)-1:0]      tpl_coef,
  output logic [7:0]                tpl_data,
  input  logic                      done,
  input  logic [$clog2(K)-1:0]      best_kw,
  input  logic [DIST_W-1:0]         best_dist,
  input  logic [K-1:0][DIST_W-1:0]  distances,
  input  logic [$clog2(T+1)-1:0]    frames
);
  localparam int unsigned CB = $clog2(C);
  localparam int unsigned FB = $clog2(T);
  localparam int unsigned KB = $clog2(K);

  localparam logic [15:0] A_CTRL   = 16'h0000;
  localparam logic [15:0] A_STATUS = 16'h0004;
  localparam logic [15:0] A_SAMPLE = 16'h0008;
  localparam logic [15:0] A_IRQ    = 16'h000C;
  localparam logic [15:0] A_RESULT = 16'h0010;
  localparam logic [15:0] A_BEST   = 16'h0014;
  localparam logic [15:0] A_DIST   = 16'h0080;

  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_READ} state_t;

  state_t      state;
  logic [16:0] addr_q;
  logic        irq_en, pending, done_q;
  logic        wr_reg, is_tpl, is_dist, start;
  logic [31:0] rdata;

  initial begin
    assert (2 + CB + FB + KB <= 16) else $error("template address fields exceed 16 bits");
  end

  assign start   = hsel && htrans[1] && hready;
  assign is_tpl  = addr_q[16];
  assign is_dist = !is_tpl && (addr_q[15:0] >= A_DIST) && (addr_q[15:0] < A_DIST + 16'(4 * K));

  // Data phase.
  assign smp_valid = (state == S_WRITE) && !is_tpl && (addr_q[15:0] == A_SAMPLE);
  assign smp_data  = hwdata[15:0];
  assign hreadyout = smp_valid ? smp_ready : 1'b1;
  assign hresp     = 1'b0;
  assign wr_reg    = (state == S_WRITE) && !is_tpl;

  // Write address map.
  assign clr       = wr_reg && (addr_q[15:0] == A_CTRL) && hwdata[0];
  assign tpl_we    = (state == S_WRITE) && is_tpl;
  assign tpl_coef  = addr_q[2 +: CB];
  assign tpl_frame = addr_q[2 + CB +: FB];
  assign tpl_kw    = addr_q[2 + CB + FB +: KB];
  assign tpl_data  = hwdata[7:0];

  // Read address map.
  always_comb begin
    rdata = '0;
    if (!is_tpl) begin
      unique case (addr_q[15:0])
        A_CTRL:   rdata = {30'd0, irq_en, 1'b0};
        A_STATUS: rdata = {16'(frames), 14'd0, pending, done};
        A_RESULT: rdata = 32'(best_kw);
        A_BEST:   rdata = 32'(best_dist);
        default:  if (is_dist) rdata = 32'(distances[KB'((addr_q[15:0] - A_DIST) >> 2)]);
      endcase
    end
  end
  assign hrdata = (state == S_READ) ? rdata : '0;
  assign irq    = pending && irq_en;

  // Address phase capture: IDLE / WRITE / READ.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      addr_q <= '0;
    end else if (hreadyout) begin
      if (start) begin
        state <= hwrite ? S_WRITE : S_READ;
        addr_q <= haddr[16:0];
      end else begin
        state <= S_IDLE;
      end
    end
  end

  // Interrupt control.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_en <= 1'b0;
      pending <= 1'b0;
      done_q <= 1'b0;
    end else begin
      done_q <= done;
      if (wr_reg && addr_q[15:0] == A_CTRL) irq_en <= hwdata[1];
      if (done && !done_q) pending <= 1'b1;
      else if (wr_reg && addr_q[15:0] == A_IRQ && hwdata[0]) pending <= 1'b0;
    end
  end

  // A sample offered to the frame buffer stays offered until taken.
  a_smp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    smp_valid && !smp_ready |=> smp_valid && $stable(smp_data));

endmodule
