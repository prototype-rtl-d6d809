// audio_apb: the SoC's audio module, an APB slave that drives the codec of
// the analog front end over I2S.
//
// An I2S master (clock generator, receiver, transmitter) exchanges 16-bit
// samples with the codec: the microphone word arrives in the left channel
// and is queued in the RX FIFO; words written by the processor to the TX
// FIFO are played on both channels. The processor moves each microphone
// sample on to the keyword-spotting accelerator; the module interrupts it
// while the RX FIFO holds data.
//
// Registers (APB, 32-bit, byte addresses):
//   0x00 CTRL    RW bit0 RX enable, bit1 TX enable, bit2 RX interrupt enable;
//                W  bit3 = 1 empties both FIFOs (reads as 0)
//   0x04 STATUS  R  [4:0] RX level, [12:8] TX level, bit16 RX overflow,
//                   bit17 TX underrun (both sticky; write 1 to clear)
//   0x08 RXDATA  R  oldest microphone sample (sign-extended), removes it
//   0x0C TXDATA  W  [15:0] sample to play
//   0x10 CLKDIV  RW [15:0] half bit-clock period in system clocks; values
//                   below 2 are stored as 2, since the synchronised codec
//                   data needs two clocks before the sampling edge;
//                   reset 98: 50 MHz / (2 * 98 * 32) = 7.97 kHz sample rate
// Unmapped addresses read 0; PREADY is always high, PSLVERR always low.
//
// Pins: i2s_bclk, i2s_ws (outputs, SoC is master), i2s_sdin (from codec,
// synchronised by two flip-flops), i2s_sdout (to codec).
// Timing: APB zero-wait-state; one sample per 64 * CLKDIV system clocks.
//
// The module and its I2S RX/TX are named in the SoC diagram and tasked with
// driving the analog front end for speech input and output; the register
// map, FIFOs, I2S format and interrupt rule are this design's choices.
module audio_apb #(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter logic [15:0] DIV_RESET  = 16'd98
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  output logic        irq,
  output logic        i2s_bclk,
  output logic        i2s_ws,
  input  logic        i2s_sdin,
  output logic        i2s_sdout
);
  localparam int unsigned LW = $clog2(FIFO_DEPTH) + 1;

  logic        rx_en, tx_en, rx_irq_en;
  logic [15:0] div;
  logic        ovf, unf;
  logic        wr, rd, fifo_clr;
  logic [1:0]  sd_sync;
  logic        rise, fall;
  logic [5:0]  tx_slot, rx_slot;
  logic        rx_v;
  logic [15:0] rx_word, rx_head, tx_head;
  logic        rx_empty, rx_full, tx_empty, tx_full, tx_take, tx_unf;
  logic [LW-1:0] rx_level, tx_level;

  assign wr       = psel && penable && pwrite;
  assign rd       = psel && penable && !pwrite;
  assign pready   = 1'b1;
  assign pslverr  = 1'b0;
  assign fifo_clr = wr && paddr == 12'h000 && pwdata[3];
  assign irq      = rx_irq_en && !rx_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sd_sync <= '0;
    else        sd_sync <= {sd_sync[0], i2s_sdin};
  end

  audio_i2s_clkgen u_clkgen (
    .clk, .rst_n, .en(rx_en || tx_en), .div,
    .bclk(i2s_bclk), .ws(i2s_ws), .rise, .fall, .tx_slot, .rx_slot);

  audio_i2s_rx u_rx (
    .clk, .rst_n, .en(rx_en), .sd(sd_sync[1]), .bclk_rise(rise), .slot(rx_slot),
    .sample_valid(rx_v), .sample(rx_word));

  audio_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .clk, .rst_n, .clr(fifo_clr), .wr_en(rx_v), .wr_data(rx_word),
    .rd_en(rd && paddr == 12'h008), .rd_data(rx_head),
    .empty(rx_empty), .full(rx_full), .level(rx_level));

  audio_fifo #(.W(16), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk, .rst_n, .clr(fifo_clr), .wr_en(wr && paddr == 12'h00C), .wr_data(pwdata[15:0]),
    .rd_en(tx_take), .rd_data(tx_head),
    .empty(tx_empty), .full(tx_full), .level(tx_level));

  audio_i2s_tx u_tx (
    .clk, .rst_n, .en(tx_en), .bclk_fall(fall), .slot(tx_slot),
    .have_word(!tx_empty), .word(tx_head), .take(tx_take), .underrun(tx_unf),
    .sd(i2s_sdout));

  // Registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_en <= 1'b0;
      tx_en <= 1'b0;
      rx_irq_en <= 1'b0;
      div <= DIV_RESET;
      ovf <= 1'b0;
      unf <= 1'b0;
    end else begin
      if (wr && paddr == 12'h000) {rx_irq_en, tx_en, rx_en} <= pwdata[2:0];
      if (wr && paddr == 12'h010) div <= (pwdata[15:0] < 16'd2) ? 16'd2 : pwdata[15:0];
      if (rx_v && rx_full) ovf <= 1'b1;
      else if (wr && paddr == 12'h004 && pwdata[16]) ovf <= 1'b0;
      if (tx_unf) unf <= 1'b1;
      else if (wr && paddr == 12'h004 && pwdata[17]) unf <= 1'b0;
    end
  end

  always_comb begin
    prdata = '0;
    if (rd) begin
      unique case (paddr)
        12'h000: prdata = {29'd0, rx_irq_en, tx_en, rx_en};
        12'h004: prdata = {14'd0, unf, ovf, 3'd0, 5'(tx_level), 3'd0, 5'(rx_level)};
        12'h008: prdata = {{16{rx_head[15]}}, rx_head};
        12'h010: prdata = {16'd0, div};
        default: prdata = '0;
      endcase
    end
  end

  // APB: the access phase follows a setup phase with the same selection.
  a_apb_setup: assert property (@(posedge clk) disable iff (!rst_n)
    psel && !penable |=> psel && penable);

endmodule
