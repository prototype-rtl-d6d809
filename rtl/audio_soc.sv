// audio_soc: the custom part of the audio SoC, the keyword-spotting
// accelerator and the audio module, as seen from the bus fabric.
//
// In the SoC a RISC-V processor (with its own memories and interrupt
// controller, not part of this RTL) reaches the accelerator through an AHB
// port and the audio module through an APB port of its bus interface unit.
// A keyword is spotted in four steps, all driven by the processor on
// interrupts: the audio module receives microphone samples from the codec
// over I2S and raises audio_irq; the processor reads them (APB RXDATA) and
// writes them to the accelerator (AHB SAMPLE); after one second of samples
// the accelerator raises kws_irq; the processor reads the keyword and may
// answer through the audio module's TX path to the player.
//
// Interface: the accelerator's AHB-Lite slave port, the audio module's APB
// slave port, the two interrupts and the four I2S pins. One clock.
//
// The two blocks, their buses and the interrupt-driven cooperation follow
// the SoC diagram and its description; the processor, the bus fabric and
// the other peripherals are outside this RTL.
module audio_soc (
  input  logic        clk,
  input  logic        rst_n,
  // AHB-Lite slave: keyword-spotting accelerator
  input  logic        hsel,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  input  logic        hready,
  output logic        hreadyout,
  output logic [31:0] hrdata,
  output logic        hresp,
  output logic        kws_irq,
  // APB slave: audio module
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  output logic        audio_irq,
  // I2S to the codec
  output logic        i2s_bclk,
  output logic        i2s_ws,
  input  logic        i2s_sdin,
  output logic        i2s_sdout
);

  kws_accel u_kws (
    .clk, .rst_n, .hsel, .haddr, .htrans, .hwrite, .hwdata, .hready,
    .hreadyout, .hrdata, .hresp, .irq(kws_irq));

  audio_apb u_audio (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata,
    .prdata, .pready, .pslverr, .irq(audio_irq),
    .i2s_bclk, .i2s_ws, .i2s_sdin, .i2s_sdout);

endmodule
