# A keyword-spotting accelerator and audio interface for a small RISC-V audio SoC

This RTL implements a keyword-spotting (KWS) coprocessor for an always-on IoT
audio chip. It does not run a neural network. It takes the classic lightweight
route instead:

* **MFCC** features computed by a streaming hardware pipeline;
* **template matching** against stored keyword templates, where dynamic time
  warping (DTW) is reduced to a single *fixed diagonal* alignment.

The processor writes one second of audio into the accelerator, one sample per
bus write. The accelerator raises an interrupt when it has found the nearest
keyword. The processor then reads back the winning keyword and the distance to
every template.

Around the accelerator sits an audio module, an APB peripheral that talks to
the codec of the analog front end over I2S. The top module `audio_soc` holds
both, as the SoC's bus fabric sees them: the accelerator on AHB, the audio
module on APB, two interrupts and the four I2S pins. The processor (not part
of this RTL) ties them together in software: on each audio interrupt it moves
the waiting microphone samples from the audio module to the accelerator, and
on the accelerator's interrupt it reads the keyword and can answer through the
audio module's player path.

```
  codec  --I2S-->  audio_apb  --APB-->  processor  --AHB-->  kws_accel
  (mic)            RX FIFO     audio_irq   (software)  kws_irq  FEU + TCU
  (player) <--I2S-- TX FIFO  <--APB--
```

The accelerator has three parts, which match the three columns of its block
diagram:

```
            AHB-Lite                                                   irq
               |                                                        ^
        +------v-------------- host interface -----------------------+--+
        |  FSM IDLE/WRITE/READ, write address map, read address map, |
        |  interrupt control                                          |
        +----+----------------------------------------------------+---+
             | samples                            templates, results|
   +---------v------------------ FEU -------------------+   +--------v------ TCU --------+
   | framing -> pre-emphasis -> Hamming window ->       |   | cache -> PE array (K x C)  |
   | FFT (7 stages + bit-reverse cache) -> |X|^2 ->     |-->| template memory            |
   | Mel filter bank (odd/even MACs) -> log2 (LZC) ->   |   | distance accumulators,     |
   | framing -> DCT (MAC cache)                          |   | minimum search             |
   +----------------------------------------------------+   +----------------------------+
```

## Sizes at a glance

| quantity | value | origin |
|---|---|---|
| FFT size | 128 points, 7 radix-2 stages | design figure |
| sample format | 16-bit two's complement | own choice |
| sample rate assumed for the tables | 8 kHz | own choice |
| frame / shift | 128 / 64 samples (16 ms / 8 ms) | own choice for the shift |
| Mel filters | 20 triangular, over bins 0..64 | own choice |
| log | 32 - leading zeros of a 32-bit value (0..32) | design figure |
| cepstra per frame | 12 (c1..c12), 8-bit signed | own choice |
| keywords | 8 | own choice |
| template length | 124 frames (one second) | derived from the 1-second utterances |
| distance | 24-bit sum of absolute differences | own choice |
| clock | one clock for bus and accelerator | own simplification |
| audio frame | I2S, 16-bit words, 32 bit clocks per sample, microphone in the left channel | own choice |
| audio FIFOs | 16 words each way | own choice |
| audio sample rate | 50 MHz / (64 × CLKDIV), 7.97 kHz after reset | own choice |

The accelerator's sizes are in `rtl/kws_pkg.sv`, the audio module's are its parameters. The coefficient tables in `rtl/*.hex` were
generated for these sizes. If you change a size, you must regenerate the
tables from the formulas given below.

## Streams and handshakes

Every unit of the feature extraction unit (FEU) is a valid/ready stream
stage. A value moves when `valid && ready` is high at a clock edge. Every
stage registers its output, so a stall propagates backwards one stage per
cycle and nothing is lost. Every stage also has a synchronous `clr` input. The
processor drives `clr` through the control register between utterances, to
drop partial frames.

Position within a frame is not carried on the stream. Each stage counts its
own position: the pre-emphasis and windowing units count modulo 128, the Mel
filter counts bins, and the DCT counts elements and coefficients. After a
`clr`, all of these counters agree.

## Feature extraction, stage by stage

### Framing (`kws_framing`)

The first stage is a 256-entry circular buffer with a write counter, a read
counter and a frame base. Frame *f* is the 128 samples starting at 64·*f*. So
each sample is read twice, once in each of two overlapping frames. A sample
is passed on as soon as it has been written, so a frame begins to flow before
it is complete. The bus write to the SAMPLE register is held in wait states
(HREADYOUT low) only when 256 samples are still needed.

The same module is used a second time, between the log unit and the DCT, with
frame = shift = 20. There it is a small FIFO that absorbs the burst of 20 log
values while the slower DCT works.

### Pre-emphasis and window (`kws_preemphasis`, `kws_windowing`)

* Pre-emphasis computes `y[n] = sat16(x[n] - (31·x[n-1] >> 5))`, with `a = 31/32`.
  The delay is cleared at the first sample of every frame.
* The window multiplies by a Q15 Hamming coefficient,
  `w[n] = round(32767·(0.54 − 0.46·cos(2πn/127)))`, and shifts right by 15.

### The 128-point FFT (`kws_fft`, `kws_fft_stage`, `kws_fft_reorder`)

This is the most involved part. The FFT is a radix-2
decimation-in-frequency transform. It is split into seven pipeline stages, one
per radix-2 level. Stage *s* pairs samples `H = 128 >> s` apart. For output
index *j*:

```
j & H == 0 :  y[j] = (x[j] + x[j+H]) >> 1
j & H != 0 :  y[j] = ((x[j-H] - x[j]) >> 1) · W^t,   t = (j mod H) << (s-1),  W = e^(-2πi/128)
```

The three kinds of stage differ only in their twiddle factors:

| stages | H | twiddles | hardware |
|---|---|---|---|
| 1–5 ("general") | 64..4 | any W^t | complex multiplier with a 64-entry Q15 table |
| 6 ("quarter") | 2 | 1 and −i | swap and negate, no multiplier |
| 7 ("last") | 1 | 1 | none |

The twiddle table holds `{c, d}` per entry, with `c = round(32767·cos(2πt/128))`
and `d = round(−32767·sin(2πt/128))`. The product is
`(a+ib)(c+id) >> 15`, truncated.

**Scaling.** Every stage halves its outputs, so the FFT delivers X[k]/128.
Halving means that no value can grow in magnitude through a stage. So the
18-bit internal width (16-bit samples plus two guard bits) never overflows, and
no block-floating-point logic is needed.

**Data control and latency.** Each stage writes its input, in arrival order,
into an input cache of 128 complex words. It emits output *j* as soon as both
of its operands (`j & ~H` and `j | H`) have arrived. A stage therefore starts
after H + 1 inputs, not after a whole frame, and then produces one output per
cycle. It refuses new input between the end of one frame and the end of that
frame's output. Outputs leave the stage in bit-reversed order.

The **result cache** (`kws_fft_reorder`) undoes the bit reversal. Bin *k* is
read from entry `bitrev(k)` as soon as that entry has been written. Bin 0 of a
frame leaves 144 cycles after the frame's first sample enters the FFT.

The diagram draws several butterfly PEs in each stage. This implementation
uses one butterfly per stage, because the stream carries one sample per cycle.

### Power spectrum (`kws_power_spectrum`)

The power is `re² + im²`, with a register before and after the arithmetic.
The output is 32 bits and saturating. With the 1/128 scaling, the power of a
full-scale input stays below 2³¹.

### Mel filter bank (`kws_mel_filter`): using the sparsity

A triangular filter bank is mostly zeros. Adjacent filters overlap by half, so
every FFT bin falls in at most two filters: one with an even index and one
with an odd index. The bank therefore needs only **two multiply-accumulate
units**, one even and one odd, instead of 20.

Per bin *b* (0..64), a table holds three values:

* `w_even[b]`: the weight of the even filter covering *b*;
* `w_odd[b]`: the weight of the odd filter covering *b*;
* a **boundary flag**: set where the oldest open filter has just ended.

A boundary counter *f* names the next filter to finish. At a flagged bin, the
output multiplexer sends out the MAC of *f*'s parity, scaled by 2⁻⁸. That MAC
then restarts with the current bin's product, which belongs to filter *f + 2*.
Bins 65..127, the mirrored half of the spectrum, are counted and ignored.

The table in `kws_mel.hex` holds one entry per bin, `{boundary, w_odd[7:0], w_even[7:0]}`,
with 255 standing for 1.0. It is built from 22 points equally spaced on the
Mel scale, `mel = 2595·log10(1 + f/700)`, from 0 to 4 kHz. Each point is
mapped to bin `floor(129·f/8000)`, and each must be at least one bin above the
previous one. The resulting points are:
`0 1 2 3 4 6 8 10 12 14 16 19 22 25 28 32 36 41 46 51 57 64`.
Filter *f* (0..19) rises from point *f* to point *f+1* and falls to point *f+2*.
The boundary flags are set at points 2..21.

### Log (`kws_log`)

The log unit computes an integer base-2 logarithm: `32 − lzc(x)`, the bit
length of *x*. The leading-zero count is a tree:

1. 16 bit-pair encoders, each giving an all-zero flag and a 1-bit count;
2. four levels of zero counters (8, 4, 2, 1) that merge neighbours into wider
   counts.

The result is a 6-bit value from 0 to 32. The whole tree is combinational and
is followed by one register.

### DCT (`kws_dct`): element-driven MAC cache

The DCT computes cepstra c1..c12:

```
c_k = sat8((Σ_n C[k][n]·x[n]) >> 6),   C[k][n] = round(127·cos(π(k+1)(n+0.5)/20))
```

The loop order is turned around. The element counter follows the arriving
log values. For each element, the coefficient counter steps through all 12
coefficients and adds `C[k][n]·x[n]` into entry *k* of a 12-entry MAC cache.
The input vector is therefore never stored. After the 20th element, the cache
is scaled and sent out. One vector takes (12 + 1)·20 + 12 = 272 cycles. c0 is
not computed.

## Template classification unit (`kws_tcu`)

Full DTW fills an alignment matrix per template. The TCU keeps only its
diagonal. Input frame *i* is compared with template frame *i*:

```
D_k = Σ_{i<124} Σ_{c<12} |x_i[c] − t_{k,i}[c]|,     keyword = argmin_k D_k (lowest index on a tie)
```

The TCU works frame by frame:

1. The cache collects the 12 features of one frame.
2. The address controller reads frame *i* of all 8 templates at once. There is
   one template memory bank per keyword, with one 96-bit word per frame.
3. A PE array of 8 rows by 12 columns computes the 8 row distances in one
   cycle. Each PE adds `|x − t|` to the partial sum from its left neighbour
   (`kws_tcu_pe`).
4. The row results are added to 8 distance accumulators.

After 124 frames, a sequential scan over the 8 keywords finds the minimum.
Then `done` is raised and stays high until the next `clr`. Templates survive
`clr`. The processor writes the templates one feature at a time; they come
from offline training.

## Host interface and register map (`kws_host_if`)

The host interface is an AHB-Lite slave. Its FSM has three states:

* IDLE: no data phase is pending;
* WRITE: the data phase of a captured write;
* READ: the data phase of a captured read.

All registers are 32-bit words.

| address | access | function |
|---|---|---|
| 0x0000 CTRL | W | bit0 = 1: clear the accelerator (new utterance); bit1: interrupt enable. |
| 0x0000 CTRL | R | bit1: interrupt enable |
| 0x0004 STATUS | R | bit0 done, bit1 interrupt pending, [31:16] frames classified |
| 0x0008 SAMPLE | W | [15:0] next audio sample. The write waits while the frame buffer is full. |
| 0x000C IRQ | W | bit0 = 1: clear the pending interrupt |
| 0x0010 RESULT | R | index of the nearest keyword |
| 0x0014 BEST | R | its distance |
| 0x0080 + 4k | R | distance to keyword k |
| 0x10000 + (k·2¹³ + i·2⁶ + c·2²) | W | [7:0] template feature c of frame i of keyword k |

The pending interrupt is set on the rising edge of `done`. `irq` is high while
the interrupt is both pending and enabled. HRESP is always OKAY, and unmapped
addresses read as zero.

A typical run:

1. Write the templates once.
2. Write `CTRL = 3`.
3. Write 8000 samples to SAMPLE.
4. Wait for `irq`.
5. Read RESULT and the distances.
6. Write `IRQ = 1`.

## The audio module (`audio_apb`) and the SoC top (`audio_soc`)

The audio module is the SoC master of an I2S link to the codec. A clock
generator (`audio_i2s_clkgen`) divides the system clock into the bit clock:
CLKDIV system clocks per half bit period, 32 bit clocks per sample period,
so one sample every 64 × CLKDIV clocks. The reset value 98 gives 7.97 kHz at
50 MHz, close to the 8 kHz the accelerator expects.

The frame is standard I2S with 16-bit words:

* word select low = left channel, high = right channel;
* word select changes on a falling bit-clock edge, one bit before the MSB;
* data changes on falling edges and is sampled on rising edges, MSB first.

The receiver (`audio_i2s_rx`) keeps the left-channel word, the microphone,
and ignores the right channel. The codec's data pin passes two synchronising
flip-flops first, so the sampling rising edge must come at least two clocks
after the falling edge: CLKDIV values below 2 are stored as 2. The
transmitter (`audio_i2s_tx`) takes one word per sample period from the TX
FIFO and sends it on both channels; an empty FIFO sends silence and sets the
underrun flag. A stopped bit clock rests low with word select high, so the
first falling edge after enabling starts a clean left word.

Both directions have a 16-word first-word-fall-through FIFO (`audio_fifo`).
A word that arrives at a full RX FIFO is lost and sets the overflow flag.

| address | access | function |
|---|---|---|
| 0x00 CTRL | RW | bit0 RX enable, bit1 TX enable, bit2 RX interrupt enable; writing bit3 = 1 empties both FIFOs |
| 0x04 STATUS | R | [4:0] RX level, [12:8] TX level, bit16 RX overflow, bit17 TX underrun; write 1 to a flag bit to clear it |
| 0x08 RXDATA | R | oldest microphone sample, sign-extended; the read removes it |
| 0x0C TXDATA | W | [15:0] sample to play |
| 0x10 CLKDIV | RW | [15:0] half bit period in system clocks, at least 2 |

`audio_irq` is high while the RX FIFO holds a sample and the RX interrupt is
enabled. The APB port never waits and never signals an error.

`audio_soc` only instantiates `kws_accel` and `audio_apb` side by side; all
data between them goes through the processor. A keyword run from the
processor's side:

1. Write the accelerator's templates once; write its `CTRL = 3`.
2. Write audio `CLKDIV`, then audio `CTRL = 5` (record, interrupt on).
3. On each `audio_irq`: read STATUS, then read RXDATA that many times and
   write each value to the accelerator's SAMPLE register.
4. After 8000 samples write audio `CTRL = 8` (stop, empty FIFOs) and wait for
   `kws_irq`; read RESULT and the distances; write `IRQ = 1`.
5. To answer, write samples to TXDATA and set audio `CTRL = 2`.

## Timing

* At the real-time rate, the processor writes a sample every 50 cycles (8 kHz
  at a 400 kHz accelerator clock). The longest time from a frame's last sample
  to its last cepstrum is then **381 cycles** (0.95 ms at 400 kHz). The
  published target for this kind of design is a frame latency of 2.98 ms,
  which is 1192 cycles at 400 kHz. The end-to-end testbench checks this bound.
* Back to back at bus speed, the FEU is the bottleneck. The first FFT stage
  needs about 128 + 66 cycles per frame, and the DCT 272. The bus then sees
  wait states on SAMPLE writes, and one second of audio takes 34,228 cycles
  from clear to interrupt in the end-to-end test.
* Through the audio module, a sample arrives every 64 × CLKDIV clocks. At the
  smallest divider (128 clocks per sample) one second of audio takes about
  1.03 million cycles; the processor's moves of each sample take about 10 of
  them.
* One utterance needs 124 × (12 + 2) cycles of TCU work plus 9 cycles for the
  minimum search. These cycles overlap with feature extraction.

## How far the RTL follows the design it is based on

These parts follow the design's block diagram:

* the three units (host interface, FEU, TCU);
* the order of the FEU stages, and the framing buffer that appears twice;
* the 128-point FFT as seven stages (five general, a quarter stage and a last
  stage) with a data-reverse result cache;
* the odd/even Mel filter with boundary and coefficient memories and an output
  multiplexer;
* the leading-zero-count log with 8/8/4/2/1 units and the final `32 −`;
* the DCT with element and coefficient counters and a MAC cache;
* the reduction of DTW to a fixed diagonal distance, computed by a PE array
  with a template memory;
* the IDLE/WRITE/READ host FSM with address maps and interrupt control;
* the AHB attachment.

The following are this design's own choices, because the source gives no
details:

* the sample rate, frame shift, filter count, cepstrum count, keyword count and
  template length;
* all number formats and scalings;
* the valid/ready handshakes and the early start of each FFT stage;
* the L1 metric and the tie rule;
* the register map;
* everything inside the audio module beyond "an I2S receiver and transmitter
  on APB that drive the analog front end": the frame format, FIFOs, registers,
  interrupt rule and clock divider;
* that the processor, not a direct path, moves samples from the audio module
  to the accelerator;
* the use of one clock. The original design runs the accelerator at 400 kHz
  and the SoC at 50 MHz, and does not describe the crossing between them.

The FFT uses one butterfly per stage where the diagram draws several.

The pre-emphasis unit sits after framing, as in the diagram, and so filters
each frame separately.

Several parts of the surrounding SoC are not included:

* the RISC-V core (a Nuclei E203) and its tightly coupled memories;
* the interrupt controller;
* the ICB/AHB/APB bus fabric;
* GPIO, UART and I2C;
* the on-chip SRAM;
* the off-chip analog front end (the codec).

These are either reused IP or described too thinly to rebuild. The ports of
`audio_soc` (AHB-Lite slave, APB slave, two interrupts, I2S pins) are the
connection to them.

## Files

* `rtl/kws_pkg.sv`: sizes and table file names.
* `rtl/audio_soc.sv`: the top, accelerator plus audio module.
* `rtl/kws_accel.sv`: the accelerator (AHB-Lite slave and `irq`).
* `rtl/audio_apb.sv`: the audio module, with `audio_i2s_clkgen`,
  `audio_i2s_rx`, `audio_i2s_tx` and `audio_fifo`.
* `rtl/kws_host_if.sv`, `rtl/kws_feu.sv`, `rtl/kws_tcu.sv` (with `kws_tcu_pe.sv`): the three units.
* FEU stages: `kws_framing`, `kws_preemphasis`, `kws_windowing`, `kws_fft` (with
  `kws_fft_stage`, `kws_fft_reorder`), `kws_power_spectrum`, `kws_mel_filter`,
  `kws_log`, `kws_dct`.
* `rtl/*.hex`: the Hamming, twiddle, Mel and DCT tables. They are read with
  `$readmemh` by paths relative to the repository root.
* `tb/kws_ref_pkg.sv`: a frame-at-a-time reference model of the FEU
  arithmetic. It recomputes every table from its formula, so the hex files
  are checked too.
* `tb/i2s_codec_model.sv`: a behavioural I2S codec for the audio benches. It
  sends queued microphone words in the left channel (their complement in the
  right one) and collects the words it receives.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.

## Simulating

Run from the repository root, so that the `.hex` paths resolve:

```
verilator --binary --timing -y rtl -y tb rtl/kws_pkg.sv tb/kws_ref_pkg.sv \
          tb/tb_audio_soc.sv --top-module tb_audio_soc -Mdir obj
./obj/Vtb_audio_soc
```

Replace `tb_audio_soc` with any other testbench name. The testbenches are:

* `tb_audio_soc`: the whole top at its default sizes, with the testbench as
  the processor and the codec model on the I2S pins. It writes all
  templates, records one second of a synthetic word through I2S at 128
  clocks per sample, moves every sample to the accelerator on audio
  interrupts, and checks every sample, the keyword, and all distances
  against the reference model. It then plays 16 words back and checks what
  the codec hears. It counts audio interrupts, samples, frames, Mel
  boundaries, log outputs and keyword interrupts. It takes about 15 seconds.
* `tb_kws_accel`: the end-to-end test, at the default sizes, with nothing
  scaled down. It writes all templates over AHB. It runs one utterance at the
  real-time rate and one back to back. Results must match distances computed
  from the reference model, bit for bit. It also checks the frame latency, and
  counts wait states, interrupts, clears, frames, Mel boundaries and log
  outputs. It takes about 10 seconds.
* `tb_kws_feu`: six frames of a tone mixture, compared with the reference
  model.
* `tb_audio_apb`, `tb_audio_i2s_rx`, `tb_audio_i2s_tx`: the audio module
  and its I2S halves against the codec model, including overflow, underrun,
  interrupt masking and the sample period.
* The unit benches drive random data with random back-pressure. Those for the
  FFT stage, the FFT and the DCT also check their cycle counts.

The testbenches use only two-state constructs and `$urandom`.
