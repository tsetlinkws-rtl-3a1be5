# TsetlinKWS in SystemVerilog: a state-driven convolutional Tsetlin machine for keyword spotting

This is the RTL of a low-power keyword-spotting chip. A microphone streams 16 kHz
audio in. About every 16 ms the chip turns the last second of speech into a 64 x 64
binary picture, and a convolutional Tsetlin machine (CTM) reads that picture. The
machine has 12 classes and 120 clauses per class. The chip outputs the 4-bit class
(ten keywords, "silence" and "unknown") together with a done pulse.

The whole design rests on one property of a trained Tsetlin machine: it is
*extremely sparse and fixed*. Each clause is an AND of a few literals. A literal is a
feature bit or its negation. In the model used here only about 15,600 of 1.47 million
possible (clause, literal) pairs are "included". So the accelerator never scans the
model. It stores only the included literals, in a compressed list format (OG-BCSR).
It decodes them one per clock and per decoder unit. For each one it fetches the
*sliding literal data*: the 58 bits that the literal takes across all 58 positions of
the convolution window. It ANDs them into the clause's 58-bit partial result. Work is
proportional to the number of included literals, not to the model size. Every decoded
literal updates 58 windows at once.

## Top level

```
            +---------------- tsetlinkws_top ----------------+
 mclk ----->| feature_extractor                               |
 adc_sdata->|  i2s_master -> pre_emphasis -> async_fifo ->    |--> bclk, lrclk
            |  fft_r2sdf -> swap_unit -> mel_filter ->        |
            |  overlap_unit -> binarizer -> row loader        |
            |                        |  64 rows               |
 sck,cs_n,  |                        v                        |
 mosi ----->| spi_slave -> config_regs    ctm_accelerator     |--> inf_done
            |            \--- model writes --> (feature bank, |--> result[3:0]
            |                model bank, decoder, distributor,|
            |                PE array, summation, argmax)     |
            +-------------------------------------------------+
```

Clocks and reset:
- `mclk` is the 8.192 MHz audio master clock. The I2S bit clock (1.024 MHz) and frame
  clock (16 kHz) are divided from it.
- `clk` is the system clock. Feature extraction and inference both run on it, at
  400 kHz in the original chip.
- The pre-emphasis filter and the FIFO's write side run on the frame clock. The
  dual-clock FIFO is the only crossing into the system clock.
- One asynchronous active-low reset, `rst_n`, serves all domains.

Everything the paper states as a number is a default here: 256-point FFT, 32 Mel
bands, 64 frames, 58 windows, 5 decoder units x 4 matrices, 40 clauses per batch,
3 batches per class, 12 classes, SF threshold 1024. Every value the paper leaves
open is marked in the opening comment of its file. The main ones are listed under
"Departures and open points" below.

## Front end: from audio to a binary feature map

1. **I2S and pre-emphasis.** The 12 most significant bits of each left-channel
   word are kept. The filter is y[n] = x[n] - x[n-1] + (x[n-1] >> 4), a first-order
   high-pass with coefficient 15/16. It uses one register, one shift, one subtractor
   and one adder. The output saturates to 12 bits.
2. **FIFO, 256 x 12 bit.** Gray-coded pointers, first-word fall-through read.
3. **FFT.** A radix-2 single-path delay-feedback pipeline of eight stages,
   decimation in frequency.
   - Each stage has its own word width. Integer bits are 12, 13, 13, 13, 14, 14, 14, 15
     and fractional bits 1, 1, 1, 1, 1, 0, 0, 0, giving a 15-bit output.
   - Products are rounded half-up, then saturated.
   - Twiddles are 12-bit (2.10). They are computed at elaboration by an integer Taylor
     series in `tkws_pkg`, so there is no table file.
   - Subframes do **not** overlap. After each 256-sample subframe the FFT feeds itself
     256 zeros to push the result out of its delay lines. Input is stalled meanwhile
     and the FIFO absorbs the arriving samples. The bins come out in bit-reversed order.
4. **Swap unit.** It computes |Re| + |Im| (no squares), saturated to 15 bits. Bins
   0..127 are written into a 128-word buffer and read back in natural order. The
   Nyquist bin is dropped.
5. **Mel filters.** 32 rectangular filters of unit gain, so there are no multipliers.
   - Filter m covers bins [E[m], E[m+2]), with 34 edges E evenly spaced on the mel
     scale from 0 to 8 kHz (`MEL_EDGE` in `tkws_pkg`).
   - With that layout the even filters tile the spectrum and so do the odd ones. One
     even and one odd accumulator are therefore enough.
   - The results of the last two subframes are kept in a ping-pong buffer.
6. **Overlap unit.** The 50 % frame overlap is applied *after* the filters:
   - MFSC = current + previous subframe.
   - SF (spectral flux) = current - previous.

   This yields one frame per 16 ms subframe.
7. **Binarizer.**
   - SF bit = |SF| > threshold (1024 after reset, settable).
   - MFSC bit = value > running mean of that coefficient over the last 64 frames.
   - The mean is kept without a divider. A threshold bank holds the sum of value >> 6
     over the window. Each update takes two clocks and touches every memory once, so
     all memories can be single-port:
     - clock 1 reads the old sum and the value about to be overwritten;
     - clock 2 writes sum + (new >> 6) - (old >> 6).
   - The 64 x 32 MFSC values sit in eight banks (bank = frame mod 8), so a row of
     64 frames reads out in 8 clocks.
8. **Row loader** (in `feature_extractor`). After a frame is stored, an inference can
   be triggered in two ways:
   - automatically, when `auto_infer` is set and at least `min_frames` frames exist;
   - by request over SPI.

   The 64 rows are then copied into the accelerator's feature bank and the accelerator
   is started. A trigger that comes while the accelerator is busy is dropped and
   counted on `infer_skip`.

Feature rows 0..31 are MFSC coefficients and rows 32..63 SF coefficients. Bit j of a
row is frame j, with frame 0 the oldest.

## The classifier

### Literals and clauses

The convolution kernel spans all 64 rows and 7 frames, so it slides only along time:
64 - 7 + 1 = 58 windows. Each row offers 16 literal columns to a clause:

| column | literal at window w                                      |
|--------|----------------------------------------------------------|
| 0..6   | feature bit (row, w + column)                            |
| 7      | position literal: w > row (thermometer code of the window position) |
| 8..15  | negation of column - 8                                   |

A clause is satisfied if, for at least one window, all its included literals are 1.
A clause with no literals is always satisfied. Class confidence is the sum of the
signed 8-bit weights of the satisfied clauses. The result is the class with the
largest confidence; ties go to the lower class number.

### Compressed model (OG-BCSR)

- Two clauses are merged into one 64 x 16 matrix of include bits. Merging is done
  offline, and the two clauses must not share a literal.
- A batch of 40 clauses is therefore 20 matrices. Matrix `4u + code` belongs to
  decoder unit `u`, and clause slot `8u + 2code + p` is pair member `p` of that
  matrix.
- The 64 rows are cut into 32 blocks of two rows.

Per batch the lists are:

| list          | word                                             | where                                   |
|---------------|--------------------------------------------------|-----------------------------------------|
| block index   | 20 bits per block: matrix m has an included TA in this block | one bank, word (class*3 + round)*32 + block |
| row count     | 6 bits {count of lower row, count of upper row}, 3 bits each (at most 7 per merged row) | one bank per unit, one word per non-empty (block, matrix), in order |
| column/clause | 5 bits {column[3:0], pair member}                | one bank per unit, one word per included TA, upper row first |
| weight        | signed 8 bits                                    | class*120 + round*40 + slot             |

Within a block, a unit's matrices come in increasing `code` order. All lists are read
strictly in sequence, so each bank needs only a pointer, reset when an inference
starts. The testbench package `tb_ctm_model_pkg` contains a complete encoder that can
serve as a reference.

### Decoding and timing

For each class, for each of its 3 batches (rounds), the machine runs these steps:

1. **Set up.** All 2,320 partial-AND (Pand) registers are set to 1, i.e. 40 clauses x 58 windows.
2. **Walk the blocks.** For each block:
   1. Read the block's two feature rows and its block-index word. This happens
      while the previous block is still decoding.
   2. Load the index bits into the five decoder units in the clock in which the
      previous block's last TA issues, and the rows into the distributor's scratch
      pads one clock later, when that last TA has been applied.
   3. Each unit picks its lowest pending matrix with a priority encoder and takes its
      two row counts. It then issues one included TA per clock, taking the next
      column/clause word each time, and moves on to its next matrix without a gap.
   4. For every issued TA, the distributor forms the 58-bit sliding literal data. PE
      column `u` ANDs it into the Pand register selected by the unit, the code and the
      pair bit.
   5. The next block starts only when all five units are done (synchronous
      decompression: the two rows are shared by all units).
3. **Sum.** The 40 clause results are passed serially to the summation unit. It ORs
   the 58 windows of a clause and adds the clause's weight if any window fired.

After the third batch of a class, its confidence goes to the argmax. After class 11
the result is latched and `inf_done` pulses for one clock.

Clock count of one inference, checked exactly by the testbenches:

```
cycles = 12 * ( 3 * ( 3 + 40 + sum over 32 blocks of max(2, max_u N_u(block)) ) + 1 ) + 1
```

`N_u(block)` is the number of included TAs unit `u` has in that block. The
`max_u` term is why the offline scheduler balances matrices across units and rounds.
The floor of 2 clocks per block comes from the one-clock read of the next block's
words. The constant 3 is the batch set-up, the load of block 0 and the drain clock.

For a model like the published one (15.6k TAs, decoding busy about 4.9k clocks after
scheduling), this design needs about:
- 4.9k decoding clocks, plus a few clocks for blocks with fewer than 2 TAs per unit;
- 1.55k batch clocks (36 batches x 43, of which 40 are the serial summation);

which is about **6.5k clocks, or 16.2 ms at 400 kHz**. That is slightly more than the
6,400 clocks of a 16 ms subframe. Whether the published design overlaps the serial
summation with the next batch is not described; this design does not. At exactly
400 kHz this RTL may therefore miss every second subframe and drop the request in
between (`infer_skip`). A clock of about 410 kHz or more keeps up with every subframe.

## Configuration over SPI

SPI mode 0, MSB first, 48-bit write frames `{target[7:0], address[15:0], data[23:0]}`.
The system clock samples SCK, so SCK must be at most clk/4. A frame cut short by
raising CS is ignored.

| target      | address  | data                                            |
|-------------|----------|-------------------------------------------------|
| 0x00 CFG    | 0        | bit 0 feature extraction enable, bit 1 automatic inference (both 0 after reset) |
|             | 1        | SF threshold (1024 after reset)                 |
|             | 2        | frames needed before an automatic inference (64 after reset) |
|             | 3        | any value: request one inference now            |
| 0x01 BI     | word     | 20-bit block-index word                         |
| 0x10 + u    | word     | row-count word of unit u                        |
| 0x20 + u    | word     | column/clause word of unit u                    |
| 0x30 WGT    | clause   | 8-bit weight                                    |

Start-up sequence:
1. Write the model.
2. Write CFG 0 = 3.
3. After 64 frames (about one second) the first result appears, then one at most
   every subframe.

## Departures and open points

These are this design's own choices where the description it follows is silent, and
known differences from the published chip:
- **Latency** (see above): about 6.5k clocks per inference instead of at most 6.4k.
- **FFT framing.** Non-overlapping subframes are flushed with zeros. Rounding,
  saturation and twiddle precision are this design's own.
- **Mel band edges** are computed from the mel formula. The published edges are not
  known.
- **Column 7 of each row** is a position literal (window index > row index). The
  meaning of the 16th column is not documented.
- **Widths of weights (8 bits) and confidences (16 bits)**, the SPI frame, the
  register map and the memory depths are all this design's own.
- **Memory sizes.**
  - Row-count banks: 5 x 2048 words. Column/clause banks: 5 x 4096 words. Together
    with the block index and weights that is about 25 KB, close to the 27.25 KB of
    model SRAM reported.
  - A model fits if no unit needs more than 2048 non-empty (block, matrix) entries or
    4096 TAs.
  - The feature bank holds only the 512-byte map.
- **Not built.**
  - Offline compression, grouping (maximum-weight matching) and scheduling (simulated
    annealing) are software. The testbench encoder keeps clause pairs in their natural
    order and does no balancing.
  - Clock gating and operand isolation are implementation steps.
  - SRAM macros are written as arrays.
  - IO pads are not modelled.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/tkws_pkg.sv tb/tb_ctm_model_pkg.sv tb/tb_tsetlinkws_top.sv \
  --top-module tb_tsetlinkws_top -o sim && obj_dir/sim
```

`tb_ctm_model_pkg.sv` is needed only by `tb_ctm_accelerator` and `tb_tsetlinkws_top`.

| testbench | what it shows |
|-----------|---------------|
| `tb_i2s_master`, `tb_pre_emphasis`, `tb_async_fifo` | clock ratios and sample capture; filter equation with saturation; FIFO order, full/empty, overflow under random clock ratios |
| `tb_fft_r2sdf` | all 256 bins against a floating-point DFT, output order, flush timing |
| `tb_swap_unit`, `tb_mel_filter`, `tb_overlap_unit` | magnitude and reordering; band sums from independently computed mel edges; MFSC/SF and output rate |
| `tb_binarizer` | 80 frames through the 64-frame window; every row against a history-based reference |
| `tb_feature_extractor` | microphone to feature bank at real clock rates: silence gives zero bits, a 1 kHz tone sets its Mel bands, SF marks its onset, skip while busy |
| `tb_spi_slave`, `tb_config_regs`, `tb_model_bank`, `tb_feature_bank` | framing and aborted frames; reset values and writes; every bank word; block words |
| `tb_ogbcsr_decoder`, `tb_distributor`, `tb_pe_array`, `tb_summation`, `tb_argmax` | TA streams and per-block clock counts; literal formation; Pand updates; weighted OR-sum; argmax with ties |
| `tb_ctm_accelerator` | full-size model of about 14k TAs: result, winning confidence and exact clock count over six inferences |
| `tb_tsetlinkws_top` | the whole chip at default sizes, model loaded over SPI, real audio clocks. Checks each result against the reference classifier, each clock count, and that every mechanism occurs (discarded samples, FFT flush stalls, FIFO buffering, empty blocks, matrix switches, dropped requests, SF bits, automatic and requested inference). About one minute of simulation. |

The reference classifier in `tb_ctm_model_pkg` evaluates clauses directly from their
definition (window by window), independently of the compressed format.

## Files

- `rtl/tkws_pkg.sv`: shared constants, Mel edges, twiddle functions, SPI targets,
  the decoded-TA struct.
- `rtl/tsetlinkws_top.sv`: the top level.
- Front end: `feature_extractor`, `i2s_master`, `pre_emphasis`, `async_fifo`,
  `fft_r2sdf` and its stage `fft_sdf_stage`, `swap_unit`, `mel_filter`,
  `overlap_unit`, `binarizer`.
- Classifier: `ctm_accelerator`, `feature_bank`, `model_bank`, `ogbcsr_decoder` and
  its unit `ogbcsr_unit`, `distributor`, `pe_array`, `summation`, `argmax`.
- Set-up: `spi_slave`, `config_regs`.
- `tb/`: the testbenches, the reference model package, and `i2s_mic_model.sv`, a
  behavioural I2S microphone.
