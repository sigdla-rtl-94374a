# SigDLA in SystemVerilog: a deep-learning accelerator that also does signal processing

Small IoT chips often have to filter or transform a sensor signal (FFT, FIR, DCT) and then
run a neural network on the result. A deep-learning accelerator (DLA) has plenty of
multipliers, but it only takes regular tensor work: dot products over words streamed in
lock-step. Signal-processing kernels fit that shape too, as long as their operands are
rearranged first. An FFT butterfly, for example, is a short dot product once `pr, pi, qr, qi`
sit side by side in one word and the coefficients `1, ±wr, ±wi` sit in another.

SigDLA puts the rearranging into hardware. A **programmable data shuffling fabric** sits
beside the DLA's on-chip buffer. It reads a few buffer words, builds a new word nibble by
nibble, pads chosen elements with constants and writes the word back. The ordinary
sequence controller then streams it into the computing array like any other operand. The
second change is a **variable-bitwidth computing array**. It is built from 4-bit
multipliers and takes 4, 8 or 16-bit data and weights, set independently. That covers
quantised networks (4 or 8 bits) and sensor data (up to 16 bits) on the same hardware.

This repository holds synthesizable SystemVerilog for the accelerator, from the 4-bit
multiplier cell up to the top level. It also has a self-checking testbench for every unit
and end-to-end testbenches that run deep-learning layers, FIR filters and a radix-2 FFT on
the full-size design. The SigDLA paper describes the architecture and several of its units
in detail. It leaves the DLA side (instruction encoding, sequencing, DMA) to the DLA it
builds on. Those parts are written here in the simplest form that does the job, and each
such choice is marked below and in the header comment of its file.

## Block structure

```
 host CPU ──inst──► global controller ──► (instruction FIFO, 16 x 64 bit)
                     │ ctrl-bitwidth ─────────────────────────────┐
                     │ rd-buf / wr-buf / ctrl-shuffling / ctrl-padding
                     ▼                                            ▼
   ┌──────────── shuffling fabric ────────────┐        computing array
   │ BCIF (16-word buffer) → DSU → DPU → BCIF │        8 PEs x 16 mul4
   └──────────────▲───────────────┬───────────┘              ▲      │
                  │               │                          │      ▼
            on-chip buffer (144 KB, 18432 x 64 bit) ──► sequence     accumulator
                  ▲   16 KB signal region at word 16384      controller     │
                  │                                                         ▼
   memory ◄──ext_*── DMA engine ◄───────────────────────── results (off or on chip)
   controller
```

| file | unit |
|---|---|
| `rtl/sigdla_pkg.sv` | sizes, bitwidth codes, opcodes, per-multiplier mapping record |
| `rtl/sigdla_top.sv` | the accelerator |
| `rtl/sigdla_global_ctrl.sv` | instruction FIFO, decode, in-order issue, bitwidth register |
| `rtl/sigdla_onchip_mem.sv` | 144 KB buffer with DMA, fabric, activation and 8-word weight ports |
| `rtl/sigdla_shuffle_fabric.sv` | BCIF + DSU + DPU |
| `rtl/sigdla_bcif.sv`, `sigdla_dsu.sv`, `sigdla_dpu.sv` | the three fabric stages |
| `rtl/sigdla_seq_ctrl.sv` | streams operand words into the array |
| `rtl/sigdla_compute_array.sv`, `sigdla_pe.sv` | 8 PEs with shared activation |
| `rtl/sigdla_bitwidth_ctrl.sv`, `sigdla_input_map.sv`, `sigdla_mul4.sv`, `sigdla_shifter.sv`, `sigdla_adder_tree.sv` | inside a PE |
| `rtl/sigdla_accumulator.sv` | one 48-bit accumulator per PE |
| `rtl/sigdla_dma.sv` | off-chip load/store and result write-out |

The host CPU, the memory controller and the off-chip DRAM are outside the accelerator. The
top level brings out the instruction port (`inst_valid/inst_ready/inst`), a
request/response port to the memory controller (`ext_*`), `busy`, and a sticky `bad_op`
flag. The testbenches include a behavioural model of the memory side
(`tb/sigdla_ext_mem_model.sv`), which inserts random grant delays.

## The variable-bitwidth computing array

This is the part that needs the most care. Every PE has sixteen 4-bit multipliers. Each
cycle it gets one 64-bit activation word (shared by all eight PEs) and its own 64-bit
weight word (one convolution kernel per PE). It computes a dot product along the input
channels: all sixteen products go into one sum. The paper gives this structure:

- a bitwidth controller;
- input-mapping multiplexers;
- the multipliers;
- a configurable shifter whose largest shift is 24;
- an adder tree.

The code below fills in the numbering.

**Element pairs and multiplier groups.** A `w`-bit element has `n = w/4` nibbles. With
`na` nibbles per activation element and `nw` per weight element, one element pair needs
`g = na·nw` partial products. So a word pair carries `16/g` element pairs per cycle, taken
from the low end of both words:

| data x weight | pairs per cycle | multipliers per pair | shifts in one group |
|---|---|---|---|
| 4 x 4 | 16 | 1 | 0 |
| 8 x 4 | 8 | 2 | 0, 4 |
| 8 x 8 | 4 | 4 | 0, 4, 4, 8 |
| 16 x 8 | 2 | 8 | 0 … 20 |
| 16 x 16 | 1 | 16 | 0 … 24 |

Multiplier `m` serves pair `k = m / g`. It reads activation nibble `i = (m % g) % na` of
element `k` and weight nibble `j = (m % g) / na`, and its product is shifted left by
`4·(i + j)`. Element `k` of a word with `w`-bit elements occupies bits `[w·k +: w]`. Upper
words, or parts of words, that a mode does not consume are ignored. For example, 8 x 8
uses only the low 32 bits of each word.

**Signed operands.** Elements are two's complement, because the FFT needs negative
coefficients. The top nibble of an element is therefore signed and the other nibbles are
unsigned. The bitwidth controller sends a sign flag with each nibble. `sigdla_mul4` sign-
or zero-extends both nibbles to 5 bits and forms a 10-bit signed product. Summing the
shifted partial products then gives the exact signed product of the whole elements.

**Data path and widths.** The path runs as follows:

1. `sigdla_bitwidth_ctrl` turns the two 2-bit codes into one record per multiplier: two
   nibble selects, two sign flags and a shift code.
2. `sigdla_input_map` has two 16:1 nibble multiplexers per multiplier.
3. `sigdla_shifter` picks one of seven fixed taps per product (0, 4, … 24).
4. `sigdla_adder_tree` is a balanced tree summing 16 values of 36 bits.

The largest sum is 16 products of 16 x 16 bits, which fits in 36 bits. Everything up to
the partial sum is combinational; the PE registers `psum` once. `sigdla_accumulator` holds
one 48-bit sum per PE over as many steps as an operation lasts.

**Bitwidth codes.** `ctrl-bitwidth` carries the data code in bits [31:16] and the weight
code in bits [15:0]. Code 1 is 8 bits. This comes from the paper's worked example, where
`0x10001` precedes an operation on bytes. Codes 0 and 2 (4 and 16 bits) are this design's
choice, and code 3 behaves as 16 bits. After reset both widths are 8 bits.

## The shuffling fabric

A shuffle is a short program of shuffling instructions, ended by `wr-buf`:

| instruction | payload fields | effect |
|---|---|---|
| `rd-buf` | bank-start[14:8], bank-offset[7:4], length[3:0] | append `length+1` words from signal-region word `16·bank-start + bank-offset` to the 16-word buffer |
| `ctrl-shuffling` | finish-flag[12], unit-num[11:8], sel-code[7:4], split-code[3:0] | shuffling unit `unit-num` will take nibble `split-code` of buffer word `sel-code` |
| `ctrl-padding` | padding-position[31:16], padding-value[15:0] | elements whose position bit is set are replaced by the value |
| `wr-buf` | bank-start[10:4], bank-offset[3:0] | run DSU and DPU on the buffer and write the new word to `16·bank-start + bank-offset` |

Addresses are relative to the 16 KB signal region (words 16384 to 18431). The field
positions are taken from the paper's worked example:

- `rd-buf 0xe11` reads words e1 and e2;
- `wr-buf 0xff` writes word ff.

Widths beyond the printed digits, the 16-word bank and the `length+1` count are this
design's reading of that example. The example itself is `tb/sigdla_fig6_pkg.sv`:

1. Four words `…0a09`, `…1413`, `…2625`, `…302f` are fetched.
2. Sixteen `ctrl-shuffling` entries gather one 16-bit lane from each, giving
   `302f_2625_1413_0a09`.
3. `ctrl-padding 0x10010` at 8 bits gives `302f_2625_1413_0a10`.

It runs in the DSU, fabric and top-level testbenches.

**BCIF** (`sigdla_bcif`) holds the 16-word buffer and the read and write control. Reads
stream one word per cycle. The fill pointer carries on across several `rd-buf`s, so one
shuffle can gather words from anywhere in the region. It returns to slot 0 after each
`wr-buf`.

**DSU** (`sigdla_dsu`) has sixteen identical units. Unit `u`'s first multiplexer picks a
buffer word and registers it as 16 nibbles. Its second multiplexer puts one of those
nibbles at nibble `u` of the output register. That is two register stages. Entries persist
until rewritten, so a repeated pattern needs no reprogramming. `finish-flag` on a
`ctrl-shuffling` marks the configuration complete. An assertion checks that no shuffle
starts without it.

**DPU** (`sigdla_dpu`) also has two register stages. At data width `w`, a 64-bit word
holds `64/w` elements, and bit `e` of padding-position selects element `e`: 16, 8 or 4
valid bits. A padded element takes the low `w` bits of padding-value. The paper's text
states it the other way round ("16-bit, 8-bit, and 4-bit, in order" for 4, 8 and 16-bit
data). The paper's figure and worked example feed each element from the low bits, and the
figure is followed here.

A `wr-buf` takes 6 cycles from issue to the write: start, 2 in the DSU, 2 in the DPU,
then the write. The rewritten word is ordinary buffer data from then on, which is why the
computing array needs no knowledge of shuffling.

## Control: global controller, sequence controller, DMA

The paper reuses these from its base DLA and does not describe them. What follows is
therefore this design's own, kept minimal.

**Instructions** are 64 bits, `{opcode[31:0], payload[31:0]}`. The host pushes them into a
16-entry FIFO. The global controller issues them strictly in order. An instruction issues
only when the fabric, the sequence controller and the DMA are all idle, so the buffer's
ports never conflict. An unknown opcode is dropped and raises `bad_op`.

| opcode | name | payload |
|---|---|---|
| 0 | nop | – |
| 1 | ctrl-bitwidth | data code [31:16], weight code [15:0] |
| 2–5 | rd-buf, wr-buf, ctrl-shuffling, ctrl-padding | see above |
| 6 | seq-act | activation base word |
| 7 | seq-wgt | weight base word |
| 8 | seq-out | result address; bit 31 set = on-chip word [14:0] |
| 9 | seq-run | steps [15:0] |
| 10, 11 | dma-ext, dma-int | off-chip / on-chip base address |
| 12, 13 | dma-load, dma-store | word count [15:0] |

**Sequence controller.** `seq-run` with `S` steps reads, at step `s`:

- activation word `act+s`;
- the eight weight words `wgt+8s … wgt+8s+7`, one per PE, through the buffer's 8-word
  weight port.

This is one step per cycle. Each PE therefore computes the dot product of `S` word pairs.
The accumulator restarts on the first step and reports after the last. The DMA then writes
the eight 48-bit results, sign-extended to 64 bits, to the result address. They go off chip
or, with bit 31 set, back into the buffer. The on-chip path is what lets an FFT feed a CNN
without an off-chip round trip, as the paper requires. The paper does not say how results
get back on chip, so this mechanism is this design's.

**DMA.** The DMA keeps one off-chip request outstanding at a time. A request is held until
`ext_gnt`, and read data comes back on `ext_rvalid`.

## Mapping signal processing onto the array

Three complete mappings are in the testbenches. The paper gives the principle for each.
The exact layouts below are this design's.

**Radix-2 FFT** (`tb/tb_sigdla_fft.sv`). Each butterfly `p' = p + Wq, q' = p − Wq` is one
step of a `seq-run`:

- The activation word holds the 8-bit operands `[pr, pi, qr, qi]`.
- PEs 0–3 hold `[16,0,wr,−wi]`, `[16,0,−wr,wi]`, `[0,16,wi,wr]` and `[0,16,−wi,−wr]`. The
  twiddles are fixed point, with 16 = 1.0.
- The results are `16·Re p'`, `16·Re q'`, `16·Im p'` and `16·Im q'`.

For every butterfly, the shuffling fabric gathers `p` and `q` from wherever the previous
stage left them. The next stage reads nibbles 1–2 of each 48-bit result, which divides by
16 and brings the value back to 8 bits. The four factor words per twiddle are built by the
same fabric from a compact table `[wr, wi, −wr, −wi]`, and the padding unit inserts the
constant 16.

An 8-point and a 128-point transform run fully on chip and match a bit-exact fixed-point
model. The 8-point result is within 0.8 LSB of a floating-point DFT. The 128-point FFT
takes about 34,000 cycles including twiddle preparation.

The 16-bit complex format runs at 16x16 bits. The array then takes one element pair per
step, so the changes are:

- Each butterfly output is a 4-step dot product over four activation words, each holding
  one operand.
- The twiddles use 4096 = 1.0.
- The next stage takes nibbles 3–6 of each result.

The 128-point transform then takes about 74,000 cycles. Its result is within 21 LSB of the
exact DFT, an error that comes from the truncation at each stage.

After each transform, the testbench follows the FFT-then-CNN flow:

1. The fabric packs the spectrum eight 8-bit values to a word.
2. `ctrl-bitwidth` switches the array to 8-bit data and 4-bit weights.
3. A layer of eight kernels runs on the packed spectrum.

None of this data leaves the chip.

**2D-DCT** (`tb/tb_sigdla_dct.sv`). An 8x8 block is transformed as `Z = C·X·Cᵀ` in two
passes at 8x8 bits, with `round(128·C)` as the tap words of both passes:

- Pass 1 uses one `seq-run` per row of `X`. Its results stay on chip.
- Pass 2 uses one `seq-run` per column. The fabric first builds each column's activation
  words from eight different pass-1 result words, taking nibbles 2–3 (divide by 256). This
  is a transpose done by shuffling.

Each block takes about 1100 cycles. The results match a bit-exact model and are within
4 LSB of a floating-point DCT.

**FIR** (`tb/tb_sigdla_fir.sv`). Eight outputs `y[m0..m0+7]` come from one `seq-run`:

- The samples are the shared activation stream, packed 16, 4 or 1 per word at 4, 8 or
  16 bits.
- PE `k` holds the taps arranged for output `m0+k`, as banded words loaded once.

The tests cover 256 samples with 20, 40 and 80 taps and 200 samples with 8 taps, each at
all three widths, and every output is checked. With 80 taps the whole job takes 1897,
3307 and 10010 cycles at 4, 8 and 16 bits.

**Deep-learning layers.** `tb/tb_sigdla_top.sv` checks multi-step dot products for eight
kernels at 4x4, 8x4, 8x8 and 16x16. `tb/tb_sigdla_conv.sv` runs a real 3x3 convolution,
the building block of the CNN benchmarks:

- an 8x8 feature map with 16 channels and eight kernels, giving 6x6x8 outputs;
- each output pixel's window gathered into consecutive buffer words by three DMA loads;
- one `seq-run` of `9·16/E` steps per output pixel, where `E` is the number of channels
  per word.

The layer takes 4135, 6840 and 12228 cycles at 4x4, 8x4 and 8x8.

**How the speed-ups compare.** The paper reports that 8x8 runs 3.15x (128-point FFT),
3.97x (2D-DCT) and 3.99x (200-sample 8-tap FIR) faster than 16x16. In this RTL, the
200-sample FIR takes 1397 cycles at 8x8 against 3180 at 16x16, 2.3x. The 128-point FFT
takes about 34,000 cycles against about 74,000, 2.2x. Both counts include loading the data
and coefficients. Here the controller issues one instruction at a time, and that fixed cost per
instruction does not shrink with the data width. Treat these as functional cycle counts,
not as a performance model of the paper's DLA.

## Capacity

The buffer is 144 KB: 18432 words of 64 bits. The top 16 KB (words 16384 and up) is the
signal region that the shuffling instructions address. For the sizes the paper evaluates:

- A 1024-point 16-bit complex FFT needs 4 KB of samples and about 10 KB of twiddles, which
  fits the 16 KB region. The FFT layout used in the testbench keeps an 8-word result block
  per butterfly, however, which limits on-chip transforms to 128 points at this region
  size. Larger transforms would first pack the results with extra shuffles.
- FIR filters of the evaluated sizes need only a few KB.
- Of the networks, UltraNet's 2.07·10⁵ weights fit at 4 bits (about 104 KB). Tiny-VGGNet's
  1.15·10⁶ do not fit at any width, and must be streamed per layer through the DMA.

## Where this RTL departs from the paper, and what it leaves out

- **DLA side.** The opcodes, the sequence controller's addressing, the DMA's commands and
  port protocol, the accumulator width and the FIFO depth are this design's. The paper's
  DLA is a version of NVDLA whose convolution pipeline (convolution buffer, pooling, etc.)
  is not described and is not modelled. A layer here is a series of dot products over
  buffer words. Arranging convolution windows into consecutive words is left to the
  instruction program, e.g. by DMA gathers as in `tb_sigdla_conv`.
- **Array timing.** The paper calls the array "serial". Here all sixteen multipliers work
  in one cycle, and the arrangement follows the paper's figure. Narrow modes consume more
  element pairs per cycle, so the speed-up from narrower data comes from packing, not from
  fewer passes.
- **Data widths.** Only 4, 8 and 16 bits are supported. The 12-bit sensor width the text
  mentions would be carried as 16 bits.
- **Padding value.** The padding value is programmable. The paper speaks of padding with
  "1"; here any value fits, e.g. 16 for 1.0 in the FFT's fixed point. Padding-value width
  follows the figure, as explained above.
- **wr-buf target and data type.** `wr-buf` writes to the address it names. The text says
  reorganised data goes back to "its original location", and the worked example writes to
  a new word, which is what is implemented. The text also says the write logic specifies
  "the data type being written back". No field for that is printed, so the data bitwidth
  register is used and wr-buf carries no type.
- **Arbitration.** Strict in-order issue: shuffling and array work never overlap. The
  paper does not say whether they may.
- **Memory.** The memory is a flip-flop array with one-cycle reads, not SRAM macros.
- **Results.** Results leave the accumulator as full 48-bit values. Requantising to the
  next layer's width happens by choosing nibbles in a shuffle, as the FFT testbench shows.
  There is no dedicated requantiser because the paper describes none.
- **Not modelled.** The host CPU, memory controller and DRAM are outside; the off-chip
  bandwidth (1600 MB/s in the paper's evaluation) is not modelled. There are no power or
  area models.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/sigdla_pkg.sv tb/sigdla_tb_pkg.sv tb/sigdla_fig6_pkg.sv rtl/*.sv \
  tb/sigdla_ext_mem_model.sv tb/tb_sigdla_fft.sv --top-module tb_sigdla_fft
./obj_dir/Vtb_sigdla_fft
```

Pass the package files first, as above. The unit testbenches are `tb/tb_<module>.sv`. The
end-to-end ones, all on the full-size design with default parameters, are:

- `tb_sigdla_top`: shuffling example, layers at four bitwidth pairs, bad opcode, and counts
  of back-pressure, shuffles, padding, width switches, accumulation, DMA traffic and
  off-chip stalls;
- `tb_sigdla_fft`;
- `tb_sigdla_fir`;
- `tb_sigdla_dct`;
- `tb_sigdla_conv`.

Each runs in well under a minute. The simulator is two-state, so the testbenches reset or
write everything they read.

To change the design:

- Sizes live in `sigdla_pkg` (`N_PE`, `MEM_DEPTH`, `SP_BASE`, `ACC_W`). The FIFO depth is
  the `IBUF_DEPTH` parameter of `sigdla_global_ctrl`.
- Opcodes live in the `opcode_e` enum.
- The nibble mapping is computed in one place, `sigdla_bitwidth_ctrl`. The input map and
  the shifter follow it.
