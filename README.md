# A Q3_K x Q8_K super-block MatMul accelerator for edge LLM inference

Large language models spend almost all of their inference time in matrix multiplications
between a weight matrix and a few activation vectors. On small devices the weights are kept in
*block floating point*: llama.cpp/GGML's `Q3_K` format stores each weight in 3 bits, grouped in
*super-blocks* (SBs) of 256 weights that share scale factors. The activations are quantised the
same way to 8 bits (`Q8_K`). The CPU kernel `MatMul_Q3_K_Q8_K` computes dot products of such
super-blocks.

This RTL builds a streaming accelerator for that kernel, after the design in "Designing
Efficient LLM Accelerators for Edge Devices" (Haris, Saha, Hu, Cano). A host sends weight and
input super-blocks over an AXI-Stream. The accelerator keeps one tile of the weight matrix
(16 rows) and up to 4 input vectors in on-chip buffers. For every (row, vector) pair it computes
the scaled dot product at one 16-value tile per clock, and streams the results back as IEEE
single-precision words.

The publication names the blocks and what each one does. It also gives the super-block sizes.
It does not give any internals, widths, encodings or buffer sizes. Those are this
implementation's own choices. Each one is marked below and in the header comment of the RTL
file it belongs to.

## 1. The super-block dot product

A weight SB holds 256 weights, split into 16 tiles of 16:

* each weight is 3 bits, with values from -4 to 3;
* each tile has a 6-bit scale `s_t`, stored with a bias of 32 (so `s_t - 32` runs from -32 to 31);
* the whole SB has one 16-bit super-scaling factor `d_w`.

That is about 3.4 bits per weight. An input SB holds 256 signed 8-bit inputs and one 16-bit
super-scaling factor `d_x`. The dot product of a weight SB and an input SB is

```
dot = d_w * d_x * sum_{t=0..15} (s_t - 32) * sum_{l=0..15} w[16t+l] * x[16t+l]
```

and one output of the MatMul is the sum of `dot` over the `ksb` SBs of a row (`ksb = row length
/ 256`).

### Q3_K byte layout and how it is unpacked

The hardest part to follow is the weight layout. It is GGML's `block_q3_K` (110 bytes) and is
far from tile-ordered:

| bytes   | field        | content |
|---------|--------------|---------|
| 0-31    | `hmask[32]`  | the high bit of every weight |
| 32-95   | `qs[64]`     | the low two bits of every weight, four per byte |
| 96-107  | `scales[12]` | sixteen 6-bit scales, packed |
| 108-109 | `d`          | `d_w`, IEEE half precision, little-endian |

For weight `i` (tile `i/16`, lane `i%16`):

```
low2  = (qs[32*(i/128) + i%32] >> (2*((i/32)%4))) & 3
hbit  = (hmask[i%32] >> (i/32)) & 1
w[i]  = low2 - (hbit ? 0 : 4)          == 3-bit two's complement {~hbit, low2}
```

The 6-bit scale of tile `t` is split across two places:

```
low4  = t < 8 ? scales[t] & 15 : scales[t-8] >> 4
high2 = (scales[8 + t%4] >> (2*(t/4))) & 3
s_t   = low4 | high2 << 4
```

These closed forms are equivalent to GGML's reference decoder. That decoder walks the block in
two halves of 128 weights, moving a bit mask through `hmask` and a 2-bit shift through `qs`.
The testbench reference model (`tb/tb_q3k_pkg.sv`) is written in that loop form on purpose. This
way the RTL's decode is checked against a second, independently written decoder.

On the stream a weight SB is padded to 112 bytes, which is 28 little-endian 32-bit words.

### Q8_K as used here

The publication gives the input SB a 16-bit super-scaling factor. GGML's own `block_q8_K`
holds a 32-bit float and 16 partial sums. This implementation follows the publication. An
input SB is 256 int8 values followed by a half-precision `d_x`: 258 bytes, padded to 65 words
(64 words of inputs four to a word, then a word with `d_x` in bits 15:0). A host that uses GGML
buffers must convert `d` to half precision and drop the partial sums.

## 2. Programming model

All traffic goes over one 32-bit input stream and one 32-bit output stream. The input stream
carries instruction words (`instr_t`), each followed by its payload:

```
 31   28 27          16 15       8 7        0
+-------+--------------+----------+----------+
|  op   |     rows     |   cols   |   ksb    |
+-------+--------------+----------+----------+
```

| op | name       | fields used      | payload / effect |
|----|------------|------------------|------------------|
| 0  | NOP        | -                | none |
| 1  | LOAD_W     | rows, ksb        | rows x ksb weight SBs (28 words each), row-major |
| 2  | LOAD_X     | cols, ksb        | cols x ksb input SBs (65 words each), column-major |
| 3  | COMPUTE    | rows, cols, ksb  | rows x cols results on the output stream |

COMPUTE returns results grouped by input vector. All rows for column 0 come first, then all
rows for column 1, and so on. This is the layout of GGML's result tensor. Each result is one
single-precision word. `tlast` marks the last word of the instruction. Loaded buffers stay valid,
so several COMPUTEs can reuse them.

Instructions run strictly one after another. While a COMPUTE runs the input stream is held off.
An instruction is dropped, and the sticky `err` output is set, if any of these hold:

* its opcode is unknown;
* it has a zero count;
* its counts exceed the buffers (`rows > W_ROWS`, `cols > X_COLS`, `ksb > K_MAX`).

Once an instruction is dropped, its payload would be read as instructions. So `err` means the
host must reset the accelerator. Input `tlast` is ignored: the instruction counts frame the data.

A layer bigger than the buffers is split up by the host. For each group of 16 weight rows, the
host sends LOAD_W and then COMPUTE. The inputs are loaded once and reused. A row longer than
`K_MAX` SBs would have to be cut into pieces, with the partial sums added on the host. At the
default `K_MAX = 22` this is never needed for TinyLlama (see section 6).

## 3. Block structure

```
            input AXI-Stream                                output AXI-Stream
                  |                                               ^
                  v                                               |
   +-------------+        +---------------------+        +-----------------+
   | data_mapper |<------>|    instr_decoder    |------->|    scheduler    |
   +-------------+        +---------------------+        +-----------------+
       |      |                                             jobs |   ^ SB results
       v      v                                                  v   |
 +---------------+  +--------------+     +---------------------------------------+
 | weight_buffer |  | input_buffer |     |  sbvp:  sb_loader  -->  vector_pu      |
 +---------------+  +--------------+     +---------------------------------------+
        |                  |                      ^            ^
        +------------------+----------------------+------------+
                     tile + SSF reads (one tile pair per clock)
                                                     profiler: event counters
```

* **instr_decoder**: takes instruction words while idle and checks them. For a load it starts
  the data mapper and routes the stream to it. For a compute it starts the scheduler. It then
  waits for that unit's `done`.
* **data_mapper**: turns stream words into buffer words. Weight words are collected in a
  28-word staging register. One cycle after an SB is complete, the whole SB is decoded (section
  1) into 16 tile words, which are written to the weight buffer one per cycle. The next SB
  arrives in the staging register meanwhile. An SB takes at least 28 cycles to arrive and only
  16 to write, so the mapper never drops `tready` while it loads. Input words need no decoding:
  every four words make one input tile word, and the 65th word gives the SSF.
* **weight_buffer / input_buffer**: each is a tile memory plus an SSF memory. Both are simple
  dual-port memories with synchronous reads.
  * Weight tile word: 54 bits (6-bit raw scale and 16 x 3-bit weights).
  * Input tile word: 128 bits.
  * Tile address: `(vector*K_MAX + sb)*16 + tile`. SSF address: `vector*K_MAX + sb`.

  Storing ready-decoded tiles is what lets the SBVP read a complete tile pair every cycle.
* **sbvp**: the super-block vector processor.
  * *sb_loader* takes a job (row, column, ksb). It issues `16*ksb` back-to-back reads to both
    buffers and marks the first and last tile of each SB.
  * *vector_pu* has 16 lanes of 3-bit x 8-bit multipliers feeding an adder tree. It multiplies
    each tile sum by `s_t - 32` and sums the 16 tiles as integers. It then converts that sum to
    single precision and multiplies it by `d_w*d_x`. The product of the two half-precision
    factors is exact in single precision.
* **scheduler**: loops over input columns, and over weight rows inside each column. It sends
  one job per pair to the SBVP and adds up the job's `ksb` per-SB results in single precision.
  Each finished sum goes to a one-word output slot. The next job is issued as soon as the sum
  has moved into the slot. If the slot is still full because the consumer is applying
  back-pressure, the scheduler *holds* the sum and stalls until the slot frees.
* **profiler**: nine 32-bit counters, brought out on the `prof` port (`prof_t`):
  * cycles busy;
  * cycles the vector PU took a tile (divided by busy cycles, this is PE utilisation);
  * stream words in and out;
  * output stall cycles;
  * scheduler hold cycles;
  * tile words written to each buffer (buffer fill);
  * instructions decoded.

  `prof_clear` zeroes them. The publication describes a profiler whose capture points count
  clock cycles and the utilisation of processing elements and buffers. It uses it as a
  simulation and driver tool; here it is a hardware block.

## 4. Timing

| event | cycles |
|-------|--------|
| weight SB load | 28 (one per word; the stream is never stalled) |
| input SB load | 65 |
| one job of `ksb` SBs in the SBVP | 1 to accept, then `16*ksb` reads; first SB result 20 cycles after the accepting cycle, then one every 16 |
| vector PU latency | result 3 cycles after the cycle that presents an SB's last tile |
| job-to-job gap in a COMPUTE | about 5 cycles (result hand-over, slot, re-issue) |

Measured in the end-to-end test:

* a 5 x 1 x 8 COMPUTE (five rows of 2048 values) takes 667 cycles from the instruction word to
  the last result, against 640 for the tiles alone;
* the full-buffer 16 x 4 x 22 COMPUTE takes 22,528 cycles of vector-PU work.

The SBVP is busy for `16*ksb` of every `16*ksb + ~5` cycles.

When a vector is multiplied by a whole layer, tile by tile (see `tb_tinyllama_layers`), each
weight SB costs 44.3 to 44.8 cycles in total, loading included. Token generation in
TinyLlama-1.1B multiplies about 9.7e8 Q3_K weights (3.8e6 SBs) per token. That is about
1.7e8 cycles, or 1.7 s per token if the accelerator runs at 100 MHz. The publication gives no
accelerator clock, so this is an estimate; the publication reports 1.7 s per token for the
whole system.

Loading rather than computing sets the pace when a vector is multiplied by a fresh weight tile
(token generation). A weight SB needs 28 stream cycles but only 16 compute cycles, and loads do
not overlap computes. A wider stream or overlapped load/compute (double-buffered weights)
would be the first thing to change for speed. Neither is in the publication.

## 5. Number formats

* `d_w`, `d_x`: IEEE half precision, subnormals included.
* Per-SB integer sum: exact. It needs 24 bits signed, since `|sum| <= 2^22`.
* Integer to float, `d_w*d_x`, and the final multiply: IEEE single precision. Only the final
  multiply rounds.
* Accumulation over SBs: IEEE single-precision addition with three guard bits.
* Rounding everywhere is truncation (toward zero). Single-precision subnormals flush to zero,
  overflow goes to infinity, and NaN is not handled.

The publication gives no number format beyond "16-bit" scaling factors. These are choices,
made for small logic. The test references use double precision and accept an error of
`1e-5 * sum|per-SB terms|`.

## 6. Sizes and what they hold

| parameter | default | meaning |
|-----------|---------|---------|
| `W_ROWS`  | 16 | weight rows in the weight buffer |
| `X_COLS`  | 4  | input vectors in the input buffer |
| `K_MAX`   | 22 | SBs per row (22 x 256 = 5632 values) |

None of these come from the publication. `K_MAX = 22` is chosen so that the longest row in
TinyLlama-1.1B fits: the FFN down-projection, 5632 wide. The other Q3_K MatMuls have rows of
2048 (8 SBs).

The layer shapes in the table below are the standard TinyLlama configuration, not numbers given
by the publication:

| layer | weight matrix | rows of 16 per layer | SBs per row |
|-------|---------------|---------------------|-------------|
| q, output projection | 2048 x 2048 | 128 | 8 |
| k, v projection | 256 x 2048 | 16 | 8 |
| FFN gate, up | 5632 x 2048 | 352 | 8 |
| FFN down | 2048 x 5632 | 128 | 22 |

At the defaults the buffers take 304 kbit (weights) plus 180 kbit (inputs) of memory, about
10 % of the block RAM of the Zynq-7020 the publication targets.

To change a size, set the parameters on `llm_acc_top`. Address widths follow automatically.
The instruction fields limit `rows` to 4095, `cols` to 255 and `ksb` to 255.

## 7. Departures and additions

Taken from the publication:

* the block list and what each block does: decoder, mapper, weight and input buffers, SBVP
  made of SB loader and vector PU, scheduler, AXI-Stream in and out;
* the direction of the arrows in its block diagram;
* the super-block geometry: 256 values, 16 tiles, 6-bit scales, 3-bit weights, 8-bit inputs,
  16-bit SSFs;
* the profiler's purpose.

Taken from GGML rather than the publication:

* the `block_q3_K` byte layout and decode;
* the scale bias of 32.

This implementation's own:

* the instruction set and encoding;
* the stream width and padding;
* the buffer organisation and sizes;
* 16 lanes and the pipeline;
* loop order and output slot;
* floating-point formats and truncation;
* error handling;
* reset: asynchronous, active low, control state only, buffers not cleared.

Known differences:

* the input SSF is half precision, not GGML's 32-bit float;
* layers of the model in other quantisation types are not handled;
* the host side is not part of the RTL: the CPU, DMA, driver, llama.cpp integration and
  splitting layers into tiles.

## 8. Files and simulation

`rtl/` holds one module or package per file:

* `llm_acc_pkg` (types, constants, float helpers);
* `sdp_ram`;
* `weight_buffer`, `input_buffer`;
* `data_mapper`, `instr_decoder`;
* `sb_loader`, `vector_pu`, `sbvp`;
* `scheduler`, `profiler`;
* the top, `llm_acc_top`.

`tb/` holds a self-checking testbench per module and `tb_q3k_pkg`. That package is the
reference model: it generates random SBs, decodes them GGML-style and computes real-valued dot
products. Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_llm_acc_top` runs the top at its default sizes:

* a full-buffer 16 x 4 x 22 MatMul, with random input gaps and output back-pressure;
* a timed 5 x 1 x 8 MatMul, plus a rerun on the same buffers;
* an invalid instruction.

It checks every result and the profiler counters. It also checks that each mechanism happened
at least once: input gaps, output stalls, scheduler holds, NOP, buffer reuse and the error
path. It runs in a few seconds.

`tb_tinyllama_layers` runs slices of a 2048-wide and of the 5632-wide layer the way a host
would, 16 rows at a time against one vector, and measures the cycles per weight SB.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/llm_acc_pkg.sv tb/tb_q3k_pkg.sv tb/tb_llm_acc_top.sv --top-module tb_llm_acc_top
./obj_dir/Vtb_llm_acc_top
```

Replace `tb_llm_acc_top` with any other `tb_*` to test a single block. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/llm_acc_pkg.sv rtl/<module>.sv`.

Concurrent assertions in the data mapper, SB loader and scheduler check these rules:

* the stream is handed over only to an idle mapper;
* jobs stay within the buffers;
* an output word stays put while it waits for `tready`;
* SBVP results arrive only while a sum is being built.

Lint warnings that remain are unused bits of helper-function variables and the asynchronous
reset being sampled by these assertions.
