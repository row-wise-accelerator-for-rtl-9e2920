# Row-wise vision-transformer accelerator

Vision transformers spend almost all of their arithmetic in three kinds of
layer: the 4x4 stride-4 patch-embedding convolution, fully connected
(1x1) layers, and the Q·Kᵀ / score·V products of windowed multi-head
attention. This accelerator runs all three on one array. Each one is
broken down into the same primitive, a **4-element dot product computed
by one PE row**. The array has 12 PE blocks. Each block has 7 rows of 4
multiply-accumulate units. A block's 4 weights are broadcast down all 7
rows, and every row gets its own 4 inputs. Per cycle the array therefore
produces 7 outputs × 12 blocks of partial sums, using 336 MACs. At
600 MHz that is 336 × 2 × 600 M = 403.2 GOPS. The numbers 7, 4 and 12 fit
the shapes vision transformers use: feature maps whose sides are
multiples of 7 (224×224 input), channel counts that are multiples of 96
(and 96 = 2 × 48 = 2 × 12 × 4), and 7×7 attention windows.

This SystemVerilog follows the architecture of H.-Y. Wang and T.-S. Chang,
"Row-wise Accelerator for Vision Transformer" (IEEE AICAS 2022). The
paper gives the array, the buffer sizes, the way each layer is mapped and
the block diagram. It does not give control, interfaces, number formats
or the insides of its post-processing units. Those parts are this
design's own, and each file's header says which is which.

## Block diagram

```
 memory controller side (not built, see "Not included")
        │  data bus: bus_we/target/bank/addr/wdata, bus_re/raddr -> bus_rvalid/rdata
        ▼
   data_bus ──────────────┬───────────────────────┬──────────────────────┐
        │                 │                       │                      │
 input_sram          weight_sram (set 0)     weight_sram (set 1)          │
 48 banks x 224 x 56b  12 banks x 768 x 32b   12 banks x 768 x 32b        │
        │ 48 x (7x8b)     └──── 12 x (4x8b), set chosen by cmd.wsel       │
        ▼                        ▼                                        │
 pe_block 0..11   (7 rows x 4 MACs, weights broadcast down the rows)      │
        ▼                                                                 │
 accumulator 0..11 (Reg -> + -> Reg, feedback: sums n_k cycles)           │
        ▼                                                                 │
 adder_tree        (sums the blocks chosen by cmd.blk_mask, per row)      │
        ▼ requant: sat8(sum >>> cmd.shift)                                │
 output_sram  1024 x (7x8b)  ◄──► layernorm / softmax (in place)  ─────────┘
        ▲
 row_scheduler drives the SRAM addresses and the accumulate/write tags
```

`vit_accel_top` wires these together. `vit_pkg` holds the sizes, the
command struct and the requantisation function.

## How the layers become row dot products

This is the core of the design. One pass of the array (`OP_MATMUL`) runs
the loop below. One input word is read from every input bank and one
weight word from every weight bank each cycle:

```
for oc in 0 .. n_oc-1          output channel (or query row)
  for g in 0 .. n_g-1          group of 7 outputs, one per PE row
    for k in 0 .. n_k-1        input chunk, summed in the accumulators
      input  address = in_base  + g*n_k  + k      (same in all 48 banks)
      weight address = w_base   + oc*n_k + k      (same in all 12 banks)
    result word      = out_base + g*n_oc + oc     (7 lanes = 7 PE rows)
```

The output-channel-outer order is the one the paper gives. Input bank `b`
feeds PE block `b/4`, MAC column `b%4`. Lane `r` of a 56-bit input word
goes to PE row `r`. Weight bank `k` gives PE block `k` its 4 weights. So
each (cycle, block, row) computes `Σc w[k][c] · in[4k+c][r]`, and the
adder tree sums over the blocks. What a layer computes depends only on
how the host lays its data out in the buffers:

**Fully connected, C input channels (C a multiple of 48).** `n_k = C/48`.
Within chunk `k`, block `blk` column `c` handles channel `48k + 4·blk + c`.
Input bank `b`, word `g·n_k + k`, lane `r` = X[token 7g+r][channel 48k+b].
Weight bank `blk`, word `oc·n_k + k`, byte `c` = W[oc][48k + 4·blk + c].
With 96 channels this is 2 cycles per 7 outputs. In cycle 1 block 0 holds
w₀,₀..w₀,₃ and channels 0..3 of tokens 0..6. In cycle 2 it holds
w₀,₄₈..w₀,₅₁ and channels 48..51.

**Patch-embedding convolution, 4×4×3 kernel, stride 4.** The 48 kernel
weights fill the array exactly. `n_k = 1`, all 12 blocks.
Block `4·ch + ky` takes kernel row `ky` of input channel `ch`, and MAC
column `kx` takes kernel column `kx`. Row `p` computes output pixel `p` of
a run of 7 neighbouring outputs. Input bank `(4·ch+ky)·4 + kx`, word g,
lane p = img[ch][4·oy+ky][4·(7·gx+p)+kx], where g enumerates (oy, gx).
Each cycle consumes a 28×4×3 patch of the image and yields 7 outputs of
one output channel. A 224×224 image has 3136 outputs per channel, so it
takes 448 cycles per channel. The 224-word input banks hold half of that,
so the image is processed in two tiles.

**Attention scores Q·Kᵀ, head dimension 32, 7×7 window.** Q is treated as
the weight: query row q is split over 8 blocks × 4 columns (weight bank
`blk`, word q, byte c = Q[q][4·blk+c]). Keys are the inputs, 7 keys
(one per PE row) × 8 blocks per group (input bank b < 32, word g, lane r =
K[7g+r][b]). `n_k = 1`, `n_g = 7`, `blk_mask = 0x0FF`. Each query row takes
7 cycles for its 49 scores. Blocks 8..11 are idle, and the adder tree
ignores them whatever they hold. Because attention is only a few percent
of a Swin-T's work, this costs little. The score·V product is a further
pass of the same kind, with the layout chosen by the host.

Cycle cost of a pass: `n_oc · n_g · n_k` issue cycles at full use of the
array, plus 6 cycles from command to `done`. The 6 are one accept cycle
and 5 pipeline stages: SRAM read, PE register, accumulator input
register, accumulation register and adder tree.

Array utilisation within a pass is 100 %, apart from the 6-cycle tail.
For the 96-channel convolution tile (21,504 cycles) the tail is 0.03 %.
For a 3072→768 FC tile of 12 channels × 3 groups × 64 words
(2,304 cycles) it is 0.3 %. Q·Kᵀ uses 8 of the 12 blocks. Whether the
whole model keeps the array this busy depends on how fast the buffers
are refilled between passes. The second weight set can be loaded during
a pass. The input buffer has a single set, and an FC pass reads every
input word once per output channel, so a new input tile is written after
the pass. The one-word-per-cycle bus here is this design's choice; the
bandwidth to off-chip memory is not specified.

## Result path and number formats

* Weights and activations are signed 8-bit. A PE row sum is 18 bits, and
  accumulators and the adder tree are 32 bits. That is enough for 12
  blocks × 64 chunks (3072 input channels) of worst-case products.
* Before the result buffer, each row sum is requantised to
  `sat8(sum >>> cmd.shift)`. The shift is per command. The paper says
  only that activations are 8-bit, so this choice is the design's own.
  Bias, residual add and GELU are not in the datapath (see
  "Not included").
* Result words use the input-word format: 7 lanes, one per token. Channel
  `oc` of token group `g` sits at `out_base + g·n_oc + oc`.

**LayerNorm** (`OP_LAYERNORM`, base, stride, len). One buffer word holds
one channel of 7 tokens, so the unit normalises 7 tokens in parallel over
`len` channels. It makes two read passes. With one shared sequential
divider and square root it computes, per lane:
`mean = trunc(16·Σx/len)`,
`var = max(⌊256·Σx²/len⌋ − mean², 0) + 1`,
`std = ⌊√var⌋` and `rcp = ⌊2²⁰/std⌋`.
It then writes `y = sat8(((16x − mean)·rcp) >>> 15)` in place. The result
has 5 fraction bits: y/32 ≈ (x−μ)/σ. There is no γ/β; fold them into the
next layer's weights. Cost: 2·len reads plus about 7 × 140 cycles of
divisions and square roots.

**Softmax** (`OP_SOFTMAX`, base, stride, len). It takes the max over all
`len`×7 scores, then `e = 2^−t` with `t = ((max−x)·369) >> 8`. Here
369/256 ≈ log₂e, and t has 4 fraction bits. The exponent is evaluated as
`LUT[t mod 16] >> (t div 16)`, with `LUT[i] = round(32768·2^(−i/16))`.
The unit then forms `S = Σe` and `rcp = ⌊2³⁰/S⌋`, and writes
`p = min((e·rcp) >> 23, 127)`. So p/128 is the probability. Scores are
read as signed values with 4 fraction bits. Apply the 1/√d_k scale
through the requantisation shift of the Q·Kᵀ pass. For one query row of a
7×7 window, use base = out_base + q, stride = n_oc, len = 7.

## Interfaces and timing

`vit_accel_top` ports:

| port | dir | meaning |
|---|---|---|
| `cmd_valid`, `cmd` (`cmd_t`), `cmd_ready` | in/in/out | one command at a time; accepted when both valid and ready |
| `busy`, `done` | out | command running; one-cycle pulse when its results are in the result buffer |
| `bus_we`, `bus_target`, `bus_bank`, `bus_addr`, `bus_wdata[55:0]` | in | write one word to the input buffer (bank 0..47), weight set 0 or weight set 1 (bank 0..11, low 32 bits) |
| `bus_re`, `bus_raddr` → `bus_rvalid`, `bus_rdata` | in → out | read a result word, data 2 cycles later |

`cmd_t` fields: `op`, `n_k`, `n_g`, `n_oc`, `blk_mask`, `shift`, `wsel`,
`in_base`, `w_base`, `out_base`, `len`, `stride`. Bus writes are allowed
at any time. While a pass runs, the host loads the weight set it is not
reading (ping-pong), and it can refill input words the pass has already
consumed. Result reads are allowed while no LayerNorm or Softmax command
runs; an assertion flags a violation. Reads may run during a matmul pass,
one word per cycle. A pass that writes more words than the result buffer
holds (the 96-channel convolution writes 21,504) is drained this way. The
host reads each word a few cycles after it is written, and the buffer
address simply wraps. Word i of a pass (i = oc·n_g + g) is written at the
end of cycle 6 + i after the command is accepted. The SRAMs are 1-read/1-write
arrays with 1-cycle read latency. Synthesis maps them to memory macros.

## Sizes

| item | value | origin |
|---|---|---|
| PE blocks × rows × MACs | 12 × 7 × 4 = 336 | paper |
| input buffer | 48 banks × 224 words × 56 bits = 75.3 KB | bank count, word width and 1.57 KB/bank from the paper; depth derived |
| weight buffers | 2 sets × 12 banks × 768 words × 32 bits = 73.7 KB | bank count, word width and 3.07 KB/bank from the paper; depth derived |
| total input + weight | 149.0 KB | matches the paper's 149 KB |
| result buffer | 1024 words × 56 bits = 7.2 KB | this design's choice |
| accumulator width | 32 bits | this design's choice |

## What follows the paper and what does not

From the paper:
* the PE block structure (weight broadcast per column, inputs per row,
  horizontal adder chain);
* 12 blocks, the per-block accumulator (register, adder, register with
  feedback) and the adder tree;
* the bank counts and bank sizes;
* the loop order, and the conv / FC / Q·Kᵀ mappings with their cycle
  counts (448 cycles per output channel of the 224×224 convolution,
  2 cycles per 7 outputs at 96 channels, 7 cycles per query row on
  8 blocks);
* LayerNorm and Softmax units on a result buffer.

This design's own choices:
* the command interface and the scheduler's address formulas;
* the shared read address in each buffer;
* using the two weight sets as ping-pong buffers;
* the adder-tree block mask;
* requantisation;
* the result-buffer size and layout;
* the data-bus protocol;
* all LayerNorm and Softmax arithmetic.

Not included:
* **Memory controller and off-chip memory.** The paper only names them.
  Their bus side is the top's `bus_*` ports.
* **GELU, residual additions, patch merging, bias.** They are part of the
  model, but the paper describes no hardware for them. The host or a
  later stage must apply them.
* **A separate SRAM controller.** The paper lists one in its area
  breakdown but does not describe it. Here the scheduler generates the
  read addresses and the data bus decodes the writes.
* **Area, frequency and gate count** (262 K gates, 40 nm, 600 MHz). This
  code makes no claim to reach them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

* `tb_pe_block`, `tb_accumulator`, `tb_adder_tree`: random data against
  integer reference sums, including the 1- and 2-cycle latencies and the
  8-block mask.
* `tb_input_sram`, `tb_weight_sram`, `tb_output_sram`: every bank and
  address, plus read-during-write behaviour.
* `tb_row_scheduler`: address sequence, first/last tags, write-back
  addresses and cycle counts for the conv, FC, attention and 384-channel
  cases.
* `tb_layernorm`, `tb_softmax`: results against models of the same
  integer arithmetic, plus sanity checks (normalised mean ≈ 0 and
  RMS ≈ 1; probabilities sum to ≈ 1).
* `tb_data_bus`: write decode, read timing and read gating.
* `tb_vit_accel_top`: end to end at the default sizes. It runs a
  4×4×3/stride-4 convolution, a 96-channel FC layer (using weight set 1
  while set 0 is being rewritten), LayerNorm of the FC outputs, and
  Q·Kᵀ of a 7×7 window on 8 blocks followed by Softmax. It checks every
  result against direct convolution and matrix-product models and checks
  each command's cycle count. It also counts that each mechanism
  (accumulation, mask, weight-set switch, bus write during a pass,
  saturation, LayerNorm, Softmax, read-out) occurred.

* `tb_swin_layers`: Swin-T layers at their real sizes, against direct
  models. (1) The patch-embedding convolution on one whole input tile
  (112×224 pixels) with all 96 output channels: 224 cycles per channel,
  with 21,504 result words drained over the bus during the pass.
  (2) The first MLP layer of stage 1, 96→384 channels, for 14 tokens;
  its 768 weight words fill a weight set exactly. (3) One attention head
  of a 7×7 window: 49×49 scores, Softmax of all 49 rows, then P·V run
  as an FC pass after the host re-lays P out as input words.

Run one with plain Verilator from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
  rtl/vit_pkg.sv tb/tb_vit_accel_top.sv --top-module tb_vit_accel_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another one. The package must come
first on the command line. Verilator finds the other modules by name
through `-y rtl`.

## Changing the design

The array shape and buffer depths are in `vit_pkg` (`N_BLK`, `N_ROW`,
`N_MAC`, `IN_DEPTH`, `W_DEPTH`, `OUT_DEPTH`). The command count fields
are 10 bits wide. If you change a pipeline stage, update
`row_scheduler`'s `PE_DLY`/`WB_DLY`. The top's `a_wb_aligned` assertion
fires if the write-back tag and the adder-tree output drift apart.
