# Harmonia: a BFP accelerator for LLM inference, in SystemVerilog

Harmonia runs both kinds of LLM layer on one integer datapath:
- the linear layers (activation × weight);
- the attention layers (query × K, scores × V).

Every activation, and every K/V value, is held as **block floating point (BFP)**. A group of 32 values shares one 5-bit exponent, and each value keeps only a sign and a short integer mantissa. Weights are 4-bit integers with an FP16 scale per group.

Once the exponent is shared, a dot product over a group is an integer dot product, and only one exponent add is left. A single array of small integer multipliers can therefore serve:

| Mode | Activation | Other operand | Used for |
|------|------------|---------------|----------|
| M8W4 | 8-bit BFP mantissas | INT4 weights | linear layers |
| M8M4 | 8-bit BFP mantissas | 4-bit BFP K/V | attention, the bulk of the KV cache |
| M8M8 | 8-bit BFP mantissas | 8-bit BFP K/V | attention, the few tokens kept at high precision |

The array's FP32 results are turned back into BFP on the fly, at the array's output rate, so the next layer's inputs are BFP again. The K cache also has a few outlier channels. These are smoothed online: each such channel gets its own offset, which is subtracted before conversion.

This repository holds synthesizable RTL for the whole on-chip part, and self-checking testbenches. Two things are not included:
- the external DRAM, which is only a port at the top;
- the software that picks the tile sizes.

## 1. Number formats and the 330-bit word

A BFP group has 32 elements. The converter keeps each mantissa *with* its hidden bit, so an 8-bit mantissa `m` and shared exponent `E` stand for

    value = (-1)^s · m · 2^(E − 22)        (8-bit mantissa, E biased by 15)
    value = (-1)^s · m · 2^(E − 18)        (4-bit mantissa)

A value whose exponent is below the group maximum is shifted right by the difference and then truncated. For example, with exponents 15, 12 and 20, the shared exponent is 20 and the shifts are 5, 8 and 0. FP16 inputs with a zero exponent field are flushed to zero.

Weight/KV and activation data move in **330-bit words**. Each word holds 64 elements, i.e. two BFP groups:

| bits | content |
|------|---------|
| `[255:0]` | 64 × 4-bit values (a nibble plane of the mantissas, or INT4 weights in two's complement) |
| `[319:256]` | 64 signs. In M8W4 the weight word carries its FP16 group scale in `[271:256]` instead. |
| `[329:320]` | two 5-bit shared exponents: group 0 (elements 0–31), group 1 (32–63) |

An 8-bit activation mantissa travels as two nibble planes in consecutive words, **high nibble first**.

A Weight/KV SRAM word is 16 such words, one per array column. An Activation SRAM word is 8, one per array row. The sizes are:

| Memory | Capacity | Word | Depth |
|--------|----------|------|-------|
| Weight/KV SRAM | 330 KB | 5280 b | 512 |
| Activation SRAM | 146 KB | 2640 b | 453 |
| Output SRAM | 42 KB | 112 b | 3072 |
| Temporary SRAM | 8 KB | 128 b | 512 |

An Output SRAM word holds 8 converted values as `{8 × 5-bit exponent, 8 signs, 8 × 8-bit mantissa}`. A 4-bit mantissa sits in the low bits of its byte. A Temporary SRAM word holds 8 FP16 values.

## 2. The reconfigurable PE

This is the heart of the design and its least obvious part (`sub_pe`, `shared_accumulator`, `pe_unit`).

**Sub-PE.** A sub-PE multiplies 32 activation nibbles by 32 4-bit weight/KV magnitudes. The steps are:
- the product signs are the XOR of the operand signs;
- the negative products go through a two's-complement stage;
- a 5-level adder tree sums them.

The high activation nibble arrives first. On the following cycle the low nibble's tree output is added to the high result shifted left by four, giving an Int18 dot product of 8-bit × 4-bit values.

The exponent out is:
- `Ea + Ew` when both operands are BFP (M8M4, M8M8);
- `Ea` alone for INT4 weights (M8W4).

**Two wrappers, one accumulator.** A PE has two wrappers of two sub-PEs each. Within a wrapper, one sub-PE takes group 0 of a 64-element word and the other takes group 1.

Activations enter wrapper 0 through register file 0 and reach wrapper 1 one cycle later through register file 1. One cycle after that they leave for the next PE to the right. Because the two wrappers finish one cycle apart, a single set of FP units serves both:
- INT2Half ×2, one per sub-PE result, applying the exponent bias (22 for M8W4; 40 for M8M4; 40 and 44 for the two halves of M8M8);
- HalfAdd, which sums the two groups;
- Half Mult by the wrapper's FP16 weight scale (M8W4 only);
- an FP32 add into Psum0 or Psum1.

**Modes.**
- **M8W4 and M8M4**: each wrapper works on its own output channel, so a PE yields two results (Psum0, Psum1) per output tile.
- **M8M8**: an 8-bit KV mantissa is split into a high nibble (wrapper 0) and a low nibble (wrapper 1). Both halves add into Psum0, the high half weighted by 2⁴. The PE then yields one result, at half the rate.

**Weight bus and timing.** A column's weight bus carries wrapper 0's word in the cycle of the high-nibble beat and wrapper 1's word in the next cycle. Each wrapper latches its own word.

For the last K step, if the high beat enters a PE in cycle *t*:
- the wrapper-0 result is out at *t + 4*;
- the wrapper-1 result (and the single M8M8 result) is out at *t + 5*.

**Rounding.** All FP arithmetic truncates toward zero, flushes subnormals and saturates at the largest finite value (`harmonia_fp_pkg`). This is this design's choice; the arithmetic operators are named without a rounding rule.

## 3. The array and the dispatchers

`pe_array` is an 8 × 16 output-stationary array:
- Each column's weight/KV bus is broadcast to all 8 rows.
- Activations enter every row at column 0 **in the same cycle**, and hop one PE to the right every two cycles.
- The weight/KV dispatcher delays column *c* by 2*c* cycles, so the weights meet their activations.

As a result, all PEs of a column finish in the same cycle, and column *c* finishes two cycles after column *c − 1*. A mux chain along each row brings the finished column's result to the edge. The array therefore emits one 8 × 32-bit beat per cycle, in output-channel order: C[·][0], C[·][1], … (column *c* gives channels 2*c* and 2*c + 1*).

The two dispatchers are simple:
- they read `2 · ksteps` consecutive SRAM words (one K step = 64 elements = 2 words);
- the weight dispatcher tags each word with its wrapper;
- the activation dispatcher unpacks each word into beats with high/low, first-step and last-step flags.

## 4. From FP32 back to BFP

Results leave the array as FP32. `fp2half_vector_unit` turns each 8-lane beat into FP16. `output_collector` then:
- writes the beat to the Temporary SRAM at the next address;
- counts the beats;
- while K of the initial window is being produced, also forwards the beat, tagged with its channel, to the K-offset generator.

`bfp_converter` works in two passes over the Temporary SRAM: first it finds each group's largest exponent (*scale*), then it aligns every value to it (*convert*). It has two scale paths and one shared aligner:

* **Temporal path** (all activations except V). A group is the 32 output channels of one token, which arrive over 32 cycles in one lane. Each of the 8 lanes has its own comparator and max register.
* **Spatial path** (V). V is grouped along tokens, and a beat holds 8 tokens of one channel. A 9-input compare tree takes the 8 exponents plus the running maximum kept in a per-channel slot register. Four beats make a 32-token group.

  A sequence whose length is not a multiple of 32 leaves a **residual group**. It is converted at its current size: fewer beats, and a lane mask for tokens that do not exist. Masked lanes produce zero sign, mantissa and exponent.
* **Aligner.** The aligner computes `Emax − e`, shifts the 11-bit significand right by it, and keeps the top 8 bits, or the top 4 with `man4`.

## 5. Online K smoothing

A few K channels carry outliers. Subtracting a constant per channel does not change softmax(QKᵀ). So for the first 32-token window:
1. `k_offset_generator` keeps, per channel, the element of largest magnitude (the Max Selector).
2. When the window is complete, it streams the maxima through the Max FIFO into an insertion-sorted Top-k Selector.
3. It pushes `(channel, max/2)` for the k largest into the Top-k FIFO.
4. `halfsub_vector_unit` loads these into an offset table; all other channels keep offset 0.
5. From then on, every K value read from the Temporary SRAM is passed through the HalfSub unit before conversion. A mux selects HalfSub or direct data.

The generator's `enable` input stands in for its clock gate: the generator is enabled only while K of the initial window is in flight.

Two sizes are not specified, so this design picks them: **TOPK = 8 and CHANNELS = 128** (one attention head). Ties go to the lower channel number. The offset keeps the sign of the element that had the largest magnitude.

## 6. Tiling: the FDGF controller and the tile sequencer

`fdgf_controller` walks one of two loop nests, selected at run time by `row_first`:

    column-first (weights stay):       row-first (activations stay):
    for w in weight tiles:             for a in activation tiles:
      LOAD_W w                           LOAD_A a
      for a in activation tiles:         for w in weight tiles:
        LOAD_A a; COMPUTE(w, a)            LOAD_W w; COMPUTE(w, a)

It counts the tile loads of each kind, so the external traffic of the two orders can be compared: n_w + n_w·n_a loads column-first, n_a + n_w·n_a row-first.

The tile sequencer in `harmonia_top` carries out each command:

* **LOAD_W / LOAD_A** go to `tensor_fetcher`:
  - a weight tile is `w_sub` sub-tiles of 32 output channels, each `2·ksteps` words, read from `w_base + w·w_sub·2·ksteps`;
  - an activation tile is `a_sub` sub-tiles of 8 tokens, from `a_base` in the same way.
* **COMPUTE** does four things in turn:
  1. It runs one array pass per (token sub-tile, channel sub-tile), token sub-tile outer. Each pass waits until its 32 output beats (16 in M8M8) have been collected.
  2. If K offsets are requested (`act_kind = K`, `k_window`), it then runs the K-offset generator.
  3. It converts everything: on the temporal path pass by pass; on the spatial path (V) channel sub-tile by channel sub-tile, in chunks of four token sub-tiles. `valid_rows` masks the missing tokens of the last sub-tile.
  4. It stores the Output SRAM words to `o_base + (w · n_atiles + a) · words`.

The external memory is a simple port:
- one 5280-bit word per request, with valid/ready;
- in-order read data.

## 7. Parameters

Defaults are the sizes given for the design:
- array 8 × 16, 32-lane sub-PEs;
- SRAM sizes as in Section 1;
- a 5280-bit external word.

`CHANNELS = 128`, `TOPK = 8`, the 32 spatial slots and all address widths are this design's choices. Every block can be instantiated smaller; the array and top testbenches do so.

## 8. Where this RTL departs from, or goes beyond, the description it follows

* **Passes do not overlap.** A pass starts only after the previous pass's results are collected, and conversion runs after all passes of a COMPUTE. The datapath has the rates described (one 64-element K step per two cycles per PE, one output beat per cycle), but whole-tile throughput is lower than a fully pipelined controller would reach.
* **Own choices.** The sequencer, command formats, memory maps, handshakes, pipeline depths, word layouts and the exponent-bias encoding are all this design's own. So are truncating FP arithmetic, the order of the M8M8 halves, the two-pass conversion protocol, and the channel numbering of the K offsets.
* **Memories and clock gating.** The SRAMs are behavioural arrays with one write and one read port, standing in for compiled macros. Clock gating is an enable.
* **Decode batching.** Single-token decode uses one of the eight array rows. Nothing here maps GEMV differently.
* **Counter widths.** The tile counters are 8 bits (255 tiles), so very long sequences (16K tokens with 24-token tiles) are split over several runs.

## 9. Verification and simulation

Every block has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M`, and each has a watchdog. What they check:

| Testbench | Checks |
|-----------|--------|
| `tb_sub_pe` | integer dot products and one-cycle-pulse timing |
| `tb_shared_accumulator` | all three modes against a real-number model, result one cycle after the last step |
| `tb_pe_unit` | random dot products in every mode, latency 4/5 cycles |
| `tb_pe_array` (3 × 4) | output order, one beat per cycle starting 4 cycles after the last high beat, values per row |
| `tb_weight_kv_dispatcher`, `tb_activation_dispatcher` | word order, 2*c* column skew, beat flags, 3-cycle start latency |
| `tb_bfp_converter` | the exponent 15/12/20 example, both paths, 4- and 8-bit, residual groups |
| `tb_k_offset_generator` | top-k and max/2 against a sort, gating, completion time |
| others | their own function; see each file's opening comment |

`tb_harmonia_top` runs the whole design at 2 × 2 PEs with 8 K channels through seven runs:
- column-first and row-first;
- all three modes;
- V with a residual group;
- a K window that generates offsets, and a later K tile that uses them.

It compares every stored BFP word with an exact reference; the data are chosen so that no FP rounding occurs. It also counts each mechanism above, plus external-memory stalls and gated cycles of the K-offset generator, and fails if one never happened. `tb_harmonia_top_full` repeats two of these runs with every parameter at its default (8 × 16 PEs, full SRAMs).

With plain Verilator (5.x), compile the packages first and then the modules:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/harmonia_pkg.sv rtl/harmonia_fp_pkg.sv tb/tb_fp_pkg.sv \
      $(ls rtl/*.sv | grep -v _pkg.sv) tb/tb_harmonia_top.sv \
      --top-module tb_harmonia_top
    ./obj_dir/Vtb_harmonia_top

Swap the testbench file and top module to run another testbench. `tb_harmonia_top_full` (every parameter at its default) passes its 290 checks in a few seconds of simulation. Its C++ build, though, takes about 17 minutes on one core, because Verilator flattens the 8 × 16 array; add `-j 0` to build in parallel. The reduced `tb_harmonia_top` builds in about a minute and covers more mechanisms.

Lint notes:
- Assertions use `disable iff (!rst_n)` while the flops reset asynchronously. Verilator reports this as a mixed synchronous/asynchronous use of `rst_n`; it affects only the checkers.
- A few parameters and signals are reported unused. They are bus fields that some modes ignore, such as the exponents in M8W4.
