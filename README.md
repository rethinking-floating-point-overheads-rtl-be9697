# A mixed-precision convolution tile built from 4-bit multipliers

This design computes convolution layers whose operands can be INT4, INT8, INT12, INT16
(signed or unsigned, chosen per operand) or FP16, on one datapath. The two INT operands
may differ in width. FP16 is used for both operands or neither; this RTL does not mix an
INT operand with an FP16 one. It does not give each
format its own multipliers. Every operand is cut into 4-bit pieces ("nibbles"), and the
datapath only ever multiplies nibbles:

- INT4 × INT4 runs at full rate: one inner product per cycle.
- Wider operands take one pass per pair of nibbles (INT8 × INT8 takes four passes).
- FP16 is handled as a 12-bit signed significand (three nibbles) plus an exponent.
  The exponent handling is the interesting part.

An FP inner product of N terms normally needs the products aligned to the largest
exponent before the adder tree. That alignment is what makes FP adders wide and costly.
Here the adder tree stays narrow, only W bits wide. A product that would fall off the
bottom of that window is not dropped. It is deferred to a later cycle and added with an
extra shift. Data with small exponent spreads costs one cycle per nibble pass. Data with
wide spreads costs a few more cycles, and only in the part of the tile that needs them.

The design follows the paper *Rethinking Floating Point Overheads for Mixed Precision DNN
Accelerators* (its "MC-IPU" and its tile). Its main configuration is:

- a tile unrolled over 16 input channels, 16 output channels and 2 × 2 output positions
  (64 inner-product units, each with 16 inputs);
- an adder tree 16 bits wide;
- one unit per synchronization cluster;
- weight buffers 9 entries deep.

The sections below explain each part, list where the RTL departs from the paper or fills
gaps in it, and say how far the RTL has been checked.

## 1. Numbers as nibbles

`operand_decomposer` turns a 16-bit word into four 5-bit signed nibbles `nib[k]` and an
exponent, such that the value is `Σ nib[k]·16^k · 2^exp` (times ½ for FP16, see below).

**Integers.** An INT operand with Ka nibbles (1 to 4) is split as follows:

- The lower nibbles are zero-extended to 5 bits.
- The top nibble is sign-extended if the operand is signed, zero-extended otherwise.
- The exponent is 0.

**FP16.** The hidden bit is restored (it is 0 for subnormals) and the 11-bit magnitude
gets the sign applied. The result is a 12-bit two's-complement number M in [−2047, 2047].
It is split into three 5-bit signed nibbles:

    N2 = M[11:7]            (signed)
    N1 = {0, M[6:3]}
    N0 = {0, M[2:0], 0}

so that 2·M = N2·256 + N1·16 + N0. The exponent is `e − 15`, or −14 for subnormals.
INF and NaN inputs are not handled; their bit patterns are treated as ordinary large
numbers.

A product of two nibbles lies in [−240, 256]. That is why the multipliers produce
**10-bit** products: 256 does not fit in 9 signed bits.

## 2. The multi-cycle inner-product unit (MC-IPU)

`mc_ipu` computes one inner product of N activations with N weights, one nibble pair
(i, j) at a time. The pairs are visited most-significant first: i from Ka−1 down to 0,
and within that j from Kb−1 down to 0. A pass over one pair takes one or more cycles.

The per-lane datapath is:

    activation nibble i ─┐
                         ├─ 5×5 signed multiply ─ local right shift ─ AND mask ─┐
    weight nibble j ─────┘                                                      │
                                                      N-input adder tree ◄──────┘
                                                                │
                                             accumulator (align, add) ◄── EHU

The weights come from the unit's own weight buffer (`weight_buffer`, D slots of N
weights). The activation vector and the selected weight slot are latched into operand
registers when an operation starts. That lets the next operation be issued during the
last cycle of the current one.

### 2.1 Local alignment and the safe precision

Each 10-bit product is placed at the top of a (W+1)-bit word. It is then shifted right by
its alignment distance and truncated (`local_shifter`). Products shifted by up to
SP = W − 9 places keep all their bits. SP is the *safe precision*, 7 for W = 16. Beyond
SP, bits would be lost.

The exponent handling unit (`ehu`) therefore splits the products of one pass into
**partitions** by alignment distance:

1. `c_i = a_exp_i + w_exp_i` is the exponent of product i.
   `max = max_i c_i` and `d_i = max − c_i`.
2. A product with `d_i > sw_prec` is dropped altogether. `sw_prec` is a run-time input,
   the "software precision" (typically 16 or 28). These products are too small to matter
   for the result.
3. In cycle k of the pass, the products with `k·SP ≤ d_i < (k+1)·SP` are selected:
   - the mask turns on exactly those lanes;
   - each selected lane shifts by `d_i − k·SP`;
   - the whole adder-tree sum gets a shared extra shift of `k·SP`, applied in the
     accumulator.
4. The pass ends (`done`) in the cycle that serves the last remaining product.

Example with SP = 5 and product exponents (10, 2, 3, 8):

| cycle | products served | local shifts | extra shift |
| ----- | --------------- | ------------ | ----------- |
| 0     | 10 and 8        | 0 and 2      | 0           |
| 1     | 2 and 3         | 3 and 2      | 5           |

Nothing is lost in either cycle. Partitions are visited in order, one cycle each. An
empty middle partition still costs its cycle. A pass takes `⌊d_max/SP⌋ + 1` cycles,
where `d_max` is the largest kept distance. An FP16 × FP16 operation therefore takes
`9 × (that)` cycles.

Stages 1, 2 and the maximum are combinational on the operands being loaded and are
registered at load. The partition walk (step 3) keeps one "served" bit per lane.

### 2.2 The accumulator

`accumulation_logic` keeps a two's-complement accumulator of `33 + T + L` bits, where:

- T = log2 N, the adder-tree growth;
- L = log2 D, guard bits for up to D operations per result.

It also keeps an 8-bit exponent. The register represents `acc · 2^(exp − 30)`. The
adder-tree sum is sign-extended by L−1 bits and padded with `33 − W` zero bits below, so
that a W-bit window lines up with the top of a 30-bit fraction.

**FP mode.** The incoming term carries the exponent

    e_t = max − (nibble shift + k·SP),   nibble shift = 4·((Ka−1−i) + (Kb−1−j))

- If `e_t ≤ exp`, the term is shifted right by `exp − e_t` and added.
- If `e_t > exp`, the two operands are swapped. The old accumulator goes through the
  single right shifter and `exp` becomes `e_t`.
- A cleared accumulator simply takes the term and its exponent.

Visiting the most significant nibbles first makes swaps rare. It also means that the bits
lost when a swap shifts the accumulator are the low ones.

**INT mode.** The exponent stays 0 and the term is shifted right by the nibble shift. The
accumulator then holds the exact integer result scaled by `2^(24 − 4·(Ka+Kb−2))`.

### 2.3 Rounding on the way out

`result_normalizer` does the following with a finished accumulator:

- **FP mode:** it finds the leading one and rounds to nearest-even into FP16 or FP32
  (selected by `out_fp32`), including subnormal results and overflow to infinity.
- **INT mode:** it returns the exact integer, sign-extended.

## 3. The tile

`conv_tile` holds K·P MC-IPUs. IPU `q = k·P + p` computes output channel k at output
position p.

**Weights.**

- The host writes the weight bank (`weight_bank`, 512 words of N weights).
- A pulse on `wload_start` copies K·D words, one per cycle: word `base + k·D + s` goes to
  slot s of every IPU of output channel k.
- Load only while `idle` is high.

**Tile steps.** A step is P activation vectors (one per output position), a weight slot
and a `last` flag that closes the output pixel. Steps enter through `step_valid/ready`
into the `activation_buffer`. That FIFO broadcasts each step to the input FIFOs of all
clusters. It waits (`bcast_stall`) while any of them is full.

**Clusters.** An `ipu_cluster` holds G IPUs that share a sequencer. The sequencer:

- runs the Ka·Kb nibble passes of an operation;
- moves to the next pass when every EHU of the cluster is done;
- issues the next operation in the last cycle of the current one;
- pushes the finished accumulators into a small output FIFO at the end of a pixel.

A cluster whose data needs extra alignment cycles delays only itself, as long as the
FIFOs absorb the difference. G = 1 is the default. Larger G means fewer sequencers but
more lock-step waiting.

**Output synchronization.** `output_sync` waits until every cluster holds a finished
pixel and `res_ready` is high. It then pops all clusters together and presents one word
`res_data[K·P]`: every result rounded by its own `result_normalizer`.

**Throughput, per operation (16 inputs per IPU):**

| operands                        | cycles                              |
| ------------------------------- | ----------------------------------- |
| INT4 × INT4                     | 1                                   |
| INT8 × INT4                     | 2                                   |
| INT8 × INT8                     | 4                                   |
| INT16 × INT16                   | 16                                  |
| FP16 × FP16, narrow spread      | 9                                   |
| FP16 × FP16, wide spread        | 9 × the partitions per pass         |

### Interface of `conv_tile` (defaults in brackets)

| port group                                         | meaning                                                        |
| -------------------------------------------------- | -------------------------------------------------------------- |
| `a_type, a_signed, w_type, w_signed`               | operand formats; static while the tile works                   |
| `sw_prec`                                          | software precision for dropping far-aligned products           |
| `out_fp32`                                         | FP results as FP32 (else FP16)                                 |
| `wb_we, wb_addr, wb_data[N]`                       | host write port of the weight bank                             |
| `wload_start, wload_base, wload_busy`              | copy K·D words into the weight buffers                         |
| `step_valid/ready, step_act[P][N], step_slot, step_last` | tile steps                                               |
| `res_valid/ready, res_data[K·P]`                   | write-back word (41-bit lanes; FP results in the low 16/32 bits) |
| `idle, bcast_stall, cl_multi[]`                    | status: all empty, broadcast stalled, cluster in a multi-cycle alignment |

Parameters: `N` [16], `K` [16], `P` [4], `W` [16], `G` [1], `D` [9], FIFO depths [4],
`WBANK_DEPTH` [512].

## 4. Where this RTL departs from the paper or fills its gaps

- **Products are 10 bits, not 9.** The shifter and tree inputs are W+1 bits, so the
  adder tree is one bit wider than the paper's drawing.
- **Local shift.** In cycle k the lane shift is `d_i − k·SP`, as the worked example in
  the paper does. The printed pseudocode says `d_i − threshold`, which would shift by a
  whole SP too much.
- **Accumulator alignment.** The accumulator aligns against
  `e_t = max − (nibble shift + k·SP)`. The paper's shift formula is the special case
  without a swap; the general one is needed when a later pass carries a larger exponent
  than the accumulator.
- **Nibble order.** Nibble pairs run most-significant first; the paper's loop counts
  upward.
- **One EHU per MC-IPU.** The paper shares one EHU between several units.
- **Operand registers** (activation vector and weight slot latched at issue) are an
  addition. They allow back-to-back INT4 operations.
- **Left to this design.** The paper leaves these open, and they are this design's
  choices:
  - the format of a tile step and the FIFO depths;
  - the weight-bank loader order;
  - FP16 subnormal handling;
  - the rounding mode;
  - overflow to infinity.
- **Not built:**
  - the activation bank, including its loop-nest addressing and the summing of partial
    outputs when a layer has more than N input channels;
  - the multi-tile array;
  - conversion of results to a different next-layer INT type.

  The tile exposes the activation-buffer fill port and the write-back port where the bank
  would connect.

## 5. How far it has been checked

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. The reference is `tb_mp_ref_pkg`, an integer model of
decomposition, partitioning and accumulation written independently of the RTL.

- `tb_mc_ipu`: the MC-IPU accumulator and exponent match the model **bit for bit** after
  every operation. This covers:
  - all INT widths;
  - FP16 with software precision 16 and 28;
  - three exponent spreads.

  It also checks the cycle count of every operation, the exact integer result, and that
  FP results are close to the real-valued inner product.
- `tb_ipu_cluster` checks bit-exact results under random backpressure. It also checks
  that busy time is within two cycles of the model's cycle count; for INT4 that is one operation per cycle.
- Leaf testbenches cover the decomposer, shifter, adder tree, EHU (including the worked
  example above), accumulator (swap and align cases), rounding (nearest-even, subnormal,
  infinity), buffers, output synchronization and the weight loader.
- `tb_conv_tile` runs the whole tile at a reduced size (8 inputs, 2 × 2 IPUs, clusters of
  2). It covers four modes: INT4 signed; INT8 unsigned × INT4; FP16 → FP32 with wide
  exponents; FP16 → FP16 at software precision 16. Every written-back word is checked
  against the model. It counts the stalls, multi-cycle alignments, waits for slower
  clusters, write-back backpressure, weight reloads and mode switches, and fails if any
  of them never happened.
- `tb_conv_tile_full` does the same at the default size (64 IPUs of 16 inputs) in two
  modes.

Not covered:

- INF/NaN inputs;
- accumulator overflow beyond D operations per pixel in INT16 mode;
- timing closure;
- the area and energy figures of the paper.

To simulate with Verilator from the repository root:

    verilator --binary --timing --assert -Irtl -Itb rtl/mp_pkg.sv tb/tb_mp_ref_pkg.sv \
        tb/tb_conv_tile.sv --top-module tb_conv_tile
    ./obj_dir/Vtb_conv_tile

Replace `tb_conv_tile` with any other testbench name. Every testbench has a watchdog.
