# Unrolled, pipelined LUT-based SSC decoder for polar codes

This is SystemVerilog RTL for a polar-code decoder. It is fully unrolled:
every step of simplified successive-cancellation (SSC) decoding has its own
hardware, so frames stream through a long pipeline with almost no control
logic. It is also LUT-based. Soft values are not fixed-point LLRs. They are
4-bit integer *labels* (16 levels), and the two message-update functions of
SC decoding, `f` and `g`, are table look-ups on those labels. The labels are
numbered so that the `f` table becomes a one-multiplexer min-sum circuit.
The `g` tables are ordinary truth tables, one per tree node, and synthesis
turns them into logic.

By default the decoder handles the systematic (128,64) polar code. It takes
one frame every 10 clock cycles (initiation interval II = 10), returns its 64
information bits 86 clock cycles later, and has about nine frames in flight
at once. These figures match the design this RTL follows, the "re-MS-IB"
decoder of Giard, Shah, Balatsoukas-Stimming, Stark and Bauch, *Unrolled and
Pipelined Decoders based on Look-Up Tables for Polar Codes*. In 28 nm
FD-SOI that design was reported at about 1.5 GHz, which is 9.7 Gbit/s of
information throughput.

## Polar codes and SSC decoding in brief

A polar code of length N = 2^n encodes a bit vector `u` as
`x = u · F^{⊗n}`, with `F = [1 0; 1 1]`. The K most reliable positions of
`u` carry data. The other N−K positions are *frozen* to 0. In the
*systematic* variant used here, the data bits appear directly in `x` at the
unfrozen positions, so the decoder's codeword estimate already contains them.

SC decoding walks a binary tree. A node of size `N_v` receives `N_v`
messages `α`:

* `f`: `α_l[i] = sign(α[i]·α[i+N_v/2]) · min(|α[i]|, |α[i+N_v/2]|)` goes to
  the left child.
* The left child returns its bit estimates `β_l`.
* `g`: `α_r[i] = α[i+N_v/2] ± α[i]` (minus when `β_l[i] = 1`) goes to the
  right child.
* The right child returns `β_r`.
* `C`: the node returns `β = [β_l ⊕ β_r, β_r]`.

SSC prunes every subtree that is entirely frozen or entirely unfrozen. A
*rate-0* subtree returns zeros. A *rate-1* subtree returns the hard decisions
of its own messages. When the left child is rate-0, `g` becomes `g0R` (with
`β_l = 0`) and `C` becomes `C0R = [β_r, β_r]`, which is only wiring. The
root's `β` is the codeword estimate.

## Messages: the relabeled 4-bit alphabet

Each message is a label `t` of 4 bits. In the underlying design the labels
`0..15` are ordered by the LLR they stand for: `0..7` are negative and
`8..15` are positive, and the two halves mirror each other. The decoder
instead uses a *relabeled* alphabet, in which the lower half is numbered
backwards:

| original label | 0 | 1 | … | 7 | 8 | 9 | … | 15 |
|---|---|---|---|---|---|---|---|---|
| relabeled      | 7 | 6 | … | 0 | 8 | 9 | … | 15 |

A relabeled message is therefore `{s, m}`. The sign bit `s` is 1 for a
positive LLR. The magnitude index `m` runs from 0 (least reliable) to 7.
This makes the blocks small:

* **f (min-sum), `f_re_minsum`**: `s_o = XNOR(s_a, s_b)`, and
  `m_o = (m_a > m_b) ? m_b : m_a`. That is one comparator, one 3-bit
  multiplexer and one XNOR. With the original numbering the same function
  needs inverters on the inputs and the output.
* **I (hard decision), `hard_dec`**: `û = NOT s`, one inverter per bit.
* **g / g0R, `g_lut`**: a 512-entry table addressed by
  `{β_l[i], α[i+N_v/2], α[i]}` that returns a 4-bit label. `g0R` is the same
  table with `β_l` tied to 0.
* **C, `combine`**: XORs, exactly as in a fixed-point decoder.

The package `polar_pkg` defines the message type `msg_t` and all of these
conventions.

### The g tables

In the underlying design, every `g` block of the decoder tree has its own
table, designed with the information-bottleneck (IB) method during a
density-evolution pass over the code. Those tables were not published, so
this design computes its own in the same way:

* The channel output `y` (BPSK, AWGN, Eb/N0 = 3 dB, `σ² ≈ 0.501`) is
  quantized to 16 labels by an IB quantizer. For a binary input the
  mutual-information-optimal quantizer is a set of contiguous intervals, so
  it is found by dynamic programming over a fine grid of `y`.
* The label distributions are propagated down the SSC tree of the default
  code. `f` is min-sum on labels, exactly as the hardware computes it.
* At each `g` node, the 512 input combinations give a set of output LLRs.
  Their optimal contiguous, sign-symmetric partition into 16 clusters is
  the node's table.

Because the partition is contiguous in LLR, a table is fully described by
8 label LLRs `lev[m]` and 7 output boundaries `th[k]`. `rtl/ib_tables_pkg.sv`
stores those 15 numbers per node, scaled by 2^10. It expands them at
elaboration into the 512-entry table:

* `L = lev(t_b) + lev(t_a)`, or `lev(t_b) − lev(t_a)` when `β_l = 1`. A
  label `{s, m}` stands for `+lev[m]` if `s = 1` and `−lev[m]` otherwise.
* The output magnitude index is the number of `th[k] ≤ |L|`, and the sign
  is positive for `L ≥ 0`.

Nodes are numbered as a heap: the root is 1, and the children of `p` are
`2p` and `2p+1`. The default code has 43 `g` nodes.

`g_lut` takes its table as the parameter `LUT` (type `g_table_t`, 512 × 4
bits). `ssc_node` passes `ib_g_table(NODE)` when its parameter `IB` is 1.
When `IB` is 0 it passes `polar_pkg::g_default_table()`, a uniform rule in
which each label stands for `±(m + ½)` and the entry has magnitude index
`min(|k|, 7)` for `k = L(t_b) ± L(t_a)`. The top sets `IB = 1` through
`IB_TABLES`, which is allowed only with the default frozen set, because the
tables belong to that code.

These are IB tables of the published form and design point, but they are
not the published tables themselves. A bit-true software model of the
decoder gives these frame error rates (random codewords, 50 000 frames per
point):

| Eb/N0 (dB) | 1 | 2 | 3 | 4 |
|---|---|---|---|---|
| this decoder (IB tables, IB channel quantizer) | 4.6e-1 | 1.6e-1 | 3.2e-2 | 2.8e-3 |
| same datapath with the uniform table and quantizer | 4.9e-1 | 1.9e-1 | 4.3e-2 | 5.9e-3 |
| floating-point SSC, min-sum `f` | 4.3e-1 | 1.5e-1 | 2.7e-2 | 1.9e-3 |
| floating-point SC (exact `f`) | 4.2e-1 | 1.4e-1 | 2.6e-2 | 1.8e-3 |

The 4-bit IB decoder loses roughly 0.15–0.2 dB against floating-point SC.
The published design reports that its LUT decoder matches a 5-bit
fixed-point decoder. These curves were not compared with it point by point.

## How the tree becomes a pipeline

`ssc_node` describes one tree node and instantiates itself for each mixed
child. The recursion is resolved at elaboration from the frozen mask, so the
pruned SSC tree becomes hardware. A *stage* is one register boundary,
counted from the input register (stage 0). A node receives its messages from
a stage-`T` register and applies these rules:

| step | condition | hardware | stages |
|---|---|---|---|
| left  | left child rate-0 | nothing, `β_l = 0` | 0 |
| left  | left child rate-1 | `f` then `I` into a register | 1 |
| left  | left child mixed  | `f` into a register, then the child | 1 + child |
| right | right child rate-0 | nothing, `β_r = 0` | 0 |
| right | right child rate-1 | `g` (or `g0R`) then `I` into a register | 1 |
| right | right child mixed  | `g` (or `g0R`) into a register, then the child | 1 + child |
| combine | a child is rate-0 | `C0R` = `{β_r, β_r}` (or `{0, β_l}`), wires | 0 |
| combine | otherwise | `C` into a register | 1 |

These are the stage assignments of the paper's (8,5) example, whose unrolled
pipeline has 5 stages after the input register. `tb_ssc_node` checks that.
`polar_pkg::subtree_latency` evaluates the same rules without recursion, and
the modules use it to place their registers.

For the default (128,64) code the root needs 85 stages. With the input
register that gives a latency of 86 clock cycles from the accepting clock
edge to `out_valid`.

## Partial pipelining: frame pulses and delay lines

In a fully pipelined unrolled decoder (II = 1), a value needed `D` stages
later passes through `D` registers. Two such values are the node messages
`α`, which wait for the left subtree before `g` uses them, and the left
estimates `β_l`, which wait for the right subtree before `C`. Most of the
decoder's registers are these delay registers. Once a new frame only arrives
every II cycles, each register may hold its value for II cycles, so far
fewer registers are needed.

The timing rule used throughout is this. Let `a` be the first cycle in which
the input register holds a frame. The frame's data then sits in every stage-`s`
register from cycle `a+s` for at least II cycles. The computing registers
(outputs of `f`, `g`, `C`) load every cycle. Because their inputs are stable
for II cycles, their outputs are too.

Delay lines (`hold_delay`) carry a value from stage `T_SRC` to stage `T_DST`
(`D = T_DST − T_SRC`) with `M = ceil(D/II)` registers instead of `D`:

* Register `j` (counting from 0) loads once per frame, at the end of cycle
  `a + T_DST − 1 − (M−1−j)·II`.
* The last register therefore presents the value from `a + T_DST` for II
  cycles, and each earlier register samples its predecessor while that
  predecessor still holds the frame.

`frame_ctrl` provides the load enables. It shifts a one-hot pulse along
`pulse[0..LAT]`, where `pulse[k]` is high in cycle `a+k`. Because every load
is tied to a frame's own pulse, frames may arrive with any spacing of II
cycles or more, not only at exact multiples of II.

The paper gives the principle, removing registers where the data does not
change, but not the exact placement. The placement above is this design's
own. In the paper's II = 2 example, one of three channel-LLR delay registers
remains. This scheme keeps two of them, because here a register holds each
value for exactly II cycles.

For the default (128,64) decoder, yosys' generic synthesis (flattened, with
memories mapped) counts these flip-flop bits:

| II | 1 | 2 | 10 |
|---|---|---|---|
| flip-flop bits | 44 909 | 24 502 | 8 240 |

The combinational `f`, `g` and `C` logic is the same at every II.

## Interface and timing (`polar_unrolled_dec`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous active-low reset, control path only |
| `in_valid` / `in_ready` | in / out | 1 | frame handshake; a frame is accepted when both are high |
| `in_llr` | in | N × 4 | channel messages, relabeled alphabet, element `i` for codeword bit `i` |
| `out_valid` | out | 1 | one-cycle pulse: a decoded frame has just appeared |
| `out_cw` | out | N | codeword estimate |
| `out_info` | out | K | information bits, `out_cw` at the unfrozen positions in increasing order |

* After an acceptance, `in_ready` stays low for II−1 cycles.
* `out_valid` comes exactly `LAT + 1` cycles after the accepting edge (86 for
  the default code).
* `out_cw` and `out_info` stay stable for at least II cycles from
  `out_valid`.
* There is no back-pressure on the output.
* Datapath registers are not reset. Their contents are meaningless until
  the first `out_valid`.

The valid/ready handshake, the reset and the output-hold behaviour are
choices of this design. The paper does not describe the decoder's interface.

Parameters:

* `N`, `K`: code length and dimension, with `N` a power of two up to 1024.
* `II`: initiation interval.
* `FROZEN`: the frozen mask, where bit `i` is 1 when `u_i` is frozen.
* `IB_TABLES`: 1 uses the per-node IB `g` tables, 0 the uniform table. The
  value 1 is allowed only with the default code.

Defaults: 128, 64, 10, `polar_pkg::FROZEN_128_64` and 1.

The decoder expects its inputs from the IB channel quantizer the tables
were designed for. Its `|y|` boundaries at `σ² = 0.501` are 0.1275, 0.2625,
0.4075, 0.5675, 0.7575, 1.0025 and 1.3675.

## The default code

The design targets the systematic (128,64) polar code constructed for
Eb/N0 = 3.0 dB with the Tal–Vardy method, but the frozen set itself is not
published. `FROZEN_128_64` was constructed instead with the Gaussian
approximation of density evolution at the same design point:

* noise variance `σ² = 1/(2·R·Eb/N0) ≈ 0.501`, with R = 1/2;
* mean LLRs propagated with `m⁻ = φ⁻¹(1 − (1 − φ(m))²)` and `m⁺ = 2m`;
* the 64 largest means kept as information positions (natural index order,
  `x = u·F^{⊗7}`).

With this set, the unrolled SSC tree has exactly the 86-cycle latency the
design reports, which indicates that the set is the same as, or very close
to, the published one. A code with a different frozen set gets a different
pipeline depth. `LAT` follows automatically.

## Where this RTL departs from the published design

* **g tables**: computed by this design with the IB method (see above),
  because the published ones are not available. The numbers therefore
  differ from the original tables, and so does the error-correction
  performance in detail.
* **Input quantizer**: the channel quantizer in front of the decoder is not
  part of this RTL, because the received-sample format is not specified.
  The testbench models it with this design's IB boundaries.
* **Hard decision at the label midpoint**: the design's decision rule is
  written once as "`û = 0` when `t > |T|/2`". Elsewhere it is described as an
  inverter on the MSB, with the upper half of the alphabet meaning positive
  LLRs. The RTL follows the inverter (`û = 0` for `t ≥ 8`).
* **Frozen set**: the Gaussian approximation replaces Tal–Vardy (see above).
* **Delay-register placement**: described in the partial-pipelining section.
* **Only the re-MS-IB variant is built.** Three alternatives were used for
  comparison: a fixed-point decoder, an "IB" decoder with a separate `f`
  table per edge, and an "MS-IB" decoder that uses the un-relabeled alphabet
  with inverters around the min-sum. They are not included. In the MS-IB
  `f` circuit figure, the output-inversion multiplexer selects its inverting
  input when the XOR of the signs is 0. The min-sum relation
  `t_o = f(t_a − 7.5, t_b − 7.5) + 7.5` on original labels implies the opposite,
  inverting when the output is negative. This matters only to anyone who
  builds that variant.

## How far it has been checked

Every block has a self-checking testbench in `tb/`:

| testbench | what it checks |
|---|---|
| `tb_f_re_minsum` | all 256 input pairs against the min-sum rule evaluated in the original alphabet |
| `tb_g_lut` | all 512 entries of the default table and of the IB tables of nodes 1 and 3 against LLR-domain models, and a table override |
| `tb_hard_dec` | hard decisions |
| `tb_combine` | the combine block |
| `tb_hold_delay` | delay lines with D = 1, 4, 5 and 9 at II = 4, under back-to-back frames and gaps; values must be stable over the whole II-cycle window |
| `tb_frame_ctrl` | handshake spacing, every stage pulse, output-valid timing, and stalls |
| `tb_ssc_node` | the (8,5) example at II = 1 and II = 2, and a 32-leaf code at II = 3 that includes a rate-0 right child, against a sequential SSC reference decoder |
| `tb_polar_unrolled_dec` | end to end at the default parameters (see below) |
| `tb_polar_fer` | error-correction run at the default parameters: 8000 frames at each of Eb/N0 = 2, 3, 4 dB, back to back |

`tb_polar_unrolled_dec` runs 1500 frames:

* random systematic codewords over BPSK/AWGN at three noise levels,
  quantized by the IB channel quantizer, plus noise-free frames;
* a source that alternates long bursts (the decoder accepts a frame every 10
  cycles and the source stalls in between) with random gaps.

It checks, for every frame:

* the 86-cycle latency;
* `out_cw` bit-exact against the sequential reference decoder, which
  evaluates each node's IB table in real arithmetic;
* `out_cw` held stable for II cycles;
* `out_info` equal to the sent data whenever the codeword is right;
* noise-free frames decoded exactly.

It also requires that back-to-back frames, stalls, gaps, and corrected
channel errors each occurred.

`tb_polar_fer` feeds a frame every 10 cycles without pause. It checks every
output against the reference decoder and every acceptance for the 10-cycle
spacing, then prints FER and information-bit error rate per point. It
requires the FER to fall within a band around the software model's value.
Measured: FER 1.6e-1, 2.8e-2 and 2.8e-3 at 2, 3 and 4 dB, in line with the
table above. It runs in about 3 s.

The reference models in `tb/tb_ref_pkg.sv` are written from the decoding
equations. The sequential SSC decoder there walks the tree with an explicit
stack and shares no code with the RTL.

## Simulating

Each testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ib_tables_pkg.sv rtl/polar_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_polar_unrolled_dec.sv \
    --top-module tb_polar_unrolled_dec -o sim
./obj_dir/sim
```

Each testbench ends with the line
`TB_RESULT checks=<n> failures=<m>`. The full-size end-to-end test builds
in about 10 s and runs in under a second.

## Files

* `rtl/polar_pkg.sv`: message type, default code, latency and table
  functions.
* `rtl/ib_tables_pkg.sv`: the per-node IB `g` tables of the default code.
* `rtl/f_re_minsum.sv`, `rtl/g_lut.sv`, `rtl/hard_dec.sv`,
  `rtl/combine.sv`: the f, g/g0R, I and C blocks.
* `rtl/hold_delay.sv`: partially pipelined delay line.
* `rtl/frame_ctrl.sv`: admission at the initiation interval, stage pulses,
  output valid.
* `rtl/ssc_node.sv`: recursive decoder-tree node.
* `rtl/polar_unrolled_dec.sv`: the decoder.
* `tb/`: one testbench per module, plus `tb_ref_pkg.sv`, which holds the
  reference models, the systematic encoder and the AWGN channel with its
  quantizers.
