# Fast-SSC-flip polar decoder in SystemVerilog

A polar decoder that tries again when it fails. A single fast simplified-successive-cancellation (fast-SSC)
pass decodes the frame. A CRC over the decoded information bits then says whether the pass worked. If the
CRC fails, the decoder runs the whole pass again, and this time it inverts one early decision: the one it was
least sure of in the first pass. It can repeat this up to `Tmax` times, each time with the next-least-reliable
decision. This is successive-cancellation *flip* (SCF) decoding. On its own, SCF is slow because it runs a
bit-by-bit SC decoder up to `Tmax` times. Here the flip mechanism sits on top of fast-SSC instead. Fast-SSC
decodes whole sub-codes (constituent codes) in one step, so every trial is an order of magnitude shorter.

The problem this creates is that the dedicated sub-code decoders decide many bits at once. They must now also:

1. report a *decision LLR* for every information bit they decide (its reliability), and
2. be able to flip one chosen information bit, in a way that keeps their own code constraints intact.

Most of this RTL exists to solve those two points. The default configuration is the one used in the design's
main evaluation:

- a (512, 128) polar code with a 16-bit CRC;
- P = 64 processing lanes;
- Tmax = 8 trials;
- SPC scaling s = 0.5;
- repetition nodes up to 32 bits, birepetition and SPC nodes up to 64 bits.

## Decoder tree and instruction program

A polar code of length N splits into two half-length codes, and those split again, down to single bits. This
gives a binary decoder tree. Each leaf is a bit position, either frozen (always 0) or information. SC decoding
walks the tree depth-first. Each edge uses one of three operations:

| edge | operation (per index i < Nv/2) |
|---|---|
| to the left child | `alpha_l[i] = sgn(a*b) min(|a|,|b|)`, with `a = alpha_v[i]`, `b = alpha_v[i+Nv/2]` (min-sum) |
| to the right child | `alpha_r[i] = b + a` if `beta_l[i] = 0`, else `b - a` |
| back to the parent | `beta_v[i] = beta_l[i] ^ beta_r[i]`, `beta_v[i+Nv/2] = beta_r[i]` |

Fast-SSC stops descending when a subtree has one of several known structures. That subtree is then decoded
in one step by a dedicated unit.

The decoder is code-agnostic. A polar code is compiled off-line into an **instruction list**; each
instruction is `{op, level, left}` (`fssc_pkg::instr_t`). `level` is log2 of the node length. `left` says
whether the node is a left child; the root counts as a left child. The operations are `F`, `G`, `COMB`,
`RATE0`, `RATE1`, `REP`, `BIREP`, `SPC` and `END`.

The compiler in `tb/fssc_tb_pkg.sv` (`compile`) visits a node and emits a leaf instruction if the node's
frozen pattern matches one of the leaf types:

- `RATE0`: all bits frozen, any size;
- `RATE1`: no bits frozen, size at most P;
- `REP`: only the last bit unfrozen, size at most 32;
- `BIREP`: only the last two bits unfrozen, size 4 to 64;
- `SPC`: only the first bit frozen, size 4 to 64.

Otherwise it emits `F`, the left subtree, `G`, the right subtree and `COMB`. For the test code this gives
126 instructions:

| F | G | COMB | RATE0 | RATE1 | REP | BIREP | SPC | END |
|---|---|---|---|---|---|---|---|---|
| 31 | 31 | 31 | 5 | 4 | 11 | 3 | 9 | 1 |

The information mask, with 1 marking an information position, is loaded alongside the program. The CRC
check needs it.

The code is **systematic**. The decoder's output is the root's bit estimate, which is the codeword estimate
`x_hat`. The information bits are `x_hat` at the mask positions, in increasing order. The last 16 of them are
the CRC.

## Leaf units: decision LLRs and flips

Each leaf unit is combinational and handles a node of up to P = 64 LLRs in one cycle. Information bit `d` of
the node reports its decision LLR `lambda_d` in lane `d`, with a valid flag. A flip request names `d`.

| unit | decoding | decision LLR(s) | flip of bit d |
|---|---|---|---|
| `rate1_node` | `beta_i = (alpha_i < 0)` | `lambda_d = |alpha_d|`, d = 0..Nv-1 | invert `beta_d` |
| `rep_node` | sign of `S = sum alpha_i`, repeated | `lambda_0 = |S|` | invert all Nv bits |
| `birep_node` | two repetition codes: sums over even and odd positions | `lambda_0 = |S_even|`, `lambda_1 = |S_odd|` | d = 0 inverts all even bits, d = 1 all odd bits |
| `spc_node` | hard decisions; if their parity p is odd, invert the least reliable bit `i_min1` | `lambda_d = |alpha_{d+1}| + s(-1)^p min|alpha|` | see below |

The birepetition node has only its two last positions unfrozen. Its codewords are exactly:

- odd positions all equal to `u_{Nv-1}`;
- even positions all equal to `u_{Nv-1} ^ u_{Nv-2}`.

It therefore splits into two independent repetition codes. It takes the place of the length-4 ML unit of
earlier fast-SSC decoders.

The **SPC node** is the delicate one, in two ways.

- *Decision LLRs.* Its exact decision LLRs would be costly, so an approximation is used. A bit's reliability
  is pushed up by `s*min` when the parity already holds (p = 0), and pulled down by `s*min` when it does not.
  With `s = 2^-S_SHIFT`, the default `S_SHIFT = 1` gives s = 0.5, the value used for the timing results. The
  product is `min >> S_SHIFT`, truncated.
- *Flips.* A flip must keep the parity even, so two bits change together. Let `i_flip = d + 1`.
  - If `i_flip` is the least reliable position `i_min1`, invert `i_flip` and the second least reliable `i_min2`.
  - Otherwise invert `i_flip` and `i_min1`.

  Ties between equal magnitudes go to the lower index.

## The flip list

Trial 1 collects the decision LLRs of every leaf. Only the `Tmax-1` smallest are worth keeping, because only
that many further trials can run. They are kept in two steps:

- **`lambda_select`** ranks the up to 64 decision LLRs of the current leaf and passes on the `Tmax-1`
  smallest, sorted. Each input's rank is the number of valid inputs smaller than it, or equal and at a lower
  lane. The input of rank r goes to output r. It is one cycle of M×M comparators.
- **`insert_sort`** holds the list: `Tmax-1` LLRs of QL bits and `Tmax-1` indices of ceil(log2 k) bits.
  Each leaf cycle of trial 1 merges the new candidates into the list with the same rank network. Old entries
  win ties.

Because of these tie rules, the list is exactly a stable sort of all trial-1 decisions in decoding order.

The index stored is a running count of information bits in decoding order (0..k-1), not a bit position.
During trial t ≥ 2 the controller compares list entry `t-2` with the range of information bits the current
leaf covers, `[info_base, info_base + k_v)`. On a match it passes `d = index - info_base` to that leaf's
flip input.

## Trial sequencing and timing

```
start ─► RUN (walk the program) ─► END ─► CRC (N/P cycles) ─► CHK ─┬─► DONE   CRC ok, or no list entry left
            ▲                                                      │
            └────────── next trial: pc = 0, info_base = 0 ◄────────┘
```

Cycle cost of one trial:

| step | cycles |
|---|---|
| `F`, `G`, `COMB` at a node of length Nv | ceil(Nv/2 / P) |
| `RATE0` | ceil(Nv / P) |
| other leaves | 1 |
| `END` | 1 |
| CRC pass over the root estimate, P bits per cycle | N/P |
| decision | 1 |

For the test code a trial takes **151 cycles**, so the worst case at Tmax = 8 is 1208 cycles. `cycles`
reports the exact count, which is always `trials × cycles per trial`.

The published execution-time results assume 114 cycles per trial and 912 for the worst case. Those figures
come from a model of an existing fast-SSC decoder. This RTL is slower for three reasons:

- it has no pipelining across instructions;
- it has no merged instructions, such as an F combined with a leaf;
- it spends 9 cycles per trial on a separate CRC pass.

Measured averages on the test code are:

| Eb/N0 | average trials | average cycles |
|---|---|---|
| 2.5 dB and above | 1.0 | 151 |
| 1.5 dB | about 1.3 | about 200 |

## Memories and data layout

All memories are arrays of registers, one word per tree position.

| memory | size | contents |
|---|---|---|
| channel LLRs | N × QC | the tree level n (the root's input), loaded from outside |
| LLR memory | N × QA | level l (l < n) at addresses `[2^l, 2^(l+1))` |
| `beta_l`, `beta_r` | 2N bits each | bit estimates of left and right children, level l at `[2^l, 2^(l+1))`; the root estimate is `beta_l[N..2N-1]` |
| information mask | N bits | 1 = information position |
| instructions | `PROG_DEPTH` = 2N | `instr_t` words |

Left and right children need separate partial-sum memories. A left child's estimate has to survive while the
right subtree, which reuses the same levels, is decoded.

## Interface

Signals of `fssc_flip_decoder`:

| signal | dir | meaning |
|---|---|---|
| `llr_we`, `llr_addr`, `llr_data[P]` | in | write P channel LLRs (QC-bit signed, positive = bit 0) to chunk `llr_addr` |
| `mask_we`, `mask_addr`, `mask_data` | in | write P bits of the information mask |
| `prog_we`, `prog_addr`, `prog_data` | in | write one instruction |
| `start` | in | one-cycle pulse: decode the loaded frame |
| `busy` | out | high from the cycle after `start` until `done` |
| `done` | out | one-cycle pulse; results valid from then on |
| `crc_ok`, `trials`, `cycles`, `x_hat[N]` | out | CRC verdict, trials used, cycles spent, codeword estimate |

Writes are accepted only while the decoder is idle or done. Reset `rst_n` is asynchronous and active low; it
clears the control state, not the memories.

Parameters, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `N` | 512 | code length |
| `K` | 128 | information bits including the CRC |
| `P` | 64 | lanes |
| `T_MAX` | 8 | maximum trials |
| `S_SHIFT` | 1 | SPC scaling, s = 0.5 |
| `REP_MAX` | 32 | largest repetition node |
| `CRC_W` | 16 | CRC length |
| `QC` | 6 | channel LLR bits |
| `QA` | 8 | internal LLR bits |
| `QL` | 8 | decision-LLR bits |
| `PROG_DEPTH` | 2N | instruction-memory words |

## Files

| file | contents |
|---|---|
| `rtl/fssc_pkg.sv` | instruction encoding, saturation helpers |
| `rtl/fg_unit.sv` | P-lane f/g/combine array |
| `rtl/rate1_node.sv`, `rep_node.sv`, `birep_node.sv`, `spc_node.sv` | leaf units |
| `rtl/lambda_select.sv`, `insert_sort.sv` | flip-list sorter and list |
| `rtl/crc_check.sv` | 16-bit CRC check |
| `rtl/fssc_flip_decoder.sv` | memories, sequencer and top |
| `tb/fssc_tb_pkg.sv` | code construction, compiler, encoder, AWGN channel, behavioural reference decoder |
| `tb/tb_*.sv` | one self-checking test per module, plus `tb_workloads` |
| `tb/fssc_harness.sv` | shared driver for `tb_workloads` |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. To run the full-size end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal rtl/fssc_pkg.sv tb/fssc_tb_pkg.sv rtl/*.sv \
          tb/tb_fssc_flip_decoder.sv --top-module tb_fssc_flip_decoder -o sim
./obj_dir/sim
```

A unit test needs only the package, its module and the testbench. For `insert_sort`, add
`rtl/lambda_select.sv`. `tb_workloads` additionally needs `tb/fssc_harness.sv`.

`tb_fssc_flip_decoder` runs the default configuration, unmodified, on 600 random frames from 0.5 to 3 dB.
For every frame it checks four things against the behavioural model in `fssc_tb_pkg`:

- the codeword estimate, bit-exact;
- the CRC verdict;
- the number of trials;
- the cycle count.

Whenever the CRC matches, it also checks that the delivered message is the one sent. It fails unless each
mechanism happened at least once: a flip inside each of the four leaf types, a frame rescued by a flip, and a
frame given up after Tmax trials.

`tb_workloads` runs four configurations side by side:

- Tmax = 8 with s = 0.5, the default;
- Tmax = 16;
- s = 1;
- the code compiled without SPC nodes.

## Where this design departs from, or adds to, the published description

The following points are not given in the source and were chosen here:

- **Architecture.** The decoder, its memories and its sequencing are this design's own. Only the node
  algorithms, the list-based flip control, P, Tmax, s and the node size limits are given. Those parts build
  on a prior fast-SSC architecture that is not detailed.
- **Size limits and rate-1 cost.** Rate-1 nodes are limited to P bits here.
- **Leaf types left out.** Composite leaf types of earlier fast-SSC decoders, such as a repetition node followed
  by an SPC node, are not built as units. Such subtrees decompose into the five leaf types above through
  `F`/`G`/`COMB`, which costs cycles but not correctness.
- **Bit widths:** QC = 6, QA = 8, QL = 8.
- **CRC.** The polynomial is x^16+x^12+x^5+1, with initial value 0. The CRC sits in the last 16 information
  bits.
- **Test code construction.** The test code's frozen set uses a Bhattacharyya bound designed at 2 dB, not a
  Tal–Vardy construction. The decoder itself accepts any frozen set.
- **Partial-sum combine.** The formula in the source indexes the right child as `beta_r[i+Nv/2]` for the upper
  half. That reads past the child. The graph of the code shows `beta_r[i-Nv/2]`, which is what is built.
- **Early stop.** Decoding also stops early when the flip list runs out. That happens only for codes with fewer
  than Tmax-1 information bits.
- **Timing.** The timing is slower than the execution-time model the source uses (151 against 114 cycles per
  trial), as explained above.
- **Untested.** The error-rate curves are not reproduced: the testbenches run hundreds of frames, not the
  millions needed for error rates of 1e-3.
