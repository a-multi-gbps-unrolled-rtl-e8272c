# Unrolled Fast-SSC-List decoder for a (512,427) systematic polar code

This is synthesizable SystemVerilog for a list decoder of one fixed polar code.
The code has length 512 and 427 information bits, and the list keeps 2 paths.
The decoder is **unrolled**: every operation of the decoding algorithm is a piece
of hardware of its own, laid out as a tree that mirrors the code's structure.
Frames move through that tree like water through pipes. A new frame can enter
every 20 clock cycles, and each frame leaves 243 cycles after it entered. Nothing
in the datapath is shared or scheduled.

The architecture follows P. Giard et al., "A Multi-Gbps Unrolled Hardware List
Decoder for a Systematic Polar Code". That paper gives the algorithm, the block
structure and the main numbers: list size, node-size limits, word widths and the
initiation interval. The frozen set of the code, the register-sharing scheme,
the candidate rules of the approximated nodes and all interfaces are this
design's own. Each is listed under "Where this design departs or had to choose".
At 468 MHz the published figures are 12 Gbps coded throughput and 0.54 µs
latency. At that clock this RTL gives the same throughput and 0.52 µs. No
timing analysis was done here.

## 1. Decoding as a walk down a tree

A polar code of length N is two polar codes of length N/2, combined by one
butterfly stage. Successive-cancellation (SC) decoding uses that recursion. A
node receives N log-likelihood ratios (LLRs; positive favours bit 0):

* **F** gives the left child its LLRs: `F(a,b) = sign(a)·sign(b)·min(|a|,|b|)`
  (min-sum), on the pairs (i, i+N/2).
* The left child returns its estimate β_l. **G** then gives the right child its
  LLRs: `G(a,b,β) = b + (1−2β)·a`.
* The right child returns β_r. **Combine** forms the node's estimate
  `{β_l ⊕ β_r, β_r}`: the lower half of the indices gets β_l ⊕ β_r and the upper
  half gets β_r.

Fast-SSC decoding stops the recursion early at four kinds of sub-code. Each kind
has a direct decoder:

| node      | frozen pattern                | size limit here | decoder        |
|-----------|-------------------------------|-----------------|----------------|
| Rate-0    | all bits frozen               | ≤ 8             | `rate0_dec`    |
| Repetition| only the last bit free        | ≤ 8             | `rep_dec`      |
| SPC       | only the first bit frozen     | ≤ 4             | `spc_dec`      |
| Rate-1    | no bit frozen                 | none            | `rate1_dec`    |

A node that matches none of these, or is larger than its limit, is split. With
the built-in frozen set, the 512-bit tree has 49 leaves: 9 Rate-0,
6 Repetition, 9 SPC and 25 Rate-1 nodes. The largest Rate-1 node has 128 bits.

`fssl_node` is that recursion in hardware. Its parameters are its size `NV`,
the frozen mask `FR` and its position in the pipeline. It instantiates itself
for the two halves until it reaches a node that a direct decoder handles.
Compile-time functions in `fssl_pkg` (`node_kind`, `node_lat`, `node_pout`)
classify each node and compute its latency, so the tree and its pipeline build
themselves from the mask.

## 2. Two paths through one tree

A list decoder follows up to L = 2 candidate decodings, called paths, at once.
Each path has a **path metric (PM)**: the sum of |LLR| over every decision that
went against the LLR's sign. Lower is more likely. The hardest part of this design
is that the two paths are not fixed. Every leaf that makes a decision makes
up to two candidates from each path. It keeps the best two of them, and either
survivor may come from either input path.

Every node and leaf therefore carries three things per output path `p`:

* `beta[p]`: the path's estimate for this node's indices;
* `pm_out[p]`: its metric;
* `src[p]`: which *input* path of this node it extends.

The `src` index is the survivor information, and a split node uses it twice:

1. **Before G.** The right child's path k must continue from the parent LLRs of
   the path that left-child output k came from. So G reads
   `alpha[src_l[k]]`, not `alpha[k]`. These are the multiplexers that the
   architecture places after each sorting step.
2. **At Combine.** Output path p of the right child came from its input path
   `src_r[p]`, which carries left estimate `beta_l[src_r[p]]`. Combine joins
   those two, and reports `src_l[src_r[p]]` upward (`combine_unit`).

The published block diagram does this differently but gets the same bits. There,
registers hold whole path histories, and every sort reorders them.

**The first fork.** A path is born only at the first information bit. The tree
therefore knows at elaboration time how many paths are live at every node:
`P_IN` is 1 until the first node with an information bit and 2 after it. A leaf
entered with one path makes its two candidates and keeps both without sorting,
as the example in the paper does for its Repetition node.

**Sorting and normalization.** A leaf entered with two paths makes four
candidates. Their metrics are computed in 12-bit arithmetic. They are then
saturated to the 7-bit range 0…63 and stored in candidate registers.
`lbest_sort` compares every pair of these 7-bit values in one level of
comparators. It ranks the candidates (a tie goes to the lower index) and keeps
ranks 0 and 1, so slot 0 is always the best path. The kept metrics are then
normalized: the best one is subtracted, so the best metric becomes 0. Leaves
that do not sort normalize in the same way and then saturate to 0…63. These are
Rate-0 leaves and leaves entered with a single path.

**Choosing the result.** After the last leaf, `best_select` takes the path with
the smaller metric. With this code the last leaf sorts, so that is always path 0.
No CRC is used.

## 3. The constituent decoders

The penalty of a word for a path is the path's PM plus the sum of |α_i| at each
position where the word disagrees with the hard decision (1 where α_i < 0).

* **Rate-0** (`rate0_dec`, 1 cycle). The word is all-zero. The penalty is the sum
  of |α| over the negative LLRs.
* **Repetition** (`rep_dec`, 1 cycle with one path, 2 with two). The candidates
  are the all-zero and all-one words, with exact metrics.
* **SPC** (`spc_dec`, 2 cycles with one path, 3 with two). Cycle 1 takes the hard
  decisions, their parity and the two least reliable positions i1, i2 (m1 ≤ m2).
  Cycle 2 builds the candidates:

  | parity | candidate 1         | candidate 2                         |
  |--------|---------------------|-------------------------------------|
  | even   | h (PM)              | h with i1 and i2 flipped (PM+m1+m2) |
  | odd    | h ⊕ e_i1 (PM+m1)    | h ⊕ e_i2 (PM+m2)                    |

  These are the two most likely even-parity words of the path.
* **Rate-1** (`rate1_dec`, 1 cycle with one path, 2 with two). The candidates are
  the hard decision (PM) and the hard decision with its least reliable bit
  flipped (PM + min|α|). The bit is found by a comparator search over up to 128
  magnitudes.

With two live paths the last cycle of each list decoder is the sort.

## 4. Pipeline, initiation interval and retention registers

`frame_ctrl` accepts a frame (`in_valid && in_ready`) at most once every II = 20
cycles. Each accepted frame starts a one-bit token in a shift register, so
`stg[k]` is high exactly k cycles after acceptance. **Every register in the
datapath has a load enable taken from one fixed `stg[k]`**. It is loaded once per
frame and holds its value for at least 20 cycles, until the next frame's token
arrives. These enables are also where clock gating would be applied.

Because of this, a value produced at stage S can be read directly by any stage up
to S+19. A split node must keep its input LLRs while its whole left subtree runs,
and its left results while its right subtree runs. Such a wait can be far longer
than 19 cycles (at the root it is over 100). `delay_line` then copies the value,
in its last valid cycle, into a chain of ⌈(R−19)/20⌉ registers. Register j loads
at stage S+20(j+1)−1. The published design is "partially pipelined" with an
initiation interval of 20 but does not spell out its register scheme. This is
the scheme used here: deep delays cost one register per 20 cycles instead of
one per cycle.

Stage accounting for a node that starts at stage S:

```
S            F of both paths            -> register (left child starts at S+1)
T = S+1+LAT_L  select LLRs by src_l, G  -> register (right child starts at T+1)
U = T+1+LAT_R  Combine                  -> register (outputs valid from U+1)
latency = LAT_L + LAT_R + 3
```

The whole decoder has 1 input register (`alpha_c`), 241 cycles of tree and
1 output register (`beta_c`), which makes `DEC_LAT` = 243 cycles.

**Frame spacing is a hard rule.** Data registers have no reset and no valid bit
of their own. Correct operation depends on frames being at least II cycles
apart, and `frame_ctrl` enforces that (an assertion checks it too). `II` can be
changed in `fssl_pkg`, and the retention chains are then recomputed. Each
register is read only within the window its chain accounts for, so other values
should work, but only II = 20 has been simulated.

## 5. Interface (`fssl_decoder`)

| port        | dir | width      | meaning |
|-------------|-----|------------|---------|
| `clk`       | in  | 1          | clock |
| `rst_n`     | in  | 1          | asynchronous active-low reset of the frame control |
| `in_valid`  | in  | 1          | a frame is offered |
| `in_ready`  | out | 1          | ≥ 20 cycles since the last accepted frame |
| `in_llr`    | in  | 512 × 5    | channel LLRs, two's complement, positive = bit 0, index i = code bit i |
| `out_valid` | out | 1          | one-cycle pulse, 243 cycles after acceptance |
| `out_cw`    | out | 512        | estimated codeword; bit i = code bit i |
| `out_path`  | out | 1          | list entry chosen |
| `out_pm`    | out | 7          | its normalized metric |

The whole frame is taken in one cycle. The code is systematic, so the 427
information bits are `out_cw[i]` at the indices where `FROZEN[i]` is 0. The
outputs hold until the next result is loaded.

## 6. Numbers and where they live

All shared constants are in `rtl/fssl_pkg.sv`:

| constant | value | meaning |
|----------|-------|---------|
| `N`, `K` | 512, 427 | code |
| `L` | 2 | list size; the datapath is written for 2 |
| `QI`, `QC`, `QF` | 6, 5, 0 | internal / channel LLR bits, fractional bits (format 6.5.0) |
| `QPM` | 7 | path-metric bits (QI+1) |
| `II` | 20 | initiation interval |
| `MAX_R0`, `MAX_REP`, `MAX_SPC` | 8, 8, 4 | node-size limits |
| `SPC_STAGES` | 2 | SPC pipeline depth |
| `FROZEN` | 512-bit mask | bit i = 1: u_i frozen |

Internal LLRs saturate at ±31 so that |α| always fits in 6 bits. Channel LLRs
are sign-extended from 5 to 6 bits.

**The frozen set.** The paper does not give one. This set keeps the 427 indices
with the smallest Bhattacharyya parameter. The base channel starts from
z = exp(−R·Eb/N0), with R = 427/512 and a design Eb/N0 of 4 dB. Index i is
reached by walking its bits from the most significant down: a 0 bit maps z to
2z − z² and a 1 bit maps z to z². With the node-size limits, this set produces
a largest Rate-1 node of 128 bits, as the paper reports. To decode another code
of length 512, replace `FROZEN`. The tree, the latencies and `DEC_LAT` follow
automatically, but the end-to-end testbench's `EXP_LAT` must be updated. `N` can
be changed the same way, with a mask of that length.

## 7. Where this design departs or had to choose

* **Frozen set**: this design's own (section 6).
* **Survivor bookkeeping**: the survivor index is resolved at Combine instead
  of reordering full path histories at every sort. The same bits are selected.
* **G is never computed ahead of time.** The paper's small example computes G
  for both Repetition outcomes in advance. It also states that this does not
  apply in general, so it is not done here.
* **Rate-1 approximation**: only the single least reliable bit is flipped
  (L−1 = 1). **SPC**: the candidate rule of section 3. For L = 2 it is the exact
  best pair per path. The paper says both node types use approximations but does
  not give them.
* **Normalization** also after Rate-0 nodes and after an unsorted first fork;
  metrics saturate at 63; sorter ties go to the lower candidate index.
* **Register placement**: a register after every F, G, Combine and leaf
  stage, and retention chains as in section 4. The paper's registers may be
  placed differently, and its 253-cycle latency includes loading and output
  phases this interface does not have.
* **Interface**: parallel LLR input with valid/ready, no CRC, best path by
  metric. Clock gating is left to the synthesis tool. Here it appears as
  per-stage load enables.
* Only the 6.5.0 quantization is implemented. The other formats the paper
  evaluates (7.6.1, 6.5.1, 5.4.0) would need different widths or fractional
  bits.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each one computes its
expected values independently of the RTL and prints
`TB_RESULT checks=… failures=…`.

* `tb_fssl_decoder`: the whole decoder at its default parameters. It encodes
  random information words systematically, adds Gaussian noise (BPSK) and
  quantizes the LLRs to 5 bits. It offers 244 frames back to back, so the
  20-cycle throttle is exercised (`in_ready` low) and frames follow each other
  exactly 20 cycles apart. It checks the following:
  * noiseless frames and 40 frames at 6 dB must all decode;
  * the frame error rate at 4.25 dB must stay under 10 % (measured: 4/200);
  * the latency must be exactly 243 cycles;
  * channel errors must be corrected.

  A plain SC decoder written in the testbench runs on the same frames. The test
  requires at least one frame that SC gets wrong and the list decoder gets
  right (measured: SC failed 5 frames; the list decoder recovered 2 of them).
* `tb_fssl_node`: a split node on the paper's (8,4) example code (Repetition
  node of 4, then SPC node of 4). Every codeword is enumerated, and the outputs
  are checked in the exact cycle the 7-cycle latency predicts, with frames
  20 cycles apart.
* `tb_rate0_dec`, `tb_rep_dec`, `tb_spc_dec`, `tb_rate1_dec`: one instance with
  one live path and one with two. They are checked against an enumeration model
  (`tb_leaf_pkg`) at the exact output cycle.
* `tb_lbest_sort`, `tb_f_unit`, `tb_g_unit`, `tb_combine_unit`,
  `tb_best_select`: random checks against integer references, including ties
  and saturation.
* `tb_delay_line`: values read 7, 45 and 60 cycles later, with frames every
  20 cycles.
* `tb_frame_ctrl`: a cycle-by-cycle model of `in_ready` and of every stage
  token.

What is *not* verified: a bit-exact comparison of the full decoder against a
software Fast-SSC-List model, timing, area and power.

## 9. Simulating

Every file holds one module or package, named after the file. The packages must
be given first:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/fssl_pkg.sv tb/tb_fssl_decoder.sv --top-module tb_fssl_decoder
./obj_dir/Vtb_fssl_decoder
```

For the constituent-decoder testbenches, add `tb/tb_leaf_pkg.sv` after
`rtl/fssl_pkg.sv`. The full decoder takes a few minutes to compile in C++ and
under a second to run.

To lint, give `fssl_decoder` as the top. Verilator does not build the recursive
children of `fssl_node` when that module is itself the top. It then reports the
children's outputs as undriven, although they are driven in every real
hierarchy.
