# A parallel SC decoder for G_N-coset codes, N = 16384

Polar codes and other G_N-coset codes are normally decoded by successive cancellation (SC).
SC works through the code bits one after another, so its throughput falls as the code grows.
This design gets around that by seeing a long code as a product-like arrangement of short codes.

Write the N = 16384 code bits as a 128 x 128 array, with bit k at row k / 128 and column k % 128.
The generator matrix G_16384 is the Kronecker product G_128 (x) G_128. Every column of a codeword
is then a codeword of a length-128 "sub-code", and so is every row, up to a fixed permutation of
the information bits. The decoder has 128 small SC cores that decode all 128 columns at once,
then all 128 rows at once, and so on. Between these half-iterations the cores swap soft
information. This is the parallel decoding framework (PDF).

This RTL is a complete, synthesizable PDF-SC decoder at the full size: 128 SC cores of length 128,
grouped four to a group into 32 groups, with 5-bit LLRs and up to 8 iterations.

## The two graphs

Sub-decoder i (0..127) sees one of two 128-bit slices of the code, depending on the iteration:

| iteration t | graph | sub-decoder i holds code bits        |
|-------------|-------|--------------------------------------|
| odd         | G     | k = j*128 + i, j = 0..127 (column i) |
| even        | G_pi  | k = i*128 + j, j = 0..127 (row i)    |

Bit j of sub-decoder i in one graph is bit i of sub-decoder j in the other. This is what makes the
data exchange a transpose, and it is why the interconnect further down looks the way it does. The
frozen set of each sub-code is given separately for each graph (ports `frozen_g_i`, `frozen_pi_i`).

## One iteration

For each sub-decoder i in iteration t:

1. **Input LLRs.** For each of its bits j, add a damping term to the channel LLR y:

       L(j) = y + Delta * (1 - 2 c1)       c1 = hard output of sub-decoder j at t-1, bit i
                                           c2 = hard output of sub-decoder i at t-2, bit j
       Delta = delta (= alpha + beta)  if sub-decoder j failed its check at t-1 and c1 != c2
             = theta (= alpha - beta)  if sub-decoder j failed its check at t-1 and c1 == c2
             = gamma                   if sub-decoder j passed its check at t-1

   The reasoning: a bit from a sub-code that passed its check is trusted with a large weight,
   gamma. A bit from a failed sub-code is trusted more when two iterations agree on it. At t = 1
   the channel LLRs are used alone. No t-2 output exists at t = 2, so this design then reads c2
   as 0; give delta = theta for t = 2 to make that irrelevant.

2. **Error check.** Take the hard decisions h of L and form u = h x G_128. If any frozen position
   of u is 1, the sub-code has an error and is "Type-1". Otherwise it is "Type-2".
3. **Decode.** Type-1 sub-codes are SC decoded. Type-2 sub-codes take h as their output, with no
   SC run. At high SNR most sub-codes are Type-2, which saves power.
4. **Stop.** Stop after `tmax_i` iterations. If `early_en_i` is set, also stop as soon as every
   sub-code of an iteration was Type-2. The output is the last iteration's hard outputs, put
   back in code-bit order.

The damping factors delta/theta/gamma for each t are ports. They are meant to be optimized
offline for the code at hand.

## Block structure

```
                 in_llr_i (one row of 128 LLRs per cycle)
                        |
                 chan_llr_store  ---- column i (G) or row i (G_pi) --->  32 x sub_decoder_group
                        ^                                                   |  4 x sc_core
 pdf_controller --------+---- lock-step load/check/start to all groups --->  |  delta_unit
      ^   busy / any-error                                                  |  err_detector
      +---------------------------------------------------------------------+  c^{t-2} store
                                   global routing (transpose) <---- cout ----+
                                        |  cin ----> back into the groups
                                   output_buffer ---> out_bits_o (one row per cycle)
```

| file                    | role |
|-------------------------|------|
| `gn_pkg.sv`             | sizes (NSUB=128, CPG=4, TMAX=8, QW=5), the LLR type, saturating PE adder, min-sum f |
| `sc_core.sv`            | length-128 SC decoder. Its PE adders also form the input LLRs L = y +- Delta |
| `err_detector.sv`       | u = h x G_128 as an XOR butterfly; error = any frozen u bit set |
| `delta_unit.sv`         | picks delta/theta/gamma and the sign for 128 bits at once |
| `sub_decoder_group.sv`  | four cores sharing one Delta unit, one detector and one set of pins |
| `chan_llr_store.sv`     | 128 x 128 x 5-bit channel LLRs, read by column or by row |
| `pdf_controller.sv`     | iteration FSM |
| `output_buffer.sv`      | collects the final hard outputs and streams them in row order |
| `gn_coset_decoder.sv`   | top: wires everything, including the transpose routing |

## The SC core

`sc_core` decodes one length-128 sub-code. It walks the decoding tree with one step per clock
cycle. Node LLRs are stored by tree level, with level s at offset 2^s. Partial sums are kept per
level in the same way.

At each node it first tries a special rule. A node that matches one is decoded in one cycle
without going further down the tree:

| node (by its frozen bits)              | size       | decision |
|----------------------------------------|------------|----------|
| all frozen (Rate-0)                    | any        | all zero; subtree skipped |
| none frozen (Rate-1)                   | <= 16 bits | hard decisions |
| all but the last frozen (REP)          | <= 16 bits | sign of the LLR sum, repeated |
| only the first frozen (SPC)            | <= 16 bits | hard decisions, least reliable bit flipped if parity is odd |
| anything else                          | 4 bits     | maximum likelihood over the allowed codewords |

Nodes that do not match descend: f (min-sum) to the left child, g to the right child, then a
combine step on the way back. Each visited node costs two cycles, one going down and one
returning. The decoding time therefore depends on the frozen set. With Reed-Muller-like frozen
sets it is 38 cycles for K = 115, 119 and 122, 46 cycles for K = 111, and 30 cycles for a
Rate-1 code.

There are 64 PE adders. They compute g at each level, and between decodings they also form the
input LLRs L = sat(y +- Delta), in two beats of 64 LLRs. All LLRs are 5-bit two's complement,
saturated to +-15. Overflow cannot wrap.

`start_i` runs a decoding. `bypass_i` copies the hard decisions of the loaded LLRs to `chat_o` in
one cycle. `chat_o` holds the last result until the next `start_i` or `bypass_i`, because the
other sub-decoders read it during the next load.

## Core sharing in a group

Giving each of the 128 cores its own pins, Delta unit and error detector would be costly. So
four cores form a `sub_decoder_group` and share them, handled one core after another. The
controller drives every group in lock step with a 10-cycle sequence per iteration:

| cycle | load (Delta unit + PEs)   | check (shared detector)  |
|-------|---------------------------|--------------------------|
| 0, 1  | core 0, beats 0 and 1     |                          |
| 2, 3  | core 1                    | core 0 (cycle 2)         |
| 4, 5  | core 2                    | core 1 (cycle 4)         |
| 6, 7  | core 3                    | core 2 (cycle 6)         |
| 8     |                           | core 3                   |
| 9     | `dec_start`: flagged cores start SC, the others bypass; flags are published | |

The error flags and hard outputs of iteration t-1 must stay visible until every group has
loaded. So flags found during the sequence are held pending and published only at cycle 9. SC
outputs change only after that.

Each group keeps four 128-bit registers holding c^{t-2} for its cores. A core's register takes the
core's current output as soon as the core has been loaded. At that moment the output is still
that of iteration t-1, and it becomes "t-2" for the next iteration of the same graph.

## The transpose routing

When a group loads its core q (sub-decoder i = 4g + q), that core needs bit i of all 128
sub-decoders' outputs. Each group has only 128 output pins for its four cores. In step q a group
puts out bits q, q+4, q+8, ... of each of its four cores:

    cout[g][32*q' + m] = c(sub-decoder 4g+q', bit 4m+q)       q' = 0..3, m = 0..31

Together, in step q, the 32 groups present exactly the bits that the 32 cores being loaded need.
The top wires them across:

    cin[g][4g' + q'] = cout[g'][32*q' + g]

This is pure wiring of 32 x 128 lines; nothing is multiplexed at the top level. The 128 error
flags are sent to every group.

## Timing

* Input: 128 cycles, one row of 128 LLRs per cycle (valid/ready).
* Each iteration: 10 cycles of load/check/start, then the SC time of the slowest Type-1 core
  (0 if all are Type-2), then 1 cycle to see all cores idle. So an iteration takes 11 + SC cycles.
* Capture: 4 cycles over the same shared pins into the output buffer.
* Output: 128 cycles, one row of 128 decoded code bits per cycle (valid/ready, with
  `out_last_o`). `iters_o` and `early_o` give the iteration count of that codeword.

The next codeword's input overlaps the previous codeword's output. For example, 8 iterations at
K_sub = 119 with every sub-code Type-1 take about 8 x (11 + 38) + 4 = 396 cycles from the last
input row to the first output row.

## What follows the source and what is this design's own

Taken from the published architecture:
* the PDF algorithm: the two graphs alternating, the Type-1/Type-2 rule, the delta/theta/gamma
  update, early termination;
* the sizes: 128 sub-decoders of length 128, 4 per group, 32 groups, 5-bit quantization, up to
  8 iterations;
* the SC node types and their size limits;
* reusing the SC adders for the LLR update;
* sharing pins, the Delta circuit and the error detector among four cores, with a c^{t-2} store
  per core;
* the block names (channel-LLR storage, FSM controller, global routing, output buffer).

This design's own choices:
* **SC core internals.** The published design uses an SC decoder described elsewhere. This core
  is a straightforward tree walker and is about twice as slow: 38 cycles against roughly 18 at
  K_sub = 119.
* **Schedule.** The 10-cycle load/check sequence uses 64 PEs per core, so a load takes 2 beats.
  An iteration here therefore has about 11 cycles of overhead. The published latency figures
  suggest about 5.
* **Interfaces.** The row-wise input and output, the handshakes, and the frozen sets and damping
  factors as ports (the source does not say where they are stored).
* **Details the source leaves open.** Delta = 0 at t = 1; the t = 2 handling above; tie rules
  in SPC/ML/REP; min-sum f; saturation.
* **Error check reading.** The source writes the syndrome test as "u != 0 for all frozen j".
  It is built here as "for any frozen j", which is what a syndrome check means.
* **Not modelled.** Anything physical: chip pins, layout, clock.

## Simulating

The testbenches are self-checking. Each prints `TB_RESULT checks=<n> failures=<m>`. For a unit
testbench, e.g. the SC core:

    verilator --binary --timing --assert -Irtl rtl/gn_pkg.sv tb/gn_ref_pkg.sv \
        rtl/sc_core.sv tb/tb_sc_core.sv --top-module tb_sc_core
    ./obj_dir/Vtb_sc_core

For the end-to-end test, list all `rtl/*.sv` files with `rtl/gn_pkg.sv` first, then
`tb/gn_ref_pkg.sv` and `tb/tb_gn_coset_decoder.sv`, with `--top-module tb_gn_coset_decoder`.

`tb/gn_ref_pkg.sv` holds the reference models: the encoder from the matrix definition of G_n, the
syndrome, a recursive SC decoder with the same node rules, and Reed-Muller-like frozen sets.

| testbench                | what it checks |
|--------------------------|----------------|
| `tb_sc_core`             | 120 random codes/noise levels: output equals the reference SC, cycles = 2 x visited nodes, clean inputs decode correctly, bypass |
| `tb_err_detector`        | syndrome against the matrix-definition encoder, single-bit errors |
| `tb_delta_unit`          | every combination of the selection inputs |
| `tb_chan_llr_store`      | row/column addressing for both graphs, clamping |
| `tb_output_buffer`       | index mapping for both graphs, back-pressure, last flag |
| `tb_pdf_controller`      | step sequence, graph alternation, iteration limit, early stop, cycle counts |
| `tb_sub_decoder_group`   | a group against the algorithm, Type-1 and Type-2 cores, the c^{t-2} store |
| `tb_gn_coset_decoder`    | whole decoder against a bit-exact model of the algorithm, plus latency and mechanism counters |

**Sizes simulated.** The end-to-end test runs the top with sub-codes of length 64: a 4096-bit
code with 16 groups of 4 cores. Everything is parameterized by the sub-code length N, and N = 32
works too. The full N = 128 top (16384 bits, 128 cores) was not simulated end to end. Its
Verilator C++ model is large enough that building it takes well over 20 minutes. Each block is
tested at N = 128 in its own testbench.

The end-to-end test uses product-code codewords at the source's sub-code rates scaled to
length 64: 57/64 and 59/64, with Reed-Muller-like frozen sets. It covers low-noise codewords,
which must decode error-free and stop early, and noisy ones, which run to the iteration limit.
It exercises both graphs, Type-1 and Type-2 sub-codes, input gaps, output back-pressure, and
input overlapping output. It counts each of these and fails if one never happened.

## Changing it

* `gn_pkg.sv`: `QW` (LLR width; `LLR_MAX` follows), `TMAX`, `CPG` (the schedule assumes 4).
* `N` on the top: the sub-code length, a power of two of at least 32, with N/4 groups.
* `SMALL_LVL` in `sc_core`: the largest node size for the special rules.
