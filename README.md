# Unrolled list decoder for row-merged polar codes

## The idea

A polar code of length N = 2^n sends information on the K most reliable
synthetic channels and freezes the others to zero. A *row-merged* polar code
takes a small set of pairs (r, d), where r is an information position and d is
a frozen position, and sets u_d = u_r. Every frozen bit d of a pair becomes a
*dynamic frozen bit*. Its value is no longer known in advance. It is a copy of
an earlier decision. The code keeps its rate, but the extra structure raises the
minimum distance, or lowers the number of minimum-weight codewords, at almost
no decoding cost.

This RTL is a decoder for such codes. It is a fast simplified successive-
cancellation list (FSSCL) decoder, fully unrolled and fully pipelined: every
node of the decoding tree is its own piece of hardware, and a new codeword of
N channel LLRs enters on every clock. The throughput is therefore N bits per
cycle. At 500 MHz that is 64 Gbit/s for N = 128 and 128 Gbit/s for N = 256.

The decoder handles the dynamic frozen bits with two extra kinds of logic:

* **IBE (information bit extraction).** This runs at the leaf that decides bit
  r of a pair. It recovers u_r of every surviving path from that leaf's
  partial sums. Because the leaf outputs codeword bits, not message bits, this
  is a polar transform (u = beta * G) restricted to the positions r.
* **DR (dynamic frozen bit recovery).** This runs at the leaf that holds bit d.
  The list has been re-sorted several times since r was decided, so path l at
  leaf d does not descend from path l at leaf r. DR follows each path back to
  its ancestor at leaf r and builds the vector delta of dynamic frozen values
  for the leaf.

## Codes built in

`rmpc_pkg` holds three codes, selected by the `CODE` parameter of the top:

| CODE | code      | information set                                  | row-merges |
|------|-----------|--------------------------------------------------|------------|
| 0    | C(16,7)   | {5,6,7,11,13,14,15}                              | (5,10), (6,12) |
| 1    | C(128,60) | everything at or above 29, 43 or 71 in the partial order | 17 pairs (default) |
| 2    | C(256,75) | everything at or above 63, 115, 157 or 167       | 24 pairs |

For the two larger codes the information set is given by its *minimal
elements* in the partial order of synthetic channels. Index j is at least as
reliable as index i when, for every bit position t, j has at least as many ones
at or above t as i does. The package expands the set with `po_leq`. The pair
lists are the tables `RM128_R/D` and `RM256_R/D`. C(16,7) is a small example,
useful for reading waveforms.

## The decoding tree and how it is unrolled

`fsscl_node` is a recursive module. A node covering bits [BASE, BASE+NV)
checks the frozen set (`node_kind`) and becomes one of two things:

* **A leaf**, if the bits match one of these four patterns:
  * Rate-0: all bits frozen.
  * REP: only the last bit is information.
  * SPC: only the first bit is frozen.
  * Rate-1: all bits are information.
* **An inner node**, otherwise. It expands into

      alpha --F--> [reg] --> left subtree --> G (uses beta_l, o_l) --> [reg] --> right subtree --> H --> beta, o
        \______________ delay line (LLRs) ______/       \____ delay line (beta_l, o_l) ____/

  F is the min-sum rule: sign product times the smaller magnitude. G is
  b + (-1)^beta * a. H is [beta_l XOR beta_r, beta_r].

Each path carries these values alongside its data:

* a path metric;
* a valid flag;
* the repeated-bit side band (below).

These values pass through both children of an inner node.

List decoding adds one thing to every stage: a path pointer vector `o`. After
each sorter, output path l continues input path o[l]. G therefore reads the
parent LLRs of path o_l[l]. H reads the left partial sums of path o_r[l] and
returns the composed pointer o_l[o_r[l]].

For C(128,60) the pruned tree has 20 leaves:

* 4 Rate-0
* 6 REP
* 10 SPC
* no Rate-1

C(256,75) has 26 leaves: 3 Rate-0, 11 REP, 12 SPC and no Rate-1. No leaf of either code holds both bits of a pair.
This matters because the leaf kernels assume that the dynamic frozen values
they need were decided in an earlier leaf.

## Leaf kernels

All leaves use the path metric rule: add |alpha_i| for every bit that
disagrees with the hard decision of alpha_i. Metrics saturate at 255.

| leaf | what it does | candidates per path |
|------|--------------|---------------------|
| Rate-0 (`fsscl_rate0`) | beta = chi = delta * G, the frozen pattern made of the dynamic bits. Only the metric changes. | 1, no sorter |
| REP (`fsscl_rep`) | b = HD(sum of alpha_j * (-1)^chi_j). Candidates are b XOR chi and its complement. | 2 |
| SPC (`fsscl_spc`) | The parity target is the dynamic frozen bit delta_0. The hard decision is fixed up by flipping the least reliable bit if the parity is wrong. More candidates come from flipping pairs among the three least reliable bits. | 4 |
| Rate-1 (`fsscl_rate1`) | The hard decision, plus flips of every subset of the two least reliable bits. | 4 |

Every leaf except Rate-0 continues as follows:

1. Its candidates go through a register.
2. `fsscl_sorter` keeps the L best candidates. Ordering is by valid flag first, then metric, then candidate index.
3. IBE runs.
4. A second register.

## Tracking repeated bits through the list (side band)

For every pair k the pipeline carries two things:

* `ub[k][l]`: the value of u_r stored for each of the L paths, as it was when
  leaf r was decided.
* `cp[k][l]`: for the current path l, the index of the path at leaf r that it
  descends from.

These values are updated at each leaf as follows:

* Leaf holding r: IBE writes the new u_r values into ub[k], and cp[k] becomes the identity.
* Any other leaf with a sorter: every pointer moves one step, cp[k][l] <- cp[k][o[l]].
* Leaf holding d: DR outputs delta[l][d-BASE] = ub[k][cp[k][l]], a single multiplexer per bit and path.

The same side band travels through the delay lines of every inner node, as part
of the bundle the node already delays.

**Departure.** The reference architecture keeps every sorter's pointer vector
in a delay line and places a cascade of multiplexers inside DR, one per sorter
between r and d. Here the pointer is composed one step at each sorter instead.
The back-tracked bit is the same, and the DR block no longer grows with the
distance between r and d.

## Registers, latency and timing

The stages are registered as follows:

* F and G outputs: registered.
* Leaf kernels: registered, with a second register after the sorter and IBE.
* H and Rate-0 leaves: combinational.
* The final path selection (`fsscl_path_select`): one output register.

The delay lines are shift registers (`delay_line`), sized from `node_lat` so
that every operand arrives on the cycle it is needed. The latency is the
constant `decoder_lat(CODE)`:

| configuration | this RTL | reference design (timing-driven register balancing) |
|---------------|----------|------------------------------------------------------|
| C(128,60), L = 8 | 71 cycles | 32 cycles |
| C(128,60), L = 4 | 71 cycles | 24 cycles |
| C(256,75), L = 8 | 97 cycles | 50 cycles |
| C(256,75), L = 4 | 97 cycles | 34 cycles |

The reference designs place registers with a timing engine, based on a
characterisation of each block at the target clock. Blocks that are fast
enough are left combinational, and their delay-line registers go with them.
That engine is not reproduced here. The fixed placement above gives the same
throughput, but more cycles of latency and more delay-line storage. How many
cycles each stage gets is set by the `LAT_*` constants in `rmpc_pkg`.

## Interface of the top, `rmpc_decoder`

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk | in | 1 | clock |
| rst_n | in | 1 | synchronous active-low reset; it clears only the valid pipeline |
| in_valid | in | 1 | `llr` holds a frame |
| llr | in | N x 6 | channel LLRs, two's complement; a positive value favours bit 0 |
| out_valid | out | 1 | result present, `decoder_lat(CODE)` cycles after the frame was taken |
| x_hat | out | N | decided codeword |
| u_hat | out | N | x_hat * G: information bits, the repeated copies at the d positions, zeros elsewhere |
| best_path | out | log2 L | winning list slot |
| best_pm | out | 8 | its path metric |

There is no back-pressure: a result appears on every cycle after a frame
entered. At the root only path 0 is valid, with metric 0. The other slots are
marked invalid and fill as paths split.

Parameters: `CODE` (default 1), `L` (default 8). The word widths are fixed in
the package: 6-bit LLRs (internal values saturate to +/-31) and 8-bit metrics.

## What follows the reference design and what does not

Follows it:

* the code definitions and pair sets;
* 6-bit LLRs and 8-bit path metrics;
* min-sum F;
* the four leaf types, with their dynamic-frozen rules (chi = delta * G for Rate-0 and REP, delta_0 as the parity target of SPC);
* IBE as a polar transform;
* DR as back-tracking along the path pointers;
* one codeword per clock;
* list sizes 8 and 4.

Own choices:

* The register placement and latency (above).
* Per-step pointer composition instead of a multiplexer cascade in DR.
* Shift registers everywhere. There are no clock-gated circular buffers.
* A valid flag per path.
* Symmetric saturation.
* The sorter: a full rank computation (each candidate counts how many beat it), not a specific sorting network.
* The number of flipped positions in SPC (3) and Rate-1 (2). The reference design tuned these thresholds for 0.05 dB loss, but their values are not published.

Not built:

* The standard-cell implementation: area, power and the 500 MHz timing closure.
* The baseline decoders the design was compared with: 5G CRC-aided and
  adaptive SCL.
* The C(1024, 512+7) example code, whose information set is not listed.

## Testbenches

Every module has a self-checking testbench in `tb/`. Each one computes the
expected values from the definitions (matrix-form polar transform, exhaustive
search for SPC, a stable sort, and so on), prints
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog.

End-to-end tests:

* `tb_rmpc_decoder`: the default top, with no parameter overrides.
* `tb_rmpc_c128_l4`, `tb_rmpc_c256_l4`, `tb_rmpc_c256_l8`: the other configurations.

All four work the same way. The testbench has its own encoder: it expands the
minimal information set, copies u_r into u_d and multiplies by G. It sends 240
frames back to back: 40 without noise, 120 at low noise and 80 at higher noise.
It then checks:

* the output is a codeword (frozen bits zero, u_d = u_r);
* noiseless frames decode with metric 0;
* all low-noise frames decode correctly;
* at least 90 % of higher-noise frames decode correctly;
* the latency matches an independent walk of the pruned tree;
* one result comes out per clock.

It also counts how often a repeated 1 reached a Rate-0, REP and SPC leaf, and
how often channel errors were corrected. A mechanism that never occurs counts
as a failure.

The default test (C(128,60), L = 8) passes with 926 checks and 0 failures. It
saw these events:

* 181 Rate-0 leaves receiving a dynamic 1;
* 842 REP leaves receiving a dynamic 1;
* 368 SPC leaves with odd parity;
* 93 frames with corrected channel errors.

The other configurations pass with 926 checks and 0 failures each:

* C(128,60) with L = 4: latency 71 cycles.
* C(256,75) with L = 4 and with L = 8: latency 97 cycles. These runs saw 238 Rate-0, 1069 REP and 453 SPC dynamic-bit events and 109 corrected frames.

Rate-1 leaves do not occur in the built-in codes, so `fsscl_rate1` is only
checked by its unit test.

To run a test with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -yrtl rtl/rmpc_pkg.sv tb/tb_rmpc_decoder.sv \
              --top-module tb_rmpc_decoder -Mdir obj && ./obj/Vtb_rmpc_decoder

The full-size C(128,60), L = 8 decoder takes a few minutes to compile and
under a second to simulate. The C(256,75) builds take longer.

## Changing the design

* **New code.** Add its tables and a case to `code_n`, `code_nr`, `rm_r`, `rm_d`
  and `is_info`. The tree, the kernels, IBE, DR and all delay lines follow
  automatically. Check that no leaf holds both bits of a pair. If one does,
  smaller leaves would be needed at that point, and `node_kind` would have to
  refuse to prune it.
* **Register placement.** Change the `LAT_*` constants. `node_lat` and every
  delay line follow them, and so does the tree walk in the end-to-end
  testbenches if you update its rule, `lat_of`.
* **List size.** Set `L`. The sorter input width follows from the leaf type.
