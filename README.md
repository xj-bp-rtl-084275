# XJ-BP: an express-journey belief-propagation decoder for polar codes

Belief propagation (BP) decodes a polar code by passing log-likelihood ratios
(LLRs) back and forth across the code's factor graph, a butterfly network of
m = log2(N) stages. Most of that graph carries no useful work. Many sub-trees of
the graph are *constituent codes* of a kind whose messages can be written down
directly: codes whose leaves are all frozen or all information, repetition codes
and single-parity-check codes. XJ-BP ("express journey") replaces each such
sub-tree by one direct rule, so beliefs skip the stages inside it. It also
replaces the usual one-way sweep with a **round trip**: first all right-to-left
messages, then all left-to-right messages. That schedule needs far fewer
iterations for the same work per iteration.

This repository holds a synthesizable SystemVerilog implementation of such a
decoder. It decodes one codeword at a time with min-sum arithmetic. Its default
size is the (1024, 512) code with at most 60 iterations. The frozen set is a
run-time input, so one decoder serves every code rate of length N. The decoding
rules come from the XJ-BP algorithm as published. The algorithm's source
describes no circuit, so the architecture, word widths, interfaces and timing
are this design's own, and are marked as such below.

## Factor graph, columns and messages

The code is x = u·G with G = F^(⊗m), F = [1 0; 1 1], with no bit reversal. The
factor graph has m+1 columns of N nodes. In the RTL they are numbered 0..M
(M = m): column 0 holds the message u (the leaves) and column M holds the
codeword x. Stage s (s = 0..M-1) joins column s to column s+1 with N/2
polarization units. Unit p of stage s connects nodes i and i+2^s, where

    i = {p >> s, 1'b0, p[s-1:0]}      (bit s of i is 0)

Every node carries two messages: L, which travels right to left, and R, which
travels left to right. L of column M is the channel LLR. R of column M is what
the decoder refines. The codeword estimate is LLR_x = R(M) + L(M), decided as
x = 0 when LLR_x > 0 and as 1 otherwise. For the unit of stage s with
h = 2^s and min-sum G(a,b) = sign(a)·sign(b)·min(|a|,|b|), the updates are:

    L(i,s)     = G(L(i,s+1), L(i+h,s+1) + R(i+h,s))
    L(i+h,s)   = G(R(i,s),   L(i,s+1)) + L(i+h,s+1)
    R(i,s+1)   = G(R(i,s),   L(i+h,s+1) + R(i+h,s))
    R(i+h,s+1) = G(R(i,s),   L(i,s+1)) + R(i+h,s)

Each direction needs only the forms G(x, y+z) and G(x, y)+z. The sum
L(i+h,s+1)+R(i+h,s) and the term G(R(i,s), L(i,s+1)) are common to both
directions. `xjbp_pe` therefore computes one direction at a time, and a `dir`
input selects the operands.

## Constituent codes

The nodes of column c fall into blocks of 2^c. Each block is the root of a
length-2^c polar code whose leaves are u[b·2^c .. (b+1)·2^c − 1]. Four kinds
are recognised:

| kind | leaves | R sent back into the graph |
|------|--------|----------------------------|
| N0   | all frozen | +∞ (+63), constant |
| N1   | all information | 0, constant |
| REP  | all frozen except the last | R_i = Σ_{k≠i} L_k |
| SPC  | all information except the first | R_i = Π_{k≠i} sgn L_k · min_{k≠i} \|L_k\| |

Only *maximal* blocks count. A block acts as a root only if no ancestor block
is itself a constituent code. Its kind is taken in the order N0, N1, REP, SPC.
Every polarization unit inside a root is switched off. In every iteration it
is neither evaluated nor written.

`xjbp_cc_classifier` finds all of this combinationally from the frozen mask by
a bottom-up recursion over the two halves of each block:

    n0  = n0(left)  & n0(right)      n1  = n1(left)  & n1(right)
    rep = n0(left)  & rep(right)     spc = spc(left) & n1(right)

A top-down pass then marks the blocks that are inside a constituent code.
N0 and N1 are recognised down to a single leaf. A frozen leaf therefore gets its
+∞ through the same path as a frozen block. REP and SPC are recognised from
size 4 (`MIN_LOG = 2`). At size 2 their rules equal the ordinary unit anyway.

For the (1024, 512) code built with the Bhattacharyya bound on an erasure
channel with erasure probability 0.3, the maximal codes of size 4 to 128 are:

| size | 4 | 8 | 16 | 32 | 64 | 128 |
|------|---|---|----|----|----|-----|
| N0   | 3 | 3 | 2  | 2  | 0  | 1   |
| N1   | 3 | 3 | 2  | 1  | 0  | 0   |
| REP  | 15| 5 | 3  | 1  | 1  | 0   |
| SPC  | 16| 8 | 4  | 1  | 1  | 1   |

The N0 and N1 rows equal the published distribution. The REP and SPC rows
appear there with their labels exchanged. The definitions used here follow the
prose of the algorithm ("a single information bit on the last leaf" is REP).
With this code, 2410 of the 5120 units are switched off.

`xjbp_cc_unit` turns the roles into messages for one column at a time. One
segmented reduction tree spans the whole column. For every block size it forms
the block's sum (full width), the sign product, and the smallest and
second-smallest magnitude. Each node takes the level of its column. The REP
rule becomes block sum minus own L. The SPC magnitude is the second minimum
where the node holds the minimum, and the minimum otherwise. Only the result is
saturated to the 7-bit word.

## The round trip, clock by clock

One iteration takes 2M+1 clocks (21 at N = 1024). Each clock, one row of N/2
processing elements works on one stage.

1. **L sweep, stages M−1 down to 0.** The units read L(s+1) and the R of column
   s *as the graph sees it*. N0 and N1 roots of column s are forced to +∞ and 0.
   REP and SPC roots and ordinary nodes use the stored R. The units write L(s)
   through the mask of enabled units. L(0), the message LLR, is computed but
   never used, because XJ-BP refines the codeword and not the message.
2. **R sweep, stages 0 up to M−1.** The constituent-code unit now evaluates the
   REP and SPC rules of column s from the fresh L(s). Those results are written
   back into R(s) (store port 0), so the next L sweep sees them. In the same
   clock they feed the units, which write R(s+1) (port 1).
3. **Check.** The constituent-code unit runs once more on column M, which
   matters only if the whole code is one constituent code. `xjbp_et_check`
   forms LLR_x and the hard decision, then tests whether x is a codeword. The
   test re-encodes û = x·G (G is its own inverse) and requires û to be 0 at
   every frozen position. This is the same condition as x·Hᵀ = 0, without
   storing a parity-check matrix, and û is the decoded message. Decoding stops
   when the test passes or after `MAX_ITER` iterations.

A unit is enabled at stage s only if its block at column s+1 lies in no
constituent code. That one rule guarantees three things. Every L and R that is
read was written earlier in the same pass or in the previous one. Nothing
inside a code is ever touched. No unit writes into a root.

The clocks of a switched-off stage are still spent. The saving XJ-BP offers
appears here as idle processing elements (switching activity), not as fewer
clocks.

## Hardware blocks

| module | role |
|--------|------|
| `xjbp_pkg` | word type `llr_t` (7-bit two's complement, ±63, +63 = ∞), roles `cc_type_e`, saturating add, min-sum G |
| `xjbp_pe` | one-direction processing element, combinational |
| `xjbp_cc_classifier` | roles of all nodes and enables of all units from the frozen mask, combinational |
| `xjbp_cc_unit` | N0/N1/REP/SPC messages of one column, combinational |
| `xjbp_msg_mem` | M+1 columns × N words; 2 column reads, 2 masked column writes (port 1 wins), synchronous clear |
| `xjbp_et_check` | LLR_x, hard decision, re-encoding, codeword test |
| `xjbp_ctrl` | round-trip state machine, iteration counter, done/converged |
| `xjbp_decoder` | top: frozen-mask register, two stores (L and R), N/2 units with stage-dependent routing, the blocks above |

At N = 1024 the two stores hold 2 × 11 × 1024 × 7 ≈ 158 k bits of flip-flops.
A whole column is read and written every clock, so a RAM macro does not fit
this organisation.

## Interface and timing (`xjbp_decoder`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `cfg_we`, `cfg_frozen[N]` | in | load the frozen mask (1 = frozen); ignored while busy |
| `start`, `llr_in[N]` | in | decode these channel LLRs (positive = bit 0 likelier); sampled in the start clock, ignored while busy |
| `busy` | out | a decoding is in progress |
| `done` | out | one-clock pulse; results are valid with it and hold until the next decoding ends |
| `converged` | out | x_hat passed the codeword test (0 = the iteration limit was hit) |
| `iters` | out | iterations used |
| `x_hat[N]`, `u_hat[N]` | out | codeword estimate and message estimate (frozen positions included) |

`done` rises 1 + iters·(2M+1) clock edges after the edge that takes `start`:
one load clock, then 2M+1 clocks per iteration. At N = 1024 and 4 iterations
that is 85 clocks.

Parameters: `N` (power of two, default 1024), `MAX_ITER` (default 60) and
`MIN_LOG` (default 2). The word width `LLR_W` (default 7) sits in `xjbp_pkg`.

## What follows the algorithm and what is this design's own

From the algorithm:
- the update equations and min-sum G;
- the four constituent-code kinds and their rules;
- maximal codes only;
- the round-trip order (L from the codeword column leftwards, then R back);
- one-direction processing elements;
- early termination by a codeword test on the hard decision;
- the 60-iteration limit and the (1024, 512) default.

Choices of this design:
- the stage-serial, node-parallel architecture (N/2 units, one stage per clock);
- register stores;
- a separate constituent-code tree instead of reusing the processing elements
  for the code rules (the algorithm only remarks that they could be shared);
- the 7-bit saturating word;
- the minimum code sizes;
- the re-encoding form of the codeword test;
- the extra check clock per iteration;
- the parallel LLR load;
- the handshake.

The published schedule figure lists the L updates in the order
L(·,1), L(·,2), …, which reads as left to right. The prose says the L messages
run from the codeword column leftwards, and that is the only order in which
they carry fresh channel information. The RTL follows the prose.

Not built: the conventional one-way schedule and scaled min-sum. The algorithm
only compares against them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. `tb/tb_xjbp_model.sv` is a
reference model package. It implements the decoding node by node with plain
integers: codes are found by counting leaves, and the REP/SPC rules loop over
"all other nodes". It also holds the frozen-set construction, the polar encoder
and a quantised BPSK/AWGN channel (LLR = 2y/σ² scaled by 4 LSBs per unit).

| testbench | what it shows |
|-----------|---------------|
| `tb_xjbp_pe` | 8000 random and extreme operand sets, both directions |
| `tb_xjbp_cc_classifier` | N = 1024: every node role and unit enable against the model, for two codes and a random mask; the published code counts |
| `tb_xjbp_cc_unit` | all columns, both modes, random roles; REP/SPC against direct sums and minima |
| `tb_xjbp_msg_mem` | random masked dual-port writes, collisions, clear |
| `tb_xjbp_et_check` | hard decision including LLR = 0; codewords pass, corrupted words fail |
| `tb_xjbp_ctrl` | clock-by-clock phase, column and iteration; early stop, limit, start while busy |
| `tb_xjbp_decoder` | N = 64: 66 frames at three rates compared bit-exactly with the model, plus latency. Each mechanism must occur: early termination, iteration limit, ignored start, rate change, roots of all four kinds, switched-off units |
| `tb_xjbp_decoder_full` | default parameters, (1024, 512): frames at 3.5 dB and one at 1.0 dB, bit-exact with the model, latency |
| `tb_xjbp_decoder_rates` | default parameters: rates 1/2, 2/3, 3/4, 5/6, 7/8, then 20 frames at 3.5 dB with the average iteration count |

At 3.5 dB the (1024, 512) frames decode without error in about 4 iterations on
average. That is in line with the expected behaviour of round-trip scheduling
at this SNR.

To run a testbench with Verilator (from the directory holding `rtl/` and
`tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/xjbp_pkg.sv tb/tb_xjbp_model.sv tb/tb_xjbp_decoder.sv \
        --top-module tb_xjbp_decoder
    ./obj_dir/Vtb_xjbp_decoder

Block testbenches that do not use the model need only `rtl/xjbp_pkg.sv` and the
testbench. The default-size testbenches take about a minute to build.

## Limits

- Sizes: `N` is fixed at elaboration. At the defaults, every rate of a length-1024
  code fits. Other lengths (128 to 2048 were evaluated for the algorithm) need
  the parameter changed. The design is generic in `N`, and 64 and 1024 are
  simulated.
- Fixed point: 7-bit messages are enough to decode the simulated frames. No
  error-rate curve has been measured against floating point.
- Cost: all the logic for a column-wide stage is combinational. One clock
  covers store read multiplexers, the constituent-code tree (log2 N levels) and
  a processing element. No timing closure has been attempted. A real
  implementation would pipeline this path or process part of a column per
  clock.
- Throughput: one codeword at a time. Loading the next codeword does not
  overlap the current decoding.
