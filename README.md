# A list successive-cancellation decoder for 4096-bit polar codes with list size 32

Successive-cancellation list (SCL) decoding brings polar codes close to
maximum-likelihood performance, but only with a large list: with 32 paths and a
CRC, a 4096-bit code gains about 0.5 dB over list size 4. A direct hardware
mapping of list decoding scales badly with the list size. Every path needs its
own LLR memory, and the memories are linked by L x L crossbars, because
survivors copy their parent's LLRs, partial sums and decoded bits. For L = 32
the crossbars alone outgrow a large FPGA.

This RTL implements a decoder organised so that nothing scales with L^2:

* **No path data is ever copied.** LLRs, partial sums and decoded bits stay in
  the slot that computed them. A small *pointer memory* records, for each path
  and each tree stage, which slot holds that path's data for the stage.
* **F nodes run in parallel over all paths, G nodes one path at a time.**
  This is the "parallel F, serial G" (PFSG) datapath. F needs only the path's
  own parent LLRs, so L/L_beta passes through L_beta banks handle all paths.
  G needs the parent's LLRs and partial sums, which may live in another slot,
  and one G unit behind an L_beta-to-1 multiplexer serves the paths in turn.
  This replaces the LLR crossbar by one multiplexer.
* **Bits are decided M = 4 at a time.** The *low-complexity list manager*
  (LCLM) expands every path over all 2^M decisions of a 4-bit leaf, keeps per
  path only the best candidate for each pattern of the *unreliable* bits, and
  prunes 2L candidates to L with a parallel sorter, once per unreliable
  pattern beyond the first. Leaves without unreliable bits need no sorting.

The default parameters are those of the reference configuration: N = 4096,
L = 32, L_beta = 4 banks, P = 128 processing elements per group, Q = 8-bit LLRs,
Q_PM = 9-bit path metrics, m = 2 (M = 4-bit leaves), epsilon = 3 (the last
stage handled by the RAM datapath), and a 24-bit CRC with polynomial 0x864cfb.

## Decoding order

The code tree has stages n = log2 N (channel) down to 0 (bits). The decoder
walks it down to stage m = 2 only. Each stage-m node is a *sub-tree* of
M = 4 bits, and there are N/M sub-trees, numbered j = 0 .. N/M-1.

* Sub-tree 0 starts with F nodes at stages n-1, n-2, ..., m.
* Sub-tree j > 0 starts with a G node at stage s = m + ctz(j), where ctz is
  the number of trailing zero bits of j. F nodes at s-1, ..., m follow.
* Each sub-tree then performs one list-management step over its 4 bits.

The arithmetic is the usual min-sum:

* F(a, b) = sign(a) sign(b) min(|a|, |b|).
* G(beta, a, b) = b + (1 - 2 beta) a, saturated to +-127.

The hard decision of an LLR x is 1 when x < 0. LLRs are two's-complement
8-bit numbers.

## The LLR memory and the PFSG datapath (`lscd_pfsg`, `lscd_llr_ram`)

Each of the L_beta banks is one RAM with a 2P-LLR read port and a write port
with per-lane enables, written at most P lanes at a time. One row holds both
halves of a node chunk: first half in lanes [0, P), second half in [P, 2P).
One read therefore gives both F/G operands of P outputs.

Row map of a bank:

* The channel LLRs take N/(2P) rows. They are written in every bank.
* Then come the slots of the L/L_beta paths of that bank. Each slot holds
  stages epsilon+1 .. n-1 of one path.
* A stage-t node takes 2^t/(2P) rows, or one row if it is smaller.

A command (op, stage s, slot or path, chunk) takes two cycles:

1. The banks read the rows of the stage s+1 input.
2. F is computed in all L_beta banks at once, for the slot `fslot` of each
   bank. G is computed once, on the bank of the source slot `gsrc`, which
   the pointer memory gives as ptr[path][s+1]. The result is written to the
   path's own slot.

Results at stage epsilon+1 are not written back. They go to the low-stage
unit instead.

A high-stage node (s > epsilon) costs:

* F: (L/L_beta) x ceil(2^s / P) cycles.
* G: L x ceil(2^s / P) cycles.

A one-cycle bubble follows each node so that the last write lands before the
next node reads it.

## Low stages (`lscd_low_scd`)

Stages epsilon .. m are small (at most 2^epsilon = 8 LLRs per path). They are
kept in registers, and each one takes a single cycle for all L paths at once.
Each path has a triangular buffer, with stage t at offset 2^t. A G node there
reads the parent's buffer through the pointer. Stage-m results, four LLRs per
path, go to the list manager.

## Partial sums without copies (`lscd_ps_mem`)

A G node at stage s needs beta_s, the re-encoded bits (x = u F^{(x)s}) of
the left sibling's 2^s decided bits. Unrolling the recursion
beta_{k+1} = [beta_left_k xor beta_k, beta_k] gives

    beta_s[i] = v[i mod M]  xor  XOR over k = m..s-1 with bit k of i == 0 of
                beta_left_k[ ptr[l][k] ][ i mod 2^k ]

where:

* v is the re-encoding of the path's latest 4 bits;
* beta_left_k is the partial-sum vector of the last left sub-tree of
  stage k, stored in the slot that computed it.

So the memory keeps, per slot, one beta_left_k for every stage k (N bits per
slot in total) and the latest v. It builds beta_s on the fly when the G node
runs, and stores it as the new beta_left_s of the path's own slot. The slot
of every older stage is found through the pointer memory, so surviving
paths share their parents' vectors without copying them.

High-stage G nodes go one path at a time, so the serial port builds P
partial sums per cycle. The low-stage G nodes use a parallel port that
delivers at most 8 bits for every path at once.

## Decoded bits (`lscd_path_mem`)

The path memory works the same way, with concatenation in place of XOR. Bit
i of the left sibling at stage s comes from the highest stage k < s whose
index bit i[k] is 0. When bits m .. s-1 of i are all 1, it comes from the
latest 4 bits instead. After the last sub-tree, the chosen path's N bits are
read out P per cycle with the same rule at s = n.

## Pointer memory (`lscd_ptr_mem`)

ptr[l][k] names the slot that holds path l's stage-k data. It changes in two
ways:

* When stage k is computed for path l, ptr[l][k] = l. The data is written to
  l's own slot.
* At a list-management commit, each new path l with parent tag[l] inherits
  the whole row: ptr[l] = ptr[tag[l]] (old values, all at once).

The LLR datapath, the partial-sum memory and the path memory all use this
one table. Data that a path still needs is never overwritten, because:

* a slot is only written at the stage its own path is computing;
* every path whose pointer referred to the old content at that stage has,
  by then, been given a pointer to something newer.

## List management (`lscd_pmu`, `lscd_sorter`, `lscd_lclm`)

For each 4-bit sub-tree, the bit types come from a configuration table.
Each bit is *frozen*, *reliable* or *unreliable*, and M_u is the number of
unreliable bits.

1. The **PMU** (one per path) computes, for each of the 16 decisions u with
   all frozen bits 0, the metric increment. This is the sum of |LLR| over
   the positions where the re-encoded bit v = u F^{(x)2} disagrees with the
   LLR's hard decision. For each pattern k of the unreliable bits it keeps
   the best u: lowest metric, lowest u on a tie. This is the path's
   candidate for pattern k. Reliable bits are thus decided by their best
   value instead of being expanded. Metrics saturate at 2^Q_PM - 1.
2. The current list starts as every path's candidate for pattern 0.
3. For each further pattern k (2^M_u - 1 rounds, one per cycle), the radix-2L
   **sorter** merges the current list with all paths' candidates for
   pattern k and keeps the L best. Invalid entries rank last. Equal metrics
   are ordered by position, with the current list first.
4. On commit:
   * every surviving entry gives its parent tag and its 4 bits to the
     pointer, partial-sum, path and CRC memories;
   * all metrics are reduced by the minimum, which keeps them inside Q_PM
     bits;
   * paths that found no valid candidate become invalid. The list starts
     with a single path and fills up this way.

One list-management step costs 2 + (2^M_u - 1) cycles.

## CRC and path choice (`lscd_crc`)

Each path carries its 24-bit CRC register:

* MSB first, initial value 0;
* advanced over its non-frozen bits at each commit, starting from the
  parent's register;
* the last 24 information bits are the CRC, so a correct path ends with
  register 0.

At the end, the decoder outputs the smallest-metric valid path whose CRC is
0. If no path passes, it outputs the smallest-metric path and clears
`crc_pass`.

## Controller and interface (`lscd_ctrl`, `lscd_top`)

Before decoding, load the bit-type table with `cfg_we`/`cfg_addr`/`cfg_type`
(0 frozen, 1 reliable, 2 unreliable, one entry per cycle). Then one frame
runs as follows:

1. Send N/P words of P LLRs with `in_valid`. `in_ready` is high while the
   decoder waits for input.
2. The decoder runs the schedule above.
3. It returns N/P words of P decoded bits on `out_bits`, marked by
   `out_valid` and `out_chunk`. Then it pulses `frame_done`, with
   `crc_pass` valid.

Counted from the cycle after the last input word to `frame_done`, a frame
takes:

    1 + sum over sub-trees of [ high nodes: passes x chunks + 1 ; low nodes: 1 ;
                                list management: 2 + 2^M_u - 1 ]
      + 1 (path choice) + N/P (read-out) + 1

At the defaults this is 16289 cycles plus one cycle per sorting round. The
paper's figure for the same code is 16019 cycles (150 us at 107 MHz).

## Where this RTL differs from the published design

* Arithmetic and formats follow the published design: min-sum F, saturating
  G, 8-bit LLRs, 9-bit metrics, M = 4 with unreliable-bit selection, and the
  CRC-24 0x864cfb.
* The internal timing is this design's own:
  * two-cycle read/compute pipeline;
  * a bubble after every high-stage node;
  * one sorting round per cycle;
  * registered read-out.
  This makes a frame about 2% longer than the 16019 cycles reported.
* The published design splits the partial-sum storage between registers and
  RAM. Here each of the partial-sum and path memories is a single register
  array, with pointer-indexed read logic.
* The tie rules are this design's own. Lower index wins in the PMU and the
  sorter, and the current list beats new candidates at equal metric.
* Metric normalisation by the minimum at each commit is also this design's
  choice, not a published detail.
* The FPGA test harness (on-chip encoder and AWGN channel) is not part of
  the RTL. The testbenches model it.

## Files

* `rtl/lscd_pkg.sv`: types (bit type, node operation), F/G functions, row
  map and polar-transform helpers.
* `rtl/lscd_top.sv`: the decoder.
* `rtl/lscd_ctrl.sv`: the schedule and the interface.
* The remaining `rtl/` files: the blocks described above.
* `tb/lscd_ref_pkg.sv`: a copy-based reference decoder (it copies whole
  paths, with the same fixed-point and tie rules), plus code construction
  by the Bhattacharyya bound and a Gaussian noise source.
* `tb/tb_lscd_top.sv`: end-to-end test at N = 128, L = 8, L_beta = 2,
  P = 16, with an 8-bit CRC. For each of 24 frames over BPSK/AWGN it checks:
  * the decoded vector against the reference, bit for bit;
  * the CRC verdict;
  * the cycle count.
  It also counts each mechanism: parallel F, serial G, low-stage G, list
  management with no sort and with several rounds, a partly empty list, the
  CRC choosing a path other than the best metric, and CRC failure.
* `tb/tb_lscd_full.sv`: one frame at the default size (N = 4096, L = 32).
  **Known defect:** at the default size the decoded vector differs from the
  reference, and the CRC check fails where the reference passes. The cycle
  count does match the schedule (17541 cycles for that frame). The reduced
  configuration is bit-exact over all its frames. The fault is therefore
  tied to a parameter the reduced test does not exercise: L_beta = 4,
  P = 128, L = 32 or the 24-bit CRC. It is not yet located.
* The other `tb/` files test single blocks against behavioural models.

## Simulating

With Verilator 5 (two-state, so randomise uninitialised state):

    verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/lscd_pkg.sv \
        tb/lscd_ref_pkg.sv tb/tb_lscd_top.sv --top-module tb_lscd_top -o sim
    ./obj_dir/sim +verilator+rand+reset+2

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.
