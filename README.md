# An LLR-based successive cancellation list decoder for polar codes

Successive cancellation (SC) decoding of a polar code decides the bits
u_0 … u_{N-1} one at a time. Each decision uses a log-likelihood ratio (LLR)
computed through a binary tree of f and g operations. A list decoder (SCL)
keeps the L most likely decision sequences, the "paths", instead of one. At
every information bit each path splits in two, all 2L candidates are ranked,
and the best L survive.

Earlier list decoders ranked paths by log-likelihoods (LLs), which need two
numbers per tree node and wide, growing metrics. The idea behind this design
is that the whole decoder can work with LLRs instead. The path metric then
has a simple update. When path l decides bit u_i and the decision LLR is λ,
the metric becomes:

    PM_l ← PM_l + |λ|   if u_i disagrees with the sign of λ (u = 0 ⇔ λ ≥ 0)
    PM_l ← PM_l         otherwise

Lower is better. This approximate update is exact in the limit of large |λ|,
and the list decoder needs nothing else:

- The LLR memory stores one Q-bit number per node, where the LL decoder
  stores two wider ones.
- The metric grows only when a path contradicts its own LLR.
- The metric needs only M = 8 bits, with saturation.

The rest follows from that choice:

- The sorter compares these small metrics.
- A pruned sorter exploits their structure.
- A per-path CRC register turns the decoder into a CRC-aided list decoder.

## Operation of one decoding

All L paths run in lock step, with one SC decoder core per path.

1. **Channel load.** While idle, the N channel LLRs are written, P per cycle,
   into `channel_llr_mem`.
2. **Start.** `start` latches the frozen set (an N-bit mask; frozen bits are
   0) and the `crc_en` flag. It resets the list to a single valid path with
   metric 0.
3. **Bit i.** The cores descend the tree to the decision LLR of bit i.
   - Bit 0 starts with f at the level just below the channel.
   - Bit i > 0 starts with g at level tz(i), the number of trailing zeros of
     i, and then applies f at each level down to level 0.
   - Level k holds 2^k LLRs, and the P processing elements produce P of them
     per cycle. Producing level k therefore takes max(1, 2^k/P) cycles.
4. **Frozen bit.** In the cycle that produces the leaf, every path appends 0,
   pays |λ| if λ < 0, and updates its partial sums. No extra cycle is used.
5. **Information bit.** The leaf cycle captures λ for every path. The next
   cycle sorts the 2L candidates:
   - "keep the hard decision", which costs nothing;
   - "flip it", which costs |λ|.

   All path state moves to the new slots at the end of that cycle.
6. **Re-sort (pruned sorter only).** The pruned sorter needs the metrics in
   ascending order, and frozen bits can disturb that order. So one extra
   cycle after the last bit of every run of frozen bits re-sorts the L
   metrics.
7. **Output.** After bit N-1 the output path is chosen. It is the smallest
   metric among the valid paths. With `crc_en`, only paths whose CRC passes
   are considered, unless none passes. `done` pulses, and from the next cycle
   `u_hat`, `out_metric` and `out_crc_pass` hold the result.

The number of cycles from the first cycle after `start` to the last cycle
before `done` is

    D = 2N + (N/P)·log2(N/(4P)) + |A|   (+ F_C with the pruned sorter)

where |A| is the number of information bits and F_C the number of runs of
frozen bits. For N = 1024, P = 64 and a (1024, 512) code with 57 frozen runs,
D is 2592 cycles with the full sorter and 2649 with the pruned sorter. These
are 2.53 and 2.59 cycles per bit, the latencies the original evaluation
reports. The controller testbench reproduces both numbers exactly.

## The LLR memories and the pointer table

Each path needs its own view of the tree's LLRs. Copying whole LLR memories
when a path is duplicated would be far too expensive, so the design uses
indirection:

- **Physical banks.** There are L physical banks (`llr_bank`). Each holds one
  LLR set for every level 1 … n-1.
- **Layout.** Within a bank, level k occupies heap positions 2^k … 2^(k+1)-1,
  grouped into N/P words of P lanes. The levels shorter than P share word 0.
- **Reads.** An f or g step at level k reads its two operands from positions
  2^(k+1) + cP and 2^(k+1) + cP + 2^k. When the parent is the channel, it
  reads positions cP and cP + 2^k. Both read ports address whole words, and
  the lanes are then shifted by the position modulo P.
- **Writes.** The result goes to position 2^k + cP with a lane mask of
  min(P, 2^k) lanes.
- **Bank ownership.** Path l always writes into its own bank l, and
  `pointer_mem` records for every (path, level) which bank holds that path's
  current LLRs. Writing sets the pointer to the path's own bank. When a path
  is duplicated or moved, its whole pointer row is copied in the same cycle.
- **Safety.** A shared level is therefore read through the pointer and never
  copied. The SC schedule rewrites a level before it reads it again, so a
  path overwriting its own bank never corrupts data another path still needs.
- **Level 0.** The decision LLR is not stored. It goes straight from the
  core to the metric unit.

## Partial sums

g at level k needs the polar transform of the 2^k bits decided in the left
subtree. This design uses natural order, x = [enc(left) ⊕ enc(right),
enc(right)].

- **Storage.** `partial_sum_mem` keeps, per path, an N-bit heap. Level k holds
  the transform of the most recent completed left subtree of size 2^k.
- **Update.** When bit i is decided, a combinational XOR cascade combines the
  new bit with the stored left siblings level by level. The finished node is
  written at level t = (number of trailing ones of i). That is exactly the
  level the next bit's g step reads.
- **Reads.** These are P bits at a time, aligned with the LLR slices.
- **Copies.** On path copies the whole heap is copied, using one L × L
  crossbar per path.

## Path metrics and the two sorters

`metric_sort_unit` holds the L metrics and a valid flag per slot. Each sort
key is {invalid, PM}, so invalid slots always sort last. This is how the first
log2(L) information bits grow the list from one path to L without a special
case.

The candidate list for an information bit is

    m_{2l}   = PM_l            (path l keeps its hard decision)
    m_{2l+1} = PM_l + |λ_l|    (path l flips it)

The **full radix-2L sorter** (`radix2l_sorter`) compares all 2L(2L-1)/2 pairs.
Each element's rank is the number of elements ahead of it. L multiplexers
then pick ranks 0 … L-1, and ties go to the lower index.

The **pruned sorter** (`pruned_sorter`) uses two facts about the list, which
hold whenever the metrics are kept in ascending order:

- m_{2l} ≤ m_{2l+1}, because a penalty is never negative.
- m_{2l} ≤ m_{2l+2}, because the metrics are sorted.

From these, an even element never needs comparing with a later one; it comes
first. The very last element, m_{2L-1}, can never be among the best L.
Only the pairs (i odd, i < j ≤ 2L-2) remain, which is (L-1)² comparators:

| L | full sorter | pruned sorter |
|---|-------------|---------------|
| 2 | 6           | 1             |
| 4 | 28          | 9             |
| 8 | 120         | 49            |

Each comparator returns "m_j ≤ m_i". On equal metrics the later element goes
first, which keeps the fixed and the compared results a consistent total
order.

Frozen bits add penalties without sorting, so the metrics can leave their
ascending order. The re-sort cycle that ends each frozen run fixes this. It
reuses the pruned sorter: the caller feeds it
[0, a_0, 0, a_1, …, 0, a_{L-2}, a_{L-1}, max] and takes ranks L-1 … 2L-2,
which are the L metrics a_l in ascending order. Each surviving slot copies
the whole state of its source path:

- decided bits
- partial sums
- pointer row
- CRC register
- metric

The bit u it appends is the source path's hard decision, XORed with 1 for an
odd ("flip") candidate.

## CRC-aided decoding

The last r information bits can carry a CRC of the others. Each path then has
an r-bit register (`crc_unit`):

- It is cleared at start.
- It is updated MSB-first with every information bit the path decides:
  c ← (c << 1) ⊕ (poly if c_msb ⊕ u).
- It is copied along with the path.

A path passes when its register is zero after all bits. `codeword_select`
then picks the smallest-metric path that passes. If no path passes, the
decoder falls back to the smallest-metric path overall, and `out_crc_pass`
reports 0. The default is CRC-8, x⁸+x⁷+x⁶+x⁴+x²+1 (`CRC_POLY = 8'hD5`), the
polynomial found best for L = 4. CRC-4 (x⁴+x+1, `4'h3`) is tested with L = 2.

## Files

| file | block |
|------|-------|
| `rtl/scl_pkg.sv` | shared enums (operation, commit kind) and LLR saturation |
| `rtl/llr_pe.sv` | one processing element: min-sum f and g, saturating |
| `rtl/sc_core.sv` | P processing elements: one path's decoder core |
| `rtl/channel_llr_mem.sv` | channel LLRs, N/P words, 1 write and 2 read ports |
| `rtl/llr_bank.sv` | one physical internal-LLR bank with a lane-masked write |
| `rtl/pointer_mem.sv` | (path, level) → bank table with row copies |
| `rtl/partial_sum_mem.sv` | per-path partial-sum heaps with the XOR cascade |
| `rtl/path_mem.sv` | per-path decided bits, output multiplexer |
| `rtl/radix2l_sorter.sv`, `rtl/pruned_sorter.sv` | the two metric sorters |
| `rtl/metric_sort_unit.sv` | metrics, candidate list, sorter, commit decisions |
| `rtl/crc_unit.sv` | per-path CRC registers |
| `rtl/codeword_select.sv` | output path choice |
| `rtl/scl_controller.sv` | schedule, addresses and strobes |
| `rtl/scl_decoder.sv` | top level |

### Parameters of `scl_decoder`

| parameter | default | meaning |
|-----------|---------|---------|
| N | 1024 | code length |
| L | 4 | list size |
| P | 64 | processing elements per core; N ≥ 2P |
| Q | 6 | LLR bits |
| M | 8 | metric bits |
| PRUNED | 1 | pruned sorter with re-sort cycles (1) or full sorter (0) |
| CRC_LEN, CRC_POLY | 8, 8'hD5 | CRC |

### Top-level interface

| signals | use |
|---------|-----|
| `llr_in_valid`, `llr_in_addr`, `llr_in_data[P]` | word-wise channel load while idle; LLRs are Q-bit two's complement, positive meaning bit 0 |
| `start`, `frozen[N]`, `crc_en` | start a decoding |
| `busy`, `done` | status |
| `u_hat[N]`, `out_metric`, `out_crc_pass` | registered results, valid after `done` |
| `rst_n` | asynchronously resets the control state; the datapath is initialised by `start` |

## Where this design goes beyond, or differs from, the original description

The list-decoding arithmetic follows the original description:

- the metric update
- the min-sum f, and g = (-1)^u·α + β
- Q = 6 and M = 8
- P = 64 and the N/P-word LLR organisation
- one bank per path with a pointer table
- crossbar copying of path state
- both sorters, the (L-1)² pruning, and the re-sort cycle per frozen run
- the per-path CRC memories
- the latency formula

The following are this implementation's own choices:

- **Controller.** The schedule, the address generation and the heap layout of
  the LLR banks. The controller's detailed signals were not specified, so it
  was designed to meet the published cycle count exactly.
- **Partial sums.** The partial-sum network, built as an N-bit heap per path
  with a one-cycle XOR cascade.
- **Sorter tie rule and ranking.** Ties (equal metrics) are broken as
  described above, and the sorting logic ranks elements by counting rather
  than with a particular multiplexer network.
- **Storage.** All memories are registers with combinational reads.
- **CRC fallback.** When no path passes the CRC, the smallest metric is output.
- **Interfaces.** The load and output interfaces, and the `done`/`busy`
  handshake.
- **Saturation.** g saturates symmetrically to ±(2^(Q-1)-1), and the metric
  saturates at 2^M-1.

The full-size design (N = 1024, L = 4, P = 64) is large as registers. The
partial-sum heaps, path memories and L LLR banks make up some 4·1024 + 4·1024
+ 4·1024·6 flip-flops. No memory macros are modelled.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

- **Processing element.** `tb_llr_pe` tests all inputs exhaustively.
- **Core, memories, sorters and output selection.** `tb_sc_core`, the memory
  testbenches, the sorters and `tb_codeword_select` use random and
  tie-heavy stimulus against independent models.
- **Pointer table.** `tb_pointer_mem` tracks data tags rather than pointers.
- **Partial sums.** `tb_partial_sum_mem` compares against the polar transform
  of each path's decided bits.
- **Metric unit.** `tb_metric_sort_unit` checks every commit decision and
  metric for L = 4 with the pruned sorter and L = 2 with the full sorter.
- **Controller.** `tb_scl_controller` checks every cycle of the schedule and
  its addresses at N = 1024, P = 64, including the exact 2592- and
  2649-cycle latencies.

`tb/scl_ref_pkg.sv` is a behavioural SCL decoder written from the algorithm,
independent of the RTL structure. It includes:

- a Bhattacharyya-bound code construction
- the encoder
- a CRC generator
- a list decoder with the same tie rules

`tb/scl_tb_harness.sv` drives a decoder with codewords over a BPSK/AWGN
channel at 0 … 4 dB, plus noiseless and random full-scale inputs. It compares
the decided bits, metric, CRC flag and cycle count with the reference.

- **`tb_scl_decoder`** runs two decoders at N = 64, P = 4, with 60 codewords
  each:
  - L = 4, pruned sorter, CRC-8;
  - L = 2, full sorter, CRC-4.

  It uses M = 7 so that metric saturation occurs at this short length. It
  requires each of the following to have happened:
  - information sorts
  - re-sorts (and none with the full sorter)
  - multi-cycle operations
  - path duplication
  - path drops
  - metric saturation
  - a CRC choice of a non-minimum path
  - no path passing the CRC
- **`tb_scl_decoder_l8`** runs L = 8 with the pruned sorter and CRC-16
  (x¹⁶+x¹⁵+x²+1), at N = 128 and P = 8, with 30 codewords.
- **`tb_scl_decoder_full`** runs the decoder with all defaults (N = 1024,
  L = 4, P = 64) on six codewords, about a minute in Verilator.

To run a test, list the package first:

    verilator --binary --timing --assert -Irtl -Itb rtl/scl_pkg.sv \
      $(ls rtl/*.sv | grep -v scl_pkg) tb/scl_ref_pkg.sv tb/scl_tb_harness.sv \
      tb/tb_scl_decoder.sv --top-module tb_scl_decoder -o sim && obj_dir/sim

Not covered:

- L = 8 was simulated only at N = 128.
- Error-rate curves were not produced; the behavioural reference could
  produce them, but only slowly.
- Synthesis results (area, frequency) are not reproduced.
