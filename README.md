# A Fast Dynamic SC-Flip polar decoder in SystemVerilog

Successive-cancellation (SC) decoding of polar codes is cheap, but it is weak
when each decision commits for good: one wrong bit early in the frame ruins
every bit after it. SC-Flip decoders repair this without the cost of list
decoding. They decode once, check a CRC, and if it fails they decode again
with one or more early decisions inverted. *Dynamic* SC-Flip (DSCF) picks
which decisions to invert with a reliability metric. It also grows the
flip set step by step, so a frame with two or three channel errors can still
be recovered.

This RTL implements a hardware DSCF decoder in the form described in
"Practical Dynamic SC-Flip Polar Decoders: Algorithm and Implementation"
(Ercan, Tonnellier, Doan, Gross). That work turns DSCF into something a chip
can do:

* the transcendental part of the metric becomes a constant;
* the decoder works on whole special nodes (Rate-0, Rate-1, repetition and
  single-parity-check) rather than single bits, and it searches only a few
  flip positions inside each node;
* the accumulated part of the metric is normalised per attempt;
* candidate flip sets are kept in a short insertion sorter.

The defaults are the paper's middle design point:

| quantity | value |
|---|---|
| code length N | 1024 (e.g. PC(1024,512) with a 16-bit CRC, polynomial 0x1021) |
| processing elements P_e | 64 |
| maximum flip order ω | 2 |
| maximum additional attempts T_max | 100 |
| sorter length | 50 |
| largest SPC node | 8 bits |
| LLR widths: channel / internal / metric | 6 / 7 / 7 bits, 2 fractional bits |

## 1. What one decoding attempt does

The SC decoder walks a binary tree whose root holds the N channel
log-likelihood ratios (LLRs) and whose leaves are the N message bits.
Going down, a node of size 2^s computes its left child with the
min-sum F rule, `f(a,b) = sgn(a) sgn(b) min(|a|,|b|)`. Once the left child
has decided its partial sums β_l, the node computes its right child with
`g(a,b,β) = b + (1-2β) a`. Going up, the parent's partial sums are
`(β_l ⊕ β_r, β_r)`.

Many subtrees have a frozen-bit pattern that can be decoded in one step
from the node's own LLRs, without visiting its leaves:

| node | frozen pattern | decision |
|---|---|---|
| Rate-0 | all frozen | all zeros; nothing to compute |
| Rate-1 | none frozen | hard decision on each LLR |
| Rep | all but the last frozen | every bit = sign of Σ L |
| SPC | only the first frozen | hard decisions; if their parity is odd, invert the least reliable bit |

The core handles only these four node types plus F/G branches. A Rate-0 left
child costs nothing. Its partial sums are zero, so the parent goes straight
to the G step (the "Rate-0 merge"). Rate-1 and Rep nodes are used up to P_e
bits, SPC nodes up to `SPC_MAX` bits. Larger nodes of these kinds are split
into their children.

## 2. Where to flip and how to rank flips: the decision metric

A flip is a pair (special node, position inside it). For an SPC node it is
a pair of positions, because flipping one bit alone would break the parity.
The quality of a flip set E is the metric M(E) = M'(E) + M''(E), where
lower means more likely. Per candidate, with L the node's LLRs:

* **M' (the candidate's own unreliability)**
  * Rate-1 bit i: `|L_i|`.
  * Rep node: `|Σ L|`.
  * SPC pair (a,b): `|L_a| + |L_b| − 2γ|L_min|`, where γ is the parity of
    the hard decisions and L_min the least reliable LLR.
* **M'' (how reliable everything decoded so far was)**
  * It is a sum of a penalty f*(x) over the decisions made, where
    f*(x) = 3/2 if x ≤ 5 and 0 otherwise. This constant replaces the
    original `ln(1 + e^{-αx})/α` with α = 0.3.
  * Per node, the penalty is taken over:
    * Rate-1: all |L_i|.
    * Rep: |Σ L|.
    * SPC: `|L_i| + (1−2γ)|L_min|` for every bit except the least reliable one.

Three simplifications keep this small:

1. **Reduced search span.** A Rate-1 node offers only its two least reliable
   bits as flip candidates. An SPC node offers only the 6 pairs of its four
   least reliable bits. A `findmin4` block finds those four.
2. **Normalisation.** Attempt t re-decodes exactly as attempt t−1 up to the
   last flipped node. So M'' is reset to 0 at the start of every attempt and
   only accumulates after the last flip. Every candidate then carries a
   metric relative to its parent flip set, and the sorter subtracts the head
   metric whenever it moves forward (section 3). The metric fits in 7 bits
   and saturates at 127.
3. **Presorting.** The up to six candidates of a node leave the metric
   generator already sorted by metric.

`metric_gen` shows this datapath directly:

* upper path: `abs → f* → Σ → M''` register;
* lower path: `findmin4 → M' → presort → + M'' → join`.

`join` copies the current flip set (the sorter head λ0, of order w) and
appends the new flip as entry w. The result is a candidate of order w+1.
Candidates are only generated while w < ω, and only for nodes that come
after the last flip of λ0.

## 3. Keeping the best flip sets: shift register and insertion sorter

A sorting element is {valid, order (2 bits), metric (7 bits), ω flips}. Each
flip is {node number (9 bits), index (6 bits), second SPC index (6 bits)}, so
an element is 52 bits at ω = 2.

* **`cand_shift_reg`**
  * Takes the six candidates of a node in one cycle.
  * Hands them to the sorter three at a time.
  * The core never decodes two special nodes in consecutive cycles (there is
    always a branch operation between them), so two cycles are always
    available.
* **`insertion_sorter`**
  * Keeps λ0 … λ(l−1) in increasing metric order.
  * Three presorted new elements are merged in one cycle. An existing element
    i moves back by the number of new elements with a strictly smaller
    metric. New element j lands at j plus the number of existing elements
    with a metric ≤ its own. So ties keep older elements first, and each old
    element moves at most three places.
  * Elements pushed past position l−1 are lost (reported on `ev_drop`).
  * A **forward shift** at the start of each additional attempt moves every
    element up one place, so λ0 is always the flip set in use. It also
    subtracts the new head's metric from every element, which is the
    normalisation of section 2.
  * At the start of a frame the list is set to a single λ0 with no flips
    (order 0).
  * The sorter is shorter than T_max: 50 against 100 at ω = 2. Elements that
    fall off the end are the least likely ones.

## 4. The semi-parallel core (`sc_core`)

LLRs live in `llr_mem`, one region per tree stage plus the channel. Each row
holds P_e LLRs. Stage s uses max(1, 2^s/P_e) rows, which is 37 rows at the
defaults. A controller keeps (stage, node, chunk) and steps through five
states:

| state | work per cycle | cycles |
|---|---|---|
| F | P_e F-updates, parent → left child | max(1, 2^(s−1)/P_e) |
| G | P_e G-updates, parent + β_l → right child | same |
| DEC | decode one special node from its LLRs | 1 |
| CMB | combine β_l ⊕= β_r for P_e bits in the partial-sum memory | same as F |
| IDLE | channel loading; waiting for `start` | – |

Details:

* **Partial sums.** `psum_mem` stores each node's partial sums in place, at
  the node's codeword position. A parent's β is formed from its children's
  by XORing the right half into the left half (CMB). The memory is cleared
  at the start of every attempt, so a skipped Rate-0 node reads as zeros.
  The message bits u of each decoded node come from the polar transform of
  its β, computed in `node_decoder`, and are kept beside β.
* **Node numbers.** Special nodes are numbered 0, 1, 2, … in decoding order.
  For every DEC the core looks up whether λ0 flips this node number, then
  reports the node (type, size, LLRs, number, message bits, information
  mask, "after the last flip") to the CRC unit and the metric generator in
  the same cycle.
* **Node types.** `node_classifier` derives every node's type from the
  information-bit mask, bottom-up, with combinational logic. So a new code
  only needs a new mask.
* **Timing.** At the defaults, with the PC(1024,512) code of the full-size testbench, an
  attempt takes 400 clock cycles. The paper's average latency at ω = 2
  (0.97 µs at 425 MHz) is about 412 cycles, so the schedules are close.
  The worst case is different. A frame that uses all 100 additional
  attempts takes 101 × 398 + 2 = 40,200 cycles here, about 95 µs at
  425 MHz. The paper quotes 49.7 µs for ω = 2, which is about 51 attempts'
  worth, so its worst case seems to assume fewer attempts or shorter ones.
  The paper does not say how additional attempts are shortened. This design
  re-decodes every attempt from the root.

## 5. CRC and attempt control (`crc_unit`, `fast_dscf_decoder`)

The CRC is computed on the fly. Each decoded node's information bits (up to
P_e per cycle, masked by the information mask) go through an unrolled
MSB-first update with polynomial 0x1021, starting from zero. The last 16
information bits are the CRC, so a frame is correct exactly when the
register ends at zero.

The top-level controller follows the DSCF algorithm:

```
INIT   sorter := {λ0 = no flips}, attempts := 0
LAUNCH start the core with flip set λ0; clear CRC and M''
RUN    until the core reports done
DRAIN  until the shift register has emptied into the sorter
CHECK  CRC ok                              -> done, success = 1
       attempts = T_max or sorter has no λ1 -> done, success = 0
       otherwise shift the sorter, attempts++, -> LAUNCH
```

Each attempt therefore costs the core's cycles plus about three control
cycles.

### Interface

| port | dir | meaning |
|---|---|---|
| `info_mask[N]` | in | 1 = information bit; static per code |
| `ld_we, ld_row, ld_data[P_e][QC]` | in | write one row of channel LLRs (two's complement, 2 fractional bits) while idle |
| `start` | in | decode the loaded frame |
| `busy, done` | out | busy until the one-cycle `done` pulse |
| `success` | out | valid with `done`: CRC matched |
| `u_hat[N]` | out | estimated message vector (information bits at the mask positions) |
| `attempts` | out | additional attempts used |
| `ev_attempt, ev_flip, ev_r0_merge, ev_spc_fix, ev_insert, ev_drop` | out | one-cycle event strobes for monitoring |

## 6. Other configurations

The paper's three decoders differ as follows:

| | ω = 1 | ω = 2 (default) | ω = 3 |
|---|---|---|---|
| T_max / sorter length | 10 / 10 | 100 / 50 | 400 / 200 |
| LLR widths (chn/int/metric) | 5/6/5, 1 fractional bit | 6/7/7, 2 fractional bits | 6/7/7, 2 fractional bits |
| largest SPC node | 64 | 8 | 4 |

`TMAX`, `SLEN`, `SPC_MAX`, `N` and `PE` are parameters of
`fast_dscf_decoder`. `OMEGA`, the widths and the CRC are constants in
`dscf_pkg`, because they shape the types. Setting `OMEGA` there also selects
the matching widths (5/6/5 bits with 1 fractional bit for ω = 1, 6/7/7 bits
with 2 fractional bits otherwise). The f* constants `FSTAR_VAL` and
`FSTAR_THR` follow `FRAC` automatically. With `OMEGA` set to 1 or 3, the
end-to-end testbench still decodes every frame correctly. At ω = 1 it then
reports two of its mechanism counters as never exercised: order-2 flips,
which cannot happen, and the T_max limit, because the candidate list of a
first-order decoder runs out first. The ω = 1 and ω = 3 rows also need
`TMAX`, `SLEN` and `SPC_MAX` set as in the table.

## 7. Where this RTL departs from the paper, or fills gaps

* **Instruction list.** The paper's core executes a precomputed instruction
  list. Here the node types are computed on chip from `info_mask`.
* **Core schedule.** The paper builds its core on an earlier published
  Fast-SC-Flip decoder and does not describe it again. This schedule, including the explicit combine
  cycles, the memory layout and the node numbering, is this design's own.
  Its cycle count is close to the paper's, as noted in section 4.
* **"After the last flip".** Whether a node comes after the last flip is
  decided per node. The flipped node itself generates no new candidates, and
  its M'' terms are not accumulated.
* **Order of the M'' update.** A node's candidates see M'' after that node's
  own f* terms have been added.
* **CRC convention.** The CRC convention (zero initial value, CRC in the last
  16 information bits, no interleaving) is not specified by the paper.
* **Tie-breaking and small choices.** Rep nodes decide 0 when ΣL = 0.
  `findmin4` breaks ties towards the lower index. Presort and sorter ties
  keep the older element first.
* **Memories.** Memories are register arrays. No SRAM macros are modelled.
* **Not reproduced.** Power, area and clock frequency are not reproduced.
  Error-rate curves were not simulated at scale. The full-size testbench
  checks correctness of decoding and of the flipping machinery, not frame
  error rates.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against a reference written independently in the testbench and prints
`TB_RESULT checks=<n> failures=<m>`:

| testbench | what it checks |
|---|---|
| `tb_pe_array` | F/G with saturation, random operands |
| `tb_llr_mem`, `tb_psum_mem` | write/read ports, masked writes, combine with shifts |
| `tb_node_classifier` | the tree of a 16-bit example code and random codes, against pattern-based classification |
| `tb_node_decoder` | Rate-1/Rep/SPC decisions, flips and message bits |
| `tb_findmin4` | four minima with ties |
| `tb_crc_unit` | against a bit-serial CRC-16 (0x1021), masks, valid/invalid codewords |
| `tb_metric_gen` | every candidate's metric, order and flip entry, and M'', per node type |
| `tb_cand_shift_reg` | 6-in / 3-out sequencing |
| `tb_insertion_sorter` | against a queue model: inserts, overflow, shift with normalisation |
| `tb_sc_core` | N = 64 against a recursive Fast-SSC reference with random flip sets: every node report, the message, and the exact cycle count |
| `tb_fast_dscf_decoder` | the full-size decoder (all defaults), described below |
| `tb_workload_rates` | the default decoder on N = 1024 codes of rates 1/8, 1/4, 1/2, 3/4 and 7/8 (the last is PC(1024,896)), 13 frames each |

`tb_fast_dscf_decoder` builds a PC(1024,512) code with a 16-bit CRC.
Information bits go to the most reliable positions by polarisation weight;
this is not the exact 5G sequence. It then decodes:

* one noiseless frame, where the latency must be that of one attempt;
* 24 noisy BPSK/AWGN frames at 1.75 dB and 0.5 dB, with Box–Muller noise
  from `$urandom`.

Every successful frame must equal the transmitted message. Every failure
must have used all T_max attempts or emptied the sorter. A frame that uses
all T_max attempts must take T_max + 1 times the single-attempt latency (40,200
cycles). The testbench also
counts every mechanism and fails if one never happens:

* additional attempts;
* Rep, Rate-1 and SPC flips;
* order-2 flip sets;
* Rate-0 merges;
* SPC parity fixes;
* sorter inserts and overflows;
* T_max exhaustion;
* frames fixed by flipping.

In a typical run, 5 of 7 frames that fail the first attempt are corrected by
flipping.

`tb_workload_rates` rebuilds the information set for each rate and decodes
one noiseless frame and 12 noisy ones near each rate's waterfall region. It
applies the same correctness checks. It reports, per rate, how many frames
were decoded at once, how many were fixed by flipping, and the average
cycles per frame (from 227 cycles for rate 1/8 to about 9,000 for rate 7/8
at 3.5 dB, where many frames need many attempts).

To simulate a block with Verilator (from the directory that holds `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Irtl rtl/dscf_pkg.sv tb/tb_sc_core.sv \
          --top-module tb_sc_core -Mdir obj_sc_core
./obj_sc_core/Vtb_sc_core
```

The full-size testbench takes a few seconds.
