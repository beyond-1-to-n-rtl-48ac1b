# Rateless polar decoder with a channel-aware decoding schedule

A conventional polar code can only be decoded leaf by leaf from index 1 to N. Its
information set therefore has to be designed for one code length. This is the reason
polar codes have not been truly *rateless*: an IR-HARQ (incremental-redundancy hybrid
ARQ) link needs one mother code that keeps working at any received length E.

The design here drops the fixed decoding order. The successive-cancellation (SC) decoder
may decode the leaves in any order, given as a *schedule*. The code is then built once,
as a nested code with bit copies. The decoder adapts to the received length by choosing
the schedule, not by changing the code:

* The code has length `N_max`. The first transmission carries the *mother block*, the
  last `N_min` code bits. Every retransmission adds bits walking backwards from position
  `N_max - N_min - 1`. Anything not yet sent is punctured, so its LLR is 0.
* Information bits that are good only at the mother length (set `I_p`) are *copied*
  onto the positions that become good at twice the length (set `I_q`). The pairing is
  reversed: the smallest index of `I_p` is paired with the largest index of `I_q`, and
  so on. Extension bits that are sent early are therefore paired with mother bits that
  are decoded early.
* When the extension block is only partly received, its rate is above its capacity. The
  schedule then decodes the mother block first. Each decided bit immediately freezes its
  copy in the extension, which lowers the extension's rate until it too can be decoded.

This repository holds synthesizable SystemVerilog for the receiving side. It includes the
circular LLR buffer, the scheduled CRC-aided list (SCL) decoder with bit-copy freezing,
the greedy channel-aware scheduler that picks the decoding order for the length received
so far, and the on-chip generation of the reverse bit mapping. The defaults are list size L = 8,
`N_max` = 1024 and `N_min` = 512, with a K-bit message that ends in a 16-bit CRC.

## Conventions

Indices are 0-based. Leaf `i` is `u_i`, and the codeword is `x = u · F^{⊗n}` with
`F = [1 0; 1 1]`, in natural order with no bit reversal. For two leaves this is
`x0 = u0 ^ u1`, `x1 = u1`. A node of the decoding tree with `2M` leaves starting at
index `b` has an *upper child* (leaves `b .. b+M-1`) and a *lower child* (leaves
`b+M .. b+2M-1`). The mother block of length `N_max/2` is the lower half of the tree:
`x[N/2..N-1] = u[N/2..N-1] · F^{⊗(n-1)}`.

## Decoding in any order

To decide leaf `t`, the decoder walks from the root to `t`. Let `a` be the LLRs of the
node's upper half and `b` the LLRs of its lower half. At each node it forms the LLRs of
the child that holds `t`, using one of four rules:

| target is in | sibling subtree | child LLR | name |
|---|---|---|---|
| upper child | lower not fully known | `sign(a)·sign(b)·min(|a|,|b|)` | f (min-sum) |
| upper child | lower fully known, partial sums `β` | `(-1)^β · a` | h, reverse cancellation |
| lower child | upper fully known, partial sums `β` | `b + (-1)^β · a` | g |
| lower child | upper not fully known | `b` | pass, lower subtree first |

The usual 1→N SC decoder only ever uses f and g. The h rule and the pass rule let a
lower subtree be decoded before its upper sibling. "Fully known" means that every leaf of
the subtree is frozen, already decided, or frozen through a copy. The partial sums `β`
of a subtree are the polar transform of its known leaves.

Worked example (the testbench checks it). Take length 8, K = 4, information set
{3,5,6,7}, `x0..x2` punctured, and the schedule 5, 6, 7, 3. Leaf 5 is reached by
pass → f → g, and so are leaves 6 and 7 (pass, then g or f, then g). Last comes leaf 3:
its whole lower half is known by then, so the root uses **h**, followed by g and g. In
Bhattacharyya terms this gives `Z(u_1 | u_2,u_3,u_4) = ε` from the mother half alone,
which is the gain of decoding the capacity-sufficient block first.

A leaf that is already known when the schedule reaches it is skipped. This covers copies
frozen earlier and stray frozen entries. Frozen leaves are never visited.

## List decoding with copy sets

All L paths share the schedule. At a scheduled leaf, path `q` with leaf LLR `λ` becomes
two candidates, `u=0` and `u=1`. The candidate that disagrees with the sign of `λ` has
its metric increased by `|λ|`. The L candidates with the smallest metrics survive.
Validity is compared first, then metric, then candidate index `2q+u`. Survivors are
placed in slots 0..L-1 in that order.

After the decision, the decoder walks the leaf's copy set. Each member becomes known and
takes the decided value in every path, one member per clock cycle. A copy set is a
*ring* in the table `copy_next`: each member points to the next one, and a leaf without
copies points to itself. Rings let one table hold both the single pairs of one doubling
and longer chains.

At the end, each surviving path is CRC-checked. The message bits are the leaves flagged
in `msg_mask`, read in ascending index, with the CRC last. The generator is
x¹⁶+x¹²+x⁵+1 with zero initial value. The output is the first path in metric order that
passes. If no path passes, the output is slot 0 with `crc_ok = 0`.

## Hardware structure

```
 llr_in ──► llr_harq_buffer ──(2·LANES read ports)──────────┐
               │ rx_count                                   ▼
               ▼                                       scl_core ── L × LANES llr_pe
 sched_eps ─► sched_gen ─► schedule, length ──────────►  │  ├─ L × partial_sum_net
 cfg port ─► tables: info_mask, msg_mask,                │  └─ path_sorter
             copy_next, schedule, length                 ▼
             ip/iq masks ─► copy_map_gen ─► copy_next   L × crc16_serial ─► path choice
                                                                   ─► dec_u, crc_ok
```

| module | role |
|---|---|
| `polar_pkg` | defaults, the `pe_op_e` lane operation, `cfg_sel_e` table selector |
| `llr_pe` | one lane: f (min-sum), g, h, pass; saturating W-bit LLRs |
| `partial_sum_net` | combinational partial sums of every subtree, from a path's decisions |
| `path_sorter` | one-step rank network that keeps the best L of 2L candidates |
| `crc16_serial` | bit-serial CRC-16 checker, one per path |
| `llr_harq_buffer` | receive circular buffer: placement, puncturing, combining on wrap |
| `copy_map_gen` | reverse bit mapping, I_p ascending against I_q descending |
| `sched_gen` | greedy channel-aware schedule in fixed-point Bhattacharyya parameters |
| `scl_core` | schedule walker, tree LLR memory, list decisions, copy freezing |
| `rateless_polar_decoder` | top: tables, buffer, mapping, core, CRC selection |

**Recomputing from the root.** An arbitrary schedule jumps across the tree. Intermediate
LLRs from the last decision are therefore often stale. `scl_core` recomputes the whole
root-to-leaf path for every decision. Each path stores one LLR vector per tree level: the
level-`d` node is at `lm[2^d .. 2^(d+1)-1]`, N-1 words per path. Nothing else depends on
history. Copying a path in the list step therefore moves only its decision vector and
its metric: there are no LLR pointers to copy. The partial sums are not stored either.
`partial_sum_net` derives them combinationally from the decision vector, and the lanes
read the sibling's partial sums from there. The sibling "fully known" flag comes from an
AND tree over the known-leaf vector.

**Timing.** One decision on a leaf that is still unknown takes:

```
1 (fetch) + Σ_{d=1..log2 N} ceil(2^(d-1) / LANES) (tree walk) + 1 (list step) + 1 + (copies)
```

With the defaults (N = 1024, LANES = 32) this is 1 + 36 + 1 + 1 = 39 cycles, plus one
cycle per copy. A schedule entry that is already known costs 1 cycle. Add 3 cycles of
start and finish, then `N_max` cycles of CRC scan and 1 cycle of selection. A K = 448
codeword therefore takes about 448·39 + 2·|I_q| + 1024 ≈ 19 k cycles, roughly 19 µs at
1 GHz. The lane count and this latency belong to this implementation. The published
decoder's architecture, throughput and latency are not known.

**Receive buffer.** The k-th LLR of a codeword, counted over all transmissions, goes to
position `N_max - N_min + k` for `k < N_min`, and to position `N_max - 1 - k` after that.
After `N_max` LLRs the pointer wraps, and repeats are added with saturation (chase
combining). `llr_clear` starts a new codeword and zeroes the buffer, so unsent positions
act as punctured.

## Using the decoder

1. Write the tables with `cfg_we`, `cfg_sel` (`polar_pkg::cfg_sel_e`), `cfg_addr` and
   `cfg_data`:
   * `CFG_INFO`: every information position of the nested code, copies included.
   * `CFG_MSG`: the K message positions.
   * The decoding schedule, in one of two ways. Write `CFG_SCHED` and `CFG_LEN`. Or,
     after the LLRs have arrived (step 2), set `sched_eps` and pulse `sched_start`, then
     wait for `sched_done`; `sched_gen` fills the table for the positions received so
     far.
   * Copy rings, in one of two ways. Write `CFG_IP`/`CFG_IQ` and pulse `map_start`,
     then wait for `map_done`; `copy_map_gen` writes the pairs. Or write `CFG_COPY`
     directly. The reset value of `copy_next` is the identity, meaning no copies.
2. Pulse `llr_clear`, then stream the received LLRs with `llr_valid`/`llr_in` in
   transmission order, over as many transmissions as have arrived.
3. Pulse `start`. When `done` pulses, `dec_u` holds the decoded leaves (read the message
   at the `msg_mask` positions), `dec_pm` its metric and `crc_ok` the CRC verdict. To
   decode again after more redundancy arrives, stream the new LLRs without `llr_clear`,
   recompute or reload the schedule for the new length, and pulse `start`.

The tables must not be written while `busy` is high.

The information sets are left to the user. The testbench package `tb/polar_ref_pkg.sv`
takes the K smallest Bhattacharyya parameters of a binary erasure channel (BEC) with
ε = 0.5, at length `N_min` (placed in the lower half) and at `N_max`. Then `I_p` is the
mother set minus the full set, and `I_q` is the full set minus the mother set.

## Choosing the decoding order

`sched_gen` computes the schedule greedily. The next leaf is always the unknown
information leaf that is most reliable given the leaves already scheduled. Reliability
is the Bhattacharyya parameter Z on a BEC: a received position has `Z = ε`
(`sched_eps`), a punctured one `Z = 1`. The Z of a leaf is carried from the root down with
the same four node rules the decoder uses, so it describes exactly the LLR the decoder
will see:

| rule | child Z |
|---|---|
| f | `z1 + z2 − z1·z2` |
| h | `z1` |
| g | `z1 · z2` |
| pass | `z2` |

Here `z1` comes from the node's upper half and `z2` from its lower half. Once a leaf is
picked, the still-unknown members of its copy ring follow it at once in ring order. One
decision fixes them all, so they become known for every later Z evaluation. That is
what lets a decoded mother block lower the rate of a partly received extension.

In hardware, each pick is one iteration:

1. Load the channel Z vector (1 cycle).
2. Update the tree level by level, in place. There are `log2 N` levels, each with `N/2`
   node pairs, and LANES pairs are done per cycle. The "fully known" flags come from an
   AND tree over the known-leaf vector.
3. Scan the leaves for the minimum, LANES per cycle. Ties go to the lowest index.
4. Pick (1 cycle).
5. Walk the ring, one cycle per member.

At N = 1024 with 32 lanes an iteration takes 194 cycles plus the ring size. A K = 448 code
therefore needs roughly 90 k cycles per schedule, about 5 times a decode. Z is a 16-bit
fraction with 1.0 = 2^16 − 1, and the product is `(a·b + a + b) >> 16`, which is exact at 0
and 1.

The greedy rule does not always give the natural-looking order. Take the length-8 example
with five positions received. After u₂ (leaf 5), the lower leaf u₄ reaches
`Z = ε²` through the pass rule, while u₃ has `2ε² − ε⁴`. The greedy rule therefore takes
u₄ before u₃ and gives 5, 7, 6, 3. Both orders have the same sum of Z in this case. When
two leaves tie exactly, the scheduler does not look ahead.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NMAX` | 1024 | maximum code length |
| `NMIN` | 512 | mother block (first transmission) length |
| `L` | 8 | list size |
| `W` | 8 | LLR width; values kept in ±(2^(W-1)-1) |
| `PM_W` | 16 | path-metric width, saturating |
| `LANES` | 32 | processing lanes per path, and node pairs per cycle in the scheduler |
| `ZW` | 16 | scheduler's fixed-point width of Z |

`NMAX`, `NMIN` and `L` are the published design point. The others are choices made here.

## How far it follows the published design, and where it departs

Taken from the published description:

* the f, g and h functions;
* the decoding schedule and skipping of known leaves;
* the greedy scheduling rule with copy resolution, on BEC Bhattacharyya parameters;
* the instant freezing of bit copies;
* SCL with a CRC;
* the reverse bit mapping;
* sequential puncturing with the reverse order of retransmissions;
* L = 8 and `N_max` = 1024.

Choices made here where the description is silent:

* the min-sum form of f (the published f is the exact `2·atanh(tanh·tanh)`);
* all widths, the lane count, the path-metric rule and the sorter;
* the CRC polynomial and bit order;
* the scheduler's fixed point, its tie-break, and the choice to compute the schedule on
  chip (the published description does not say where it is computed);
* the table layout and configuration port;
* additive combining after a wrap;
* the output rule when no path passes the CRC.

The node rule needs care. The published pseudocode restarts from the root after each
out-of-subtree jump. Read literally, it would then use f for an upper target even when
the lower sibling is already fully known. This design uses h in that case, which is what
the published Bhattacharyya values for the length-8 example require
(`Z(u_1|u_2,u_3,u_4) = ε`).

The information sets and the message positions are tables. `sched_eps` is a channel
estimate that the user must provide. After a buffer wrap the scheduler counts every
position as received once (`Z = ε`, not `ε²`). The published area overhead (about 23 %
over a conventional decoder) and power overhead (about 22 % at 1 GHz) were not
reproduced. No timing, area or power analysis was done here.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`:

* `tb_llr_pe`: all four operations against integer arithmetic, at W = 8 and 6.
* `tb_partial_sum_net`: every level against the definition
  `β[l][b+c] = ⊕ u[b+r]` over `c ⊆ r`, at N = 64 and 1024.
* `tb_path_sorter`: against a selection sort, with many ties.
* `tb_crc16_serial`: remainders against polynomial long division; valid words and
  single-bit errors.
* `tb_llr_harq_buffer`: placement, puncturing, wrap and saturation, with three nested
  lengths and at the default size.
* `tb_copy_map_gen`: pairs against the reference mapping, and the cycle bound.
* `tb_sched_gen`: two checks.
  * The length-8 example, against the hand-worked orders above, at 5, 7 and 8 received
    positions.
  * 60 random codes at N = 64 with copy rings, some of which contain a frozen member.
    Each order is compared entry by entry with a fixed-point reference, and the cycle
    count with the iteration formula.
* `tb_scl_core`: two checks.
  * The length-8 example above: leaf LLRs and the operation sequence (`PFG, PGF, PGG,
    HGG`) against hand-worked values.
  * Random codes with copy rings of 2 and 3 members, compared bit for bit with the
    behavioural decoder: decisions, metrics, active paths. The cycle count is checked
    against the timing formula.
* `tb_rateless_polar_decoder`: 60 codewords end to end at `N_max` = 128, L = 4, K = 48.
  The codewords use 1 to 3 transmissions, AWGN at several noise levels, pure-noise
  codewords, and a wrap past `N_max`. Every other codeword is scheduled by the on-chip
scheduler. Every decode must equal the reference. Noiseless
  codewords must return their message. The test also counts each mechanism and fails if
  one never occurs: f, g, h and pass operations, skips, copy freezes, list pruning, pair
  generation, CRC failure, CRC choosing a path other than the best, buffer wrap,
  punctured decoding, and on-chip scheduling.
* `tb_rateless_polar_decoder_full`: all defaults, K = 448. Three codewords: E = 680
  noiseless, E = 950 at σ = 0.55, E = 1024 at σ = 0.8. The second codeword uses the
  on-chip scheduler. Each decode is compared with the reference, and the message is
  checked.

To run one with Verilator:

```
verilator --binary --timing --assert --top-module tb_scl_core \
    rtl/polar_pkg.sv tb/polar_ref_pkg.sv rtl/*.sv tb/tb_scl_core.sv
./obj_dir/Vtb_scl_core
```

The reference model in `polar_ref_pkg` is written independently of the RTL structure. It
works on whole vectors per tree level, with no lanes. It shares the decoding rules with
the RTL, so it confirms that the hardware implements those rules, not that the rules are
the best ones.
