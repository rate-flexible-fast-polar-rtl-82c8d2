# A rate-flexible fast polar list decoder

Fast polar decoders skip large parts of the successive-cancellation (SC)
decoding tree by decoding whole sub-codes ("special nodes") at once. To do
so they must know, for every position in the tree, whether the node there
is all-frozen, all-information, a repetition code or a single-parity-check
code. Usually that list of operations is compiled off line for each code
rate and stored: for a length-1024 code and every 5G rate this is about a
megabit of memory.

This decoder needs none of that. It stores only the bit-channel relative
reliability vector **v** (entry `v_i` = rank of bit-channel `i`, 0 = most
reliable; bit `i` carries information iff `v_i < K`). Because the
reliability order of polar bit-channels is partially fixed by the binary
expansion of their indices, four entries of **v** and four comparisons with
`K` are enough to classify a node of any size `T = 2^t`:

| node   | frozen pattern     | test (node covers bits `i .. i+T-1`) |
|--------|--------------------|--------------------------------------|
| Rate-0 | 0 0 ... 0          | `v[i+T-1] >= K`                      |
| Rate-1 | 1 1 ... 1          | `v[i] < K`                           |
| Rep    | 0 ... 0 1          | `v[i+T-1] < K` and `v[i+T-2] >= K`   |
| SPC    | 0 1 ... 1          | `v[i] >= K` and `v[i+1] < K`         |

So any `K` can be decoded with the same hardware and the same memory
contents (1024 x 10 bits). The decoder around this idea is a list decoder
of the Fast-SSCL-SPC family with *layered, partitioned* list sizes (LPSCL):
four paths in the lower tree stages, but only two in the top two stages.

Default configuration (all RTL parameter defaults): code length N = 1024,
N_PE = 64 processing elements per path, L_MAX = 4 paths below the
partition boundary, L_UP = 2 paths in the top log2(P) = 2 stages (P = 4
partitions of 256 bits), 4-bit channel LLRs, 6-bit internal LLRs, 8-bit path
metrics, special nodes of at most 16 bits (Rate-0, Rep) and 64 bits
(Rate-1, SPC).

## Node identification (`node_identifier`)

Four comparators `s_j = (v_j < K)` on `v_0, v_1, v_{T-2}, v_{T-1}` of the
node (indices relative to the node's first bit) and four gates give the
four classes of the table. The logic is purely combinational and works for
every node size; the caller decides which classes to use and enforces size
limits. Why it is enough: bit-channel 0 of a node is degraded with respect
to all others of the node, bit-channel T-1 upgraded with respect to all
others, bit-channel 1 is degraded with respect to all of 2..T-1 and T-2 is
upgraded with respect to all of 0..T-3. A reliability vector that respects
this partial order (the 5G sequence does, as do Bhattacharyya and
polarization-weight orders) therefore turns one comparison into a
statement about the whole node.

With `EXT = 1` the module also takes `v_2, v_4, v_{T-9}, v_{T-5}, v_{T-4},
v_{T-3}` and flags five more node types (Type-I: 0..0 1 1; Type-II:
0..0 1 1 1; Type-III: 0 0 1..1; Type-IV: 0 0 0 1..1; Type-V: 0..0 1 0 1 1 1)
with ten comparators. The decoder does not use them (`EXT = 0` there);
they are verified on their own.

One instance sits in the control unit and is shared by all stages.

## Walking the tree (`control_unit`)

The control unit performs the depth-first walk of the SC tree and issues
one command per clock cycle to the datapath (`cmd_t`: operation, stage
`t`, first bit `i`, chunk, step). For every node it visits:

1. **FETCH** – present the four addresses to the reliability memory
   (one-cycle read);
2. **DECIDE** – classify. Priority Rate-0, Rate-1, Rep, SPC, each only if
   `T` is within its limit (limits are clipped to N_PE and N/P, so a special
   node never crosses a partition). A leaf (`T = 1`) is always Rate-0 or
   Rate-1;
3. either the special node's sub-phases (below), or `F` into the left child
   in `max(1, 2^(t-1)/N_PE)` chunks and a visit of the left child;
4. when a node finishes: if it is a right child, **COMBINE** its partial
   sums into the parent (one cycle) and continue with the parent; if it is a
   left child, `G` for the right sibling (chunked like F) and visit it.
   When a 256-bit subtree (stage n - log2 P) finishes, a **BOUNDARY** cycle
   prunes the list (see LPSCL).

Sub-phases of the special nodes (`S1 = min(L_MAX-1, T)`,
`S2 = min(L_MAX, T)`):

| node   | cycles                                                                  |
|--------|-------------------------------------------------------------------------|
| Rate-0 | `R0`: PM update, zero estimate                                          |
| Rep    | `REP`: both hypotheses at once, list split                              |
| Rate-1 | `S1` x `R1_SORT` (find least reliable bits), `S1` x `R1_EST` (split on one of them), `R1_HARD` (hard decisions written) |
| SPC    | `S2` x `SPC_SORT` (least reliable bits, parity of the hard decisions, PM penalty if odd), `S2-1` x `SPC_EST`, `SPC_HARD`, `SPC_PAR` (parity fixed on the least reliable bit) |

The bit index stays on the node's first bit while the node is decoded and
then moves on by the node size. Cycle count of a frame: 2 per visited node
+ the sub-phases + F/G chunks + 1 per finished node (+1 at each partition
boundary) + 4 for start/end.

## List decoding datapath (`decoder_datapath`)

Each of the L_MAX paths owns a PE set (`pe_array`: N_PE `pe` lanes doing
min-sum F or G), an LLR memory, a path (partial-sum) memory, a path metric
and the small state of the special node in progress (hard decisions,
sorted positions, parity). Per cycle:

* **F/G** read two N_PE windows of the parent stage (from the channel
  memory at the root, otherwise from the path's LLR memory) and write
  one window of the child stage. G takes its partial sums from the path
  memory.
* **Special nodes** read the node's LLRs (at most 64) from the stage
  memory. `pm_calc` gives the two candidate metrics of each path,
  `pm_sorter` ranks all 2L candidates and keeps the best L, and every
  survivor takes over the complete state of its parent path in the same
  cycle (LLR memory, path memory, special-node state). The least reliable
  bits of a Rate-1/SPC node come from `llr_sorter`, one per cycle.
* Path metrics (min-sum approximation, saturating 8-bit):
  Rate-0 adds the magnitudes of the negative LLRs; Rep adds those (u = 0)
  or those of the positive LLRs (u = 1); a Rate-1 bit estimated against its
  LLR adds `|alpha_j|`; an SPC node with odd hard-decision parity starts by
  adding `|alpha_min|`, and flipping bit `j` adds `|alpha_j| + |alpha_min|`
  (even parity) or `|alpha_j| - |alpha_min|` (odd parity).
* **COMBINE** XORs the right half of a finished node into its left half in
  the path memory (in place; bits `i .. i+T-1` then hold the node's
  partial sums `beta`).

## Layered partitioned lists (LPSCL)

The lower stages (0 .. n - log2 P = 8) keep L_MAX = 4 paths; their LLR and
path memories cover one 256-bit partition. The upper stages (9, 10) keep
only L_UP = 2 paths and have their own, smaller set of memories: two LLR
memories for stage 9 (the LLRs of stage 10, the root, are the channel
memory itself) and two 1024-bit path memories.

Each lower path carries a pointer `up[l]` to the upper path it descends
from; when a lower-layer node needs upper-layer data (the stage-9 LLRs
entering a partition, or upper partial sums for a G), it reads them
through this pointer. When a partition finishes (BOUNDARY):

1. the L_MAX lower paths are ranked by metric and only the best L_UP
   survive;
2. upper path `u` becomes a copy of the upper state of survivor `u`'s
   pointer, and the survivor's 256 partial sums are written into that
   upper path memory at the partition position (together, the transfer
   between the upper and lower layers);
3. the lower list restarts with these L_UP paths, pointers `up[u] = u`.

Upper-stage F/G and combines then run on the L_UP upper paths only. At the
end, upper path 0 – the best path – holds the codeword estimate `x_hat`.

## Memories and number formats

| memory             | per instance                    | instances | notes |
|--------------------|---------------------------------|-----------|-------|
| reliability (`v`)  | 1024 x 10 bit                   | 1         | written once, 4 synchronous read ports |
| channel LLRs       | 1024 x 4 bit                    | 1         | two 64-wide combinational read windows |
| LLR, lower layer   | stages 0..8: 511 x 6 bit        | 4         | stage `t` holds `2^t` LLRs at base `2^t - 1` |
| LLR, upper layer   | stage 9: 512 x 6 bit            | 2         | |
| path, lower layer  | 256 bit                         | 4         | |
| path, upper layer  | 1024 bit                        | 2         | |

All are register arrays, written so that any memory compiler or SRAM
wrapper can replace them; copy of a whole path is one cycle.

LLRs are sign-magnitude: internal 1 + 5 bits (2 fractional bits, so
magnitudes up to 7.75), channel 1 + 3 bits with the same fractional
point, widened by zero-extension. F is `sign(a) sign(b) min(|a|,|b|)`;
G is `b + (1 - 2c) a` saturated to +-31. Path metrics are unsigned 8 bit
and saturate at 255.

## Interface and timing (`rf_fast_sscl_decoder`)

| port                                   | use |
|----------------------------------------|-----|
| `clk`, `rst_n`                         | one clock; synchronous active-low reset |
| `v_we`, `v_waddr[9:0]`, `v_wdata[9:0]` | write `v_i`; once, valid for every K |
| `ch_we`, `ch_waddr[9:0]`, `ch_wdata[3:0]` | write channel LLR `i` (sign-magnitude, positive = bit 0 more likely) |
| `start`, `k_info[9:0]`                 | one-cycle pulse starts a frame with `K = k_info` |
| `busy`                                 | high while decoding |
| `done`                                 | one-cycle pulse; `x_hat` and `best_pm` are valid from then until the next start |
| `x_hat[1023:0]`                        | codeword estimate `x = u F^{(x)n}` of the best path |
| `best_pm[7:0]`, `list_active[3:0]`     | its path metric; live lower paths |

LLRs are taken in tree order: the bit-reversal permutation of the
generator matrix, if used, is left to the channel interface. The
information bits are obtained from `x_hat` by one more pass of the
polar transform (`F^{(x)n}` is its own inverse) and picking the positions
with `v_i < K`. Channel memory may be rewritten only while `busy` is low.

Measured frame times at the defaults (start to done, 5G-like rates,
polarization-weight reliability order): 869 cycles at K = 85, 979 at 171,
1139 at 341, 1226 at 512 and 1078 at 683.

## Where this RTL departs from the published design

* **Latency.** At R = 1/2 the published decoder needs about 800 cycles
  (0.84 us at 955 MHz); this one needs 1226. The extra cycles are the
  two-cycle fetch/decide per visited node, a separate combine cycle per
  finished right child, and one-bit-per-cycle sorting in Rate-1/SPC nodes.
  Overlapping fetch with the previous node and merging combine into the
  next G would close most of the gap.
* **Node identifier.** One shared instance rather than one per stage and
  partition. The Rep node is decoded in one cycle instead of two
  sub-phases.
* **LLR memory** is one flat array per path with stage-dependent base
  addresses, not split into high-stage (`N_PE`-wide words) and low-stage
  (single-LLR words) memories.
* **LPSCL list sizes.** One list size (`L_UP`) for all upper stages; the
  general scheme allows it to shrink stage by stage.
* **K range** is 1..1023 (`k_info` is 10 bits); K = 1024, the uncoded
  case, is not supported.
* The memories are register arrays, not SRAM macros, and there is no
  pipelining inside F/G, sorting or metric update: the paper's 955 MHz in
  65 nm is not a property of this RTL.
* The extended node types (Type-I..V) are identified by `node_identifier`
  with `EXT = 1` but not decoded.

## Files

`rtl/` (one module per file): `rf_pkg` (types, widths, command set),
`pe`, `pe_array`, `node_identifier`, `reliability_memory`,
`channel_memory`, `llr_memory`, `path_memory`, `pm_calc`, `pm_sorter`,
`llr_sorter`, `decoder_datapath`, `control_unit`, `rf_fast_sscl_decoder`
(top).

`tb/`: one self-checking testbench per module (`tb_<module>`), the
end-to-end `tb_rf_fast_sscl_decoder` at N = 128, and
`tb_rf_decoder_full` at the default size. Each ends with a line
`TB_RESULT checks=<n> failures=<m>`. The decoder testbenches
(`tb_decoder_common.svh`) build a reliability order from polarization
weights, encode random frames for five rates, add a few weak errors, and
check the codeword, that every special node and every descended node has
the class a brute-force look at its frozen pattern gives, the exact cycle
count of the schedule, and that each mechanism (each node type, path
copies, flipped estimates surviving, SPC parity correction, pruning at the
partition boundary, upper-stage F/G and combines) happened.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rf_pkg.sv \
    tb/tb_rf_decoder_full.sv --top-module tb_rf_decoder_full -Mdir obj -o sim
./obj/sim
```

Any other testbench works the same way (replace the two names). The
full-size test takes under a minute to compile and a fraction of a second
to run. To change the configuration, override the top's parameters
(`N`, `NPE`, `L_MAX`, `P`, `L_UP`, `MAX_R0`, `MAX_REP`, `MAX_R1`,
`MAX_SPC`); `N`, `NPE` and `P` must be powers of two with `NPE <= N/P`,
and the command fields in `rf_pkg` (16-bit bit index, 8-bit chunk count,
4-bit step) bound `N` to 2^15, `N/NPE` to 512 and `L_MAX` to 15.
