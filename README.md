# Complex K-best MIMO detector: a pipelined RTL implementation

A MIMO receiver with 8 transmit and 8 receive antennas has to work out
which 8 complex symbols were sent. It only sees `y = H s + n`. Trying every
combination is out of the question: for 64-QAM that is 64^8 candidates. A
K-best detector makes the search manageable by walking the tree of partial
symbol vectors one antenna at a time and keeping only the K best partial paths
at each step. The measure is the accumulated partial Euclidean distance (PED).

This RTL implements such a detector for the lattice-reduced, complex-valued
formulation. It has two features:

* **Children are generated on demand, in Schnorr-Euchner order.** A parent
  in the lattice-reduced domain has unboundedly many children. The detector
  never lists them. It produces a child only when that child could be the
  next one selected.
* **The real axis is bounded by Rlimit.** Around each parent's rounded centre,
  at most `Rlimit` children are taken along the real axis (same imaginary
  part). After that, expansion continues only along the imaginary axis, from
  each node already selected. `Rlimit` and `K` together set the trade-off
  between work and error rate.

The default configuration is 8x8 MIMO with K = Rlimit = 4 and 16-bit words.
There is one hardware level per antenna, 8 in all, and each level takes
K + Rlimit = 8 clock cycles. The levels form a pipeline, so the detector
accepts a new received vector every 8 cycles. The list for a vector comes out
64 cycles after it went in. At the 181.8 MHz clock the published design
reaches, that is 181.8/8 × 48 bits ≈ 1.09 Gb/s of 64-QAM data.

## What goes in and what comes out

The detector starts after the channel preprocessing. That preprocessing (not
part of this RTL) consists of:

1. MMSE extension of the channel matrix and the received vector.
2. Lattice reduction `H~ = H̄ T`.
3. Shift and scale to `ỹ = (ȳ − H̄(1+j)) / 2`.
4. QR decomposition `H~ = Q R`, then `y̆ = Qᴴ ỹ`.

The decoder receives `y̆` (8 complex words), the upper-triangular `R` (8×8
complex words, with a real diagonal) and `1/R_ii` (8 real words). It searches
for Gaussian-integer vectors `z` that make `‖y̆ − R z‖²` small. It returns the
K best `z` with their distances. The mapping back to constellation points,
`ŝ = T z + (1+j)` with a quantiser, is also left outside.

### Number format (`kb_pkg`)

| quantity | width | format |
|---|---|---|
| `y̆`, `R`, `1/R_ii` (each real and imaginary part) | 16 | signed, 8 fraction bits |
| PED | 16 | unsigned, 8 fraction bits, saturates at 255.996 |
| symbol `z` (each part) | 8 | signed integer, saturates |
| residual after interference cancellation | 28 | signed, 8 fraction bits, cannot overflow |

The 16-bit word length is the published design's choice. The split into
integer and fraction bits, and the symbol width, are this implementation's
own choices.

## How one level searches

Level `l` handles row `i = NT − l` of `R`. The first level handles the last
row. The level receives K parent paths, each holding the symbols already
chosen for rows below `i` and a PED. It selects the K best extensions.

**Rounding (`kb_rounding`).** For a parent with path `z`:

```
e   = y̆_i − Σ_{j>i} R_ij z_j                  interference cancellation
c   = (e · inv_i) >> 8                          centre, = e / R_ii
x0  = (c + 0.5) >> 8   (per axis)               nearest Gaussian integer
dir = (c < x0) per axis                         first zig-zag step goes down
```

**Zig-zag order.** The n-th point on an axis is `x0, x0+s, x0−s, x0+2s,
x0−2s, …`, where `s = +1` when the centre is at or above `x0` and `−1` when
it is below. A node is therefore named by its parent and two indices,
`(nr, ni)`. Its symbol is `(zig(x0.re, nr), zig(x0.im, ni))`. Its PED is

```
PED = PED_parent + ((e.re − R_ii z.re)² + (e.im − R_ii z.im)²) >> 8   (saturated)
```

(`kb_ped_calc`). Along one axis, with the other axis fixed, this distance
never decreases in zig-zag order. That is why only the first
not-yet-selected node of each sequence ever needs to be looked at.

**The candidate set.** The algorithm's candidates are:

* for every parent, its first `Rlimit` children along the real axis
  (`ni = 0`, `nr = 0 … Rlimit−1`);
* for every node already selected, its next imaginary-axis sibling
  (`ni + 1`), and so on along that line.

The level takes the smallest candidate K times. The hardware keeps only the
front of each sequence, in two banks of K registers:

* **Real-axis bank (`kb_shift_reg`, Reg1..RegK).** This bank holds one entry
  per parent: that parent's next real-axis child.
* **Imaginary-axis bank (a second `kb_shift_reg`).** This bank holds one entry
  per selection made so far: the next imaginary sibling of the node chosen in
  that selection.

Together the two banks hold at most 2K candidates. They feed an 8-input
minimum tree (`kb_sorter`) at K = 4.

**Schedule of one level period (2K cycles).**

| cycle | phase | what happens |
|---|---|---|
| 0 … K−1 | fill | Parent `kcnt` is rounded and stored in the parent table. Its first child, the rounded point, is computed by `kb_child_expand` (mux on "from rounding"). It is shifted into the real-axis bank through SI. The imaginary bank is cleared. |
| K … 2K−1 | select | The sorter picks the minimum over both banks. It is written to the final list at position `scnt`. In the same cycle, `kb_child_expand` (mux on "from selected node") computes the next real sibling and `kb_next_node` computes the next imaginary sibling. |

What a selection replaces depends on where the winner came from:

* **From the real-axis bank:** the winner's register is replaced by the
  parent's next real child. That child is invalid once `Rlimit` children have
  been used. The imaginary slot `scnt` receives the winner's imaginary sibling.
* **From the imaginary-axis bank:** the winner's slot is replaced by its own
  next imaginary sibling.

At most two registers change per cycle, and each is written by exactly one
datapath unit. On equal PEDs the sorter takes the lower input number. That
means the real-axis bank wins over the imaginary one, and a later parent wins
over an earlier one, because the shift register holds the last parent in
Reg1.

At the first level the root is the only valid parent. The other K−1
real-axis registers are invalid, and all K selections come from the root's
real axis and its imaginary lines.

With K = Rlimit = 4, the Rlimit bound does not bind, up to fixed-point rounding. A parent's 4th real-axis
child is at least 1.5 lattice steps away on the real axis. Its rounded point's
imaginary neighbour is at most 1.12 steps away. The neighbour is therefore
always cheaper, and 4 selections run out first. The bound takes effect when
Rlimit < K. The tests use Rlimit = 2 and 3 for that case.

## Pipeline and control

```
            +----------+   +---------+   +------+         +---------+   +------+
 y̆,R,1/R ->| input reg |-->| level 1 |-->| Reg1 |-->...--> | level 8 |-->| Reg8 |--> list, distances
            +----------+   +---------+   +------+         +---------+   +------+
                 ^              ^           ^                  ^            ^
                 +--------------+-----------+------------------+------------+
                                  kb_control: fill / select / last
```

* `kb_control` is a three-state machine (RESET, FILL, SELECT) with a fill
  counter `kcnt` and a selection counter `scnt`. All levels run the same
  schedule in lockstep.
* At the clock edge of the last cycle of each period (`ctl.last`), every level
  register (`kb_stage_reg`) loads the list its level has just completed. The
  input register loads the next vector at the same edge.
* The final list (`kb_final_list`) has a write-through output. Because of it,
  the list's last entry, written at that same edge, is also captured.
* A level register carries the vector's `y̆`, `R` and `1/R_ii` along with the
  list. Each level therefore sees the data of the vector it is working on,
  while the levels before it already work on later vectors.

### Top-level interface (`kbest_decoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous active-high reset |
| `in_ready` | out | high in the last cycle of each 8-cycle period |
| `in_valid` | in | a vector is present; it is taken at an edge where `in_ready` is high |
| `in_y[NT]`, `in_r[NT][NT]`, `in_inv[NT]` | in | `y̆`, `R` (lower triangle ignored), `1/R_ii` |
| `out_valid` | out | one-cycle pulse: a new list is on the outputs, stable for the whole period |
| `out_list[K][NT]`, `out_dist[K]`, `out_list_valid[K]` | out | the K paths (symbol of row `j` in `[j]`), their PEDs in selection order (non-decreasing), valid bits |
| `ev_real`, `ev_imag`, `ev_rlimit` | out | per-level pulses: a real-axis node was selected, an imaginary-axis node was selected, a parent's real axis reached Rlimit (for observation and test) |

Timing: if a vector is taken at edge E, its list sits in Reg8 after edge
E + 64 (8 levels × 8 cycles). `out_valid` is sampled high at edge E + 65.
With `in_valid` held high, one list comes out every 8 cycles.

Parameters of `kbest_decoder`:

| parameter | default | meaning |
|---|---|---|
| `NT` | 8 | antennas = levels (up to 8 in the test model) |
| `K` | 4 | list size, up to 16 (tested up to 8) |
| `RLIMIT` | 4 | real-axis children per parent |

## How it relates to the published architecture

The following follow the published design:

* the split into a data-path block and a control-path block;
* one level of hardware per antenna, with a register after each level;
* a level period of K + Rlimit = 8 cycles;
* the blocks of one level: rounding, a 2:1 mux in front of the on-demand child
  expansion, a 4-register shift register with serial input SI, an "Updated"
  input and per-register enables, a feed-forward tree of Min cells with 8
  inputs, next-node calculation along the imaginary axis, and a final list;
* the enumeration rule itself: Rlimit real-axis children, then imaginary-axis
  expansion of selected nodes;
* 16-bit words.

The following are this implementation's own, because the published
description does not settle them:

* **How K parents share one level.** The published figures show one
  expansion around a single received point and a 4-entry register. Here the
  shift register holds one real-axis entry per parent, and a second bank holds
  the imaginary-axis fronts. The second bank also gives a meaning to the
  sorter's 8 inputs. Both banks together produce exactly the published
  candidate set.
* **Multipliers and `1/R_ii`.** The published text claims the level needs no
  multiplier or divider. However, the interference term `Σ R_ij z_j` and the
  PED are products of data words, so this RTL uses multipliers. To avoid a
  divider, it takes `1/R_ii` as an extra input from the preprocessing.
* **Second-phase counter.** The published text counts the second phase with
  the Rlimit counter, but also says a level outputs K nodes. Here the select
  phase makes K selections. The two readings agree at K = Rlimit = 4.
* **List size K.** The published comparison table lists "K = 8". Its footnote
  and the text give K = Rlimit = 4, and 4 is used here.
* **Details the published text leaves open:** the fixed-point split, tie
  breaking, the reset style, the `in_valid`/`in_ready`/`out_valid` handshake,
  the input register, and carrying `y̆`/`R` along the pipeline.
* **Sorter timing.** The sorter is combinational. A level picks one node per
  cycle from a set that changes after each pick, so a pipelined sorter would
  have to stall.

Not included: the MMSE/lattice-reduction/QR preprocessing, the back-transform
`T z + (1+j)`, and any soft-output (LLR) or iterative decoding. The published
architecture does not contain hardware for any of them: its output is the hard
K-best list.

Clock frequency, area and power depend on the cell library and are not
reproduced here. The design synthesises to about 20k flip-flops, most of them
in the level registers, which carry R along the pipeline.

## Verification

Every testbench in `tb/` is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`.

The reference is `tb/kb_ref_pkg.sv`, an integer model of the detector written
separately from the RTL. For each parent it keeps a queue of real-axis
children and a chain of imaginary siblings per selection, in plain procedural
code. It breaks ties the way the hardware presents candidates. It also
generates random test channels: real diagonal in [1, 2), off-diagonal parts in
[−0.5, 0.5), symbols in [−3, 3], adjustable noise.

| testbench | what it checks |
|---|---|
| `tb_kbest_full` | default 8×8, K = Rlimit = 4: 200 vectors back to back with random idle periods; every list and distance, the 65-edge latency, the 8-cycle spacing, and the event counts against the model |
| `tb_kbest_64qam` | default size on 64-QAM lattice points (parts in [−4, 3]) with light noise: 300 vectors checked against the model, and the best path must equal the transmitted vector |
| `tb_kbest_decoder` | the same checks on three decoders (default; K = 4 with Rlimit = 2; 4×4 with K = 8, Rlimit = 3). Each of these must occur: real-axis and imaginary-axis selections, the Rlimit bound, idle input, back-to-back outputs, and a full pipeline |
| `tb_kb_datapath` | the data path under a testbench-made schedule, 4 levels |
| `tb_kb_level` | one level, at the first level and at a middle level, against one model level, with the event counts |
| `tb_kb_rounding`, `tb_kb_child_expand`, `tb_kb_next_node` | the arithmetic against the model, including exact half-integer centres and the Rlimit bound |
| `tb_kb_shift_reg`, `tb_kb_sorter`, `tb_kb_final_list`, `tb_kb_stage_reg`, `tb_kb_control` | the building blocks against simple models |

Each unit testbench was also run against a deliberately broken copy of its
module, and it reported failures.

Simulating with Verilator, for example:

```
verilator --binary --timing --assert --top-module tb_kbest_full \
    -Irtl -Itb -y rtl -y tb rtl/kb_pkg.sv tb/kb_ref_pkg.sv tb/tb_kbest_full.sv
./obj_dir/Vtb_kbest_full
```

Replace the top module and file name for any other testbench. The packages
must come first on the command line. Other files are found through `-y`.

## Files

`rtl/kb_pkg.sv` holds the widths, types (`cplx_t`, `sym_t`, `cand_t`,
`parent_t`, `ctl_t`) and the zig-zag function. The hierarchy is:

```
kbest_decoder
├── kb_control
└── kb_datapath
    ├── kb_stage_reg            (input register, Reg1..RegNT)
    └── kb_level  × NT
        ├── kb_rounding
        ├── kb_child_expand ── kb_ped_calc
        ├── kb_next_node    ── kb_ped_calc
        ├── kb_shift_reg × 2    (real-axis bank, imaginary-axis bank)
        ├── kb_sorter
        └── kb_final_list
```

To change the list size or Rlimit, set `K` and `RLIMIT` on `kbest_decoder`.
A level period is always 2K cycles. To change the number format, edit `W`,
`FB`, `ZW` and `EW` in `kb_pkg`. The reference model in `tb/kb_ref_pkg.sv`
has its own `FB` and symbol range and must be changed with them.
