# Two memristive computation-in-memory accelerators in SystemVerilog

A memristor stores a bit as a resistance: low (R_L) for 1, high (R_H) for 0.
Read a crossbar of such cells by raising word lines and sensing the
bit-line current, and the read itself can compute. If several rows are
raised at once, the current on each bit line depends on how many of the
selected cells hold a 1. A sense amplifier compares that current with a
reference, so the result is a logic function of the rows, not a plain read.
This RTL builds two accelerators on that idea:

* the **Memristive Vector Processor (MVP)**. It sits next to a host
  processor. The host preloads a data set into a memristive crossbar, then
  replaces memory-bound loops with macro-instructions. The MVP runs these
  inside the array and returns the result rows. Bit-wise OR, AND and XOR of
  two rows come straight from the sense amplifiers ("scouting logic"), so the
  operands never leave the array.
* the **RRAM automata processor (RRAM-AP)**. It runs a non-deterministic
  finite automaton over a stream of input symbols at one symbol per clock.
  Every step of the automaton is a Boolean dot product, an OR of ANDs between
  an input vector and a column of configuration bits. A column of memristive
  cells on one pre-charged bit line computes exactly that.

`cim_top` holds both accelerators. They share only clock and reset. The host
processor, its caches, DRAM and external storage are outside the design and
drive the top-level ports.

## Scouting logic: how the MVP computes while it reads

Take one bit line with two rows A and B raised. The bit-line current is about
2Vr/R_H if both cells hold 0, about Vr/R_L if exactly one holds 1, and about
2Vr/R_L if both hold 1. The sense amplifier's reference decides which
function comes out:

| `sa_ref`  | rows raised | reference placed between | output is 1 when | result   |
|-----------|-------------|--------------------------|------------------|----------|
| `SA_READ` | 1           | Vr/R_H and Vr/R_L        | ≥ 1 cell is 1    | A        |
| `SA_OR`   | 2           | 2Vr/R_H and Vr/R_L       | ≥ 1 cell is 1    | A OR B   |
| `SA_AND`  | 2           | Vr/R_L and 2Vr/R_L       | 2 cells are 1    | A AND B  |
| `SA_XOR`  | 2           | two references around Vr/R_L | exactly 1 cell is 1 | A XOR B |

In the RTL, `mvp_crossbar` turns the analog current into a 2-bit *level* per
bit line: the number of low-resistance cells among the raised rows.
`scouting_sa` compares that level with the threshold of the selected
reference.

### MVP blocks

| module           | role |
|------------------|------|
| `mvp_crossbar`   | `ROWS x COLS` cell array. Writes one row at a time. Raises one or two rows and gives `level[c]` one cycle later. |
| `scouting_sa`    | One comparator per bit line with a selectable reference (table above). Combinational. |
| `mvp_controller` | Takes macro-instructions, runs them over runs of rows, returns results. |
| `mvp`            | Wires the three together. |

### MVP instruction interface

The host hands over a macro-instruction with a valid/ready handshake. It has
the fields `instr_op`, `instr_row_a`, `instr_row_b`, `instr_count` (16 bits)
and `instr_data`.

| `instr_op`  | effect |
|-------------|--------|
| `MVP_WRITE` | row `row_a` ← `data`; used to preload the data set; no result |
| `MVP_READ`  | for i in 0..count-1: return row `row_a+i` |
| `MVP_OR`, `MVP_AND`, `MVP_XOR` | for i in 0..count-1: return row `row_a+i` op row `row_b+i` |

A count of 0 runs as 1. Results come back in order on `res_valid/res_ready`,
and `res_last` marks the last one. Each result row takes two cycles: one to
raise the rows, one to sense. A write takes two cycles too. The host may hold
`res_ready` low; the result then stays stable, and an assertion checks this.
If both operands name the same row, there is only one word line to raise.
The controller then reads that row alone: OR and AND return the row, and XOR
returns zeros.

## The automata processor

### The model

An automaton has N states. Its input symbols are W bits wide. For each
symbol it computes three vectors of N bits each:

1. **Symbol vector s.** A decoder raises the one word line (out of 2^W) that
   belongs to the symbol. Each state has a column of 2^W bits, its *STE*
   (state transition element), marking which symbols may enter the state.
   So s[n] is 1 when state n accepts the current symbol.
2. **Follow vector f and new active vector.** The current active vector `a`
   drives the routing matrix. Column n of that matrix marks the states that
   have a transition into state n, so f[n] = OR over i of (a[i] AND R_n[i]).
   The next active vector is `f AND s`.
3. **Accept.** A = OR over n of (a[n] AND c[n]), where c marks the accepting
   states.

This form works because the automaton is *homogeneous*: every transition into
a state uses the same symbol class, so the symbols can be attached to states
rather than to edges. Any NFA can be rewritten in this form.

The start state q0 is not stored as a state. A *start vector* marks the
states q0 leads to. On the first symbol of a sequence (`sym_first = 1`) the
start vector takes the place of f, and any earlier activity is dropped.

A worked example, run in `tb_ap_partition`. The alphabet is {a,b,c,d} and
there are three states. S1 has class {a,b,c} and is entered from the start.
S2 has class {c} and is entered from S1. S3 has class {b}, is entered from S1
and from S2, and is accepting. The input "ab" leaves only S3 active and is
accepted. "acb" is accepted. "aa" and "bd" are rejected.

### Dot-product arrays and routing in two levels

`dot_product_array` is the one building block of the automata processor. It
holds `ROWS x COLS` configuration bits and computes
out[c] = OR over r of (in[r] AND bit[r][c]). It serves three roles:

* **STE array:** 2^W rows by PART columns, driven by the one-hot symbol decoder.
* **Local switch:** (PART + GI) rows by PART columns, driven by the
  partition's own active states plus GI lines from the global switch.
* **Global switch:** (NPART·GX) rows by (NPART·GI) columns. Its rows are the
  first GX states of every partition (the *exported* states); its columns are
  the GI input lines of each partition.

A full N x N routing matrix costs too much, so routing works in two levels.
`ap_partition` holds PART states, with their STE array, local switch, active
vector, AND, start vector and accept vector. `rram_ap` joins NPART partitions
with the global switch. Inside a partition, any state can lead to any other.
A transition into another partition must start at one of the source
partition's first GX states, pass through the global switch onto one of the
target's GI lines, and then through the target's local switch. The compiler
that maps an automaton must place states that need cross-partition edges
accordingly. Both routing levels, the AND and the register update happen in
one clock cycle.

### Programming the arrays

An array is programmed one word line per clock. `cfg_row` selects the row,
and `cfg_data` carries the bit-line values: 1 means a SET pulse (low
resistance), 0 a RESET pulse. `cfg_target` chooses the array:

| `cfg_target`    | row address (`cfg_row`)                                 | data (`cfg_data`) |
|-----------------|---------------------------------------------------------|-------------------|
| `AP_CFG_STE`    | symbol value                                            | PART bits: which states of partition `cfg_part` accept the symbol |
| `AP_CFG_LOCAL`  | 0..PART-1: source state; PART..PART+GI-1: global line   | PART bits: target states in the partition |
| `AP_CFG_GLOBAL` | exported state p·GX+k (state k of partition p)          | NPART·GI bits: global line p·GI+j feeds line j of partition p |
| `AP_CFG_ACCEPT` | ignored                                                 | accept vector c of the partition |
| `AP_CFG_START`  | ignored                                                 | start vector of the partition |

Memristors keep their state without power, so configuration bits have no
reset. Only the active vectors and the control state are reset (`rst_n`,
active low, asynchronous). After power-up, every array must be written before
it is used.

### Timing

A symbol presented with `sym_valid` is consumed at the next clock edge.
`active` and `accept` show its result in the following cycle, and
`result_valid` is high then. Symbols can be sent back to back, one per cycle,
with no stall.

## Sizes

| parameter           | default | basis |
|---------------------|---------|-------|
| MVP `ROWS x COLS`   | 2^23 x 1024 (1 GB) | The crossbar is meant to hold 2 GB. The SystemVerilog front ends refuse one object of that size (over 2^31 bytes), so the default is half that. Synthesizing the full array takes about 12 GB of host memory; use a smaller `ROWS` for synthesis experiments. |
| AP `W`              | 8       | 2^8 = 256 word lines, the length of the dot-product column studied at circuit level. |
| AP `N`, `PART`      | 1024, 256 | Own choice: four partitions of 256 states. |
| AP `GX`, `GI`       | 16, 16  | Own choice. NPART·GI must not exceed PART, because the global switch is programmed through `cfg_data`. |

The full-size automata processor holds 1024 + 1024 + 64 configuration rows
(STE, local, global) of up to 256 bits each.

## What is modelled and what is not

* Bit-line precharge, discharge and sensing are analog. Here they are
  reduced to their logic function: a combinational OR of ANDs in
  `dot_product_array`, and a level comparison in `scouting_sa`. At circuit
  level, a 256-cell column discharges in about 100 ps, but that figure sets no
  clock here. The clock rate follows from the synthesized logic.
* The 1T1R cells and their SET/RESET drivers appear only as the row-write
  port of each array.
* The host processor, caches, DRAM and external memory are not part of the
  RTL.
* The following are this design's own choices and are not dictated by the
  scouting-logic or automata model: the MVP instruction set, its two-cycle
  sequencing and its dataset-preload path; the start vector; the sizes of the
  routing hierarchy and the choice of which states are exported; the
  one-symbol-per-cycle timing.
* In the intended system the MVP also has a path of its own to external
  storage for loading its data set. Here all data enters through `MVP_WRITE`
  instructions on the host port; a direct loader would drive the same
  crossbar write port.
* Scouting logic can raise more than two rows at once. This RTL raises at
  most two.

## Files and simulation

`rtl/` holds one module or package per file. `cim_pkg.sv` (types, opcodes,
configuration targets) must be compiled first. Each `tb/tb_<module>.sv` is a
self-checking testbench that prints `TB_RESULT checks=N failures=M`:

| testbench              | what it covers |
|------------------------|----------------|
| `tb_symbol_decoder`    | all symbols, enable low |
| `tb_dot_product_array` | random configurations; one-hot, empty, full and random inputs |
| `tb_scouting_sa`       | every reference against every level |
| `tb_mvp_crossbar`      | one- and two-row levels, same-row activation, one-cycle latency |
| `tb_mvp_controller`    | controller against a model of the array |
| `tb_mvp`               | preload, all operations, result stalls, 2 cycles per row |
| `tb_ap_partition`      | the worked example above, then random automata with global lines |
| `tb_rram_ap`           | 32 states in 4 partitions, random automata, cross-partition transitions, 1 symbol/cycle |
| `tb_cim_top`           | both accelerators at once at reduced size; counts every mechanism |
| `tb_cim_top_full`      | `cim_top` at default sizes: full AP programming plus a symbol stream; MVP operations at both ends of the array |

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/cim_pkg.sv tb/tb_rram_ap.sv --top-module tb_rram_ap
    ./obj_dir/Vtb_rram_ap +verilator+rand+reset+2

The full-size test allocates the 1 GB crossbar (about 2 GB of simulator
memory). It builds and runs in well under a minute.
