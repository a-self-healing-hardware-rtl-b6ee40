# A self-healing tile for safety-critical digital controllers

A controller in a nuclear plant or a car has to keep producing correct outputs while its own
hardware is being damaged. This design builds such a controller out of small,
identical *functional cells*. Each cell runs one function at a time, chosen by a
*gene*: a 66-bit word that holds an opcode and constants. The hardware then defends
each function in three steps, one for each kind of fault:

1. **Transient faults** (a flipped bit in a register, e.g. from radiation): every input
   register of a cell is stored three times and read through a majority vote. The
   upset never shows at the output and costs no time.
2. **A permanent fault in an active cell**: each cell runs every operation twice, in
   two copies of its function block, and compares the two results. On a difference, the
   cell's *local healing layer* cuts the cell off, sends its inputs to a spare
   cell of the same column and starts the same gene there. The spare already holds a
   copy of the genome.
3. **A permanent fault in that spare**: a *global healing layer* gives the column to a
   *stem cell*. The stem cell holds the genomes of all columns.

The names come from biology, as in the architecture this RTL implements (S. S. Khairullah, "A
Self-Healing Hardware Architecture for Safety-Critical Digital Embedded Devices"):

- *B cells* are the active cells.
- *T cells* are the passive spares.
- The *stem cell* is the last spare, shared by all columns.
- The genes play the part of DNA.
- The function block is an IEC 61131-3 *generic functional block* (GFB).

That paper describes the structure, the three healing tasks and the signal names. It leaves
out most of the detail needed to build the hardware: widths, encodings, timing and the rules
of the global layer. This RTL fills those gaps with its own choices, listed below.

## The tile

```
            col_din[k] (North, West, East, South), col_trigger[k], col_addr[k]
                 |                                   |
                 v                                   v
   +--------------------+   pf_b[k]   +--------------------------+
   | B cell  F_k        |-----------> | local healing layer k    |
   +--------------------+             |  close_output, select_   |
            | b_dout                  |  inputs, activate_gene,  |
            |                         |  retry                   |
            |            +------------+--------------------------+
            |            v
            |     +-----------------+     +--------------------+
            |     | transfer inputs |---->| T cell  R_k        |--- pf_t[k] ---+
            |     +-----------------+     +--------------------+               |
            |                                  | t_dout                        |
            v                                  v                               |
        +------------------------------------------------+                     |
        | out_mux k  (S if it serves k, else T if B is   |---> dout[k] (DO_k)  |
        | closed, else B masked by close_output)         |                     |
        +------------------------------------------------+                     |
                                    ^ s_dout                                   |
   global healing layer             |                                          |
   +-------------------+   +--------------------+   +------------------+       |
   | health syndrome   |<--| PF0..PF3, pf_s     |<--------------------------------+
   +-------------------+   +--------------------+
            | syn_valid, syn_col
            v
   +-------------------+    stem_sel, stem_retry
   | syndrome switch   |------------------------------+
   +-------------------+                              v
   +-------------------+  column k's inputs   +----------------------+
   | re-routing unit   |--------------------->| stem cell S          |
   +-------------------+                      | (genomes of 4 cols)  |
                                              +----------------------+
```

The tile has four columns (k = 0..3). Each column has:

- a B cell;
- a T cell with its *transfer inputs* unit in front;
- a local healing layer;
- an output multiplexer.

One stem cell serves all four columns. One tile is one *critical service layer*. An
application larger than four cells either uses several tiles, or runs several genes on each
cell one after another (see *Running an application*).

## The functional cell (`bio_cell`)

One module is used in all three roles. `N_GENOMES = 1` makes a B or T cell. `N_GENOMES = 4`
makes the stem cell, whose `gsel` input selects the column genome. A cell contains:

- `genome_mem`: 16 genes per genome, synchronous write, asynchronous read;
- four `hybrid_reg` input registers (three copies, bitwise majority, scrubbing);
- two `gfb` instances, a main one and a checker, fed with the same operands;
- `self_check`, which compares the two 64-bit results (output word and delay state) and
  latches `pf`;
- one delay-state word per gene address, for the unit-delay operation.

### Handshake and timing

| cycle | what happens |
|---|---|
| 0 | `trigger` is high while the cell is idle and healthy. `din` is written into the three copies of each input register. The gene at `{gsel, addr}` goes into the active-gene register. |
| 1 | Both GFBs evaluate the voted register values. If the results are equal, `dout`, the delay state and `done` are written. If they differ, `pf` is set and nothing is written. |
| 2 | `done` is high for one cycle, with the result on `dout`. |

A cell with `pf` set ignores every later trigger. The driver of a column must hold
`col_addr` and `col_din` steady from the trigger until `done`. The healing logic re-runs the
failed gene from these held values.

### Genes and operations

The gene layout is `{opcode[5:0], cmask[3:0], xy[7:0], k0[23:0], k1[23:0]}`, 66 bits. For
each input i, a set `cmask[i]` replaces that input by a constant. Inputs 0 and 1 take `k0`
and inputs 2 and 3 take `k1`, each sign-extended to 32 bits. This is how a cell gets the
fixed gains, limits and neutral inputs (all ones for an unused AND input, zero for OR). `xy`
is the cell-position label; the function block does not read it.

| opcode | operation | | opcode | operation |
|---|---|---|---|---|
| 0 AND | In1&In2&In3&In4 | | 7 BUF | In1 |
| 1 OR | In1\|In2\|In3\|In4 | | 8 ADD | In1+In2+In3+In4 |
| 2 NAND | ~AND (31-bit) | | 9 SUB | In1−In2 |
| 3 NOR | ~OR (31-bit) | | 10 MUL | (In1·In2) >>> 16, Q16.16 |
| 4 XOR | 4-input XOR | | 11 MUX | In2≠0 ? In1 : In3 |
| 5 XNOR | ~XOR (31-bit) | | 12 DELAY | returns In1 of this gene's previous run |
| 6 NOT | ~In1 (31-bit) | | 13 CMP | In1 clamped between In2 and In3 |

Logic operations work bitwise on the whole word, but the complement in NOT, NAND, NOR and
XNOR covers only the low 31 bits: bit 31 of the result is 0, so NOT x = 7FFFFFFF − x for
a non-negative x. This matches the data in the paper's waveforms, which behave like
non-negative 31-bit integers. For the inputs 00FAAAAA, 50500000, 00001111 and 01010000,
the NAND, NOR and XNOR results are 7FFFFFFF, 2E044444 and 2E544444. The application tests
use 7FFFFFFF for true and 0 for false. Arithmetic is 32-bit two's complement. Numbers are
signed Q16.16, so 0.02 is 1311 and 5.0 is 327 680.

## How healing runs, cycle by cycle

This is the part of the design with the most interplay. `t` is the cycle in which the
column's trigger is high.

**B cell fails** (the first fault in column k):

- t+1: F_k's two GFBs disagree.
- t+2: `pf_b[k]` rises. `done` does not come.
- t+3: local healing layer k has registered the three signals of the health syndrome:
  - `close_output` = all ones, so the B output is masked off: the B cell is dead;
  - `select_inputs` = 1, so the transfer inputs unit now passes the column's inputs to R_k;
  - `activate_gene` = the gene address that failed.

  Also in t+3, `retry` triggers R_k with that gene.
- t+5: R_k's result leaves through the output MUX with `done[k]`.

The column therefore answers 3 cycles late, once. Later genes run on R_k with the normal
2-cycle latency.

**T cell fails** (R_k fails while running a gene for column k):

- t+2: `pf_t[k]` rises.
- t+3: `health_syndrome` has latched column k as the stem cell's column (`stem_valid`,
  `stem_col`). `syndrome_switch` sees that column k is closed. It sets `stem_sel[k]` and
  pulses `stem_retry`. The re-routing unit triggers S with column k's held inputs and
  address. S runs its copy of genome k, selected by `stem_col`.
- t+5: S's result is on `dout[k]`.

If R_k was already dead when B_k fails, the same rule applies: the stem cell takes the
column when `closed[k]` rises. A T cell is only ever triggered after its B cell has died.
So in practice it fails while serving its column.

**Limits.** There is one stem cell, and it serves the first column whose T cell fails. Any
later T-cell failure, or a failure of the stem cell itself, sets `alarm`. When a column has
lost its B cell and its T cell, and the stem cell is not serving it, `col_lost[k]` is set
and that column produces no more results. The other columns go on. A cell that takes over
starts its unit-delay states from zero: the failed cell's delay state is not carried over.

## Fault injection

Two top-level inputs reproduce fault-injection experiments. Tie both to zero in use.

- `tf_inj[c]` flips chosen bits in one copy of one input register of cell `c`. Cells 0–3
  are the B cells, 4–7 the T cells and 8 the stem cell.
- `pf_mask[c]` forces bits of cell `c`'s main GFB result to 1: a stuck-at fault. The
  checker GFB is not affected, so the self-checking unit sees the fault whenever the
  correct result has a 0 in a forced bit.

Status outputs: `pf_b`, `pf_t`, `pf_s`, `closed`, `activate_gene`, `stem_valid`,
`stem_col`, `stem_sel`, `syndrome`, `alarm`, `col_lost`, and `tf_seen` (a cell's
register copies disagree in this cycle).

## Configuration

`cfg_we` writes `cfg_gene` to address `cfg_addr` of genome `cfg_col`. It writes three cells
at once: B cell `cfg_col`, T cell `cfg_col`, and the stem cell's genome `cfg_col`. Because
of this, every spare always holds the genome it may need. Genomes are not reset, so load
them before the first trigger.

## Running an application

The tile computes gates, not whole programs. Connecting the cells (which result feeds which
input) is left to the logic around it. The two application test benches do that job:

- **`tb_edg`: emergency diesel generator start logic.**
  - 14 digital inputs and two outputs, *EngineStart* and *OpenAirStartFuel_Valves*.
  - The AND/OR/NOT network becomes 15 genes on the four columns, run in 6 levels. One
    gene more than the 14 cells of the original mapping is needed, because the network
    has a five-input AND and a GFB has four inputs.
  - The feedback line from the start AND back to the start OR is modelled as a seal-in.
  - 300 evaluations, with transient faults, then a permanent fault in F0 and later in R0.
    Both outputs match a direct Boolean model throughout.
  - An evaluation takes 18 clock cycles without faults, and at most 21 while a heal takes
    place.
- **`tb_ccs`: cruise control.**
  - Target-speed rules: Set, Increment, Decrement, Cancel/Brake.
  - A PI throttle controller: 0.02 · error, plus the integral of 0.01 · error clamped to
    ±5.
  - 14 genes per control step, run in 10 levels.
  - Permanent faults in F1 and then R1, and transient faults, with the results checked
    against a direct fixed-point model.
  - 30 cycles per control step, at most 33 while healing.
  - The two unit delays of the loop are the held outputs of the target and integral
    cells. The gene-by-gene mapping is this test's own reading of the block diagram.

## Where this RTL departs from, or adds to, the source paper

The RTL follows the paper in:

- the cell counts: 4 B, 4 T and 1 stem cell per layer;
- the 66-bit gene;
- the four input words per cell, and the 32-bit data width shown in the paper's waveforms;
- the three tasks of the local healing layer and its signal names (`Close_Output` as a
  32-bit all-ones word, `Select_Inputs`, `Activate_Gene`);
- the operation set needed by the two applications;
- the block list of the global layer.

The following are this design's own choices:

- **Inside the hybrid redundancy unit**: triplication with majority vote and scrubbing.
- **Inside the self-checking unit**: duplication and comparison. A detected fault is
  treated as permanent.
- **The gene's field layout, the opcode numbers, the Q16.16 format and the 16-gene genome
  depth.**
- **The re-run of the failed gene** on the cell that takes over. The paper does not say
  what happens to the operation in flight.
- **The rules of the global healing layer**: a single spare, given to the first column
  whose T cell fails, activated only once that column's B cell is closed, with an alarm on
  any further failure. The paper names the health-syndrome former, the switching circuit
  and the re-routing unit, but does not describe what they do.
- **Every cycle count.** The paper reports 245 ns without faults and healing by 570 ns for
  its diesel-generator run, at an unstated clock. Those numbers cannot be compared with the
  cycle counts above.
- **The I/O blocks** of the paper are plain ports here.

Some printed values are not reproduced:

- The waveform of the transient-fault experiment prints ten results of one cell for the
  inputs 00FAAAAA, 50500000, 00001111, 01010000. Opcodes 0, 1, 2, 3 and 5 reproduce five
  of them: AND, OR, NAND, NOR and XNOR, using the 31-bit complement. The value printed
  for XOR, 51ABBB33, differs from the four-input XOR (51ABBBBB) in its lowest byte. The last values,
  2FAFFFFF and 00001111, could not be tied to one operation. Opcodes from 4 upward are
  therefore this design's own.
- In the cruise-control mapping, cell FC2 is listed as an addition, but here a multiplexer
  does its job of forcing the target to zero. FC16 is left out, because its connections
  cannot be read from the diagram.

## Files

| file | contents |
|---|---|
| `rtl/shc_pkg.sv` | sizes, `gene_t`, `opcode_t`, `tf_inj_t` |
| `rtl/hybrid_reg.sv` | TMR input register with scrubbing |
| `rtl/gfb.sv` | generic functional block |
| `rtl/genome_mem.sv` | gene store |
| `rtl/self_check.sv` | duplicate-and-compare fault latch |
| `rtl/bio_cell.sv` | functional cell (B, T and stem roles) |
| `rtl/local_heal.sv` | local healing layer |
| `rtl/transfer_inputs.sv` | routes a column's inputs to its T cell |
| `rtl/out_mux.sv` | column output multiplexer |
| `rtl/health_syndrome.sv`, `rtl/syndrome_switch.sv`, `rtl/reroute_unit.sv` | global healing layer |
| `rtl/shc_top.sv` | the tile |
| `tb/tb_<module>.sv` | one self-checking test bench per module |
| `tb/tb_shc_top.sv` | end-to-end test of the tile at full size: replay of the printed transient-fault waveform, all three lines of defence, alarm and a lost column |
| `tb/tb_edg.sv`, `tb/tb_ccs.sv` | the two applications with fault injection |
| `tb/tb_ref_pkg.sv` | reference model of the GFB and gene helpers |

## Simulating

Each test bench prints one `TB_RESULT checks=N failures=M` line and then stops. A watchdog
ends a test bench that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/shc_pkg.sv tb/tb_ref_pkg.sv tb/tb_shc_top.sv --top-module tb_shc_top -o sim
./obj_dir/sim
```

Replace `tb_shc_top` with any other test bench name. Every test bench passes, and each one
fails when the module it tests is deliberately broken. Each test takes under a second. All
RTL passes `verilator --lint-only -Wall`. The only warnings left are these:

- a single-genome cell leaves `cfg_sel` and `gsel` unconnected;
- the function block does not read the `xy` label of the gene;
- some package constants are not used;
- `rst_n` is both an asynchronous reset and the `disable iff` of the concurrent
  assertions in `bio_cell` and `shc_top`, which Verilator reports as a net used both
  synchronously and asynchronously. The assertions are not synthesized.

To change the size, edit `GENOME_DEPTH` or `DATA_W` in `shc_pkg`. The gene keeps its
66-bit layout only while the constants stay at 24 bits. Four columns are built into the
2-bit column and genome selects.
