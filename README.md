# Utilization-aware allocation for a TransRec-style CGRA

## The problem and the idea

NBTI (negative bias temperature instability) slowly raises the threshold
voltage of PMOS transistors while they are under stress, and only part of that
shift recovers when the stress is removed. How fast a functional unit (FU) ages
therefore depends on how often it is used. In a coarse-grained reconfigurable
array (CGRA), the usual mappers place the first operation of every
configuration on the first free FU, so the FUs near one corner of the array
are used by almost every configuration while those at the far corner are
almost never used. The heavily used corner wears out first and sets the
lifetime of the whole chip.

The design here removes that bias in hardware, without changing the mapper or
the program. A configuration is still generated as if the array started at row
0, column 0 (a *virtual configuration*). Each time a configuration is executed,
the hardware places it at a different *pivot*: shifted by some number of
columns and some number of rows. Shifts wrap around at the array's edges, so
every placement is legal. The pivot moves one column per execution, row by
row, and visits every FU position once per sweep. Over many executions each FU
does about the average share of the work.

Moving a configuration needs three additions to an ordinary
TransRec-style reconfigurable unit:

1. **Horizontal movement** (by columns). Each column's configuration register
   gets a multiplexer that can take its bits from any configuration line, not
   only from the line the column is wired to.
2. **Vertical movement** (by rows). Barrel shifters rotate the per-row fields
   of a column's configuration word: input-multiplexer settings, FU operations
   and output-multiplexer settings. The rotation happens while the word is
   loaded.
3. **Wrap-around datapath.** Each context line gets a 2:1 multiplexer in
   every column. It chooses between the previous column's value and the input
   context, so execution can start in any column. The last column feeds the
   first one.

The RTL is for the 16-column by 2-row array ("L16, W2"). This is the size whose
area the original study reports. The study estimates that, for this size,
moving the pivot lowers the busiest FU's utilization from 94.5% to about 41%.
By its aging model, that stretches the time to a 10% delay increase from 3 to
about 7 years.

## Where the unit sits

The unit is attached to a general-purpose processor (GPP). A binary translator
watches the instructions the GPP retires. It turns frequently executed
sequences into configurations and stores them in the configuration cache,
tagged with the PC of the sequence's first instruction. The unit then runs as
follows:

1. The GPP presents the PC of its next instruction (`pc_valid`, `pc`).
2. If the configuration cache hits, the unit raises `busy` and the GPP waits.
3. **Load.** The configuration is streamed into the column registers and moved
   to the current pivot on the way. At the same time, the input context is read
   from the GPP register file, two registers per cycle.
4. **Execute.** The fabric evaluates the used columns one per clock. It starts
   at the pivot column and wraps from column 15 to column 0.
5. **Write back.** The ROB writes the output registers to the GPP register
   file in program order, one per cycle.
6. **Done.** `done` pulses, `next_pc` tells the GPP where to resume, and the
   pivot advances by one position.

The GPP, the binary translator and the data cache are not part of this RTL.
Their connections are ports of `transrec_cgra_top`. The testbenches model all
three.

## How a configuration is moved

### Configuration lines and column registers (`reconfig_logic`, `cfg_column_reg`)

The configuration cache drives `NCFG` = 4 configuration lines. Each line
carries the bits of one whole column. A 16-column configuration arrives in
`NBEAT` = 16/4 = 4 beats: in beat `k`, line `m` carries virtual column
`4k + m`.

Every physical column listens to all four lines. With the pivot at column
offset `h`, physical column `p` must hold virtual column
`j = (p − h) mod 16`. So the column:

- selects line `j mod 4`, and
- writes its register in beat `j div 4`.

With `h = 0` this is the unmodified scheme: column `i` listens to line
`i mod 4`, and columns `4k … 4k+3` are written in beat `k`. Any other `h` costs
no extra cycles. Loading always takes four beats.

Example with `h = 6`. In beat 0 the lines carry virtual columns 0–3. They land
in physical columns 6–9, which select lines 0, 1, 2 and 3. In beat 2 the lines
carry virtual columns 8–11. They land in physical columns 14, 15, 0 and 1, so
the configuration wraps.

### Row rotation (`row_rotate`)

Before a column word is stored, three barrel shifters rotate its per-row
fields by the row offset `v`. The field written for row `r` goes to row
`(r + v) mod ROWS`. This is applied to:

- the input-crossbar settings,
- the FU operations,
- the output-crossbar settings.

For the rotation to be a plain shift, the output crossbar is encoded *per row*:
each FU row has an 8-bit mask of the context lines its result drives. Memory
operations have no row and are not rotated.

The context lines themselves stay where they are. Operand selects and
write-back still name the same lines after any movement; only the FU that does
each operation changes. So a moved configuration computes exactly what the
unmoved one does. The testbenches check this against a reference model that
executes the configuration unmoved.

### Pivot sequence (`pivot_gen`)

The pivot `(vshift, hshift)` starts at `(0, 0)`. After every execution it
moves one column to the right. After column 15 it goes to column 0 of the next
row, and after the last row back to row 0. All 32 positions are visited once
per sweep. When `rotate_en` is low, the pivot stays at `(0, 0)` and
configurations run where they were generated, as in an unmodified array.

## The fabric and its timing

### Columns (`cgra_column`)

A column has:

- `ROWS` ALUs (`fu_alu`).
- Two input crossbars per ALU. Each picks one of the 8 context lines, and
  operand B may instead be a sign-extended 12-bit immediate.
- An output crossbar. For each context line it chooses one of: the incoming
  value, the result of one of this column's FUs, or a load result that returns
  in this column.
- The per-line 2:1 start multiplexer described above. When the column is the
  first of an execution, it takes the input context instead of the previous
  column's values.

An FU whose operation is `ALU_NOP` is idle. It drives nothing, and it is not
counted as used.

### Ring of columns (`cgra_fabric`)

In the original TransRec array the fabric is purely combinational: an ALU
column takes half a processor cycle, and a processor cycle spans two columns.
Wrap-around would make that combinational chain a ring, that is, a
combinational loop.

This RTL breaks the ring with a *context-level register* after every column.
Execution is a wavefront: in each clock one column is active. It reads the
level register of the column before it, or the input context if it is the
first column, and its own level register captures its output. **One clock of
this design therefore corresponds to one column, i.e. half a processor
cycle.** A sequence that uses `ncols` columns executes in `ncols` clocks.

### Loads and stores (`mem_unit`)

The fabric has one data-cache read port and one write port, shared by all
columns; only the active column uses them. A load or store spans four columns.
A load issued in virtual column `j` is sent to the cache at once. The cache
answers one clock later, and the memory unit delays the answer so that it
arrives in column `j+3`. There, the column's load mask chooses which context
lines receive it. A store is written in the clock in which it is issued.
Because a moved configuration keeps its columns in the same order, the 4-column
distance holds at every pivot, including across the wrap from column 15 to
column 0.

### Busy time

From the cycle after the cache hit to the `done` cycle, the unit is busy for
`NLOAD + ncols + NOUT + 3` clocks:

- `NLOAD` = max(4 configuration beats, 8/2 register-read cycles) = 4.
- `ncols` column steps.
- `NOUT` = 8 write-back slots.
- 3 cycles of hand-over.

A sequence of 10 columns therefore takes 25 clocks.

## Configuration format (`cgra_pkg`)

| Field | Per | Bits | Meaning |
|---|---|---|---|
| `imux.sel_a`, `imux.sel_b` | row | 3 + 3 | context line for each operand |
| `imux.use_imm`, `imux.imm` | row | 1 + 12 | operand B is the sign-extended immediate |
| `alu` | row | 4 | `alu_op_e`; `ALU_NOP` = unused FU |
| `omux` | row | 8 | lines that receive this row's result |
| `mem.ld_en`, `ld_base`, `ld_off` | column | 1 + 3 + 12 | load from line + offset |
| `mem.st_en`, `st_base`, `st_data`, `st_off` | column | 1 + 3 + 3 + 12 | store line value to line + offset |
| `mem.ld_wmask` | column | 8 | lines that receive the load issued 3 columns earlier |
| `hdr.in_map[l]` | context line | 1 + 5 | line `l` starts with GPP register `r` (else 0) |
| `hdr.outs[s]` | slot | 1 + 5 + 3 | slot `s` writes line `line` to register `rd`; slot 0 first |
| `hdr.ncols`, `hdr.next_pc` | configuration | 5 + 32 | columns used, resume PC |

A configuration must not let two sources drive the same context line in one
column. If it does, a load result wins over FU results, and among FUs the
lower physical row wins; that row changes with the pivot.

## Interface of `transrec_cgra_top`

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | column-step clock; synchronous active-low reset |
| `rotate_en` | in | 1: move the pivot after every execution; 0: hold it at 0/0 |
| `pc_valid`, `pc` | in | GPP offers the PC of its next sequence |
| `busy`, `done`, `next_pc` | out | GPP waits while `busy`; resumes at `next_pc` on `done` |
| `rf_raddr[1:0]`, `rf_rdata[1:0]` | out / in | two register-file read ports; data expected in the same cycle |
| `rf_we`, `rf_waddr`, `rf_wdata` | out | register-file write port |
| `cfg_we`, `cfg_wpc`, `cfg_wcfg` | in | translator writes a configuration (`vcfg_t`) for a PC |
| `dc_rd_en`, `dc_rd_addr`, `dc_rd_data` | out / in | data-cache read; data one cycle after the request |
| `dc_wr_en`, `dc_wr_addr`, `dc_wr_data` | out | data-cache write |
| `fu_busy[15:0][1:0]` | out | FUs doing work in this clock (for utilization monitoring) |
| `hshift`, `vshift` | out | current pivot |

The configuration cache is direct-mapped with 16 entries. PC bits [5:2] are
the index and the rest of the PC is the tag.

## Files

| File | Contents |
|---|---|
| `rtl/cgra_pkg.sv` | sizes, `alu_op_e`, configuration structs |
| `rtl/transrec_cgra_top.sv` | the whole unit |
| `rtl/cfg_cache.sv` | configuration cache |
| `rtl/cgra_ctrl.sv` | control unit (load, execute, write back) |
| `rtl/pivot_gen.sv` | pivot sequence |
| `rtl/reconfig_logic.sv` | configuration lines, per-column line select and write enables |
| `rtl/cfg_column_reg.sv` | one column's configuration register with line multiplexer and shifters |
| `rtl/row_rotate.sv` | barrel shifter |
| `rtl/input_ctx.sv` | input context |
| `rtl/cgra_fabric.sv` | ring of columns, context levels, memory-unit hookup |
| `rtl/cgra_column.sv` | crossbars, FUs, start multiplexer |
| `rtl/fu_alu.sv` | ALU |
| `rtl/mem_unit.sv` | data-cache port with the 4-column load timing |
| `rtl/rob.sv` | in-order write-back |
| `tb/cgra_ref_pkg.sv` | reference model and random-configuration generator |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

## What follows the original design, and what is this design's own

The following come from the original TransRec design and the aging study:

- the fabric organization: FUs in rows and columns, context lines, input and
  output crossbars;
- one ALU per column, and loads and stores spanning four columns with one read
  and one write port;
- n = 4 configuration lines, with column `i` wired to line `i mod n` in the
  unmodified scheme;
- the any-line multiplexer, the three row shifters and the per-line 2:1
  wrap-around multiplexer;
- a pivot that moves on every execution and covers the whole fabric;
- lookup by the PC of the first instruction, and in-order write-back;
- the 16 x 2 size.

The following are choices made for this RTL, where the description is silent:

- **Widths and sizes.** 32-bit datapath (RV32), 8 context lines, 12-bit
  immediates, 8 write-back slots, a 16-entry direct-mapped configuration
  cache, and every bit layout above.
- **Operations.** The ALU operation set (RV32I integer operations and "pass
  B"). There is no multiplier.
- **Clocking.** One column per clock, with a context-level register per
  column, instead of a combinational array clocked at two columns per
  processor cycle. Results and column order are unchanged; the wall-clock
  timing of the original is not reproduced.
- **One execution at a time.** Nothing overlaps, and the GPP waits for
  `done`.
- **Load overlap.** The configuration load and the register reads overlap.
  Registers are read through two read ports; results are written back through
  one write port.
- **Data cache.** A one-cycle read that always hits; there are no stalls.
- **Write beats.** Beat `k` writes exactly four columns. The description
  states both "columns i … i+n in cycle i" and "columns 1 … 4 in the first
  cycle". The second, four columns per beat, is used.
- **Naming of the movements.** The description attributes the line-select
  multiplexer once to vertical and once to horizontal movement. Here it
  provides column (horizontal) movement, and the shifters provide row
  (vertical) movement. This matches the drawings of moved operations.
- **Vertical movement does not move context lines.** Only FU positions move.
- **Loads and stores take no FU row.** In the original array a load or store
  unit occupies a row over four columns. Here, loads and stores are fields of
  a column's configuration and go through one shared memory unit, so every
  ALU row stays available while a load is in flight. The rows of memory
  operations are therefore not moved vertically; their columns are moved
  like everything else.
- **Pivot step.** The pivot moves one column per execution, row by row.
- **`rotate_en`.** Added so that the unmodified allocation can be compared on
  the same hardware.

The binary translator, the GPP and the data cache are not included.

## Verification

Every module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`. Each also has a watchdog that fails the test
if it hangs. The reference package `tb/cgra_ref_pkg.sv`:

- executes a configuration column by column, unmoved, on a context and a data
  memory;
- generates random legal configurations, with loads, stores, immediates and
  idle FUs.

Main checks:

- `tb_reconfig_logic`: after every beat, each physical column holds the right
  virtual column, rotated by the row offset. Columns not yet due are
  untouched. Pivots are random and include the extreme 15/1.
- `tb_cgra_fabric`: 300 random configurations at random pivots. The final
  context and the whole data memory must match the unmoved reference. The run
  must include wrap-around, loads and vertical moves.
- `tb_cgra_ctrl`: the full schedule is checked cycle by cycle, including the
  busy time `NLOAD + ncols + NOUT + 3`.
- `tb_mem_unit`: a load returns exactly three clocks after it is issued, i.e.
  in the fourth column.
- `tb_transrec_cgra_top`: the end-to-end test, at the default 16 x 2 size.
  - Six configurations are written through the translator port.
  - A PC without a configuration must not start the unit.
  - 128 executions run with the pivot held, then 128 with it moving.
  - After each execution it compares all 32 registers, the data memory, the
    resume PC and the busy time with the reference.
  - It fails if a miss, a load, a store, a vertical move, a wrap past
    column 15 or a full pivot sweep never happens.
  - It fails unless the moving pivot lowers the highest per-FU utilization.
    With the seed used here, the busiest FU works in 128 of 128 executions
    with the pivot held and in 44 of 128 with it moving.
  - A hand-written three-column configuration has results worked out by
    hand: a small dependency graph with an immediate and two writes to the
    same register. It runs once unmoved and once at the last pivot (row 1,
    column 15), where it wraps over both edges. The test checks the register
    writes in program order and the exact FUs it occupies.
- `tb_utilization_workload`: a workload experiment at 16 x 2.
  - Five configurations are generated with the corner bias of a
    first-free-FU mapper: leftmost columns first, row 0 before row 1.
  - Each configuration runs once at every one of the 32 pivots, i.e. 160
    executions per mode. Five is coprime with 32, so round-robin order pairs
    every configuration with every pivot once.
  - With the pivot held, each FU's use count must equal the count computed
    from the configurations.
  - With the pivot moving, every FU must be used exactly
    `sum of busy FUs per configuration` times. The offsets over all positions
    carry every virtual FU to every physical FU once.
  - In a typical run the busiest FU drops from 100% to 35% of executions,
    which equals the average.
  - Results and memory are also checked against the reference.

The pivot never changes the busy time, so moving configurations costs no
cycles. The end-to-end test checks this on every execution.

Assertions in `cgra_fabric` and `rob` catch two configuration and control
errors: a column that routes a load result when no load returns, and a
write-back started while one is in progress.

A property of the pivot sequence that the tests expose: if a program
alternates between `k` configurations and `k` shares a factor with
`ROWS x COLS`, each configuration only ever meets a subset of the pivots. The
balancing is then coarser than the even spread shown above. With `k`
configurations executed round-robin, configuration `c` meets only pivots
congruent to `c` modulo `gcd(k, ROWS x COLS)`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/cgra_pkg.sv tb/cgra_ref_pkg.sv tb/tb_transrec_cgra_top.sv \
  --top-module tb_transrec_cgra_top -o sim
./obj_dir/sim
```

To run another module's testbench, replace the testbench file and the top
name. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/cgra_pkg.sv rtl/<module>.sv`.

## Changing the size

All sizes are constants in `cgra_pkg`. `ROWS` and `COLS` set the array. The
two larger arrays of the original study are 32 x 4 and 32 x 8. Two rules
apply:

- `COLS` and `NCFG` must be powers of two, with `NCFG` dividing `COLS`. An
  assertion in `reconfig_logic` checks this.
- `NCTX` sets the number of context lines. The controller reads two registers
  per load cycle, so the load phase lasts `max(COLS/NCFG, NCTX/2)` clocks.

The testbenches derive their expectations from the same constants. With
`COLS = 32` and `ROWS = 4`, and again with `COLS = 32` and `ROWS = 8`, all
array-level tests pass, including the end-to-end and workload tests. At those
sizes the moving pivot again spreads the workload test's work evenly: 20% and
28% on every FU, against 100% for the busiest FU with the pivot held.

One more limit on the data-cache port: it accepts one read and one write per
column step. With two columns per processor cycle, that is twice the
one-read, one-write-per-processor-cycle rate of the original data cache. A
configuration meant for that cache should issue at most one load and one
store in any two adjacent columns. The hardware does not enforce this.
