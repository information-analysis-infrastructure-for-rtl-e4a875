# LAMP: a logic associative multiprocessor with built-in memory repair

Many search, recognition and diagnosis problems come down to comparing a
query vector with every row of a table of binary vectors and keeping the rows
that match best. LAMP does this without any arithmetic. The goodness of a
match is itself a bit vector, computed with a few gates per bit, and two
matches are ranked by moving all the 1s of each vector to one end and comparing
the results with AND, XOR and an OR-reduction. Sixteen small processors,
called sequencers, each run this kind of bitwise program on their own table.
They sit on a 4 x 4 torus, so every sequencer has eight neighbours. A host
loads programs and tables through a register bus.

The same vector machinery also solves a concrete maintenance problem. An
on-chip memory has spare rows and spare columns. A built-in unit tests it,
works out a small set of spares that covers every faulty cell, reroutes the
addresses and tests again.

This repository holds synthesizable SystemVerilog for the whole machine, at
the sizes given in the original description wherever it gives sizes. Each
block has a self-checking testbench.

## Conventions

- A vector printed left to right has position 1 on the left. Position 1 is
  the most significant bit. So `1 1 . . 1 1` is the literal `'b110011`.
- Row *i* of a table, counting from 0, owns bit `N-1-i` of any per-row flag
  vector such as `m_a`. The first row is the leftmost flag.
- In a quality vector a 1 is bad: it marks a coordinate where the query and
  the row disagree. Fewer 1s means a better match.
- One clock for everything. Resets are asynchronous and active low (`rst_n`).

## 1. Scoring a match: the quality vector

`quality_unit` compares a query `m` with a row `A` and forms three vectors:

| output  | formula               | meaning                                            |
|---------|-----------------------|----------------------------------------------------|
| `d`     | `m ^ A`               | distance: coordinates that differ                  |
| `mu_ma` | `A & ~(m & A)`        | 1s of A that the query lacks                       |
| `mu_am` | `m & ~(m & A)`        | 1s of the query that A lacks                       |
| `q`     | `d \| mu_ma \| mu_am` | quality vector; simplifies to `m ^ A`              |

The OR of the three terms reduces to plain XOR. The unit still builds all
three terms, because each one says something on its own.

**Example.** Take `m = 110011001100` and `A = 000011110101`. Then
`q = 110000111001`, which has six 1s: six of twelve coordinates are bad.

**Turning a vector into a score without adding.** `ones_compactor` moves every
1 of a vector to the left end. For example, `110000111001` becomes
`111111000000`. The position of the rightmost 1 is then the number of ones.
This is done in one combinational pass:

- The network is an odd-even transposition sorter of W stages.
- Each compare-exchange cell is just an OR gate (left output) and an AND gate
  (right output).
- A one-hot edge detector with an OR encoder gives the position.

`compact_reg` is the register built around it:

- `load` takes a new vector.
- `compact` replaces the content with its compacted form in a single clock.
- `count` reports the score.

Inside the sequencer the same network sits directly in the datapath. The
result is compacted on its way into the destination register, within the
one-clock instruction. The register form, `compact_reg`, is used by the
memory-repair unit to count the spares it has chosen.

**Choosing the better of two scores.** Take two compacted vectors Q1 and Q2.
`decision_unit` computes `Y = |((Q1 & Q2) ^ Q1)`:

- `Y` is 0 when every 1 of Q1 is also a 1 of Q2. For left-packed vectors this
  means Q1 has no more ones than Q2, so Q1 is chosen.
- Otherwise Q2 is chosen.

So "minimum" is found with three bitwise operations. For the example, Q1 with
6/12 ones beats Q2 with 8/12.

## 2. The sequencer

A sequencer (`sequencer.sv`) is one processing element. It contains:

- `A`: an N x W table (16 x 16 by default) of rows A_0..A_{N-1}.
- `m_a`, `m_b`, `m_c`, `m_d`: four W-bit vector registers. They serve as
  query, response, accumulators and result.
- The logical processor `logic_processor.sv` (LP). Its first level is a
  binary operator (`and`, `or`, `xor` or `nop`) on two operands, each chosen
  from {A_i, m_a, m_b, m_c, m_d}. Its second level is a unary operator (`not`,
  `nop`, or `slc` = shift left with compaction) applied to that result. A
  binary `nop` passes the first operand through, so a purely unary operation
  is one instruction.
- A private command memory of CM_DEPTH (32) instructions.
- A control automaton that executes them.
- Three "process model" engines, described in the next section.

A row pointer selects which row A_i the register-matrix instructions see.

### Instruction word (22 bits, `lamp_pkg::instr_t`)

```
[21:18] op   [17:16] bop   [15:14] uop   [13:11] srca   [10:8] srcb   [7:5] dst   [4:0] imm
```

Encodings:

| field | values |
|---|---|
| operand/destination | `A_i`=0, `m_a`=1, `m_b`=2, `m_c`=3, `m_d`=4 |
| `bop` | and=0, or=1, xor=2, nop=3 |
| `uop` | nop=0, not=1, slc=2 |

| op | name    | action                                                                     | clocks |
|----|---------|----------------------------------------------------------------------------|--------|
| 0  | HALT    | stop; `done` pulses, `busy` falls                                          | 1      |
| 1  | LP      | `dst := uop(bop(srca, srcb))`. `dst` may be A_i (row write).               | 1      |
| 2  | SETROW  | row pointer := `imm`                                                       | 1      |
| 3  | QUAL    | `dst := slc(q(srca, srcb))`; with `imm[0]`=1, `dst := q` uncompacted       | 1      |
| 4  | DECIDE  | `dst :=` the better (decision rule above) of `srca` and `srcb`             | 1      |
| 5  | SEARCH  | feasible-solution search over all rows; `imm[0]`=1 also rewrites A         | N+2    |
| 6  | DIAG    | diagnosis over all rows; `imm[0]`=0 single, 1 multiple                     | N+3    |
| 7  | COVER   | greedy row coverage over all rows                                          | N+2    |
| 8  | RECV    | `dst :=` m_d of neighbour `imm[2:0]` (N, NE, E, SE, S, SW, W, NW = 0..7)   | 1      |
| 9  | NOP     | nothing                                                                    | 1      |

A typical query program:

1. `SETROW` to select a row.
2. `QUAL m_a, A_i -> m_c`.
3. `SETROW` to select the next row.
4. `QUAL m_a, A_i -> m_d`.
5. `DECIDE m_c, m_d -> m_b`.

Repeat steps 3 to 5 to keep the best score so far.

Outside a run, the sequencer exposes a *data window* of N+4 words:

- words 0..N-1 are the rows of A;
- words N..N+3 are m_a..m_d.

The window and the command memory can only be written while the sequencer
is idle. A `start` pulse clears the program counter and the row pointer.

## 3. The three table engines

All three engines visit the rows of A, one row per clock. A per-row bit is
shifted into a flag vector from the right, so after N clocks row *i* sits at
bit `N-1-i`. Each engine has the same start/busy/done handshake and reads the
table through a row index.

**Feasible-solution search** (`feasible_search.sv`, query in `m_b`):

- Per row: `bit = ~|((m_b & A_i) ^ m_b)`. The bit is 1 exactly when every 1
  of the query is also in the row.
- The bits form `m_a`.
- With `modify`, each row is also rewritten as `m_b & A_i`. This strips the
  coordinates that do not matter for the query.
- Busy for exactly N clocks.

**Diagnosis** (`diagnosis_unit.sv`, response in `m_a`):

- Rows whose flag in `m_a` is 1 go into `m_b`. In *single* mode they are
  ANDed, starting from all ones. In *multiple* mode they are ORed, starting
  from zero.
- Rows whose flag is 0 are ORed into `m_c`, starting from zero.
- One more clock forms `m_d = m_b & ~m_c`.

Read A as a fault table with one row per test and one column per fault, and
`m_a` as the failing tests. Then the 1s of `m_d` are the faults that explain
every failure and no pass. Busy for N+1 clocks.

**Coverage** (`coverage_unit.sv`):

- At the start `m_a` and `m_b` are cleared.
- Per row: `bit = |((m_b | A_i) & ~m_b)`. The bit is 1 if the row covers a
  column not yet covered. That bit is shifted into `m_a`, then
  `m_b := m_b | A_i`.
- After N clocks, `m_a` selects a set of rows covering every coverable column.
  `m_b` holds the covered columns.
- The choice is greedy in row order, so not always minimal. Busy for exactly
  N clocks.

## 4. The 4 x 4 torus

`lamp_array.sv` places ROWS x COLS sequencers (4 x 4). Sequencer (r, c) has
index `r*COLS + c`.

Each sequencer sees the `m_d` register of its eight neighbours, with the row
and column indices taken modulo 4. Edge sequencers therefore have eight
neighbours too. A sequencer reads a neighbour's `m_d` with `RECV`. This is
how one processor's partial result becomes another's query.

Several things are shared across the array:

- Programs are broadcast: one command-memory write reaches all sixteen
  sequencers.
- `start` is broadcast.
- The data-window port reaches the one sequencer chosen by `io_sel`.

All sequencers run the same program on their own data, in lock-step. A
`RECV` therefore reads what the neighbour held at the same instruction
boundary.

## 5. Running a job: host bus, memories and control block

The top level, `lamp_top.sv`, has a simple 32-bit register bus. `wr`, `addr`
and `wdata` are sampled on the clock edge; `rdata` is combinational. The word
address is 12 bits, and `addr[11:10]` selects the region:

| addr[11:10] | region            | contents                                                                        |
|-------------|-------------------|---------------------------------------------------------------------------------|
| 0           | command memory    | word *k* = instruction *k* (`wdata[21:0]`), 32 words                            |
| 1           | data memory       | word `p*(N+4)+w` = word *w* of sequencer *p*'s window, 320 words of 16 bits     |
| 2           | control           | write word 0 bit 0 = go. Read word 0 = `{.., done, busy}`; word 1 = run length. |
| 3           | infrastructure    | write word 0 bit 0 = start test-and-repair; read word 0 = status (see below)    |

A job proceeds as follows:

1. The host writes the program into the command memory.
2. The host writes all sixteen data windows into the data memory.
3. The host writes go. The control block (`control_block.sv`) then:
   1. copies the 32 program words into every sequencer, one per clock;
   2. copies 16 x 20 window words into the sequencers, one per clock;
   3. pulses start;
   4. waits until no sequencer is busy, counting the clocks of this phase
      ("run length");
   5. copies the 320 window words back into the data memory.
4. `job_done` pulses at the end.

With defaults a job takes 32 + 640 + 2 clocks plus the run phase. While a job
runs, the control block owns both memories and host writes to them are
ignored. The done bit is cleared by the next go.

## 6. Self-test and repair of a memory with spares

`repairable_memory.sv` is a bit memory of 13 x 15 cells:

- The user sees an 11 x 10 main area.
- Two spare rows lie below it and five spare columns to its right.
- An address decoder holds two row-remap and five column-remap entries. An
  access to a remapped row or column lands in the spare assigned to it.
- For testing, every cell can be forced to a stuck value by `fault_en` and
  `fault_val`. Tie both to 0 for a defect-free memory.

`infra_ip.sv` services it. A start pulse (host region 3) runs five stages:

1. **TEST.** Write 0 everywhere, read everything back, write 1 everywhere,
   read back. Each read is XORed with the value a fault-free memory would
   give. A mismatch marks the cell faulty. This takes 4 x 110 clocks.
2. **LIST.** Scan the fault map in address order and record up to MAXF (16)
   faulty cells. More than that sets `overflow`.
3. **COVER.** Build a coverage table with one row per candidate spare and one
   column per fault, then run `coverage_unit` over it.
   - Row order: the ten memory columns first, then the eleven memory rows.
   - Row *k* has a 1 at fault *j* if that spare repairs fault *j*.
   - Putting columns first makes the greedy pass prefer spare columns, of
     which there are more.
4. **REPAIR.** Hand the chosen columns the spare columns in order, and the
   chosen rows the spare rows. Meanwhile two compaction registers count the
   chosen columns and rows. Choosing more than five columns or two rows is a
   failure.
5. **RETEST.** Run the TEST stage again through the new decoder.

The status word contains:

- `[31:16]` number of faults found;
- `[4]` overflow;
- `[3]` repair_ok;
- `[2]` done;
- `[0]` busy.

`repair_ok` means the spares sufficed *and* the retest found nothing. A full
service cycle takes 1035 clocks.

**Worked case.** Ten faulty cells, in 1-based (row, column) form, at (2,2),
(2,5), (2,8), (4,3), (5,5), (5,8), (7,2), (8,5), (9,3) and (9,7). The engine
picks spare columns for columns 2, 3, 5, 7 and 8. This is one of the minimum
covers, and it uses all five spare columns and no spare row. The retest then
passes.

The same 11-candidate x 10-fault table can also be run as a plain `COVER`
program on a sequencer, where it yields `m_a = 11111000000`.

## 7. How far to trust it, and where it departs from the source design

What is specified directly and implemented as such:

- the quality formulas;
- the compaction function;
- the decision rule;
- the LP operand and operator set;
- the per-row formulas and row-per-clock schedule of the three engines;
- the 4 x 4 eight-neighbour torus;
- the 13 x 15 memory with 2 + 5 spares;
- the test, optimise and repair-by-readdressing flow.

This design's own choices:

- the instruction set and its encoding, the row pointer, `RECV` and `DECIDE`
  operand selection;
- all widths not stated (W = N = 16, 32-word programs);
- the bus and address map, and the job schedule;
- the remap table form and the stuck-at defect model;
- the march-like test pattern and the candidate order.

Specific departures and resolved ambiguities:

- **Printed example.** One line of the original worked example prints the
  distance as `110000111011`. The XOR of the given operands is
  `110000111001`, which also matches the stated score of 6/12. The RTL and
  tests use the computed value.
- **Min versus max.** The best match is taken as the *minimum* of the quality
  vectors. One overview drawing says "max", but the text and the decision
  rule both minimise.
- **LP destinations.** The LP may write its result to A_i as well as to the
  four registers. The feasible search needs to rewrite rows, and the operand
  bus has five feedback lines.
- **The spare-coverage example.** Its list of candidate spares names column 2
  twice, although its table has eleven distinct rows. Its answer is printed
  with ten flags for eleven rows. The tests read the answer as
  `11111000000`, the first five candidates, which are columns 2, 3, 5, 7 and
  8 as stated.
- **Multiple diagnosis start value.** Multiple-mode diagnosis starts `m_b` at
  zero. Only the single-mode start value (all ones) is given.
- **Diagnosis stage of the repair flow.** The repair flow has no separate
  fault-table diagnosis stage. The address-ordered test already names each
  faulty cell, so that stage reduces to listing them.
- **Compaction register side logic.** The compaction register's output
  selector and decoder, shown in its drawing, are not modelled. Their purpose
  is not explained; only the count is provided.
- **Scale.** A network of 4096 processors is mentioned as an ASIC
  possibility. The 4 x 4 configuration is the one built. `ROWS` and `COLS`
  are parameters.
- **Clocking.** One clock domain is used throughout.

Some outputs of shared units are deliberately left unconnected inside the
sequencer. The sequencer's header comment lists them.

`N <= W` is required, because the per-row flags live in W-bit registers.

## 8. Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops, and each has a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lamp_pkg.sv tb/lamp_ref_pkg.sv tb/tb_lamp_top.sv --top-module tb_lamp_top
./obj_dir/Vtb_lamp_top
```

Replace `tb_lamp_top` with any other `tb_<block>` to test one block.
`tb/lamp_ref_pkg.sv` is a bit-by-bit software model of a sequencer (one call
per instruction, returning its clock count). The sequencer, array and
top-level tests compare against it.

`tb_lamp_top` runs the full default configuration in well under a minute. It
covers:

- every instruction on all sixteen sequencers, including neighbour exchange;
- the scoring example and the coverage example as real programs;
- a successful repair of the ten-fault memory;
- a refused repair of a defect pattern that would need eight spare columns.

It counts each mechanism (each operator, each engine and mode, row
write-back, neighbour reads, repair success and refusal, job handshakes) and
fails if any of them never happened.

## Files

Under `rtl/`:

- `lamp_pkg.sv`: shared types and the instruction format.
- Scoring: `quality_unit`, `ones_compactor`, `compact_reg`, `decision_unit`.
- Processor: `logic_processor`, `feasible_search`, `diagnosis_unit`,
  `coverage_unit`, `sequencer`.
- Machine: `lamp_array`, `command_memory`, `data_memory`, `control_block`,
  `host_interface`.
- Maintenance: `repairable_memory`, `infra_ip`.
- Top level: `lamp_top`.

Under `tb/`: one `tb_<module>.sv` per block, plus `lamp_ref_pkg.sv`.
