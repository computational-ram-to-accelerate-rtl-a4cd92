# CRAM-PM: string matching inside a computational MRAM

This RTL models a memory that matches patterns inside itself. It is a set of
spin-torque MRAM arrays in which the cells of a row can be joined into a logic
gate. When a gate is fired, every row of every array computes it at the same
moment, on the same columns. String matching maps onto this easily:

- Each row holds a piece of the reference text and a pattern to compare with it.
- Comparing characters, and counting how many of them are equal, are bit-level
  operations that run in every row together.
- Apart from score read-out, the data never leaves the array.

The design is sized for its main use, DNA read alignment:

- The reference genome has 3 G bases. It is folded over 300 arrays of 10,000
  rows, with 1000 bases per row.
- Every row also holds a pattern of 100 bases, so one pass of the
  micro-program compares 3 million patterns at once.
- One alignment step takes a few thousand controller cycles, whatever the
  number of rows.

The design has three kinds of blocks:

| Block | What it is |
|---|---|
| `cram_array` | One array of such cells. |
| `smc` | The controller that feeds all arrays from one stream of micro-instructions. It has a buffer (`instr_buffer`) and a gate table (`gate_lut`). |
| `score_buffer` | One per array. It reads each row's result out and tags it with its row number and the alignment position. |

`cram_pm_top` connects them. Types and constants live in `cram_pkg`.

## 1. The cell and the gates

A cell is a magnetic tunnel junction (MTJ). High resistance stores 1 and low
resistance stores 0. Besides the usual access transistor, each cell has a
second transistor that connects it to a logic line running along its row.

To compute, the controller takes these steps:

1. It selects some input cells and one output cell in every row by their
   columns.
2. It presets the output cell to a known value.
3. It drives the inputs' bit-select lines with one voltage and grounds the
   output.

Current flows from the inputs, through the logic line, into the output. Every
input that holds 1 adds resistance and lowers the current. If the current stays
above the output MTJ's switching threshold, the output flips away from its
preset. Otherwise it keeps the preset.

The voltage therefore decides how many 1s it takes to stop the switch, and so
which gate is computed. The same cells can compute a different gate after only
the voltage changes.

`cram_array` reduces this analog behaviour to a digital rule. A gate with *n*
inputs switches its output to the opposite of the preset when fewer than *T(n)*
inputs are 1:

| gate | inputs | preset | switches when | result | near-term window (mV) | long-term window (mV) |
|------|-------:|-------:|---------------|--------|--------------:|--------------:|
| INV  | 1 | 0 | input is 0 | not a | 840–1300 | 230–480 |
| COPY | 1 | 1 | input is 0 | a | 840–1300 | 230–480 |
| NOR  | 2 | 0 | no input is 1 | nor(a,b) | 680–740 | 200–220 |
| MAJ3 | 3 | 1 | fewer than two 1s | majority | 650–690 | 200–210 |
| TH   | 4 | 0 | fewer than two 1s | 1 if at least three inputs are 0 | 620–630 | 190–200 |
| MAJ5 | 5 | 1 | fewer than three 1s | majority | 610–620 | 190–200 |

The windows are the ranges of bit-select-line voltage for which each gate
works, for today's MTJs and for projected ones. A gate fired outside the window
for its input count is rejected. The array then raises `gate_err` and switches
nothing. This is a modelling choice: a real array would silently compute some
other threshold function.

NOR also has a two-output form, `OP_NOR2`, which writes the same result into
two cells at once. This is how XOR takes only two steps:

```
S1, S2 = NOR(a, b)        (two outputs)
x      = TH(a, b, S1, S2) (1 when at least three of the four are 0, i.e. a != b)
```

A one-bit full adder takes four steps:

```
Co  = MAJ3(a, b, c)
S1  = INV(Co)
S2  = COPY(S1)
Sum = MAJ5(a, b, c, S1, S2)
```

Every gate first needs its output column preset in all rows. The array does
this with a gang preset (`preset_fire`), which writes one column of every row
in one operation.

Memory mode is a plain MRAM. It reads or writes one row per access, and writes
take a column mask. The two modes never overlap, and an assertion checks this.

## 2. Row layout and the alignment micro-program

With a fragment length F = 1000 characters, a pattern length P = 100 and
2 bits per character, a row is laid out as follows (`cram_pkg::row_cols`):

```
[0, 2F)            reference fragment, character j in columns 2j, 2j+1
[2F, 2F+2P)        pattern
[2F+2P, 2F+3P)     region A: match string, later partial sums
[2F+3P, 2F+4P)     region B: partial sums
[2F+4P, +9)        temporaries T+0 .. T+8 (T+8 is a constant 0)
```

This gives 2409 columns. Characters use A=00, C=01, T=10 and G=11.

The host asks for one alignment location `loc` at a time, with the
micro-program below. The testbench package `cram_tb_pkg::gen_alignment`
writes it out exactly, and works as a small code generator.

1. **Hoisted presets.** Region A is preset to 0, and the temporaries are preset
   by bitmask, all by gang presets issued once up front. This is the
   "preset hoisting" optimisation. The NOR that ends each character comparison
   then needs no preset of its own.
2. **Match string.** For each pattern character *i* and each of its two bits:
   - a two-output NOR and a TH compute the XOR of the reference bit at
     `loc+i` and the pattern bit;
   - then `NOR(xor0, xor1)` writes 1 into region A when the characters are
     equal.

   This costs 5 gates per character, 500 for P = 100.
3. **Counting.** A reduction tree adds the P match bits:
   - At each level, pairs of numbers are added with ripple-carry chains of the
     four-step full adders above.
   - The numbers start 1 bit wide and gain a bit per level.
   - Results go alternately to region B and region A. An odd number left over
     is copied across.
   - For P = 100 this is 194 one-bit additions, which results in a 7-bit score
     (⌊log2 P⌋ + 1 bits).
4. **Read-out.** `MI_SCORE` makes every score buffer read the 7 score columns
   of each of its rows and emit `{row, loc, score}`.

The host sweeps `loc` from 0 to F−P and keeps the best-scoring location of
each row.

## 3. Controller (`smc`)

The host sends micro-instructions of type `cram_pkg::micro_instr_t` over a
valid/ready handshake, into a 16-entry buffer. When the buffer is full,
`in_ready` goes low and the host stalls. Each entry carries a full row of data
for writes.

| Kind | What it does |
|---|---|
| `MI_GATE` | Looks the opcode up in `gate_lut` to get the voltage, preset, input and output counts and a cycle window. With `do_preset` set, it gang-presets each output column first. Then it fires the gate in all rows of all arrays. |
| `MI_PRESET` | Gang-presets `ncell` consecutive columns, either all to `val[0]` or each to its bit of the mask `val`. |

Gates and presets go to the array `arr` or, with `bcast`, to every array.
| `MI_WRITE` | Masked write of columns `[col, col+len)` of one row, in one array or, with `bcast`, in every array. |
| `MI_READ` | Reads one row. The data returns on `rd_out_*`. |
| `MI_SCORE` | Starts all score buffers and waits until the last one has finished. |

Every micro-instruction owns a fixed window of cycles, and its strobe is in the
first cycle of the window. The defaults below take the technology's latencies
at an assumed 1 GHz clock:

| Operation | Window (cycles) | Basis |
|---|---:|---|
| preset | 3 | 3 ns switching |
| gate | 3, from the table | 3 ns switching |
| write | 4 | 3.65 ns |
| read | 2 | 1.21 ns |
| fetch | 1 | one cycle between micro-instructions |

So a gate with one inline preset costs 1 + 3 + 3 = 7 cycles, and a gate whose
output was preset earlier costs 4.

For long-term MTJs (`LONG_TERM=1`), the table loads the long-term voltages and
1-cycle gate windows.

The gate table is made of registers that the host can write (`lut_*`). A new
voltage turns an opcode into a different gate, and the spare slot `OP_RSVD`
can hold an extra one.

If any array rejects a gate's voltage, `exc` rises and stays set. The
controller then fetches nothing more until the host pulses `exc_clr`.

## 4. Score buffer

The per-row score could also be kept in the row itself. Instead, each array
has a small engine at its edge:

1. It takes over the array's read port.
2. It reads row after row, one issue cycle and a 2-cycle read window each.
3. It slices out the score and offers a record until the host accepts it.

With no back-pressure, one array takes 1 + 4·ROWS cycles, about 40,000 cycles
for 10,000 rows. All 300 arrays read out in parallel, on 300 record streams
(`sc_valid/sc_ready/sc_rec`). This read-out is the idle window of the scheme:
at full size it takes about four times as long as the computation itself
(about 9,600 cycles per alignment location).

## 5. Top level (`cram_pm_top`)

`cram_pm_top` contains one `smc`, and NUM_ARRAYS × (`cram_array` +
`score_buffer`) in a generate loop. Gates and presets reach the arrays that
`arr_sel` names: one array, or all of them when the instruction has `bcast`
set, as the alignment program always does. The arrays' `gate_err` outputs are
ORed together. While a score buffer
runs, it has priority on its array's read port.

Its parameters, with their defaults:

| Parameter | Default |
|---|---|
| `NUM_ARRAYS` | 300 |
| `ROWS` | 10000 |
| `REF_CHARS` | 1000 |
| `PAT_CHARS` | 100 |
| `COLS` | `row_cols(REF_CHARS, PAT_CHARS)` |
| `SCORE_W` | ⌊log2 PAT_CHARS⌋+1 |
| `BUF_DEPTH` | 16 |
| `LONG_TERM` | 0 |

Reset is synchronous and active low, and clears only the control logic. Array
contents are non-volatile and are not reset.

## 6. Where this departs from the published design, and what is not here

- **Row size.** The source gives "around 2K columns" and about 24 Mb per array.
  The layout here needs 2409 columns: 2000 for the fragment, 200 for the
  pattern, 200 of scratch and 9 temporaries. Its benchmark table gives
  512×512 arrays for DNA, which cannot hold a 1000-character fragment. The
  text's 10K-row, roughly 2K-column figure was followed.
- **Adder count.** The source states 188 one-bit additions for P = 100. The tree
  built here uses 194, because the operands grow by one bit per level.
- **Choices of this design.**
  - the micro-instruction format;
  - all handshakes;
  - the cycle windows (no clock frequency is given);
  - halting on a rejected gate voltage (the source only says an exception can
    stop fetching);
  - broadcast writes, and gates or presets aimed at a single array;
  - the C and G character codes.
- **Not modelled:**
  - the MTJ physics;
  - sense amplifiers, decoders and voltage drivers;
  - banking of large arrays;
  - the host CPU;
  - the compiler;
  - the idealised (oracular) assignment of patterns to rows;
  - NAND, which is named in the source without a voltage.
- **Pattern lengths.** Patterns of 200 or 300 characters need
  `PAT_CHARS` = 200 or 300. COLS then follows from the layout. A score wider
  than 8 bits also needs a wider `score_rec_t.score`.
- **Synthesis.** The full-size array is a 10,000-row loop of bit operations. It
  is meant for simulation. A synthesis flow would map it to macros.

## 7. Verification

Each testbench checks its block against values worked out independently, and
ends with a `TB_RESULT checks=… failures=…` line.

| Testbench | What it checks |
|---|---|
| `tb_cram_array` | 24 rows × 40 columns against a shadow copy: read/write, every gate in every row (24 of the 32 combinations of five inputs), XOR, full adder, rejected voltage |
| `tb_gate_lut` | Reset tables for both technologies, reprogramming, reset |
| `tb_instr_buffer` | 300 random entries through a 4-deep queue with random stalls on both sides |
| `tb_score_buffer` | Records and exact cycle count, with a memory model and back-pressure |
| `tb_smc` | 400 random micro-instructions; every strobe and its cycle, compared with a schedule computed from the timing rule; halt on exception and resume |
| `tb_cram_pm_top` | 2 arrays × 6 rows, F = 12, P = 5: loading (broadcast and per array), read-back, all 8 alignment locations through the generated micro-program, every score checked against a count of equal characters, an exception with table reprogramming and recovery, and presets aimed at one array. It counts input stalls, inline/hoisted/mask presets, each gate type, gang gates, broadcast and single writes, read-back, exception, table writes, score back-pressure and array-selected presets, and fails if any never happened. |
| `tb_cram_pm_dna` | The DNA workload at full row size: 10 arrays × 10,000 rows × 2409 columns, every other parameter at its default. Broadcast load, one alignment location (1288 micro-instructions, 1285 gates), all 100,000 score records checked. |

To simulate with plain Verilator, for example the top-level test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cram_pkg.sv tb/cram_tb_pkg.sv \
  rtl/gate_lut.sv rtl/instr_buffer.sv rtl/cram_array.sv rtl/score_buffer.sv \
  rtl/smc.sv rtl/cram_pm_top.sv tb/tb_cram_pm_top.sv --top-module tb_cram_pm_top
./obj_dir/Vtb_cram_pm_top
```

**Largest size simulated.** No test runs the full 300-array default. At
10 arrays, one alignment location takes about 2 minutes of simulation. All
arrays run the same program, so the time grows with the number of arrays, and
300 arrays would take about half an hour. The 10-array run is the largest
size simulated. It uses the full row count, the full row width and the full
pattern length.
