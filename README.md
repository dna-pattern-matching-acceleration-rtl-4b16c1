# Counting DNA repeat expansions with an analog CAM

Many inherited neurological diseases (Huntington's disease, Friedreich's ataxia, fragile-X
syndromes, spinocerebellar ataxias) are caused by a short DNA motif, usually three bases long
such as `CAG`, that repeats back to back more often than normal inside one gene. Whether a
person is affected depends on one number: the length of the longest uninterrupted run of the
motif in that gene. Typical thresholds are a few tens of repeats; severe expansions reach
hundreds or thousands.

This design computes that number in hardware. The DNA text sits in an analog
content-addressable memory (aCAM) that compares every row with the motif in the same cycle.
The per-position match results are collected in a small resistive memory. A pattern detector
then reads them back as a bit stream and measures the longest run of motif copies placed
exactly P characters apart.

The SystemVerilog here models the whole digital part and gives behavioural models of the
analog parts: the aCAM cells and the 1T1R memory with its sense amplifiers. The default
parameters are the published sizes: a 512 x 130 aCAM in eight 64-row blocks, motif length
P = 3, a 64 x 128 match-index memory and 8-bit run counters. Every module compiles at those
sizes. The full-size end-to-end simulation takes about two minutes.

## How a search proceeds

```
             MASK / PATTERN (search_window)
                     |  V_LDL, V_UDL per column
 block_selector -> acam_array (512 x 130) -> ml[511:0] -> tag_register
  (NS per block)                                               | 64 tags of the active block
                                                               v
                    column_selector (z) -> match_index_mem 64 x 128 <- row_selector (d)
                                                               |  8 cells / slow cycle   ^
                                                               v                         |
                                                      piso8 -> pattern_detector     mux_selector
                                                       (1 bit per fast cycle)
                               control_unit sequences all of it
```

1. **Layout.** The text is cut into rows of N - (P-1) = 128 characters. Each row is followed
   by copies of the first P-1 characters of the next row. A motif that starts in the last
   columns of a row is therefore still seen complete inside that row. The padding cells of
   the last row hold a special interval, MM, that never matches an active search. The host
   does this layout and writes the rows through the `prog_*` port.
2. **Search and write** (N-(P-1) slow cycles, then half a cycle). At the start, the window
   registers put the motif on columns 0..P-1. All other columns are masked. In every slow
   cycle, every row of the active block compares its window with the motif, and the tag
   flip-flops capture the 512 match lines. The window then moves one column. Half a slow
   cycle after each capture, the 64 tags of the active block are written in parallel into
   one column of the match-index memory. Memory cell (i, j) then records whether the motif
   starts at character j of text row i of the block.
3. **Read and detect.** The memory is read row by row, eight neighbouring cells per slow
   cycle. The cells pass through eight multiplexers and sense amplifiers into an 8-bit PISO
   register. The PISO shifts them out at the fast clock, which is 8x the slow clock, so one
   bit leaves per fast cycle, in text order. The pattern detector consumes the stream. A
   trailing group of zeros and an end-of-sequence flag close the stream. The detector then
   reports the longest run.
4. **Reset.** One slow cycle returns the whole memory to HRS (all zeros). The next selected
   block starts at the end of that cycle.

`blk_mask` selects the blocks to search, normally the blocks that hold the gene of interest.
They are processed one after another, lowest index first. Each block produces one
`result_valid` with `result_blk` and `result_max`.

## The analog CAM and how characters are encoded

Each 8T2M cell stores a voltage interval [LB, UB]. LB is set by a memristor R_LB and UB by a
memristor R_UB. The cell keeps the match line charged only when its lower data line
V_LDL >= LB and its upper data line V_UDL <= UB. Because the two data lines are separate, a
column can be masked with V_LDL = VDD and V_UDL = 0, which matches anything. A row matches
when all of its cells match. `dna_pkg` holds the encoding:

| char | R_LB (kOhm) | R_UB (kOhm) | interval (V) | search voltage (V) |
|------|-------------|-------------|--------------|--------------------|
| A    | 2500        | 186.32      | 0.19 - 0.31  | 0.25               |
| C    | 163.3       | 27.6        | 0.32 - 0.44  | 0.38               |
| G    | 24.9        | 9.69        | 0.46 - 0.59  | 0.53               |
| T    | 8.9         | 5.06        | 0.63 - 0.79  | 0.71               |
| MM   | 5.06        | 2500        | none         | -                  |

MM reuses the R_UB of T as its R_LB, and the R_LB of A as its R_UB. The thresholds those two
resistances produce in the opposite subcircuit are not published. The model takes LB = 0.79 V
and UB = 0.19 V. With those values MM mismatches every active search voltage but still matches
a masked column.

A block is switched off by holding its NS line high during evaluation. Its cells then cannot
discharge the match line, so the model reports its rows as matching. Those tags are never
written to the memory. `block_selector` decodes the block index to a one-hot vector and
inverts it for the NS lines.

Programming writes one row at a time. All cells of the row that need the same resistance are
written together, one resistance level per step. The eight distinct levels give eight steps
per row, so loading M rows takes 8*M slow cycles. The model writes the MM cells in the steps
of the matching resistance levels, so rows with padding also take 8 steps.

The array model keeps two 3-bit resistance levels per cell. It evaluates the interval rule
for each cell; electrical effects such as variability and match-line timing are not modelled.

## The pattern detector

This is the part most worth understanding. In the stream, bit i is 1 when the motif starts at
text position i. A run of k back-to-back copies of a length-3 motif shows up as 1s at
positions i, i+3, ..., i+3(k-1). A motif like `CCC` can also overlap itself, so one 1 does not
mean the next two bits are 0. The detector therefore deals the bits round-robin to
P = 3 pointers: bits 1, 4, 7, ... go to pointer 1, bits 2, 5, 8, ... to pointer 2, and so on.
Each pointer counts its consecutive 1s and keeps the longest run it has seen. The answer is the
largest of the three maxima.

The state machine (`pd_fsm`) has one state per (pointer, action) pair plus Initial and Exit:

| state   | S1 | S2 | S3 | S4 | S5 | S6 |
|---------|----|----|----|----|----|----|
| action  | R1 | C1 | R2 | C2 | R3 | C3 |

Cj means the bit for pointer j was 1, so its counter increments. Rj means it was 0, so the run
ends. The next state always belongs to the next pointer: C if X = 1, R if X = 0. D = 1 leads to
Exit, which holds. Initial and Exit assert CLR, which clears the counters. Feeding
X = 1 0 1 1 1 0 0 0 0 with D on the ninth bit walks Initial, S2, S3, S6, S2, S4, S5, S1, S3, Exit
and yields 2.

Timing inside a pointer (`pointer_block`): after an R, the compare-and-update of the maximum
register happens one cycle later and the counter reset one cycle after that. A pointer gets a
new bit only every third cycle, so both finish in time. Because of these delays the stream must
end with P+1 zeros, with D raised on the last one: four zeros for P = 3. The zeros let every
pointer close its last run, and the last zero moves the FSM to Exit. The PISO supplies the zeros
itself by shifting in 0s. The control unit raises D. While in Exit, `comparison_logic` loads the
largest pointer maximum into the global maximum register. `done` rises two cycles after Exit is
entered, which is n + P + 4 fast cycles after `start` for n data bits.

The counters are 8 bits wide and saturate at 255, so any longer run reports 255.

## Control and timing

`control_unit` runs on the fast clock. A divide-by-8 phase counter stands for the slow clock:
`ce1` marks the last fast cycle of each slow cycle and `ce_half` the middle one. Per block,
with T the slow period (1 ns at the published 1 GHz / 8 GHz clocks) and m x n = 64 x 128 the
match-index memory size:

| phase                 | this RTL                                | published        |
|-----------------------|-----------------------------------------|------------------|
| load (once)           | 8 T per row, 8*M T = 4096 T             | 8 M T_w          |
| search + memory write | (N-(P-1) + 0.5) T = 128.5 T             | 128.5 T          |
| read + detect         | (mn + P + 11)/8 T = 1025.75 T           | (mn + 5)/8 T = 1024.625 T |
| memory reset          | 1 T                                     | 1 T              |

The read-and-detect time, counted from the first read to `done`, is 9 fast cycles
(1.125 T) longer than published, for two reasons. The first 8-cell group is sensed and loaded
into the PISO register before the detector starts, which takes 7 fast cycles. The published
description only says that detection starts "one clock cycle" after the read; this design reads
that as one slow cycle. The detector also needs P + 4 cycles after the last data bit: P + 1
trailing zeros, and two more cycles to register the global maximum after the Exit state. The
testbenches check the numbers in the "this RTL" column exactly.
Between blocks there is up to one extra slow cycle to line up with the slow clock. Every run
starts with one memory reset, because the memory contents are unknown at power-up.

## Files

- `rtl/dna_pkg.sv`: nucleotide and resistance-level types, encoding tables, cell rule.
- `rtl/acam_array.sv`: behavioural model of the aCAM array, its cells and row programming.
- `rtl/search_window.sv`: MASK and PATTERN shift registers driving the data-line voltages.
- `rtl/block_selector.sv`: block decoder and NS inversion.
- `rtl/tag_register.sv`: one flip-flop per match line.
- `rtl/match_index_mem.sv`: behavioural model of the 1T1R memory, the 8 read multiplexers
  and the sense amplifiers.
- `rtl/column_selector.sv`, `rtl/row_selector.sv`, `rtl/mux_selector.sv`: write-column
  counter and decoder; read-row counter and decoder; 8-cell group counter.
- `rtl/piso8.sv`: 8-bit parallel-in serial-out register.
- `rtl/pd_fsm.sv`, `rtl/pointer_block.sv`, `rtl/comparison_logic.sv`,
  `rtl/pattern_detector.sv`: the pattern detector.
- `rtl/control_unit.sv`: phase sequencer and slow-clock enables.
- `rtl/dna_pm_top.sv`: the accelerator.

`acam_array` and `match_index_mem` stand in for analog circuits. They are written as
synthesizable arrays, but they describe behaviour, not the real circuits. The remaining modules
are ordinary synchronous logic with one clock and an active-low asynchronous reset.

## Simulating

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dna_pkg.sv tb/tb_dna_pm_top.sv \
          --top-module tb_dna_pm_top -Mdir obj && obj/Vtb_dna_pm_top
```

- `tb_dna_pm_top` runs the whole accelerator at a reduced size: a 32 x 34 aCAM in four 8-row
  blocks. It plants motif runs in a random text, including one across a row boundary, and
  leaves the last row partly padded with MM. It searches all blocks for CAG and then two
  blocks for GAA. It compares every result with a reference computed from the text, and
  checks the load, search/write, read/detect and reset times.
- `tb_dna_pm_full` is the same test with every parameter at its default. It also plants a
  900-character run that saturates the counters. It takes about two minutes.
- `tb_disease_panel` is a screening workload at full size. Each of the eight blocks holds one
  gene region: FMR1, FXN, HTT, AFF2, ATXN1, JPH3, AR and PABPN1. Each region has one run of
  that gene's trinucleotide planted in a random text, some with normal and some with disease
  repeat counts. It searches each block alone with its own motif. It checks the count and the
  normal/disease call against the lowest disease repeat count for that gene. It takes about
  two minutes.
- One testbench per module (`tb_<module>.sv`). `tb_pattern_detector` replays the worked
  example above, state by state.

Testbenches draw their random text from `$urandom` with the simulator's default seed, so a run
is repeatable.

## Where this design goes beyond or departs from the published description

- The control unit is only described by its function; it could be software on a coprocessor.
  The state machine here is the simplest one that gives the published phase order.
- The clock generator is replaced by an input fast clock and slow-clock enables. The inverter
  drivers and the transmission gates are not modelled. The sense amplifier is modelled as an
  ideal comparator.
- The block selector's gate-level design is not available. A 3-to-8 decoder with enable is
  used, and one block is searched at a time.
- How the 512 tags reach the 64 memory rows is not shown. A multiplexer selects the active
  block's tags.
- The counters saturate at 255. An overflowing counter is not discussed.
- The pattern-detector maximum register is updated only when the counter is larger, as the
  prose says. The algorithm listing would overwrite it instead.
- A `start` input returns the detector FSM from Exit to Initial.
- The memory is reset at the start of every run as well as after every block.
- Only P = 3 is supported with the default sizes. The memory read path requires the number of
  search columns, N-(P-1), to be a multiple of 8. With N = 130 that excludes the motif lengths
  4, 5 and 10 that are discussed as variants. The FSM and pointer logic themselves accept
  any P >= 2.
- Results are per block. A run that continues into the next block is counted separately in
  each block.
