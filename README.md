# A ternary compute-in-memory macro with ReTern stuck-at-fault tolerance

Ternary LLMs such as BitNet b1.58 use weights of only -1, 0 and +1 with
8-bit activations. A ternary compute-in-memory (TCiM) array stores such
weights in memory cells and computes dot products right on the bitlines.
Its weakness is manufacturing defects. A memory element that is *stuck at 0*
or *stuck at 1* (an SAF) silently changes the weights it holds. Retraining
around the faults is too expensive for a model of billions of weights.

ReTern, proposed by Malhotra and Gupta, is a training-free fix that costs
almost no hardware. It combines two tricks, both decided when the weights
are programmed:

* **Zero-fix.** A ternary cell is built from two binary elements, so it has
  one state more than it needs. A zero can be stored in two ways. If a fault
  breaks one way, the weight is stored the other way.
* **FAST** (fault-aware sign transformation). A whole column may be stored
  negated if that lines up more of its ±1 weights with the faults. One flag
  bit per column (`col_flip`) records the choice. The column's output is then
  negated back by swapping the operands of the subtractor that every TCiM
  column already has.

This repository is SystemVerilog for one 64×64 macro built this way, with
its programming path and inference datapath. It also has self-checking
testbenches, one of which runs Monte Carlo fault injection.

## 1. The bitcell and its spare state

Each weight uses two binary memory elements, M1 and M2. Each element sits
on its own read bitline (BL1, BL2), and one wordline WL gates both. The
weight is W = M1 − M2:

| W   | M1 | M2 | name in the RTL |
|-----|----|----|-----------------|
| 0   | 0  | 0  | `CELL_Z0` (0₀)  |
| +1  | 1  | 0  | `CELL_POS`      |
| −1  | 0  | 1  | `CELL_NEG`      |
| 0   | 1  | 1  | `CELL_Z1` (0₁)  |

The last row is unused in a plain ternary array. It still reads as zero.
When WL is raised, an element in state 1 pulls its bitline down by one step
Δ. A cell at 11 therefore pulls both bitlines down by Δ. The column output
is the BL1 count minus the BL2 count, so the two drops cancel.

A stuck-at fault forces an element to 0 or 1, whatever was written. A fault
is harmless ("masked") when the element was meant to hold that value anyway.

**Zero-fix.** Suppose a zero is stored as 00 but one element is stuck at 1.
The cell then reads 10 or 01, which is ±1. Writing 1 into the other element
gives 11, which reads as zero again. A stuck-at-0 under 00 is masked already.
If both elements of a zero cell are faulty, the rule still stores 11. That
case cannot always be repaired.

**FAST.** Faults in ±1 cells cannot be fixed inside the cell. But the dot
product of an input with −W is minus the dot product with W. So a column can
be stored negated, and its result negated afterwards. For each column the
mapping computes

    err_standard = Σ |w_hw − w_ideal|            (store W)
    err_flipped  = Σ |w_hw_flipped + w_ideal|    (store −W)

Here `w_hw` is what each cell would read back, given its faults. The
flipped form is chosen only if `err_flipped < err_standard`; a tie keeps the
standard form. Zero weights count the same in both sums, so only the ±1
weights decide. The two mechanisms act on disjoint sets of weights:
zero-fix on zeros, FAST on non-zeros.

A worked example (six rows of one column; it is also in the mapper's
testbench):

| row | M1 fault | M2 fault | W  | stored as W → reads | stored as −W → reads |
|-----|----------|----------|----|---------------------|----------------------|
| 0   | –        | SA1      | −1 | 01 → −1 ✓           | 10 → 11 = 0 (err 1)  |
| 1   | –        | –        | 0  | 00 → 0              | 00 → 0               |
| 2   | SA0      | –        | +1 | 10 → 00 = 0 (err 1) | 01 → −1 ✓            |
| 3   | –        | SA1      | +1 | 10 → 11 = 0 (err 1) | 01 → −1 ✓            |
| 4   | –        | SA0      | −1 | 01 → 00 = 0 (err 1) | 10 → +1 ✓            |
| 5   | –        | –        | 0  | 00 → 0              | 00 → 0               |

Here err_standard = 3 and err_flipped = 1, so the column is stored negated
and its `col_flip` bit is set.

## 2. Block map

```
retern_tcim_macro                      top
├── retern_mapper                      FAST decision + zero-fix for one column (combinational)
├── bitline_driver                     column decode, {M1,M2} drive for a column write
├── col_flip_reg                       64-bit col_flip register
├── tcim_controller                    multiply sequencer
├── wordline_driver                    activation latch, bit-serial partial wordline drive
├── tcim_array                         64×64 bitcells + bitline discharge sums   (behavioural)
│   └── tcim_bitcell ×4096             M1/M2 with stuck-at override              (behavioural)
├── column_periph ×8                   8:1 column mux, two ADCs, post-processing
│   ├── flash_adc ×2                   4-bit flash ADC                            (behavioural)
│   └── post_proc                      two 2:1 muxes + subtractor (the ReTern operand swap)
└── shift_accumulator                  per-column accumulation by bit significance
tcim_pkg                               shared types (cell_e, saf_e, cell_saf_t, tern_t) and defaults
```

Three files model parts that are analog or process-specific in silicon:
`tcim_bitcell`, `tcim_array` and `flash_adc`. They are written in
synthesizable form as digital equivalents. The bitline voltage drop is an
integer count of discharging cells, in units of Δ. The memory element is a
flip-flop with a fault override. Their header comments say so.

## 3. How a multiply runs

The array computes `result[c] = Σ_r act[r] · W[r][c]` for 64 signed 8-bit
activations and all 64 columns. It does not do this in one step. Three
decisions from the source split the work:

* **Bit-serial inputs.** Activations are streamed one bit per read: WL_r is
  bit b of act[r]. A signed activation is in 2's complement, so the sign bit
  (b = 7) carries weight −128.
* **Partial wordline activation.** Only 16 of the 64 rows are raised per
  read. This limits analog non-idealities, and it lets a 4-bit ADC cover
  most of a bitline's range.
* **Shared peripherals.** One set of column peripherals (two ADCs, the
  operand-swap muxes and the subtractor) serves eight columns in turn. So
  8 sets cover 64 columns.

Each read therefore covers one activation bit, one 16-row group and one
column per set. `tcim_controller` walks bit (outer loop), then group, then
column (inner loop), one read per clock. That is 8 × 4 × 8 = 256 reads.
In each read:

1. `wordline_driver` raises the selected group's wordlines from the latched
   activations.
2. `tcim_array` gives every column's BL1 and BL2 discharge counts (0..16).
3. Each `column_periph` multiplexes its selected column to its two
   `flash_adc`s. They register a 4-bit code on the clock edge, together with
   the column's `col_flip` bit.
4. In the next cycle `post_proc` forms `out_p − out_n`, or `out_n − out_p`
   for a flipped column. `shift_accumulator` adds it, shifted by the bit
   position, to that column's accumulator (subtracted for the sign bit).

**ADC range.** Sixteen active rows can drop a bitline by 16Δ. The 4-bit ADC
resolves 0..15, so 16 reads as 15. This happens only when all 16 active
rows have their input bit at 1 and their element at 1. The testbench model
includes this clipping, and the end-to-end test makes it happen on purpose.
Clipping is a consequence of the sizes the source gives (16 rows, 4 bits),
not a fault of this RTL.

**Timing.** Suppose `start` is sampled high in cycle 0. Reads run in cycles
1–256, the last partial sum is added in cycle 257, and `done` is high in
cycle 258. `result` is final in that cycle and holds until the next `start`.
The activations are latched at `start`, so `act` may change afterwards.
`busy` is high from cycle 1 to 258. A `start` or `map_valid` while busy is
ignored. The source gives no cycle count. Its latency overhead for ReTern
(3–7 %) is circuit delay of the added muxes; here they add no cycle.

## 4. Programming through the mapping

The source runs the ReTern algorithm offline in software. It takes a fault
map from a separate diagnosis step, and then programs the array. Here the
algorithm is `retern_mapper`, a combinational block for one column. Weights
can then be programmed straight from their ideal values:

* Hold `map_valid` for one cycle and set `map_col`. Give `map_w[64]`, the
  ideal ternary weights (signed 2-bit values −1/0/+1), and `map_diag[64]`,
  the diagnosed faults of that column (`cell_saf_t`: an `saf_e` each for M1
  and M2).
* In that cycle the mapper chooses standard or flipped form and the zero
  forms. `map_flip`, `map_err_std`, `map_err_flip` and `map_nzfix` show its
  decision.
* On the clock edge, `bitline_driver` writes the whole column (all wordlines
  are raised for the write), and `col_flip_reg` stores the flip bit.

Sixty-four cycles program the macro. Writing a whole column at once is this
design's choice. It matches the per-column output of the mapping.

`saf[64][64]` is the *physical* fault map of the model. It stands in for
the defects of a real die. `map_diag` is what the diagnosis step reports.
The testbenches pass the same map to both, i.e. they assume perfect
diagnosis. `cell_rd` shows what every cell reads back.

## 5. Top-level interface (`retern_tcim_macro`)

| port | dir | type | meaning |
|------|-----|------|---------|
| `clk`, `rst_n` | in | logic | clock; asynchronous active-low reset |
| `map_valid`, `map_col` | in | logic, [5:0] | program one column this cycle |
| `map_w` | in | `tern_t [64]` | ideal weights of the column |
| `map_diag` | in | `cell_saf_t [64]` | diagnosed faults of the column |
| `map_flip`, `map_err_std`, `map_err_flip`, `map_nzfix` | out | logic, [7:0], [7:0], [6:0] | mapping decision for the presented column |
| `saf` | in | `cell_saf_t [64][64]` | physical fault map (model input) |
| `start` | in | logic | begin a multiply |
| `act` | in | `logic signed [7:0] [64]` | activations |
| `busy`, `done` | out | logic | running; one-cycle completion pulse |
| `result` | out | `logic signed [15:0] [64]` | dot products |
| `cell_rd` | out | `logic [1:0] [64][64]` | {M1,M2} each cell reads back |

The parameters are `ROWS`, `COLS`, `ACT_BITS`, `PWA_ROWS`, `ADC_BITS`,
`COLS_PER_SET` and `OUT_W`. Their defaults (64, 64, 8, 16, 4, 8, 16) are in
`tcim_pkg`. All but `OUT_W` are the source's numbers. `ROWS` must be a
multiple of `PWA_ROWS`, and `COLS` a multiple of `COLS_PER_SET`. With other
sizes, check that `OUT_W` holds (ROWS/PWA_ROWS)·(2^ADC_BITS−1)·2^(ACT_BITS−1).

## 6. What follows the source and what does not

Taken from the source: the bitcell encoding and spare state, the fault
model, both mapping rules and their tie-break, the per-column `col_flip`
register, the two 2:1 muxes and the subtractor, and the sizes. The sizes are
a 64×64 array, 8-bit activations streamed in 2's complement, 16-row partial
wordline activation, 4-bit flash ADCs, and one peripheral set per eight
columns.

This design's own choices:

* **Mapping in hardware.** `retern_mapper` puts the offline algorithm into
  logic. It is used only while programming and does not affect inference.
* **Column-wide writes.** A whole column is written in one cycle.
* **Sequencing.** Reads go bit → group → column, one per cycle, and the ADC
  output is registered.
* **Grouping.** Row groups are contiguous (rows 16g..16g+15). Set s serves
  columns 8s..8s+7.
* **ADC references.** The comparator levels are 1..15Δ, which gives the
  clipping at 16Δ described in section 3.
* **Signed activations.** The accumulator treats the top bit as the sign
  (`ACT_SIGNED = 1`).
* **Resets.** Registers reset to zero. Memory cells have no reset and must
  be programmed before use.
* **Result width.** `OUT_W = 16`.

Departures and omissions:

* **ADC count.** One figure of the source draws one ADC per bitline. The
  hardware evaluation shares one set across eight columns. The RTL follows
  the sharing.
* **Mux count.** The source speaks of two 2:1 muxes per column, but also
  puts the post-processing in the shared set. Here there is one mux pair
  per set of eight columns. The column's `col_flip` bit is selected along
  with its bitlines.
* **Not built: fault diagnosis.** Fault testing is taken from prior work;
  its result enters on `map_diag`.
* **Not built: multi-macro accelerator.** Mapping a whole model needs many
  64×64 macros. The source says that many are used but does not describe
  how they are arranged. The BitNet 700M feed-forward weights alone need
  about 110,000 such tiles, and the 3B model's about 527,000.
* **Not built: attention cores.** The digital cores that run self-attention
  are outside the macro.
* **No analog effects.** Bitline non-linearity, IR drop and variation are
  not modelled. An ADC code is exact up to its clipping.

## 7. Verification

Every module has a self-checking testbench in `tb/`, named `<module>_tb`.
Each compares the module against values computed independently in the
testbench. Each ends with a line `TB_RESULT checks=N failures=M`.

* **`retern_mapper_tb`:**
  * the worked example above;
  * a zero-fix example;
  * 2,000 random 64-row columns (37 % zeros, 10 % faulty elements) against a
    reference written from the algorithm's definition.
* **`retern_tcim_macro_tb`:** end-to-end, at the default sizes.
  * It programs a random tile with a 10 % fault map and checks every mapping
    decision and every cell's read-back.
  * It runs 12 multiplies, checking every result exactly against a
    bit-serial model and checking the latency of 258 cycles.
  * It shows that a write or a start during a multiply is ignored.
  * It counts each mechanism: column flips, zero-fixes, ADC clipping,
    negative activations and the busy lock-out. It fails if any of them
    never happens, or if ReTern does not reduce the error against the
    fault-free product.
* **`retern_workload_tb`:** Monte Carlo runs at the two SAF rates the source
  evaluates, 5 % and 10 %. The tiles have 37.05 % and 37.55 % zeros, the
  sparsities of the two BitNet models. There are 10 fault maps per rate and
  sparsity, and 3 activation vectors each. It reports the mean absolute
  output error with and without ReTern. In one run:

  | SAF rate | without ReTern | with ReTern |
  |----------|----------------|-------------|
  | 5 %      | 100.7          | 57.4        |
  | 10 %     | 152.7          | 104.6       |

  The weights and activations are random, not taken from a trained model.
  These numbers measure the arithmetic error of one tile, not model
  accuracy.

**Running a testbench with Verilator 5**, from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/tcim_pkg.sv tb/retern_tcim_macro_tb.sv --top-module retern_tcim_macro_tb -o sim
./obj_dir/sim
```

Replace the testbench name for the others. Building the full macro, with
4,096 bitcell instances, takes a few minutes. The simulation itself takes
under a second. Running `verilator --lint-only -Wall -Irtl -y rtl
rtl/tcim_pkg.sv rtl/<module>.sv` lints a single module.

**How far to trust it.** The digital blocks are checked exhaustively or
against independent reference models. The behavioural models are idealised.
The costs the source reports (about 2 % energy, 3–7 % latency and under 1 %
area over a plain TCiM macro) come from circuit simulation. This RTL says
nothing about them.
