# DART-PIM in SystemVerilog: read mapping inside a memory array

Mapping a DNA read means finding where a short string (here 150 bases) sits in a
3.2-billion-base reference genome, allowing for a few mismatches, insertions and
deletions. Software mappers do this in three steps:

- **Seeding** proposes candidate locations from short exact matches (minimizers).
- **Filtering** drops most candidates with a cheap edit distance.
- **Alignment** scores the survivors with an affine-gap edit distance and reports the edit path.

Seeding makes about a hundred times more data than the reads themselves, so moving
candidates between memory and processor costs more than the arithmetic.

This design turns that around. The reference is cut into segments and stored in
memory crossbars ahead of time. Each crossbar holds every segment around one
minimizer. A read is therefore sent to the crossbars that own its minimizers, and
nothing else moves. Inside the crossbar, one row per candidate computes the
filtering distance for all candidates at once. The best one is copied to a second
buffer for affine alignment. Only the final alignment, 512 bits per read and
location, leaves the memory.

The RTL models the digital behaviour of that memory. It covers the module, chip
and bank controllers, and one crossbar with its controller, FIFO, linear and affine
buffers. The memristive array, its in-array NOR logic and the RISC-V cores are not
modelled. The crossbar's storage is ordinary registers. Each unit of in-array
computation (one edit-distance cell) is a strobe spaced by the number of clocks
the array would need for it.

## Hierarchy and data flow

```
main core ──► dart_pim ── pim_controller ── NCHIP x dp_chip
                                               └─ chip_controller ── NBANK x dp_bank
                                                                        └─ bank_controller ── NXBAR x dp_crossbar
```

The three controller levels share one set of channels.

| Channel | Direction | Behaviour |
|---|---|---|
| `wr_valid`/`wr` (indexing write) | downwards | Addressed by chip, bank and crossbar index. It carries a 300-base segment, its genome location (PL) and its minimizer. Writes also teach the controllers which minimizers live below them. |
| `rd_valid`/`rd`/`rd_ready` (read packet) | downwards | Carries read ID, minimizer, the minimizer's position in the read, and 150 bases. The PIM controller routes by each chip's minimizer range `[lo, hi]`, the chip controller by each bank's range, and the bank controller by exact match. A read goes to every crossbar that holds its minimizer, and is accepted only when all of them can take it. A read whose minimizer no crossbar holds is accepted and dropped. |
| `seq` (sequencing strobes) | downwards | Every crossbar of a chip receives the same strobes. |
| `stat` (status) | upwards | FIFO full, FIFO non-empty, affine buffer full, affine buffer non-empty, busy. ORed at each level. |
| `res_valid`/`res`/`res_ready` (results) | upwards | Merged by a round-robin arbiter (`rr_arbiter`) at each level. |

A frequent minimizer can be spread over several crossbars by giving them the same
minimizer value; they are then fed the same reads.

### Protocol seen by the main core

1. **Indexing.** Write every segment (`wr_valid`, one per clock).
2. **Seeding.** Stream reads while `rd_ready` is high. When any crossbar's FIFO is
   full, `stop_reads` rises and `rd_ready` falls.
3. **Filtering.** Issue `CMD_LIN_ITER` and wait for `cmd_done`. Each command removes
   one read from every non-empty FIFO and runs it against all candidate rows.
   Stream more reads when `stop_reads` is low. Repeat until no FIFO holds a read.
4. **Alignment.** This happens by itself. After a linear iteration has filled some
   crossbar's affine buffer, its chip runs an affine iteration before reporting
   `cmd_done`. At the end, `CMD_FLUSH` runs one affine iteration on the partly
   filled buffers. `all_empty` then reads 1.
5. **Results.** These appear on `res_*` whenever they are ready; the core must
   accept them. Keeping the best location per read is the core's job.

## Inside one crossbar (`dp_crossbar`)

A 256-row crossbar is divided into three regions:

- **Reads FIFO:** 160 rows × 3 reads, so 480 reads. Each entry holds the ID, the minimizer position and the bases.
- **Linear buffer:** 32 rows. Each holds one 300-base reference segment with its PL.
- **Affine buffer:** 64 rows, 8 per instance (one for distances, seven for the traceback directions), so 8 instances.

A linear iteration (`seq.lin_load`, then 1950 cell strobes, then `seq.lin_finish`) does the following:

1. **Load.** Pop the FIFO head. From the minimizer position `pos`, compute the window offset `off = 150 − 12 − pos`. The segment's minimizer is at base 144, 6 bases more than the largest `rl − k` = 138, so the window starting at `off` lines the read up with the segment with 6 spare bases at each end. Every linear row then works on its own segment's bases `[off, off+162)`.
2. **Cells.** Compute the banded linear edit distance in all 32 rows at once (next section).
3. **Minimum.** A serial search (`min_extract`, one row per clock, first minimum wins) finds the best row.
4. **Filter, or copy.** If the best distance is above 6, the read is dropped and `n_filtered` counts it. Otherwise the 162-base window and the read are copied into the next free affine instance. The reported PL is the row's PL + `off` + 6, the genome position of the read's first base when there are no indels.

An affine iteration (`seq.aff_load`, 1950 cell strobes, `seq.tb_start`) computes the
affine distance and direction bits in every filled instance. A traceback then
walks each instance in turn, and the instances' results are sent out one by one.

Reads are counted over the crossbar's lifetime. After `MAX_READS` (maxReads, 25,000)
they are still accepted but discarded, and `n_dropped` counts them. This bound stops
one very frequent minimizer from holding up the whole array.

## The banded linear distance in one row (`linear_wf_row`)

A full edit-distance matrix of 150 × 162 cells cannot fit in a row. Distances above
the threshold eth = 6 do not matter, so only the 2·eth + 1 = 13 cells around the
diagonal of each matrix row are kept. Each cell is 3 bits and saturates at eth + 1 = 7.

Band cell `j` of matrix row `i` compares read base `i` with window base `i + j`.
Cell `j = 6` is the diagonal. The buffer `c[0..12]` is updated in place, `j = 0`
to `12`, one cell per strobe:

```
c[j] = min( c[j-1] + 1,                       left: already updated in this row (none for j = 0)
            c[j+1] + 1,                       top: still the previous row's value (none for j = 12)
            c[j]   + (read[i] != win[i+j]) )  top-left: the previous row's value
c[j] = min(c[j], 7)
```

The buffer starts at all zeros. Starting every band cell at zero lets the alignment
begin anywhere in the 6 spare bases at the window's left end. The distance is `c[6]`
after the last row.

The per-cell description in the source and its one-row form disagree. The per-cell
form takes the diagonal alone on a match; the one-row form takes the minimum of all
three terms. This RTL uses the minimum of all three. With unit costs both give the
same distance, because a diagonal on a match is never worse than the other two.

## Affine distance and traceback (`affine_wf_row`, `traceback_unit`)

Each affine instance keeps three 13-cell bands of 5-bit values, saturating at 31:

| Band | Meaning | Recurrence |
|---|---|---|
| D | best score ending in this cell | match: top-left D; mismatch: min(top-left D + 1, M1, M2) |
| M1 | gap in the reference, read base against a gap | min(top M1 + 1, top D + 2) |
| M2 | gap in the read | min(left M2 + 1, left D + 2) |

A gap of length L therefore costs 1 + L. The source's prose gives the gap cost as
open + extend·(L − 1), which would not match its own equations; the equations were
followed. The bands start with D = 0 and M1 = M2 = 31.

For every cell, four direction bits go into a 150 × 13 × 4 memory:

- D's source: top-left match, substitution, M1 or M2.
- For M1 and for M2, whether the gap was extended or opened.

On a tie, the order of preference is substitution, then M1, then M2, and extending a
gap wins over opening one. These rules are this design's own.

The traceback starts at (row 149, band cell 6) in D and walks backwards, one step per clock:

| State | Direction | Emits | Moves to |
|---|---|---|---|
| D | match | M (0) | row i − 1 |
| D | substitution | X (1) | row i − 1 |
| D | M1 or M2 | nothing | that state |
| M1 | — | I (2) | row i − 1, band cell j + 1 |
| M2 | — | D (3) | band cell j − 1 |

M1 and M2 go back to D where their gap was opened. The walk ends when it leaves row 0.
If it would leave the band, or passes 216 operations, the `trunc` flag is set.

The 512-bit result word, `result_t`, from MSB to LSB:

| Field | Bits | Contents |
|---|---|---|
| `id` | 32 | read ID |
| `pl` | 32 | location |
| `wf_dist` | 5 | affine distance |
| `nops` | 9 | number of operations |
| `trunc` | 1 | path left the band or hit the operation limit |
| `pad` | 1 | — |
| `ops` | 216 × 2 | edit operations; `ops[0]` is the last column of the alignment |

## Timing

The chip controller sequences all of its crossbars in lockstep. Each band cell is one
strobe. Strobes are 130 clocks apart for linear cells, the in-array NOR cost of one
3-bit cell, and 660 clocks apart for affine cells. The order is i = 0..149, then
j = 0..12 within a row.

| Stage | Clocks |
|---|---|
| Cells of one linear iteration | 1950 × 130 = 253,500 (the testbench checks this exactly) |
| Minimum search | 33 |
| Load, finish and settle steps | a few each |
| Cells of one affine iteration | 1950 × 660 = 1,287,000 |
| Traceback and output, per instance | up to 217 + 1 |

The source reports 254,585 cycles for a linear instance and 1,308,699 for an
affine one. Its initialisation overhead is not modelled cycle by cycle.

Commands are taken one at a time, and `cmd_done` pulses when every chip has
finished. Reads can be streamed at one per clock.

## Sizes

| Parameter | Default here | Original design |
|---|---|---|
| Chips / banks per chip / crossbars per bank (`NCHIP`/`NBANK`/`NXBAR`) | 32 / 8 / 8 | 32 / 512 / 512 |
| Reads FIFO (`FIFO_R` × 3) | 160 × 3 | same |
| Linear rows (`LROWS`) | 32 | same |
| Affine instances (`SLOTS`) | 8 | same (8 rows each) |
| maxReads (`MAX_READS`) | 25,000 | 12.5k / 25k / 50k evaluated |
| Linear / affine cell cost (`CYC_LIN`/`CYC_AFF`) | 130 / 660 clocks | 130; affine not given per cell (1,288,281 NOR cycles / 1950 cells) |
| eth (linear / affine) | 6 / 31 | same |

Everything inside a crossbar is at its original size. Only the number of crossbars
is reduced:

- Elaborating one crossbar of this model costs about 5.5 MB of memory in the lint and
  elaboration tools: 11 GB for 2048 crossbars.
- The 8.4M crossbars of the original would need tens of terabytes.
- 2048 crossbars is the largest power-of-two count that stays well inside a 32 GB
  machine. Lint of the top alone takes about 4 minutes and 11.4 GB; on a 16 GB
  machine, next to other jobs, it can run out of memory.

The controllers alone (`bank_controller`, `chip_controller`, `pim_controller`)
default to the original fan-outs of 512, 512 and 32.

The largest array simulated end to end is 2 × 2 × 2 crossbars with all crossbar
sizes at their defaults (`tb_dart_pim_xbar`). It takes about a minute of
simulation. Simulating the 2048-crossbar default is not practical.

## Where this departs from the original, or fills gaps

- The storage is registers and the in-array computation is per-row logic. The
  values are those the NOR programs would compute, but there is no NOR sequence.
- Only the best linear row per read and crossbar goes on to alignment. Ties go
  to the lowest row.
- The direction memory uses 4 bits per band cell (7800 bits per instance). The
  original fits its traceback data in seven 1024-bit rows (7168 bits) with a
  packing it does not describe.
- The aligned window is 162 bases (read + 2·eth). A figure of the original
  suggests 156.
- The original does not give some details. The choices made here are:
  - packet widths: 32-bit ID and PL, 24-bit minimizer;
  - the 512-bit result layout;
  - the 660-clock affine cell cost;
  - routing by minimizer ranges;
  - the flush command;
  - valid/ready handshakes and round-robin result merging.
- The maxReads values in the source disagree (12.5k/20k/50k in one place,
  12.5k/25k/50k elsewhere); 25k is the default.
- An affine iteration runs on every crossbar of a chip whenever any of them has a
  full buffer.
- `n_lin_iter` and `n_aff_iter` at the top are sums over chips, so one linear
  command adds `NCHIP`.

## Files

| File | Contents |
|---|---|
| `rtl/dp_pkg.sv` | constants and packet types |
| `rtl/linear_wf_row.sv`, `rtl/affine_wf_row.sv` | banded distance datapaths |
| `rtl/traceback_unit.sv` | path recovery and result packing |
| `rtl/reads_fifo.sv`, `rtl/min_extract.sv` | crossbar parts |
| `rtl/dp_crossbar.sv` | one crossbar and its controller |
| `rtl/bank_controller.sv`, `rtl/chip_controller.sv`, `rtl/pim_controller.sv` | the three controller levels |
| `rtl/dp_bank.sv`, `rtl/dp_chip.sv` | structural levels |
| `rtl/rr_arbiter.sv` | round-robin arbiter |
| `rtl/dart_pim.sv` | the top |
| `tb/tb_ref_pkg.sv` | reference models: a whole-matrix band model of the linear distance, an affine model, a replay that re-scores a traceback, and read mutation |

Each `tb/tb_<block>.sv` tests one block and prints `TB_RESULT checks=N failures=M`.
The module-level tests are:

- `tb_dart_pim`: reduced sizes, every mechanism at least once. It counts each
  mechanism and fails if any never occurred: full FIFO and `stop_reads`, seeding
  resumed, a shared minimizer, an unmatched read, filtering, maxReads, an affine
  iteration from a full buffer, and the flush.
- `tb_dart_pim_xbar`: full-size crossbars, one complete run.

To run one with verilator:

```
verilator --binary --timing --assert -Itb -y rtl +libext+.sv \
  rtl/dp_pkg.sv tb/tb_ref_pkg.sv tb/tb_dart_pim.sv --top-module tb_dart_pim
./obj_dir/Vtb_dart_pim
```

Testbenches use only `$urandom` and reset everything they read, so they run the
same with two-state simulation and random initial values.
