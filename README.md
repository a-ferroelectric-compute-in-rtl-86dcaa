# FeFET compute-in-memory annealer

Many combinatorial optimisation problems can be written as a QUBO: find the binary vector
`x` that minimises `E(x) = xᵀ Q x`. An annealer tries vector after vector, and almost all
of its work goes into evaluating `E` for each candidate. This design does that evaluation
inside the memory that stores `Q`.

The memory is a 32×32 array of ferroelectric-FET cells. Each cell stores one bit `q` as its
threshold voltage, and it conducts only when its word line (`x`) and its source line (`y`)
are both on. Drive all word lines and source lines at once, and each data line carries the
column sum `Σ_r x_r q_rc y_c`. Converting those sums and adding them gives the whole
vector–matrix–vector product `xᵀ Q y` in one array access.

A multi-epoch simulated annealing (MESA) controller sits around the array. It perturbs
`x`, asks for the new energy, and decides what to keep. A host reaches the chip through an
SPI port: it loads the matrix, sets the annealing parameters and reads back the best
solution.

The RTL follows a published 28 nm FeFET prototype: 32×32 array, four shared ADCs, SPI
port, external clock of at most 50 MHz. It also follows that work's compression method and
MESA algorithm. The FeFET array and the ADCs are analog parts. They are written as
behavioural models with the real parts' ports. Everything else is synthesizable.

## Block diagram

```
            SPI (sclk, cs_n, mosi, miso)
                   │
               spi_if ── csr (registers, commands, line maps, annealing settings)
                   │            │
                   │        mesa_ctrl ── vmv_req / x_cand ──┐
                   │            ▲ energy                    │
                   │            │                           ▼
                   │      output_buffer ◄── shift_add ×4 ◄── adc ×4 ◄── col_mux ×4
                   │                                                      ▲ dl_count[32]
                   │                       cim_ctrl (sequencer)           │
                   │                           │                          │
                   └──────────► input_buffer ─► row_readback ─┬─► wl_driver ──► fefet_array (32×32)
                                  (x_h, x_v)    (override)     └─► sl_dl_driver ──►
```

| Module | Role |
|---|---|
| `fecim_pkg` | sizes, line-level codes, line-map type, register map |
| `fefet_array` | behavioural 1FeFET1R crossbar: program, erase, current sums |
| `wl_driver`, `sl_dl_driver` | turn the mode and the input bits into line levels |
| `input_buffer` | holds `x` and routes it to the rows (`x_h`) and element columns (`x_v`) |
| `col_mux`, `adc`, `shift_add` | one lane per ADC: 8 columns, converted one after another |
| `output_buffer` | adds the four lanes into the energy |
| `row_readback` | reads one stored row back through the ADCs, to verify programming |
| `cim_ctrl` | sequences erase, word write and one evaluation |
| `mesa_ctrl` | the annealing loop |
| `spi_if`, `csr` | host access |
| `fecim_top` | wires it all together |

## Putting a QUBO into the array

This is the part that takes the most explaining, because the array computes
`x_hᵀ Q' x_v` with two different input vectors rather than `xᵀ Q x`.

**Why two vectors.** Word lines and source lines are separate inputs, so nothing forces
the row vector and the column vector to match. For a binary `x`,
`x_i x_j = x_j x_i`. So the element `Q[i][j]` can move to `Q[j][i]` and the energy stays
the same. Moving all of a column's elements into its mirrored row leaves that column empty,
and then it needs no hardware.

QUBO matrices of graph problems are very sparse, so this folding can drop most columns
and, in the same way, most rows. What is left is a smaller matrix `Q'`. Its rows stand for
one subset of the variables (`x_h`) and its columns for another (`x_v`). Folding stops
where it would break the identity: once an element has been moved, its row and column are
"fixed" and are not folded again.

The compression runs offline on the host. `tb_graph_coloring` contains a working example:
sort the variables by degree, then fold each column that has no fixed element into its row.

**Line maps.** Because rows and columns carry different subsets of `x`, each line has its
own map entry (`line_map_t`). An entry is *off*, *variable i*, or *constant one*.
`row_map[r]` feeds word line `r` and `col_map[g]` feeds element column `g`. Each entry is
one register write (`kind << 5 | idx`, with kind 0 off, 1 variable, 2 one).

**Linear terms.** The diagonal `Q[i][i] x_i` is a linear term. To include it, store it on
row `i` in a column whose map is *constant one*.

**Multi-bit elements.** An element of `M` bits (default `M = 2`) occupies `M` neighbouring
cells of a row. Element column `g` spans cells `M·g … M·g+M−1`, least significant bit
first. All `M` source lines of one element column follow the same input bit.

**Signed elements.** Cells can only add current. Negative couplings therefore live in
separate element columns marked in `GROUP_NEG`, whose converted values are subtracted. The
same variable may appear in a positive and in a negative column. This is how
`tb_fecim_top` maps a signed 7-variable problem (columns 0–6 Q+, 7–13 Q−, 14 constant one).

**Unary weighting.** With `CFG[0] = 1` every cell weighs 1 instead of `2^bit`. An element
is then the number of its cells that are on, so a value of 2 in a 2-cell element means both
cells on. This is the ternary (0, 1, 2) encoding of the graph-colouring demonstration.

**Worked example.** `tb_graph_coloring` solves a 3-colouring of a 7-node graph:

- The problem has 21 variables `x_ip` (node `i` has colour `p`).
- Couplings: 2 between the colours of one node, 1 between equal colours of adjacent nodes.
  The linear terms are −1.
- The minimum, −7, is reached exactly by proper colourings.
- Compression reduces the 21 coupling columns to 14.
- Rows 0–20 carry the variables. Element columns 0–13 carry the kept column variables.
- Column 15 is a constant-one Q− column holding a 1 on every variable row (the −1 terms).

**Coefficients wider than an element.** Rows that follow the same variable add their
cells in the same column. A coefficient `v` can therefore be spread over `⌈v/3⌉` rows
mapped to one variable, with elements 3, 3, …, rest. `tb_pfp35` uses this for the
factoring example 35 = 5×7, whose compressed QUBO has coefficients up to 20. It takes
17 rows and 7 element columns.

`tb_maxcut` maps Max-Cut the same way:

- Each edge contributes `2·x_i·x_j − x_i − x_j`, so the energy is minus the cut size.
- The couplings are 2 per edge. The linear term of node `i` is `−deg(i)`.
- A degree of up to 6 is split over two constant-one Q− columns of up to 3 each.

## One energy evaluation (cim_ctrl)

1. **Load (1 cycle).** The input buffer captures `x` (the host's or the annealer's
   candidate) and clears the lane accumulators.
2. **Settle (1 cycle).** The word lines go to the read level where `x_h = 1`. The source
   lines go to the read bias where the element column's `x_v = 1`.
3. **Convert and accumulate (8 × 2 cycles).** Each of the four lanes owns 8 neighbouring
   columns (lane `a` has columns `8a … 8a+7`). Its multiplexer selects column `k` and its
   ADC converts the count of ON cells into a 6-bit code. The shift-and-add unit then adds
   `code << (col mod M)`, negated for a Q− element column.
4. **Capture (1 cycle).** The output buffer adds the four lane sums into the signed 20-bit
   energy and raises `valid`.

One evaluation takes **19 clock cycles**; `tb_fecim_top` measures this. The ADC model
converts in one cycle. A slower converter is set by `CONV_CYCLES`, and the sequencer waits
for `valid`.

`i_total` (a top-level port) is the sum of all data-line currents. The ternary
demonstration read the whole array in a single measurement instead of through the ADCs,
and this port gives that reading.

## Programming the cells

Programming is word by word, using a one-third-voltage inhibit scheme:

- The selected word line goes to the write level (3.4 V on silicon). Other word lines go to
  the inhibit level (0.8 V).
- Source lines of bits that become 1 are selected (0 V). The others are inhibited (1.8 V).
- Only the cells at selected row × selected column change.
- The pulse lasts `WRITE_CYCLES` clocks. The default is 50 000, which is 1 ms at 50 MHz.

Before any word is written, the whole array is erased with a negative gate pulse that
clears every cell. That pulse lasts `ERASE_CYCLES` clocks (default 50, which is 1 µs).
So loading a matrix means: erase, then write every row that holds a 1.

**Verifying a row.** Writing `CTRL` bit 4 reads back row `PROG_ROW` through the normal
read path. For one evaluation, `row_readback` replaces the input vectors: only that word
line is on, and every source line is on. Each data line then carries 0 or 1 cell currents.
Every ADC code is stored as one bit (code ≠ 0) of `RDBK`. This takes the 19 cycles of an
ordinary evaluation. `ENERGY` is overwritten with the row's weighted sum.

The line levels are symbolic enums (`wl_level_e`, `sl_level_e`). The comments give the
voltages they stand for; the drivers themselves are analog and not modelled.

## The annealing loop (mesa_ctrl)

Each iteration evaluates `E_new = E(x_new)` and compares it with the energy `E_o` of the
current state:

| Case | Action | Trap count |
|---|---|---|
| `E_new < E_o` | accept. If `E_new < E_opt`, also record a new best `(x_opt, E_opt)` | reset to 0 |
| `E_new − E_o < ε` (stagnant) | keep the state | +1 |
| uphill, random 16-bit number `< T` | accept (probability `T/65536`) | reset to 0 |
| uphill, otherwise | keep the state | +1 |

After the decision:

- If the trap count exceeds `Count_max`, the **epoch ends**. The temperature goes back to
  `T0`, the count clears, and the state restarts from the best solution so far.
- Otherwise the temperature cools: `T ← T − (T >> tshift)`.

The controller then flips `nflip` randomly chosen variables of the current state, one per
cycle, to make the next candidate. Variables set in `FIXED` are never flipped, and only
indices below `NVARS` are used.

The run stops after `MAX_ITER` iterations. `irq` then goes high, and `EOPT`/`XOPT` hold the
best result of all epochs.

Random numbers come from a 32-bit Galois LFSR (`x³²+x²²+x²+x+1`, seeded from `SEED`).
The top 16 bits drive the acceptance test and the low 16 bits pick variables
(`idx = (r × NVARS) >> 16`).

A restarted epoch begins where the search was best, and its length adapts to progress:
epochs end only when the search has stalled for `Count_max` iterations.

## Host interface (spi_if, csr)

The SPI interface runs in mode 0, MSB first. A frame is 40 bits with `cs_n` low: 1 bit R/W
(1 = write), 7 bits word address, 32 bits data. On a read, the register's data is shifted
out on `miso` during the last 32 bits. SCLK may run at up to `clk/8`.

| Addr | Name | |
|---|---|---|
| 0x00 | CTRL | write: bit0 run MESA, bit1 one evaluation, bit2 erase, bit3 program word, bit4 read back row |
| 0x01 | STATUS | bit0 busy, bit1 MESA done, bit2 evaluation done |
| 0x02 | CFG | bit0 unary weighting |
| 0x03/0x04 | PROG_ROW / PROG_DATA | row and 32-bit word for the next program command |
| 0x05 | X | host vector: input of a single evaluation, start state of MESA |
| 0x06–0x08 | ENERGY, EOPT, XOPT | results (energies are signed) |
| 0x09 | GROUP_NEG | element columns that are subtracted |
| 0x0A–0x12 | T0, TSHIFT, COUNT_MAX, EPS, MAX_ITER, FIXED, SEED, NFLIP, NVARS | annealing settings |
| 0x13/0x14 | ITER, EPOCH | progress counters |
| 0x15–0x17 | ECUR, TEMP, TRAP | annealer's current energy `E_o`, temperature, trap count |
| 0x18 | RDBK | the 32 bits of the row last read back |
| 0x20–0x3F | ROW_MAP | source of word line 0–31 |
| 0x40–0x4F | COL_MAP | source of element column 0–15 |

Reset values:

- `T0 = 0x2000`, `TSHIFT = 4`, `COUNT_MAX = 8`, `EPS = 1`, `MAX_ITER = 100`, `SEED = 1`,
  `NFLIP = 1`, `NVARS = 32`.
- Identity line maps: row `r` and element column `g` follow variables `r` and `g`.

A typical sequence: erase, program the rows, write the maps and `GROUP_NEG`, write the
settings and `X`, write `CTRL = 1`, wait for `irq`, read `EOPT` and `XOPT`.

## Sizes and parameters

| Parameter | Default | Origin |
|---|---|---|
| `ROWS × COLS` | 32 × 32 | prototype array |
| `NADC` | 4 | prototype |
| `M_BITS` | 2 | two cells per element in the ternary demonstration |
| `ADC_BITS` | 6 | own choice: resolves a full 32-cell column |
| `NVARS` | 32 | own choice: one variable per row |
| `EW`, `TW` | 20, 16 | own choice: energy and temperature widths |
| `WRITE_CYCLES`, `ERASE_CYCLES` | 50 000, 50 | 1 ms write and 1 µs erase at 50 MHz |

A larger element precision is a change to `M_BITS`. For example, factoring problems need
about 5 bits per element.

## Where this design departs from the prototype

- **Annealing on chip.** In the prototype, the annealing and the linear terms ran on a host
  computer. Here MESA is on chip, and linear terms are stored in constant-one columns.
- **Four shared ADCs.** The general architecture gives every M-bit element column its own
  multiplexer and ADC. The 32×32 prototype has four ADCs, and this design follows the
  prototype: each ADC serves 8 data lines, and an evaluation takes 8 conversion steps.
- **Q+ and Q− in one array.** The prototype kept them as two separate matrices. Here they
  share one array, and the Q− columns are marked for subtraction.
- **When the optimum is updated.** One description of the loop updates the optimum on every
  downhill move. This design updates it only when the energy beats the best so far. Within
  an epoch the two agree, and across epochs this keeps the overall best.
- **Pulse lengths.** Two are quoted: 1 µs for setting polarisation and 1 ms for word
  programming. The 1 ms value is used for writes and 1 µs for the erase pulse.
- **Own choices where the source gives nothing:**
  - the register map and SPI frame format;
  - the acceptance probability `p = T/65536`;
  - the cooling rule;
  - the LFSR;
  - the iteration limit;
  - the column-to-ADC assignment;
  - the bit order within an element;
  - ADC resolution and saturation.
- **Idealised cells.** The array model has no device variation, and the current of one ON
  cell is one unit. Silicon needs calibration of the ADC reference for that to hold.
- **Capacity.** 32 variables and 16 two-bit element columns. That is enough for a 7-node,
  3-colour graph colouring (21 variables) and for the 4-variable factoring example. It is
  not enough for benchmark-size Max-Cut or colouring instances of hundreds of nodes.
  Wide coefficients cost rows (see above).

## Simulation

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. Run one with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/fecim_pkg.sv tb/tb_fecim_top.sv --top-module tb_fecim_top -o sim
./obj_dir/sim
```

| Testbench | What it covers |
|---|---|
| `tb_fefet_array` … `tb_csr` | one per module, against independently computed results |
| `tb_mesa_ctrl` | the annealer against a reference model of the loop on a random 10-variable QUBO, plus brute-force minima |
| `tb_fecim_top` | the full-size chip over SPI, default parameters (see below) |
| `tb_graph_coloring` | the 21-variable graph-colouring problem, end to end |
| `tb_pfp35` | the factoring example 35 = 5×7 with coefficients up to 20, all 16 energies and the MESA minimum |
| `tb_maxcut` | a 20-node Max-Cut problem, end to end, checked against the brute-force maximum cut |

`tb_fecim_top` does the following:

- erases the array, programs it with real 1 ms pulses and reads every row back;
- checks signed binary and unary evaluations, the 19-cycle latency and `i_total`;
- runs MESA to the brute-force optimum;
- counts that every annealing decision and an epoch restart occurred.

The system and workload tests each finish in a few seconds of wall time.
