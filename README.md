# Sustainable data-centre node: Amoeba PIM accelerator and FRAC flash controller

A data centre that runs on renewable power and reuses old hardware has two
problems in its hardware.

- **Power comes and goes.** An accelerator that loses its state on every
  power dip has to redo work. It should also not be a single-purpose chip:
  building one ASIC per kernel multiplies the carbon spent on manufacturing.
- **Recycled NAND flash is close to wearing out.** Blocks that would be
  retired as TLC (3 bits per cell) can last much longer if each cell is asked
  to hold fewer threshold-voltage (Vth) states.

This RTL gives a digital implementation of two answers to those problems.

- **Amoeba** is a processing-in-memory accelerator. Its FeFET crossbars are
  nonvolatile, and each one can be reconfigured at run time as one of three
  processing engines: an associative CAM engine, a matrix-vector engine or a
  logic engine. Multiplication combines two of them.
- **FRAC** ("fraction cell") is a flash controller. It lets each block drop
  from 8 Vth states per cell to any m between 2 and 8. It stores
  floor(log2(m^alpha)) bits in each group of alpha cells, so page capacity
  shrinks in small steps instead of halving.

The top module `sustain_dc_top` places both side by side. No signal joins
them: the accelerator's snapshots would reach the flash through the host.
Two external parts are not logic and are not built here: the FeFET entropy
sources of the random generators, and the NAND flash array itself. Their
signals are ports of the top, and the testbenches drive them with behavioural
models.

## 1. Amoeba

### 1.1 Hierarchy

```
amoeba (N_TILE = 4 tiles)
 └─ amoeba_tile  ×4      controller, input MUX, result buffer, TRG
     ├─ amoeba_xbar ×4   64×128 one-bit cells + mode register
     │   ├─ ape_search   CAM search of all rows
     │   ├─ mpe_mvm      column dot products with a saturating ADC
     │   └─ cpe_logic    two-row logic through fefet_adc sensing levels
     │        └─ fefet_adc
     └─ trg_tracker      8-bit ones counter steering the write voltage
```

Shared types live in `amoeba_pkg`: the crossbar size, the row field layout,
the modes, the crossbar commands, the tile opcodes and the instruction
struct `tile_instr_t`.

### 1.2 The crossbar and its three modes

`amoeba_xbar` is an array of 64 rows × 128 columns of one-bit cells. It has
no reset, because the cells are nonvolatile. Its mode register resets to
APE. It executes one command per cycle, and every result is registered:
results are valid in the cycle after the command.

| mode | command   | what happens |
|------|-----------|--------------|
| any  | CFG       | set the mode |
| any  | WRITE/READ | masked write or read of one row |
| APE  | SEARCH    | compare `key` with every row under `smask`. Every matching row is rewritten under `wmask` with `wdata` in the same cycle. Outputs: the match vector, a hit flag and the first (lowest) matching row. |
| MPE  | MVM       | one-bit input vector `x` on the rows. Output: each column's count of rows where input and cell are both 1, saturated to `prec` bits (prec = 0 means full precision). |
| CPE  | LOGIC     | AND, OR or XOR of rows `row` and `row2`. |

A mode-specific command issued in the wrong mode does nothing and raises
`err` for one cycle.

The associative write on a match is the primitive everything else in the
APE is built on. Because a rewritten row must not be matched again by a
later pattern of the same step, the ADD layout keeps a "done" column.

### 1.3 The CPE and the FeFET ADC

`fefet_adc` models the precision-scalable ADC made of N partially polarised
FeFETs on one data line.

- Each device is a comparator with its own programmable threshold.
- A device whose enable is low reads 0.
- Device 1 drives the MSB: four devices with an input between the second and
  third thresholds give `1100`.
- Turning off devices lowers the precision.

In `cpe_logic`, both rows are read at once, so a column carries 0, 1 or 2
cell currents of 16 units each. A two-device ADC with thresholds 24 and 8
decides the logic value:

- AND enables only the upper device (true when both cells conduct);
- OR enables only the lower device;
- XOR uses the lower device but not the upper one.

The MPE column ADC is written directly as a saturating counter (`mpe_mvm`),
not as a bank of `fefet_adc` instances. Its precision control (`prec`) plays
the part of disabling devices.

### 1.4 Tile instructions

A tile takes one `tile_instr_t` at a time through `instr_valid`/`instr_ready`.
It answers with a one-cycle `res_valid` pulse, together with `res_data`,
`res_sums`, `res_hit` and `res_err`. The `from_tile` bit makes the input MUX
take its operand from the neighbour tile's result buffer instead of from
`data`. In `amoeba`, tile i's neighbour is tile i−1, and tile 0's neighbour
is the `ext_data` port.

| opcode  | engine | operation | crossbar commands |
|---------|--------|-----------|-------------------|
| CFG     | –   | set the mode of crossbar `xb` | 1 |
| WRITE / READ | – | one row | 1 |
| LUT     | APE | search `data[31:0]` in the key field (bits 31:0) of rows whose valid bit (column 66) is set. Result: value field (bits 63:32) of the first hit, and `res_hit`. | 1 + read |
| ADD     | APE | B ← A + B in **all 64 rows at once**. A is bits 31:0, B is bits 63:32, carry is column 64 and done is column 65. | 1 + 9·32 |
| PRECODE | MPE | write the rotate-left-by-k permutation matrix. Row r gets a 1 in column (r+k) mod 32. | 64 |
| SHIFT   | MPE | rotate `data[31:0]` through the stored matrix, as one MVM at 1-bit precision | 1 |
| MVM     | MPE | column sums for input `data[63:0]` at precision `prec` | 1 |
| LOGIC   | CPE | `fn(row, row2)` | 1 |
| MUL     | APE `xb` + MPE `xb2` | 16 × 16 → 32-bit product by shift-and-add | see below |
| RNG     | TRG | next 32-bit random word | waits for 32 raw bits |

**Bit-serial associative ADD.** For bit i, the controller first clears the
done flag in every row. It then issues one search-and-write for each of the
8 combinations of (done = 0, carry, A_i, B_i). Each one writes the sum bit
into B_i, the carry-out into the carry column, and sets done. All rows are
added in parallel, so the latency does not depend on how many rows are in
use: 1 + 9·AW crossbar commands plus one result cycle. With AW = 32 that is
290 cycles, which the tile testbench checks.

**SHIFT as MVM.** Multiplying a one-bit vector by a permutation matrix
permutes it. With a one-bit ADC the column outputs are the rotated input.
Any cyclic rotation works once its matrix is pre-coded.

**MUL.** The operands are a = `data[15:0]` and b = `data[31:16]`. They are
placed in APE row `row`, with B cleared. For each bit of b:

1. if the bit is set, one associative ADD accumulates the current
   multiplicand into B;
2. the multiplicand is read out, rotated by one place through the MPE
   crossbar `xb2` (which must already hold the rotate-by-1 matrix), and
   written back.

ADD works on every row of `xb`, so the other rows of that crossbar are
scratch during MUL.

### 1.5 True random generator

Raw bits from the FeFET entropy source lean towards 0. `trg_tracker` counts
the ones in each 256-bit segment with an 8-bit counter, which saturates
because 256 needs a ninth bit. It then moves the 4-bit write-voltage code
`vw` for the next segment:

- one step up if fewer than 120 ones were seen;
- one step down if more than 136;
- unchanged otherwise.

`vw` resets to 8. Raw bits are also packed into 32-bit words for `OP_RNG`.

## 2. FRAC

### 2.1 Cells, states and capacity

A TLC cell has eight Vth positions, 0 (erased, label 111) to 7 (label 000).
An m-state FRAC cell uses m of them.

| m | positions used | read references |
|---|----------------|-----------------|
| 2 | 0, 4 | r3 |
| 3 | 0, 4, 7 | r3, r4 |
| 4 | 0, 2, 4, 6 | |
| 5 | 0, 2, 4, 6, 7 | |
| 6 | 0, 1, 2, 4, 6, 7 | |
| 7 | 0, 1, 2, 3, 4, 6, 7 | |
| 8 | all | r0…r6 |

Reference rj lies between positions j and j+1. The rows for 2, 3 and 8
states follow the published cell diagrams. Those for 4 to 7 spread the
states as evenly as eight positions allow.

A page has `PAGE_CELLS = 10922` cells, so a TLC page holds 32,766 bits
(4 KB) and a 2-state page 10,922 bits (1.3 KB). `FR_CFG` returns
floor(PAGE_CELLS/alpha)·floor(log2(m^alpha)). Some steps in between:

| m | alpha | bits per group | page bits |
|---|-------|----------------|-----------|
| 8 | 1  | 3  | 32,766 |
| 7 | 5  | 14 | 30,576 |
| 5 | 10 | 23 | 25,116 |
| 3 | 7  | 11 | 17,160 |
| 2 | 1  | 1  | 10,922 |

### 2.2 Codec

`frac_codec` translates between a data word and the states of a group.

- For two 3-state cells it uses the published 8-entry truth table. The
  ninth pattern (both cells at position 7) is invalid.
- For every other (m, alpha) it uses a base-m positional code, cell 0 the
  least significant digit. This takes alpha cycles: encoding divides by m
  once per cycle, and decoding uses Horner's rule.
- A decoded value of 2^bits or more sets `invalid`.

### 2.3 Read: binary search over the states

`frac_sense` senses all alpha cells of a group together, in exactly
ceil(log2 m) iterations.

- For a cell known to lie in states [lo, hi], it compares the boundary
  b = (lo+hi−1)/2 against that boundary's reference, then keeps [b+1, hi] or
  [lo, b].
- For a TLC this gives r3, then r5 or r1, then r0, r2, r4 or r6. For a
  3-state cell it gives r3, then r4.
- Every iteration is one `F_SENSE` request carrying one reference level per
  cell, answered by one "above" bit per cell.

### 2.4 Write: incremental step pulse programming

`frac_ispp` programs an erased group.

1. Each pulse carries an amplitude.
2. A verify follows each pulse, checking each cell against the verify level
   of its target position.
3. Cells that have arrived, and cells whose target is the erased state, are
   inhibited from further pulses.
4. The amplitude grows by `STEP` = 4 units per pulse, and the write fails
   after `MAX_PULSES` = 40.

An m-state cell with m < 8 skips the small first pulses of a TLC. Its first
amplitude is the verify level of its own state 1: position 4 for m = 2 or 3,
position 1 for a TLC. With the behavioural flash model, a TLC group needs
about 27 pulses and a 3-state group about 15. Fewer pulses per program is
the mechanism that lengthens endurance.

Vth is counted in 16 units per TLC position:

- read reference rj = 16(j+1) − 1;
- verify level of position p = 16p + 3.

### 2.5 Controller

`frac_ctrl` keeps (m, alpha) for each of 16 blocks. The table resets to
(8, 1) and lives in flops. It serves four requests:

- **FR_CFG**: set (m, alpha) and report the page capacity in bits. `err` is
  raised for an m or alpha out of range.
- **FR_WRITE**: encode, then program group `grp`. Reports `pulses` used, and
  `err` on a program failure.
- **FR_READ**: sense, then decode. Reports `iters`, and `err` for an invalid
  pattern.
- **FR_ERASE**: erase the block.

The flash side is one `flash_req_t` per request:

- fields: command, block, group, amplitude, per-cell inhibit and per-cell
  reference level;
- each request is a one-cycle pulse on `cmd`;
- the flash answers with `f_ack`, and with `f_gt` for senses.

## 3. Top-level ports

`sustain_dc_top` (parameter `N_TILE = 4`) exposes four port groups.

- **`a_*`**: Amoeba host port.
  - `a_instr_tile` selects the tile, and `a_instr_ready` is that tile's
    ready.
  - Results come back per tile, as arrays indexed by tile.
- **`trg_*`**: per tile, the raw bit from the entropy source in, and the
  write-voltage code out.
- **`f_*`**: FRAC host port.
- **`nand_*`**: FRAC flash port.

## 4. Where this departs from the published design, or goes beyond it

The published description gives the ideas and a few numbers. Everything
below is this design's own choice, or a place where it departs.

- **Sizes.** The crossbar size (64 × 128), the data width (32), four
  crossbars per tile, four tiles, the page size in cells and 16 blocks are
  not given and were chosen. Cells and inputs are one bit; multi-bit MVM is
  left to the host, one bit plane at a time.
- **Instruction set, row layouts, ADD/MUL schedules and handshakes** are
  this design's. The principle of each operation (search-based ADD,
  SHIFT as a pre-coded MVM, two-row logic via ADC levels, MUL from APE + MPE)
  follows the description.
- **Two-row logic example.** The description introduces the "both cells in
  the low-resistance state" rule with the words "take ADD as an example". It
  describes AND, and is built as AND. The OR and XOR sensing rules are this
  design's.
- **Cell-group capacities.** The text says ten 5-state cells and five 7-state
  cells store 16 bits each. Its own rule, floor(log2(m^alpha)), gives 23 and
  14 bits. The rule is followed.
- **The TRG tracking rule.** The ±8 dead band, one step per segment, a 4-bit
  voltage code and its reset value are chosen.
- **Nonvolatility of control state.** The crossbar cells have no reset, as
  nonvolatile cells would. The controllers, result buffers and the FRAC block
  table are ordinary flip-flops, so power-loss resumption of an instruction
  in flight is not modelled.
- **ADC.** The MPE column ADC is a saturating counter with a precision input.
  It is not a bank of the FeFET comparator model; only the CPE uses that
  model.
- **Not built:**
  - the FeFET entropy device and the NAND array, which are analog or physical
    parts and are ports here;
  - the sustainability estimator, which is host software (energy models and
    an LSTM predictor) with no hardware described;
  - dedicated units for Montgomery reduction, NOT, or rotations wider than
    the 32-bit PRECODE. Kernels build these from the existing instructions
    (section 5);
  - ECC and wear levelling for the flash.

## 5. The evaluated kernels on a tile

Three testbenches run the accelerator's benchmark kernels on one tile, with
the host holding intermediate values between instructions. Each checks the
result against plain integer arithmetic.

**NTT: Montgomery multiplication** (`tb_ntt_montgomery`). It uses
q = 12289, R = 2^16 and q' = −q⁻¹ mod R. Each step maps to tile
instructions:

- t = a·b: MUL;
- m = (t·q') mod R: MUL, then a CPE AND with 0xFFFF;
- s = t + m·q: MUL, then **one** associative ADD for a batch of 16 pairs, one
  pair per row;
- u = s/R: SHIFT (rotate by 16) on the same crossbar, reconfigured from CPE
  to MPE;
- the final conditional subtraction of q: a second batch ADD with −q, whose
  sign bit decides.

This takes about 6,800 cycles per product, almost all of it in the three
bit-serial MULs.

**SHA3: Keccak-f[1600]** (`tb_sha3_keccak`). All 24 rounds on the 25-lane
state run on the tile:

- θ, χ and ι run as CPE XOR and AND. The NOT-AND of χ is written as
  (a ⊕ b) ∧ b, because the CPE has no NOT.
- ρ and π are 64-bit rotations. Each is an MVM through a 64 × 64 permutation
  matrix, written row by row, at 1-bit ADC precision.

This takes about 7,800 cycles per round. The result on the zero state
matches the published first lane F1258F7940E1DDE7.

**Convolution** (`tb_conv_mvm`). One window of 64 inputs is computed for 128
output channels, with 4-bit weights and 4-bit activations:

- each crossbar holds one weight bit plane;
- activations are applied one bit plane at a time;
- 16 one-bit MVMs, combined by shifts, give each output: 64 cycles per
  window position.

Capacity against the full benchmark sizes:

- **32k-point NTT.** At 14 bits per coefficient it needs 458,752 bits. The
  four tiles hold 131,072 cell bits, so the vector must be streamed.
- **SHA3.** The 1600-bit state fits in one crossbar.
- **AlexNet.** About 61 M weights must be reloaded layer by layer.
- **FRAC.** The page-size range (4 KB to 1.3 KB) and the published cell
  groups are all supported.

## 6. Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Two behavioural models
stand in for external parts:

- `tb/fefet_entropy_model.sv`: P(1) = 10 + 4·vw percent;
- `tb/nand_flash_model.sv`:
  - erase leaves a random Vth of 0 to 8 units;
  - a pulse raises Vth towards its amplitude with random spread;
  - a sense compares with the reference.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/amoeba_pkg.sv rtl/frac_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
    tb/nand_flash_model.sv \
    tb/fefet_entropy_model.sv tb/tb_sustain_dc_top.sv \
    --top-module tb_sustain_dc_top -o sim
./obj_dir/sim
```

Replace the testbench and top-module name to run another one. The packages
must come first on the command line.

`tb_sustain_dc_top` runs the whole design at its default parameters. It
takes about a minute. It does the following:

- switches crossbar modes;
- runs MUL, ADD, SHIFT, LUT hits and misses, MVM with and without ADC
  saturation, AND/OR/XOR and a wrong-mode refusal;
- passes a result from one tile to the next;
- reads random words while the TRG adjusts its voltage;
- steps one flash block through m = 8, 7, 5, 3, 2, writing and reading
  groups back at each step.

Each of these mechanisms is counted, and one that never happens counts as a
failure. At each step the testbench also checks the page capacity, and that
programming needs no more pulses (within two) as the number of states
drops.
