# PISA in SystemVerilog: a binary-weight image sensor with a DRAM compute unit beside it

## The idea

An always-on camera that looks for something spends most of its energy turning
every pixel into a number and moving those numbers to a processor, even though
nearly every frame holds nothing of interest. PISA avoids this by doing the
first layer of a binary-weight neural network (BWNN) *inside the pixel array*,
in the analog domain:

* Every pixel carries `V` one-bit weights stored in non-volatile cells (STT-MRAM).
* In *processing mode*, each pixel pushes a current proportional to its
  photodiode voltage onto each of `V` shared wires, the compute bit-lines
  (CBLs). The sign of that current is `+` when the weight is 1 and `-` when it
  is 0.
* Each wire therefore carries the sum over all pixels of `±pixel`, which is a
  full dot product. A sense amplifier per wire keeps only its sign, which is
  the binary activation.
* The whole array computes at once (a global shutter). There is no ADC and no
  pixel readout. Only `V` bits per frame leave the sensor.

The remaining layers run in a near-sensor *processing-in-DRAM* unit (PNS). Its
sub-arrays compute a bit-wise AND of two whole rows in one memory cycle. They
do it by opening two rows at once (dual-row activation, DRA) and sensing the
shared charge with an inverter whose switching point sits at 3/4 of the supply.
A single digital unit, the DPU, turns those AND rows into multi-bit dot
products:

    sum_{n,m} 2^(n+m) * popcount( W_bitplane_n AND I_bitplane_m )

When the coarse network flags an object, the sensor switches to ordinary
rolling-shutter *sensing mode*. The full image is then read out with correlated
double sampling (CDS), quantised, and convolved at higher precision in the same
DRAM unit.

The RTL reproduces this flow cycle by cycle. The analog parts are replaced by
integer models that keep their logic: signed current sums, the sign decision at
the falling edge of the sense-amplifier clock, and the charge-sharing
threshold.

## Block map

```
pisa_top
 ├─ pisa_array                 the sensor
 │   ├─ cmd_decoder            commands: write weight / processing frame / sensing frame
 │   ├─ sensor_timing_ctrl     frame sequencer (both modes)
 │   ├─ row_ctrl               R_i, CR and per-row reset
 │   ├─ cfp                    M x N compute focal plane
 │   │   ├─ compute_pixel      (M*N)  photodiode + V weight bits + V current steering add-ons
 │   │   └─ cbl_sense_amp      (V)    sign of each compute bit-line
 │   ├─ sensor_io              CDS: k1/C1, k2/C2, output V1 - V2
 │   └─ col_ctrl               column scan of one row
 ├─ bus_fabric                 activations / pixels -> bit-planes in DRAM rows
 └─ pns                        near-sensor processing in DRAM
     ├─ dram_subarray (NSUB)   512 rows x COLS
     │   ├─ mrd                decoder of the 12 compute rows (dual activation)
     │   └─ recon_sa           reconfigurable sense amplifier (memory / NAND-AND mode)
     ├─ lrb (NSUB/2)           local row buffer shared by a pair of sub-arrays
     ├─ pns_ctrl               job sequencer
     └─ dpu                    quantiser, bit_counter, shifter, accumulators, BN, activation
```

`pisa_pkg` holds the shared types: commands, modes, DRAM operations, the job
descriptor `pns_job_t`, and the fixed row split of a sub-array.

## The compute focal plane

### Pixel model (`compute_pixel`)

The photodiode voltage is an unsigned `PIX_W`-bit code (8 bits by default).

* A reset (`rst_pix`) precharges it to full scale, all ones.
* Each clock with `expose` high subtracts the light code, saturating at zero.
  A brighter pixel therefore ends with a *lower* code, as a discharging
  photodiode would.
* With `cr` high, the pixel drives `+vpd` on CBL `x` if weight bit `x` is 1,
  and `-vpd` if it is 0. With `cr` low it drives nothing.
* With `row_sel` (R_i) high, it drives its voltage on the column's sense
  bit-line.
* The weight bits have no reset, as in a non-volatile cell. They are written
  one at a time through `w_we/w_idx/w_val`.

### Summing and sensing (`cfp`, `cbl_sense_amp`)

`cfp` sums the signed pixel contributions of every CBL exactly. The sum is
`PIX_W+2+clog2(M*N)` bits wide, which is 24 bits at 128x128.

* `cbl_sense_amp` compares the sum with a reference `iref`, which plays the
  role of the reference branch.
* It decides on the *falling* edge of `sa_clk`. The high phase is precharge and
  the low phase is sensing.
* `sa_clk` is a control signal sampled by the system clock, not a second clock
  domain.
* A tie gives 0.

The test of this block uses the six currents printed in the paper's 4x4 example
(32, -95, -37, -29, 39, -126 µA). It expects the printed outputs 1, 0, 0, 0, 1, 0.

Every pixel is connected to every CBL. The whole focal plane is one receptive
field per CBL, so one processing frame produces `V` activations. How a
convolution with small kernels is tiled onto the CBLs is not described in
enough detail to build, so it is not hard-wired.

The column sense bit-line is the OR of the row-gated pixel outputs. Two
assertions guard it:

* at most one row is selected;
* CR and a row select are never active together.

### Frame timing (`sensor_timing_ctrl`, `row_ctrl`, `col_ctrl`, `sensor_io`)

| frame | sequence | clocks |
|---|---|---|
| processing | global reset, gap, `EXP` exposure clocks with CR on, one sensing clock with `sa_clk` low, end | `EXP + 4` |
| sensing, per row | row reset, gap, k1 sample (2), `EXP` exposure, k2 sample (2), column scan of `N` pixels (+1) | `EXP + 7 + N` |
| sensing, whole frame | rows one after another | `M*(EXP + 7 + N)` |

More on the two modes:

* **Processing frame.** CR is raised during exposure and sensing. The sign
  decision is therefore made on the voltages reached at the end of exposure.
  From an accepted `CMD_PROCESS` to `act_valid`, `pisa_array` takes `EXP + 5`
  clocks.
* **Sensing frame.** CR is held low the whole time.
* **CDS.** `sensor_io` samples the reset level on k1 (C1) and the exposed level
  on k2 (C2). It outputs `V1 - V2`, which grows with light.
* **Pixel stream.** `col_ctrl` streams out one pixel per clock, with its row and
  column numbers.

Rows are exposed one after another and never overlap. This is the simplest
rolling shutter. It is slower than an overlapped one.

`EXP` is a free parameter. The paper gives times, not clock counts: roughly
100 µs per computation and 1000 frames/s.

## The DRAM compute unit

### Sub-array and DRA (`dram_subarray`, `mrd`, `recon_sa`)

Each sub-array has 512 rows of `COLS` = 256 cells:

* rows 0..499 are data rows, on the ordinary decoder;
* rows 500..511 are compute rows, on the modified decoder `mrd`, which can
  raise two word-lines at once.

The sense amplifier model counts the charge that reaches the bit-line in
quarters of Vdd:

* one row open: `q = 4*cell`;
* two rows open: `q = 2*(a+b)`.

In memory mode the bit-line resolves to `q > 2` (above half supply).

In logic mode the high-threshold inverter gives `nand = !(q > 3)`, that is, it
trips only when both cells are 1. The bit-line resolves to `!nand`. That value
is AND2, and it is written back into *both* opened cells. This matches the
paper's three printed cases:

| (Di, Dj) | NAND2 | cells afterwards |
|---|---|---|
| (0, 0) | 1 | 0, 0 |
| (1, 0) | 1 | 0, 0 |
| (1, 1) | 0 | 1, 1 |

Operations all take one clock, selected by `dram_op_e`:

| operation | effect |
|---|---|
| `OP_READ` | latch a row |
| `OP_WRITE` | write a row |
| `OP_WBIT` | write one cell |
| `OP_COPY` | row to row, in place |
| `OP_DRA` | AND of two compute rows |

A DRA is destructive. Operands are therefore first copied from data rows into
compute rows X1 (row 500) and X2 (row 501). The latches `rdata` and `rnand`
hold the last sensed row.

### Job sequencing (`pns_ctrl`, `dpu`, `lrb`, `pns`)

A job (`pns_job_t`) gives:

* weight and input bit-plane bases `w_row` / `i_row`, and their widths
  `w_bits` / `i_bits` (1..32);
* where to put the result: `out_row`, `out_col`, `out_bits`;
* batch-norm scale, bias and shift;
* the activation: sign, or clipped ReLU over `out_bits`.

All sub-arrays run the same job in lock-step, each on its own data. For every
pair (n, m), the controller issues:

1. COPY weight plane n to X1, in every sub-array;
2. COPY input plane m to X2, in every sub-array;
3. DRA, in every sub-array;
4. for each sub-array in turn:
   * load its row into the LRB it shares with its neighbour;
   * the DPU adds `popcount(row) << (n+m)` into that sub-array's accumulator.

After all pairs, each accumulator goes through the activation:

* batch norm `(acc*scale + bias) >>> shift`;
* then sign or clipped ReLU.

The result is written back bit by bit: bit b goes to row `out_row+b`, column
`out_col`, of the same sub-array. Each sub-array thus produces one output
element per job, and the outputs stay in DRAM as bit-planes, ready to be the
next layer's input. A job takes

    2 + w_bits*i_bits*(3 + 2*NSUB) + NSUB*out_bits   clocks.

At the full 4096 sub-arrays the single shared DPU dominates this time: DRA is
parallel, but bit-counting is serial. This is the direct result of the paper's
"one DPU for the whole array". A faster variant would give each LRB its own
bit-counter.

The DPU's quantiser (`q_in`, `q_bits`, `q_out`) keeps the top `q_bits` bits of a
pixel code. `pisa_top` uses it on the sensing-mode pixel stream.

`pns` also has a host port (`h_*`) that issues any single sub-array operation
while no job is running. It is how weight bit-planes are loaded and results
read back. The paper does not say how layer 2..last weights arrive.

### Bus fabric (`bus_fabric`)

The bus fabric collects a stream of `nbits`-wide elements, COLS at a time.

* It transposes each batch into `nbits` bit-planes and writes them to rows
  `base_row + b` of one sub-array, then moves on to the next sub-array.
* One row write takes one clock, so a full buffer costs `nbits` clocks.
* Elements offered in that time are dropped and counted in `overruns`.

In sensing mode each row scan is followed by `EXP + 7` idle clocks. The
fine-grained precision must therefore stay at `nbits <= EXP + 7` bits.

## Whole system (`pisa_top`)

One `run`:

1. A processing frame produces the `V` first-layer activations.
2. They are written as a 1-bit plane to sub-array 0 at `coarse_job.i_row`, and
   `coarse_job` runs.
3. Bit 0 of sub-array 0's result is the detection flag (`detected`,
   `res_coarse`).
4. If it is 0 the run ends, and the sensor stays in processing mode.
5. Otherwise the array runs a sensing frame. Pixels are quantised to
   `fine_job.i_bits` and stored as bit-planes, COLS pixels per sub-array, at
   `fine_job.i_row`. Then `fine_job` runs and `res_fine` is produced.

`run_done` pulses at the end of the run. NVM weights and the PNS host port are
honoured only while the top is idle.

## Where this departs from the paper, and what it leaves out

* **Rows per sub-array.** The architecture section splits a sub-array into
  500 data rows plus 12 compute rows, 512 in all. The evaluation section
  configures 1024 rows. The RTL uses 512, the figure that comes with a row
  split. `ROWS`/`DROWS` are parameters.
* **Analog behaviour is idealised.** The photodiode discharges linearly. CBL
  summation is exact, with no IR drop, mismatch or transistor nonlinearity.
  Sense-amplifier offset is zero. Charge sharing is modelled by the exact
  quarter-Vdd count.
* **Not modelled:**
  * the STT-MRAM write driver, beyond its address decode;
  * the photodiode/MTJ devices;
  * any ADC;
  * the H-tree between mats;
  * more than one memory group;
  * mapping of kernels onto the focal plane;
  * DRAM refresh.
* **Own choices.** These follow common practice where the paper names a block
  but does not describe it:
  * the command set and handshakes;
  * quantisation by truncation;
  * the BN arithmetic;
  * the bit-plane write-back layout;
  * the detection rule;
  * one job per phase in the top.
* **Reset.** All control state resets asynchronously on `rst_n` (active low).
  DRAM cells and NVM weights do not reset.

## Sizes, parameters and simulation

All parameter defaults are the paper's configuration. The exception is `EXP`,
which is this design's own.

| parameter | default | meaning |
|---|---|---|
| `M`, `N` | 128 | focal plane rows and columns |
| `V` | 8 | weights per pixel, which equals the number of CBLs |
| `EXP` | 16 | exposure length in clocks |
| `N_BANKS` | 256 | 16x16 banks |
| `MATS` | 16 | 4x4 mats per bank, each mat one sub-array |
| `ROWS` / `DROWS` | 512 / 500 | rows per sub-array / data rows |
| `COLS` | 256 | columns per sub-array |
| `ACC_W` | 48 | DPU accumulator width |

At the defaults the DRAM unit holds 4096 sub-arrays of 512x256 bits, 64 MiB.
This is too large to simulate in reasonable time. No testbench runs the top at
its defaults. The largest configurations simulated are:

* `tb_dram_subarray`: one full 512x256 sub-array;
* `tb_pns`: 4 sub-arrays of 512x256 (2 banks x 2 mats), with jobs at W:I = 1:4,
  1:8, 1:32, 2:2 and 3:3;
* `tb_pisa_array`: a 4x4 focal plane with V = 8, the size of the paper's
  circuit-level example;
* `tb_pisa_top`: a 4x4 focal plane with V = 8, plus 2 sub-arrays of 512x16.

`tb_pisa_top` runs five complete runs with and without detection. It counts:

* processing frames;
* sensing frames;
* mode switches;
* detect and no-detect runs;
* row copies;
* DRAs;
* bus writes;
* write-backs.

It fails if any of these never happened. Its expected results come from a
direct software model of the same arithmetic.

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each ends by
printing `TB_RESULT checks=<n> failures=<n>` and has a watchdog. To run one
with plain Verilator (the package goes first):

```
verilator --binary --timing --assert -j 8 --top-module tb_pns \
    rtl/pisa_pkg.sv $(ls rtl/*.sv | grep -v pisa_pkg) tb/tb_pns.sv
./obj_dir/Vtb_pns
```

Verilator is a two-state simulator. Every register read by the logic has a
reset. The testbenches initialise what the design deliberately leaves
unreset: DRAM cells and NVM weights.

Known lint notes:

* `pns` indexes the LRB array with `c_sub >> 1`, whose width is one bit wider
  than the index. The top bit is always zero.
* The full-size sensor generates a large C++ model: about 300 MB for the
  128x128 focal plane. This is a matter of build time, not correctness.
