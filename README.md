# FeFET compute-in-memory Ising machine with light simulated bifurcation

This design solves small combinatorial optimisation problems, such as Max-Cut,
by finding low-energy states of an Ising model. The spins σᵢ ∈ {−1, +1} are
coupled by a signed matrix J. For Max-Cut with edge weights W, J = −W: a
low-energy state puts strongly connected nodes on opposite sides of the cut.

All the heavy arithmetic is done inside a memory array. J is stored once in a
32 × 256 crossbar of ferroelectric FET (FeFET) cells, built in the
back-end-of-line above the logic. The array computes two kinds of products
directly, as summed cell currents on its columns:

* a **vector–matrix–vector product** (VMV), E = xᵀ J y, which returns one scalar;
* a **vector–matrix product** (VMM), E = J x, which returns a vector.

The solver runs in two steps. Both use the same stored J.

1. **Attention-inspired initialisation.** For every spin i, one VMV gives the
   score Sᵢ. Spins scoring at or above the mean start at +1 and the rest at −1.
2. **Light simulated bifurcation (light SB).** This is a cut-down form of the
   SB algorithm, where each spin has a position X and a momentum Y. Here X
   and Y are ternary {−1, 0, +1} and there is no cubic term. Each iteration
   needs one ternary VMM. The array computes that as two binary passes, which
   are then subtracted.

The RTL is written in SystemVerilog. The controllers, encoders, accumulators
and the test interface are synthesizable. The FeFET array and the ADCs are
analog parts, so they are given as behavioural models with the real parts'
interfaces.

## The crossbar and how J is stored in it

The array has 32 rows (word lines, WL) and 256 columns. Each column has a bit
line (BL) and a source line (SL).

* The word line drives the FeFET **gate** and carries the input x.
* The bit line drives the **drain** and carries the input y.
* The source line collects the column current.

A cell holds one bit J_cell as its threshold voltage: a low threshold means 1,
a high threshold means 0. It conducts only when its word line is at read bias,
its bit line is at read bias, and it stores 1. So each cell computes x·J·y, and
each column current is the sum of those products. `cim_array` models this with
a fixed current per conducting cell (`I_CELL_NA`, 130 nA by default).

**Coding a signed weight into 8 cells.** Each J element uses M_BITS = 8
adjacent columns of its row, so 32 × 32 elements fill the 32 × 256 array. The
default coding is a signed thermometer code:

| column slot | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| cell is 1 when | J ≥ 1 | J ≥ 2 | J ≥ 3 | J ≥ 4 | J ≤ −1 | J ≤ −2 | J ≤ −3 | J ≤ −4 |
| weight in the sum | +1 | +1 | +1 | +1 | −1 | −1 | −1 | −1 |

This covers the integer weights −4 … +4. The shift-and-add stage applies each
slot's weight digitally. Setting `ENC = ENC_BINARY` selects an alternative
8-bit two's-complement coding instead: slot b has weight 2ᵇ and slot 7 is
negative. The thermometer coding needs no shifts, and with it every ADC only
has to count cells.

**Programming.** A cell is written by a gate pulse on its row:

* +4 V for 1 µs writes a 1;
* −4 V for 1 µs writes a 0.

The model counts the pulse in clock cycles (`PROG_CYCLES` = 100, that is 1 µs
at 100 MHz). It writes only the cell whose bit line is selected for
programming. Unselected bit lines are taken to inhibit the write. This design
writes one cell at a time, so loading one element takes 8 × 101 cycles and
loading the full 32 × 32 matrix takes about 0.83 M cycles (8.3 ms). Cells
power up unknown, so every element must be written once, zeros included.

## One operation through the array

`cim_core` wires the datapath in this order:

```
input_encoder → wl_driver / bl_driver → cim_array → col_mux → adc → shift_add → output_stage
```

**Input encoder.** The encoder forms the word-line vector and the bit-line
vector for each operation:

| operation | word lines (x) | bit lines (y), one bit per element repeated over its 8 columns |
|---|---|---|
| VMV, attention score | Qᵢ | Vᵢ |
| VMM, positive phase | 1 where Xⱼ = +1 | all ones |
| VMM, negative phase | 1 where Xⱼ = −1 | all ones |

**Conversion.** There are 32 column multiplexers and 32 ADCs, one of each per
element column group. In a phase, the mux select walks through slots 0 to 7.
On each step all 32 ADCs convert in parallel. An ADC returns the column
current divided by the cell current, rounded and saturated at 6 bits. That
number is the count of conducting cells in the column, 0 to 32.

**Accumulation.** Each `shift_add` keeps a partial sum for its group. On each
step it adds or subtracts the code, shifted by the slot's weight. After the
8 slots, partial sum g holds Σᵣ xᵣ · J[r][g] · y_g.

**Output.**

* For a VMV, `output_stage` adds the 32 partial sums into the scalar E.
* For a VMM, it keeps the positive-phase sums. It then returns their
  difference from the negative-phase sums, E_g = (J x⁺)_g − (J x⁻)_g, which is
  exactly (J X)_g for ternary X.

Because J is symmetric, (J X)_g is also Σⱼ Xⱼ J[j][g], the column-oriented sum
that the array actually forms.

**Timing** (clock edges from the accepting edge to `done`):

| phase | cycles |
|---|---|
| clear the partial sums | 1 |
| 8 mux steps with ADC conversions | 8 |
| accumulate the last code | 1 |
| latch the output | 1 |
| **VMV (one phase)** | **11** |
| **VMM (two phases)** | **22** |

A new request may be issued in the same cycle as `done`.

## Attention-inspired initialisation

This step borrows the query/key/value pattern of transformer attention. It
takes K = J and, for spin i, forms two vectors:

* Qᵢ[j] = 1 where K[j][i] = 0, i.e. nodes *not* connected to i;
* Vᵢ[k] = 1 where K[k][i] ≠ 0, i.e. the neighbours of i.

The score is Sᵢ = Qᵢᵀ K Vᵢ. It sums the couplings between i's neighbours and
the nodes that are not its neighbours. `qkv_gen` keeps the connection pattern
(one bit per element, written while J is loaded) and produces Qᵢ and Vᵢ for
any index. `attention_init` runs the 32 VMVs one after another and stores each
score and their total. It then sets all the spins at once:

σᵢ = +1 if 32·Sᵢ ≥ ΣS, else −1.

This is the "at or above the mean" rule without a division, and it is exact.

## Light simulated bifurcation

Each spin has a position Xᵢ and a momentum Yᵢ, both ternary. Each iteration
does the following:

1. Get JX from the array (one two-phase VMM, 22 cycles).
2. Update every spin in parallel, in one cycle:

   ```
   Yᵢ ← T( Yᵢ − (Δ − p)·Xᵢ + ζ·(JX)ᵢ )
   Xᵢ ← T( Xᵢ + Δ·Yᵢ )          (using the new Yᵢ)
   ```

3. Raise p by one step (`sb_param_update`). p starts at 0 and is held at Δ
   once it reaches Δ.

The quantiser T rounds to the nearest value in {−1, 0, +1}: values ≥ +0.5 map
to +1 and values ≤ −0.5 map to −1. Because the result stays in [−1, 1],
T also replaces the position walls of ordinary SB.

**The arithmetic is fixed point.** Values are Q8, with 8 fractional bits:

* Δ = 256, i.e. 1.0;
* ζ = 26, i.e. ≈ 0.10;
* p rises by Δ/20 = 12 per iteration.

With ternary X and Y, each product is a sign selection, and ζ·(JX)ᵢ is the
only real multiply. JX is at most 32 × 4 × 1 in magnitude.

**Start and end state.**

* The engine starts from X = σ_init (±1) and Y = 0.
* After `ITERS` = 20 iterations it outputs σᵢ = sign(Xᵢ).
* Where Xᵢ = 0, σᵢ keeps its last value.

One iteration takes 25 cycles.

**Why it stays in hardware.** The update needs only the ternary VMM, adds,
and one constant multiply per spin. The cubic term and full-precision
positions of the original algorithm are gone. That trades a few percent of
solution quality for an array-friendly loop.

## Top level and host interface

`fefet_ising_machine` holds the array (through `cim_core`), `qkv_gen`,
`attention_init`, `light_sb` and `spi_scan`. A small state machine, with
states IDLE → LOAD → INIT → SB → DONE, decides which controller owns the core.

| port | use |
|---|---|
| `j_we`, `j_row`, `j_col`, `j_val` | while `j_ready` is high, write one element (−4 … 4); it is programmed into 8 cells and its connection bit is stored |
| `start` | while `j_ready` is high, runs initialisation and then light SB |
| `busy`, `done` | `done` pulses once the results are valid |
| `init_sigma`, `sigma` | initial and final spins; bit = 1 means spin +1 |
| `iter` | number of light-SB iterations run |
| `spi_*`, `test_code` | test access, described below |

A full solve at the default size takes **920 cycles**:

* initialisation, 418 cycles: 32 scores of 13 cycles each (request, the
  11-cycle VMV, store), plus 2;
* light SB, 501 cycles: 20 iterations of 25 cycles each (request, the
  22-cycle VMM, update, parameter step), plus 1;
* 1 handover cycle.

At an assumed 100 MHz clock that is 9.2 µs.

## Scan-chain test access over SPI

`spi_scan` is an SPI slave (mode 0) feeding a 292-bit scan chain. It lets a
tester take over the array when it is idle and read any set of cells:

| bits | field |
|---|---|
| 291 | `test_en`: hand the array to the chain |
| 290:288 | mux slot read by the ADCs |
| 287:256 | word lines at read bias (bit r is row r) |
| 255:0 | bit lines at read bias (bit c is column c) |

**Sending a frame.** The frame is sent most significant bit first. When
chip select rises, the chain contents become active. While `test_en` is set,
`test_code` shows all 32 ADC codes, refreshed every cycle, and `j_ready` is
low. Sending a frame with `test_en` = 0 releases the array.

**Reading back.** MISO returns the previous frame, so the chain itself can
be checked.

**Clocking.** The SPI pins are synchronised into the system clock. The system
clock must therefore be at least 4× the SPI clock.

## How far to trust it, and where it departs from the published design

Followed closely:

* The array size: 32 × 256, with 8 cells per element.
* Programming: ±4 V pulses of 1 µs.
* The VMV and two-phase ternary VMM modes, and the chain of datapath units.
* The definitions of Q, K, V and the mean threshold.
* The light-SB update, with ternary X and Y, no cubic term, and p ramped
  from 0 to Δ.
* 20 iterations.
* SPI and scan-chain test access.

This design's own choices (the source is silent on each):

* the split of the 8 cells into positive and negative thermometer halves;
* the 100 MHz clock;
* the cell current, and the 6-bit ADC with one-cycle conversion;
* one mux and ADC per 8 columns;
* Δ and ζ (the source only says they follow the original SB work);
* the rounding thresholds of the quantiser;
* the initial momentum Y = 0;
* writing cells one at a time, and the write-inhibit scheme;
* the SPI frame format.

Resolved inconsistencies in the source:

* **The low initial state.** The score rule writes it as 0 in one place and as
  −1 in another. Here it is −1 (bit 0 means spin −1).
* **Where Q and V are applied.** The source puts Q and V on different lines in
  different places. Here Qᵢ goes on the word lines and Vᵢ on the bit lines, as
  the index order of the score formula suggests. For symmetric J every
  placement gives the same score.
* **The signal on the drain lines.** The second input is applied to the
  drains (bit lines), as in the block diagram, not to the source lines.
* **Weighted versus pattern scoring.** The score uses the stored signed
  weights K = J. The source also describes the score as if K were the 0/1
  connection pattern.

Known differences:

* **Latency.** The source reports convergence within 900 ns on its
  32-node demonstration. Its time plot puts initialisation at about 140 ns
  and the 20 iterations in the remaining ~760 ns. This design needs 920 cycles, which is 9.2 µs at
  100 MHz. The gap comes mostly from converting 8 columns through each ADC, one
  after another, and from running the 32 scores in sequence. Fewer columns per
  ADC or a faster clock would close it. Both are parameters of the analog
  front end that the source does not give.
* **An ideal array.** The array model has no device variation, no read or
  write disturb, and no ADC noise. Results match the exact integer arithmetic
  bit for bit. The measured chip shows small deviations.
* **Problem size.** Only problems of up to 32 nodes with weights in −4 … 4
  fit. Larger benchmarks (2000-node K2000, and the Gset and Yset graphs with
  thousands to 100,000 nodes) would need arrays of N × 8N cells. These were
  studied in the source only on a modelled scaled-up crossbar.
* **Not built.** The FeFET device itself, the board-level microcontroller,
  DACs and level shifters, and the pad ring are not part of the RTL. The host
  role (loading J, pulsing `start`) is left to whatever drives the top-level
  ports.

## Files

| file | contents |
|---|---|
| `rtl/ising_pkg.sv` | sizes, drive-level enums, ternary type, J encoding and quantiser functions |
| `rtl/cim_array.sv` | behavioural FeFET crossbar (cell storage, program pulses, column currents) |
| `rtl/wl_driver.sv`, `rtl/bl_driver.sv` | word-line and bit-line levels for read and program |
| `rtl/col_mux.sv`, `rtl/adc.sv` | column multiplexers, behavioural ADC |
| `rtl/shift_add.sv`, `rtl/output_stage.sv` | partial sums, VMV/VMM result formation |
| `rtl/input_encoder.sv` | WL/BL vectors for VMV and both VMM phases |
| `rtl/cim_core.sv` | CiM macro with program / compute / test sequencer |
| `rtl/qkv_gen.sv`, `rtl/attention_init.sv` | attention-inspired initialisation |
| `rtl/sb_param_update.sv`, `rtl/light_sb.sv` | light simulated bifurcation |
| `rtl/spi_scan.sv` | SPI slave and scan chain |
| `rtl/fefet_ising_machine.sv` | top level |
| `tb/<module>_tb.sv` | one self-checking testbench per module |

Every testbench compares the block against an independent model. It prints
`TB_RESULT checks=… failures=…` and stops itself through a watchdog if the
block hangs.

`tb/fefet_ising_machine_tb.sv` runs the whole machine at its default size (no
parameter overrides). It does the following:

* Loads two random 32-node Max-Cut problems shaped like the demonstration
  (about 10 % edge density, weights ±1 … ±4).
* Checks the initial and final spins against a reference written in the
  testbench.
* Checks the 100-cycle program pulse and the SPI read-out of cells.
* Counts each mechanism: writing 1s and 0s, VMV, both VMM phases, zero
  inputs, the mode switches, and test access.

It takes about 4 s of simulation.

## Simulating

Use Verilator 5. Compile the package first:

```
verilator --binary --timing --assert -Irtl rtl/ising_pkg.sv \
    $(ls rtl/*.sv | grep -v ising_pkg) tb/fefet_ising_machine_tb.sv \
    --top-module fefet_ising_machine_tb
./obj_dir/Vfefet_ising_machine_tb
```

For a single block, list the package, the block and the modules it
instantiates, then its testbench. For example:

```
verilator --binary --timing --assert -Irtl rtl/ising_pkg.sv rtl/adc.sv tb/adc_tb.sv --top-module adc_tb
```

Sizes can be changed through the top-level parameters:

* `N`: spins. The array becomes N × 8N.
* `PROG_CYCLES`: the program pulse length.
* `ITERS`: light-SB iterations.

The SB constants can be changed through `light_sb`'s parameters. The unit
testbenches shorten `PROG_CYCLES` to keep their runs quick.
