# GRAMC — a reconfigurable analog matrix computer with on-chip write-verify

Analog in-memory matrix computing stores a matrix as conductances in a resistive
crosspoint array and solves a matrix problem in one physical step. The array is wired to a
column of operational amplifiers, and the wiring decides what is computed. With the array
at the amplifier inputs and resistive feedback (TIAs), the output is a matrix-vector product.
With the array in the amplifier feedback path, the circuit settles to the solution of a
linear system. Adding a second stage and inverters gives a least-squares solution or an
eigenvector. Earlier circuits each fixed one of these wirings.

GRAMC fixes none. Transmission gates controlled by a per-macro register array choose the
wiring, so the same RRAM array and amplifiers compute any of four functions:

| mode | function | region of the array |
|------|----------|---------------------|
| MVM  | y = G x | rows x cols, any shape |
| INV  | solve G y = x | square |
| PINV | y = (GᵀG)⁻¹ Gᵀ x, least squares | rows ≥ cols |
| EGV  | dominant eigenvector of G, unit norm | square |

A digital control module surrounds a group of 16 such macros. It runs a small program that
does three things: it programs matrices into the arrays by write-verify, it reconfigures
the macros and feeds them vectors, and it post-processes the results. The post-processing
covers activation, pooling and recombination of bit-sliced weights, which is enough to run
a neural network such as LeNet-5 as well as matrix-equation solvers.

This repository gives RTL for the digital part and a behavioural model of the analog macro.
The sizes come from the GRAMC architecture: 16 macros, 128 × 128 one-transistor-one-resistor
(1T1R) arrays, and 16 conductance levels (4 bits) spanning 1–100 µS. The instruction set,
word widths, handshakes and converter resolutions are this design's own.

## System structure

```
            host: load program / load global buffer / start / read results
                 |                      |                          ^
        +--------v-------+     +--------v--------+        +--------+--------+
        | instr_stack    |     | global_buffer   |        | output_buffer   |
        |  (64-bit words)|     | ideal levels,   |        | ADC results     |
        +--------+-------+     | input vectors   |        +--^---------^----+
     prog_counter|             +---+---------+---+           |         |
        +--------v-------+         |         |               |   +-----+------+
        | decoder        |         |         |               |   | func_unit  |
        +--------+-------+         |         |               |   | ReLU, pool,|
        +--------v-------------------------------------------+   | slice, +/- |
        | controller: CFG / WV / SOLVE / FUNC / HALT          |   +------------+
        +---+----------------+---------------------+----------+
            | WV start       | vectors, start      | cfg write
        +---v-----------+    |                     |
        | wv_ctrl       |    |                     |
        |  + comparison |    |                     |
        |    unit (CU)  |    |                     |
        +---+-----------+    |                     |
            | read / pulse   |                     |
        +---v----------------v---------------------v----------+
        | macro_group: 16 x amc_macro, one addressed by `sel`  |
        |   amc_macro = reg_array (RTL) + RRAM array, drivers, |
        |   DAC, transmission gates, OPAs, ADC (behavioural)   |
        +-------------------------------------------------------+
```

There are two data paths. Only one is active at a time, and it works on one macro.

* **Write-verify path.** It reads ideal levels from the global buffer. For each cell of
  the active region it reads the cell back through the ADC, compares the level in the
  comparison unit, and applies a SET or RESET pulse. It repeats this until the cell is
  within the error range or its pulse budget is spent.
* **System-solution path.** The input vector goes from the global buffer into the DAC
  register. The macro computes in its configured mode. The ADC results go to the output
  buffer, where the functional module can process them further.

## The AMC macro model (`amc_macro`)

Everything inside a macro except its register array is analog. `amc_macro.sv` therefore
models its behaviour with `real` arithmetic. It compiles with Verilator and Slang, but it is
not synthesizable. Read this section to know what the model does and does not represent.

**Conductance and levels.** Each cell holds a conductance G in the range 1–100 µS. Level L
(0…15) is centred on 1 + L·99/15 µS. A verify read rounds G to the nearest level. A cell
whose read level equals its target therefore lies within ±3.3 µS of the level centre.

**Programming.** The pulses follow the 1T1R scheme:

* A SET pulse grounds the source line, puts V_set on the bit line, and raises the gate
  voltage by one step (0.01 V) per successive SET pulse.
* A RESET pulse raises the source-line voltage by one step (0.02 V) per successive RESET
  pulse.

The device is a simple stand-in for a filament compact model. A pulse with step index k
moves G by K·(k+1)·(voltage step), times a random factor in [0.75, 1.25), and G is clipped
to 1–100 µS. K is 40 µS/V for SET and 20 µS/V for RESET. With these values a full sweep
from level 0 to level 15 takes about 20–25 pulses, similar to the measured-style switching
curves the architecture was designed around. Cells start at level 0 plus up to 5 µS.

**Computation.** A computation starts on `comp_start`. The model reads the mode and the
active region from the switch controls that `reg_array` decodes: `row_en`, `col_en`,
`tg_tia`, `tg_fb_array`, `tg_second_stage` and `tg_input`. It then computes the exact
solution of the ideal circuit equation on the top-left `rows × cols` corner. x is the
signed 8-bit DAC code and G is in µS:

| mode | result written to `comp_out[i]` |
|------|---------------------------------|
| MVM  | round(Σ_j G_ij x_j / 1024), i < rows |
| INV  | round(1024 · y_i), G y = x, square region |
| PINV | round(1024 · y_i), i < cols, least squares |
| EGV  | round(1024 · v_i), v the dominant eigenvector, ‖v‖ = 1, sign as found by power iteration from all-ones |

Every result saturates to the signed 12-bit ADC range, ±2047. A singular matrix gives zeros.
`comp_done` rises `SETTLE_CYCLES` (4) cycles after the start.

The model does not represent:

* amplifier noise, offsets or finite gain;
* IR drop;
* the minus signs of the real inverting stages, which are folded into the gains;
* the time-domain settling of the circuit.

The only non-ideality is the deviation of each programmed conductance from its target
level. That deviation is what limits accuracy in the model. In a real macro, quantisation
and analog noise together give errors of around ten percent.

**Ports and timing.** One request at a time:

* read: `read_en` → `read_valid`/`read_level` one cycle later;
* pulse: `pulse_en` → `pulse_done` after `PULSE_CYCLES` (3) cycles, i.e. a 30 ns pulse at
  an assumed 100 MHz clock;
* compute: `comp_start` → `comp_done` after `SETTLE_CYCLES`.

## Write-verify (`wv_ctrl`, `comparison_unit`)

The region is programmed one cell at a time in row-major order. The ideal level of cell
(r, c) is at global-buffer address `base + r·cols + c`, in the low 4 bits of the word. For
each cell:

1. Fetch the ideal level B (2 cycles).
2. Verify-read the cell, giving A (2 cycles).
3. The CU compares A and B and writes the flag register {A>B, A=B, A<B}. One cycle later it
   returns a decision:
   * |A−B| ≤ `tol`: the cell is done and counted as ok.
   * the cell already had `max_pulses` pulses: the cell is done and counted as failed.
   * A < B: a SET pulse with the cell's current SET step, which then increments.
   * A > B: a RESET pulse with the current RESET step, which then increments.
4. After a pulse, wait for `pulse_done` and go back to step 2.

Both step counters and the pulse count restart at each new cell. A change of direction
restarts the other direction's step. The effect is that an overshoot is corrected with
small pulses first. `n_ok`, `n_fail`, `n_set` and `n_reset` describe the last run.

A full 128 × 128 array of random targets takes about 1.6 million cycles with the default
model: about 13 SET pulses per cell and very few RESETs, with no failures at a limit of
64 pulses.

## Instruction set

An instruction is a 64-bit `instr_t` word (see `gramc_pkg.sv`):

| bits | field | use |
|------|-------|-----|
| 63:60 | op | NOP 0, CFG 1, WV 2, SOLVE 3, FUNC 4, HALT 15 |
| 59:56 | macro | macro index 0–15 |
| 55:54 | mode | MVM 0, INV 1, PINV 2, EGV 3 (CFG) |
| 53:46 | rows | active rows 1–128 (CFG); element count (FUNC) |
| 45:38 | cols | active columns 1–128 (CFG) |
| 37:22 | src | global-buffer address (WV, SOLVE); output-buffer address (FUNC) |
| 21:6 | dst | output-buffer address (SOLVE, FUNC); WV: dst[7:0] is the pulse limit, 0 = 64 |
| 5:3 | fop | functional operation (FUNC) |
| 2:0 | — | reserved |

* **CFG** writes mode and region into the register array of one macro.
* **WV** programs that macro's configured region.
* **SOLVE** runs the macro in its configured mode. The vector lengths follow the stored
  configuration:

  | mode | inputs read from `src` | results written to `dst` |
  |------|------------------------|--------------------------|
  | MVM  | cols | rows |
  | INV  | rows | rows |
  | PINV | rows | cols |
  | EGV  | none | rows |

  Inputs are 8-bit signed words. Results are sign-extended to 16 bits.
* **FUNC** runs the functional module.
* **HALT** ends the run with `done`.

The decoder rejects the following, and the run then ends with `done` and `error`:

* an unknown opcode;
* a macro index ≥ 16;
* a CFG region that is empty or outside the 128 × 128 array;
* a CFG region whose shape does not suit the mode: INV and EGV need a square, PINV needs
  rows ≥ cols;
* a FUNC with a zero count.

An example that programs an 8 × 8 matrix into macro 0, multiplies it by a vector, then
solves a linear system with the same matrix:

```
CFG   macro=0 mode=MVM rows=8 cols=8
WV    macro=0 src=0                 // 64 ideal levels at 0..63
SOLVE macro=0 src=1000 dst=0        // x at 1000..1007, y to output buffer 0..7
CFG   macro=0 mode=INV rows=8 cols=8
SOLVE macro=0 src=1100 dst=100
FUNC  fop=RELU rows=8 src=0 dst=600
HALT
```

## Functional module (`func_unit`)

The functional module works on output-buffer words. It reads one word per cycle (two for
the two-operand operations) and writes one result per cycle. An operation on `len` words
takes len + 2 cycles.

| fop | operation |
|-----|-----------|
| RELU 0 | dst[i] = max(0, src[i]) |
| MAXP 1 | dst[k] = max of src[4k … 4k+3]: pooling over four consecutive words, so a 2×2 window must be stored contiguously |
| SHADD 2 | dst[i] = sat((src[i] << 4) + src[len+i]): bit-slice recombination, upper-4-bit array results first, then lower-4-bit |
| COPY 3 | dst[i] = src[i] |
| ADD 4 | dst[i] = sat(src[i] + src[len+i]): partial sums of a matrix split over two arrays |
| SUB 5 | dst[i] = sat(src[i] − src[len+i]): positive minus negative array of a differential pair |

The three two-operand operations (SHADD, ADD, SUB) saturate to 16 bits, and `sat_count`
counts saturations. Pooling and SHADD may run in place with dst ≤ src.

## Host interface and timing (`gramc_top`)

While the system is idle, the host:

1. writes instructions through `is_ld_*` and global-buffer words through `gb_wr_*`;
2. pulses `start`;
3. waits for `done`, and checks `error`;
4. reads results through `ob_rd_addr`/`ob_rd_data`, which has one cycle of latency.

Status outputs give:

* the last write-verify statistics;
* the number of instructions executed, by kind, and of SOLVEs, by mode;
* the functional module's saturation count;
* the CU flag register.

All flops reset asynchronously on `rst_n` low, except the buffer and stack memories.
Instruction cost:

* each instruction: 3 cycles of fetch, decode and advance;
* CFG: 1 further cycle;
* SOLVE: about n_in + SETTLE_CYCLES + n_out + 3 cycles;
* FUNC: len + 3 cycles;
* WV: as described above.

## Departures from the GRAMC description, and own choices

The following are stated in the architecture and followed here:

* the block set: PC, instruction stack, decoder, controller, global buffer, register array
  per macro, DAC/MUX/array/MUX/OPA/ADC chain, output buffer, CU with
  verify → flags → write, functional module;
* 16 macros of 128 × 128 cells;
* 16 levels from 1 to 100 µS;
* SET by stepping V_g and RESET by stepping V_SL;
* 0.01 V and 0.02 V steps and 30 ns pulses;
* the stop rule of write-verify;
* loading the configuration into the register array before solving;
* bit slicing with two arrays of 4 bits;
* pooling and activation in the digital module.

These are this design's own choices or departures:

* **Instruction format, sequencing, buffer sizes and widths.** The architecture gives none
  of them. Buffer sizes are 256 instructions, 64 K × 8 global buffer and 4 K × 16 output
  buffer. The converters are an 8-bit DAC and a 12-bit ADC.
* **One output buffer and one CU for the whole group.** The architecture draws an output
  buffer in every macro and speaks of comparison units in the plural. Since one macro works
  at a time here, one of each suffices. The CU takes the read level directly from the
  macro's registered ADC output.
* **Serial write-verify.** Cells are programmed one at a time, with an exact match
  (`WV_TOL` = 0) as the default error range. The architecture states neither the degree of
  parallelism nor the range.
* **One array for PINV.** The least-squares function is computed on one array.
  Circuit-level PINV may use two arrays; the model needs only one copy of the matrix.
* **Switch controls.** The grouping of transmission gates into four controls is a
  simplification. The individual gates are not specified.
* **ADD/SUB in the functional module.** These are additions. They are needed to map layers
  wider than 128 inputs and signed weights onto arrays of positive conductances.
* **Host-moved activations.** Data moves from the output buffer back to the global buffer
  through the host, for example between network layers. No on-chip path is provided.
* **Device and circuit model.** `amc_macro` is behavioural. Its device response is
  empirical, and its circuit solutions are exact apart from programming error.

## Capacity against the evaluated workloads

Sizes below come from the architecture's evaluation unless marked otherwise.

* **MVM, INV and EGV on 128 × 128 matrices, and PINV on a 128 × 6 regression.** Each fits
  one array, because a whole 128 × 128 region can be active. All four run at full size in
  `tb_gramc_workloads`. One array holds only positive conductances, so that test uses
  positive matrices: a strong diagonal with small off-diagonal entries for INV (instead of
  a Wishart matrix), XᵀX of a non-negative X for EGV, and synthetic regression data for
  PINV. Against the ideal 4-bit matrices the results differ by about 20 % (INV), 1 % (EGV)
  and 4 % (PINV) in relative norm. That is the order of the ten per cent reported for the
  analog circuits. Here the error comes only from where write-verify leaves each cell inside
  its level.
* **LeNet-5.** The network's feature shapes are 1×28×28 → 6×12×12 → 16×4×4 → 256 → 120 →
  84 → 10. The 5×5 kernel size is general LeNet-5 knowledge. The weight matrices are
  25×6, 150×16, 256×120, 120×84 and 84×10, which need 1 + 2 + 2 + 1 + 1 = 7 arrays at
  4 bits (16 are available). 8-bit bit slicing doubles that to 14. The inputs of the 150-
  and 256-wide layers are split over two arrays and summed with ADD. Signed weights held as
  differential pairs double the count again: 14 arrays at 4 bits fit, 28 at 8 bits do not.
  The architecture does not say how signs are handled. `tb_gramc_workloads` runs the three
  fully connected layers this way with random signed weights: eight arrays, ADD for the
  split inputs, SUB for the signs, ReLU, and the host rescaling the activations between
  layers. It also runs conv1 for one 2 × 2 pooling window. The 5 × 5 convolution is
  unrolled over a 6 × 6 pixel patch into a 24 × 36 matrix whose row 4c + p holds kernel c
  shifted to window position p. Each channel's four positions then sit side by side, so
  SUB, 4-wide max pooling and ReLU finish the layer. Whole feature maps, conv2 and MNIST
  data are not simulated.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

* **Unit tests.** Program counter, instruction stack, global and output buffers, register
  array decode, decoder legality and fields, and CU decisions are checked against reference
  models, including the step-counter rules. The functional-module tests cover all six
  operations, saturation counts and latency.
* **`tb_wv_ctrl`.** Write-verify on a 16 × 16 model array. Every cell is read back: the cells
  within range must equal the ok count, and a pulse limit of 2 must produce give-ups.
* **`tb_amc_macro`.** Programs an 8 × 8 array with its own verify loop and checks pulse and
  read latencies and pulse directions. MVM is checked within the bound set by half-level
  programming error. INV and PINV are checked within 15 % of a Gauss–Jordan reference built
  from level-centre conductances. EGV is checked by its eigen-residual and norm.
* **`tb_macro_group`.** Checks that pulses, configuration and computations reach only the
  selected macro.
* **`tb_controller`.** Runs every instruction kind against responder models and checks the
  vector lengths, buffer traffic, counters and illegal-instruction stop.
* **`tb_gramc_top`.** End-to-end test at the default size: 16 macros of 128 × 128. It runs
  five programs: all four modes, ReLU and pooling, 8-bit bit slicing with recombination,
  ADD and SUB, ADC and word saturation, pulse-limit give-up, a full 128 × 128 write-verify
  followed by MVM, and an illegal instruction. It counts each of these mechanisms and fails
  if one never occurs. It takes about 1.7 million cycles, roughly 15 s of simulation.
* **`tb_gramc_workloads`.** The evaluated workloads at full size on the default system:
  INV and EGV on 128 × 128 matrices, a 128 × 6 PINV regression, and the LeNet-5 fully
  connected layers plus one pooling window of conv1. Each result is checked twice. First it must match, to within ADC
  rounding, the same problem solved on the conductances write-verify actually left in the
  array, which the testbench reads from the model. Then its relative error against the
  ideal 4-bit matrix must stay below a bound: 0.4 for INV, 0.3 for the layers and 0.25 for
  the rest. It takes about 7 million cycles, roughly a minute.

To run a testbench with Verilator (from the repository root):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/gramc_pkg.sv tb/tb_gramc_top.sv \
          --top tb_gramc_top -o sim && ./obj_dir/sim
```

Any other `tb/tb_<block>.sv` runs the same way with its top name. Lint runs with
`verilator --lint-only -Wall -Irtl -y rtl rtl/gramc_pkg.sv rtl/gramc_top.sv`.

The remaining lint warnings fall into four groups, none of them functional:

* reserved or unused high bits of instruction and buffer words;
* unused package constants;
* blocking assignments in the behavioural model;
* `rst_n` used both as an asynchronous reset and in assertion `disable iff` clauses.

The model uses `real`, so yosys cannot synthesize `amc_macro`, `macro_group` or
`gramc_top`. Every other module synthesizes.

## Files

* `rtl/gramc_pkg.sv`: shared types, including the instruction, configuration, pulse,
  mode and operation encodings, and the size constants.
* `rtl/gramc_top.sv`: system top.
* `rtl/controller.sv`, `rtl/decoder.sv`, `rtl/prog_counter.sv` and
  `rtl/instr_stack.sv`: program control.
* `rtl/wv_ctrl.sv` and `rtl/comparison_unit.sv`: write-verify.
* `rtl/global_buffer.sv`, `rtl/output_buffer.sv` and `rtl/func_unit.sv`: data side.
* `rtl/macro_group.sv`, `rtl/amc_macro.sv` (behavioural) and `rtl/reg_array.sv`: macros.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_gramc_workloads.sv`: the evaluated workloads at full size.
