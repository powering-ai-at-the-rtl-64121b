# A memristor binarized neural network core with near-memory popcount

This is the RTL of a small binarized neural network (BNN) accelerator. Its weights sit in
non-volatile hafnium-oxide memristors, and it is built to keep working on an unstable,
unregulated supply, such as a few-square-millimetre solar cell wired straight to its power
pads. The arithmetic is entirely digital. Each weight is stored as a complementary pair of
memristors. A differential precharge sense amplifier reads the pair and multiplies the weight
by the input activation as part of the read, since an XNOR is built into the amplifier. A
small counter next to the array, one per output neuron, accumulates the products.
Nothing analog is summed, so nothing needs calibrating. A weak supply slows the reads and
makes a few marginal cells misread, but it does not shift an analog sum.

The core computes one fully connected BNN layer, or two layers in a row:

    X_out,j = sign( popcount_i( XNOR(W_ji, X_in,i) ) - T_j )

Here weights and activations are bits (1 stands for +1 and 0 for -1), and T_j is an
integer threshold per neuron. The value `popcount - T` is called the neuron's
*preactivation*, written Δ below.

## Organisation

| Part | Size (defaults) | RTL |
|---|---|---|
| Memory modules | 4, each 128 word lines x 32 bit cells = 8,192 memristors | `memory_module.sv` (behavioural model) |
| Sense amplifiers with XNOR | one per bit-cell column, 128 in all | `xpcsa.sv` (behavioural model) |
| Neuron register + popcount decounter | one per column, 128 in all, 12 bits each | `neuron_unit.sv` |
| Control unit (FSM) | forming, programming, pipelined inference | `bnn_controller.sv` |
| Power switch unit | routes the VDD / VH / VM pads to the array supplies | `power_switch.sv` (behavioural model) |
| Core | everything above | `bnn_top.sv` |
| Shared types and sizes | | `bnn_pkg.sv` |

Each module holds 32 output neurons, one per bit-cell column. Word lines 0 to 115 hold the
weights of the 116 inputs. Word lines 116 to 127 hold each neuron's threshold as a
12-bit two's-complement number, with bit *k* in word line 116+*k*. The thresholds therefore
live in the same non-volatile array as the weights.

Two configurations are selected per inference by `two_layer`:

* **Single layer, 116 → 128.** All four modules see the same input stream. The outputs are
  `y[127:0]`, where bit `m*32+c` is column c of module m.
* **Two layers, 116 → 64 → 64.** Modules 0 and 1 form layer 1 and take the host's inputs.
  Their 64 activations, `y[63:0]`, then drive modules 2 and 3 (layer 2) as inputs on word
  lines 0–63. The final outputs are `y[127:64]`. In this mode word lines 64–115 of modules 2
  and 3 are unused.

## Complementary bit cells and the XNOR sense amplifier

A bit cell has two transistors and two memristors, one on bit line BL and one on BLb. A weight
of +1 is stored as BL in the low-resistance state (LRS) and BLb in the high-resistance state
(HRS). A weight of -1 is stored the other way round. The sense amplifier precharges both of
its outputs high, then lets the two branches discharge through the two memristors, and the
faster branch wins the latch. Four extra transistors, driven by the activation X, swap the
branches, so the latched output is `XNOR(X, w)` directly. Only the *order* of the two
resistances matters. A cell reads correctly whenever its LRS device is below its HRS device,
however far both have drifted. A supply drop also hits both branches alike.

In the model (`xpcsa.sv`, `memory_module.sv`) each memristor is a resistance in kΩ:

* pristine 60,000
* LRS 5
* HRS 100

A cell whose two resistances are equal, for example one that was never programmed, reads as
w = 0. In silicon that case resolves at random.

## Operations

The control unit runs three commands. Each is taken with `cmd_valid & cmd_ready` and ends
with a one-cycle `done` pulse.

**Forming (`CMD_FORM`).** Every memristor must be formed once before it can be programmed.
Forming needs 4.5 V on VDDC and 2.7 V on VDDR, while the process's nominal supply is 1.2 V.
The controller forms the memristors one at a time: row by row, and within a row memristor by
memristor (BL then BLb of cell 0, then cell 1, and so on). All four modules form the same
address at once. Each memristor gets a 10 µs pulse, which is `FORM_CYCLES` = 660 cycles at
66 MHz. The whole chip takes 128 × 64 × 660 = 5,406,720 cycles.

**Programming (`CMD_PROG`).** The host sends one word line at a time: `cmd_row` plus 128 bits
of `cmd_data`, the 32 bits of each module side by side. The controller applies a SET phase and
then a RESET phase, each 6 µs (`PROG_CYCLES` = 396 cycles):

* **SET** (VDDC = VDDR = 2.7 V) puts into LRS the BL memristor of the +1 cells and the BLb
  memristor of the -1 cells.
* **RESET** (VDDC = 2.7 V, VDDR = 4.5 V) puts the other memristor of each cell into HRS.

Afterwards every cell is complementary, whatever its previous state was. A row takes
2 × 396 + 1 cycles, from the cycle after acceptance to `done`.

**Inference (`CMD_INFER`).** The inference is pipelined, one word line per clock:

```
cycle        0      1..12              13..128                  129     130
issue        CLR    read thr row k     read input row i         drain   done
             (X=+1, bit k -> reg)      (X=x_i, reg -= XNOR)
sense               ---- one cycle after each issue ----
neuron reg          clear, load bit k, decrement ... (one cycle after the read)
```

1. Cycle 0 accepts the command and clears all 128 neuron registers.
2. Cycles 1–12 read threshold rows 116–127 with X = +1, so each sense amplifier outputs its
   stored bit. Bit *k* is written into bit *k* of every neuron register, for all neurons at
   once.
3. Cycles 13–128 read input rows 0–115. The core presents the index `x_idx` and raises
   `x_ready`, and the host answers with `x_bit` and `x_valid`. Every sense amplifier that
   outputs 1 decrements its neuron register by one.
4. Each row is sensed one cycle after it is issued and reaches the register at the end of
   that cycle. The register control signals are therefore the issue-stage controls delayed by
   one flip-flop.
5. When the last row has drained, each register holds `T - popcount`. The activation is the
   register's sign bit: +1 exactly when popcount > T, so Δ = 0 gives -1. A host that wants
   sign(0) = +1 stores T - 1.
6. If the host holds `x_valid` low, the pipeline stalls. No read happens and the registers
   hold their values.

With no stalls, `done` comes 130 cycles after a single-layer command:
12 + 116 + 2 (12 threshold rows, 116 input rows, pipeline drain).

In two-layer mode the same threshold phase loads all four modules, and layer 1 reads only
modules 0–1. After one drain cycle, layer 2 reads word lines 0–63 of modules 2–3. Its input
for row *r* is layer-1 activation *r*, taken straight from the neuron registers. A two-layer
inference takes 12 + 116 + 64 + 3 = 195 cycles. Only the 128 sign bits leave the arrays,
which is the near-memory part of the design.

The neuron registers are not clock gated. They load only during a sense operation
(`NU_LOAD` or `NU_ACC`) and otherwise hold their value.

## Power switch and supply pads

The core has three supply pads, given as millivolt-valued ports `vdd_mv`, `vh_mv` and `vm_mv`.
The power switch connects each module's two array supplies, VDDC and VDDR, to one of them:

| operation | VDDC | VDDR |
|---|---|---|
| forming | VH (4.5 V) | VM (2.7 V) |
| RESET → HRS | VM (2.7 V) | VH (4.5 V) |
| SET → LRS | VM | VM |
| read / inference | VDD | VDD |

The memory model checks these supplies. Forming needs VDDC ≥ 4.0 V. SET needs both supplies
between 2.4 V and 4.0 V. RESET needs VDDR ≥ 4.0 V. An operation issued with the wrong
supplies changes nothing and pulses `op_err`. This is what happens when all three pads are
tied to one 1.2 V source, as with the solar cell. In that case inference works, but
programming is refused. The model does not depend on VDD otherwise.

## Simulating

Everything is SystemVerilog-2017. `bnn_pkg.sv` has to be compiled first. For example, to run
the end-to-end test:

```
verilator --binary --timing --assert --top-module tb_bnn_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/bnn_pkg.sv tb/tb_bnn_top.sv
./obj_dir/Vtb_bnn_top
```

Every testbench checks itself and ends with the line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks | run time |
|---|---|---|
| `tb_neuron_unit` | threshold load and count-down against T - popcount, and the sign bit | < 1 s |
| `tb_xpcsa` | XNOR result for random LRS/HRS spreads on either branch, and the precharge state | < 1 s |
| `tb_power_switch` | pad routing in every mode | < 1 s |
| `tb_memory_module` | forming, complementary SET/RESET, refusal on wrong supplies, pristine cells, one-cycle reads (full 128 x 32 size) | < 1 s |
| `tb_bnn_controller` | the exact command sequence of forming, programming and both inference modes, with stalls; the 130- and 195-cycle latencies (reduced sizes) | < 1 s |
| `tb_bnn_top` | full-size core with default parameters: forms all 32,768 memristors, programs 128 rows, refuses programming at 1.2 V, runs 12 inferences in both modes with and without stalls and across a reset, and compares `y` with a reference model and the latencies; it also counts every mechanism | ~10 s |
| `tb_preactivation_sweep` | full-size workload: every neuron is placed at Δ = -5 … +5 in turn (the characterization pattern of the chip), and all 128 outputs are checked for each Δ. A second pass swaps the memristors of two weight cells per column, mimicking weakly programmed cells. Each output is then predicted exactly, and the test checks that errors appear only at \|Δ\| ≤ 2. It prints accuracy per Δ | ~15 s |

Every parameter defaults to the size of the fabricated chip. The sizes are set in `bnn_pkg.sv`
and passed down through the `*_P` parameters of `bnn_top`. `COLS_P` must be a power of two.
The threshold width `THR_BITS_P` must hold every possible value of `T - popcount`.

## What comes from the chip and what is this design's own

These parts follow the fabricated design:

* four 8,192-memristor arrays of 128 × 64 memristors
* 116 inputs, and the 116 → 128 and two-layer 64-output configurations
* complementary 2T2R storage and the XNOR precharge sense amplifier
* thresholds in dedicated rows, loaded into near-memory neuron registers that count down on
  every XNOR = 1
* the sign bit as the activation
* one row per clock, all neurons in parallel
* sequential forming at 4.5 V / 2.7 V for 10 µs, and row-wise programming with 6 µs pulses
  (HRS at VDDC 2.7 V / VDDR 4.5 V, LRS at 2.7 V / 2.7 V)
* the VDD / VH / VM pads

These are this design's own choices:

* **The host interface**: a command handshake, a 128-bit row word, and a one-bit input stream
  with `x_valid`/`x_ready`. The chip's actual 25-pin protocol is not known, and the pads are
  not modelled.
* **Twelve threshold rows** (128 - 116) with two's-complement encoding, loaded one bit per
  cycle.
* **The order of programming**: SET before RESET.
* **Forming**: all four modules form in parallel, and a formed memristor starts in LRS.
* **The layer-2 wiring**: layer 1 feeds word lines 0–63 of modules 2–3, and the rest of those
  rows are unused.
* **The sign(0) = -1 convention** that reading the plain sign bit implies.
* **Resistance values and voltage windows** in the behavioural models.
* **Pulse lengths** converted to cycles at 66 MHz. At a slower clock the pulses are longer
  than 10 µs and 6 µs.

These parts are not in the RTL:

* **The level shifters.** They are analog and logically a wire, so they are folded into the
  memory model.
* **The analog behaviour of the sense amplifier**, and with it the bit errors at low supply
  voltage or high clock rate. On silicon these errors appear for |Δ| ≤ 5 below about 1 V and
  are what make the chip degrade gracefully under dim light. In this RTL every read is
  correct, unless a testbench swaps a cell's resistances, as `tb_preactivation_sweep`
  does, to show how the errors stay confined to small |Δ|.
* **The solar cell and the pads.**
* **The clock-gated, fewer-cycle variant** of the read pipeline, which was only estimated and
  never fabricated.
* **The mapping of larger networks** onto 116-input arrays by majority vote. That is a
  software method, and it needs the arrays to be reprogrammed block by block.

## Capacity

One pass holds 4 × 116 × 32 = 14,848 binary weights. That covers the two configurations
above, and a characterization pattern of 64 or 128 neurons at any preactivation.

Full networks do not fit in one programming. Take the fully connected MNIST network, with
hidden layers of 1,102 and 64 units: its 1,102 → 64 layer alone has 70,528 weights. The
VGG-style CIFAR-10 network has over a million weights in a single 354-to-354 3×3 convolution.
Such networks run only as a sequence of reprogrammed blocks, with the blocks' outputs combined
by majority vote outside this core.
