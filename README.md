# QAOA Weighted-MaxCut accelerator in SystemVerilog

This is the RTL of a hardware emulator for the Quantum Approximate Optimization
Algorithm (QAOA) applied to the weighted MaxCut problem. It follows the
Quantum MaxCut Accelerator (QMA) published by S. Choi, K. Lee, J.-J. Lee and
W. Lee in "Standalone FPGA-Based QAOA Emulator for Weighted-MaxCut on Embedded
Devices". The accelerator holds the full 2^n-entry complex state vector of an
n-qubit QAOA circuit. It applies p layers of cost and mixer unitaries to that
vector and returns the expectation value of the cut weight. An embedded host
CPU reads that value and runs the outer parameter optimisation loop.

The main idea is an algebraic rewrite that makes each layer cheap in hardware.
A dense unitary applied to a vector costs O(N^2) multiplications, with
N = 2^n. Instead:

* the mixer `exp(-i*beta*sum X_j)` is factored as `H D_M H`, where H is the
  n-fold Hadamard transform and D_M is diagonal;
* the cost unitary `exp(-i*gamma*H_C)` is already diagonal (`D_C`).

A layer then becomes two applications of the same elemental operation,
`state := H1 * D * state`:

* D is a diagonal matrix;
* H1 is the Hadamard matrix with entries +1 and -1.

D takes one complex multiplication per element, N in all. H1 needs only
additions and subtractions. The hardware streams the N diagonal elements
through one multiplier, one per clock. Each product is added to or subtracted
from all N accumulators at once. An elemental operation therefore takes O(N)
clocks, uses one complex multiplier whatever n is, and uses N parallel adders.

## What the hardware computes

Basis states are numbered k = 0 .. N-1. Bit q of k is qubit/vertex q+1.

**Cost diagonal.** The host sends the edges one at a time. For each edge
(i, j, w), every k whose bits i-1 and j-1 differ gets
`cost_hamil_diag[k] += 2*w`. So `d(k) = cost_hamil_diag[k]` is twice the
weight cut by the partition k.

**Diagonal elements.** For the cost operation of layer l, element k is
`exp(-i * gamma[l] * d(k))`. For the mixer operation it is
`exp(+i * beta[l] * u(k))`, where `u(k) = 2*popcount(k) - n`. Each element is
evaluated from its angle with a CORDIC, so no table of exponentials is stored.

**Elemental operation.** `result[i] = sum_c (-1)^popcount(i & c) * D(c) * state[c]`.
Then `state := result`.

**Scaling.** H1 is sqrt(N) times a unitary, so a layer grows the vector by N.
When the state is reloaded after each layer's mixer operation, it is shifted
right by n bits, with rounding. Between the cost and mixer operations of a
layer the state is therefore sqrt(N) times its true size. The state format
keeps integer bits for this.

**Start state.** `|s> = H^n|0>`, which is loaded directly as the real
amplitude `1/sqrt(N)` in every component.

**Result.** `F = sum_k |state[k]|^2 * d(k) / 2`. This is the expected cut
weight of a measurement of the final state.

Altogether one layer computes `U_M(beta) U_C(gamma) = (1/N) H1 D_M H1 D_C`,
which is exactly the QAOA layer. Because of the 2*w rule, the circuit's cost
phase is `exp(-i*gamma*2*C(k))`. If you use the textbook convention
`exp(-i*gamma*C(k))`, program gamma/2.

## The elemental-operation pipeline

Each elemental operation passes through five stages. Each stage has its own
counter, so no stage needs to know how far behind the others it is:

| stage | module | what it does | registers |
|---|---|---|---|
| CALCULATE_RAD | `qma_calc_rad` | The count_1st counter walks k. A ones counter and "x2-n" give u(k). Two multiplexers, steered by `order`, pick (d(k), gamma) or (u(k), beta). One multiplier forms the angle, which is negated for the cost operation. | `rad` (1 clock) |
| NORMALIZE_RAD | `qma_normalize_rad` | Reduces the angle modulo 2*pi and folds it into [0, pi/2]. It remembers whether cos and sin must be negated. | `rad_q1`, `sign_adj` (1) |
| CORDIC | `qma_cordic` | 16 pipelined rotation-mode micro-rotations give cos and sin. The sign bits travel in a parallel 16-deep delay line. | 16 |
| 1_MULT | `qma_one_mult` | count_4th selects state[k]. The sign-corrected (cos, sin) multiplies it as a complex number. | `mult` (1) |
| N_ADD | `qma_n_add` | count_5th is the H1 column. Every result[i] adds or subtracts mult, using the sign `(-1)^popcount(i & count_5th)`. | `result[0..N-1]` (1) |

`qma_ctrl` sequences the operations through its `order` register (cost or
mixer) and its `layer` register. For each operation it:

1. pulses `op_start`, which restarts count_1st and clears count_4th, count_5th
   and the results;
2. waits until N_ADD has absorbed N terms;
3. reloads the state in `qma_state_regs`, with the 2^-n shift if this was a
   mixer operation.

Two operations never overlap, because each needs the complete result of the
one before. After 2p operations, `qma_expectation` walks the state once to
form F.

**Timing.** The diagonal elements enter the pipeline on consecutive clocks.
Element k reaches N_ADD 20 clocks after it left CALCULATE_RAD's counter. With
two control cycles per operation:

```
one elemental operation          N + 22 clocks
one run with p layers            2p(N + 22) + N + 5 clocks   (start write to STATUS.done)
```

At 100 MHz, a 9-qubit (N = 512), 8-layer run takes 9061 clocks, or 90.6 µs.
Smaller builds take less:

| n | 2 | 3 | 4 | 6 | 8 | 9 |
|---|---|---|---|---|---|---|
| clocks | 425 | 493 | 629 | 1445 | 4709 | 9061 |

These counts are checked exactly by the testbenches. The published
measurements (0.26 to 0.34 ms for these sizes) include host software and bus
traffic, which are not modelled here.

## Number formats

Everything is two's-complement fixed point. Formats are defined once in
`qma_pkg`:

| quantity | bits | fraction bits |
|---|---|---|
| edge weight | 16 | 8 (Q8.8) |
| cost_hamil_diag | 24 | 8 |
| gamma, beta (radians) | 16 | 12 (range ±8) |
| rad | 40 | 20 (the full product, so no rounding before the modulo) |
| rad_Q1 | 21 | 18 |
| cos, sin | 18 | 16 |
| state (re, im each) | 24 | 16 (integer part up to ±128) |
| result (re, im each) | 24 + n + 1 | 16 |
| expectation | 32 | 16 (Q16.16) |

The modulo 2*pi is computed without division:

1. multiply rad by a 27-bit constant 1/(2*pi);
2. keep the 24 bits below the binary point, which give the angle as a
   fraction of a turn (negative angles wrap correctly);
3. the top two of those bits are the quadrant;
4. multiply the folded fraction by 2*pi to get radians again.

Both constants are rounded values of 2^26/(2*pi) and 2*pi*2^22. The CORDIC
uses `atan(2^-i)*2^18` and the gain `K = 0.607253` (for 16 iterations) scaled
by 2^16.

Against a double-precision model, the final state of a 9-qubit, 8-layer run
agrees to about 1e-4 per amplitude, and the expectation value to about 3e-4
relative. Weights must stay below 128 so that the diagonal cannot overflow
for 9 vertices.

## Programming the accelerator

`qma_top` is an AXI4-Lite slave with 32-bit data and an 8-bit byte address.
The four host commands of the original software interface map onto
registers:

| addr | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | W | bit0 activate_maxcut (start), bit1 clear the cost diagonal |
| 0x04 | STATUS | R | bit0 busy, bit1 done (cleared by the next start) |
| 0x08 | NUM_LAYERS | RW | p, 0 .. MAX_LAYERS (larger values are clamped; 0 measures \|s>) |
| 0x0C | LAYER_SEL | RW | layer addressed by GAMMA/BETA |
| 0x10 | GAMMA | RW | set_parameter: gamma[LAYER_SEL], Q4.12 |
| 0x14 | BETA | RW | set_parameter: beta[LAYER_SEL], Q4.12 |
| 0x18 | EDGE | W | set_cost_hamiltonian: [7:0] i, [15:8] j (1-based), [31:16] weight Q8.8 |
| 0x1C | EXPECT | R | get_expectation, Q16.16 |
| 0x20 | INFO | R | [7:0] NUM_QUBIT, [15:8] MAX_LAYERS |

A job follows these steps:

1. Write CTRL = 2 to clear the cost diagonal.
2. Write one EDGE word per edge.
3. Write NUM_LAYERS.
4. For each layer, write LAYER_SEL, then GAMMA and BETA.
5. Write CTRL = 1 to start, and poll STATUS until done.
6. Read EXPECT.

The accelerator answers these writes with SLVERR and ignores them:

* a write to a configuration register during a run;
* an edge with a vertex outside 1..NUM_QUBIT, or with i = j;
* a write or read at an unmapped address.

Each edge is absorbed in one clock. Every write takes one clock, and its
response comes on the next. WSTRB is ignored. The `busy` and `done` outputs
repeat the STATUS bits for a host that prefers an interrupt.

A graph with fewer vertices than NUM_QUBIT runs unchanged. The unused qubits
are isolated vertices and leave the expectation value as it is, but the run
time is that of the full N.

## Parameters and size

`NUM_QUBIT` (default 9) sets N = 2^NUM_QUBIT. `MAX_LAYERS` (default 8) sets
the depth of the gamma/beta register files. Nothing else needs changing. The
storage is:

* N state registers of 48 bits;
* N result registers of 2(25 + n) bits;
* N diagonal registers of 24 bits.

The logic is:

* N accumulating adders for each of the real and imaginary parts;
* N edge-update adders;
* an N-to-1 state multiplexer, used twice: by 1_MULT and by the expectation
  unit.

Multipliers do not grow with n: four in the complex multiply, one in
CALCULATE_RAD, two constant multipliers in NORMALIZE_RAD and three in the
expectation unit. This is the property the design is built around. Register
count and adder count grow linearly in N, so the practical limit is flip-flops
and LUTs. The published design reached 9 qubits on a Kintex-7 325T and failed
at 10.

## Where this RTL departs from or adds to the published design

The published design gives the stage structure and the per-stage algorithms.
Those are followed closely: the update rule for the diagonal, the angle
selection by `order`, the quadrant folding and its sign flags, the 16-stage
CORDIC with sign bits carried alongside, the complex product, and the signed
accumulation into N result registers. The following are this implementation's
own:

* **Sign of the cost angle.** The published equations give
  `D_C = exp(-i*gamma*H_C)`, but its stage listing computes
  `rad = cost_hamil_diag * gamma` and multiplies by `cos + i sin`. The two
  disagree. Here the cost angle is negated so that the circuit is the correct
  QAOA layer.
* **H1.** The register-level figure shows H1 as a stored bit matrix. Here each
  sign is computed as the parity of `i & column`, which gives the same bits
  without storage.
* **Scaling and start state.** The published design says only that the 2^-n
  factor is "a bit shift". Here it is applied once per layer, after the mixer
  operation, which also works for odd n. The start state is loaded directly.
* **Clocks per operation.** The published two-stage picture (one multiply,
  then N additions) needs N + 1 clocks per elemental operation. With the angle,
  folding and 16 CORDIC stages in front, each operation here takes N + 22
  clocks. Operations are not overlapped, because each needs the whole result
  of the one before.
* **Diagonal construction in hardware.** All N entries are updated in parallel
  for each edge. Weights are Q8.8. An invalid edge is refused. A clear command
  exists.
* **Expectation unit, host interface, control.** The published design says
  only that the expectation value is returned and that the core has an AXI
  interface. The following are all new: the sequential expectation unit with
  its final halving, the AXI4-Lite profile and register map, the error policy,
  the controller's state machine, p = 0, and clamping.
* **All word widths and fixed-point formats.** The published design says only
  "fixed point".
* **The surrounding system is not included.** The original system puts the
  accelerator next to a RISC-V Rocket core, a 512 KB SRAM, a network-on-chip
  interconnect, boot/reset control and IROM/JTAG/Flash/SPI/I2C/UART
  peripherals. Those parts come from a platform generator and are not
  described, so they are not here. `qma_top`'s AXI4-Lite port is where they
  would connect.

## Files

```
rtl/qma_pkg.sv            formats, types (cplx_t, order_e, sign_adj_t), constants
rtl/qma_top.sv            the accelerator
rtl/qma_axi_slave.sv      AXI4-Lite register interface
rtl/qma_param_regs.sv     gamma[], beta[]
rtl/qma_cost_hamil.sv     cost_hamil_diag[] and its edge update
rtl/qma_ctrl.sv           run sequencer (order, layer)
rtl/qma_calc_rad.sv       CALCULATE_RAD
rtl/qma_normalize_rad.sv  NORMALIZE_RAD
rtl/qma_cordic.sv         CORDIC
rtl/qma_one_mult.sv       1_MULT
rtl/qma_n_add.sv          N_ADD
rtl/qma_state_regs.sv     state[] with |s> initialisation and reload
rtl/qma_expectation.sv    expectation value
tb/tb_<module>.sv         one self-checking testbench per module
tb/tb_qma_workloads.sv    8-layer jobs at n = 2, 3, 4, 6, 8, 9 (uses tb/tb_qma_run.sv)
```

## Simulation

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. They work on a
two-state simulator. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_qma_top \
    rtl/qma_pkg.sv rtl/*.sv tb/tb_qma_top.sv -o sim
./obj_dir/sim
```

Put `qma_pkg.sv` first. The wildcard lists it a second time, and the
duplicate-package warning this causes is harmless. `-Itb` lets
`tb_qma_workloads` find its helper `tb_qma_run`.

* `tb_qma_top` runs at the default size (9 qubits, 8 layers). It drives the
  accelerator only through AXI and compares against an independent
  floating-point QAOA model, which applies the mixer qubit by qubit as
  RX(2*beta) rather than through the Hadamard factorisation. It checks:
  * the returned expectation value;
  * every final amplitude;
  * the exact cycle count;
  * register read-back.

  It also confirms that each mechanism occurs at least once: cost and mixer
  operations, rescaling, all four quadrant folds, refused edges, writes
  refused while busy, clearing, and a p = 0 run. It finishes in a few seconds.
* `tb_qma_workloads` repeats the comparison for 8-layer jobs at every qubit
  count of the published timing evaluation.
* The per-module testbenches check each stage against values computed
  independently in the testbench, with the stage's latency. They run at 3 to
  5 qubits.
