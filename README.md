# Hybrid digital oscillatory neural network

An oscillatory neural network (ONN) stores patterns in the couplings between
oscillators and retrieves them by letting the oscillators pull one another
into phase. Each oscillator stands for one pixel or one Ising spin. Two
oscillators in phase mean "same colour". Two oscillators 180° apart mean
"opposite colour". Start the network from a corrupted pattern and the phases
settle into the nearest stored pattern.

In a fully connected network of N oscillators every oscillator needs the
weighted sum of all N oscillator outputs. In the earlier fully parallel
("recurrent") digital ONN, each of those N sums is an adder tree, so the
design needs about N² adders and runs out of logic at about 50 oscillators
on a mid-size FPGA. This RTL uses the **hybrid** alternative:

* the N sums are still computed in parallel, one arithmetic circuit per
  oscillator;
* each circuit builds its sum **serially**, adding one coupling per logic
  clock cycle through a single adder. The weights come out of a small
  memory, not from N parallel registers.

Adders and weight storage then grow with N, and the weights can sit in block
RAM. The price is time. The oscillators may only step once every N (or more)
logic cycles. So they run on a slow clock, derived from the logic clock by a
division factor `CLK_DIV` ≥ N + 2. The default build has 506 oscillators,
4-bit phases (16 steps of 22.5°) and 5-bit signed weights. That is the size
reported for this architecture on a Zynq-7020 (PYNQ-Z2) board, at a 50 MHz
logic clock and a 6.1 kHz oscillation frequency.

## Block diagram

```
                 +--------------------------------------------------------------+
 w_we/row/col -->|  oscillator i  (x N, generate loop g_osc)                    |
 w_data          |                                                              |
                 |  serial_arith                         phase_ctrl             |
                 |  +------------------------------+     +------------------+   |
 osc_out[N-1:0] -+->| MUX over j --+               |     | ref = sign(sum)  |   |
 (all N outputs) |  | counter j ---+--> weight_mem | sum | edge detectors   |   |
                 |  |     +/-W_ij --> (+) --> acc  |---->| position counter |   |
                 |  |                  store final |     | phase register --+---+--> phase[i]
                 |  +------------------------------+     +------------------+   |
                 |                                               | phase        |
                 |                                         phase_osc            |
                 |                        16-bit rotating register + MUX -------+--> osc_out[i]
                 +--------------------------------------------------------------+
   run, load --> slow_clk_gen (logic clock / CLK_DIV, rising-edge pulse "tick")
                      tick drives every oscillator, arithmetic circuit and phase controller
```

| Module | File | What it is |
|---|---|---|
| `hybrid_onn` | `rtl/hybrid_onn.sv` | top: N oscillator slices plus one slow-clock generator |
| `phase_osc` | `rtl/phase_osc.sv` | 2^PHASE_BITS-stage rotating shift register with an output multiplexer |
| `serial_arith` | `rtl/serial_arith.sv` | counter, time multiplexer, ±weight, accumulator, stored sum |
| `weight_mem` | `rtl/weight_mem.sv` | one row of the weight matrix: N × 5 bit, 1-cycle read (block-RAM style) |
| `phase_ctrl` | `rtl/phase_ctrl.sv` | reference signal, edge detection, phase-difference counter, phase register |
| `slow_clk_gen` | `rtl/slow_clk_gen.sv` | clock divider and slow-clock rising-edge detector |
| `onn_pkg` | `rtl/onn_pkg.sv` | default sizes and width helpers |

Everything is one synchronous clock domain. The "slow clock" is a real
divided signal (`slow_clk`), but the logic uses only its rising-edge pulse
`tick`, as a clock enable. That avoids a clock-domain crossing between the
oscillators and the arithmetic circuits.

## The oscillator

`phase_osc` is a circular shift register of 16 flip-flops. Registers 0–7
start at 1 and registers 8–15 start at 0. On every tick the contents rotate
one place toward index 0: `reg[i] <= reg[i+1]` and `reg[15] <= reg[0]`.
Register 0 therefore produces a square wave with a period of 16 ticks.
Register k produces the same wave k ticks ahead. The output is `reg[phase]`,
so the 4-bit phase register selects a phase shift of `phase × 22.5°` and
needs no arithmetic.

Define the **position** of oscillator i on tick t, counted from the last
`load`, as `(t + phase_i) mod 16`. The output is high for positions 0–7. All
oscillators share t, so only phase differences matter. The phase registers
are therefore the network's result.

## One slow-clock period

This is the heart of the design. Every period of the slow clock does three
things at its rising edge (`tick`), on the same logic-clock edge:

1. **Phase update.** Each phase controller uses the sum stored during the
   period that is ending. That sum was computed from the oscillator outputs
   of that same period.
2. **Oscillator step.** Every shift register rotates once. A phase changed
   in step 1 takes effect at the same moment.
3. **Start of the next serial sum.** The accumulator is cleared and the
   counter restarts.

During the rest of the period the oscillator outputs stay constant. The
serial sum therefore sees a stable snapshot:

```
logic-clock edge   0 (tick)   1        2        ...   N        N+1        ...  CLK_DIV (next tick)
counter j          0          1        2              -        -
weight read        -          W_i0     W_i1           W_i(N-1) -
accumulate         acc=0      -        +-W_i0         ...      +-W_i(N-1)
stored sum         old        old      old            old      NEW (sum_valid)  used here
```

Edge `N+1` writes the result into the stored-sum register, and the result
is held until the next tick. `CLK_DIV` must therefore be at least `N + 2`.
The top checks this at elaboration. With N = 506 the default `CLK_DIV = 512`
leaves 4 spare cycles. It also reproduces the reported operating point:
50 MHz / 512 / 16 = 6.10 kHz. The published maximum of about 325 kHz for
very small networks (50 MHz / 16 / 325 kHz ≈ 9.6) also fits a division
factor of about N + 2. A wider division lowers only the oscillation
frequency. The network's dynamics, counted in ticks, stay the same.

The "multiplication" of a weight by an oscillator output is a select. An
output of 1 counts as +1 and contributes `+W_ij`. An output of 0 counts as
−1 and contributes `−W_ij`. The sum is `WEIGHT_BITS + clog2(N) + 1` bits
wide (15 bits at N = 506), enough for ±16·N.

The time multiplexer and counter are drawn per oscillator, and written that
way here. Every circuit walks j in lockstep, so their counters and
multiplexers are identical, and a synthesis tool can merge them into one.

## Phase controller: reference, edge detector, counter

The original description gives the function of this block. It does not give
the circuit, so the circuit below is this design's own.

* **Reference signal.** If the stored sum is positive, the reference is 1.
  If it is negative, the reference is 0. If it is exactly 0, the reference
  equals the oscillator's own output, so the oscillator is left alone.
* **Counter.** A 4-bit counter restarts at every rising edge of the
  oscillator output and counts ticks otherwise. It always holds the
  oscillator's position.
* **Update.** On a rising edge of the reference, the oscillator should be at
  position 0. The phase register therefore moves by minus the counter value
  (mod 16): `phase <= phase - pos`. This adds the reference's phase lead and
  puts the oscillator's next rising edge in line with the reference. Falling
  edges of the reference are ignored.
* **Bookkeeping.** Moving the multiplexer makes the output jump. After an
  update, the counter and the oscillator-edge register are set as if the
  oscillator had just risen, so the jump is not read as a new edge. A
  `load` seeds them in the same way from the freshly written phases.

In equilibrium every oscillator's reference rises together with the
oscillator itself. The counter is then 0 and nothing moves. The `update`
output pulses when a phase actually moved. The top sums these pulses into
`update_count`, and a host can use it to detect settling.

## Operating the network

The top's ports replace the AXI register interface of the board
implementation. The processor-side software is not part of this RTL.

1. With `run` low, write the weight matrix. Drive `w_we=1`, `w_row=i`,
   `w_col=j` and `w_data=W_ij` (5-bit two's complement) for every i, j. That
   is N² one-cycle writes. `W_ij` is the coupling from oscillator j into
   oscillator i. Asymmetric weights and self-coupling are allowed.
2. Write the initial phases. Drive `ph_we=1`, `ph_idx=i` and
   `ph_wdata=phase`. For binary patterns use phase 0 for one colour and 8
   for the other.
3. Pulse `load` for one cycle. It resets all shift registers to a common
   time base, clears the stored sums and seeds the phase controllers.
4. Raise `run`. The first tick comes in the same cycle. On that tick the
   stored sums are still zero, so nothing moves.
5. Read `phase[i]` when `update_count` has stayed 0 for a few periods. Pixel
   i has the colour of pixel 0 when `(phase[i] − phase[0]) mod 16` is within
   ±4. A network cannot tell a pattern from its inverse, so the read-out is
   relative.

Dropping `run` stops the divider and the oscillators. Raising it again
starts a new slow-clock period at once. A pause should start after the
stored sum has been written, i.e. later than N + 1 cycles after a tick.
Otherwise the next tick restarts the serial sum, and the old stored sum is
used once more. The enable is not aligned with any oscillator edge. The
original hardware behaves the same way, and that was named there as a
source of small run-to-run differences.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 506 | oscillators; also the depth of each weight memory |
| `PHASE_BITS` | 4 | phase resolution; oscillators have 2^PHASE_BITS stages |
| `WEIGHT_BITS` | 5 | signed weight width including the sign |
| `CLK_DIV` | 512 | logic cycles per slow-clock period, must be ≥ N + 2 |

N, PHASE_BITS and WEIGHT_BITS are the published configuration. CLK_DIV is
derived from the published frequencies, as explained above. At the
defaults, synthesis finds 1,280,180 memory bits (506 memories of 506 × 5)
and about 35 k flip-flops.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `phase_osc_tb` | the 4-stage example table, row by row; random phase changes against `((t+phase) mod 16) < 8`; the 16-tick period |
| `weight_mem_tb` | fill, sequential and random read-back, 1-cycle latency, read-enable hold |
| `serial_arith_tb` | sums against a direct sum at N = 506, incl. ±16·N extremes; result exactly N+1 cycles after start; hold and clear |
| `phase_ctrl_tb` | locking to a square-wave reference of random phase within one period; random sums incl. zero, against a counter-free model |
| `slow_clk_gen_tb` | tick spacing DIV, 50 % duty cycle, ticks only on rising edges, none while stopped |
| `hybrid_onn_tb` | 22 oscillators (a 5×4 pattern plus 2 uncoupled), CLK_DIV 32: every tick compared with a network reference model; counts each mechanism (serial sums, phase corrections, zero-sum references, a pause/resume, reloads) |
| `hybrid_onn_full_tb` | the same at the default size: 506 oscillators, CLK_DIV 512, 22×22 patterns |
| `onn_workloads_tb` | retrieval at 3×3, 5×4, 7×6 and 10×10, 100 runs per corruption level, every tick checked against the model |

The network reference model is in `tb/onn_tb_pkg.sv`. It works from the
position formula, with no counters or edge registers. On tick t it forms
`S_i = Σ_j W_ij·(±1)` from the outputs of that period, takes the reference
from the sign, and on a reference rising edge sets `phase_i -= position_i`.
The RTL matches it tick for tick in every run.

Patterns are random ±1 images, not the letters used in the original
benchmarks. No two patterns are equal or inverse to each other. Weights come
from the Diederich–Opper I rule in integer form: for each pattern and
oscillator whose local field does not exceed a margin of N with the right
sign, add `ξ_i ξ_j` to row i. The weights are then scaled so that the largest
magnitude is 15, rounded, and clamped to [−16, 15]. Retrieval accuracy
measured by `onn_workloads_tb` (100 runs each) and `hybrid_onn_full_tb`
(10 runs each):

| Pattern | 10 % flipped | 25 % flipped | 50 % flipped |
|---|---|---|---|
| 3×3 (2 patterns) | 100 % | 87 % | 45 % |
| 5×4 (5 patterns) | 95 % | 60 % | 5 % |
| 7×6 (5 patterns) | 100 % | 76 % | 1 % |
| 10×10 (5 patterns) | 100 % | 98 % | 0 % |
| 22×22 (5 patterns) | 10/10 | 10/10 | 0/10 |

These follow the published trends: near 100 % at 10 %, falling at 25 %, and
near 0 at 50 %, where a corrupted pattern is as close to the inverse.
Exact figures differ because the patterns differ.

## Where this RTL departs from, or adds to, the published design

* **Phase-controller circuit.** This is an own design that follows the
  published function (see above). In successful runs at 10 % and 25 %
  corruption, the mean time to the last phase move is 1–6 oscillation
  periods. The published mean settling times are 10–33 periods. Either the original
  controller corrects more gradually, or it measured settling differently
  (for example including read-out). This cannot be resolved from the
  available description. Retrieval accuracy agrees well.
* **Slow clock as enable.** The slow clock is used as a clock enable, not
  as a separate clock domain. The division factor 512 and the 1-cycle
  memory read latency are own choices.
* **Host ports.** Plain write ports, `load`, `run` and an `update_count`
  status output stand in for the board's AXI interface. The register map
  of the original is not known.
* **Not included.** The ARM processing system, the AXI interconnect and
  the training software are not included. The weight matrix is computed
  off-chip and written through the ports. FPGA-specific mapping (block RAM
  packing, DSP slices) is left to synthesis. The RTL has no vendor
  primitives.

## Simulating

All files are plain SystemVerilog 2017. Packages are listed first; the other
modules are found by file name with `-y`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/onn_pkg.sv tb/onn_tb_pkg.sv tb/hybrid_onn_tb.sv --top-module hybrid_onn_tb
./obj_dir/Vhybrid_onn_tb
```

Swap in `hybrid_onn_full_tb` for the 506-oscillator run. It builds in about
half a minute and simulates in about a minute. Swap in `onn_workloads_tb` for
the accuracy tables. A block testbench needs only its block's files, for
example
`verilator --binary --timing rtl/onn_pkg.sv rtl/phase_osc.sv tb/phase_osc_tb.sv`.
Lint a module with `verilator --lint-only -Wall -y rtl rtl/onn_pkg.sv rtl/<module>.sv`.
The only warnings are unused constants of the package.
