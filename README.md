# A mixed-signal simulated-bifurcation Ising solver in SRAM compute-in-memory

This design solves MAXCUT-type combinatorial problems with a fixed-point
iteration. Every node of a graph is a binary "spin" `x_n` in {-1, +1}. The
graph is an N x N 0/1 connectivity matrix `J`. All spins are updated in
parallel once per iteration:

    x[k+1] = sgn( alpha * x[k]  -  beta * J * x[k]  +  zeta[k] )

- `alpha * x` is self-feedback. It holds a spin in place.
- `-beta * J x` pushes each spin away from the majority of its neighbours,
  which is what a large cut needs.
- `zeta[k]` is random noise that gets weaker with every iteration. It shakes
  the state out of poor local optima early in a run and lets it settle later.

After a few tens of iterations the spin vector is read out. The two spin
values split the nodes into the two sides of the cut.

The hardware does the whole matrix-vector product in one step, inside an SRAM
array. Each cell stores one bit of `J`. Each row's wordlines carry one spin,
as a short pulse on one of two wires. Each cell whose bit is 1 then sinks a
small current from one of its column's two precharged bitlines. The currents
of a column add up on the bitline capacitance. After the pulse, the voltage
difference between the two bitlines is proportional to the bracket of the
equation above. A clocked comparator per column takes its sign. Its output is
the new spin, and it goes straight back to the row drivers. One iteration
takes three cycles of a 100 MHz clock, so 30 ns. Twenty iterations take
0.6 us.

The RTL here has two parts:

- **Synthesizable logic:** the digital control, meaning the sequencer, the
  scan interface, the SRAM write control, the PRBS, the iteration counter,
  the decay scaling and the wordline drivers.
- **Behavioural models:** the analog parts, meaning the cells, the bitlines,
  the noise DAC, the comparators and the delay-line pulse generator. They
  compute the same quantities with integers, so the whole loop can be
  simulated and checked bit for bit against the update equation.

## One iteration, cycle by cycle

    clk edge:    e0            e1            e2            e3 (= next e0)
                 |   PRE       |   EVAL      |   SETTLE    |
    precharge    ‾‾‾‾‾‾‾‾‾‾‾‾‾‾|_____________|_____________|‾‾‾‾
    WL pulse     ______________|‾‾4ns‾|______|_____________|____
    LoopClk                    (loop_en high) ^ decision at e2
    PRBS step                  ^ at e1 (prc = PRE)
    noise DAC    ^ new V_N at the rising edge of precharge

- **PRE.** Every read bitline pair is held at VDD (1.8 V). At the start of
  this phase the noise DAC converts a new 4-bit random code and the current
  8-bit decay code into the noise-cell gate voltage `V_N`. At the end of the
  phase the PRBS steps.
- **EVAL.** The pulse generator fires a wordline pulse at the edge that
  starts this cycle. Its width is `wl_taps` x 500 ps: the input picks which
  stage of an 8-stage buffer chain ends the pulse, so 8 gives the nominal
  4 ns. Each row driver steers the pulse onto `RWL[m]` if its spin is
  +1, or onto `RWLB[m]` if it is -1. The noise row gets the pulse on `RWL` or
  `RWLB` depending on PRBS bit `Noise[4]`. The bitlines discharge.
- **e2: the third rising edge.** Every comparator samples
  `V_BL + Cal_P >= V_BLB + Cal_N` and stores the result in its SR latch. The
  iteration counter adds `DecayStep` at the same edge.
- **SETTLE.** The comparator outputs travel back to the row multiplexers.

The first iteration of a run takes the spins from the initial-state register
(`En = 0`). All later iterations take them from the comparators (`En = 1`).
The sequencer (`sb_controller`) produces all of these as one-cycle enables
of the single clock, not as separate clocks.

## The array and its sign conventions

Row `m` and column `n` meet in one cell. The diagonal cell (`m == n`) is a
**self-feedback (FB) cell**. Every other cell is a **coupling (C) cell**. A
third kind, the **noise cell**, sits in one extra row, one per column. The
currents each cell sinks are:

| cell     | stored Q | RWL pulse (x = +1) | RWLB pulse (x = -1) | term        |
|----------|----------|--------------------|---------------------|-------------|
| C        | 0        | none               | none                |             |
| C        | 1        | `i_c` from RBL     | `i_c` from RBLB     | `-beta*J*x` |
| FB       | 1        | `i_fb` from RBLB   | `i_fb` from RBL     | `+alpha*x`  |
| noise    | none     | `g*V_N` from RBL   | `g*V_N` from RBLB   | `zeta`      |

A bitline discharged more than its partner means "push this spin to -1". The
comparator output 1 stands for spin +1. For column `n`:

    I_BL[n]  = i_c * #{m != n : J[m][n]=1, x_m=+1} + i_fb*(J[n][n] & x_n=-1) + i_N*(Noise[4]=1)
    I_BLB[n] = i_c * #{m != n : J[m][n]=1, x_m=-1} + i_fb*(J[n][n] & x_n=+1) + i_N*(Noise[4]=0)
    V      = max(0, VDD - I * t_pulse / C_BL)          (C_BL = 200 fF, t_pulse = wl_taps * 500 ps)
    x_n'   = (V_BL + Cal_P >= V_BLB + Cal_N) ? +1 : -1

**What the bias inputs stand for.** On silicon, `alpha` and `beta` are set by
two bias voltages shared across the array. The model replaces them with the
per-cell currents `i_fb_na` and `i_c_na`, which are top-level inputs. The
voltage-to-current relation of the cells is not modelled.

**Units.** The bitline model integrates current over time event by event.
Current is in nA, time in ps, capacitance in fF and voltage in uV, so
1 nA x 1 ps / 1 fF = 1 uV. A 4 ns pulse therefore lowers a bitline by 20 uV
per nA of sunk current.

**Floor at 0 V.** A line cannot go below 0 V. With large cell currents a
heavily loaded column bottoms out, and the difference between its two lines
is lost. This is the analog dynamic-range limit of the real array, and the
end-to-end test drives the model into it on purpose.

**Writing the array.** Cells are written one row at a time. The controller
puts the data on the write bitlines `WBL`/`WBLB` and pulses that row's write
wordline `WWL`. Bit `n` of row `m` is `J[m][n]`. Bit `m` of row `m` is the FB
cell, and it is written as 1 for every node that is in use. Rows and columns
that are not used must be written with zeros.

## The noise path

    PRBS (x^15+x^14+1) --Noise[3:0]--> current-mirror DAC --I--> resistor network --> V_N
                       --Noise[4]----> noise-row polarity           ^
    iteration counter (+DecayStep per iteration) --> scaling --Decay[7:0]

**Random magnitude.** Four PRBS bits switch binary-weighted mirror branches
(8:4:2:1). This gives a current that is uniformly distributed over 16
levels:

    I = I_REF/16 * (8*N3 + 4*N2 + 2*N1 + N0)

**Decay.** The current flows into `R_max`, which is always connected, in
parallel with branches `R, 2R, 4R, ... 128R`. `Decay[7]` switches in `R` and
`Decay[0]` switches in `128R`. The conductance therefore grows linearly with
the 8-bit decay code:

    G = 1/R_max + Decay/(128 R)        V_N = min(VDD, I / G)

So `V_N` falls as 1/Decay. This nonlinear fall is wanted: the noise is strong
for the first few iterations and then dies away fast.

**Decay code.** The code is `min(255, count >> shift)`. The count is a
12-bit register that adds the programmable `DecayStep` at each iteration and
saturates at 4095.

**Noise current.** The noise cell turns `V_N` into a current
`i_N = 2 nA/mV * V_N`. This linear, threshold-free law is a modelling
choice.

**The noise is common to all columns.** One DAC and one polarity bit serve
the whole row, so in a given iteration every column receives the same noise
current on the same side. In silicon, cell mismatch makes the effect differ
from column to column. In this model only the different `J x` sums do. The
consequences are discussed under "How well it solves MAXCUT".

## Host interface: the scan chain

A host programs and reads the solver through a serial scan chain clocked by
the system clock:

- While `scan_en` is high, one bit per cycle enters at `scan_in`, LSB first.
- A frame is 73 bits: `{data[63:0], addr[5:0], cmd[2:0]}`.
- A one-cycle `scan_update` executes the frame.
- The register's bit 0 is `scan_out`. Shifting the next frame in therefore
  shifts the previous contents out.

| cmd | name         | effect                                                          |
|-----|--------------|-----------------------------------------------------------------|
| 1   | WRITE_ROW    | writes `data` into array row `addr` (three-cycle SRAM write)    |
| 2   | SET_INIT     | `data` = initial spins (bit n = 1 means +1)                     |
| 3   | SET_CFG      | `data[11:0]` iterations, `[19:12]` DecayStep, `[23:20]` shift   |
| 4   | START        | starts a run (ignored while busy, or with 0 iterations)         |
| 5   | READ_STATE   | captures `{spins[63:0], 6'b0, busy, done, 1'b0}` for shift-out  |
| 6   | SET_SEED     | `data[14:0]` = PRBS seed (0 is replaced by all ones)            |

A typical session writes 64 rows, then sends SET_INIT, SET_CFG, SET_SEED and
START. It then waits for `done` and reads the result. The spins are also
visible directly on `node_state`.

## Files

| file                      | kind          | what it is                                               |
|---------------------------|---------------|----------------------------------------------------------|
| `rtl/sb_pkg.sv`           | package       | sizes, constants, scan commands, configuration struct    |
| `rtl/sb_ising_top.sv`     | top           | the complete solver                                      |
| `rtl/sb_scan_chain.sv`    | RTL           | serial host interface                                    |
| `rtl/sb_sram_ctrl.sv`     | RTL           | row write sequencing, WWL/WBL/WBLB drivers               |
| `rtl/sb_controller.sv`    | RTL           | three-phase iteration sequencer                          |
| `rtl/sb_prbs.sv`          | RTL           | 15-bit LFSR noise source                                 |
| `rtl/sb_iter_counter.sv`  | RTL           | 12-bit DecayStep accumulator                             |
| `rtl/sb_decay_scaler.sv`  | RTL           | 12-bit count to 8-bit decay code                         |
| `rtl/sb_wl_driver.sv`     | RTL           | En multiplexers and differential RWL/RWLB gating         |
| `rtl/sb_wl_pulse_gen.sv`  | behavioural   | tunable delay-line pulse generator (4 ns nominal)        |
| `rtl/sb_c_cell.sv`        | behavioural   | 10-T coupling cell                                       |
| `rtl/sb_fb_cell.sv`       | behavioural   | 10-T self-feedback cell                                  |
| `rtl/sb_noise_cell.sv`    | behavioural   | 4-T noise-injection cell                                 |
| `rtl/sb_bitline_pair.sv`  | behavioural   | precharged 200 fF bitline pair, current integration      |
| `rtl/sb_cim_array.sv`     | behavioural   | 64x64 array + noise row + bitlines                       |
| `rtl/sb_noise_dac.sv`     | behavioural   | current-mirror/resistor noise DAC                        |
| `rtl/sb_sa_comparator.sv` | behavioural   | strong-arm comparator with SR latch and calibration      |

The behavioural models use `int` ports for currents and voltages and `#`
delays in the pulse generator. They are meant for simulation, not synthesis.
The cells hold their bit in a level-sensitive latch on purpose, because that
is what an SRAM core is. Lint reports these latches.

## Simulating

Every testbench in `tb/` checks its own results, and it ends with the line
`TB_RESULT checks=<n> failures=<n>`. Timing support is required, because the
pulse generator uses delays. To run the end-to-end test:

    verilator --binary --timing -Wno-fatal --top-module tb_sb_ising_top \
        -Irtl -y rtl rtl/sb_pkg.sv rtl/sb_ising_top.sv tb/tb_sb_ising_top.sv
    ./obj_dir/Vtb_sb_ising_top

The unit tests build the same way: put the module's file and the package in
place of the top file. The test `tb_sb_cells` covers all three cell types.

**What the end-to-end test does.** `tb_sb_ising_top` uses the full 64-spin
configuration. It drives the solver only through the scan chain and the bias
ports. At every decision it recomputes all 64 bitline pairs from the
equations above and compares the spins bit for bit. It runs:

1. the 60-node complete bipartite graph K30,30 without noise, where the
   known optimum is 900 cut edges
2. a 60-node random graph with 50% edge density and decaying noise
3. a run with a calibration offset
4. a run with a 3 ns wordline pulse (`wl_taps` = 6)
5. a run with large cell currents, so the bitlines hit the floor
6. three trials on each of two further random 60-node graphs; the best of
   each three must reach 88% of the greedy reference cut (see below)

It fails if any of these mechanisms never occurred: feedback selection, both
noise polarities, noise decay, the bitline floor, a decision changed by
calibration or by noise, scan read-back, and a shortened pulse. It takes about 10 s of
simulation plus about 2 minutes of compilation.

Bias values used by the test:

| input     | value     | stands for                                |
|-----------|-----------|-------------------------------------------|
| `i_c_na`  | 1000 nA   | coupling cell current (beta)              |
| `i_fb_na` | 7000 nA   | self-feedback cell current (alpha)        |
| `i_ref_na`| 200 uA    | noise DAC reference current               |
| `wl_taps` | 8         | wordline pulse of 4 ns (one run uses 6)   |
| DecayStep | 100       |                                           |
| shift     | 4         |                                           |

The plusargs `+ifb=`, `+iref=`, `+step=` and `+shift=` change them without
rebuilding.

## How well it solves MAXCUT

The benchmark is run by `tb_sb_maxcut_dataset`, at full size like the
end-to-end test and built the same way. It uses 10 random 60-node graphs
with 50% density and 4 trials per graph. Each trial runs twice from the same
start state and PRBS seed, once for 15 and once for 20 iterations. The test
checks that a run of K iterations takes exactly 3K cycles (0.45 us and
0.6 us) and that the scan read-back matches. Accuracy is the cut divided by
the best cut of a 200-restart greedy local search, which stands in for the
unknown optimum. With the bias values above the results are:

| iterations | chip time | mean accuracy | trials at 92% or more |
|------------|-----------|---------------|-----------------------|
| 15         | 0.45 us   | 85.3%         | 10 of 40              |
| 20         | 0.60 us   | 85.3%         | 10 of 40              |

The test passes at a mean of 80% or more. The model also finds the optimum
of K30,30 (900 of 900 edges). It does not reach the more than 93% reported
for the silicon:

- **Early freezing.** Every trial has settled by iteration 15, so 20
  iterations add nothing. A trial that ends on a poor cut stays there.
- **Collapse.** About one trial in twenty ends with every spin equal, a cut
  of 0. The update is synchronous. When the spins are unbalanced, every
  node sees more neighbours on one side and all of them flip together. The
  noise row adds the same polarity to every column, so it cannot break this
  symmetry. Raising `i_fb` (alpha) removes most collapses, but then the
  state freezes even earlier and the mean stays near 84%.
- **No mismatch.** The model has no device mismatch and no thermal noise.
  Real silicon adds per-column variation to the cell and noise currents.
  The design relies on that variation, and it would break the symmetry
  described above.

The biases can be changed with `+ic=`, `+ifb=`, `+iref=`, `+step=` and
`+shift=`, and `+verbose` prints every trial. Without mismatch, no setting
tried did better than about 85%.


## Where this design makes its own choices

The following follow the published chip:

- the block structure
- the 64x64 array with feedback cells on the diagonal and one noise row
- the differential 4 ns wordline pulses and the cell truth tables
- the 200 fF precharged bitlines
- the strong-arm comparator with SR latch and row-wide calibration input
- the three-cycle, 30 ns iteration with the decision at the third rising edge
- the PRBS-driven 8:4:2:1 mirror DAC and the `R ... 128R` decay resistors
  driven by an 8-bit code
- the 12-bit iteration counter that adds `DecayStep`
- the serial scan chain as the host interface

The following are this design's own choices:

- the scan frame and its commands
- the LFSR polynomial and length, and the choice of PRBS bits
- the shift-and-saturate scaling logic, and the saturating counter
- the three-phase write timing of the SRAM controller
- the polarities of `En` and `Noise[4]`
- tie-breaking in the comparator: an exact tie gives +1 (silicon would
  resolve it randomly)
- all analog numbers: cell and noise currents, the `I_REF/16` mirror unit,
  `R = 400 ohm`, `R_max = 3200 ohm`, `V_min = 0`, the linear noise-cell law
- the stage count of the delay line, and tuning it by selecting a tap

## What is not modelled

- **No read path for the array.** The SRAM read peripherals are not built;
  the solver never reads the array digitally.
- **Ideal analog parts.** There is no leakage, mismatch, comparator offset,
  thermal noise or supply dependence. The model also ignores the voltage
  dependence of the cell currents while the bitlines fall, so the MAC is
  ideal except for the floor at 0 V.
- **No bias generation.** The bias voltages and `I_REF` come from outside the
  chip. Here they are plain numeric inputs.
