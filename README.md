# FPIA: a field-programmable Ising array in SystemVerilog

An Ising machine minimises a quadratic function of binary variables (a QUBO,
`E(x) = 1/2 x'W2 x + W1'x + W0`). Each variable is a *spin*, and pairs of spins are
joined by *couplers* that hold the coupling weights. At every discrete time step,
each spin sets itself from a step function of the dot product between the current
spin states and its own coupling weights. Noise that shrinks over time (annealing)
helps the system settle into a low-energy state. The dot product is a
vector-by-matrix multiplication, so in-memory computing suits it well: the weights
sit in a crossbar memory array and the array computes the sums.

A fully connected machine for N spins needs an N x N weight array. Practical
problems (for example SAT instances rewritten as QUBOs) are very sparse, though,
and each spin has a small fan-in. The FPIA therefore builds the machine like an
island-style FPGA, with two changes:

* The logic blocks are **IMC blocks**. Each has an `(I+O) x O` crossbar of
  coupling weights and `O` spins. Every spin can couple to up to `I` spins in other
  blocks and up to `O` spins in its own block.
* Spin values travel between blocks over ordinary FPGA-style **programmable
  routing**: connection blocks, switch blocks and segmented wires.

A mapping tool places a sparse problem so that each spin's few couplings land in
one block, and routes the rest. This repository holds RTL for that fabric in the
"shared" configuration: `I = 140`, `O = 40`, connection-block flexibilities
`F_I = 0.15` and `F_O = 0.2`, wires spanning 4 tiles, and a Wilton switch
pattern.

## Fabric layout

```
 I/O   I/O                       S = switch block      (rtl/switch_block.sv)
  |     |                        C = connection block  (rtl/conn_block.sv)
  S--C--S--C--S                  I = IMC block          (rtl/imc_block.sv)
  |     |     |
I/O-C  I   C  I  C-I/O          one tile = S + C(above I) + C(left of I) + I
  |     |     |
  S--C--S--C--S                  default: 2 x 2 tiles (M = 2)
  ...
```

The grid coordinates follow VPR:

* IMC block `(x, y)` has `x, y = 1..M`.
* Horizontal channel segment `chanx(i, j)`, with `i = 1..M` and `j = 0..M`, runs
  above block row `j`, between switch blocks `(i-1, j)` and `(i, j)`.
* Vertical segment `chany(i, j)`, with `i = 0..M` and `j = 1..M`, runs to the right
  of block column `i`.
* Every segment has its own connection block, which serves the two blocks on
  either side of it. Those are IMC blocks, or an I/O block at the array edge.
* There are `(M+1)^2` switch blocks, one at each channel crossing.

`fpia_top` builds all of this with generate loops, adds the run controller, and
brings out the I/O pad pins and every spin state as ports.

## The IMC block

`imc_block` = `imc_xbar` (weights and dot products) + `spin_unit` (spins).

* **Rows of the crossbar.** Rows `0..I-1` are the input pins and rows `I..I+O-1`
  are the block's own spins, fed back inside the block. Column `c` yields
  `dot[c] = sum_r in[r] * w(r, c)`.
* **Weights.** Each weight is a differential 2-bit value made of four binary
  cells, `{n2, n1, p2, p1}`, worth `(p1 + 2 p2) - (n1 + 2 n2)`. The range is
  `-3..+3`.
* **Analog part.** In silicon the crossbar is analog: the bit-line currents of a
  differential pair. `imc_xbar` is a behavioural model that produces the ideal
  integer result. Noise, limited precision and settling time of the real array
  are not modelled. The array is memory with no reset, so write every weight
  before use.
* **Spin update.** Each spin updates as
  `x[c] <= en[c] & (dot[c] + noise[c] > 0)`.
  * All spins in the fabric update together, on one clock edge, whenever
    `step_en` is high.
  * A disabled spin stays 0. Use this for unused positions when a block is only
    partly filled; filling blocks to about 80-90 % routes best.
  * A field of exactly 0 gives 0.
* **Using the weights.** To minimise `E`, program `w(r, c) = -W2[r][c]`. A linear
  term `W1` needs an input that is always 1: hold an I/O pad at 1 and route it to
  a spare input row.
* **Annealing noise.** Every spin has its own xorshift32 generator:
  `v ^= v<<13; v ^= v>>17; v ^= v<<5`.
  * The seed is `32'h2545F491 ^ (((x*64 + y)*256 + c) * 32'h9E3779B9)`.
  * The generator advances once per update.
  * With `r` the signed low byte of the generator, the noise is
    `(r * amp) >>> 7`, which lies in `[-amp, amp)`.
  * Testbenches replay this sequence exactly.

## Routing: tracks, connection blocks, switch blocks

Tracks are **one-way**, because a two-state digital model cannot represent
bidirectional pass transistors. In a channel of `W` tracks (default 40):

* tracks `0..W/2-1` run toward increasing x or y;
* tracks `W/2..W-1` run the other way.

**Pin placement.** IMC pin `p` sits on block side `p mod 4` (T, R, B, L). So
each side has 35 input pins and 10 output pins, and each one reaches the channel
on that side.

**Connection block** (one per channel segment). The pins on the segment's two
sides are numbered side A first (below or left), then side B.

* **Input pin `p`** can read `n_in = ceil(0.15 W) = 6` tracks, numbered
  `(p + j*W/n_in) mod W`. Its select value means:
  * 0: the pin reads 0;
  * `j+1`: the pin reads its `j`-th track.
* **Output pin `q`** can drive `n_out = ceil(0.2 W) = 8` tracks, using the same
  formula. Each pin-track pair has its own switch bit. A switched track carries
  the pin's value from that segment onward; every other track passes through
  unchanged. If two switches hit the same track, the lower pin wins (a correct
  mapping never does this).
* Input pins read the tracks after the output switches.

**Switch block** (one per channel crossing). Wires span `L = 4` tiles.

* **Where wires start.** A wire on track `k` starts at the switch blocks where
  `(position + k) mod 4 = 0`. At the edge a wire leaves from, every wire starts.
  Here `position` counts grid steps along the wire's own direction.
* **At a starting point**, a 4:1 multiplexer drives the wire. Its select values
  are:
  * 0: off (drives 0);
  * 1: straight on, from the same track number;
  * 2: a turn from side `s+1`;
  * 3: a turn from side `s+3`.

  Sides are numbered T = 0, R = 1, B = 2, L = 3.
* **Elsewhere** the wire simply passes through.
* **Turns** use the Wilton permutation, applied to the `W/2` tracks of one
  direction (`t` is the incoming track, `h = W/2`):

  | from \ to | T | B | L | R |
  |---|---|---|---|---|
  | L | `(h-t) mod h` | `(t-1) mod h` | - | `t` |
  | R | `(t-1) mod h` | `(2h-2-t) mod h` | `t` | - |
  | B | `t` | - | `(t+1) mod h` | `(2h-2-t) mod h` |
  | T | - | `t` | `(h-t) mod h` | `(t+1) mod h` |

  So each arriving wire can continue onto three wires, one on each other side
  (`Fs = 3`). Turns change the track number, and that is what lets a route reach
  any track.

**Timing.** All routing is combinational, so a spin value crosses the fabric
within the update cycle. In silicon this delay is under a nanosecond, small next
to the analog settling time of the crossbar.

**Combinational loops.** A bad configuration can close a loop, such as a wire
turned around a ring of switch blocks back onto itself. For this reason lint
tools report the channel tracks as circular logic, and yosys reports logic loops
in `fpia_top`. Reset turns every switch off, so an unconfigured fabric has no
loops, and a valid routing never creates one.

## Configuration and operation

All configuration goes through one write bus, `cfg_t` (defined in
`rtl/fpia_pkg.sv`), at one write per clock cycle:

| kind | target | `idx` | `data` |
|---|---|---|---|
| `CFG_IMC` | weight of block `(x, y)` | `{row, col}` | `[3:0]` = `{n2,n1,p2,p1}` |
| `CFG_SPIN` | spin of block `(x, y)` | `{0, c}` enable / `{1, c}` state | `[0]` |
| `CFG_SB` | switch block `(x, y)` | `{side, track}` | `[1:0]` select |
| `CFG_CBX` / `CFG_CBY` | connection block of `chanx(x, y)` / `chany(x, y)` | `{0, pin}` input select, or `{1, pin[10:0], j[3:0]}` output switch | select, or `[0]` |

A solve runs in five steps:

1. Reset.
2. Write every weight.
3. Write the spin enables and the initial states.
4. Write the routing.
5. Pulse `start` with `n_steps`, `amp0` and `amp_period`.

The controller (`ising_ctrl`) then does the following:

* It raises `step_en` for exactly `n_steps` consecutive cycles, starting the
  cycle after `start`.
* It starts the noise amplitude at `amp0` and lowers it by 1 after every
  `amp_period` updates (0 keeps it constant). The amplitude never goes below 0.
* It pulses `done` when the run ends.

`spins` shows every spin state at all times. Spins can also be routed out to
I/O pads.

## Sizes

| parameter | default | origin |
|---|---|---|
| `I`, `O` | 140, 40 | architecture (shared configuration) |
| `F_I`, `F_O` | 15 %, 20 % | architecture |
| `L` (wire length, tiles) | 4 | architecture |
| `M` (array is M x M tiles) | 2 | this design: a size for simulation, following the 2 x 2 drawing of the fabric |
| `W` (tracks per channel) | 40 | this design |
| `IOP` (pad pins per I/O block and direction) | 4 | this design |
| noise amplitude width | 8 bits | this design |

The array size is meant to match the problem.

* `M = 2` gives 160 spins. That holds the smallest benchmark studied for this
  architecture: a random 3-SAT QUBO with about 110 variables, whose maximum
  fan-in of roughly 30 is well below `I`.
* The largest benchmarks, at about 17,000 variables, would need about 500 blocks
  at 85 % occupancy, so `M` of about 23.

`M` and `W` are plain parameters. The RTL has not been built or simulated above
`M = 2`.

`I` and `O` must be multiples of 4. `W` must be even. `ceil(F_O W)` must be at
most 16.

## Where this RTL departs from the architecture description

* The crossbar's analog dot product is an exact integer sum.
* The paper gives only the function of several parts. These are this design's
  own simplest choices:
  * the annealing noise (xorshift32 generator, linear stepwise schedule);
  * the run controller;
  * the configuration bus, which replaces the analog programming drivers (shared
    word-line and bit-line programming circuits);
  * one-way tracks;
  * the spread of tracks each pin reaches;
  * the staggering of wire starts;
  * the spread of pins around each block.
* I/O blocks have no logic here: their pins are ports of `fpia_top`.
* Bias comes through a routed constant input. The block has no separate bias
  column.
* The block's array is `(I+O) x O`, with the local spins fed back as extra rows,
  as the architecture describes it. The published area model counts only
  `I x O` cells per block.
* Every update takes one clock cycle. In silicon the update clock would be set by
  the crossbar's settling time.

## Files

| file | contents |
|---|---|
| `rtl/fpia_pkg.sv` | sizes, `cfg_t`, `weight_t`, track-pattern and Wilton functions |
| `rtl/imc_xbar.sv` | coupling array with VMM (behavioural model of the analog array) |
| `rtl/spin_unit.sv` | spins, step activation, annealing noise |
| `rtl/imc_block.sv` | IMC block: array + spins with local feedback |
| `rtl/conn_block.sv` | connection block of one channel segment |
| `rtl/switch_block.sv` | Wilton switch block |
| `rtl/ising_ctrl.sv` | run controller and annealing schedule |
| `rtl/fpia_top.sv` | the array |
| `tb/tb_*.sv` | one self-checking testbench per module |

`tb/tb_fpia_top.sv` runs the whole fabric at its default size:

* It clears and programs all four blocks.
* It routes a small problem with connection-block-only routes, a switch-block
  turn, a straight pass through a switch block, a pad bias and a pad read-out.
* It runs a noiseless solve and two annealed solves.
* After every update it checks all 160 spins against its own model of the
  intended problem.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_fpia_top rtl/fpia_pkg.sv tb/tb_fpia_top.sv
./obj_dir/Vtb_fpia_top
```

Use the same command with another `tb_*` module to test a single module. Each
testbench ends by printing `TB_RESULT checks=N failures=F`.

The full-fabric test takes about 8 seconds of run time. Most of that is the
roughly 29,000 weight writes.

`-Wno-fatal` lets the build go on past two expected warnings. Verilator warns
about circular logic in `fpia_top`, which is expected (see above). It also
warns about the widths of index expressions on the configuration bus; those are
harmless.
