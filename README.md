# A graph-colored p-bit sampler for training sparse deep Boltzmann machines

Training a Boltzmann machine with contrastive divergence spends almost all of its time drawing
Gibbs samples from the network's current model. On a CPU, the samples come one neuron at a
time. This RTL is a sampler that draws them in bulk.

Every neuron is a **p-bit**: a binary stochastic unit that flips to 1 with probability
`(1 + tanh(beta * I)) / 2`, where `I` is its input field. The network is **sparse**: each p-bit
has at most 15 neighbours. Sparsity allows a **graph coloring** in which no two neighbours share
a color. All p-bits of one color can then update at the same instant without breaking the
sequential-update rule that Gibbs sampling needs.

With four colors and four equally phase-shifted update clocks, the whole network finishes one
sweep per clock period. At the default size this gives:

- 4,264 p-bits;
- a 300 MHz system clock divided down to 15 MHz color clocks;
- 4,264 × 15 MHz ≈ **64 p-bit updates (flips) per nanosecond**.

A host drives the sampler over a memory-mapped bus in this loop:

1. freeze the p-bits;
2. write the weights and biases;
3. let the sampler run;
4. take a snapshot of all states;
5. read the snapshot back.

The host computes the learning updates from those samples and repeats. Clamping visible or label
p-bits to data needs no special hardware: the host writes a large positive or negative bias.

The RTL follows a published FPGA sampler in its structure, number formats, sizes and clocking.
The specific graph is the exception; see *Where this design departs from the published sampler*.

## The p-bit

Each p-bit (`pbit.sv`) contains three parts.

**Field.** A multiplier-accumulator (`mac_unit.sv`) computes
`I = h + sum over neighbour slots k of (m_k ? J_k : 0)`.

- The neighbour states `m_k` are 0 or 1, so each "multiplication" is a select.
- Weights and biases are 10-bit signed fixed point, s{6}{3}: sign, 6 integer bits, 3 fraction
  bits. Their range is −64 … 63.875 in steps of 1/8.
- The sum is four bits wider than the weights, so it cannot overflow.

**Inverse temperature.** The field is multiplied by `beta`.

- `beta` is a 6-bit unsigned number with 3 fraction bits, from 0 to 7.875 in steps of 1/8.
  This covers the annealing schedule 0 → 5 in 0.125 steps used for image generation.
- The product is shifted back to 3 fraction bits (an arithmetic shift, so it rounds toward −∞).

**Activation and decision.** A 128-entry table (`tanh_lut.sv`) holds
`round(2^32 · (1 + tanh(x)) / 2)` for `x = −8, −7.875, …, 7.875`.

- Arguments beyond that range saturate. At |x| = 8 the probability is within 1.2e-7 of 0 or 1.
- The p-bit's own 32-bit xoshiro128\*\* generator (`xoshiro128ss.sv`) supplies a uniform word
  `r`. The new state is `m = (r < table[x])`.
- This is the binary form of `m = sgn(tanh(beta I) − U(−1,1))`.
- The generator advances once per update, so consecutive decisions use fresh random words.

The table is computed at elaboration from a double-precision series for `exp`, in `pbit_pkg`.
It is computed once for the whole design. Every p-bit reads the same constant table, so the
design contains no data files.

Everything between the weight registers and the comparator is combinational. The state register
`m` and the generator step on the p-bit's update strobe. A field therefore has a full color phase
(5 system cycles) to settle before it is sampled. The neighbours it depends on changed at least
one phase earlier.

### Bipolar model, binary hardware

A Boltzmann machine is usually written with spins ±1. The hardware stores 0/1.

The host converts the weights before writing them:

- `J_bin = 2 J`;
- `h_bin = h − sum_j J_ij`.

The activation table already holds `(1 + tanh) / 2`. Nothing in the RTL depends on this
conversion, but the weights the host writes must be in the binary form.

## Colors, phases and sweeps

`clock_phase_gen.sv` is a modulo-20 counter. From it, the module produces two outputs for each
color `c`:

- a one-cycle **update strobe** `phase_en[c]` at count `5c`;
- a 50 % **color clock** `color_clk[c]` that rises at count `5c`.

The four color clocks run at 15 MHz, shifted by 0°, 90°, 180° and 270°.

Only the strobes are used inside the design. The color clocks are brought out for observation.
All state lives in the one system clock domain, and the phase-shifted clocks act as clock
enables. A sweep ends at the color 3 strobe (`sweep_done`).

`pbit_network.sv` gives p-bit `i` the color `i mod COLORS`. Its update strobe is
`run && phase_en[color]`, so clearing `run` freezes every p-bit at once.

Because neighbours never share a color, the four updates within a sweep are exactly sequential
Gibbs steps over four independent blocks. The parallel design draws from the same distribution as
one-at-a-time Gibbs sampling.

## The built-in graph

Each p-bit has `MAX_DEG = 15` neighbour slots. Slot `k` reads the state of a fixed neighbour
given by `pbit_pkg::nbr_idx`:

- slot `2p` connects to `i + d_p` (mod N);
- slot `2p+1` connects to `i − d_p` (mod N);
- `d_p` runs over the positive integers not divisible by the color count: 1, 2, 3, 5, 6, 7, 9.

This gives 14 neighbours per p-bit, and slot 15 stays unused. Two p-bits whose indices differ by
a number not divisible by 4 never have the same `i mod 4`. So the 4-coloring is valid by
construction, provided N is a multiple of the color count (an assertion checks this).

At N = 4,264 the graph has 29,848 edges, its density is 0.33 %, and every p-bit has degree 14. If
N is too small for an offset, that slot is unused.

Each p-bit holds its own copy of the weight of each of its edges. A symmetric Boltzmann machine
needs `J_ij = J_ji`, and the host must write the same value into both slots.

Any other graph of maximum degree `MAX_DEG` that is properly colored by `i mod COLORS` can be
used by editing `nbr_idx`, since nothing else depends on it. A graph with a different coloring
also needs an edit to `color_of`.

## Readout: mirror, snapshot, output memory

The host cannot read 4,264 live states atomically over a 32-bit bus. A snapshot path freezes a
consistent copy while the p-bits keep running:

1. **`snapshot_ctrl.sv`** raises the snapshot signal for one cycle, right after a sweep has
   completed (the cycle after `sweep_done`). It has two triggers:
   - a host request, which stays pending until it is served;
   - automatic mode, which fires every `AUTO_SWEEPS` sweeps.

   It also counts sweeps and snapshots.
2. **`mirror_reg.sv`**, the mirror p-bits, copies all states while the snapshot signal is 1 and
   holds them while it is 0.
3. **`out_bram.sv`**, the output memory, is enabled by the inverted snapshot signal. It saves the
   mirror only once per snapshot, starting at the falling edge of the snapshot signal.
   - It stores the mirror 32 bits per word, one word per cycle: 134 cycles at N = 4,264.
   - It then pulses `done`.
   - Its read port is registered: one cycle.

   No new snapshot is raised while a save is in progress.

The host sees STATUS[0] ("snapshot saved") go high and then reads the words. Bit `b` of word `w`
is p-bit `32w + b`. Unused bits of the last word read 0.

## Measuring flips per nanosecond

`flip_meter.sv` mirrors the way the sampling rate is measured on the board:

- one counter per color counts the flip attempts of that color block;
- a reference counter counts system-clock cycles up to a preset;
- when the reference counter reaches the preset, all counters stop.

The rate is `sum_c count_c × (N / COLORS) / (preset × T_clk)`. At the defaults, a preset of
1,000 gives 50 attempts per color, which is 4 × 1,066 × 50 / 3.333 µs = 63.96 flips/ns.

## Host interface and register map

The top's only functional port is a 32-bit AXI4-Lite slave with a 20-bit byte address
(`axil_regfile.sv`). Bits [19:18] of the address select one of four regions.

| Region | Byte address | Contents |
|---|---|---|
| 0 | 0x00000 | control and status registers (table below) |
| 1 | 0x40000 + 4·(i·15 + k) | weight of p-bit `i`, slot `k`; data [9:0]; write-only |
| 2 | 0x80000 + 4·i | bias of p-bit `i`; data [9:0]; write-only |
| 3 | 0xC0000 + 4·w | output memory word `w`; read-only |

| Offset | Register | Meaning |
|---|---|---|
| 0x00 | CTRL | [0] run; [1] auto snapshot; [8] request a snapshot; [9] start a rate measurement; [10] clear the counters. Bits 8–10 are one-shot commands. |
| 0x04 | STATUS | [0] snapshot saved; [1] save busy; [2] measurement busy; [3] measurement done |
| 0x08 | BETA | [5:0] inverse temperature; reset value 8 (beta = 1) |
| 0x0C | AUTO_SWEEPS | sweeps between automatic snapshots; reset value 1 (0 is treated as 1) |
| 0x10 | SWEEPS | sweeps completed while running |
| 0x14 | REF_PRESET | reference count of the rate measurement |
| 0x18 | REF_COUNT | reference counter |
| 0x1C | SNAPS | snapshots taken |
| 0x20 | INFO | [15:0] N, [23:16] neighbour slots, [27:24] colors |
| 0x40 + 4c | FLIPS[c] | flip attempts of color `c` in the last measurement |

**Write timing.** A write is accepted in the cycle where AWVALID and WVALID are both high and no
response is pending. BVALID follows one cycle later.

**Read timing.** A read returns RVALID two cycles after it is accepted.

**Responses.** All responses are OKAY. WSTRB is ignored.

Writes to the weight and bias memories should be made with `run = 0`. The hardware does not
enforce this. A write while running takes effect immediately.

### A typical training iteration

1. Write CTRL = 0 to freeze the p-bits.
2. Write the changed weights and biases, in binary form. Clamped p-bits get bias +63.875 or −64.
3. Write BETA, then write CTRL = 1 to start sampling.
4. Either:
   - write CTRL = 0x101 for a single snapshot after the current sweep; or
   - set AUTO_SWEEPS and CTRL = 0x003 to take snapshots continuously.
5. Poll STATUS[0], then read the words of region 3.

The snapshot can be taken while the p-bits keep running. This is how many samples are collected
per weight update without stopping the chain.

## Files

| File | Block |
|---|---|
| `rtl/pbit_pkg.sv` | sizes, number formats, control struct, graph, seeds, activation table |
| `rtl/xoshiro128ss.sv` | per-p-bit random number generator |
| `rtl/tanh_lut.sv` | activation table lookup with saturation |
| `rtl/mac_unit.sv` | field of one p-bit |
| `rtl/pbit.sv` | p-bit: beta scaling, table, comparator, state |
| `rtl/pbit_network.sv` | N p-bits wired by the built-in graph |
| `rtl/clock_phase_gen.sv` | phase-shifted color strobes and clocks |
| `rtl/weight_mem.sv`, `rtl/bias_mem.sv` | weight and bias storage (register arrays read in parallel) |
| `rtl/mirror_reg.sv`, `rtl/out_bram.sv`, `rtl/snapshot_ctrl.sv` | readout path |
| `rtl/flip_meter.sv` | sampling-rate measurement |
| `rtl/axil_regfile.sv` | AXI4-Lite slave and register map |
| `rtl/pcomputer_top.sv` | top level |

`tb/` contains one self-checking testbench per module, `tb_<module>.sv`, plus two shared files:

- `tb_ref_pkg.sv`: independent reference models, namely a generator using plain multiplications,
  the activation from `$exp`, and beta scaling;
- `axil_bus.sv`: an AXI4-Lite master interface with write and read tasks.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself, with a watchdog.
With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/pbit_pkg.sv tb/tb_ref_pkg.sv tb/tb_pbit_network.sv --top-module tb_pbit_network
obj_dir/Vtb_pbit_network +verilator+rand+reset+2
```

Substitute any other testbench name. The end-to-end test is `tb_pcomputer_top`. It uses 400
p-bits and drives the design only through the bus. It counts how often each mechanism happened
and fails if any never did:

- weight and bias writes;
- clamping through biases;
- a coupling that forces a free p-bit;
- freezing;
- host and automatic snapshots;
- beta = 0, which gives unbiased coin flips;
- the rate measurement.

`tb_pbit_network` (40 p-bits) predicts every single p-bit update with its own Gibbs reference
model. The model has its own copy of the graph, the generators and the activation.

**Largest simulated size.** The end-to-end test has also been run with `N = 1064` (a quarter of
the default size, changed in its `localparam`): all 3,441 checks pass, and the build takes about
two minutes. A simulation of the full 4,264-p-bit top was not completed. Verilator's C++
compilation of a design this wide (64k weight registers, 4,264 MAC trees) takes well over ten
minutes. The individual blocks are tested at their default sizes where that is cheap: the
generator, table, MAC, p-bit, clocking unit and rate meter. At N = 4,264 the whole design passes
lint and elaboration in both Verilator and slang.

## Where this design departs from the published sampler

**The graph.** The published sampler is wired as a D-Wave Pegasus graph with 4,264 nodes, and
its connectivity is data taken from outside the design.

- This RTL uses the circulant graph described above. It has the same node count, at most 15
  neighbours and a 4-coloring, with 29,848 edges against the Pegasus network's roughly 26,000.
- The sampler, its rates and its interfaces behave the same. But a network trained for Pegasus
  cannot be loaded edge for edge.
- Zephyr (3,360 nodes, degree 20, 5 colors) needs `DEG = 20, COLORS = 5`. The graph function
  then uses offsets not divisible by 5, giving 20 neighbours.

**Clocks.** The original derives four phase-shifted 15 MHz clocks from the 300 MHz system clock
with a vendor clock manager, and clocks each color block with its own clock. Here they are clock
enables in one domain: the same update order and rate, with no clock-domain crossings.

**Memories.** The weights and biases feed all MAC units at once, so they are register arrays
written one word at a time, not block RAMs behind a single port.

The output memory holds one snapshot. Its enable is the inverted snapshot signal, as in the
original. Here that is implemented as a save that starts on the falling edge.

**Bus.** The original uses a PCIe link and an AXI manager on the FPGA feeding a generated AXI4
register slave. Here the boundary is an AXI4-Lite slave, and the address map and register layout
are this design's own.

**Beta.** Where the inverse temperature enters the hardware is not specified in the original.
Here it is a 6-bit multiplier in front of the table.

**Choices the original leaves open:**

- xoshiro128\*\* as the xoshiro variant;
- per-p-bit seeds from a splitmix hash of the index;
- table size and range (128 entries, x in [−8, 8));
- reset values: p-bits 0, memories 0, beta = 1;
- snapshots aligned to sweep boundaries;
- the automatic snapshot mode.

The comparator is drawn with its inputs in a particular order in the original's block diagram.
The design follows the update equation, `m = 1` with probability `(1 + tanh(beta I)) / 2`.

**Not built:**

- the host (training algorithm, weight conversion, clamping, graph coloring);
- the PCIe link and AXI manager;
- the clock manager;
- the differential system-clock input buffer.

The top exposes the AXI4-Lite port and one clock input where these connect.
