# A 440 p-bit CMOS probabilistic computer on a Chimera graph — RTL and behavioural model

A probabilistic bit (p-bit) is a binary neuron that flips at random. The probability of each
state is set by its input. With binary spins m = +1 / -1, every p-bit i evaluates

    I_i = sum_j J_ij m_j + h_i                  (synaptic input)
    m_i = sgn( tanh(beta * I_i) + r ),          r uniform in [-1, 1]

over and over. A network of such p-bits samples the Boltzmann distribution of the Ising energy
`E = -sum J_ij m_i m_j - sum h_i m_i` at inverse temperature beta. The same machinery does
several jobs:
- as a sampler, it can learn and reproduce distributions such as a logic gate's truth table;
- as an optimiser, it can anneal towards low-energy states of combinatorial problems such as
  Max-Cut or spin glasses.

The chip described here holds 440 p-bits in a D-Wave style Chimera graph. The synaptic sum,
the tanh and the random number are analog and current-mode. The spin is stored digitally in a
flip-flop, and the random numbers come from digital LFSRs. Weights and biases are 8-bit digital
codes, loaded over SPI. Learning runs in a loop with an FPGA: a hardware correlator measures
spin statistics, a processor computes new weights by contrastive divergence, and the weights go
back to the chip.

This repository gives:
- synthesizable RTL for the digital parts: PRBS generators, random clocks, spin flip-flops,
  weight registers, SPI port and the correlator;
- bit-accurate integer behavioural models for the analog parts: DACs, Gilbert multipliers, tanh
  stage and comparators.

Together they simulate the whole chip with plain Verilator, at full size, fast enough to run
annealing and sampling experiments.

## Hierarchy

```
pbit_system                      chip + learning-loop correlator (top)
├── pchip                        the chip
│   ├── spi_slave                SPI mode 0, 32-bit frames
│   ├── weight_regfile           1792 x 9-bit weight/bias registers, spin read-back
│   └── chimera_array            7 x 8 cell positions, 55 cells, 440 p-bits
│       ├── random_clock_bank    2 x PRBS31 -> 55 pseudo-random cell clocks
│       │   └── prbs31_gen (x2)
│       ├── weight_dac           one per inter-cell edge (380 edges)
│       └── chimera_cell (x55)   4:4 RBM unit cell
│           ├── prbs31_gen       32 random bits per cell clock
│           ├── weight_dac (x16) one per intra-cell edge
│           └── pbit (x8)
│               ├── gilbert_multiplier (x6)
│               ├── weight_dac   bias DAC
│               ├── tanh_wta
│               ├── rng_dac
│               ├── pbit_comparator
│               └── spin flip-flop
└── hw_correlator                <s_i>, <s_i s_j> accumulators
```

`pchip_pkg` holds the shared constants, the current and weight types, and the register map.
Files marked *behavioural model* in their header contain analog circuits modelled in integer
arithmetic. They are synthesizable as written but do not describe the silicon: the real parts
are transistor-level current circuits.

## The Chimera graph

Each unit cell is a 4:4 restricted Boltzmann machine. Local nodes 0–3 are *vertical* (V0..V3)
and nodes 4–7 are *horizontal* (H0..H3). Every V_i couples to every H_j (16 edges). In addition:
- V_i couples to V_i of the cell above and the cell below;
- H_i couples to H_i of the cells to the left and right.

So every node has exactly six coupling inputs plus a bias. The grid is 7 rows by 8 columns. The
position at row 6, column 0 holds the bias generator and SPI port instead of a cell. That leaves
55 cells and 440 p-bits. Edges at the border of the grid, or into the missing position, do not
exist. The graph has 880 intra-cell edges and 380 inter-cell edges (188 vertical, 192
horizontal), 1,260 couplers in all.

The graph is undirected, and every edge has a single weight DAC. The DAC's output is
distributed to the Gilbert multipliers at both ends, so J_ij = J_ji by construction:
- intra-cell edge DACs live in `chimera_cell`;
- inter-cell edge DACs live in `chimera_array`, one per south and per east edge.

Coupling slots of a node (the order of its six multiplier inputs):

| node | slots 0..3             | slot 4          | slot 5          |
|------|------------------------|-----------------|-----------------|
| V_i  | H_0..H_3 via J[4i+j]   | north neighbour | south neighbour |
| H_j  | V_0..V_3 via J[4i+j]   | west neighbour  | east neighbour  |

## How the analog p-bit is modelled

All currents are signed integers (`cur_t`, 20 bits) in units of one DAC LSB. Every analog
symbol has two wires, I+ and I-, and the model carries both (`diff_cur_t`). Their difference is
the signed quantity.

**Weight and bias DAC (`weight_dac`).** The weight is stored in two's complement. The DAC's
positive switches get the offset-binary code `c = w ^ 0x80`, and its negative switches get `~c`.
Each set bit steers its binary-weighted branch current to its side, so

    I+ - I- = (2w + 1) * scale        (w in -128..127)

The enable bit cuts both sides off. This matters because on silicon a zero code does not remove
a connection exactly. `scale` is the LSB current, which the bias generator sets on the chip with
an external resistor. Here it is a 4-bit code.

**Gilbert multiplier.** For spin +1 the weight pair passes straight through. For spin -1 it is
crossed, which negates the difference. Multiplier outputs are wired together, so the six
products and the bias current sum on the two input nodes of the tanh stage.

**tanh stage (`tanh_wta`).** A fully differential winner-take-all pair has a tail current
`i_tail`. Each branch takes a Fermi function of the input difference, and their difference is a
tanh. The model computes

    x = sum of input differences (+ OFFSET)
    t = beta * x / 256,   beta = (V_temp - 700 mV) / 64   (0 at or below 700 mV)
    y = i_tail * tanh(t),   I+_TANH = i_tail + y,   I-_TANH = i_tail - y

tanh comes from a 17-point table (t = 0, 0.25, …, 4), interpolated linearly; the error is below
0.7 % of full scale. V_temp is the temperature knob: 700 mV is infinitely hot (beta = 0), and
1000 mV is cold (beta ≈ 4.7).

**Random current (`rng_dac`).** The same binary-weighted DAC is steered by one pseudo-random
byte b and its complement. This gives a uniform current `(2b - 255) * scale_rng` over 256
levels.

**Decision (`pbit_comparator`).** On silicon, a current mirror copies the tanh output onto the
node where the random current is added. A WTA current comparator and a self-biased differential
voltage comparator then take the sign. The model computes `m = (I+_TANH + I+_RNG) > (I-_TANH +
I-_RNG)`, with an exact tie going to -1. The result is loaded into the spin flip-flop on the
p-bit's update strobe.

Combining the above, one update gives

    P(m = +1) ≈ 1/2 + (i_tail / (256 * scale_rng)) * tanh(t)     (clipped to [0, 1])

At the top level `i_tail = 128 * scale_tanh`, so **scale_tanh = scale_rng gives the ideal p-bit
law** P(+1) = (1 + tanh t)/2. A larger scale_tanh sharpens the p-bit into saturation.
`OFFSET`, set per p-bit from the `MISMATCH` parameter by a fixed hash, adds an input-referred
offset. It reproduces the device-to-device spread that hardware-aware learning has to absorb.
The default is 0, an ideal array.

## Random numbers and update timing

The hardest part of the design to follow is where the randomness comes from and when spins
change.

1. **Chip-level random clocks.** Two 2^31-1 PRBS generators (`prbs31_gen`) run on the system
   clock, which is 100–200 MHz on the chip. Each is decimated by 32: every clock advances the
   LFSR 32 steps, so all 32 outputs are fresh every cycle. Together they give 64 independent
   bit streams. 55 of them are the *random clocks* of the 55 cells. `random_clock_bank` turns
   each stream's rising and falling edges into one-cycle enable pulses, `clk_rise` and
   `clk_fall`. Each pulse comes on average once every four cycles, and rising and falling
   pulses of a stream alternate. The design therefore stays in one clock domain.
2. **Cell random numbers.** Each cell has its own decimated PRBS31. It advances on the cell's
   rising pulse and yields 32 bits, which is only four bytes for eight p-bits. Byte k drives
   vertical node k in normal bit order and horizontal node k bit-reversed, so the two nodes see
   different (if related) numbers.
3. **Spin updates.** The four vertical spins of a cell load their decisions on `clk_rise`, and
   the four horizontal spins on `clk_fall`. The two sides of the RBM therefore never update in
   the same cycle, which makes each cell a block Gibbs sampler. Neighbouring cells update at
   unrelated pseudo-random times. A new spin is visible to its neighbours one cycle after its
   strobe.

The seeds of all generators are fixed parameters, so a simulation is reproducible.

## Register map and SPI protocol

The SPI port uses mode 0: SCLK idles low, MOSI is sampled on the rising edge and MISO changes on
the falling edge. Each frame is 32 bits, MSB first, with CS_N low:

| bits  | meaning                             |
|-------|-------------------------------------|
| 31    | 1 = read, 0 = write                 |
| 30:16 | address                             |
| 15:0  | write data / read data on MISO     |

The pins are oversampled by the system clock, so SCLK must be at most clk/8. A write takes
effect after the 32nd SCLK edge. A read returns its data in bits 15:0 of the same frame.

Each cell position p = row*8 + col owns 32 registers at `32*p + offset`. Every register is 9
bits: bit 8 is the enable and bits 7:0 the two's-complement weight. All registers reset to 0,
which disables every edge and bias.

| offset | register                                                          |
|--------|-------------------------------------------------------------------|
| 0..15  | J(V_i, H_j) at 4i + j                                             |
| 16..23 | bias h of local node 0..7                                         |
| 24..27 | J between V_i and V_i of the cell below (row + 1)                 |
| 28..31 | J between H_i and H_i of the cell to the right (col + 1)          |
| 0x4000 + p | read only: the 8 spins of cell position p (bit k = node k)    |

Registers for edges that do not exist can be written and read, but drive nothing.

## Learning loop and correlator

Contrastive divergence needs, for the current weights, the model averages <s_i> and
<s_i s_j>, compared with the same averages over the data. Off-chip this is measured by
`hw_correlator`. Give it `start` and a sample count n; it then accumulates, on each `sample`
cycle, +1 or -1 per spin and +1 or -1 per pair (XNOR of the two spins). When `done` rises the
sums hold n<s_i> and n<s_i s_j>, for i < j. In `pbit_system` the correlator watches the eight
spins of one cell, chosen by `corr_cell`. The processor that turns correlations into new J and h
is software and sits outside this RTL. The testbench plays that role.

## Choices made here where the source is silent or inconsistent

The architecture, the sizes (440 p-bits, a 7 x 8 grid minus one cell, 8-bit weights with an
enable bit, six inputs per node, 2^31-1 PRBS with 32 outputs, 55 of 64 random clocks), the signal
chain of the p-bit and the byte-sharing trick follow the published description. The following
are this design's own choices:

- **Currents as integers.** Every analog transfer function above is an idealised model. There is
  no noise, saturation or output-resistance error apart from the optional offset.
- **Tanh scale and temperature law.** The tanh argument scale (256 units) and the linear law
  from V_temp to beta are choices made here. The source gives only V_temp's 700–1000 mV range and
  that high V_temp is cold.
- **Weight coding.** The weights are offset-binary / complement coded, and an enable bit of 1
  means enabled.
- **Bias term.** The bias enters the tanh stage directly. One printed form of the update
  equation multiplies h_i by m_i; the circuit drawings do not, and this design follows the
  drawings.
- **One DAC per edge.** Each edge has one DAC, shared by both endpoints. A schematic of the
  p-bit suggests one DAC per input; the text describes sharing, which this design follows.
- **Random clocks as enables.** The random clocks are enable pulses on the system clock. On the
  chip they clock the cell LFSRs directly.
- **Update schedule.** Vertical nodes update on rising random-clock edges and horizontal nodes on
  falling ones. The source states only that the chip performs Gibbs sampling; the update
  schedule is not described.
- **Missing cell position.** It is at row 6, column 0.
- **Interfaces.** The SPI frame format, the register map, the reset values and the PRBS
  polynomial (x^31 + x^28 + 1) and seeds are all choices made here.
- **Bias generator codes.** The four bias-generator outputs are 4-bit codes (`scale_j`,
  `scale_h`, `scale_rng`, `scale_tanh`). V_temp is a 10-bit value in mV.
- **Observation ports.** `spins` and `cell_update` bring all spins and random-clock pulses out in
  parallel. On the chip, spins are read only through SPI.

Not modelled:
- the bias generator itself (an op-amp, an external resistor and mirrors);
- the current mirror, which is an identity in this model;
- pads and the shared supply;
- the FPGA's processor.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. What they check:

- **Digital blocks**, against independent references computed in the testbench:
  - PRBS outputs against the recurrence b[n] = b[n-31] ^ b[n-28];
  - random clocks against a serial reference LFSR;
  - SPI against a bus-functional master (`spi_master_bfm`);
  - the register file against a shadow copy;
  - correlator sums against sums recomputed in the testbench.
- **Analog models:**
  - DAC and multiplier outputs, exact;
  - the tanh stage, against floating-point `$tanh` within 1 %;
  - the p-bit's measured P(+1) over 2,000 updates at several biases and temperatures, against
    the formula above within 0.05.
- **Cell and array wiring:**
  - random-byte routing at beta = 0, bit-exact against a reference PRBS;
  - that each intra-cell, south and east edge couples the right nodes with the right sign;
  - the missing cell and its absent edges.
- **`tb_pchip`**, at full size over SPI: register write and read-back, spin read-back, the
  enable bit, and coupling across a cell boundary.
- **`tb_pbit_system`**, end to end at full size with default parameters. It plays the learning
  host and covers:
  - SPI programming;
  - a coupled pair that is uncorrelated when hot and correlated with the sign of J when cold;
  - a disabled edge that decorrelates;
  - a bias sweep giving a monotonic sigmoid of <m>;
  - a small annealing run: a random ±J spin glass on eight cells, with V_temp raised in steps
    from 700 to 1000 mV. It must lower the average Ising energy by more than 1,000. The energy
    typically goes from about -600 when hot to about -4,200, in units of the weight code.

  It counts each mechanism and fails if one never happened. It runs in under 10 s after a build
  of 1–2 minutes.

- **`tb_and_gate_learning`** runs the learning loop itself, on a single cell. It embeds an AND
  gate (A = V0, B = V1, C = H0, with H1 a copy of B that carries the A-B coupling). Over 40
  epochs it measures <m_i> and <m_i m_j> with the correlator, moves each weight code by
  16 x (data - model) and rewrites it over SPI. Untrained, the valid truth-table rows hold about
  half of the samples. Trained, they hold over 75 % (typically about 94 %), and the largest
  statistics error falls below 0.2.

To simulate, for example, the whole system:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_pbit_system \
    -Irtl -Itb -y rtl -y tb rtl/pchip_pkg.sv tb/tb_pbit_system.sv
./obj_dir/Vtb_pbit_system
```

Any other testbench builds the same way with its own name. Smaller grids for experiments are
set through the `ROWS`, `COLS`, `ABSENT_ROW` and `ABSENT_COL` parameters of `pchip` or
`pbit_system`.

## Capacity for the demonstrated workloads

- **AND gate learning:** 4 p-bits (A, B and two copies of the output) inside one cell.
- **Full-adder distribution:** at least 5 visible p-bits, plus any hidden units of the
  embedding.
- **Per-p-bit tanh sweep:** all 440 p-bits, with 8-bit biases.
- **Spin-glass annealing:** all 440 spins. The couplers are the 1,260 edges of the Chimera
  graph, so a spin glass runs on that sparse graph. A fully connected SK instance would need
  96,580 couplers and has to be embedded with fewer spins.
- **Max-Cut:** limited to problems that embed into 440 spins and the Chimera edges.

Synthesis notes: `weight_regfile` holds 16,128 flip-flops, and the array instantiates 440 copies
of the tanh table and of the integer models. Generic logic synthesis of the full chip is
therefore slow. Synthesis of the digital blocks on their own is quick.
