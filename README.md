# A checkerboard Metropolis engine for the 2-D Ising model

This RTL runs Monte Carlo simulations of the two-dimensional Ising model:
an L x L square lattice of spins S = +1/-1 with periodic boundaries and
nearest-neighbour ferromagnetic coupling (J = 1, no external field). The
energy is H = -sum over neighbour pairs of S_i*S_j. The spins evolve under the
Metropolis rule:

* Let eps = S0 * (S_L + S_T + S_R + S_B), the spin times the sum of its four
  neighbours. Flipping S0 changes the energy by dE = 2*eps.
* The flip is taken when dE <= 0.
* Otherwise it is taken when a random number r in [0,1) is below exp(-dE/T).

Two spins that are not neighbours can be updated at the same time. Colour the
lattice like a checkerboard and every neighbour of a "grey" site is "white",
so all grey spins can be updated at once, then all white ones. One pass over
both colours is one Monte Carlo step (MCS).

The engine is built around that fact. Each colour (sub-lattice) lives in its
own memory. Each clock cycle one memory word is read: P spins of one colour,
a whole number of lattice rows. At the same time all the neighbours of those
spins are read from the other memory. P identical spin blocks update the P
spins in parallel, and the new word is written back. At the default size
(L = 1024, P = 2048) an MCS takes 512 cycles. That is 2048 spin updates per
cycle, or 614,400 updates per microsecond at the 300 MHz clock the design
targets.

The design follows a published FPGA accelerator for a Virtex-5 XC5VLX110T.
That source gives the spin block, the random-number scheme, the memory split
and the update order. It says nothing about the memory read path, the
sequencer, the host link or how the magnetization is collected; those parts
are this implementation's own and are marked as such below.

## Lattice layout: sub-lattices, groups and words

This is the part that most needs explaining. Several modules depend on it.

* **Coordinates.** Row y runs from 0 (top) to L-1; column x runs from 0 to L-1.
* **Colour.** Site (y, x) belongs to sub-lattice s = (x + y) mod 2. Sub-lattice 0
  is the one holding site (0, 0).
* **Row halves.** In row y, sub-lattice s holds L/2 spins. Its j-th spin sits at
  column x = 2j + p, where p = (y + s) mod 2.
* **Groups.** One memory word holds ROWS = 2P/L consecutive rows of one
  sub-lattice: a group. Bit r*(L/2) + j of word g is spin j of row
  y = g*ROWS + r.
* **Memory depth.** Each sub-lattice memory has DEPTH = L*L/(2P) words: 256 at
  the default size.

When word g of sub-lattice s is updated, its spins need these neighbours, all
in the other sub-lattice s':

| neighbour | where it comes from |
|---|---|
| left | same row, entry j of s' if p = 1, entry j-1 (wrapping) if p = 0 |
| right | same row, entry j+1 (wrapping) if p = 1, entry j if p = 0 |
| top | entry j of the row above: inside word g of s', or for the first row the **last row of word g-1** of s' |
| bottom | entry j of the row below: inside word g of s', or for the last row the **first row of word g+1** of s' |

Group addresses wrap (g-1 of word 0 is DEPTH-1), which gives the periodic
boundary top to bottom. The column wrap gives it left to right.

`neighbor_map` implements this table as fixed wiring plus one multiplexer per
left and right input, selected by the row parity. For an 8x8 lattice with four
rows per word it gives exactly the numbering of the source's connectivity
example:

* spins 1..16 are updated;
* neighbours 1..16 come from the same rows;
* neighbours 17..20 come from the row below the group;
* neighbours 21..24 come from the row above the group.

`tb_neighbor_map` checks this numbering source by source.

When ROWS = L, a single word holds a whole sub-lattice (DEPTH = 1). The
"group above" and the "group below" are then the same word, and everything
still works. This is the case for lattices up to 64x64 with 2048 blocks.

## The spin block (`spin_unit`)

Each spin block does the following:

1. It turns the four neighbour bits (1 = +1, 0 = -1) into +-1 and adds them,
   giving a value from -4 to 4.
2. A 2:1 multiplexer picks the sum or its negation, depending on the spin.
   This gives eps.
3. Two comparisons are made:
   * `S_Com1 = eps <= 0`: the flip does not raise the energy.
   * `S_Com2 = r < table[(eps+4)/2]`: the Metropolis acceptance. The table
     holds exp(-2*eps/T) as a 12-bit fraction of 4096, and r is a 12-bit
     random number.
4. `S_Change = S_Com1 | S_Com2` is XORed with the spin. The result is
   registered as `new_spin`.

The five-entry table (`boltzmann_lut`) is read on **Clk_B**, a clock at twice
the system clock whose rising edges line up with Clk_A. The eps computation has
half a cycle before the mid-cycle Clk_B edge. The comparison and XOR have the
other half before the next Clk_A edge. So one update fits in one system
cycle, as in the source (which reports 316 MHz for the block alone).
Testbenches generate both clocks: Clk_A with period 20, Clk_B with period 10,
starting high.

The table entries for eps <= 0 are never used, because S_Com1 already forces
the flip. They are still stored, so the table keeps its five entries. The
comparison is strict (r < value), so an entry v accepts with probability
exactly v/4096. The source's block diagram prints ">=" here while its
equation is strict; the equation was followed.

## Random numbers

* **Global register.** One 32-bit LFSR (`lfsr32`, taps 32, 22, 2, 1, XNOR
  feedback into flop 1) is shared by all blocks. Its first 12 flops are sent
  to every block.
* **Local registers.** Each block owns a 12-bit LFSR (`lfsr12`, taps 12, 6, 4,
  1, XNOR, period 4095).
* **The random number.** A block's r is its local state XORed with the 12
  global bits.
* **Seeds.** The local seeds are (i*1567) mod 4095 for block i (function
  `ising_pkg::lfsr12_seed`). That gives distinct starting phases of the same
  4095-long sequence. The all-ones state locks an XNOR LFSR and is never used
  as a seed.

All LFSRs shift once per cycle while a run is active. They also shift during
initialisation, where the top bit of each block's r becomes that block's
initial spin.

The tap sets are the maximal-length polynomials whose flop numbers match the
source's drawing. The source states only that the feedback is "XOR or XNOR",
and the seeds are not given. A different seed set changes the trajectories
but not the statistics.

## One run, cycle by cycle (`update_ctrl`)

A one-cycle `start` pulse begins a run with three host-chosen counts:
`therm_mcs`, `sample_gap` and `n_samples`. The source's measurements used
1000, 100 and 1000.

| phase | cycles | what happens |
|---|---|---|
| INIT | 2*DEPTH | every word of sub-lattice 0 and then 1 is written with random bits |
| RUN | 2*DEPTH per MCS | words 0..DEPTH-1 of sub-lattice 0 are updated, then those of sub-lattice 1; `new_spin` is written back one cycle later |
| DRAIN | 1 | the last write-back |

`done` pulses after 2*DEPTH*(1 + MCS) + 1 cycles. MCS here is
therm_mcs + sample_gap*n_samples.

Because the write-back is one cycle late, the first word of a sub-lattice
sweep reads, as its upper neighbour row, the word that is being written in
that same cycle. The memories therefore forward write data to a read of the
same address (the **write-through bypass** in `sublattice_ram`). This happens
once at every switch between sub-lattices.

The memories have one write port and three asynchronous read ports: word g,
g-1 and g+1. This read structure is this implementation's own. A Virtex-5
block RAM has two synchronous ports. An FPGA build would need either a read
pipeline stage with matching forwarding, or a small copy of the boundary rows.

## Magnetization and the host side

`mag_counter` keeps M = sum of S_i without reading the lattice:

* during initialisation it adds the ones of each random word;
* during the run it adds one for every -1 to +1 flip and subtracts one for
  every +1 to -1 flip;
* M = 2*ones - N.

In the last cycle of every `sample_gap`-th MCS after thermalisation,
`sample_valid` and `sample_mag` present M. Sampling costs no cycles. This is
consistent with the source's run times, which are exactly 101000 MCS times
the MCS length. Averages, the magnetization per spin m = <M>/N and the
susceptibility chi = (<M^2> - <M>^2)/(T*N) are left to the host.

How the source connects to its host is not known. The top level therefore
has plain ports:

* a write port for the five table entries (`lut_we`, `lut_idx`, `lut_data`),
  which is how the temperature is set;
* the run controls;
* the samples;
* a read port (`host_sub`, `host_addr`, `host_rdata`) that returns any memory
  word while the engine is idle.

The PLL that makes Clk_B is not part of the RTL either; both clocks are inputs.

## Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `L` | 1024 | lattice side, a power of two |
| `P` | 2048 | spin blocks = spins per word; 2P/L must divide L and be at most L |
| `LFSR32_SEED` | 32'h12345678 | global LFSR seed (not all ones) |

The default of 2048 blocks is the source's resource estimate: 69,120 LUTs
divided by 30 LUTs per block, rounded down to a power of two.

| L | P | rows per word | words per memory | cycles per MCS |
|---|---|---|---|---|
| 16 | 128 | 16 | 1 | 2 |
| 32 | 512 | 32 | 1 | 2 |
| 64 | 2048 | 64 | 1 | 2 |
| 128 | 2048 | 32 | 4 | 8 |
| 256 | 2048 | 16 | 16 | 32 |
| 512 | 2048 | 8 | 64 | 128 |
| 1024 | 2048 | 4 | 256 | 512 |

At 300 MHz these give the source's MCS times: 6.6 ns to 1706.6 ns. The lattice
size is fixed when the design is elaborated. To simulate another size, set
`L` and `P` as in the table.

## Where this departs from the source, and how far to trust it

* **Memory read path.** The memories are arrays with asynchronous reads,
  three read ports and write-through forwarding. The source maps them to
  1024x36 block RAMs, and its exact read path is unknown.
* **Temperature setting.** The Boltzmann table is written by the host into
  one shared register. The source builds the table as logic for a fixed
  temperature.
* **Table indexing.** The table is indexed by eps in {-4,-2,0,2,4} and holds
  exp(-2*eps/T). The source's text calls these five values dE, which
  contradicts its own dE = 2*eps.
* **Flip-flops per spin block.** A spin block here has 25 flip-flops: 12 in
  the local LFSR, 12 in the registered table output and 1 for `new_spin`.
  The source reports 17 registers and 30 LUTs per block but does not say how
  they are split, so the block could not be matched to that count.
* **This implementation's own parts.** The sequencer, the random initial
  lattice, the magnetization counter and all seeds.
* **Not included.** The next-nearest-neighbour, Potts and 3-D extensions,
  which the source describes only as possible future work.

The RTL has been verified only in simulation. It has not been synthesised for
an FPGA, and no timing has been checked.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* **Unit testbenches.** These compare each module with an independent model:
  * the LFSRs against bit-level flop-chain models, including the 4095-step
    period;
  * the spin block against the Metropolis rule, with every path (flip, thermal
    flip, rejection) counted;
  * the neighbour map against the 8x8 numbering and against coordinates on a
    16x16 lattice;
  * the memory against an array model, with the bypass checked;
  * the sequencer cycle by cycle;
  * the magnetization counter against a software count.
* **`tb_ising_top` (16x16, P = 32, 9 MCS).** A reference Metropolis simulation
  with its own copies of every LFSR predicts the exact trajectory. The test
  compares every sample, the final M, the whole final lattice (read back word
  by word) and the run length in cycles. It also counts every mechanism:
  initialisation, energy-lowering flips, thermal flips, rejections, bypass
  reads, address wrap and samples.
* **`tb_ising_full`.** The same comparison at the default size (1024x1024,
  2048 blocks) for 3 MCS.
* **`tb_ising_workload`.** The measurement schedule of the source (1000 + 1000
  x 100 MCS) on 16x16 and 32x32 lattices at T = 1.5, 2.3 and 3.5. It checks
  2 cycles per MCS and the physics:
  * mean |m| = 0.986 at T = 1.5, the exact value;
  * small magnetization at T = 3.5;
  * a susceptibility that peaks near the critical temperature and grows with
    L.

To run one with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl +libext+.sv rtl/ising_pkg.sv tb/tb_ising_top.sv --top-module tb_ising_top
./obj_dir/Vtb_ising_top
```

The full-size testbench takes about three minutes to compile and well under
a second to run. The workload testbench runs in about ten seconds.
