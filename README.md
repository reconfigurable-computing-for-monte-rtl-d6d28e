# A heat-bath spin-glass engine in SystemVerilog: one Janus-style simulation processor

This RTL describes one *simulation processor* (SP) of a machine for Monte Carlo
simulation of the three-dimensional Edwards–Anderson (EA) spin glass. The
Janus project built that machine from FPGAs. Each site of an L×L×L cubic
lattice holds a spin σ = ±1. Each nearest-neighbour link holds a fixed random
coupling J = ±1. Boundaries are periodic. The engine updates spins with the
heat-bath rule at inverse temperature β. Its main idea is to use very many
very small update units at once. At the default size (L = 80) the design has
800 update cells. Each cell has its own 32-bit random number generator output
and its own probability table. Together they update 800 spins in every clock.

The default configuration holds two independent copies (replicas) of one
80³ sample. With a larger depth the same SP also runs *parallel tempering*
(PT) entirely on chip. PT keeps N_T copies at N_T temperatures and
periodically proposes exchanges between neighbouring temperatures.

The top module is `janus_sp` (`rtl/janus_sp.sv`). The rest of this document
explains how it is organised, starting with the part that is hardest to
follow: how spins are laid out in memory so that 800 of them can be updated
together without conflicts.

## 1. The update rule, reduced to bits

Spins and couplings are stored as single bits:

    S = (1 - σ)/2        Ĵ = (1 - J)/2          (bit 1 means -1)

For a spin k with neighbours m, the local field φ_k = Σ_m J_km σ_m becomes

    F_k = Σ_m (Ĵ_km xor S_m)   ∈ {0..6},      φ_k = 6 - 2 F_k

So a cell needs six XOR gates and a 3-bit population count. The heat-bath
probability P(σ_k = +1) = e^{βφ}/(e^{βφ} + e^{-βφ}) depends only on F. It is
held in a seven-entry table of 32-bit unsigned fractions of 2³², with
P = 1 saturated to 2³² − 1. A 32-bit random number r then gives
the new spin: σ = +1 (bit 0) if r < P(F), else σ = −1 (bit 1). This is
`hb_update_cell`, with its table in `hb_lut`.

For the energy, the same cell also counts its unsatisfied links,
U_k = Σ_m (Ĵ_km xor S_m xor S_k). A link is unsatisfied when J σ_k σ_m = −1. The
energy of a whole system is

    H = -Σ_links J σ σ = Σ_all sites U_k − 3 L³

Each link is seen from both of its ends, so the sum counts it twice. The
equation above already accounts for this.

## 2. Memory layout: words, banks P and Q, and meshed systems

### Words

A lattice *word* is R rows of L bits: R = 10 consecutive lines along y, in
one z plane, each line running the full length L along x. At L = 80 one word
holds 800 sites. The y range is split into NYB = L/R row blocks. The word at
row block yb and plane z sits at address

    address = (pair · NYB + yb) · L + z

At L = 80 this gives 640 words (a 10-bit address space). `pair` selects a
pair of systems when PT uses more than one pair (section 5).

### Black and white sites, two systems in one word

A site is *even* (black) when x+y+z is even, *odd* (white) otherwise. All six
neighbours of a black site are white, so all black sites can be updated at
the same time, then all white ones.

Two systems A and B are kept interleaved ("meshed") in two banks:

| bank | bits 0 … L/2−1 of each row | bits L/2 … L−1 of each row |
|------|-----------------------------|-----------------------------|
| P    | even sites of system A      | odd sites of system B       |
| Q    | odd sites of system A       | even sites of system B      |

Inside a half-row of colour c in line (y, z), bit index i holds the site

    x = 2 i + ((c + y + z) mod 2)

Three properties follow from this layout:

* Every neighbour of a site in P is in Q, and vice versa. Updating P reads
  only Q, and updating Q reads only P, so a word can be read, updated and
  written back with no hazards inside a half-sweep.
* Both halves of a bank word belong to different systems, but each half is
  always the same system. So cells 0 … L/2−1 of every row always work on
  system A and the other cells on system B. Each cell therefore needs only
  one temperature's table.
* Both systems advance together. One pass over P followed by one pass over
  Q is a full sweep of A *and* B, and it takes 2 × 640 clocks at L = 80.

### Where the neighbours are

`neighbor_gather` is a purely combinational routing network. For the cell
at row r, half h and index i, the six neighbours (order x−1, x+1, y−1, y+1,
z−1, z+1) come from the other bank, in the same half:

* **z ± 1**: same row and index, in the words of planes z−1 and z+1 (same
  row block, address ± 1 with wrap-around in z).
* **y ± 1**: rows r ± 1 of the word of plane z. Row 0 needs row R−1 of the
  row block below (the *y−1 halo*), and row R−1 needs row 0 of the block
  above (the *y+1 halo*).
* **x ± 1**: index i or i ± 1 of the same row. With q = (c + y + z) mod 2,
  the x−1 neighbour is at i if q = 1, else at i−1, and the x+1 neighbour is
  at i+1 if q = 1, else at i. Indices wrap inside the half-row.

A bank is therefore read at six addresses per clock: the target word (for
the energy and for writing back), planes z−1, z, z+1 of the other bank, and
the two halo words. `lattice_bank` provides this as a memory with NRD
registered read ports. On an FPGA these are replicated block RAMs.

### Couplings

The three coupling memories Jx, Jy and Jz use the same word/row shape but a
plain x order. Bit x of row (y, z) is the link from (x, y, z) to its +1
neighbour in that direction. The link towards −1 is the +1 link of the
neighbour. So the gather network also reads the Jz word of plane z−1 and the
Jy row y−1 of row 0 (the Jy halo). Couplings never change, and all systems in
the banks are copies of the same sample, so one coupling memory of NYB·L
words serves all pairs.

## 3. The pipeline of one half-sweep

`sp_controller` issues one word address per clock. Plane z runs fastest,
then the row block yb:

    clock n     issue (pair, yb, z, target bank)
    clock n+1   bank outputs registered → gather → 800 cells → write to target
                bank at the same address, all rows written

Nothing read in a half-sweep is written in the same half-sweep. The only
hazard is between half-sweeps: the last words written into P must land
before Q reads them. The controller therefore inserts DRAIN = 2 idle clocks
between half-sweeps. A read that meets a write to the same word in the same
clock returns the old data. Together with the drain this keeps the order
exact.

Random numbers: there are R Parisi-Rapuano generators (`pr_rng`). Each
produces L = 80 numbers per clock, so 10 × 80 = 800 numbers cover all
cells. Generator r feeds row r of the word, and its numbers go to bits
0 … L−1 in order. A generator keeps 62 words of 32 bits and computes

    I(k) = I(k−24) + I(k−55)  (mod 2³²),     r(k) = I(k) xor I(k−61)

Unrolled 80 times per clock, each output feeds the next through a
combinational chain. Its depth sets the longest path of the design. The
lags 24, 55 and 61 are the usual Parisi-Rapuano ones. The generator advances
only in clocks that update a word. Energy sweeps and idle clocks do not use
numbers.

## 4. Energies: the non-writing sweep and the adder trees

A system's energy is measured by a sweep that reads like an update sweep but
writes nothing. Over P and then Q it visits every site of both systems once.
Each cell outputs its 3-bit unsatisfied-link count U. Two pipelined binary
adder trees (`energy_tree`, one per system, 400 inputs each at L = 80) add
the counts of a whole half-word every clock. Each tree has one register per
level, so its latency is ⌈log₂ 400⌉ = 9 clocks. Two accumulators collect the
tree outputs. After the last word the controller waits DRAIN + 9 clocks for
the trees to empty. It then stores E = ΣU − 3L³ of system A and of system B,
one per clock, into the tempering engine. An energy sweep takes as long as
an update sweep.

## 5. Parallel tempering on chip

With parameter NPAIRS the banks grow in depth: pair p occupies addresses
p · NYB · L onwards and holds configurations 2p (half A) and 2p+1 (half B).
NT = 2 · NPAIRS. The tempering state is in `pt_engine`:

* **Temperature tables**: NT × 7 entries of 32 bits in RAM, written by the
  host, plus each temperature's β as unsigned 16.16 fixed point.
* **BETAINDEX**: for each configuration, the index of its current
  temperature, and the inverse map from temperature to configuration. Only
  these indices move when a swap is accepted. Spins never move.
* **Energies**: one signed 32-bit value per configuration, written after
  each energy sweep.
* **Logarithms**: NT − 1 values of ln r, one per neighbouring pair of
  temperatures. They come from one single-output Parisi-Rapuano generator
  and `ln_unit`, which computes ln r in 16.16 fixed point in 18 clocks. It
  uses leading-one detection, a bit-serial base-2 logarithm of the mantissa
  by repeated squaring, and multiplication by ln 2. r = 0 returns the most
  negative value. The logarithms are started at the beginning of the run
  and are finished long before they are needed.

A run with tempering enabled proceeds like this, for each pair in turn:

1. Copy the tables of the temperatures of configurations 2p and 2p+1 into
   the cells of half A and half B (7 clocks, one entry per clock into all
   cells of a half).
2. Run `run_nsweeps` sweeps (P then Q each).
3. Run one energy sweep and store both energies.

After the last pair, the engine goes through the temperature pairs
(t, t+1), t = 0 … NT−2, one per clock. It accepts the exchange when

    ln r ≤ (β_{t+1} − β_t) · (E_{c(t+1)} − E_{c(t)})

where c(t) is the configuration currently at temperature t. The product is
exact, with 66 bits before comparison. An accepted exchange swaps the two
BETAINDEX entries and the inverse map entries. Later pairs in the same pass
see the swaps already made. `pt_accepts` and `pt_rejects` count the
decisions.

Without tempering (`run_pt_en = 0`) the run loads the tables once per pair
and only sweeps. This is the main use at L = 80: two replicas of one sample,
each at the temperature its BETAINDEX entry names.

## 6. Host port and run control

The I/O processor that feeds an SP is not modelled. `janus_sp` exposes a
simple register port in its place. Writes are accepted only while
`busy` = 0. Read data arrive on `io_rdata` with `io_rvalid` one clock after
`io_re`. The port is IO_W = max(L, 32) bits wide.

| `io_sel`     | address                          | data                               |
|--------------|----------------------------------|------------------------------------|
| `IO_SPIN_P`, `IO_SPIN_Q` | word · R + row       | one row of L spin bits (read/write) |
| `IO_JX`, `IO_JY`, `IO_JZ` | word · R + row (word < NYB·L) | one row of coupling bits (write) |
| `IO_LUT`     | temperature · 8 + F              | P(σ=+1) · 2³² for F = 0 … 6        |
| `IO_BETA`    | temperature                      | β, unsigned 16.16                  |
| `IO_BETAIDX` | configuration                    | temperature index (read/write)     |
| `IO_SEED`    | generator · 64 + register (0…61) | seed word; generator R is the PT generator |
| `IO_ENERGY`  | configuration                    | last stored energy (read only)     |

When writing BETAINDEX, the host must write a permutation. The inverse map
is updated from the same writes. A run starts with a one-clock `run_start`,
with `run_nsweeps` and `run_pt_en` held. `busy` stays high until the
one-clock `run_done`.

Run length at the defaults: one sweep of both replicas takes
2 · 640 + 2 · DRAIN = 1284 clocks, i.e. 800 spin updates per clock.

## 7. Modules

| module | role |
|--------|------|
| `janus_pkg` | shared constants (bit widths, generator lags, neighbour order) and the host-port enum |
| `pr_rng` | Parisi-Rapuano generator, NOUT numbers per clock |
| `hb_lut` | 7 × 32-bit table, write port, asynchronous read |
| `hb_update_cell` | field count, table lookup, comparison, unsatisfied-link count |
| `lattice_bank` | word memory with NRD registered read ports and a row-masked write |
| `neighbor_gather` | combinational routing of neighbour and coupling bits |
| `energy_tree` | pipelined adder tree |
| `ln_unit` | iterative fixed-point natural logarithm |
| `pt_engine` | temperature tables, β, BETAINDEX, energies, logarithms, swap decisions |
| `sp_controller` | run sequencer: table copy, half-sweeps, drains, energy sweeps, tempering |
| `janus_sp` | top: banks, gather, R generators, R·L cells, two trees, PT engine, controller, host port |

Parameters of the top: `L` (default 80, must be even and a multiple of
`R`), `R` (default 10) and `NPAIRS` (default 1).

## 8. Where this design is its own, and where it departs from the source

Taken from the published description: 800 update cells fed by 10 words of 80
bits; one 32-bit Parisi-Rapuano number per cell from 10 generators of 80
outputs each (62-word state); heat-bath update through a per-cell
probability table addressed by the XOR count; meshing of two replicas into
banks P and Q, with P updated from Q and then Q from P; write-back to the
address just read; for tempering, all temperature tables in on-chip RAM, a
BETAINDEX array so that only indices move, energies from a pipelined adder
tree during a sweep that does not write, logarithms of random numbers
computed in the background, and the test ln r ≤ Δβ ΔE on neighbouring
temperatures.

Chosen here, because the source does not say:

* the bit order inside a word, the address formula and the x ordering of
  the couplings;
* multi-ported bank reads (six ports) to fetch all neighbours in one clock;
* periodic boundaries in all directions;
* the drain clocks, the order of the sweep loops, and the pipeline depth;
* two 400-input adder trees instead of one tree of up to 1024 inputs, so
  both systems of a pair are measured in one sweep;
* all fixed-point formats (β and ln r in 16.16, energies as 32-bit
  integers) and the logarithm algorithm;
* the host register map, the run command, reset (asynchronous, active low,
  on control state only; memories are not reset and must be loaded).

Known differences:

* **Plane stride.** The source says the same part of the next plane is
  at address +80. With 80 planes and 8 row blocks in a 10-bit address space
  that cannot hold. Here the next plane is at +1 and the next row block is
  at +80.
* **Spins per clock.** The source quotes both 800 update cells and about
  1000 spins per clock (16 ps per spin at 62.5 MHz). This design has
  R·L = 800 cells at the defaults, so 20 ps per spin at that clock.
* **Tables for tempering.** For tempering, the source keeps two sets of
  table values in registers and routes each cell to one of them. Here every
  cell keeps its own table, as in the plain heat-bath description, and is
  loaded with the set of its half.
* **Not built.** The I/O processor and its host link, the nearest-neighbour
  links between SPs, the board and FPGA-specific parts, and the Potts-glass
  version of the update cell.

## 9. Sizes, resources and what has been simulated

At the defaults each spin bank is 640 × 800 bits (512,000 bits), as are
the three coupling memories. Two replicas of 80³ = 512,000 spins fill P and
Q exactly. For tempering at L ≤ 32, set L = 32, R = 32 (1024 cells) and
NPAIRS up to 64 (N_T = 128). The spin banks then hold 2 × 64 × 32 × 1024
bits = 4 Mbit (512 kB). The couplings need 12 kB and the tables 3.5 kB.
That is within the roughly 670 kB of RAM of the FPGA the original machine
used.

Each module has a self-checking testbench in `tb/`, using independent
reference models in `janus_ref_pkg`:

* `tb_janus_sp` runs the whole SP at L = 8, R = 4 and NPAIRS = 2 (four
  configurations). It runs six tempering runs of two sweeps each. It
  compares every spin, every energy and the BETAINDEX array with a
  site-by-site reference after each run. It also checks the number of
  word-issue clocks, and requires every mechanism to happen at least once:
  table loads, P and Q half-sweeps, energy sweeps, energy stores, accepted
  and rejected swaps, and halo reads.
* `tb_janus_sp_full` is the same test at the default parameters (L = 80,
  two replicas, 800 cells), for one sweep and one tempering decision.

To simulate with plain Verilator (version 5), list the package files first:

    verilator --binary --timing -j 0 --top-module tb_janus_sp \
        rtl/janus_pkg.sv rtl/pr_rng.sv rtl/hb_lut.sv rtl/hb_update_cell.sv \
        rtl/lattice_bank.sv rtl/neighbor_gather.sv rtl/energy_tree.sv \
        rtl/ln_unit.sv rtl/pt_engine.sv rtl/sp_controller.sv rtl/janus_sp.sv \
        tb/janus_ref_pkg.sv tb/tb_janus_sp.sv
    ./obj_dir/Vtb_janus_sp

Each testbench prints `TB_RESULT checks=… failures=…`. The full-size
build of `tb_janus_sp_full` takes a couple of minutes and about 0.5 GB of
memory, and the run takes well under a minute.
