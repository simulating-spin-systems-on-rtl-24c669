# A block-parallel Monte Carlo engine for spin glasses on one FPGA

Spin-glass simulations spend their time on one very simple operation: pick a
site of a lattice, look at its six neighbours and the couplings to them, and
randomly decide the new value of its spin. A PC does this one bit at a time,
or at best with word-level tricks. This engine does it for **512 sites in every
clock**. To get there, the lattice is stored so that one word from each of a
set of small on-chip memories gives a whole block of sites and their
neighbours. Two copies (replicas) of the system are interleaved so that every
site in a block can be updated at the same time. A shift-register random-number
generator is unrolled in logic to produce hundreds of 32-bit random numbers per
clock.

The RTL implements the architecture described in F. Belletti et al.,
*Simulating spin systems on IANUS, an FPGA-based computer* (Computer Physics
Communications). That paper gives the memory organisation, the replica
interleaving, the update-cell / look-up-table / random-number chain and the
random-number generator. It does not give the sequencing, the neighbour
delivery, the interfaces or the encodings. Those are this implementation's own
choices; they are marked as such below and in each file's header comment.

Two simulation codes are provided. Only one goes into the FPGA at a time:

| code | models | spins | default size | sites updated per clock |
|---|---|---|---|---|
| `ising_engine` | Edwards-Anderson spin glass, random-field Ising model, diluted antiferromagnet in a field; Metropolis or heat bath | 1 bit | L = 32, N_B = 2 | 512 |
| `potts_engine` | 4-state glassy Potts model, Metropolis | 2 bits | L = 32, N_B = 4 | 256 |

`spin_fpga_top` builds one of them, chosen by its `MODEL` parameter
(`MODEL_ISING` by default).

## 1. Models and update rules

Spins sit on an L x L x L periodic cubic lattice. The Ising-like Hamiltonian is

    H = - sum_<ij> J_ij x_i x_j s_i s_j  -  sum_i h_i x_i s_i ,   s_i = +-1

Here `J_ij = +-1` are the couplings, `x_i` in {0,1} is the dilution and `h_i` is
the field. EA uses random J with no field. RFIM uses J = 1 and `h_i = +-|h|`.
DAFF uses J = -1, uniform h and random dilution. In every memory a bit value of
1 stands for +1.

An update cell (`ising_update_cell`) counts, over the six neighbours, how many
of the terms `J_ij x_j s_j` are +1 and how many are -1. From these counts:

* **Metropolis** (the flip of `s_i` is proposed): `e = s_i * sum J x_j s_j`,
  `f = [h_i s_i > 0]`. The energy change of the flip is
  `dE = 2(e + f'|h|)` with `f' = +-1`.
* **Heat bath**: `e = sum J x_j s_j`, `f = [h_i > 0]`. The spin becomes +1
  with probability `1 / (1 + exp(-2 beta (e + f'|h|)))`.

The cell outputs the index `{f, e + 6}` (5 bits; `f` is forced to 0 when
`field_en` is low). It reads a 32-bit word W from its look-up table (LUT) and
compares it with its own 32-bit random number R:

* Metropolis flips the spin when `R < W`.
* Heat bath sets the spin to `R < W`.

An empty site keeps its value. The LUT therefore holds, for each index, either
`min(1, exp(-beta dE)) * 2^32` or the heat-bath probability times 2^32. The
value 1 is stored as `2^32 - 1`, which leaves a bias of 2^-32. Beta and |h|
exist only in the LUT contents, which the host loads; the hardware never sees
them. For pure EA only indices 0..12 are used.

In the Potts model each site holds a value in 0..3, and
`H = - sum_<ij> delta(s_i, pi_ij(s_j))`, where each bond carries a random
permutation `pi` of (0,1,2,3).

* **Coupling storage.** The 8-bit coupling word holds `pi(v)` in bits
  `[2v+1:2v]`. A bond is stored at its lower site. It is satisfied when the
  lower site's value equals `pi` of the upper site's value.
* **Proposal.** `potts_update_cell` proposes `s' = s xor R[31:30]`. When
  `R[31:30] = 0` this is a null move.
* **Acceptance.** The cell forms `dE = sat(s) - sat(s')` and index `dE + 6`
  (0..12, in a 16-entry LUT). It accepts when `{R[29:0], 2'b00} < W`.

The Potts update rule is this implementation's own; the paper does not
describe the Potts cell.

## 2. Two replicas in two memories: P and Q

Nearest neighbours cannot be updated at the same time. The usual
checkerboard split still leaves half the sites idle in every step. The trick
here is to simulate two replicas of the same sample (same J, h, x) and mesh
them:

    P(x,y,z) = replica 1 at (x,y,z)  if x+y+z is even, else replica 2
    Q(x,y,z) = the other replica at (x,y,z)

Every neighbour of a P site, in its own replica, has the opposite parity. It is
therefore stored in Q, at the neighbouring coordinates. So **all** of P can be
updated at once from a frozen Q, and then all of Q from P. Every location of
both memories is useful work. A sweep is a half sweep over P followed by a half
sweep over Q. It updates each spin of both replicas once. The couplings, field
and dilution are indexed by lattice position only, so both halves read the
same memories. Periodic boundaries keep the lattice bipartite because L is
even.

## 3. Memory layout

Each lattice variable (P, Q, Jx, Jy, Jz, field sign, dilution) has its own
`lattice_mem`. That is NMEM = L/N_B block memories, each L bits wide and
L*N_B words deep:

    site (x, y, z)  ->  memory  x mod NMEM,
                        address z*N_B + x / NMEM,
                        bit     y

Giving one address `z*N_B + b` to all NMEM memories returns block `b` of
horizontal plane `z`: the NMEM x L sites with `x` in `[b*NMEM, (b+1)*NMEM)`.

* L = 16, N_B = 1: 16 memories of 16 x 16 bits; a block is a whole plane.
* L = 32, N_B = 2 (default): 16 memories of 32 bits x 64 words. Memory m holds
  planes x = m and x = m+16, interleaved word by word. A block is half a plane,
  512 sites.

`Jx(x,y,z)` is the bond from (x,y,z) to (x+1,y,z), and likewise for Jy and Jz.
The field memory holds the sign of `h_i`. The dilution memory holds `x_i`.

The number of memories agrees with the resource figures the paper reports.
With five variables (P, Q, Jx, Jy, Jz), the EA code at 512 updates per clock
needs 5 x 16 = 80 memories, and at 1024 updates (N_B = 1) it needs
5 x 32 = 160. The Potts code has 28 single-bit variables (2+2 spin bits,
3 x 8 coupling bits). At N_B = 4 that is 28 x 8 = 224 memories.

`ising_engine` has two build switches, `HAS_FIELD` and `HAS_DILUTION`. With
both cleared it builds only those five variables (80 memories at the default
size). `field_en` is then ignored and every site counts as occupied. The
default sets both, adding the field and dilution memories (7 x 16 = 112), so
one build serves EA, RFIM and DAFF.

## 4. Schedule: how the neighbours reach the cells

This is the hardest part of the design, and the paper leaves it open.

Each block memory has two ports. The update of block (z, b) needs:

* from the **target** memory (the half being updated): its own old spins;
* from the **source** memory: planes z-1, z and z+1, plus one column on each
  side of the block, which belongs to the neighbouring blocks;
* couplings of the bonds to x-1 and z-1, which are stored at other addresses.

The engine solves this as follows:

* **Source spins and dilutions** are streamed, one block per clock, into a
  `plane_window`. The window assembles whole planes and keeps the last three:
  `plane_m`, `plane_c` and `plane_p`. The stream is planes L-1, 0, 1, ..., L-1,
  0, so after each plane completes, the window holds (z-1, z, z+1) with
  periodic wrap. Dilution needs neighbours too, so it has a second window.
* **Target spins, Jx, Jy, Jz, field** are read at the block's own address on
  port A. Port B of Jx reads block b-1 of the same plane, for the x-1 bond at
  the block's left edge. Port B of Jz reads plane z-1. Port B of the target
  memory writes the new block back.

`sweep_ctrl` runs each half sweep as a fixed schedule. The half lasts
`T_HALF = (L+3)*N_B + 1` clocks, with t counted from 0:

```
t :  0 .. 3N_B-1        3N_B .. (L+2)N_B-1              (L+2)N_B .. (L+3)N_B
rd:  planes L-1, 0, 1   planes 2 .. L-1, 0  (1 block/clk)
win:   (one clock behind rd, shifts a plane in every N_B clocks)
pre:                    block (z,b) addresses to target/J/h memories ------>
proc:                   one clock after pre: block (z,b) updated + written -->
```

* During the first 3N_B clocks the window is primed with planes L-1, 0 and 1.
* From then on, one block is updated per clock. Block (z, b) is processed at
  `t = (z+3)*N_B + 1 + b`.
* The plane for z+2 is read in the same clocks that plane z is processed. The
  window shifts on the edge that ends the last block of plane z.

The critical path is a single clock: window registers and memory outputs, then
the update cells, the LUT reads and the comparators, then the write port. The
wheels advance (`rng_en`) only in update clocks, so each block consumes exactly
one set of random numbers.

A sweep takes `2*((L+3)*N_B + 1)` clocks: 142 at the default, against 128 for
the ideal one block per clock. At the paper's 62.5 MHz, the default engine
performs 65536 spin updates in 142 clocks, about 35 ps per spin on average and
31 ps per spin in update clocks.

## 5. Random numbers

`pr_rng` is the Parisi-Rapuano generator:

    I(k) = I(k-24) + I(k-55)      R(k) = I(k) xor I(k-61)      (32-bit words)

It keeps a wheel of 62 words and unrolls the recurrence RPW = 96 times per
clock in combinational logic. For n >= 24 a new word depends on words produced
earlier in the same clock, so the adders form a cascade. `rng_bank` runs
`ceil(NC/96)` wheels side by side; that is 6 wheels for 512 cells, with the
last wheel partly unused. Cell c gets output `c mod 96` of wheel `c / 96`. Each
wheel is seeded from outside, one word per clock, through the seed port. The
same port reloads a wheel between runs; doing so from time to time keeps it
well inside its period.

## 6. Update cells and LUT copies

Each pair of cells shares one `prob_lut`, a 32-word x 32-bit table (16 words
for Potts). It has two asynchronous read ports and a host write port, and reset
clears it. Duplicating the table for every pair of cells costs logic but keeps
fan-out local. The host writes one word into all copies at once.

Cell `c = m*L + y` of a block handles site `x = b*NMEM + m` and the given `y`.
In the engine source its neighbour bits come in the order
+x, -x, +y, -y, +z, -z.

## 7. Using the engine

Host port (only while `busy` is low):

* `host_we` with `host_sel` (Ising: 0 P, 1 Q, 2 Jx, 3 Jy, 4 Jz, 5 field,
  6 dilution), `host_mem`, `host_addr` and `host_wdata` writes one L-bit word.
  The address formula is the one in section 3.
* `host_re` reads a word. `host_rdata` is valid on the next clock.
* `lut_we`, `lut_addr`, `lut_wdata` write a LUT word.
* `seed_we`, `seed_wheel`, `seed_idx` (0 = oldest word), `seed_data` write a
  wheel word.

To run:

1. Load the sample, the spins, the LUT (computed from beta, |h| and the chosen
   algorithm, see section 1) and the seeds.
2. Set `algo` and `field_en`.
3. Pulse `start` with `n_sweeps`.

`busy` stays high for `n_sweeps * 2*((L+3)*N_B+1)` clocks. Then `done` rises
and `sweep_count` equals `n_sweeps`. For EA, load all-ones dilution and run
with `field_en = 0`. For DAFF, load couplings of 0 (J = -1), field signs of 1
and the dilution pattern.

In the Potts configuration, `host_var` selects a bit plane:

* 0/1: P bit 0/1;
* 2/3: Q bit 0/1;
* 4+k, 12+k, 20+k: bit k of the Jx, Jy, Jz permutation.

`algo` and `field_en` are ignored in the Potts configuration.

Parameters: `L` (even, >= 4), `NB` (divides L), `RPW` (numbers per wheel).
`NB = 1` at L = 32 gives the 1024-updates-per-clock variant.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_pr_rng` checks the wheel against a word-by-word software recurrence.
  It covers the full generator and the reduced 20-word example wheel
  (`I(k)=I(k-10)+I(k-14)`, `R(k)=I(k) xor I(k-20)`, 10 numbers per clock).
  `tb_rng_bank` checks how the wheel outputs are assigned to cells.
* `tb_ising_update_cell` and `tb_potts_update_cell` compare the cells with
  integer-arithmetic models on random inputs.
* `tb_lattice_mem`, `tb_plane_window` and `tb_sweep_ctrl` check storage, the
  window contents and the exact schedule.
* `tb_ising_engine`, `tb_potts_engine` and `tb_spin_fpga_top` (L = 8) run
  whole simulations against reference models. The models:
  * keep both replicas in plain (x,y,z) coordinates;
  * step their own software copy of every wheel;
  * compute energies with integers;
  * compare every spin after every run.

  They also check run lengths, and that Metropolis accepts and rejects,
  heat-bath up and down moves, empty sites, field-dependent indices, block-edge
  neighbours and the algorithm switch all occur.
  `tb_ising_engine` runs two builds side by side: the default one and the
  EA-only one (`HAS_FIELD = HAS_DILUTION = 0`).
* `tb_spin_fpga_top_full` runs the default top (L = 32, 512 cells, 6 wheels)
  for three one-sweep runs and compares all 65536 spins after each run. It
  takes about 3 minutes to build and seconds to run.

To simulate with Verilator, for example:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_spin_fpga_top \
        rtl/spin_pkg.sv tb/tb_spin_fpga_top.sv
    ./obj_dir/Vtb_spin_fpga_top

## 9. What differs from the published design, and what is missing

* The sequencing, the plane window, the priming overhead, the host port, the
  bit encodings and the LUT index layout are this implementation's own.
* The Ising LUT has 32 entries rather than the 16 the paper's "value between 0
  and 15" suggests. The field bit needs the extra index bit for RFIM and DAFF;
  EA stays within 0..12.
* Metropolis versus heat bath and the field term are switched at run time.
  The original used a separate code for each.
* The Potts update rule (Metropolis, proposal by XOR with two random bits) is
  this implementation's own. The 4-D Potts lattice is not implemented.
* The host I/O interface, the clock generation and the multi-FPGA system are
  outside this RTL. The top exposes plain load, read-back and run-control
  signals instead.
* `lattice_mem` models each block memory as a two-port register array, which
  synthesis maps to block RAM.

## Files

`rtl/spin_pkg.sv` holds the shared constants and types. The modules, from the
bottom up:

* random numbers: `pr_rng`, `rng_bank`;
* LUT and update cells: `prob_lut`, `ising_update_cell`, `potts_update_cell`;
* memory: `lattice_ram`, `lattice_mem`;
* scheduling: `plane_window`, `sweep_ctrl`;
* engines and top: `ising_engine`, `potts_engine`, `spin_fpga_top`.

`tb/engine_driver.sv` and `tb/potts_driver.sv` are the stimulus and reference
models shared by the end-to-end testbenches.
