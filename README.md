# A Janus II style spin-glass Processing Board in SystemVerilog

The Monte Carlo simulation of a three-dimensional Ising spin glass uses
one-bit variables. A spin is up or down, and a coupling between two
neighbours is ferromagnetic or antiferromagnetic. A lattice update is
built from xors, a six-input bit count, a table look-up and one
comparison with a random number. A general-purpose processor spends a
32- or 64-bit arithmetic unit on each of these steps. Dedicated logic
can instead put thousands of tiny update engines side by side and feed
them from on-chip memory. This is the idea behind the Janus II machine.
Each board holds 16 FPGA "Simulation Processors" (SPs) and one
"Input-Output Processor" (IOP). The SPs sit on a 4 x 4 torus and each
one has more than 2000 spin-flip engines. A control computer drives the
board through the IOP.

This RTL builds that board: the SPs with their engines, random-number
generators, lattice memories and sweep sequencers, the SP-to-SP halo
links, the IOP and the board wiring. The commercial parts are not
modelled: the control PC, PCIe, DDR-3, the serial transceivers and the
FPGA configuration logic. The board exposes their signals as plain
ports.

## The model being simulated

Sites (x, y, z) of a cubic lattice carry spins S = +-1. Each pair of
nearest neighbours carries a coupling J = +-1. The energy is
H = -sum J_ij S_i S_j. Everything is stored as bits, sigma = (1+S)/2 and
j = (1+J)/2. A bond is satisfied (J S_i S_j = +1) exactly when
`j ^ sigma_i ^ sigma_j == 1`.

- Each site stores 4 bits: its spin and the couplings to its +x, +y and
  +z neighbours. The bond to a -x neighbour is the +x bond stored at
  that neighbour.
- Updating one site reads 13 bits: its own spin, 6 neighbour spins and
  6 couplings.
- If `nu` of the site's six bonds are unsatisfied, flipping the spin
  changes the energy by dE = 12 - 4*nu.

The site's colour is (x + y + z) mod 2. Two sites of the same colour
never share a bond, so all sites of one colour can be updated at the
same time. A sweep is a colour-0 pass followed by a colour-1 pass.

### The engine (`spin_engine`)

The engine works in four steps:

1. Six xors give the six "unsatisfied" bits.
2. A small adder counts them, giving `nu` (0..6).
3. `nu` selects an entry of a 7-entry table.
4. The spin flips when the engine's 32-bit random number is below the
   selected entry. An entry of all ones means "always flip".

The table therefore holds flip probabilities scaled by 2^32. For
Metropolis at inverse temperature beta, entry n is exp(-beta*(12-4n)),
and the entries for n >= 3 (dE <= 0) are all ones. A heat-bath table
works the same way. The xor / count / table / compare structure comes
from the paper. The scaling of the entries and the all-ones rule are
this design's own choices.

## How an SP sweeps: one plane per clock

Each SP holds `NCOPIES` lattice copies of `L x L x LZ` sites (defaults
30 copies of 64^3). It has `NP = L*L/2` engines, 2048 by default. That
is exactly one colour of one 64 x 64 plane, so **the SP updates one
plane-colour per clock**.

### Memory layout

Both memories are `plane_mem` instances. Each memory word is a whole
plane.

- **Spin memory:** one word of L*L bits per plane. Bit `y*L + x` is
  site (x, y).
- **Coupling memory:** one word of 3*L*L bits per plane: the +x, +y and
  +z couplings, one after the other.

### A pass

A pass of one colour over one copy reads the planes in the order
`LZ-1, 0, 1, ..., LZ-1, 0` and pushes them through a three-plane window
(`prev`, `cur`, and the plane arriving from memory).

- From the third read on, the engine array updates plane z while plane
  z+1 is arriving.
- The updated plane is written back in the same clock.
- The +z couplings of plane z-1 ride along in the window. The site's
  bond to z-1 is stored there.

Only sites of the pass's colour change. Every neighbour a site reads
has the other colour, so the window never holds stale data. This holds
even for plane 0, which is updated at the start of the pass and re-read
at the end.

**Timing.** A pass takes exactly `LZ + 3` clocks, and in steady state
the SP updates `NP` spins per clock. With the defaults, a 64^3 sweep
takes 2 x 67 clocks. At the paper's 200 MHz that is 2.6 ps per spin
per SP, against the paper's estimate of 2 to 2.5 ps. The testbenches
check these cycle counts exactly.

Engine `e` of the array handles row `y = e / (L/2)` and column
`x = 2*(e mod L/2) + ((y + z + colour) mod 2)`. It takes random number
`e`. Inside a plane, x and y wrap around.

### Energies and parallel tempering

After the sweeps of each copy the SP runs an **energy pass**. This is a
colour-0 pass that writes nothing and adds up `nu` over all colour-0
sites. Every bond has exactly one colour-0 end, so the sum is the
number U of unsatisfied bonds, and the copy's energy is
E = 2U - 3*L*L*LZ.

The SP keeps one acceptance table per copy, and each copy runs at its
own temperature. A parallel-tempering step on the host reads the 30
energies, decides the exchanges, and swaps temperatures by rewriting
tables. No spins move. Run, read, exchange, run is the loop the paper
describes for 30 replicas of a 64^3 lattice on one SP.

## Random numbers (`pr_wheel`)

Each engine needs a fresh 32-bit number every clock. The numbers come
from Parisi-Rapuano generators:

    I(k) = I(k-24) + I(k-55) mod 2^32
    R(k) = I(k) xor I(k-61)

A wheel keeps the last 61 values of I in a shift register. It produces
up to 24 consecutive outputs per clock, because those depend only on
stored values. With `NOUT = 16` outputs per wheel, an SP has 128 wheels.
Engine `e` uses output `e mod 16` of wheel `e / 16`. Every copy draws
from the same wheels, in turn.

Seeding (`CMD_SEED`) fills wheel w with 61 successive values of an
xorshift32 stream. The stream starts at `seed ^ (w * 0x9E3779B9)`, and
a zero start is replaced by 1. The wheels only advance in clocks that
update spins.

## One lattice over many SPs: sliced mode and halos

A lattice larger than one SP is cut along z into slabs, one slab per SP.
The SPs form a ring over the torus links. On one board the ring is

    SP00-01-02-03-07-06-05-04-08-09-10-11-15-14-13-12-(SP00)

This ring uses x and y links in both directions. SPnn sits at
x = nn mod 4, y = nn div 4. In sliced mode (`C_CONFIG[0]`) the ring
replaces the periodic wrap in z:

- Plane 0 of a slab needs the last plane of the SP below. The last
  plane needs plane 0 of the SP above.
- Before every pass, `halo_link` sends the SP's plane 0 down and its
  last plane up.
- It receives the two facing planes. These "ghost" planes take the
  place of planes -1 and LZ in the window.
- Only spins cross, one bit per face site. The +z couplings under
  plane 0 belong to the SP below, so the host writes a copy of them
  into the SP (region `R_JZG`).

The protocol rules are these:

- **Links.** Each link is valid/ready and moves one `LINK_W`-bit word
  per clock. The default is 128 bits: 8 lanes x 16 bits per core clock.
  A plane takes `L*L/LINK_W` = 32 words.
- **Stall.** An SP does not start a pass until both ghost planes have
  arrived. The clocks spent waiting are counted (`C_STALLS`).
- **Back-pressure.** A receive buffer stays full, with its ready low,
  until the pass that uses it ends. A faster neighbour cannot overwrite
  a ghost plane in use. It waits.
- **Why this is correct.** The neighbours' boundary sites that a pass
  reads have the other colour. They last changed in the neighbours'
  previous pass, and that pass ended before the planes were sent.
- `LZ` must be even, so that local and global plane parity agree.

The halo is not overlapped with computation. A pass in sliced mode
costs about `LZ + 3 + 3 + L*L/LINK_W` clocks, which is 99 with the
defaults instead of 67. The paper's balance estimate assumes deep
slabs, for which this overhead is small.

The z ports of every SP (z+ and z-) are board ports. They join boards
into a 4 x 4 x N machine. Looping each SP's z+ to its own z- turns each
SP back into a periodic lattice, which is how the board testbench
exercises them.

## Host access

The IOP gives the control computer one request port:

- `target` 0..15 selects one SP.
- `target` 16 broadcasts a write to all SPs. This is how one command
  starts all SPs together.
- `target` 17 reads the IOP itself. Address 0 returns the 16 SP busy
  lines, and address 1 returns "all idle".

The IOP holds one request at a time. A read returns on `host_rvalid`.

Inside an SP, a 32-bit word address is split as `[31:28]` region and
`[27:0]` offset. `P = copy*LZ + z` is the plane index and
`WPP = L*L/32` is the number of words per plane.

| region | offset | contents |
|---|---|---|
| 0 `R_SPIN` | `P*WPP + w` | spin word w of plane P |
| 1 `R_COUP` | `(P*3 + f)*WPP + w` | coupling word, f = 0 (+x), 1 (+y), 2 (+z) |
| 2 `R_LUT`  | `copy*8 + n` | table entry n of a copy |
| 3 `R_JZG`  | `copy*WPP + w` | +z couplings under plane 0 (sliced mode) |
| 4 `R_CTRL` | see below | control and status |

| `R_CTRL` offset | meaning |
|---|---|
| 0x000 `C_CMD` | write `{last[23:16], first[15:8], op[3:0]}`: 1 seed, 2 run, 3 measure |
| 0x001 `C_NSWEEP` | sweeps per copy for a run |
| 0x002 `C_SEED` | seed for `CMD_SEED` |
| 0x003 `C_CONFIG` | `[0]` sliced, `[6:4]` up port, `[10:8]` down port (0 x+, 1 x-, 2 y+, 3 y-, 4 z+, 5 z-) |
| 0x004 `C_STATUS` | `[0]` busy |
| 0x005 `C_STALLS` | clocks spent waiting for halo planes |
| 0x006 `C_PASSES` | passes run since reset |
| 0x100 + copy `C_ENERGY` | unsatisfied-bond count of the copy's last energy pass |

`CMD_RUN` covers copies first..last in turn. For each copy it runs
`C_NSWEEP` sweeps and then one energy pass. `CMD_MEASURE` runs only the
energy passes. Memories and tables are accessible only while the SP is
idle (`h_ready` is low otherwise). Control registers are always
accessible, but commands and configuration writes are ignored while the
SP is busy. A typical session:

1. Load spins, couplings and tables.
2. Write `C_SEED`, then `CMD_SEED`.
3. Write `C_NSWEEP`, then `CMD_RUN` by broadcast.
4. Poll the IOP's "all idle".
5. Read the energies and, when needed, the spins.

## Sizes

| parameter | default | where it comes from |
|---|---|---|
| `L` (plane edge) | 64 | paper: 64^3 lattices, 30 per SP |
| `LZ` (planes per copy) | 64 | paper |
| `NCOPIES` | 30 | paper |
| engines per SP | 2048 = L*L/2 | paper: "more than 2000" |
| lattice memory per SP | 30 x 64^3 x 4 bit = 31.5 Mbit | paper: about 32 Mbit on the FPGA |
| `NOUT` (random numbers per wheel per clock) | 16 | this design |
| `LINK_W` | 128 = 8 lanes x 16 bit | lanes from the paper; 16 bits/lane/clock is in its 12-20 range |
| SPs per board | 16 on a 4 x 4 torus | paper |

## Where this design departs from the paper, or goes beyond it

- **Lattice geometry.** Planes are always `L x L` with `L*L/2` engines.
  Slabs and copies only change depth. A single cubic lattice larger
  than 64^3 is therefore not supported: not L = 180 on one SP, and not
  L = 500 on a board. The paper names these sizes, and its memory would
  hold them. Only the plane-per-clock engine mapping rules them out. A
  sliced board holds one 64 x 64 x 1024 lattice per copy.
- **Memory organisation.** The paper uses an on-chip memory scheme
  carried over from its predecessor, which it does not describe. Here
  memory is organised as one plane per word.
- **Links.** The serial links are replaced by parallel valid/ready
  words. The exact lane rate (15 bits per clock in the paper's example)
  is rounded to 16 so that words divide a plane.
- **Halo.** Only one-dimensional slicing (along z, over a ring) is
  built. The paper also allows two-dimensional slicing. The halo is not
  overlapped with computation.
- **Host links.** Each SP's serial link to the IOP (about 3 Gbit/s in
  the paper) is modelled as a parallel request/response bus of one
  32-bit word per clock. The busy line of each SP plays the part of the
  paper's dedicated status lines.
- **Own choices.** The IOP protocol, the address map, the commands, the
  seeding rule, the energy pass and the per-copy tables are this
  design's own. The paper only says what the IOP and SP must do.
- **Not built.** Two paper features are missing. The IOP's own z lines
  (shown in the board figure) have no described function. Later use of
  the IOP as a crossbar or for tempering is listed in the paper only as
  future work.

## Verification

Every module has a self-checking testbench in `tb/`. The reference
model `tb/sg_ref_pkg.sv` is written independently of the RTL. It holds
the lattice as arrays, computes energies with +-1 arithmetic, and runs
sequential Parisi-Rapuano generators.

| testbench | what it checks |
|---|---|
| `tb_pr_wheel` | 640 outputs against a sequential generator, with holds |
| `tb_spin_engine` | 5000 random cases of `nu` and the flip rule |
| `tb_engine_array` | 300 random 8 x 8 planes: new plane and bond count |
| `tb_plane_mem` | plane/word writes, priority, read latency |
| `tb_prob_lut` | per-copy tables, reset, range checks |
| `tb_halo_link` | two links, stalled wire, back-pressure until `rx_clear` |
| `tb_iop` | unicast, broadcast, reads, status, against 16 SP stand-ins with random ready |
| `tb_sim_processor` | 8x8x4 x 2 copies: 3 sweeps bit-exact, energies, busy time = passes x (LZ+3), sliced mode looped onto itself |
| `tb_processing_board` | whole board, 8x8x4 x 2 copies per SP: standalone, one 8x8x64 lattice per copy sliced over the 16-SP ring, z loop-back; counts broadcasts, flips, mode switches, halo stalls, x/y and z link traffic |
| `tb_pt_workload` | parallel tempering on one SP: 30 copies of 8x8x4 at 30 temperatures, 12 rounds of run / read energies / exchange by rewriting tables; energies, H, cycle counts and final spins against the model |
| `tb_board_full` | whole board at default size: one 64^3 sweep plus energy pass on every SP; energies of all 16 SPs, spins of two, busy time 3 x 67 clocks |

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/sg_pkg.sv tb/sg_ref_pkg.sv tb/tb_processing_board.sv \
        --top-module tb_processing_board
    ./obj_dir/Vtb_processing_board

The full-size board is large: building `tb_board_full` takes about 8
minutes with `-j 4`, and its run about 4.5 minutes (16401 checks), most
of it spent loading and reading back lattices through the one host
port. The reduced tests build in under a minute and run in seconds.
