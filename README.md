# A distributed sparse Ising machine in SystemVerilog

A probabilistic computer solves an optimisation or sampling problem by
letting many *p-bits* flip at random. Each p-bit is a binary variable
m_i = +-1, coupled to its neighbours by weights J_ij and a bias h_i. When
p-bit i is updated it draws

    m_i = sgn( tanh(I_i) + r ),   I_i = beta * (h_i + sum_j J_ij m_j),

where r is uniform in (-1, +1) and beta is the inverse temperature. Raising
beta slowly (simulated annealing) drives the network toward low values of
the Ising energy E = -sum J_ij m_i m_j - sum h_i m_i.

A graph too big for one chip is cut into partitions, one per device. Two
ideas keep the cost of the cut small:

* **Shadow weights.** A weight on an edge that crosses a cut is stored in
  *both* partitions. Every local field can then be formed from local
  memory, and the only thing that has to cross a device boundary is the
  1-bit state of each boundary p-bit, sent in both directions.
* **Free-running exchange.** Devices do not wait for each other. Each one
  updates its p-bits on its own clock. Boundary states stream across the
  links on a separate link clock, and each partition uses the latest copy
  it holds. Let eta = f_comm / f_pbit be the ratio of the link clock to
  the p-bit update rate. Eta sets how stale a neighbour's state can be,
  so it decides whether the distributed machine behaves like one
  monolithic machine. For a link with P pins carrying b boundary bits
  over d hops, the exchange finishes in time when

      f_pbit <= f_comm / (2 * N_color * max(b * d / P)).

This RTL builds that machine for the 3D Edwards-Anderson (EA) spin glass:
an L x L x L cubic lattice with J = +-1 couplings to the six nearest
neighbours. The lattice is open in x and y and periodic in z. The default
configuration is the six-device chain used for the 37^3 = 50,653-p-bit
experiments: six partitions in a line, joined by links of 54, 30, 54, 26
and 54 data pins. A million-p-bit machine (L = 100 cut into 72 partitions)
uses the same RTL with other parameters.

## Partition of the lattice

The lattice is cut into NPART slabs along x. Slab k holds the planes
x0(k) .. x0(k+1)-1, with x0(k) = floor(k*L/NPART). For L = 37 and six
partitions the slabs are 6, 6, 6, 6, 6 and 7 planes, which is 8,214 or
9,583 p-bits each.

Every cut edge joins two neighbouring slabs. Each link therefore carries
exactly one face plane of L*L = 1,369 bits in each direction, and no state
has to be relayed through an intermediate device.

This is a departure from the reference machine. That machine uses a
partition optimised for the chain (a Potts-model partition), which leaves
some cut edges two or more hops apart and needs boards that forward
boundary bits. The slab cut is the simplest cut that fits a chain. Its
worst link needs 1369 / 26 = 53 frames per plane.

Inside a partition, p-bit (xl, y, z) has local index
i = (xl*L + y)*L + z. Its six coupling slots are -x, +x, -y, +y, -z, +z
(enum `dir_e`), and slot 6 holds h_i. The weight of a cut edge is written
into the +x slot of the left partition and into the -x slot of the right
partition: that pair is the shadow weight. A slot that points outside the
open x or y boundary is ignored.

## Update schedule and colors

Two coupled p-bits must never be updated in the same cycle. `color_sched`
enables one *color group* per clock. One sweep (one Monte Carlo sweep)
steps through all groups once, so f_pbit = f_clk / N_color.

* For even L, the checkerboard (x + y + z) mod 2 gives two colors.
* For odd L, the periodic z ring is an odd cycle, so three colors are
  needed: (x + y + zc(z)) mod 3, where zc(z) = z mod 2 for z < L-1 and
  zc(L-1) = 2.

This gives three colors for 37^3 and two for 100^3, the counts used by the
reference experiments. The color is a function of the *global* x, so both
sides of a cut agree on it.

The update masks and group sizes are constants computed at elaboration.
Each group carries a flip counter that adds the number of p-bits updated
(`n_upd`) while the broadcast enable is high. One flip counts as one p-bit
update.

## Number format and the p-bit

J, h, beta and the clamped field I are signed fixed point s{4}{1}: one sign
bit, four integer bits and one fraction bit, six bits in all. The range is
-16.0 .. +15.5 in steps of 0.5. This format holds J = +-1 and the EA
annealing ladder beta = 0.5, 1.0 .. 5.0 exactly.

`local_field` works out each field as follows:

1. Form h plus the six +-J terms in 9 bits.
2. Multiply by beta.
3. Round toward minus infinity to one fraction bit.
4. Saturate to s{4}{1}.

Every field is computed in parallel, combinationally.

`pbit_array` then takes tanh(I) from a 64-entry table, indexed by the
6-bit code of I and scaled to 16 bits. The table is computed in
SystemVerilog at elaboration. The p-bit adds a 16-bit signed random word
and keeps the inverted sign bit (0 gives +1). Its state register is
written only when its color is enabled.

Each p-bit has its own 32-bit maximal-length Fibonacci LFSR
(x^32 + x^22 + x^2 + x + 1). The LFSR advances 16 steps per update, so
consecutive random words share no bits. Seeds are a hash of a run seed
and the global p-bit index, and can be reloaded from the host.

## Boundary transport

Each partition sends its first plane to the left and its last plane to
the right. In each direction the path is:

    clk_pbit domain          clk_comm domain              forwarded rx clock      clk_pbit domain
    face plane --> cdc_handshake --> link_tx ==pins==> link_rx --> cdc_handshake --> halo register
                                  (tx_clk, tx_sync, P data)

* **`link_tx`** cuts the B-bit plane into ceil(B/P) frames and sends one
  frame per link clock.
  * It forwards its clock (`tx_clk`) with the data.
  * It raises `tx_sync` with frame 0.
  * It streams without pause: as soon as a plane is finished it starts
    the newest snapshot it holds.
* **`link_rx`** runs entirely on the forwarded clock.
  * A sync restarts the frame index.
  * A sync that arrives before a word is complete counts a frame error,
    and that word is dropped.
* **The two `cdc_handshake` instances** are the clock-domain crossings.
  Each holds a plane in a register and passes a toggle request and a
  toggle acknowledge through two-flop synchronisers (`sync_2ff`). The
  wide data is therefore sampled only while it is stable. Because the
  sender reloads as soon as the previous plane is acknowledged, the plane
  in flight is always recent.
* **The halo register** holds the neighbour's plane. The local fields
  read it at any time, whatever its age. This is the free-running
  exchange described above. The number of refreshes is counted.

With the reference pin counts, a refresh takes about 2*ceil(B/P) link
cycles plus a few synchroniser cycles. For the 37^3 machine that is 53
frames on the 26-pin link. For the exchange to keep up, f_comm must exceed
f_pbit by the factor in the bound above.

Two mode bits help with testing:

* `isolate` ignores the halos, so each partition anneals alone.
* `link_en` stops the transmitters.

## Run control and the host port

One `run_ctrl` on the reference clock (125 MHz in the reference machine)
holds a programmable preset. When started, it raises `run_en` for exactly
`preset` reference cycles, then reports `done` and the elapsed count. An
early stop is also possible. `run_en` is broadcast to every partition,
where it is synchronised and gates both updates and flip counters. As in
the six-board machine, partitions on independent clocks stop within a few
of their own cycles of each other.

Each partition has a plain register port in its own clock domain. In the
reference machine a PCIe link and host software sit behind it; neither is
part of this RTL.

| write address (bit HOST_AW-1 = 0) | {p-bit index, slot}: slot 0..5 = J (-x,+x,-y,+y,-z,+z), 6 = h |
|---|---|
| write, bit HOST_AW-1 = 1, low 4 bits | 0 beta0, 1 beta step, 2 beta end, 3 sweeps per beta, 4 seed, 5 command (bit 0 start, bit 1 reseed), 6 config (bit 0 isolate, bit 1 link enable) |
| read, bit HOST_AW-1 = 0 | state of p-bit addr[.. : 3] |
| read, bit HOST_AW-1 = 1 | 0 beta, 1 sweeps, 2+c flips of color c, 8 {anneal done, running}, 9/10 left/right frame errors, 11/12 planes sent left/right, 13/14 halo refreshes left/right, 15 N |

A start command does the following:

* resets the sweep and flip counters;
* loads beta0;
* `anneal_sched` then raises beta by the programmed step every
  `sweeps per beta` sweeps, up to beta end.

The reset values give the EA ladder 0.5, 1.0 .. 5.0.

## Files

| file | contents |
|---|---|
| `rtl/dsim_pkg.sv` | formats, LFSR, tanh table, coloring and slab functions |
| `rtl/lfsr_bank.sv`, `rtl/pbit_array.sv` | random numbers and p-bit states |
| `rtl/weight_mem.sv`, `rtl/local_field.sv` | weights and local fields |
| `rtl/color_sched.sv`, `rtl/anneal_sched.sv`, `rtl/flip_counter.sv` | schedule, beta ladder, flip counters |
| `rtl/link_tx.sv`, `rtl/link_rx.sv`, `rtl/cdc_handshake.sv`, `rtl/sync_2ff.sv` | boundary transport |
| `rtl/partition.sv` | one device |
| `rtl/run_ctrl.sv` | common run counter |
| `rtl/dsim_top.sv` | the chain |

Every module has a testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=.. failures=..`.

* `tb_dsim_top` runs a 6^3 lattice on three partitions with unrelated
  clocks. It checks four things:
  * states carried over two links;
  * a ferromagnet that anneals into order across the cuts;
  * broadcast stop, sweep rate and flip counts;
  * the isolate and link-off modes.
* `tb_dsim_full` runs the default 37^3 machine with no parameter
  changes. It loads a random EA instance with its shadow weights,
  anneals beta 0.5 .. 5.0 and reads everything back. It then checks the
  energy per spin, the satisfaction of cut bonds against bulk bonds, and
  the sweep, flip and error counters.

To simulate, for example:

    verilator --binary --timing -Wno-fatal -Irtl rtl/dsim_pkg.sv tb/tb_dsim_top.sv --top-module tb_dsim_top
    ./obj_dir/Vtb_dsim_top

The block testbenches build and run in seconds, `tb_dsim_top` in about
15 s. `tb_dsim_full` takes about 2.5 minutes to build and one minute to
run: the load of 345,000 weight words dominates the run.

## Departures and limits

* **Partition.** The cut is a slab cut, not the Potts or METIS partitions
  of the reference machines. As a result there is no multi-hop relaying.
  The million-p-bit configuration has a different interconnect (72
  partitions inside 18 devices, with vendor-generated wiring), which is
  not modelled: `L = 100, NPART = 72` builds it as a plain chain.
* **Connectivity.** Only the cubic lattice is wired. The other workloads
  of the reference work (Pegasus and Zephyr graphs, a 3SAT circuit, the
  G81 torus) need general sparse connectivity and wider formats
  (s{4}{3}, s{4}{6}). None of them runs on this RTL.
* **Fixed point and rounding.** The field rounding, the 16-bit tanh/r
  resolution, the LFSR polynomial and its seeding are choices made here.
* **Link details.** The frame-start line, the continuous streaming and
  the handshake crossings are choices made here. Pins are counted as P
  data pins in each direction.
* **Storage.** Weights are registers, not block RAM. With every field
  computed in parallel, one partition holds 9,583 x 7 six-bit words.
* **Lint warnings that stand.**
  * Verilator warns about `'0` fills wider than 8192 bits (the state and
    mask vectors of a full-size partition). The fill is intended.
  * The end partitions leave their unused link inputs unconnected.
  * Bits of a few counters and index variables go unused at some sizes.
