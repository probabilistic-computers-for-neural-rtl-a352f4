# A p-bit sampler for sparse Boltzmann-machine quantum states

Variational Monte Carlo finds the ground state of a quantum spin model by
repeatedly drawing spin configurations from a trial wavefunction and adjusting
the wavefunction's parameters. For a stoquastic Hamiltonian such as the
transverse-field Ising model, the squared amplitude |Psi(S)|^2 can be written as
the marginal of a classical Boltzmann distribution over the physical spins S
and some auxiliary (hidden) spins. Drawing samples from |Psi|^2 then amounts
to Gibbs sampling a Boltzmann machine, and that is what this hardware does.

The design is a probabilistic computer: an array of p-bits, binary stochastic
units that each re-draw their state from the local field set by their
neighbours. A host processor keeps the parameters and the optimiser. It loads
weights and biases, lets the array sweep, and reads back spin configurations.
The array does the sampling, which is the part of the loop that grows with the
number of samples.

What makes the hardware scale is sparsity. Every layer of the Boltzmann
machine is a copy of the physical L x L periodic lattice. A unit couples only
to units of the neighbouring layer that lie within Euclidean distance k on the
torus. With k = 2 that is 13 couplings per unit. Each p-bit is therefore a
small adder and a lookup table. Wiring grows linearly with the lattice. Units
that are not coupled update in the same clock, so one sweep of the whole
machine takes two clocks, whatever the lattice size.

The RTL has three levels:

* `pcomputer_node`: one FPGA. Its default is the single-board configuration,
  a 35 x 35 two-layer machine with 2450 p-bits.
* `pcomputer_cluster`: the top. It joins six nodes into one 80 x 80 machine
  (12,800 p-bits). Each node holds a horizontal stripe of the lattice and
  exchanges only the spin states along the stripe edges.
* The node's parts: the p-bit array (`sparse_bm_core` with `synapse`,
  `pbit_neuron`, `weight_bank`, `rng_bank`, `xoshiro128pp`), the sweep
  scheduler (`sweep_controller`), the host command port (`host_if`), and the
  boundary link transmitter and receiver (`boundary_tx`, `boundary_rx`).

## 1. The machine being sampled

Layer 0 holds the visible (physical) spins. Layer 1 holds the hidden spins.
An optional layer 2 holds the deep spins (`NLAYERS = 3`). Each layer has one
unit per lattice site. The energy is

    E = - sum_i a_i v_i - sum_j b_j h_j - sum_<ij>k1 W_ij v_i h_j
        - sum_l c_l d_l - sum_<jl>k2 U_jl h_j d_l

The sums over pairs `<ij>k` run over units on the two layers whose torus
distance is at most k. The two-layer machine is the "further restricted"
Boltzmann machine (FRBM). The three-layer machine is a sparse deep Boltzmann
machine (DBM).

**Neighbour order.** The neighbour offsets (dr, dc) are listed in a fixed
order: dr from -K to K, then dc from -K to K, keeping those with
dr^2 + dc^2 <= K^2. The function `pc_pkg::nbr_off` computes this list at
elaboration. For K = 2 the list is

| index | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| (dr,dc) | (-2,0) | (-1,-1) | (-1,0) | (-1,1) | (0,-2) | (0,-1) | (0,0) | (0,1) | (0,2) | (1,-1) | (1,0) | (1,1) | (2,0) |

Because the list is point-symmetric, the offset at index s is the negation of
the offset at index 12 - s. K = 1 gives 5 neighbours and K = 3 gives 29.

**Weight slots.** Each unit stores its own copy of every coupling it takes
part in, in these slots:

* slots 0 .. DEG-1: coupling to the layer below, towards neighbour s;
* slots DEG .. 2*DEG-1: coupling to the layer above, towards neighbour s - DEG;
* slot 2*DEG (26 for K = 2): the bias.

Each unit of a given layer stores only the slots that layer has.

A symmetric coupling W between a visible unit at x and a hidden unit at x + d
is written twice: once into the visible unit's upper slot for d, and once into
the hidden unit's lower slot for -d (the index 12 - s). The hardware does not
enforce this symmetry. If the host writes two different values, the machine
samples a non-symmetric network, which has no Boltzmann distribution.

Storing one copy at each end means each synapse reads only its own registers.
That keeps wiring local. It costs twice the weight storage of a shared-edge
memory.

## 2. One p-bit

A p-bit is a `synapse` followed by a `pbit_neuron`.

* **Local field.** The `synapse` forms I = b + sum_j (+-W_j). A neighbour in
  state +1 adds its weight and one in state -1 subtracts it, so there is no
  multiplier. The sum is kept at full width (14 bits for 13 terms, 15 bits
  for the 26 terms of a DBM hidden unit), so it cannot overflow.
* **Number format.** Weights and biases are 10-bit two's complement. The FRBM
  uses 3 fraction bits (s6.3). The DBM configuration uses 5 fraction bits
  (s4.5), set with `FRAC_BITS = 5`. Only the binary point moves; the words
  and the datapath are the same.
* **Activation.** The neuron saturates I to [-8, 8) and looks up
  T = round(128 * tanh(I)) in a table with 16 * 2^FRAC_BITS entries. The
  table is computed at elaboration with `$tanh`. The new state is +1 when an
  8-bit signed uniform random number r satisfies r < T. So
  P(+1) = (1 + tanh I) / 2, which is the exact Gibbs conditional at unit
  inverse temperature, up to 1/256 quantisation. A field of magnitude 8 or
  more gives T = +-128, so the state is certain. The tests use this.
* **Random numbers.** Each xoshiro128++ generator gives 32 bits per clock,
  which are cut into four 8-bit numbers. So one generator serves four p-bits.
  The generators of a layer advance only when that layer updates. Seeds come
  from a base seed and the generator index, passed through the splitmix64
  finaliser.

## 3. Sweeps, colours and clamping

Couplings only join adjacent layers, so the graph is bipartite between even
and odd layers:

* Colour 0 is the visible layer and the deep layer.
* Colour 1 is the hidden layer.

`sweep_controller` raises `color_en[0]` for one clock and then `color_en[1]`
for one clock. All p-bits of the enabled colour sample together from fields
computed from the registered states of the other colour. A run of n sweeps
keeps the controller busy for exactly 2n clocks. If n = 0, it runs until the
host writes stop. An assertion checks that the two colours are never enabled
together.

**Clamp** freezes layer 0 for a whole run. This is the inner loop of dual
sampling for deep machines:

1. Draw a visible configuration v with an ordinary run. This is an outer
   sample.
2. Hold v fixed. Draw N_c configurations of (h, d) from P(h, d | v) with
   clamped runs.
3. From each (h, d) sample, the host evaluates the energy change of every
   single-spin flip of v. Averaging exp(-Delta E_i) over the N_c samples
   gives the amplitude ratio Psi(v^(i)) / Psi(v) that the local energy needs.

The hardware supplies steps 1 and 2. The averaging, the local energy and the
stochastic-reconfiguration update run on the host.

## 4. Splitting the lattice across FPGAs

This is the least obvious part of the design.

**Stripes.** Node n of `NFPGA` holds rows [n*L/NFPGA, (n+1)*L/NFPGA) of every
layer. For L = 80 on six nodes, that is 13 or 14 rows: 2080 or 2240 p-bits
per node. A unit within K rows of the stripe edge has neighbours on the next
node.

**Halos.** Each node keeps two halo registers:

* `halo_n`: the K rows just above its stripe, in every layer;
* `halo_s`: the K rows just below its stripe.

`sparse_bm_core` builds an extended view of each layer: K halo rows, then the
local rows, then K halo rows. A neighbour at row offset dr is always found at
extended row r + K + dr, with the column wrapped modulo L. So edge units need
no special logic. Their couplings to halo units are the "shadow weights":
couplings that cross the cut, stored on both FPGAs. Halo units have no logic
on this node. They are the latest values received from the neighbour, held
until the next frame arrives. A node whose stripe is the whole lattice
(`ROWS == L`) takes its wrap rows from its own array and ignores the halos.

**Links.** Each node sends its first K rows (all layers) north and its last
K rows south. Each direction has one `boundary_tx` -> `boundary_rx` pair.
Only binary states cross the links.

* **Framing.** The transmitter snapshots the edge bits at the start of each
  frame, so every frame is consistent. It then sends the frame as
  NW = ceil(HB / LANES) words. For L = 80 and two layers, HB = 320 bits, so
  NW = 40 words on 8 lanes. A frame line marks word 0, and frames follow each
  other back to back. The sending FPGA's clock goes with the data on its own
  line. The data changes on its rising edge and the receiver captures on the
  falling edge.
* **Receiving.** The receiver assembles the frame in the forwarded-clock
  domain and copies it into a holding register. It then flips a toggle. A
  two-flop synchroniser carries the toggle into the local p-bit clock domain,
  where the holding register is copied into the halo. This is safe while a
  frame lasts longer than three local clocks (40 forwarded clocks here). A
  frame marker always restarts assembly, so a receiver that comes up in
  mid-stream locks on at the next frame.

**No global synchronisation.** Each node runs on its own clock and never
waits for the links. Its edge units may use neighbour states a few frames
old. The cut is a small fraction of the lattice, so this barely changes the
sampled distribution. It lets every node clock its p-bits at the local
timing limit instead of the chip-to-chip round trip.

**The ring.** A stripe partition of a torus is itself a ring: the last stripe
borders the first. `pcomputer_cluster` therefore connects node NFPGA-1 back
to node 0 with one more link pair. The forward direction of the chain carries
southern edges and the reverse direction carries northern edges.

## 5. Host command port

The boards' host link (Ethernet) is outside this RTL. What it delivers is
modelled as a word bus: `host_we_i`/`host_re_i`, a 32-bit address, 32-bit
write data, and read data one clock later with `host_rvalid_o`.

| address [31:30] | region | contents |
|---|---|---|
| 00 | control | `[7:0]` register: 0 CTRL (write: bit0 start, bit1 clamp, bit2 stop, bit3 snapshot), 1 NSWEEP, 2 STATUS (bit0 busy, bit1 done), 3 SWEEPS, 4/5 frames received from north/south |
| 01 | snapshot | word w = p-bits 32w .. 32w+31 of the state packed [layer][row][column] |
| 10 | weights | `[29:28]` layer, `[27:8]` site = row*L + column within the stripe, `[7:0]` slot; data `[9:0]` |

The snapshot register is the sample buffer. It is loaded at the end of every
run, or on command, so the host reads one consistent configuration.

Typical sequences:

* **Outer sample:** write NSWEEP = n, write CTRL = 1, poll STATUS until done,
  then read the snapshot.
* **Inner, clamped sample:** write CTRL = 3. On a cluster, start every node
  with NSWEEP = 0 (free run) and stop them after enough time for the boundary
  frames to circulate.

## 6. Sizes and workloads

| configuration | parameters | p-bits | on this RTL |
|---|---|---|---|
| single FPGA, FRBM 35 x 35 | `pcomputer_node` defaults | 2450 | default of the node |
| 6 FPGAs, FRBM 80 x 80 | `pcomputer_cluster` defaults | 12,800 (2080 or 2240 per node) | default of the top |
| 6 FPGAs, FRBM 50 x 50 | cluster with `L = 50` | 5000 (800 or 900 per node) | needs re-elaboration: the lattice size is wired in |
| single FPGA, DBM 30 x 30 | node with `L = ROWS = 30, NLAYERS = 3, FRAC_BITS = 5` | 2700 | needs re-elaboration |
| 10 x 10 RBM and DBM studies | node with `L = ROWS = 10`, `NLAYERS` 2 or 3, `K` 2 or 3 | 200 or 300 | needs re-elaboration |

`K` is one radius for every layer pair. A smaller radius on one pair, such as
k1 = 2 with k2 = 1, runs on K = 2 hardware by writing zero to the couplings
that lie farther apart than the smaller radius.

The connectivity is built at elaboration, so a machine built for one L cannot
sample another L. The field sweeps across the phase diagram change only the
weights and run on the same hardware.

**Sweep rate.** A sweep is 2 clocks. At a 15 MHz p-bit clock that is
7.5 million sweeps per second per node. The 3 x 10^6 sweeps of one training
iteration therefore take about 0.4 s of sampling.

## 7. Where this RTL departs from the source design, and what it assumes

* **Partition.** Row stripes with a closing link replace a min-cut graph
  partition on a linear chain of boards. The stripes keep every node's
  neighbours to two other nodes, but they need the ring link.
* **Storage.** Couplings are stored once per endpoint, so symmetric weights
  use twice the storage.
* **This design's choices, where the source gives only the function:** the
  link format (8 lanes, a frame line, falling-edge capture, toggle handover),
  the host bus and its address map, the random-number width (8 bits), the
  generator variant (xoshiro128++), the tanh table range, and fixed unit
  inverse temperature.
* **States.** The source applies its 10-bit fixed-point format to
  states as well as weights. A p-bit state here is a single bit (+1 or -1), which
  is all a neighbour needs to add or subtract a weight. Only fields and
  weights are multi-bit.
* **Temperature.** beta is fixed at 1. A different beta is the same as
  scaling every weight and bias by beta on the host.
* **Reset.** Reset puts every p-bit in state -1 and clears every weight. The
  first sweep randomises the states.
* **Not in the RTL:** the Ethernet and FMC physical layers, the clock
  generation, and everything the host does (local energies, amplitude-ratio
  averaging, stochastic reconfiguration).

## 8. Simulating and changing it

All files are SystemVerilog 2017. `rtl/pc_pkg.sv` must be compiled first.
Every testbench checks itself and prints `TB_RESULT checks=N failures=M`.

    verilator --binary --timing --assert -Irtl -Itb rtl/pc_pkg.sv tb/tb_pcomputer_cluster.sv \
              --top-module tb_pcomputer_cluster
    ./obj_dir/Vtb_pcomputer_cluster

| testbench | what it establishes |
|---|---|
| `tb_xoshiro128pp` | bit-exact against an integer model of xoshiro128++; holds while disabled |
| `tb_synapse` | field equals b + sum(+-w) for random weights, states and biases, 13 and 26 inputs |
| `tb_pbit_neuron` | P(+1) matches (1 + tanh x)/2 within 5 sigma; saturation; hold |
| `tb_weight_bank` | slot map of a middle and a bottom layer; writes to slots or sites that do not exist are ignored |
| `tb_sweep_controller` | colour order, exactly 2n busy clocks, sweep count, done, stop, clamp capture, start while busy ignored |
| `tb_sparse_bm_core` | coupling geometry for several offsets with torus wrap, deep layer, clamp, halo rows, random states at zero parameters |
| `tb_boundary_link` | frame spacing, delivery across unrelated clocks, hold when idle, resynchronisation |
| `tb_host_if` | every register, weight decode, snapshot at done and on command |
| `tb_pcomputer_node` | a DBM node through its host port: outer sample, clamped inner sample, free run and stop, run length, looped-back links |
| `tb_single_board_frbm` | the single-board 35 x 35 machine at its default parameters (2450 p-bits): fair coins at zero field, a counted run and a clamped run, each checked spin by spin |
| `tb_pcomputer_cluster` | six nodes on six clocks sampling an 18 x 18 lattice in a ring; each hidden spin copies a random neighbour that may be local, on another node, or across the wrap |

**Size limits of the tests.** The largest configurations simulated are:

* one node at its full default size, the 35 x 35 single-board machine
  (2450 p-bits; about 4 minutes to build, seconds to run);
* the six-node, 18 x 18 cluster (648 p-bits, three rows per node);
* the 6 x 6 three-layer node (108 p-bits).

The default 80 x 80 cluster passes lint and elaboration but was not
simulated: its Verilator model takes over an hour to compile. The smaller
tests use the same modules with the same generate code.

**Changing sizes.** Set `L`, `NFPGA`, `NLAYERS`, `K` and `FRAC_BITS` on the
cluster, or `L`, `ROWS`, `NLAYERS`, `K` and `FRAC_BITS` on a node. Each
stripe needs at least K rows. `LANES` sets the link width. Link frames must
stay longer than three local clock periods, so very short frames need
`LANES` reduced.
