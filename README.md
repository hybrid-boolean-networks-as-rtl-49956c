# HBN-PUF: a hybrid Boolean network as a physically unclonable function

A physically unclonable function (PUF) turns the random, uncontrollable
manufacturing differences between nominally identical chips into a
chip-specific answer (response) to a question (challenge). This design gets
those differences from a *chaotic transient* in an unclocked logic network.

The core is a network of N logic nodes, each a 3-input XOR, wired to one
another in a random graph with no clock anywhere in the loop. A challenge is an
N-bit *initial state* of the network. When the network is released it starts
switching as fast as the gates allow, and the exact times at which each gate
crosses its threshold depend on the delays of that particular chip's gates and
wires. Because the dynamics are chaotic, the tiny differences grow quickly: a
few nanoseconds after release the state of the network on one chip no longer
resembles the state on another chip given the same challenge. The response is
an N-bit snapshot of the network taken at a chosen instant `t_opt` in that
transient. So there are N response bits for each of 2^N challenges.

Around the unclocked network sits a small amount of clocked logic (hence
*hybrid*): a controller that loads the challenge and releases the network, a
tapped delay line that takes M snapshots at sub-nanosecond spacing, a
multiplexer that picks the response, and a register interface for a host
processor. Default size: N = 256 nodes, M = 20 snapshots spaced about 0.5 ns
apart, so the whole transient that is observed lasts about 10 ns.

The design follows the HBN-PUF published by Charlot, Canaday, Pomerance and
Gauthier ("Hybrid Boolean Networks as Physically Unclonable Functions"), built
there on Cyclone V FPGAs. The structure of the network and the readout are
theirs. The register map, the cycle counts, the graph generator and the
simulation delay model are this implementation's own choices. They are marked
as such below and in each file's header.

## Block diagram

```
                 Avalon-MM (host CPU)
                        |
                 +--------------+  challenge, tap_sel, start
                 |hbn_avalon_csr|-----------------------------+
                 +--------------+<---- response, busy, done --+ |
                        ^  bitstream (M x N)                  | v
                        |                               +-------------+
                        |                               | hbn_control |  clocked
                        |                               +-------------+
                        |                    Reset (puf_reset) |  | challenge (N)
                        |                 +--------------------+  v
                        |                 |              +--------------+
                        |                 |              | abn_network  |  unclocked
                        |                 |              |  N x hbn_node|  XOR loop
                        |                 v              +--------------+
                        |        +------------------+           | x(t) (N)
                        +--------| tapped_delay_line|<----------+
                                 | 2M inverters,    |
                                 | M tap-clocked    |---> response_select ---> hbn_control
                                 | N-bit registers  |     (tap_sel)            (response copy)
                                 +------------------+
```

## One query, step by step

All clocked logic runs on `clk` (200 MHz, 5 ns period, in the reference
experiments). With the default `HOLD_CYCLES = 8` and `RUN_CYCLES = 4`:

1. The host writes the challenge words and `TAP_SEL`, then writes 1 to `CTRL`.
2. **Hold.** On the clock edge that samples `start`, the controller latches the
   challenge and applies it to the node multiplexers. Reset is already high,
   so every node outputs its challenge bit. Reset stays high for
   `HOLD_CYCLES` clocks while the network settles.
3. **Release.** Reset is a registered output, so it falls cleanly on a clock
   edge. From that instant each node passes its XOR instead of its challenge
   bit, and the network evolves on its own.
4. **Capture.** The same falling Reset runs down the delay line. After inverter
   pair m (m = 0 .. M-1) it clocks register m, which stores the network state
   `x(2(m+1)tau)`. With tau about 0.25 ns the last snapshot is taken about
   10 ns after release, i.e. within two clock periods.
5. **Transfer and re-arm.** On the last of the `RUN_CYCLES` Reset-low clocks the
   controller copies the selected snapshot into a clocked register. It raises
   Reset again, which returns the network to the challenge, and pulses `done`.
   The capture registers keep their values until the next release.
6. The host polls `STATUS.done` and reads `RESP[w]`. For characterisation it can
   also read the whole time series `BITS`.

The start-sampling edge and the done-sampling edge are `1 + HOLD_CYCLES +
RUN_CYCLES` clocks apart (13 clocks, 65 ns by default). The bus traffic dominates
the query rate, not the PUF.

## The network (`abn_network`, `hbn_node`)

### The node

Each node is `x_i = Reset ? C_i : (x_f ^ x_g ^ x_h)`: a 3-input XOR feeding one
input of a 2:1 multiplexer, whose other input is challenge bit `C_i`. XOR is
used because its output changes whenever any input changes, and it is high for
exactly half of its input patterns. Three inputs fit one FPGA logic element
together with the multiplexer. The node's output goes to three other nodes and
to the capture registers.

Two challenges are special. Since the XOR of three equal bits is that bit, the
all-0 and all-1 states are fixed points: the network never leaves them. They
carry no information, so the host should not use them as challenges. They are
useful as a build check. A placed-and-routed network that does not return
all-0 for the all-0 challenge, and all-1 for the all-1 challenge, has glitches
and should be discarded. The reference work found this in about one build in
ten.

### The wiring

Every node reads three distinct nodes other than itself, and every node is
read by exactly three nodes: a random directed graph of degree 3. In the
reference work the graph comes from a script that pastes node indices into the
HDL. Here it is drawn while the design is elaborated, from `GRAPH_SEED`:

* Three random permutations `p0, p1, p2` of `0..N-1` are made by Fisher-Yates
  shuffles driven by a xorshift32 generator. Input k of node i is `pk(i)`.
* A repair pass goes through each permutation. Wherever `pk(i) = i`, or
  `pk(i)` equals an earlier input of node i, it swaps `pk(i)` with a random
  entry `pk(j)` and checks again.
* Since each `pk` stays a permutation, every node feeds exactly one input of
  each kind, so it has out-degree 3.

The repair loop is bounded; for the sizes tested (N = 16 to 256) the result is a valid degree-3 graph, which `tb_abn_network` checks at N = 256. It is not a uniformly random draw
over all such graphs, and the generator differs from the reference work's
script. The graph is exposed as the localparam `GRAPH[i][k]`. A different seed
gives a different PUF *class*: a design that is the same on every chip but
wired differently. N must be at least 4.

### The combinational loop, and what simulation can show

The network is deliberately a large combinational loop. Lint and synthesis
report it. That report is expected and needs no fix: the loop is the entropy
source. On real silicon the node voltages spend time between logic levels,
and the behaviour is analog and chaotic. Not all of this can be simulated in
RTL. A digital simulator needs a delay on each node, or the loop never settles
in zero time. So each node has a simulation-only delay:

* `NODE_DELAY_PS` (default 230 ps) is the lumped XOR-plus-multiplexer delay. The
  reference work says this is similar to the 0.25 ns inverter delay. The value
  is offset from 250 ps on purpose: with equal delays, no node edge then falls
  on a tap edge for taps 1 to 22, so simulation results do not depend on event
  ordering.
* With all node delays equal (`DELAY_SPREAD_PS = 0`, the default), the network
  behaves exactly like a *synchronous* XOR map that steps every
  `NODE_DELAY_PS`. Snapshot m then equals the challenge stepped
  `floor(2(m+1)*TAU_PS / NODE_DELAY_PS)` times. This gives a precise,
  independent reference, which the testbenches use.
* `DELAY_SPREAD_PS > 0` gives each node a fixed delay offset in
  `[-spread, +spread]` drawn from `DEVICE_SEED`. Two copies with different
  `DEVICE_SEED` are a crude stand-in for two chips. The delays are the
  simulator's standard *inertial* delays for continuous assignments: a node
  swallows input changes that come closer together than its own delay. With
  any spread, even a few ps, different pulses survive in the two copies from
  the first node delay on. So simulated copies differ at every tap (about 0.4
  to 0.5 of the bits). The gradual growth over several nanoseconds that real
  chips show is not reproduced. Copies with the same `DEVICE_SEED` agree bit
  for bit.

This model has no noise, no threshold effects and no intermediate voltages. So
a copy always reproduces its own response: intra-device distance 0. The
distance between devices in simulation is a result of the model, not a
prediction of silicon numbers. Synthesis ignores all `#` delays.

## Sampling the transient (`tapped_delay_line`, `response_select`)

A clock is too slow to sample a transient that lasts 10 ns, and it would not
track the network as temperature and voltage change. Instead, Reset is passed
through 2M inverters (`TAU_PS` = 250 ps each in simulation). After every pair
the signal is a delayed copy of Reset with the same polarity: `taps[m]`. Each
tap clocks its own N-bit register on its **falling** edge, the edge that
follows the release. So register m holds `x(2(m+1)tau)`. The inverters are
made of the same kind of logic as the network, so the sampling instants drift
with temperature and voltage in step with the network's dynamics. The
reference work found that this makes the PUF far less sensitive to
temperature than sampling with a stable clock.

Raising Reset again produces rising tap edges. These do not clock the
registers, so the snapshots stay put until the next release, and the clocked
side can read them safely whenever the controller is idle. No synchroniser is
used: the controller reads the snapshots only `RUN_CYCLES - 1` clocks after
release, long after the last tap has fired. The top level refuses to
elaborate if `(RUN_CYCLES - 1) * CLK_PERIOD_PS <= 2 * M * TAU_PS`.

`response_select` is the multiplexer that picks snapshot `tap_sel` (an
out-of-range index gives the last tap). The right tap, `t_opt`, is a property
of the design, not of one chip. It is where the distance between devices,
minus the distance between repeated queries of one device, is largest. The
reference measurements put it at 2 to 8 ns, rising slowly with N, which is
`TAP_SEL` 3 to 15 with 0.5 ns per tap. Find it for a given build by
characterising several boards, using the full `BITS` time series.

On an FPGA, the inverter pairs must survive synthesis. The nets carry
`(* keep *)`, but a generic synthesis flow still folds each double inversion
into a wire. All M registers then share one clock and merge into one. Use the
vendor's buffer/LCELL primitives or equivalent constraints for the chain, and
fix the placement of nodes and taps as the reference work did.

## Host interface (`hbn_avalon_csr`)

Avalon-MM slave with 32-bit data and word addresses. Reads return data one
clock after `avs_read`. There is no `waitrequest`. An assertion flags a read
and a write in the same cycle.

| Word address      | Name       | Access | Contents |
|-------------------|------------|--------|----------|
| `0x000`           | CTRL       | W      | bit 0 = 1: start a query (ignored while busy) |
| `0x001`           | STATUS     | R      | bit 0 busy; bit 1 done (set at the end of a query, cleared by the next start) |
| `0x002`           | TAP_SEL    | RW     | snapshot used as response; m selects `x(2(m+1)tau)` |
| `0x003`           | INFO       | R      | [15:0] N, [31:16] M |
| `0x040 + w`       | CHAL[w]    | RW     | challenge bits `32w+31 .. 32w` |
| `0x080 + w`       | RESP[w]    | R      | response of the last query |
| `0x100 + 64m + w` | BITS[m][w] | R      | snapshot m of the last query |

Unmapped addresses and bits at or above N read 0. With the 12-bit address,
N can be up to 2048 and M up to 60. A typical driver loop writes `CHAL[*]`
and `CTRL`, polls `STATUS` until bit 1 is set, and reads `RESP[*]`. The
same challenge can be queried any number of times. Repeating each challenge
about 100 times at enrollment lets software mask out bits that ever change.
The paper calls this *cherry picking*, and it cuts the error rate below 1%
while keeping most bits. That masking, and the exclusion of the all-0/all-1
challenges, are host software and are not part of this RTL.

## Parameters (`hbn_puf_top`)

| Parameter         | Default | Meaning | Origin |
|-------------------|---------|---------|--------|
| `N`               | 256     | nodes = challenge bits = response bits | main network size of the reference work |
| `M`               | 20      | inverter pairs = snapshots | 10 ns readout / 0.5 ns per pair, derived from the reference work |
| `GRAPH_SEED`      | 1       | seed of the wiring | own choice |
| `HOLD_CYCLES`     | 8       | clocks the challenge is held before release | "several" in the reference work; count is own choice |
| `RUN_CYCLES`      | 4       | clocks Reset stays low | own choice (must cover the delay line plus one clock) |
| `CLK_PERIOD_PS`   | 5000    | clock period, used only for the timing check | 200 MHz of the reference experiments |
| `NODE_DELAY_PS`   | 230     | simulated node delay | own choice, near tau |
| `TAU_PS`          | 250     | simulated inverter delay | tau ~ 0.25 ns from the reference work |
| `DELAY_SPREAD_PS` | 0       | simulated per-node delay spread | own choice; 0 = ideal, identical nodes |
| `DEVICE_SEED`     | 0       | seed of the delay spread ("which chip") | own choice |
| `ADDR_W`          | 12      | Avalon word-address width | own choice |

The reference work evaluates N = 4 to 1024. Each size is a separate build of
this design with `N` set accordingly. The default build holds only the N = 256
network. N = 16, 64 and 256 are simulated here as device pairs. N = 1024
elaborates, but verilator needs many minutes to build a pair of copies, so it
is not part of the regular tests.

## Files

RTL (`rtl/`), one unit per file:

* `hbn_pkg.sv` - register map, controller state type, xorshift32 step.
* `hbn_node.sv` - XOR3 + challenge multiplexer with lumped simulation delay.
* `abn_network.sv` - N nodes and the elaboration-time graph generator.
* `tapped_delay_line.sv` - 2M inverters, M tap-clocked N-bit registers.
* `response_select.sv` - snapshot multiplexer.
* `hbn_control.sv` - hold / release / transfer sequencer, with assertions that
  Reset is low only while running and that the challenge is stable during a
  query.
* `hbn_avalon_csr.sv` - host register file.
* `hbn_puf_top.sv` - the whole PUF.

Testbenches (`tb/`) are self-checking. Each ends with one line
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

* `tb_hbn_node` - all input/challenge/Reset combinations, and the output delay.
* `tb_abn_network` (N = 256) - graph degree checks, then the state after every
  node delay against a synchronous XOR reference, for random, all-0, all-1 and
  single-one challenges, and the return to the challenge when Reset rises.
* `tb_tapped_delay_line` - exact tap times, captured values against a known
  stimulus, and snapshots held through a rising Reset.
* `tb_response_select`, `tb_hbn_control` (hold/run cycle counts, latency,
  start-while-busy), `tb_hbn_avalon_csr` (every register).
* `tb_hbn_puf_top` - the full design at its default parameters, driven over
  the bus. It checks responses at many taps and one whole 20-snapshot time
  series against the reference, both fixed points, reproducibility, latency
  and start-while-busy. It counts each of these mechanisms and fails if one
  never happened.
* `tb_hbn_puf_sizes` (helper `hbn_device_pair`) - N = 16, 64, 256, each as
  three copies with a +-5 ps delay spread: two with the same delays, one
  different. It prints the inter-device distance per tap. It checks that
  copies with equal delays agree exactly, copies with different delays
  differ, and each copy reproduces itself.

To simulate with plain verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hbn_pkg.sv tb/tb_hbn_puf_top.sv \
          --top-module tb_hbn_puf_top && ./obj_dir/Vtb_hbn_puf_top
```

Every file starts with `` `timescale 1ps / 1ps``. Delays are in picoseconds.

## Where this departs from, or goes beyond, the reference design

* **Wiring generator**: seeded permutations with repair, instead of an external
  script. Degree 3 in and out, no self-loops, no repeated inputs.
* **Capture edge**: the reference work says only that a register is triggered
  after the delayed Reset passes a pair. Capturing on the falling tap edge
  is this design's reading.
* **Where the multiplexer sits**: the block diagram of the reference work has
  one register per tap, and the response multiplexer after the M x N
  registers. Its experimental section instead speaks of choosing the length
  of the delay line with a multiplexer, i.e. one register clocked by a
  selected tap. This design follows the block diagram, which also makes the
  whole time series readable. The single-register variant saves (M-1) x N
  flip-flops.
* **M = 20** is derived from "readout in under 10 ns" and "0.5 ns per pair". It
  is not a number the reference work states.
* **Clock**: the reference text mentions both "~100 MHz" and "200 MHz" clock
  cycles for the hold phase. 200 MHz, from the experimental section, is used
  for the timing check. The logic does not depend on it.
* **Register interface**: the reference work only names the Avalon bus. The
  map, the latency and the full-bitstream readout are this design's own.
* **Physics**: the simulation delay model is a digital stand-in. It cannot
  reproduce analog, metastable or noise-driven behaviour, and so cannot
  reproduce the measured uniqueness (about 0.40) or reliability (about 0.05
  error) figures at N = 256.
* **Placement**: the reference experiments pin nodes to chosen logic elements.
  No placement constraints are part of this RTL.
