# A recurrent processing unit: reservoir computing with an unclocked gate network

Reservoir computing trains only the last layer of a recurrent neural network.
The input weights and the recurrent network (the *reservoir*) are random and
fixed. The reservoir turns each input, and what it remembers of earlier
inputs, into a high-dimensional state. A linear or logistic readout, trained
offline, maps that state to the answer. Nothing inside the reservoir has to be
trained. So the reservoir can be any physical system with rich, fading
dynamics; it does not have to be a simulation.

The recurrent processing unit (RPU) described here builds the reservoir from
**2048 Boolean logic gates wired into a random recurrent network that runs
without a clock**. Each gate switches as fast as its propagation delay allows,
about 100 ps, so the network evolves continuously and in parallel. The rest
of the design is ordinary synchronous logic at 200 MHz:

* an input buffer of 1024 patterns of 1024 bits;
* a state machine that applies one pattern per clock to the network and
  samples all 2048 gate outputs at the end of that clock;
* an output buffer that stores 1024 sampled states of 2048 bits;
* a host port through which a processor fills the input buffer, starts runs
  and reads the states back.

The trained output layer is not in hardware. The host evaluates it on the
states it reads back.

This repository gives synthesizable SystemVerilog for all of that logic,
including the gate network. It also gives testbenches that simulate the
unclocked network event by event with its gate delays.

## Contents

| file | what it is |
|---|---|
| `rtl/rpu_pkg.sv` | gate types, gate truth tables, the netlist generator, register and region codes |
| `rtl/rpu_gate.sv` | one reservoir node: a 3-input gate ORed with the reset, with a propagation delay |
| `rtl/rpu_reservoir.sv` | the network of `NUM_NODES` gates |
| `rtl/rpu_input_ram.sv` | input pattern buffer (host word port, engine row port) |
| `rtl/rpu_output_ram.sv` | state buffer (engine row port, host word port) |
| `rtl/rpu_ctrl.sv` | run state machine: streaming, sampling, reservoir reset schedule |
| `rtl/rpu_host_if.sv` | host bus, address decode, control/status registers |
| `rtl/rpu_top.sv` | the whole unit |
| `tb/tb_*.sv`, `tb/rpu_top_bench.sv` | self-checking testbenches |

## The gate network

### Nodes

A node (`rpu_gate`) is one Boolean function of three inputs. The common
reservoir reset is ORed into its result:

    y = rst | f(a2, a1, a0)        after DELAY_PS

While `rst` is high, every node is 1 whatever its inputs. That all-ones state
is stable, and it is the same for every input pattern. So releasing the reset
starts the network from a known point each time. On an FPGA each node should
fill one lookup table. The node's output net carries a `keep` attribute so
that synthesis cannot merge nodes or remove them.

The gate library has six three-input functions:

| type | function | sensitivity |
|---|---|---|
| XOR | a0 ^ a1 ^ a2 | 1 |
| MAJ | majority | 1/2 |
| OR, AND, NOR, NAND | | 1/4 |

### Sensitivity and activity

The *sensitivity* of a gate is the fraction of single-input flips that flip
its output. Count it on the gate's truth table: of the 3 x 8 = 24
(input, flipped bit) pairs, how many change the output? The mean sensitivity
S of the network largely sets its behaviour:

* An all-XOR network (S = 1) excites itself. It keeps switching with no input
  at all, which is useless as a reservoir.
* Networks with S well below 0.5 return to rest after a disturbance. They
  still hold a fading trace of it for a few tens of nanoseconds, and that
  trace is what the readout uses.

The draw weights in `rpu_pkg::GATE_WEIGHT` set the mix of gate types. Per 16
nodes the default is XOR 3, MAJ 2, OR 2, AND 3, NOR 3 and NAND 3. That gives
an expected S = (3 x 1 + 2 x 0.5 + 11 x 0.25) / 16 = 0.42. To explore other
activity levels, change the weights.

### Wiring

The netlist is not a table. It is computed while the design is elaborated,
from a 32-bit integer hash:

    mix32(v)           = xorshift-multiply finaliser:
                         v ^= v>>16; v *= 0x7feb352d; v ^= v>>15;
                         v *= 0x846ca68b; v ^= v>>16
    h(seed, node, s)   = mix32(mix32(seed * 0x9e3779b9 + node) + s * 0x85ebca6b)

Each node takes the following values from this hash:

* **Gate type:** pick `h(SEED, i, 100) mod 16` against the cumulative weights.
* **Source of pin p, for p = 0, 1, 2:** `r = h(SEED, i, p+1) mod (N-1)`. The
  source is node `r`, or node `r+1` when `r >= i`. This spreads sources
  uniformly over all nodes except node i itself.
* **Input bits:** for the first `NUM_INPUTS` nodes, pin 0 is input bit `u[i]`
  instead of a node.
* **Delay:** `DELAY_PS - SPREAD + (h(SEED, i, 200) mod (2*SPREAD+1))`
  picoseconds, which is 80 to 120 ps by default.

A different `SEED` gives a different, equally random network. Testbenches
call the same functions to rebuild the netlist description for checking.

### What simulation shows, and what it cannot

Each node's delay is an inertial delay on a continuous assignment. A
simulator with timing support (Verilator's `--timing`) therefore runs the
network as the asynchronous circuit it is: every gate switches its own delay
after its inputs change, and pulses shorter than that delay die out. The
loops through the network are intentional. Lint and synthesis tools report
them as combinational loops; breaking them would remove the reservoir.

The simulation is a model, not a prediction of silicon. Real delays depend on
placement, routing, voltage and temperature. Real gates do not switch in
zero time. And sampling an asynchronous node with a flip-flop can go
metastable; the design has one sampling register and no synchroniser. With
the default mix, many random inputs let a small network settle within
nanoseconds, while others leave loops oscillating. The reservoir testbench
reports both. Synthesis ignores the delays.

## A run, clock by clock

`rpu_ctrl` streams rows. Edge E0 accepts the start. From then on, for row
c = 0 .. LENGTH-1:

| when | what |
|---|---|
| cycle after E(c) | input RAM read of row c |
| E(c+1) | row c and its reset flag reach the reservoir inputs |
| E(c+1) to E(c+2) | the network evolves for one clock period (5 ns at 200 MHz) |
| E(c+2) | all node states sampled |
| E(c+3) | sample written to output RAM row c |

Rows follow each other on every clock. A run of LENGTH rows therefore keeps
`busy` high for LENGTH + 2 clocks. The `CYCLES` register reports that number.
Output row c always holds the network state at the end of the clock period
in which input row c was applied.

**Reset schedule.** Row c is applied with the reservoir reset high when
`c mod RST_PERIOD < RST_LEN`. When `RST_PERIOD` is 0, the reset is high when
`c < RST_LEN`. Between runs the reservoir is held in reset. This schedule is
how the unit is used for:

* **Images.** Binarise a 28 x 28 image at 34 % of its maximum brightness and
  unravel it row by row into a 784-bit vector. Write it into 5 consecutive
  rows and set `RST_PERIOD = 5` and `RST_LEN = 1`. Each image then sees:
  * one reset row, which reads back as all ones;
  * four rows of free evolution under the image.

  The host picks which of the four sampled states to feed to its classifier.
  At 200 MHz that is 40 M images per second, and one buffer holds 204 images.
* **Time series.** Set `RST_PERIOD = 0` and `RST_LEN = 1`, and write one
  sample per row. The network is never reset during the run, so it carries
  memory from row to row.

## Host port

The host port is a single-clock word bus. A request is `h_valid` with `h_we`,
`h_addr` and `h_wdata`. Every request is taken in the clock it is presented.
A read returns `h_rdata` with `h_rvalid` exactly two clocks later. Requests
may be issued on every clock.

Word address: `{region[1:0], row[9:0], word[5:0]}`.

| region | content |
|---|---|
| 0 | registers. The index is the low bits of `{row, word}`. |
| 1 | input RAM, word `word` (0..31) of row `row`, read/write |
| 2 | output RAM, word `word` (0..63) of row `row`, read only |

Bit 32k+j of a row is bit j of word k.

| index | register | access | reset value |
|---|---|---|---|
| 0 | CTRL: bit 0 = start | W | |
| 1 | STATUS: bit 0 busy, bit 1 done | R | 0 |
| 2 | LENGTH: rows per run (0 to DEPTH) | RW | DEPTH |
| 3 | RST_PERIOD | RW | 0 |
| 4 | RST_LEN | RW | 1 |
| 5 | CYCLES: clocks taken by the last run | R | 0 |
| 6 | INFO: {NUM_NODES[15:0], NUM_INPUTS[15:0]} | R | |

Other behaviour of the port:

* A start during a run is ignored.
* `done` stays set until the next start.
* Writes to the output RAM and to unmapped addresses are dropped.
* Reads of unmapped addresses return 0.
* Host and engine may use a RAM in the same clock. The engine sees the row's
  old contents if both touch the same row.

## Parameters

| parameter (rpu_top) | default | meaning |
|---|---|---|
| NUM_NODES | 2048 | gates in the reservoir; output row width |
| NUM_INPUTS | 1024 | reservoir input bits; input row width |
| DEPTH | 1024 | rows in each buffer |
| SEED | 1 | selects the random network |
| GATE_DELAY_PS | 100 | mean gate delay |
| GATE_DELAY_SPREAD_PS | 20 | per-gate delay spread (+/-) |

`NUM_NODES` and `NUM_INPUTS` must be multiples of 32, and `NUM_INPUTS` may
not exceed `NUM_NODES`. The gate weights and the fan-in are in `rpu_pkg`.

## Where this design follows the RPU and where it fills gaps

The following come from the RPU as published:

* the sizes: 2048 gates, 1024 inputs, 1024 x 1024 and 1024 x 2048 buffers;
* the 200 MHz one-row-per-clock streaming with simultaneous sampling;
* the reset ORed into every gate;
* random gate types and wiring, with the mean sensitivity kept below 0.5;
* gates kept as separate nodes;
* the 5-clock image schedule behind 40 M images/s;
* 34 % binarisation of unravelled 28 x 28 images.

The following were not specified and are this design's own choices:

* three inputs per gate and the six-gate library with its weights;
* the hash-based wiring, one input bit per node on the first 1024 nodes, and
  no self-connections;
* the 80-120 ps delay spread;
* the reset schedule registers, and holding the reservoir in reset while idle;
* the exact pipeline (LENGTH + 2 clocks);
* the host bus, address map and registers, and the 32-bit word width;
* a single clock for host and engine. On a ZYNQ device the host port would
  sit behind an AXI bridge, which is not included.

The following belong to the system but are not logic here:

* the processor and its software;
* Gigabit Ethernet;
* the clock source;
* the trained output layer and image binarisation, which run in host
  software.

## Verification

Every module has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_rpu_gate` | all six gate types, all inputs, both reset levels; the delay to 1 ps; glitch suppression |
| `tb_rpu_reservoir` | a 128-node network: all ones under reset; every settled state is a fixed point of the netlist (each node equals its gate applied to its sources, recomputed by the testbench); mean sensitivity below 0.5 |
| `tb_rpu_input_ram`, `tb_rpu_output_ram` | random traffic against a reference array, latency and hold behaviour |
| `tb_rpu_ctrl` | pipeline alignment of every row with a predictable stand-in reservoir; one write per clock; LENGTH + 2 timing; reset schedules; ignored start; zero length |
| `tb_rpu_host_if` | registers, start pulse, routing, two-clock read return, back-to-back reads |
| `tb_rpu_top` | the whole unit at 256 gates / 128 inputs / 64 rows, driven only through the host bus |
| `tb_rpu_top_full` | the whole unit at its default, full size (2048 gates, 1024 x 1024 and 1024 x 2048 buffers): a 60-row run of 12 images, the first 10 rows written and read through the host bus |

The two top-level testbenches share `rpu_top_bench`. The bench writes a batch
of synthetic binarised digit images at 5 rows per image and runs it. It then
checks three things:

* every output row equals the network state the bench captured itself at that
  row's sampling edge;
* the reset rows read all ones;
* each image moves the network away from the reset state.

It also reports how reproducible the response to a repeated image is. The
full-size bench loads and reads most rows directly in the RAM arrays and runs
60 of the 1024 rows: simulating every gate event of the 2048-gate network is
slow, and a 60-row run already takes about a minute of simulation. A whole
1024-row batch is not simulated at full size; `tb_rpu_top` runs a whole
(64-row) buffer at the reduced size.

No real MNIST data is used, so the classification accuracy of the unit is not
reproduced here.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/rpu_pkg.sv tb/tb_rpu_top.sv --top-module tb_rpu_top
    ./obj_dir/Vtb_rpu_top

The full-size testbench takes about three minutes to build, because the
network is elaborated into 2048 gate instances, and about one minute to run.
