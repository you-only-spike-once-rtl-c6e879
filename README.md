# YOSO: a spike-driven accelerator for time-to-first-spike neural networks

A time-to-first-spike (TTFS) spiking network has each neuron fire at most once
per inference. Most neurons never fire, so most of the work a dense network
would do can be skipped. This accelerator is built around that. Work happens
only when a spike arrives, or when an *end of timestep* (EoT) packet says a
timestep is over. A spike from input neuron `j` adds column `j` of the weight
matrix into a bank of per-neuron *accumulated weights*. An EoT adds each
accumulated weight into its neuron's *membrane potential* and checks for
firing. Each neuron therefore integrates the weighted sum of all inputs that
have fired so far, once per timestep. This is the ramp of a non-leaky TTFS
neuron: a neuron whose inputs fired earlier crosses its threshold sooner.

The chip is a 6 x 7 mesh of processing elements (PEs) joined by an X-Y routed
network-on-chip. Each PE holds up to 256 neurons of one layer and up to 40 960
8-bit weights. A layer too large for one PE is split over several. The PEs of
a layer pass input spikes along a forwarding chain, so a sender needs only
one destination.

## The processing element

```
 NoC ──► input spike FIFO ──► router interface ──► core ──► memory interface ──► 4 SRAMs
 NoC ◄── output spike FIFO ◄──┘      ▲   (programming writes) ─────┘   │
                                     └────── spike words (Spike Address SRAM) ◄┘
```

| Module | Role |
|---|---|
| `pe` | Wires the chain above together. |
| `router_if` | Splits traffic between *programming mode* and *run mode*, and builds output packets. |
| `core` | Three decoupled state machines, LOAD, COMPUTE and STORE, joined by FIFOs. |
| `mem_if` | One `sram_if` per SRAM, plus the multiplexing of programming writes and run-time writes. |
| `sp_sram` | Single-port SRAM model with a registered read. |

The four SRAMs of a PE:

| SRAM | Size | Contents |
|---|---|---|
| Accumulated Weights | 256 x 32 bit | Signed, saturating running sum of input weights. |
| Neurons | 256 x 32 bit | Bit 31 is the *has spiked* flag; bits 30:0 are the signed potential. The initial value is usually the bias. |
| Weights | 40 960 x 8 bit | Signed weights. |
| Spike Address | 256 x 32 bit | For each local neuron, the 32-bit spike word it sends when it fires. |

## Packets and words

A packet is 40 bits: `{dest[39:32], word[31:0]}`. The destination holds
`x` in bits 7:4 and `y` in bits 3:0.

### Run-mode words

| Bits 31:30 | Meaning |
|---|---|
| `00` | Spike. Bits 15:0 are the source index `j`. Bits 23:16, when nonzero, override the access count `P` for this spike. |
| `01` | EoT. |
| `11` | Enter programming mode. |

### Programming-mode words

Programming mode is entered at reset, or by a `11` word in run mode. In this
mode every word is a command, selected by bits 31:28:

| Op | Name | Action |
|---|---|---|
| `1` | SET_PTR | Bits 25:24 select the SRAM (0 accumulated weights, 1 neurons, 2 weights, 3 spike address). Bits 15:0 are the start address. |
| `2` | DATA_LO | Bits 15:0 are the low half of a data word. |
| `3` | DATA_HI | Bits 15:0 are the high half. The word is written, then the address is incremented. |
| `4` | SET_REG | Bits 27:24 select a reference register; bits 15:0 are its value. |
| `F` | RUN | Leave programming mode. |

The reference registers:

| # | Name | Meaning |
|---|---|---|
| 0 | P | Accesses per spike. |
| 1 | M | Weight address increment. |
| 2 | WBASE | Weight base address. |
| 3 | NEURONS | Neurons processed at an EoT. |
| 4, 5 | THR | Signed 31-bit threshold, low and high halves. |
| 6 | MODE | Bit 0: 1 for softmax, 0 for integrate-and-fire. |
| 7 | OUTDEST | Destination coordinates of this PE's spikes. |
| 8 | FWDDEST | Destination coordinates of forwarded packets. |
| 9 | FWDEN | Bit 0: forwarding on. |
| 10 | EOTNEED | EoT packets that make up one timestep. Reset value 1. |

All other registers reset to 0.

## How a spike becomes memory traffic

The LOAD module holds four registers: address, count, `P` and `M`. When spike
`j` arrives:

1. The address register is set to `WBASE + j`.
2. LOAD issues `P` accesses, adding `M` to the address after each one.

Access `k` (k = 0 … P-1) reads two things:

- the weight at `WBASE + j + k*M`;
- accumulated weight `k`, with an *intent to write* bit set.

With a column-major layout this is one fully connected layer: weight
`w[i][j]` sits at `WBASE + j + i*M`, where `M` is the layer's input count and
`P` its neuron count.

An EoT makes LOAD read every neuron `k` (k = 0 … NEURONS-1) and its
accumulated weight. Only the neuron read carries the intent bit.

LOAD also sends:

- to COMPUTE, through LOAD-to-CMP: the spike type and the access count;
- to STORE, through LOAD-to-STORE: each target address, tagged *first* and *last*.

COMPUTE adds the returning read data:

- For a spike: accumulated weight + weight, saturated to 32 bits.
- For an EoT: potential + accumulated weight, saturated to 31 bits, with the spiked flag passed along unchanged.

STORE pairs each result with the next address from LOAD-to-STORE. Nothing is
reordered, so order alone links them. STORE then:

- For a spike: writes the accumulated weight back.
- For an EoT in integrate-and-fire mode: fires neuron `k` if it has not fired before and its potential is at or above the threshold. It sets the spiked flag and writes the neuron word back.
- For an EoT in softmax mode: writes the potentials back and tracks the largest one between the *first* and *last* entries. At the last entry, that neuron fires. It fires every timestep, with no threshold, and the first neuron wins a tie.

After the last entry of an EoT, STORE pushes an EoT marker behind the fired
neuron addresses. The memory interface turns each fired address into that
neuron's Spike Address word, and each marker into an EoT word. The router
interface adds `OUTDEST` to each word and sends it.

Every FIFO uses valid/ready handshakes. A stall anywhere only stops the stages
that depend on it, so LOAD can run ahead of COMPUTE by as many requests as
the FIFOs hold.

## Read-after-write protection

The accumulated weights and neurons are read, changed and written back
(read-modify-write). Back-to-back spikes would otherwise read a value before
its update is written. Each SRAM interface with protection therefore has a
256-bit register, one bit per entry:

- A read with the intent bit sets the bit for its address when the read is issued.
- A write to that address clears the bit.
- A read whose address bit is set waits at the head of the read queue. Later reads wait behind it. Writes continue meanwhile.

The Weight and Spike Address SRAMs are never written at run time, so their
interfaces have no protection register (`RAW_PROTECT = 0`).

A single-port SRAM takes one request per cycle. When both queues hold
requests, the interface alternates between the read queue and the write
queue. A read is issued only if its response is sure to fit in the response
FIFO.

## Splitting a layer across PEs, and timesteps

With `FWDEN` set, a PE passes each received spike and EoT to its own core.
It also re-sends the same word to `FWDDEST`. Each PE of the layer stores in
its Spike Address SRAM the *global* index of each of its neurons, so the next
layer sees one index space.

A PE fed by `S` sending PEs receives `S` EoT packets per timestep. Set its
`EOTNEED` to `S`: only every `S`-th EoT reaches the core.

The network does not keep timesteps apart in flight. A spike of timestep
`t+1` could overtake the EoT of timestep `t` on a different path. The host
must therefore wait for the output layer's EoT of timestep `t` before it
injects the spikes of `t+1`.

## Mapping a network

A fully connected layer with `m` inputs and `n` neurons needs at least
`C = max(ceil(n/256), ceil(m*n/40960))` PEs.

For the MNIST network 784-300-300-10:

| Layer | PEs | Neurons per PE | Weights per PE |
|---|---|---|---|
| 784→300 | 6 | 50 | 39 200 |
| 300→300 | 3 | 100 | 30 000 |
| 300→10 (softmax) | 1 | 10 | 3 000 |

These 10 PEs fit in the 42 of the mesh.

A softmax layer picks its maximum inside one PE, so it must fit in a single
PE.

Each bias can be loaded in one of two ways:

- **As the initial potential.** This is what the published mapping does. It is also what the testbenches do.
- **As the initial accumulated weight.** The neuron then gains `b` every timestep, which matches the `b*t` term of the non-leaky neuron equation exactly.

The hardware does not care which one is used. For each PE, program:

- The neurons and accumulated weights. The accumulated weights are zero unless they hold the bias.
- The weights and the spike words.
- `P` = local neuron count, `M` = input count, `NEURONS` = local neuron count.
- The threshold, mode, destinations, forwarding and `EOTNEED`.
- Finish with RUN.

To start a new inference, send each PE a `11` word, rewrite the neurons and
accumulated weights, then send RUN.

## The network-on-chip and the top level

`xy_router` is a buffered router with five ports: 0 local, 1 north (+y),
2 east (+x), 3 south and 4 west. Each input port has a 2-entry FIFO.
Routing is X first, then Y. Each output port picks among the inputs that
want it by round robin.

`yoso_top` places a PE and a router at every (x, y), with `X_DIM` = 6 and
`Y_DIM` = 7. Host access:

- **Input:** `host_in_*[y]` drives the west port of tile (0, y).
- **Output:** a packet addressed to x = 15 leaves at the east edge of its row, on `host_out_*[y]`.
- **Other edges:** the remaining inputs are idle. The remaining outputs are always ready; packets sent there are dropped.

`ev[]` brings out one event record per tile, for observation: RAW stall,
saturation, integrate-and-fire spike, softmax spike, forwarding, programming
mode and idle.

## Where this departs from, or adds to, the published description

- **Router.** The published design builds on the OpenSMART network, whose single-cycle multi-hop bypass is not reproduced. Only X-Y routing of 40-bit packets is kept.
- **Spike Address SRAM size.** It is 256 x 32 bit = 1 kB, as an 8-bit neuron address and a 32-bit spike word imply. The published SRAM table lists 2 kB.
- **Word widths.** The accumulated weights and potentials are 32-bit words, following the published SRAM sizes. The published per-spike byte counts instead fit 16-bit values.
- **This design's own choices.** These points are not given in the published description:
  - the word encodings above;
  - the P override field;
  - the way first and last neurons are marked;
  - EoT merging with `EOTNEED`;
  - the tie rule and per-timestep firing of softmax;
  - all FIFO depths (4, and 16 for LOAD-to-STORE);
  - the host ports of the top level.
- **Bias placement.** The published mapping puts biases in the initial potentials, while the published neuron model adds them to the slope. Both are possible here, as described under the mapping.
- **Timestep barrier.** The host must wait for the output EoT before starting the next timestep, as described above.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. Random stimulus uses
`$urandom`, so runs are reproducible for a given seed.

The testbenches that use the shared helper package need
`tb/yoso_tb_pkg.sv` as well:

```
verilator --binary --timing -Irtl -Itb rtl/yoso_pkg.sv tb/yoso_tb_pkg.sv \
    tb/tb_yoso_top.sv --top-module tb_yoso_top
./obj_dir/Vtb_yoso_top
```

- `tb_core` and `tb_pe` model a small layer in the testbench and compare every spike and every SRAM word against it.
- `tb_yoso_top` runs the full-size 6 x 7 mesh. A 16-12-4 network is mapped onto three tiles: the hidden layer is split over two tiles joined by forwarding, and the output layer is a softmax tile. All programming goes through the network. The test runs 6 timesteps, reprograms and runs 6 more. It checks every output packet against a reference model. It fails if any of RAW stall, saturation, integrate-and-fire spike, softmax spike, forwarding, EoT merging or return to programming mode never happened.
- `tb_mnist_workload` maps the 784-300-300-10 MNIST network onto 10 tiles at full size. The layers use 6, 3 and 1 PEs. The test uses random 8-bit weights and random input spike times; no trained weights or images are involved. It programs about 390 000 weights through the network, with six rows working in parallel, which takes about 140 000 cycles. It then runs 6 timesteps and checks every output against a reference model, as well as the total number of integrate-and-fire and softmax spikes. The run takes about 200 000 cycles and under a minute in Verilator.
