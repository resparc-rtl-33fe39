# RESPARC in SystemVerilog: a spiking-network core built from memristive crossbars

A spiking neural network (SNN) spends most of its work on one operation. At every
time step, each neuron adds up the weights of those of its inputs that spiked.
A memristive crossbar does this in place. Weights are stored as conductances at
the cross-points. The spikes drive the rows, and each column current is the
weighted sum for one neuron. The catch is size. Crossbars stay reliable only up
to about 64 x 64, but real neurons have fan-ins of several hundred, and whole
networks hold millions of synapses.

RESPARC solves this with three levels of reconfigurable hardware:

* **mPE (macro processing engine).** Four 64 x 64 crossbars share a neuron
  datapath. A neuron whose inputs span several crossbars adds their column
  currents one after another (*time multiplexing*). If the fan-in is wider still,
  it can also borrow the current of a crossbar in a neighbouring mPE.
* **NeuroCell.** A 4 x 4 grid of mPEs with a 3 x 3 grid of programmable switches
  between them. The switches carry digital spike packets, each one bit per
  neuron of a 64-neuron group. Two mPEs whose switches share a row or a column
  exchange a packet in one switch-to-switch hop.
* **Core.** Several NeuroCells share one global IO bus to an input memory
  (SRAM). Packets between NeuroCells go through that memory. A global control
  unit broadcasts memory words to all NeuroCells of a layer at once, by tag. It
  then waits until each NeuroCell raises its completion (event) flag.

The traffic is event driven. A spike packet that is all zero carries no
information, so it is never sent: not by a switch, and not from the memory to
the bus.

This RTL builds all three levels. The crossbar is a behavioural model. The rest
is synthesizable logic.

## Hierarchy

```
resparc_top
 |-- gcu            global control unit: command table, event flags, zero-check on reads
 |-- input_sram     input memory, 1024 x 64 bit, 1 write + 1 read port
 |-- io_bus         tag broadcast to NeuroCells, return path to memory
 `-- neurocell x NCX*NCY
      |-- mpe x 16  (4 x 4 grid)
      |    |-- lcu          local control unit: registers + sequencer
      |    |-- ccu          current control unit: lend / borrow currents
      |    `-- per crossbar ("lane") x 4:
      |         ibuff -> mca -> current mux -> if_neurons -> obuff (+ tbuff)
      `-- prog_switch x 9 (3 x 3 grid)
```

`resparc_pkg` holds the shared constants and types: packet width, crossbar size,
address structs and command encoding.

## The crossbar and the neuron datapath of one mPE

**Crossbar (`mca`).** Each cross-point holds a 4-bit level (0..15). This stands
for the 16 resistance levels of the device. In the cycle after `read_en`, the
model registers for every column the sum of the levels in the rows whose input
spike is set. This integer is the "current". It is exact: 10 bits for 64 rows
of 4 bits. A separate port programs single cross-points (offline weight
loading).

**Lane datapath.** Each of the four crossbars of an mPE forms a lane:

1. **Input mux.** Chooses whether the lane's `iBUFF` is fed from the IO bus or
   from the switch network (a control register).
2. **iBUFF.** ORs together the packets that arrive for this crossbar during a
   layer. Different senders drive different rows, so OR is a merge.
3. **Current mux.** On each step of the time-multiplexed evaluation, selects one
   of C1..C4 (any of the four crossbars of this mPE) or C_ext (the current
   borrowed from a neighbour).
4. **Neurons.** 64 integrate-and-fire neurons (`if_neurons`):
   * they add the selected current to a saturating 16-bit membrane potential;
   * on FIRE they spike where the potential is at least the threshold;
   * a neuron that spikes is reset to zero.
5. **oBUFF.** Captures the spike packet and sends it once to each target listed
   in the lane's `tBUFF`.

**Targets.** A target is either a switch address or a memory word address. A
memory target (`to_io`) leaves through the mPE's `io_out` towards the IO bus.

**Sequencer (`lcu`).** An mPE evaluates one layer in a fixed sequence:

| state | cycles | work |
|---|---|---|
| READ | 1 | all four crossbars evaluate their iBUFF |
| STEP | degree (1..5) | each lane integrates the source named for this step |
| FIRE | 1 | enabled lanes compare with the threshold and spike |
| LOAD | 1 | spike packets go into the oBUFFs |
| SEND | until empty | oBUFF packets are sent, one target per beat |
| SERVE | until taken | an mPE that lends current waits until its neighbour used it |
| DONE | 1 | iBUFFs and crossbar outputs are cleared |

*Degree* is the number of time-multiplexed steps. A neuron with a fan-in of 256
uses degree 4: its lane integrates C1, C2, C3 and C4 in turn. A step that uses
C_ext stalls until the neighbour's current is valid.

## Current lending between mPEs (CCU)

Neighbouring mPEs are joined by gated current wires (north, east, south, west).
Each wire carries 64 column currents plus a request/wait pair.

* **Lender.** Configured with `tx_en` and `tx_sel`. It drives the chosen
  crossbar's currents on `i_out`. It holds `wait` high until those currents are
  valid, that is, until its own READ cycle has passed.
* **Borrower.** Configured with `rx_en` and `rx_dir`. It raises `request` when it
  reaches a C_ext step.
* **Transfer.** Happens in the cycle where `request` is high and `wait` is low.
  The borrower integrates, and the lender marks itself *served*. A lender does
  not clear its crossbar outputs before it has been served.

Because both mPEs belong to the same layer phase, they run in parallel and meet
at the handshake.

## Switch network (`prog_switch`)

**Lines.** Switch (r, c) sits between mPEs (r, c), (r, c+1), (r+1, c) and
(r+1, c+1). It has eight bidirectional lines:

* lines 0..3 go to the four corner mPEs;
* lines 4 and 5 go to the other two switches of its row;
* lines 6 and 7 go to the other two switches of its column.

**Buffering.** Every line has a one-entry input buffer (data and address) and a
one-entry output buffer.

**Addressing.** A packet from an mPE carries `{SW_ID, mPE_ID, MCA_ID}`
(4 + 2 + 2 bits):

| destination | output line | address passed on |
|---|---|---|
| this switch | corner line `mPE_ID` | `{MCA_ID}` |
| a switch in the same row or column | that switch's line | `{mPE_ID, MCA_ID}` |
| any other switch | dropped, `route_err` pulses | none |

A packet from another switch always exits at a corner line. Multi-hop routing
is not provided, so mappings must keep communicating mPEs within one hop.

**Arbitration.** Each output line has a round-robin arbiter over the inputs that
want it.

**Serving.** Register 0 of a switch is a 4-bit *serve* mask. It says from which
corner mPEs the switch accepts packets. Each mPE drives its SW_Out to all
adjacent switches. Exactly one of them should serve it. Any switch may deliver
into an mPE; the mPE's SW_In takes the first valid of its adjacent switches.

**Zero-check.** An all-zero packet is accepted and discarded at the switch input
(`zero_drop`).

## NeuroCell layer phases

A NeuroCell can hold several consecutive layers (up to 4 phases).

1. `start` begins phase 0. Every enabled mPE whose layer register matches runs
   its sequence once.
2. The next phase begins when the NeuroCell is *quiet*: all mPEs idle, all
   switches empty, and no output pending towards the IO bus.
3. After the last phase, `done` pulses. This sets the NeuroCell's event flag in
   the global control unit.

Output towards the IO bus leaves the NeuroCell through a fixed-priority merge of
the 16 mPEs.

## Core: memory, IO bus and global control

**IO bus (`io_bus`).**
* Broadcast: a word carries a tag rectangle `x_lo..x_hi, y_lo..y_hi` plus the
  target mPE and crossbar. In one cycle it is delivered to every NeuroCell whose
  tag (x, y) lies inside. NeuroCell n has tag (n mod NCX, n div NCX).
* Return path: NeuroCell output packets are granted round-robin. They are granted
  only in cycles without a broadcast.

**Global control (`gcu`).** Runs a command table of up to 32 entries once per
time step:

| op | meaning |
|---|---|
| BCAST | read memory word `sram_addr + t*TS_STRIDE`; if non-zero, broadcast it to (mpe, mca) of the tag rectangle; if zero, skip it (zero-check, `zero_skip`) |
| RUN | pulse `start` to the NeuroCells of the rectangle, wait until all their event flags are set, clear them |
| END | end of time step t; after `N_TS` steps the run ends, otherwise restart at entry 0 |

* A run starts by clearing every membrane potential and buffer (`nclear`).
* Packets that come back over the bus are written to their address plus
  `t*TS_STRIDE`. Input spike trains and layer outputs of every time step can
  therefore sit side by side in memory.
* A later BCAST in the same step, or in the next step, reads them as the next
  layer's input.

**Timing.** A broadcast costs 3 cycles (fetch, memory read, bus beat). A skipped
zero word costs 2.

## Configuration map

All configuration is done by register writes `cfg = {we, nc, unit, addr, data}`
while the core is idle. Crossbar weights are loaded through
`wprog = {we, nc, mpe, mca, row, col, g}`.

| nc | unit | addr | register |
|---|---|---|---|
| 15 | - | 0..31 | GCU command (gcmd_t: op, sram_addr, x_lo, x_hi, y_lo, y_hi, mpe, mca) |
| 15 | - | 0x40 / 0x41 | N_TS / TS_STRIDE |
| n | 0..15 (mPE, row-major) | 0x00 | [0] enable, [2:1] layer, [5:3] degree |
| | | 0x01 | [0] tx_en, [2:1] tx_sel, [3] rx_en, [5:4] rx_dir (0 N, 1 E, 2 S, 3 W) |
| | | 0x02 | neuron threshold |
| | | 0x08+m | lane m: [0] input from IO bus, [1] neurons fire |
| | | 0x10+8m+k | lane m, step k: current source (1..4 = C1..C4, 5 = C_ext) |
| | | 0x40+4m+t | lane m, tBUFF entry t: {to_io, address} |
| | | 0x60+m | lane m: number of targets (0..2) |
| n | 16..24 (switch, row-major) | 0 | serve mask of the corner mPEs |
| n | 31 | 0 | number of layer phases (1..4) |

While the core is idle, the host reads and writes the input memory through
`mem_*`.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs. With plain
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/resparc_pkg.sv tb/tb_neurocell.sv \
          --top-module tb_neurocell && ./obj_dir/Vtb_neurocell
```

`-Irtl` lets Verilator find every other module by its file name; only the package
has to be named.

**End-to-end test (`tb_resparc_top`).** Runs the core at its default size with
2 x 2 NeuroCells. Verilator needs a few minutes to build it; the simulation itself
runs in about a second. It runs four time steps of a small network spread over
all four NeuroCells:
* NeuroCells 0 and 1 take the same input word in one broadcast. Each computes a
  64-neuron layer and writes its spikes back to memory.
* NeuroCell 2 runs a two-phase mapping. Between its layers a packet hops from
  switch to switch, and a switch drops an all-zero packet. One neuron's fan-in
  spans two mPEs, so current is lent over the gated wire.
* NeuroCell 3 reads the outputs of NeuroCells 0 and 1 from memory. It integrates
  both crossbars by time multiplexing (degree 2).
* One input word is all zero, so the global zero-check skips it.

The testbench compares the memory contents after the run with its own model of
the weights and membranes. It also counts each mechanism (broadcast,
multi-NeuroCell broadcast, zero skip, switch zero drop, switch hop, current
transfer, time multiplexing, second phase, write-back). A mechanism that never
happened counts as a failure.

**Workload slice (`tb_mlp_slice`).** A fully connected hidden layer of the
evaluated MLPs has fan-ins of several hundred. This test runs one mPE as a
64-neuron slice of such a layer with a fan-in of 256. That is the most one
mPE's four crossbars hold without borrowing current. Random rate-coded spike
trains run for 20 time steps. Each step's output packet and every membrane
potential are checked against a model. Each step must finish within 12 cycles.

**Workload slice (`tb_cnn_slice`).** A convolutional layer becomes a sparse
connectivity matrix. Each output neuron uses only the inputs of its receptive
field. This test maps four 3 x 3 kernels over an 8 x 8 input map. That gives 144
output neurons, spread over three crossbars. The same input packet is broadcast
to all three (input sharing), and each crossbar's neurons send their own
packet. Expected spikes come from a direct convolution in the testbench.

The block tests (`tb_mca`, `tb_if_neurons`, `tb_ccu`, `tb_prog_switch`,
`tb_io_bus`, `tb_gcu`, and the rest) compare against reference models written
independently in the testbench, most of them with random stimulus.

## What follows the architecture and what is this design's own

**Follows the architecture:**
* 64 x 64 crossbars with 16 conductance levels;
* four crossbars per mPE, each with iBUFF, neurons, oBUFF and tBUFF;
* a current mux over C1..C4 and C_ext;
* a CCU with request/wait and lent current;
* 4 x 4 mPEs and 3 x 3 switches per NeuroCell;
* switches with line buffers, a decoder and arbitration;
* the `{SW_ID, mPE_ID, MCA_ID}` address and its shortened forms;
* one-hop row/column links between switches;
* gated current wires between neighbouring mPEs;
* zero-checks in the switches and on memory reads;
* a shared IO bus with single-cycle tag broadcast;
* communication between NeuroCells only through the input memory;
* one event flag per NeuroCell;
* integrate-and-fire neurons;
* 64-bit spike packets.

**This design's own choices** (the architecture leaves them open):
* the register maps and the command-table format of the global control unit;
* the mPE sequence and its cycle timing;
* the CCU handshake rule;
* OR-merging in the iBUFF;
* two targets per tBUFF;
* one-entry switch buffers, round-robin arbitration and the serve-mask
  semantics;
* layer phases inside a NeuroCell and the quiet rule that ends a phase;
* the tag-rectangle form of a broadcast;
* memory size (1024 x 64) and ports;
* reset-to-zero neurons with a 16-bit saturating potential and one threshold per
  mPE;
* unsigned weights;
* 2 x 2 NeuroCells by default;
* the host interface.

**Departures and limits:**
* **Crossbar is digital.** It is an integer model. Device non-idealities, the
  analog read at half supply and the ADC-free current path are not modelled.
  The "current" on the gated wires is the digital column sum.
* **Signed weights are not supported.** Weights are non-negative levels, and the
  architecture does not say how negative weights are represented. Inhibition
  would need a second crossbar column per neuron, subtracted in the neuron. That
  is not built.
* **No multi-hop routing inside a NeuroCell.** A packet between switches that
  share neither a row nor a column is dropped and flagged. The architecture
  describes only the one-hop links.
* **Fixed crossbar size.** The crossbar is fixed at 64 x 64. The architecture
  was also evaluated with 32 x 32 and 128 x 128 crossbars. Those variants would
  need the package constants `MCA_N` and `PKT_W` changed together. The 6-bit
  row and column fields of the programming port would also have to change.
  They are not built.
* **NeuroCell count is limited.** The default 2 x 2 NeuroCells hold 256
  crossbars (1,048,576 cross-points, 16,384 neurons). That is less than any of
  the benchmark networks the architecture was evaluated on, which range from
  about 1.5 to 5.5 million synapses. Larger arrays are a parameter change
  (`NCX`, `NCY`), but the 2-bit tag fields and the 4-bit NeuroCell field of the
  configuration port allow at most 15 NeuroCells. Remapping crossbars during a
  run is not supported: weights are loaded once.
* **One path per mPE.** Each mPE has a single SW_Out path, shared by its four
  lanes in fixed priority, and each lane sends to at most two targets.
* **One memory port.** The bus accepts one write-back per cycle. The input
  memory has one read port and one write port, so each NeuroCell sends its
  layer outputs serially, as in the architecture's serial bus dataflow.

## Verilator notes

With `-Wall`, Verilator reports only unused signals and unused parameters. The
signals are configuration bits that are not decoded, plus status outputs
(`vmem`, `event_flag`, `tstep`) that the top leaves for observation. The
parameters are package constants that a given module does not need. There are
no latch, loop or multiple-driver warnings.

The testbenches reset every register before they sample outputs. They pass
with random initial values (`+verilator+rand+reset+2`) as well as with zeros.
