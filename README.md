# SpiDR core in SystemVerilog

This is the RTL of a digital compute-in-memory (CIM) core for spiking neural
networks (SNNs), the kind used on event-camera data. In an SNN layer every
input spike adds one row of synaptic weights to the membrane potentials
(Vmems) of the output neurons. Each output neuron then compares its
accumulated Vmem with a threshold and may fire.

The core does the accumulation inside SRAM. Weights and partial Vmems share
one array, and the column circuits under the array add a weight row to a
Vmem row in a three-stage pipeline. Nothing moves between a weight buffer
and an ALU. The rest of the core keeps that array busy:
- it turns stored input spikes into a stream of (weight row, Vmem row)
  addresses;
- it chains compute arrays so that a large fan-in can be summed without
  leaving the core;
- it runs the neuron models in a second, smaller CIM array.

The design follows the published SpiDR architecture: 9 compute units, 3
neuron units, and 4/7, 6/11 and 8/15-bit weight/Vmem precision. The
section "What is this design's own" lists every place where the RTL fills a
gap that the architecture description leaves open.

## Organisation

```
            host bus (16-bit address, 64-bit data)
                 |
          global_controller ---- cfg, start, chain heads, done
                 |
   +-------------+-------------------------------------------+
   | compute unit (x9)                                       |
   |  IFmem 640x56 -> input loader -> IFspad 128x16 -> S2A -> compute macro 160x48
   +------------------------------------------------------|--+
                  partial Vmems, 32 rows of 48 bits per timestep
                                                          v
   neuron unit (x3): neuron controller -> neuron macro 72x48 -> output spike memory 256x8
```

| file | block |
|------|-------|
| `rtl/spidr_pkg.sv` | sizes, enums, `layer_cfg_t`, column-mapping functions |
| `rtl/ifmem.sv`, `rtl/ifspad.sv`, `rtl/output_spike_mem.sv` | plain SRAMs (synchronous read, 1 cycle) |
| `rtl/input_loader.sv` | hardware im2col from IFmem into IFspad |
| `rtl/spike_detector.sv` | trailing-zero detector, zero-row skipping |
| `rtl/address_queue.sv` | even and odd FIFOs of (Y,X) tuples, 16 deep |
| `rtl/s2a_controller.sv` | even/odd state machine, hazard stall |
| `rtl/s2a.sv` | spike-to-address converter (the three blocks above) |
| `rtl/compute_macro.sv` | CIM compute macro, Read/Compute/Store |
| `rtl/compute_unit.sv` | one compute unit and its timestep sequencer |
| `rtl/neuron_macro.sv` | CIM neuron macro: accumulate, compare, reset, leak |
| `rtl/neuron_controller.sv` | 66-cycle neuron operation per timestep |
| `rtl/neuron_unit.sv` | neuron controller, neuron macro and output spike memory |
| `rtl/global_controller.sv` | configuration, host decode, layer start/done |
| `rtl/spidr_top.sv` | the core: units, chaining for the two modes |

## Operating modes and chains

A compute macro has 128 weight rows, so one compute unit covers 128 inputs
of a neuron's receptive field. For a convolution that is R x S x C, for
example 14 channels of a 3x3 kernel. Larger fan-ins are split over
several units. Each unit adds its share on top of the partial Vmems it
receives from the previous unit, and the last unit of a chain hands the sums
to a neuron unit:

- **Mode 1**: three chains CU1->CU2->CU3->NU1, CU4->CU5->CU6->NU2 and
  CU7->CU8->CU9->NU3. Fan-in is up to 384, and three times as many output
  channels are computed in parallel.
- **Mode 2**: one chain CU1->...->CU9->NU3. Fan-in is up to 1152; NU1 and
  NU2 are idle.

In the RTL, units are numbered from 0: `g_cu[0]` is CU1. The mode is a
field of the layer configuration. It decides which compute units reset
their partial Vmems at a timestep (the chain heads), where each unit's
output goes, and which neuron units must finish before the layer is done.

## From a stored spike to an accumulation

**IFmem** holds raw input spikes (one bit per pixel), one input row per
56-bit word. A conv channel `c` of timestep `t` occupies `in_h` consecutive
words starting at `t*ts_rows + c*in_h`.

**The input loader** builds the IFspad image of one *tile*: 16 output
positions (`out_col0 .. out_col0+n_out-1` of output row `out_row`) and the
whole receptive field.
- IFspad row `Y = (c*R + r)*S + s` (s fastest) is weight row `Y`.
- Column `X` is output position `X`.
- Bit (Y,X) is the input spike at row `out_row*stride + r - pad` and column
  `(out_col0+X)*stride + s - pad` of channel c, or 0 in the padding.
- For a fully connected layer, row Y is input neuron Y and only column 0 is
  used.

The loader writes one row per cycle and keeps a count of rows written.
Because the IFspad is dual-ported, the spike detector starts on row 0 while
the loader is still filling later rows.

**The spike detector** reads a row and peels its spikes off one per cycle:
`onehot = row & (~row + 1)` isolates the lowest set bit, a 16-to-4 encoder
gives X, and the bit is cleared. An all-zero row costs two cycles and emits
nothing, which is the zero skipping. Each spike becomes a tuple (Y, X).

**Each spike needs two accumulations**, because a weight row holds two
interleaved sets of weights (see the next section):
- even: the even weights of row Y go into Vmem row 2X;
- odd: the odd weights go into row 2X+1.

Switching the macro between even and odd operations costs energy, so the
S2A batches them with a ping-pong pair of 16-deep FIFOs:
- a new tuple enters the even FIFO;
- when it has been processed as an even operation it is moved to the odd
  FIFO.

The controller has two states:
- *Process Even* goes to *Process Odd* when the odd FIFO is full or the
  even FIFO is empty;
- *Process Odd* returns when the odd FIFO is empty.

The cycle of a switch issues nothing. In the steady state, runs of up to 16
operations of one kind alternate.

**Hazard stall.** The macro pipeline writes a Vmem row two cycles after it
reads it. The controller therefore holds back an accumulation whose Vmem
row was issued one or two cycles earlier. This happens when consecutive
spikes of different weight rows hit the same output position.

## The compute macro: accumulating inside the array

The array has 160 rows of 48 columns: rows 0-127 hold weights and rows
128-159 hold 32 partial-Vmem rows. At weight precision W, a weight row holds
48/W weights. Weight slot j occupies columns `jW .. jW+W-1`:

```
4 bit:  slot  0    1    2    3    4   ...  11
        cols 0-3  4-7  8-11 12-15 16-19 ... 44-47
        odd  even odd  even  odd  ...  even
```

Slots 0, 2, 4, ... are the *odd* weights and slots 1, 3, 5, ... the *even*
ones. A Vmem is 2W-1 bits wide (7, 11 or 15), about twice a weight, so one
Vmem row can only hold half a weight row's neurons. Vmem words are
therefore laid out per parity:
- in an odd Vmem row, word k occupies the 2W-1 columns starting at column
  2kW, under odd weight slot 2k;
- in an even row, word k starts at column (2k+1)W, under even slot 2k+1.
  The last even word wraps from column 47 to column 0.

A row holds 6, 4 or 3 words at 4, 6 or 8 bit. The 16 Vmem-row pairs x
48/(2W) words x 2 parities give 48/W x 16 output neurons per macro: 192 at
4 bit.

An accumulation of weight row Y into Vmem row V takes three stages, one
issued per cycle:

1. **Read**: both word lines are activated. The bit lines give NOR and AND
   of the weight bit and the Vmem bit in every column, and they are latched.
   The weight operand of a column is the weight bit under it. In the W-1
   columns above a weight it is the weight's sign bit, so signed weights
   add correctly into wider Vmems.
2. **Compute**: per column, `x = ~(NOR | AND)` is the XOR, `sum = x ^ c`
   and `c_out = AND | (x & c)`. The carry ripples from a column to the next
   one and is cut at the first column of each word.
3. **Store**: the sum bits are written back into row V, in the word columns
   only. The other columns keep their value.

The active set of columns, the carry cut points and the sign-extension
wiring depend on the precision and on the parity. The RTL builds all six
variants with constant column indices (generate loops over precision, parity,
word and bit) and selects one. This is the logical equivalent of the RBL
switch settings. Arithmetic is two's complement and wraps at the Vmem width.

Host ports read and write whole rows; the host loads weights this way.
Reading Vmem rows is how the unit sends its partial sums downstream.

## Timestep pipeline of a compute unit

For each timestep t of a layer, a compute unit runs these stages:

1. **Reset** (a chain head): write zero into the 32 Vmem rows, 32 cycles.
   **Receive** (any other unit): take the 32 partial-Vmem rows of timestep
   t from the upstream unit and write them into its own Vmem rows.
2. **Compute**: the input loader and spike detector were already started at
   the beginning of stage 1. Accumulations are released once the Vmem rows
   hold the right starting values. The stage ends when every IFspad row has
   been scanned, both FIFOs are empty and the macro pipeline is empty.
3. **Transfer**: send the 32 rows downstream, two cycles per row (read,
   send).

Units talk through a valid/ready stream of 48-bit rows:
- a receiver is ready only in its Receive stage;
- a sender is valid only in its Transfer stage.

Each unit therefore starts a timestep as soon as its upstream data is
there and waits only when a neighbour is not. This is how spike-dependent
compute times stay decoupled along the chain, which the architecture calls
asynchronous handshaking. Here it is clocked, in one clock domain. While
CU2 computes timestep t, CU1 can already compute timestep t+1.

## Neuron units

The neuron macro is a 72x48 array with the same column-peripheral style.

| rows | content |
|------|---------|
| 0-31 | partial Vmems of the current timestep (from the chain) |
| 32-63 | full Vmems, kept across the timesteps of a layer |
| 64 / 65 | thresholds, odd-row / even-row word layout |
| 66 / 67 | leaks, odd-row / even-row word layout |
| 68-71 | unused |

The neuron controller of a unit does the following:
- **INIT**: clears the full Vmems once per layer.
- **RECV**: for each timestep, receives the 32 partial rows.
- **NEUR**: runs the neuron operation in exactly 2*32 + 2 = 66 cycles:
  - 32 *accumulate* operations: full += partial, for every word of a row;
  - 32 *compare* operations;
  - 2 cycles to drain the Read/Compute/Store pipeline.

A compare operation decides per word:
- it fires if `V >= threshold` (signed);
- on a spike it writes 0 (hard reset) or `V - threshold` (soft reset);
- without a spike it writes `V - leak` for a LIF neuron and leaves V alone
  for an IF neuron.

The spikes of a row (bit k = word k) go to the output spike memory at
address `{t mod 8, row}`. The memory therefore keeps the last eight
timesteps of a layer.

## Using the core

Host bus: `host_wr`/`host_rd`, a 16-bit `host_addr` and 64-bit data. Read
data comes one cycle after `host_rd`, with `host_rvalid`.

| addr[15:12] | addr[11:10] | addr[9:0] |
|-------------|-------------|-----------|
| 0-8: compute unit | 0: IFmem word, 1: compute-macro row | row |
| 9-11: neuron unit | 0: neuron-macro row, 1: output spike memory | row / address |
| 15: registers | - | 0: cfg[63:0], 1: cfg[127:64], 2: start (write), 3: {busy, done} (read) |

Memories can be written only while their unit is idle. The configuration
(`layer_cfg_t` in the package, 73 bits) holds these fields:
- layer type (conv/FC), precision, mode, neuron model (IF/LIF), reset
  (hard/soft);
- number of timesteps T;
- per compute unit: channels, kernel R x S, stride, padding, input height
  and width in IFmem, and the tile (output row, first output column,
  number of outputs);
- the FC input count per unit;
- IFmem words per timestep.

A layer run computes one tile for T timesteps. The host:
1. writes weights into rows 0-127 of each compute macro;
2. writes the input spikes into each IFmem;
3. writes thresholds and leaks into rows 64-67 of the active neuron
   macros;
4. writes cfg, writes the start register and polls the status register;
5. reads output spikes and, if it wants them, the final Vmems.

A whole layer is a sequence of such tiles. In mode 1 each chain computes
its own output channels from the same inputs, so the host loads the same
input tile into the corresponding units of the three chains.

**Capacity per run**
- Conv fan-in: 128 rows per unit (14 channels of a 3x3 kernel). That is
  384 rows in mode 1 and 1152 in mode 2.
- Output channels: 3 x 48/W in mode 1 and 48/W in mode 2, times 16
  positions. At 4 bit that is 576 output neurons in mode 1.
- FC layers use only Vmem rows 0/1: 2 x 48/(2W) outputs per chain, and up
  to 1152 inputs in mode 2.
- T up to 31. The output spike memory keeps 8 timesteps.

## What is this design's own

The architecture description gives the blocks, array sizes, precisions,
the S2A state machine, the even/odd FIFO scheme, the three macro pipeline
stages, the 66-cycle neuron operation and the two chaining modes. The
following are choices made here:

- **Column layout.** The exact columns of a Vmem word, the sign extension
  of weights into the upper Vmem columns, and wrap-around overflow.
- **Neuron macro layout.** The placement of threshold and leak rows; two
  of each, one per word layout.
- **Leak timing.** The leak is applied to non-firing LIF neurons in the
  compare pass; it could also be a separate pass.
- **Neuron operation order.** All 32 accumulations come before all 32
  comparisons.
- **Stalls and cycle costs.** The read-after-write hazard stall, the
  idle cycle at each even/odd switch, the two-cycle zero row, and the
  cycle counts of Reset/Receive/Transfer.
- **Handshake.** It is a synchronous valid/ready handshake, not
  self-timed circuits.
- **Input mapping.** The IFmem layout, the IFspad row order, and the
  16-position tile as the unit of work.
- **Output spike memory size.** It is sized at 256 x 8 per neuron unit so
  that the total on-chip SRAM matches the published 52.08 kB (IFmem 39.38
  kB, CIM arrays 9.7 kB, the remaining 3.0 kB being 9 IFspads and 3 of
  these). Only 8 timesteps of output spikes are kept. A 20-timestep layer
  must be read out while it runs or split.
- **Control.** The global controller, its host bus and register map, and
  the configuration format.
- **Circuit level.** The SRAMs are arrays of flip-flops in RTL. The 10T
  bit cells, bit-line sensing, I/O pads and clocking of the chip are not
  modelled.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
model written independently in the testbench. Each prints
`TB_RESULT checks=N failures=M`. Random stimulus uses `$urandom`. Each
testbench also has a watchdog.

`tb/tb_spidr_top.sv` runs the complete core at its default sizes through
the host bus. It covers five layers:
- conv with padding;
- conv with 126 weight rows per unit and dense input;
- conv with a 2x2 kernel and stride 2 in mode 2;
- FC in mode 2 and in mode 1;
- every precision, IF and LIF, hard and soft reset.

A reference model predicts every output spike and every final Vmem word,
and the testbench compares all of them. It also counts each mechanism while
it happens and fails if one never occurs:
- handshake waits, hazard stalls, even/odd switches and switches forced by
  a full odd FIFO;
- zero-row skips, padding, 66-cycle neuron operations, fires, soft resets
  and leaks.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/spidr_pkg.sv \
    rtl/spidr_top.sv tb/tb_spidr_top.sv --top-module tb_spidr_top -Mdir obj -o sim
./obj/sim
```

For a single block, replace the top file and the testbench, for example
`rtl/compute_macro.sv tb/tb_compute_macro.sv --top-module tb_compute_macro`.
The full-core build takes about a minute and the simulation under a second.

Lint notes: with `-Wall`, Verilator reports two kinds of unused-signal
warning, and neither is a circuit problem.
- Package constants that a given module does not use.
- Bits of the shared configuration struct that a given unit does not use.

It also warns that `rst_n` is used both as an asynchronous reset and in the
`disable iff` of the assertions. That second use is only for checking.
