# A block-diagonal INT4 accelerator for fully connected layers

A fully connected layer is a large matrix-vector product, and on an edge device
its cost is dominated by fetching the weight matrix. If the network is trained
with *structured pruning* — the weight matrix is masked during training so that,
after permuting its rows and columns, only a set of dense square blocks on the
diagonal remain — the layer splits into independent small matrix-vector
products. This design gives each block its own processing element (PE) with the
block's weights stored inside it. During inference no weight ever moves; only
activations move, and since the permutations are fixed after training, the way
they move is a static schedule computed ahead of time.

The default instance has 10 PEs, each holding a 400 x 400 block of signed 4-bit
weights. Together they compute a 4000 x 4000 layer (16 M dense-equivalent
parameters, 1.6 M stored) with 4-bit activations. Each PE produces one output
activation per clock: 400 multiplications and a 9-stage adder tree in a single
cycle, so a layer's 400 output rows take 400 cycles in every PE at once.

The accelerator sits behind the custom-instruction (RoCC) port of a RISC-V
Rocket core. The core and its caches are not part of this RTL. The top level
exposes the RoCC command and response handshakes, plus the RoCC memory port
through which the accelerator reads layer data from the core's L1 data cache.

## How one layer runs

```
        host writes (memory interface)
              |                 |                 |
        +-----v-----+     +-----v-----+     +-----v-----+
        |   PE 0    |     |   PE 1    | ... |   PE 9    |
        | act SRAM  |---->|           |     |           |---- broadcast, 1 value/cycle each
        +-----------+     +-----------+     +-----------+        |
              ^                 ^                 ^               v
              |   one 10:1 mux per PE, select from its select SRAM
              +-----------------+-----------------+------ routing matrix
```

A layer is one `RUN` command and proceeds in fixed phases, all PEs in lock-step:

| cycle(s)               | phase   | what happens                                                           |
|------------------------|---------|------------------------------------------------------------------------|
| 0                      | accept  | `RUN` leaves the command queue; every input register is cleared        |
| 1 .. n_in              | route   | cycle t: every PE reads `act_sram[t]` and `select_sram[t]`             |
| (one cycle later)      |         | each PE's multiplexer picks one broadcast; it lands in input slot t    |
| n_in + 1               | land    | the last routed value is written                                       |
| n_in + 2               | latch   | input register copied into the input latches                           |
| n_in + 3 .. +n_out     | compute | cycle r: weight row r read; next cycle `act_sram[r] <= quant(row·a + b)` |
| last + 1               | respond | the response carries the cycle count, n_in + n_out + 3                 |

With the defaults a layer takes 803 cycles: 400 to route, 400 to compute, 3 of
overhead. The outputs overwrite the activation SRAMs, which are exactly the
broadcast sources of the next layer, so layers are chained by loading the next
layer's weights and schedule and issuing `RUN` again. Routing and compute are
not overlapped, because the next layer's inputs are the outputs being computed.
The input register and the input latches are separate, though, so a later
version could route the next input vector while the current one is computing.

## The routing schedule

This is the part that needs care when producing data for the design.

In routing cycle t, source PE s broadcasts `act_sram_s[t]` and destination PE d
stores `broadcast[sel_d[t]]` into its input slot t. Nothing else steers the data,
so the compiler must arrange three things consistently:

1. **Each cycle's selects are a permutation.** Every broadcast value must go to
   exactly one destination, so for each t, `sel_0[t] .. sel_9[t]` must be
   distinct. Structured pruning guarantees that each input activation belongs to
   exactly one block. Each source holds 400 values and each destination needs
   400, so the source-to-destination traffic is a regular bipartite multigraph.
   Such a graph always splits into 400 perfect matchings, one per cycle, so a
   conflict-free schedule always exists.
2. **Source order.** The value that source s must send in cycle t has to be
   stored at `act_sram_s[t]`. For layers after the first, that address is the
   output row that produced the value, so the compiler permutes the previous
   layer's weight rows to match. For the first layer, the core writes the input
   vector in that order.
3. **Destination column order.** Input slot t of PE d holds whatever arrived in
   cycle t, so column t of PE d's weight block must be the weight for that
   input.

A select value of 10 or more delivers zero. A layer with fewer than 400 inputs
(`n_in < 400`) leaves the remaining slots at zero, because routing clears the
input register first.

The testbenches build schedules this way. They pick a random permutation for
every cycle and compute the expected outputs by following the selects.

## Inside a processing element

* **Select SRAM** (400 x 4 bit): the multiplexer select for each routing cycle.
* **Input register and input latches** (400 x 4 bit each): serial fill, parallel copy.
* **Weight SRAM** (400 rows x 1600 bit, plus a 16-bit bias per row): one whole
  row is read per cycle. Reads are synchronous, with one cycle of latency.
* **Multipliers**: 400 lanes of signed INT4 weight x unsigned INT4 activation,
  giving an 8-bit signed product (range -120 .. 105).
* **Adder tree**: pairwise reduction, one bit wider per stage. For 400 inputs the
  stages hold 200, 100, 50, 25, 13, 7, 4, 2 and 1 values, so there are 9 stages
  and the result is an exact 17-bit sum.
* **ReLU / quantizer**: `out = min(15, max(0, sum + bias) >> shift)`. The shift
  (0..31) is set per layer, and the right shift truncates.
* **Activation SRAM** (400 x 4 bit): written by the quantizer during compute or
  by the host otherwise. It is read for broadcast during routing and by the
  host for read-back.

The multiply, tree and quantizer are one combinational path from the registered
weight row to the activation SRAM write. This is the single-cycle output the
design relies on. At 1 GHz in a 16 nm process it is a tight path; here it is
left unpipelined on purpose.

## Command interface

Commands arrive through a 4-entry command queue. Responses leave through a
4-entry response queue. Both use valid/ready handshakes. `funct` selects the
operation. `rs1` carries `{pe[31:24], chunk[23:16], addr[15:0]}`. A response is
sent only when `xd` is set.

| funct | name        | operands                                   | effect / response                                         |
|-------|-------------|--------------------------------------------|-----------------------------------------------------------|
| 0     | `WR_WEIGHT` | rs1 = pe, chunk, row; rs2 = data           | chunk c < 25: weights 16c .. 16c+15 of the row, weight 0 in bits 3:0; chunk 25: bias in rs2[15:0] |
| 1     | `WR_SELECT` | rs1 = pe, addr; rs2[3:0] = select          | schedule entry                                            |
| 2     | `WR_ACT`    | rs1 = pe, addr; rs2[3:0] = activation      | activation SRAM entry (layer input)                       |
| 3     | `CONFIG`    | rs1[15:0] = n_in; rs2 = {shift[20:16], n_out[15:0]} | lengths are clamped to 1..400; reset values are 400, 400, 0 |
| 4     | `RUN`       | none                                       | runs one layer; response = cycle count                    |
| 5     | `RD_ACT`    | rs1 = pe, addr                             | response = activation                                     |
| 6     | `LOAD`      | rs1 = byte address; rs2 = {target[41:40], pe[31:24], count[15:0]} | copies `count` 64-bit words from memory into one PE memory; response = count |

`LOAD` targets use the memory encoding 0 = weights, 1 = select, 2 = activations.
For weights, memory holds each row as 25 weight words followed by one bias word,
so a whole 400-row block is 10 400 words at consecutive addresses. For the other
two targets, word k fills entry k. The loader issues a request whenever the
memory port is ready, without waiting for earlier answers. Responses must return
in request order, one per request.

Writes go at one per cycle. Writes to a PE index of 10 or more are dropped. While
a layer runs, or while a response waits for the response queue, no further
command is taken, and the command queue fills.

## Sizes

| item                        | default | set by            |
|-----------------------------|---------|-------------------|
| PEs                         | 10      | `apu_top.N_P`     |
| block size                  | 400     | `apu_top.N`       |
| weight / activation width   | 4 / 4   | `apu_pkg`         |
| storage per PE              | 640 000 weight bits + 6 400 bias bits + 1 600 activation bits + 1 600 select bits |
| storage, all PEs            | 6.5 Mbit |                  |

The chip this design follows reports 8 Mbit (1 MB) of on-chip SRAM in total.
That figure presumably also covers the core's caches, which are not modelled.

Fitting a layer in one pass requires `in <= 10·400` and `out <= 10·400` after
splitting into 10 blocks. A 4096 x 4096 layer, such as the second fully
connected layer of AlexNet or VGG, therefore needs two passes. The design can do
this, but the core must sequence the passes, reloading weights for each one.

### Example: LeNet-300-100

The MNIST classifier LeNet-300-100 (784-300-100-10) maps onto the default
instance one layer per `RUN`. Split into 10 blocks, its layers need 79 x 30
(the 784 inputs padded to 790 with zeros), 30 x 10 and 10 x 1 per PE. That
comes to 112 + 43 + 14 = 169 cycles of routing and compute for one image. Each
layer's weights and schedule are streamed in with `LOAD` before its `RUN`; the
ten class scores end up in entry 0 of the ten PEs. They pass through the ReLU
and quantizer like every other output, so a soft-max on the core sees
non-negative 4-bit scores.

## Where this design departs from, or fills in, the published description

Taken from the published design: 10 PEs; 400 x 400 INT4 blocks; 400 multipliers
and a 9-stage widening adder tree per PE, one output per cycle; ReLU and a
quantizer after the tree; weight, activation and select SRAMs in every PE; input
register and input latches; an output-multiplexed crossbar in which every PE
broadcasts one activation per cycle and picks one by its select SRAM; a
controller behind RoCC command and response queues.

This design's own choices:

* Signed weights and unsigned activations. The quantizer is a truncating shift
  with saturation. The published description allows any quantizer, including
  non-uniform ones.
* A 16-bit bias per output row, stored beside the weights. The layer equation
  has a bias, but where it is kept is not described.
* The adder tree keeps the exact 17-bit width. The published text says the last
  stage is 16 bits wide, which drops one bit of range for 400 products.
* The command set, field layout, queue depths, phase sequence, clamping and
  reset values.
* Sequential source reads during routing (see the schedule section above).
* The memory port is simplified to valid/ready requests and in-order responses.
  It carries no tags, byte masks or stores, unlike the full Rocket cache
  interface. The word formats used by `LOAD` are also this design's own.
* The crossbar multiplexer that the PE diagram draws inside each PE sits in
  `routing_matrix` here. Each PE exports its select value, and the
  multiplexers together form the broadcast link between the PEs.
* SRAM macros are modelled as arrays with one-cycle synchronous reads.

Not built: the RISC-V core and its caches, clock tree, pads and I/O. Also not
built: the software side, meaning the schedule compiler, max-pooling and
softmax on the core, and the folding of large layers.

## Files

```
rtl/apu_pkg.sv         sizes, command opcodes, RoCC command/response structs
rtl/apu_top.sv         top: queues, controller, routing matrix, PEs
rtl/accel_ctrl.sv      command decoder and layer sequencer
rtl/sync_fifo.sv       command / response queue
rtl/dma_loader.sv      LOAD engine on the memory request/response port
rtl/routing_matrix.sv  output-multiplexed crossbar
rtl/pe.sv              processing element
rtl/select_sram.sv  rtl/input_buffer.sv  rtl/weight_sram.sv
rtl/mult_array.sv   rtl/adder_tree.sv    rtl/relu_quant.sv  rtl/act_sram.sv
tb/tb_<module>.sv      one self-checking testbench per module
tb/tb_apu_top.sv       end to end, 4 PEs of 48 x 48
tb/tb_apu_full.sv      end to end at the default size (10 x 400 x 400)
tb/apu_tb_body.svh     scenario shared by the two end-to-end tests
tb/tb_apu_lenet.sv     LeNet-300-100 inference at the default size, all through LOAD
tb/l1_mem_model.sv     behavioural data-cache model answering the memory port
```

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends it with a failure if it hangs. To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/apu_pkg.sv tb/tb_apu_full.sv --top-module tb_apu_full
./obj_dir/Vtb_apu_full
```

Only the package is named; Verilator finds every other module in `rtl/` and `tb/`
by its file name. For a unit test, replace `tb_apu_full` with, for example,
`tb_pe`. The full-size test builds in a few seconds and runs
in a few seconds. It loads two chained layers, one through about 104 000 write
commands and the other through ten `LOAD` commands. It checks all 4000 outputs
of each, and checks that every mechanism occurs: routing,
latching, compute, ReLU clipping, saturation, host writes, command-queue stalls,
response back-pressure, a chained layer, a shortened layer and memory loads.

Each unit testbench compares its module against an independent integer model:
random vectors plus corner cases. All of them pass, and each one fails against a
deliberately broken copy of its module. This has been checked with Verilator
simulation only. Timing closure and area are not checked.
