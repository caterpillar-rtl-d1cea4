# A coarse-grain reconfigurable array for training multilayer perceptrons

Training an MLP with backpropagation is a chain of matrix-vector products
(GEMV) when one sample is processed at a time, as in SGD and pipelined
(continuous) propagation. It becomes a chain of matrix-matrix products (GEMM)
when samples are grouped into minibatches. Both kinds of product share one
inner kernel, a multiply-accumulate over a weight block. This design is an
array of small linear-algebra cores built around that kernel:

* Every core is a square grid of processing elements (PEs). PEs in one row share
  a row broadcast bus, and PEs in one column share a column broadcast bus.
* A layer's weights stay where they are for the forward pass, the backward pass
  and the weight update. The backward pass needs the transpose of the weights.
  The design gets it by swapping the roles of the row and column buses, not by
  moving any weight.
* The cores form a one-way systolic ring, one cycle per hop. A layer too large
  for one core is split over several cores. Their partial results are summed,
  gathered or scattered over the ring.

The default configuration is 2 x 4 cores of 16 x 16 PEs: 2048 half-precision
fused multiply-add units, 16 KB of memory per PE, and a 512 KB scratchpad
(SPAD) beside each core. The RTL is SystemVerilog (IEEE 1800-2017). It is
synthesizable except for the assertions and the testbenches.

## How a layer is laid out

Everything else follows from this layout, so it comes first. Take a layer with
m inputs and n outputs, `a = x^T W`, where `W(j,k)` connects input j to
output k. In a core of NR x NR PEs:

* **Weights** are spread in 2D round-robin order. `W(j,k)` lives in
  PE(j mod NR, k mod NR), in that PE's MEM A at word
  `w_base + (j div NR) * nout + (k div NR)`. Here `nin = m/NR` and
  `nout = n/NR` are the layer size counted in NR-wide blocks.
* **Vectors** live only in the diagonal PEs. Element i of a vector
  (input, output, error or scaled error) lives in PE(i mod NR, i mod NR), in
  its MEM B at word `base + i div NR`.

**Forward pass, one output block.**

1. For each input block, the diagonal PE(r,r) puts its input element on row
   bus r.
2. Every PE(r,c) multiplies that value by its weight and accumulates.
   PE(r,c) now holds the part of output `kb*NR + c` that comes from the inputs
   congruent to r.
3. The NR partial sums of column c are reduced into the diagonal PE(c,c) over
   column bus c. At step s = 0..NR-2, PE((c+1+s) mod NR, c) drives the bus and
   PE(c,c) adds the value to its own accumulator. That takes NR-1 cycles.
4. PE(c,c) writes the result into its MEM B, optionally through a ReLU, and
   drives it on row bus c.

Output element k therefore lands in diagonal PE(k mod NR), the same place
where an input element k would be. The output of one layer is already laid out
as the input of the next: the result of the product comes out transposed,
which is exactly what the next layer needs.

**Backward pass.** The same weights compute `delta_in = W delta`:

1. The diagonal PE(c,c) puts error element `kb*NR + c` on column bus c.
2. Every PE multiplies it by its weight and accumulates.
3. The partial sums are reduced along the row buses into PE(r,r). At step s,
   PE(r, (r+1+s) mod NR) drives row bus r.
4. The result is multiplied by ReLU'(h): it is zeroed wherever the stored
   activation h is not positive. It is then written to the diagonal MEM B,
   again in vector layout.

**Weight update** `W += x^T z`, where `z = -eta * delta` has been prepared by a
SCALE command:

1. For each input block, the diagonal PEs broadcast `x` on the row buses, and
   every PE latches its value in a register.
2. For each output block, the diagonal PEs broadcast `z` on the column buses,
   and every PE updates its weight in place with one fused multiply-add.

The order of summation is fully fixed: the chain inside each PE, then the
reduction order above. Results are therefore bit-exact and reproducible. The
testbenches rely on this.

## The processing element (`pe`)

Each PE has:

* a binary16 fused multiply-add unit (`fp16_fma`) with an accumulator;
* one extra register (`xr`);
* two memory banks: MEM A with 6144 words (12 KB) for weights, and MEM B with
  2048 words (4 KB) for vectors;
* read and write access to its row bus and its column bus.

The PE has no sequencer of its own. Every cycle the core broadcasts one
micro-operation (`cat_pkg::pe_ctrl_t`) to all its PEs. Each PE decodes its own
part from its coordinates: whether it is a diagonal PE, whether it drives the
current reduction step, and whether it lies in the column selected for a load
or store.

The PE is a two-stage pipeline:

| stage | cycle | what happens |
|---|---|---|
| 0 | micro-operation presented | MEM A and MEM B are read (synchronous SRAM) |
| 1 | next cycle | buses driven and read, FMA evaluated; accumulator, `xr` or a memory word written at the closing clock edge |

The buses are combinational, all inside stage 1. A value read from a diagonal
PE's memory reaches the FMA of every PE on its bus in the same cycle.
Back-to-back micro-operations never touch the same word within one cycle of
each other. Between commands the controller leaves one idle cycle, so that a
read can never see a write that is still in flight.

| micro-op | diagonal PE | other PEs |
|---|---|---|
| `MAC_FWD` | drives row bus with MEM B; acc (+)= row x MEM A | acc (+)= row x MEM A |
| `MAC_BWD` | drives column bus with MEM B; acc (+)= col x MEM A | acc (+)= col x MEM A |
| `RED_COL` s | acc += column bus | PE((c+1+s)%NR, c) drives column bus with acc |
| `RED_ROW` s | acc += row bus | PE(r, (r+1+s)%NR) drives row bus with acc |
| `WB` | MEM B[waddr] = act(acc), driven on the row bus | - |
| `LATCH_X` | drives row bus with MEM B | xr = row bus |
| `UPD` | drives column bus with MEM B; MEM A = MEM A + xr x col | MEM A = MEM A + xr x col |
| `SCALE` | MEM B[waddr] = MEM B x eta | - |
| `LD` / `ST` | PEs of the selected column write MEM A/B from the row bus, or drive the row bus from it | same |
| `RING_OUT` | drives row bus with MEM B (the row buses go to the ring) | - |
| `RING_IN` | MEM B[waddr] = act(bus [+ MEM B]) with the ring beat on the row buses | - |

In `WB`, `act` is an optional ReLU, an optional ReLU' mask, or both.

## The core (`core`, `core_ctrl`, `bcast_bus`)

A core has three parts:

* NR x NR PEs;
* 2 x NR broadcast buses (`bcast_bus`). Each bus is a one-hot AND-OR
  multiplexer, with a clocked assertion (off during reset) that at most one
  source drives it;
* the controller `core_ctrl`.

The row buses are the core's only window to the outside:

* A SPAD line holds NR half-words, one per row bus. LOAD and STORE move one
  line per cycle between the SPAD and one column of PEs.
* A ring beat also holds NR half-words. A received beat is placed on the row
  buses. Row-bus values are pushed into a 4-entry output FIFO towards the next
  core.

The controller takes one command at a time over a valid/ready handshake
(`cat_pkg::cmd_t`) and runs its loop nest:

| command | effect | issue cycles |
|---|---|---|
| `GEMV_FWD` | `y = act(x^T W)` (optional ReLU) | nout x (nin + NR) |
| `GEMV_BWD` | `y = (W x) .* ReLU'(z)` (mask optional) | nin x (nout + NR) |
| `UPDATE` | `W += x^T z` | nin x (nout + 1) |
| `SCALE` | `y = eta * x`, element-wise | count |
| `LOAD` | SPAD lines -> MEM A or MEM B; line t goes to column t % NR, word `y_base + t / NR` | count |
| `STORE` | the reverse of LOAD | count |
| `RING_SEND` | diagonal MEM B words -> ring, one NR-element block per beat | count (+ stalls) |
| `RING_RECV` | ring -> diagonal MEM B; can add to the stored value, apply ReLU, and forward the beat | count (+ stalls) |

`busy` goes low N + 2 cycles after the cycle in which the command was
accepted, where N is the issue count above. That is one cycle to drain stage 1
and one idle cycle.

`RING_SEND` stalls while the output FIFO has no room. `RING_RECV` stalls while
no beat has arrived, or, when it forwards, while the FIFO is full. These stalls
are the design's only flow control. The `stall` output shows them.

In a forward GEMV, NR - 1 reduction cycles follow every run of nin
multiply-accumulate cycles. For a layer with few input blocks per core, the
reduction therefore costs about as much as the useful work. The paper reports
the same effect.

## The ring (`ring_link`, `caterpillar_top`)

The cores are numbered as they are placed:

* 0 .. C-1 along the top row, left to right;
* C .. 2C-1 along the bottom row, right to left.

Core i sends to core (i+1) mod 2C through a `ring_link`. The link is a
two-entry skid buffer: one cycle of latency per hop, full throughput, and a
registered ready, so the ring has no combinational loop.

The collective operations are sequences of commands, not hardware:

* **Reduce across cores.** Use this when a layer's inputs are split over
  several cores (each core holds a row panel of W):
  1. Every core computes its partial output with `GEMV_FWD`, without ReLU.
  2. Core i runs `RING_SEND`; core i+1 runs `RING_RECV` with `add` (and ReLU on
     the last one).
* **All-gather.** The owner of a vector sends it. Each core on the way runs
  `RING_RECV` with `fwd`, so it keeps a copy and passes the beat on in the same
  cycle. The last core receives without forwarding.
* **Reduce-scatter.** Chain receive-with-add steps around the ring, each core
  keeping its own part.

The host orders the commands. A receiver may start before its sender: it
simply stalls until the data arrives.

## Arithmetic (`fp16_fma`)

All data is IEEE binary16, and every arithmetic step is one fused
multiply-add `a*b + c` with a single rounding, to nearest, ties to even. The
unit is exact by construction:

* Every binary16 product and addend is an integer multiple of 2^-48 below
  2^82.
* Both are therefore placed in an 82-bit fixed-point window and added exactly.
* The sum is normalised with a leading-one search and rounded once.

Conventions:

* Subnormal inputs count as zero.
* Results below 2^-14 become +0, and an exact zero is +0.
* Overflow gives a signed infinity.
* An Inf or NaN input gives the quiet NaN 0x7E00.

Reductions use the same unit with b = 1.0. ReLU keeps positive values and maps
everything else, including -0, to +0. The ReLU' mask zeroes an error element
wherever the stored activation is +0 or negative.

## Memories and the host interface (`pe_sram`, `spad`)

PE memories are arrays with one synchronous read port and one write port.
A read and a write of the same address in the same cycle return the old data.

Each SPAD holds 16384 lines of NR half-words (512 KB). It has two ports:

* a core port, with reads one cycle after the request;
* a host port (`h_en`, `h_we`, `h_addr`, `h_wdata`, `h_rdata`), through which
  an outside agent fills and reads the SPAD.

If both ports write the same line in the same cycle, the core port wins. All
memories start out cleared.

The top, `caterpillar_top`, exposes one command port per core, plus `busy`,
`stall` and `bus_conflict` per core, and the SPAD host ports. A host, which is
not part of this design, loads the weights and samples into the SPADs and then
issues the command sequence for the training schedule. The same commands serve
all of these schedules:

* SGD: one sample at a time, all cores on one layer;
* pipelined continuous propagation: layers placed on different cores, samples
  handed on over the ring;
* minibatch methods: one GEMV per sample of the batch against the same
  weights, with activations kept in MEM B or the SPAD.

## Sizes and capacity

| parameter | default | meaning |
|---|---|---|
| `NR` | 16 | PEs per core side |
| `C` | 4 | the array has 2 x C cores |
| `MEMA_DEPTH` | 6144 | weight words per PE (12 KB) |
| `MEMB_DEPTH` | 2048 | vector words per PE (4 KB) |
| `SPAD_LINES` | 16384 | 32-byte lines per SPAD (512 KB) |

The other arrangement the paper evaluates, 2 x 16 cores of 4 x 4 PEs, is
`NR=4, C=16`.

Capacity, with an MNIST input of 784 placed in front of the listed widths and
each layer padded to whole 16 x 16 blocks:

* The 784-500-500-500-10 network needs 456 weight words per PE. Adding one or
  two more 500-wide layers raises that to 584 and 712.
* 784-2500-2000-1500-1000-500-10 needs 5880 words per PE, if every layer is
  spread evenly over all eight cores. It fits in the 6144-word MEM A. This is
  why 16 KB is split 12 KB / 4 KB rather than evenly.

On the 4 x 4-PE arrangement the large network needs about 23,000 words per PE.
There it does not fit, and its weights must be streamed from the SPADs.

## What follows the paper, and what does not

Taken from the paper:

* the array of 2 x C linear-algebra cores of NR x NR PEs;
* half-precision multiply-accumulate PEs, each with 16 KB of local memory in
  two banks;
* row and column broadcast buses;
* a 512 KB private scratchpad per core;
* a unidirectional systolic ring between the cores, one cycle per hop;
* weights in 2D round-robin order;
* inputs broadcast on the row buses, partial sums reduced on the column buses
  into the diagonal PEs in NR-1 cycles, results rebroadcast from the diagonal
  on the row buses;
* the backward pass with the roles of the buses swapped;
* splitting a layer over cores with a reduction across them;
* all-gather and reduce-scatter on the ring;
* ReLU hidden layers.

Choices of this design, where the paper gives no detail:

* the fused-multiply-add rounding and special cases;
* the 12 KB / 4 KB memory split;
* one controller per core broadcasting micro-operations, in place of the
  micro-programmed controller the paper names for each PE;
* the command set and its loop order;
* the reduction order;
* the two-stage PE pipeline;
* SPAD line width and ring width of NR half-words;
* valid/ready flow control with an output FIFO and skid-buffer links;
* the host port on the SPAD.

Departures and omissions:

* **No overlap of reduction with the next block.** The paper overlaps the
  reduction of one output block with the multiply-accumulates of the next,
  so that pipelined propagation loses almost no cycles to reduction. Here the
  two run one after the other.
* **No neighbour-link tree reduction.** The paper adds direct links between
  neighbouring PEs so that a reduction takes log2(NR) - 1 cycles instead of
  NR - 1. They are not built.
* **No Goldschmidt activation unit.** The paper evaluates non-linear
  activations by Goldschmidt iteration on the FPU, seeded from a lookup table.
  That unit is not built. Only ReLU, the activation all evaluated networks
  use, and its derivative are built.
* **No softmax.** The output softmax and the error `e = y_hat - y` are left to
  the host.
* **The register file is a single register.** The paper gives no size for the
  PE's register file; one register is all the built micro-operations need.

Timing and area are not characterised. The FMA is one combinational stage and
is not pipelined for any particular clock.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog.

The reference arithmetic (`tb/fp16_ref_pkg.sv`) computes in double precision
and rounds to binary16 with its own routine. The testbenches sum in the order
the hardware does and compare bit for bit.

| testbench | what it checks |
|---|---|
| `tb_fp16_fma` | directed corner cases and 20,000 random operands against the reference |
| `tb_pe_sram`, `tb_spad`, `tb_bcast_bus`, `tb_ring_link` | storage, port behaviour, bus selection, ring order, latency and throughput |
| `tb_pe` | every micro-operation, including who drives which bus at each reduction step |
| `tb_core_ctrl` | micro-operation streams and addresses for every command; stalls |
| `tb_core` | one 4 x 4 core: load, forward with ReLU, backward with mask, scale, update, store, ring send under backpressure, ring receive with gaps; cycle counts |
| `tb_caterpillar_top` | 2 x 2 cores of 4 x 4 PEs: a 16 x 8 layer split over two cores, reduced across the ring, all-gathered, then backward and update. It also counts stalls, forwards, ReLU clips, ReLU' masks, cross-core adds and updates, and fails if any of them never happened. |
| `tb_caterpillar_full` | the same training step at the default size (2 x 4 cores of 16 x 16 PEs), with a 32 x 16 layer |

With Verilator 5, for example:

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
    rtl/cat_pkg.sv tb/fp16_ref_pkg.sv tb/tb_core.sv --top-module tb_core
./obj_dir/Vtb_core
```

Building the full-size testbench takes several minutes. The design has
2048 PEs and about 36 MB of memory arrays. Running it takes well under a
minute.
