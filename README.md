# Multi-CLP convolutional-layer accelerator in SystemVerilog

A CNN accelerator that uses one large array of multipliers and adders for every layer wastes
much of that array. The array has a fixed shape, Tn input maps by Tm output maps. A layer
whose input-map count N or output-map count M is not a multiple of that shape leaves lanes
idle on every cycle. AlexNet's first layer has only N = 3 input maps, for example, and a
wide array would mostly compute zeros there.

This design splits the same arithmetic budget into several smaller
**convolutional layer processors (CLPs)**. Each CLP has its own Tn × Tm shape, chosen for
the layers bound to it. All CLPs run at the same time, each on a different image. A layer
runs on exactly one CLP, and the layer-to-CLP assignment is fixed when the hardware is
built. The default build is a four-CLP, 32-bit floating-point AlexNet accelerator. Its
448 multiply-add lanes stay almost fully busy on every layer.

## Contents

- [Structure](#structure)
- [Inside a CLP](#inside-a-clp)
- [Tiling and the loop nest](#tiling-and-the-loop-nest)
- [Double buffering: loader, compute and writer](#double-buffering-loader-compute-and-writer)
- [Memory ports and data layout](#memory-ports-and-data-layout)
- [Register map and starting a layer](#register-map-and-starting-a-layer)
- [Epochs](#epochs)
- [Default configuration](#default-configuration)
- [Arithmetic](#arithmetic)
- [Outside this RTL](#outside-this-rtl)
- [Departures and simplifications](#departures-and-simplifications)
- [Verification](#verification)
- [Simulating with Verilator](#simulating-with-verilator)
- [Changing the configuration](#changing-the-configuration)

## Structure

```
multi_clp_top
├── epoch_sched           job table, epoch barrier, AXI4-Lite master to each CLP
└── clp  (× NUM_CLP, each with its own TN, TM and buffer sizes)
    ├── axil_regs         AXI4-Lite slave: CTRL and five base-address registers
    ├── clp_ctrl          descriptor and bias fetch, tile loops, ping-pong flags
    ├── clp_xfer          input and weight loaders, output write-out engines
    ├── in_buf            TN banks, two halves
    ├── w_buf             TN×TM banks, two halves
    ├── bias_buf          M biases of the current layer
    ├── out_buf           TM banks, two halves, accumulate port, MP read ports
    └── clp_compute       loop counters, address generation, TM × dot_product
```

Two packages hold the shared definitions:

- `fp32_pkg` holds the float multiply and add functions.
- `clp_pkg` holds the memory-command type, the layer descriptor, the job record and the
  register offsets.

## Inside a CLP

The compute module has TM **dot-product units**, each TN lanes wide.

- **Multiply and sum.** Each cycle, every unit multiplies TN input words by TN weights and
  adds the products in a balanced tree. The result is registered, so the unit has one cycle
  of latency.
- **Accumulate.** An accumulation adder adds each unit's result to one word of that unit's
  own output-buffer bank. This gives TN × TM multipliers and TN × TM adders in total.
- **Input words.** All units read the same TN input words, one from each input bank.
- **Weights.** Each unit reads its own TN weights from the TN × TM weight banks.
- **Unused lanes.** When N is not a multiple of TN, the last group of input maps leaves
  lanes unused. A mask forces those lanes to zero so that stale buffer contents never reach
  the sum.

**Cycle count.** The inner loop (`clp_compute`) walks the kernel row i, kernel column j,
tile row tr and tile column tc, with tc innermost. It issues one step per cycle, and each
step performs TN × TM multiply-adds. A layer therefore takes

```
R · C · ceil(N/TN) · ceil(M/TM) · K²   compute cycles
```

plus a few cycles of pipeline drain per tile.

**Accumulation hazard.** The output buffer's accumulate port is a two-stage read-add-write.
When a tile is only one column wide, the same output word can come back on the very next
cycle. A one-deep bypass forwards the sum that has not yet been written in that case.

**Bias.** The first accumulation into an output word starts from the bias rather than from
the buffer. That is the first input-map group with i = j = 0, so the bias is added exactly
once.

## Tiling and the loop nest

**Layer descriptor.** A layer is described by eight 32-bit words, in this order:

| Word | Meaning |
|---|---|
| R, C | Output rows and columns |
| M | Output maps |
| N | Input maps |
| K | Kernel size |
| S | Stride |
| Tr, Tc | Output tile rows and columns |

**Loop order.** `clp_ctrl` walks the layer in four nested loops: r in steps of Tr, c in
steps of Tc, m in steps of TM, and n in steps of TN.

**Edge tiles.** At the bottom and right edges a tile shrinks to the rows and columns that
remain (`rloops`, `cloops`). Loop counts and transfer lengths follow the shrunken size.

**One tile step.**

- **Load.** Load the input tile into the input buffer. That is TN maps, each
  ((rloops−1)·S+K) × ((cloops−1)·S+K) words.
- **Load weights.** Load W[m..m+TM−1][n..n+TN−1][K][K] into the weight buffer.
- **Compute.** Run the compute module over the tile.
- **Write out.** Write the output tile to memory once the last input-map group of that
  (r, c, m) tile is done. Before that, the partial sums stay in the output buffer.

**Buffer limits.** A layer fits a CLP when all of these hold:

- ((Tr−1)·S+K)·((Tc−1)·S+K) ≤ IN_SIZE
- Tr·Tc ≤ OUT_SIZE
- K ≤ KMAX
- M ≤ MMAX

The hardware does not check these limits. The host must respect them.

## Double buffering: loader, compute and writer

This part is the hardest to follow in the RTL. Each of the input, weight and output buffers
has two halves. Three small state machines in `clp_ctrl` share the halves and pass them on
through flags.

- **Loader.** It fills the free input/weight half with the next tile step. Then it sets
  `in_full[h]` for that half.
- **Compute.** It waits for `in_full[h]`, runs the tile out of that half, then clears the
  flag. It accumulates into the current output half. If that half is still being written
  out (`out_full`), compute waits before starting a new (r, c, m) tile on it.
- **Writer.** When compute finishes the last n step of an output tile, it marks that output
  half full and gives the writer the tile's position and size. The writer streams the half
  to memory while compute goes on with the other half.

Compute of one tile step therefore overlaps with both the loading of the next step and the
write-out of the previous output tile.

**End of layer.** `done` rises when the last tile has been computed and both output halves
have drained. It stays high until the next start.

**Assertions.** Three assertions in `clp_ctrl` check the protocol:

- The loader never fills an input half that is still full.
- Compute never hands the writer an output half that is still being written out.
- The writer only releases an output half that was full.

## Memory ports and data layout

Every memory port is a data-mover style channel:

- a command `{byte address, length in words}` with a valid/ready handshake;
- then exactly `length` 32-bit data words on a valid/ready stream.

A CLP has the following ports.

| Channel | Direction | Carries |
|---|---|---|
| descriptor/bias | read | the 8-word descriptor, then the M biases of the layer |
| input 0..NP−1 | read | input port p loads input banks ceil(TN/NP)·p onwards |
| weight 0..WP−1 | read | weight port p loads filter columns ceil(TM/WP)·p onwards |
| output 0..MP−1 | write | output port p writes the maps ceil(TM/MP)·p onwards |

Splitting the buffers across several ports by their outermost dimension lets a CLP take
more memory bandwidth. A CLP that needs little bandwidth uses one port of each kind.

All arrays are dense, row-major 32-bit words:

| Array | Layout | Burst per command |
|---|---|---|
| input | `I[N][(R−1)S+K][(C−1)S+K]` | one tile row of one map |
| weights | `W[M][N][K][K]` | the nv·K² consecutive weights of one output map, where nv ≤ TN is the number of input maps in this group |
| bias | `B[M]` | the whole array, once per layer |
| output | `O[M][R][C]` | one tile row of one map |

The input array already includes any zero padding. The output is the raw convolution plus
bias. No activation function or pooling is applied; those are outside the convolutional
layers this accelerator targets.

## Register map and starting a layer

Each CLP has an AXI4-Lite slave (`axil_regs`). All offsets are byte offsets; strobes are
ignored.

| Offset | Name | Meaning |
|---|---|---|
| 0x00 | CTRL | Write bit0 = 1 to start. Read gives bit0 busy, bit1 done, bit2 idle. |
| 0x10 | DESC | Address of the 32-byte descriptor |
| 0x18 | IBASE | Address of the input array |
| 0x20 | WBASE | Address of the weight array |
| 0x28 | BBASE | Address of the bias array |
| 0x30 | OBASE | Address of the output array |

A write to CTRL while the CLP is busy is ignored. The slave accepts AW and W together in
one cycle and responds in the next.

## Epochs

The CLPs do not talk to each other. They are kept in step by **epochs**.

- Every CLP runs its whole layer list within one epoch.
- The epoch ends when the slowest CLP finishes.
- A layer always reads data that was written in an earlier epoch.

So in epoch e, the CLP for layer 1 works on image e, the CLP for layer 2 works on the layer-1
output of image e−1, and so on. The layers of one image are spread over consecutive epochs,
and the CLPs never wait on one another inside an epoch. A good partition makes every CLP
finish in about the same number of cycles.

`epoch_sched` implements this:

- **Job table.** The host writes up to MAX_JOBS jobs per CLP (`tbl_*`). A job is a
  descriptor address plus four array bases. The host also writes the number of jobs per CLP
  (`nj_*`). It does this between epochs, usually rotating the base addresses to point at
  the next image's buffers.
- **Running an epoch.** An `epoch_start` pulse starts the epoch. For each CLP, the scheduler
  writes DESC, IBASE, WBASE, BBASE, OBASE and then CTRL = 1 over AXI4-Lite. It then waits for
  that CLP's `done` before moving to the CLP's next job.
- **Idle CLPs.** A CLP with zero jobs finishes immediately.
- **End of epoch.** When every CLP is through its list, `epoch_done` pulses and
  `epoch_count` increments.

## Default configuration

`multi_clp_top` defaults to four CLPs. It targets AlexNet in 32-bit float on a Virtex-7 485T,
one of the two groups of each layer. Each CLP runs the layers listed.

| CLP | TN | TM | Layers | Tr × Tc | IN_SIZE | OUT_SIZE | KMAX | MMAX | Cycles per epoch |
|---|---|---|---|---|---|---|---|---|---|
| 0 | 2 | 64 | 4, 5 | 13 × 13 | 225 | 169 | 3 | 192 | 438 048 + 292 032 = 730 080 |
| 1 | 1 | 96 | 3 | 13 × 13 | 225 | 169 | 3 | 192 | 778 752 |
| 2 | 3 | 24 | 1 | 14 × 19 | 5229 | 266 | 11 | 48 | 732 050 |
| 3 | 8 | 19 | 2 | 14 × 27 | 558 | 378 | 5 | 128 | 765 450 |

Buffer sizes are the largest that the CLP's layers need with these tiles. For layer 1:
input (13·4+11) × (18·4+11) = 63 × 83 = 5229, and output 14 · 19 = 266.

The layer sizes used in the cycle column are:

| Layer | N | M | R = C | K | S |
|---|---|---|---|---|---|
| 1 | 3 | 48 | 55 | 11 | 4 |
| 2 | 48 | 128 | 27 | 5 | 1 |
| 3 | 256 | 192 | 13 | 3 | 1 |
| 4 | 192 | 192 | 13 | 3 | 1 |
| 5 | 192 | 128 | 13 | 3 | 1 |

An epoch lasts 778 752 compute cycles, set by CLP1. The four CLPs are within 7 % of each
other.

Each CLP has one port of each kind (NP = WP = MP = 1).

## Arithmetic

`fp32_pkg` implements IEEE-754 single-precision multiply and add as combinational functions.
Both round to nearest, ties to even. For simplicity:

- subnormal inputs and results are flushed to zero;
- an exponent of 255 is treated as infinity, with no NaN handling;
- exact cancellation gives +0.

The units are not pipelined beyond the dot-product output register and the two-stage
accumulate. A real FPGA build at the usual 100 MHz would pipeline the multipliers and adder
trees. That changes latency only; the one-step-per-cycle throughput stays the same.

## Outside this RTL

`multi_clp_top` exposes every CLP's memory channels as plain ports:

- `rd_*[clp][ch]`: channel 0 is descriptor/bias, 1..NP are inputs, NP+1..NP+WP are weights;
- `wr_*[clp][ch]`: the MP output channels.

The following are not part of the RTL:

- the AXI interconnect that shares DRAM between all ports;
- the data movers that turn commands into AXI bursts;
- the DRAM itself.

The testbenches use a behavioural memory model (`tb/mem_model.sv`) in their place. The model
stalls commands and data at random. The host interface is the job-table and epoch ports of
the scheduler.

## Departures and simplifications

This design departs from the design it is based on in the following ways:

- The design it is based on is produced by an HLS template and a resource optimizer. Here
  the template is written out as RTL with the same loop structure, buffers and ports.
  Choosing the partition (TN, TM, tiles, port counts) is left to whoever sets the
  parameters.
- The template's pseudo-code overwrites an output word with its bias whenever
  `i*j == 0 && n == 0`. Taken literally, that would discard products of the first kernel row
  and column. Here the bias is the starting value of the first accumulation instead, at
  i = j = 0 of the first input-map group. The result is bias plus the full sum.
- The bias is fetched once per layer over the descriptor port. The source only says that
  the output buffer starts from the bias.
- The register map, the job table and driving the CLPs over AXI4-Lite from a hardware
  scheduler are this design's own. The source only says each CLP has an AXI4-Lite slave to
  start it.
- Only 32-bit float arithmetic is built. The 16-bit fixed-point variants would need
  different multiply and add units.
- Layer limits are not checked in hardware.
- The accelerator covers convolutional layers only.

## Verification

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_dot_product` | Random and exact-integer vectors against a real-number model; masks; one-cycle latency |
| `tb_in_buf`, `tb_w_buf` | Both halves held independently; registered reads |
| `tb_out_buf` | Bias init, accumulation, back-to-back hits on one word (bypass), read ports |
| `tb_axil_regs` | Register writes and reads, start only while idle, response timing |
| `tb_epoch_sched` | Register sequence per job, several jobs per CLP, empty CLPs, the barrier |
| `tb_clp` | A CLP with TN=3, TM=4 and two ports of each kind, over four layers |
| `tb_multi_clp_top` | The default four-CLP build over two epochs |
| `tb_alexnet_epoch` | One full-size AlexNet epoch on the four default CLP shapes, every output word checked |

`tb_clp` runs four layers that cover stride > 1, edge tiles, N and M that are not multiples
of TN and TM, and 1×1 tiles. It checks every output word and the exact
compute-cycle count.

`tb_multi_clp_top` runs the default four-CLP build over two epochs. One layer consumes the
previous epoch's output, and one CLP runs two layers in an epoch. The test counts every
mechanism and fails if one never occurs:

- the epoch barrier;
- overlap of loading with compute;
- overlap of write-out with compute;
- edge tiles;
- layers with several output-map groups;
- memory back-pressure.

Data are small integers stored as floats, so every sum is exact and compared bit for bit.

`tb_alexnet_epoch` runs the real workload. Four CLPs with the default shapes and buffer
sizes start together, as in one epoch. Each runs its AlexNet layers at full size, with
random small-integer data and no memory stalls. Helper module `clp_layer_runner` drives each
CLP.

- All 325 040 output words match the reference convolution.
- The compute cycles of each layer equal the formula and the table above.
- The CLPs finish after 760 998, 801 924, 754 109 and 776 026 clock cycles, counted from the
  common start. The epoch is therefore 801 924 cycles: 3 % over the 778 752 compute cycles
  of the slowest CLP. The overhead is descriptor and bias fetch, the first tile load, the
  per-tile pipeline drain and the final write-out.
- The simulation takes about one minute in Verilator after a two-minute build.

## Simulating with Verilator

Compile order is packages first, then modules:

```sh
RTL="rtl/fp32_pkg.sv rtl/clp_pkg.sv rtl/dot_product.sv rtl/in_buf.sv rtl/w_buf.sv \
     rtl/bias_buf.sv rtl/out_buf.sv rtl/clp_compute.sv rtl/clp_xfer.sv rtl/clp_ctrl.sv \
     rtl/axil_regs.sv rtl/clp.sv rtl/epoch_sched.sv rtl/multi_clp_top.sv"
verilator --binary --timing --assert -Wno-fatal $RTL tb/mem_model.sv tb/tb_clp.sv \
          --top-module tb_clp -o sim
./obj_dir/sim
```

- Replace `tb_clp` with any other testbench name.
- The testbenches do not depend on the initial state. Running with
  `+verilator+rand+reset+2` randomises it.
- The full-size top takes a few minutes to compile.

## Changing the configuration

All sizes are parameters of `multi_clp_top`. Each per-CLP parameter is an unpacked array
indexed by CLP number:

- `NUM_CLP`, `TN[]`, `TM[]`;
- `KMAX[]`, `MMAX[]`, `IN_SIZE[]`, `OUT_SIZE[]`;
- `NP`, `WP`, `MP` (the same for all CLPs);
- `MAX_JOBS`.

Size the buffers from the layers you bind to each CLP, using the limits in
[Tiling and the loop nest](#tiling-and-the-loop-nest). Then fill the job table with one
descriptor per layer.

A layer with more output maps than MMAX can still run. Split it into several jobs, each
covering a range of output maps, and offset the weight, bias and output bases for each job.
