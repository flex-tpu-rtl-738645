# Flex-TPU: a systolic array that changes its dataflow per layer

A TPU-style accelerator does its work in a two-dimensional systolic array of
multiply-accumulate processing elements (PEs). Conventional designs fix one
*dataflow*, that is, one rule for which operand stays in a PE and which ones move:

* **weight stationary (WS):** each PE holds one weight. Activations stream
  across the array and partial sums flow down it.
* **input stationary (IS):** each PE holds one input-feature-map (IFMap) value.
  Weights stream across the array and partial sums flow down it.
* **output stationary (OS):** each PE holds one output. Activations and weights
  both stream through the array, and every PE accumulates its own result in
  place.

The best dataflow depends on a layer's shape, so in one network different
layers prefer different ones. The Flex-TPU adds two multiplexers to every PE,
plus one register per PE for a stationary operand. With these, the same array
can run any of the three dataflows. A small configuration unit switches the
dataflow between layers at run time. The dataflow for each layer is chosen
offline: every layer is run in all three, and the fastest is kept.

This repository holds synthesizable SystemVerilog for the whole accelerator.
The default size is a 32 x 32 array with INT8 operands and 32-bit accumulators.
It also holds self-checking testbenches for every block, for the top level at
reduced and full size, and for tiles of layers from the evaluated networks. The
published description of the design fixes the PE, the block diagram and the
control roles. Everything around them is this implementation's own: widths,
memory sizes, schedules, the host interface and the OS read-out. Section 8
lists these choices.

---

## 1. The processing element (`flex_pe`)

```
     stat_in (from register file)   v_in (from above)          h_in (from left)
            |                          |   \                      |   \
            |        +-----------------+    `--> [reg] --> v_out  |    `--> [reg] --> h_out
            v        v                                            |
          0 |  MUX1  | 1    <-- sel_mult                          |
            +---+----+                                            |
                |                                                 |
                +---------------------> (x) <---------------------+
                                         |
   psum_in (from above) --> 0 | MUX2 | 1 <--+   <-- sel_acc
                              +--+---+      |
                                 v          |
                                (+) <-- product
                                 |          |
                               [reg] -------+--> acc_out (down to the next PE / out)
```

`acc_out <= (sel_acc ? acc_out : psum_in) + (sel_mult ? v_in : stat_in) * h_in`,
while `h_in` and `v_in` are registered into `h_out` and `v_out`. All arithmetic
is signed. The product is sign-extended to 32 bits, and sums wrap on overflow.

| dataflow | sel_mult | sel_acc | stationary (`stat_in`) | enters from the left (`h_in`) | enters from the top (`v_in`) | result |
|---|---|---|---|---|---|---|
| WS | 0 | 0 | weight | IFMap | unused | partial sum flows down |
| IS | 0 | 0 | IFMap | weight | unused | partial sum flows down |
| OS | 1 | 1 | unused | IFMap | weight | stays in `acc_out` |
| OS read-out | 1 | 0 | unused | zeros | zeros | `acc_out <= psum_in`: results shift down |

WS and IS use the same selects. The only difference is what the host puts in
the register file and in the stream. The CMU tells the dataflow generator
which one it is, so the generator can pick the right memories and addresses.

## 2. Block structure (`flex_tpu`)

```
  input memory ---+-----------------------------> left DEMUX + 32 FIFOs --> array rows
  (IFMap)         |             (IS: weight memory feeds this bank instead)
                  +--> Weight/IFMap register file (IS) --+
  weight memory --+--> Weight/IFMap register file (WS) --+--> one register per PE
                  +--> top DEMUX + 32 FIFOs (OS) ---------------> array columns
                                                             32 x 32 flex_pe array
                                                                     | bottom row
                                 output MUX (de-skew for IS/WS, direct for OS)
                                                                     |
                                                               output memory
  main controller : layer descriptors, register-file loading, layer sequencing
  CMU             : per-layer dataflow table, drives every PE's two MUX selects
  dataflow gen.   : memory read addresses, FIFO strobes, lane masks, OS read-out,
                    output write addresses
```

| module | role |
|---|---|
| `flex_tpu_pkg` | dataflow enum, PE select struct, layer descriptor, select rule |
| `flex_pe` | the reconfigurable MAC cell |
| `systolic_array` | N x N grid of `flex_pe`. `h` moves right; `v` and the partial sums move down. The top-row partial sum is 0. |
| `wi_regfile` | N x N stationary registers, written one row per cycle, every entry wired to its PE |
| `operand_feeder` (+ `sync_fifo`) | DEMUX and one FIFO per lane. It also produces the diagonal skew. |
| `output_mux` | de-skew delay lines (IS/WS) or direct path (OS), lane masking |
| `tpu_sram` | 1-write/1-read memory with 1-cycle read latency, used for all three buffers |
| `cmu` | table of dataflows per layer, PE selects |
| `dataflow_generator` | per-layer address and strobe schedule |
| `main_controller` | host descriptor table, CMU programming, register-file load, sequencing |
| `flex_tpu` | top level |

Why weights enter from the left in IS: in all three dataflows the multiplier's
second input comes through the same PE port, the one that passes on to the
right. That port carries the IFMap in OS and WS and the weight in IS. So in IS
the left FIFO bank reads the weight memory, and the register file is loaded
from the input memory. In WS the register file is loaded from the weight
memory.

## 3. How a layer is mapped

A layer is one matrix product **O (M x C) = X (M x K) · W (K x C)**. For a
convolution, X is the im2col matrix:

* M is the number of output pixels.
* K = kernel height x kernel width x input channels.
* C is the number of filters.

The host does the lowering. The array's N x N PEs hold two of the three
dimensions. The third dimension is streamed, one memory word per cycle, and is
limited only by the 1024-word memories:

| dataflow | held in the array | streamed (L) | register file holds |
|---|---|---|---|
| WS | K <= N rows, C <= N columns | M | W (row k = W[k][*]) |
| IS | K <= N rows, M <= N columns | C | X transposed (row k = X[*][k]) |
| OS | M <= N rows, C <= N columns | K | – |

A memory word holds N lanes. Lane i goes to array row i (left bank) or column
i (top bank). The host stores the matrices in the layout the chosen dataflow
needs:

| dataflow | input memory, word a | weight memory, word a | output memory, word a |
|---|---|---|---|
| WS | X[a][0..K-1] (a < M) | W[a][0..C-1] (a < K, register file) | O[a][0..C-1] |
| IS | X[0..M-1][a] (a < K, register file) | W[0..K-1][a] (a < C) | O[0..M-1][a] |
| OS | X[0..M-1][a] (a < K) | W[a][0..C-1] (a < K) | O[a][0..C-1] |

Addresses are relative to the layer's base addresses. Lanes beyond the layer's
size are masked: they are fed as zero and written as zero. A layer smaller
than the array therefore needs no clean-up of unused PEs.

**Skew.** Row i of a systolic array must see its stream one cycle after row
i-1. On every cycle of the stream the DEMUX pushes each lane of the memory
word into that lane's FIFO. FIFO i is popped exactly i+1 cycles after the push.
So the FIFOs turn a word that arrives all at once into a staggered diagonal. A
FIFO never holds more than i+1 words, so N entries are enough for any stream
length.

**IS/WS results.** Stream element e leaves the bottom of column j N+j cycles
after it entered row 0. So consecutive columns come out one cycle apart. In
`output_mux`, column j passes through N-1-j registers. All N results of
element e then arrive together and are written as one output word.

**OS results and the read-out.** In OS every PE accumulates its output in
place. The description of the dataflow does not say how the finished outputs
leave the array. This design uses the PE's own second multiplexer and adds no
hardware:

1. Once the last product has reached the bottom-right PE, the CMU sets the
   adder select to 0.
2. The feeders now supply only zeros, so every PE loads the value of the PE
   above it. The top row loads zero.
3. In N cycles the rows leave the bottom edge, last row first, and are written
   straight to the output memory (address base + row).
4. At the end, every PE holds zero again.

IS/WS layers also end with zero in every PE, because zeros are streamed
through the array until every partial sum has left. So a layer can follow any
other layer in any dataflow without a separate clear step.

## 4. Timing

Consider one layer whose streamed length is L. The dataflow generator counts
cycles t from the cycle after it is started:

| t | event |
|---|---|
| 0 .. L-1 | memory reads of the streamed words |
| 1 .. L | FIFO pushes (one cycle of memory latency) |
| 2 .. | row i / column j receives element e at t = e + 2 + i (+ j inside the array) |
| 2N+1 .. 2N+L | IS/WS: output word e written at t = 2N+1+e |
| L+2N .. L+3N-1 | OS: read-out, writing row N-1-d at t = L+2N+d |
| L+3N | done (the array is all zero again) |

The main controller adds one decision cycle and one start cycle per layer. In
IS/WS it also spends K cycles loading the register file, one row per cycle.
**A layer therefore takes L + 3N + 3 cycles, plus K in IS/WS.** The done pulse
of the whole run comes one cycle after the last layer. The testbenches check
these counts exactly.

One consequence: the IS/WS partial sums of different K-slices are not added
on chip. With K > N, the host splits the layer into K-slices of at most N and
adds the slice results. OS has no such limit on K. In the other direction, OS
and IS hold at most N rows of M, while WS streams M. Every pass also carries a
fixed cost of about 3N cycles: filling the skew, the read-out, and flushing
the array back to zero.

The workload testbenches run tiles of real layer shapes in all three
dataflows at the default size. The host does the tiling, and the cycles are
from start to done.

| layer tile (M x K x C) | OS | WS | IS | fastest |
|---|---|---|---|---|
| ResNet-18 3x3/64 conv, 32 px x 576 x 32 filters | 676 | 2935 | 2935 | OS |
| MobileNet depthwise 3x3, 32 x 9 x 1 | 109 | 141 | 110 | OS |
| MobileNet pointwise 1x1, 32 x 64 x 32 | 164 | 327 | 327 | OS |
| AlexNet FC6 slice, 1 x 1024 x 32 | 1124 | 4225 | 5217 | OS |
| ResNet-18 conv1 7x7x3, 192 x 147 x 32 | 1477 | 1603 | 4813 | OS |
| VGG-13 conv1 3x3x3, 192 x 27 x 32 | 757 | 319 | 949 | WS |

The best dataflow changes with the shape, and that is the premise of the
design. These counts come from this RTL's schedule and tiling. They are not
the counts of the original evaluation, which used an analytical simulator
with its own mapping.

## 5. Running a network

1. After reset, write each layer's descriptor through `cfg_we / cfg_layer /
   cfg_desc`. A descriptor holds the dataflow, M, K, C and the base word
   addresses in the three memories. The controller keeps the sizes and
   addresses and forwards the dataflow to the CMU table in the same cycle.
   Descriptors may be written only while `busy` is low. An assertion checks
   that the held dimensions fit the array.
2. Fill the input and weight memories through their write ports (`x_*`,
   `w_*`), one N-lane word per cycle, in the layouts of section 3.
3. Pulse `start` with `num_layers`. Layers 0 .. num_layers-1 run back to
   back, each in its own dataflow. `busy` stays high until the one-cycle
   `done`.
4. Read results from the output memory with `o_re / o_raddr`. Data appears on
   `o_rdata` one cycle after the read.

The memories hold 1024 words each: 32 KiB of weights, 32 KiB of IFMap and
128 KiB of 32-bit results at the default size. That is far less than a whole
network such as ResNet-18 (about 11.7 M weights) or AlexNet (about 61 M). Real
networks are run as a sequence of tile passes that the host stages through the
memories, as in `tb_conv_workload`. The offline choice of dataflow works the
same way: run each layer once per dataflow and program the fastest into its
descriptor.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 32 | array is N x N (the main configuration evaluated; 8, 16, 128 and 256 were also studied) |
| `DATA_W` | 8 | operand width (signed) |
| `ACC_W` | 32 | accumulator / output width (signed) |
| `MEM_DEPTH` | 1024 | words in each of the three memories |
| `MAX_LAYERS` | 64 | entries in the descriptor and CMU tables |

Descriptor fields are 16 bits wide (`DIM_W`, `BASE_W` in the package).

## 7. Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
with a watchdog. Build one with Verilator from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_flex_tpu \
    -y rtl -y tb +libext+.sv -Irtl rtl/flex_tpu_pkg.sv tb/tb_flex_tpu.sv
./obj_dir/Vtb_flex_tpu
```

| testbench | what it checks |
|---|---|
| `tb_flex_pe` | PE against a model for random operands and all select combinations |
| `tb_systolic_array` | 4 x 4 array with hand-skewed edges: WS product, OS product with read-out, array cleared afterwards |
| `tb_wi_regfile`, `tb_tpu_sram`, `tb_cmu` | storage and select behaviour against models |
| `tb_operand_feeder` | lane i = word pushed i+1 cycles earlier, masking, gaps |
| `tb_output_mux` | de-skew delays, OS direct path, masking |
| `tb_dataflow_generator` | every strobe and address, cycle by cycle, for each dataflow |
| `tb_main_controller` | register-file loads, CMU programming, layer order, done/busy (CMU and generator modelled) |
| `tb_flex_tpu` | whole design at N = 4: six layers mixing IS/WS/OS, partial sizes, exact cycle budget. Also counts each mechanism (each dataflow, register-file loads, read-out, dataflow switches, masked lanes) and fails any that never occurs. |
| `tb_flex_tpu_full` | the same at the default size (32 x 32, 1024-word memories) |
| `tb_conv_workload` | a ResNet-18 3x3/64-channel convolution tile, lowered by im2col, run in OS, WS and IS at default size and compared with a direct convolution |
| `tb_layer_workloads` | the MobileNet, AlexNet, ResNet-18 and VGG-13 tiles of the table in section 4, in all three dataflows, with M-blocking and K-slicing done as a host would |

Verilator has two states, so every register that is read is reset or written
first. Memory contents are not reset.

## 8. Relation to the original description

Taken from it:
* the PE structure, with both multiplexers and their input numbering;
* the select values: 0 for IS and WS, 1 for OS;
* the block set: weight, input and output memories; DEMUX/FIFO banks on the
  top and left edges; N x N array; MUX to the output memory; Weight/IFMap
  register file; dataflow generator; CMU; main controller;
* the roles of the three control blocks;
* the per-layer run-time reconfiguration;
* 32 x 32 as the main array size.

Choices of this implementation, where the description is silent:
* INT8 operands and INT32 accumulators (only the symbols n and m are given);
* memory sizes and word organisation (one operand per lane, N lanes per word),
  and the FIFO depth;
* the skew mechanism (delayed FIFO pops) and the de-skew delay lines;
* the reading of the output "MUX" as the choice between the IS/WS and OS paths;
* the OS read-out through the PE's second multiplexer;
* zero partial sums at the top edge;
* the memory layouts, the generator schedule and the register-file load order;
* the descriptor format, the table depths (64 layers) and the host interface;
* asynchronous active-low reset.

Not included:
* the offline dataflow selection and the host;
* adding IS/WS partial results across K-slices on chip (done by the host);
* any accumulation into the output memory;
* activation functions, pooling and im2col hardware (none are described).

The published area, power, critical-path and cycle figures come from a
standard-cell synthesis flow and an analytical simulator. They are not
reproduced by this RTL.
