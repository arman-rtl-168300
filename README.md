# ARMAN: a systolic CNN accelerator that rearranges its arrays

Different CNN layers suit different array shapes. A big square array fits a
layer with many output channels and many output pixels. A long thin array
fits a layer that is short in one dimension and long in the other. Several
small arrays working side by side fit a batch of small layers. No single
fixed shape is best for every network.

ARMAN builds one accelerator from **four 64 x 64 output-stationary systolic
arrays** (16 384 8-bit MACs in all). It places **ten multiplexer/demultiplexer
groups** between them. The setting of these groups, called the
*arrangement*, decides whether the four arrays:

- work as four separate accelerators (2x2);
- pair up into two wide or two tall arrays (2x1, 1x2);
- share one operand stream between arrays (4x1, 1x4, and the three-array
  forms 3x1, 1x3);
- or merge into a single 128 x 128 array (1x1).

The arrangement is chosen per job, so it can change from one layer to the
next. In the physical design each 64 x 64 array sits on its own tier of a
monolithic 3D stack, and the links between arrays are vertical inter-tier
vias. Logically those links are ordinary wires, and this RTL draws the four
arrays as a flat 2 x 2 grid.

This repository holds synthesizable SystemVerilog for the whole datapath:
- the processing elements and arrays;
- the edge skew buffers;
- the operand and output SRAM banks;
- the reconfigurable interconnect;
- the selector decoder;
- a job controller.

Self-checking testbenches cover every module and the full-size design.

## 1. One array: output-stationary dataflow

Each processing element (`mac_pe`) holds one output value. Weights enter
each row from the left and move one PE to the right per cycle. Activations
enter each column from the top and move one PE down per cycle. Every cycle
a PE multiplies the two operands passing through it (signed 8 bit x 8 bit)
and adds the product to its 32-bit accumulator.

Row i of the weight stream is delayed by i cycles, and column j of the
activation stream by j cycles. With that offset, W[i][k] and X[k][j] meet
in PE(i,j) at cycle k+i+j. After K products the PE holds

    C[i][j] = sum over k < K of W[i][k] * X[k][j]

A CNN layer is mapped onto this matrix product by the host in the usual
way (im2col):
- rows are output channels;
- columns are output pixels;
- K is the filter volume (kernel height x kernel width x input channels).

The SRAM delivers a whole word (one value per lane) at once. A
**skew buffer** on each stream creates the staggered timing: lane i passes
through i registers.

**Draining.** The paper's MAC unit has a 32-bit register input beside the
8-bit operands. In this output-stationary design that 32-bit path forms a
shift chain along each row. In drain mode every accumulator loads the value
of its left neighbour. Each row then shifts its results out of the right
edge toward the output SRAM, last column first, one per cycle.

## 2. The four arrays and the ten groups

The arrays form a 2 x 2 grid:

    0 = top-left    1 = top-right
    2 = bottom-left 3 = bottom-right

Memories sit on three sides of the grid:
- **Weight banks** are on the left: W0 feeds the top pair, W1 the bottom
  pair.
- **Input (activation) banks** are on top: I0 feeds the left pair, I1 the
  right pair.
- **Output banks** are on the right: O0 takes the top pair's results, O1 the
  bottom pair's.

Every operand bank has **two read ports**, P0 and P1.

| group | kind  | where                      | selector = 1 (independent) | selector = 0 (joined)          |
|-------|-------|----------------------------|----------------------------|--------------------------------|
| 1     | mux   | rows of array 0            | W0.P0                      | W0.P1                          |
| 2     | mux   | columns of array 0         | I0.P0                      | I0.P1                          |
| 3     | demux | right edge of array 0      | results to O0 (port 0)     | weights + results into array 1 |
| 4     | mux   | rows of array 1            | W0.P1                      | from group 3                   |
| 5     | mux   | columns of array 1         | I1.P0                      | I1.P1                          |
| 6     | mux   | rows of array 2            | W1.P0                      | W1.P1                          |
| 7     | mux   | columns of array 2         | I0.P1                      | bottom edge of array 0         |
| 8     | demux | right edge of array 2      | results to O1 (port 0)     | weights + results into array 3 |
| 9     | mux   | rows of array 3            | W1.P1                      | from group 8                   |
| 10    | mux   | columns of array 3         | I1.P1                      | bottom edge of array 1         |

The selector values of each arrangement are the published ones.

| arrangement | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | arrays used |
|-------------|---|---|---|---|---|---|---|---|---|----|-------------|
| 2x2         | 1 | 1 | 1 | 1 | 1 | 1 | 1 | 1 | 1 | 1  | 0 1 2 3     |
| 1x4         | 1 | 0 | 1 | 1 | 0 | 1 | 1 | 1 | 1 | 1  | 0 1 2 3     |
| 4x1         | 0 | 1 | 1 | 1 | 1 | 0 | 1 | 1 | 1 | 1  | 0 1 2 3     |
| 1x3         | 1 | 0 | 1 | 1 | 0 | - | - | - | 1 | 1  | 0 1 3       |
| 3x1         | - | - | - | 1 | 1 | 0 | 1 | 1 | 1 | 1  | 1 2 3       |
| 1x2         | 1 | 0 | 1 | 1 | 0 | 1 | 0 | 1 | 1 | 0  | 0 1 2 3     |
| 2x1         | 0 | 1 | 0 | 0 | 1 | 0 | 1 | 0 | 0 | 1  | 0 1 2 3     |
| 1x1         | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 0 | 0  | 0 1 2 3     |

A `-` means the group serves an array that the arrangement leaves idle. The
hardware drives it to 1 and holds that array cleared.

Read with the port assignment above, the selector rows give these
operations:

- **2x2**: each array reads its own weight port and its own input port.
  This gives four independent 64 x 64 products.
- **4x1**: arrays 0 and 1 both read W0.P1, and arrays 2 and 3 both read
  W1.P1. Each array reads a different input port. The result is one
  weight tile times four different activation tiles (if the host puts the
  same weights in W0 and W1).
- **1x4**: the dual of 4x1. Arrays 0 and 2 read I0.P1, and arrays 1 and 3
  read I1.P1. Each array has its own weights.
- **3x1 / 1x3**: the same as 4x1 / 1x4 with one array switched off.
- **2x1**: array 0 is chained into array 1, and array 2 into array 3. This
  gives two 64 x 128 arrays, each with one weight stream across 128
  columns.
- **1x2**: array 0 is chained into array 2, and array 1 into array 3. This
  gives two 128 x 64 arrays.
- **1x1**: all chains are closed. The result is one 128 x 128 array fed by
  W0.P1 (rows 0-63), W1.P1 (rows 64-127), I0.P1 (columns 0-63) and I1.P1
  (columns 64-127).

**Chained timing.** An array that receives one operand through a neighbour
gets that operand 64 cycles late, because it has crossed 64 PEs first. The
operand that comes straight from a bank must therefore also start 64 cycles
late. Take array 1 in 1x1 as an example: its weights arrive through array 0,
so its column stream from I1 starts 64 cycles after array 0's. The
controller derives these late starts from the group selectors (see
`arman_controller`).

## 3. Memory layout and host interface

The host and the off-chip DRAM are not part of this design. They reach the
accelerator through the top-level `h_*` ports.

- **Operand banks.** Writing with `h_bank` = 0/1/2/3 selects W0/W1/I0/I1.
  - A word holds 64 signed 8-bit values, one per array lane.
  - Port P*p* of a bank streams the half of the bank that starts at
    *p* x DEPTH/2. Address base + k holds reduction index k.
  - In a weight bank, a word is one column of the weight tile (one value
    per row).
  - In an input bank, a word is one row of the activation tile (one value
    per column).
  - With DEPTH = 32768 words of 64 bytes, each bank is 2 MB and the four
    operand banks make 8 MB. K can be up to 16384.
- **Output banks.** Word c of O0 (O1) holds output column c of the top
  (bottom) pair, one 32-bit value per row. Columns 0-63 come from the left
  array and columns 64-127 from the right array. In a chained arrangement
  the same word holds the corresponding column of the wide array. The host
  reads a word with `h_obank`/`h_oaddr`, one cycle later on `h_ordata`.

## 4. A job, cycle by cycle

1. While `busy` is low, set `cfg_arrangement` and `cfg_k` and pulse `start`.
   The controller latches both. A new arrangement takes effect only here,
   between jobs.
2. **CLEAR**: 1 cycle. All accumulators and operand registers are zeroed.
3. **COMPUTE**: K + 5B cycles. Each used bank port reads K words, starting
   at cycle 0 or cycle B (late start). The length covers the worst case:
   - a late start (B cycles);
   - one cycle of SRAM latency;
   - the diagonal of a 2B x 2B array.

   Unused ports return zeros, and zeros add nothing to the sums. Idle arrays
   stay in CLEAR.
4. **DRAIN**: 2B cycles. In drain cycle d:
   - the right edge of array 1 (3) carries output column 2B-1-d of its pair,
     written to port 1 of O0 (O1);
   - if group 3 (8) sends array 0 (2) straight to the output bank, its
     column B-1-d is written to port 0 in the first B cycles.
5. `done` pulses **K + 7B + 2 cycles after `start`** (K + 450 at B = 64).
   At the paper's 800 MHz clock, a K = 1024 tile on the full array takes
   about 1.8 µs.

The compute and drain phases do not overlap. The controller uses the same
worst-case length for every arrangement. This keeps the control simple; it
is not cycle-optimal.

## 5. Module hierarchy

    arman_top
    ├── arman_controller        job FSM, bank read/write addresses, late starts
    ├── arrangement_decoder     arrangement -> 10 group selectors + active mask
    ├── operand_sram  x4        W0, W1, I0, I1 (one write, two read ports)
    ├── skew_buffer   x8        one per operand bank port
    ├── reconfig_interconnect   the ten Mux/DeMux groups
    ├── systolic_array x4       64 x 64 mac_pe each
    │   └── mac_pe
    └── output_sram   x2        O0, O1 (two write ports, host read port)

`arman_pkg` holds the widths (8/32 bit), the base size 64, the arrangement
enumeration, the PE modes and the selector table.

## 6. What follows the published design and what is this design's own

**Taken from the published design:**
- four arrays of 64 x 64 8-bit MACs (128 x 128 in total);
- the output-stationary dataflow;
- input SRAM on top, weight SRAM on the left, output SRAM on the right;
- two read ports per memory bank;
- the ten Mux/DeMux groups and where they sit;
- the selector table for eight arrangements;
- 8 MB of on-chip SRAM.

**Filled in by this design**, because the published description does not
give it:
- **Which bank port drives which input of groups 1, 2, 5 and 6.** The
  assignment was chosen so that the published selector rows make sense: 2x2
  gives every array its own stream, and 4x1/1x4 make two arrays share one.
- The meaning of a `-` selector (array idle).
- Signed operands.
- **The MAC's 32-bit input used as the drain chain.** The published MAC
  drawing is the weight-stationary TPU cell, but the chosen dataflow is
  output stationary.
- The skew buffers. The design names a "buffer" on the array edges but does
  not draw it.
- The memory layout (bank halves per port), the split of 8 MB into four
  2 MB operand banks, and the small separate output banks.
- The whole controller: the start/busy/done handshake, the phase lengths,
  the late-start rule, and switching arrangement only between jobs.
- Reset behaviour: asynchronous, active low.

**Not modelled:**
- The 1x2H/1x2V and 2x1H/2x1V variants. They differ only in which tiers the
  arrays sit on, so they collapse to 1x2 and 2x1 here.
- Activation, pooling and normalisation. The accelerator computes only the
  multiply-accumulate part of a layer.
- Clock generation, the 3D tiers and vias, the DRAM and the host.
- Overlapping the drain of one job with the compute of the next.
- Weight-stationary and input-stationary dataflows. They were only
  alternatives in the design-space study; the accelerator is output
  stationary.
- Separate control logic per arrangement. The original describes control
  logic "for each mode"; here one controller, parameterised by the
  arrangement, serves all of them.

**Where the published drawings disagree**, this RTL follows the
interconnect drawing: weights enter from the left and activations from the
top. The arrangement sketches show the input matrix on the left instead.
That is only a naming of the two operands: swap the contents of the weight
and input banks and the hardware computes the transposed product.

## 7. Simulating

Every testbench is self-checking. Each prints one line,
`TB_RESULT checks=N failures=M`, and stops itself with a watchdog if the
design hangs. With plain Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/arman_pkg.sv \
        tb/tb_arman_top.sv --top-module tb_arman_top -Mdir obj_top
    ./obj_top/Vtb_arman_top

| testbench                  | what it shows                                                                     |
|----------------------------|-----------------------------------------------------------------------------------|
| `tb_mac_pe`                | signed accumulation, operand forwarding, clear/hold/drain                         |
| `tb_systolic_array`        | 4 x 4 array against a software matrix product, drain order, edge latency          |
| `tb_skew_buffer`           | lane i delayed exactly i cycles                                                   |
| `tb_operand_sram`          | two independent read ports, one-cycle latency, zeros when idle                    |
| `tb_output_sram`           | two write ports in the same cycle, host read-back                                 |
| `tb_arrangement_decoder`   | every selector against the published table                                        |
| `tb_reconfig_interconnect` | all 1024 selector combinations against the routing list                           |
| `tb_arman_controller`      | job latency, first-read cycle and count per port, write counts, config latching   |
| `tb_arman_top`             | all eight arrangements end to end at B = 4, with switches between jobs            |
| `tb_arman_full`            | three jobs (1x1, 4x1, 1x3) on the full 128 x 128 design with 8 MB of SRAM         |
| `tb_workload_layers`       | full-size tiles of real layer shapes against a direct convolution (see below)    |

`tb_arman_top` and `tb_arman_full` check every result word against a
reference model. That model knows, per arrangement, which port or neighbour
feeds each array. Both testbenches also count how often each mechanism
occurred, and fail if one never did:
- an arrangement switch;
- a horizontal chain;
- a vertical chain;
- a shared port;
- a direct drain through a demultiplexer;
- an idle array;
- a late-started stream.

The full-size tests take a few minutes each to compile; `tb_arman_full` then runs in seconds and `tb_workload_layers` in about a minute.

`tb_workload_layers` builds im2col operand images for three standard layer
shapes. It runs one output tile of each on the default-size design, with
random int8 data. It then compares every output with a plain nested-loop
convolution or dot product, computed without the matrix formulation.

| layer shape                                          | K    | arrangement | tile computed                       |
|------------------------------------------------------|------|-------------|-------------------------------------|
| ResNet50 conv3_x, 3x3, 28x28x128 -> 128, pad 1       | 1152 | 1x1         | 128 filters x 128 output pixels     |
| AlexNet conv1, 11x11 stride 4, 227x227x3 -> 96       | 363  | 4x1         | 64 filters x 256 output pixels      |
| DeepSpeech fully connected, 2048 -> 2048 units       | 2048 | 1x2         | 128 units x 128 time steps          |

For AlexNet in 4x1, the same 64 filters go into both weight banks, and the
four arrays take four groups of 64 pixels. For DeepSpeech in 1x2, each tall
128 x 64 array processes 64 time steps. The largest K of these networks is
9216 (AlexNet FC6), which is within the 16384 that a bank half holds. Whole
models do not fit in 8 MB: AlexNet has about 61 MB of int8 weights and
ResNet50 about 26 MB. Their layers must be streamed from DRAM one tile at a
time.

To change the size, override `B` (array side) and `DEPTH` (words per operand
bank) on `arman_top`. Everything else, including the interconnect widths,
the controller timing and the output bank depth, follows from them.
