# 3D-TrIM convolution array in SystemVerilog

3D-TrIM is a weight-stationary systolic array for CNN convolutions. Its goal is
to read every ifmap (input feature map) activation from memory exactly once.
Like its predecessor TrIM, each K x K slice of PEs moves activations in a
triangle: they arrive from memory, shift right to left across a PE row, and
come back diagonally to the row above once the convolution window has slid
down one ifmap row. The diagonal return goes through an **Input Recycling
Buffer (IRB)**. The IRB has two parts:

* shift registers, which hold the activations that leave the leftmost PE column;
* a few **shadow registers**, which hold the last K-1 activations of each ifmap
  row. Those activations never reach the leftmost column, so TrIM had to read
  them from memory again.

The array is organised in 3D. There are P_I cores. Each core convolves one
ifmap (one input channel) with P_O kernels, one per slice, so the P_O slices of
a core share one IRB. P_O adder trees then add the results of slice j over all
cores, which gives ofmap j. The main configuration is P_I = P_O = 8 and K = 3:
576 PEs, one 8-bit multiply-accumulate each per cycle.

This RTL follows the block structure, register placement and dataflow of the
3D-TrIM paper (Sestito, Abdelmaksoud, Agwa, Prodromakis). The paper describes
the architecture but does not publish its RTL. The paper leaves out the exact
cycle timing, the control schedule, bit widths and the memory interface. This
design supplies them and says so wherever it does (see "Where this design
chooses").

## Hierarchy

```
trim3d_top            P_I cores, P_O adder trees, one controller
 ├─ trim_ctrl         schedule: weight load, window issue, fetches, selects
 ├─ trim_core  x P_I  one ifmap, P_O slices, one shared IRB
 │   ├─ trim_slice x P_O   K x K PEs + adder tree over the bottom row
 │   │   ├─ pe  x K*K
 │   │   └─ adder_tree (N = K)
 │   └─ irb                K-1 shift registers + (K-1)x(K-1) shadow registers
 │       └─ irb_shift_reg x (K-1)
 └─ adder_tree x P_O (N = P_I)
trim_pkg              widths, types (act_t, wgt_t, psum_t, act_src_e), latencies
```

## The slice and its PE

A PE (`pe.sv`) holds these registers:

* an A register (the activation from memory);
* a weight register;
* a product register;
* a psum register;
* a to-left register.

Two multiplexers pick the activation multiplied in the current cycle. The first
chooses between the A register and the IRB. The second chooses between that
result and the right-hand neighbour. The pick is encoded as `act_src_e`:
`SRC_EXT`, `SRC_IRB` or `SRC_RIGHT`.

Timing for an activation selected in cycle t:

* The to-left register shows it in cycle t+1. From there it goes to the left
  neighbour, or into the IRB if the PE is in column 0.
* The product register holds it in t+1.
* The psum register holds `psum_in + product` in t+2.

In a slice (`trim_slice.sv`), data moves as follows:

* Weights enter the top row and move down one row per cycle while `w_shift` is
  high, then stay.
* Psums move down.
* The K psums of the bottom row go through a registered adder tree.

Because psums move down one row per cycle, **PE row r works on a given window
one cycle after row r-1**. This skew runs through the whole schedule.

## Schedule of one convolution

The controller (`trim_ctrl.sv`) runs stride-1 convolutions on a W x H ifmap,
with no padding. Padding, if wanted, is supplied by the memory. A run has
three phases:

1. **Weight load, K cycles.** `w_shift` is high and `w_row` counts K-1 down to
   0. Memory must present that kernel row at the top of every slice.
2. **Window issue.** One window per cycle in raster order: output rows
   o = 0..H-K, columns x = 0..W-K. There are no bubbles, not even between
   output rows.
3. **Drain.** The pipeline empties, then `done` pulses.

A window issued at cycle t is multiplied by PE row r at cycle t+r+1. PE row r
fetches from memory one cycle earlier, into its A register. The activation
source for PE(r,c) at window (o, x) is:

| | first output row (o = 0), or bottom PE row | later output rows, rows 0..K-2 |
|---|---|---|
| x = 0, every column | memory | IRB shift register (tap c) |
| x > 0, columns 0..K-2 | right neighbour | right neighbour |
| x in 1..W-2K+1, column K-1 | memory | IRB shift register (tap K-1) |
| x in W-2K+2..W-K, column K-1 | memory | IRB shadow register |

Two facts follow from this table:

* The bottom PE row, which always works on the newest ifmap row, reads memory.
* Every other activation is reused. Over a run the memory interface sees each
  of the W x H activations exactly once.

For the 8x8 example of the paper, the table reproduces its cycles 6 to 13
source by source. The controller testbench checks all 72 PE sources in those
cycles.

## The Input Recycling Buffer, in detail

Row r of the IRB (r = 0..K-2) serves PE row r of every slice in the core. It is
filled from PE row r+1 of slice 0. This works because row r+1 sees, during
output row o, exactly the ifmap row that row r needs during output row o+1.

### Shift registers and their taps

`irb_shift_reg` is a plain shift register of W_MAX-K-1 stages. This is the
paper's W_I-K-1, sized for the widest ifmap. Each cycle it takes the value of
the to-left register of PE(r+1,0), and stage 0 holds the newest value.

To see where the taps go, follow one activation:

* PE(r+1,0) uses column j of an ifmap row at cycle u.
* The activation is in stage 0 at u+2.
* PE(r,c) needs it again W-K+1 windows later, so W-K+1 cycles after PE(r+1,…)
  worked on the same window shift. At the first window of a row, that means
  PE(r,c) wants stage **W-K-2-c**. For PE(r,K-1) in later windows the same
  formula holds with c = K-1.

So the taps depend only on the ifmap width. `cfg_w` selects them through a
multiplexer, which is the reconfiguration the paper describes. The smallest
width for which every tap exists is 2K+1 (7 for K = 3).

### Shadow registers

The last K-1 activations of an ifmap row (columns W-K+1..W-1) never reach
column 0, so the shift register never sees them. Shadow chain r is a (K-1)-deep
shift chain that catches them:

* **Capture.** While PE row r+1 is in its last K windows of an output row
  (`shd_en[r]`), the chain shifts in the activation that PE(r+1,K-1) uses.
  * For the bottom chain, this is the A register of the bottom-right PE.
  * For the other chains, it depends on the output row. In output row 0 it is
    that PE's A register. Afterwards it is the diagonal value PE(r+1,K-1) gets
    from the chain below.

  This is how end-of-row activations climb from one shadow chain to the next.
  It is the "23, 24 shifted between shadow registers" of the paper's example.
* **Read-back.** In the last K-1 windows of every later output row
  (`shd_sel[r]`), PE(r,K-1) reads the oldest entry instead of the shift-register
  tap.

The reads and the captures of one output row overlap by one cycle. A single
shift enable of K cycles serves both: the first shift discards a value, and the
next K-1 shifts bring in the new row's activations while the old ones are
consumed oldest first.

## Interface of `trim3d_top`

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset.

* **Run control.**
  * `start` with `cfg_w`, `cfg_h` starts a run.
  * The sizes must satisfy 2K+1 ≤ W ≤ W_MAX and K ≤ H ≤ H_MAX. A start outside
    these limits is ignored.
  * `busy` is high during the run. `done` pulses at the end.
* **Weights.** In a cycle with `w_shift` high, `w_data[i][j][c]` must hold
  element (`w_row`, c) of the kernel for core i, slice j.
* **Ifmap.** In a cycle with `if_rd[r][c]` high, `if_data[i][r][c]` must hold
  element (`if_y[r][c]`, `if_x[r][c]`) of ifmap i in that same cycle. The read
  is combinational, and the PE registers the value. All cores share the request
  lines, each reading its own ifmap.
* **Ofmap.** While `ofmap_valid` is high, `ofmap[j]` is output (`ofmap_y`,
  `ofmap_x`) of filter j, summed over P_I channels. The array produces one value
  per filter per cycle, in raster order.

Latency: the first ofmap value appears 2K+5 cycles after the cycle in which
`start` is sampled (11 for K = 3). This is K weight cycles, the skew, the
two-stage PE and the two adder trees. A run takes about K + (W-K+1)(H-K+1) +
K + 6 cycles.

Convolutions larger than one pass are mapped onto the array from outside it:

* **More channels or filters.** Channels go in groups of P_I and filters in
  groups of P_O. The psums of different channel groups are added outside the
  array.
* **Kernels larger than 3x3.** These use kernel tiling. For example, a 5x5
  kernel is zero-extended to 6x6 and cut into four 3x3 sub-kernels, each on its
  own core. The core holding sub-kernel (dy, dx) reads the ifmap shifted by
  (dy, dx), and the adder trees add the four parts. The first (W-4) x (H-4)
  outputs are then the 5x5 convolution.

## Parameters

| parameter | default | origin |
|---|---|---|
| `P_I` (cores, ifmaps in parallel) | 8 | paper |
| `P_O` (slices per core, filters in parallel) | 8 | paper |
| `K` (kernel size of a slice) | 3 | paper |
| `W_MAX`, `H_MAX` (largest ifmap) | 227 | this design: the largest ifmap evaluated (AlexNet); the paper does not give the built size |
| activation / weight / psum width (`trim_pkg`) | 8 / 8 / 32 signed | this design |

## Where this design chooses

The paper gives the blocks and the dataflow but not the following, which are
this design's own:

* **Bit widths.** Signed 8-bit activations and weights, 32-bit psums.
* **Reset.** Asynchronous, active low.
* **Stride and padding.** Stride 1 only. Padding must be supplied by memory.
* **Memory protocol.** Requests are made per PE position, with the read data
  back in the same cycle. The weight-load order is the bottom kernel row
  first, and loading does not overlap computation.
* **Cycle timing of the IRB.**
  * The PE schedule is exactly that of the paper's 8x8 example.
  * The shadow registers here load one cycle after the PE has used the value.
    So the shadow contents drawn in the example for a given cycle appear one
    cycle later in this design.
  * The shadow registers take the A register of the rightmost PE, that is, the
    activation after it has been registered. The paper does not say whether
    that value is taken before or after the register.
* **Adder trees.** Binary trees with a single output register.
* **Channel-group accumulation.** Adding psums across passes is left outside
  the array, because the paper does not describe it.
* **Unsupported strides.** Strides other than 1 are not supported, so AlexNet's
  first layer (11x11, stride 4) cannot be run as such.

The 22 nm implementation, the 1 GHz clock and the area and power figures
belong to the physical design and are not represented here.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. It also has a watchdog.

* `pe_tb`: random sources, weights and psums, checked against a register-level
  model of the PE.
* `adder_tree_tb`: trees of 3 and 8 inputs, one-cycle latency.
* `irb_shift_reg_tb`: tap positions for every width from 7 to W_MAX, and
  freezing.
* `irb_tb`: the taps each cycle; filling and reading both shadow chains; the
  move from the lower chain to the upper one.
* `trim_slice_tb`: the slice on its own, with random use of the diagonal input.
  Checks the convolution results and their latency.
* `trim_ctrl_tb`: compares every PE source with the paper's 8x8 example (cycles
  6 to 13). Also checks the weight-row sequence, that each activation is
  fetched once, and the output order.
* `trim_core_tb`: one core with three slices under the controller. Every slice
  psum is checked against a reference convolution.
* `trim3d_top_tb`: 2 cores x 2 slices on ifmaps of 8x8, 11x9, 7x3 and 16x16.
  * Checks every ofmap value, fetch-once, one output per cycle and the
    latency.
  * Counts how often each path is used: memory, right-to-left, shift-register
    reuse, shadow reuse, shadow-to-shadow move, weight load and width change.
    A path that is never used counts as a failure.
* `trim3d_full_tb`: the default 576-PE configuration on three layer tiles:
  * a VGG-16 14x14 layer (8 channels x 8 filters, padded to 16x16);
  * the AlexNet 5x5 layer through kernel tiling (31x31 padded);
  * the VGG-16 first layer at 226x226, the widest shift-register setting.

  All values are compared with a direct convolution, about 400,000 checks.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/trim_pkg.sv tb/trim3d_top_tb.sv \
          --top-module trim3d_top_tb -y rtl
./obj_dir/Vtrim3d_top_tb
```

Replace the testbench name to run another one. The full-size testbench builds
in under a minute and simulates its three layers in a few seconds.
