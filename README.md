# TrIM: a triangular-input-movement systolic array for convolution

A 2-D convolution with a K x K kernel uses every ifmap activation in up to
K*K different sliding windows. Systolic arrays that turn the convolution
into a matrix product (im2col / "Conv-to-GeMM") read each activation from
memory up to K*K times; row-stationary arrays read it once but then keep
copies in per-PE scratch pads. TrIM ("Triangular Input Movement") reads
each activation from main memory essentially once and gets all of its K*K
uses by passing it between neighbouring processing elements (PEs) of a
K x K weight-stationary array:

1. the value enters a PE from memory ("vertical" injection),
2. it moves right-to-left along the PE row, one PE per cycle, serving K
   consecutive windows of the same output row,
3. at the left edge it enters a shift register buffer (SRB), waits there,
   and is handed diagonally up to the row above exactly when that row
   starts the next output row and needs it again.

The three legs form a right triangle, hence the name. Partial sums flow
down the columns, an adder tree adds the K column results, and after a
K-cycle fill one output activation leaves the array every cycle, so every
PE performs a multiply and an add (2 operations) in almost every cycle.

This repository holds synthesizable SystemVerilog for that array, its
sequencer, a fully-connected (FC) mode and kernel tiling (kernels of any
size up to 11 x 11 run on the 3 x 3 array as several passes), with
self-checking testbenches.
The RTL follows the published description of the TrIM dataflow; where that
description is silent the choices made here are listed in
[Departures and choices](#departures-and-choices).

## The array

```
 weights enter the top row; every PE also has its own memory read port

 row 0:            PE(0,0) <-- PE(0,1) <-- PE(0,2)     inputs move right to left
                      ^           ^           ^        diagonal: from row 1's chain
 row 1:  SRB0 <--  PE(1,0) <-- PE(1,1) <-- PE(1,2)
                      ^           ^           ^        diagonal: from row 2's chain
 row 2:  SRB1 <--  PE(2,0) <-- PE(2,1) <-- PE(2,2)
                      |           |           |        psums (and weights) go down
                   [            adder tree          ] --> one output per cycle
```

(K = 3 shown. Which SRB stage or lower-row PE feeds each diagonal input
depends on the ifmap width; see below.)

### Processing element (`trim_pe`)

Each PE holds four registers: the weight `W`, the last external input
`I_ext`, the input it used in the current cycle (`I_L`, which is what its
left neighbour, the SRB and the row above see), and its partial sum. Two
2-to-1 multiplexers choose the input of the cycle: first external versus
diagonal, then that versus the right neighbour's `I_L`. The PE computes

    psum_out <= psum_in + W * input        I_L <= input

An idle select keeps `I_L` unchanged. Weights form a vertical shift chain:
with `w_load` high every PE takes the weight of the PE above, and the top
row takes the external weight port, so K load cycles fill the array.

### Shift register buffers (`trim_srb`)

SRB(i-1) sits left of PE(i,0), for i = 1..K-1. Every cycle it shifts in the
`I_L` of PE(i,0). For an ifmap of width W_I the TrIM dataflow needs
W_I - K - 1 stages, which is the register count of its cost model. This RTL
builds the SRBs for the widest ifmap it supports (W_I_MAX = 256, so 252
stages) and picks the stages to tap at run time, so one array serves every
width from K+1 to 256.

### Adder tree (`trim_adder_tree`)

A balanced tree of K-1 adders over the K bottom-row psums, followed by one
output register.

## How the diagonal taps are found

This is the part of the design that is least obvious, and the one to
understand before changing anything.

Number the output positions of an H_O x W_O ofmap in raster order,
s = h*W_O + w. Array row i works on output (h, w) in cycle s + i: it holds
columns w .. w+K-1 of ifmap row h+i, and its psums meet those of the rows
above one cycle after they were made. Along a row, PE(i,j) uses column
w+j; the next cycle it uses column w+1+j, which its right neighbour used
this cycle. So within one output row only the rightmost PE ever needs a new
value.

When row i-1 starts output row h (w = 0) it needs columns 0..K-1 of ifmap
row h+i-1. Row i used exactly that ifmap row for output row h-1, one output
row earlier. Think of row i's PEs and its SRB as one chain

    position e:  0          1            ...  K-1       K        K+1  ...
    holds:       I_L(i,K-1) I_L(i,K-2)   ...  I_L(i,0)  SRB[0]   SRB[1] ...

in which every value moves one position per cycle. Working through the
cycle counts, the value that PE(i-1,j) needs is always at chain position

    e = W_I - 2 - j

independent of h and w. For W_I >= 2K+1 these are SRB stages
W_I-K-2-j, i.e. the last K stages of a W_I-K-1 deep buffer. For narrower
ifmaps (W_I <= 2K) some of the K positions are the PEs of the row below,
so those diagonal links start at PEs rather than at the SRB. The array
implements the whole chain and selects position W_I-2-j with a multiplexer
whose select comes from the controller. That select is the ifmap width, or
the window width in a tiled run.

The same chain also serves the rightmost PE of row i-1 during the rest of
its output row: for w >= 1 it needs column w+K-1, which is at the same
position, but only if row i shifted that column into its chain, which
happened only for columns 0..W_O-1 (the leftmost PE of row i only ever
holds those). The last K-1 columns of every ifmap row therefore never
reach the SRB and are read from memory again by each of rows 0..K-2. With
the narrow PE-sourced taps only w = 1 is still in reach. This is the whole
of TrIM's memory overhead.

## The schedule (`trim_controller`)

For each row i and output (h, w) the controller chooses every PE's source:

| row | output position | PEs j < K-1 | PE K-1 |
|-----|-----------------|-------------|--------|
| K-1 (bottom), any h; and any row for h = 0 | w = 0 | memory | memory |
| same | w > 0 | right | memory |
| i < K-1, h > 0 | w = 0 | diagonal | diagonal |
| same | w = 1 | right | diagonal |
| same | 2 <= w <= W_O-K and W_I > 2K | right | diagonal |
| same | otherwise | right | memory |

Rows that have no output to work on are idle: row i during the first i
cycles and after its last output. A memory read for PE(i,j) at (h, w)
fetches ifmap[h+i][w+j]. The controller issues the read one cycle before
the value is multiplied, so the PE's `I_ext` register doubles as the read
data register; the select is registered and arrives with the data.

The controller keeps a position counter for row 0 and delays it by i
cycles for row i, rather than a global time and row counter; its
testbench checks the result against the global-time form of the schedule
cycle by cycle.

Sequence of one run: `start` samples the mode and sizes; K cycles of
weight loading read kernel rows K-1, K-2, ..., 0 (the first row read ends
up in the bottom PE row); then H_O*W_O + K cycles of computation; `done`
pulses once the last output has left the adder tree. A tiled run (below)
repeats the load and computation once per tile before `done`.

### Fully-connected mode

With `mode = MODE_FC` the array behaves like a plain weight-stationary
array: every PE takes a new value from memory every cycle, no horizontal or
diagonal movement and no SRB use. PE(i,j) reads element i*K+j of input
vector v (`in_rd_row` = v, `in_rd_col` = i*K+j), and each cycle one K*K
element dot product with the stored weights leaves the adder tree.

### Other kernel sizes: tile passes (`trim_tile_acc`)

A K_E x K_E kernel with K_E != K is cut into T x T tiles of K x K,
T = ceil(K_E/K); a 5 x 5 kernel on the 3 x 3 array takes four passes. The
ofmap is H_O x W_O = (H_I-K_E+1) x (W_I-K_E+1). Pass (a, b) loads the
kernel block whose top-left element is (a*K, b*K), and runs the array over
the ifmap window that starts at the same offset and is (H_O+K-1) x
(W_O+K-1) large. Each pass is an ordinary run of the schedule above on that
window, and its W_O+K-1 width is what selects the SRB taps.

When K_E is not a multiple of K, the last tiles stick out past the kernel
and the last windows stick out past the ifmap. The controller forces the
weights outside the kernel to zero (`wt_mask`), so the weight memory does
not need padding. It also does not issue the reads that would fall outside
the ifmap. Every such input position only meets zero weights, on its way
right and diagonally up, so the PE can keep whatever its input register
holds. The same mechanism runs kernels smaller than K (1 x 1, 2 x 2) as a
single padded pass.

`trim_tile_acc` adds the passes together. It has a buffer of 32-bit words
with one entry per output. The first pass writes it, the middle passes add
into it, and during the last pass the sum with the buffered value goes
straight out. The output stays in raster order and there is one output per
cycle. A single-pass run (K_E = K) bypasses the buffer and adds no cycle.

## What it costs and how fast it runs

For an H_I x W_I ifmap and K x K kernel (stride 1, no padding):

* memory reads of inputs: H_I*W_I + OV, with
  OV = (W_I-K-1)(K-1)(H_I-K) for W_I < 2K and (K-1)^2 (H_I-K) otherwise;
* latency: K + H_O*W_O cycles from the first multiply until the last
  output is registered (plus K weight-load cycles before it);
* throughput per PE: 2*H_O*W_O / (K + H_O*W_O), which tends to 2;
* registers (in activation-sized words): 4 per PE, W_I-K-1 per SRB, one in
  the adder tree. The RTL's SRBs are sized for W_I = 256.

Simulated results, all equal to the formulas above:

| K | ifmap | outputs | memory reads | cycles | ops/cycle/PE |
|---|-------|---------|--------------|--------|--------------|
| 3 | 5 x 5 | 9 | 29 | 12 | 1.50 |
| 3 | 16 x 16 | 196 | 308 | 199 | 1.97 |
| 3 | 256 x 256 | 64516 | 66548 | 64519 | 2.00 |
| 5 | 16 x 16 | 144 | 432 | 149 | 1.93 |
| 5 | 256 x 256 | 63504 | 69552 | 63509 | 2.00 |
| 7 | 16 x 16 | 100 | 580 | 107 | 1.87 |
| 7 | 256 x 256 | 62500 | 74500 | 62507 | 2.00 |

Tiled runs cost T^2 passes, each with K weight-load cycles and about
K + H_O*W_O compute cycles. Examples on the 3 x 3 array:

| K_E | ifmap | passes | outputs | memory reads | cycles |
|-----|-------|--------|---------|--------------|--------|
| 5 | 12 x 12 | 4 | 64 | 445 | 283 |
| 7 | 16 x 14 | 9 | 80 | 1164 | 787 |
| 11 | 40 x 40 | 16 | 900 | 17753 | 14523 |
| 5 | 256 x 256 | 4 | 63504 | 260061 | 254043 |
| 7 | 256 x 256 | 9 | 62500 | 574488 | 562567 |

Compared with an array built for the larger kernel (the K = 5 and K = 7
rows of the first table), tiling costs about T^2 times the cycles and
3.7 to 7.7 times the memory reads. It is a way to run an occasional
larger layer, not a replacement for the matching array size.

Synthesis of the default `trim_top` (K = 3, W_I_MAX = 256) gives about
4700 flip-flop bits, of which 4032 are the two 252-stage, 8-bit SRBs. The
tile-sum buffer adds a 253 x 253 x 32-bit memory (about 2 Mbit), which in
practice would be an SRAM macro.

## Interface of `trim_top`

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | one-cycle pulse; samples `mode`, `ifmap_h`, `ifmap_w`, `fc_vectors`, `kernel_size` |
| `mode` | in | `MODE_CONV` or `MODE_FC` |
| `ifmap_h`, `ifmap_w` | in | H_I (K_E..256) and W_I (K_E+1..256) |
| `kernel_size` | in | K_E, 1..11; K for an untiled run |
| `fc_vectors` | in | number of input vectors in FC mode |
| `busy`, `done` | out | run in progress; one-cycle end pulse |
| `wt_rd_en`, `wt_rd_row`, `wt_rd_col` | out | read K weights of one kernel row, from column `wt_rd_col` on |
| `wt_rd_data[K]` | in | those weights, same cycle; values past the kernel edge are ignored |
| `in_rd_en/row/col[K][K]` | out | one read request per PE |
| `in_rd_data[K][K]` | in | the requested values, same cycle |
| `out_valid`, `out_data` | out | ofmap activations in raster order |

Memory reads are combinational (data in the cycle of the request); a
memory with a read register would need the controller to request one cycle
earlier. Activations and weights are 8-bit signed, partial sums and
outputs 32-bit signed (set in `trim_pkg`). An assertion in the controller
rejects unsupported sizes at `start`.

## Files

| file | content |
|------|---------|
| `rtl/trim_pkg.sv` | sizes, widths, data types, select and mode encodings |
| `rtl/trim_pe.sv` | processing element |
| `rtl/trim_srb.sv` | shift register buffer |
| `rtl/trim_adder_tree.sv` | column adder tree with output register |
| `rtl/trim_array.sv` | K x K PEs, SRBs, all links and diagonal tap selection |
| `rtl/trim_controller.sv` | weight loading, input schedule, read requests, tile loop, valid/done |
| `rtl/trim_tile_acc.sv` | sum of the tile passes |
| `rtl/trim_top.sv` | controller + array + adder tree + tile accumulator |
| `tb/trim_*_tb.sv` | one self-checking testbench per module |
| `tb/trim_harness.sv`, `tb/trim_workload_tb.sv` | K = 3, 5, 7 on 16..256 ifmaps, a 226 x 226 plane, and 5 x 5 / 7 x 7 kernels tiled on the 3 x 3 array |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`; it also has a cycle watchdog. With Verilator 5, from the
repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/trim_pkg.sv tb/trim_top_tb.sv --top-module trim_top_tb -o sim
./obj_dir/sim
```

Replace `trim_top_tb` by any other testbench name. `trim_top_tb` runs the
design at its default parameters: the 5 x 5 example, the boundary widths
K+1, 2K and 2K+1, non-square ifmaps, an FC batch, a switch back to
convolution, kernels of 1, 2, 5, 6, 7 and 11 as tile passes (with junk
weights past the kernel edge), and full 256 x 256 ifmaps with 3 x 3 and
5 x 5 kernels; it checks every output against a
direct convolution, the read count and the latency, and that every input
path (memory, right, diagonal from an SRB, diagonal from a PE), idle PEs,
re-fetches, weight loading, both modes, tile passes, zeroed padding
weights and skipped padding reads actually occurred. It runs in about two
seconds. `trim_controller_tb` compares the schedule with the
global-time form cycle by cycle; `trim_array_tb` compares the array with
an independent model under random selects for several widths.

To change the kernel size, override `K` on `trim_top`
(`trim_top #(.K(5))`); `W_I_MAX` and `H_I_MAX` set the largest ifmap. Wider
data types are changed in `trim_pkg`.

## Departures and choices

* **Run-time ifmap width.** The dataflow is defined for an SRB of exactly
  W_I-K-1 stages whose last K stages feed the row above. Here the SRB is
  built for the widest ifmap and the taps are selected at run time. A
  design for one fixed width is the same circuit with the multiplexer
  replaced by wires. The extra multiplexers (K per row pair, up to 255
  inputs each) are this design's cost, not part of the published register
  count. The published suggestion for networks with several ifmap widths
  is to cut the SRB into groups, one per width, and route the last K
  stages of each group to the PEs. That is this multiplexer restricted to
  the few widths a given network uses.
* **End of the schedule.** Written as a global-time loop, the published
  schedule would give row 0 a diagonal input at t = H_O*W_O, one cycle
  after its last output, because its "new output row" test comes before its
  "finished" test. That cycle produces nothing; here row 0 is idle then.
* **Weight order.** The kernel rows are read bottom row first, so that after
  K top-to-bottom shifts PE row r holds kernel row r. The description only
  says that rows of K weights enter at the top, one per cycle.
* **Idle PEs** hold their input register. The description marks such cycles
  idle without saying what the PE does.
* **Widths, reset, memory interface, start/done handshake, FC vector
  layout** are not specified by the dataflow and are chosen here as listed
  above.
* **Tiling.** The published description says only that a larger kernel is
  split into K x K tiles, that the tile convolutions are summed, and that
  padded tiles may pause PEs. The pass order, the on-chip sum buffer, the
  weight masking and the skipping of reads past the ifmap edge are this
  design's choices. So is the use of the same mechanism for kernels
  smaller than K. The largest kernel, 11 x 11, is also a choice.
* **Supported sizes**: stride 1, no padding, W_I >= K_E+1 (at least two
  output columns), H_I >= K_E. The window width W_I-K_E+K must not exceed
  256. Zero padding, if wanted, is supplied by the memory side as a larger
  ifmap.

## Not included

* Multiple ifmap channels and filters: the array computes one 2-D plane
  per run; summing the M channel planes of a filter and iterating over
  filters is left to the surrounding system.
* Strides other than 1 (for example the stride-4 11 x 11 first layer of
  AlexNet).
* Main memory and any on-chip buffering in front of the read ports.
* Bias, non-linear activation and pooling.
