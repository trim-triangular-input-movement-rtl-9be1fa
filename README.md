# TrIM: a convolution engine built on triangular input movement

A convolution accelerator spends most of its energy moving data, not
multiplying it. When a 3×3 kernel slides over an ifmap, each ifmap pixel
takes part in up to nine products. A weight-stationary systolic array
that reads every pixel from memory for every product pays for those nine
reads. One that first unrolls the ifmap into a matrix (im2col) pays for
the bigger memory instead.

TrIM keeps the weights still in a K×K grid of processing elements (PEs).
It then moves each ifmap pixel through the grid along three paths:

* **vertically** into the array from memory;
* **horizontally** from one PE to its left neighbour;
* **diagonally** from the left edge of one PE row, through a shift
  register, back into the row above, one ofmap row later.

Together the three paths form the triangle that gives the design its name.
With them, each pixel is read from memory about once per layer. The only
extra reads are the last K−1 pixels of each ifmap row. For a 224×224 layer
those extra reads cost about 1.8 % more memory traffic.

This repository holds synthesizable SystemVerilog for the whole engine at
the published size:

* 7 cores of 24 slices;
* each slice is 3×3 PEs, so 1512 PEs in all;
* 8-bit unsigned activations and 8-bit signed weights;
* self-checking testbenches for every level.

## Hierarchy

```
trim_engine                 top: P_N cores, control, accumulation, ofmap port
├── trim_control            layer sequencer, shared by every slice of every core
└── trim_core ×P_N          one filter against P_M ifmaps at a time
    ├── trim_slice ×P_M     one K×K convolution of one ifmap
    │   ├── trim_pe ×K·K    weight register, input muxes, multiply-add
    │   ├── trim_rsrb ×K−1  reconfigurable shift register buffer (diagonal path)
    │   │   └── trim_sub_buffer
    │   └── trim_adder_tree (K column psums → slice output)
    ├── trim_adder_tree     (P_M slice outputs → core output, pipelined)
    └── trim_psum_buffer    H_O·W_O words: accumulation across ifmap groups
```

`trim_pkg` holds the shared types and constants:

* coordinate, channel and address widths;
* `ctl_t`, the control word that runs down the pipeline with each pixel;
* small functions that place pipeline registers in the adder trees.

## The slice and its schedule

The hardest part of the design is the slice, so this section gives the
schedule in full. Once it is clear, everything else follows from it.

A slice holds the K×K weights `w[i][j]`, one per PE. Row i is called
`Row_i`, and Row_0 is the top row. The slice computes one output pixel
(r, c) per cycle, in raster order. Pixel (r, c) is taken up by Row_0 in
cycle t and by Row_i in cycle t+i. Its partial sum runs down each column,
one row per cycle. An adder tree adds the K column sums that leave
Row_{K−1} and registers the result. PE(i, j) must multiply `w[i][j]` by
the ifmap pixel (r+i, c+j).

Each PE chooses its operand with two multiplexers:

| `sel_new` | `sel_ext` | operand                                                  |
|-----------|-----------|----------------------------------------------------------|
| 0         | –         | `I_R`: what the PE to the right used one cycle earlier   |
| 1         | 1         | `I_ext`: a new pixel from memory (registered in the PE)  |
| 1         | 0         | `I_D`: a pixel from the RSRB below this row              |

Which source is right follows from where the pixel was last used.

* **Horizontal reuse (c > 0).** PE(i, j) needs (r+i, c+j). PE(i, j+1)
  used that pixel one cycle earlier, for pixel (r, c−1). So every PE
  except the rightmost takes `I_R`. Only PE(i, K−1) needs a new pixel.
* **Start of a row (c = 0).** Every PE of the row takes a new pixel.
* **Diagonal reuse.** Row_i works on ifmap row r+i. Row_{i−1} needs that
  same ifmap row when it reaches ofmap row r+1. So each pixel that leaves
  PE(i, 0) enters RSRB i and is handed back to Row_{i−1} later.
* **External fetch.** A new pixel comes from memory if any of these holds:
  * r = 0: nothing has flowed yet;
  * i = K−1: the bottom row has nothing below it;
  * c + j ≥ W_O: a row tail.

  Otherwise the new pixel comes from the RSRB as `I_D`.
* **Row tails.** Only the first W_O pixels of an ifmap row ever pass
  through PE(i, 0). The last K−1 pixels enter at the right and never reach
  the left edge, so the RSRB never holds them. They are fetched again.
  This is the 1.8 % overhead quoted above: 222·4 extra reads per 50176
  pixels.

The RSRB delay that lines the diagonal path up depends on the ifmap width.
A pixel that leaves PE(i, 0) while Row_i computes (r, c) is needed by
PE(i−1, j) when Row_{i−1} computes (r+1, c−j). Counting cycles, that is
W_I − K − 2 − j cycles later. The RSRB taps are placed at exactly those
distances.

The PE registers its external input, so memory data must arrive one cycle
before the PE uses it. `trim_slice`'s header gives the exact offsets.

Weights are loaded through the same rows. With `w_load` high, Row_0 takes
K weights from outside and each row passes its weights one row down. A
kernel therefore enters last row first and takes K cycles.

## RSRB: one buffer for several ifmap widths

A shift register whose length fits one ifmap width would be wrong for every
other width. So the buffer is a chain of sub-buffers, and a selector picks
the K tap registers at the end of one of them.

For width w, the chain up to the end of the selected sub-buffer must be
w−K−1 registers long. With the supported widths in ascending order:

* sub-buffer 0 has `SB_WIDTHS[0]`−K−1 registers;
* sub-buffer s has `SB_WIDTHS[s]`−`SB_WIDTHS[s−1]` registers.

The default widths are 16, 30, 58, 114 and 226. These are the padded ifmap
widths of VGG-16: 14, 28, 56, 112 and 224, plus 2 for the padding. In
total that is 222 registers per RSRB and 2 RSRBs per slice. The selector is
set by `cfg_w_i` when the layer starts. A width not in the list is
refused with `cfg_err`.

## Cores and the ifmap broadcast

A core holds P_M slices that all run the same schedule. Each slice sees a
different ifmap and a different kernel of the same filter. A pipelined
adder tree adds the slice outputs, so a core produces, for each pixel, the
sum over P_M ifmaps.

The P_N cores work on P_N different filters over the same ifmaps.
Memory is read once and the pixel is broadcast to every core. All slices
of all cores therefore share a single set of multiplexer selects and RSRB
selects, made by one controller.

Datapath widths:

| signal       | width              | default |
|--------------|--------------------|---------|
| PE psum      | 2B+K               | 19      |
| slice output | + ⌈log2 K⌉         | 21      |
| core output  | + ⌈log2 P_M⌉       | 26      |
| accumulator  | `ACC_W`            | 32      |

The core tree has ⌈log2 24⌉ = 5 levels. It is registered after levels 2,
4 and 5, which gives 3 stages (`TREE_STAGES`).

## Temporal accumulation and the psums buffer

A layer with M ifmaps and N filters runs in S = ⌈N/P_N⌉·⌈M/P_M⌉
computational steps:

* filter groups form the outer loop;
* ifmap groups form the inner loop.

Within a filter group, each core adds its output to the word for that
pixel in its psums buffer, a simple dual-port memory of H_O·W_O words
(224·224 = 50176 by default):

* in the first ifmap group, nothing is read back (the add uses zero);
* in the last ifmap group, nothing is written. The sum goes straight to
  the ofmap port instead.

So a layer with M ≤ P_M never touches the buffer.

## Control: steps, phases and the memory interface

`trim_control` splits each step into two phases.

1. **Weight loading** takes P_N·K cycles. Core 0, then core 1 and so on,
   receive one kernel row of all P_M kernels per cycle.
2. **Computation** takes H_O·W_O cycles, one ofmap pixel per cycle.

For each pixel the controller makes one control word (`ctl_t`). The word
holds the coordinates, buffer address, first/last flags and channel
bases. It moves down a delay line, and each consumer taps the stage that
lines up with it:

| stage    | consumer                      |
|----------|-------------------------------|
| i        | Row_i's ifmap requests        |
| i+2      | Row_i's multiplexer selects   |
| `RD_DLY` | psums buffer read             |
| `ACC_DLY`| accumulation                  |

The memory interface is a fixed-latency request port. A request in cycle t
must be answered on the input port in cycle t+1.

* **Ifmap.** `if_req_valid[i][j]` asks for pixel
  (`if_req_y[i]`, `if_req_x[i]`+j) of ifmap `if_req_m_base[i]`+m, for
  slice m. The data goes on `i_ext[m][i][j]`.
* **Weights.** `w_req_*` names a core, a kernel row and the filter and
  ifmap bases. The data goes on `w_ext[m][j]`.

In the last ifmap group, slices beyond M must add nothing. So the memory
must return zero there, for the pixels, the weights or both; the
testbenches zero both. Cores beyond N compute values that are not used,
and `of_core_valid` marks which core outputs are real.

Latency from a Row_0 request to `of_valid` is `OUT_LAT` = K+4+3 = 10
cycles. A whole layer takes

    S·(P_N·K + H_O·W_O) + (S−1)·(K−1) + OUT_LAT   cycles.

The testbenches check this count exactly. Weight requests never overlap
pixel requests, and an assertion checks this.

## Parameters (trim_engine)

| parameter     | default              | meaning                              |
|---------------|----------------------|--------------------------------------|
| `B`           | 8                    | activation and weight width          |
| `K`           | 3                    | kernel size                          |
| `PM`          | 24                   | slices per core (ifmaps in parallel) |
| `PN`          | 7                    | cores (filters in parallel)          |
| `TREE_STAGES` | 3                    | register stages in the core tree     |
| `PSUM_DEPTH`  | 50176                | psums buffer words per core          |
| `ACC_W`       | 32                   | accumulator / output width           |
| `NUM_SB`, `SB_WIDTHS` | 5, {16,30,58,114,226} | supported ifmap widths       |

## Where this design departs from the paper

* **Gap between steps.** The paper counts P_N·K + H_O·W_O cycles per step.
  This design waits K−1 more cycles after each computation phase (except
  the last). The lower PE rows are still finishing the last pixels of the
  step, and the new weights would shift over them. The cost is 2 cycles
  per step.
* **Output quantisation.** The paper returns B-bit quantised ofmaps but
  does not describe the quantiser. Here the full 32-bit sums are output.
* **Large kernels.** The paper splits larger kernels (AlexNet's 5×5 and
  11×11) into 3×3 tiles that several slices share, and adds the partial
  results at the top level. That tiling, and strides other than 1, are not
  built.
* **Padding.** Padding is not inserted on the fly. A padded layer must be
  streamed with its zero border included.
* **Off-chip memory.** The off-chip DDR memory and its controller are not
  part of the RTL. The engine's fetch ports assume the fixed one-cycle
  latency described above. The testbenches model that memory.
* **RSRB size.** The paper sizes each RSRB at W_IM registers, the widest
  ifmap width (224). The timing above needs only W−K−1 registers for the
  widest streamed width, which is 222 for 226 (224 plus padding).
* **When the psums buffer is used.** The paper says the accumulation
  logic is needed only when P_N < N. What actually makes it necessary is
  M > P_M: more than one ifmap group per filter. The buffer is used
  exactly then.
* **This design's own choices.** The paper leaves these open:
  * the RSRB sub-buffer lengths, derived from the widths above;
  * the exact select schedule;
  * the order of weight loading;
  * pipeline placement;
  * the configuration checks.

  Each file's header says which parts follow the paper.

For AlexNet's 3×3 layers (13×13, padded to 15×15), stream the ifmap with
one extra zero column as 15×16, which uses the 16-wide sub-buffer, and
discard the last ofmap column.

## Verification

Every module has its own testbench in `tb/`. Each one compares the module
against a reference model computed inside the testbench and ends with a
`TB_RESULT checks=… failures=…` line:

* `tb_trim_pe`, `tb_trim_rsrb`, `tb_trim_adder_tree` and
  `tb_trim_psum_buffer` use random stimulus against behavioural models;
* `tb_trim_slice` and `tb_trim_core` drive the datapath with the real
  controller and compare against direct convolution;
* `tb_trim_control` checks:
  * fetch counts, K·W_I + (H_O−1)·(W_I + (K−1)²) per step;
  * request order;
  * the step gap;
  * first/last flags;
  * configuration refusal;
* `tb_trim_engine` runs a reduced engine (P_M=3, P_N=2). Its layers make
  every mechanism happen at least once, and it fails if one never does:
  * diagonal, horizontal and row-tail fetches;
  * accumulation;
  * idle slices and cores;
  * every RSRB width;
  * refused configurations;
* `tb_trim_engine_full` runs the engine at its default size, with one
  layer at each of the five widths: 16, 30, 58, 114 and 226. The 226×226
  layer is the size of VGG-16's first layer;
* `tb_trim_workloads` runs two complete layers at the default size and
  checks every output pixel:
  * VGG-16 CL11: 16×16 padded, M = N = 512, 1628 steps, 356540 cycles.
    CL12 and CL13 have the same shape;
  * AlexNet CL5: 15×16, M = 192, N = 256.

Every engine test checks every output pixel against a direct convolution,
checks that each pixel arrives exactly once, and checks the layer cycle
count.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/trim_pkg.sv \
        tb/tb_trim_engine.sv --top-module tb_trim_engine -j 4
    ./obj_dir/Vtb_trim_engine

Build times and run times on an ordinary workstation:

| testbench             | build   | run        |
|-----------------------|---------|------------|
| block testbenches     | seconds | seconds    |
| `tb_trim_engine_full` | ~1 min  | ~20 s      |
| `tb_trim_workloads`   | ~20 s   | ~2.5 min   |

Run the others the same way, changing the testbench name. The testbenches
assume random initial register values, as `+verilator+rand+reset+2` gives.
The engine resets its control state and output flags, but not its
datapath registers.
