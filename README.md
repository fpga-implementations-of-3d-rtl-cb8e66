# 3D-SIMD sparse-filter CNN processor (SFS dataflow, relative indexed CSF)

This is a processor for the convolutional (CONV) and fully connected (FC) layers
of pruned neural networks, where most filter weights are zero. It has two ideas.

* **Stacked filters stationary (SFS) dataflow.** The weights of one input
  channel stay in a local buffer while the window slides over the whole feature
  map, or over one part of it. At every window position the processor takes one
  feature value and applies it to that position's weights in **all m filters at
  once**. It adds each product into one of m output registers.
* **Relative indexed compressed sparse filter format (CSF).** For each window
  position, only the nonzero weights of the m stacked filters are stored. Each
  is stored as a pair {weight, relative filter index}. A pointer per position
  gives how many pairs there are. Zero weights cost neither storage nor cycles.
  A position with no nonzero weights costs one cycle. An absolute filter index
  is recovered by a running sum, so no index lookup tables are needed.

Arithmetic is 32-bit IEEE-754 floating point. A weight is a signed power of two,
so every multiplication is an exponent shift. Every accumulation goes through a
pipelined float adder that takes 11 cycles.

The RTL is in `rtl/`, one module per file. The testbenches are in `tb/`. The
default parameters build the VGG16-sized CONV processor:

| parameter | default | meaning |
|---|---|---|
| `K` | 3 | kernel size; a window has K x K positions |
| `M` | 512 | m, filters processed together (stacked filters) = output registers |
| `NPE` | 8 | PE lanes: weights loaded, shifted and accumulated per cycle |
| `LAT` | 11 | float adder latency in cycles |
| `WDO_MAX`, `HDO_MAX` | 14, 14 | largest output division; global output buffer = 14*14*512 = 100352 words |
| `WDI_MAX`, `HDI_MAX` | 16, 16 | largest input division, `(Wdo-1)*S+K` for stride 1 |
| `FIFO_DEPTH` | 16 | computation FIFO depth, in rows |

## What is computed

For a division of the output feature map, the processor computes a plain convolution without bias:

    out[j][y][x] = sum over chi < C, r < K, c < K of  W[chi][r][c][j] * in[chi][S*y + r][S*x + c]

with `0 <= j < m`, `0 <= x < Wdo` and `0 <= y < Hdo`. Large layers are cut into
**feature divisions**: tiles of the output map, each `Wdo x Hdo`. A tile needs
an input tile of `Wdi = (Wdo-1)*S + K` by `Hdi = (Hdo-1)*S + K`. The host runs
the processor once per tile. Cutting the feature map is preferred to cutting
the filter set into groups. Filter groups would repeat the feature loads, and
they would split the stacked filters, which is where the sparsity pays.
For example, VGG16's 224x224 first layer is cut into 16x16 tiles of 14x14
outputs each.

An FC layer is the case with `Wdo = Hdo = 1`, where the "window" is the whole input.

    out[j] = sum over p of W[p][j] * in[p]

Here p runs over all `W*H*C` inputs.

## The CSF encoding

Take one input channel and one window position p, which is kernel row r and
column c. The m stacked filters have m weights there, `W[r][c][0..m-1]`. Only
the nonzero ones are stored, in increasing filter order. Each is stored as:

* **virtual weight**, 8 bits: bit 7 is the sign, bits 6:0 a two's complement
  shift s. The value is `(-1)^sign * 2^s`.
* **relative filter index**, `log2(m)` bits: the number of zero weights skipped
  since the previous stored weight of this position.

The **relative column pointer** `ptr[p]` is the number of stored weights at
position p. Decoding is a prefix sum that restarts at every position:

    abs[0] = rel[0]
    abs[k] = abs[k-1] + 1 + rel[k]

Example, m = 8, weights at p: `[0, +2, 0, 0, -1, 0, 0, +0.5]`

    ptr[p] = 3
    stored = {+2^1, rel 1}, {-2^0, rel 2}, {+2^-1, rel 2}
    abs    = 1, 4, 7

A dense stack has every relative index 0 and `ptr[p] = m`.

In the filter buffers the stored pairs of position p are packed `NPE` to a row,
starting at row `p * (M/NPE)`. Each entry is `{wcode[7:0], rel[IDX_W-1:0]}`,
with lane 0 in the low bits. Position p therefore takes `ceil(ptr[p]/NPE)` rows.

## One 3D-SIMD computation

A "3D-SIMD computation" is the work for one output position (y, x) of one
input channel. It updates all m outputs at that position.

    for p in 0 .. K*K-1:                      (weight_fetch)
        v = window[p]                         (window_registers)
        for each row of position p:           (local_filter_buffer, NPE pairs per cycle)
            abs = prefix sum of rel           (index_accumulator)
            prod[k] = v shifted by w[k]       (shift_mul, NPE lanes)
            push {mask, abs, prod}            (computation_fifo)
    PE lanes: acc[abs[k]] += prod[k]          (pe_array: fp_add_pipe, LAT cycles)

Within one position the absolute indices are strictly increasing. The NPE lanes
of a row therefore never write the same register. Across positions the same
output j recurs, usually within fewer than `LAT` cycles. The PE array handles
this with a **pending bit per output register**. The bit is set when an addition
into the register starts, and cleared when its sum is written back. A row whose
indices hit a pending register waits at the head of the computation FIFO. This
is a hazard stall. Meanwhile the weight fetch keeps filling the FIFO, and
stalls only when the FIFO is full.

Before a computation, the m output registers are cleared for the first input
channel. For later channels they are reloaded with the partial sums of (y, x)
from the global output feature buffer. After the computation the registers are
written back. Both transfers move `NPE` words per cycle. The global output
buffer thus accumulates over the channels.

Timing of one computation, with no stalls:

| step | cycles |
|---|---|
| partial-sum reload (channels after the first) | `M/NPE + 2` |
| fetch | one cycle per row, `sum_p ceil(ptr[p]/NPE)`, plus one cycle per empty position |
| drain | `LAT + 2` |
| store | `M/NPE` |

A product reaches its register `LAT+1` cycles after its row enters the main
process unit. Throughput is at most `NPE` nonzero multiply-accumulates per cycle.

## Layer sequence (center controller)

Per input channel `chi = 0 .. C-1`:

1. The controller raises `ch_req` with `ch_idx = chi` and waits for `ch_ready`.
   While `ch_req` is high, the host writes:
   * the channel's input tile into the global feature buffer, at word address
     `row*WDI_MAX + col`;
   * the CSF rows into the global filter buffer (`filt_*`);
   * the K*K pointers (`ptr_*`).
2. The pointers are copied to the local filter buffer in one cycle. Only the
   rows in use are copied, one per cycle.
3. For each output row y, the line buffer is loaded with input rows
   `y*S .. y*S+K-1`. Then, for each x:
   * the K x K block at the head of the line buffer is captured into the window
     registers;
   * one 3D-SIMD computation runs;
   * the line buffer shifts left S times.

After the last channel `done` pulses. Results are read through the NL unit
(ReLU when `cfg_relu` is set) with `out_rd_en/out_rd_addr`. The data comes one
cycle later, NPE words at address `(y*Wdo + x)*(M/NPE) + r`, holding outputs
`r*NPE .. r*NPE+NPE-1`.

Padding is not generated on chip: the host writes a padded input tile. Loading
the next channel does not overlap computation.

## FC mode

With `mode_fc` set at `start`:

1. The registers are cleared.
2. The host streams rows into the main process unit through the `fc_*`
   valid/ready port. Each row carries `{first, value, lane mask, NPE weights,
   NPE relative indices}`, in the same encoding as above. The rows of one input
   value share `fc_v`, and `fc_first` marks the first of them.
3. The host pulses `fc_end` after the last row.
4. The processor drains, writes the m results to output position 0, and pulses
   `done`.

The layer can have any number of inputs, and up to `M` outputs. No filter
buffer is used.

## Modules

| file | block |
|---|---|
| `sfs_pkg.sv` | fp32 adder (`fp_add`) and shift multiply (`fp_shift_mul`) functions, types |
| `shift_mul.sv` | one lane's multiplier: feature x virtual weight by exponent addition |
| `fp_add_pipe.sv` | one lane's float adder, `LAT` cycles, one operation per cycle |
| `index_accumulator.sv` | relative to absolute filter indices, NPE lanes per cycle |
| `computation_fifo.sv` | FIFO of product rows (also used as a skid buffer) |
| `pe_array.sv` | NPE adder lanes, m output registers, pending bits, bulk transfer port |
| `main_process_unit.sv` | index accumulator + shift multipliers + computation FIFO + PE array |
| `weight_fetch.sv` | issues the rows of one 3D-SIMD computation from the local filter buffer |
| `local_filter_buffer.sv` | current channel's CSF rows and pointers |
| `global_filter_buffer.sv` | host-written staging copy of the next channel's CSF data |
| `global_feature_buffer.sv` | one input channel of the tile |
| `line_buffer.sv` | K input rows, shifting left |
| `window_registers.sv` | K x K window of the current computation |
| `global_output_buffer.sv` | partial and final outputs, NPE words per row |
| `center_controller.sv` | channel / row / column sequencing, CONV and FC modes |
| `nl_relu.sv` | ReLU (or bypass) on the output read path |
| `sfs_processor.sv` | top level |

The `ev_*` outputs of the top are one-cycle event strobes for counting:

* `ev_fifo_stall`: the computation FIFO was full;
* `ev_hazard_stall`: a hazard stall;
* `ev_zero_skip`: an empty window position was skipped;
* `ev_psum_reload`: partial sums were reloaded.

## Number handling

* **Addition.** `fp_add` rounds to nearest even. Denormal inputs and results
  are flushed to zero. An overflow gives infinity. A NaN result is the quiet NaN
  `7FC00000`. An exact cancellation gives +0.
* **Multiplication.** `fp_shift_mul` adds the weight's shift to the exponent
  and xors the signs. A result that underflows becomes zero, and one that
  overflows becomes infinity. A zero or denormal feature gives zero.
* **Adder timing.** The adder is one combinational stage followed by `LAT-1`
  register stages. A synthesis flow with register retiming is expected to
  balance it. A vendor floating-point core with the same latency can replace it.

## Choices made here and departures from the published architecture

The published description fixes:

* the block structure and the SFS loop order;
* the CSF fields and their decoding by accumulation;
* shifts instead of multiplications;
* 32-bit floats with 11-cycle adds;
* 8 PEs and m = 512;
* the 100352-word output buffer;
* the two-way transfer between the output registers and the global output buffer;
* the FC streaming mode.

Everything else was chosen for this RTL:

* **Relative index meaning.** The relative index counts the zeros skipped, so
  `abs = prev + 1 + rel`. This is the reading under which a dense filter stack
  has every relative index 0, as the architecture drawing shows.
* **Pointer meaning.** The pointer is a count per position. The drawing's
  pointer row reads "0 m ... m m", which looks like a list with a leading zero.
  The count meaning is the one used by the description of the computation.
* **Weight code.** The 8-bit code is one signed power of two. A multi-term
  shift code (sum of several shifted values) would need more adders per lane.
* **Computation FIFO.** The drawing has one FIFO, and one PE array, per window
  position, K*K of each. Here a single FIFO of NPE-wide rows feeds NPE shared
  adder lanes, and positions pass through one after another. The adder rows
  labelled "output feature offset" under the output registers are not modelled
  separately.
* **Hazard rule.** The drawing gives no rule for read-after-write hazards on
  the output registers. Here a pending bit per register stalls a whole row.
* **Own formats.** The widths, handshakes, memory layouts and host protocol
  are this design's own.
* **Not built.** The pooling unit and the output data formatter appear in the
  architecture only as names. Their function is not specified, so they are not
  built. External memory is represented by the host ports.

## How the evaluated networks map onto the default build

| network and layers | fits? | why |
|---|---|---|
| VGG16, all CONV layers | yes | 3x3, stride 1; 14x14-output tiles need a 16x16 input, 512 filters and 100352 words |
| AlexNet CONV3 to CONV5 | yes | 3x3, 13x13 outputs, 384 filters at most |
| LeNet FC1 and FC2 | yes | FC mode, 500 and 10 outputs |
| AlexNet CONV1 and CONV2, LeNet CONV1 and CONV2 | no | 11x11 and 5x5 kernels; they need an instance with `K` = 11 or 5 |

Measured cycle counts at the default build come from `tb/sfs_workloads_tb.sv`.
The random weights have the stated densities. The counts include the host
writing each channel into the global buffers at one word or one row per cycle.

| run | cycles | notes |
|---|---|---|
| VGG16 CONV5-3 tile (14x14 outputs, 512 filters, 35% dense), 4 input channels | 240k | about 60k cycles per channel, about 4.3 nonzero MACs per cycle on 8 lanes |
| LeNet FC1 (800 inputs, 500 outputs, 8% dense) | 8.5k | |
| LeNet FC2 (500 inputs, 10 outputs, 20% dense) | 2.7k | |

In FC2 the two or so weights of each input hit the same 10 registers again and
again. The run is limited by hazard stalls on the 11-cycle adder, not by weight
bandwidth.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=F` and stops with `$finish`.

The testbenches that need float references import `tb/tb_fp_pkg.sv`. That
package does its own double-to-single rounding, independent of the RTL.

Example with plain Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module sfs_processor_tb \
        rtl/sfs_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/sfs_processor_tb.sv
    ./obj_dir/Vsfs_processor_tb

`sfs_processor_tb` runs the whole processor at a reduced size: m = 32, 4 lanes,
a 4x4 tile. It runs three operations:

* a 3-channel CONV tile with stride 1;
* a 2-channel tile with stride 2 and ReLU;
* an FC layer.

It compares every output with an integer reference convolution. All values are
small integers times powers of two, so every float sum is exact. It also
requires each mechanism to have occurred at least once:

* a full computation FIFO;
* a hazard stall;
* a skipped empty position;
* a partial-sum reload;
* line-buffer shifts;
* stride 2;
* ReLU clamping;
* FC mode.

`sfs_processor_full_tb` does the same with every parameter at its default:

* 2 channels of a 14x14 tile with 512 filters;
* a 7x7 tile with stride 2;
* an FC layer.

It takes a few seconds. `sfs_workloads_tb` runs the workload-shaped cases
listed above, also at the default parameters.

Each block also has its own testbench, `tb/<module>_tb.sv`. These tests check:

* the adder against a rounded double reference, including its 11-cycle latency;
* the index accumulator on random sparse columns;
* the weight fetch under random backpressure, including its cycle count;
* the controller's address and event sequences, using models of the rest of
  the chip.
