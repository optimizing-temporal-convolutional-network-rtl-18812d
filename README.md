# A convolution engine for Temporal Convolutional Networks

Temporal Convolutional Networks (TCNs) process time series with stacks of
one-dimensional convolutions. Unlike the image CNNs that most FPGA
accelerators are tuned for, their layers mix very different kernel sizes
(1 to 24 taps here), large and growing dilations (up to 512 in WaveNet-style
networks) and strides of 1 or 2. An accelerator whose datapath is shaped
around a fixed 3x3 or 5x5 window wastes most of its multipliers on such
layers.

This SystemVerilog describes a convolution accelerator, the *Convolution
Specific Processor* (CSP), that avoids the problem by giving each DSP
multiplier a whole kernel instead of one tap. A DSP spends `kernel_size`
cycles on one output sample. Four DSPs work side by side on four
neighbouring output samples of the same feature pair. A grid of such
four-DSP units covers many input and output features at once. Because the
per-sample cost is the number of taps, kernel size, dilation and stride only
change the address sequence. They never leave multipliers idle. The design
follows the TCN extension of the NEURAghe accelerator for Xilinx Zynq
devices. Its default size is the 12 x 4 matrix (48 units, 192 multipliers)
built on a Z-7020.

## The building block: a Sum-of-Products unit

A Sum-of-Products unit (`sop`) holds four MAC cells (`mac_dsp`), each shaped
like a DSP48 slice:

* an input register stage;
* a product register;
* a 48-bit accumulator whose feedback input is either its own value or zero.

All four cells receive the same weight tap `W[i]` in a cycle. Cell `j`
receives sample `x[a + (4n+j)*stride + i*dilation]`, so the four cells compute
windows `4n .. 4n+3` of the output. A tap counter loaded from the kernel size
marks the first tap, which selects zero as the accumulator feedback and so
starts a new window with no idle cycle. It also marks the last tap, whose
result leaves the cell three cycles later. One unit therefore produces four
output samples every `kernel_size` cycles for any kernel size.

`mac_matrix` arranges `NCOLS x NROWS` units:

* A column shares one input feature: its four samples per cycle are broadcast
  down the column.
* A row builds one output feature.
* Every unit has its own weight stream, the kernel of its feature pair.

All units run in lock step from one valid bit, so all 4 x NCOLS x NROWS
results of a group appear in the same cycle.

## Feeding four windows per cycle: the memory organisation

The hard part of the design is supplying, in every cycle and for every
column, four samples that lie `stride` apart. Each column has its own
activation module (`act_mem_module`) made of 8 independent 1024 x 16-bit banks,
each the size of a RAMB18 block. Sample `a` is stored in bank `a mod 8`, row
`a / 8`.

The four addresses of a cycle are `a, a+s, a+2s, a+3s`. Their banks are
distinct for s = 1, 2 and 3, so all four reads complete in one cycle. With
only four banks, stride 2 would already collide: samples 0 and 4 share a
bank. Dilation does not matter here, because it shifts all four addresses
alike. Stride 1..3 is therefore the supported range. A larger stride still
computes correctly but may collide. A collision is flagged (STATUS bit 16,
plus an assertion), and the lower lane wins the bank.

The other regions are organised as follows:

* **Weight memory** (`weight_memory`): one 1024 x 16 bank per unit. All
  kernels of a run sit at the same offset `w_base`, so one broadcast address
  `w_base + i` serves the whole matrix. Two weight DMAs write the banks
  through a flat address `(r*NCOLS + c)*1024 + word`. DMA 0 has priority.
  When both write the same bank in one cycle, DMA 1 is held for a cycle.
* **Output memory**: `2*NROWS` modules (`out_mem_module`), each 2048 x 64 bits.
  A 64-bit word holds the four results of one group, lane 0 in bits 15:0.
  In a run, one half of the modules is read as *partial results* and the
  other half receives the outputs. The `swap` flag exchanges the halves,
  so the output of one run becomes the partial input of the next without a
  copy:
  * `swap = 0`: row `r` reads module `r` and writes module `NROWS + r`;
  * `swap = 1`: the reverse.

At the defaults, the on-chip storage is:

| region      | organisation               | capacity |
|-------------|----------------------------|----------|
| activations | 12 modules x 8 x 1024 x 16 | 192 kB   |
| weights     | 48 banks x 1024 x 16       | 96 kB    |
| outputs     | 8 modules x 2048 x 64      | 128 kB   |

## One engine run

`conv_engine` holds the sequencer, the matrix, one `shift_adder` per row and
the four address generators:

* `activation_source`
* `weight_source`
* `partial_source`
* `output_sink`

A run computes `rows_active` output features from `cols_active` input
features over `out_len` output samples:

1. **Bias read** (3 cycles): when `bias_en` is set, the bias of row `r` is
   read from weight bank `(r, 0)` at `bias_addr`.
2. **Issue**: for each group `n` of four windows, and each tap `i` in
   `0 .. kernel_size-1`, one cycle:
   * the activation source requests `act_base + (4n+j)*stride + i*dilation`
     for lanes `j = 0..3`;
   * the weight source requests `w_base + i`;
   * at `i = 0`, the partial source reads word `pr_base + n` of each row's
     partial module.

   Lanes beyond `out_len` are not requested and contribute zero.
3. **Reduction**: when a group leaves the matrix, each shift adder adds
   lane by lane:
   * the NCOLS unit results;
   * the partial word, if `partial_en` is set;
   * the bias.

   The output sink writes the 64-bit result to `os_base + n` of the row's
   output module.

The arithmetic is fixed point with `shift` fraction bits. Samples and weights
are 16-bit signed, so a product has `2*shift` fraction bits. Partials and bias
are aligned by `<<< shift`. The sum is shifted back by `>>> shift` and
saturated to 16 bits:

    out = sat16( ( sum_c SoP[c] + (partial << shift) + (bias << shift) ) >>> shift )

The partials wait in an 8-entry FIFO per row. They are read at the first tap
of a group and consumed when that group's results arrive. If a result group
finds the FIFO empty, STATUS bit 17 records an underflow.

**Run time.** From the start pulse to `done` a run takes

    kernel_size * ceil(out_len / 4) + 11 cycles

The 11 cycles break down as:

* 3 for the bias read;
* 1 for the source register;
* 1 for the BRAM;
* 3 for the DSP stages;
* 1 for the shift adder;
* 1 for the sink;
* 1 for the done pulse.

The matrix is busy on every issue cycle whatever the kernel size, dilation
or stride. The testbenches check this formula.

### Layers larger than the matrix

A layer with `Cin` inputs and `Cout` outputs is covered by runs over
`ceil(Cout/NROWS)` row groups and `ceil(Cin/NCOLS)` column groups:

* The first column group of an output group sets `bias_en`.
* Each later one sets `partial_en` and flips `swap`.

Time is tiled as well. A run reads at most
`(4*ceil(out_len/4)-1)*stride + (K-1)*dilation + 1` samples per feature from
one activation module (8192 samples). Consecutive tiles overlap by the
receptive field `1 + (K-1)*dilation`. A time step of a streaming TCN is the
special case `out_len = 1`. *Sample batching* (collecting B new samples
before running the layer) is simply a larger `out_len`. It amortises the
weight loading over more outputs.

## Moving data: DMAs and the crossbar

Three DMA engines talk to external memory through simple request/grant ports,
`ext_*[2:0]`, which stand in for the Zynq high-performance AXI ports:

* `ext_*[0]` and `ext_*[1]`: `wdma` instances. Each 64-bit beat is split into
  four weights written to consecutive flat weight addresses. The two DMAs run
  concurrently into the weight memory.
* `ext_*[2]`: `adma`. It loads or stores 64-bit words through the crossbar.

The crossbar (`xbar`) gives two masters the word ports of all activation and
output modules:

* master 0 is the ADMA;
* master 1 is the processor path `host_*`.

Different modules are served in the same cycle. On a collision master 0 wins.
Read data returns one cycle after the grant. Local word addresses are:

| bits  | meaning                                        |
|-------|------------------------------------------------|
| 23    | 0 = activation modules, 1 = output modules     |
| 22:11 | module (column, or output module 0..2*NROWS-1) |
| 10:0  | 64-bit word in the module (samples 4w..4w+3)   |

The engine and all DMAs can be active at once. Double buffering is done by
the software picking base addresses in different halves of the memories for
consecutive runs. The hardware imposes no ordering.

## Programming model

A scheduler processor drives the CSP through `csp_regs`. Its register bus is
`reg_en`, `reg_we`, a word index `reg_addr` and `reg_wdata`. Read data is
available one cycle later. `irq` rises while any sticky done bit is set.

| index | register                                                            |
|-------|---------------------------------------------------------------------|
| 0     | CTRL (write): start bits. 0 engine, 1 WDMA0, 2 WDMA1, 3 ADMA          |
| 1     | STATUS: 3:0 busy, 11:8 sticky done, 16 bank conflict, 17 partial underflow; write 1 to clear |
| 2..5  | kernel_size, dilation, stride, out_len                              |
| 6..10 | act_base, w_base, bias_addr, pr_base, os_base                       |
| 11    | flags: 13:8 shift, 2 swap, 1 partial_en, 0 bias_en                  |
| 12,13 | rows_active, cols_active                                            |
| 16-18 | WDMA0 ext byte address, local flat weight address, length in beats  |
| 20-22 | WDMA1, same layout                                                  |
| 24-27 | ADMA ext address, local word address, length, direction (1 = store) |

A typical layer step has five parts:

1. Program the WDMAs and the ADMA, then start them.
2. Program the engine registers for the tile already on chip, then start it.
3. Wait for the done bits.
4. Store outputs with the ADMA.
5. Flip `swap` for the next column group.

## What follows the source design and what is this design's own

These parts follow the source design:

* The grid of four-DSP Sum-of-Products units, one DSP per kernel.
* The DSP pipeline with its zero/feedback selection.
* 16-bit samples and 48-bit accumulators.
* Shift adders that add SoP rows, partial results and bias.
* Programmable activation, weight and partial sources and an output sink.
* 8 RAMB18 banks per activation module, for conflict-free strides up to 3.
* One weight bank per SoP.
* Two weight DMAs and one activation DMA.
* A crossbar shared with the scheduler.
* Memory-mapped registers.
* The 12 x 4 default and the 16/64-bit data widths.

The source design gives the role of most blocks, but not their cycle-level
behaviour. The following are this design's own choices:

* the sequencer and its exact timing;
* the fixed-point shift and saturation;
* the bias location in weight bank `(r,0)`;
* the partial-result FIFO;
* the `swap` scheme for the output halves;
* the register map;
* the crossbar address map and priority;
* the request/grant DMA ports in place of AXI, with one beat in flight.

Known departures and omissions:

* Only one-dimensional feature sections are generated. The source design
  also fetches two-dimensional sections, so that the same engine runs image
  CNNs. That address walk is not built.
* The DMA ports are not AXI. Each DMA keeps one beat in flight, so its
  bandwidth is set by the memory latency rather than by bursts.
* These parts are outside this RTL:
  * the scheduler (a RISC-V microcontroller with its instruction and data
    memories);
  * its firmware, which splits layers into runs and double-buffers them;
  * the ARM host;
  * the AXI interconnect;
  * DDR.

  They appear only as the register bus, the `host_*` port and the `ext_*`
  ports. Batch normalisation, ReLU, residual sums and gated activations
  are left to the processors, as in the source design.
* The output memory has no write arbitration between the engine port and
  the crossbar port. Software must not write the same word from both sides
  in one cycle.
* The other matrix shapes of the source design are parameter settings:
  * 11 x 5 on a Z-7020: `NCOLS=11`, `NROWS=5`;
  * 9 x 10 on a ZU3EG: `NCOLS=9`, `NROWS=10`.

  They are not simulated at those sizes.

## Files

Source files (`rtl/`), one module per file:

* `tcn_pkg.sv`: widths, `ce_cfg_t` run configuration, DMA descriptor, `sat16`.
* `mac_dsp.sv`, `sop.sv`, `mac_matrix.sv`, `shift_adder.sv`: the compute path.
* `activation_source.sv`, `weight_source.sv`, `partial_source.sv`,
  `output_sink.sv`: address generators.
* `act_mem_module.sv`, `weight_memory.sv`, `out_mem_module.sv`: memories,
  written as arrays.
* `conv_engine.sv`: sequencer plus the above.
* `wdma.sv`, `adma.sv`, `xbar.sv`, `csp_regs.sv`, `csp_top.sv`: data movement,
  control, top level.

Testbenches (`tb/`):

* There is one self-checking testbench `tb_<module>.sv` per module. Each
  computes expected values independently of the RTL. Where the timing is
  defined, it also checks the cycle count.
* `ddr_model.sv` is a behavioural external memory used by the DMA and
  top-level tests. It has a fixed latency and pseudo-random stalls.
* `tb_csp_top.sv` runs a complete two-run layer at the default 12 x 4 size,
  with 15 input features, 3 outputs, kernel 3, dilation 2 and stride 2. It
  covers:
  * DMA loads of weights, bias and activations from the DDR model, with both
    weight DMAs in parallel;
  * a first run with bias;
  * a second run with partials and `swap`;
  * an activation load overlapping the engine;
  * a store back to DDR and a read through the processor port.

  It checks every output against a reference convolution and the run time
  against the formula above. It also counts DDR stalls, weight-port stalls
  and DMA/engine overlap, and fails if any of these never occurs.

* `tb_tcn_workloads.sv` runs layer shapes of three TCN benchmarks through
  `csp_top` on a 4 x 2 matrix, with 6 input and 2 output features, so each
  layer takes two chained runs:
  * ECG classification: kernel 24 / 16 / 8, dilation 1 / 4 / 8,
    B = 1, 8 and 348;
  * Res-TCN action recognition: kernel 8, stride 2, B = 1 and 144;
  * WaveNet note transcription: kernel 2, dilation 512, B = 1 and 504,
    plus a 1x1 convolution.

  It checks all outputs and every run's cycle count.

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
A watchdog ends a hung simulation with a failure.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/tcn_pkg.sv \
        tb/tb_conv_engine.sv --top-module tb_conv_engine -Mdir obj_conv
    ./obj_conv/Vtb_conv_engine

Replace the module name for other tests. Most block testbenches override
parameters to a smaller matrix to stay quick. `tb_csp_top` uses the defaults
and takes a few minutes to build.
