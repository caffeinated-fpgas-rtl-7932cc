# Winograd F(2x2,3x3) convolution engine for FPGA, in SystemVerilog

This is a single-precision floating-point engine for 3x3, stride-1 convolution layers. It
uses Winograd's minimal filtering algorithm F(2x2,3x3). For every 2x2 block of output
pixels it takes a 4x4 window of input `d` and a transformed filter `U`, and computes

    V = B^T d B          (input transform, additions only)
    M = U (.) V          (16 multiplications instead of 36)
    Y = A^T M A          (output transform, additions only)

`Y` is then summed over all input channels. The host computes `U = G g G^T` once per
filter `g`, so the hardware only transforms data.

The engine is one of the kernels of an FPGA back end for the Caffe framework. The kernel
holds two identical **compute units** (CUs). Each CU works on its own image and has its
own memory master port to the shared off-chip memory. Each CU has three stages that run in
turn: **input**, **compute** and **output**. The central trick is how the input transform
is split between them:

* The input stage stores the image as **4x2 tiles**: four rows by two columns. Tiles in
  one tile row do not overlap. Neighbouring tile rows share two rows. The stage applies
  the **column half** of `B^T d B` (`B^T` applied to each 2-column strip) once per tile,
  before storing it.
* Each **processing element** (PE) takes a tile and its right-hand neighbour. Together
  these form the 4x4 window `B^T d` of one output tile. The PE applies the **row half**
  (`.. B`), multiplies by `U`, applies the output transform and accumulates.

Neighbouring 4x4 windows overlap by two columns. The column half of each window is
therefore computed once and shared by two windows. It is not computed twice. Only rows are
stored twice, not columns, so the tile store is half the size of a store of full
overlapping 4x4 windows.

## The partial transform

Everything additive in the input transform is built from one 4-input, 4-output block,
`wino_pt`:

    o0 = i0 - i2     o1 = i1 + i2     o2 = i2 - i1     o3 = i1 - i3

The block applied to the four columns of `d` gives `B^T d`. The same block applied to the
four rows of that result gives `V`. The input stage has eight copies, so it transforms
eight columns (four tiles) per clock. Each PE has four copies, one per row.

The output transform uses `A^T = [1 1 1 0; 0 1 -1 -1]`:

    Z[0][j] = M0j + M1j + M2j        Z[1][j] = M1j - M2j - M3j
    Y[i][0] = Zi0 + Zi1 + Zi2        Y[i][1] = Zi1 - Zi2 - Zi3

## Data layout and one job

A CU runs one **job**: one image of one layer, or one row band of it (see below). The
host passes the job as a `job_t` struct (`rtl/wino_pkg.sv`), together with a one-cycle
`start`:

| field | meaning |
|---|---|
| `in_addr` | input, `C x H x W` fp32, rows contiguous |
| `w_addr` | transformed filters, `K x C x 16` fp32; each `U` is a row-major 4x4 |
| `out_addr` | output, `K x Ho x Wo` fp32 |
| `c`, `k`, `h`, `w` | input channels, output maps, input height and width |
| `pad` | 1: one pixel of zero padding on every side ("same" convolution) |
| `no_pad_top`, `no_pad_bot`, `in_cstride`, `out_kstride` | row bands, see below; 0 for a whole image |

All addresses are byte addresses. The CU derives these sizes (`derive_dims`):

    Ho = h + 2*pad - 2        Wo = w + 2*pad - 2
    P  = ceil(Ho/2)           output tile rows
    G  = ceil(ceil(Wo/2)/4)   groups of four output tiles per row (one per PE)
    TPR = round_up_8(4*G + 1) input tiles per tile row

`TPR` is a multiple of eight. It is also always larger than the last tile any PE needs.
Tiles past the right edge of the image hold zeros. Output pixels computed past `Ho` or
`Wo` are dropped when the output is written.

The sequence of a job is:

1. **Input stage** (`wino_input_stage`), for each channel and each tile row `p`
   (padded rows `2p .. 2p+3`):
   * It reads the rows it does not yet hold into a four-row buffer. Each row is one
     burst. A padding row is only marked as zero and is not read.
   * It then writes `TPR/4` groups of four column-transformed tiles into the tile buffer,
     one group per clock.
   * The tile with column `t` of tile row `p` of channel `c` goes to address
     `(c*P + p)*TPR + t`.
2. For each output map `k`:
   * **Compute stage** (`wino_compute_stage`): it first loads `U[k][0..C-1]` into the
     weight buffer. It then loops over `c`, `p` and `g` and issues one tile group per
     clock. PE `i` receives tiles `4g+i` and `4g+i+1`, and so produces output tile
     `(p, 4g+i)`. The PE adds the result into its partial result buffer at `p*G + g`. For
     `c = 0` it overwrites that entry instead, so no clearing pass is needed.
   * **Output stage** (`wino_output_stage`): for each output row it reads the four
     partial result buffers `G` times into a one-row output buffer. It then writes the
     row as one burst and waits for the write response.
3. `done` pulses. `cycles` holds the job's length in clocks.

A job whose sizes do not fit the buffers or the one-burst-per-row rule is refused. In
that case `done` rises with `error` set, and memory is not touched. A job is refused if
any of these holds:

* `C > MAX_C`
* `TPR > TPR_MAX`
* `C*P*TPR > TB_DEPTH`
* `P*G > PRB_DEPTH`
* `W > 256` or `Wo > 256`

## Timing

* **Compute stage:** exactly `C*P*G` issue clocks per output map. One PE would need
  `C*P*Q` clocks, so four PEs give four times the throughput. Pipeline fill and drain
  add `D = 8` clocks. Loading the weights first takes `16*C` beats plus burst overhead.
* **PE:** a five-stage pipeline (input register, row transform, multiply, `A^T`, `A`).
  The partial result buffer is written on the sixth edge after the PE accepts its input.
  The accumulate read is combinational, so one entry can be updated on consecutive
  clocks. This happens when `P*G = 1`.
* **Input stage:** `TPR/4` clocks per tile row for tiling, plus one beat per input word
  read.
* **Output stage:** `G + 1` clocks of gathering plus `Wo` beats per output row.

The stages do not overlap. The memory port carries one fp32 per beat. The stages that use
memory are therefore bound by memory bandwidth. With 13x13 layers (AlexNet),
`P*G = 14 < 16`, so loading the weights takes longer than computing.

Across the two CUs, the time for `N` images is roughly `N/2` job times.

Summing `K*C*P*G` over the 3x3 layers of the four networks the engine was evaluated on
gives these compute-stage times at 200 MHz on two CUs, memory time excluded:

| batch | compute-stage time |
|---|---|
| AlexNet, 64 images | 532 ms |
| VGG A, 32 images | 4452 ms |
| Overfeat, 64 images | 3272 ms |
| GoogleNet, 64 images | 1178 ms |

The original FPGA implementation measured roughly 1.5 to 2.5 times these figures in
total.

## Row bands: layers larger than the buffers

Most 3x3 layers of these networks hold more tiles than the tile buffer. The host then
splits a layer into **row bands**, one job each, with a one-row halo shared with the
neighbouring band. For a band:

* point `in_addr` at its first input row, and `out_addr` at its first output row;
* set `h` to the number of input rows it reads;
* set `in_cstride = H*W` and `out_kstride = Ho*Wo` of the whole layer;
* set `no_pad_top` unless the band is the first, and `no_pad_bot` unless it is the last.

`tb_wino_cu` runs a 10-row layer as two bands (output rows 0-3 and 4-9) and checks the
joined result against the whole convolution. `tb_wino_workload` splits VGG A conv5 into
two bands and Overfeat conv5 into three. With the default sizes, every 3x3 layer of
AlexNet, VGG A, Overfeat and GoogleNet fits once split into bands. Splitting over input
channels is not supported, because a job always starts its sums from zero.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| `NUM_CU` | 2 | the original design used two compute units |
| `NUM_PE` (package) | 4 | four replicated processing elements |
| `NUM_IN_PT` (package) | 8 | eight column transforms in the input stage |
| `TILE_ALIGN` (package) | 8 | tiles per row are a multiple of eight |
| `TPR_MAX` | 120 | this design: a 224-pixel row fits (VGG A conv1) |
| `TB_DEPTH` | 32768 tiles (8 Mb) | this design |
| `PRB_DEPTH` | 4096 per PE | this design: a 224x224 output map fits |
| `MAX_C` | 1024 | this design: Overfeat's widest 3x3 layer |

All buffers of one CU come to about 570 18-Kb block RAMs. The original implementation
reports 688 for one CU.

## Numerics

`fp32_add` and `fp32_mul` are combinational IEEE-754 single-precision units:

* rounding is to nearest, ties to even;
* subnormal inputs count as zero, and subnormal results are flushed to zero;
* infinities are handled, and any NaN comes out as the quiet NaN `0x7FC00000`.

Subtraction flips the sign bit of the second operand. The Winograd result is not bitwise
equal to a direct convolution. The rounding errors differ, and the end-to-end checks
compare against a double-precision direct convolution with a relative tolerance of 1e-5.

## Memory port

Each CU has an AXI4-style master. It uses only the signals the engine needs:

* `ar*` and `r*` for reads, `aw*`, `w*` and `b*` for writes;
* 32-bit data, INCR bursts of up to 256 beats;
* one outstanding transaction per direction.

`valid` is held stable until `ready`, and assertions in the stages check this. The
interconnect to the shared memory is not part of this RTL. At the kernel's boundary each
CU's port is a slice of the port arrays.

## Where this departs from the original design, or fills gaps

* The original memory path used wide AXI bursts managed by the OpenCL tool flow. Here a
  beat is one word, and each input or output row is one burst. That limits `W` and `Wo`
  to 256.
* The stages do not overlap, and weights are loaded for each output map.
* The following are choices of this RTL, not given by the original:
  * all buffer sizes;
  * the tile-buffer banking (eight banks by address mod 8, so four tiles are written and
    five read per clock);
  * giving output tile column `q` to PE `q mod 4`;
  * the five-stage PE pipeline;
  * overwrite-on-first-channel;
  * the job descriptor, the refusal of jobs that do not fit, and row bands.
* `A` and `G` are the standard F(2x2,3x3) matrices. `G` is used only by the host and
  the testbenches:

      G = [1 0 0; 1/2 1/2 1/2; 1/2 -1/2 1/2; 0 0 1]

* Subnormals are flushed to zero.
* Not included:
  * the host-side framework: layer dispatch, memory synchronisation and programming of
    the device;
  * the filter transform, which runs on the host;
  * other layer kernels (ReLU, pooling, fully connected);
  * the FIFO-linked "pipeline layers";
  * the platform's PCIe and memory controller logic.

## Files

`rtl/`:
* `wino_pkg.sv`: types, the job descriptor and `derive_dims`
* `fp32_add.sv`, `fp32_mul.sv`
* `wino_pt.sv`
* `wino_tile_buffer.sv`
* `wino_input_stage.sv`
* `wino_pe.sv`
* `wino_compute_stage.sv`
* `wino_output_stage.sv`
* `wino_cu.sv`
* `wino_kernel.sv` (top)

`tb/`:
* one self-checking testbench per module, `tb_<module>.sv`, and `tb_wino_workload.sv`;
* `axi_mem_model.sv`, a behavioural multi-port memory with random stalls;
* `fp_ref_pkg.sv`, reference fp32 arithmetic through double precision;
* `conv_ref_pkg.sv`, random layers, `U = G g G^T` and a direct convolution.

`tb_wino_kernel` runs both CUs at the default parameters, each on its own layer, then a
job that must be refused. It counts each mechanism (memory stalls, skipped padding rows,
tile-row padding, multi-burst weight loads, first-channel overwrite, accumulation, both
CUs busy, refusal) and fails if one never occurs. Every testbench prints
`TB_RESULT checks=N failures=M`.

To simulate with Verilator (5.x), list the packages first:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
      rtl/wino_pkg.sv tb/fp_ref_pkg.sv tb/conv_ref_pkg.sv tb/tb_wino_kernel.sv \
      --top-module tb_wino_kernel -o sim && ./obj_dir/sim

`tb_wino_workload` runs one full-depth 3x3 layer of each benchmark network on the kernel
at the default parameters, with fewer output maps. The testbench splits the layers into
row bands as a host would, and checks every output against a direct convolution:

| layer | C | size | maps run | bands | cycles | `K*C*P*G` |
|---|---|---|---|---|---|---|
| AlexNet conv5 | 256 | 13x13 | 8 | 1 | 150166 | 28672 |
| Overfeat conv5 | 1024 | 12x12 | 2 | 3 | 489313 | 24576 |
| GoogleNet 5b 3x3 | 192 | 7x7 | 8 | 1 | 58541 | 6144 |
| VGG A conv5 | 512 | 14x14 | 4 | 2 | 308640 | 28672 |

AlexNet and GoogleNet run on CU 0 and CU 1 at the same time, then Overfeat and VGG A. The
gap between the cycle counts and the compute bound is the one-word memory port: loading
`16*C` weight words per map and reading the input one word per beat.

Every simulation except the workload one finishes in well under a second of simulated
time. The kernel testbench
takes a few seconds of wall time, most of it building.
