# A hybrid-convolution Inception module in SystemVerilog

A CNN layer built from Inception modules has several parallel branches: 1x1, 3x3 and 5x5
convolutions plus a pooling branch. Each branch sees the same input map and their outputs are
stacked along the channel axis. Computing every branch the same way wastes multipliers. For
small kernels, Winograd minimal filtering needs the fewest multiplies per output. For large
kernels on large maps, convolution in the frequency domain (FFT, pointwise products, inverse FFT)
is cheaper. The design here gives each branch its own engine, picked per branch at elaboration
time, and runs the branches side by side on private buffers. The one algorithm choice built in
as the default is 3x3 by Winograd F(4x4,3x3) and 5x5 by FFT. That is the combination the source
work picks for one of the middle Inception modules of a FaceNet (Inception V2) face-recognition
network on a Xilinx VU9P.

This RTL covers one configurable Inception module and everything inside it. It does not cover
the rest of the network, the host and DDR path, or the design-time search that picks each
branch's parallelism. Those appear only as parameters and as load and read ports.

## Number format

All feature maps, weights and biases are 16-bit signed fixed point with 8 fraction bits (Q7.8).
The source work uses 16-bit fixed point; the 8/8 split is this design's choice. Products are
summed at full precision in 48-bit accumulators. Each output is rounded once, at the end:
`(acc + 128) >>> 8`, then the bias is added and the result is saturated to 16 bits. That step is
`requant()` in `hec_pkg`. Conventional and Winograd results are therefore bit-exact against an
integer reference. FFT results carry a rounding error of a few LSB (see below).

## Package and top level

`hec_pkg` holds the types (`data_t`, `acc_t`, the complex `cdata_t`, and the enum `alg_e` =
`ALG_CONV`/`ALG_WINO`/`ALG_FFT`), the Winograd matrices, the twiddle generator and `requant`.

`inception_module` is the top. Its default parameters:

| parameter | default | meaning |
|---|---|---|
| `C_IN, H, W` | 16, 24, 24 | input channels and map size |
| `C1, C3, C5` | 16 | output channels of the 1x1, 3x3 and 5x5 branches |
| `HAS_CCCP, HAS_CONV3, HAS_CONV5, HAS_POOL` | 1 | which branches exist |
| `CONV3_ALG, CONV5_ALG` | `ALG_WINO`, `ALG_FFT` | engine per branch |
| `WINO_M` | 4 | Winograd output tile, 4 (F(4x4,3x3)) or 2 (F(2x2,3x3)) |
| `FFT_N, FFT_CORES` | 32, 4 | FFT tile size and 1D cores per array |
| `PAR_1, PAR_3, PAR_5` | 4 | output channels computed at once per branch |

The 24x24 map with a 32-point FFT comes from the source work. The channel counts and
parallelism are this design's choices: the source gives no layer sizes.

Operation:

1. Load the input map through `in_we/in_addr/in_data`, with address `(c*H + y)*W + x`.
2. Load weights through `wt_we/wt_sel/wt_addr/wt_data` and biases through `b_we/b_sel/b_addr/b_data`.
   `wt_sel` picks the branch: 0 = 1x1, 1 = 3x3, 2 = 5x5.
3. Pulse `start`. `busy` stays high until `done`, and `branch_busy` shows each branch.
4. Read the concatenated result at `out_addr`, with `out_data` valid one cycle later.
   The channel order is 1x1, 3x3, 5x5, pool.

Inside, a controller walks four states: split, run, combine, done.

- **Split.** `split_input` copies the input map, one word per cycle, into every present
  branch's private buffer at once.
- **Run.** All branches start together. The controller waits until every present branch
  has finished.
- **Combine.** `combine_output` copies each branch's output buffer into the module output
  buffer at that branch's channel offset, skipping branches that are absent.

With the defaults, one full operation takes 82,952 cycles. That is 9,216 split cycles, the
FFT branch's run, which is the longest, and 36,864 combine cycles.

## Weight formats (done offline)

The engines take weights already transformed, the way a deployment tool would prepare them once.

- **1x1 branch, and any branch with `ALG_CONV`:** raw kernels at `((k*C_IN + c)*K + i)*K + j`.
- **Winograd branch:** `U = G g Gᵀ`, a (M+2)x(M+2) tile per (k, c). The address is
  `((k*C_IN + c)*T + a)*T + b` with T = M+2. The values are in Q7.8. G contains fractions, so
  for F(4x4,3x3) U is exact only when the raw kernel is a multiple of 1/576. The testbenches use
  such kernels to get exact references.
- **FFT branch:** `conj(FFT2(w padded to N x N))`, one complex (re, im) 16-bit pair per
  frequency bin. The address is `((k*C_IN + c)*N + u)*N + v`, with re in `wt_data[31:16]`.
  Conjugating the kernel spectrum turns the circular convolution into the correlation a CNN
  layer computes.

## Winograd branch

`wino_branch` cuts the padded input (1 pixel of zero padding, so the output is "same" size)
into overlapping (M+2)x(M+2) tiles with stride M. It feeds `winograd_pe` one tile of one channel
per cycle.

`winograd_pe` works in four steps:

1. It applies `Bᵀ d B` (`wino_input_transform`, shifts and adds only).
2. It multiplies the result point by point with PAR_K pre-transformed kernels.
3. It **accumulates in the transformed domain** over all input channels (`in_first` clears the
   sums, `in_last` ends the run).
4. It applies `Aᵀ X A` once (`wino_output_transform`) and requantises.

Accumulating before the output transform is this design's choice. It costs one output transform
per tile instead of one per tile and channel. Each transformed input tile is reused by all PAR_K
kernels.

The branch takes `ceil(K_OUT/PAR_K) * ceil(H/M)*ceil(W/M) * C_IN + 1` cycles. With the defaults
that is 2,305 cycles. It does 36 multiplies per 16 outputs, against 144 for direct 3x3 convolution.

## FFT branch

This is the hardest part to follow. Its parts:

- `fft1d` is a combinational radix-2 decimation-in-time N-point core with 40-bit complex words.
  Twiddles are Q1.14 and come from a constant function, a Taylor series, so no table file is
  needed. For the inverse (`inv = 1`) it uses conjugate twiddles and halves every stage, so the
  total scale is 1/N.
- `fft2d` is the row array (FFT_CORES cores) → transpose matrix → column array
  (FFT_CORES cores). In each cycle the row array transforms FFT_CORES rows, which are written
  into the transpose matrix. Then the column array reads FFT_CORES columns per cycle and writes
  them back. `done` comes `2N/FFT_CORES + 1` cycles after `start`. The transpose matrix doubles
  as the output.
- `fft_conv_engine` runs `fft2d` on each input channel and multiplies its spectrum with PAR_K
  kernel spectra. One spectrum row comes per cycle over `krow_idx/krow`, which the caller answers
  combinationally. The engine adds the products into a per-kernel **partial-sum buffer**
  (N x N complex per kernel). Only after the last input channel does it run one inverse 2D FFT
  per kernel. Then it emits the valid part of each result row by row and requantises it with
  the bias. Deferring the inverse transforms until all channels are summed saves `C_IN - 1`
  IFFTs per output map.
- `fft_branch` places each H x W channel, with (K-1)/2 rows and columns of zero padding, into an
  N x N tile. It holds the kernel spectra in its own memory and writes the H x W outputs back.
  The tile must satisfy `H + K - 1 <= N` (an assertion checks this). For 24x24 with 5x5 this is
  28 <= 32.

Timing:

| step | cycles |
|---|---|
| one input channel | `2N/CORES + N + 3` (16 + 32 + 3 = 51 at the defaults) |
| one inverse transform plus readout per kernel | `2N/CORES + N + 2` |
| whole branch | `G*(C_IN*(2N/CORES+N+3) + PAR_K*(2N/CORES+N+2) + 2)`, with G = ceil(C_OUT/PAR_K) |

**Precision.** The datapath is 40 bits. The twiddles are 14-bit, and rounding happens per
stage. Against a double-precision reference, the outputs differ by at most 3 LSB of Q7.8 in all
tests, including the full-size run. The testbenches allow 3 LSB.

## 1x1 / conventional branch and pooling

`conv_branch` is a plain loop nest over (output-channel group, y, x, input channel). For each
input channel it feeds a K x K window to `conv_engine`, which does PAR_K dot products in one
cycle and accumulates them. Zero padding is `(K-1)/2`, and stride is a parameter. This engine is
used for the 1x1 branch, and for 3x3 or 5x5 when `ALG_CONV` is chosen. An example is the
"conventional" cells of the source's per-module algorithm table.

`pool_branch` takes the 3x3 max with stride 1 and pads with the most negative value, so the
padding never wins. It uses `pool_unit` and outputs one result per cycle. The GoogLeNet pooling
branch's 1x1 projection after the pool is not included. The source's module description lists
the pool branch on its own.

## Choosing a configuration

The per-branch engine is a parameter, so other modules of the network are other instances:

| module | 3x3 | 5x5 | set |
|---|---|---|---|
| Inception 2 | Winograd F(4x4,3x3) | none | `HAS_CONV5=0` |
| Inception 3a | Winograd F(4x4,3x3) | conventional | `CONV5_ALG=ALG_CONV` |
| Inception 3b | Winograd F(4x4,3x3) | FFT | defaults |
| Inception 4a | Winograd F(2x2,3x3) | FFT | `WINO_M=2` |
| Inception 3c, 4e | conventional | conventional | `ALG_CONV` for both |

The source's rule of thumb: Winograd for 3x3 at every map size, FFT for 5x5 on 24x24, and FFT
for 7x7 on maps of 12x12 and up. Only 3x3 Winograd is built. A 5x5 or 7x7 branch uses FFT or
the conventional engine. FFT needs `H + K - 1 <= FFT_N`.

The per-branch parallelism `PAR_*` stands in for the source's resource-allocation search, which
assigns power-of-two parallel factors in proportion to each branch's work. Here they are set by
hand.

## Limits and departures

- Only one Inception module is built. Deeper channel counts (32 to 128) are legal parameters,
  but the private buffers grow as `C_IN*H*W` per branch. The FFT kernel memory grows as
  `C_OUT*C_IN*N*N` complex words, which becomes impractical on-chip at 128x128 channels. The
  source streams weights from external memory; that path is not modelled.
- Memories are plain arrays with combinational reads inside the branches. A port to block RAM
  would need registered reads and one more pipeline stage in the address generators.
- Each branch has its own copy of the input. This is simple and lets the branches run fully in
  parallel, at the cost of memory.
- The FFT is fully combinational per core. It is correct, but a real implementation at 200 MHz
  would pipeline it.
- Warnings that stand: `disable iff (!rst_n)` assertions next to an asynchronous reset are
  reported as a sync/async mix. Also reported are unused high bits of the 32-bit address ports
  and deliberate width truncations in the twiddle and requantisation arithmetic.

## Simulating

Every testbench in `tb/` is self-checking. It prints `TB_RESULT checks=N failures=M` and stops on
a watchdog if the design hangs. Example, from the repository root:

```
verilator --binary --timing --assert --top-module tb_inception_module \
  -y rtl -y tb rtl/hec_pkg.sv tb/tb_ref_pkg.sv tb/tb_inception_module.sv -o sim
./obj_dir/sim
```

`tb_ref_pkg` holds the independent reference models: integer direct convolution, Winograd U
from rational G, and a double-precision DFT for the kernel spectra.

- `tb_inception_module` runs a reduced module: 4 channels, 8x8, N = 16, PAR = 2. It checks all
  1,024 outputs and counts that split, parallel run, Winograd beats, inverse FFTs and combine
  each happen.
- `tb_inception_full` runs the module at its defaults, with no parameter overrides. It checks
  all 36,864 outputs in 82,952 cycles.
- The unit testbenches cover each transform, engine and branch on random data, and check the
  documented cycle counts.
