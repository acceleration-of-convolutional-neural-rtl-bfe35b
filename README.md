# FFT-based split convolution engine

Convolving a feature map with a small kernel in the Fourier domain replaces the
sliding-window multiply-accumulate with an element-wise product of two spectra.
Done naively, the kernel must be zero-padded to the size of the whole map, so a
3x3 kernel costs as much to transform as a 224x224 image, and the whole map must
be held and transformed at once. The overlap-and-add scheme goes to the other
extreme and cuts the image into kernel-sized pieces, which makes the pieces tiny
and the overlap additions numerous.

This engine sits in between. It **splits** the input map into S x S tiles,
extends each tile by its floor(K/2)-pixel neighbourhood into an 8x8 patch (the
transform size is a parameter; 8x8 is the default), and
convolves patch by patch:

    patch  --FFT-->  P
    filter --zero-pad to 8x8, FFT-->  W          (once per filter)
    Y = sum over input channels of P (.) W       (Hadamard product)
    y = IFFT(Y), cropped to the S x S block that is exact, written at the tile's place

Each pixel of the input is read for one patch (plus the thin overlap), each
filter is transformed once, and the working set is one 8x8 patch.

The RTL is SystemVerilog (IEEE 1800-2017), synthesizable, and has been checked
against a direct spatial convolution at 14x14 (up to 512 input channels) and at
the full default size of 224x224.

## Tile geometry: why S = 6 and which 6x6 is kept

Everything in the datapath follows from one fact: an 8x8 FFT, a product and an
8x8 inverse FFT compute a *circular* convolution of the 8x8 patch with the
zero-padded kernel. With the kernel in the top-left corner,

    c[m][n] = sum_(i,j < K) w[i][j] * p[(m-i) mod 8][(n-j) mod 8]

For m >= K-1 and n >= K-1 no index wraps, so c equals the linear convolution
there. That leaves an (8-K+1) x (8-K+1) block of exact outputs per patch:
S = 6 for K = 3. The rows and columns 0..K-2 are corrupted by wrap-around and
are thrown away.

For tile (tr, tc) the patch is taken from the image with an offset of
P = floor(K/2):

    p[a][b] = x[6*tr + a - P][6*tc + b - P]      (0 outside the image)

and the kept element c[m][n], m, n in K-1..7, is output pixel

    y[6*tr + m - (K-1)][6*tc + n - (K-1)]

where the engine's output is the centred ("same") convolution

    y[r][c] = sum_(i,j) w[i][j] * x[r + P - i][c + P - j].

Neighbouring patches therefore overlap by K-1 = 2 pixels (one on each side),
and a 224x224 map needs ceil(224/6) = 38 tiles per side. The last row and
column of tiles hang over the edge; their patch reads return zero outside the
image and their out-of-range outputs are simply not written. The formula needs
K odd and K < FFT_N (an assertion in the top checks both), so S >= 2.

The numbers above are for the default 8x8 transform. The transform size is the
parameter `FFT_N`, any power of two from 4 up; the split size follows as
S = FFT_N - K + 1 and every formula above holds with 6 replaced by S and 7 by
FFT_N - 1. A 16x16 transform with K = 7 (S = 10) and a 32x32 transform with
K = 15 (S = 18) are exercised in simulation.

Note that this is a true convolution (kernel flipped), as in the textbook
definition. A CNN layer, which computes a cross-correlation, is obtained by
loading each kernel rotated by 180 degrees.

## Data flow and schedule

One 2-D transform engine (`fft2d`) is shared by all three transforms; the
sequencer (`splitconv_ctrl`) switches what feeds it and what consumes its
output through a `phase` signal:

| phase   | feeds fft2d                         | consumes fft2d output                     |
|---------|-------------------------------------|-------------------------------------------|
| FILTER  | `filter_padder` (kernel -> 8x8)     | filter-spectrum buffer                    |
| PATCH   | `patch_extractor` (tile -> 8x8)     | `hadamard_mac` (multiply, accumulate)     |
| INV     | `hadamard_mac` drain (inverse=1)    | `crop_concat` (crop, round, write back)   |

A run goes:

1. FILTER for every (output channel, input channel) pair: the kernel is padded,
   transformed, and its 64 bins stored (one 8-bin row per buffer word).
2. For every tile, row-major:
   * PATCH for every input channel. `hadamard_mac` multiplies each spectrum row
     by the matching filter-spectrum row of *every* output channel and adds it
     into that channel's accumulator (the first input channel loads instead).
     Summing over input channels in the frequency domain means one inverse FFT
     per output channel, not per channel pair.
   * INV for every output channel: the accumulator is drained through the
     inverse transform into `crop_concat`.
3. `done` pulses.

The schedule is strictly sequential; units never overlap across phases.

## Arithmetic

All spectral values are complex fixed point: 64-bit real and 64-bit imaginary
parts with 20 fractional bits (`splitconv_pkg`). Pixels and weights are 8-bit
signed integers that enter as value * 2^20.

* `fft1d` is a radix-2 decimation-in-time FFT with log2(N) pipelined
  butterfly stages (three at N = 8). Twiddles of 1 and -j are exact; the
  others are computed at elaboration as round(2^30 cos), round(2^30 sin), and
  each product is rounded back to 20 fractional bits. It does not scale.
* The inverse transform is computed as conj(FFT(conj(X))); the 1/FFT_N^2 is
  folded into the final rounding, which takes the real part, divides by
  2^(20+2*log2(FFT_N)) and
  rounds half up into a 32-bit output.
* `hadamard_mac` multiplies 64x64-bit parts and rescales by 2^-20.

The widths were chosen so that the integer result is recovered exactly. For
8-bit data and 3x3 kernels the largest spectral accumulator value is about
2^26 per input channel, so 512 channels reach 2^35 before the fractional bits,
and 2^61 after the unscaled inverse FFT: inside 64 bits. The 512-channel
testbench reproduces every output exactly, as do the 16x16 (K = 7, two
channels) and 32x32 (K = 15) runs. Much larger kernels or more channels can
overflow; the outputs wrap rather than saturate.

## Blocks

| module            | role |
|-------------------|------|
| `splitconv_pkg`   | complex type `cplx_t`, twiddle and complex-arithmetic functions, `phase_t` |
| `fft1d`           | N-point FFT (N = 8 by default), one vector per clock, log2(N)-clock latency |
| `fft2d`           | FFT_N x FFT_N FFT/IFFT by rows then columns through one `fft1d`; in-place buffer; 4*FFT_N + 2*log2(FFT_N) clocks per block unstalled (38 at 8x8) |
| `patch_extractor` | tile -> padded FFT_N x FFT_N patch, one pixel read per clock, zeros outside the image; FFT_N^2 + 1 clocks per patch |
| `filter_padder`   | K x K kernel -> FFT_N x FFT_N with zeros; FFT_N^2 + 1 clocks |
| `hadamard_mac`    | FFT_N complex multipliers, per-output-channel accumulators (MAX_COUT x FFT_N rows), drain; 2 clocks per row and output channel |
| `crop_concat`     | drops rows/columns 0..K-2, rounds, writes the S x S block one pixel per clock |
| `dp_ram`          | one-write/one-read RAM with registered read; four instances: input maps, weights, filter spectra (1024-bit words), output maps |
| `splitconv_ctrl`  | the loop nest and the phase select |
| `splitconv_top`   | wiring, phase routing, host ports |

All row streams use valid/ready; a unit accepts a start pulse only when idle.
Control state has an asynchronous active-low reset; data buffers are not reset.

## Using the top

Parameters (defaults): `FFT_N` = 8, `IMG_N` = 224, `K` = 3, `MAX_CIN` = 1,
`MAX_COUT` = 1, `PIX_W` = 8, `W_W` = 8, `OUT_W` = 32.

1. Write input pixels through `in_wr_en/in_wr_addr/in_wr_data` at
   `(cin*IMG_N + row)*IMG_N + col`.
2. Write weights through `w_wr_*` at `((cout*MAX_CIN + cin)*K + r)*K + c`.
3. Pulse `start` with `n_cin` (1..MAX_CIN) and `n_cout` (1..MAX_COUT);
   wait for `done`.
4. Read results with `out_rd_en/out_rd_addr` at `(cout*IMG_N + row)*IMG_N + col`;
   `out_rd_data` follows one clock later.

Timing: for one input and one output channel a tile takes 190 clocks
(a 224x224 map: 274,460 clocks including the filter transform). In general a
tile costs roughly n_cin * (110 + 16*n_cout) + n_cout * 80 clocks, plus
n_cin*n_cout*105 clocks once per run for the filters. Larger transforms cost
more per tile but cover more pixels: 16x16 with K = 7 on a 23x23 map with two
input and two output channels takes 11,238 clocks, and 32x32 with K = 15 on a
40x40 map with one channel pair takes 16,094 clocks.

## How far to trust it, and where it is this design's own

Taken from the method: 8x8 transforms by default; splitting into tiles with
floor(K/2) overlap and zero padding; zero-padding the filter to the patch size;
FFT of patch and filter; Hadamard product; inverse FFT; cropping; writing the
blocks side by side; each patch fetched once; the spectral products of all
input channels feeding each output channel.

This design's choices, where the method says nothing: the micro-architecture
(a single time-shared transform engine, row-column 2-D FFT, sequential
schedule), every width and the fixed-point format, the rounding, which 6x6
region is kept and where the kernel sits in the 8x8 grid, the memory layout,
the handshakes and the reset. The tile size is read as "8x8 padded patch,
6x6 tile"; the method's text also admits an 8x8 tile with a 10x10 patch, which
would need a non-power-of-two transform. The method allows patches of any
size; here the transform size is a power-of-two parameter, so split sizes such
as exactly 16 or 32 with a 3x3 kernel (an 18- or 34-point transform) are not
available.

Reference figures for the original FPGA implementation are 395 cycles of
latency and 256 DSP blocks for an 8x8 single-channel block. This engine is not
built to match them: it uses 8 complex multipliers in the Hadamard unit and
two real multipliers per twiddle butterfly, and spends 190 clocks per tile.
The default configuration holds one input and one output channel; a
multi-channel layer needs `MAX_CIN`/`MAX_COUT` raised (buffers grow
accordingly) or one run per channel pair with the integer outputs summed.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog:

| testbench | what it checks |
|-----------|----------------|
| `tb_fft1d` | random vectors against a floating-point DFT at N = 8, 16 and 32; log2(N)-clock latency and back-to-back throughput |
| `tb_fft2d` | forward against a 2-D DFT, inverse returns 64x the input, random output stalls, 38-clock block time |
| `tb_patch_extractor` | every element of every patch of a 14x14 two-channel map, padding zeros, 65-clock patch |
| `tb_filter_padder` | padded kernels for 3x2 channel pairs |
| `tb_hadamard_mac` | exact accumulated products over 3 input and 2 output channels; reload on the first channel; 2 clocks per row and channel |
| `tb_crop_concat` | rounding, crop region, every output pixel written once, nothing outside the map |
| `tb_dp_ram` | random read/write, read-during-write, hold |
| `tb_splitconv_ctrl` | the exact sequence of unit starts for three channel configurations |
| `tb_splitconv_top` | end to end at 14x14 with (3,2), (1,1) and (2,2) channels, extreme values, and counts of each mechanism (filter/patch/inverse transforms, border padding, edge tiles, channel accumulation, several output channels, back-pressure from the Hadamard unit and from the crop) |
| `tb_splitconv_full` | default parameters: one 224x224 map, all 50,176 outputs exact, under 395 clocks per tile |
| `tb_vgg_conv13_slice` | a late VGG16 layer slice: 14x14 maps, 512 input and 2 output channels, all outputs exact |
| `tb_splitconv_sizes` | other transform sizes end to end: 16x16 with K = 7 (2 -> 2 channels, 23x23 map) and 32x32 with K = 15 (40x40 map), all outputs exact |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/splitconv_pkg.sv \
        rtl/splitconv_top.sv tb/tb_splitconv_top.sv --top-module tb_splitconv_top
    ./obj_dir/Vtb_splitconv_top

Verilator finds the other modules through `-Irtl`. Block testbenches are run
the same way with their own module file. `tb_fft1d` and `tb_splitconv_sizes`
instantiate a helper in `tb/` (`fft1d_check`, `splitconv_run_check`) once per
size; add `-Itb` for them. The full-size test runs in a couple of
seconds.
