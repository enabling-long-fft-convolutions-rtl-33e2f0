# Chunked FFT convolution kernel

Long-convolution layers such as Hyena's convolve a sequence of hundreds of
thousands of samples with a filter that is just as long. Done by FFT, a single
transform of that length needs several megabytes of intermediate storage,
more than the 2-3 MB of block RAM on an FPGA. The way around it is to cut both
signals into chunks of at most `C` samples. Each pair of chunks is convolved
on the FPGA with FFTs short enough to fit in on-chip memory. The host then
adds each pair's result into the output at the right offset (overlap-add).

This RTL implements the FPGA side of that scheme, following the design of
Wang, Gupta and Prasanna, "Enabling Long FFT Convolutions on
Memory-Constrained FPGAs via Chunking" (an Alveo U200, `C` = 8192). The
kernel takes one chunk of `x` and one chunk of `h` and returns their linear
convolution, `len_x + len_h - 1` samples. It computes this with a radix-2
decimation-in-time FFT, a point-by-point product and an inverse FFT. All the
data stays in on-chip memory.

## The arithmetic the host and the kernel share

For a sequence `x` of `Nx` samples and a filter `h` of `Nh` samples, the host
forms `Mx = ceil(Nx/C)` chunks `x_i` and `Mh = ceil(Nh/C)` chunks `h_j`. The last
chunk of each may be short. For every pair `(i, j)` it calls the kernel once,
receives `y_ij = x_i * h_j` and adds it into `y` starting at sample
`(i + j) * C`:

    y[n] = sum_i sum_j y_ij[n - iC - jC]

A chunk pair's convolution is `2C - 1` samples long. A circular convolution of
length `N` equals the linear one only if `N >= 2C - 1`, so the kernel pads
both chunks with zeros to `N = 2C` points: 16384 points for `C` = 8192. With
that padding, each call's result is exact up to rounding, and overlap-add
gives the full linear convolution. The chunking and the overlap-add are host
software. They are not in `rtl/`, and the two end-to-end testbenches contain
a model of them.

## One kernel call

`fftconv_kernel` runs seven phases, strictly one after another:

| phase  | unit            | reads            | writes                | cycles (no stalls) |
|--------|-----------------|------------------|-----------------------|--------------------|
| LOAD_X | `chunk_loader`  | input stream     | buffer X, bit-reversed, zero-padded | N + 2 |
| LOAD_H | `chunk_loader`  | input stream     | buffer H                           | N + 2 |
| FFT_X  | `fft_radix2` (forward) | X, twiddles | X in place                        | F + 1 |
| FFT_H  | `fft_radix2` (forward) | H, twiddles | H in place                        | F + 1 |
| MULT   | `elemwise_mult` | X[k], H[k]       | Y[bitrev(k)]                        | N + 6 |
| IFFT   | `fft_radix2` (inverse) | Y, twiddles | Y in place                        | F + 1 |
| STORE  | `store_result`  | Y[0 .. L-1]      | output stream                       | L + 4 |

Here `F = log2(N) * (N/2 + 4) + 1` and `L = len_x + len_h - 1`, and one more cycle
is spent on the final `done` pulse. At the default size
(N = 16384, F = 114,745) a pair of full chunks takes 409,788 cycles from
`start` to `done`: 1.37 ms at 300 MHz. The three transforms take 84% of it.

The three buffers (`fft_buffer`, N complex words each) are X and H for the
two spectra and Y for the product, which then becomes the result. Y exists
because the multiplier writes in bit-reversed order: writing into X or H would
overwrite words that have not been read yet. One `twiddle_rom` serves both
engines, port A for the forward engine and port B for the inverse one. A
phase sequencer starts each unit with a one-cycle pulse and waits for its
`done`. The sequencer also steers every buffer port to the unit that owns it
in the current phase.

## The in-place FFT engine

`fft_radix2` is the part that needs the most explanation. It is a textbook
Cooley-Tukey radix-2 decimation-in-time FFT, laid out so that it runs one
butterfly per clock on block RAM.

**Ordering.** A DIT FFT computed in place wants its input in bit-reversed order
and leaves its output in natural order. The kernel never spends a separate
pass on reordering:

- the loader writes sample `n` to address `bitrev(n)`;
- the forward FFT leaves X and H in natural order;
- the multiplier reads index `k` and writes the product to `bitrev(k)`, which is
  the input order the inverse DIT FFT needs;
- the inverse FFT leaves `y` in natural order, and the store reads it straight out.

**Addressing.** In stage `s` (0 to log2(N)-1), butterfly `b` (0 to N/2-1) works on
the words

    j  = b mod 2^s
    i0 = (b div 2^s) * 2^(s+1) + j
    i1 = i0 + 2^s
    twiddle index = j * N / 2^(s+1)

and computes `t = W * x[i1]`, then `x[i0] = x[i0] + t` and `x[i1] = x[i0] - t`.

**Banking.** A butterfly reads two words and writes two words each clock, which
is more than a dual-port block RAM can do. `fft_buffer` splits its N words
into two banks by the parity (XOR of all address bits) of the word address.
Word `i` sits at address `i >> 1` in bank `parity(i)`. `i0` and `i1` differ in
exactly one bit, so they always fall in different banks, and each bank sees at
most one read and one write per clock: a simple dual-port RAM. The buffer
asserts that two simultaneous writes never go to the same bank.

**Pipeline.** The engine issues addresses, reads the buffer and the twiddle
(one registered cycle), registers four partial products, registers the two
butterfly results, and writes them back. A stage's last writes must land
before the next stage reads, so the engine lets the pipeline empty between
stages. That costs 4 cycles per stage, and a stage takes N/2 + 4 cycles.

**Twiddles.** `twiddle_rom` holds `W_N^k = cos(2πk/N) - i·sin(2πk/N)` for
`k < N/2`, as 18-bit parts with 16 fraction bits. The table is computed at
elaboration with `$cos`/`$sin`. The inverse engine (`INVERSE = 1`) conjugates
the twiddle and halves both butterfly outputs with rounding, so the 1/N of
the inverse transform is spread over the stages and values never grow.

## Number format and scaling

The source design was written in high-level synthesis and reports its
throughput in MFLOPS, so it probably used floating point. This RTL uses fixed
point instead, with the widths set in `fftconv_pkg`:

| quantity | format |
|---|---|
| input sample | 16-bit signed integer |
| complex word in a buffer | two 32-bit signed parts |
| twiddle | two 18-bit signed parts, 16 fraction bits |
| output sample | 32-bit signed, equal to `conv(x_i, h_j) / 2^mul_shift`, rounded |

How the scaling works:

- **Forward FFT:** not scaled. Each stage can at most double a value's
  magnitude. With 16-bit inputs and at most 2^15 points, the result stays
  inside 32 bits, so no overflow is possible.
- **Product:** `X[k]·H[k]` is formed at full precision (64 bits), shifted right
  by the run-time input `mul_shift` with rounding, and saturated to 32 bits.
  `sat_count` reports how many parts saturated during the last call. A
  non-zero count means the host chose `mul_shift` too small for its data.
- **Inverse FFT:** scaled by 1/2 per stage, so it cannot overflow.

Fixed point puts two duties on the host. The absolute rounding error of the
forward FFT is roughly fixed (a few units per bin, growing with the square
root of N). So inputs should use most of the 16-bit range: raw nucleotide
codes 0..3 would lose almost all precision, and codes spread to ±12288 do
not. And `mul_shift` has to be large enough that the spectral products fit.
With zero-mean 16-bit data and full 8192-sample chunks, `mul_shift = 16` was
enough. Under those conditions the largest error over an 11,192 × 8,192
convolution was 3.1e-5 of the output's peak. At `C` = 8, with 0/8192/16384/24576
sequence values, it was 1.3e-5.

## Interface

`fftconv_kernel` parameters: `CHUNK` (largest chunk, default 8192) and `N`
(FFT length, default `2*CHUNK`; must be a power of two of at least `2*CHUNK`).

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of all control state |
| `start` | in | 1 | one-cycle pulse while `busy` is low; latches `len_x`, `len_h`, `mul_shift` |
| `len_x`, `len_h` | in | log2(CHUNK+1) | chunk lengths, 1..CHUNK |
| `mul_shift` | in | 6 | right shift applied to the spectral product |
| `busy` / `done` | out | 1 | call in progress / one-cycle pulse after the last output word |
| `sat_count` | out | 32 | saturated product parts in the last call |
| `s_valid`, `s_ready`, `s_data` | in/out/in | 1/1/16 | input stream: `len_x` samples of `x_i`, then `len_h` samples of `h_j` |
| `m_valid`, `m_ready`, `m_data`, `m_last` | out/in/out/out | 1/1/32/1 | result stream: `len_x+len_h-1` samples, `m_last` on the final one |

Both streams transfer a word in a cycle where valid and ready are both high.
The input may pause at any time; the loader simply waits. The output may be
held off at any time. `store_result` keeps a two-entry queue with read
credits, so it runs at one word per clock and never loses a word while
`m_ready` is low. `m_data` stays stable while it waits, which an assertion
checks. The imaginary part of the result, which is zero up to rounding for
real inputs, is not sent.

Memories are not reset. Every word the kernel reads is first written in the
same call.

## Size and the evaluated workloads

At the default size the kernel holds 3 × 16384 × 64 bits of buffers plus
8192 × 36 bits of twiddles: about 3.4 Mbit (420 KiB). That is well inside
the U200's 2.8 MB of BRAM.

The source design was evaluated on sequences and filters of equal length:
32K, 160K and 450K samples, each with chunks of 8K, 4K and 2K. Sequence length
changes only the number of kernel calls, `ceil(L/C)^2`. At 450,000 samples and
`C` = 8192 that is 55 × 55 = 3025 chunk pairs. At 409,788 cycles per pair and
300 MHz, that is about 4.1 s of kernel time. The pair rate is about 12 million
FFT points per second.

The source's measured end-to-end times work out to roughly 15.5 ms per chunk
pair at every chunk size: 47 s / 3025 pairs, 188 s / 12,100 and 750 s / 48,400.
A constant time per pair points to a kernel whose transform size does not
change with the chunk size. This kernel runs that way: smaller chunks are
simply passed with `len_x`, `len_h` ≤ 4096 or 2048 and zero-padded to 16384
points. Alternatively, a build with `CHUNK = 4096` or `2048` shortens the
transforms to match.

`tb/tb_workload_32k.sv` runs the 32K × 32K workload completely at all three
chunk sizes, using builds with `CHUNK` = 8192, 4096 and 2048:

| chunk | calls | kernel cycles | at 300 MHz | largest error / peak |
|---|---|---|---|---|
| 8192 | 16 | 6,556,608 | 21.9 ms | 3.5e-5 |
| 4096 | 64 | 12,332,032 | 41.1 ms | 3.4e-5 |
| 2048 | 256 | 23,110,656 | 77.0 ms | 3.3e-5 |

The 160K and 450K workloads differ only in their call count. They are not
simulated, because the reference direct convolution and the 400 or 3025 calls
take too long.

## What follows the source design and what does not

These follow the source design:

- The split into host-side chunking and overlap-add plus an FPGA kernel.
- The per-pair sequence FFT → element-wise product → inverse FFT → store.
- Radix-2 decimation-in-time FFTs.
- Twiddles and buffers held in on-chip memory.
- The 8192-sample chunk.

These are choices made here, because the source does not describe them:

- The FFT length `2*CHUNK`.
- Fixed point in place of floating point, with its scaling and saturation.
- Parity-banked buffers and the one-butterfly-per-clock pipeline.
- Three buffers, with the bit-reversed write of the product.
- The valid/ready stream interfaces, and both chunks arriving on one stream.
- Sending only the real part of the result.
- The exact cycle counts.

The source design re-sends and re-transforms both chunks for every pair, and
so does this kernel. Caching a filter spectrum, or overlapping one pair's
load with the previous pair's compute, would be faster, but neither is part
of the design. Running several kernels in parallel is named only as future
work, so it is not built. PCIe transfers and the card's DDR belong to the
vendor platform. The kernel ends at its two streams. The rest of a Hyena
layer (projections, gating, the filter MLP) runs elsewhere and is not part
of this kernel.

## Files

| file | content |
|---|---|
| `rtl/fftconv_pkg.sv` | widths, `cplx_t`/`tw_t` types, `bitrev`, `bank_of` |
| `rtl/twiddle_rom.sv` | twiddle table, two read ports |
| `rtl/fft_buffer.sv` | parity-banked complex buffer |
| `rtl/fft_radix2.sv` | in-place radix-2 DIT engine, forward or inverse |
| `rtl/elemwise_mult.sv` | spectral product, scaling, saturation, bit-reversed write |
| `rtl/chunk_loader.sv` | input stream to buffer, bit-reversed, zero padding |
| `rtl/store_result.sv` | buffer to output stream with back-pressure |
| `rtl/fftconv_kernel.sv` | top: buffers, units, phase sequencer |
| `tb/tb_<unit>.sv` | one self-checking testbench per unit |
| `tb/tb_fftconv_kernel.sv` | end to end at `CHUNK = 8`, with host model, stalls and saturation |
| `tb/tb_fftconv_full.sv` | end to end at the default size, two chunk pairs |
| `tb/tb_workload_32k.sv` | the 32K × 32K workload at three chunk sizes (about 1.5 minutes) |

Every testbench compares against values it computes itself: DFTs in real
arithmetic, 64/128-bit products, direct convolution. Each also checks the
cycle counts given above, and prints `TB_RESULT checks=<n> failures=<n>`.
The end-to-end small testbench also counts each mechanism: several pairs, a
padded short chunk, input pauses, output back-pressure and product
saturation. It fails if any of them never happened.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -Irtl --top-module tb_fftconv_kernel \
        rtl/fftconv_pkg.sv tb/tb_fftconv_kernel.sv -Mdir obj_kernel
    ./obj_kernel/Vtb_fftconv_kernel

Replace the testbench name to run any other. The full-size test
(`tb_fftconv_full`) builds and runs in a few seconds. The package must come
first on the command line; `-y rtl` finds the modules.

## Changing it

- **Chunk size:** set `CHUNK`. `N` follows it. A larger `N` only needs
  `fftconv_pkg::DATA_W` raised if it would exceed 2^15 points, because of
  the forward-FFT growth.
- **Precision:** set `TW_W`/`TW_FRAC` for the twiddles, and `DATA_W` for the
  headroom of the product and the output.
- **Timing:** each phase is a separate unit with a start/done pulse pair. The
  sequencer in `fftconv_kernel` is the one place to change if phases are to
  overlap.
