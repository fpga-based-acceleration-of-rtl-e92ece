# Overlap-save FIR filter bank with spectral-power output (3 x AOLS-2048-P)

A radio-pulsar search applies a large bank of matched filters to one long
input series: 84 complex FIR filters of up to 421 taps, each run over 2^22
complex single-precision (SPF) points, keeping only the power |y|^2 of each
output. Running 421 taps in the time domain costs 421 complex
multiply-accumulates per output point. This design filters in the frequency
domain instead, using the overlap-save method:

* The input is cut into chunks of NFT = 2048 points. Successive chunks overlap
  by K-1 = 420 points, so each chunk brings L = NFT-K+1 = 1628 new points.
* Each chunk is Fourier-transformed.
* The chunk spectrum is multiplied point by point with the filter's spectrum.
* The product is inverse-transformed. The first K-1 points of the result are
  corrupted by circular wrap-around and are dropped. The remaining L points
  are exact linear-convolution outputs.

The forward transforms of the input do not depend on the filter. The design
therefore computes them once, stores them as an *intermediate array*, and
then reuses them for every filter. This is the "area-efficient" (AOLS)
organisation: a single FFT engine per pipeline serves both directions, in
two kinds of launch. Three identical pipelines run side by side and share
one read of the intermediate data, so each inverse launch applies three
filters.

```
                 +-------------------------- data_fetch_mult --------------------------+
 data read  ---> | fetch_port (chunk addresses, zero padding)      --+                  |
 coef read 0 --> | fetch_port -> cmul --+                            | one shared word  |
 coef read 1 --> | fetch_port -> cmul --+-- broadcast to 3 products <+                  |
 coef read 2 --> | fetch_port -> cmul --+                                               |
                 +---------------------------|-------------------------------------------+
                                             v  (x3, one aols_pipe per filter)
  chan_fifo -> fft_engine (FFT / IFFT) -> chan_fifo -> bit_reverse (+ drop K-1) -> result_store
                                                                                   |  power_calc
                                                                              write port r
```

## Launches

| launch | `mode` | reads | multiplies by | engine | stores |
|---|---|---|---|---|---|
| 1 (once) | `MODE_FFT` | input series, chunk c at point c*L-(K-1) | initial array, all 1+j0 | forward | chunk spectra, complex, natural order (pipeline 0 only) |
| 2..(1+ceil(M/3)) | `MODE_IFFT` | intermediate array, chunk c at point c*NFT | filter r's spectrum (pipeline r) | inverse | power of output points 0..N-1 of filter r |

Both kinds of launch take about `n_chunks * NFT / P` clocks: 512 clocks per
chunk at the defaults, plus the pipeline fill, where
`n_chunks = ceil(N / (NFT-K+1))`. M filters need `1 + ceil(M/3)` launches.
For the full search (N = 2^22, M = 84) that is 29 launches of about 1.32
million clocks each.

Launch 1 also multiplies, by the constant 1+j0. This keeps a single datapath
for both launches: only the arrays it reads change.

### What the host must prepare

* **Input array.** N complex points as (re, im) float pairs. N must be a
  multiple of P = 4.
* **Initial array.** NFT points of 1+j0.
* **Per filter, the pre-processed coefficient array.** Zero-pad the K taps
  h[k] to NFT points and take the NFT-point DFT. Scale it by 1/NFT, because
  the inverse transform on chip is unscaled. Store it in natural order.
  A filter with fewer than K taps is padded with zero taps.
* **Launch arguments:**
  * `n_points` = N and `n_chunks` = ceil(N/L).
  * `src_base`, and `coef_base[r]` and `dst_base[r]` for each pipeline.
    All are addresses counted in 32-bit floats.
  * Pulse `start` for one clock, then wait while `busy` is high. The
    arguments must stay stable while `busy` is high.

After a filtering launch, `dst_base[r]` holds N floats: the power of filter
output y[0..N-1], where y[i] = sum_k h[k] x[i-k] and x is zero before the
series begins.

## The FFT engine (`fft_engine`, `fft_sdf_stage`, `fft_lane_stage`)

The engine is a streaming radix-2 decimation-in-frequency pipeline that
moves P = 4 points per clock, in log2(NFT) = 11 stages. Point x of a frame
travels in lane x mod P during cycle x/P. The stage with butterfly span 2^S
pairs point x with point x+2^S. There are two cases:

* **Span at least P (stages S = 10 … 2).** The partner arrives D = 2^S/P
  cycles later in the same lane. Each lane is then a single-path
  delay-feedback stage with a D-word delay line:
  1. The first D inputs of each 2D block are parked in the delay line.
  2. During the next D inputs, the stage emits the sums and writes the
     twiddled differences back into the delay line.
  3. Those differences leave during the following D cycles, while the next
     block fills the line. At the end of a stream they drain on their own.

  All four lanes share one controller and one address counter. Each lane
  has its own twiddle ROM.
* **Span below P (stages S = 1, 0).** Both points sit in the same word, so
  the stage is two butterflies side by side with constant twiddles.

The output leaves in bit-reversed order: word t, lane l holds
X[bitrev(tP+l)]. The first output word appears N/P-1+log2(N) = 2059 clocks
after the first input word. N/P-1 of those cycles are the delay lines; the
other log2(N) are one register per stage.

`inv` selects conjugated twiddles, which gives the unscaled inverse
transform. It is sampled per stage and must stay constant during a frame.
The whole engine has one enable (`en`) and no ready signal. `aols_pipe`
drives `en` from the FIFO behind the engine, so a full FIFO freezes every
stage at once. It pulls a word from the FIFO in front on every enabled
clock where one is waiting, and gaps travel through as invalid words.

The twiddle ROMs are filled at elaboration time with SPF values of
exp(∓j2πe/N), where e = (x mod 2^S)·N/2^(S+1). They are rounded from
double-precision `$cos`/`$sin`.

## Bit reverse and overlap discard (`bit_reverse`)

Reordering P points per clock needs a memory that can take four writes and
give four reads per clock, with no two in the same bank. The frame buffer is
split into P banks of N/P words, and the point in row t, lane l is stored in
bank (l + top_log2(P)_bits(t)) mod P at row t.

* Writes come in bit-reversed order. Four points of one word share a row and
  have different lanes, so they hit four different banks.
* Reads fetch the four natural-order points n, n+1, n+2, n+3. They sit in
  rows bitrev(n)/P … whose top two bits differ, so they also hit four
  different banks. Each point is then rotated back into its lane.

The buffer is ping-pong (two frames), so one frame is read while the next is
written. In a filtering launch (`discard` = 1) the reader starts at word
(K-1)/P = 105, which drops the overlap points. This requires K-1 to be a
multiple of P.

## Data fetch and multiplication (`data_fetch_mult`, `fetch_port`, `cmul`)

Each `fetch_port` walks through chunk c, word w and requests float address
`base + 2*(c*stride + w*P + offset)`:

* **Data read in launch 1:** stride L, offset -(K-1). Words that fall
  wholly before 0 or at/after N are not read. They come out as zeros with
  a `zero` flag, which forms the leading K-1 zeros and the padding after
  the last point.
* **Data read in launch 2:** stride NFT, offset 0.
* **Coefficient reads:** stride 0, so the same NFT points are read for every
  chunk.

Reads use a request/in-order-response protocol:

* `req_valid`/`req_ready`/`req_addr` carry the request.
* `resp_valid`/`resp_data` return the data one or more cycles later and
  cannot be refused.
* A credit count keeps at most DEPTH = 16 words outstanding, so the response
  FIFO cannot overflow.

The multiplier stage advances when the data word and every active
coefficient word are present and every active pipeline can take a product.
All pipelines move in lock-step, so a stalled pipeline holds the shared
data stream.

## Output switch (`result_store`, `power_calc`)

* **Launch 1:** each natural-order word is written as 4 complex points to
  `dst + 2*(c*NFT + w*P)`.
* **Launch 2:** the 407 remaining words of each chunk pass through
  `power_calc` (re²+im², no square root, 32 bits per point). Each word's 4
  floats are written to `dst + c*L + w*P` in the low half of the write data,
  with byte-lane strobes per float. Words past N in the last chunk are
  dropped.

Write port: `wr_valid`/`wr_ready`/`wr_addr`/`wr_data`/`wr_strb`.

## Arithmetic

All arithmetic is IEEE-754 single precision, written out as synthesizable
functions in `fp32_pkg`: `fp_add`, `fp_mul`, complex `c_mul` (4 multiplies,
2 adds) and `c_pow`. Both operations round to nearest-even.

* Subnormals are flushed to zero.
* Overflow gives infinity.
* NaNs are not handled specially.

Against a double-precision reference, the full 2048-point round trip stays
within 1e-4 of the peak power. This is the tolerance the testbenches use.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NFT` | 2048 | FFT and chunk length, power of two, at least P² |
| `P` | 4 | complex points per clock |
| `K` | 421 | filter taps; K-1 must be a multiple of P and K < NFT |
| `R` | 3 | filter pipelines per device |

Other configurations of the same family, such as NFT = 1024 or 4096, or two
pipelines, are parameter changes. They have not been simulated.

## Where this departs from the original accelerator

* **FFT engine.** The original uses a vendor radix-4 feedforward core. The
  radix-2 delay-feedback engine here has the same function, order and
  throughput. Its latency is longer by one register per stage.
* **Kernel channels.** These become valid/ready FIFOs (`chan_fifo`, 16
  words of P points). One wide FIFO replaces the per-point channels.
* **Memory.** The two DDR3 banks and their controllers are not modelled in
  RTL. The design sees one 32-bit float address space; which bank holds
  which array is the host's choice of base addresses.
* **Coefficient reads.** Coefficients are read from memory by every
  pipeline. The original bandwidth budget of 640 bits/clock counts only the
  shared input and the three power outputs.
* **Chunk stride.** The stride is NFT-K+1 (overlap of exactly K-1). The
  original launch-time estimate divides N by NFT-K.
* **Host side.** Host software, PCIe transfers and the kernel-launch
  mechanism are not part of the RTL. A launch is a `start` pulse.

## Simulation

Every testbench is self-checking and prints `TB_RESULT checks=… failures=…`.
Build one with, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module aols_p_top_tb \
  rtl/fp32_pkg.sv rtl/ftc_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/gmem_model.sv tb/aols_p_top_tb.sv
./obj_dir/Vaols_p_top_tb
```

The packages go first. The full-size test takes about two minutes to build
and a few seconds to run.

| testbench | what it shows |
|---|---|
| `fft_engine_tb` | 64-point, 4-lane engine against a direct DFT. Five frames, with gaps, stalls and a final inverse frame. Checks the latency of N/P-1+log2(N) = 21 clocks. |
| `bit_reverse_tb` | Natural order out, with and without discard. One word per clock. Back-pressure. |
| `cmul_tb`, `power_calc_tb` | Random operands against real arithmetic. Throughput. Back-pressure. |
| `chan_fifo_tb` | Against a queue model under random traffic. |
| `data_fetch_mult_tb` | Chunk addresses, zero padding, products for both launches (NFT = 16, K = 5, R = 2). |
| `result_store_tb` | Addresses, strobes, powers and tail dropping. |
| `aols_p_top_tb` | End to end: NFT = 64, K = 9, three pipelines, six random filters over 200 points, against direct convolution. Counts FFT stalls, zero-padding words, dropped tail words, memory back-pressure and the forward-to-inverse mode switch, and fails if any of them never happened. |
| `aols_p_top_full_tb` | Default parameters: 3256 points (two chunks), three random 421-tap filters. 9768 output powers checked against direct convolution. |
| `aols_p_top_workload_tb` | Default parameters at the smallest search size, 2^18 points (162 chunks), three random 421-tap filters: all 786,432 powers checked. The forward launch takes 83,988 clocks and the filtering launch 83,884, against 162·512 = 82,944 for the streaming part alone. About 3 minutes to build and 1 minute to run. |

`tb/gmem_model.sv` is a behavioural global memory with fixed read latency.
It can refuse requests at random to create back-pressure. It takes no requests while reset is asserted,
so a design whose registers start at random values cannot write into it
before its reset has taken effect.
