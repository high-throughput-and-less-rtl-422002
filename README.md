# AMP-M: removing clicks from audio by approximate message passing

Clicks, pops and other short impulsive faults in audio hit only a few samples. The
audio itself is nearly sparse in a cosine basis: a block of it is described by a few
strong DCT coefficients. A corrupted block of M samples can therefore be written as

    z = A a + b + n

Here `A` is the M x M DCT synthesis matrix and `a` holds the few DCT coefficients of the
clean audio. `b` is a sparse vector that holds the clicks, one entry per damaged
sample, and `n` is small noise that fits neither model. Restoring the block means
finding the sparse pair `x = [a; b]` from `z` and the dictionary `D = [A I]`. The
restored audio is then `A a`: the block without its clicks.

This RTL solves that problem with approximate message passing (AMP). AMP is an
iterative soft-thresholding method with one extra correction term. It converges in a few
tens of iterations, and each iteration costs one product with `D^T` and one with `D`.
The engine, `amp_m`, works on one block of M = 512 samples at a time and runs at most
IMAX = 28 iterations. Both dictionary products go through one fast-transform unit,
`fft_ram`. It computes a DCT or an inverse DCT of length M with a half-length complex
FFT. A multiply-accumulate unit with a 16-bit Wallace-tree multiplier forms the
correction term of the residual.

## The recursion the hardware runs

Start from `x = 0` and `r = z`. Then repeat:

    sigma_t = RMSE(r_t) = sqrt(sum(r_t^2) / M)
    stop if sigma_t <= ET  or  t = IMAX
    tau_t   = lambda * sigma_t
    x_t+1   = eta(x_t + D^T r_t ; tau_t)                 eta(v; tau) = sign(v) max(|v| - tau, 0)
    r_t+1   = z - D x_t+1 + (|supp x_t+1| / M) * r_t

After the loop, `A a` is streamed out.

- The last term of the residual update is the *Onsager* correction. It is the only
  difference from plain iterative soft thresholding. `|supp x|` is the number of
  non-zero entries of the new estimate, and the threshold unit counts them as it writes
  them.
- `lambda` sets how far above the noise level the threshold sits. It is an input,
  unsigned Q4.4, so 2.0 is `8'd32`.
- `ET` is the early-termination level. With `ET = 0`, every block runs IMAX iterations
  unless its residual becomes exactly zero. A larger `ET` trades quality for time.
- `D^T r` splits into a DCT of `r` (the first M entries) and `r` itself (the identity
  half). `D x` splits into an inverse DCT of `a` plus `b`. Only the DCT halves need
  multiplications.

## Number formats

| quantity | format | notes |
|---|---|---|
| input samples z, residual r, estimate x, output | 16-bit two's complement, read as Q1.15 | saturated to 16 bits wherever written |
| DCT entry `C[m][k]` | Q1.15, `round(32767 cos(pi(2m+1)k/2M))` | `round(32767/sqrt 2) = 23170` for k = 0 |
| orthonormal scale `sqrt(2/M)` | right shift by `(log2 M - 1)/2` | a power of two only when log2 M is odd (512 = 2^9 gives 1/16) |
| MAC accumulator | `32 + log2 M + 1` bits (42 for M = 512) | exact for an M-term dot product |
| `fft_ram` words | 28-bit real and imaginary parts, input shifted up by 8 guard bits | every butterfly stage halves; twiddles are Q1.15 |
| lambda | unsigned Q4.4 | `tau = sat16(lambda * rmse >> 4)` |

In the fast transforms, every twiddle product and every stage halving is an arithmetic
right shift, which rounds toward minus infinity. The 8 guard bits keep the accumulated
error to a few LSB of the 16-bit result. In the matrix-walk mode, a dot product is
accumulated exactly and then shifted right by `15 + (log2 M - 1)/2` (19 for M = 512).
There is no other rounding, so the engine is deterministic and can be modelled bit for
bit; the testbench package `amp_ref_pkg` does that for both modes. Because `A` is orthonormal, a coefficient of
`a` can be up to `sqrt(M/2) = 16` times larger than the samples it came from. Audio at
full scale can therefore saturate `a`. Feed the engine with headroom: samples of a few
thousand LSB, as in the testbenches, restore well.

## How the dictionary products are computed

The hard part of the design is its schedule. `D^T r` is needed element by element for
the threshold unit, and `D x` row by row for the residual. Both come from whole-vector
transforms that are computed first and then read out one element per step.

- **`D^T r`.** The residual is copied from ZR-RAM into `fft_ram`, which computes the
  DCT `A^T r` in `(M/4) log2(M/2)` clocks (1,024 for M = 512). The estimate update then
  reads one coefficient per element.
- **`D x` and the output.** After the estimate update, `a = x[0..M-1]` is copied from
  X-RAM into `fft_ram`. Its inverse transform gives `A a` in `M/2 + (M/4) log2(M/2)`
  clocks. The residual update reads one sample per row. The output phase runs the same
  inverse transform on the final estimate.
- **Onsager term.** The MAC multiplies `|supp x|` by the old residual, one row at a
  time.

The parameter `USE_FCT = 0` selects a plain alternative datapath without `fft_ram`.
There the MAC computes both dictionary products by walking
the DCT matrix, and a separate Wallace multiplier forms the Onsager product.
`dct_coef_gen` produces the matrix entries. It never stores the M x M matrix. It keeps
the angle index `j = (2m+1)k mod 4M` in a register and adds a constant step to it: `2k`
when it walks down a column (fixed k) and `2m+1` when it walks along a row (fixed m).
It then looks the cosine up in a 4M-entry table that is computed at elaboration. The
addition wraps modulo 4M by itself, so no multiplier is needed for the index. This
mode needs about 66 times more clocks per iteration at M = 512.

With `B = (M/4) log2(M/2)` (1,024 for M = 512), a block goes through these phases in
the default mode:

| phase | what happens | clocks |
|---|---|---|
| LOAD | each sample is written to ZR-RAM as both z and r; its square goes into the RMSE sum | M, one per accepted sample |
| CLEAR | X-RAM is zeroed | 2M |
| RMSE | `sqrt(sum/M)`, then `tau` and the ET compare | 19 |
| FLOAD | r is read from ZR-RAM and written into `fft_ram` | M + 1 |
| FRUN | the fast DCT of r | B + 2 |
| estimate update, DCT columns k < M | read `x[k]` and `(A^T r)[k]`, threshold, write back | 3 per column |
| estimate update, identity columns k >= M | `v = x[k] + r[k-M]`, threshold, write back | 3 per column |
| ILOAD | a is read from X-RAM and written into `fft_ram` | M + 1 |
| IRUN | the fast inverse DCT of a | M/2 + B + 2 |
| residual update, row m | read `(Aa)[m]`, `z[m]`, `r_old[m]`, `b[m]`; MAC forms `nnz * r_old`; `r = sat(z - (Aa)[m] - b[m] + (nnz * r_old >> log2 M))` is written back | 3 per row |
| RMSE | of the new residual | 19 |
| ILOAD, IRUN | the inverse DCT of the final a | M + 1, M/2 + B + 2 |
| OUTPUT, row m | `(Aa)[m]` leaves on `out_data` | 2 per row |

So one iteration takes `(M+1) + (B+2) + 6M + (M+1) + (M/2+B+2) + 3M + 19` clocks, which
is 7,961 for M = 512. A full block of 28 iterations takes 227,282 clocks from the first
sample accepted to `block_done`. With `USE_FCT = 0` an iteration takes
`M(M+3) + 3M + M(M+2) + 19` clocks (528,403), the output `M(M+2)`, and a block takes
15,060,007 clocks. The testbenches check these counts exactly.

Both updates work in place. Column k of `D^T r` needs only the old `x[k]`, so the new
value goes straight back to the same X-RAM word. Row m of the residual needs only the
old `r[m]`, so the same holds for the r bank. A single-port X-RAM is therefore enough,
and the ZR-RAM needs only one read port and one write port.

## Units

- **`wallace_mult`** is a combinational 16 x 16 signed multiplier. Each bit of `b`
  gates a sign-extended copy of `a` into one partial-product row. The row of the sign
  bit is negated: it is inverted and a `+1` row is added. Layers of 3:2 carry-save
  adders reduce the 17 rows to two, and one adder sums those two. `amp_m` uses one in
  the MAC and one for `r^2` in the RMSE unit. With `USE_FCT = 0` a third one forms the
  Onsager product.
- **`mac_unit`** computes `acc <= (first ? 0 : acc) + a*b` on each clock with `en`
  high. In the default mode it forms `nnz * r_old` for each row. With `USE_FCT = 0` it
  accumulates the M-term dot products of the matrix walks.
- **`zr_ram`** has two banks, `mem1` for z and `mem2` for r. One `we` writes `zin` and
  `rin` to the same address, on `wclk`. One `re` reads both banks on `rclk` and gives
  `zout` and `rout` one clock later. Because a write always covers both banks, the
  residual update writes back the z it has just read. Inside `amp_m` both clocks are
  the system clock.
- **`x_ram`** is a single-port RAM of 2M words. A read returns its data one clock
  later, and a write leaves `dout` unchanged.
- **`trsh_unit`** applies `eta` with one subtract-compare-select step: subtract `tau`
  from `|v|`, compare the result with zero, then select zero or the difference with its
  sign restored. The result is registered, so it appears one clock later. It also gives
  `nz`, which feeds the support count.
- **`rmse_unit`** keeps a sum of squares, and `clr` restarts it. On `calc` it divides
  by M (a shift) and takes the integer square root with a restoring algorithm, one bit
  per clock. 17 clocks after `calc` it pulses `done` and gives `rmse`, `tau` and
  `et_hit = (rmse <= et)`.
- **`dct_coef_gen`** is the coefficient walk described above, used only with
  `USE_FCT = 0`. Its coefficient is valid the clock after `start`, and it moves one
  element per `step`.
- **`fft_ram`** is the fast DCT and inverse DCT. It computes the orthonormal DCT of
  length M through an M/2-point complex FFT in its own RAM, in five steps:
  - *reorder*: `v[n] = r[2n]`, `v[M-1-n] = r[2n+1]`;
  - *reduce*: `c[q] = v[2q] + j v[2q+1]`. These two steps cost nothing: the write
    address puts each sample straight into the real or imaginary half of its word;
  - *FFT*: an in-place radix-2 decimation-in-frequency FFT, one butterfly per clock,
    halving the data at each stage so it cannot overflow;
  - *expand*: the M-point spectrum of `v` is rebuilt from `C[k]` and `C*[L-k]`;
  - *rotate*: the result is multiplied by `e^(-j pi k/2M)` and its real part taken.
  
  Expand and rotate run while each result is read, so the output needs no extra pass.
  Words are 28 bits wide, with 8 guard bits. The twiddles come from one 4M-entry Q1.15
  cosine table. `mode = 1` selects the inverse. It buffers the coefficients, rotates and
  folds them into `C` in an M/2-clock pre-pass, and then runs the same FFT. The read
  address undoes the reduce and reorder steps. Busy lasts `(M/4) log2(M/2)` clocks
  forward and `M/2` more in inverse. The result is within a few LSB of the exact
  transform. `amp_m` uses both directions, with `mode` set by its state.
- **`amp_m`** is the controller: a ten-state machine (LOAD, CLEAR, RMSE, FLOAD, FRUN,
  XUPD, ILOAD, IRUN, RUPD, OUT) with an element index and a clock-within-element counter. It also holds the
  small amount of glue arithmetic: the scaled sum `x + D^T r`, and the residual formula.

## Interface of `amp_m`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `lambda` | in | 8 | threshold gain, Q4.4; hold it for the whole block |
| `et` | in | 16 | early-termination RMSE level; hold it for the whole block |
| `in_valid`, `in_data`, `in_ready` | in/in/out | 1/16/1 | sample input; a sample is taken on each clock with `in_valid && in_ready`; `in_ready` is high only while the engine waits for a block |
| `out_valid`, `out_data`, `out_last` | out | 1/16/1 | restored samples, one every 2 clocks (M + 2 with `USE_FCT = 0`), with no back-pressure; `out_last` marks the M-th |
| `busy` | out | 1 | a block is being processed |
| `block_done` | out | 1 | one-clock pulse together with `out_last` |
| `iter_count`, `rmse`, `early_stop` | out | 5/16/1 | for the finished block: the iterations run, the final residual RMSE, and whether ET (rather than IMAX) ended it |

Parameters: `M` (512; it must be 2^odd, e.g. 8, 32, 128, 512 or 2048, and elaboration
stops with an error otherwise), `IMAX` (28) and `USE_FCT` (1: dictionary products
through `fft_ram`; 0: on the MAC).

## Throughput

At M = 512 and IMAX = 28, a block takes 227,282 clocks. Real-time stereo audio at
44.1 kS/s needs at least 2 x 44,100 / 512 = 172.3 blocks per second, and more if the
blocks overlap. That comes to 39.2 M clocks per second. At a 408.5 MHz clock the engine
restores about 1,797 blocks per second, 10.4 times real time, even when every block
runs all 28 iterations. Nothing in this RTL has been through timing analysis, so
408.5 MHz is a target, not a measured result. The FFT butterfly (a complex
multiplication, four 29 x 16 products, in one clock) and the read-time expand/rotate
(up to three multiplications in series) are the likely critical paths; pipelining them would add a few
clocks per transform. Early termination shortens a block further when ET > 0.

## Where this RTL departs from, or goes beyond, the published description

The published description of this architecture names its units and their jobs, and it
gives the step list of the algorithm, the 16-bit data width, M = 512, IMAX = 28 and the
RMSE-based early termination. Everything below is a choice made in this RTL:

- **Dictionary products.** The published architecture feeds the residual from ZR-RAM
  to an FFT-based fast DCT/IDCT unit ("FFT-RAM": reorder, reduce, M/2-point FFT,
  expand, rotate). Here that unit gives both `D^T r` and `D x`. The FFT radix, the word
  widths, the read-time expand/rotate and the inverse's pre-pass are this RTL's own.
- **Role of the MAC.** The published description is not consistent here. In one place
  it says this architecture forms the products with `D` and `D^T` on
  multiply-accumulate units, and leaves fast transforms to a sister architecture. Its
  module list, however, includes the FFT-based transform unit fed from ZR-RAM. The
  default (`USE_FCT = 1`) follows the module list, and the MAC forms the Onsager
  product there; the description does not say which products the MAC forms.
  `USE_FCT = 0` follows the other reading: both products are computed on the MAC.
- **Threshold rule.** It is `tau = lambda * RMSE(r)`, with lambda an input.
- **Onsager term.** It uses the support size of the newest estimate divided by M.
- **Fixed point.** The number formats, the orthonormal-DCT scaling by shift,
  saturation, and the accumulator and intermediate widths are all this RTL's own.
- **Schedule and latency.** The whole schedule of phases and the per-phase latencies
  are this RTL's own, as are the single clock (ZR-RAM's `wclk` and `rclk` are tied
  together), the valid/ready input, and the output without back-pressure.
- **Block handling.** One block is processed at a time: loading the next block does
  not overlap computing the current one. Overlapping the blocks and windowing them, as
  audio restoration usually does, is left to the system around the engine.

## Simulating

Each unit has a self-checking testbench in `tb/`. A testbench prints
`TB_RESULT checks=N failures=F` and ends with `$finish`. With Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/amp_pkg.sv tb/amp_ref_pkg.sv \
              rtl/*.sv tb/amp_m_bench.sv tb/tb_amp_m.sv --top-module tb_amp_m -o sim
    ./obj_dir/sim

The package must come first, because `rtl/*.sv` lists `amp_m.sv` before it. Verilator
reports width warnings in the testbench code (32-bit `int` arithmetic on narrower
values); `-Wno-fatal` keeps them as warnings. For a unit testbench, replace `tb_amp_m`
with, for example, `tb_trsh_unit`; the unit testbenches need neither
`tb/amp_ref_pkg.sv` nor `tb/amp_m_bench.sv`. For `tb_amp_m_mac`, `tb_amp_m_full` and `tb_amp_m_stereo`,
replace only the last file and the top module.

- **`tb_amp_m`** runs three blocks back to back at M = 32 and IMAX = 28. The first
  runs all IMAX iterations. The second stops early at an ET taken from the first
  block's RMSE trace. The third stops before its first iteration. The testbench compares
  every output sample, the iteration count, the RMSE and the exact clock count with
  `amp_ref_pkg`. It also requires the restored block to be closer to the clean audio
  than the corrupted input was, and it counts each mechanism: stop at IMAX, early stop,
  elements zeroed and kept by the threshold, and a non-zero Onsager term.
- **`tb_amp_m_mac`** runs the same three blocks with `USE_FCT = 0`.
- **`tb_amp_m_full`** restores one block at the default size (M = 512, 28 iterations,
  227,282 clocks; well under a second of simulation). The error energy falls from
  1.73e9 to 1.27e7.
- **`tb_amp_m_stereo`** restores four default-size blocks back to back, alternating
  left and right channel, and checks every sample. It then holds the clock count
  against the audio time the blocks carry at 44.1 kS/s and a 408.5 MHz clock, with and
  without 50 % block overlap. The worst case of 28 iterations per block is 10.4 times
  faster than real time.
- **Unit testbenches.** Each checks its unit against values computed in the testbench:
  random and corner operands for the multiplier and the MAC, random traffic for the
  two RAMs, every entry of the M = 32 DCT matrix for the coefficient walk, the dead
  zone and saturation for the threshold, rmse, tau, ET and latency for the RMSE
  unit, and random and single-tone blocks through both directions of the M = 32
  fast DCT, compared with the exact transform.

`amp_ref_pkg` is the reference for the fixed-point behaviour. It computes the same
recursion with whole-vector integer arithmetic. For `USE_FCT = 0` it works straight
from the matrix formula. For `USE_FCT = 1` it runs a step-by-step software version of
the fast DCT and inverse DCT with the same shifts as `fft_ram`. Change it together with
the RTL if you change a number format or a transform step.
