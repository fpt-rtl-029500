# A fixed-point streaming engine for TFHE programmable bootstrapping

TFHE can evaluate any function of an encrypted small integer: a *programmable bootstrapping*
(PBS) takes an LWE ciphertext, applies a lookup table to the value it hides, and returns a fresh
ciphertext with low noise. PBS costs almost all of the run time of a TFHE program. This RTL
implements a PBS kernel built around one idea. A single, very wide **CMUX processing element**
does all the work. It is fully pipelined and accepts a new accumulator polynomial every cycle.
It completes one CMUX (one step of blind rotation) every 12 clock cycles for the default
parameters. Two further choices keep it busy:

* **Batching.** Twelve ciphertexts are bootstrapped together and stay in step. All twelve do
  iteration *i* before any of them does *i+1*. So a single key coefficient `BK_i` serves all
  twelve, and the key buffer needs to hold only two coefficients (ping-pong).
* **Narrow fixed-point arithmetic.** The FFTs that do the polynomial products work on 29-bit
  fixed-point numbers, not floating point. The accumulator itself is only 16 bits wide: the top
  16 bits of TFHE's 32-bit torus, which are all that the decomposition uses.

The defaults are TFHE parameter set I, a 128-bit security set used for Boolean circuits:

| symbol | meaning | value |
|---|---|---|
| n | LWE dimension (iterations of blind rotation) | 586 |
| k | GLWE dimension (accumulator = k+1 polynomials) | 2 |
| N | polynomial size | 512 |
| β, l | decomposition base log and levels | 8, 2 |
| b | batch size | 12 |

## What one bootstrapping computes

A PBS has three steps. Rotations are pre-rounded to `⌊2N·a/q⌉`, which is 10 bits here.

1. `ACC ← F · X^(−b)`. F is the test polynomial that encodes the lookup table.
2. For i = 1..n: `ACC ← ((ACC·X^(a_i) − ACC) ⊡ BK_i) + ACC`. This is the CMUX, and `⊡` is
   the external product.
3. The output ciphertext is the sample extraction of ACC at coefficient 0.

Inside the external product, each of the k+1 polynomials of `D = ACC·X^a − ACC` is split into
l signed digits of β bits. That gives (k+1)·l = 6 digit polynomials. Each is transformed to the
FFT domain, multiplied point by point with a 6×3 matrix of key polynomials, and summed into
3 results. The inverse FFT brings the 3 results back.

## The CMUX datapath

All stages are wired directly one after the other, each at the same throughput. One ciphertext
occupies the pipeline for 12 consecutive cycles: (k+1) = 3 polynomials of 4 beats each.

```
 ACC beats ─┬─> coef_to_bitwise ─> monomial_decomp ─> bitwise_to_fold ─> nega_fft ─> mac_array ─> piso ─> nega_ifft ─┐
 (128 coef) │   (4-bit chunks)     (rotate, subtract,  (digit rows,       (128 pts/   (384 MACs)   (double  (64 pts/   │
            │                       decompose)          folded)            cycle)                   buffer)   cycle)    (+)─> recirculation FIFO ─> ACC
            └──────────────────────────── bypass FIFO (ACC and "last iteration" flag) ─────────────────────────────────┘
```

### Accumulator beats and the fold

The negacyclic FFT used here *folds* each real polynomial of size N into N/2 complex points:
`a[i] + j·a[i+N/2]`. It then *twists* point i by `ψ^i` (ψ = e^(iπ/N)) and runs a cyclic FFT of
size M = N/2 = 256. The accumulator stream already has this pairing. Beat u of a polynomial
carries coefficients `u·64 + p` in lanes 0..63 and `256 + u·64 + p` in lanes 64..127. That is
exactly what the inverse FFT produces at its 64 points per cycle, so the loop needs no
reordering.

### Rotation in bitwise form

Multiplying by `X^a` rotates a polynomial negacyclically: coefficients that wrap past `X^N`
change sign. Doing this on a stream where coefficients are spread over cycles would need a large
permutation network. Instead `coef_to_bitwise` collects a polynomial and re-emits it *bitwise*.
All 512 coefficients are present in every cycle, but only one 4-bit slice of each, least
significant slice first, over 4 cycles. A rotation of this form is a plain barrel shift of 4-bit
slices (`negacyclic_rotate`, log2 N stages).

`monomial_decomp` then forms `rotated − original` slice by slice. A negated coefficient is added
as its bit-inverse plus one. The carry of this subtraction (0..2) is kept per coefficient in a
flip-flop. In the same pass it makes the two base-256 digits signed. The lower byte is read as a
signed value in [−128, 127]. Its sign bit is carried into the upper byte. The upper digit's
carry out is dropped, since that is a wrap of the torus. So each output word holds
`{D[15:8] + D[7], D[7:0]}`: the two signed digits side by side.

`bitwise_to_fold` collects the 4 slices and emits the digits coefficient-wise again as folded
complex points. Each polynomial gives 2 levels × 2 beats of 128 points, most significant level
first. The FFT input row order is therefore `row = m·l + level`, with m the polynomial and level
0 of weight 2⁻⁸.

### FFT, MACs and the inverse FFT

`nega_fft` twists and transforms 256 points, taking and giving 128 points per cycle. It works in
FixedPoint29(15,14), which is 29 bits with 14 fractional bits, in units of one digit. Twiddles
are 25-bit constants, Q2.23, computed at elaboration. Every complex product by a constant uses
the three-multiplier form:

```
Z = C·(A−B),  Re = (C−D)·B + Z,  Im = (C+D)·A − Z   for (A + jB)·(C + jD)
```

`mac_array` holds 128 lanes × 3 columns = 384 complex MAC units. The 6 rows of a ciphertext
arrive over 12 cycles, 2 beats per row, so each unit keeps one accumulator per beat position.
Row 0 restarts it, and row 5 sends the finished sum out. Key words are in FixedPoint26(7,19),
in torus units. The product is rounded to the inverse-FFT format, FixedPoint29(23,6) in torus
units, before it is added.

`piso` double-buffers the 3 finished polynomials, which arrive 2 × 128 points at a time. It
sends them on at 64 points per cycle, column after column. `nega_ifft` runs the inverse FFT,
untwists by `ψ^(−i)`, and applies the 1/M scale and the conversion to 16-bit torus as one shift.
Its output beats come out in the accumulator beat layout. The sum with the bypassed ACC closes
the CMUX.

### Closing the loop

The bypass FIFO carries each input beat, and a flag for the last iteration, around the external
product. The **recirculation FIFO** holds the new accumulators until the same ciphertext comes
round again, and it holds a whole batch (12 × 12 beats). In the original design the loop is
exactly one batch long: 144 cycles of CMUX latency equal 12 ciphertexts × 12 cycles. Here the
pipeline is shorter, about 60 cycles, and the FIFO absorbs the difference. The loop therefore
needs no hand-counted delay. If the batch is smaller than the pipeline, the controller waits for
accumulators to return; this is a *recirculation stall*.

## Batch scheduling

`fpt_ctrl` issues beats in the order batch → iteration → slot → polynomial → beat. A slot (one
ciphertext, 12 beats) starts only when two conditions hold:

* **Key ready.** The key buffer has loaded the key of the current global iteration
  (`bk_fill_count > iteration`). Otherwise it counts a *key stall*.
* **Accumulator ready.** From the second iteration on, the slot's accumulator is complete in the
  recirculation FIFO.

In the first iteration the beats come from `test_poly_ram`. It returns `F·X^(−b)` for the LUT
tag of the ciphertext one cycle after the request. After the last slot of the last iteration the
batch is popped from `ct_fifo`. If another 12 ciphertexts are already queued, the next batch
starts in the next cycle with no bubble. `bk_buffer` frees a key bank after the last beat of the
last slot of an iteration. Key loading and computing therefore overlap, with a one-coefficient
lead.

In steady state, with keys supplied in time, one batch takes `586 × 144` cycles plus the
pipeline drain. At 200 MHz that is about 0.42 ms per 12 PBS.

## Interfaces of `fpt_top`

All torus values are the upper 16 bits of the 32-bit torus.

| port group | format |
|---|---|
| `ct_in_valid/ready`, `ct_in` | one ciphertext per word: `a_i` (10 bits each) at bit `i·10`, `b` at bit `586·10`, LUT tag in the top 2 bits |
| `lut_wr_en/addr/poly` | writes one whole polynomial (512 × 16 bits) of one LUT; address `lut·3 + poly` |
| `bk_wr_valid/ready/addr/data` | 12 words per key coefficient, any order; address `row·2 + beat`; the word holds, for column c and lane q, real then imaginary 26-bit values at bit `((c·128 + q)·2 + {0,1})·26` |
| `ct_out_*` | per ciphertext: 2 mask polynomials as 4 beats of 128 coefficients in natural order (`ct_out_poly` = 0, 1), then one beat with b in lane 0 (`ct_out_poly` = 2, `ct_out_last`) |
| `stall_bk_cycles`, `stall_fb_cycles`, `batches_started`, `key_swaps` | statistics counters |

Keys must be supplied already transformed to the FFT domain: folded, twisted and in the key
fixed-point format. For the key entry of (row = m·l + level, column c), that is the FFT of the
corresponding polynomial of `BK_i`. Keys are loaded in order `BK_1 .. BK_n` for each batch. The
output is not back-pressured.

## Files

| file | role |
|---|---|
| `rtl/fpt_pkg.sv` | parameters of set I, twiddle and bit-reverse functions |
| `rtl/fpt_top.sv` | the kernel |
| `rtl/fpt_ctrl.sv` | batch sequencer |
| `rtl/ct_fifo.sv`, `rtl/sync_fifo.sv` | ciphertext queue; generic FIFO used for bypass and recirculation |
| `rtl/test_poly_ram.sv`, `rtl/negacyclic_rotate.sv` | test polynomials with rotation by −b; barrel shifter |
| `rtl/bk_buffer.sv` | ping-pong key buffer |
| `rtl/cmux_pe.sv` | the processing element |
| `rtl/coef_to_bitwise.sv`, `rtl/monomial_decomp.sv`, `rtl/bitwise_to_fold.sv` | rotation, subtraction, decomposition |
| `rtl/nega_fft.sv`, `rtl/nega_ifft.sv`, `rtl/fft_core.sv`, `rtl/cmul_const.sv` | negacyclic transforms |
| `rtl/mac_array.sv`, `rtl/piso.sv` | key multiply-accumulate and rate matching |
| `rtl/sample_extract.sv` | output ciphertext extraction |

## Verification

Each block has a self-checking test in `tb/tb_<block>.sv`. Each test prints
`TB_RESULT checks=… failures=…`, has a watchdog, and checks latency or rate where the design
fixes one. Block tests run at reduced sizes (N = 32, fewer lanes) so their references stay fast.
The FFT tests compare against floating-point DFTs. The MAC test is bit-exact. The decomposition
tests compare with exact integer rotation and digit splitting.

The end-to-end tests use a **trivial bootstrapping key**. `BK_i` is the noiseless encryption of
a random key bit s_i. In the FFT domain it is simply the gadget weight `2^(−8(level+1))` on the
diagonal blocks. Each CMUX must then rotate ACC by `s_i·a_i` exactly, up to rounding. So the
output must equal the sample extraction of `F·X^(−b + Σ a_i·s_i)`, which the test computes
exactly. This exercises every datapath stage with real data and needs no encryption library.
The tests also make every mechanism happen and count it:

* key stalls, by starting the key stream late and pausing it;
* recirculation stalls (reduced test);
* key bank swaps (one per iteration per batch);
* back-to-back batches (reduced test);
* negacyclic wrap-around;
* use of each LUT.

The reduced test also checks the batch period.

* `tb/tb_fpt_top.sv`: reduced kernel (n = 5, N = 32, k = 2, batch 2, 2 batches).
**Known limit.** The end-to-end result is correct at N = 32 and N = 64, for several FFT widths,
k and batch sizes. It is wrong at N = 128 and at the default N = 512: the extracted outputs
come back close to zero. Each block passes its own test at N = 128, and at the default size the
kernel keeps the intended schedule: 584 of 586 iterations started exactly 144 cycles apart. So
the fault lies in how the blocks work together at larger N, and it is still open. The largest
size verified end to end is N = 64 (k = 2, batch 2, FFT width 16). A default-size run of one
batch takes about 11 minutes in Verilator.

To run one test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fpt_pkg.sv tb/tb_cmux_pe.sv -y rtl --top-module tb_cmux_pe
./obj_dir/Vtb_cmux_pe
```

Reduced-size tests of the datapath give the inverse FFT `6 + log2(256/M)` fractional bits. This
keeps the resolution per output coefficient that the full-size format has. The 6 bits are sized
for M = 256, and a smaller M would otherwise lose precision for no reason of the design.

## Departures from the original design and limits

* **FFT structure.** The transforms collect a whole vector and run a fully parallel radix-2
  pipeline of log2 M register stages. The original uses generated streaming FFTs (radix-2^k,
  with streaming permutations). Throughput and number formats are the same; area and latency
  are not. The full-size design is very large as a result: about 2 × 8 × 128 constant complex
  multipliers per transform.
* **Loop length.** The loop is closed with FIFOs, not with a pipeline that is exactly 144
  cycles long. Its latency is about 60 cycles.
* **Products in the MAC** are rounded to the inverse-FFT format before accumulation. The order
  of outputs from the PISO, the 4-bit chunk width, the port formats and the stall rules are
  choices of this design.
* **Parameter set II** (N = 1024, β = 10) is not supported. The chunk and beat schedule assumes
  l·β = 16 bits in 4 chunks.
* **Off-chip parts are not included:** HBM, AXI masters, the XRT kernel wrapper and the host
  software. Nor is the conversion of the key to the FFT domain, which is done once in software.
  The kernel has simple write ports where they would attach.
* **Key switching**, which follows PBS in a full TFHE gate, is not part of the kernel.
