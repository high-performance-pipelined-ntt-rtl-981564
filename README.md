# Pipelined NTT with homogeneous digit-serial Montgomery arithmetic

This is SystemVerilog RTL for a number-theoretic transform (NTT) accelerator
on very wide words: by default a 1024-point NTT over a modulus of up to 253
bits, on 256-bit words. It follows the architecture of "High-Performance
Pipelined NTT Accelerators with Homogeneous Digit-Serial Modulo Arithmetic".

The central idea is that no unit ever handles a whole word. Every word is cut
into K = W/d digits of d bits (default 8 digits of 32 bits). Every adder,
subtractor, multiplier processing element and buffer entry works on one digit
per clock. Usually, modular arithmetic needs comparisons against Q, and a
comparison needs the whole word, which breaks digit-serial processing. This
design removes them. A redundant number range keeps every intermediate value
valid without reduction, and a single subtraction of Q remains at the very
end. Because the digit width is the same everywhere, the critical path is
set by a 32x32-bit multiply-add, not by a 256-bit operation.

To keep a full word per cycle of bandwidth, the transform is spread over
P = W/d parallel *paths* (default 8). Each path is a pipelined (N/P)-point
NTT. A P-point fully parallel NTT merges the paths.

```
            +-------------------- path 0: log2(N/P) delay-feedback stages --+
 a_0,a_P,.. |  [BFU]->[Montgomery mult]  [BFU]->[mult]  ...  [BFU]->[mult]   |--+
            +----------------------------------------------------------------+  |   +------------+   +-------+
 a_1,..     |  path 1                                                         |--+-->| P-point    |-->| final |--> A[bitrev(p+P*m)]
   ...      |  ...                                                            |  |   | parallel   |   |  -Q   |    lane p, word m
 a_{P-1},.. |  path P-1                                                       |--+   | NTT        |   | per   |
            +-----------------------------------------------------------------+      +------------+   | lane  |
                                                                                                      +-------+
```

## Number format: why no comparisons are needed

Every value is kept in Montgomery form, x·R mod Q with R = 2^W, and may lie
anywhere in **[0, 2Q)**, not [0, Q). Q must be odd and satisfy **8Q < R**,
so with W = 256 the modulus can have up to 253 bits.

A decimation-in-frequency butterfly computes (a+b) and (a−b)·ω. Here both
results are formed the same way:

* sum: s = a + b, in [0, 4Q)
* difference: t = a − b + 2Q, in (0, 4Q). Adding 2Q makes the difference
  non-negative and gives it the same range as the sum.

Both then go through a Montgomery multiplication. The difference is
multiplied by its twiddle ω^k (also in [0, 2Q)). The sum is multiplied by the
Montgomery one, R mod Q, which changes its value only modulo Q and brings it
back into range. For a Montgomery product of x < 4Q and w < 2Q:

    (x·w + m·Q) / R  <  (8Q² + R·Q) / R  <  Q + Q = 2Q        since 8Q < R

So the output is again in [0, 2Q). The same range goes into every stage and
comes out of it. No stage needs a comparison or a conditional subtraction.
After the last stage, one subtraction of Q per value, kept only if it does
not borrow, gives the canonical result in [0, Q).

## Digit-serial building blocks

All digit streams are **least significant digit first**. Carries and the
Montgomery quotient are known before the digits that need them.

### Butterfly (`ds_bfu`)
The butterfly is two digit-serial adders with carry registers.

* The sum is a plain ripple-by-digit adder.
* The difference uses a carry-save adder. It compresses a, the bit-inverted
  b and the current digit of 2Q, and a digit adder follows it.
* The +1 of the two's complement enters as the carry-in of digit 0. The
  carry into the next digit can be 0, 1 or 2, so it is 2 bits.
* Outputs are combinational; the multiplier supplies the next register.
* Final carries are dropped, because both results are below 4Q < 2^(W−1).

### Montgomery processing element (`mont_pe`)
The multiplier is a chain of K PEs and processes the word x·w one twiddle
digit at a time. PE i holds twiddle digit w_i and computes

    S_i = (S_{i-1} + x·w_i + m_i·Q) / 2^d,   m_i = ((S_{i-1} + x·w_i) mod 2^d)·(−Q⁻¹) mod 2^d

with x, S and Q streaming through digit by digit. Inside the PE:

| register stage | contents |
|---|---|
| A | partial product x_j·w_i + S_{i-1,j} (a 2d-bit value) |
| B | m_i, captured while digit 0 passes (the only digit it depends on) |
| C | x_j·w_i + S_j + m_i·Q_j + carry; low d bits out, high bits become the carry |

Dividing by 2^d drops the result's digit 0, which is always zero. The PE
sends its carry out in the slot of the dropped digit, so output digit j
leaves with input digit j+1. The result is a **4-cycle latency** with one
digit accepted per cycle.

### Systolic multiplier (`sys_mont_mult`)
K PEs in a row compute x·w·R⁻¹ mod Q, for R = 2^(K·d) = 2^W.

* The multiplicand digit, its index, the twiddle address and a user tag
  travel beside the partial sum. They pass through 4 registers per PE, so
  each PE sees digit j of x at the moment its partial sum digit j arrives.
* The twiddle store (`tf_buffer`) is split into K digit slices with one read
  port each. PE i reads digit i of the twiddle belonging to the word it is
  working on, so consecutive words can use different twiddles.
* An output register follows the last PE. Latency is **4K + 1** cycles:
  33 at the default size. Throughput is one digit per cycle.

### Delay-feedback NTT stage (`sdf_stage`, `delay_buffer`)
A stage whose butterfly pairs are B words apart has a circular buffer of
B·K digits. Each entry is d bits plus the digit's valid and
start-of-polynomial flags. A counter restarted by each polynomial's first
digit switches between two states every B words:

| state | butterfly input | into the buffer | into the multiplier (twiddle) |
|---|---|---|---|
| move | (idle) | incoming word | difference from B words earlier (ω^k for its pair) |
| compute | buffered word (a), incoming word (b) | difference a−b+2Q | sum a+b (Montgomery one) |

One multiplier serves both branches, because they take turns. Its twiddle
store has B pair twiddles plus the Montgomery one at entry B. Stage latency
is B·K + 4K + 1. A buffer entry is written and read on every cycle. The
`primed` flag of the buffer masks its uninitialised contents until it has
been filled once.

### Path (`path_ntt`)
A path is log2(N/P) stages with pair distances N/P/2, N/P/4, ..., 1 words.
With N = 1024 and P = 8 that is 7 stages and 127 words (32,512 bits) of
buffer per path. In path p, stage s, pair k uses the twiddle
ω^((p + P·k)·2^s), where ω is a primitive N-th root of unity. These are the
decimation-in-frequency twiddles of the full N-point transform, restricted
to the elements that path holds. A path leaves its results in bit-reversed
order.

### Parallel NTT (`par_ntt`)
log2(P) columns of butterflies, all branches side by side, with no buffers.

* Every branch of every column has its own systolic multiplier, so the two
  branches of a butterfly are reduced the same way.
* Column t, branch b, with h = P/2^(t+1): the Montgomery one if
  (b mod 2h) < h, otherwise ω^((b mod h)·2^(L+t)), where L = log2(N/P).
* Each multiplier holds one twiddle.
* Latency is log2(P)·(4K + 1).

### Final correction (`final_correct`)
This unit computes v − Q digit by digit with a borrow chain. Meanwhile v and
v − Q wait in a K-entry delay line. When the word leaves, the borrow of the
last digit selects v (borrow: v < Q) or v − Q. It adds K cycles.

## Top level (`ntt_top`)

| port | width | meaning |
|---|---|---|
| `q` | W | modulus Q, odd, 8Q < 2^W; static |
| `qinv` | d | −Q⁻¹ mod 2^d; static |
| `tw_we`, `tw_path`, `tw_stage`, `tw_addr`, `tw_wdata` | | twiddle load port (see below) |
| `in_valid`, `in_sop` | 1 | input digits present / first digit of a polynomial |
| `in_digit` | P × d | lane p: digit j of element a_{p+P·m} |
| `out_valid`, `out_sop`, `out_didx` | 1, 1, log2 K | output framing and digit index |
| `out_digit` | P × d | lane p, word m: digit of A[bitrev_N(p + P·m)], in [0, Q) |

**Input.** A polynomial takes N/P words per lane. Word m of lane p is element
a_{p+P·m}, sent as K consecutive digits, least significant first, with
`in_sop` on the very first digit. All lanes run in lockstep. Inputs are in
Montgomery form, in [0, 2Q).

**Spacing.** Polynomials may follow each other back to back. If there is a
gap between two, it must be at least N/P/2 words, which is N/P/2·K cycles
(512 at the default size). The first stage needs that long to drain the
previous polynomial's second half from its buffer. A shorter gap is not
supported.

**Output.** Values come out in Montgomery form, canonical in [0, Q), in
bit-reversed order. Lane p, word m carries A[bitrev_N(p + P·m)].

**Twiddles** must be loaded once after reset, one word per cycle, in
Montgomery form:

* `tw_path` = p < P, `tw_stage` = s, `tw_addr` = k < N/P/2^(s+1): ω^((p+P·k)·2^s).
* The same with `tw_addr` = N/P/2^(s+1): the Montgomery one, R mod Q.
* `tw_path` = P, `tw_stage` = t, `tw_addr` = b: the parallel-NTT twiddle of
  column t, branch b (formula above).

**Latency**, from the first input digit to the first output digit:

    (N/P − 1)·K + (log2(N/P) + log2(P))·(4K + 1) + K

At the default size this is 1354 cycles. The last digit of the transform
leaves N − 1 cycles later, so one transform takes 2378 cycles from first
input to last output. The published cycle chart shows about 2.35·10³ cycles
for 1024 points. Throughput is one polynomial every N cycles.

| configuration | paths | latency to first output | first in → last out |
|---|---|---|---|
| N=1024, d=32 (default) | 8 | 1354 | 2378 |
| N=512, d=32 | 8 | 809 | 1321 |
| N=256, d=32 | 8 | 520 | 776 |
| N=128, d=32 | 8 | 359 | 487 |
| N=1024, d=16 | 16 | 1674 | 2698 |
| N=1024, d=64 | 4 | 1194 | 2218 |
| N=1024, d=128 | 2 | 1114 | 2138 |

N, W and d are elaboration parameters of `ntt_top`; P and K follow as W/d.
One instance computes one transform size.

**Storage at the default size:**

| storage | size |
|---|---|
| stage buffers | 8 paths × 127 words × 256 bits = 260,096 data bits, 276,352 bits with the flags |
| twiddle stores | 8 × 134 + 24 words of 256 bits |

The storage is all flip-flops, as register arrays. The published figure for
this configuration is "64K flip-flops used for buffering". It does not match
this count, and the source of the difference is unknown.

## Where this RTL departs from, or adds to, the published architecture

These items are choices of this implementation; the publication leaves them
open:

* Stream framing: `valid`, start-of-polynomial and digit-index signals, and
  the minimum gap between polynomials.
* The twiddle load port, and the Montgomery one kept as an extra twiddle
  entry in every stage.
* The PE's split into three registers, and the 4-registers-per-PE side
  chain.
* The final correction, done digit-serially with a K-cycle delay line.
* Bit-reversed output order.

These are not implemented:

* Conversion into and out of Montgomery form. Inputs and twiddles are
  expected in Montgomery form, and outputs are delivered in it.
* Clock gating of the stage buffers. The published power figures rely on it.
* The physical implementation: 7 nm standard cells and place-and-route.
* Run-time selection of N or of the digit size.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block against values computed independently of the RTL: big-integer models
in `tb/ntt_tb_pkg.sv` (modular multiplication, Montgomery products, a direct
O(N²) NTT). Each also checks latency and has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_ds_bfu` | random digit streams, all carry cases |
| `tb_mont_pe` | one PE against the word-level step, words back to back and with gaps, 4-cycle latency |
| `tb_tf_buffer` | independent per-slice read addresses; writes leave other entries alone |
| `tb_sys_mont_mult` | products of random x < 4Q and w < 2Q against the word-level model, output < 2Q, latency 4K+1 |
| `tb_delay_buffer` | delay and `primed` |
| `tb_sdf_stage` | one stage against a word model, both states, gaps |
| `tb_path_ntt` | one path |
| `tb_par_ntt` | the parallel NTT |
| `tb_final_correct` | words in [0, 2Q) including Q−1, Q and 2Q−1 |
| `tb_ntt_top` | N=32, W=16, d=4, Q=7681 |
| `tb_ntt_fig6` | N=32, W=32, d=16: 2 paths of 4 stages and a 2-point NTT |
| `tb_ntt_full` | the default parameters, unmodified: N=1024, W=256, d=32, with a 253-bit Q |

The end-to-end testbenches share `tb/ntt_top_tb_body.svh`. It loads the
twiddles and streams random polynomials in [0, 2Q): two back to back, then
one after the minimum gap. Every output word must equal the direct NTT
exactly. The body also checks latency and stream continuity. It counts the
move and compute states, subtractions that needed the +2Q, and final
subtractions taken and skipped. A mechanism that never occurs counts as a
failure.

The modulus for the wide tests is chosen so that R mod Q is about 0.9·Q. If
Q is just under R/8 instead, R mod Q is tiny. The last column then multiplies
by an almost-zero Montgomery one, and its outputs almost never reach [Q, 2Q),
so the final correction would go untested.

## Simulating

Verilator 5 with `--timing` is enough. Put the packages first:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ntt_pkg.sv tb/ntt_tb_pkg.sv \
    rtl/ds_bfu.sv rtl/mont_pe.sv rtl/tf_buffer.sv rtl/sys_mont_mult.sv \
    rtl/delay_buffer.sv rtl/sdf_stage.sv rtl/path_ntt.sv rtl/par_ntt.sv \
    rtl/final_correct.sv rtl/ntt_top.sv \
    tb/tb_ntt_top.sv --top-module tb_ntt_top -o sim
./obj_dir/sim
```

To run another testbench, swap its file and top name. Every testbench ends with a line
`TB_RESULT checks=<n> failures=<n>`.

At the default size, `tb_ntt_full` takes about 10 s to build and run. The
other sizes in the latency table (N = 128, 256, 512 at d = 32, and
N = 1024 at d = 16, 64, 128) were simulated the same way, with `N` and
`D` overridden, and matched the direct NTT exactly.

To try another size, override `N`, `W` and `D` on `ntt_top`. The other
parameters are derived from them. These must hold:

* W/d is a power of two of at least 2.
* N/(W/d) is a power of two of at least 2.
* N divides Q − 1, so that a primitive N-th root of unity exists.
