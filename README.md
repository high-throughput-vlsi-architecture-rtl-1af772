# ORBGRAND decoder in SystemVerilog

This is a soft-decision decoder that works for any binary linear block code. It does not
decode the code's structure. It guesses the noise. The decoder tries error patterns `e`,
most likely first, until the received hard decision `yhat` with `e` flipped satisfies every
parity check, `H * (yhat ^ e)^T = 0`. The decoded word is `c = yhat ^ e`, and the message
is `u = c * G^-1`. Because only `H` and `G^-1` describe the code, loading new matrices
switches to another code or rate without changing the hardware.

"Most likely first" uses ORBGRAND's (Ordered Reliability Bits GRAND) approximation. The
bits are ranked by reliability: rank 1 is the bit with the smallest |LLR|. An error pattern
that flips the bits of ranks `lambda_1 > lambda_2 > ... > lambda_P` has **logistic weight**
`LW = lambda_1 + ... + lambda_P`. Patterns are tried in increasing logistic weight. So the
patterns of one weight `LW` are exactly the partitions of the integer `LW` into distinct
parts. The search stops at `LW_max`, or when a pattern would need more than `P_max` flips.

The RTL implements the architecture of Abbas, Tonnellier, Ercan, Jalaleddine and Gross,
"High-Throughput VLSI architecture for Soft-Decision decoding with ORBGRAND". It uses that
design's main configuration: n = 128, code rates 0.75 to 1, 5-bit LLRs, `LW_max = 64`,
`P_max = 6`. The RTL is an independent implementation. The section
"Where this RTL departs from the architecture" lists what it adds and what it interprets.

## Block diagram and data flow

```
 in_llr (N x Q, sign-magnitude)
   |-- sign bits (yhat) ----> hard_syndrome (H*yhat) --> zero? --> done in 1 cycle
   |                                  | syn_hat
   |-- magnitudes -----+              v
 h_memory -- columns --+--> bitonic_sorter --- s (sorted syndromes) --> controller --> s_c, t
                                |    (log2 N stages)           |                        |
                                | ind                           +----> decoder_core <--+
                                v                                       | hit, one-hot lambda_1..3
                           index_mux (P x n:1) <--- one-hot lambda_4..P (controller)
                                |
                                v
                        word_generator (flip bits, multiply by G^-1) --> out_c, out_u
```

Modules (`rtl/`):

| module | role |
|---|---|
| `orbgrand_pkg` | default sizes, the `lambda_3^max` bound, register lengths |
| `h_memory` | N columns of H (SW bits each), written one column at a time, read all at once |
| `hard_syndrome` | H * yhat, and a flag for a zero syndrome |
| `bitonic_sorter` | pipelined Batcher sorter of the magnitudes, carrying bit index and H column |
| `decoder_core` | three shift registers, XOR arrays and 2D priority encoder: one time-step per cycle |
| `controller` | step schedule, the fixed small parts lambda_4..lambda_P and their combined syndrome s_c |
| `index_mux` | P one-hot n:1 multiplexers mapping reliability ranks back to bit positions |
| `word_generator` | c = yhat ^ e, and u = c * G^-1 from a loadable G^-1 |
| `orbgrand_decoder` | top level: sequencing, handshakes, result register |

## Syndromes instead of words

The decoder works on syndromes. The code is linear, so the syndrome of `yhat ^ e` is the
XOR of the hard-decision syndrome and the columns of H at the flipped positions. Column
`i` of H is `s_i`, the syndrome of a single error at bit `i`. The sorter orders the
columns by reliability: after sorting, `s_j` is the column of the j-th least reliable bit.
A pattern with ranks `lambda_1..lambda_P` therefore passes when

    syn_hat ^ s_{lambda_1} ^ s_{lambda_2} ^ ... ^ s_{lambda_P} == 0

Each candidate costs one (n-k)-bit XOR of a few words and a zero test. The design spends
its area on testing hundreds of these at once.

## The partition engine (`decoder_core`)

The core tests, in one clock cycle, every distinct partition of a target sum `t` into two
or three parts:

* **Shift register 2** holds `s_1, s_2, ...` at index `i`.
* **Shift register 3** holds `s_1 .. s_{L3}`, where `L3 = lambda_3^max`. This is the
  largest third part of a 3-part partition of `LW_max`. It is `lambda_3 < (LW_max-2)/3`,
  which gives 20 for `LW_max = 64`.
* **Shift register 1** holds `s_{t-i}` at index `i`. This is "the rest of the sum": the
  first part is whatever is left once the others are chosen.

Registers 1 and 2 hold `2*(L3+1)` syndromes each (42 at the default size). Register 3
holds `L3`. The XOR array is a grid of `L3+1` rows, called buses:

* Row 0 tests the 2-part partitions. Cell `c` combines register-2 index `c+1`
  (`lambda_2 = c+1`) with register-1 index `c+1` (`lambda_1 = t-c-1`).
* Row `r >= 1` tests the 3-part partitions with `lambda_3 = r`. Cell `c` combines
  register-3 index `r`, register-2 index `r+1+c` (`lambda_2`) and register-1 index
  `2r+1+c` (`lambda_1 = t - 2r - 1 - c`).

In every cell the combined syndrome `s_c` is XORed in as well.

Walking along a row, `lambda_2` goes up while `lambda_1` goes down and `lambda_3` stays
fixed. This is the regular structure of partition lists that the design exploits. A cell
counts only when it is a real partition. Cells with `lambda_1 <= lambda_2` are masked,
and so is a cell whose `t` is too small. Example for `LW = 20`:

* Register 1 holds `s19 .. s8` and register 2 holds `s1 .. s12`.
* Row 0 tests `(19,1) .. (11,9)`.
* Row 1 tests `(17,2,1) .. (10,9,1)`.
* Row 5 tests `(9,6,5)` and `(8,7,5)`.

Only grid cells that can hold a partition for some `t <= LW_max` are built. At the
default size that is about 370 cells of 32-bit XOR and zero-detect.

A 2D priority encoder picks the winner. Among the cells that pass, it takes the lowest
row, then the lowest column. The winner goes out as three one-hot vectors over the N
ranks. A separate row of `min(LW_max, N)` XOR arrays tests every 1-bit pattern at once
(the "one-bit step").

In this RTL, register 1 is a view of the sorted syndromes selected by `t`, a barrel
selection. Physical flops that shift are not used. Registers 2 and 3 are fixed taps of
the sorter's output register. Either way the core has no pipelining, and one step takes
one clock cycle.

## The schedule (`controller`)

Patterns with more than three flips use the same grid. The controller fixes the smallest
parts `lambda_4 > ... > lambda_P`. It puts `s_c = syn_hat ^ s_{lambda_4} ^ ... ^ s_{lambda_P}`
into every cell and sets the target to `t = LW - (lambda_4 + ... + lambda_P)`. The core's
rows must then keep `lambda_3 > lambda_4`, so rows `r <= lambda_4` are disabled, and so is
the 2-part row. One choice of the small parts costs one cycle.

The full order of steps is:

1. Hard-decision check (the CHECK cycle, with the first sorter phase in parallel).
2. Sorting: `log2(N) - 1` more cycles.
3. One step testing all 1-bit patterns.
4. For `LW = 3 .. LW_max`:
   * one step for all 2- and 3-part partitions of `LW`;
   * for `P = 4 .. P_max`, one step per choice of `lambda_4 > .. > lambda_P >= 1` that
     can still be completed, that is `LW - sum >= 3*lambda_4 + 6`. Here `lambda_P`
     changes slowest and `lambda_4` fastest.

Infeasible combinations are skipped in the same cycle. At the default sizes this gives
1 + 4218 = 4219 search steps. Adding the 7 cycles of check and sorting, the worst case is
**4226 cycles**, the figure reported for the original design (9.3 us at 454 MHz).

Within one weight, the partitions of size 2 and 3 come before those of size 4, 5 and 6.
Within a step, the priority encoder decides the order. All 1-bit patterns up to
`LW_max` are tested before anything of weight 3. This step ordering is the architecture's
own and is kept.

## Sorting (`bitonic_sorter`)

The sorter is a Batcher bitonic network with `log2 N` merge phases. Phase `k` has `k`
compare-exchange layers. There is one pipeline register per phase, so the latency is
`log2 N` cycles. Each element carries three things:

* the 4-bit magnitude, the sort key;
* the 7-bit bit index, which becomes the permutation `ind`;
* the 32-bit H column, which becomes the sorted `s_j`.

Equal magnitudes are ordered by bit index, so results are reproducible. The stage
registers load only on valid data. After a frame passes through, the sorter's outputs
hold, and the core and the multiplexers use them directly for the rest of the search.

## Turning ranks back into bits

On a hit, the core (for `lambda_1..3`) and the controller (for `lambda_4..6`) deliver P
one-hot rank vectors. `index_mux` uses them to pick `ind[rank]`, the bit position.
`word_generator` flips those bits of `yhat`. It then XORs the rows of `G^-1` where the
corrected word is 1. The result goes to the output register at the end of the hit cycle.

## Interfaces and timing (`orbgrand_decoder`)

* **LLR input.** Each LLR is `Q = 5` bits, sign-magnitude. Bit 4 is the sign, and 1 means
  the bit is 1 (negative LLR). Bits 3..0 are |LLR|.
* **Loading H.** Use `h_we`, `h_addr` and `h_col`. One column per cycle, with rows above
  n-k set to zero.
* **Loading G^-1.** Use `g_we`, `g_addr` and `g_row`. One row of K bits per cycle. For a
  systematic code, row `i < k` is the unit vector `i` and the other rows are zero.
* **Frames.** `in_valid`/`in_ready`. The frame is taken on a cycle where both are high.
* **Results.** `out_valid`/`out_ready`. The outputs are held while `out_valid && !out_ready`.
  * `out_c` is the codeword and `out_u` the message.
  * `out_ok` = 0 means the search reached `LW_max` without success. `out_c` then holds the
    hard decision.
  * `out_hw` is the number of flipped bits.
  * `out_cycles` counts the cycles from the CHECK cycle to the cycle that produced the
    result. Cycles lost to output back-pressure are not counted.
* **Throughput.** A frame whose hard decision is already a codeword takes 1 cycle. While
  the output register can take it, the next frame is accepted in the same cycle, so clean
  frames stream at one per cycle. This matches the design's high average throughput at
  high SNR, where almost every frame is clean. Any other frame blocks the input until it
  is finished.
* **Reset.** `rst_n` is asynchronous and active low. It clears the control state. The H
  and G^-1 arrays are not reset.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 128 | code length (power of two, at least `LW_max`) |
| `Q` | 5 | LLR width, 1 sign + 4 magnitude bits |
| `SW` | 32 | syndrome width = largest n-k (rate >= 0.75 at n = 128) |
| `K` | 128 | message output width (largest k) |
| `LWMAX` | 64 | largest logistic weight searched (at least 6) |
| `PMAX` | 6 | largest number of flipped bits (4..6) |

The controller keeps up to three fixed parts, so `PMAX` above 6 would need more part
registers in `controller` and in the testbench reference.

## Where this RTL departs from the architecture

Interpreted or added here; none of it changes which patterns are tested:

* **Sorting overlaps the check.** The first sorter phase runs in the same cycle as the
  hard-decision check, instead of strictly after a failed check. This gives the 1-cycle
  best case and the 4226-cycle worst case.
* **Register 1** is a selected view rather than a physical shifter.
* **Priority inside a step:** the 2D priority encoder takes the lowest `lambda_3`, then
  the lowest `lambda_2`. This order is unspecified in the source.
* **Sorter ties** are broken by bit index.
* **G^-1 storage** inside the word generator is an addition. The architecture shows the
  message output but not where `G^-1` lives.
* **Interfaces:** the handshakes, the status outputs (`out_ok`, `out_hw`, `out_cycles`),
  the behaviour on abandonment, and reset are this design's choices.
* **Not covered:** no timing or area figures are claimed. The 454 MHz, 1.82 mm^2 (65 nm)
  numbers belong to the original implementation.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

* `tb_h_memory`, `tb_hard_syndrome`, `tb_index_mux`, `tb_word_generator` check against
  independently computed values: a row-wise syndrome, a column-wise `G^-1` product, and
  permutation look-ups.
* `tb_bitonic_sorter` checks order, tie rule, payload, the `log2 N`-cycle latency, and
  that the outputs hold.
* `tb_decoder_core` (N = 32, LW_max = 24) plants patterns, including forbidden ones with
  `lambda_3 = lambda_4`. It compares against a direct enumeration of partitions in
  priority order.
* `tb_controller` (default size) compares every step against a nested-loop enumeration.
  It checks that there are 4219 steps, and checks the hold and stop-on-hit behaviour.
* `tb_orbgrand_decoder` (N = 32, `LW_max` = 24, 600 frames) and `tb_orbgrand_full`
  (default size, 400 frames of a random (128,105) code) run end to end. They compare
  every output, including the cycle count, with the behavioural decoder in
  `tb/orbgrand_ref_pkg.sv`.
  * The test code is systematic, `H = [A | I]`, with random `A`.
  * Frames carry 0 to 6 low-reliability errors, or heavy noise.
  * Both testbenches require each mechanism to happen at least once: hard-decision
    success, hits of 1, 2, 3 and 4 to 6 bits, abandonment, output stalls, and
    back-to-back frames.
  * The full-size run also checks that an abandoned frame takes exactly 4226 cycles.

`tb_orbgrand_awgn` runs the channel workload at the default size. It transmits BPSK
over AWGN with a random (128,105) code at 6, 8 and 10 dB SNR, where
SNR = -10 log10 sigma^2, with 1000 frames per point. Each result is compared with the
reference decoder. The channel output `y` is quantized with 3 fractional bits; for AWGN
the LLR is proportional to `y`, so the reliability order is the same.

Measured frame errors and average decoding cycles:

| SNR | frame errors | average cycles |
|---|---|---|
| 6 dB | 71 / 1000 | 530 (many frames abandoned at 4226) |
| 8 dB | 0 / 1000 | 8.7 |
| 10 dB | 0 / 1000 | 1.6 |

The original design reports 2.47 ns at 454 MHz (about 1.1 cycles) on the 5G polar code
at 10 dB. The random test code and the quantization here are not that setup, so the
figures are not expected to match exactly.

The behavioural reference follows the same test order as the hardware, so it checks the
order as well as the result. It enumerates partitions directly, with no grid.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/orbgrand_pkg.sv tb/orbgrand_ref_pkg.sv rtl/*.sv tb/tb_orbgrand_full.sv \
  --top-module tb_orbgrand_full -o sim && obj_dir/sim
```

Use the same command with another testbench file and `--top-module` for the unit tests.
Only the end-to-end testbenches need `tb/orbgrand_ref_pkg.sv`.

## Codes this instance can run

* **Runs:** the 5G NR CRC-aided polar code (128,105) with `LW_max = 64` and `P <= 6`.
  This is the configuration the original design was evaluated on. n-k = 23 fits in
  `SW = 32`.
* **Runs:** any length-128 code of rate 0.75 or more.
* **Does not run:** larger search limits such as `LW_max = 96`, `LW_max = n(n+1)/2`, or
  unlimited P. The original authors studied these only for error-rate comparison.
  Running them needs a larger `LWMAX`, which grows the registers and the grid
  quadratically, or more controller part registers.
