# Non-binary PUF response generator

A PUF (physical unclonable function) cell normally contributes one key bit.
This design gets more than one bit out of some cells. It evaluates every
cell many times (K times) and counts the 1s. A cell that always gave the
same value is *stable* and gives one key bit, as usual. For every other
cell, the count m, read as the one-frequency m/K, falls into one of 2^t
sections of the range between 0 and 1, and the section index becomes a
t-bit key fragment. The sections are chosen so that a random cell is
equally likely to land in each one, which keeps the key unbiased. The
index is Gray-coded so that a cell drifting into a neighbouring section
costs one bit error, not several.

The scheme and all its numbers come from Bai and Yan, "A New Non-Binary
Response Generation Scheme from Physical Unclonable Functions". Their
FPGA prototype had 1024 SR-latch cells, evaluated K = 1048575 times, with
alphabets of 4, 8 and 16 symbols. This RTL is an independent
implementation of the scheme. The paper gives the algorithm and the
numbers but no circuit. The architecture below (parallel counters, a scan
pipeline, programmable thresholds, the key layout and all the handshakes)
is therefore this implementation's own.

## Why a stable/unstable split comes first

The one-probabilities of real PUF cells follow a U-shaped distribution.
Most cells sit at 0 or 1, and only a few lie in between. In the measured
array, 449 cells gave 0 in all 1048575 evaluations, 520 gave 1 every
time, and only 55 varied. If the whole range [0, 1] were divided into
equal-probability sections, the outer sections would be very narrow.
Telling them apart would then need far more than a million evaluations.

So the range is re-scaled first. Cells with m = 0 or m = K are taken out,
and each supplies its constant value as one key bit. The rest (0 < m < K)
are split over the range [1/K, (K-1)/K], and the thresholds are fitted to
that range. In hardware this step is simply a pair of equality compares
(`rescale_classifier`). No arithmetic is done on m, because the thresholds
are already expressed on the original one-frequency scale.

## Thresholds: from fractions to counts

The paper fits a beta distribution to the measured one-frequencies (shape
parameters alpha = 0.0032 and beta = 0.0028). It then divides the area
under the fitted density into 2^t equal parts. The fit is done off-chip,
and this design starts from its result. The three tables are stored in
`nbpuf_pkg` as Q0.32 fractions (`THR_Q32 = round(T * 2^32)`).

A cell belongs to section i when T(i-1) <= m/K < T(i). Section 0 starts
at the lower end of the range, and the last section includes the upper
end. To avoid division, each threshold is turned into a count:

    C = ceil(T * K)          so that   m >= C   <=>   m/K >= T

The section index is then the number of thresholds whose count m
reaches. `threshold_regs` computes C at reset with
`thr_count(q, K) = ceil(q * K / 2^32)`. For K = 1048575 this gives the
same value as exact ceil(T * K) for all 25 thresholds:

| alphabet | count thresholds C (K = 1048575) |
|---|---|
| 4 (t = 2)  | 1114, 529429, 1047494 |
| 8 (t = 3)  | 34, 1113, 33961, 529428, 1015810, 1047494, 1048542 |
| 16 (t = 4) | 6, 34, 196, 1113, 6246, 33961, 163953, 529428, 889903, 1015810, 1042537, 1047494, 1048384, 1048542, 1048569 |

Most thresholds lie very close to 0 or 1, in counts of a few units to a
few thousand. That is the range where the U-shaped density piles up. It
is also why K must be large.

The 8-ary thresholds are a subset of the 16-ary ones, and the quaternary
ones are nearly a subset. The paper prints the quaternary table with one
more digit (0.0010616 against 0.001061), which moves one count threshold
by 1. The three tables are therefore kept as separate banks.

The registers can be written (`thr_we`, `thr_waddr`, `thr_wdata`, with a
count as the data), so a device whose own fit differs can load its own
thresholds. The flat register layout is: registers 0-2 quaternary, 3-9
8-ary, 10-24 16-ary.

## Gray coding and the key layout

A section index s is sent out as the reflected Gray code `s ^ (s >> 1)`.
For four symbols this gives 00, 01, 11, 10, the assignment the paper
prints.

`key_assembler` builds a single bit string in cell order:

* a stable cell adds its one constant bit;
* a non-binary cell adds its t Gray bits, most significant bit first.

Bit n of the key is bit n % 32 of word n / 32 on the read port.
`key_len` gives the number of valid bits.

For the paper's population the key length is 969 + 55 t bits: 1079
(quaternary), 1134 (8-ary) or 1189 (16-ary). The buffer holds N * 4 =
4096 bits, enough even if every cell were non-binary. The paper orders
the key differently: it assesses the stable and the non-binary bits as
two groups. It also leaves error correction and debiasing to existing
methods, and neither is part of this RTL.

## Datapath and sequencing

```
 PUF array --puf_bits--> one_freq_counters (N x 20-bit)
   ^                          | rd_idx (scan, 1 cell/cycle)
   | puf_eval / puf_valid     v
 nbpuf_eval_ctrl          count m --> rescale_classifier --> class
                                  \-> section_quantizer <-- threshold_regs
                                           | symbol
                                       gray_encoder --> key_assembler --> key words
```

**Enrolment** (`start_enroll`, mode = t) proceeds as follows:

1. The sequencer clears the counters.
2. It requests K evaluations, one at a time. Each request is a one-cycle
   `puf_eval` pulse. The PUF array answers with `puf_bits` and a one-cycle
   `puf_valid` at least one cycle later. On `puf_valid` every counter adds
   its cell's bit, all cells in parallel.
3. It then scans the N counts, one per cycle. Each cell's count, class,
   section and Gray code appear on the `res_*` outputs in the cycle that
   the key buffer takes them.
4. `done` pulses once the last bits are in the key buffer.

**Extraction** (`start_extract`) repeats only the scan. It re-uses the
counts of the last enrolment, which makes switching between alphabets
cheap.

Timing, with a PUF array that answers one cycle after each request:

* `done` comes 2K + N + 3 cycles after the `start_enroll` cycle. That is
  2.1 million cycles at full size, or about 21 ms at 100 MHz.
* `done` comes N + 3 cycles after a `start_extract` cycle.
* A slower array adds its extra latency to every evaluation.

The mode is sampled at start. Values outside 2..4 are clamped.

Assertions check three things:

* the PUF array never answers without a request;
* no counter passes K;
* the key buffer never overflows.

## Interface of `nbpuf_keygen`

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| start_enroll / start_extract | in | 1 | start an enrolment / an extraction from stored counts |
| mode | in | 3 | t: 2 quaternary, 3 8-ary, 4 16-ary |
| busy, done | out | 1 | operation running; one-cycle end pulse |
| evals_done | out | CNT_W | evaluations made in this enrolment |
| puf_eval | out | 1 | request one evaluation of the array |
| puf_bits, puf_valid | in | N, 1 | answer of the array |
| thr_we, thr_waddr, thr_wdata | in | 1, 5, CNT_W | write a count threshold |
| res_valid, res_idx, res_count, res_cls, res_symbol, res_gray | out | | per-cell result during the scan |
| key_rd_addr, key_rd_data | in/out | 7, 32 | key word read (combinational) |
| key_len | out | 13 | valid key bits |
| n_stable0, n_stable1, n_nonbin | out | 11 | cell populations of the last scan |

The per-cell stream lets a host record which cells were stable at
enrolment. A later reconstruction needs that information (helper data),
but the paper does not discuss it.

Parameters: `N_CELLS` (1024) and `K_EVAL` (1048575). Everything else is
derived: the count width `CNT_W = clog2(K+1)` = 20 (K = 2^20 - 1 fills a
20-bit counter exactly) and the key buffer size `N_CELLS * 4`. The
threshold tables scale with `K_EVAL` on their own.

## What is not in the RTL

* **The SR-latch PUF cells.** Their behaviour comes from analog mismatch
  and has no logic description. The top module connects to them through
  `puf_eval`, `puf_bits` and `puf_valid`. `tb/puf_array_model.sv` is a
  behavioural stand-in. Each cell in it either draws from a
  one-probability or produces exactly m ones per K evaluations.
* **The beta fit and the threshold computation.** They are done off-chip.
  Their results are the reset contents of `threshold_regs`.
* **Error correction, debiasing, helper-data storage.** The paper names
  existing methods for these but does not design them.

## Departures and choices to be aware of

* The paper's text lists the quaternary intervals as [min, T0), [T0, T1),
  [T2, T3), [T3, max]. That contradicts its own three thresholds T0..T2
  and its figure. This design uses [T1, T2) and [T2, max], as in the
  figure.
* Thresholds are applied as integer counts, so no divider is needed. The
  only rounding is the conversion of the decimal thresholds to Q0.32,
  which is exact in effect at the default K. At other K, a threshold that
  lands within 2^-32 of an integer count could round differently from
  exact arithmetic.
* The counters are a parallel bank (N x 20 flip-flops). They are not a
  time-shared RAM, since all cells are evaluated at once.
  At N = 1024 this is 20480 flip-flops. Elaborating the bank for
  synthesis through the slang front end of yosys is slow, and the time
  grows steeply with N: about 2 s at 64 cells and 90 s at 256. Simulation
  and lint are fast.

## Files

`rtl/`: `nbpuf_pkg` (types, threshold tables), `nbpuf_eval_ctrl`,
`one_freq_counters`, `threshold_regs`, `rescale_classifier`,
`section_quantizer`, `gray_encoder`, `key_assembler`, and the top
`nbpuf_keygen`.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), the
reference package `nbpuf_tb_pkg` (the paper's thresholds as decimal
reals, with double-precision reference functions), the PUF array model,
and `tb_nbpuf_keygen_full`.

* `tb_nbpuf_keygen` runs the design end to end at 64 cells and K = 1023.
  It covers constant, random and threshold-edge cells, all three
  alphabets, re-extraction, threshold reprogramming and a slow PUF. It
  checks every cell's result and every key bit against its own count of
  the PUF outputs.
* `tb_nbpuf_keygen_full` runs the defaults (1024 cells, K = 1048575) on a
  population shaped like the measured array: 449 / 520 stable cells and
  55 cells spread over the 16 sections as {3,3,3,1,2,2,4,8,4,6,4,4,4,3,1,3}.
  It checks the section histograms {10,16,18,11} (4-ary),
  {6,4,4,12,10,8,7,4} (8-ary) and the 16-ary one, the key lengths
  1079 / 1134 / 1189, and every key bit. It runs in a few seconds.
* `tb_nbpuf_keygen_repeat` is a scaled-down version of the paper's
  error-rate experiment (64 cells, K = 4095). It enrols the same model
  array 20 times, using 16-ary responses, with most cells placed right on
  a threshold. It compares every enrolment with the first. Every symbol
  error between neighbouring sections must cost exactly one key bit, and
  the keys must differ in exactly the Gray bits that changed.

Each testbench prints `TB_RESULT checks=N failures=M`. To run one with
plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_nbpuf_keygen_full \
  -y rtl -y tb +libext+.sv rtl/nbpuf_pkg.sv tb/nbpuf_tb_pkg.sv tb/tb_nbpuf_keygen_full.sv
./obj_dir/Vtb_nbpuf_keygen_full
```

The error rates and biases in the paper (for example a symbol error rate
of 0.098 for quaternary responses) are properties of the physical cells.
This RTL cannot reproduce them. `tb_nbpuf_keygen_repeat` checks only the
part that belongs to the design: a one-section drift costs one bit.
