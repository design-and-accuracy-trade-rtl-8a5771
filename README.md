# Posit accelerators for extremely small probabilities

Many statistical programs multiply probabilities again and again: the forward algorithm of a
hidden Markov model (HMM) multiplies through one factor per observation, and a Poisson binomial
distribution (PBD) multiplies through one factor per trial. After a few thousand steps the values
fall far below 2^-1074, the smallest positive IEEE binary64 number. The usual fix is to work with
logarithms. Then every addition becomes a log-sum-exp, which is slow, costly in hardware and,
for tiny values, loses precision.

This design keeps the probabilities in linear space and stores them as **posits**. A posit
spends bits on range only when a value needs them. With 64 bits and a large exponent field,
posit(64,18) reaches down to 2^-16,252,928. Close to 1 it still keeps up to 43 fraction bits.
The RTL contains two accelerators built from the same pipelined posit adder and multiplier:

* a **forward-algorithm unit** for HMM likelihoods, in posit(64,18), with H = 64 states by
  default;
* a **column unit** for PBD p-values of genome alignment columns, in posit(64,12), with 8
  processing elements (PEs).

`posit_stats_accel` places the two units side by side. They share no signals. Each unit has its
own host control ports and its own read port to off-chip DRAM.

## The posit format as implemented

A posit(N,ES) word has four fields:

* a sign bit;
* a **regime**: a run of equal bits ended by the opposite bit or by the end of the word;
* up to ES exponent bits;
* the fraction.

A run of l ones gives k = l-1. A run of l zeros gives k = -l. The value is
`(-1)^s * 2^(k*2^ES + e) * 1.f`. When fewer than ES bits are left for the exponent, the
missing low exponent bits count as zero. The word 0...0 is zero, and 10...0 is NaR (not a
real). Negative values are stored in two's complement.

* `posit_decode` turns a word into sign, *scale* `k*2^ES + e` and a left-aligned fraction. It
  first takes the two's-complement magnitude, then counts the regime run.
* `posit_encode` does the reverse. It takes a sign, a scale, a fraction wider than the output,
  and a sticky bit. It builds the regime with an arithmetic shift and rounds to nearest, ties
  to even, on the bit string. It never rounds a non-zero value to zero or to NaR: results
  saturate at minpos or maxpos. This follows the posit standard's rounding. The original units
  are described only as "correctly rounded".
* `posit_mul` has 4 working stages: decode, exact significand product, normalise, encode.
  Padding registers then bring the latency to **12 cycles**.
* `posit_add` has 6 working stages:
  1. decode;
  2. order the operands by magnitude;
  3. align the smaller one, keeping FW+3 extra bits plus a sticky bit;
  4. add or subtract;
  5. normalise with a leading-zero count;
  6. encode.

  Padding registers then bring the latency to **8 cycles**.

Both units take a new operand pair every cycle and have no stall input. The 12 and 8 cycle
latencies are those of the published posit operators. The internal stage split is this design's
own.

## Forward-algorithm unit

For every observation t = 1..T, the unit computes

    alpha_t[q] = ( sum_p alpha_{t-1}[p] * A[p][q] ) * B[q][O_t]      q = 0..H-1

At the end it returns `likelihood = sum_q alpha_T[q]`.

**The PE (`fau_pe`)** handles one state q per cycle and unrolls the whole sum over p:

1. H multipliers form the terms alpha_{t-1}[p] * A[p][q]. This takes 12 cycles.
2. `posit_add_tree` sums them with a balanced tree of adders. This takes 8 * log2 H cycles.
3. One multiplier applies the emission probability B[q][O_t]. This takes 12 cycles.

The latency is therefore **24 + 8 log2 H** cycles, 72 cycles for H = 64. B is delayed inside the
PE so that it meets its sum. If H is not a power of two, the tree pads the missing leaves with
zero, and the latency uses ceil(log2 H). The PE is built for one fixed H. A different H means a
rebuild with a new `H` parameter.

**The controller (`forward_algorithm_unit`)** holds A column by column (`a_mem[q][p] = A[p][q]`),
so the whole column for state q is read in one cycle. It also holds B and two register banks:
`alpha_prev` and `alpha_next`.

* Each outer iteration issues q = 0..H-1 on consecutive cycles.
* The PE's results are collected into `alpha_next`.
* On the cycle the last result returns, the new alpha becomes `alpha_prev`. No copy cycle is
  spent.
* The next observation is taken from the prefetcher at the same moment.

One step therefore costs exactly **H + PE latency** cycles: 136 cycles for H = 64.

For the final sum, alpha_T is sent through the PE once more with every A entry and B forced to
1.0. Multiplying by 1.0 is exact, so the reduction tree produces the likelihood. A run of T steps
takes `T*(H + PE_LAT) + PE_LAT + 1` cycles plus a few control cycles. The `cycles` output reports
the count.

**Host side.** The host loads A, B and the initial alpha one word per cycle through `cfg_we`,
`cfg_sel` (`CFG_A`, `CFG_B` or `CFG_ALPHA`), `cfg_row`, `cfg_col` and `cfg_data`.

* For A, `row = p` and `col = q`. For B, `row = q` and `col = symbol`. For alpha, `row = q`.
* The host then pulses `start` with `num_steps = T` and the DRAM word address `obs_base` of O_1.
* Each observation is one 64-bit DRAM word, and only its low log2(NSYM) bits are used.
* `done` pulses for one cycle when `likelihood` is valid.

## Column unit

Each column of a genome alignment has N trials with success probabilities pn and an observed
count K. A PE runs the following recurrence for n = 1..N:

    pr[k]   = pr_prev[k] * (1 - pn) + pr_prev[k-1] * pn     k = 0..K
    pvalue += pr_prev[K-1] * pn                              only if n > K

It starts from pr = {1, 0, 0, ...} and pvalue = 0.

**The PE (`pbd_pe`)** takes one k per cycle through two parallel multipliers and one adder.

* pr is a single array of KMAX+1 words, updated in place. Each word is written back 30 cycles
  after it was read, and the next trial starts only after the last write-back.
* pr_prev[k-1] is simply the word read one cycle earlier. For k = 0 it is forced to zero.
* The product pr_prev[K-1] * pn is formed anyway by the second multiplier at k = K. It is tapped
  there and added into the p-value by a second adder.
* 1 - pn for the next trial is computed by a third adder while the current trial runs.

The published posit PE has a latency of 30 cycles. The arithmetic accounts for 20 of them (12 for
multiply, 8 for add), so 10 registers are added after the adder. One trial therefore costs
**K + 1 + 30** cycles.

**The unit (`column_unit`)** has 8 lanes. Each lane has its own prefetcher and PE, and each lane
works on a column of its own. The lanes' read requests share one DRAM port through a round-robin
arbiter (`rr_arbiter`). Each request carries the lane number as a tag. Responses come back in
order with their tag, and the tag steers each word to the right lane's FIFO. The host starts a
lane with `start[l]`, `num_trials[l]`, `k_obs[l]` and `base[l]`, then waits for `done[l]` and
reads `pvalue[l]`.

## Prefetcher and memory interface

The inputs are too long to keep on chip: T observations, or N probabilities per column. Both
units therefore stream them from DRAM through a `prefetcher`. The prefetcher is a FIFO of
`DEPTH` words that issues read requests ahead of its consumer.

* It sends a request only while buffered words plus requests in flight are fewer than `DEPTH`.
  So it can accept every response, and the memory side needs no back-pressure.
* The request channel uses valid/ready. Responses are a plain valid strobe with data, in
  request order.
* Assertions check that the FIFO never overflows and that no response arrives unrequested.

The memory controller, the DRAM and the host platform are not part of the RTL. Their signals
are ports of the top.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| posit_stats_accel | N | 64 | posit width |
| | FAU_ES_P / CU_ES_P | 18 / 12 | exponent field size of each unit |
| | H | 64 | HMM states (the PE is built for this H) |
| | NSYM | 16 | observation alphabet size (own choice) |
| | NPE | 8 | column-unit PEs |
| | KMAX | 4096 | largest K per column (own choice) |
| | AW / TW | 32 / 32 | DRAM word address and loop-count widths (own choice) |
| posit_mul / posit_add | LAT | 12 / 8 | pipeline latency |
| pbd_pe | PE_LAT | 30 | PE latency, at least 20 |
| prefetcher | DEPTH | 16 (FAU), 8 (per CU lane) | FIFO depth (own choice) |

The package `posit_pkg` holds the shared constants and the configuration-select enum.

## Where this design departs from, or adds to, the published one

Taken from the published design:

* the posit formats and their field widths;
* the 12 and 8 cycle operator latencies;
* the PE structure of the forward-algorithm unit and its latency formula;
* the 30-cycle PBD PE;
* 8 PEs per column unit;
* fully pipelined inner loops;
* a DRAM prefetcher for the long inputs;
* the cycle model: outer-loop count x (inner-loop length + PE latency).

This design's own choices:

* the internals of the posit operators and their rounding mode. The originals come from an HLS
  library.
* the way the 30-cycle PBD PE is padded.
* the storage layout, the alpha swap, and reusing the PE for the final sum.
* the host load port, and the DRAM word layout of one element per 64-bit word.
* the lane-per-column organisation and tagged arbitration of the column unit. The published
  unit's internals are described elsewhere.
* one extra inner-loop cycle per PBD trial. The k = 0 entry goes through the same datapath, so
  a trial issues K + 1 entries where the published cycle model counts K.
* the tree latency for H that is not a power of two. It uses ceil(log2 H), while the published
  formula 8 log2 H is only exact for powers of two.
* the reset style: an asynchronous active-low `rst_n` on control state only. Datapath registers
  and arrays are not reset.

Not built:

* the log-space versions that the posit units replace;
* the memory controller, the DRAM and the host software.

Range limits to keep in mind:

* posit(64,12) bottoms out at 2^-253,952. Smaller p-values saturate at that value instead of
  being represented.
* A column with K > KMAX needs a larger `KMAX`.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

**Reference model.** `tb/posit_ref_pkg.sv` is a bit-serial reference for posit decode, encode,
multiply and add. It is written independently of the RTL.

**Operator tests.**

* The operators are checked exhaustively for posit(8,ES).
* They are checked at random for 16-bit formats and for posit(64,18) with corner cases: zero,
  NaR, maxpos, minpos and saturation.
* The exact latency is checked as well.

**Unit and system tests.**

* Unit-level testbenches compare against a software model of the same loops built on the
  reference operators.
* They check the cycle counts given above: H + PE latency per forward step, and K + 1 + 30 per
  trial.
* `tb/dram_model.sv` is a behavioural memory. It has a fixed latency, random request stalls and
  lane tags.
* `tb_posit_stats_accel` runs both units together at reduced size. It counts that every
  mechanism happened: prefetch stalls, arbitration contention, the final-sum pass and p-value
  accumulation.
* `tb_posit_stats_accel_full` runs the top at its default parameters, H = 64 in posit(64,18)
  and 8 lanes in posit(64,12). Its likelihood lies near 2^-160,039. Its p-values include K up
  to 4096.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/posit_pkg.sv tb/posit_ref_pkg.sv tb/tb_posit_mul.sv --top-module tb_posit_mul
    ./obj_dir/Vtb_posit_mul

Replace `tb_posit_mul` with any other testbench name. The full-size test takes about a minute to
build and run.
