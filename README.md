# A line-rate HyperLogLog engine

This engine counts how many *distinct* 32-bit values went past in a stream of
data. It does not keep the values. It keeps a HyperLogLog sketch: 65,536 small
counters of 6 bits each, 48 KiB in all. Every value is hashed to 64 bits:

- The first 16 bits of the hash pick a counter (a *bucket*).
- The counter remembers the largest *rank* it has seen. The rank is the
  position of the first 1 bit in the other 48 bits of the hash.

When the stream ends, the 65,536 counters are combined into an estimate with
a standard error of about 0.4 %.

The engine is built to keep up with a 100 Gbit/s network. Each input word
carries 16 values, and each value has its own pipeline (hash, split, rank,
update). So the engine takes one word per clock, with no stalls. Each pipeline
keeps a private sketch. At the end of a data set the sketches are merged
counter by counter, which takes one counter per clock. The estimate is then
computed from the merged stream:

- a harmonic mean of 2^-rank over all buckets;
- a count of empty buckets;
- the linear-counting correction for small cardinalities.

```
 s_tdata (16 x 32 bit) ─► partition ─► pipeline 0 ──┐
                                   ─► pipeline 1 ──┤
                                   ─►   ...      ──┼─► merge (max) ─► zero counter ─┬─► harmonic mean ─► E ─┐
                                   ─► pipeline 15 ─┘                  (bypass)     └──────────── V ───────┴─► correction ─► E*
 pipeline:  Murmur3 (6) ─► index extractor (1) ─► leading-zero detector (1) ─► buckets: read ─► max ─► write
```

The numbers in parentheses are pipeline stages. The defaults follow the
paper's main configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `PREC` (p) | 16 | m = 2^16 buckets |
| `HASH_W` (H) | 64 | hash width, using 64-bit Murmur3 |
| rank width | 6 | bits per bucket; ranks run 1..49 |
| `NUM_PIPES` (k) | 16 | parallel pipelines |

At the paper's 322 MHz network clock, 16 × 32 bits per cycle is 165 Gbit/s.

## The algorithm in one paragraph

For each value v, compute x = h(v):

- `idx` is the top p bits of x.
- `w` is the remaining H−p bits.
- ρ(w) is the number of leading zeros of w, plus one.
- Set `M[idx] = max(M[idx], ρ(w))`.

After the stream:

- Z = Σ 2^-M[j].
- The raw estimate is E = α_m·m²/Z, with α_m = 0.7213/(1+1.079/m).
- V is the number of buckets still at zero.
- If E ≤ 5/2·m and V ≠ 0, the answer is the linear-counting value m·ln(m/V).
  Otherwise it is E.

A 64-bit hash makes hash collisions negligible, so there is no large-range
correction.

## Bucket update: a read-modify-write at one item per cycle

Each bucket memory (`hll_buckets`) is a simple dual-port RAM: one read port
and one write port, with a registered read. It maps onto block RAM. One update
flows through it like this:

| Cycle | What happens |
|---|---|
| t | The index and rank arrive. The read of `M[idx]` is issued. |
| t+1 | The stored value comes back. `hll_rank_max` compares it with the new rank. If the new rank is larger, the new value is written at the end of this cycle. |

A new update enters every cycle, so the read for update n+1 is issued in the
same cycle as the write for update n. If both updates target the same bucket,
the memory returns the *old* value and the earlier update would be lost. To
prevent this, the block keeps the address and value of the last write in a
forwarding register. When the next read hits that address, the forwarded value
replaces the RAM output. Two updates of one bucket in consecutive cycles are
therefore merged, and the larger rank survives. Only the immediately
preceding write can be in flight, so one forwarding entry is enough. The
`merged` output pulses each time the bypass is used.

The memory also has two other modes, `B_CLEAR` and `B_DRAIN`:

- **Clear (`B_CLEAR`).** After reset, the block writes zero to all 2^p
  counters. This takes 2^p cycles, with `busy` high.
- **Drain (`B_DRAIN`).** `drain_start` makes the block read all counters in
  index order, one per cycle. As each counter is read, zero is written back to
  it. So when the drain ends, the sketch is already empty for the next data
  set. Clear-on-read is this design's choice; the paper only says that the
  counters are forwarded after the data.

All pipelines receive the end-of-set marker in the same cycle. Their drains
therefore run in lock-step, and `hll_merge_buckets` only needs a max-fold
across k equal-position counters per cycle. An assertion checks that the
pipelines stay aligned.

## Estimating: an exact sum and one division

### Exact harmonic sum

The addend 2^-M[j] is a one-hot fraction: a single 1 at fractional bit
position M[j]. `hll_harmonic_mean` adds these one-hot words into an exact
fixed-point accumulator:

- **Fractional bits: H+p+1 = 81.** This is enough for the smallest addend,
  2^-49.
- **Integer bits: p+1 = 17.** This is enough for the largest possible sum, m
  (every bucket empty).

No rounding happens anywhere in the sum. The paper asks for m integer digits.
That is far more than the sum can ever need and makes no difference to the
result, so p+1 bits are used.

### Division

The raw estimate is E = α_m·m²/Z. Here α_m is a Q0.32 constant worked out at
elaboration time (`hll_pkg::alpha_q32`), and m² is a power of two. So E in
Q64.16 (16 fractional bits) is a single integer quotient:

```
E·2^16 = (α_q32 · 2^(2p+16+FRAC_W−32)) / Z_int ,   Z_int = Z·2^FRAC_W
```

`hll_divider` computes it with a serial restoring divider, one quotient bit
per cycle (129 cycles). The quotient saturates at 2^80−1. That happens only
when nearly every bucket holds rank 49, far beyond any real stream. The paper
computes E with floating-point operators instead. This design uses
fixed point to stay exact and small. E is truncated to its last bit (2^-16);
the only other error is the rounding of α_m to 32 bits.

### Linear counting without a logarithm table

`hll_correction` evaluates m·ln(m/V) as m·ln2·(p − log2 V):

1. A priority search finds the exponent e of V, normalising it to
   V = 2^e·y with y in [1, 2).
2. The fraction bits of log2 y come one per clock, by repeated squaring. Set
   y ← y². If y ≥ 2, the next bit is 1 and y ← y/2.
3. After 24 bits (`LOG_FRAC`), the value is scaled by ln2 (Q0.32) and by m.

The relative error is a few parts in 2^24. The block takes V from the zero
counter and E from the harmonic mean, in either order. It applies the
selection rule E ≤ 5/2·m (compared exactly) and V ≠ 0.

## Sequencing and interface

`hll_top` has one clock, `clk`, and an asynchronous active-low reset, `rst_n`.
In the paper's system it runs in the network clock domain. The input is an
AXI4-Stream-like word:

| Signal | Meaning |
|---|---|
| `s_tdata[32*NUM_PIPES-1:0]` | Item i is bits `32*i+31 : 32*i` and goes to pipeline i. |
| `s_tkeep[NUM_PIPES-1:0]` | One bit per item: item present. A data set need not fill its last word. |
| `s_tlast` | Marks the last word of a data set. A word with `s_tlast` and no keep bits ends the set without adding items. |
| `s_tvalid` / `s_tready` | The word is taken when both are high. |

The top steps through these states:

| State | `s_tready` | What happens |
|---|---|---|
| `S_INIT` | low | Buckets clear themselves (2^p cycles). |
| `S_AGG` | high | One word per cycle; the pipelines never stall. |
| `S_FLUSH` | low | Waits until the last update has been written (10 cycles), then starts the drain. |
| `S_COMPUTE` | low | 2^p counters stream through merge, zero counter, harmonic mean and correction. |
| `S_RESULT` | low | `m_valid` is high and the result is held until `m_ready`. |

The result ports are:

| Port | Meaning |
|---|---|
| `m_card` | final estimate E*, Q64.16 |
| `m_raw` | raw estimate E, Q64.16 |
| `m_zeros` | V, the number of empty buckets |
| `m_small_range` | 1 when linear counting was used |

After the result is accepted, the next data set can start at once: the drain
has already emptied the buckets.

**Latency.** From the last input word to `m_valid` takes 2^p cycles plus a
little more than the divider's width. At the default size that is measured as
65,684 cycles (2^16 + 148); at p = 10 it is 2^10 + 130. Nearly all of it is
the counter read-out. At 322 MHz it comes to about 204 µs, in line with the
≈203 µs the paper reports. While the engine computes, input is held off. The
paper does not say whether its engine accepts new data during that time. A
second, double-buffered sketch would hide the pause, but it is not built
here.

## Files

| File | Block |
|---|---|
| `rtl/hll_pkg.sv` | Widths, the α_m function (tabulated for m ≤ 64, else 0.7213/(1+1.079/m)), and ln2. |
| `rtl/hll_data_partition.sv` | Slices a word over the pipelines; handshake. |
| `rtl/hll_murmur3_64.sv` | MurmurHash3_x64_128 (first 64-bit half) of a 4-byte key, 6 stages, one key per cycle. `SEED` defaults to 0. |
| `rtl/hll_index_extractor.sv` | Splits x into idx (top p bits) and w. |
| `rtl/hll_lzd.sv` | ρ(w) = leading zeros + 1; ρ = H−p+1 for w = 0. |
| `rtl/hll_rank_max.sv` | Compare and select used inside the bucket update. |
| `rtl/hll_buckets.sv` | Bucket memory: clear, update with forwarding, drain. |
| `rtl/hll_pipeline.sv` | One aggregation pipeline (the four blocks above plus buckets). |
| `rtl/hll_merge_buckets.sv` | Per-bucket max over the pipelines. |
| `rtl/hll_zero_counter.sv` | Passes the counters on and counts the zeros (V). |
| `rtl/hll_harmonic_mean.sv` | Exact sum of 2^-M[j], then the division for E. |
| `rtl/hll_divider.sv` | Serial restoring divider. |
| `rtl/hll_correction.sv` | Linear counting and the choice between it and E. |
| `rtl/hll_top.sv` | The whole engine and its sequencer. |

Each testbench `tb/tb_<module>.sv` drives its block and compares the results
with an independent model in `tb/hll_ref_pkg.sv`. The model includes a
sequential Murmur3, the rank function and a real-valued estimator. Each
testbench prints `TB_RESULT checks=N failures=F` and has a watchdog.

- `tb_hll_top` runs the whole engine at k = 4, p = 10 over four data sets:
  - a small set (linear counting);
  - a large set (raw estimate);
  - repeated values with partially filled words;
  - an empty set.

  It checks E, V, E* and the latency against the reference model. It also
  counts the mechanisms it exercised: input held off, merged bucket updates,
  partial words, both correction branches, and lanes seeing different data.
  It fails if any of these never occurred.
- `tb_hll_top_full` does the same at the default size (k = 16, p = 16), with
  up to 400,000 distinct values per set.
- `tb_hll_std_error` measures accuracy at the default size. It streams data
  sets of exactly n distinct values, for n from 1,000 to 100,000,000, and
  compares E* with n. In one run every estimate was within 1.1% of the truth,
  and the rms error over the sweep was 0.46%. The theoretical standard error
  1.04/√m is 0.41%. The 10^8 set takes about 20 s to simulate.
- `tb_hll_throughput` builds engines with 1, 2, 4, 8, 10 and 16 pipelines
  side by side, at p = 10. It checks that each engine takes one word per
  clock without a stall, that is k × 32 bits per cycle. It also checks that
  all six engines end with the same sketch, since the split over pipelines
  must not change the result.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hll_pkg.sv tb/hll_ref_pkg.sv tb/tb_hll_top_full.sv --top-module tb_hll_top_full
./obj_dir/Vtb_hll_top_full
```

Replace the testbench name to run any other test. The full-size build takes
about half a minute and the run about two seconds.

To change the configuration, override the parameters of `hll_top`:
`NUM_PIPES`, `PREC`, `HASH_W` and `SEED`. The rank width and the
fixed-point widths follow from them.

## Where this design departs from, or adds to, the paper

- **Hash variant and seed.** The paper says only "64-bit Murmur3". This design
  uses the first half of MurmurHash3_x64_128 with seed 0. The reference model
  was written from the same algorithm description; no published test vector
  was available to compare against.
- **Estimate arithmetic.** E is computed in fixed point with an exact divider,
  not in floating point. Estimates are Q64.16.
- **Harmonic-sum width.** The integer part of the sum has p+1 bits, not m
  bits; the sum is exact either way.
- **Linear counting.** It is evaluated by a log2 iteration by repeated
  squaring, where the paper does not say how.
- **Data-set framing, clearing and result handshake.** `s_tkeep`/`s_tlast`,
  clear-on-drain and the `m_valid`/`m_ready` handshake are this design's own.
  The paper leaves them open.
- **DSP mapping.** The hash's multiplications are written as plain 64-bit
  products, one per pipeline stage. Mapping them onto DSP slices, as the paper
  does, is left to synthesis.
- **Not included.** The surrounding system is not included: the 100 Gbit/s
  TCP/IP stack, the Ethernet MAC, the PCIe DMA engine and the host software.
  In the paper's NIC, the payload from the network stack feeds the `s_*`
  ports, and the result returns to the host by DMA.
- **Not verified.** The 322 MHz clock rate is the paper's figure. This RTL has
  been simulated, but no timing closure has been done.
