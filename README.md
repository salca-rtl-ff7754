# Salca RTL: sparse attention decoding for long contexts

When a language model decodes with a context of tens of thousands of tokens,
each new query has to be scored against every key in the KV cache. Yet only a
few percent of those keys carry almost all of the softmax weight. This design
computes attention only over those keys. It finds them cheaply enough that
the search does not become the bottleneck:

1. **Estimate relevance at very low precision.** Each key keeps a compressed
   copy in memory: half of its channels (64 of 128), quantized to 2 bits,
   plus a scale and a zero point. The query is quantized to 3 bits. Sixteen
   keys are scored per cycle, and the largest |score| of the head (S_max) is
   tracked.
2. **Locate the Top-K threshold with a histogram instead of sorting.**
   Scores are mapped to INT8 codes using S_max. A code is then used directly
   as the address of a 256-entry counter SRAM. After one pass, a scan from
   the top bin down accumulates counts. The first bin where the total
   reaches K is the threshold T. This costs O(n) instead of O(n log k), and
   T is approximate: every token in T's bin is kept.
3. **Traverse** the stored codes again and keep each index whose code is at
   least T. The kept indices are packed densely into an index RAM.
4. **Fetch only the kept keys** from HBM. Requests are reordered so that no
   two in the same cycle hit the same pseudo channel. Exact INT8 q·k is
   computed for each fetched key, and the maximum is tracked.
5. **Fetch the kept values** and compute the safe softmax and P·V. The
   result is normalised once the head is complete.

An optional max-pooling step (window 7, stride 1) runs before the histogram.
It lets a token survive when a close neighbour scores high, so selection
favours contiguous spans of context.

## Block map

| file | role |
|---|---|
| `salca_pkg.sv` | shared constants (D=128, 64 core channels, 16 tokens/cycle, 64K context, 256 bins, 8 K/V channels, reorder range 128), the histogram tag type and the 2^-x function |
| `feature_fetcher.sv` | stage 1 read addresses for the core features, with stack/region swap |
| `relevance_unit.sv` | stage 1 low-precision dot products, dequantization, S_max |
| `score_quant.sv` | stage 2 scores → INT8 codes using S_max |
| `maxpool_unit.sv` | stage 2 window-7 max pooling as an mp3 → mp5 → mp7 recurrence, or bypass |
| `hist_unit.sv` | one tagged histogram SRAM lane with a two-register read-after-write bypass |
| `topk_locator.sv` | 16 histogram lanes plus the reverse prefix-sum scan → threshold |
| `bitonic_sorter.sv` | pipelined bitonic network that compares a key and carries a payload |
| `traverse_unit.sv` | stage 3 compare, compaction by sorting the keep mask, base add |
| `index_store.sv` | dense index RAM: 4 banks × 4 indices/clock, fragment register, fragment RAM |
| `conflict_eliminator.sv` | stage 4 pseudo-channel reordering over windows of 128 indices |
| `qk_unit.sv` | stage 4 segmented INT8 dot products and qk_max |
| `softmax_pv_unit.sv` | stage 5 exponent, P·V accumulation, final division |
| `pingpong_ram.sv`, `sdp_ram.sv`, `sync_fifo.sv`, `seq_div.sv` | double-buffered stage RAMs and small helpers |
| `salca_top.sv` | the five stages and their sequencer, with HBM request/response ports |

## The threshold locator (the unusual part)

Each of the 16 input lanes has its own 256-entry SRAM. Every entry is
`{tag, count}`, where the tag is `<layer, head, decode step>`.

Updating a bin is a read-modify-write pipeline:

- **S0:** read the SRAM.
- **S1:** pick the operand and add one. The write-back happens a cycle later.

Two codes that repeat within three cycles would read a count that has not
been written back yet. Two delay registers hold the address and new count of
the previous two updates. If the current address matches the newer one, its
count is used; otherwise, if it matches the older one, that count is used;
otherwise the SRAM value is used. If the SRAM word carries another head's
tag, it is taken as zero. Because of this, the histogram never has to be
cleared between heads: a new tag is a fresh histogram. At power-up, one
256-cycle sweep writes a reserved all-ones tag everywhere, so random SRAM
contents can never match a live tag.

After the last beat, the scan reads bin 255 down to 0, one bin per cycle
across all lanes. It adds the lane counts and stops at the first bin where
the running total reaches K. If K is at least the number of tokens, the
threshold is 0 and every token is kept.

- **Counting:** n/16 cycles.
- **Scan:** at most 256 cycles more (fewer when the threshold is high).

## Dense index store

A beat of 16 codes yields 0 to 16 kept indices. The traverse unit compacts
them by sorting on the inverted keep bit with a 16-input bitonic network, so
the kept indices end up in front. The count `t` is split into two parts:

- `t/4` full chunks. Each chunk is written to one of four banks, rotating so
  the banks fill evenly.
- `t%4` leftovers. These are merged into a fragment register. Whenever the
  register holds four, it writes one word to a separate fragment RAM.

Whatever is left at the end of the head stays in the register. Reading back
walks the banks, then the fragment RAM, then the register, at one word of up
to 4 indices per pop.

## Pseudo-channel conflict elimination

Key i lives in pseudo channel `i[2:0]`, and a key is 4 beats of 32 bytes in
that channel. The conflict eliminator works on batches:

1. Collect up to 128 indices from the index store. While they arrive, count
   them per channel.
2. Sort the batch by channel with a 128-input bitonic network (28 cycles).
3. Set the start `pos[c]` of each channel, a pointer per channel, and
   `max_count`.
4. Issue for `max_count` cycles. In each cycle, every channel that still has
   a request issues exactly one.

No cycle ever has two requests to the same channel. A stall (`k_req_ready`
low) holds the whole issue cycle. Batches are not overlapped: collect, sort
and issue run in sequence.

## Numerics

- **Relevance:** `score = scale·Σ q·code + zero·Σ q`. The 3-bit query is
  signed, the 2-bit codes are unsigned, and scale and zero are 16-bit signed
  fixed-point numbers. The result is 32-bit.
- **Quantization:** `code = clamp(128 + ((score >> ns) · R) >> 20)`, where
  `ns` shifts S_max down to 16 bits and `R = ⌊127·2^20 / (S_max >> ns)⌋`.
  A serial divider computes R once per head, in 33 cycles.
- **Exact scores:** q and K are INT8, and the 32-bit sum is built over four
  32-element beats.
- **Softmax:** `p = 2^(−(qk_max − s)·scale/256)`, with `scale` in unsigned
  Q8.8. `scale` folds in 1/√d, log2 e and the dequantization of q·k. 2^−x is
  taken from a 16-entry table with linear interpolation, as a Q1.15 result.
  P·V accumulates in 48 bits.
- **Output:** one reciprocal of Σp per head. The D outputs leave as signed
  Q8.8, one per cycle.

## Top level and its memory ports

`salca_top` runs one head per `start` pulse. The configuration inputs must
be held until `done`: tag, token count, K, pooling bypass, region swap, base
addresses, both queries and the softmax scale. HBM is outside the design and
is reached through four streams:

- **Features:** one request per 16 keys. Responses come back in order with
  no back-pressure.
- **K:** one request slot per pseudo channel (8), with address and token
  index. Responses return as 4-beat streams on four dot-product lanes, with
  ready.
- **V:** one request per kept key, in the order of the stage-4 results.
  Responses carry whole 128-byte vectors, with ready.
- **Results:** D values of Q8.8 with their element number.

The HBM stacks are each split into a small region (core features) and a
large one (K/V). `region_swap` selects which stack holds which.

- Features: stack 0 / region 0, or stack 1 / region 0 after a swap.
- K/V: stack 1, or stack 0 after a swap. Within a stack, V sits 0x0400_0000
  above K, at row `i>>3` and four beats per row.

The stack split is at 0x8000_0000.

Debug outputs expose the last threshold, the number of kept keys, the
histogram bypass and stale-tag counts, and the conflict-eliminator batch
and issue-cycle counts.

## Where this RTL departs from the original design

- **No overlap between heads.** Stages run one after another for each head.
  The stage RAMs are double-buffered as in the original, but the sequencer
  waits for a head to finish before starting the next. Throughput per head
  is therefore roughly the sum of the stage times, not the maximum.
- **Single clock.** The original runs compute at 500 MHz and HBM at 1 GHz.
  Here there is one clock and the memory is a port.
- **Fixed-point key factors.** Scales and zero points are 16-bit integers,
  not FP16. Scores are integers, not FP16.
- **Scan time.** The threshold scan adds up to 256 cycles per head on top of
  the n/16 counting cycles.
- **Padding slots count.** When n is not a multiple of 16, the missing slots
  of the last beat enter the histogram as score 0. They are never selected,
  because traverse drops indices ≥ n.
- **K must be at least 1.** With K = 0 no key could be chosen and stage 5
  would wait forever.
- **Batches in sequence.** The conflict eliminator collects, sorts and
  issues one batch at a time.

## Verification

Every module in `tb/` has a self-checking bench that compares against a
model written in the bench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Cycle counts are checked
where the design has a fixed timing:

- sorter: 10 edges;
- traverse: 12 cycles;
- relevance: 2 cycles;
- threshold: n/16 + 256 + 8;
- quantizer setup: ≤ 40 cycles;
- qk: one key per cycle with four lanes;
- softmax output: ≤ 48 + D + 9 cycles.

`tb_salca_top` runs the top at its default parameters (64K buffers). It uses
a behavioural HBM with random ready and random latency, and processes six
heads of 17 to 2500 tokens. A reference model in the bench redoes every step,
and the bench checks the threshold, the kept set, every K/V address and all
128 outputs.

It also counts the events the design exists for and fails if any never
happens:

- memory stalls on all three read streams;
- histogram bypass hits and stale-tag reads;
- max-pool bypass and pooling on;
- more than 128 kept keys, so several reorder batches are needed;
- K larger than n;
- a region swap.

Running a bench with plain verilator, from the folder holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/salca_pkg.sv tb/tb_salca_top.sv --top-module tb_salca_top
./obj_dir/Vtb_salca_top +verilator+rand+reset+2
```

The same pattern works for every `tb/tb_<module>.sv`. The full-size top
bench builds in about a minute and runs in seconds.

## Size notes

At the default parameters, the top synthesises to about 27K word-level
cells, 87K flip-flop bits and 12.9 Mbit of RAM. The RAM breaks down as
follows:

- Score RAM and Quant RAM: two banks each, 4096 × 512 and 4096 × 128 bits.
- Qxk RAM: two banks of 65536 × 48 bits.
- Index RAM: 65536 indices plus the fragment RAM.

Most of the flip-flops are in the 128-input bitonic network of the conflict
eliminator: 28 registered columns. Synthesising that network is the slowest
part of a full run (several minutes).
