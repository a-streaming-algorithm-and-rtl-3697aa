# Top-K flow detection at one packet per cycle

This is an RTL model of a streaming accelerator that finds the largest flows
in network traffic: the *K* 5-tuples (source and destination address,
source and destination port, protocol) that carry the most packets during an
observation window, with *K* up to 32768. It follows the architecture in
"A streaming algorithm and hardware accelerator for top-K flow detection in
network traffic" (Gallardo-Pavesi, Fernández, Soto, Hernández, Figueroa).
That paper gives the algorithm and the block structure. Every detail it leaves
open was decided here, and those decisions are listed below.

Two ideas carry the design:

1. **A counting sketch with more small counters than usual.** The packet count
   of every flow is estimated by a TowerSketch with conservative update. Its
   six rows all take the same 2^21 bits of memory, but hold counters of
   different widths: three rows of 8-bit counters (262144 each), two of
   16-bit (131072 each) and one of 32-bit (65536). Most flows are small, so
   the many narrow counters count them with few collisions. The few large
   flows overflow the narrow counters and are carried by the wide ones.
2. **An approximate priority queue that updates in constant time.** A sorted
   list of the top K flows would need about log2 K memory accesses per
   packet. Instead there are R = 8192 small queues of S = 6 elements. A
   flow's hash picks its queue, and that queue is updated in one clock cycle
   by a small combinational circuit. Four elements per queue (R·4 = K) would
   be the exact fit. The two extra elements absorb hash collisions. At the
   end of the window, software sorts the R·S = 49152 read-out elements and
   keeps the K largest.

## Data path

```
 flow_id[103:0] ──►┌────────────────────── tower_sketch ───────────────────────┐
 in_valid ────────►│ 6 x murmur3_hash ─► 6 x tower_row ─► COMP/+1/MUX/MIN ─► reg │──► ready
                   │   (8 cycles)         (3 cycles)        (same cycle)  (1)  │──► est[19:0]
                   └──────────────────────────────────────────────────────────┘──► out_id[31:0]
                                                                                     │
 output_req ─────────────────────────────────────────────────────────────┐          ▼
 rd_ready  ─────────────────────►┌───────────────────────── pqa ──────────┴───────────────┐
                                  │ R0 addr ─► R1 ─► U: forward + pqa_update ─► W: write   │
 rd_valid, count[S][20],  ◄───────│ FSM: CLEAR / INSERT / DRAIN / READ, 4-entry out FIFO  │
 out_id[S][32]                    └───────────────────────────────────────────────────────┘
```

One packet enters every cycle, and nothing in the pipeline stalls. A packet's
estimate leaves the sketch 12 cycles after the packet enters. The PQA has the
queue updated 3 cycles after that and written back one cycle later. At the
paper's 392 MHz, one packet per cycle is 200 Gbit/s even for 64-byte packets.

## The sketch row: addressing a counter inside a 64-bit word

Each row is 2^21 bits, stored as eight banks of 4096 × 64 bits (one
UltraRAM each on the paper's FPGA). The row's 32-bit hash is cut into three
fields, taken from the bottom up:

| field | bits (8-bit row) | width in general | use |
|---|---|---|---|
| offset | [2:0] | 6 − log2 δ | which δ-bit counter in the 64-bit word |
| bank address | [14:3] | 12 | address sent to all eight banks |
| bank select | [17:15] | 3 | which bank's word to keep |

For example, the hash bits `001 001010001010 101` (bank 1, bank address
0x28A, offset 5) select the counter at bits [47:40] of the word. All eight
banks are read at once. A multiplexer keeps one word, which is shifted right
by offset·δ. The low δ bits are the counter. An all-ones counter has
overflowed and counts as +∞. All counters are widened to 32 bits before they
are compared, and an overflowed counter becomes 2^32−1.

## Conservative update in one cycle

In stage E the six widened counters are compared pairwise (COMP). No
separate minimum is formed first:

* `wr_en[i]` is set where counter i has not overflowed and no other counter
  that has not overflowed is smaller. Only those counters are incremented.
  This is the *conservative* update: a counter that is already above the
  flow's minimum has been inflated by other flows and is left alone.
* The +1/MUX step gives each row its candidate: the incremented value where
  `wr_en` is set, the old value elsewhere, and +infinity for an overflowed
  counter.
* A three-level MIN tree (6 → 3 → 2 → 1) reduces the candidates to the
  estimate, which is clipped to the 20-bit width of the estimate bus. If
  every counter has overflowed, the estimate is 2^20−1.

An 8-bit counter that reaches 255 stops counting. From then on the flow's
estimate comes from the 16-bit rows, and after 65535 from the 32-bit row.

The incremented counter is put back into the 64-bit word it came from, and
the whole word is written back to its bank one cycle later.

## Read-modify-write without stalls: forwarding

This is the part of the design that is easiest to get wrong. Both the sketch
and the PQA read a memory word, change it and write it back. The read takes
two cycles. A new packet is accepted every cycle, and two packets of the same
flow can arrive back to back. A packet's read therefore often returns a word
that an older packet is still changing.

**Sketch row (tower_row).** Packet *p* loads its word into the stage-E
register at the end of stage C. At that moment three older writes are not yet
visible in the bank data:

* the write that packet *p−1* is forming in stage E in this same cycle;
* the registered write of *p−2*, which reaches the array at the end of this
  cycle;
* the write of *p−3*, which reached the array on the same edge that sampled
  *p*'s read. The banks are read-first, so that read still got the old word.

Stage C compares *p*'s word address (bank select and bank address, 15 bits)
with these three. It takes the newest one that matches, and otherwise the
bank data. A write four or more cycles older is already in the array.
Forwarding whole words, not single counters, also covers two flows that share
a word but not a counter. The original description says only that the
pipeline takes one packet per cycle. This forwarding scheme is this design's
own.

**PQA.** The paper's pipeline is two cycles to read, one to update and one to
write, with "two-cycle forwarding". Here the update stage U takes the queue
from the W register (the write of *p−1*) or from the write of the cycle
before (*p−2*), whichever is newest and has the same queue index. Otherwise
it uses the bank data.

Both mechanisms are checked by the testbenches against models that have no
pipeline at all. When a single forwarding source is removed, those checks
fail.

## The priority queue update (pqa_update)

A queue is S elements `{valid, tag, count}` kept in ascending order. Element
0 holds the lowest count and element S−1 the highest. The queue index is the
low log2 R = 13 bits of the flow's 32-bit hash, and the tag is the upper 19
bits. That hash is the sketch's row-1 hash, so no extra hash unit is needed.
The update circuit builds two thermometer codes:

* `eq_cnt[j] = in_est < count[j]` is 1 where the incoming flow is smaller.
  Its 1-to-0 transition is the insertion point.
* `eq_tag[j]` is 1 from the element holding the incoming tag upwards. It is
  all ones when the tag is not in the queue.

`shift = eq_tag ^ eq_cnt` marks the elements that change. Each element has
one three-way multiplexer:

| shift[j] | shift[j+1] | element j takes |
|---|---|---|
| 0 | – | its own value |
| 1 | 0 (or j = S−1) | the incoming {tag, est} |
| 1 | 1 | the element to its right, j+1 |

This covers all three cases of the algorithm:

* **Case I: new flow, larger than the smallest.** `eq_tag` is all ones, so
  `shift` is 1 up to the insertion point. Everything below the insertion
  point moves down one place, and element 0 is dropped.
* **Case II: known flow, new estimate is higher.** `shift` is 1 from the
  flow's old position to its new one. The elements in between move down one
  place, and the flow moves up.
* **Case III: nothing to do.** This happens when a new flow is not larger
  than the smallest element, or a known flow's estimate has not grown. The
  queue is left as it is and not written back.

Worked example, S = 6, counts `[2 5 9 12 20 31]` (elements 0…5) and a new
flow with estimate 10: `eq_cnt = 111000` (read from element 5 down to
element 0) and `eq_tag = 111111`, so `shift = 000111`. Element 2 takes the
input, elements 0 and 1 take from their right, and the result is
`[5 9 10 12 20 31]`. The element with count 2 is dropped.

Insertion needs `in_est` to be strictly larger than the smallest count, and
an update needs it to be strictly larger than the stored count. When counts
are equal, the newer flow goes above the older ones.

## Observation window and readout

* **After reset**, `busy` is high while the memories are zeroed: 4096 cycles
  for the sketch and R = 8192 for the PQA. Packets offered during this time
  are dropped.
* **Insertion.** Every valid packet updates the sketch and then the PQA.
* **End of window.** A one-cycle pulse on `output_req` (the paper calls this
  signal `output`, which is a SystemVerilog keyword) does four things:
  * The sketch stops accepting packets, lets its pipeline empty, and writes
    zeros to every bank address.
  * The PQA waits in DRAIN until the sketch has delivered its last estimate
    and its own pipeline is empty.
  * The PQA then reads queue 0, 1, …, R−1. Each queue is one transfer of S
    elements on `count[j]` / `out_id[j]`, with `rd_valid` and `rd_ready`
    handshaking. `out_id` is the flow's full 32-bit hash, `{tag, queue
    index}`. An empty element reads `count = 0`. A 4-entry FIFO lets
    `rd_ready` drop at any time, and `rd_valid` and the data stay stable
    while it is low.
  * Each queue is written to zero as it is read. After the R-th transfer the
    PQA returns to insertion, so the next window starts empty.
* **Software side (not in this RTL).** The host collects the R·S pairs,
  sorts them by count and keeps the K largest. The hash identifies the flow.
  The paper assumes that mapping from hash back to 5-tuple is done outside
  the accelerator.

## Top-level ports (topk_accel)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| flow_id | in | 104 | 5-tuple, hashed as 13 little-endian bytes |
| in_valid | in | 1 | a packet is present (no back-pressure) |
| output_req | in | 1 | end of window: start readout, clear the sketch |
| rd_ready | in | 1 | the reader takes the current queue |
| rd_valid | out | 1 | a queue is on count/out_id |
| count | out | S × 20 | estimates of the queue's elements, lowest first |
| out_id | out | S × 32 | 32-bit flow hashes of those elements |
| busy | out | 1 | clearing, draining or reading; packets are dropped |
| ev_fwd, ev_insert, ev_update, ev_reject | out | 1 each | PQA event strobes (forwarded queue, case I, II, III) |

Parameters: `S` (default 6) and `R` (default 8192, a power of two). The
sketch geometry is fixed in `topk_pkg`: counter widths, eight banks of 4096 ×
64 bits per row, seeds, and the 20-bit estimate.

## Where this RTL departs from, or adds to, the published description

* **Estimate width.** The block diagram prints 20 bits on the estimate and
  count buses, while the algorithm computes a 32-bit minimum. The RTL keeps
  32 bits inside the sketch and clips to 2^20−1 at its output.
* **Queue direction.** The algorithm listing treats the last element of a
  queue as the smallest. The hardware description says elements come "from
  the memory block to the right (higher frequency)". The RTL follows the
  hardware description: element S−1 is the largest. Readout lists each queue
  lowest first.
* **Valid bit.** Each PQA element has a valid bit, so an empty element never
  matches a tag. This makes an element 40 bits (1 + 19 + 20). Six banks of
  8192 × 40 bits map onto twelve 4K × 72 UltraRAMs, the count the paper
  reports.
* **Hash.** MurmurHash3 x86_32 over the 13 key bytes, in 8 pipeline stages.
  The row seeds (`topk_pkg::ROW_SEED`) are this design's; the paper says only
  that they differ per row.
* **Design choices not in the paper:** the sketch forwarding, the clearing
  of the sketch, the reset-time clearing of both memories, the DRAIN state,
  the readout FIFO and the readout order. So are the `busy` output and the
  event strobes.
* **Counter extension and overflow.** These follow the algorithm exactly,
  including leaving overflowed counters out of both minima.
* **Not modelled:** the host-side sort, the packet parser that builds
  `flow_id`, and the network framework around the accelerator. No timing
  closure was attempted. The 392 MHz figure belongs to the paper's FPGA
  build.

## Files

| file | content |
|---|---|
| `rtl/topk_pkg.sv` | shared constants: counter widths, seeds, bank geometry |
| `rtl/murmur3_hash.sv` | 8-stage MurmurHash3 x86_32 of a 104-bit key |
| `rtl/ram_bank.sv` | simple dual-port RAM, two-cycle registered read, read-first |
| `rtl/tower_row.sv` | one sketch row: banks, word select, shift, forwarding, write-back |
| `rtl/tower_sketch.sv` | six hashes and rows, COMP/+1/MUX/MIN, clear controller |
| `rtl/pqa_update.sv` | combinational queue update (thermometer codes, per-element mux) |
| `rtl/pqa.sv` | PQA banks, insertion pipeline with forwarding, FSM, readout FIFO |
| `rtl/topk_accel.sv` | top level |
| `tb/topk_ref_pkg.sv` | reference models: byte-wise MurmurHash3, algorithmic sketch, list-based PQA |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/topk_workload_tb.sv` | accuracy run (precision, ARE) on a large synthetic trace |

## Verification

Every testbench compares the design with a model in `tb/topk_ref_pkg.sv`
that has no pipeline. Every testbench ends by printing `TB_RESULT
checks=N failures=M`.

* `murmur3_hash_tb`: fixed golden hashes and random keys against the
  byte-wise reference, one key per cycle, with 8-cycle latency.
* `ram_bank_tb`: random traffic with address collisions; two-cycle latency;
  read-first behaviour.
* `tower_row_tb`: rows of 8, 16 and 32 bits driven from a few hot hashes, so
  that packets 1–4 cycles apart share words and counters; 8-bit overflow;
  clearing.
* `tower_sketch_tb`: the estimate and `out_id` of every packet, and the
  12-cycle latency. The stream has three phases:
  * a skewed stream, then 150000 packets over 100000 flows, which fills the
    counters densely enough that a plain increment gives different results;
  * one flow run past 8-bit and 16-bit overflow and past 20-bit saturation
    (1.15 M packets);
  * a clear.
* `pqa_update_tb`: random sorted queues with ties and empty elements; all
  three cases; every element and flag checked.
* `pqa_tb`: R = 16, so that consecutive insertions hit the same queue; full
  readout under random `rd_ready`; insertions that arrive during DRAIN;
  memory empty after readout.
* `topk_accel_tb`: **full default size**, no parameter overrides. It sends
  320000 packets: one flow carries a quarter of them, and the rest are drawn
  log-uniformly from 60000 flows. Every estimate is checked, and all 8192
  queues are compared after readout. The top 1000 flows of the read-out list
  are checked against the true counts; the run finds all 1000. A second
  window checks that both structures were emptied. It counts, and requires
  at least once:
  * sketch hazards;
  * PQA forwarding;
  * cases I, II and III;
  * 8-bit and 16-bit overflow;
  * readout back-pressure;
  * dropped packets.

  It runs in about two seconds.

* `topk_workload_tb`: an accuracy run at the default size, on a synthetic
  trace sized like a one-minute backbone trace. It has 3.9 M packets and
  about 434000 distinct flows, with Zipf-like flow sizes. The whole PQA is
  read out and sorted, and precision and average relative error (ARE) are
  measured against the true counts for K = 1024 … 32768. The metrics are
  defined in the file header. Measured: precision 1.000 up to K = 16384 and
  0.997 at K = 32768; ARE 0.00 % up to K = 8192, 0.07 % at 16384 and 1.08 %
  at 32768. The synthetic trace is kinder than real traffic, so these numbers
  are not comparable with published results on real traces. It runs in about
  eight seconds.

To run one with Verilator, for example the full-size test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/topk_pkg.sv tb/topk_ref_pkg.sv tb/topk_accel_tb.sv --top-module topk_accel_tb
./obj_dir/Vtopk_accel_tb
```

The same pattern works for the other testbenches, with their own file and
`--top-module`. The RTL is written for two-state simulation: every register
that is read before it is written has a reset, and the memories are zeroed
by the clear sequences.

## Size

With the defaults, the memories hold 6 × 2^21 bits of counters and 6 ×
8192 × 40 bits of queues: 14.55 Mbit in all, or 48 + 12 UltraRAMs on the
paper's FPGA. The logic is six 32-bit hash pipelines (the paper's build
spends 240 DSP blocks on them), six 32-bit comparator/adder slices, and one
6-element sorted-queue update circuit.
