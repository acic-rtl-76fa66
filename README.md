# ACIC: an admission-controlled L1 instruction cache in SystemVerilog

Server code touches an instruction block in bursts. Consecutive instructions
fall in the same 64-byte block, and nearby branch targets bring it back a
few times. Then the block may go unused for a long while. A single LRU
i-cache cannot tell these two kinds of reuse apart. A block that has just
had a burst looks "recently used", so LRU keeps it, even when its next use
is further away than that of the block it pushed out.

ACIC splits the job between two structures and puts a gate between them:

* a **16-entry i-Filter**, fully associative, which takes every block that
  missed and serves its burst;
* the **32KB, 8-way i-cache**, which a block enters only when it leaves the
  i-Filter *and* a predictor judges that it will be needed again sooner than
  the block it would replace;
* a **two-level admission predictor** (History Register Table + Pattern
  Table, built like a two-level branch predictor), trained by a
  **CSHR**, a table of open contests between an i-Filter victim and its
  i-cache contender.

This repository holds synthesizable RTL for all of these and for the
controller that ties them together. It also holds self-checking
testbenches. The end-to-end test runs at full size and checks the RTL,
fetch by fetch, against an independent model of the policy.

## 1. What happens on a fetch

```
             fetch block address
                  |
        +---------+----------+---------------------+
        v                    v                     v
   i-Filter (16)       i-cache (32KB)        CSHR search (set = addr[11:9])
        |  hit               |  hit                |  matches -> training requests
        +------> block to CPU <------+             v
        |  miss in both                       admission predictor
        v
      L2  --> block placed in the i-Filter only
                 |
                 | i-Filter full: its LRU block is the victim
                 v
   contender = LRU way of the victim's i-cache set
   <victim ptag, contender ptag> -> CSHR
   predictor says admit ? victim replaces contender : victim is dropped
```

A block is never in both structures. Blocks enter the i-cache only from the
i-Filter, and only blocks that missed in both structures enter the
i-Filter.

If the victim's i-cache set still has an empty way, no block gets evicted.
This RTL then fills the empty way with the victim, with no prediction and no
CSHR entry. The original description does not cover this case.

## 2. The admission decision

The victim's **partial tag** is hashed to a 10-bit index into the
1024-entry **HRT**. The partial tag is 12 bits of its address: the low
bits of the i-cache tag, i.e. address bits [23:12]. The hash XOR-folds the
top two bits onto the low ten. The HRT entry is a 4-bit shift register of
the outcomes of past contests involving victims that map there. That
4-bit history selects one of 16 five-bit saturating counters in the
**Pattern Table**. The victim is admitted when the counter is at least 16.

Counters reset to 16 and histories reset to 0. A cold ACIC therefore admits
every victim, which is the plain "i-Filter in front of an i-cache"
behaviour. It learns to drop victims only where contests go against them.
The threshold, the reset values, the hash and the choice of partial-tag bits
all belong to this implementation. The source description fixes none of
them.

## 3. Training: contests in the CSHR

Every victim that meets a real contender opens a contest, whether it was
admitted or dropped. The pair of partial tags goes into the CSHR: 256
entries in 8 sets of 32 ways. The set is chosen by the three most
significant bits of the i-cache set index, which victim and contender
share. Each entry holds two 12-bit tags, a valid bit and a 5-bit LRU age.

Every fetched block's partial tag is compared with both fields of all 32
entries of its CSHR set in parallel:

| match on         | meaning                           | request to predictor |
|------------------|-----------------------------------|----------------------|
| victim field     | victim came back first            | outcome 1            |
| contender field  | contender came back first         | outcome 0            |
| entry displaced unresolved by a new pair | no answer in time | outcome 1 (benefit of the doubt) |

Matched entries are freed. A block matches at most one victim field in
practice. It can match the contender field of many entries, because a
contender that keeps winning stays in the i-cache and keeps meeting new
victims. A dropped victim does not touch the i-cache LRU order, so the
same contender stays the LRU block. One search can therefore produce up to
32 requests, and a displacement adds a 33rd. The predictor has 33 request
ports for this reason (`NREQ`).

## 4. The update pipeline, and why it has queues

This is the least obvious part of the design. Each request names an HRT
register (the hash of its victim tag) and carries an outcome bit.

* **Cycle 1.** All requests read their HRT register in parallel. Each
  request is pushed, with its outcome, into the **update queue** of the PT
  counter its *current* history selects. At the same clock edge every
  named HRT register shifts in its outcome:
  `history <= (history << 1) | outcome`. If several requests name the same
  HRT register in one cycle, only the lowest-numbered request writes it.
  All of them still go on to the PT.
* **Cycle 2.** Every PT counter has its own 10-slot queue. Each cycle the
  head of every non-empty queue is popped and moves its counter one step,
  up for outcome 1 and down for outcome 0.

A lone request therefore changes the prediction two clock edges after it is
presented. Requests that land in the same queue wait one more cycle for
each request ahead of them. A queue that is full drops further requests,
and the drop is reported as the `ptq_drop` event. Since the controller
handles one fetch at a time (at least 5 cycles apart), the delay is almost
always over before the next prediction. `tb_acic_top` models the queues
cycle by cycle anyway, so any difference would show.

## 5. Default sizes

| structure          | organisation                                 | storage |
|--------------------|----------------------------------------------|---------|
| i-Filter           | 16 x (58-bit tag, valid, 4-bit LRU, 64 B)    | 1.12 KB |
| i-cache            | 64 sets x 8 ways x 64 B, 52-bit tags, 3-bit LRU ages | 32 KB data |
| HRT                | 1024 x 4 bits                                | 0.5 KB  |
| PT                 | 16 x 5 bits                                  | 10 B    |
| PT update queues   | 16 x 10 x (4-bit index + 1 bit)              | 100 B   |
| CSHR               | 8 x 32 x (12 + 12 bits, valid, 5-bit LRU)    | 0.94 KB |

Addresses are 64-bit byte addresses, handled as 58-bit block addresses. All
sizes are constants in `rtl/acic_pkg.sv`. The unit modules also take them
as parameters.

## 6. Timing of the top (`acic_top`)

The controller is blocking and serves one fetch at a time:

* `fetch_valid`/`fetch_ready` handshake. The i-Filter lookup, the i-cache
  lookup and the CSHR search all happen in the accept cycle.
* Hit: `resp_valid` comes exactly **4 cycles** after acceptance (the L1
  latency of the evaluated core).
* Miss: one cycle to issue `l2_req_valid` (held until `l2_req_ready`), then
  the L2 latency, then one fill cycle, then the response. With a 15-cycle
  L2 that is **18 cycles**.
* Fill cycle: the i-Filter write, the victim's admission decision, the
  optional i-cache insert and the CSHR insert all happen in this one
  cycle.
* `resp_valid` is a one-cycle pulse with no backpressure.
* `events` is a struct of one-cycle pulses: hits, misses, fills, victims,
  free-way inserts, admits, bypasses, CSHR matches and displacements, PT
  updates, HRT aliasing, queue waits and queue drops.

## 7. Where this RTL departs from, or fills in, the description

* **Blocking controller.** The evaluated core has a 6-wide fetch, 16 L1
  MSHRs and a fetch-directed prefetcher. None of that is built here: one
  demand fetch is in flight at a time, and there is no prefetch port.
  Prefetched fills, which the source discusses as a cause of stale
  predictions, therefore cannot occur.
* **Empty i-cache ways** are filled without a contest (Section 1).
* **Choices not given by the source**, all marked in the file headers:
  - the threshold (16);
  - the reset values;
  - the XOR-fold hash;
  - the partial-tag bits;
  - true-LRU age counters as the LRU scheme;
  - free entries used before LRU ones;
  - the push order and drop rule of the PT queues;
  - a victim-field priority when both fields of one CSHR entry match,
    which can only happen through partial-tag aliasing;
  - a combinational i-cache array, with the 4-cycle latency added by the
    controller;
  - the L2 valid/ready interface.
* **Not built.** The L2 cache, the CPU core and the prefetchers are outside
  ACIC. The testbench has a behavioural L2 (`tb/l2_model.sv`): a fixed
  latency, with data derived from the address.
* **Sensitivity variants.** The alternative configurations (512/2k HRT
  entries, 8/10-bit histories, 2/8-bit counters, 8/32-slot i-Filter, 7/27-bit
  partial tags) are reached by editing `acic_pkg`. None was simulated. The
  hash folds a partial tag of any width onto the 10-bit HRT index.

## 8. Files

| file | contents |
|------|----------|
| `rtl/acic_pkg.sv` | sizes, `upd_req_t`, `acic_events_t`, index / partial-tag / hash functions |
| `rtl/lru_ages.sv` | true-LRU age bookkeeping and replacement choice (helper) |
| `rtl/ifilter.sv` | i-Filter |
| `rtl/icache.sv` | set-associative i-cache with contender query and insert port |
| `rtl/cshr.sv` | CSHR search, insert, request generation |
| `rtl/hrt.sv` | History Register Table, 33 update ports |
| `rtl/pt_update_queue.sv` | one multi-push PT update queue |
| `rtl/pattern_table.sv` | PT counters and threshold |
| `rtl/admission_predictor.sv` | hash + HRT + 16 queues + PT, the update pipeline |
| `rtl/acic_top.sv` | controller and top |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/l2_model.sv` | behavioural L2 for `tb_acic_top` |

## 9. Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/acic_pkg.sv tb/tb_acic_top.sv --top-module tb_acic_top -Mdir obj_top
./obj_top/Vtb_acic_top
```

Replace `tb_acic_top` with any other `tb_<module>` to test one unit. Every
testbench ends with a line `TB_RESULT checks=N failures=M`. Each also has
a watchdog that reports a failure if the run hangs.

## 10. How far it has been checked

* **Unit testbenches.** Each one compares its module against a behavioural
  model written separately from the RTL, for example LRU lists for the two
  caches, or a list of live pairs per set for the CSHR. Each one also
  counts its corner cases: evictions, aliasing, saturation, queue overflow,
  a search and an insert in the same cycle.
* **Latency checks.** The predictor test checks the two-edge update
  latency. The queue test checks that a request pushed into an empty queue
  is at the head in the next cycle.
* **End-to-end test.** `tb_acic_top` runs 40,000 fetches of a bursty
  synthetic code stream on the full-size design in about 20 seconds. It
  checks the data, the address and the latency of every response. It also
  checks every hit, miss, admission, bypass and CSHR event against a model
  of the whole policy, and requires each mechanism to happen at least once.
* **Fault tests.** Every testbench was also run against a copy of its
  module with one deliberate bug, for example a wrong LRU update, an
  inverted outcome, or a `>` in place of `>=`. Each of those runs failed.
* **Not checked.** No real instruction traces were run, so the
  miss-reduction and speedup figures of ACIC are not reproduced here. The
  design has not been synthesized for timing. Comparing 32 CSHR ways and
  feeding 33 HRT ports in one cycle is the likely critical path.
