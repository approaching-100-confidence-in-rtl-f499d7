# ReliableSketch in hardware: a per-flow counter that knows its own error

Most stream-counting sketches (Count-Min, CU, and others) give an estimate of a
flow's packet count with an error that is small on average but unbounded for an
unlucky flow. ReliableSketch changes the question. Every answer is an interval
`[est - mpe, est]` that is guaranteed to contain the true count, and the width of
that interval (the *maximum possible error*, MPE) is kept below a user threshold
`LAMBDA` for every flow. The structure does this by making each bucket record how
much foreign traffic it has absorbed. When that amount reaches the bucket's share
of the error budget, the bucket closes to newcomers. Newcomers then move on to a
smaller layer with a smaller share of the budget.

This RTL implements the structure as a fully pipelined datapath:

- It accepts one insert, query or bucket read per clock.
- It returns each result 41 clocks later.
- It is sized by default for 1 MB of bucket memory and `LAMBDA = 25`.

## Error-Sensible buckets

A bucket holds three fields:

| field | width | meaning |
|-------|-------|---------|
| `ID`  | 32    | the flow currently owning the bucket |
| `YES` | 32    | packets counted for `ID` |
| `NO`  | 16    | packets of other flows that landed here |

`NO` is the key quantity. Any flow that maps to this bucket, owner or not, may have
had up to `NO` packets confused with it, so `NO` bounds the error of the bucket's
answer.

Inserting key `e` into layer `i` at bucket `B = mem_i[h_i(e)]`:

1. `B` is empty (`YES = 0`): it takes `e` (`ID = e`, `YES = 1`).
2. `B.ID == e`: `YES += 1`.
3. `B` is *locked* (`NO >= lambda_i`): `B` is left alone and `e` goes to layer `i+1`.
4. Otherwise `NO += 1`. If the old `NO` was already `>= YES`, the newcomer now has
   at least as much evidence as the owner. `ID` then becomes `e`, and `YES` and `NO`
   swap (`YES = NO + 1`, `NO = old YES`).

   The swap keeps `NO <= YES`. It also leaves the bound intact: the new `NO` is the
   old `YES`, which was at most the old `NO` and therefore below `lambda_i`.

Querying key `e` walks the same path and accumulates two sums:

- If `B.ID == e`: `est += YES`, `mpe += NO`, stop.
- Otherwise: `est += NO`, `mpe += NO`. The key could have left packets here, up to
  `NO` of them. Continue to the next layer only if `B` is locked, because only then
  could later packets of `e` have gone deeper.

Every layer a key touches adds at most `lambda_i` to its MPE, and a key stops at the
first unlocked bucket. The total is therefore at most `sum(lambda_i) <= LAMBDA`.

## Layer sizing

With `W` buckets in total and ratios `R_w`, `R_l`, layer `i` (1-based) has:

    w_i      = ceil (W      * (R_w - 1) / R_w^i)
    lambda_i = floor(LAMBDA * (R_l - 1) / R_l^i)

The defaults are `W = 104857` (1 MB / 80 bits), `R_w = 2`, `R_l = 2.5`, `LAMBDA = 25`
and `D = 7`. They give:

| layer     | 1     | 2     | 3     | 4    | 5    | 6    | 7   |
|-----------|-------|-------|-------|------|------|------|-----|
| buckets   | 52429 | 26215 | 13108 | 6554 | 3277 | 1639 | 820 |
| lambda_i  | 15    | 6     | 2     | 0    | 0    | 0    | 0   |

A layer with `lambda_i = 0` is an exact table. Once it is claimed, a bucket never
takes a vote, and any other key passes on. Both formulas are evaluated at
elaboration time by functions in `rs_pkg`. The ratios are given as integer
fractions (`RW_NUM/RW_DEN`, `RL_NUM/RL_DEN`).

## Pipeline

    key -> rs_hash (6) -> layer 1 (5) -> layer 2 (5) -> ... -> layer 7 (5) -> result
                                                                          \-> emergency stack

`rs_hash` computes MurmurHash3_x86_32 of the 32-bit key once per layer, with seed
`1 + layer index`, using one multiply per stage. Every request carries a record down
the pipe: the key, the operation, a still-active flag, and the running estimate,
MPE and layer. A layer that finishes with a request (stored, or answered)
clears the active flag, and later layers let it through untouched. Insert and query
have the same latency, `6 + 5*D = 41` clocks.

Each layer (`es_layer`) is a read-modify-write loop on a single-port-read,
single-port-write memory:

| stage | work |
|-------|------|
| s1 | index = `(hash * w_i) >> 32` (multiply-shift range reduction, no modulo) |
| s2 | address register |
| s3 | memory read |
| s4 | output register; the bucket rule is applied and the write issued |

The write of request *n* lands after requests *n+1* and *n+2* have already read the
memory. The layer therefore keeps the last two writes and their addresses. A request
whose index matches takes the newest matching bucket instead of the stale read data.
This write forwarding is what lets the pipeline take a request every clock with no
stalls and still produce exactly the results of one-at-a-time processing. The
testbenches check this against a sequential software model.

After reset, every layer clears its memory, one bucket per clock. `ready_o` stays
low until the largest layer is done: 52429 clocks at the defaults. Requests sent
before then are flagged by an assertion.

## Mice filter (optional)

Layer 1 is the largest layer. Under heavy mouse traffic its buckets lock quickly and
hold mostly noise. `USE_MICE_FILTER = 1` replaces layer 1 with a two-array
conservative-update counter filter (`mice_filter`):

- Each array has `w_1 / 2` counters of 8 bits.
- An insert with `m = min(C1, C2) < lambda_1` increments the counters equal to `m`
  and stops.
- Once both counters have reached `lambda_1`, the key passes to layer 2.
- A query adds `m` (if `m < lambda_1`) or `lambda_1` to both the estimate and the
  MPE.

The filter's counters never exceed `lambda_1`, so it uses exactly layer 1's share of
the error budget. It has the same 5-clock timing, so the pipeline is unchanged. The
filter is off by default because the FPGA-style organisation has only the hash, the
bucket layers and the stack.

The filter is much smaller than the layer it replaces: 2 x 26,215 8-bit counters
against 52,429 80-bit buckets. The freed memory goes to the layers behind it.
Layers 2..D share `W_REST = W - ceil(filter bits / 80)` buckets, split by the same
geometric rule restarted at layer 2: `w'_i = ceil(W_REST (R_w - 1) / R_w^(i-1))`.
At the defaults this gives 49807 24904 12452 6226 3113 1557 buckets, and the total
stays 1 MB.

## Emergency stack

A key that meets a locked bucket in all seven layers cannot be counted within the
bound. This happens rarely at sensible sizes. The key is pushed onto
`emergency_stack`, a 1024 x 32-bit LIFO (one block RAM), for a control processor to
drain with `pop_i`. The stack has three rules:

- A pop returns the key one clock later.
- A push and a pop in the same clock swap the top entry.
- A push into a full stack is dropped and counted in `stack_dropped_o`.

A query that runs past the last layer returns with `out_emergency_o` set. Part of
that key's count may be sitting in the stack, so the interval may be too low.

## Reading the sketch out

Network-wide uses need the whole sketch in the controller at the end of a
measurement period. Examples are merging the sketches of several switches, and
comparing an up-link sketch with a down-link sketch to find drops. For this, a
third operation, `OP_READ`, travels the same pipeline as inserts and queries. Its
key is an address: `{layer[7:0], index[23:0]}`, built by `rs_pkg::read_addr`.

The addressed layer returns its bucket as follows:

- `out_key_o = ID`, `out_est_o = YES`, `out_mpe_o = NO`.
- For the mice filter, the two counters at that index come back in `est` and `mpe`.
- An index past the end of the layer reads as zero.

Reads take the same 41 clocks and mix freely with traffic. They see every write
issued before them, because they go through the same forwarding path. A full dump
is one read per bucket: about 104k clocks at the defaults. Resetting afterwards
clears the sketch for the next period.

## Interface and timing (top: `reliable_sketch`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock; synchronous active-low reset (starts the memory clear) |
| `ready_o` | out | memories cleared; requests accepted |
| `in_valid_i`, `in_op_i`, `in_key_i` | in | one request per clock: `OP_INSERT`, `OP_QUERY` or `OP_READ`; 32-bit key (an address for `OP_READ`) |
| `out_valid_o`, `out_op_o`, `out_key_o` | out | the request, exactly 41 clocks later |
| `out_est_o`, `out_mpe_o` | out | query answer: the true count is in `[est - mpe, est]` |
| `out_layer_o` | out | layer that stored (insert), answered (query) or was read; `D+1` = pushed to the stack |
| `out_emergency_o` | out | the key went past the last layer (or a read named no layer) |
| `pop_i`, `pop_valid_o`, `pop_key_o` | in/out | stack drain; the key follows one clock after `pop_i` |
| `stack_count_o`, `stack_full_o`, `stack_dropped_o` | out | stack occupancy and losses |
| `layer_ev_o[D]` | out | per-layer event pulses: `hit`, `vote`, `replace`, `pass`, `bypass` (forwarded read) |

Top parameters, with their defaults:

- `D = 7`, `W = 104857`, `LAMBDA = 25`
- `RW_NUM/RW_DEN = 2/1`, `RL_NUM/RL_DEN = 5/2`
- `USE_MICE_FILTER = 0`, `FILTER_CNT_W = 8`, `STACK_DEPTH = 1024`

There is no back-pressure: the pipeline never stalls.

Synthesis of the default top with a generic flow gives about 1,200 logic cells,
10,400 flip-flop bits and 8.36 Mbit of memory (the bucket arrays plus the stack).
No FPGA place-and-route was run, so the 340 MHz the original FPGA build reached is
not confirmed for this RTL.

## Where this design departs from the published description, and what it assumes

- **Bucket algorithm.** The published work gives the bucket's fields, the
  replacement condition (`NO >= YES`), per-layer locking thresholds and the interval
  semantics. It does not give one consolidated insert/query procedure. The rules
  above are this design's reading of it. "Locked" is taken as `NO >= lambda_i`, so a
  bucket never holds more than `lambda_i` foreign packets. An empty bucket is never
  locked.
- **Bucket width.** This design uses 80-bit buckets (32-bit `ID`, 32-bit `YES`,
  16-bit `NO`), as listed for the software version. Elsewhere the buckets are called
  72-bit. At 80 bits, 1 MB gives `W = 104857` buckets.
- **Key.** The key is 32 bits, the width of the `ID` field. Flows identified by
  source and destination address (64 bits) must be folded to 32 bits before they
  enter.
- **Weight.** Every insert has weight 1. Weighted updates (adding `w` at once) are
  not supported.
- **Latency split.** The original FPGA build completes an insertion after 41 clocks
  but does not say how. The 6 + 7 x 5 split, the multiply-shift reduction, the
  forwarding scheme and the memory clear are this design's choices.
- **Hash.** The hash is MurmurHash3 with seeds `1 + array index`. The hardware hash
  function of the original is not described.
- **Mice filter.** 8-bit counters, `w_1/2` per array, following the filter's own
  description. The experimental setup also mentions a filter taking 20% of memory
  with 2-bit counters; this design does not follow that. The query rule for the
  filter is this design's. The published work says the space the filter saves
  should go to the other layers but not how; the `W_REST` split is this design's.
- **Stack.** The stack depth, the pop protocol and drop-on-full are this design's
  choices. Queries do not search the stack.
- **Read-out.** The published work says only that each sketch is read into the
  control plane at the end of a period. The in-band `OP_READ` and its address
  format are this design's.
- **Not included.** The switch (P4) version and the controller that collects and
  merges sketches from several switches are not part of this RTL.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `tb_rs_hash` | MurmurHash3 against a byte-wise reference and published test vectors; 6-clock latency |
| `tb_es_layer` | two 5-bucket layers (`lambda` 3 and 0) against a model: every bucket rule, forwarding with back-to-back hits on one bucket, raw reads (in range, out of range, for another layer), events, 5-clock latency |
| `tb_mice_filter` | 4-counter filter with 4-bit counters against a model: absorb, pass, query, raw reads, forwarding |
| `tb_emergency_stack` | 8-deep stack against a queue model: push, pop, push+pop, drop on full |
| `tb_reliable_sketch` | a 128-bucket pipeline with and without the filter, 8000 skewed requests; every result against the sequential model (`rs_model_pkg`); the 41-clock latency; the interval guarantee and `mpe <= LAMBDA`; counts and requires each mechanism (hit, vote, replace, pass, forwarding, last layer, stack push, stack drop, pop, query, filter absorb, filter pass, raw read) |
| `tb_reliable_sketch_full` | the default-size top with no parameter changes: the 52429-clock clear, 400k requests over up to 100k flows, every result against the model, then 64 raw reads per layer |
| `tb_workloads` | the default-size top, and the same top with the mice filter, on three synthetic 10M-packet streams sized like the IP-trace, web-stream and Hadoop datasets (about 0.4M, 0.3M and 20K flows, heavy-tailed); checks every flow's interval and reports outliers, AAE and where keys ended |

Results of `tb_workloads`:

| stream | flows | pipeline | flows with error > 25 | mean absolute error | inserts reaching the stack |
|--------|-------|----------|-----------------------|---------------------|----------------------------|
| IP-trace size | 354,685 | default | 0 | 13.1 | 106,613 |
| IP-trace size | 354,685 | mice filter | 0 | 17.6 | 394,035 |
| web size | 289,124 | default | 0 | 12.0 | 101,544 |
| web size | 289,124 | mice filter | 1 | 16.6 | 369,254 |
| Hadoop size | 20,000 | default | 0 | 0.3 | 0 |
| Hadoop size | 20,000 | mice filter | 0 | 1.4 | 0 |

These streams are synthetic, with roughly Zipf(1) flow sizes. With 0.3–0.4M flows
they overload the 1 MB structure far more than the published measurements on real
traces, which report zero outliers from 0.91 MB. Many keys then reach the stack,
and the 1024-entry stack overflows.

The interval bound held for every key that stayed in the layers. The one flow with
error above 25 is one whose packets partly went to the stack.

On these streams the filter variant does not beat the plain one, unlike the
published results on real traces. A likely cause is that the synthetic flow-size
distribution has many mid-sized flows. Those flows bring their counters up to
`lambda_1` and then also take buckets in layer 2.

Simulating with plain Verilator (from the directory that holds `rtl/` and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
        rtl/rs_pkg.sv tb/rs_model_pkg.sv tb/tb_reliable_sketch.sv \
        --top-module tb_reliable_sketch -o sim
    ./obj_dir/sim

For a block testbench, use `rtl/rs_pkg.sv` plus the block and its testbench.
`tb_workloads` does not need `rs_model_pkg.sv`. The full-size and workload
testbenches run in under a minute each.
