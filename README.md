# A GPU load path that blurs the coalescing timing channel

On a GPU, the 32 threads of a warp issue their loads together, and the
coalescing unit folds the 32 addresses into as few memory transactions as it
can: one per 64-byte cache line touched. How long the warp waits therefore
depends on how many distinct lines its addresses fall into. For a table-based
AES kernel, the last-round look-ups into the T4 table are indexed by bytes
that an attacker can compute from the ciphertext and a key guess. So the
attacker can predict the number of transactions for every guess, correlate it
with the measured run time, and recover the key one byte at a time.

This RTL implements the hardware side of the countermeasure described in
*Hardware/Software Obfuscation against Timing Side-channel Attack on a GPU*
(Karimi, Fei, Kaeli). The idea is to keep the hardware doing correct work
while making the number of transactions, and the time they take, a poor
predictor of the address pattern:

1. **Randomised coalescing width.** At every kernel start, each SM draws 16
   random widths (64, 32, 16 or 8 bytes). A 64-byte line `L` is coalesced
   with the width chosen for `L % 16`. Two threads that hit the same line
   but different sub-blocks of that width become two transactions. The
   attacker no longer knows which addresses merge.
2. **Hierarchical MSHRs.** Behind each SM's own 32 miss registers sits a
   second set of 32 registers shared by all 15 SMs. A miss whose 128-byte L2
   line is already being fetched for any SM rides along instead of going to
   L2 again. This removes redundant L2 traffic, and it makes miss latency
   depend on what the other SMs are doing.

The third countermeasure, rotating the columns of the T4 table in memory,
is software. It appears here only as the address pattern the end-to-end
testbench generates.

## Structure

```
             per SM (x15)                                            shared
 ┌──────────────────────────────────────────────────────────┐
 │ width_rng ──r[16]──┐                                     │
 │                    v                                     │
 │ 32 addresses ─> coalescing_unit ─txn─> l1_tags ─miss─> l1_mshr ─req─┐
 │   + mask        (line/offset split,    (hit: retire)     (32 entries)│
 │                  subtransaction rule,        ^                ^     │
 │                  queue to L1)                └──── fill ──────┤     │
 └───────────────────────────────────────────────────────────────│─────┘
                                                   broadcast      │     v
                                              (L2 line, SM mask)  │  rr_arbiter
                                                         └───── unified_mshr (32 entries)
                                                                     │      ^
                                                              l2_req_*      l2_resp_*
                                                                     v      │
                                                                  L2 cache (outside)
```

The top module `gpu_obf_memsys` holds 15 `sm_ldst_path` instances and one
`unified_mshr`. The L2 cache, DRAM, the SIMT cores and the warp scheduler
are not part of the RTL: the top exposes the L2 request/response port and
one warp-instruction port per SM, shared by the SM's two warps.

## The subtransaction rule

This is the core of the design, in `coalescing_unit`. For each active
thread, in thread order, with byte address `a`:

```
line = a / 64            offset = a % 64
r    = r[line % 16]      in {1, 2, 4, 8}       (stored as log2 r)
size = 64 / r            the subtransaction width: 64, 32, 16 or 8 bytes
sub  = offset / size     0 .. r-1
```

The unit keeps a list of the `{line, sub}` pairs it has already issued for
the current instruction. A thread whose pair is in the list is coalesced.
Otherwise the pair is appended and a transaction `{warp, line, sub, log2 r}` goes
into the queue towards L1. This happens even when another subtransaction of
the same line is already on its way, and that wasted transaction is
deliberate noise. With `r = 1` everywhere, the unit is an ordinary 64-byte
coalescer.

Worked example. Take a 16-entry table with 16-byte entries, so each line
holds 4 entries, and 7 accesses at (row, column) (0,2) (1,0) (1,1) (2,0)
(2,3) (3,1) (3,3). The resulting transaction counts are:

| case | widths per row (entries) | table | transactions |
|------|--------------------------|-------|--------------|
| a | 2, 2, 2, 2 | as stored | 6 |
| b | 2, 2, 2, 2 | columns rotated by 2, 3, 0, 1 | 5 |
| c | 2, 2, 1, 4 | as stored | 5 |
| d | 2, 2, 1, 4 | rotated | 4 |

A width of 2 entries is `r = 2`, 1 entry is `r = 4` and 4 entries is
`r = 1`. `tb_coalescing_unit` runs exactly these four cases.

Timing: the unit examines one thread per clock, so an instruction takes
`WARP` cycles, plus one cycle for each cycle the 8-entry transaction queue
is full. `done` follows one cycle later (`WARP + 1` cycles after
acceptance). The widths must not change while an instruction is in
progress. The generator only redraws on a kernel start, and the SM refuses
new instructions during the 16-cycle draw.

## Drawing the widths

`width_rng` draws the widths from a 32-bit xorshift generator. The
generator runs every cycle from reset, and each SM has its own seed. After
`kernel_start`, it writes one of the 16 entries per cycle. It maps the top
byte `u` of the generator state onto `log2 width = k`:

| `u` range | width | `r` | share |
|-----------|-------|-----|-------|
| 0 .. 12 | 8 B | 8 | 5.1 % |
| 13 .. 76 | 16 B | 4 | 25.0 % |
| 77 .. 179 | 32 B | 2 | 40.2 % |
| 180 .. 255 | 64 B | 1 | 29.7 % |

This distribution is skewed towards wide transactions. Its mean `k` is close
to 5, and about 5 % of draws are 8-byte. The three thresholds are
parameters: moving weight towards narrow widths costs performance and buys
noise. `mode` selects between `MODE_DYNAMIC` (one draw per entry, the main
configuration) and `MODE_FIXED` (one draw per kernel, copied to all 16
entries).

## Misses: first level

`l1_tags` is the L1 tag store. It holds 48 KB of 64-byte lines, 6 ways by
128 sets, with round-robin replacement, and keeps tags only (no data). A
transaction leaving the coalescer queue is looked up in one cycle:

* **Hit:** the transaction retires at once.
* **Miss:** it goes to `l1_mshr`. If an entry for the same 64-byte line
  exists, the miss merges into it and the entry's waiting count goes up.
  Otherwise the lowest free entry is allocated, and that entry later sends
  one request to the shared level. With all 32 entries busy and no match,
  the lookup stalls.

When the shared level broadcasts a returned 128-byte L2 line for this SM,
every first-level entry inside that line is released in one cycle. Both
64-byte halves are filled into the tags, and the waiting counts are added
to the retire count of the warp that made each miss (an entry can wait
for both warps of the SM). In the cycle a broadcast arrives, the lookup
waits one cycle. That way a miss never merges into an entry that is being
released.

Each SM runs two warps, and each warp may have one memory instruction in
flight. The coalescer walks one instruction at a time, so the second warp's
instruction can be walked while the first warp's misses are outstanding.
An instruction is done once the coalescer has walked all its threads and
its warp's count of issued-but-unretired transactions is zero.
`done_cycles` is the latency that the timing attack measures.

## Misses: the shared second level

`unified_mshr` takes one request per cycle from the 15 SMs through a
round-robin arbiter. Each entry tracks a 128-byte L2 line and a 15-bit
mask of the SMs waiting on it:

* **Match:** the line is already outstanding, whichever SM asked first. The
  requester's bit is OR-ed into the mask and nothing goes to L2. This also
  merges the two 64-byte halves of one L2 line requested by the same SM.
* **No match:** the lowest free entry is allocated, and its L2 request (the
  entry index is the request id) is issued from the next cycle on.
* **Full:** all entries are busy and none matches, so the granted SM waits.

When L2 answers an id, that entry is freed and `{L2 line, SM mask}` is
broadcast to the SMs in the same cycle. A request that arrives in the same
cycle as the answer for its line is not merged into the entry being freed.
It gets a new entry instead. Likewise, a first-level request still waiting
for the arbiter when its line returns for other SMs produces one more L2
request later. The shared level only merges requests that overlap in time,
so the number of L2 requests is not fixed by the address pattern. That is
part of the intended noise.

## Top-level interface (`gpu_obf_memsys`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `kernel_start`, `mode` | in | pulse between instructions: every SM draws new widths in `mode` |
| `instr_valid[s]`, `instr_ready[s]` | in/out | warp instruction handshake of SM `s`; ready is low while the issuing warp still has an instruction in flight |
| `instr_addr[s][t]`, `instr_active[s]`, `instr_warp[s]` | in | 32 byte addresses, active mask, issuing warp (0 or 1) |
| `done[s][w]`, `done_ntxn[s][w]`, `done_cycles[s][w]` | out | per warp `w`: end pulse, transaction count, latency in cycles |
| `l2_req_valid/ready/id/line` | out/in/out/out | request to L2: 5-bit id, 128-byte line number |
| `l2_resp_valid`, `l2_resp_id` | in | L2 answer, always accepted, any order |
| `sm_ev[s]` | out | per-SM event pulses: new txn, coalesced thread, split subtransaction, L1 hit, L1 MSHR alloc, L1 MSHR merge, full-MSHR stall, request to shared level (bits 0..7) |
| `u_ev` | out | shared level: alloc, merge, merge across SMs, full stall (bits 0..3) |

Addresses are 32-bit. All handshakes are valid/ready: a transfer happens on
a rising edge where both are high.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `NSM` | 15 | GTX480 configuration used by the original work |
| `WARP` | 32 | threads per warp |
| `NWARPS` | 2 | warps per SM, original work |
| line size | 64 B (L1) / 128 B (L2) | original work; `gpu_pkg` |
| `NWID` | 16 | number of random widths; the 1 KB T4 table spans 16 lines |
| `L1_BYTES` | 48 KB | original work |
| `L1_WAYS` | 6 | this design's choice |
| `L1_MSHRS`, `L2_MSHRS` | 32, 32 | original work |
| `TXQ_DEPTH` | 8 | this design's choice |
| width thresholds | 13 / 77 / 180 of 256 | 5 % 8-byte share and mean k of about 5 from the original; the rest chosen here |

## What follows the original, and what does not

From the original description: the subtransaction rule and its `r[line % 16]`
indexing; widths 8 to 64 bytes and a skewed choice favouring wide ones;
fixed and dynamic randomisation; a private generator per SM; 32 private
MSHRs per SM; a 32-entry second level shared by all SMs that merges within a
128-byte L2 line and sends only unmatched requests to L2; and all sizes
listed above as original.

Choices made here where the description is silent: xorshift generator and
threshold mapping; one thread per cycle in the coalescer; the 8-entry
queue; one memory instruction in flight per warp; the L1 organisation
(associativity, round-robin, tag-only, loads only); the per-entry, per-warp waiting
counter; release by L2 line; the round-robin arbiter, the SM mask and the
broadcast response; the handshakes and statistic ports.

Known departures and gaps:

* **No data path.** Nothing carries cache data. The RTL decides which
  requests exist and when they complete, which is what the countermeasure
  acts on. A data array and a return path would have to be added for real
  loads.
* **Outside the RTL.** The L2 cache, DRAM and memory bus, the SIMT cores
  and the warp scheduler are not built. Which warp issues when is left to
  whatever drives the instruction ports.
* **Where the timing comes from.** The original timing model makes a warp
  instruction's time grow linearly with its number of transactions. Here
  the coalescer walks one thread per clock and the L1 lookup keeps pace
  with it, so an instruction that hits in L1 takes `WARP + 1` cycles
  whatever its transaction count. The count shows in the latency only
  through misses (one request per cycle towards the shared level and one
  L2 round trip per line) and through a full transaction queue. A
  coalescer that resolves all threads at once and emits one transaction
  per clock would make hit time follow the count; it is not built.
  `done_ntxn` reports the count of every instruction directly.
* **No results reproduced.** The side-channel results (SNR, correlation,
  sample counts) are statistical experiments over very many kernel runs
  and are not reproduced here. The testbench prints mean latencies per
  phase only as a sanity check.
* **T4 table size.** The description gives it both as 256 four-byte entries
  and as "1K entries". The testbench uses 256 entries, i.e. 1 KB, which
  agrees with the 16 lines of 64 bytes stated alongside.

## Simulating

All files are SystemVerilog-2017. `rtl/gpu_pkg.sv` must come first, and
the rest can be found by module name. For example, the end-to-end test at
full size:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/gpu_pkg.sv tb/tb_gpu_obf_memsys.sv --top-module tb_gpu_obf_memsys -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each one
has a cycle watchdog that counts a failure if it fires.

| testbench | what it checks |
|-----------|----------------|
| `tb_width_rng` | 16-cycle draw; fixed mode gives equal entries; dynamic entries differ; width shares and mean k over 16 000 draws |
| `tb_coalescing_unit` | the four worked-example cases (6/5/5/4); 400 random instructions from random warps against a reference list of expected transactions, with random back-pressure; `WARP + 1` cycle latency without back-pressure |
| `tb_l1_tags` | 20 000 random lookups and single or double fills against a per-set FIFO model, with evictions |
| `tb_l1_mshr` | cycle-by-cycle reference model of entries, merges, requests, releases, fills and per-warp retire counts; full stalls; conservation of transactions after draining |
| `tb_unified_mshr` | cycle-by-cycle model including the round-robin grant; cross-SM merges; full stalls; never two L2 requests for one line |
| `tb_gpu_obf_memsys` | full-size design with a 100-cycle L2 model (`tb/l2_model.sv`): AES last-round T4 look-ups by 2 warps on all 15 SMs, with dynamic widths, with a column-rotated table, and with fixed widths; a micro-benchmark with 1 to 32 unique addresses per warp that overflows the shared MSHRs. Checks every instruction's transaction count against the widths each SM drew, the latency bound, completion, one outstanding L2 request per line, and that the shared level merged requests. It also counts that every mechanism occurred. |
| `tb_timing_attack` | last-round correlation attack on one AES key byte at full size: 1 500 kernel runs of one warp instruction, new widths each run; checks each transaction count against the width rule, then correlates the 256 key guesses (distinct-line model through the inverse S-box, computed in the testbench) with the measured counts, and checks that random widths lower the correct key's correlation below that of plain 64-byte coalescing |

In the attack test, the correct key byte's correlation falls from 1.0
(64-byte coalescing, where the distinct-line count is the transaction
count) to about 0.4 with random widths. At 1 500 samples the correct key
still ranks first: the widths add noise, so an attacker needs more samples,
but the attack is not made impossible.

In the end-to-end run, the shared level turned 181 first-level requests
into 21 L2 requests during the first AES phase. The micro-benchmark keeps
the 32 shared entries full for many thousands of cycles.
