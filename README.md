# HAPPY page-closure policy unit

After each access, a DRAM memory controller has to decide whether to leave the row open
in the bank's row buffer or to close it (precharge) at once:

- Leaving it open makes the next access to the same row a cheap **page hit** (tCL only).
  If the next access goes to a different row, it becomes an expensive **page conflict**
  (tRP + tRCD + tCL).
- Closing at once makes every access a **page empty** (tRCD + tCL).

Adaptive predictors learn which choice fits the traffic. The classic ones keep state
per row or per bank, so their cost grows with the memory size: a per-row Hybrid
predictor for 4 GB needs half a million counters.

HAPPY (Hybrid Address-based Page PolicY) does not index predictor state by DRAM row or
bank. It indexes it by **physical address bit**. For every address bit that selects
channel, rank, bank or row, there are two small predictor elements: one trained by
accesses whose bit is 0, one by accesses whose bit is 1. A request's prediction
combines the elements its own address bits select. Doubling the memory adds one address
bit, so it adds only two elements.

This RTL puts HAPPY to work in both of its published forms:

- **Intel-adaptive-HAPPY** (the default). This is the time-based policy of the Intel
  Xeon X5650's "adaptive open page" scheme. It keeps a Mistake Counter (MC) and Timeout
  Register (TR) per address-bit position instead of per bank. A row stays open for a
  number of cycles equal to the sum of the TRs its address selects.
- **Hybrid-HAPPY**. This is the access-based policy. It keeps a 2-bit saturating counter
  per address-bit position instead of per row. A majority vote decides between open page
  and close page.

For the default organisation (one channel, one rank, 8 banks, 65,536 rows, 128 lines of
64 B per row: 4 GB) HAPPY monitors 19 address bits. So there are 38 Hybrid counters,
or 38 MC/TR pairs.

## Where the unit sits

```
            req_valid, req_addr (one access per cycle, from the command scheduler)
                 |
          +------v------+  bank,row,col   +------------------+
          |  addr_map   |---------------->| bank_state x 8   |-- pre_req[7:0] -> scheduler
          | (interleave)|                 | open row, TC,    |   (timeout precharge)
          +------+------+                 | timeout, last row|
                 | mon_bits[18:0]         +---------+--------+
                 v                                  | hit/conflict/empty,
   +-------------+--------------+                   | last row's mon_bits, TC
   | intel_happy: 2x19 MC/TR     |<------------------+
   |   timeout = sum of TRs      |   mistakes
   | hybrid_happy: 2x19 counters |<------------------+
   |   close = majority vote     |   hit/conflict training
   +-------------+--------------+
                 |  timeout / close decision
                 v
         rsp (registered, next cycle): class, need_pre, need_act, auto_pre, timeout, mistakes
```

`happy_page_policy` is the top. The command scheduler (for example FR-FCFS) and the DRAM
devices are outside it:

- The scheduler tells the unit which access it is issuing.
- The unit answers with how the access finds the row buffer, and whether to issue it with
  auto-precharge (Hybrid-HAPPY).
- Under Intel-adaptive-HAPPY, the unit also raises `pre_req[b]` when bank `b`'s row has
  been open long enough. The scheduler should then precharge bank `b`.

DRAM timing (tRCD, tRP, ...) stays with the scheduler. The unit marks a row closed in
the cycle it asks for the precharge.

## Which address bits are monitored

Row hits and conflicts only depend on the bits that pick the row and bank. So HAPPY
ignores the column and block-offset bits. `addr_map` does two things:

- It translates the address under one of three interleaving schemes, with fields listed
  from most to least significant.
- It outputs `mon_bits`: the *physical* address bits of the bank, rank, channel and row
  fields, before any XOR, with the bank bits in the low positions.

| `MAPPING`          | layout (32-bit address, default sizes)                                 | bank index            | monitored bits       |
|--------------------|-------------------------------------------------------------------------|-----------------------|----------------------|
| `MAP_ROW_LOCALITY` | row[31:16] · bank[15:13] · column[12:6] · offset[5:0]                   | a[15:13]              | a[31:16], a[15:13]   |
| `MAP_PERMUTATION`  | row[31:16] · bank[15:13] · column[12:6] · offset[5:0]                   | a[15:13] ^ a[18:16]   | a[31:16], a[15:13]   |
| `MAP_MINIMALIST` (default) | row[31:16] · column_hi[15:11] · bank[10:8] · column_lo[7:6] · offset[5:0] | a[10:8] ^ a[18:16] | a[31:16], a[10:8] |

With more than one channel or rank, their fields sit where the published field orders
put them: `CH`/`RA` between row and bank in the permutation scheme, and so on. The
minimalist scheme keeps 4 consecutive cache lines in one bank before moving on. Both XOR
schemes fold low row bits into the bank index, so that different rows which share the
same bank field are spread over several banks instead of conflicting in one.

## Hybrid-HAPPY

Each monitored bit `i` has two 2-bit saturating counters, `cnt0[i]` and `cnt1[i]`.
Each counter moves through the four states OP → Weak OP → Weak CP → CP:

- A conflict moves it one step towards CP; a hit moves it one step towards OP.
- Reset puts every counter at 0 (open page).

**Prediction.** For an address `a`, counter `i` is `a[i] ? cnt1[i] : cnt0[i]`. Each of
the 19 selected counters votes "close" if its MSB is 1. The access closes its row if
close votes are a strict majority: with 19 voters, at least 10. The alternative
aggregation rule (`DECISION = DEC_AGGREGATION`) keeps the page open while the sum of the
selected counters is below `19·3/2`.

**Training.** Each access to a bank is compared with that bank's last accessed row:

- Same row: the access trains as a hit, and the counters of that row's address bits count
  down.
- Different row: the access trains as a conflict, and those counters count up.

The outcome is judged against the last accessed row, not only the row the buffer
actually holds. This matters: once the policy closes every row early, real hits and
conflicts stop happening. Training only on the row buffer would freeze the counters in
the close state.

Example: 0x4C66E is a set of 19 monitored bits. Two conflicts reported for it push its
19 selected counters to 2 (Weak CP), so it now gets 19 close votes. The complementary
pattern `~0x4C66E` selects the other 19 counters, which are still 0, and keeps open page.
Addresses that share only some bits with it land in between. That is the point of the
encoding: addresses close to each other tend to share a page-policy preference.

## Intel-adaptive-HAPPY

This is the part of the design that needs the most care. Three things interact: a
per-bank timer, a per-position mistake count, and a periodic adjustment.

**Per bank** (`bank_state`):

- Each access resets the bank's Timeout Counter (TC).
- The same access latches the bank's timeout, computed from the accessed address:

  `timeout = Σ_i (a[i] ? TR1[i] : TR0[i])`, over the 19 bits, so 0 … 285 cycles.

- TC counts cycles. When `TC ≥ timeout` while the row is open, `pre_req[b]` goes high
  for one cycle and the row is marked closed.
- A timeout of 0 means the row closes the cycle after its access, which is close-page
  behaviour. Every TR starts at 2, so the initial timeout is 38 cycles. That is about tRC
  of DDR3-1600, the usual fixed-open timeout.

**Mistakes.** These are detected when the next access reaches the bank. The MCs updated
are those selected by the bank's **last** accessed row, whose timeout was the one that
turned out wrong.

| situation at the new access | meaning | action |
|---|---|---|
| conflict, and TC ≥ T_RP (11) | the old row sat idle long enough to have been precharged: it could have been a page empty | MC − 1 (close sooner) |
| empty, and new row = bank's last accessed row | the row was closed too early: it could have been a page hit | MC + 1 (stay open longer) |

**Adjustment.** Every `CHECK_INTERVAL` cycles (1024), `check_pulse` rises for one cycle,
and each of the 38 monitoring units does the following:

- If MC ≥ 12 (4'b1100 … 4'b1111), TR goes up by 1.
- If MC ≤ 3 (4'b0000 … 4'b0011), TR goes down by 1.
- MC is then reloaded with 8.

TR saturates at 0 and 15. MCs saturate at 0 and 15.

The result is a separate timeout for every address pattern. It uses only 76 small
registers, where the bank-based original needs a TR and an MC per bank, and a
row-granular version would need them per row.

Walk-through with the streaming pattern in `tb_workload_adaptation`: one hot row per
bank, each bank revisited about every 70 cycles.

1. At the start, the 38-cycle timeout closes each row before it is revisited. Every
   revisit is then "empty, same row", so the MCs of those rows' bits climb past 12.
2. At each check, their TRs step up.
3. Once the summed timeout passes about 70, revisits become hits. Mistakes stop and the
   TRs stay where they are. In simulation, the timeout for those rows settles at 95
   cycles.
4. With random rows instead, conflicts after more than 11 idle cycles pull the TRs down
   to 0, which is close-page behaviour.

## Cycle-level interface of `happy_page_policy`

| port | dir | meaning |
|---|---|---|
| `policy` | in | `POL_INTEL_HAPPY` (default use) or `POL_HYBRID_HAPPY`; meant to be static, set at boot |
| `req_valid`, `req_addr[31:0]` | in | the access issued this cycle (at most one per cycle, no back-pressure) |
| `rsp` (`rsp_t`) | out | registered: in the cycle after the access, `valid`, `bank`, `row`, `col`, `cls` (empty/hit/conflict), `need_pre`, `need_act`, `auto_pre` (Hybrid: close after this access), `timeout` (Intel: cycles the row will stay open), `mistake_inc`, `mistake_dec` |
| `pre_req[7:0]` | out | combinational: bank `b`'s timeout expired this cycle; issue a precharge |
| `check_pulse` | out | the interval check happens at the next edge |

The access is classified against the bank state *before* the clock edge on which it is
presented. If an access and a timeout expiry hit the same bank in the same cycle, the
access wins: the row is still open and the expiry is dropped. Reset is synchronous and
active low. It clears all row-buffer state and sets the counters and registers to their
initial values. Assertions check the response rules: a conflict needs both a precharge
and an activate, a hit needs neither, the two mistake kinds exclude each other, and each
policy uses only its own way of closing rows.

## Storage

For X channels, Y ranks, Z banks and W rows, with B = log2 X + log2 Y + log2 Z + log2 W
monitored bits:

| policy | elements | default (4 GB) | here, flip-flops |
|---|---|---|---|
| Hybrid-HAPPY | 2·B counters of 2 bits | 38 counters | 76 |
| Intel-adaptive-HAPPY | 2·B MCs + 2·B TRs of 4 bits | 76 registers | 304 (+ 11-bit interval timer) |

Per bank, the unit also keeps the last accessed row (which is also the open row), its
monitored bits, an open flag, TC and the latched timeout: 55 bits per bank. These would exist in any page-policy controller.

## Sizes and how to change them

The DRAM organisation lives in `rtl/happy_pkg.sv`: `CH_BITS`, `RA_BITS`, `BANK_BITS`,
`ROW_BITS`, `COL_BITS` and `OFFSET_BITS`. The address width, number of monitored bits,
number of banks, timeout width and the response struct all follow from them. For
example, `ROW_BITS = 20` gives the 64 GB organisation: a 36-bit address and 23 monitored
bits. The 4 GB organisation used in the published illustrations of the encoding (2 ranks, 32,768
rows per bank) is `RA_BITS = 1`, `ROW_BITS = 15`; it also has 19 monitored bits.

The parameters of the top are `MAPPING`, `DECISION`, `CHECK_INTERVAL` and `T_RP`. Those
of `monitor_unit` are `MC_W`, `TR_W`, `HIGH_TH`, `LOW_TH`, `MC_INIT` and `TR_INIT`.

All defaults are the evaluated configuration where it is published:

- 8 banks and 65,536 rows of 128 lines.
- A 4-bit MC and 2-bit Hybrid counters starting at 0.
- The minimalist mapping and the majority vote.

The remaining values are this design's choices (next section).

## Choices and departures

These points are not fixed by the published description. Here is what this RTL does:

- **Thresholds.** The MC threshold brackets are 1100–1111 (high) and 0000–0011 (low).
  The published drawing prints the low bracket's top entry as 0010 twice; 0011 is
  assumed.
- **Direction of the high threshold.** The drawing labels the high bracket "more
  aggressive page closing". This RTL follows the written rule instead: a high MC
  *increments* TR and keeps rows open longer. That is consistent with MC counting
  "should have stayed open" mistakes upward.
- **Check interval and MC reload.** The interval is 1024 cycles. MC is reloaded with 8
  after each check, and a check overrides an MC update in the same cycle.
- **TR size and reset.** TR is 4 bits and resets to 2. The sum of 19 TRs then spans
  0–285 cycles, which plays the role of a 9-bit per-bank TR.
- **"Enough time to precharge".** This is taken as TC ≥ T_RP, with T_RP = 11 cycles
  (DDR3-1600 at 800 MHz).
- **Which MCs and counters are trained.** Training uses the bank's last accessed row.
  Hybrid-HAPPY trains against that row on every access to the bank.
- **Vote ties.** A tie in the majority vote keeps the page open. Ties cannot happen with
  19 bits. In the aggregation rule, the "counter value" is the counter maximum, 3.
- **Mapping details.** The row bits XORed into the bank are the lowest three row bits.
  The minimalist scheme's low column field is 2 bits wide. The published drawings show
  the field order but not these widths.
- **Cache line size.** A 64-byte line is assumed.
- **Interface.** One access per cycle, with no back-pressure. The time unit is the
  controller clock.
- **Both policies in one unit.** The two policies share the mapping and bank tracking.
  Only the selected one trains, so the other's registers stay at reset.

Not part of this RTL:

- the command scheduler and DRAM timing;
- the DRAM devices;
- the non-HAPPY baselines used only for comparison: open page, close page, per-row
  Hybrid, per-bank Intel-adaptive and fixed-open.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with a reference
model written independently, and ends with a `TB_RESULT checks=… failures=…` line:

| testbench | what it covers |
|---|---|
| `tb_sat_counter` | random up/down against a model, both saturation ends, the vote bit |
| `tb_addr_map` | 3000 random addresses through all three mappings, fixed bit slices |
| `tb_hybrid_happy` | majority and aggregation instances against a counter-array model; the published 19-bit vote example (9 close votes vs 10 open, decision open page); directed two-conflict example |
| `tb_monitor_unit` | MC/TR against a model; TR up, down, hold and saturation |
| `tb_intel_happy` | summed timeout and check period against 38 modelled MC/TR pairs |
| `tb_bank_state` | exact open time for a given timeout, auto-close, timeout disabled, random |
| `tb_happy_page_policy` | whole unit at default sizes against a full reference model, 12,000 accesses under each policy. Every mechanism must occur: hit, conflict, empty, timeout precharge, both mistake kinds, TR up and down, checks, open and close votes, both training kinds |
| `tb_workload_adaptation` | streaming vs random traffic: Intel-HAPPY timeout grows (38 → 95) or shrinks (→ 0); Hybrid-HAPPY settles on open or close page |

The published evaluation used memory traces of SPEC, PARSEC, BIOBENCH, HPC and commercial
workloads. Those traces are not reproduced here. `tb_workload_adaptation` only stands in
for the two extremes, high and low row locality.

To run one with Verilator (5.x), from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/happy_pkg.sv rtl/*.sv \
    tb/tb_happy_page_policy.sv --top-module tb_happy_page_policy -o sim --Mdir obj
./obj/sim
```

For a single block, list only its files, for example
`rtl/happy_pkg.sv rtl/monitor_unit.sv rtl/intel_happy.sv tb/tb_intel_happy.sv`. Every
testbench finishes in a few seconds.

## Files

- `rtl/happy_pkg.sv`: organisation constants, enums (`map_e`, `decision_e`, `policy_e`,
  `page_class_e`), `rsp_t`.
- `rtl/addr_map.sv`: interleaving and monitored-bit selection.
- `rtl/sat_counter.sv`: 2-bit saturating counter (Hybrid element).
- `rtl/hybrid_happy.sv`: Hybrid-HAPPY counters and vote.
- `rtl/monitor_unit.sv`: one MC/TR monitoring unit.
- `rtl/intel_happy.sv`: Intel-adaptive-HAPPY units, summed timeout, interval timer.
- `rtl/bank_state.sv`: per-bank row-buffer state, TC and timeout comparator.
- `rtl/happy_page_policy.sv`: top.
