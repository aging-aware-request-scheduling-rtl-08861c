# HEBE: an aging-aware request scheduler for phase-change main memory

Reading and programming a phase-change memory (PCM) cell needs voltages well above the
1.2 V logic supply: 2.85 V for the sense amplifier during a read, 3.7 V for the write pulse
shaper and 2.85 V for the verify logic during a write. The CMOS peripheral circuits of every
bank therefore age through bias temperature instability (BTI): their threshold voltage drifts
while they sit at a high voltage and partly recovers when they are powered down ("de-stressed").
A controller that de-stresses every bank at a fixed interval, whatever it has actually done,
throws away bandwidth on banks that barely aged and can still let busy banks age too far.

This RTL implements a memory controller that does better in three ways:

1. **It keeps count of how much each bank's circuits have aged.** Per bank it counts reads,
   writes and idle cycles since the last de-stress. Because BTI damage in this model simply
   adds up over time (the order of the operations does not matter), the aging is a weighted sum
   of those three counts. The weights are per-operation "unit aging" constants.
2. **It schedules with the aging in mind.** Requests go preferably to banks whose circuits are
   powered but doing nothing. Such a bank is aging without doing useful work. A bank is
   de-stressed only when a request is about to use it and its aging or idle time has reached a
   threshold. A backlog threshold keeps any request from waiting too long.
3. **It de-stresses the two halves of a bank separately (decoupled mode).** The write pulse
   shaper hangs off the 3.7 V charge pump. The verify logic and the sense amplifier share the
   2.85 V pump. An isolation transistor between pulse shaper and verify logic lets each pump be
   discharged on its own. A domain that the next request does not need can then be
   de-stressed while the request runs.

Everything here is synthesizable SystemVerilog. The only exception is the behavioural PCM
model in `tb/pcm_model.sv`, which the testbenches use. The charge pumps, the isolation
transistor and the analog read/write circuits are outside the controller. The controller
drives their enables through ports.

## Where the controller sits

```
 cache misses ──► rwQ ──► request selection ──► PCM command port  (read / write / program / verify)
                   ▲            ▲   │
                   │      sTab ─┘   ▼
                   │      aTab ──► de-stress selection ──► de-stress port (bank, pump mask)
                   │      uTab ──►        │
                   │                      ▼
                   └──────────── bank_state: timers, verify pending, pump + isolation enables
```

| module | role | storage at default size |
|---|---|---|
| `rwq` | read-write queue; slot 0 is always the oldest entry; each entry has an outstanding-cycle counter | 16 × (40 + 16) bits |
| `stab` | status table: one bit per bank, 1 = free to take a request | 128 bits |
| `atab` | access table: per bank and pump domain, 16-bit idle count, 4-bit read and write counts | 128 × 2 × 24 bits |
| `utab` | unit aging table: U_r, U_w, U_i for each of pulse shaper (PS), verify logic (VR), sense amplifier (SA) | 9 × 32 bits |
| `request_selection` | chooses a deferred verify step, a backlogged ("critical") request, or the request to the longest-idle bank | combinational |
| `destress_selection` | evaluates the aging model for the chosen bank and decides: issue, de-stress and hold, or both | combinational |
| `aging_calc` | the aging sum and threshold tests for one bank (shared helper) | combinational |
| `background_destress` | decoupled mode: de-stresses the unused pump domain of a bank that is busy with a read or a program step | 7-bit pointer |
| `bank_state` | access and de-stress timers, operation in progress, pending verify, charge-pump and isolation-transistor enables | 128 × (8 + 3 + 2×4 + 1) bits |
| `hebe_controller` | top level; wires the above | |
| `hebe_pkg` | types, timing constants, default unit aging values and thresholds | |

At the default size (128 banks, 16-entry queue) the top level comes to roughly 13,400
word-level cells and 7,600 flip-flop bits after coarse synthesis. It also has 2,432 memory bits.

## The aging arithmetic

For one logic block, with n_r reads, n_w writes and n_i idle cycles counted since that block
was last de-stressed:

```
A_block = n_r · U_r[block] + n_w · U_w[block] + n_i · U_i[block]
```

The circuit fails when its first block fails, so the bank's aging is the largest of the three.
In decoupled mode each pump domain is judged on its own blocks: the write domain on A_PS and
the read domain on max(A_VR, A_SA).

Each unit aging constant is the time spent at a voltage divided by the Weibull scale factor
α(V) at that voltage. The scale factor falls steeply with the gate overdrive voltage. The
blocks see these voltages:

| operation | PS | VR | SA |
|---|---|---|---|
| read  | 1.2 V | 1.2 V | 2.85 V |
| write | 3.7 V | 2.85 V | 1.2 V |
| idle  | 1.2 V | 1.2 V | 1.2 V |

So U_r and U_w differ from block to block, and only U_i is common to all three.

**Number format.** Aging and unit aging values are unsigned Q16.16 numbers in arbitrary aging
units (a.u.). The aging threshold `cfg_th_a` is an integer in a.u. and is compared with the
sum shifted right by 16. Products are 16 × 32 bits and the sum is 49 bits wide, so nothing can
overflow.

**Default constants.** The material constants of the BTI model are fitting parameters that the
source work does not publish. The reset values of `utab` are therefore this design's own. They
assume α(V) ∝ (V − 0.85 V)^−2 and an idle cost of 0.01 a.u. per cycle. Relative to idle, a
cycle at 2.85 V then costs 32.65 times as much and a cycle at 3.7 V costs 66.31 times as much.
Multiplied by the row-cycle times (45 cycles per read, 168 per write) this gives:

| Q16.16 word | PS | VR | SA |
|---|---|---|---|
| U_r | 29,491 (0.45 a.u.) | 29,491 | 962,978 (14.7 a.u.) |
| U_w | 7,300,336 (111.4 a.u.) | 3,595,118 (54.9 a.u.) | 110,100 (1.68 a.u.) |
| U_i | 655 (0.01 a.u.) | 655 | 655 |

With the default threshold of 1000 a.u., a bank's write domain needs a de-stress after about
nine writes. The read domain (sense amplifier) would need about 68 reads, but its 4-bit
counter saturates first. Load the real fitted values through the `cfg_u_wr_*` port. A hotter
die gives larger values, since aging grows exponentially with temperature.

**Saturation.** All aTab counters saturate. A saturated 4-bit read or write count means the
controller can no longer tell how much that domain has aged. It is therefore treated like a
crossed threshold and the domain is de-stressed the next time a request selects it. This rule
is an addition of this design. With the published 4-bit fields it caps the interval between
de-stresses at 15 reads or 15 writes.

## One scheduling decision

The controller makes one decision per memory clock cycle. The decision is combinational from
registered state and has no pipeline.

1. **Deferred verify first.** Suppose a bank holds a program step whose verify step is still
   pending, the bank is free, and its read pump is powered. Then the verify step takes the
   command port, lowest bank first.
2. **Backlogged request.** The oldest queued request is *critical* once it has been
   outstanding for `cfg_th_b` cycles or more. A critical request is issued as soon as its bank
   can take it, and it skips the de-stress check. While it waits, other banks are still
   served, but no younger request to its bank is chosen.
3. **Otherwise, longest-idle bank.** Among the eligible requests, the one whose bank has the
   largest aTab idle count wins, and ties go to the older request. A request is eligible when
   its bank is free in sTab and the pump domain it needs is powered. A read needs the read
   pump. A write needs the write pump, and no verify step may be pending on the bank.
4. **De-stress check** on the chosen bank. A domain *needs a de-stress* in three cases: its
   aging has reached `cfg_th_a`, its idle count has reached `cfg_th_i`, or one of its counters
   has saturated. The decision then follows this table:

| mode | request | condition | de-stress | command |
|---|---|---|---|---|
| coupled | any | either domain needs it | both pumps | none, request stays queued |
| coupled | any | neither | – | request |
| decoupled | read | read domain needs it | read pump (+ write pump if it needs it) | none |
| decoupled | read | only write domain needs it | write pump | **read, in parallel** |
| decoupled | write | write domain needs it | write pump (+ read pump if it needs it) | none |
| decoupled | write | only read domain needs it | read pump | **program step only**, verify later |
| any | write | read pump already being de-stressed | – | program step only |

A de-stress discharges the domain's pump for tDSC = 10 cycles. It also clears that domain's
aTab entry. A request that was held is reconsidered in later cycles, once the domain is
powered again.

**Program/verify split.** A PCM write is a program pulse followed by a verify read-back. The
verify logic runs off the read pump, which it shares with the sense amplifier. A write can
therefore still start while that pump is down. The controller issues only the program step
(`OP_PROGRAM`) and marks the bank verify-pending. Once the pump is back and the program step
has finished, step 1 above issues `OP_VERIFY` to the bank. No other write goes to that bank in
between.

**De-stress alongside an access.** The check above runs only when a request picks a bank.
In decoupled mode a second path, `background_destress`, looks at one bank per cycle, round
robin. Suppose that bank is busy with a read and its pulse shaper needs a de-stress. The read
does not use the write pump, so the write pump is discharged while the read runs. Likewise, a
bank busy with a program step can have its read-pump domain de-stressed. This path uses the
de-stress port only in cycles when the request path leaves it free. A full pass over 128 banks
takes 128 cycles, which is less than one write.

**Coupled vs. decoupled.** `cfg_decoupled = 0` treats each bank's peripheral circuit as one
unit: both pumps are discharged together, only a free bank is de-stressed, and no
program-only writes are issued. Set it to 1 to
use the isolation transistor. The mode may be changed at any time.

## Bank timing

All times are memory clock cycles. A 1.25 ns clock (DDR3-1600) is assumed.

| event | cycles | origin |
|---|---|---|
| read (row cycle 56.25 ns) | 45 | PCM datasheet figure |
| write (row cycle 209.75 ns) | 168 | PCM datasheet figure, rounded up |
| program step alone | 144 | this design: write minus verify |
| verify step | 24 | this design's assumption |
| de-stress (tDSC) | 10 | published figure |

When a command is issued the bank's sTab bit clears on the same edge. The bank stays busy for
exactly the number of cycles above and is free in the cycle after. A de-stressed domain's pump
enable is low for exactly 10 cycles. The isolation transistor enable `iso_on` is low while
exactly one of the two pumps is discharged. The gate rule is this design's reading of the
circuit. The source only says that the transistor separates the two blocks.

## Ports of `hebe_controller`

| port | dir | meaning |
|---|---|---|
| `req_valid`, `req_ready`, `req` | in/out/in | request from the cache side (`mem_req_t`: `is_write`, 7-bit `bank`, 32-bit `addr`); taken when valid and ready are both high |
| `cfg_th_a` | in | aging threshold, a.u. (1000 suggested, `TH_A_DEF`) |
| `cfg_th_i` | in | idle threshold, cycles (`TH_I_DEF` = 4096, assumed) |
| `cfg_th_b` | in | backlogging threshold, cycles (`TH_B_DEF` = 1024, assumed) |
| `cfg_decoupled` | in | 1 = separate pump domains |
| `cfg_u_wr_en/_blk/_sel/_data` | in | write one uTab word (block PS/VR/SA; sel 0 = U_r, 1 = U_w, 2 = U_i) |
| `pcm_cmd_valid/_op/_bank/_addr` | out | command to the PCM (`pcm_op_e`); a verify carries address 0 |
| `ds_valid/_bank/_mask` | out | de-stress; mask bit 0 = write pump, bit 1 = read pump |
| `rd_pump_on`, `wr_pump_on`, `iso_on` | out | per bank: read pump connected, write pump connected, isolation transistor conducting |
| `mon_aging[3]` | out | aging of PS, VR, SA for the bank under selection this cycle |

Reset is synchronous and active low. After reset the queue is empty, all banks are free and
powered, the counters are zero and uTab holds its defaults. A request's bank field is taken
modulo the number of banks (its low bits).

## How this differs from the published description

- **128 banks.** The storage budget of the original work counts 128 banks. Its simulation
  table lists 2 channels × 1 rank × 8 banks, which is 16 banks. The RTL follows the 128.
- **Two aTab entries per bank** (6 Kb instead of 3 Kb). One counter set cannot be cleared for
  one pump domain and kept for the other, and that is what decoupled de-stress needs.
- **Nine uTab words instead of three.** The three blocks see different voltages in a read and
  in a write, so per-block aging needs per-block U_r and U_w.
- **The idle key for request selection is the aTab idle count.** The aTab idle count is counted
  since the last de-stress. The source describes the key as "idle since the bank last served a
  request", but budgets no storage for a second counter.
- **Order of the backlog check.** The source describes the backlog check as following the
  scheduling of a request. Here the age of the oldest request is tested in the same cycle,
  before the idle-count choice. The effect is the same: a request past `cfg_th_b` is served
  next. "Exceeds" is taken as "has reached" (≥) for all three thresholds.
- **A held request.** When the de-stress check holds a request, the de-stress is issued and the
  request stays in the queue. It competes again once its bank is free, rather than being
  issued automatically after the de-stress.
- **Background de-stress** of the unused pump domain of a busy bank is this design's way of
  taking de-stress "off the critical path". It checks one bank per cycle in round-robin order.
  The source gives no mechanism for it.
- **Choices of this design where the source gives no figure:** the memory clock, the queue
  depth, the verify-step duration, the idle and backlog thresholds, the unit aging constants,
  the saturation rule, the eligibility rules, the tie-break and the priority of verify steps.
- **Left out:** read data return, address mapping and channel/rank command scheduling. The
  controller issues at most one command per cycle for all banks together. The fixed-interval
  baseline scheduler that the source compares against is not part of this design.

## Verification

Each module has a self-checking testbench in `tb/`. Every one ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_rwq` | random enqueue/out-of-order dequeue against a reference queue, slot by slot, every cycle |
| `tb_stab` | random claims and releases against a bit-vector model |
| `tb_atab` | counts, saturation (including 70,000 idle cycles) and per-domain clears against a model |
| `tb_utab` | reset values against the formula above, computed in floating point; write port |
| `tb_bank_state` | exact busy times per command, exact 10-cycle de-stress windows, pump and isolation enables, verify-pending |
| `tb_request_selection` | 20,000 random states against a reference ranking; blocked-critical case |
| `tb_background_destress` | round-robin order and proposals against reference aging arithmetic, random busy states |
| `tb_destress_selection` | 40,000 random cases against 64-bit reference arithmetic and the decision table; 8 vs 9 writes at default constants |
| `tb_hebe_controller` | end to end, 8 banks, 8-entry queue, lowered idle and backlog thresholds |
| `tb_hebe_full` | the same end-to-end test at full default size and default thresholds |
| `tb_threshold_sweep` | three controllers side by side at aging thresholds 500, 1000 and 2000 a.u. |
| `tb_temperature_sweep` | three controllers side by side with unit aging scaled for 300 K, 325 K and 350 K |

The two end-to-end tests feed skewed random traffic: two hot banks and many cold ones. They
run a decoupled phase, a coupled phase and a drain. `tb/pcm_model.sv` plays the PCM and counts
protocol violations: a command to a busy bank, a command needing a discharged pump, a verify
without a program step, a de-stress of a domain the running operation uses, and pump enables
that disagree with the de-stress windows. The
testbench keeps its own aging account from the observed commands. It checks that every
de-stress was justified and that no non-critical request went to a domain over a threshold. It
also checks that every request is issued exactly once and that all requests are served. It
fails if any of these never happens: a critical issue, an aging, idle or saturation de-stress,
a write-only, read-only or full de-stress, a read in parallel with a write-pump de-stress, a
program step with its deferred verify, a background pulse-shaper de-stress during a read, a
full queue, and each of the two modes. A background read-pump de-stress during a program step
is counted but rarely happens with this traffic.
`tb_threshold_sweep` runs one traffic pattern at aging thresholds of 500, 1000 and 2000 a.u.
It checks that a stricter threshold never causes fewer de-stresses. With the default
constants the counts were 511, 358 and 326 de-stressed domains for 4000 requests. The time to
serve them hardly changed (within 0.5%), because the synthetic traffic leaves most banks idle
and de-stress seldom blocks a request.
`tb_temperature_sweep` covers operating temperature. Temperature reaches the controller only
through the unit aging values, so the testbench rewrites all nine uTab words before the traffic
starts. It scales them by 1, 1/0.93 and 1/0.74, which stand for 300 K, 325 K and 350 K. These
factors are the inverse of the average lifetime losses reported at the two higher temperatures;
the scaling itself is an assumption. At 300 K and 325 K the pulse shaper still crosses 1000 a.u.
on the ninth write (111.4 and 119.8 a.u. per write), so both gave 358 de-stressed domains. At
350 K it crosses on the seventh write (150.5 a.u.), which gave 398 de-stressed domains, 234 of
them on the write pump instead of 195.

To simulate with Verilator 5 (list the package first):

```
verilator --binary --timing --assert -Irtl -Itb rtl/hebe_pkg.sv \
    $(ls rtl/*.sv | grep -v hebe_pkg) tb/pcm_model.sv tb/tb_hebe_controller.sv \
    --top-module tb_hebe_controller -o sim && ./obj_dir/sim
```

For a single block, give only the package, the block's file and its testbench. The full-size
end-to-end test takes a few seconds.

## Changing it

- Sizes: `NUM_BANKS` (up to 128 with the 7-bit bank field in `hebe_pkg::mem_req_t`) and
  `RWQ_DEPTH` are parameters of `hebe_controller`.
- Timing: `T_RC_RD`, `T_RC_WR`, `T_VERIFY` and `T_DSC` in `hebe_pkg`. Keep the access times
  below 256 and tDSC below 16, or widen `TCNT_W`/`DCNT_W`.
- Aging constants: change the defaults in `hebe_pkg`, or write them at run time. To recompute
  them, take U = t_RC × α(1.2 V)/α(V) × U_i in Q16.16 for each block and operation.
- The selection is a single combinational stage across all queue entries and banks. For a
  faster clock, register the output of `request_selection`. Its decision can lag by a cycle,
  because the source overlaps selection with the ongoing access anyway.
