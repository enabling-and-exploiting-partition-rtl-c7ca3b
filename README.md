# PALP: partition-level parallelism in a PCM memory controller

A phase-change-memory (PCM) bank is split into partitions, 8 in this
design. All of a bank's partitions share one set of peripheral circuits: 128
sense amplifiers for reading and 128 write drivers for writing. A plain PCM
controller therefore treats the bank as a single resource. Two requests to the
same bank are served one after the other, even when they target different
partitions. Such a *bank conflict* costs 19 cycles per extra read and 47 per
extra write.

PALP makes three changes:

1. **The switches around each peripheral structure are made individually
   controllable.** One partition can then be connected to the write driver
   while another is connected to the sense amplifier. The write driver's
   *verify logic* (the small read circuit it uses to check a program pulse)
   can also be cut off from the driver and used as a second read path.
2. **Four new PCM commands use these paths.**
   - `READ-WITH-WRITE` (RWW) serves a read and a write to two partitions of
     one bank together.
   - `READ-WITH-READ` (RWR) serves two reads together.
   - `DECOUPLE` prepares the RWR by detaching the verify logic.
   - `TRANSFER` hands the verify logic's line to the data bus after the
     sense amplifier's line has gone out.
3. **A scheduler looks for such pairs in the request queue.** It is limited
   by a starvation threshold and by a running-average power limit (RAPL).

A write plus a read to two partitions of one bank take 48 cycles instead of
47 + 19 = 66. Two reads take 30 cycles instead of 38.

The controller is synthesizable SystemVerilog. The PCM banks are
cycle-level behavioural models, and each contains the synthesizable switch
decoder. The top, `palp_system`, puts them together into a complete
simulated memory. Every block has a testbench.

## Organisation

The default configuration is:

- 4 channels, each with 4 ranks of 8 banks, so 32 banks per channel.
- 8 partitions per bank, each with 4096 rows and 512 columns of 128-bit
  memory lines.

Requests use a 37-bit physical address:

| bits   | field      |
|--------|------------|
| 36:35  | rank       |
| 34:23  | row        |
| 22:14  | column     |
| 13:11  | partition  |
| 10:8   | bank       |
| 7:6    | channel    |
| 5:0    | byte (ignored) |

Each request moves one 128-bit line. The byte offset is ignored, so one
address slot holds one 128-bit line rather than 64 bytes.

```
palp_system                      top: 4 channels, request routing by addr[7:6]
 └ per channel
    ├ palp_channel               controller of one channel
    │  ├ rw_queue                rwQ, 32 entries, age-ordered, 2 removals/cycle
    │  ├ palp_scheduler          pick one request or a pair (combinational)
    │  ├ rapl_monitor            per-bank energy account, pair admission
    │  └ bank_sequencer (x32)    per-bank command/data sequencer
    └ pcm_bank_model (x32)       behavioural PCM bank
       └ peripheral_ctrl         transistor settings M0..M6 from the command stream
palp_pkg                         types, decode_addr, timing, slot patterns
```

## Command sequences and their timing

All timing is in memory-clock cycles:

- tRCD = 1, read latency RL = 10, write latency WL = 3.
- Write recovery tWR = 35.
- A line takes 8 beats of 16 bits on the data bus.

Each sequence is fixed in length and is placed relative to its first
ACTIVATE (cycle 0):

| sequence | commands (cycle) | data bus | length |
|---|---|---|---|
| READ  | A 0, R 1, P 18 | read 11..18 | 19 |
| WRITE | A 0, W 1, P 46 | write 4..11, then tWR | 47 |
| RWW   | A(write part.) 0, A(read part.) 1, RWW 2, P 47 | write 5..12, read 15..22 | 48 |
| RWR   | A 0, A 1, DECOUPLE 2, RWR 3, TRANSFER 21, P 29 | SA line 13..20, verify-logic line 22..29 | 30 |

The lengths 19/47/48/30 and the basic latencies are the published
figures. Several placements are choices made in this design:

- In RWW the read burst comes after the write burst, so the two never
  meet on the one data bus.
- PRECHARGE sits in the last cycle of every sequence.
- RWW activates the write partition first.
- RWR uses the first-activated partition for the sense amplifier.

A bank is free again in the cycle after its PRECHARGE.

## Peripheral switches

Each of the 128 peripheral structures has a write driver, its verify
logic, and a sense amplifier. It reaches partition *k* through two NMOS
switches:

- one switch from the partition to the write-driver node (`wd_sw[k]`);
- one switch from the partition to the sense-amplifier node (`sa_sw[k]`).

Three further switches are:

- **M4** joins the verify logic to the write driver's pulse shaper.
- **M5** connects the verify logic to the internal data bus.
- **M6** connects the sense amplifier to the internal data bus.

In the two-partition picture, M0..M3 are `wd_sw[i]`, `sa_sw[i]`,
`wd_sw[j]` and `sa_sw[j]`.

`peripheral_ctrl` derives all switch settings from the command stream of
one bank:

| after | switches on | M4 | M5 | M6 |
|---|---|---|---|---|
| ACT + R | sa of the activated partition | 1 | 0 | 1 |
| ACT + W | wd of the activated partition | 1 | 0 | 1 |
| A_i A_j RWW | wd_i, sa_j | 1 | 0 | 1 |
| A_i A_j DECOUPLE RWR | wd_i, sa_j (verify logic reads i) | 0 | 0 | 1 |
| TRANSFER | unchanged | 0 | 1 | 0 |
| PRECHARGE | none | 1 | 0 | 1 |

It also flags two kinds of error:

- Settings that join two partitions to one node (`cfg_invalid`). These
  would corrupt data, and the legal command orders never produce them.
- Illegal command orders (`cmd_err`, sticky).

## The scheduler (palp_scheduler)

The rwQ keeps requests in arrival order. Each entry has an *age*: the
number of requests dispatched while it waited, saturating at 31. Each
cycle, among the requests whose bank is idle:

1. **Choose the request to serve next.**
   - Take the oldest request.
   - If its age is below the backlogging threshold `TH_B` (default 8),
     instead take the oldest request that has a *partner*. A partner is
     a request to the same bank, in another partition, that is not a
     second write.
   - Once the oldest has waited `TH_B` dispatches, it is taken
     regardless. This is reported as `starve_forced`.
2. **Choose the partner.**
   - A write's partner is the oldest read.
   - A read's partner is the oldest write. Only if there is none is it
     the oldest other read.
3. **Check power.** A read-write pair needs `ok_rw` for that bank and a
   read-read pair needs `ok_rr`. Otherwise the request is served alone
   (`rapl_serialized`).

A request waits while an older queued request to the same line exists
and either of the two is a write. Reads therefore always return the data
of the last write before them in arrival order, as in first-come
first-served order.

Below is an example for one bank. Requests are written as type,
partition and wordline, and the queue holds, in arrival order:

- W(3, 120)
- R(1, 127)
- R(3, 7)
- R(4, 12)
- W(1, 89)
- R(1, 22)

The policy issues three pairs:

1. RWW(W3, R1). The oldest request is the write W3; its partner is the
   oldest read, R1.
2. RWW(R3, W1). R3 is now the oldest; its partner is the only write, W1.
3. RWR(R4, R1).

This takes 48 + 48 + 30 = 126 cycles, against 170 for plain first-come
first-served order. The published illustration of this example pairs the
requests differently: RWW(W3, R1), RWW(R4, W1) and RWR(R3, R1). Its total
is the same 126 cycles. The pairing here is the one the pseudo-code rule
gives, and it is the first check in `palp_channel_tb`.

## RAPL admission (rapl_monitor)

Each bank keeps an energy account E:

- Every cycle a bank's sense amplifiers are busy, `P_SA` is added.
- Every cycle its write drivers or verify logic are busy, `P_WD` is
  added.

N counts cycles since reset. A pair of length T (30 for R-R, 48 for R-W)
is admitted when the bank's average over N+T cycles stays at or below the
limit. The test is done without division:

    E + T*(P_SA + P_WD) <= RAPL * (N + T)

All powers are in units of 0.001 pJ/access. The defaults are RAPL = 300
(0.3 pJ/access) and P_SA = P_WD = 182. The 182 values are an estimate: the
cost of one modified peripheral structure, 0.364, split evenly. Single
requests are never held back by RAPL.

## Channel bus bookkeeping (palp_channel)

All 32 banks of a channel share one command bus and one data bus. Every
sequence has a fixed pattern of command slots and data slots, so the
channel keeps two 48-bit shift registers of booked future cycles. A
scheduler decision is dispatched only if its pattern, shifted to start
next cycle, meets no booked slot. Otherwise it is retried the next cycle
(`bus_stall`).

Dispatch does three things:

- It books the slots.
- It removes the request or requests from the rwQ.
- It starts the bank's sequencer.

The sequencer then drives commands and write beats. It collects read
beats at their fixed slots and returns `{tag, line}` one cycle after the
last beat. Each channel returns at most one read per cycle.

## Interfaces

- **Host side** (`palp_system`):
  - Requests use `req_valid/req_ready`; `mem_req_t` is
    `{is_write, addr[36:0], data[127:0], tag[7:0]}`.
  - `req_ready` is the ready of the channel named by `addr[7:6]`.
  - Reads come back on `resp_valid[c]/resp[c]` (`{tag, data}`) for
    channel c, in completion order.
  - Writes are posted and are not acknowledged.
- **PCM side, per channel, inside the top and on `palp_channel`'s
  ports:**
  - `pcm_cmd_valid/pcm_cmd` carries `{cmd, bank id = {rank, bank},
    partition, row, column}`.
  - `pcm_wbeat_valid/pcm_wbeat` carries 16-bit write beats, least
    significant first.
  - `pcm_rbeat` carries read beats. They are the OR of the 32 banks;
    an assertion checks that at most one bank drives in a cycle. The
    controller samples them at fixed slots.
- **Status:**
  - `events[c]` pulses `issue_rd`, `issue_wr`, `issue_rww`,
    `issue_rwr`, `starve_forced`, `rapl_serialized`, `bus_stall` and
    `queue_full`.
  - `pcm_error[c]` is set when a bank model on channel c sees a timing
    or command-order error.

## The bank model (pcm_bank_model)

This is a behavioural model, not synthesizable. It decodes the channel
commands addressed to its bank id and runs them through `peripheral_ctrl`.
Its line data follows the switch settings:

- The sense-amplifier line is driven while M6 is on.
- The verify-logic line is driven after TRANSFER, while M5 is on.
- Written data reaches the cells at PRECHARGE.

It raises a sticky timing error for:

- a command that comes sooner than tRCD after ACTIVATE;
- a missing write beat;
- a PRECHARGE earlier than tWR after the last write beat, or before the
  read bursts have gone out;
- an invalid switch setting.

Cells are kept in a sparse associative array, and lines never written read
as zero. Program-and-verify pulses are not modelled.

## Where this departs from, or adds to, the published description

- Partners are requests to *different* partitions of the same bank.
  One line of the published pseudo-code says "to partition p", but the
  rest of the description needs two different partitions.
- The starvation age counts dispatched requests, not cycles. The
  threshold is given as "8 accesses", while the definition of age is in
  cycles.
- The RAPL default is 0.3 pJ/access. The description quotes both 0.3
  (as the default) and 0.4 (from the datasheet). P_SA and P_WD are
  estimates.
- The following are not specified and were chosen here:
  - the multi-bank rules (idle-bank candidates, same-line hazard);
  - bus-slot booking;
  - one decision per channel per cycle;
  - the queue depth of 32;
  - tags and handshakes;
  - reset behaviour: the queue is empty and accounts are cleared.
- Each request moves one 128-bit line. The 64-byte cache line of the
  host and the 512-column field are taken as given without further
  mapping.
- Only the one published set of cycle timings is built, as package
  constants.
- Not built:
  - the analog write-pulse circuits;
  - the DDR4 physical interface;
  - the host processor and its caches, including the eDRAM write cache.
  The testbenches generate the request stream instead.

## Verification

Every block has a self-checking testbench in `tb/`, which prints
`TB_RESULT checks=N failures=M`.

- **`decode_addr_tb`:** random addresses checked against shift-and-mask
  field extraction.
- **`rw_queue_tb`:** random push and double-pop traffic checked against
  a reference queue, including ages.
- **`rapl_monitor_tb`:** activity patterns checked against the real-valued
  average-power equation.
- **`palp_scheduler_tb`:** the example above, plus 20000 random queue
  states checked against an independent model of the policy.
- **`bank_sequencer_tb`:** every sequence checked cycle by cycle
  (commands, beats, busy, response).
- **`peripheral_ctrl_tb`:** the switch tables, decoupling and transfer,
  and rejection of illegal orders.
- **`pcm_bank_model_tb`:** write, RWW and RWR programs, with data read
  back from both paths.
- **`palp_channel_tb`:**
  - the 126-cycle example;
  - 3000 random requests over 32 bank models, checked against a
    reference memory;
  - every event kind must occur. RAPL is lowered to 150 so that
    serialisation happens.
- **`palp_system_tb`:**
  - the whole design at its default parameters, including its 4 x 32
    bank models;
  - 6000 requests, mixing spread-out traffic with phases that hammer two
    banks per channel;
  - every read is checked, and data collisions and bank-model errors
    count as failures;
  - each mechanism (single read and write, RWW, RWR, starvation
    override, RAPL serialisation, bus stall, full queue) must be seen.

  It simulates about 18,500 cycles in roughly a minute and a half.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
      -y rtl -y tb +libext+.sv -Irtl rtl/palp_pkg.sv tb/palp_system_tb.sv \
      --top-module palp_system_tb -o sim
    ./obj_dir/sim

Use any other `*_tb` in the same way. The parameters that can be changed
are `QDEPTH`, `TH_B`, `P_SA`, `P_WD` and `RAPL` on `palp_system` or
`palp_channel`. The organisation and timing are constants in `palp_pkg`.
If you change them, keep the address map and the 48-cycle slot window
(`MAX_DUR`) consistent.

## Known lint notes

- Verilator reports some width-extension and unused-bit warnings.
- Its `SYNCASYNCNET` note on `rst_n` comes from the assertions that are
  gated by reset. `rst_n` is asynchronous in the flops and is also used
  as an enable in the assertions; this is intended.
