# HourGlass: time-based cache coherence for critical and non-critical cores

In a multi-core system that runs tasks of two criticality levels side by side,
the cores running critical (cr) tasks need a proven upper bound on how long any
memory access can take. The non-critical (ncr) cores should still be able to
use their caches and the bus, but they must never lengthen a cr core's worst
case. A conventional snooping MSI protocol cannot give that bound, because a
line can bounce between cores without limit.

HourGlass gives it with **time**. Every cached line carries countdown timers.
While a timer runs, the holder keeps the line and keeps hitting on it. Remote
requests are remembered, not obeyed at once. When the timer expires, the holder
answers: it sends the line to the requester, or it self-invalidates its shared
copy. The length of the wait depends on who holds the line and who asks for it:
- cr holder, cr requester: v(cr,cr)
- cr holder, ncr requester: v(cr,ncr)
- ncr holder, cr requester: v(ncr,cr)
- ncr holder, ncr requester: v(ncr,ncr)

Criticality also reaches every point where requests queue:
- the bus gives slots to cr cores only;
- answers to cr cores overtake answers to ncr cores;
- pending requests in the shared memory are served cr first.

Together these make the latency of a cr request a sum of a few bounded terms.

This repository is a synthesizable SystemVerilog model of the memory side of
such a system:
- four cores' private L1 data caches with the HourGlass controller;
- the time-division multiplexed (TDM) snooping bus with its response buffers
  and arbiter;
- the shared memory with its directory and pending-request table;
- the criticality table.

The cores themselves are outside the design. Each core's load/store port is a
port of the top module.

## 1. System at a glance

```
 core0 core1 core2 core3          (outside; core_req/core_rsp ports)
   |     |     |     |
 [L1-D][L1-D][L1-D][L1-D]   hg_l1d: timers + cr/ncr destination fields per line
   |  breq, prsp_push, c2c_data        ^ bus broadcast, dlv (data), AllInv
 [ hg_shared_bus: slot counter | PRSP buffer x4 | hg_tdm_arbiter ]
   |  bus message, write-back            ^ reply, AllInv
 [ hg_shared_mem: data + directory (state, owner, sharer bits) | hg_pr_lut ]
 [ hg_crit_rom: which cores are cr ] -> everyone
```

| File | Role |
|---|---|
| `rtl/hg_pkg.sv` | shared types: bus messages, PRSP entries, L1 states, sizes |
| `rtl/hg_crit_rom.sv` | criticality table, written at boot and then locked |
| `rtl/hg_tdm_arbiter.sv` | picks the one transaction of each slot |
| `rtl/hg_prsp_buffer.sv` | per-core queue of answers (SendData, SelfInv, PutM) |
| `rtl/hg_shared_bus.sv` | slot timing, broadcast, cache-to-cache data, write-back |
| `rtl/hg_pr_lut.sv` | pending request table of the shared memory |
| `rtl/hg_shared_mem.sv` | shared memory (perfect LLC), directory, AllInv |
| `rtl/hg_l1d.sv` | L1 data cache and HourGlass controller |
| `rtl/hourglass_top.sv` | the four-core system |

The default configuration has four cores:
- c0 and c1 are cr; c2 and c3 are ncr.
- Each core has a 16 kB direct-mapped L1-D with 64 B lines (256 lines) and a
  3-cycle hit.
- The shared memory is 1 MB with a 50-cycle access.
- The timers are v(cr,cr)=2P, v(cr,ncr)=4P, v(ncr,cr)=1P and v(ncr,ncr)=2P,
  where P is one TDM period: the number of cr cores times the slot width SW.
  With SW = 50 this gives P = 100 cycles.

## 2. The bus: slots, slack slots and one transaction per slot

Time on the bus is cut into slots of `SW` cycles (default 50). Slots belong
only to cr cores, in index order (c0, c1, c0, c1, ...). In the first cycle of a
slot, the arbiter chooses exactly one transaction, in this order:

1. **An answer addressed to the slot's owner.** This is a SendData or
   SelfInv waiting in any core's PRSP buffer whose destination is the owner.
   An answer caused by a core's request therefore travels in that core's
   slot.
2. **The owner's own request** (GetS or GetM). A core has at most one.
3. **Otherwise the slot is a slack slot.** The ncr cores are polled
   round-robin, starting after the one served last. The first ncr core with
   an answer addressed to it, or with a request, gets the slot.

If no core is cr, every slot is a slack slot.

Layout of one slot (this design's choice; the paper gives only "one
transaction per slot"):

| cycle | what happens |
|---|---|
| 0 | arbiter decides; the message is broadcast on `bus` to every L1 and the memory; the PRSP entries of that line in the sender's buffer are removed; the sender of SendData/PutM captures its line |
| 1 | the bus copies the captured line (`c2c_data`) |
| 1..SW-1 | the memory's reply (registered, one cycle after the message) waits |
| SW-1 | data is delivered to the requester (`dlv`); SendData and PutM data is written back into memory |

The L1 that receives `dlv` installs the line at the end of that cycle and
starts its timers. A request therefore costs exactly one slot on the bus. The
`SW` default of 50 is this design's choice: it equals the paper's memory
latency, so one slot covers one memory access.

## 3. PRSP buffers: answers that can be overtaken

Each core has a pending response (PRSP) buffer of N = 4 entries in the bus.
Each entry holds {valid, message, destination, destination-is-cr, line}. A
cache pushes an entry when one of its timers expires: SendData, SelfInv, or
PutM when it replaces a dirty line.

The key rule is cancellation. Suppose an answer to an ncr core for line X is
queued, and the cache then queues an answer to a cr core for the same line.
The ncr entry is invalidated (`prsp_cancel` pulses), and the cr core receives
the line first. The ncr core has seen the cr request on the bus, so it drops
its wait and re-issues its own request (section 4.4).

When an entry is sent, every other entry of the same line in that buffer is
dropped as well. Once the line has left the cache, nothing more can be sent
for it.

Answers for a core's own eviction carry that core as destination. They
therefore go out in the core's own slot, or in a slack slot for an ncr core.

## 4. The L1 controller (`hg_l1d`)

This block is the heart of the design and the hardest to follow.

### 4.1 What a line carries

Besides the tag and the 64 B of data, every line has:
- a **cr timer** and an **ncr timer**, 64 bits each. Both are loaded when the
  line arrives. With a cr owner they are loaded with v(cr,cr) and v(cr,ncr);
  with an ncr owner, with v(ncr,cr) and v(ncr,ncr). Both then count down to
  zero.
- a **cr-destination** and an **ncr-destination** field, each with a valid
  bit. The first remote cr or ncr requester seen for the line is written
  there, and the field is then not overwritten. This keeps the oldest
  requester of each class.
- a `pushed_cr` flag, which records that the answer already queued went to a
  cr core.

If a line sits in S or M with no requester and both timers have reached zero,
the timers restart. This is the paper's "restart timer" optimisation.

### 4.2 States

| state | meaning |
|---|---|
| I | invalid |
| IS^D, IM^D | request seen on the bus, waiting for data |
| IS^DI, IM^DI | as above, and another core already asked for the line; the line is given up as soon as the timer allows |
| S, M | stable, readable (M also writable) |
| S^TI, M^TI | a remote request is recorded; the core keeps hitting until the relevant timer expires |
| S^TM | the core wants to write a shared line and waits for its own timer before giving the copy up |
| SI^A, MI^A | answer (SelfInv / SendData) queued in the PRSP buffer, still readable |
| SM^A | as SI^A, for a store; after the SelfInv the GetM is issued |
| SI | SelfInv sent; the line stays readable until AllInv from memory makes it I (the memory hands the line to a writer only at that same moment) |
| IM^AD, IS^AD | request pending on the bus, not yet granted |
| MI^R | dirty line being replaced (PutM queued) |

"Relevant timer" means:
- the cr timer if a cr requester is recorded;
- otherwise the ncr timer.

### 4.3 Main transitions

**Requests from this core.**
- A load or store that hits answers 3 cycles after it is accepted.
- A load miss posts GetS (IS^AD). A store miss posts GetM (IM^AD).
- When the request appears on the bus, the line moves to IS^D or IM^D.
- Data arrival moves the line to S or M. If a requester was recorded
  meanwhile, it moves to S^TI or M^TI instead.
- A store to S waits for the own-criticality timer (S^TM), queues a SelfInv
  (SM^A), and issues GetM once the SelfInv is on the bus (IM^AD). Like the
  paper, there is no direct S→M upgrade: the core's copy has to time out
  first.

**Requests from other cores.**
- In S, a remote GetM moves the line to S^TI. In M, any remote request moves
  it to M^TI. The requester's id goes into the matching destination field.
- When the relevant timer expires:
  - S^TI queues SelfInv (SI^A), then goes to SI and waits for AllInv;
  - M^TI queues SendData to the cr destination if one is recorded, else to
    the ncr one (MI^A). When the SendData is on the bus, the line goes to I.
- If a cr requester arrives after an answer to an ncr core was queued, a
  second answer to the cr core is queued, and the PRSP buffer cancels the
  first.

### 4.4 ncr requesters step aside

Suppose an ncr core waits for data (IS^AD, IS^D, IM^AD, IM^D) and sees a GetS
or GetM to the same line from a cr core. It drops its place and re-issues its
request (`ev_reissue`). The shared memory and the holder do the same on their
side: the memory cancels its pending ncr entries for the line (section 5), and
the holder redirects its answer (section 3). A cr request never waits behind
an ncr request.

### 4.5 Replacement

The L1 is direct-mapped, so a miss can hit a valid line of another tag:
- An M line is written back with PutM (MI^R).
- An S line self-invalidates: S → SI^A → SI. Once its SelfInv has been on
  the bus, the slot is free: the old line is dropped without waiting for
  AllInv, and the new line is requested.

A line in a transient state is not replaced; the new request waits until that
line has settled.

## 5. Shared memory, sharer bits and the PR LUT

Every memory line has:
- its data;
- a directory state: I, S or M;
- an owner;
- one sharer bit per core.

Sharer bits are needed because shared copies time out at different moments.
Each copy sends its own SelfInv. Only after the last one may a waiting writer
receive the line. At that moment the memory broadcasts **AllInv**: caches in
SI drop to I, and the memory answers the best pending request.

Requests that cannot be answered at once are recorded in the **PR LUT**:
- GetS to an M line;
- GetM to a line that is not I;
- any request to a line that already has pending requests.

The PR LUT has one row per core, because a core has at most one request. Each
row holds the core's criticality, the message and the line. The best row for a
line is the oldest cr row; without one, the oldest ncr row.

When a cr request arrives, every ncr row for that line is cancelled
(`lut_cancel`). Those ncr cores re-issue their requests, as described in
section 4.4.

When a SendData passes between caches, the memory does two things:
- It reads the receiver's row to learn the new directory state: S with one
  sharer for a GetS, or M with a new owner for a GetM.
- It stores the line from the write-back.

A PutM that finds a pending request forwards the written-back line to that
request in the same slot.

After reset the memory clears all of its lines, one per cycle, and only then
raises `ready`. That takes 16384 cycles at the default size. The bus does not
start its slots before that.

## 6. Latency of cr requests

With N_cr cr cores and slot width SW, the analysis the design follows bounds a
cr request as follows:

- arbitration: N_cr·SW
- coherence: v(cr,cr) + (v(ncr,cr) + (N_cr−1)·SW) + (N_cr−1)·(v(cr,cr) + (N_cr−1)·SW) − N_cr·SW
- access: one slot

At the defaults (N_cr = 2, SW = 50, P = 100) this gives 100 + 500 + 50 = 650
cycles.

The end-to-end test reports the largest latency each core saw, measured from
request to completion. Its random mix of loads and stores to five shared lines
includes replacements, because two of the lines share an L1 set. Observed:
- c0 and c1 (cr): about 665 and 870 cycles;
- c2 and c3 (ncr): about 4700 and 6400 cycles.

The cr figures exceed 650 for two reasons:
- The test counts complete requests, including ones where the core's own line
  must first be evicted. An eviction costs an extra slot and an AllInv wait.
- A store to a shared line first waits for the own timer. The analysis
  treats these as separate requests.

A second test, `tb_hourglass_configs`, runs seven systems side by side under
the same kind of load (60 operations per core, memory cut to 1024 lines). Its
results for one run:

| configuration | cr cores | bound (cycles) | largest cr latency seen |
|---|---|---|---|
| timers (2,4,1,2) | 1 | 200 | 297 |
| timers (2,4,1,2) | 2 | 650 | 877 |
| timers (2,4,1,2) | 3 | 1400 | 1432 |
| timers (2,4,1,2) | 4 | 2450 | 2377 |
| timers (1,1,1,1) | 2 | 450 | 491 |
| timers all 0 | 2 | 150 | 442 |
| HourGlass(1), all cr | 4 | 1650 | 1547 |

The excess is largest where the bound is small (zero timers, one cr core).
There, an eviction or the own-timer wait before a store, each costing one or
two extra periods, weighs most.

The bound is reported by the tests, not checked by them. The ncr cores have no
bound, as intended.

## 7. Where this design departs from the paper, or fills gaps

- **Slot width and layout.** The paper gives no SW. 50 cycles is used, with
  the cycle layout of section 2.
- **Timer values are build-time parameters** of each L1 (`K_*` multiples of P
  in `hourglass_top`). The criticality table can be rewritten at boot, but the
  timer values are not recomputed. If the table is changed, rebuild with a
  matching `CRIT`.
- **ncr re-issue is slightly wider than the paper's transition table.** An ncr
  core in IS^D also re-issues on a cr GetS, where the table has no entry. A cr
  core in IS^D records a later cr GetS in its cr-destination field; the table
  leaves that cell empty. In the table's ncr IS^D row, the "OtherGetM from
  ncr" cell says to update the cr destination. That reads as a slip, and the
  ncr destination is updated instead.
- **Replacement** (section 4.5) is this design's own. The paper's tables give
  the states but not the eviction path in detail.
- **All answers travel through the PRSP buffers**, including SelfInv and
  PutM. For an own eviction, the destination is the evicting core itself.
- **The shared memory is a perfect 1 MB array** indexed by the low
  line-address bits. The paper's 8-way organisation does not matter for a
  perfect cache and is not modelled. Addresses beyond 1 MB alias.
- **Naming of the default configuration.** One figure of the paper labels it
  HourGlass(2,4,2,1); its table of configurations and its text give
  (2,4,1,2). (2,4,1,2) is used.
- The boot write/lock handshake of the criticality table, the PR LUT age
  matrix and the tie-breaks between equal candidates are this design's own
  choices.

## 8. Parameters

| where | parameter | default | meaning |
|---|---|---|---|
| `hourglass_top` | `CRIT` | 4'b0011 | bit i set: core i is cr |
| | `SW` | 50 | slot width in cycles |
| | `L1_LINES`, `L1_LAT` | 256, 3 | L1-D lines, hit latency |
| | `MEM_LINES` | 16384 | shared memory lines |
| | `K_CRCR`, `K_CRNCR`, `K_NCRCR`, `K_NCRNCR` | 2, 4, 1, 2 | timer values in TDM periods P = popcount(CRIT)·SW |
| `hg_pkg` | `NCORES` | 4 | number of cores (fixed; ids are 2 bits) |

Other configurations the paper evaluates are all parameter changes:
- `K_*` = 1,1,1,1;
- all timers 0;
- all cores cr (`CRIT` = 4'b1111);
- 1 to 4 cr cores.

## 9. Simulating

Every testbench checks itself. Each prints `TB_RESULT checks=N failures=M` and
stops itself through a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hg_pkg.sv rtl/*.sv tb/tb_hourglass_top.sv \
    --top-module tb_hourglass_top -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2          # add +trace to print bus traffic
```

Use the same command for any unit testbench with its own top module name. The
unit testbenches are:

| Testbench | What it checks |
|---|---|
| `tb_hg_crit_rom` | boot write, lock, count of cr cores |
| `tb_hg_prsp_buffer` | fill, duplicates, cancellation of ncr answers, flush on send |
| `tb_hg_tdm_arbiter` | slot ownership, answer-before-request priority, slack slots round-robin |
| `tb_hg_pr_lut` | cr-first and oldest-first choice, cancellation |
| `tb_hg_shared_mem` | replies, PR LUT use, sharer bits, AllInv, PutM forwarding (64 lines) |
| `tb_hg_shared_bus` | slot period, slot ownership, delivery at the slot's last cycle, write-back, cancellation (SW = 8) |
| `tb_hg_l1d` | miss/hit timing, timers holding a line, answer destination and priority, ncr re-issue (short timers) |

`tb_hourglass_top` runs the full system at the default parameters. Each core
issues 120 random loads and stores. Every load is checked against a reference
memory updated by completed stores. The test fails if any of these mechanisms
never happened:
- L1 hit and miss;
- slack slot;
- timer deferral;
- ncr re-issue;
- PRSP cancellation and PR LUT cancellation;
- AllInv;
- SendData, SelfInv and PutM.

It runs in well under a second of simulator time after the 16384-cycle memory
clear.

`tb_hourglass_configs` (with its helper `tb/hg_sys_run.sv`) checks data in the
seven configurations of section 6. It also checks that a system with only cr
cores has no slack slots, that systems with ncr cores use them, and that
non-zero timers defer remote requests.

## 10. Limits

- The per-line timers are real 64-bit registers, 512 per L1, all counting
  down in parallel. This is faithful to the paper but large in area. Logic
  synthesis of the full-size top is slow for the same reason.
- The model has no instruction caches, no DRAM behind the shared memory and no
  cores.
- `NCORES` is fixed at 4.
- The latency bound is reported, not proven, by the tests.
