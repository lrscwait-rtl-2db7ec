# Colibri: LRwait, SCwait and Mwait for a shared-L1 manycore

In a manycore cluster whose cores share a banked scratchpad memory, atomic
read-modify-write sequences built from RISC-V `lr.w`/`sc.w` scale badly: when
many cores hit the same word, all but one `sc.w` fail and the losers retry,
and cores waiting for a flag poll it. Both kinds of traffic compete with the
useful work for the interconnect and the banks.

This RTL implements the alternative of the LRSCwait proposal:

* **LRwait** behaves like `lr.w`, but the memory answers only one core at a
  time per address. The others are queued and sleep until it is their turn,
  so the order of the atomic sequences is fixed when the LRwait arrives.
* **SCwait** behaves like `sc.w`: it writes and answers 0 only if the
  reservation still holds, otherwise it answers 1. It also lets the next
  queued core go.
* **Mwait** puts a core to sleep until a word is written. It carries the value
  the core last saw. If the word already differs, the core is answered at
  once.

A plain implementation would need a queue with one entry per core in front of
every bank. That is O(cores x banks) storage. **Colibri** stores the queue as
a linked list instead:

* each bank controller keeps only a head and a tail per monitored address;
* each core has one *Qnode* holding the link to the core queued behind it.

Storage grows linearly with the system size.

The default configuration is 256 cores and 1024 banks of 256 32-bit words
(1 MiB), with one monitored address per bank.

## Blocks

| File | Block | Role |
|---|---|---|
| `rtl/colibri_pkg.sv` | package | request/response message formats |
| `rtl/qnode.sv` | Qnode | one per core, between core and interconnect; holds the successor link |
| `rtl/colibri_controller.sv` | Colibri controller | one per bank; queue slots (head, tail, reservation) and the bank port |
| `rtl/spm_bank.sv` | SPM bank | 256 x 32-bit single-port memory, one-cycle read |
| `rtl/xbar.sv`, `rtl/rr_arbiter.sv` | interconnect | full crossbar with a round-robin arbiter per bank and per core |
| `rtl/colibri_system.sv` | top | NumCores Qnodes, crossbar, NumBanks controllers |

The cores are not part of the RTL. Each core's request and response port is
a port of `colibri_system`. Any core that speaks the message format below can
be attached.

## Messages

Requests (`req_t`: op, addr, data, src, succ):

| op | sent by | meaning |
|---|---|---|
| `REQ_LOAD`, `REQ_STORE` | core | plain access |
| `REQ_LRWAIT` | core | load-reserved, answered when it is this core's turn |
| `REQ_SCWAIT` | core | store-conditional with `data`; ends the core's turn |
| `REQ_MWAIT` | core | sleep until `addr` is written; `data` = expected value |
| `REQ_WAKEUP` | Qnode | WakeUpRequest: make core `succ` the new head of the queue at `addr` |

Responses (`rsp_t`: op, data, dst, succ):

| op | meaning |
|---|---|
| `RSP_LOAD`, `RSP_LRWAIT`, `RSP_MWAIT` | word value |
| `RSP_STORE` | store acknowledge |
| `RSP_SCWAIT` | 0 = success, 1 = failure |
| `RSP_SUCCUPD` | SuccessorUpdate: core `succ` is now queued behind core `dst`; the Qnode consumes it |

Addresses are byte addresses with word interleaving. The bank is
`addr[2 +: log2(NumBanks)]` and the row is the bits above it. The top
overwrites `src` with the index of the port the request enters.

## How a queue is built and torn down

Two cores, A and B, contend for word X. X's controller has a free slot.

1. A's LRwait arrives. The slot is free, so the controller allocates it with
   head = tail = A and sets the reservation. It answers A with the value of
   X at once.
2. B's LRwait arrives. The slot for X exists, so the controller sets
   tail = B and sends a **SuccessorUpdate** (`dst` = A, `succ` = B) to the
   old tail. A's Qnode stores B as its successor, even if A is busy or
   asleep. B gets no answer and sleeps.
3. A's SCwait reaches the controller. A is the valid head, so the controller
   writes X if the reservation still holds and answers success or failure.
   Because head != tail, the head is only marked invalid. This stops a second
   SCwait from A from succeeding.
4. In the cycle after the SCwait leaves A's Qnode, the Qnode sends a
   **WakeUpRequest** for B to X's address.
5. The WakeUpRequest reaches the controller. The controller makes B the head,
   gives B a new reservation and sends B its delayed LRwait response. The
   response carries the value A just wrote.
6. B's SCwait finds head == tail, so the slot is freed.

The dangerous case is a SuccessorUpdate that reaches A's Qnode *after* A's
SCwait has already passed. The Qnode then has no core left to hand the link
to, so it sends the successor straight back to the controller as a
WakeUpRequest ("bounce"). The Qnode sends it to the address of its last
LRwait, which it keeps.

This is safe because the crossbar never reorders messages between one core
and one bank. Suppose a SuccessorUpdate was sent before A's SCwait was
processed. It then reaches the Qnode before A's SCwait response does.
Otherwise the controller saw head == tail and will send none. So once A has
its SCwait response, no SuccessorUpdate for that turn is still in flight.

At most one SuccessorUpdate is ever in flight to a Qnode. Assertions in
`qnode` check this and that a pending WakeUpRequest is held until it is
taken.

**Mwait** uses the same slots with the mwait flag set. In such a queue every
member, the head included, sleeps:

* A store to the word makes the controller answer the head. This takes one
  extra cycle, in which no new request is taken.
* The head's Qnode reacts to that response by sending the WakeUpRequest for
  its successor.
* The controller answers each core named in a WakeUpRequest in turn.
* The slot is freed when the tail has been answered.

The whole queue is woken by a single write, without any core polling.

A core that joins an Mwait queue while a wake-up chain is running is queued
behind the tail. The chain reaches it as well, even if its expected value
matched the newly written value. Software must therefore re-read the word
after every Mwait, as it would after any wake-up.

## Controller details and timing

Each slot holds: valid, mwait, row, head, head_valid, tail, resv (the
reservation) and notify (a write hit the sleeping Mwait head).

* **Throughput.** One request is taken per cycle (valid/ready).
* **Latency.** The bank reads in the cycle after the request is taken. The
  response is offered in that same cycle and held until accepted. A load
  therefore returns in the cycle after it was issued, if there is no
  contention.
* **Mwait takes two cycles.** The first reads the word; the second compares
  it with the expected value and either answers or queues the core.
* **Back-pressure.** A new request is taken only if the response register is
  empty or is drained in the same cycle.

Cases the protocol leaves open, and how this controller handles them:

| situation | behaviour |
|---|---|
| LRwait to a new address, no free slot | answered at once without reservation; the SCwait will fail and software retries |
| Mwait, no free slot, or value already changed | answered at once |
| LRwait to an address held by an Mwait queue, or the reverse | answered at once, as if full |
| head's SCwait after its reservation was lost to a store | fails, **and still dequeues** the head (its Qnode sends the WakeUpRequest anyway) |
| SCwait from a core that is not the valid head | fails, queue unchanged |
| WakeUpRequest that matches no slot with an invalid head | dropped |

With one slot per bank, two hot words in the same bank cannot both be
queued. The second one falls back to immediate answers, and its users retry.
`NumQueues` raises the slot count; 2, 4 and 8 are the other sizes the design
was characterised at.

Software rules the hardware relies on:

* a core has at most one outstanding LRwait or Mwait;
* every LRwait is followed by an SCwait to the same address;
* a core waits for each response before issuing its next request.

A core that breaks these rules can block a queue forever.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `colibri_system` | `NumCores` | 256 | cores (at most 256: 8-bit core index) |
| | `NumBanks` | 1024 | banks (power of two) |
| | `BankWords` | 256 | words per bank (1 MiB total at the defaults) |
| | `NumQueues` | 1 | queue slots (monitored addresses) per bank |

Message field widths are package constants in `colibri_pkg`: 32-bit address,
32-bit data and an 8-bit core index.

## Where this RTL goes beyond or departs from the source design

* **Interconnect.** The evaluated system has a hierarchical, multi-cycle
  interconnect grouped into tiles. Here a flat single-cycle crossbar stands
  in for it. Colibri needs only in-order delivery per core-bank pair, which
  the crossbar guarantees. Latencies and throughput numbers therefore differ
  from those of the real cluster. The full crossbar is also large at
  256 x 1024 and is not meant as a physical implementation.
* **Not included.** There are no cores, no instruction decoding of the new
  opcodes, no AMOs and no baseline `lr`/`sc`. Each core's load/store unit is
  assumed to translate the instructions into the messages above.
* **Own choices.** All bit widths, encodings, handshakes, the address map,
  the reset (asynchronous, active low) and the handling of the corner cases
  in the table above were chosen for this implementation.

## Verification

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb/tb_spm_bank.sv` | read latency, read-data hold, writes |
| `tb/tb_xbar.sv` | routing, no loss or duplication, per-pair order under random back-pressure, round-robin fairness |
| `tb/tb_qnode.sv` | SuccessorUpdate storage and hiding, WakeUpRequest after SCwait and after the Mwait response, bounce of a late SuccessorUpdate, stall handling |
| `tb/tb_colibri_controller.sv` | the message sequence above cycle by cycle, full controller, reservation loss, non-head SCwait, Mwait immediate/queued/woken; run with and without response stalls |
| `tb/tb_colibri_controller_multi.sv` | a controller with four slots: four words of one bank queued at once (LRwait and Mwait), a fifth finding it full, out-of-order teardown and slot reuse |
| `tb/tb_colibri_system.sv` | 8 cores / 16 banks end to end (see below) |
| `tb/tb_histogram_sweep.sv` | 16 cores / 64 banks histogram at 1 to 32 bins; bin values, no SCwait failure, updates per cycle |
| `tb/tb_lock_workload.sv` | 16 cores; a lock taken with LRwait/SCwait, waiting either by a 128-cycle backoff or by sleeping with Mwait; mutual exclusion and cycles per critical section |
| `tb/tb_colibri_system_full.sv` | the default 256-core, 1024-bank system; Verilator needs about 9 minutes to build it, the run itself about 30 s |

The end-to-end tests drive the system with `tb/colibri_core_models.sv`,
behavioural cores that run three phases:

1. a contended histogram, with bins placed so that two hot words share a
   bank;
2. a reservation broken by a store;
3. an Mwait hand-over from one producer to all other cores.

`tb_colibri_system` also counts each mechanism and fails if any never
happened: SuccessorUpdates, WakeUpRequests, bounced SuccessorUpdates,
LRwaits that waited in a queue, SCwaits failing on a full controller or on a
broken reservation, and Mwaits answered at once or after a write.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/colibri_pkg.sv rtl/*.sv tb/colibri_core_models.sv tb/tb_colibri_system.sv \
    --top-module tb_colibri_system
./obj_dir/Vtb_colibri_system
```

Replace the last two file names for another testbench; block-level
testbenches need only the package and the block's own files. Verilator prints
a warning that `rst_ni` is used both as an asynchronous reset and inside
assertions' `disable iff`; the warning is harmless.
