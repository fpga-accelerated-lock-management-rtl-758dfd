# A hardware lock manager and transaction engine for OLTP

Two-phase locking in an OLTP database needs a lock manager. On a CPU, that
lock manager spends most of its time on memory misses: it hashes a tuple id,
follows pointers through a hash bucket and a list of waiters, and only then
decides. This design moves the whole path onto an FPGA:

- the lock tables,
- the decision logic,
- the transaction agents that request locks, read and write tuples, and release locks.

Each lock table sits in on-chip RAM beside the state machine that serves it. A
Get or a Release is answered in three clock cycles. The transactions run in
hardware pipelines that keep several transactions in flight at once. Both
sides are replicated and joined by a two-level crossbar.

This SystemVerilog follows the architecture of "FPGA-Accelerated Lock
Management and Transaction Processing: Architecture, Optimization, and Design
Space Exploration". It fills in the details that the architecture leaves open;
each such choice is listed under "Where this RTL departs from the paper or
fills gaps" below. It is not the authors' code.

## The system at a glance

```
            CSR bus                         per txn agent: load AXI + data AXI (to HBM)
               |                                      |
           csr_regs ---- start / addresses ----> txn_agent[0..N_TA-1]
                                                  |  req          ^ rsp
                                                  v               |
                                     lock_xbar N_TA -> N_CH    sync_fifo (response queue)
                                                  |               ^
                                                  v               |
                      lock_channel[0..N_CH-1]: lock_xbar 1 -> P, P x lock_agent, merge P -> 1
                                                  |
                                     lock_xbar N_CH -> N_TA (routed by agent id) ---^
```

A lock id picks its server by fixed bit fields:

| Lock id bits | Selects |
|---|---|
| `[1:0]` | the channel |
| `[3:2]` | the lock agent inside that channel |
| the bits above those | the bucket of that agent's 64K-entry table |

These are the default widths: 4 channels and 4 agents per channel. A request
carries its origin (agent, slot, lock index). The response carries it back, so
each crossbar routes purely on fields of the packet.

The default parameters form the basic configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `N_CH` | 4 | lock channels |
| `P` | 4 | lock agents per channel |
| `N_TA` | 4 | transaction agents |
| `TXN_CS` | 8 | transactions in flight per agent |
| `LT_ENTRIES` | 65536 | lock-table entries per lock agent |
| `WQ_ENTRIES` | 4096 | waiting-queue entries per lock agent |
| `WQ_SEARCH` | 8 | probes for a free waiting-queue entry |
| `TIMEOUT` | 8192 | cycles |
| `MAX_LOCKS` | 511 | locks per transaction |
| `RSPQ_DEPTH` | 16 | response-queue entries |

## Lock modes

There are six modes: NL, IS, IX, S, SIX and X. Compatibility is the usual
multi-granularity matrix:

|     | NL | IS | IX | S | SIX | X |
|-----|----|----|----|---|-----|---|
| IS  | y  | y  | y  | y | y   | n |
| IX  | y  | y  | y  | n | n   | n |
| S   | y  | y  | n  | y | n   | n |
| SIX | y  | y  | n  | n | n   | n |
| X   | y  | n  | n  | n | n   | n |

A mode is stored as three bits (S, I, X):

| Mode | Bits |
|---|---|
| NL | 000 |
| IS | 110 |
| IX | 011 |
| S | 100 |
| SIX | 111 |
| X | 001 |

`lock_pkg` holds four helper functions:

- `compatible` checks the matrix.
- `mode_join` gives the mode a table entry holds after two compatible grants.
- `mode_reads` says whether a mode lets the holder read the tuple (S, SIX).
- `mode_writes` says whether it lets the holder write it (X).

## The lock agent: one FSM, two data structures

Each `lock_agent` owns two structures.

- **A hash table** (`lock_table_ram`, 64K x 28 bits). An entry holds:
  - the granted mode;
  - an 8-bit owner count;
  - a "has waiters" bit;
  - the head pointer of its waiting queue.

  The lock id is implicit: it is the bucket index. Two ids that hash to the same
  bucket therefore share one entry. This can cause false conflicts, never
  missed ones.
- **A pool of waiting-queue entries** (`waitq_ram`, 4K x 38 bits). An entry holds:
  - the requested mode;
  - the requester (agent, slot, lock index);
  - a next pointer.

  Each entry's valid bit is in flip-flops, so the search for a free entry can
  probe one entry per cycle without a RAM read.

There is no separate hash-table or list controller. The FSM drives both RAMs
directly:

| State | What it does |
|---|---|
| `WAIT_REQ` | accepts a request and starts the table read |
| `READ_LT` | decides |
| `FIND_TAIL` | walks to the end of the lock's queue |
| `FIND_EMPTY` | probes for a free entry; gives up after `WQ_SEARCH` probes |
| `WQ_INSERT` | writes the new queue entry |
| `DEL_WQ`, `WQ_DEL` | find and unlink a timed-out waiter |
| `LOCK_RESP` | sends the response and writes the entry back |
| `POP_RD`, `POP_CHK` | hand the lock to compatible waiters after a release |

Decisions:

- **Get.**
  - The lock is free, or the request is compatible and nobody waits: **Grant**.
    This takes 3 cycles from acceptance to a valid response.
  - There is a conflict: the request is appended to the lock's queue and
    **Waiting** is returned. This takes 5 cycles plus one per queue hop.
  - No free queue entry is found within `WQ_SEARCH` probes: **Aborted**. This
    takes 3 + `WQ_SEARCH` cycles plus the hops.
- **Release.**
  - A normal release decrements the owner count; at zero, the entry returns to
    NL. Either way **Released** comes back in 3 cycles.
  - A release flagged `timeout` comes from a transaction that gave up while it
    may still be queued. The agent searches the queue for that requester and
    unlinks the entry. This takes 5 cycles plus one per hop.
- **Pop.** When a release leaves waiters behind, the agent first sends
  Released. It then grants waiters from the head of the queue, one every
  3 cycles, until it meets one that conflicts or the queue is empty. These
  Grants carry `queued = 1`, so the transaction side can tell them apart from
  an immediate Grant.

After reset the table is swept to NL, one entry per cycle (65,536 cycles).
`init_busy` is high during the sweep, and the agent accepts no requests until
it ends.

## Lock channels and crossbars

A `lock_channel` is P lock agents behind a 1-to-P `lock_xbar`. Their
responses are merged back through a P-to-1 crossbar.

`lock_xbar` is one generic module, parameterised by the packet type. It has:

- round-robin arbitration per output;
- one transfer per output per cycle;
- no pipeline register, so the 3-cycle lock latency is not lengthened.

Clustering is what keeps the crossbar small. With 4 txn agents and 16 lock
tables, the design uses a 4x4 request crossbar plus four 1x4 crossbars. An
all-to-all 4x16 crossbar would be needed otherwise. A 2MN cost model gives
32 + 4x8 = 64 against 128. The responses return through a 4x4 crossbar. Each
agent's response queue (`sync_fifo`) absorbs bursts, so the channels do not
stall while the agent is busy.

## The transaction agent: a five-stage pipeline with context switching

A transaction's life is:

1. load;
2. send Gets;
3. collect Grants;
4. read and write tuples;
5. send Releases;
6. collect Released responses.

A `txn_agent` keeps `TXN_CS` transactions in separate slots and runs five
independent components over them. Each component steps round the slots looking
for one in its stage. All stage changes are decided in one place, `txn_sync`.

| Component | Moves a slot | Uses |
|---|---|---|
| `task_loader` | FREE -> LOAD -> GET | load AXI channel; writes the lock list |
| `lock_get_sender` | GET -> GRANT | reads the lock list; sends Gets; fills the lock buffer |
| `lock_resp_receiver` | (counters only) | takes every response; writes the response table |
| `txn_commit_ctrl` | COMMIT -> RELEASE | data AXI channel; reads the lock buffer |
| `lock_release_sender` | RELEASE -> RELWAIT | reads the response table; sends Releases |
| `txn_sync` | GRANT -> COMMIT, RELWAIT -> FREE | stage flags, counters, timers |

The three on-chip memories (`sdp_ram`) each hold `TXN_CS` x 512 words, with
address = {slot, lock index}:

| Memory | Contents |
|---|---|
| lock list | every lock of the transaction, as {mode, lock id} |
| lock buffer | only the locks that touch data (S, SIX, X), so the commit stage skips intention locks |
| response table | the last response state of each lock, so the release stage knows how to release it |

How the stage barriers work:

- The agent reaches **commit** when the number of Grants equals the number of
  locks.
- A transaction is **aborted** if either:
  - an Abort response arrives, or
  - `TIMEOUT` cycles pass after loading without all Grants.
- An aborted transaction stops sending Gets. It waits until every Get sent has
  had its first answer (Grant, Waiting or Aborted). It then skips the commit
  stage and goes straight to release.
- In release, each lock is treated according to its last response:
  - a granted lock gets a normal Release;
  - a lock still Waiting gets a timeout Release, which removes it from the queue;
  - a lock that was Aborted gets no Release at all.
- Every Release gets exactly one Released response, so no timer is needed in
  the last stage. The slot is freed when the count of Released equals the count
  of Releases sent.

Get and Release share the agent's single request port. A pending Release wins,
because freeing locks early helps the waiters of other transactions.

The commit stage works as follows:

- Each S or SIX lock reads the 64-byte tuple at `db_base + 64*lock_id`.
- Each X lock writes that tuple with {agent, slot, lock id, commit count}.
- There is one AXI transaction at a time.
- Releases start only after every read and write has completed.

## Memory formats

- **Transaction records** (read by the loader).
  - Transaction k occupies 4096 bytes at `wl_base + 4096*k`, as 64-bit words.
  - Word 0 is a header whose bits [9:0] give the lock count (at most 511).
  - Word i ≥ 1 is lock i-1: lock id in [31:0], S/I/X mode in [34:32].
  - The loader reads the first 512-bit beat alone, then the rest in one burst.
- **Tuples.** One 512-bit beat per lock id, at `db_base + 64*lock_id`.
- **AXI.** Both channels are 512 bits wide with 34-bit addresses. The request
  and response structs (`axi_req_t`, `axi_rsp_t`) carry only the valid, ready,
  address, length, data and last fields the design uses.

## Control registers

The register bus has a write strobe, a read strobe, a 12-bit word address and
64-bit data. Read data is valid one cycle after `csr_rd_en`.

| Address | Register |
|---|---|
| 0x000 | CTRL: writing bit 0 starts all agents |
| 0x001 | STATUS {running, init_busy, all_done} |
| 0x002 | N_TXN: transactions per agent |
| 0x003 | DB_BASE |
| 0x004 | CYCLES since start, stopped when done |
| 0x005 | CONFIG {N_CH, P, N_TA, TXN_CS}, 8 bits each |
| 0x100 + a | WL_BASE of agent a |
| 0x200 + 16a + k | statistics word k of agent a |

The statistics words, for k = 0..9, are:

| k | Statistic |
|---|---|
| 0 | committed |
| 1 | aborted |
| 2 | timed out |
| 3 | loaded |
| 4 | Grants |
| 5 | Waitings |
| 6 | Aborts |
| 7 | Released |
| 8 | tuple reads |
| 9 | tuple writes |

A host run:

1. Write the records and N_TXN.
2. Set the base addresses.
3. Wait for STATUS.init_busy to clear.
4. Write CTRL.
5. Poll STATUS.all_done.

## Files

| Area | Files |
|---|---|
| Package | `rtl/lock_pkg.sv`: widths, packet structs, modes, phases, the compatibility functions |
| Lock side | `lock_table_ram`, `waitq_ram`, `lock_agent`, `lock_xbar`, `lock_channel` |
| Transaction side | `sdp_ram`, `task_loader`, `lock_get_sender`, `lock_resp_receiver`, `txn_commit_ctrl`, `lock_release_sender`, `txn_sync`, `txn_agent`, `sync_fifo` |
| Control and top | `csr_regs`, `oltp_accel` (the top) |
| Testbenches | `tb/`: one self-checking testbench per module, `tb_<module>.sv` |
| Memory model | `tb/axi_mem_model.sv`: a behavioural HBM with a 36-cycle read latency (288 ns at 125 MHz) |
| Shared test body | `tb/oltp_tb_body.svh`: the end-to-end test body used by the top-level testbenches |
| Configuration runs | `tb/oltp_config_run.sv` (one checked run of a given configuration) and `tb/tb_oltp_fpga_configs.sv` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes. Each one
has a watchdog. With Verilator 5:

```
verilator --binary --timing --top-module tb_lock_agent -Irtl -Itb \
    rtl/lock_pkg.sv rtl/lock_table_ram.sv rtl/waitq_ram.sv rtl/lock_agent.sv \
    tb/tb_lock_agent.sv
./obj_dir/Vtb_lock_agent
```

For the full system, pass `rtl/lock_pkg.sv`, then all other `rtl/*.sv`, then
`tb/axi_mem_model.sv` and `tb/tb_oltp_accel_full.sv`.

The two top-level testbenches are:

- `tb_oltp_accel` runs 2 agents, 2 channels and 2 lock agents per channel,
  with small tables and a short timeout.
- `tb_oltp_accel_full` runs every default. It takes about 20 s of simulation
  time.

Both generate random transactions with hot spots in a small lock-id range, run
them to completion and check:

- the protocol and the system state:
  - every Grant is compatible with what is already held;
  - a Released answers only a lock that is held, or one still waiting;
  - tuples are read only under S or SIX locks and written only under X;
  - at the end, every table entry is NL and every queue is empty;
  - the CSR statistics agree with what the testbench observed;
- that each mechanism occurred at least once:
  - Waiting responses, and Grants popped from a queue;
  - timeouts, timeout releases, and waiters removed from a queue;
  - Abort responses (queue full), required only at the reduced size;
  - stalled lock requests, multi-beat record loads, and a filled response queue;
  - commits, aborts, tuple reads and tuple writes.

`tb_oltp_fpga_configs` runs the three configurations that were built on the
board side by side, each under the same checks:

| Configuration | Shape |
|---|---|
| 2C2L-2A2T | 2 channels x 2 lock agents; 2 txn agents x 2 txns |
| 2C2L-4A8T | 2 channels x 2 lock agents; 4 txn agents x 8 txns |
| 4C2L-4A8T | 4 channels x 2 lock agents; 4 txn agents x 8 txns |

Each agent runs 400 transactions spread over 4096 lock ids. The results are
about 1.37M, 2.86M and 3.00M committed txn/s at 125 MHz. The step from 2A2T to
4A8T is 2.1x. The board measurements on TPC-C were 120,840, 283,835 and
256,261 txn/s, a step of 2.35x. Two things limit the comparison:

- The absolute numbers cannot be compared: the workload is synthetic, and the
  tuples are single 64-byte beats.
- The 4C2L build ran at a slower clock on the board. Here all three runs count
  cycles of the same clock.

The same testbench also runs three points of the design-space study:

| Configuration | Result |
|---|---|
| 1C1L-4A8T | about 2.9M txn/s |
| 4C4L-1A2T | about 0.74M txn/s |
| 4C4L-8A8T | about 5.5M txn/s |

Adding txn agents scales as the study found. Adding lock agents does not:
1C1L is as fast as 2C2L here, where the study found it clearly slower. In this
RTL, on this workload, the txn agents are the bottleneck. Each agent loads
records and touches tuples one AXI transaction at a time, with a 36-cycle
latency, so a single lock table keeps up. A design that overlapped memory
accesses would move the bottleneck back to the lock side.

The workload matters. On the 256-id hot set of the full-size test, more
concurrency mostly adds conflicts, and 2A2T comes out ahead.

At the defaults, the full-size test commits about 1,340 transactions and
aborts about 260, out of 1,600, in about 218,000 cycles. That is roughly
770,000 txn/s at 125 MHz on its synthetic workload. The number is not
comparable to TPC-C.

## How far to trust it

Every module has a testbench that checks it against an independent reference:

- the lock agent is checked against a behavioural lock table, including the
  3-cycle Grant and Release latencies and the 3-cycle pops;
- the crossbars and FIFOs are checked against queues;
- the transaction components are checked against scripted lock servers and
  memories.

Each testbench has also been shown to fail on a deliberately broken copy of its
module. The tests use random stimulus, so they cover what the stimulus reaches.

Three things are not exercised:

- the TPC-C traces themselves;
- owner counts above 255 on one lock;
- queues longer than the randomised tests build.

## Where this RTL departs from the paper or fills gaps

**Hashing and table layout.**
- The hash function is not specified. Here, fixed lock-id bit fields are used.
- Ids that collide share an entry, with no tag, so false conflicts are possible.
- The owner counter is 8 bits.

**Granted mode on release.**
- After several compatible grants, an entry keeps the join of the granted
  modes. That mode is not lowered when one holder releases.
- It is cleared to NL when the last holder leaves.
- This is conservative: it can delay a waiter, but never grants wrongly.

**Queue discipline.**
- A compatible Get that finds waiters queues behind them. Otherwise a stream
  of readers could starve a writer.
- The paper does not say which rule it uses.

**Free-entry search.**
- The search starts from a rotating pointer and probes `WQ_SEARCH` = 8
  consecutive entries.
- The paper only says the number of probes is configurable.

**Waiting latency.**
- Here it is 5 cycles plus one per hop or probe. The paper quotes 5-20 cycles.
- A timeout release takes 5 cycles plus one per hop. The paper quotes 5-11.

**Transaction records, tuple layout, data written, CSR map.**
- None of these formats is published. All are this design's own, as described
  above.

**Timeout and aborts.**
- The timeout value (8192 cycles) and its start point (end of loading) are
  chosen here.
- Aborted transactions are counted and not re-run.

**Release priority.**
- A pending Release goes ahead of a Get on the shared port.

**One outstanding request.**
- The lock agent serves one request at a time.
- The commit stage issues one AXI transaction at a time. It does not overlap
  reads of different locks.
- The measured rate therefore depends strongly on memory latency.

**Clock.**
- The paper uses three clock figures:
  - 125 MHz for the HBM latency;
  - 200 MHz in one latency example;
  - 4-5 ns clock periods for the board builds.
- The RTL has no clock-specific logic. Cycle counts are converted to time at
  125 MHz throughout this document and the testbenches.

**Who triggers cleanup.**
- Here `txn_sync` frees a slot when the last Released has been counted. The
  paper lets the response receiver start the cleanup.
- The effect is the same; this puts every stage change in one place.

**Not built.**
- The FPGA shell, with its PCIe, RDMA and HBM controller, connects to the top's
  CSR and AXI ports.
- The host driver and control software appear only as the testbench that plays
  their role.
- The HBM exists only as the behavioural model in `tb/`.
- Multi-node operation, mentioned as future work, is not built.
