# SafarDB replica in SystemVerilog

SafarDB runs a replicated database on network-attached FPGAs. Every replica keeps a full copy of
the data as a *replicated data type* (RDT). Updates that commute (for example deposits into an
account) are applied locally and sent to the other replicas without any coordination. Updates
that could break an invariant (a withdrawal must never drive the balance below zero) go through
consensus, so that all replicas apply them in the same order. The idea that makes this fast is
placement. The RDT handlers and the consensus engine sit on the same FPGA as a soft RDMA NIC, so:

* verbs pass between them over on-chip AXI streams and never cross PCIe;
* the NIC can offer verbs that no commodity NIC has:
  * **RPC**: the payload is an opcode and its parameters, handed to the remote replica's
    handler as the packet arrives;
  * **RPC Write-Through**: the same, but the payload is also written into the remote
    replication log;
* the consensus engine can open and close the NIC's queue-pair permissions directly when the
  leader changes.

This RTL models one replica, `safardb_node`, in FPGA-only mode. By default it runs the Bank
Account RDT, which has both kinds of update. The parameter `APP` selects one of the
conflict-free CRDT kernels instead:

| APP | kernel |
|-----|--------|
| 1   | PN-Counter |
| 2   | LWW-Register |
| 3   | G-Set |
| 4   | PN-Set |
| 5   | 2P-Set |
| 6   | Courseware (a second invariant-carrying type, ordered through the same SMR) |

Several instances joined by a switch model form the replicated system in the testbenches.

## 1. Operations and how each is replicated

Operations are a 40-bit word: an 8-bit opcode and a 32-bit parameter (`op_t` in `safardb_pkg`).

| opcode | operation      | kind        | path |
|--------|----------------|-------------|------|
| 1      | deposit(d)     | reducible   | apply locally; send one RPC to every other replica |
| 2      | withdraw(w)    | conflicting | check `B - w >= 0` locally; send to the SMR; the leader orders it |
| 3      | query          | read        | answered locally from the balance register |
| 0      | no-op          | –           | logged by the leader in place of a withdraw that fails at execution |

The client port of `account_rdt` answers every request exactly once.

* **Deposit** is acknowledged once its RPCs are queued.
* **Query** returns the balance.
* **Withdraw** is acknowledged once it passes the local check and is handed to the SMR. It takes
  effect on each replica when the ordered operation is executed: at the leader, or at a follower
  when the Write-Through carrying it arrives. The client is not told the final outcome, and the
  leader can still reject the operation (see below).
* **Refused withdraw**: a replica refuses at once a withdrawal its own copy of the balance cannot
  cover. This is the local permissibility check, and the operation never reaches consensus.
* **Re-check at the leader**: the leader checks again at execution time. Another withdrawal may
  have been ordered in the meantime, and the leader's copy is the authoritative one. A withdraw
  that fails here is logged as a no-op and answered as rejected.

### The CRDT kernels

Every CRDT kernel has the same client and method ports as the Bank Account. Opcode 1 is the
first update, opcode 2 the second, and opcode 3 the read. The dispatcher is therefore the same
for every application. None of these updates needs ordering: each is applied locally, then sent
once as an RPC to every live peer. The SMR still runs heartbeats and elections, but it has
nothing to order.

* **PN-Counter** (`pn_counter`)
  * State: two grow-only 64-bit counters, P for increments and N for decrements.
  * Read: P − N.
  * Updates are not batched: every update is sent individually.
* **LWW-Register** (`lww_register`)
  * State: a 16-bit value and the 16-bit timestamp of the write that produced it.
  * A timestamp is a Lamport clock: {13-bit counter, 3-bit replica id}. A local assign takes
    the highest counter seen plus one. The replica id makes timestamps unique.
  * A received write replaces the register only if its timestamp is larger.
  * Replicas therefore agree on the last write whatever order the RPCs arrive in.
  * The counter wraps after 8191 assigns; the wrap is not handled.
* **Sets** (`set_crdt`, `KIND` 0/1/2)
  * Elements are the integers below `SET_SIZE` (256).
  * **G-Set**: one bit per element. A remove is refused.
  * **PN-Set**: one signed 16-bit counter per element. Insert increments and remove
    decrements. An element is present while its counter is positive.
  * **2P-Set**: an added bit vector and a removed bit vector. Present means added and not
    removed, so a removed element never returns. Removing an absent element is refused
    locally.

### The Courseware kernel

`courseware_rdt` is a university registrar. Its state is three sets: students, courses and
enrolments. Each method has an invariant, and the invariant decides how the method is
replicated:

| opcode | method          | invariant                                   | replication |
|--------|-----------------|---------------------------------------------|-------------|
| 1      | addStudent(s)   | s is new                                    | RPC, no coordination |
| 2      | addCourse(c)    | c is new                                    | SMR |
| 3      | deleteCourse(c) | c exists                                    | SMR |
| 4      | enroll(s, c)    | s and c exist, and s is not yet enrolled in c | SMR |
| 5      | query(s, c)     | –                                           | local: {enrolled, course exists, student exists} |

All three conflicting methods form one synchronization group, so they share the replica's single
SMR and log. They follow the same path as a withdrawal:

* the local replica checks the invariant;
* the leader proposes the operation and checks the invariant again when executing it;
* an operation that fails the leader's check is logged as a no-op.

This matters when `deleteCourse(c)` and `enroll(s, c)` are submitted at the same moment on
different replicas. Whichever the leader orders second is judged against the result of the
first. A project-management type, with employees, projects and assignments, has exactly the same
shape and runs on this kernel under other names.

## 2. The replica

```
          client req/rsp                       host verbs (hybrid mode)
               |                                      |
        +------v------+   meth_valid   +------------+ |
        | account_rdt |<---------------| dispatcher |<-------------- RPC / RPC-WT payloads
        +--+-------+--+                +------------+ |                     ^
    RPCs   |       | conflicting op  exec/commit ^    |                     |
           |  +----v----------------------------+-+   |            +--------+---------+
           |  | smr: heartbeat_scanner,           |   |   verbs    |  network_kernel  |
           |  |      leader_election,             |---+----------->| send queue, tx,  |<--> Ethernet
           |  |      phase_manager,               |   round-robin  | rx, QPC, RQ, ACK |     (CMAC)
           |  |      communication_manager        |<--------------| queue            |
           |  +-----------------+-----------------+  completions  +--------+---------+
           +--------------------|-------------------------------------->    | perm switch
                                |      HBM reads/writes (mem_arbiter)       |
                                +--------------------> HBM <----------------+
```

* **network_kernel** is the soft RNIC. It holds:
  * the send queue (`axis_fifo`);
  * the transmit path (`rdma_tx`) and the receive path (`rdma_rx`);
  * the queue-pair context (`qpc`): one write-permission bit per remote replica;
  * two tag-indexed tables (`verb_table`): the Receive Queue, one entry per Read waiting for
    its data, and the ACK queue, one entry per write-type verb waiting for its
    acknowledgement.
* **dispatcher** takes RPC payloads off the network. It decodes the opcode and strobes one
  method of the application.
* **account_rdt** holds the balance and the three methods. With `APP` set, a CRDT kernel takes
  its place.
* **smr** is the consensus engine. Its parts are described in sections 4–6.
* **mem_arbiter** shares the single HBM port. The NIC receive path has priority, then the
  heartbeat scanner, then the phase manager.

Three parts live outside the module and appear as ports:

* the Ethernet MAC: `tx_*` and `rx_*`, one packet struct per beat;
* HBM: `mem_*`, 64-bit words, reads answered in order;
* the host's verb port: `host_sq_*` and `host_cpl_*`. In hybrid mode the CPU can issue verbs
  through the same NIC.

The send queue is shared by the application, the SMR and the host. `axis_rr_mux` merges them
round-robin. Each requester puts its own id in the top bits of the 8-bit requester tag, so each
recognises its completions on the shared completion bus. There is no completion queue.

## 3. Verbs on the wire

| verb      | the receiving NIC does                                                       | reply |
|-----------|------------------------------------------------------------------------------|-------|
| READ      | reads one HBM word                                                           | READ_RSP with the data |
| WRITE     | checks the QPC; if the source may write, writes one HBM word, else drops it and counts `perm_err` | ACK only if written |
| RPC       | passes {flags, opcode, parameter} to the dispatcher                          | ACK |
| RPC_WT    | checks the QPC, writes the log word, passes it with its address to the dispatcher | ACK only if written |
| READ_RSP  | looks up the Receive Queue by NIC tag, retires the entry, raises a completion with the data | – |
| ACK       | looks up the ACK queue by NIC tag, retires the entry, raises a completion    | – |

* **NIC tags.** `rdma_tx` stamps every request with an 8-bit NIC tag that counts up. The Receive
  Queue and the ACK queue are indexed by that tag. Replies from different replicas can come back
  out of order, and the tag still finds the right entry.
* **Lost replies.** There is no credit scheme. An entry still outstanding when its tag comes
  round again is overwritten, and the overwrite is counted in `lost_replies`. In practice this
  happens only to verbs sent to a replica that has crashed.
* **Refused writes.** A refused write gets no ACK. The requester learns of the refusal only by
  timing out; see section 5.
* **Delivery.** The network is assumed to deliver reliably and in order. The NIC does not
  retransmit.

## 4. Consensus: accelerated Mu

Conflicting operations are ordered with Mu, a consensus protocol built on RDMA. Each replica's
HBM holds:

| word address | content |
|--------------|---------|
| `0x0`        | own heartbeat counter |
| `0x1`        | highest proposal number seen |
| `0x10..`     | landing words for the SMR's Read replies |
| `0x1000 + s` | log slot `s`: {24-bit proposal number, 8-bit opcode, 32-bit parameter}; 0 means empty |

One round fills one log slot. The leader's `phase_manager` runs it. Each RDMA step is one
`communication_manager` job: send the verb to every live follower, then wait for
`N_NODES/2` answers. With the leader itself that is a majority.

1. **Propose.** The leader takes the next conflicting operation. A replica that is not the
   leader forwards it instead to the leader as an RPC with the *forward* flag. The leader's
   dispatcher passes forwarded operations to the SMR's proposal queue.
2. **Prepare.**
   * Read `0x1` from the followers.
   * Choose a proposal number one above everything seen, including its own.
   * Write the new number to the followers and to its own HBM.
   * Read log slot `s` from the followers.
   * If some follower already holds an entry there, the leader adopts the entry with the
     highest proposal number. Its own operation waits for the next slot.
3. **Accept.**
   * Execute the operation on the local RDT.
   * Write the entry into the leader's own log.
   * Send it as RPC Write-Through to every follower. Each follower's NIC writes the log word
     and its dispatcher applies the operation: nothing polls the log.
   * The round ends when a quorum has acknowledged.

Followers advance their own slot counter for every Write-Through they apply. A newly elected
leader therefore starts at the slot after the last one it saw.

**Duplicate skip.** The dispatcher compares each Write-Through's log address with the next
slot it expects, and applies only that slot. A newly elected leader may adopt and re-send a slot
that some followers had already applied, and those followers must not apply it twice.

**Retries.** `communication_manager` re-sends to followers that have not answered within `RETRY`
cycles (default 512), because during a leader switch the followers' QPCs may still refuse the
new leader. A job ends as soon as a quorum has answered.

## 5. Failure detection and the leader switch

* **Heartbeat.** `heartbeat_scanner` increments the replica's own heartbeat word every
  `HB_PERIOD` cycles (default 1024). In the same period it issues one RDMA Read of every other
  replica's heartbeat word.
* **Failure.** A replica whose heartbeat has not changed for `FAIL_READS` consecutive reads
  (default 3) leaves the *correct set*. It is taken back if its heartbeat moves again.
* **Election.** `leader_election` picks the live replica with the lowest id.
* **Permission switch.** When the leader changes, `leader_election` reprograms the local QPC in
  two steps. Every write permission is closed for one cycle, then write permission is opened to
  the new leader only. A deposed leader's Writes and Write-Throughs are then refused at every
  follower, which is what protects the log from two leaders.
* **Effect on the SMR.** While `switching` is high, or once the replica is no longer leader, the
  phase manager abandons its round.

## 6. Timing

The whole design runs in one clock domain, with AXI-Stream valid/ready handshakes between blocks.

* **Receive path.** `rdma_rx` handles one packet at a time. Requests that touch HBM take the HBM
  latency plus a few cycles.
* **Verb issue.** The transmit path issues at most one verb per cycle. Replies it must send
  come before new verbs.
* **Commit latency.** A committed conflicting operation costs four quorum round trips: read the
  proposal numbers, write the new one, read the slot, then Write-Through.
* **Reducible operations** cost one RPC per peer and no waiting.

## 7. Where this departs from the published design

* **Scope.**
  * The Bank Account, Courseware (which also covers the project type) and the five CRDT
    kernels are built. Movie and auction are not: they need two and three synchronization
    groups, each with its own SMR and log, and a replica here has one. The hybrid-mode applications (YCSB, SmallBank) are not
    built either.
  * Deposits use the direct RPC path. Buffering them in an HBM array, a variant the published
    design compares against, is not built.
* **The NIC works at the verb level.**
  * A verb is one 64-bit payload in one packet.
  * RoCEv2 framing, segmentation and the transport's retransmission are not modelled.
  * The QPC keeps only write permission.
* **No separate permission confirmation.** In Mu, a new leader first confirms its followers by
  obtaining write permission from a majority. Here the leader simply starts its round. Writes
  that followers refuse, because they have not yet switched, are re-sent after the retry
  timeout until a majority accepts. The effect is the same, but it costs a timeout.
* **One heartbeat word per replica.** In Mu each replica exposes one heartbeat counter per
  remote replica. Here each replica exposes a single counter that all others read. The last
  value read from each peer is kept in registers, not in memory.
* **Every round runs Prepare.** The accelerated protocol goes back through Propose and Prepare
  after every slot, and so does this RTL. The software protocol it derives from lets a stable
  leader skip Prepare; that optimisation is not used.
* **No log catch-up.** A replica that missed entries is not brought up to date; only the single
  slot a new leader adopts is recovered. The log is circular with 2^20 slots, and wrap-around is
  not guarded.
* **Lost proposals.**
  * A forwarded operation is lost if the leader crashes before proposing it.
  * So is an operation that a deposed leader's phase manager was holding.
  * The client is not answered in either case.
* **Forwarded operations have no flow control.** A follower answers its client once the
  leader's NIC has acknowledged the forward. So followers can forward faster than the leader
  commits. If the leader's forward queue (16 entries) is full, its dispatcher drops the forward
  and counts it in `fwd_drops`. The operation is then lost, although the client was told it
  was submitted. An earlier version held the forward instead. That stalled the leader's
  receive path, and with it the ACKs for the leader's own Accept writes. The cluster
  deadlocked and the heartbeat reads timed out. A proper fix needs credits between follower
  and leader, or an answer to the follower only once the operation commits. Neither is built.
* **Invented details.** All widths, the memory map, the heartbeat period, the failure threshold,
  the retry timeout and the queue depths are this design's choices. The forward flag, the
  duplicate skip and the retry are additions the protocol needs in order to work, but their form
  is ours.

## 8. Simulating

Each testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. `hbm_model` and `peer_model` are behavioural models used
only by the testbenches:

* `hbm_model`: HBM with a fixed read latency.
* `peer_model`: the remote replicas, as seen through a NIC.

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
  rtl/safardb_pkg.sv -y rtl -y tb tb/tb_safardb_node.sv --top-module tb_safardb_node
./obj_dir/Vtb_safardb_node
```

Replace the testbench name to run any other. The unit testbenches drive one block each with
random traffic and a reference model. These testbenches run the whole system:

* **`tb_smr`** runs one SMR against `peer_model`, first as a follower and then as leader after
  replica 0 dies.
* **`tb_safardb_node`** joins four replicas (`HB_PERIOD` 128) through a switch model with
  per-link latency. One link is slow, so a new leader must adopt an entry. In order it runs:
  * deposits at every replica;
  * withdrawals at leader and followers, including concurrent ones, only some of which can be
    covered;
  * a local refusal;
  * host verbs, including a Write refused by the QPC;
  * a crash of the leader in the middle of Accept;
  * election of replica 1, adoption of the half-written slot, the duplicate skip and a retry;
  * further operations under the new leader.

  It checks the balance at every live replica after each phase, and counts each of these
  mechanisms, failing if one never happened.
* **`tb_safardb_crdt`** runs three clusters of eight replicas at once: PN-Counter, LWW-Register
  and 2P-Set. On every replica a client issues 120 operations, a quarter of them updates, with no
  waiting between replicas. Once the load stops, every cluster must converge to the value the
  testbench computes. The check also confirms that every update reached all seven peers.
* **`tb_safardb_courseware`** runs four Courseware replicas. Students are added by RPC.
  Courses are added at the leader and at a follower, whose request is forwarded. A duplicate
  course is refused locally. Three enrolments are made at once. Finally `deleteCourse(2)` races
  `enroll(3, 2)`, and the leader must reject one of them. Every replica must end with the same
  sets, 4 students, 1 course, 2 enrolments and 7 log slots.
* **`tb_safardb_bank`** runs the Bank Account mix on three replicas. All three clients run at
  once, 150 operations each, a quarter of them updates. Followers forward withdrawals to the
  leader, so withdrawals from different replicas race. The testbench checks four things:
  * no balance is ever negative, on any cycle;
  * all replicas end with the same balance and log length;
  * that balance equals all deposits minus the withdrawals in the leader's log, which it
    reads slot by slot;
  * every submitted withdrawal is in the log, apart from the forwards the leader dropped.

  Under this load the leader drops about 18 forwards.
* **`tb_safardb_full`** builds eight replicas with every parameter at its default. It runs
  deposits from every replica and then a withdrawal at a follower, which commits through a full
  Mu round, and checks all eight balances.
