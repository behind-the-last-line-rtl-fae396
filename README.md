# Midir: a tile-interface hybrid that lets a chip outlive faulty and compromised tiles

A multi-core chip is usually trusted as a whole. If one core runs faulty
or compromised software with enough privilege, that software can rewrite
the page tables, DMA windows or interconnect firewalls that protect every
other core. Midir removes that single point of failure. It places a small,
simple piece of hardware, the **T2H2** (trusted-trustworthy hardware
hybrid), between every tile and the network-on-chip (NoC). A T2H2 does two
things:

* **Capabilities.** A tile can reach the NoC only through capability
  registers in its own T2H2. Each register names an address region and
  grants rights on it. The tile cannot write these registers.
* **Voters.** A register can change only when *f+1* replicas of the
  privileged software agree on the change in a hardware voter. The
  replicas run on different tiles. The same holds for other critical
  operations, such as resetting a tile.

The privileged software (kernel or hypervisor) runs as *n = 2f+1*
replicas. Up to *f* of them may be wrong in any way, even malicious, and
the chip still behaves correctly. The voters detect the wrong replicas,
stop, and keep the evidence. Diagnosis and recovery are left to software.

This repository holds synthesizable SystemVerilog for the T2H2, which has
both voter variants. It also holds a three-tile system that joins the
T2H2 units through a NoC to a shared memory. The processor cores are not
included. Each tile's side of its T2H2 is a port of the top module, so a
testbench or a real core can drive it.

```
          tile 0                tile 1                tile 2
   (core, not included)  (core, not included)  (core, not included)
            | tile_*              | tile_*              | tile_*
     +------+------+       +------+------+       +------+------+
     | T2H2        |       | T2H2        |       | T2H2        |
     |  caps  vote |       |  caps  vote |       |  caps  vote |
     +--m------s---+       +--m------s---+       +--m------s---+
        |      |              |      |              |      |
   =====+======+==============+======+==============+======+=====  noc_bus
                                   |
                              shared_mem
```

Each T2H2 has a master port for the tile's own requests and for writes
that its voters apply. It also has a slave port on which any tile can
reach its voters.

## Source files

| file | contents |
|---|---|
| `rtl/midir_pkg.sv` | widths, request/response structs, capability struct, address map, voter register map, helper functions |
| `rtl/capability_unit.sv` | capability registers, privilege check, label insertion, voted configuration port |
| `rtl/vote_apply.sv` | turns an agreed message into a series of writes (used by both voters) |
| `rtl/voter_nbuf.sv` | n-buffer voter |
| `rtl/voter_sbuf.sv` | single-buffer (leader/follower) voter |
| `rtl/t2h2.sv` | one T2H2: capability unit, voters, master-port arbiter, slave-port decoder |
| `rtl/noc_bus.sv` | interconnect: shared bus, round-robin arbitration |
| `rtl/shared_mem.sv` | shared on-chip RAM |
| `rtl/midir_soc.sv` | top level: `NTILES` T2H2 units, bus, memory |
| `tb/tb_<module>.sv` | one self-checking testbench per module; `tb_midir_soc` is the end-to-end test |

## Capabilities

Every operation a tile sends out names a capability register (`tile_req_t.cap`).
A register (`cap_t`) holds:

* `valid`;
* the rights `r` and `w`;
* a `vote` flag;
* a 3-bit replica `label`;
* a region given as `base` and `size`.

The operation passes when the register is valid, `base <= addr < base+size`,
and the right for the access is set. The T2H2 then sends it onto the NoC
and inserts the register's `vote` flag and `label`. The tile cannot choose
either value. This is how a voter learns, with certainty, which replica a
proposal comes from. A replica holds vote capabilities that carry its own
label, and it cannot forge another.

An operation that fails the check never reaches the NoC. The tile still
gets a response with `err = 1`, so that a core waiting on a read does not
hang. The T2H2 also pulses `denied`, which can be counted for diagnosis.

There are only two ways to write the registers:

1. **Boot.** While `boot_en` is high, `boot_we/boot_idx/boot_cap` install
   the first capabilities. When `boot_en` falls, this port locks until
   the next reset.
2. **Configuration voter.** Voter `CFG_VOTER` of the T2H2 (voter 0) has no
   NoC write path. Each write it agrees on goes to the capability registers
   over an internal port. The configuration space has its own address
   region (`0x2...`). The interconnect routes nothing there, so a plain
   access to it returns an error, even through a capability that
   covers it.

Configuration addresses (`cfg_address(idx, field)`):

| field | address bits | meaning |
|---|---|---|
| base | `[3:2] = 0` | region base |
| size | `[3:2] = 1` | region size |
| flags | `[3:2] = 2` | `{label[6:4], vote[3], w[2], r[1], valid[0]}` |
| capability index | `[11:4]` | 0 .. `NUM_CAPS-1` |
| tile control | index `0xFF`, field 0, bit 0 | tile reset (level) |

So one voted message with four words installs a complete capability:
`{cfg_address(i, CF_BASE), base, size, flags}`.

## Voters

Voters carry the design's guarantees, and most of their rules exist to
keep a minority of faulty replicas from breaking them. Both variants
share the following:

* **Fault threshold.** `F_MAX` sets the hardware size: `N_MAX = 2*F_MAX+1`
  buffers or cells. The threshold in use, `f <= F_MAX`, is taken from
  `f_cfg` while reset is held. Replicas with label `>= 2f+1` are inactive,
  and their requests are refused.
* **Who may write.** Only requests marked as votes count. Each one counts
  for the replica named in its label.
* **Message.** A proposal holds up to `MSG_WORDS` (16) words. Word 0 is the
  destination address. Words 1 .. size-1 are written to consecutive word
  addresses starting there. This is enough to express "simple writes to
  memory-mapped resources", which is what the voted operations are. The
  `vote_apply` helper writes the words out one by one. Each write waits for
  its completion.
* **Sequence number.** `seq` identifies the current vote. Commits,
  agreements and reset votes carry the `seq` they are meant for. A request
  with a stale `seq` is refused, so a slow replica cannot put its late vote
  into the next round. After a clean vote, `seq` advances once the
  operation has been fully applied.
* **Suspension.** A vote diverges if some replica proposes or judges
  differently from the outcome. On divergence the voter **suspends**. It
  still applies the operation if f+1 replicas agreed, but it does not
  advance `seq`. It freezes all buffers and vectors, so replicas can read
  them and find the faulty one. While suspended, only non-destructive
  writes are accepted. These fill an empty buffer or cell, or turn a
  timeout cell into agree or disagree. Nothing that was written can be
  overwritten.
* **Voted reset.** Writing `VR_RESET` with the current `seq` sets the
  writer's bit in the reset vector. Once f+1 bits are set, the voter
  clears its buffers and vectors, resumes, and advances `seq`. So at
  least one correct replica must have agreed to the reset.

### n-buffer voter (`voter_nbuf`)

Each replica has its own buffer, a size and a committed bit. A replica
fills its buffer and then commits it (`VR_COMMIT`, with size and `seq`).
After that the buffer is read-only. Every pair of committed buffers is
compared, including their sizes. As soon as one buffer matches f+1
committed buffers (itself included), its message is applied:

* If any committed buffer differs from it, the voter suspends afterwards.
* If every buffer matches, `seq` advances.

If all n buffers are committed and no f+1 of them match, nothing is
applied and the voter suspends with outcome REJECTED.

Agreement comes as soon as the f+1th matching proposal arrives. A wrong
proposal committed before that point is detected. One that arrives after
the vote has finished is refused as stale. The end-to-end test shows
both cases.

### Single-buffer voter (`voter_sbuf`)

This variant trades latency for area. It has one buffer plus an
agreement vector with one 2-bit cell per replica. The cells hold empty,
agree (A), disagree (D) or timeout (T).

* The **leader** of vote `seq` is replica `seq mod n`. Only the leader may
  write the buffer. Its commit marks the proposal ready, locks the buffer
  and sets the leader's own cell to A.
* Followers read the buffer and write their judgement to `VR_AGREE`.
  They may write A or D only once the proposal is ready. They may write T
  at any time, which is how a replica reports a leader that stays silent.
  A T cell may later become A or D. No other change is allowed.
* f+1 A cells apply the operation. If any D or T cell is set, the voter
  suspends after applying. Otherwise `seq` advances.
* f+1 D cells reject the proposal. Nothing is applied, the voter
  suspends, and the outcome is REJECTED.
* f+1 T cells end the vote with outcome TIMEOUT, and the voter suspends.
  The voted reset that follows advances `seq`, so the next replica leads
  the repeated vote.

The hardware keeps no timer. When to give up on a leader is the
replicas' decision.

### Voter register map

The NoC address of voter `v` in tile `t` is `voter_base(t, v)`, which is
`0x1t00_0000 + v*0x1000`. Registers are at byte offsets from that base:

| offset | R/W | meaning |
|---|---|---|
| `0x000` | R | `seq` |
| `0x004` | R | status: bit 0 suspended; bit 1 applying; bit 2 applied; bit 3 ready (single-buffer only); [5:4] outcome; [11:8] `f` |
| `0x008` | W | reset vote, `wdata = seq`. Reading it returns the reset vector. |
| `0x00C` | W | commit, `wdata = {8'b0, size[7:0], seq[15:0]}` |
| `0x010` | W | single-buffer only: judgement, `wdata = {14'b0, A/D/T[1:0], seq}` |
| `0x014` | R | n-buffer: committed mask. Single-buffer: agreement vector, 2 bits per replica. |
| `0x018` | R | `{size, leader}` |
| `0x080 + 4r` | R | n-buffer: size of buffer r |
| `0x400 + 0x40r + 4w` | R/W | n-buffer: word w of buffer r. Single-buffer: `0x400 + 4w`. |

A refused write is answered with `err = 1`. The reasons are:

* a wrong label;
* a stale `seq`;
* a locked buffer;
* a forbidden cell change;
* not a vote;
* a write while the voter is applying.

## Putting a T2H2 together (`t2h2`)

`t2h2` instantiates the capability unit and `NUM_VOTERS` voters. Bit v of
`SBUF_MASK` makes voter v a single-buffer voter. The default gives:

* voter 0: n-buffer, the configuration voter;
* voter 1: n-buffer, a general voter that writes to the NoC;
* voter 2: single-buffer, a general voter.

This puts both variants on one chip. The master port is shared
round-robin between the tile's checked requests and the apply writes of
voters 1 and 2, one request at a time. The slave port decodes address
bits [15:12] to a voter. Each voter answers one cycle after the request,
and an address with no voter gets `err`.

## Interconnect and memory

The design expects only one thing of the NoC: it delivers each message,
unchanged. `noc_bus` is the simplest interconnect that does this:

* It is a shared bus with one transaction in flight.
* Round-robin arbitration starts after the last master granted.
* It decodes addresses: region `0x0` goes to `shared_mem`, and region
  `0x1` with tile field t goes to T2H2 t. It answers anything else itself
  with `err`.
* Handshake: a master holds `valid` and the request until `ready`. A
  slave answers each request it was sent exactly once.

`shared_mem` is a plain 32-bit RAM of `MEM_WORDS` words. It answers one
cycle after each request. The software keeps its shared state, system-call
log and error log there.

## Top level (`midir_soc`)

| parameter | default | meaning |
|---|---|---|
| `NTILES` | 3 | tiles, each with its own T2H2 (also the number of replicas used at f = 1) |
| `NUM_CAPS` | 20 | capability registers per T2H2 |
| `NUM_VOTERS` | 3 | voters per T2H2 |
| `SBUF_MASK` | `16'h0004` | which voters are single-buffer |
| `F_MAX` | 1 | largest fault threshold the voters are sized for |
| `MSG_WORDS` | 16 | words per voted message |
| `MEM_WORDS` | 4096 | shared memory words |

The top's ports are each tile's request/response interface and its boot
port, `f_cfg`, and per-tile `tile_reset` and `tile_denied`. They also
include every voter's `seq` and suspended flag, for observation.
`tile_reset` is the voted tile-reset level. A real tile would hold its
core in reset while it is high.

## How the replicated kernel uses the chip: system calls

The hardware is designed for one software pattern. Each system call costs
a small, fixed number of votes:

1. The client writes `{opcode, arguments}` to its request buffer in shared
   memory.
2. The kernel replicas agree on a log entry. The entry holds the call, the
   client, and the starting `seq` of every voter the call will use. This
   vote runs on a single-buffer voter. Its leader proposes the entry. The
   followers compare the proposal with the request buffer and with the
   voters' `seq` registers, then agree or disagree.
3. The replicas execute the call. Each critical step is one vote on an
   n-buffer voter with a known `seq`, equal to the agreed start value plus
   j for the j-th vote. *Prime* installs a capability in the client's T2H2
   through that T2H2's configuration voter. Every call ends with one vote
   that writes the reply and one that marks the call finished.

`tb_midir_syscalls` runs this sequence on the full-size chip. The
replicas' software steps take zero time, so the counts below are the
chip's share of a call: NoC transfers, capability checks, voting and
apply writes.

| call | per-replica capability space | shared, consensually updated capability space |
|---|---|---|
| null | 338 cycles | |
| grant | 351 cycles | 414 cycles (one extra vote) |
| prime | 405 cycles | 454 cycles (one extra vote) |

A last prime call runs with one faulty replica, which proposes a larger
region in the configuration vote. The voter applies the majority's
capability, keeps `seq` and suspends. The replicas then take the error path.
They read the frozen buffers of all replicas and name the one that differs.
They agree on an error-log entry through a second n-buffer voter. Finally
they vote the reset of the suspended voter. The call completes in 589
cycles. The test checks that the right replica is named, that the wider
region was not installed, and that the voter is running again with `seq`
advanced by one.

On the 50 MHz prototype, a whole call costs more than 1500 cycles.
Most of that is the replicas' software, not the hardware measured here.

## Where this RTL departs from, or adds to, the published design

Taken from the published design:

* capability check, dropping and label insertion;
* the configuration interface reachable only from a voter;
* both voter variants, with their quorum rules;
* `seq`, suspension with frozen buffers, and the voted reset over a reset
  vector;
* the non-destructive-write rule;
* the boot-time `f`;
* the sizes: 20 capability registers, `f_max = 1`, three tiles.

This design's own choices are:

* The message format, `MSG_WORDS` = 16, the address map, the voter
  register map and the configuration-space encoding.
* The boot port for the first capabilities.
* Tile reset as a voted level in configuration slot `0xFF`.
* Refusing votes with a stale `seq`.
* Advancing `seq` only once the apply writes are done.
* Cells with four values in the single-buffer voter. The published text
  calls them "tri-state" in one place, but it also lets an empty cell
  become timeout, agree or disagree, which takes four states. The leader's
  commit counts as its agreement.
* Three voters per T2H2, with both variants on one chip. The published
  prototype built the variants separately.
* A shared bus instead of a vendor AXI interconnect. Throughput is
  therefore one transaction at a time, which is not representative of a
  real NoC.
* Error responses to denied operations.

Not included:

* The processor cores.
* The AXI wrapper logic of the prototype.
* The replicated kernel software: its service loop, system calls and
  error handling. The testbenches play the replicas directly.

The published cycle counts for system calls measure that software, so
this RTL does not reproduce them.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. It also has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_capability_unit` | permitted accesses with label and vote flag; six kinds of denied access with no NoC traffic; boot lock; voted field-by-field reconfiguration; tile reset |
| `tb_voter_nbuf` | masking of one wrong proposal, then suspend, introspection and voted reset; refused stale, foreign, locked and non-vote writes; multi-word apply; no majority; f = 0 |
| `tb_voter_sbuf` | leader-only proposal and buffer lock; agree, reject, divergent agree and timeout outcomes; leader rotation; non-destructive cell rules |
| `tb_noc_bus` | random traffic from all masters to all slaves against a reference model; round-robin order; decode errors |
| `tb_shared_mem` | random reads and writes against a reference array |
| `tb_t2h2` | a T2H2 with a looped-back NoC: direct access; vote through the master port; voted capability installation; configuration space unreachable; single-buffer vote; voted tile reset |
| `tb_voter_scaling` | both voters built for f_max = 3 (seven replicas): f = 3 thresholds for apply, reject and reset with three faulty replicas masked; the same hardware restarted at f = 2 |
| `tb_midir_syscalls` | null, grant and prime system calls on the full-size chip, in both capability-space variants: log entries, replies, capabilities installed by prime, exact `seq` advance of every voter, no suspension without faults; a prime call with a faulty replica followed by introspection, a voted error-log entry and a voted voter reset |
| `tb_midir_soc` | the full-size chip (all defaults). Three replicas run concurrently and exercise every mechanism above end to end. Each mechanism is counted, and one that never occurs is a failure. |

To simulate with Verilator 5, for example the full chip:

```
verilator --binary --timing -Irtl rtl/midir_pkg.sv rtl/vote_apply.sv \
  rtl/voter_nbuf.sv rtl/voter_sbuf.sv rtl/capability_unit.sv rtl/t2h2.sv \
  rtl/noc_bus.sv rtl/shared_mem.sv rtl/midir_soc.sv tb/tb_midir_soc.sv \
  --top-module tb_midir_soc
./obj_dir/Vtb_midir_soc
```

The other testbenches build the same way, with the files their module
needs. The simulation is two-state, and every register that is read has
a reset value.
