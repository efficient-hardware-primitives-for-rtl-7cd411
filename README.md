# Conditional Access L1 data cache — design notes

## The problem and the idea

Optimistic concurrent data structures (lazy lists, external BSTs, hash tables,
lock-free stacks) read nodes without locking them. Such a node can therefore be
freed while another thread is still reading it. Software reclamation schemes
(hazard pointers, epochs, reference counts) delay frees or add fences to every
read.

Conditional Access (CA) moves the check into the cache. Each core keeps:

- a **tag set**: the lines it is currently relying on;
- an **access-revoked bit**, set as soon as any tagged line leaves the core's
  cache.

A line leaves by a remote invalidation or by an associativity eviction. If a
line the core relies on was written or evicted, the next conditional access
fails instead of touching possibly freed memory. A free is then safe right
away. The coherence protocol already reports every such event to the L1, so
nothing else in the memory system has to change.

This design implements the CA extension as the private L1 data cache of each
core, plus a multi-core top.

## Blocks

| File | Role |
|---|---|
| `rtl/ca_pkg.sv` | Geometry constants, opcodes, MSI states and the message structs of the four channels. |
| `rtl/ca_tracker.sv` | The tag bits and the revoked bit of one core. |
| `rtl/ca_l1_dcache.sv` | The CA-extended MSI L1 data cache. It contains one tracker. |
| `rtl/ca_system.sv` | Top: `NUM_CORES` L1 caches, with core and directory sides as per-core ports. |

Default sizes:

- 32 cores;
- 32 KiB L1 per core with 64-byte lines, which gives 512 lines and so 512 tag
  bits per core.

Associativity defaults to 4 ways. The proposal does not give it, and reports
that associativity had no significant effect on its workloads.

## Tag bits and the revoked bit

The tag set is approximated by one tag bit per L1 line, indexed by
`{set, way}`. The tracker applies these updates at the clock edge:

| Input | Effect |
|---|---|
| `set_tag` | A successful cread tags its line. |
| `untag_one` | Clears one bit. |
| `untag_all` | Clears all bits and the revoked bit. It wins over every other input in the same cycle. |
| `leave` | A line is invalidated or evicted. If it was tagged, its bit is cleared and the revoked bit is set in the same cycle. |
| `revoke` | Sets the revoked bit directly. This covers a context switch, which the proposal allows to revoke access. |

Reset clears everything, so the revoked bit starts clear.

## Instruction semantics at the L1 port

The core sends `{op, addr, wdata}` and gets back `{rdata, ca_fail}`.
`ca_fail` plays the part of the CAFAIL flag-register bit.

| Instruction | Behaviour |
|---|---|
| load / store | Ordinary MSI accesses. |
| cread | Revoked: fails at once and makes no memory request. Otherwise loads the word (a hit or a GETS miss) and tags the line. |
| cwrite | Revoked, or line not present, or line not tagged: fails at once. Otherwise stores. A Shared line is first upgraded with GETM. cwrite never tags. |
| untagOne | Clears one tag bit. It never fails. |
| untagAll | Clears all tag bits and the revoked bit. It never fails. |

A hit answers in the next cycle. This includes cread/cwrite on a present line,
untagOne and untagAll.

## The L1 controller

The controller is blocking, with one outstanding miss. Its states are:

    IDLE -> [WB -> WB_WAIT] -> MISS_REQ -> MISS_WAIT -> IDLE

**Victim choice.** The first invalid way is used; otherwise a round-robin
pointer per set picks the victim. Evicting a valid victim pulses the tracker's
`leave` in the cycle the fill request is issued. That makes the revoke atomic
with fetching the new data, as the proposal requires. A Modified victim goes to
a one-line writeback buffer and is sent with PUTM before the miss request.

**Races**, handled by deciding success again when the fill returns:

- A tagged Shared line is upgraded for a cwrite, and an INV for it arrives
  while the GETM is outstanding. The INV revokes access, so when the data come
  back the cwrite fails. The line is installed but not written.
- A cread misses, and an INV for another tagged line arrives meanwhile. The
  cread fails. The line is installed untagged.
- A cread's own fill evicts a tagged line. The cread fails.
- A forward for the line sitting in the writeback buffer is answered from the
  buffer. The directory may send it before the PUTM reaches it.

**Downgrades.** A FWD_GETS downgrade (Modified to Shared) keeps the line and
its tag. It does not revoke. A later cwrite upgrades again.

## Channels and timing

All channels use valid/ready handshakes.

| Channel | Direction | Contents |
|---|---|---|
| `core_req` / `core_resp` | core to L1 / L1 to core | One response pulse per request, in order. |
| `mem_req` | L1 to directory | GETS, GETM, PUTM with data. |
| `mem_resp` | directory to L1 | Always accepted: line data, or a PUTM acknowledgement. |
| `fwd` | directory to L1 | INV or FWD_GETS. |
| `fwd_ack` | L1 to directory | The acknowledgement, with the line when it was Modified. |

Forwards are accepted in every controller state, except in the cycle a
response arrives. In IDLE, a pending forward is taken ahead of a new core
request. A directory that serves one request at a time therefore never
deadlocks against an L1 that is waiting for it.

## What is outside the design

- **The directory and the shared 256 KiB inclusive L2.** CA needs no change to
  the MSI protocol, so the top exposes the directory side of every L1 instead.
- **The processor pipeline.** The top exposes the request/response port and
  the revoked bit.
- **SMT.** One hardware thread per core is modelled. An SMT core would need one
  tracker per thread.

## Own choices where the proposal is silent

- 4 ways.
- Invalid-first, then round-robin replacement.
- A blocking controller.
- One-cycle hits.
- 32-bit byte addresses and 64-bit words.
- The message encoding.
- A failed cread does not tag its line. Tagging would need the line fetched,
  and the failure path of every CA algorithm clears all tags anyway.

## Testbenches

| Testbench | What it checks |
|---|---|
| `tb/tb_ca_tracker.sv` | Directed cases, plus 20,000 random cycles checked against a reference model. |
| `tb/tb_ca_l1_dcache.sv` | 41 directed checks on one L1, with the testbench playing the directory. Covers each instruction, revoke by INV and by eviction, no revoke on a downgrade or for an untagged line, writeback, the INV/upgrade race, the context-switch revoke and hit latency. |
| `tb/tb_ca_system.sv` | The full 32-core top at its default parameters, joined by a behavioural MSI directory (`tb/msi_directory_model.sv`). |

In `tb_ca_system`, each core runs `tb/tb_core_agent.sv`. The agent performs
atomic increments of one shared counter, built from cread and cwrite, and
retries on failure. Between increments it forces evictions of its tagged line.

The test checks:

- no increment is lost;
- the counter never goes backwards;
- private data survive writebacks;
- every mechanism happened at least once.

Each testbench prints a `TB_RESULT checks=... failures=...` line and has a
watchdog. To run one with Verilator 5, from the project root:

    verilator --binary --timing --assert rtl/ca_pkg.sv rtl/ca_tracker.sv \
      rtl/ca_l1_dcache.sv rtl/ca_system.sv tb/msi_directory_model.sv \
      tb/tb_core_agent.sv tb/tb_ca_system.sv --top-module tb_ca_system
    ./obj_dir/Vtb_ca_system

Replace the testbench file and `--top-module` to run `tb_ca_tracker` or
`tb_ca_l1_dcache`. They need only the first three RTL files.
