# KingsGuard RTL: enclaves that cannot leak their data

An enclave (a TEE-protected piece of user code) is normally trusted to handle
its secrets correctly. If the enclave code has a bug, such as a buffer overflow
or a wrong pointer, an attacker can make it copy a secret into ordinary
memory. A hardware flaw can also leave a secret in a register that other code
reads later. Isolation does not help in either case, because the enclave
itself moves the data.

KingsGuard adds a second line of defence inside the processor:

* **Taint.** Every 64-bit word of memory and every register carries a one-bit
  *taint*, meaning "derived from secret data".
* **Checks at the exit points.** The hardware watches every place where data
  can leave the enclave and applies the rules below.
  * A tainted value stored to non-enclave memory is replaced by zero.
  * A tainted address that points outside the enclave is bent to a harmless
    fixed address.
  * A shared register written with tainted data is stamped with the
    enclave's ID, and anyone else who reads it gets zero.
* **Authorized paths.** Some releases are legitimate, for example sending an
  encrypted result. For these, the developer lists the control-flow paths that
  lead to them when the program is built. The hardware keeps a running
  SHA-256 hash of the branches the enclave actually takes. A tainted store
  leaves the enclave only when the current hash matches one of the listed
  hashes.

This repository has synthesizable SystemVerilog for these mechanisms. It also
has a small RV64I core that carries them, self-checking testbenches for every
unit, and an end-to-end test in which each protection fires.

## Block diagram

```
                 Security Monitor port (sm_*)
        +-----------+------------+-----------------+---------------+
        |           |            |                 |               |
  kg_enclave_ctrl   kg_ownership_table     kg_adp_table (H*)     start/scrub
  CurrEID, modes    page -> owner EID      match = H_current in H*
        |                 |                        ^
        v                 v                        |
  +-------------------------------------+    kg_hash_engine <- FIFO <- kg_branch_monitor
  | kg_core                             |    H = SHA256(H||s||t)         (s,t) pairs
  |  kg_taint_regfile  kg_taint_prop    |          (kg_sha256)               ^
  |  kg_sink_check     kg_shared_regs   |                                    |
  |  kg_lsu --(kg_shadow_addr)          |------ commit stream (pc, instr) ---+
  +-------------------------------------+
        | imem_*                 | mem_* (data and shadow taint, one port)
```

`kingsguard_top` wires the blocks together. Everything the full processor would
add around them is brought out as plain ports:

* caches, the AXI bus and DRAM, which sit on `mem_*` and `imem_*`;
* the machine-mode Security Monitor software, which sits on `sm_*`.

## Where taints live

**Memory.** Each 64-bit word has one taint bit. The bits are stored in a
*shadow region* of ordinary memory. One taint byte covers 64 bytes of data, so
a 4 KB page needs 64 bytes of taint.

For a data address `A`, `kg_shadow_addr` computes:

```
taint byte address = ((A - DATA_BASE) >> 6) + SHADOW_BASE
bit in that byte   = (A >> 3) & 7
```

The bit is the word's index inside its 64-byte block. The LSU reads whole
64-bit words, so it also gives the bit position inside the word:
`{byte_addr[2:0], A[5:3]}`.

**What the LSU does.** `kg_lsu` adds shadow-memory requests only while the
core runs an enclave (`track`).

| Access | Memory requests in enclave mode |
|---|---|
| Load | 2: the data read, then a read of the taint word; the load returns the taint bit with the data. |
| Store | 3: the data write, then a read-modify-write of the taint word. |

The taint write updates only the affected byte (`mem_wstrb` has a single bit
set). Outside enclaves each access is one request and the taint is 0.

**Registers.** `kg_taint_regfile` has one taint bit per register. `x0` always
reads 0, untainted.

**Propagation.** `kg_taint_prop` sets the taint of each result:

| Instruction | Destination taint |
|---|---|
| register-register ALU op | `rs1_t OR rs2_t` |
| register-immediate op | `rs1_t` |
| `LD` | taint read from the shadow region |
| `SD` | shadow bit ← taint of the data register (rs2) |
| `CSRRS`/`CSRRW` on a shared register | that register's taint |
| `LUI`, `AUIPC`, `JAL`, `JALR` | 0 (no register source) |

The SM (Security Monitor) software marks the initial secrets by writing 1s into
the shadow region. In the original system, these come from a signed section of the
enclave binary.

## The exit checks (kg_sink_check)

Every enclave load and store is looked up in the ownership table (see the
[ownership section](#ownership-enclave-ids-and-mode-changes)).
`non_enclave` means that no enclave owns the page. Addresses outside the table
count as non-enclave. The checks are combinational and apply only in enclave
mode. The first row combines with the others: a store through a tainted
address with tainted data is both redirected and blocked (or released).

| Condition | Action | Event |
|---|---|---|
| address register tainted and target non-enclave | the access goes to `A_FIXED` instead; the address register is not changed | `ev_redirect` |
| store, data tainted, target non-enclave, `adp_match` | the store goes ahead and writes taint 0 | `ev_declass` |
| store, data tainted, target non-enclave, no match | writes 0; the data register and its taint are zeroed | `ev_block` |
| store into enclave memory | the data taint is written to shadow memory | — |

**The last two rows.** Zeroing the register matters: otherwise the attacker
could simply retry. A redirect also applies to loads, so a secret-dependent
address cannot pull in or probe outside memory.

**The ownership check comes first.** A load or store to a page that belongs to
another enclave, or one from non-enclave code to any enclave page, does not
reach memory. The core stops with `fault`.

## The path hash

This is the part that needs the most care.

**What is hashed.** Each committed branch or jump produces a pair:

* `s` is the PC of the branch or jump;
* `t` is the PC of the *next committed instruction*.

So a not-taken conditional branch also produces a pair, with `t = s + 4`.
`kg_branch_monitor` watches the core's commit stream and forms the pairs. A
pair is therefore only complete when the instruction after the branch commits.

**Loops.** A conditional branch with a negative offset is treated as a loop
condition.

* The first time it is taken, the monitor emits `(loop condition PC, loop
  entry PC)` and remembers that branch.
* Later taken iterations of the same branch emit nothing.
* When it falls through (the loop exits), the monitor emits nothing and
  forgets the loop.

The hash therefore does not depend on the trip count, but does depend on the
loop being entered. Only one loop is remembered. In nested loops, each
switch between the inner and the outer loop branch replaces the remembered
loop, so both pairs are hashed once per outer iteration. An offline hash
calculator must follow the same rule.

**The hash itself.** `kg_hash_engine` keeps `H_current`, which starts at
`HASH_INIT` (0). For each pair it replaces `H_current` with:

```
SHA-256( H_current(256) || s(64) || t(64) )
```

This is a 384-bit message, padded in the standard way into one 512-bit block
and compressed from the standard SHA-256 IV. A developer can compute the
authorized hash offline with any SHA-256 library: hash the 48-byte big-endian
message, take the result as the new `H`, and repeat for each pair.
`tb_sha_pkg::path_hash` does this in the testbenches.

**Throughput.**

* `kg_sha256` does one round per clock, so one event takes 66 clocks.
* A 4-entry FIFO absorbs bursts. When it is full, the monitor holds back the
  core's commit (`ev_commit_wait`).
* Code with a branch every few instructions therefore runs at about one branch
  per 66 clocks. This is the main cost of this implementation, and a faster
  (unrolled) SHA core is the obvious change.

**Deciding a store.** When a store needs the hash (a tainted store to
non-enclave memory), the core waits until the path hash has settled. That
means no event is queued, none is being hashed, and none is waiting in the
branch monitor (`ev_hash_wait`). Only then is `H_current` compared with all
entries of `kg_adp_table` in parallel.

A jump whose target is the store itself is completed by the store's own
commit. It is therefore *not* part of the hash that decides that store. An
offline hash for a path must end with the last branch *before* the branch that
lands on the store.

## Ownership, enclave IDs and mode changes

`kg_ownership_table` holds one 64-bit owner EID (enclave ID) per 4 KB page,
with 16 pages from `RAM_BASE` by default. Owner 0 means free. An access is
allowed when the owner is 0 or equals `CurrEID`.

`kg_enclave_ctrl` holds `CurrEID` and three enables: enclave mode, taint
tracking and hashing. The SM changes them with four commands:

| Command | Effect |
|---|---|
| EENTER(eid) | `CurrEID = eid`; tracking and hashing on |
| EEXIT | `CurrEID = 0`; all off; `H_current` reset to its initial value |
| AEX (interrupt exit) | `CurrEID` parked; all off; `H_current` **kept** |
| ERESUME | parked EID restored; tracking and hashing on; hashing continues from the kept `H_current` |

The SM is also responsible for:

* scrubbing registers (`sm_reg_clear`);
* loading ownership-table and authorized-hash entries;
* starting the core at a PC (`sm_start`, `sm_start_pc`).

## Shared registers (kg_shared_regs)

Shared registers model user-accessible hardware state that survives a context
switch. There is one by default, read and written with `CSRRW`/`CSRRS` at CSR
`0x800` (up to `0x80F`).

* **Stamping.** A write of tainted data stamps the register with `CurrEID`. An
  untainted write clears the stamp.
* **Reading.** An unstamped register is readable by anyone. A read by any
  other EID, including non-enclave code, returns 0 and wipes the register and
  its stamp (`ev_sreg_denied`).

## The carrier core (kg_core)

`kg_core` is a small multi-cycle RV64I core. It stands in for the 5-stage
processor of the original work. Each instruction goes through FETCH, EXEC, an
optional MEM state, and COMMIT.

**Instructions supported:**

* LUI, AUIPC, JAL, JALR;
* all conditional branches;
* 64-bit OP and OP-IMM;
* LD and SD;
* CSRRW and CSRRS on the shared registers;
* ECALL, which commits and then halts the core.

**Not supported:** sub-word loads and stores, the `*W` 32-bit ops, M/F/D/C,
traps and privilege modes. An unsupported instruction halts the core with
`fault`.

**Timing:**

* An ALU instruction takes 3 clocks.
* A load adds its memory round trips: 1 outside an enclave, 2 inside.
* A store does the same: 1 outside an enclave, 3 inside.

## Top-level interface (kingsguard_top)

| Port group | Purpose |
|---|---|
| `sm_cmd_*` | enclave commands (1=EENTER, 2=EEXIT, 3=AEX, 4=ERESUME) |
| `sm_ot_*`, `sm_adp_*` | table writes |
| `sm_reg_clear`, `sm_start`, `sm_start_pc` | register scrub and core start |
| `imem_addr` / `imem_rdata` | combinational 32-bit instruction read |
| `mem_*` | one data port: `mem_req` held until `mem_gnt`; read data returned with a one-clock `mem_rvalid` one or more clocks later; byte strobes on writes; one access outstanding |
| `halted`, `ecall`, `fault`, `pc`, `curr_eid`, `enclave_mode`, `h_current`, `hash_idle` | status |
| `ev_*` | one-clock pulses for every mechanism |
| `n_hashed`, `n_loops_suppressed` | counters |

**Default parameters:**

| Parameter | Default |
|---|---|
| `NUM_PAGES` | 16 |
| `NUM_ADP` | 8 |
| `FIFO_DEPTH` | 4 |
| `NUM_SREGS` | 1 |
| `RAM_BASE` | 0x8000_0000 |
| `SHADOW_BASE` | 0x8800_0000 |
| `A_FIXED` | 0x8001_0000 (just past the owned range) |
| `HASH_INIT` | 0 |

At these defaults, yosys coarse synthesis of the top gives about 780 cells and
8000 flip-flop bits. The original FPGA figures were about 4100 registers for
the branch monitor and hash engine together. The difference comes mostly from
this design's 4-entry event FIFO, the eight-entry register table of authorized
hashes and the ownership table.

## How this design differs from the original work

* **Core.** The original is a Shakti-C 5-stage in-order core with 16 KB L1
  caches over AXI to DDR3, running Linux. Here a minimal multi-cycle core
  replaces it, and there are no caches. Data and taints share one memory port,
  as in the original they share the caches.
* **Security Monitor.** It is machine-mode software in the original; here it
  is a port driven by the testbench. On AEX, this design parks the EID in
  hardware. The original restores it in software.
* **Authorized hashes.** These are copied into a hardware table of 8 entries.
  The original keeps them in SM memory. The ownership table covers 16 pages.
  The original does not give the size of either table.
* **Redirect.** A redirected access uses `A_FIXED` for that access only. The
  original rule also writes `A_FIXED` into the address register.
* **Stamping.** The shared register is stamped only on tainted writes, and
  unstamped registers are readable by anyone. The written rule would stamp on
  every write and refuse reads by any other owner. The prose description
  protects only stamped registers, and that is followed here.
* **Choices not made by the original.** Loop handling is limited to one
  remembered loop. The hash initial value (0), the padding and the SHA round
  schedule are choices made here.
* **Not built:**
  * caches and the bus;
  * the randomized cache used against timing channels;
  * the SM software;
  * the binary preparation tools that produce the taint and hash sections.

## Verification

Each unit has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. The shared helpers are:

* `tb_sha_pkg`: a plain SHA-256 written from FIPS 180-4 independently of the
  hardware, plus `path_hash`;
* `tb_rv_pkg`: instruction encoders;
* `tb_mem_model`: a sparse word memory with random wait states.

The unit tests compare against independent models or hand-derived values. They
cover:

* the SHA-256 test vectors and latency;
* random taint propagation and address mapping;
* LSU request sequences under random stalls;
* hash chains, the loop suppression sequence, and enclave command sequences.

`tb_kg_core` runs programs against behavioural ownership and hash inputs.

`tb_kingsguard_top` runs the whole design at its default parameters. The SM
model gives pages to two enclaves, stores a tainted secret, and loads one
authorized hash, computed by the reference model from the pairs the enclave
program will produce. The test then checks each of the following:

* a loop hashed once;
* a leak attempt blocked, with the register wiped;
* a release along the authorized path, after a hash-wait stall;
* a redirected load;
* the shared register stamped during the enclave and refused to the OS after an AEX;
* a burst of jumps that stalls commit;
* an ownership fault;
* `H_current` kept across AEX/ERESUME and cleared by EEXIT.

It counts every mechanism and fails if any of them never occurred.

## Simulating with Verilator

Packages go first on the command line. `-y` lets Verilator find the remaining
modules by file name. For example, for the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_kingsguard_top -y rtl -y tb +libext+.sv \
  rtl/kg_pkg.sv tb/tb_rv_pkg.sv tb/tb_sha_pkg.sv tb/tb_kingsguard_top.sv -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. Tests that use no package
helpers still need `rtl/kg_pkg.sv` first. The simulator has two states, so
every register that is read is reset. To write your own enclave program, fill
the `prog[]` array with encoders from `tb_rv_pkg` as the end-to-end test does,
and compute the expected authorized hash with `tb_sha_pkg::path_hash`.

## Files

| Path | Contents |
|---|---|
| `rtl/kg_pkg.sv` | shared widths, opcodes, instruction classes, enclave command encoding |
| `rtl/kg_*.sv` | one unit per file, as named above |
| `rtl/kingsguard_top.sv` | top level |
| `tb/` | testbenches and their helper packages and memory model |
