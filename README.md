# RV-CURE capability pipeline in SystemVerilog

RV-CURE makes C and C++ programs memory safe by giving every data pointer a
small hash tag and keeping each object's bounds in a table in memory. A
compiler pass tags a pointer when its object is created and records the
object's base and size. It removes that record when the object dies. The
hardware then checks every load and store made through a tagged pointer
against the recorded bounds. The checks run beside the normal memory
pipeline, so they cost little time. An instruction may not retire until its
check has passed. That makes an out-of-bounds access or a use after free a
precise exception, raised before the bad data can be used or written back.

This repository holds RTL for the parts that RV-CURE adds to an
out-of-order RISC-V core (a BOOM-class core with a 96-entry ROB and 24-entry
load and store queues). It covers:

- the decode rule;
- the pointer-tagging unit;
- the capability-execution pipeline beside the load/store unit;
- the capability cache and the head buffers;
- the control registers;
- the extra ROB bit.

The baseline core, TLB, caches and memory are not included. The top module
brings their connections out as ports.

## Tagged pointers

A 64-bit pointer holds its tag in the upper bits:

```
 63            48 47                                   0
+----------------+--------------------------------------+
|   tag T (16)   |        virtual address (48)          |
+----------------+--------------------------------------+
```

A tag of zero means the pointer is untagged. Accesses through an untagged
pointer are not checked. The tag is a CRC-16 of the 48 address bits. This RTL
uses CRC-16/CCITT: polynomial 0x1021, initial value 0xFFFF, most significant
bit first. A CRC that comes out as zero is replaced by 1, so `tagd` always
yields a tagged pointer. Many pointers share a tag, so the table keeps
several entries per tag (see below). The address itself is still used
unchanged by the data access.

Four instructions are added. This RTL places them on the RISC-V custom-0
opcode (`0001011`):

| funct3 | instruction      | effect |
|--------|------------------|--------|
| 0      | `tagd rd, rs1`   | rd = rs1 with T = CRC16(rs1[47:0]) in [63:48] |
| 1      | `xtag rd, rs1`   | rd = rs1 with [63:48] cleared |
| 2      | `cstr rs1, rs2`  | record metadata {size = rs2, base = rs1} for rs1's tag |
| 3      | `cclr rs1`       | remove the metadata recorded for rs1 |

`tagd` and `xtag` run in `ptr_tag_unit`. The result is registered and
appears one cycle after issue. `cstr` and `cclr` go down the store side of
the pipeline, like stores.

## The capability metadata table (CMT)

The CMT is an ordinary array in memory, set up by the kernel. Its base
address and its number of ways N (a power of two) are held in CSRs. Each of
the 65536 tags owns one row of N ways, and each way holds 8 bytes of
metadata. Way W of tag T is at

```
CapAddr = Base + (T << (3 + log2 N)) + (W << 3)
```

`cap_addr_gen` computes this address. A way of all zeros is empty. A used way
holds `{size[31:0], base[31:0]}`, where base is the low 32 bits of the
object's address. The check in `cap_check` works as follows:

- **load or store:** passes when `[addr, addr + bytes)` lies inside
  `[base, base + size)`, on the low 32 address bits;
- **cstr:** succeeds on an empty way;
- **cclr:** succeeds on the way whose base equals the pointer's address.

When every way of a row has been tried without success, the instruction takes
a capability fault. For a load or store, this means an out-of-bounds access,
a use after free, or a forged tag. For a `cclr`, it means a double or invalid
free. For a `cstr`, it means the row is full. The kernel then doubles N,
rearranges the table and retries.

## Following one instruction through the shadow queues

Most of the design's behaviour is in `shadow_queue`. It has two instances:

- the shadow load queue (SLQ), entry for entry beside the core's load queue;
- the shadow store queue (SSQ), beside the store queue.

The SSQ holds stores, `cstr` and `cclr`. Each entry is allocated when its
instruction is dispatched. It then steps through four states:

```
             address arrives
 S_INIT ───────────────────────────────┬──────────────────────────┐
   │ tag != 0 and no C-cache pass      │ tag == 0, enforcement    │ C-cache hit that
   ▼                                   │ off                      │ passes the check
 S_READY ──request taken──► S_WAIT     │                          │
   ▲                         │         ▼                          ▼
   └── check failed, ways ───┘       S_DONE ◄─── check passed, or all ways tried (fault)
       left: W = W+1 mod N
```

1. **Address arrival (S_INIT).** The address comes from the core's
   address-generation unit. It is looked up in the C-cache in the same cycle.
   - An untagged address goes straight to S_DONE, and so does any address
     while enforcement is off.
   - A load or store whose C-cache entry passes the check also goes to
     S_DONE. Both cases clear needCC at once and send no memory request.
   - Everything else goes to S_READY. The way counter starts at 0 for loads
     and stores. For `cstr` and `cclr` it starts at the way the SHB or CHB
     gives.
2. **Walking the row (S_READY / S_WAIT).** A ready entry asks for a
   capability load of its current way. When the request is granted, the entry
   waits for the response, then checks the returned metadata.
   - A failed check moves to the next way, wrapping at N, and back to
     S_READY.
   - After N tries the entry is done with its fault flag set.
3. **A pass (S_DONE).** A load or store that passes clears its ROB needCC
   bit and fills the C-cache with the metadata it found. A `cstr` or `cclr`
   remembers the way where it stopped.
4. **Leaving.** A load or store entry is freed when its instruction commits.
   A `cstr` or `cclr` that found its way waits until it has committed. It
   then issues its metadata store to that way: the new metadata, or zero to
   clear. Only when that store is granted is the entry freed, and the C-cache
   and the SHB/CHB updated. A `cstr`/`cclr` that faulted is freed at commit
   without a store.

Each queue picks one request per cycle. The SSQ offers its committed
metadata stores first. After that, each queue offers its lowest-index ready
entry that is not held back by an ordering rule.

A load or store therefore costs no memory traffic when its tag is zero or
its metadata are in the C-cache. It costs one capability load per way
tried. `cstr` and `cclr` cost their searches plus one store.

## Ordering capability checks against metadata updates

Checks run out of order, but a check must not see the CMT before an older
`cstr` or `cclr` has changed it. The rule is deliberately coarse: an entry
neither issues capability loads nor accepts a C-cache hit while the SSQ
holds any older `cstr`/`cclr`, whatever its tag. The SSQ publishes which of
its entries are pending capability stores. The SLQ reads that list, and the
SSQ applies it to itself.

Age is measured as the distance of an instruction's ROB index from the ROB
head. A `cstr` that has already committed but not yet stored has a ROB index
behind the head, which would look like the youngest age. Such an entry is
therefore always treated as older than every uncommitted one. The
`ev_dep_stall_o` outputs pulse in each cycle where a ready entry is held back
this way.

## The capability cache

`ccache` is direct-mapped with 256 entries indexed by `tag[7:0]`. Each entry
keeps `tag[15:8]` as its meta tag and the 8-byte metadata, which is 2.25 KB.
This RTL adds a valid bit per entry. There are two combinational lookup
ports, one for the load address and one for the store address arriving in a
cycle. The cache decides only hit or miss. The requester then runs the bounds
check on the metadata, so a hit that fails the check simply walks the CMT.
The cache is updated at the clock edge in two ways:

- **fill:** written when a load or store passes on metadata read from
  memory;
- **commit port:** a committed `cstr` allocates its new metadata, and a
  committed `cclr` invalidates the entry if the meta tag matches.

If both update ports write one entry in a cycle, the fill goes first, so the
`cstr`/`cclr` has the last word. `cstr` and `cclr` never use C-cache hits
for their own searches.

## Store and clear head buffers

Without help, a `cstr` would search from way 0 for a free way, and a `cclr`
for its object's way. `head_buffers` holds two tables of 256 way numbers
indexed by `tag[7:0]`, at 10 bits each (0.625 KB together):

- the SHB gives the way where the next `cstr` should start;
- the CHB gives the way where the next `cclr` should start.

When a `cstr`/`cclr` that stopped at way N of an M-way CMT issues its store,
the buffers are updated according to the mode:

| mode            | cstr → SHB  | cclr → CHB  | idea |
|-----------------|-------------|-------------|------|
| LAFD            | (N+1) % M   | (N−1) % M   | stack: last allocated, first freed |
| FAFD            | (N+1) % M   | (N+1) % M   | heap: oldest freed first |
| adaptive (default) | LAFD if the address is in the upper half of the address space, FAFD otherwise | | stack grows down from the top, heap grows up |
| base            | no update   | no update   | every search starts at way 0 |

The mode is the `HB_MODE` parameter of `rvcure_top` (`MODE` of
`head_buffers`). The "upper half" test looks at address bit `UPPER_BIT` = 37,
the top bit of an Sv39 user address. A `cstr`/`cclr` that faulted leaves the
buffers alone.

## Sharing the D-cache port

Capability loads and stores use the core's existing path: LSU scheduler, TLB
and D-cache. `lsu_cap_arb` sits at the scheduler's input and passes one
request per cycle. The order is:

1. a regular load or store, always first;
2. otherwise an SSQ capability request;
3. otherwise an SLQ capability request.

A request is taken in the cycle its grant is high, which requires
`mem_ready_i`. `ev_conflict_o` pulses when a regular request and a capability
request meet. Each response carries `is_cap`, `src_ssq` and the queue index,
so responses may return in any order and with any latency.

## Commit gate and faults

`needcc_decoder` sets needCC for every integer or floating-point load and
store while enforcement is on. `rob_needcc` holds that bit for each of the
96 ROB entries. The head may commit only when the core's own condition holds
and the head's needCC bit is clear. The shadow queues clear the bit when a
check passes.

A fault on a load or store sets the entry's fault bit instead. The head's
fault bit (`rob_head_fault_o`) tells the core to take the capability-fault
exception. `cstr` and `cclr` are not gated: they report their faults after
commit on `cap_fault_valid_o`, together with `cap_fault_rob_o` and a cause
(load, store, cstr, cclr). A kernel handler would read these.

## Control registers

| CSR   | name        | contents |
|-------|-------------|----------|
| 0x8C0 | enableDPT   | bit 0 switches enforcement on (reset 0) |
| 0x8C1 | baseAddrCMT | CMT base address, 8-byte aligned (reset 0) |
| 0x8C2 | numWaysCMT  | ways per row; a write is rounded down to a power of two in 1..1024 (reset 1) |

`cap_csr` has one write port and one combinational read port.
`rvcure_top` connects these to `csr_*` ports, where the core's CSR file
forwards accesses.

## Connecting the top to a core

`rvcure_top` expects the following from the core on each clock:

| group | signals | rule |
|-------|---------|------|
| dispatch | `dis_valid_i`, `dis_instr_i`, `dis_rob_i`, `dis_ldq_i`, `dis_stq_i` | up to three instructions per cycle, one per lane (`DISP_W`); loads take an LQ index, stores/`cstr`/`cclr` an SQ index; `dis_op_o`/`dis_needcc_o` come back in the same cycle |
| tagging | `ptu_*` | result on `ptu_valid_o`/`ptu_data_o` one cycle later |
| addresses | `agen_ld_*`, `agen_st_*` | one load and one store address per cycle, with the queue index; `agen_st_size_i` carries rs2 of a `cstr` |
| ROB | `rob_head_i`, `rob_head_ok_i` → `rob_can_commit_o`, `rob_head_fault_o` | combinational |
| commit | `commit_ld_*`, `commit_st_*` | queue index of the committing load/store-side instruction |
| memory | `lsu_req_*` in; `mem_req_*`/`mem_ready_i` out to the TLB/D-cache; `mem_resp_*` back | see above |

The event outputs (`ev_*`) pulse once per occurrence, for performance
counters: untagged bypass, C-cache hit, extra way tried, dependency stall,
port conflict and head-buffer update.

## Files

| file | contents |
|------|----------|
| `rtl/rvcure_pkg.sv` | widths, CSR numbers, encodings, enums, structs, CRC function |
| `rtl/needcc_decoder.sv` | instruction class and needCC |
| `rtl/ptr_tag_unit.sv` | `tagd`/`xtag` |
| `rtl/rob_needcc.sv` | needCC and fault bits per ROB entry |
| `rtl/cap_csr.sv` | the three CSRs |
| `rtl/cap_addr_gen.sv` | way address equation |
| `rtl/cap_check.sv` | bounds check, empty test, match test |
| `rtl/ccache.sv` | capability cache |
| `rtl/head_buffers.sv` | SHB/CHB |
| `rtl/shadow_queue.sv` | SLQ/SSQ entries and their state machine |
| `rtl/lsu_cap_arb.sv` | request priority and response steering |
| `rtl/rvcure_top.sv` | everything wired together |
| `tb/*_tb.sv` | one self-checking testbench per module |

A coarse Yosys synthesis of `rvcure_top` at its default sizes gives about 14
thousand word-level cells, 12 thousand flip-flop bits and 18 Kbit of memory
(the C-cache data and meta arrays). Most of the logic is in the two 24-entry
shadow queues.

## Simulation

Every testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M`, and it has a watchdog. To build and run one
with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rvcure_pkg.sv tb/rvcure_top_tb.sv --top-module rvcure_top_tb -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace the testbench name to run another. The unit testbenches compare
each block with a model written separately in the testbench, using random
stimulus from `$urandom`:

- a bytewise CRC, itself checked against the standard check value 0x29B1;
- a reference cache and reference head buffers;
- the address equation;
- the arbitration order.

`shadow_queue_tb` runs an SSQ against a memory model with two-cycle latency
and occasional back-pressure. It covers:

- an untagged store;
- a `cstr` starting at its SHB way;
- a C-cache hit;
- a search over three ways;
- an out-of-bounds fault;
- a store held behind an older `cclr`, followed by the use after free;
- a double `cclr`;
- a `cstr` into a full row;
- three stores allocated in one cycle, one on each dispatch lane.

`rvcure_top_tb` runs the whole top at its default sizes. It replaces the
core with a small dispatch/ROB model that picks a random dispatch lane for
each instruction, and provides a memory that answers in
three cycles and refuses one request in five. Its program creates and frees
heap and stack objects, and it also exercises:

- a global object reached through way 1;
- competing regular traffic;
- an out-of-bounds load and a use after free;
- a double free and a `cstr` into a full row;
- a load that must wait for an older `cstr`;
- enforcement switched off.

It checks the memory contents of the CMT and the number of capability loads
of each step. It also counts each mechanism (bypass, C-cache hit, way
iteration, fault, dependency stall, port conflict, head-buffer update,
commit held by needCC) and fails if any of them never happened.

`rvcure_modes_tb` compares the head-buffer modes. It runs four copies of
the top through `rvcure_mode_run`, one per mode, on the same workload in an
8-way CMT:

- 25 stack objects in the upper half of the address space, created and freed
  last-in first-out in nested bursts;
- 16 heap objects in the lower half, freed first-in first-out.

It counts the CMT ways that the `cstr`/`cclr` searches read. Per operation
the averages are:

| mode     | stack | heap |
|----------|-------|------|
| base     | 2.36  | 1.88 |
| LAFD     | 1.62  | 1.94 |
| FAFD     | 3.70  | 1.00 |
| adaptive | 1.62  | 1.00 |

The testbench checks that LAFD beats base on the stack pattern and FAFD
beats base on the heap pattern. It also checks that adaptive equals LAFD on
the stack and FAFD on the heap, and that adaptive reads the fewest ways
overall.

## Where this RTL departs from the paper, and what is left out

- **Metadata format.** The original design keeps bounds in an encoded 8-byte
  format that is not published. Here base and size are plain 32-bit fields,
  so objects may be at most 4 GiB. Bounds are compared on the low 32 address
  bits.
- **Own choices.** The CRC variant, the tag position, the instruction
  encodings, the CSR numbers and reset values, the valid bit in the C-cache,
  and the upper-half bit are this design's choices.
- **Width.** Dispatch is three-wide, like the reference core. Past
  dispatch, the top takes one load address, one store address, one load
  commit and one store commit per cycle.
- **Misspeculation.** Branch mispredictions are not handled: there is no
  port to squash shadow-queue entries.
- **cstr/cclr faults.** `cstr` and `cclr` do not hold commit. Their faults
  arrive after commit.
- **Request order.** Within a queue the lowest index is served first, and
  the SSQ is served before the SLQ. Both are this design's choices.
- **Not built.** The statistics and debug CSRs mentioned for the original
  system are not built. The event outputs give the raw counts instead.
- **Outside this RTL.** The BOOM core, LSU scheduler, TLB, caches, DRAM and
  the software side (compiler passes, kernel fault handler, CMT allocation
  and resizing) are not included.
