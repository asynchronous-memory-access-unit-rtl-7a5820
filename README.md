# Asynchronous Memory Access Unit (AMU)

Far memory, such as memory pools reached over a fabric or non-volatile main memory,
answers in anything from a few hundred nanoseconds to several microseconds. A core
that uses ordinary blocking loads runs out of ROB, issue-queue and MSHR entries long
before such a request comes back. The asynchronous memory access unit lets a program
treat far memory the way event-driven code treats a socket. The program starts a transfer with one
instruction and gets a request id back at once. It then asks later which requests have finished, and in
the meantime it keeps computing. The data travels between memory and a scratchpad
memory (SPM) inside the core's L2, where ordinary loads and stores can reach it.

This RTL follows the architecture described in *Asynchronous Memory Access Unit for
General Purpose Processors* (Wang, Zhang, Lu, Chen). That white paper gives the
instructions, the kinds of control register and the placement of the parts. It gives
no encodings, sizes, timing or internal structure. Everything at that level of detail
is this design's own and is marked as such below and in each file's header.

## The programmer's view

Three instructions drive the unit:

| instruction | operands | effect |
|---|---|---|
| `aload Rd, Rs1, Rs2` | Rs1 = SPM address, Rs2 = memory address | start memory → SPM, Rd ← request id |
| `astore Rd, Rs1, Rs2` | same | start SPM → memory, Rd ← request id |
| `getfin Rd` | – | Rd ← id of a finished request, or the failure code; never blocks |

There are also two register-access operations, `csrr` and `csrw`. The ids count from 0.
An `aload`/`astore` may also carry a register field. If that field is `CFG_NAMED | n` (16 + *n*), the
instruction names configuration register MAC*n* itself. Any other value leaves the choice to DEFCFG.
The failure code is all ones (−1). With these choices, a program that has started a
single request can poll with `while ((rd = getfin()) != 0)`, because its first and only
request gets id 0.

An `aload`/`astore` has no operand left to say *how* to move the data, so the shape of a
request comes from control registers:

| number | register | contents |
|---|---|---|
| 0–3 | MAC0–3, memory access configuration | `[7:0]` granularity in 8-byte beats (0 = 1), `[11:8]` QoS label, `[12]` pattern enable, `[14:13]` pattern register index |
| 4 | DEFCFG | which MAC an `aload`/`astore` uses when it does not name one |
| 8–11 | PAT0–3, access pattern | `[31:0]` stride in bytes, `[47:32]` element count |
| 12–15 | SW0–3, software-defined | SW0 is sent with every memory request as a user word |
| 16 | SPMWAYS | how many L2 ways are SPM (0–8, clamped) |
| 17 | STATUS (read only) | `[7:0]` queued, `[15:8]` in flight, `[23:16]` finished, `[31:24]` free ids |

A request moves `count` elements of `granularity` beats each. Element *i* is read from
or written to memory address `Rs2 + i*stride`. In the SPM, the elements are packed one after another from
`Rs1`. A pattern-less MAC gives one element, which is a plain block copy of up to
2040 bytes. A pattern whose stride equals the element size is a stream. A larger stride
is a gather (for `aload`) or a scatter (for `astore`). The registers reset to one beat,
no pattern, DEFCFG 0, and four of the eight L2 ways as SPM.

## How a request travels

```
             core pipeline                      L2 controller                     memory port
 aload ──► amu_memacc ──► request FIFO ──► amu_engine ── mreq (tag, addr, beats) ─►
           │ id allocation                  │ element walk      ◄─ rsp (tag, data, last) ─
           │ control registers              │ tag table         ── wd (store data) ──────►
 getfin ◄─ finished-id FIFO ◄── fin_id ─────┘ outstanding count
                                            │ port B
 load/store ─────────────── port A ──► amu_spm (L2 data region, SPMWAYS ways are SPM)
```

1. **Issue** (`amu_memacc`). The `aload`/`astore` takes the lowest free id. It is put in the
   request FIFO together with both addresses and the configuration in force. The id is
   written to Rd in the next cycle, and the instruction can commit. If no id is free or
   the FIFO is full, `in_ready` drops and the pipeline stalls. `getfin` and register
   accesses are never stalled.
2. **Execution** (`amu_engine`). The engine takes one request at a time from the FIFO and
   walks its elements. For each element it takes a free tag and sends one memory request,
   a burst of `granularity` beats. For a store, it then streams the element's beats out of the
   SPM. Issue never waits for data to return, so the transfers of many elements and many requests
   overlap. At most `NUM_TAGS` (32) transfers are in flight at once.
3. **Return**. Responses may arrive in any order and may interleave beat by beat. The
   tag tells the engine where each beat goes in the SPM. The last beat of a read, or the
   acknowledge of a write, frees the tag and lowers its request's outstanding count.
4. **Finish**. A request has finished when all its elements are issued and none is
   outstanding. Its id goes into the finished-id FIFO. `getfin` takes ids from that FIFO in
   the order they finished and frees them for reuse.
5. **Use**. The program reads the data from the SPM with ordinary loads (port A).

## The engine in detail

The engine keeps three kinds of state:

* **Per tag**: busy, owning request id, the SPM word that the next returning beat goes to, and read or write.
  A read beat writes the SPM at that word and advances it by one. So beats of one
  burst must come back in order, but bursts of different tags need not.
* **Per request id**: active, "all elements issued", and an outstanding-element count
  (+1 when an element's request is accepted, −1 when its last beat or acknowledge
  returns; both can happen in the same cycle).
* **Issue side**: the request being walked, the current element index, memory address
  and SPM word, and for stores a small read pipeline.

Finished requests are detected by comparison, not by events. Each cycle, every id that is active, fully issued and has
nothing outstanding is a candidate, and the lowest one is reported. This handles a
request whose last response arrives in the same cycle as another request's last issue.
It also handles a request with an element count of 0, which finishes without touching memory.

SPM port B has two users. Returning read data always takes it. A store's next SPM
read waits one cycle when they collide. Store data is offered straight from the SPM's
registered output. If memory does not take a beat, the beat is parked in a one-entry hold register, so
store data flows at one beat per cycle when memory keeps up. A memory request offered
and not yet accepted keeps its tag and its fields. The engine contains assertions for that and
for the write-data channel.

## The cache/SPM split

`amu_spm` is the L2 data array, 8 ways of 4096 64-bit words (256 KiB). The lowest
SPMWAYS ways form one linear SPM. SPM byte address *a* is word *a*/8, so with SPMWAYS =
*n* the SPM spans `n*32 KiB`. `cache_way_mask` shows the ways the L2 cache may still
allocate into. Port A (core loads and stores, with byte enables) and port B (engine) both
read with one cycle of latency. An access beyond the SPM is refused: nothing is written,
the read returns 0, and an error bit rises. The core sees it as `spm_err`, the engine's
accesses as `engine_spm_err`. If both ports write the same word in a cycle, port B's data
is kept. The cache itself is not part of this RTL. So moving the boundary does not flush
or write back the lines in the ways that change hands; a cache built around this array
must do that.

## Memory port

The port is what the memory bus and the controllers behind it see (`amu_pkg`):

* `mreq` (valid/ready): `{tag, write, addr, beats, qos, user}`. There is one per element.
* `wd` (valid/ready): write data, `beats` beats per write request, in the order the
  write requests were accepted.
* `rsp` (valid only, `rsp_ready` is always 1): `{tag, data, last}`. A read returns `beats`
  beats with `last` on the final one. A write returns one beat with `last` = 1.

Addresses are byte addresses. Bits [2:0] are ignored, since everything moves in 8-byte beats.

## Parameters

| module | parameter | default |
|---|---|---|
| `amu_top` | `NUM_IDS` requests in flight | 16 |
| | `REQ_DEPTH` request FIFO | 8 |
| | `NUM_TAGS` element transfers in flight | 32 |
| | `L2_WAYS`, `WAY_WORDS` L2 data array | 8, 4096 |
| `amu_ctrl_regs` | `NUM_MAC`, `NUM_PAT`, `NUM_SW` | 4, 4, 4 |

The paper gives no number for any of these. `NUM_IDS` up to 255 and `L2_WAYS` up to 15 fit the
fixed field widths in `amu_pkg`.

## What is the paper's and what is not

From the paper:

* the three instructions and their operands
* `getfin` never blocking
* the kinds of control register: access configuration with granularity and QoS, default configuration, access pattern with stride or stream, software-defined registers, and status
* an SPM that is carved out of the cache and reached by ordinary loads and stores
* control registers and a FIFO in the pipeline, and the data mover in the L2 controller

This design's own:

* all encodings, register fields and sizes, including how an instruction names its MAC
* the failure code
* stalling when ids run out
* the element/tag engine and the memory-port protocol
* way-granular partitioning and the two SPM ports

Not built:

* **Speculative execution of the AMU instructions in the pipeline.** The unit takes
  committed instructions only; the pipeline is outside this RTL.
* **The L1 SPM cache, the L3 SPM, and the "support logic" in the L3 and memory controllers.**
  The paper only names these.
* **The L2 cache itself, the memory bus, memory controllers, remote crossbar and remote nodes.**
  The testbenches stand in for all memory with a behavioural model.
* **QoS-aware scheduling.** The QoS label and the user word are carried to memory but nothing in the
  unit acts on them.
* **Several cores.** There is one unit per core; the top holds one core's unit.

## Files

| file | contents |
|---|---|
| `rtl/amu_pkg.sv` | opcodes, register map, register and port structs |
| `rtl/amu_fifo.sv` | FIFO used for requests and finished ids |
| `rtl/amu_ctrl_regs.sv` | control registers and the effective request configuration |
| `rtl/amu_memacc.sv` | pipeline side: instruction execution, ids, both FIFOs |
| `rtl/amu_engine.sv` | L2 side: element walk, tags, SPM writes, completion |
| `rtl/amu_spm.sv` | L2 data array with the cache/SPM split |
| `rtl/amu_top.sv` | one core's AMU |
| `tb/far_mem_model.sv` | behavioural far memory: a random latency per request of a few to several hundred cycles, out-of-order and interleaved answers, back-pressure |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It also has a
watchdog. For example, for the whole unit:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_amu_top rtl/amu_pkg.sv tb/tb_amu_top.sv
./obj_dir/Vtb_amu_top
```

Replace `tb_amu_top` with `tb_amu_engine`, `tb_amu_memacc`, `tb_amu_ctrl_regs`,
`tb_amu_spm` or `tb_amu_fifo` to run the others.

`tb_amu_top` runs the unit at its default parameters. It plays the program, in six steps:

1. The basic example: one `aload`, `getfin` polling, then a load from the SPM.
2. A 512-byte single-granule load.
3. A 32-element gather with a 1 KiB stride, then a 200-element gather that keeps all
   32 tags busy.
4. A strided `astore` of data written by ordinary stores, then sixteen `aload`s left
   uncollected, so that a seventeenth must stall for lack of an id.
5. 48 overlapping loads and stores of random shape, with a getfin event loop and
   software-managed SPM buffers. Each instruction names its own MAC.
6. Shrinking and growing the SPM.

Every finished request's data is compared against the memory model. The testbench
also counts that issue stalled, that getfin failed, that requests finished out of
order, that the tag table filled, that an instruction named its configuration register,
and that the SPM was reconfigured. It fails if any
of these never happened. It runs in well under a second and passes with every random
seed tried (80).

The engine testbench checks, at the moment each id is reported, that all of its data
is already in place. It exercises single-beat, 32-beat, strided, store and empty
requests with only 8 tags, so the tag table is often full.

## Limits of trust

The unit has been checked only in simulation, against a behavioural memory that obeys
the port rules above. It has not been checked against a real core, cache or
interconnect. The register layout is not an architectural specification. The paper
defines none, and software written for another implementation of the idea will not
match it. Timing closure, area and power have not been studied. The L2 array is a plain
array that a synthesis tool maps to memory, not an SRAM macro.
