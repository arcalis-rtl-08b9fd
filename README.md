# Arcalis: a near-cache RPC accelerator in SystemVerilog

## The idea

A remote procedure call costs a server far more than the procedure itself.
The CPU parses the packet header, finds the method, decodes the arguments
into an in-memory struct, and later encodes the result back into a packet.
Arcalis moves all of that work off the cores. It does not sit behind PCIe.
It is a small tile on the chip's coherent interconnect, next to the
last-level cache. It reads and writes the same cached buffers the cores use,
through its own TLB and cache, with 64-byte loads and stores.

Software talks to it through *commands*: uncacheable (UC) stores and loads to
one pinned *command page*.

- A store hands the accelerator a buffer address or a length.
- A load collects a completion token.

Between these two points, hardware does every step:

1. Load the request packet.
2. Parse the Thrift header.
3. Dispatch on the method name.
4. Decode the arguments into the application's buffer.

The response runs the same steps in reverse.

The design has two halves:

- A **fixed part**: command interface, TLB/MMU, address unit, reorder buffer,
  load/store queue and cache.
- A **service-specific part**: the control FSM, two micro-engines
  (RxEngine, TxEngine), and per-method stub tables written from the service's IDL.

Every service-specific item lives in one place, `rtl/arcalis_pkg.sv`. Changing
the service means editing tables there, not logic.

## Block map

```
 core UC store/load ─► SCI ─► byte selector/decoder ─┬─► control FSM ──► RxEngine ─┐
                        ▲                            └─► forward unit   TxEngine ─┤
                        └──── reply to UC load ◄──────────── ┘                     │
                                                                                  ▼
  interconnect ◄── cache ◄── LD/ST queue ◄── ROB ◄── TLB/MMU ◄── address unit ◄── arbiter
        │            └──────► ROB (in-order retirement) ──────► engine buffers
        └── page-table reads ◄── TLB/MMU walker
```

| File | Block |
|---|---|
| `arcalis_pkg.sv` | types, opcodes, status word, Thrift codes, object layout, method tables |
| `arcalis_sci.sv` | snooping command interface (claims UC accesses in the command page) |
| `arcalis_cmd_decoder.sv` | byte selector + decoder |
| `arcalis_ctrl_fsm.sv` | central control: buffer descriptors → engine requests |
| `arcalis_forward_unit.sv` | answers UC loads with completion tokens |
| `arcalis_engine_fsm.sv` | five-state micro-engine controller |
| `arcalis_rx_engine.sv` / `arcalis_tx_engine.sv` | the two micro-engines |
| `arcalis_deserializer.sv` / `arcalis_serializer.sv` | Thrift binary codec |
| `arcalis_dispatch.sv`, `arcalis_recv_function.sv`, `arcalis_resp_function.sv` | method lookup and per-method stubs |
| `arcalis_arbiter.sv` | shares the memory path between the two engines |
| `arcalis_address_unit.sv` | splits a buffer transfer into 64 B line accesses |
| `arcalis_tlb_mmu.sv` | TLB plus x86-64 four-level page walker |
| `arcalis_rob.sv` | reorder buffer, MemReqInFlight counters |
| `arcalis_ldst_queue.sv` | FIFO of translated line accesses |
| `arcalis_cache.sv` | 512 KiB, 8-way, 64 B-line private cache |
| `arcalis_top.sv` | the tile |

Each file opens with a comment covering four things: what the block does,
how it works, its interface and timing, and which parts follow the paper and
which are this design's choice.

## Command interface and the software protocol

### The command word

A UC store carries a 64-bit word. Bits [63:4] hold a buffer virtual address or
a length; bits [3:0] hold the opcode. A UC load carries no data, so its opcode
comes from physical-address bits [3:0] inside the command page. The paper says
both things: the opcode is in the low 4 bits of the word (its command-format
figure), and it is in the low 4 bits of the physical address (its overview).
This design uses the word for stores and the address for loads. That is the
only reading under which loads can carry an opcode at all.

The paper names the six commands but does not number them. The numbering
below is this design's.

| Opcode | Name | Store: what the data field carries | Load |
|---|---|---|---|
| 1 | `SEND_NET_BUF` | Net. Recv packet VA (NetCore) | – |
| 2 | `SEND_NET_LEN` | packet length; starts the receive path | – |
| 3 | `APP_READY_FLAG` | App. Recv buffer VA (AppCore is ready) | RxEngine completion |
| 4 | `SEND_APP_RESP` | result-object length; starts the response path | – |
| 5 | `SEND_APP_BUF` | App. Resp buffer VA | – |
| 6 | `DPDK_NET_FLAG` | Net. Resp buffer VA (NetCore is ready) | TxEngine completion |

Opcode 0 and 7–15 are dropped, and the decoder pulses `illegal`.

### The receive and response sequences

The sequences map the paper's software listing onto the commands.

```
NetCore:  store SEND_NET_BUF(pkt VA); store SEND_NET_LEN(len)        -> RxEngine starts
AppCore:  store APP_READY_FLAG(App.Recv VA)                          -> where the object goes
AppCore:  load  APP_READY_FLAG  (poll until not PENDING)             -> object ready
AppCore:  run business logic; write result object to App. Resp
AppCore:  store SEND_APP_BUF(App.Resp VA); store SEND_APP_RESP(len)  -> TxEngine starts
NetCore:  store DPDK_NET_FLAG(Net.Resp VA)                           -> where the packet goes
NetCore:  load  DPDK_NET_FLAG   (poll until not PENDING)             -> packet ready, send it
```

The receive and response paths are independent, so one RPC can be received
while another is being answered.

The destination commands (`APP_READY_FLAG` and `DPDK_NET_FLAG` stores) can
arrive before or after the work. If the engine finishes processing before its
destination is known, it parks in `IDLE_RESP` holding the result. It resumes
as soon as the address arrives.

The control FSM holds one pending descriptor of each kind. A second command of
the same kind overwrites an unconsumed one, so software must not queue.

### The status word

A UC load returns one 64-bit status word:

| Bits | Field |
|---|---|
| [63:62] | kind: 0 PENDING, 1 READY, 2 FAULT, 3 PROTO |
| [61:48] | detail: for PROTO, 1 = bad length, 2 = malformed or unknown RPC |
| [47:0] | READY: object or packet length in bytes. FAULT: faulting VA |

Reading a token clears it. A load with no token returns PENDING.

On FAULT, the engine has already released its destination buffer. Software
touches the faulting page, so the OS maps it, and then resends every command
of the RPC. This is the paper's "report a fault, application retries" model.

## The micro-engines

This is the heart of the design. The two engines are mirror images, and both
are built the same way:

```
 request ─► BUSY: load input lines ─► run codec ─► store output lines ─► DRAIN ─► DONE ─► IDLE_RECV
                                                   (no destination yet) └─────► IDLE_RESP ─(dest)─► BUSY
```

### The five-state FSM

`arcalis_engine_fsm` implements the paper's state diagram literally:

- `IDLE_RECV → BUSY` on a command.
- `BUSY → DRAIN` while MemReqInFlight > 0; `BUSY → DONE` when it is 0.
- `DRAIN → DONE` at 0.
- `DONE → IDLE_RECV` when the RPC is finished (MicroEngineDone).
- `DONE → IDLE_RESP` when it is not.

The figure does not say when BUSY ends. Here the engine raises `work_done`
after the codec and the last store issue. MemReqInFlight then picks DRAIN or
DONE.

This design's reading of `!MicroEngineDone` is: "the result is built, but its
destination buffer has not been given". The engine waits in `IDLE_RESP`, and
the destination command moves it back to `BUSY`, where it stores the result.

### BUSY phases inside an engine

1. Load phase: request a transfer of ceil(len/64) lines from the arbiter.
   Load data returns in order through the ROB into the local input buffer.
2. Wait until every load has retired (MemReqInFlight = 0). Only then start
   the codec, so it never reads a line that has not arrived.
3. Codec: one byte per cycle, from the input buffer to the output buffer.
4. If no destination is known: go to DONE, then IDLE_RESP.
5. Store phase: a transfer of ceil(out_len/64) lines; the address unit pulls
   the line data from the engine.

An error can happen at three points:

- a length of 0 or one larger than the buffer (PROTO detail 1);
- a translation fault in either transfer (FAULT);
- a codec error (PROTO detail 2).

Each error ends the RPC with its status.

### Buffer sizes

| Engine | Input buffer | Output buffer |
|---|---|---|
| RxEngine | 1536 B (24 lines), the largest packet in the paper (1518 B) | 1664 B: 80 B header and slots plus 1536 B of string data, rounded to lines |
| TxEngine | 1664 B (so a reply echoing a 1518 B-request's value fits) | 1664 B |

### Wire format (Thrift binary protocol)

The paper's services use Thrift, so the codec speaks the Thrift binary
protocol, with big-endian fields:

```
80 01 00 TT | name length (4) | name | seqid (4) | { type (1) fid (2) value }* | 00
```

- TT = 1 (CALL) on receive, 2 (REPLY) on response.
- Scalar values are bool, byte, i16, i32, i64 and double, at 1–8 bytes.
- A string is a 4-byte length followed by its bytes.

### Decoded-object layout

The deserializer writes, and the serializer reads, this layout. It is little
endian, as x86 software reads it.

```
+0   func id (u32)      +4 seqid (u32)    +8 present-field mask (u32)   +12 total bytes (u32)
+16+8k  slot k (k < 8): a scalar, zero-extended to 64 bits,
                        or {len[63:32], offset[31:0]} for a string
+80  string data, packed in arrival order
```

The application reads an argument from slot k. It writes a result the same
way: slot 0 holds the Thrift "success" field. For a string result, its bytes
go at the offset that slot 0 names.

### Dispatch and the stubs

- **Dispatch** compares the method name and its length against
  `FUNC_NAMES` / `FUNC_NAME_LENS` and gives a function id.
- **recvFunction** is a table `RECV_SCHEMAS[func]`. It maps each wire
  field (id, type) to an argument slot. Unknown field ids are skipped, as
  Thrift does. A known id with the wrong type is skipped the same way.
- **respFunction** lists the result fields (`RESP_SCHEMAS[func]`) in order
  for the serializer. A field is emitted only if its bit is set in the
  present-field mask.

The compiled-in service:

| Id | Method | Arguments | Result |
|---|---|---|---|
| 0 | `set` | 1: string key, 2: string value | bool |
| 1 | `get` | 1: string key | string |
| 2 | `ComposeUniqueId` | 1: i64 req_id, 2: i32 post_type | i64 |

**To change the service**, edit `arcalis_pkg.sv` in four places:

- `NUM_FUNCS` and `FUNC_W`;
- `FUNC_NAMES` and `FUNC_NAME_LENS`, where entry 0 is the last in the list;
- `RECV_SCHEMAS` and `RESP_SCHEMAS`, built with `mk_schema`. For more than
  two fields per method, write the `schema_t` entries directly.

Names may be up to 16 bytes (`NAME_MAX`), and methods may have up to 8 fields
(`MAX_FIELDS`). No other file changes. The engine testbenches build their
packets from the same tables.

## The memory path

The memory path is shared by both engines and carries one transfer at a time:

1. **Arbiter**: round-robin between the RxEngine and the TxEngine. It holds
   a grant from `xfer_ack` until `xfer_end`.
2. **Address unit**: splits the transfer into 64 B lines. For each line it
   translates, allocates a ROB entry, and pushes {tag, load/store, PA, data}
   into the LD/ST queue. It takes at least 3 cycles per line on a TLB hit.
   It stops at the first translation fault; lines already issued still
   complete.
3. **TLB/MMU**: 16 entries, fully associative, tagged by ASID (0 = NetCore
   process, 1 = AppCore process, each with its own page-table root).
   - A miss walks the x86-64 four-level table: 9 bits per level; present bit
     0, writable bit 1, page-size bit 7.
   - It accepts 4 KB and 2 MB pages.
   - A missing entry, a 1 GB page, or a store to a read-only page is a
     fault.
   - `tlb_flush` empties it, which is the shootdown hook.
4. **ROB**: 16 entries. Completions arrive by tag in any order and retire in
   order. It keeps MemReqInFlight for each engine.
5. **LD/ST queue**: 8-entry FIFO. Loads never pass older stores.
6. **Cache**: 512 KiB, 8 ways, 64 B lines, 1024 sets.
   - A hit returns data in 2 cycles. A miss fills the line from the
     interconnect.
   - Stores are written through, with no allocate on a miss, so no line is
     ever dirty.
   - `inv_valid/inv_addr` drop a line another agent wrote.
   - It is blocking: one request at a time.

The reorder buffer matters even with a blocking cache. Page walks, misses and
write acknowledgements make completion order differ from issue order, and the
tests drive completions out of order.

## Parameters

The defaults are the paper's numbers where it gives them.

| Parameter (top) | Default | Source |
|---|---|---|
| `CACHE_BYTES` | 524288 | paper (512 KiB) |
| `CACHE_WAYS` | 8 | paper |
| line size | 64 B | paper (64-byte accesses) |
| `BUF_LINES` | 24 | paper's largest packet, 1518 B, rounded to lines |
| `TLB_ENTRIES` | 16 | this design |
| `ROB_DEPTH` | 16 | this design |
| `LSQ_DEPTH` | 8 | this design |

`CACHE_BYTES` may be 256 KiB or 2 MiB (the paper's sweep). It must give a
power-of-two set count.

## Verification

Every block has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints exactly one line, `TB_RESULT checks=N failures=M`, then calls
`$finish`. A watchdog ends a hung run with a failure. Stimulus is random via
`$urandom` and checked against a reference model written in the testbench.

| Testbench | What it checks | Checks |
|---|---|---|
| sci, cmd_decoder, forward_unit, ctrl_fsm | claiming, opcode selection, token semantics, descriptor pairing | 25 / 152 / 8 / 408 |
| engine_fsm | every Fig 14 transition | 16 |
| dispatch, recv_function, resp_function | table lookups | 13 / 5 / 4 |
| deserializer, serializer | random Thrift messages vs. a model; malformed input | 1271 / 904 |
| rx_engine, tx_engine | whole engines against a memory model with random latency, out-of-order returns and faults | 327 / 232 |
| arbiter, address_unit, rob, ldst_queue | random traffic, fairness, ordering, in-flight counts | 49751 / 18396 / 14595 / 8250 |
| tlb_mmu | random page tables with 4 KB/2 MB pages, faults, flush | 836 |
| cache | random traffic vs. a memory model, invalidations, victims | 10898 |
| top | full system; see below | 276 |
| workloads | the paper's workloads through the full tile | 6736 |

Each testbench was also run against a copy of its module with one deliberate
bug, such as a swapped field, an off-by-one full flag, or a lost decrement.
Every such copy makes its testbench fail.

### The end-to-end test (`tb_arcalis_top`)

This test runs the real tile against modelled parts:

- a NetCore and an AppCore issuing UC stores and loads;
- page tables for both processes, with 4 KB and 2 MB pages;
- an interconnect memory with a fixed latency on the cache and page-walk ports.

It runs set, get and ComposeUniqueId RPCs, including:

- destinations given late, which exercises IDLE_RESP;
- overlapping receive and response traffic, which exercises arbitration and
  DRAIN;
- unmapped pages, which produce a FAULT token, then a touch and a retry;
- an unknown method, which produces PROTO;
- a packet with an unknown field, which is skipped;
- a packet rewritten in place, which exercises cache invalidation;
- a TLB flush, a store to a read-only page, and accesses the snooper must
  ignore.

It checks every byte of every object and packet. It also counts the
mechanisms it saw: IDLE_RESP visits, DRAIN visits, arbiter contention and
cache hits. A typical run reports a set-request round trip of about 204
cycles.

### The workload test (`tb_arcalis_workloads`)

The AppCore model implements a key-value store. It runs:

- Memcached mixes at set/get = 20/80, 50/50 and 80/20 with k16_v32;
- memc_tiny (k8_v8) and memc_small (k16_v32) at set ratios of 50% and 5%;
- a packet-size sweep at 512, 1024 and 1518 B;
- 40 ComposeUniqueId calls;
- a core-to-accelerator latency sweep, adding 5, 400 and 700 ns each way to
  every UC command and reply, for memc k16_v32 and ComposeUniqueId.

Measured cycles per RPC, covering receive plus response through the engines
at 1 GHz:

| Workload | Cycles per RPC |
|---|---|
| memc k16_v32 (any mix) | ~290 |
| memc_tiny k8_v8 | 241 |
| packet 512 B | 824 |
| packet 1024 B | 1468 |
| packet 1518 B | 2088 |
| unique_id | 265 |
| latency 5 / 400 / 700 ns (either service) | ~330 / 4017 / 7017 |

Large packets cost about 1.3 cycles per byte, because the codec moves one byte
per cycle. With added latency, every RPC pays for about ten serial UC
accesses. That is the protocol above followed strictly, one command after
another, with nothing overlapped. These are cycle counts of this RTL with a modelled memory. They are
not the paper's measurements, which came from a full-system simulator.

### Running a testbench

Verilator 5 is enough:

```
verilator --binary --timing --assert -y rtl --top-module tb_arcalis_top \
          rtl/arcalis_pkg.sv tb/tb_arcalis_top.sv
./obj_dir/Vtb_arcalis_top
```

Replace `tb_arcalis_top` with any other testbench name. The package must be
listed first; `-y rtl` finds the rest. The random seed can be
changed with verilator's runtime option `+verilator+seed+N`. Testbenches that need small sizes
override module parameters themselves. The tile is always tested at its
full, paper-sized defaults.

## How far to trust it

- It builds with no warnings about circuit problems. The remaining lint notes
  are unused parameters and signals from shared tables. It synthesizes with
  yosys: about 15 k flip-flops plus 4.5 Mbit of memory, almost all of it the
  cache data array.
- The codec, the engines and the memory path are tested on random traffic
  against independent models. The tile is tested end to end with faults and
  overlap.
- Nothing was tested on real hardware or against a real Thrift peer. The
  Thrift byte layout was written from the protocol's published encoding.

## Where this design departs from, or goes beyond, the paper

The paper describes the architecture, not the circuit. These points are this
design's choices:

- **Opcode location**: the paper contradicts itself. Stores take the opcode
  from the word; loads take it from the address (see above).
- **Opcode numbers**, the status-word encoding, and the pairing of each
  command with a buffer all come from reading the paper's software listing.
  The paper gives names only.
- **The decoded-object layout** (header, 8-byte slots, string area) is
  invented here. The paper only says that deserialized data goes to the
  App. Recv buffer.
- **The method tables** (`set`, `get`, `ComposeUniqueId`) and their argument
  types come from the services the paper names. The paper gives no IDL.
- **The stubs are tables, not code.** recvFunction and respFunction here only
  map fields to slots. They do no service-specific computation; the paper
  says little about what its stubs compute.
- **Coherence** is reduced to a write-through cache with an invalidation
  input. There is no ownership protocol and no LLC-slice placement, and DCA
  from the NIC is outside the tile.
- **The cache is blocking** and serves one request at a time. The engines
  move one byte per cycle through the codec.
- **The address unit handles one transfer at a time**, and the arbiter
  shares it round robin. The paper only says there is an arbiter.
- **Fault recovery** releases the buffers and asks software to resend the
  whole RPC, rather than resuming mid-transfer.
- **The fixed/reconfigurable split** (ASIC versus eFPGA) is not modelled. All
  of the design is ordinary RTL.

### Not implemented

- The host cores, LLC, NIC, interconnect and DRAM. These are modelled in the
  testbenches only.
- PostStorageService (StorePost, ReadPost, ReadPosts). Its arguments are
  nested structs and lists, which the codec rejects as protocol errors.
  Supporting it needs struct/list handling in both codecs and new tables.
- Thrift struct, list, set and map field types, and the compact protocol.
- Queuing of more than one pending RPC per direction.
