# hXDP core: running XDP programs on an FPGA NIC

XDP programs are small eBPF programs. Linux runs them on every received
packet, before the network stack, and each one returns a verdict: drop, pass,
transmit back or redirect. This design runs the same programs inside the NIC,
on a soft processor built for them, so the host CPU never sees the packets
that are dropped or forwarded.

Its central idea is that eBPF code, once compiled into wide instruction
words, needs very little hardware:

- a four-lane VLIW core that executes eBPF almost unchanged;
- a packet store that the core reads and writes like memory;
- fixed-function helpers for map access, checksums and packet resizing.

A compiler on the host removes work the hardware makes unnecessary, such as
zeroing variables or bound checks. It also packs independent instructions
four to a row. Because the compiler schedules everything, the core has no
hazard detection.

The RTL is SystemVerilog. It runs in one clock domain, designed for a
156.25 MHz clock with 32-byte NIC frames.

## Block structure

```
 NIC input bus ──► PIQ ──► APS ─────────────────────────► output queue port
 (32 B frames)    input    ├ two packet banks               (frames, action, port)
                  queue    │  (frames + difference buffer
                           │   + scratch area)
                           │ data bus (packet, xdp_md)
                           ▼
               Sephirot VLIW core ◄── instruction memory (1024 rows x 4 slots)
               4 lanes, IF/ID/IE/commit
               registers r0..r10, 512 B stack
                   │ data bus (maps)         │ helper bus
                   ▼                         ▼
               maps memory ◄─────────── helper functions ──► APS (adjust, redirect)
               + configurator
```

| file | module | role |
|---|---|---|
| `rtl/hxdp_pkg.sv` | package | Constants, decoded-instruction struct, bus structs, decoder and encoder. |
| `rtl/hxdp_piq.sv` | `hxdp_piq` | Programmable input queue. Stores frames and keeps one descriptor per packet. |
| `rtl/hxdp_aps.sv` | `hxdp_aps` | Active packet selector: loading, core start, xdp_md context, exit handling, emission. |
| `rtl/hxdp_pkt_bank.sv` | `hxdp_pkt_bank` | One packet store: frame buffer, byte difference buffer, scratch area, boundary check. |
| `rtl/hxdp_sephirot.sv` | `hxdp_sephirot` | The VLIW core. |
| `rtl/hxdp_alu.sv` | `hxdp_alu` | eBPF ALU of one lane. |
| `rtl/hxdp_regfile.sv` | `hxdp_regfile` | 11 x 64-bit registers. Two read ports and one write port per lane. |
| `rtl/hxdp_stack.sv` | `hxdp_stack` | 512-byte stack. Has a 32-byte port for helpers. |
| `rtl/hxdp_imem.sv` | `hxdp_imem` | Instruction memory. |
| `rtl/hxdp_helpers.sv` | `hxdp_helpers` | Helper functions. |
| `rtl/hxdp_maps.sv` | `hxdp_maps` | Shared maps memory and its configurator. |
| `rtl/hxdp_top.sv` | `hxdp_top` | Connects all of the above. |

## Instruction set

A VLIW row is 256 bits: four standard 64-bit eBPF slots. Slot 0 runs on
lane 0, and so on. Each slot has the usual fields: `opcode[7:0]`, `dst[11:8]`,
`src[15:12]`, `off[31:16]`, `imm[63:32]`. An opcode of `0x00` is an empty
slot.

The extensions to eBPF, and how they are encoded here (the encodings are this
design's own):

| extension | encoding | meaning |
|---|---|---|
| three-operand ALU | `off[15]=1` | First operand is register `off[3:0]`, so `dst = reg(off[3:0]) op src/imm`. Removes the `mov` that two-operand eBPF needs. |
| 6-byte load/store | addressing mode `3'b111` (`0xE1`, `0xE3`) | Copies a MAC address in one instruction. |
| parametrised exit | `exit` (`0x95`) with `src=1` | The action is `imm`, so the program needs no `mov r0, action` first. |

Other details:

- `lddw` (`0x18`) takes its upper word from the next slot's `imm`. That slot is left empty.
- Branch offsets count rows: the target is `row + 1 + off`.
- Atomic add (`0xDB`, `0xC3`) is supported.
- `hxdp_pkg::enc()` builds a slot. The testbenches use it as a small assembler.

### Address map of the data bus

Bits `[31:28]` of a 32-bit address select the region:

| region | base | contents |
|---|---|---|
| 1 | `0x1000_0000` | xdp_md context. Offsets: `data` +0, `data_end` +4, `data_meta` +8 (equal to `data`), `ingress_ifindex` +12, `rx_queue_index` +16 (always 0). |
| 2 | `0x2000_0000` | Packet bank. A 64-byte scratch area comes first, then the packet. `data` is initially `0x2000_0040`. |
| 3 | `0x3000_0000` | Stack. At program start, `r10` = `0x3000_0200`. |
| 4 | `0x4000_0000` | Maps memory. Map lookups return pointers into this region. |

At program start `r1` holds `0x1000_0000`. The upper 32 bits of a pointer are
ignored.

## The Sephirot core

Four stages, one row per cycle:

- **IF.** Reads the row at `pc`, decodes the four slots and reads their
  register operands. The register file is write-through, so a value
  committed in this cycle is already seen.
- **ID.** Forwards results, forms load addresses and pre-fetches memory.
  The data bus is combinational, so every memory answers in the same cycle.
- **IE.** The ALU works, branch conditions are evaluated, store data is
  formed, and helper calls are issued.
- **commit.** Registers and memories are written.

The rules a program, or the compiler, must obey follow from that:

- **Forwarding is per lane.** A result moves from IE and from commit into
  the ID stage of the *same lane only*. Two dependent instructions may
  therefore sit in consecutive rows only if they are on the same lane.
  - Across lanes, the consumer must be at least three rows after the
    producer, when the producer's commit has reached the register file.
  - Nothing checks this. A violation reads a stale value.
- **Parallel branching.** All jumps in a row are evaluated together. If
  several are taken, the lowest-numbered lane wins. So a compiler puts the
  first test of an `if/else if` chain in lane 0.
  - A taken branch discards the two rows behind it (in IF and ID).
  - There is no prediction, and an untaken branch costs nothing.
- **Helper calls.** A call (at most one per row) stops IF, ID and IE until
  the helper block answers, four cycles later. `r0` receives the result,
  and the arguments are `r1`–`r5`.
- **Packet-pending stall.** The core starts once the first frame of a
  packet is in the bank. A load of bytes that have not arrived yet freezes
  the same three stages until they have. Programs normally read the front
  of the packet first, so this is rare.
- **Exit.** An exit is recognised in IF.
  - *Early exit.* A row that holds only a parametrised exit ends the
    program at once, as soon as no older row still has a store, jump or
    call in flight. This saves the three cycles the row would need to
    drain.
  - *Normal exit.* Any other exit row travels down the pipeline, with
    fetching stopped behind it. The program ends when that row commits,
    with the action from `imm` (parametrised) or from `r0`.
- **Self-reset.** At each start the registers are cleared (except `r1` and
  `r10`) and the stack is zeroed. Programs therefore need no zeroing code.

`ev_*` outputs pulse once per event, for performance counters. The events
are: forwarding used, branch taken, more than one branch taken, early exit,
packet stall and helper stall.

## Packet path (PIQ and APS)

**PIQ.** Accepts one 32-byte frame per cycle. `in_bytes` gives the bytes
valid in the last frame, where 0 means 32. The PIQ writes a descriptor
(first frame, frame count, length, port) when the last frame arrives. The
APS reads the head packet's frames by index and pops the packet when it is
done. When the frame store or the descriptor table is full, `in_ready` goes
low.

**APS.** Owns two packet banks. They alternate:

- one bank is read from the queue and then processed by the core;
- meanwhile the other emits the previous packet.

The packet selection:

- Packets are taken in FIFO order.
- Each gets a sequence number, so they start and leave in arrival order.
- Loading copies one frame per cycle.
- The core is started as soon as the oldest waiting packet has its first
  frame in a bank and the core is idle.

**Packet bank.** Keeps the received frames as they arrived. Writes from the
program do not modify frames. Instead they go to a byte-addressed
*difference buffer*, where a valid bit per byte makes that byte override
the frame byte. A 64-byte *scratch area* in front of the packet holds
headers prepended with `bpf_xdp_adjust_head`. Reads and emission merge
these three sources byte by byte.

The window `[data, data_end)` is the packet as the program sees it:

- Accesses outside the window read 0 and are not written.
- An access outside the window sets the sticky `oob` flag. This is the
  hardware boundary check that lets the compiler drop the verifier's
  bound checks.
- Reads and writes are 1, 2, 4, 6 or 8 bytes at any byte offset, on four
  lanes at once.

**Exit handling.**

- On `ABORTED` or `DROP` the bank is freed.
- On `PASS`, `TX` or `REDIRECT`, the window is emitted as merged 32-byte
  frames, once all frames have arrived.
  - The output carries the action and a port.
  - The port is the ingress port for `PASS`/`TX` and the helper's target
    for `REDIRECT`.
  - `out_bytes` is the byte count of the last frame.

## Maps and helper functions

**Maps memory.** All maps share one memory of 1024 rows of 64 bytes. At
load time a configurator table (8 entries) describes each map:

- array or hash;
- key size and value size;
- number of entries;
- first row.

One entry takes one row:

- An array entry holds its value from byte 0. The index is the first four
  key bytes.
- A hash entry holds the key (up to 32 bytes) in bytes 0–31 and the value
  in bytes 32–63, with a valid bit per row.
- The hash is `h = xor of the key's 32-bit words; h ^= h>>16; h ^= h>>7`,
  masked to the number of entries, which must be a power of two.
- Hash maps are direct-mapped. Inserting a key whose slot holds a different
  key fails with -1.

Because all 32 key bytes are compared at once, a lookup takes the same time
for any key size. Lanes can also read and write map values directly,
through the pointer a lookup returned. A host port reads and writes the
memory 8 bytes at a time.

**Helpers** (Linux helper numbers):

| id | helper |
|---|---|
| 1 | `map_lookup_elem` |
| 2 | `map_update_elem` |
| 3 | `map_delete_elem` |
| 23 | `redirect` |
| 28 | `csum_diff` |
| 44 | `xdp_adjust_head` |
| 51 | `redirect_map` |
| 65 | `xdp_adjust_tail` |

Any other id returns -1.

A call runs in three steps:

1. Read 32 bytes at the first pointer.
2. Read 32 bytes at the second pointer.
3. Execute.

`done` therefore rises in the fourth cycle after the request. Pointer
arguments (keys, values, `csum_diff` buffers) must point into the stack,
which has a 32-byte port for this. Other details:

- `csum_diff` accepts buffers of at most 32 bytes.
- `redirect_map` treats the map as an array of ports (a devmap). On a miss
  it returns the action given in its flags (`r3`).

## Resources and defaults

| parameter | default | from |
|---|---|---|
| lanes, registers, stack | 4, 11 x 64 bit, 512 B | the original design |
| frame size, clock | 32 B, 156.25 MHz | the original design |
| input queue `PIQ_FRAMES` | 512 frames (16 KiB), 64 packets | chosen |
| packet bank `BUF_FRAMES` | 48 frames (1536 B) + 64 B scratch, two banks | chosen |
| instruction memory `IMEM_ROWS` | 1024 rows = 4096 slots | chosen |
| maps `MAP_ROWS` x `MAP_ROW_B` | 1024 x 64 B = 64 KiB, 8 maps | chosen |

How the example programs fit:

- Every listed program is at most 283 instructions, so all of them fit
  the instruction memory.
- These fit at the defaults: `xdp1`, `xdp2`, `xdp_adjust_tail`,
  `rxq_info`, `redirect_map`, and the drop, forward, map-access and
  helper-call microbenchmarks.
- `router_ipv4` does not fit: it needs a longest-prefix-match map.
- `tx_ip_tunnel` does not fit: its hash values are larger than 32 bytes.
- Katran does not fit: its maps are far larger and of LRU type.
- For the simple firewall the number of flow entries is not known, so
  whether it fits cannot be said.

## Where this design departs from the original or fills gaps

- **Not included.** The compiler, the host driver, PCIe and the NIC's own
  queues. The top exposes plain ports instead: program load, map
  configuration, host map access, the input bus and the output frame port.
- **This design's own choices.** The following were chosen here:
  - the instruction encodings above;
  - the exact stage contents;
  - lane 0 as the highest branch priority;
  - the two-bank APS;
  - the map row layout, hash and collision policy;
  - the helper set and its 4-cycle latency;
  - all memory sizes except the stack.
- **Hash maps are direct-mapped.** A real hash map would handle collisions.
  Only array and hash maps are built. LPM-trie, LRU and per-CPU maps are
  not.
- **Division and modulo** are single-cycle combinational operators. They
  dominate the critical path of a lane. A real implementation would
  pipeline or omit them.
- **Memories are plain arrays.** They are written for readability: byte
  arrays with wide combinational read ports. A synthesis tool maps them to
  registers and multiplexers rather than block RAM. The full-size core is
  therefore very slow to synthesise in a generic flow, although it is
  correct for simulation.
- **Assertion reset warning.** The concurrent assertions use
  `disable iff (!rst_n)`. Verilator reports the reset as used both
  synchronously and asynchronously. The warning concerns only the
  assertions, not the logic.

## Simulating

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/hxdp_pkg.sv rtl/*.sv \
          tb/tb_hxdp_top.sv --top-module tb_hxdp_top
./obj_dir/Vtb_hxdp_top
```

| testbench | what it covers |
|---|---|
| `tb_hxdp_top` | The whole core at default sizes. Four 960-byte packets exercise every pipeline mechanism; the test checks the emitted packets and counts each mechanism. |
| `tb_hxdp_sephirot` | Hand-assembled programs for ALU, three-operand, 6-byte access, forwarding, loops, branch priority and flush, early exit, helper and packet stalls, atomic add, self-reset. |
| `tb_hxdp_aps` | Context fields, early start, head and tail adjustment, drop, ordered emission under back-pressure. |
| `tb_hxdp_pkt_bank`, `tb_hxdp_piq`, `tb_hxdp_maps`, `tb_hxdp_helpers`, `tb_hxdp_alu`, `tb_hxdp_regfile`, `tb_hxdp_stack`, `tb_hxdp_imem` | Each against a reference model, with random data from `$urandom`. |

Programs in the testbenches are lists of `enc(opcode, dst, src, off, imm)`
slots grouped four to a row. They follow the scheduling rules above, which
is the easiest way to learn them.
