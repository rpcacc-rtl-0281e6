# An RPC accelerator on the PCIe NIC: target-aware deserialization, memory-affinity serialization and reconfigurable compute units

Remote procedure calls spend much of their CPU time turning Protobuf wire
bytes into in-memory objects and back. Moving that work onto a PCIe-attached
NIC looks attractive, but PCIe is slow for exactly what deserialization and
serialization do. Deserialization produces many small writes. Serialization
chases pointers through nested objects. And a user kernel running next to the
NIC wants its data in the NIC's memory, not across the bus.

This RTL implements an accelerator built around three answers to that:

* **Target-aware deserialization.** Every field of every message class carries
  one bit saying where its decoded value should live: host memory, or the
  accelerator's own off-chip memory (HBM).
  * Accelerator-bound fields are written straight to HBM.
  * Host-bound fields are collected in a 4 KB on-chip *temp buffer* that
    mirrors one 4 KB chunk of host memory. The buffer goes out as a single DMA
    burst when the request is finished, or earlier if the chunk fills up
    ("one-shot DMA write").
* **Memory-affinity serialization.** The host does the cheap part first. It
  copies its own fields into one contiguous buffer without encoding them, and
  writes only a pointer and a length for fields that live in HBM. The
  accelerator then reads that buffer in one DMA read and does all the varint
  encoding. It fetches the HBM-resident fields locally, assembles the message
  in an on-chip *TX Arena* and hands it to the transport.
* **Compute units with automatic field placement.** User kernels sit in
  reconfigurable regions behind a small shell:
  * a descriptor ring filled by `submitTask` MMIO writes;
  * a notification ring in host memory that the host can `poll`.

  When software moves a field between host and HBM (`moveToAcc` /
  `moveToCPU`), the accelerator copies the data and also flips that field's
  placement bit. Later requests of the same class then land where the data
  is actually used.

All blocks are synthesizable SystemVerilog. The transport (RoCEv2), the PCIe
controller, the HBM controller and the user kernels are outside the design and
appear as ports of the top module.

## Block map

```
 transport RX bytes ──► rx_dispatcher ──► 4 × deserializer ──┬─► acc_mem_arbiter ──► HBM port
                          (FIFO, picks       │   │  │        │        ▲  ▲  ▲
                           an idle lane)     │   │  └ temp_buffer     │  │  │
                                             │   └ schema_stack       │  │  │
              schema_table ◄─── lookups ─────┘                        │  │  │
              free_list_fifo ×2 (host / acc chunks) ──► lanes         │  │  │
                                                                       │  │  │
   lanes' DMA bursts ─► dma_wr_arbiter ─► tlb ─► dma_wr_arbiter ─► PCIe DMA write
                                                   ▲        ▲                  │  │
                                   field_mover ────┘        └── 4 × cu_shell ──┘  │
                                        │  (schema Acc-bit update)    ▲ kernels   │
   host MMIO ─► register decode ────────┴─► serializer + tx_arena ────┴───────────┘
                                              │ DMA read (dma_rd_arbiter)
                                              └─► transport TX (64-bit stream)
```

| module | role |
|---|---|
| `rpcacc_top` | MMIO decode; instantiates and connects everything |
| `rx_dispatcher` | 4096-byte request FIFO; assigns each whole request to an idle lane (round robin) |
| `deserializer` | one lane: header and wire-format parser, object builder, placement, one-shot flush |
| `schema_table` | 64 classes × 16 fields: type, sub-message class, Acc bit |
| `temp_buffer` | per-lane 4 KB SRAM mirroring the lane's current host chunk |
| `schema_stack` | per-lane stack of parent contexts for nested messages (16 deep) |
| `free_list_fifo` | free 4 KB chunks of the host region and of the HBM region |
| `tlb` | 16K-entry translation of the virtually contiguous host receive region |
| `serializer` | encodes the host's pre-serialized records into the TX Arena |
| `tx_arena` | 16 KB byte-addressed SRAM holding the outgoing message |
| `cu_shell` | one compute unit's descriptor ring, input/output movers and notification |
| `field_mover` | moveToAcc / moveToCPU copies plus the schema Acc-bit update |
| `acc_mem_arbiter`, `dma_wr_arbiter`, `dma_rd_arbiter` | round-robin sharing of the HBM, DMA-write and DMA-read ports |
| `sync_fifo` | helper FIFO |
| `rpcacc_pkg` | shared types, the varint encoder and the round-robin pick function |

## Data formats

The original design does not specify its encodings. These are the choices made
here, defined in `rpcacc_pkg`.

**RPC header (8 bytes, little endian).**

| byte | content |
|---|---|
| 0 | message class |
| 1–3 | request id |
| 4–7 | body length |

The body is standard Protobuf wire format. The same header is put in front of
each response.

**In-memory object.** Every message object is 128 bytes: 16 slots of 8 bytes.

* Slot 0 holds presence bits: bit *n* is set when field *n* was seen.
* Slot *n* holds field *n*:
  * a varint or fixed field holds its value, zero-extended;
  * a bytes field or sub-message field holds a pointer word
    `{in_acc[63], length[62:48], address[47:0]}`.

Bit 63 is what the host library's `isInAcc()` tests. Addresses in host memory
are virtual, inside the receive region covered by the TLB. Field numbers 1–15
are stored. Higher or unknown field numbers are parsed and skipped.

**Pre-serialized record stream (host → serializer).** A stream of 64-bit words.
Each record starts with a header word `{kind[63:61], field_no[60:32], len[31:0]}`.

| kind | name | what follows the header word |
|---|---|---|
| 0 | PAD | nothing; ignored |
| 1 | VARINT | one word holding the raw value |
| 2 | FIXED64 | one word holding the value |
| 3 | FIXED32 | one word, value in bits 31:0 |
| 4 | BYTES | `len` bytes, padded to whole words |
| 5 | BYTES_ACC | one word holding the HBM address of `len` bytes |
| 6 | SUBMSG | nothing; `len` is the encoded length of the nested message, and the nested records follow |

The host computes the sub-message lengths while it walks the object. The
accelerator only encodes.

**Compute-unit notification entry.** One 8-byte word `{done[63], 31'b0, result_length[31:0]}`.

**MMIO.** Each command is one 256-bit write-combined store:

| address | command | data |
|---|---|---|
| 0x00 | schema entry | `{entry[19:10], field[9:6], class[5:0]}` |
| 0x01 | TLB base page | bits [51:0] |
| 0x02 | TLB entry | `{valid[66], ppn[65:14], index[13:0]}` |
| 0x03 | free host chunk | virtual base address |
| 0x04 | free HBM chunk | base address |
| 0x05 | serialize | `ser_cmd_t` |
| 0x06 | field move | `move_cmd_t` |
| 0x10+i | submit a task to CU i | `cu_desc_t` |
| 0x20+i | notification-ring base of CU i | address |

A submit answers one cycle later on `mmio_resp` with the address of the
notification entry to poll.

## How a lane deserializes

The lane is one finite-state machine that handles one input byte per cycle.
This is the part worth reading slowly.

1. **Chunks.** Before a request starts, the lane makes sure it owns one host
   chunk and one HBM chunk. It takes them from the free lists.
   * Chunks are kept across requests until they fill, so small requests share
     a chunk.
   * The temp buffer mirrors the host chunk byte for byte: offset *k* of the
     buffer is offset *k* of the chunk.
   * Two pointers track the buffer: what has been written, and what has
     already been flushed.
2. **Header.** The lane reads the class and length from the header. It then
   allocates the root object in the host chunk, or in the HBM chunk if the
   class is placed there.
3. **Fields.** The lane decodes each tag varint and looks up (class, field)
   in the schema table, which answers combinationally.
   * **Scalar fields** go into the slot of the object being built. That
     object is held in registers, 16 × 64 bits.
   * **Bytes fields** are appended to the buffer selected by the Acc bit: the
     temp buffer, or HBM writes with byte strobes. Data is aligned to 8
     bytes. The slot receives a pointer word.
   * **Sub-messages**: the lane pushes the whole parent context onto the
     stack (object image, class, end position, placement). It then allocates
     the child object in the memory the Acc bit names and continues parsing
     inside it.
4. **Closing an object.** When the byte count reaches an object's end, the
   lane writes the object image to its memory. It then pops the parent and
   stores the child pointer in the parent's slot.
5. **Chunk full.** If a field or object does not fit in the rest of a chunk:
   * the host chunk is flushed to host memory as one DMA burst, and a new
     chunk is taken;
   * an HBM chunk is simply replaced, because HBM data was written directly.

   A single field larger than a chunk ends the request with the error flag
   set.
6. **Finishing.** At the end of the request the unflushed part of the temp
   buffer goes out as **one** DMA burst: the one-shot write. After that the
   completion `{class, request id, root pointer, error}` is offered on the
   notification port.

All host-bound DMA beats pass through the TLB, which maps the virtual
receive region to physical pages. One lane has one access in flight to each
memory port. Four lanes run in parallel.

## How a response is serialized

The host writes a serialize command with the buffer address, its length in
words, the class and the request id. The serializer then:

* issues one DMA read for the whole buffer;
* walks the records, emitting `tag`, then `value` or `length`, into the TX
  Arena at up to 16 bytes per cycle;
* reads BYTES_ACC data word by word from HBM;
* writes the 8-byte header at offset 0 once the body length is known;
* streams the arena out to the transport as 64-bit words with byte-keep and
  `last`.

A message longer than the arena sets `ser_overflow`.

## Compute units

Each `cu_shell` queues submitted descriptors (input address, input size,
output address, output buffer size) in a 16-entry ring. When it is idle, it
runs the next descriptor:

1. It streams the input from HBM to the kernel.
2. It writes the kernel's output stream to HBM, truncated at the output
   buffer size.
3. It writes the notification entry (done bit and the number of bytes
   actually written) to host memory with one DMA write.

The slot used for a task is the one whose address went back to the host at
submit time.

## Differences from the original design

* **Serializer width.** The original encodes 512 bits of pre-serialized data
  per cycle. This serializer takes one 64-bit word per cycle. The record
  format is the same kind of stream, so widening the word is a local change
  to `serializer`.
* **Sizes the original leaves open**, chosen here:

  | item | size |
  |---|---|
  | schema geometry | 64 × 16 |
  | nesting depth | 16 |
  | free-list depth | 1024 chunks |
  | TX Arena | 16 KB |
  | request FIFO | 4096 bytes |
  | descriptor ring | 16 entries |
  | number of CUs | 4, as drawn in the architecture figure |

* **Chunk and buffer sizes are fixed at build time.** The original lets
  software choose the chunk size when the system starts. Here it is the
  `CHUNK_BYTES` parameter, 4 KB by default, and the temp buffer follows it.
* **Repeated fields** are not collected into arrays: the last occurrence wins.
* **Field and message size limits.**
  * Fields longer than one chunk (4 KB) are rejected.
  * Responses longer than the arena overflow.
  * Very large flat messages therefore do not fit. One Protobuf benchmark
    message of 1.6 MB is an example.
* **Schema use by the serializer.** In the original, the serializer also
  reads the schema table. Here the pre-serialized records carry field numbers
  and kinds, so the serializer does not.
* **Not included**, because each is a vendor or user component:
  * the RoCEv2 transport;
  * the PCIe endpoint;
  * the HBM controller;
  * the kernels themselves and their partial-reconfiguration loading
    (`program()`, `getType()`);
  * the host compiler and library.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.
`tb_rpcacc_top` runs the complete design at its default parameters:

* It programs schema, TLB, free lists and notification rings over MMIO.
* It sends requests one at a time and back to back. It walks every object
  graph from the returned root pointer through its own page table.
* It checks one-shot bursts and chunk-full flushes.
* It runs a moveToAcc / moveToCPU pair and checks that the next request's
  placement follows.
* It runs one task on each of the four CUs, on a deserialized HBM field.
* It serializes a response that mixes inline records, a sub-message header,
  a deserialized HBM field and a CU's output. It compares the result with an
  independent encoding.

To run any testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rpcacc_top \
          -Irtl rtl/rpcacc_pkg.sv -y rtl tb/tb_rpcacc_top.sv
./obj_dir/Vtb_rpcacc_top +verilator+rand+reset+2
```

Replace the top-module name and file to run another testbench. The whole-design
testbench builds in under a minute and runs in well under a second, so it runs
the design at full size: every parameter at its default, which is the largest
size simulated. `-Wno-fatal` keeps Verilator's style warnings (unused bits of
command words, unconnected status outputs) from stopping the build. The
`+verilator+rand+reset+2` option randomizes uninitialised state, which shows
up anything that depends on reset values.
