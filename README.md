# LaKe in SystemVerilog: a memcached cache inside a NIC datapath

LaKe puts a key-value cache in an FPGA NIC, in front of a memcached server. Every
memcached GET that arrives from the network is answered by the card if the key is
stored there. Only misses reach the host, and the card learns from the host's
answer so it can serve the next request for that key. SET and DELETE requests go
to both the card and the host, so the two copies stay the same. Other traffic
goes through the NIC's normal switch path untouched.

This RTL builds the card-side datapath: the packet path from the five receive
inputs to the transmit output, and the key-value engine between them. The
engine has several processing elements, a hash table and data store in DRAM, a
shared on-chip cache in front of the DRAM, a slab allocator with free lists in
SRAM, and a small CAM that remembers outstanding misses. The MACs, the DMA
engine, the output port lookup and queues, and the DRAM and SRAM controllers are
not built here. Their interfaces are ports of `lake_top`. The testbenches provide
behavioural DRAM and SRAM models.

## Datapath (`lake_top`)

```
rx[0..3] (MACs), rx[4] (host DMA)
   -> input_arbiter       round robin per packet, writes the source port into tuser
   -> packet_classifier   normal path / engine path / both
        normal ------------------------------------------+
        engine -> lake_module -> GET replies, misses ----+-> output_arbiter -> tx
```

The classifier sends a packet to the engine, to the normal path, or to both:

| packet | engine | normal path |
|---|---|---|
| memcached GET request | yes | no |
| SET or DELETE request | yes | yes, so the host updates too |
| host's GET reply (status 0) | yes, to fill the cache | yes, it goes to the client |
| anything else, or too long, or key over 64 B | no | yes |

The memcached port is 11211. The packet must be Ethernet/IPv4 (no options)/UDP,
with the 8-byte memcached UDP frame header and the 24-byte binary header.

**Drop instead of stall.** The engine's input buffer (`axis_fifo`, 40 beats)
reports `room` while it can take a full-size packet of 10 beats. When it has no
room, the classifier drops the engine copy of the packet and counts it in
`mc_drops`. It never holds back the shared input, so normal traffic is never
stalled by a busy engine. A dropped GET is lost; the client's memcached retry
handles it. A dropped SET copy still reaches the host, so the host stays correct
but the card may keep an old value until it is evicted or rewritten. The output
arbiter gives strict priority to normal traffic at packet boundaries.

Packets from the engine carry `tuser.dst_set = 1` and their output port:
`src_port` for a reply and 4 (DMA) for a miss. Normal packets leave with
`dst_set = 0`, and the external output port lookup sets their port.

## Processing element (`pe`)

Each element takes one whole packet (at most 10 beats of 64 bytes), works on it
alone, and has at most one memory request outstanding. It uses these
combinational helpers:

- `packet_parser` pulls out the opcode, opaque, ports, key and value.
- `crc32_hash` hashes the key at 4 bytes per clock.
- `hash_table_access` decodes and updates one bucket.
- `key_value_access` compares a stored key and assembles or splits a chunk.
- `packet_deparser` builds the GET reply.

### Hash table and chunks

A bucket is one 512-bit DRAM line holding eight 64-bit descriptors, so the
bucket is 8-way set associative. The bucket index is `crc32(key)[HT_IDX_W-1:0]`,
and the default is 2^25 buckets (268M descriptors, 2 GiB).

| descriptor bits | meaning |
|---|---|
| 63 | reserved |
| 62 | valid |
| 61:47 | value length |
| 46:32 | key length |
| 31:0 | byte address of the chunk |

The descriptor layout is Fig. 4 of the original design. A chunk stores the key
followed by the value, starting at byte 0. It is at most 512 bytes.

### GET

1. Read the bucket.
2. Candidate ways are those that are valid and whose key length matches.
3. For each candidate in turn, read the chunk's first line and compare the key.
4. On a match, read the remaining value lines and send the reply. The reply
   swaps the MAC, IP and port fields and sets magic 0x81. It carries 4 bytes of
   extras (flags = 0) and the value, and its IP checksum is recomputed.
5. If no candidate matches, it is a miss. Store `{opaque, client UDP port}` in
   the CAM (OP_LEARN), then forward the request unchanged to the host.

### Host reply (fill)

The host's reply does not carry the key. The element looks up
`{opaque, client port}` in the CAM, which releases the entry. On a hit it gets
the key back and stores key and value as a SET would. If the reply matches no
CAM entry, the element ignores it.

### SET

1. Look up the key as a GET does.
2. If the key is present and the new size is in the same slab class, rewrite the
   chunk in place.
3. Otherwise, free the old chunk and allocate a new one.
4. A new key takes the lowest free way of the bucket. If the bucket is full, it
   evicts way `hash[HT_IDX_W+2:HT_IDX_W]` and frees that way's chunk.
5. Write the chunk lines, then the bucket line.
6. If the allocator has no chunk of the class, the SET is dropped on the card
   and counted as `alloc_fail`. The host copy is unaffected.

### DELETE

Clear the descriptor's valid bit and return the chunk to the free list.

Events (hit, miss, set, delete, fill, evict, alloc_fail) are pulsed and summed
into `stats`.

## Element network and memory network

`pe_network` hands each arriving packet to an idle element. It searches round
robin over the first `num_active_pe` elements, so the number in use can be
changed at run time. An `input_arbiter` instance merges the element outputs.
`mem_network` has one round-robin arbiter for each target: the shared cache,
the slab allocator and the CAM. It routes each response back by the element
number carried in the request.

## Shared cache (`shared_cache`)

The cache has 1024 lines of 64 bytes and is direct mapped. It sits in front of
the DRAM port.

- Writes go through to DRAM and also allocate the line in the cache.
- A read hit answers 2 clocks after the request is accepted.
- A miss waits for the DRAM.
- After reset, the cache clears its valid bits for 1024 clocks before it
  accepts requests.

The cache is shared by all elements and holds both buckets and chunks, so the
two can evict each other.

## Slab allocator (`slab_allocator`)

There are four chunk classes: 64, 128, 256 and 512 bytes. Each class owns a
512 MiB region of the data store. The free addresses of each class are kept in
a circular queue in external SRAM; together the queues hold 4,718,592 32-bit
entries, the 18 MB the original design uses. Chunks that have never been used
come from a counter per class, so the free lists need no initialisation.

A small prefetch FIFO per class (8 entries) is kept full from the SRAM. An
allocation is then answered without waiting for the SRAM. A free writes the
address back to the SRAM queue. An allocation with no chunk left anywhere
returns `ok = 0`.

## Timing

The core clock is 200 MHz.

- **One element, warm GET hit:** 24 clocks from the first beat in to the last
  beat out, with a 4-byte key and 8-byte value and both lines in the cache.
  That is 8.3 Mq/s, above the 3.3 Mq/s per element of the original design.
- **Five elements, hits under overload:** `tb_lake_top_full` measures one reply
  every 4.3 clocks. The target is 13.1 Mq/s, one reply every 15.3 clocks.
- **Misses:** they cost one DRAM round trip per line. The DRAM model uses 23
  clocks (115 ns).

## Where this RTL departs from the original design

- **Interconnect:** the buses between elements and memories are simple
  valid/ready networks with one outstanding request per element, not the
  vendor interconnect.
- **This design's own choices:**
  - the chunk layout (key, then value)
  - the eviction way
  - rewriting in place when the slab class is unchanged
  - the class sizes and their region split
  - the CAM size (64) and its round-robin replacement
  - the 1024-line direct-mapped cache
  - the input buffer depth
- **Data store capacity:** the 4-class split gives 15.7M chunks (8.4M of
  64 B), not the 33M 64-byte chunks of a data store that uses only 64-byte
  chunks.
- **Reply contents:** GET replies carry flags 0 and UDP checksum 0. CAS is not
  kept.
- **Memcached commands:** only GET, SET and DELETE are handled. Other commands
  take the normal path.
- **Energy:** power and energy figures of the original design cannot be checked
  in RTL simulation.

## Files and simulation

- `rtl/lake_pkg.sv` holds the shared types and constants. Every other file in
  `rtl/` is one module.
- `tb/tb_util_pkg.sv` builds memcached packets and the expected replies.
- `tb/dram_model.sv` and `tb/sram_model.sv` are the behavioural memories.
- Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
  `TB_RESULT checks=N failures=M`.
- `tb_lake_top` runs the whole datapath with a 4-bucket hash table and small
  free lists, so that evictions and allocation failures happen. It counts every
  mechanism and fails if one never occurs: hit, miss, fill, set, delete,
  eviction, allocation failure, drop, cache hit and miss, back-pressure, output
  priority, and a change of `num_active_pe`.
- `tb_lake_top_full` runs the default sizes.

To simulate one testbench:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  -y rtl -y tb rtl/lake_pkg.sv tb/tb_util_pkg.sv tb/tb_lake_top.sv --top-module tb_lake_top
./obj_dir/Vtb_lake_top
```

The simulator has only two states, so every register that is read is reset.
