// lake_pkg: types and constants shared by the key-value store datapath.
//
// Packets travel as AXI-Stream beats of 64 bytes (512 bits), byte 0 of the
// packet in tdata[7:0]. Beside tdata/tkeep/tlast each beat carries a small
// metadata word with the port the packet came from and, for packets produced
// by the key-value engine, the port it must leave on. The 512-bit width is this
// design's choice (it equals the memory network width); the packet format is
// Ethernet II / IPv4 without options / UDP / 8-byte memcached UDP frame header /
// 24-byte memcached binary header, so every field the classifier needs lies in
// the first beat.
//
// The memory network carries one request struct and one response struct.
// Three targets hang off it: the shared cache in front of DRAM, the slab
// allocator in front of SRAM, and the CAM look-up table.
package lake_pkg;

  localparam int unsigned DATA_W    = 512;
  localparam int unsigned KEEP_W    = DATA_W / 8;
  localparam int unsigned PKT_BEATS = 10;                 // packet buffer depth in beats
  localparam int unsigned PKT_BYTES = PKT_BEATS * KEEP_W; // 640 bytes
  localparam int unsigned MAX_KEY   = 64;                 // bytes; key fits one chunk line
  localparam int unsigned CHUNK_MAX = 512;                // largest slab chunk, bytes
  localparam int unsigned LINE_BYTES = 64;                // memory network / DRAM line

  // Byte offsets of the fields used (Ethernet 14 + IPv4 20 + UDP 8 + frame 8).
  localparam int unsigned OFF_ETYPE  = 12;
  localparam int unsigned OFF_IPLEN  = 16;
  localparam int unsigned OFF_IPPROT = 23;
  localparam int unsigned OFF_IPCSUM = 24;
  localparam int unsigned OFF_SRCIP  = 26;
  localparam int unsigned OFF_DSTIP  = 30;
  localparam int unsigned OFF_SPORT  = 34;
  localparam int unsigned OFF_DPORT  = 36;
  localparam int unsigned OFF_UDPLEN = 38;
  localparam int unsigned OFF_UDPCS  = 40;
  localparam int unsigned OFF_FRAME  = 42;
  localparam int unsigned OFF_MAGIC  = 50;
  localparam int unsigned OFF_OPCODE = 51;
  localparam int unsigned OFF_KEYLEN = 52;
  localparam int unsigned OFF_EXTLEN = 54;
  localparam int unsigned OFF_STATUS = 56;
  localparam int unsigned OFF_BODYLEN = 58;
  localparam int unsigned OFF_OPAQUE = 62;
  localparam int unsigned OFF_CAS    = 66;
  localparam int unsigned OFF_EXTRAS = 74;

  localparam logic [15:0] MC_PORT    = 16'd11211;
  localparam logic [7:0]  MAGIC_REQ  = 8'h80;
  localparam logic [7:0]  MAGIC_RSP  = 8'h81;
  localparam logic [7:0]  OPC_GET    = 8'h00;
  localparam logic [7:0]  OPC_SET    = 8'h01;
  localparam logic [7:0]  OPC_DELETE = 8'h04;

  // Port numbers in the metadata: 0..3 are the 10G MACs, 4 is the host DMA.
  localparam logic [2:0]  PORT_DMA   = 3'd4;

  // DRAM map (byte addresses): hash table in the lower 2GB, data store above.
  localparam logic [31:0] HT_BASE = 32'h0000_0000;
  localparam logic [31:0] DS_BASE = 32'h8000_0000;

  typedef struct packed {
    logic [2:0] src_port;
    logic [2:0] dst_port;
    logic       dst_set;   // dst_port is meaningful (set by the key-value engine)
  } meta_t;

  typedef struct packed {
    logic [DATA_W-1:0] tdata;
    logic [KEEP_W-1:0] tkeep;
    logic              tlast;
    meta_t             tuser;
  } axis_beat_t;

  // Hash table descriptor, 64 bits (bit 63 reserved, 62 valid, 61:47 value
  // length, 46:32 key length, 31:0 chunk address).
  typedef struct packed {
    logic        reserved;
    logic        valid;
    logic [14:0] vlen;
    logic [14:0] klen;
    logic [31:0] addr;
  } desc_t;

  typedef enum logic [1:0] {T_DRAM = 2'd0, T_SLAB = 2'd1, T_CAM = 2'd2} mem_target_e;
  localparam int unsigned NUM_TARGETS = 3;

  typedef enum logic [2:0] {
    OP_READ   = 3'd0,  // DRAM line read  (addr = byte address, 64B aligned)
    OP_WRITE  = 3'd1,  // DRAM line write (data)
    OP_ALLOC  = 3'd2,  // slab: get a free chunk of class cls
    OP_FREE   = 3'd3,  // slab: return chunk addr of class cls
    OP_LEARN  = 3'd4,  // CAM: store key (data, len) under tag
    OP_LOOKUP = 3'd5   // CAM: fetch key stored under tag
  } mem_op_e;

  typedef struct packed {
    mem_target_e     target;
    mem_op_e         op;
    logic [3:0]      id;      // requesting PE
    logic [31:0]     addr;
    logic [1:0]      cls;
    logic [47:0]     tag;     // {opaque, client UDP port}
    logic [7:0]      len;
    logic [DATA_W-1:0] data;
  } mem_req_t;

  typedef struct packed {
    logic [3:0]      id;
    logic            ok;      // CAM hit / allocation succeeded
    logic [31:0]     addr;
    logic [7:0]      len;
    logic [DATA_W-1:0] data;
  } mem_rsp_t;

  // Fields extracted by the packet parser.
  typedef struct packed {
    logic        is_mc;      // IPv4/UDP to or from the memcached port, valid magic
    logic        is_req;     // magic 0x80
    logic [7:0]  opcode;
    logic [15:0] status;
    logic [15:0] key_len;
    logic [7:0]  ext_len;
    logic [31:0] body_len;
    logic [31:0] opaque;
    logic [15:0] sport;
    logic [15:0] dport;
    logic [15:0] value_len;
    logic [MAX_KEY*8-1:0] key;
  } parsed_t;

  // Event counters kept by the key-value engine.
  typedef struct packed {
    logic [31:0] get_hit;     // GET answered from the card
    logic [31:0] get_miss;    // GET forwarded to the host (key learned)
    logic [31:0] set_done;    // SET stored
    logic [31:0] del_done;    // DELETE that removed a key
    logic [31:0] fill_done;   // host GET reply stored under its learned key
    logic [31:0] evict;       // SET into a full bucket replaced a way
    logic [31:0] alloc_fail;  // no free chunk in the slab class
  } stats_t;

  typedef struct packed {
    logic get_hit, get_miss, set_done, del_done, fill_done, evict, alloc_fail;
  } pe_events_t;

  // Slab class for a chunk of n bytes: 64, 128, 256 or 512.
  function automatic logic [1:0] slab_class(input logic [15:0] n);
    if (n <= 16'd64)       return 2'd0;
    else if (n <= 16'd128) return 2'd1;
    else if (n <= 16'd256) return 2'd2;
    else                   return 2'd3;
  endfunction

  function automatic logic [15:0] class_bytes(input logic [1:0] c);
    return 16'd64 << c;
  endfunction

endpackage
