// pe: one processing element of the key-value engine.
//
// An element takes one memcached packet at a time from the PE network into its
// packet buffer, works on it, and either emits one packet (a GET reply to the
// client, or the request forwarded to the host) or consumes it silently. All
// storage it uses is shared and reached through the memory network: DRAM
// lines through the shared cache (hash-table buckets and key-value chunks), the
// slab allocator (free chunks) and the CAM look-up table (keys of GETs sent to
// the host).
//
// Operation, following the paper's PE pipeline (parser, hash, hash-table
// access, key-value access, memory allocator, deparser):
//   1. Receive the packet into the buffer and parse it (packet_parser).
//   2. For a GET reply from the host, fetch its key from the CAM by
//      {opaque, client UDP port}; without a hit it is dropped.
//   3. CRC-32 the key (crc32_hash); bucket = hash[HT_IDX_W-1:0], one 64-byte
//      DRAM line of eight descriptors at HT_BASE + 64 * bucket.
//   4. For each valid way with the same key length, read the first chunk line
//      and compare the key (hash_table_access, key_value_access).
//   5. GET hit: read the remaining chunk lines and send the reply built by
//      packet_deparser back to the requester. GET miss: learn the key in the
//      CAM, then forward the request to the host (DMA port).
//      SET / host reply: rewrite the chunk in place if the slab class is
//      unchanged, else free the old chunk and allocate a new one; a new key
//      takes the first free way, or evicts way hash[HT_IDX_W+2:HT_IDX_W]
//      (freeing its chunk). Chunk lines are written, then the bucket.
//      DELETE: clear the descriptor, write the bucket, free the chunk.
// SET and DELETE requests and host replies are also delivered to the host on
// the normal path by the classifier, so the element sends nothing for them.
// The choices of chunk layout, eviction way and in-place rewrite are this
// design's; the paper gives the pipeline and the hash-table format.
//
// Interface: AXI-Stream in (s_*) and out (m_*), one memory-network request
// port (valid/ready) and its response (valid, always accepted; one request
// outstanding). busy is high from the first beat received until the packet is
// finished. ev pulses one bit per finished operation type.
module pe
  import lake_pkg::*;
#(
  parameter int unsigned PE_ID    = 0,
  parameter int unsigned HT_IDX_W = 25
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat,
  output mem_req_t   req,
  output logic       req_valid,
  input  logic       req_ready,
  input  mem_rsp_t   rsp,
  input  logic       rsp_valid,
  output logic       busy,
  output pe_events_t ev
);

  localparam int unsigned PB = PKT_BYTES * 8;
  localparam int unsigned CB = CHUNK_MAX * 8;

  typedef enum logic [1:0] {K_GET, K_SET, K_DEL, K_FILL} kind_e;
  typedef enum logic [4:0] {
    S_RX, S_PARSE, S_CAM_R, S_HASH_GO, S_HASH_W, S_SCAN_INIT, S_SCAN_LOAD, S_SCAN, S_KEY_CHK,
    S_VAL_RD, S_VAL_ST, S_REPLY, S_LEARN, S_FWD, S_INSERT, S_SET_FOUND, S_ALLOC,
    S_ALLOC_R, S_WR_CHUNK, S_WR_BKT, S_DEL, S_MEM, S_MEMW, S_DONE
  } state_e;

  state_e state, ret_state;
  kind_e  kind;

  // Packet buffer
  logic [PB-1:0]      pbuf;
  logic [3:0]         rx_cnt;
  logic [KEEP_W-1:0]  last_keep;
  logic [2:0]         src_port;
  logic [3:0]         tx_i;

  // Working registers
  parsed_t            f, fq;
  logic [MAX_KEY*8-1:0] key_q;
  logic [7:0]         klen_q;
  logic [15:0]        vlen_q;
  logic [31:0]        hash_q;
  logic [DATA_W-1:0]  bucket_q;
  logic [7:0]         cand_q;
  logic [2:0]         cur_way, way_q;
  desc_t              fdesc, desc_q;
  logic [CB-1:0]      cbuf;
  logic [3:0]         line_i;
  logic [31:0]        new_addr;
  mem_rsp_t           rsp_q;

  packet_parser u_parse (.pkt(pbuf), .f(f));

  // Hash
  logic        h_busy, h_done;
  logic [31:0] h_out;
  crc32_hash #(.MAX_KEY(MAX_KEY)) u_hash (
    .clk, .rst_n, .start(state == S_HASH_GO), .key(key_q), .key_len(klen_q),
    .busy(h_busy), .done(h_done), .hash(h_out));

  // Bucket
  logic [7:0]  cand;
  logic [2:0]  free_way;
  logic        has_free;
  desc_t       way_desc [8];
  logic [DATA_W-1:0] bucket_out;
  hash_table_access #(.WAYS(8)) u_hta (
    .bucket(bucket_q), .key_len(15'(klen_q)), .cand, .free_way, .has_free, .way_desc,
    .wr_way(way_q), .wr_desc(desc_q), .bucket_out);

  // Key-value chunk
  logic          kmatch;
  logic [CB-1:0] wval, chunk_out, rd_value;
  logic [15:0]   voff;
  logic [PB-1:0] pshift;
  assign voff   = 16'(OFF_EXTRAS) + 16'(fq.ext_len) + fq.key_len;
  assign pshift = pbuf >> (8 * int'(voff));
  assign wval   = pshift[CB-1:0];
  key_value_access #(.CHUNK_BYTES(CHUNK_MAX)) u_kva (
    .key(key_q), .key_len(klen_q), .line0(rsp_q.data), .match(kmatch),
    .value(wval), .value_len(vlen_q), .chunk_out,
    .rd_chunk(cbuf), .rd_value);

  // Reply
  logic [PB-1:0] rsp_pkt;
  logic [15:0]   rsp_len;
  packet_deparser #(.PKT_BYTES_P(PKT_BYTES), .VAL_BYTES(CHUNK_MAX)) u_dep (
    .req(pbuf), .value(rd_value), .value_len(16'(fdesc.vlen)), .rsp(rsp_pkt), .rsp_len);

  // Derived sizes
  logic [15:0] new_total, old_total;
  logic [3:0]  new_lines, old_lines;
  assign new_total = 16'(klen_q) + vlen_q;
  assign old_total = 16'(fdesc.klen) + 16'(fdesc.vlen);
  assign new_lines = 4'((new_total + 16'd63) >> 6);
  assign old_lines = 4'((old_total + 16'd63) >> 6);

  logic [2:0] evict_way;
  assign evict_way = hash_q[HT_IDX_W+2 -: 3];
  logic [31:0] bucket_addr;
  assign bucket_addr = HT_BASE + ({{(32-HT_IDX_W){1'b0}}, hash_q[HT_IDX_W-1:0]} << 6);

  logic [2:0] lowest_cand;
  always_comb begin
    lowest_cand = '0;
    for (int i = 7; i >= 0; i--) if (cand_q[i]) lowest_cand = 3'(i);
  end

  // Transmit
  logic [3:0]        tx_n;
  logic [KEEP_W-1:0] tx_last_keep;
  logic [PB-1:0]     tx_src;
  always_comb begin
    if (state == S_REPLY) begin
      tx_n   = 4'((rsp_len + 16'd63) >> 6);
      tx_src = rsp_pkt;
      tx_last_keep = (rsp_len[5:0] == 6'd0) ? '1 : ~({KEEP_W{1'b1}} << rsp_len[5:0]);
    end else begin
      tx_n   = rx_cnt;
      tx_src = pbuf;
      tx_last_keep = last_keep;
    end
    m_valid = (state == S_REPLY) || (state == S_FWD);
    m_beat.tdata = tx_src[int'(tx_i)*DATA_W +: DATA_W];
    m_beat.tlast = (tx_i == tx_n - 1'b1);
    m_beat.tkeep = m_beat.tlast ? tx_last_keep : '1;
    m_beat.tuser.src_port = src_port;
    m_beat.tuser.dst_port = (state == S_REPLY) ? src_port : PORT_DMA;
    m_beat.tuser.dst_set  = 1'b1;
  end

  assign s_ready   = (state == S_RX);
  assign busy      = (state != S_RX) || (rx_cnt != '0);
  assign req_valid = (state == S_MEM);

  task automatic issue(input mem_target_e t, input mem_op_e op, input logic [31:0] addr,
                       input logic [DATA_W-1:0] data, input logic [1:0] cls,
                       input logic [7:0] len, input state_e ret);
    req.target <= t;
    req.op     <= op;
    req.id     <= 4'(PE_ID);
    req.addr   <= addr;
    req.data   <= data;
    req.cls    <= cls;
    req.tag    <= {fq.opaque, (kind == K_FILL) ? fq.dport : fq.sport};
    req.len    <= len;
    ret_state  <= ret;
    state      <= S_MEM;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RX; ret_state <= S_RX; kind <= K_GET;
      pbuf <= '0; rx_cnt <= '0; last_keep <= '0; src_port <= '0; tx_i <= '0;
      fq <= '0; key_q <= '0; klen_q <= '0; vlen_q <= '0; hash_q <= '0;
      bucket_q <= '0; cand_q <= '0; cur_way <= '0; way_q <= '0;
      fdesc <= '0; desc_q <= '0; cbuf <= '0; line_i <= '0; new_addr <= '0;
      rsp_q <= '0; req <= '0; ev <= '0;
    end else begin
      ev <= '0;
      unique case (state)
        S_RX: if (s_valid) begin
          if (rx_cnt == '0) begin
            pbuf     <= '0;
            src_port <= s_beat.tuser.src_port;
          end
          if (rx_cnt < 4'(PKT_BEATS)) begin
            for (int i = 0; i < int'(KEEP_W); i++)
              pbuf[int'(rx_cnt)*DATA_W + i*8 +: 8] <= s_beat.tkeep[i] ? s_beat.tdata[i*8 +: 8] : 8'h00;
            rx_cnt <= rx_cnt + 1'b1;
          end
          last_keep <= s_beat.tkeep;
          if (s_beat.tlast) state <= S_PARSE;
        end
        S_PARSE: begin
          fq     <= f;
          key_q  <= f.key;
          klen_q <= 8'(f.key_len);
          vlen_q <= f.value_len;
          if (f.is_mc && f.is_req && f.opcode == OPC_GET) begin
            kind  <= K_GET;
            state <= (f.key_len != 0 && f.key_len <= 16'(MAX_KEY)) ? S_HASH_GO : S_FWD;
          end else if (f.is_mc && f.is_req && (f.opcode == OPC_SET || f.opcode == OPC_DELETE)) begin
            kind  <= (f.opcode == OPC_SET) ? K_SET : K_DEL;
            state <= (f.key_len != 0 && f.key_len <= 16'(MAX_KEY) &&
                      (f.opcode == OPC_DELETE || 16'(f.key_len) + f.value_len <= 16'(CHUNK_MAX)))
                     ? S_HASH_GO : S_DONE;
          end else if (f.is_mc && !f.is_req && f.opcode == OPC_GET && f.status == 16'd0) begin
            kind  <= K_FILL;
            state <= S_CAM_R;
          end else begin
            state <= S_DONE;
          end
        end
        S_CAM_R: begin
          if (ret_state != S_CAM_R) begin
            issue(T_CAM, OP_LOOKUP, '0, '0, '0, '0, S_CAM_R);
          end else if (rsp_q.ok && rsp_q.len != 0 && 16'(rsp_q.len) + vlen_q <= 16'(CHUNK_MAX)) begin
            key_q  <= rsp_q.data;
            klen_q <= rsp_q.len;
            state  <= S_HASH_GO;
          end else begin
            state <= S_DONE;
          end
        end
        S_HASH_GO: state <= S_HASH_W;
        S_HASH_W: if (h_done) begin
          hash_q <= h_out;
          state  <= S_SCAN_INIT;
        end
        S_SCAN_INIT: begin
          if (ret_state != S_SCAN_INIT) begin
            issue(T_DRAM, OP_READ, bucket_addr, '0, '0, '0, S_SCAN_INIT);
          end else begin
            bucket_q <= rsp_q.data;
            state    <= S_SCAN_LOAD;
          end
        end
        S_SCAN_LOAD: begin
          cand_q <= cand;
          state  <= S_SCAN;
        end
        S_SCAN: begin
          if (cand_q == '0) begin
            unique case (kind)
              K_GET:   state <= S_LEARN;
              K_DEL:   state <= S_DONE;
              default: state <= S_INSERT;
            endcase
          end else begin
            cur_way <= lowest_cand;
            cand_q[lowest_cand] <= 1'b0;
            issue(T_DRAM, OP_READ, way_desc[lowest_cand].addr, '0, '0, '0, S_KEY_CHK);
          end
        end
        S_KEY_CHK: begin
          if (kmatch) begin
            fdesc  <= way_desc[cur_way];
            way_q  <= cur_way;
            cbuf[DATA_W-1:0] <= rsp_q.data;
            line_i <= 4'd1;
            unique case (kind)
              K_GET:   state <= S_VAL_RD;
              K_DEL:   state <= S_DEL;
              default: state <= S_SET_FOUND;
            endcase
          end else begin
            state <= S_SCAN;
          end
        end
        S_VAL_RD: begin
          if (line_i < old_lines)
            issue(T_DRAM, OP_READ, fdesc.addr + (32'(line_i) << 6), '0, '0, '0, S_VAL_ST);
          else begin
            tx_i  <= '0;
            state <= S_REPLY;
          end
        end
        S_VAL_ST: begin
          cbuf[int'(line_i)*DATA_W +: DATA_W] <= rsp_q.data;
          line_i <= line_i + 1'b1;
          state  <= S_VAL_RD;
        end
        S_REPLY: if (m_ready) begin
          tx_i <= tx_i + 1'b1;
          if (m_beat.tlast) begin
            ev.get_hit <= 1'b1;
            state <= S_DONE;
          end
        end
        S_LEARN: begin
          if (ret_state != S_LEARN) begin
            issue(T_CAM, OP_LEARN, '0, key_q, '0, klen_q, S_LEARN);
          end else begin
            tx_i  <= '0;
            ev.get_miss <= 1'b1;
            state <= S_FWD;
          end
        end
        S_FWD: if (m_ready) begin
          tx_i <= tx_i + 1'b1;
          if (m_beat.tlast) state <= S_DONE;
        end
        S_INSERT: begin
          desc_q <= '{reserved: 1'b0, valid: 1'b1, vlen: 15'(vlen_q), klen: 15'(klen_q), addr: '0};
          if (has_free) begin
            way_q <= free_way;
            state <= S_ALLOC;
          end else begin
            way_q <= evict_way;
            ev.evict <= 1'b1;
            issue(T_SLAB, OP_FREE, way_desc[evict_way].addr, '0,
                  slab_class(16'(way_desc[evict_way].klen) + 16'(way_desc[evict_way].vlen)), '0, S_ALLOC);
          end
        end
        S_SET_FOUND: begin
          desc_q <= '{reserved: 1'b0, valid: 1'b1, vlen: 15'(vlen_q), klen: 15'(klen_q), addr: fdesc.addr};
          line_i <= '0;
          if (slab_class(new_total) == slab_class(old_total)) begin
            new_addr <= fdesc.addr;
            state    <= S_WR_CHUNK;
          end else begin
            issue(T_SLAB, OP_FREE, fdesc.addr, '0, slab_class(old_total), '0, S_ALLOC);
          end
        end
        S_ALLOC: begin
          line_i <= '0;
          issue(T_SLAB, OP_ALLOC, '0, '0, slab_class(new_total), '0, S_ALLOC_R);
        end
        S_ALLOC_R: begin
          if (rsp_q.ok) begin
            new_addr    <= rsp_q.addr;
            desc_q.addr <= rsp_q.addr;
            state       <= S_WR_CHUNK;
          end else begin
            desc_q <= '0;            // way left empty: its old chunk was released
            ev.alloc_fail <= 1'b1;
            state  <= S_WR_BKT;
          end
        end
        S_WR_CHUNK: begin
          if (line_i < new_lines) begin
            line_i <= line_i + 1'b1;
            issue(T_DRAM, OP_WRITE, new_addr + (32'(line_i) << 6),
                  chunk_out[int'(line_i)*DATA_W +: DATA_W], '0, '0, S_WR_CHUNK);
          end else begin
            state <= S_WR_BKT;
          end
        end
        S_WR_BKT: begin
          if (ret_state != S_WR_BKT) begin
            issue(T_DRAM, OP_WRITE, bucket_addr, bucket_out, '0, '0, S_WR_BKT);
          end else begin
            if (kind == K_DEL)       ev.del_done  <= 1'b1;
            else if (desc_q.valid && kind == K_SET)  ev.set_done  <= 1'b1;
            else if (desc_q.valid)   ev.fill_done <= 1'b1;
            state <= S_DONE;
          end
        end
        S_DEL: begin
          desc_q <= '0;
          if (ret_state != S_DEL)
            issue(T_SLAB, OP_FREE, fdesc.addr, '0, slab_class(old_total), '0, S_DEL);
          else
            state <= S_WR_BKT;
        end
        S_MEM: if (req_ready) state <= S_MEMW;
        S_MEMW: if (rsp_valid) begin
          rsp_q <= rsp;
          state <= ret_state;
        end
        S_DONE: begin
          rx_cnt    <= '0;
          ret_state <= S_RX;
          line_i    <= '0;
          state     <= S_RX;
        end
        default: state <= S_RX;
      endcase
    end
  end

endmodule
