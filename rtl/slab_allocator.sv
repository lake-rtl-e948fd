// slab_allocator: free-chunk manager of the data store (memory target T_SLAB).
//
// Chunks come in four slab classes of 64, 128, 256 and 512 bytes. Each class
// owns a 512MB part of the DRAM data store and a free list of 32-bit chunk
// addresses kept in SRAM as a circular queue (N0..N3 entries, together
// 18MiB / 4B = 4,718,592). In front of each free list sits a small FIFO that
// is kept filled with the next free addresses, so an allocation is normally
// answered without waiting for SRAM, as the paper describes.
//
// Chunks that have never been handed out are not written into SRAM at start
// up: a per-class counter produces them (base + i * size) until the class is
// used up, after which free addresses come from the SRAM queue. This behaves
// like an SRAM pre-filled with every chunk address and is this design's
// choice. OP_FREE (issued on DELETE or when a chunk is replaced) appends the
// address to the class's SRAM queue.
//
// Requests (one at a time): OP_ALLOC with cls returns ok = 1 and addr, or
// ok = 0 when the class has no free chunk at all; OP_FREE with cls and addr
// returns ok = 1 once the SRAM write is issued. An ALLOC whose FIFO is empty
// waits for the refill. SRAM port: 32-bit word interface standing for the
// QDRII controller (valid/ready, write enable, word address, data; read data
// returns with sram_rsp_valid).
module slab_allocator
  import lake_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned N0 = 2097152,
  parameter int unsigned N1 = 1048576,
  parameter int unsigned N2 = 1048576,
  parameter int unsigned N3 = 524288,
  parameter int unsigned SRAM_AW = 23
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mem_req_t           req,
  input  logic               req_valid,
  output logic               req_ready,
  output mem_rsp_t           rsp,
  output logic               rsp_valid,
  output logic               sram_req_valid,
  input  logic               sram_req_ready,
  output logic               sram_req_we,
  output logic [SRAM_AW-1:0] sram_req_addr,
  output logic [31:0]        sram_req_wdata,
  input  logic               sram_rsp_valid,
  input  logic [31:0]        sram_rsp_rdata
);

  localparam int unsigned FW = $clog2(FIFO_DEPTH);
  localparam int unsigned CW = 24;   // per-class counters

  function automatic logic [CW-1:0] n_of(input int k);
    case (k)
      0: return CW'(N0);
      1: return CW'(N1);
      2: return CW'(N2);
      default: return CW'(N3);
    endcase
  endfunction

  function automatic logic [SRAM_AW-1:0] region(input int k);
    case (k)
      0: return '0;
      1: return SRAM_AW'(N0);
      2: return SRAM_AW'(N0 + N1);
      default: return SRAM_AW'(N0 + N1 + N2);
    endcase
  endfunction

  // Prefetch FIFOs
  logic [31:0]   fifo  [4][FIFO_DEPTH];
  logic [FW-1:0] f_rd  [4];
  logic [FW-1:0] f_wr  [4];
  logic [FW:0]   f_cnt [4];

  // Free-list state
  logic [CW-1:0] fresh [4];   // chunks handed out from the counter so far
  logic [CW-1:0] head  [4];
  logic [CW-1:0] tail  [4];
  logic [CW-1:0] qcnt  [4];   // entries held in the SRAM queue

  typedef enum logic [1:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_REQ} state_e;
  state_e     state;
  logic [1:0] rcls;            // class being refilled from SRAM

  mem_req_t   rq;
  logic       rq_valid;

  // Refill choice: lowest class with room in its FIFO and a source of
  // addresses. A FIFO counts as full if a read for it is in flight.
  logic       ref_go, ref_sram;
  logic [1:0] ref_cls;
  always_comb begin
    ref_go   = 1'b0;
    ref_sram = 1'b0;
    ref_cls  = '0;
    for (int k = 3; k >= 0; k--)
      if (f_cnt[k] < (FW+1)'(FIFO_DEPTH) && (qcnt[k] != '0 || fresh[k] < n_of(k))) begin
        ref_go   = 1'b1;
        ref_cls  = 2'(k);
        ref_sram = (qcnt[k] != '0);
      end
  end

  logic       pop, push;
  logic [1:0] pop_cls, push_cls;
  logic [31:0] push_addr;
  logic [CW-1:0] ref_fresh;
  logic [1:0] rq_cls;
  assign rq_cls    = rq.cls;
  assign ref_fresh = fresh[ref_cls];

  always_comb begin
    pop       = 1'b0;
    pop_cls   = rq_cls;
    push      = 1'b0;
    push_cls  = ref_cls;
    push_addr = DS_BASE + (32'(ref_cls) << 29) + (32'(ref_fresh) << (6 + ref_cls));
    if (state == S_IDLE && rq_valid && rq.op == OP_ALLOC && f_cnt[rq_cls] != '0)
      pop = 1'b1;
    if (state == S_RD_WAIT && sram_rsp_valid) begin
      push      = 1'b1;
      push_cls  = rcls;
      push_addr = sram_rsp_rdata;
    end else if (state == S_IDLE && !(rq_valid && rq.op == OP_FREE) && ref_go && !ref_sram) begin
      push = 1'b1;
    end
  end

  assign req_ready      = !rq_valid;
  assign sram_req_valid = (state == S_RD_REQ) || (state == S_WR_REQ);
  assign sram_req_we    = (state == S_WR_REQ);
  assign sram_req_addr  = (state == S_WR_REQ) ? region(int'(rq_cls)) + SRAM_AW'(tail[rq_cls])
                                              : region(int'(rcls)) + SRAM_AW'(head[rcls]);
  assign sram_req_wdata = rq.addr;

  always_ff @(posedge clk) begin
    if (push) fifo[push_cls][f_wr[push_cls]] <= push_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rcls      <= '0;
      rq        <= '0;
      rq_valid  <= 1'b0;
      rsp       <= '0;
      rsp_valid <= 1'b0;
      for (int k = 0; k < 4; k++) begin
        f_rd[k] <= '0; f_wr[k] <= '0; f_cnt[k] <= '0;
        fresh[k] <= '0; head[k] <= '0; tail[k] <= '0; qcnt[k] <= '0;
      end
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        rq       <= req;
        rq_valid <= 1'b1;
      end

      if (push) begin
        f_wr[push_cls] <= f_wr[push_cls] + 1'b1;
        if (state == S_IDLE) fresh[push_cls] <= fresh[push_cls] + 1'b1;
      end
      if (pop) f_rd[pop_cls] <= f_rd[pop_cls] + 1'b1;
      for (int k = 0; k < 4; k++)
        f_cnt[k] <= f_cnt[k] + (FW+1)'(push && push_cls == 2'(k)) - (FW+1)'(pop && pop_cls == 2'(k));

      unique case (state)
        S_IDLE: begin
          if (rq_valid && rq.op == OP_ALLOC) begin
            if (pop) begin
              rsp       <= '{id: rq.id, ok: 1'b1, addr: fifo[rq_cls][f_rd[rq_cls]], len: '0, data: '0};
              rsp_valid <= 1'b1;
              rq_valid  <= 1'b0;
            end else if (qcnt[rq_cls] == '0 && fresh[rq_cls] >= n_of(int'(rq_cls)) &&
                         !(push && push_cls == rq_cls)) begin
              rsp       <= '{id: rq.id, ok: 1'b0, addr: '0, len: '0, data: '0};
              rsp_valid <= 1'b1;
              rq_valid  <= 1'b0;
            end
          end else if (rq_valid && rq.op == OP_FREE) begin
            state <= S_WR_REQ;
          end else if (rq_valid) begin
            rsp       <= '{id: rq.id, ok: 1'b0, addr: '0, len: '0, data: '0};
            rsp_valid <= 1'b1;
            rq_valid  <= 1'b0;
          end
          if (!(rq_valid && rq.op == OP_FREE) && ref_go && ref_sram) begin
            rcls  <= ref_cls;
            state <= S_RD_REQ;
          end
        end
        S_RD_REQ: if (sram_req_ready) begin
          head[rcls] <= (head[rcls] == n_of(int'(rcls)) - 1'b1) ? '0 : head[rcls] + 1'b1;
          qcnt[rcls] <= qcnt[rcls] - 1'b1;
          state      <= S_RD_WAIT;
        end
        S_RD_WAIT: if (sram_rsp_valid) state <= S_IDLE;
        S_WR_REQ: if (sram_req_ready) begin
          tail[rq_cls] <= (tail[rq_cls] == n_of(int'(rq_cls)) - 1'b1) ? '0 : tail[rq_cls] + 1'b1;
          qcnt[rq_cls] <= qcnt[rq_cls] + 1'b1;
          rsp          <= '{id: rq.id, ok: 1'b1, addr: rq.addr, len: '0, data: '0};
          rsp_valid    <= 1'b1;
          rq_valid     <= 1'b0;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
