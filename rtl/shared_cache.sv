// shared_cache: the on-chip cache in front of the DRAM controller.
//
// Direct-mapped, write-through, 64-byte lines, 64kB (1024 lines) as in the
// paper. It is one target of the memory network and serves DRAM line reads and
// writes from all processing elements, one request at a time.
//   Read hit : response two clocks after the request is accepted.
//   Read miss: the line is read from DRAM, written into the cache, then
//              returned.
//   Write    : the line is written into the cache (allocated if absent, a
//              choice of this design) and written through to DRAM; the write
//              is posted and the response (an acknowledge) follows as soon as
//              the DRAM controller accepts it. The DRAM controller is assumed
//              to complete requests in order.
// After reset the valid bits are cleared one line per clock; req_ready is low
// during those LINES clocks. hits/misses count read hits and misses.
// DRAM port: a 64-byte line interface standing for the vendor DDR3
// controller (request valid/ready with write enable, line address and data;
// read data returns with dram_rsp_valid).
module shared_cache
  import lake_pkg::*;
#(
  parameter int unsigned LINES  = 1024,
  parameter int unsigned ADDR_W = 26          // line address bits (4GB of 64B lines)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mem_req_t          req,
  input  logic              req_valid,
  output logic              req_ready,
  output mem_rsp_t          rsp,
  output logic              rsp_valid,
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic              dram_req_we,
  output logic [ADDR_W-1:0] dram_req_addr,
  output logic [DATA_W-1:0] dram_req_wdata,
  input  logic              dram_rsp_valid,
  input  logic [DATA_W-1:0] dram_rsp_rdata,
  output logic [31:0]       hits,
  output logic [31:0]       misses
);

  localparam int unsigned IDX_W = $clog2(LINES);
  localparam int unsigned TAG_W = ADDR_W - IDX_W;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOK, S_MISS_REQ, S_MISS_WAIT, S_WR} state_e;
  state_e state;

  logic [DATA_W-1:0] data_mem [LINES];
  logic [TAG_W-1:0]  tag_mem  [LINES];
  logic              vld_mem  [LINES];

  mem_req_t          rq;
  logic [DATA_W-1:0] data_q;
  logic [TAG_W-1:0]  tag_q;
  logic              vld_q;
  logic [IDX_W-1:0]  init_idx;

  logic [ADDR_W-1:0] line_a;
  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  assign line_a = rq.addr[ADDR_W+5:6];
  assign idx    = line_a[IDX_W-1:0];
  assign tag    = line_a[ADDR_W-1:IDX_W];

  logic [ADDR_W-1:0] in_line;
  assign in_line = req.addr[ADDR_W+5:6];

  assign req_ready      = (state == S_IDLE);
  assign dram_req_valid = (state == S_MISS_REQ) || (state == S_WR);
  assign dram_req_we    = (state == S_WR);
  assign dram_req_addr  = line_a;
  assign dram_req_wdata = rq.data;

  // Tag, valid and data arrays: synchronous read, single write port.
  always_ff @(posedge clk) begin
    if (state == S_IDLE && req_valid) begin
      data_q <= data_mem[in_line[IDX_W-1:0]];
      tag_q  <= tag_mem[in_line[IDX_W-1:0]];
    end
    if (state == S_MISS_WAIT && dram_rsp_valid) begin
      data_mem[idx] <= dram_rsp_rdata;
      tag_mem[idx]  <= tag;
    end else if (state == S_LOOK && rq.op == OP_WRITE) begin
      data_mem[idx] <= rq.data;
      tag_mem[idx]  <= tag;
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_INIT)
      vld_mem[init_idx] <= 1'b0;
    else if ((state == S_MISS_WAIT && dram_rsp_valid) || (state == S_LOOK && rq.op == OP_WRITE))
      vld_mem[idx] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_idx  <= '0;
      rq        <= '0;
      vld_q     <= 1'b0;
      rsp       <= '0;
      rsp_valid <= 1'b0;
      hits      <= '0;
      misses    <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IDX_W'(LINES - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          rq    <= req;
          vld_q <= vld_mem[in_line[IDX_W-1:0]];
          state <= S_LOOK;
        end
        S_LOOK: begin
          rsp.id   <= rq.id;
          rsp.addr <= rq.addr;
          rsp.len  <= '0;
          rsp.ok   <= 1'b1;
          if (rq.op == OP_WRITE) begin
            state <= S_WR;
          end else if (vld_q && tag_q == tag) begin
            rsp.data  <= data_q;
            rsp_valid <= 1'b1;
            hits      <= hits + 1;
            state     <= S_IDLE;
          end else begin
            misses <= misses + 1;
            state  <= S_MISS_REQ;
          end
        end
        S_MISS_REQ: if (dram_req_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: if (dram_rsp_valid) begin
          rsp.data  <= dram_rsp_rdata;
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        S_WR: if (dram_req_ready) begin
          rsp.data  <= '0;
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
