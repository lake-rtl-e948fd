// lake_module: the key-value engine.
//
// Memcached packets from the classifier enter a packet FIFO (the engine's
// input buffer; its free space tells the classifier whether a packet can be
// admitted). The PE network hands each packet to an idle processing element;
// NUM_PE elements work in parallel and reach the three shared memories through
// the memory network: the 64kB shared cache in front of the DRAM controller
// (hash table and key-value chunks), the slab allocator in front of the SRAM
// controller (free chunk lists) and the CAM look-up table (keys of GETs sent
// to the host). Element output (GET replies, forwarded misses) is merged by
// the PE network. Event pulses from the elements are summed into stats.
// DRAM and SRAM controller interfaces are ports of this module.
module lake_module
  import lake_pkg::*;
#(
  parameter int unsigned NUM_PE     = 5,
  parameter int unsigned HT_IDX_W   = 25,
  parameter int unsigned CACHE_LINES = 1024,
  parameter int unsigned CAM_DEPTH  = 64,
  parameter int unsigned FIFO_DEPTH = 4 * lake_pkg::PKT_BEATS,
  parameter int unsigned N0 = 2097152,
  parameter int unsigned N1 = 1048576,
  parameter int unsigned N2 = 1048576,
  parameter int unsigned N3 = 524288
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        num_active,
  input  logic              s_valid,
  input  axis_beat_t        s_beat,
  output logic              room,
  output logic              m_valid,
  input  logic              m_ready,
  output axis_beat_t        m_beat,
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic              dram_req_we,
  output logic [25:0]       dram_req_addr,
  output logic [DATA_W-1:0] dram_req_wdata,
  input  logic              dram_rsp_valid,
  input  logic [DATA_W-1:0] dram_rsp_rdata,
  output logic              sram_req_valid,
  input  logic              sram_req_ready,
  output logic              sram_req_we,
  output logic [22:0]       sram_req_addr,
  output logic [31:0]       sram_req_wdata,
  input  logic              sram_rsp_valid,
  input  logic [31:0]       sram_rsp_rdata,
  output stats_t            stats,
  output logic [31:0]       cache_hits,
  output logic [31:0]       cache_misses
);

  // Input buffer
  logic       q_valid, q_ready, fifo_s_ready;
  axis_beat_t q_beat;
  axis_fifo #(.DEPTH(FIFO_DEPTH), .ROOM(PKT_BEATS)) u_inbuf (
    .clk, .rst_n, .s_valid, .s_ready(fifo_s_ready), .s_beat,
    .m_valid(q_valid), .m_ready(q_ready), .m_beat(q_beat), .has_room(room));

  // PE network and elements
  logic       pin_v [NUM_PE], pin_r [NUM_PE], busy [NUM_PE];
  axis_beat_t pin_b [NUM_PE];
  logic       pout_v [NUM_PE], pout_r [NUM_PE];
  axis_beat_t pout_b [NUM_PE];
  mem_req_t   preq [NUM_PE];
  logic       preq_v [NUM_PE], preq_r [NUM_PE];
  mem_rsp_t   prsp [NUM_PE];
  logic       prsp_v [NUM_PE];
  pe_events_t ev [NUM_PE];

  pe_network #(.NUM_PE(NUM_PE)) u_penet (
    .clk, .rst_n, .num_active,
    .s_valid(q_valid), .s_ready(q_ready), .s_beat(q_beat),
    .pe_in_valid(pin_v), .pe_in_ready(pin_r), .pe_in_beat(pin_b), .pe_busy(busy),
    .pe_out_valid(pout_v), .pe_out_ready(pout_r), .pe_out_beat(pout_b),
    .m_valid, .m_ready, .m_beat);

  for (genvar i = 0; i < int'(NUM_PE); i++) begin : g_pe
    pe #(.PE_ID(i), .HT_IDX_W(HT_IDX_W)) u_pe (
      .clk, .rst_n,
      .s_valid(pin_v[i]), .s_ready(pin_r[i]), .s_beat(pin_b[i]),
      .m_valid(pout_v[i]), .m_ready(pout_r[i]), .m_beat(pout_b[i]),
      .req(preq[i]), .req_valid(preq_v[i]), .req_ready(preq_r[i]),
      .rsp(prsp[i]), .rsp_valid(prsp_v[i]), .busy(busy[i]), .ev(ev[i]));
  end

  // Memory network and targets
  mem_req_t treq [NUM_TARGETS];
  logic     treq_v [NUM_TARGETS], treq_r [NUM_TARGETS];
  mem_rsp_t trsp [NUM_TARGETS];
  logic     trsp_v [NUM_TARGETS];

  mem_network #(.NUM_PE(NUM_PE)) u_memnet (
    .clk, .rst_n,
    .pe_req(preq), .pe_req_valid(preq_v), .pe_req_ready(preq_r),
    .pe_rsp(prsp), .pe_rsp_valid(prsp_v),
    .t_req(treq), .t_req_valid(treq_v), .t_req_ready(treq_r),
    .t_rsp(trsp), .t_rsp_valid(trsp_v));

  shared_cache #(.LINES(CACHE_LINES), .ADDR_W(26)) u_cache (
    .clk, .rst_n,
    .req(treq[T_DRAM]), .req_valid(treq_v[T_DRAM]), .req_ready(treq_r[T_DRAM]),
    .rsp(trsp[T_DRAM]), .rsp_valid(trsp_v[T_DRAM]),
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata, .hits(cache_hits), .misses(cache_misses));

  slab_allocator #(.FIFO_DEPTH(8), .N0(N0), .N1(N1), .N2(N2), .N3(N3), .SRAM_AW(23)) u_slab (
    .clk, .rst_n,
    .req(treq[T_SLAB]), .req_valid(treq_v[T_SLAB]), .req_ready(treq_r[T_SLAB]),
    .rsp(trsp[T_SLAB]), .rsp_valid(trsp_v[T_SLAB]),
    .sram_req_valid, .sram_req_ready, .sram_req_we, .sram_req_addr, .sram_req_wdata,
    .sram_rsp_valid, .sram_rsp_rdata);

  cam_lut #(.DEPTH(CAM_DEPTH)) u_cam (
    .clk, .rst_n,
    .req(treq[T_CAM]), .req_valid(treq_v[T_CAM]), .req_ready(treq_r[T_CAM]),
    .rsp(trsp[T_CAM]), .rsp_valid(trsp_v[T_CAM]));

  // Statistics
  stats_t stats_d;
  always_comb begin
    stats_d = stats;
    for (int i = 0; i < int'(NUM_PE); i++) begin
      stats_d.get_hit    += 32'(ev[i].get_hit);
      stats_d.get_miss   += 32'(ev[i].get_miss);
      stats_d.set_done   += 32'(ev[i].set_done);
      stats_d.del_done   += 32'(ev[i].del_done);
      stats_d.fill_done  += 32'(ev[i].fill_done);
      stats_d.evict      += 32'(ev[i].evict);
      stats_d.alloc_fail += 32'(ev[i].alloc_fail);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats <= '0;
    else        stats <= stats_d;
  end

endmodule
