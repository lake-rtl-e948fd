// lake_top: FPGA datapath of the accelerated key-value store NIC.
//
// The NetFPGA-style switch/NIC datapath with the key-value engine added:
//   RX0..RX3 (10G MACs) and DMA RX (input 4)
//     -> input_arbiter (round robin, stamps source port)
//     -> packet_classifier
//          normal traffic ------------------------------+
//          memcached traffic -> lake_module (engine) ---+-> output_arbiter
//     -> tx_* (to the output port lookup / output queues of the datapath)
// SET/DELETE requests and host GET replies go down both paths; GET requests
// only to the engine, which answers hits itself and forwards misses to the
// host (dst_port = 4, DMA). Packets from the engine carry dst_set = 1 and their
// output port in the metadata; normal packets leave with dst_set = 0 for the
// output port lookup. When the engine's input buffer is full the classifier
// drops memcached copies rather than stall normal traffic, and the output
// arbiter serves normal traffic first.
// The MACs, DMA engine, output port lookup, output queues and the DRAM and
// SRAM memory controllers are outside this module; their interfaces are ports.
// num_active_pe sets how many processing elements take new queries.
module lake_top
  import lake_pkg::*;
#(
  parameter int unsigned NUM_PE   = 5,
  parameter int unsigned HT_IDX_W = 25,
  parameter int unsigned N0 = 2097152,
  parameter int unsigned N1 = 1048576,
  parameter int unsigned N2 = 1048576,
  parameter int unsigned N3 = 524288
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        num_active_pe,
  input  logic              rx_valid [5],
  output logic              rx_ready [5],
  input  axis_beat_t        rx_beat  [5],
  output logic              tx_valid,
  input  logic              tx_ready,
  output axis_beat_t        tx_beat,
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
  output logic [31:0]       mc_drops,
  output logic [31:0]       mc_to_lake,
  output logic [31:0]       cache_hits,
  output logic [31:0]       cache_misses
);

  logic       a_valid, a_ready;
  axis_beat_t a_beat;
  input_arbiter #(.NUM_IN(5), .STAMP_SRC(1'b1)) u_in_arb (
    .clk, .rst_n, .s_valid(rx_valid), .s_ready(rx_ready), .s_beat(rx_beat),
    .m_valid(a_valid), .m_ready(a_ready), .m_beat(a_beat));

  logic       n_valid, n_ready, l_valid, l_room;
  axis_beat_t n_beat, l_beat;
  packet_classifier u_cls (
    .clk, .rst_n, .s_valid(a_valid), .s_ready(a_ready), .s_beat(a_beat),
    .n_valid, .n_ready, .n_beat, .l_valid, .l_beat, .lake_room(l_room),
    .drops(mc_drops), .to_lake(mc_to_lake));

  logic       k_valid, k_ready;
  axis_beat_t k_beat;
  lake_module #(.NUM_PE(NUM_PE), .HT_IDX_W(HT_IDX_W), .N0(N0), .N1(N1), .N2(N2), .N3(N3)) u_lake (
    .clk, .rst_n, .num_active(num_active_pe),
    .s_valid(l_valid), .s_beat(l_beat), .room(l_room),
    .m_valid(k_valid), .m_ready(k_ready), .m_beat(k_beat),
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata,
    .sram_req_valid, .sram_req_ready, .sram_req_we, .sram_req_addr, .sram_req_wdata,
    .sram_rsp_valid, .sram_rsp_rdata,
    .stats, .cache_hits, .cache_misses);

  output_arbiter u_out_arb (
    .clk, .rst_n,
    .n_valid, .n_ready, .n_beat,
    .l_valid(k_valid), .l_ready(k_ready), .l_beat(k_beat),
    .m_valid(tx_valid), .m_ready(tx_ready), .m_beat(tx_beat));

endmodule
