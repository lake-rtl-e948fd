// tb_lake_module: the key-value engine alone (input buffer, element network,
// five elements, memory network, shared cache, slab allocator, CAM) with the
// DRAM and SRAM behavioural models. Packets are written into the engine only
// while it reports room for a whole packet, as the classifier does.
//   - GET miss: forwarded unchanged with dst_port = host; host reply stored;
//     the next GET answered with the expected reply to the requesting port.
//   - SET then GET, DELETE then GET (forwarded again).
//   - A burst of 40 GETs written back to back: room must fall while the
//     elements are busy, and every GET must be answered correctly.
//   - Replies and forwards carry dst_set = 1.
module tb_lake_module;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        s_valid, room, m_valid, m_ready;
  axis_beat_t  s_beat, m_beat;
  logic dv, dr, dwe, drv; logic [25:0] da; logic [511:0] dwd, drd;
  logic sv, sr, swe, srv; logic [22:0] sa; logic [31:0] swd, srd;
  stats_t      stats;
  logic [31:0] chits, cmiss;
  int unsigned dreads, dwrites, swrites;
  int checks = 0, failures = 0;

  lake_module #(.HT_IDX_W(4), .N0(64), .N1(32), .N2(16), .N3(8)) dut (
    .clk, .rst_n, .num_active(4'd5), .s_valid, .s_beat, .room,
    .m_valid, .m_ready, .m_beat,
    .dram_req_valid(dv), .dram_req_ready(dr), .dram_req_we(dwe), .dram_req_addr(da),
    .dram_req_wdata(dwd), .dram_rsp_valid(drv), .dram_rsp_rdata(drd),
    .sram_req_valid(sv), .sram_req_ready(sr), .sram_req_we(swe), .sram_req_addr(sa),
    .sram_req_wdata(swd), .sram_rsp_valid(srv), .sram_rsp_rdata(srd),
    .stats, .cache_hits(chits), .cache_misses(cmiss));
  dram_model #(.LAT(23)) u_dram (
    .clk, .rst_n, .req_valid(dv), .req_ready(dr), .req_we(dwe), .req_addr(da), .req_wdata(dwd),
    .rsp_valid(drv), .rsp_rdata(drd), .reads(dreads), .writes(dwrites));
  sram_model #(.LAT(4)) u_sram (
    .clk, .rst_n, .req_valid(sv), .req_ready(sr), .req_we(swe), .req_addr(sa), .req_wdata(swd),
    .rsp_valid(srv), .rsp_rdata(srd), .writes(swrites));

  typedef struct { bq_t data; logic [2:0] dst; } opkt_t;
  opkt_t outq [$];
  bq_t   cur;
  int    no_room = 0;

  always @(posedge clk) if (rst_n) begin
    if (!room) no_room++;
    if (m_valid && m_ready) begin
      for (int j = 0; j < 64; j++) if (m_beat.tkeep[j]) cur.push_back(m_beat.tdata[j*8 +: 8]);
      if (m_beat.tlast) begin
        checks++; if (!m_beat.tuser.dst_set) begin failures++; $display("FAIL dst_set not set"); end
        outq.push_back('{cur, m_beat.tuser.dst_port});
        cur = {};
      end
    end
  end

  task automatic send(input bq_t p, input logic [2:0] src);
    @(negedge clk);
    while (!room) @(negedge clk);
    for (int b = 0; b < nbeats(p); b++) begin
      s_valid = 1; s_beat = beat_of(p, b, src);
      @(negedge clk);
    end
    s_valid = 0;
  endtask

  // Wait until the engine has been idle for 100 clocks.
  task automatic settle();
    int quiet = 0;
    while (quiet < 100) begin
      @(negedge clk);
      if (m_valid || dut.q_valid || dut.busy[0] || dut.busy[1] || dut.busy[2] ||
          dut.busy[3] || dut.busy[4]) quiet = 0;
      else quiet++;
    end
  endtask

  // Send p, wait, expect exactly one output equal to want on port dst (or none).
  task automatic expect_one(input bq_t p, input logic [2:0] src, input bit any, input bq_t want,
                            input logic [2:0] dst, input string what);
    outq = {};
    send(p, src); settle();
    checks++;
    if (!any) begin
      if (outq.size() != 0) begin failures++; $display("FAIL %s: unexpected output", what); end
    end else if (outq.size() != 1 || outq[0].data != want || outq[0].dst != dst) begin
      failures++; $display("FAIL %s: %0d outputs", what, outq.size());
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k, v, p, e;
    bq_t keys [$], vals [$], reqs [$];
    s_valid = 0; s_beat = '0; m_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (1100) @(negedge clk);

    k = str_bytes("alpha"); v = str_bytes("first value");
    p = get_req(k, 77, 4000);
    expect_one(p, 3'd1, 1, p, PORT_DMA, "GET miss forwarded");
    expect_one(host_reply(v, 77, 4000), 3'd4, 0, e, 0, "host reply stored");
    checks++; if (stats.fill_done != 1) failures++;
    p = get_req(k, 78, 4001);
    expect_one(p, 3'd2, 1, expected_reply(p, v), 3'd2, "GET hit");

    k = str_bytes("beta"); v = rand_bytes(200);
    expect_one(set_req(k, v, 1, 4002), 3'd0, 0, e, 0, "SET");
    p = get_req(k, 79, 4002);
    expect_one(p, 3'd3, 1, expected_reply(p, v), 3'd3, "GET after SET");
    expect_one(del_req(k, 2, 4002), 3'd0, 0, e, 0, "DELETE");
    p = get_req(k, 80, 4002);
    expect_one(p, 3'd0, 1, p, PORT_DMA, "GET after DELETE");

    // burst
    for (int i = 0; i < 8; i++) begin
      keys.push_back(str_bytes($sformatf("key-%0d", i)));
      vals.push_back(rand_bytes($urandom_range(1, 100)));
      expect_one(set_req(keys[i], vals[i], 10 + i, 4100), 3'd0, 0, e, 0, "SET");
    end
    outq = {};
    no_room = 0;
    for (int i = 0; i < 40; i++) begin
      p = get_req(keys[i % 8], 1000 + i, 4200 + i);
      reqs.push_back(p);
      send(p, 3'(i % 4));
    end
    settle();
    checks++; if (no_room == 0) begin failures++; $display("FAIL room never fell"); end
    checks++; if (outq.size() != 40) begin failures++; $display("FAIL %0d replies of 40", outq.size()); end
    foreach (outq[j]) begin
      automatic int idx = -1;
      foreach (reqs[i]) if (outq[j].data == expected_reply(reqs[i], vals[i % 8])) idx = i;
      checks++;
      if (idx < 0 || outq[j].dst != 3'(idx % 4)) begin failures++; $display("FAIL burst reply %0d", j); end
    end
    $display("hits=%0d misses=%0d sets=%0d no_room clocks=%0d", stats.get_hit, stats.get_miss, stats.set_done, no_room);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
