// tb_pe: one processing element on a memory network with the real shared
// cache, slab allocator and CAM, and behavioural DRAM/SRAM models.
//   - GET of an unknown key: forwarded unchanged to the host port, key learned;
//     the host's reply is stored, and the next GET is answered (Fig. 5 a/b).
//   - Random SET / GET / DELETE traffic over 24 keys against a reference map:
//     every GET reply must equal the expected packet; every miss must be for an
//     absent key (or follow an eviction).
//   - Value sizes cross slab classes (re-allocation) and stay inside one
//     (rewrite in place).
//   - 80 keys into 4 buckets (HT_IDX_W = 2): evictions must happen and the last
//     key written must still hit.
//   - A warm GET hit (bucket and chunk lines in the shared cache) with a 4-byte key and 8-byte value must take at most
//     60 clocks from first beat in to last beat out (3.3 Mqps per PE at 200 MHz).
module tb_pe;
  import lake_pkg::*;
  import tb_util_pkg::*;

  localparam int HTW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, m_valid, m_ready, busy;
  axis_beat_t s_beat, m_beat;
  pe_events_t ev;
  mem_req_t preq [1]; logic preq_v [1], preq_r [1];
  mem_rsp_t prsp [1]; logic prsp_v [1];
  mem_req_t treq [3]; logic treq_v [3], treq_r [3];
  mem_rsp_t trsp [3]; logic trsp_v [3];
  logic dv, dr, dwe, drv; logic [25:0] da; logic [511:0] dwd, drd;
  logic sv, sr, swe, srv; logic [22:0] sa; logic [31:0] swd, srd;
  logic [31:0] hits, misses;
  int unsigned dreads, dwrites, swrites;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0, n_fill = 0;

  pe #(.PE_ID(0), .HT_IDX_W(HTW)) dut (
    .clk, .rst_n, .s_valid, .s_ready, .s_beat, .m_valid, .m_ready, .m_beat,
    .req(preq[0]), .req_valid(preq_v[0]), .req_ready(preq_r[0]),
    .rsp(prsp[0]), .rsp_valid(prsp_v[0]), .busy, .ev);
  mem_network #(.NUM_PE(1)) u_net (
    .clk, .rst_n, .pe_req(preq), .pe_req_valid(preq_v), .pe_req_ready(preq_r),
    .pe_rsp(prsp), .pe_rsp_valid(prsp_v),
    .t_req(treq), .t_req_valid(treq_v), .t_req_ready(treq_r), .t_rsp(trsp), .t_rsp_valid(trsp_v));
  shared_cache u_cache (
    .clk, .rst_n, .req(treq[0]), .req_valid(treq_v[0]), .req_ready(treq_r[0]),
    .rsp(trsp[0]), .rsp_valid(trsp_v[0]),
    .dram_req_valid(dv), .dram_req_ready(dr), .dram_req_we(dwe), .dram_req_addr(da),
    .dram_req_wdata(dwd), .dram_rsp_valid(drv), .dram_rsp_rdata(drd), .hits, .misses);
  slab_allocator #(.N0(256), .N1(128), .N2(64), .N3(32)) u_slab (
    .clk, .rst_n, .req(treq[1]), .req_valid(treq_v[1]), .req_ready(treq_r[1]),
    .rsp(trsp[1]), .rsp_valid(trsp_v[1]),
    .sram_req_valid(sv), .sram_req_ready(sr), .sram_req_we(swe), .sram_req_addr(sa),
    .sram_req_wdata(swd), .sram_rsp_valid(srv), .sram_rsp_rdata(srd));
  cam_lut u_cam (
    .clk, .rst_n, .req(treq[2]), .req_valid(treq_v[2]), .req_ready(treq_r[2]),
    .rsp(trsp[2]), .rsp_valid(trsp_v[2]));
  dram_model #(.LAT(23)) u_dram (
    .clk, .rst_n, .req_valid(dv), .req_ready(dr), .req_we(dwe), .req_addr(da), .req_wdata(dwd),
    .rsp_valid(drv), .rsp_rdata(drd), .reads(dreads), .writes(dwrites));
  sram_model #(.LAT(4)) u_sram (
    .clk, .rst_n, .req_valid(sv), .req_ready(sr), .req_we(swe), .req_addr(sa), .req_wdata(swd),
    .rsp_valid(srv), .rsp_rdata(srd), .writes(swrites));

  always @(posedge clk) if (rst_n) begin
    if (ev.get_hit) n_hit++;
    if (ev.get_miss) n_miss++;
    if (ev.evict) n_evict++;
    if (ev.fill_done) n_fill++;
  end

  // Send a packet; collect the output packet if any. kind: 0 none, 1 reply, 2 forward.
  task automatic xfer(input bq_t p, output int kind, output bq_t out, output logic [2:0] dst, output int cyc);
    int start, t;
    out = {}; kind = 0; dst = 0;
    @(negedge clk);
    start = $time / 10;
    for (int b = 0; b < nbeats(p); b++) begin
      s_valid = 1; s_beat = beat_of(p, b, 3'd2);
      @(posedge clk); while (!s_ready) @(posedge clk);
      #1 s_valid = 0;
      @(negedge clk);
    end
    t = 0;
    while (busy && t < 5000) begin
      @(posedge clk); t++;
      if (m_valid && m_ready) begin
        for (int j = 0; j < 64; j++) if (m_beat.tkeep[j]) out.push_back(m_beat.tdata[j*8 +: 8]);
        dst = m_beat.tuser.dst_port;
        if (m_beat.tlast) begin
          kind = (m_beat.tuser.dst_port == PORT_DMA) ? 2 : 1;
          cyc = $time / 10 - start;
        end
      end
    end
    if (t >= 5000) begin failures++; $display("FAIL element hung"); end
  endtask

  bq_t model [string];
  bq_t keys [$];

  function automatic string kstr(input bq_t k);
    string s = "";
    foreach (k[i]) s = {s, $sformatf("%02x", k[i])};
    return s;
  endfunction

  task automatic do_get(input bq_t k, input bit strict);
    bq_t p, o; int kind, cyc; logic [2:0] dst; string ks;
    ks = kstr(k);
    p = get_req(k, $urandom, 3000 + $urandom_range(0, 99));
    xfer(p, kind, o, dst, cyc);
    checks++;
    if (model.exists(ks)) begin
      if (kind == 1) begin
        if (o != expected_reply(p, model[ks]) || dst != 3'd2) begin failures++; $display("FAIL wrong reply"); end
      end else if (!(kind == 2 && (!strict || n_evict > 0))) begin
        failures++; $display("FAIL expected hit, kind=%0d", kind);
      end
    end else begin
      if (kind != 2 || o != p) begin failures++; $display("FAIL expected forward to host, kind=%0d", kind); end
    end
  endtask

  task automatic do_set(input bq_t k, input bq_t v);
    bq_t o; int kind, cyc; logic [2:0] dst;
    xfer(set_req(k, v, $urandom, 3100), kind, o, dst, cyc);
    checks++; if (kind != 0) begin failures++; $display("FAIL SET produced output"); end
    model[kstr(k)] = v;
  endtask

  task automatic do_del(input bq_t k);
    bq_t o; int kind, cyc; logic [2:0] dst;
    xfer(del_req(k, $urandom, 3100), kind, o, dst, cyc);
    checks++; if (kind != 0) failures++;
    if (model.exists(kstr(k))) model.delete(kstr(k));
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k, v, p, o; int kind, cyc; logic [2:0] dst;
    s_valid = 0; s_beat = '0; m_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (1100) @(negedge clk);          // cache invalidation sweep

    // Miss, learn, host reply, hit (Fig. 5)
    k = str_bytes("key0"); v = str_bytes("value-00");
    p = get_req(k, 32'h1234_5678, 4242);
    xfer(p, kind, o, dst, cyc);
    checks++; if (kind != 2 || o != p || dst != PORT_DMA) begin failures++; $display("FAIL miss not forwarded"); end
    xfer(host_reply(v, 32'h1234_5678, 4242), kind, o, dst, cyc);
    checks++; if (kind != 0 || n_fill != 1) begin failures++; $display("FAIL host reply not stored"); end
    model[kstr(k)] = v;
    do_get(k, 1);
    // host reply whose tag was never learned is ignored
    xfer(host_reply(v, 32'h0BAD_0BAD, 1), kind, o, dst, cyc);
    checks++; if (kind != 0 || n_fill != 1) failures++;

    // Throughput of a warm hit: 4-byte key, 8-byte value
    // 4-byte key whose bucket line does not share a cache index with its chunk
    // (the second chunk of the 64-byte class, cache index 1)
    for (int i = 0; i < 100; i++) begin
      k = str_bytes($sformatf("w%03d", i));
      if (crc32_ref(k)[1:0] >= 2'd2) break;
    end
    v = str_bytes("01234567");
    do_set(k, v);
    do_get(k, 1);
    p = get_req(k, 99, 5555);
    xfer(p, kind, o, dst, cyc);
    checks++;
    if (kind != 1 || cyc > 60) begin failures++; $display("FAIL warm hit took %0d clocks", cyc); end
    $display("warm GET hit: %0d clocks per query", cyc);

    // Slab class changes and in-place rewrite
    do_set(k, rand_bytes(100));   // 104 B -> class 128
    do_get(k, 1);
    do_set(k, rand_bytes(110));   // same class, in place
    do_get(k, 1);
    do_set(k, rand_bytes(40));    // back to class 64
    do_get(k, 1);
    do_set(k, rand_bytes(500));   // largest class
    do_get(k, 1);

    // Random traffic
    for (int i = 0; i < 24; i++) keys.push_back(rand_bytes($urandom_range(1, 64)));
    for (int t = 0; t < 300; t++) begin
      automatic int r = $urandom_range(0, 9);
      k = keys[$urandom_range(0, 23)];
      if (r < 4) do_set(k, rand_bytes($urandom_range(1, 512 - k.size())));
      else if (r < 5) do_del(k);
      else do_get(k, 0);
    end

    // Evictions: 80 keys into 32 ways
    for (int i = 0; i < 80; i++) begin
      k = rand_bytes(8);
      do_set(k, rand_bytes(16));
    end
    do_get(k, 1);
    checks++; if (n_evict == 0) begin failures++; $display("FAIL no eviction"); end
    checks++; if (n_hit == 0 || n_miss == 0) failures++;
    $display("hits=%0d misses=%0d evictions=%0d fills=%0d", n_hit, n_miss, n_evict, n_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
