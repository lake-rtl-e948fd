// tb_lake_top_full: the whole datapath at its default sizes (2^25 hash
// buckets, full slab free lists, 5 processing elements), with the DRAM and SRAM
// behavioural models. It runs the complete query cycle: GET miss forwarded to
// the host, host reply learned and stored, GET hit, SET, GET after SET,
// DELETE, GET after DELETE, a host reply nobody asked for; then a flood of
// warm GET hits from four ports (replies per clock must reach 13.1 Mqps at
// 200 MHz, the excess is dropped) and normal traffic mixed with GETs under
// output back-pressure (no normal packet may be lost). Every output packet is
// checked as in tb_lake_top. Evictions and allocation failures need the
// reduced sizes of tb_lake_top and are not provoked here.
module tb_lake_top_full;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]   num_active;
  logic         rx_valid [5], rx_ready [5];
  axis_beat_t   rx_beat  [5];
  logic         tx_valid, tx_ready;
  axis_beat_t   tx_beat;
  logic dv, dr, dwe, drv; logic [25:0] da; logic [511:0] dwd, drd;
  logic sv, sr, swe, srv; logic [22:0] sa; logic [31:0] swd, srd;
  stats_t       stats;
  logic [31:0]  drops, to_lake, chits, cmiss;
  int unsigned  dreads, dwrites, swrites;
  int checks = 0, failures = 0;

  lake_top dut (
    .clk, .rst_n, .num_active_pe(num_active),
    .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .dram_req_valid(dv), .dram_req_ready(dr), .dram_req_we(dwe), .dram_req_addr(da),
    .dram_req_wdata(dwd), .dram_rsp_valid(drv), .dram_rsp_rdata(drd),
    .sram_req_valid(sv), .sram_req_ready(sr), .sram_req_we(swe), .sram_req_addr(sa),
    .sram_req_wdata(swd), .sram_rsp_valid(srv), .sram_rsp_rdata(srd),
    .stats, .mc_drops(drops), .mc_to_lake(to_lake), .cache_hits(chits), .cache_misses(cmiss));
  dram_model #(.LAT(23)) u_dram (
    .clk, .rst_n, .req_valid(dv), .req_ready(dr), .req_we(dwe), .req_addr(da), .req_wdata(dwd),
    .rsp_valid(drv), .rsp_rdata(drd), .reads(dreads), .writes(dwrites));
  sram_model #(.LAT(4)) u_sram (
    .clk, .rst_n, .req_valid(sv), .req_ready(sr), .req_we(swe), .req_addr(sa), .req_wdata(swd),
    .rsp_valid(srv), .rsp_rdata(srd), .writes(swrites));

  // ---------------- reference state ----------------
  bq_t model [string];          // key -> value the engine should hold
  bq_t req_of [int unsigned];   // opaque -> GET request sent
  logic [2:0] rq_src [int unsigned];  // opaque -> input port it came from
  bq_t sent_normal [$];         // packets expected on the normal path
  bit  lossy = 0;               // evictions / failed allocations make hits optional

  function automatic string kstr(input bq_t k);
    string s = "";
    foreach (k[i]) s = {s, $sformatf("%02x", k[i])};
    return s;
  endfunction

  function automatic bq_t key_of(input bq_t req);
    bq_t k;
    int kl, el;
    kl = req[53]; el = req[54];
    for (int i = 0; i < kl; i++) k.push_back(req[74 + el + i]);
    return k;
  endfunction

  // ---------------- output collector ----------------
  int n_reply = 0, n_fwd = 0, n_normal = 0, n_bad = 0;
  bq_t cur;
  bq_t last_out;
  int  last_kind;   // 1 reply, 2 forward, 3 normal

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    for (int j = 0; j < 64; j++) if (tx_beat.tkeep[j]) cur.push_back(tx_beat.tdata[j*8 +: 8]);
    if (tx_beat.tlast) begin
      automatic int idx = -1;
      checks++;
      last_out = cur;
      if (!tx_beat.tuser.dst_set) begin
        last_kind = 3;
        foreach (sent_normal[i]) if (sent_normal[i] == cur) begin idx = i; break; end
        if (idx < 0) begin failures++; n_bad++; $display("FAIL unexpected normal packet t=%0t", $time); end
        else begin sent_normal.delete(idx); n_normal++; end
      end else if (tx_beat.tuser.dst_port == PORT_DMA) begin
        automatic int unsigned op = {cur[62], cur[63], cur[64], cur[65]};
        last_kind = 2; n_fwd++;
        if (!req_of.exists(op) || req_of[op] != cur) begin
          failures++; n_bad++; $display("FAIL forwarded packet is not a request sent");
        end else if (model.exists(kstr(key_of(cur))) && !lossy) begin
          failures++; n_bad++; $display("FAIL stored key forwarded as miss");
        end
      end else begin
        automatic int unsigned op = {cur[62], cur[63], cur[64], cur[65]};
        last_kind = 1; n_reply++;
        if (!req_of.exists(op)) begin failures++; n_bad++; $display("FAIL reply to unknown request"); end
        else begin
          automatic bq_t rq = req_of[op];
          automatic string ks = kstr(key_of(rq));
          if (!model.exists(ks) || cur != expected_reply(rq, model[ks]) ||
              tx_beat.tuser.dst_port != rq_src[op]) begin
            failures++; n_bad++; $display("FAIL wrong GET reply t=%0t", $time);
          end
        end
      end
      cur = {};
    end
  end

  // ---------------- mechanism counters ----------------
  int n_tx_stall = 0, n_rx_stall = 0, n_prio = 0, n_switch = 0;
  int started [5];
  logic busy_q [5];
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && !tx_ready) n_tx_stall++;
    for (int i = 0; i < 5; i++) if (rx_valid[i] && !rx_ready[i]) n_rx_stall++;
    if (dut.n_valid && dut.k_valid && dut.n_ready) n_prio++;
    if (dut.n_valid && dut.k_valid && dut.k_ready && !dut.u_out_arb.locked) begin
      failures++; $display("FAIL engine output chosen over waiting normal traffic");
    end
    for (int i = 0; i < 5; i++) begin
      if (dut.u_lake.busy[i] && !busy_q[i]) started[i]++;
      busy_q[i] <= dut.u_lake.busy[i];
    end
  end

  // ---------------- drivers ----------------
  bit bp = 0;
  always @(negedge clk) tx_ready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic send(input int port, input bq_t p);
    for (int b = 0; b < nbeats(p); b++) begin
      @(negedge clk);
      rx_valid[port] = 1; rx_beat[port] = beat_of(p, b, 3'd0);
      @(posedge clk); while (!rx_ready[port]) @(posedge clk);
    end
    @(negedge clk) rx_valid[port] = 0;
  endtask

  task automatic settle();
    int quiet = 0;
    while (quiet < 200) begin
      @(posedge clk);
      if (tx_valid || dut.u_lake.busy[0] || dut.u_lake.busy[1] || dut.u_lake.busy[2] ||
          dut.u_lake.busy[3] || dut.u_lake.busy[4] || dut.u_lake.q_valid) quiet = 0;
      else quiet++;
    end
  endtask

  int unsigned next_op = 1;
  task automatic do_get(input int port, input bq_t k, input bit wait_done);
    bq_t p;
    int unsigned op = next_op++;
    p = get_req(k, op, 3000 + port);
    req_of[op] = p; rq_src[op] = 3'(port);
    send(port, p);
    if (wait_done) settle();
  endtask
  task automatic do_set(input int port, input bq_t k, input bq_t v);
    bq_t p = set_req(k, v, next_op++, 3000 + port);
    sent_normal.push_back(p);
    send(port, p);
    settle();
    model[kstr(k)] = v;
  endtask
  task automatic do_del(input int port, input bq_t k);
    bq_t p = del_req(k, next_op++, 3000 + port);
    sent_normal.push_back(p);
    send(port, p);
    settle();
    if (model.exists(kstr(k))) model.delete(kstr(k));
  endtask

  bq_t warm [$];
  task automatic flood(input int port);
    for (int n = 0; n < 60; n++) do_get(port, warm[$urandom_range(0, 4)], 0);
  endtask
  task automatic mixed(input int port);
    for (int n = 0; n < 20; n++) begin
      if ($urandom_range(0, 1)) begin
        automatic bq_t pp = plain_packet($urandom_range(60, 400), 8'(n));
        sent_normal.push_back(pp);
        send(port, pp);
      end else do_get(port, warm[$urandom_range(0, 4)], 0);
    end
  endtask

  // expect exactly the given counts of outputs since the snapshot
  int s_r, s_f, s_n;
  task automatic snap(); s_r = n_reply; s_f = n_fwd; s_n = n_normal; endtask
  task automatic expect_out(input int r, input int f, input int n, input string what);
    checks++;
    if (n_reply - s_r != r || n_fwd - s_f != f || n_normal - s_n != n) begin
      failures++;
      $display("FAIL %s: replies %0d forwards %0d normal %0d", what, n_reply - s_r, n_fwd - s_f, n_normal - s_n);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k, v, p;
    int unsigned op;
    int t0, t1, r0, d0;
    for (int i = 0; i < 5; i++) begin rx_valid[i] = 0; rx_beat[i] = '0; busy_q[i] = 0; started[i] = 0; end
    num_active = 4'd5;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (1100) @(negedge clk);

    // ---- 1. miss, learn, fill, hit; SET; DELETE ----
    k = str_bytes("user:1001"); v = str_bytes("profile-data-1001");
    snap(); do_get(1, k, 1);
    expect_out(0, 1, 0, "GET miss");
    op = next_op - 1;
    p = host_reply(v, op, 3001);
    sent_normal.push_back(p);
    snap(); send(4, p); settle();
    expect_out(0, 0, 1, "host reply passed to client");
    model[kstr(k)] = v;
    checks++; if (stats.fill_done != 1) begin failures++; $display("FAIL host reply not stored"); end
    snap(); do_get(2, k, 1);
    expect_out(1, 0, 0, "GET hit after fill");
    p = host_reply(v, 32'h0BAD_0BAD, 3999);
    sent_normal.push_back(p);
    snap(); send(4, p); settle();
    expect_out(0, 0, 1, "unlearned host reply");
    checks++; if (stats.fill_done != 1) begin failures++; $display("FAIL unknown reply stored"); end

    k = str_bytes("k2"); v = rand_bytes(40);
    snap(); do_set(0, k, v); expect_out(0, 0, 1, "SET");
    snap(); do_get(3, k, 1); expect_out(1, 0, 0, "GET after SET");
    snap(); do_del(3, k);    expect_out(0, 0, 1, "DELETE");
    snap(); do_get(0, k, 1); expect_out(0, 1, 0, "GET after DELETE");

    // ---- 3. throughput of warm GET hits, overload -> drops ----
    for (int i = 0; i < 5; i++) begin
      k = str_bytes($sformatf("hot%0d", i)); v = str_bytes($sformatf("val%05d", i));
      do_set(0, k, v); warm.push_back(k);
    end
    foreach (warm[i]) do_get(0, warm[i], 1);
    r0 = n_reply; d0 = drops;
    t0 = $time / 10;
    fork flood(0); flood(1); flood(2); flood(3); join
    t1 = $time / 10;
    settle();
    begin
      automatic int nr = n_reply - r0;
      automatic real cpq = real'(t1 - t0) / real'(nr);
      $display("flood: %0d replies in %0d clocks (%0.1f clocks per query), %0d dropped",
               nr, t1 - t0, cpq, drops - d0);
      checks++; if (cpq > 15.3) begin failures++; $display("FAIL below 13.1 Mqps"); end
      checks++; if (nr + (drops - d0) != 240) begin failures++; $display("FAIL queries lost: %0d", 240 - nr - (drops - d0)); end
    end

    // ---- 4. normal traffic mixed with GETs under back-pressure ----
    bp = 1;
    fork mixed(0); mixed(1); mixed(2); mixed(3); join
    settle();
    bp = 0;
    settle();
    checks++; if (sent_normal.size() != 0) begin failures++; $display("FAIL %0d normal packets lost", sent_normal.size()); end

    // ---- 5. number of active elements ----
    num_active = 4'd2; n_switch++;
    repeat (5) @(negedge clk);
    begin
      automatic int s2 = started[2] + started[3] + started[4];
      automatic int s01 = started[0] + started[1];
      for (int n = 0; n < 40; n++) do_get(n % 4, warm[n % 5], 0);
      settle();
      checks++;
      if (started[2] + started[3] + started[4] != s2 || started[0] + started[1] == s01) begin
        failures++; $display("FAIL num_active_pe = 2 not respected");
      end
    end
    num_active = 4'd5; n_switch++;
    for (int n = 0; n < 20; n++) do_get(n % 4, warm[n % 5], 0);
    settle();

    // ---- mechanism counts ----
    $display("replies=%0d forwards=%0d normal=%0d drops=%0d to_engine=%0d", n_reply, n_fwd, n_normal, drops, to_lake);
    $display("get_hit=%0d get_miss=%0d set=%0d del=%0d fill=%0d evict=%0d alloc_fail=%0d",
             stats.get_hit, stats.get_miss, stats.set_done, stats.del_done, stats.fill_done,
             stats.evict, stats.alloc_fail);
    $display("cache hits=%0d misses=%0d tx_stall=%0d rx_stall=%0d priority=%0d switches=%0d",
             chits, cmiss, n_tx_stall, n_rx_stall, n_prio, n_switch);
    for (int i = 0; i < 5; i++) $display("element %0d started %0d queries", i, started[i]);
    begin
      int unsigned cnt [string];
      cnt["get_hit"] = stats.get_hit; cnt["get_miss"] = stats.get_miss;
      cnt["set"] = stats.set_done; cnt["delete"] = stats.del_done; cnt["fill"] = stats.fill_done;
      cnt["drop"] = drops;
      cnt["cache_hit"] = chits; cnt["cache_miss"] = cmiss; cnt["tx_stall"] = n_tx_stall;
      cnt["rx_stall"] = n_rx_stall; cnt["priority"] = n_prio; cnt["switch"] = n_switch;
      cnt["reply"] = n_reply; cnt["forward"] = n_fwd; cnt["normal"] = n_normal;
      for (int i = 0; i < 5; i++) cnt[$sformatf("element%0d", i)] = started[i];
      foreach (cnt[s]) begin
        checks++;
        if (cnt[s] == 0) begin failures++; $display("FAIL mechanism %s never happened", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
