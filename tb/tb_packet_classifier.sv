// tb_packet_classifier: sends GET, SET, DELETE requests, host GET replies,
// a failed host reply, an oversized GET and plain packets, first with room in
// the engine buffer and then without. Checks each packet reaches exactly the
// expected paths, unmodified, and the drop and admission counters.
module tb_packet_classifier;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, n_valid, n_ready, l_valid, lake_room;
  axis_beat_t s_beat, n_beat, l_beat;
  logic [31:0] drops, to_lake;
  int checks = 0, failures = 0;

  packet_classifier dut (.*);

  bq_t exp_n [$], exp_l [$];
  bq_t cur_n, cur_l;

  always @(posedge clk) begin
    if (n_valid && n_ready) begin
      for (int j = 0; j < 64; j++) if (n_beat.tkeep[j]) cur_n.push_back(n_beat.tdata[j*8 +: 8]);
      if (n_beat.tlast) begin
        checks++;
        if (exp_n.size() == 0 || cur_n != exp_n[0]) begin failures++; $display("FAIL normal path"); end
        else void'(exp_n.pop_front());
        cur_n = {};
      end
    end
    if (l_valid) begin
      for (int j = 0; j < 64; j++) if (l_beat.tkeep[j]) cur_l.push_back(l_beat.tdata[j*8 +: 8]);
      if (l_beat.tlast) begin
        checks++;
        if (exp_l.size() == 0 || cur_l != exp_l[0]) begin failures++; $display("FAIL engine path"); end
        else void'(exp_l.pop_front());
        cur_l = {};
      end
    end
  end

  always @(negedge clk) n_ready = ($urandom_range(0, 3) != 0);

  task automatic send(input bq_t p, input bit to_n, input bit to_l);
    if (to_n) exp_n.push_back(p);
    if (to_l) exp_l.push_back(p);
    for (int b = 0; b < nbeats(p); b++) begin
      @(negedge clk); s_valid = 1; s_beat = beat_of(p, b);
      @(posedge clk); while (!s_ready) @(posedge clk);
      #1 s_valid = 0;
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k, v;
    s_valid = 0; s_beat = '0; lake_room = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      lake_room = (r == 0);
      for (int t = 0; t < 10; t++) begin
        k = rand_bytes($urandom_range(1, 64)); v = rand_bytes($urandom_range(1, 200));
        send(get_req(k, $urandom, 4000 + t), 0, lake_room);
        send(set_req(k, v, $urandom, 4000 + t), 1, lake_room);
        send(del_req(k, $urandom, 4000 + t), 1, lake_room);
        send(host_reply(v, $urandom, 4000 + t), 1, lake_room);
        send(mc_packet(1'b0, OPC_GET, '{}, v, 7, 4000, 4, 1), 1, 0);    // status "not found"
        send(plain_packet($urandom_range(60, 900), 8'(t)), 1, 0);
        send(get_req(k, 1, 5), 0, lake_room);
        send(get_req(rand_bytes(65), 1, 5), 1, 0);                     // key too long
        send(set_req(k, rand_bytes(600), 1, 5), 1, 0);                 // too long for the buffer
      end
    end
    repeat (20) @(negedge clk);
    checks++; if (exp_n.size() != 0 || exp_l.size() != 0) begin failures++; $display("FAIL missing packets"); end
    checks++; if (to_lake != 50) begin failures++; $display("FAIL to_lake=%0d", to_lake); end
    checks++; if (drops != 50) begin failures++; $display("FAIL drops=%0d", drops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
