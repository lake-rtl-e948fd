// tb_input_arbiter: five sources send random-length packets with random
// gaps into a randomly stalling output. Checks every packet arrives whole and
// unmixed, per-source order, the src_port stamp, and that with all five
// sources backlogged the grants rotate 0,1,2,3,4.
module tb_input_arbiter;
  import lake_pkg::*;
  import tb_util_pkg::*;

  localparam int NI = 5, NPK = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid [NI], s_ready [NI];
  axis_beat_t s_beat [NI];
  logic m_valid, m_ready;
  axis_beat_t m_beat;
  int checks = 0, failures = 0;
  bit rand_gaps = 1;

  input_arbiter #(.NUM_IN(NI), .STAMP_SRC(1'b1)) dut (.*);

  bq_t sent [NI][$];
  int  order [$];

  for (genvar s = 0; s < NI; s++) begin : g_src
    initial begin
      s_valid[s] = 0; s_beat[s] = '0;
      @(posedge rst_n);
      for (int p = 0; p < NPK; p++) begin
        automatic bq_t pk = plain_packet($urandom_range(60, 300), 8'(s * 40 + p));
        sent[s].push_back(pk);
        for (int b = 0; b < nbeats(pk); b++) begin
          while (rand_gaps && $urandom_range(0, 3) == 0) @(negedge clk);
          @(negedge clk);
          s_valid[s] = 1; s_beat[s] = beat_of(pk, b, 3'd7);
          @(posedge clk); while (!s_ready[s]) @(posedge clk);
          #1 s_valid[s] = 0;
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got = 0;
    bq_t cur;
    int cur_src = -1, last_src = -1, rr_seen = 0;
    m_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (got < NI * NPK) begin
      @(negedge clk); m_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (m_valid && m_ready) begin
        if (cur_src < 0) begin
          automatic bit all_v = 1;
          cur_src = m_beat.tuser.src_port;
          for (int i = 0; i < NI; i++) all_v &= s_valid[i];
          if (all_v && last_src >= 0) begin
            rr_seen++;
            checks++;
            if (cur_src != (last_src + 1) % NI) begin failures++; $display("FAIL round robin %0d after %0d", cur_src, last_src); end
          end
          last_src = cur_src;
        end
        if (m_beat.tuser.src_port != 3'(cur_src)) begin failures++; $display("FAIL interleaved"); end
        for (int j = 0; j < 64; j++) if (m_beat.tkeep[j]) cur.push_back(m_beat.tdata[j*8 +: 8]);
        if (m_beat.tlast) begin
          checks++;
          if (cur_src >= NI || sent[cur_src].size() == 0 || cur != sent[cur_src][0]) begin
            failures++; $display("FAIL packet from %0d", cur_src);
          end else void'(sent[cur_src].pop_front());
          order.push_back(cur_src);
          got++; cur = {}; cur_src = -1;
        end
      end
    end
    checks++; if (rr_seen == 0) begin failures++; $display("FAIL all-backlogged case never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
