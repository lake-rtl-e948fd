// tb_output_arbiter: normal and engine packets into a stalling output.
// Checks packets are whole and in order per input, and that whenever a normal
// packet was waiting at a packet boundary it was sent before an engine packet.
module tb_output_arbiter;
  import lake_pkg::*;
  import tb_util_pkg::*;

  localparam int NPK = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic n_valid, n_ready, l_valid, l_ready, m_valid, m_ready;
  axis_beat_t n_beat, l_beat, m_beat;
  int checks = 0, failures = 0, prio_seen = 0;

  output_arbiter dut (.*);

  bq_t sent [2][$];

  task automatic src(input int s);
    for (int p = 0; p < NPK; p++) begin
      automatic bq_t pk = plain_packet($urandom_range(60, 250), 8'(s * 100 + p));
      sent[s].push_back(pk);
      for (int b = 0; b < nbeats(pk); b++) begin
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        @(negedge clk);
        if (s == 0) begin n_valid = 1; n_beat = beat_of(pk, b, 3'd0); end
        else        begin l_valid = 1; l_beat = beat_of(pk, b, 3'd1); end
        @(posedge clk); while (!(s == 0 ? n_ready : l_ready)) @(posedge clk);
        #1; if (s == 0) n_valid = 0; else l_valid = 0;
      end
    end
  endtask

  initial begin n_valid = 0; n_beat = '0; @(posedge rst_n); src(0); end
  initial begin l_valid = 0; l_beat = '0; @(posedge rst_n); src(1); end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int got = 0, cur_src = -1;
    bq_t cur;
    m_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (got < 2 * NPK) begin
      @(negedge clk); m_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (m_valid && m_ready) begin
        if (cur_src < 0) begin
          cur_src = m_beat.tuser.src_port;
          if (n_valid && l_valid) begin
            prio_seen++;
            checks++; if (cur_src != 0) begin failures++; $display("FAIL engine packet beat normal"); end
          end
        end
        for (int j = 0; j < 64; j++) if (m_beat.tkeep[j]) cur.push_back(m_beat.tdata[j*8 +: 8]);
        if (m_beat.tlast) begin
          checks++;
          if (cur != sent[cur_src][0]) begin failures++; $display("FAIL packet %0d", cur_src); end
          void'(sent[cur_src].pop_front());
          got++; cur = {}; cur_src = -1;
        end
      end
    end
    checks++; if (prio_seen == 0) begin failures++; $display("FAIL priority never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
