// tb_pe_network: five element models (busy for a random time after each
// packet, then echo it) behind the PE network. Checks every packet is
// delivered whole to exactly one element and comes back out, that an element
// never gets a second packet while busy, that with num_active = 2 only
// elements 0 and 1 receive packets, and that with 5 active all five do.
module tb_pe_network;
  import lake_pkg::*;
  import tb_util_pkg::*;

  localparam int NP = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] num_active;
  logic s_valid, s_ready, m_valid, m_ready;
  axis_beat_t s_beat, m_beat;
  logic pe_in_valid [NP], pe_in_ready [NP], pe_busy [NP];
  axis_beat_t pe_in_beat [NP];
  logic pe_out_valid [NP], pe_out_ready [NP];
  axis_beat_t pe_out_beat [NP];
  int checks = 0, failures = 0;
  int got_by [NP];

  pe_network #(.NUM_PE(NP)) dut (.*);

  // Element models: receive a packet, stay busy for a random time, echo it.
  for (genvar p = 0; p < NP; p++) begin : g_pe
    axis_beat_t buf_q [$];
    int phase, wait_n, oi;     // phase 0 receive, 1 wait, 2 send
    assign pe_in_ready[p]  = (phase == 0);
    assign pe_busy[p]      = (phase != 0) || (buf_q.size() != 0);
    assign pe_out_valid[p] = (phase == 2);
    assign pe_out_beat[p]  = (phase == 2) ? buf_q[oi] : '0;
    initial begin phase = 0; wait_n = 0; oi = 0; got_by[p] = 0; end
    always @(posedge clk) begin
      case (phase)
        0: if (pe_in_valid[p]) begin
          buf_q.push_back(pe_in_beat[p]);
          if (pe_in_beat[p].tlast) begin got_by[p]++; phase <= 1; wait_n <= $urandom_range(5, 40); end
        end
        1: if (wait_n == 0) begin phase <= 2; oi <= 0; end else wait_n <= wait_n - 1;
        default: if (pe_out_ready[p]) begin
          if (oi == buf_q.size() - 1) begin phase <= 0; buf_q = {}; end
          else oi <= oi + 1;
        end
      endcase
    end
  end

  bq_t sent [$];
  bq_t cur;
  int  rcvd = 0;
  always @(posedge clk) if (m_valid && m_ready) begin
    for (int j = 0; j < 64; j++) if (m_beat.tkeep[j]) cur.push_back(m_beat.tdata[j*8 +: 8]);
    if (m_beat.tlast) begin
      automatic int idx = -1;
      foreach (sent[i]) if (sent[i] == cur) idx = i;
      checks++;
      if (idx < 0) begin failures++; $display("FAIL unknown packet out size=%0d t=%0t", cur.size(), $time); end else sent.delete(idx);
      cur = {}; rcvd++;
    end
  end

  task automatic send_n(input int n);
    for (int i = 0; i < n; i++) begin
      automatic bq_t p = plain_packet($urandom_range(60, 250), 8'($urandom));
      sent.push_back(p);
      for (int b = 0; b < nbeats(p); b++) begin
        @(negedge clk); s_valid = 1; s_beat = beat_of(p, b);
        @(posedge clk); while (!s_ready) @(posedge clk);
        #1 s_valid = 0;
      end
    end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_valid = 0; s_beat = '0; m_ready = 1; num_active = 4'd2;
    repeat (3) @(negedge clk); rst_n = 1;
    send_n(30);
    wait (rcvd == 30);
    checks++;
    if (got_by[2] + got_by[3] + got_by[4] != 0 || got_by[0] == 0 || got_by[1] == 0) begin
      failures++; $display("FAIL num_active=2 not respected");
    end
    num_active = 4'd5;
    send_n(60);
    wait (rcvd == 90);
    for (int p = 0; p < NP; p++) begin
      checks++; if (got_by[p] == 0) begin failures++; $display("FAIL element %0d unused", p); end
    end
    checks++; if (sent.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
