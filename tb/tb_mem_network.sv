// tb_mem_network: four requesters issue random requests to the three targets;
// each target (a small model here) answers after a random delay with data
// derived from the request. Checks every requester gets exactly its own
// answer, that requests reach the target they name, and that with all four
// requesters waiting on one target the grants go round robin.
module tb_mem_network;
  import lake_pkg::*;

  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t pe_req [NP]; logic pe_req_valid [NP], pe_req_ready [NP];
  mem_rsp_t pe_rsp [NP]; logic pe_rsp_valid [NP];
  mem_req_t t_req [3]; logic t_req_valid [3], t_req_ready [3];
  mem_rsp_t t_rsp [3]; logic t_rsp_valid [3];
  int checks = 0, failures = 0;
  int grants [3][$];

  mem_network #(.NUM_PE(NP)) dut (.*);

  // Targets: accept when idle, answer after 1..6 clocks with data = ~addr.
  for (genvar t = 0; t < 3; t++) begin : g_t
    mem_req_t held; int wait_n; logic busy_t;
    assign t_req_ready[t] = !busy_t;
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin busy_t <= 0; t_rsp_valid[t] <= 0; wait_n <= 0; t_rsp[t] <= '0; end
      else begin
        t_rsp_valid[t] <= 0;
        if (!busy_t && t_req_valid[t]) begin
          busy_t <= 1; held <= t_req[t]; wait_n <= $urandom_range(1, 6);
          grants[t].push_back(int'(t_req[t].id));
          if (int'(t_req[t].target) != t) begin failures++; $display("FAIL misrouted"); end
        end else if (busy_t) begin
          if (wait_n == 1) begin
            busy_t <= 0; t_rsp_valid[t] <= 1;
            t_rsp[t] <= '{id: held.id, ok: 1'b1, addr: held.addr, len: 8'(t), data: {16{~held.addr}}};
          end
          wait_n <= wait_n - 1;
        end
      end
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_p
    initial begin
      pe_req_valid[p] = 0; pe_req[p] = '0;
      @(posedge rst_n);
      for (int i = 0; i < 60; i++) begin
        automatic int tg = (i < 5) ? 0 : $urandom_range(0, 2);
        automatic logic [31:0] a = {8'(p), 24'($urandom)};
        @(negedge clk);
        pe_req[p] = '0; pe_req[p].target = mem_target_e'(tg); pe_req[p].id = 4'(p); pe_req[p].addr = a;
        pe_req_valid[p] = 1;
        @(posedge clk); while (!pe_req_ready[p]) @(posedge clk);
        #1 pe_req_valid[p] = 0;
        @(posedge clk); while (!pe_rsp_valid[p]) @(posedge clk);
        checks++;
        if (pe_rsp[p].addr !== a || pe_rsp[p].data !== {16{~a}} || pe_rsp[p].len !== 8'(tg)) begin
          failures++; $display("FAIL requester %0d got a wrong answer", p);
        end
      end
      done_n++;
    end
  end
  int done_n = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done_n == NP);
    // the first four grants of target 0 (all requesters start together) are distinct
    checks++;
    begin
      automatic bit [NP-1:0] seen = '0;
      for (int i = 0; i < NP; i++) seen[grants[0][i]] = 1;
      if (seen != '1) begin failures++; $display("FAIL not round robin"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
