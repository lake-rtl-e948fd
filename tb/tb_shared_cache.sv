// tb_shared_cache: random line reads and writes through the cache to the
// DRAM model, against a reference memory. Checks read data, that a repeated
// read is a hit (2-clock response, no DRAM read), that a conflicting line
// (same index, other tag) misses, that writes reach DRAM (write through) and
// the hit/miss counters.
module tb_shared_cache;
  import lake_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t req; logic req_valid, req_ready;
  mem_rsp_t rsp; logic rsp_valid;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [25:0] dram_req_addr;
  logic [511:0] dram_req_wdata, dram_rsp_rdata;
  logic [31:0] hits, misses;
  int unsigned dreads, dwrites;
  int checks = 0, failures = 0;

  shared_cache #(.LINES(64), .ADDR_W(26)) dut (.*);
  dram_model #(.LAT(10)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req_we(dram_req_we),
    .req_addr(dram_req_addr), .req_wdata(dram_req_wdata), .rsp_valid(dram_rsp_valid),
    .rsp_rdata(dram_rsp_rdata), .reads(dreads), .writes(dwrites));

  logic [511:0] ref_mem [logic [25:0]];

  task automatic access(input logic we, input logic [25:0] line, input logic [511:0] d,
                        output logic [511:0] r, output int cyc);
    @(negedge clk);
    req = '0; req.target = T_DRAM; req.op = we ? OP_WRITE : OP_READ;
    req.addr = {line, 6'd0}; req.data = d; req.id = 4'd1; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    cyc = 1;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    r = rsp.data;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] r; int cyc; int unsigned dr0, h0, w0;
    req = '0; req_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic logic [25:0] line = 26'($urandom_range(0, 255)) | (($urandom_range(0, 1)) << 20);
      automatic logic we = ($urandom_range(0, 2) == 0);
      automatic logic [511:0] d = {16{$urandom}};
      w0 = dwrites;
      access(we, line, d, r, cyc);
      if (we) begin
        ref_mem[line] = d;
        repeat (12) @(negedge clk);
        checks++; if (dwrites != w0 + 1) begin failures++; $display("FAIL write not through"); end
      end else begin
        checks++;
        if (r !== (ref_mem.exists(line) ? ref_mem[line] : '0)) begin failures++; $display("FAIL read %0h", line); end
        // re-read: must hit
        dr0 = dreads; h0 = hits;
        access(1'b0, line, '0, r, cyc);
        checks++;
        if (dreads != dr0 || hits != h0 + 1 || cyc != 2) begin
          failures++; $display("FAIL expected hit line=%0h cyc=%0d", line, cyc);
        end
        // conflicting line misses
        dr0 = dreads;
        access(1'b0, line ^ 26'h400, '0, r, cyc);
        checks++; if (dreads != dr0 + 1) begin failures++; $display("FAIL expected miss"); end
        checks++;
        if (r !== (ref_mem.exists(line ^ 26'h400) ? ref_mem[line ^ 26'h400] : '0)) failures++;
      end
    end
    checks++; if (misses == 0 || hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
