// tb_slab_allocator: with small classes (N0..N3 = 20, 12, 8, 4) allocates
// every chunk of each class and checks the addresses are distinct, aligned to
// the class size and inside the class's region, that one more allocation
// fails, and that freed chunks are written to SRAM and handed out again.
module tb_slab_allocator;
  import lake_pkg::*;

  localparam int N [4] = '{20, 12, 8, 4};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t req; logic req_valid, req_ready;
  mem_rsp_t rsp; logic rsp_valid;
  logic sram_req_valid, sram_req_ready, sram_req_we, sram_rsp_valid;
  logic [22:0] sram_req_addr;
  logic [31:0] sram_req_wdata, sram_rsp_rdata;
  int unsigned swrites;
  int checks = 0, failures = 0;

  slab_allocator #(.FIFO_DEPTH(4), .N0(20), .N1(12), .N2(8), .N3(4)) dut (.*);
  sram_model #(.LAT(4)) u_sram (
    .clk, .rst_n, .req_valid(sram_req_valid), .req_ready(sram_req_ready), .req_we(sram_req_we),
    .req_addr(sram_req_addr), .req_wdata(sram_req_wdata), .rsp_valid(sram_rsp_valid),
    .rsp_rdata(sram_rsp_rdata), .writes(swrites));

  task automatic op(input mem_op_e o, input logic [1:0] c, input logic [31:0] a, output mem_rsp_t r);
    @(negedge clk);
    req = '0; req.target = T_SLAB; req.op = o; req.cls = c; req.addr = a; req.id = 4'd2; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    r = rsp;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_rsp_t r;
    bit seen [logic [31:0]];
    logic [31:0] got [4][$];
    req = '0; req_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (20) @(negedge clk);
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < N[c]; i++) begin
        automatic logic [31:0] base = 32'h8000_0000 + (32'(c) << 29);
        op(OP_ALLOC, 2'(c), '0, r);
        checks++;
        if (!r.ok || seen.exists(r.addr) || (r.addr & ((32'd64 << c) - 1)) != 0 ||
            r.addr < base || r.addr >= base + 32'(N[c]) * (32'd64 << c)) begin
          failures++; $display("FAIL alloc c=%0d i=%0d ok=%0b addr=%08x", c, i, r.ok, r.addr);
        end
        seen[r.addr] = 1;
        got[c].push_back(r.addr);
      end
      op(OP_ALLOC, 2'(c), '0, r);
      checks++; if (r.ok) begin failures++; $display("FAIL class %0d not exhausted", c); end
    end
    // free three chunks of class 1 and get them back
    for (int i = 0; i < 3; i++) begin
      automatic int unsigned w0 = swrites;
      op(OP_FREE, 2'd1, got[1][i], r);
      checks++; if (!r.ok || swrites != w0 + 1) begin failures++; $display("FAIL free not written to SRAM"); end
    end
    for (int i = 0; i < 3; i++) begin
      op(OP_ALLOC, 2'd1, '0, r);
      checks++;
      if (!r.ok || r.addr != got[1][i]) begin failures++; $display("FAIL realloc %08x %08x", r.addr, got[1][i]); end
    end
    op(OP_ALLOC, 2'd1, '0, r);
    checks++; if (r.ok) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
