// tb_cam_lut: learns random {opaque, port} tags with random keys, looks them
// up (hit, key and length must match; a second look-up misses because the
// entry is released), checks overwrite of an existing tag, a miss for an
// unknown tag, round-robin replacement after DEPTH learns and the one-clock
// response latency.
module tb_cam_lut;
  import lake_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t req; logic req_valid, req_ready;
  mem_rsp_t rsp; logic rsp_valid;
  int checks = 0, failures = 0;

  cam_lut #(.DEPTH(DEPTH)) dut (.*);

  task automatic op(input mem_op_e o, input logic [47:0] tag, input logic [511:0] key,
                    input logic [7:0] len, output mem_rsp_t r);
    @(negedge clk);
    req = '0; req.target = T_CAM; req.op = o; req.tag = tag; req.data = key; req.len = len;
    req.id = 4'd3; req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!rsp_valid || rsp.id != 4'd3) begin failures++; $display("FAIL no response after 1 clock"); end
    r = rsp;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] tags [8];
    logic [511:0] keys [8];
    mem_rsp_t r;
    req = '0; req_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      tags[i] = {$urandom, 16'(i)};
      keys[i] = {16{$urandom}};
      op(OP_LEARN, tags[i], keys[i], 8'(i + 1), r);
    end
    // overwrite tag 2
    keys[2] = {16{$urandom}};
    op(OP_LEARN, tags[2], keys[2], 8'd33, r);
    for (int i = 7; i >= 0; i--) begin
      op(OP_LOOKUP, tags[i], '0, '0, r);
      checks++;
      if (!r.ok || r.data !== keys[i] || r.len !== ((i == 2) ? 8'd33 : 8'(i + 1))) begin
        failures++; $display("FAIL lookup %0d ok=%0b len=%0d", i, r.ok, r.len);
      end
      op(OP_LOOKUP, tags[i], '0, '0, r);
      checks++; if (r.ok) begin failures++; $display("FAIL entry not released %0d", i); end
    end
    op(OP_LOOKUP, 48'hDEAD_BEEF_0001, '0, '0, r);
    checks++; if (r.ok) failures++;
    // fill DEPTH + 1 entries: the first learned of these is replaced
    for (int i = 0; i < DEPTH + 1; i++) op(OP_LEARN, 48'(1000 + i), 512'(i), 8'd4, r);
    op(OP_LOOKUP, 48'(1000 + DEPTH), '0, '0, r);
    checks++; if (!r.ok || r.data !== 512'(DEPTH)) begin failures++; $display("FAIL newest entry"); end
    op(OP_LOOKUP, 48'(1000 + 1), '0, '0, r);
    checks++; if (!r.ok) begin failures++; $display("FAIL entry 1 lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
