// sram_model: behavioural model of the QDRII SRAM and its controller, for
// simulation only (kind: behavioural model, not synthesizable).
//
// 32-bit word interface as seen by the slab allocator, stored sparsely
// (unwritten words read as zero). One request at a time; read data returns
// LAT clocks after acceptance. writes counts word writes.
module sram_model #(
  parameter int unsigned LAT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [22:0] req_addr,
  input  logic [31:0] req_wdata,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata,
  output int unsigned writes
);
  logic [31:0] mem [logic [22:0]];
  int unsigned wait_n;
  logic        pend_rd;
  logic [22:0] pend_a;

  assign req_ready = (wait_n == 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_n <= 0; pend_rd <= 0; pend_a <= '0; rsp_valid <= 0; rsp_rdata <= '0; writes <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (wait_n != 0) begin
        wait_n <= wait_n - 1;
        if (wait_n == 1 && pend_rd) begin
          rsp_valid <= 1'b1;
          rsp_rdata <= mem.exists(pend_a) ? mem[pend_a] : '0;
          pend_rd   <= 1'b0;
        end
      end else if (req_valid) begin
        wait_n <= LAT;
        if (req_we) begin
          mem[req_addr] = req_wdata;
          writes <= writes + 1;
        end else begin
          pend_rd <= 1'b1;
          pend_a  <= req_addr;
        end
      end
    end
  end
endmodule
