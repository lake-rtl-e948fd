// dram_model: behavioural model of the DDR3 controller and SoDIMM, for
// simulation only (kind: behavioural model, not synthesizable).
//
// 64-byte line interface as seen by the shared cache. Lines are stored
// sparsely; a line never written reads as zero, i.e. an empty hash table.
// One request at a time: a write completes LAT clocks after acceptance, a read
// returns its data LAT clocks after acceptance. LAT = 23 clocks is the paper's
// 115 ns zero-load latency at a 200 MHz core clock. reads/writes count the
// accesses.
module dram_model #(
  parameter int unsigned LAT = 23
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [25:0]  req_addr,
  input  logic [511:0] req_wdata,
  output logic         rsp_valid,
  output logic [511:0] rsp_rdata,
  output int unsigned  reads,
  output int unsigned  writes
);
  logic [511:0] mem [logic [25:0]];
  int unsigned  wait_n;
  logic         pend_rd;
  logic [25:0]  pend_a;

  assign req_ready = (wait_n == 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_n <= 0; pend_rd <= 0; pend_a <= '0; rsp_valid <= 0; rsp_rdata <= '0;
      reads <= 0; writes <= 0;
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
          reads   <= reads + 1;
        end
      end
    end
  end
endmodule
