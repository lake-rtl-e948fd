// cam_lut: the look-up table that pairs host replies with their keys.
//
// A memcached GET response carries the value but not the key. When a GET
// misses in hardware and is forwarded to the host, the processing element
// stores the key here under a tag made of the request's 32-bit opaque field
// and the client's UDP port (OP_LEARN). When the host's reply arrives, the
// element looks the tag up (OP_LOOKUP) and gets the key back, so the value
// can be stored in DRAM under it. The table is a CAM: every entry's tag is
// compared in parallel. A learn with a tag already present overwrites that
// entry; otherwise entries are replaced round robin. A successful look-up
// releases the entry. Depth and replacement are this design's choices.
// Timing: a request is accepted every clock; the response (ok = hit, data =
// key, len = key length) follows one clock later.
module cam_lut
  import lake_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  input  logic     req_valid,
  output logic     req_ready,
  output mem_rsp_t rsp,
  output logic     rsp_valid
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [DEPTH-1:0]   vld;
  logic [47:0]        tags [DEPTH];
  logic [7:0]         lens [DEPTH];
  logic [DATA_W-1:0]  keys [DEPTH];
  logic [PW-1:0]      wr_ptr;

  logic               hit;
  logic [PW-1:0]      hit_idx;

  assign req_ready = 1'b1;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < int'(DEPTH); i++)
      if (!hit && vld[i] && tags[i] == req.tag) begin
        hit     = 1'b1;
        hit_idx = PW'(i);
      end
  end

  always_ff @(posedge clk) begin
    if (req_valid && req.op == OP_LEARN) begin
      tags[hit ? hit_idx : wr_ptr] <= req.tag;
      lens[hit ? hit_idx : wr_ptr] <= req.len;
      keys[hit ? hit_idx : wr_ptr] <= req.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld       <= '0;
      wr_ptr    <= '0;
      rsp       <= '0;
      rsp_valid <= 1'b0;
    end else begin
      rsp_valid <= req_valid;
      if (req_valid) begin
        rsp.id   <= req.id;
        rsp.addr <= '0;
        if (req.op == OP_LEARN) begin
          vld[hit ? hit_idx : wr_ptr] <= 1'b1;
          if (!hit) wr_ptr <= wr_ptr + 1'b1;
          rsp.ok   <= 1'b1;
          rsp.len  <= '0;
          rsp.data <= '0;
        end else begin
          rsp.ok   <= hit;
          rsp.len  <= hit ? lens[hit_idx] : 8'd0;
          rsp.data <= hit ? keys[hit_idx] : '0;
          if (hit) vld[hit_idx] <= 1'b0;
        end
      end
    end
  end

endmodule
