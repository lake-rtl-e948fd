// mem_network: connects the processing elements to the shared memories.
//
// NUM_PE request ports, NUM_TARGETS target ports (T_DRAM = shared cache in
// front of DRAM, T_SLAB = slab allocator in front of SRAM, T_CAM = look-up
// table). Each target has its own round-robin arbiter over the elements whose
// pending request names it, so the three memories work in parallel. The
// winning request passes combinationally; it advances on the target's ready.
// Every element has at most one request outstanding, so a target's response
// is routed back by the element number carried in the request (req.id) and no
// response buffering is needed. The paper uses an AXI-Stream interconnect core
// here; this arbiter is a plain stand-in with the same role.
module mem_network
  import lake_pkg::*;
#(
  parameter int unsigned NUM_PE = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t pe_req       [NUM_PE],
  input  logic     pe_req_valid [NUM_PE],
  output logic     pe_req_ready [NUM_PE],
  output mem_rsp_t pe_rsp       [NUM_PE],
  output logic     pe_rsp_valid [NUM_PE],
  output mem_req_t t_req        [NUM_TARGETS],
  output logic     t_req_valid  [NUM_TARGETS],
  input  logic     t_req_ready  [NUM_TARGETS],
  input  mem_rsp_t t_rsp        [NUM_TARGETS],
  input  logic     t_rsp_valid  [NUM_TARGETS]
);

  localparam int unsigned GW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  logic [GW-1:0] last [NUM_TARGETS];
  logic [GW-1:0] pick [NUM_TARGETS];
  logic          any  [NUM_TARGETS];

  always_comb begin
    for (int t = 0; t < int'(NUM_TARGETS); t++) begin
      any[t]  = 1'b0;
      pick[t] = '0;
      for (int k = 1; k <= int'(NUM_PE); k++) begin
        int idx;
        idx = (int'(last[t]) + k) % int'(NUM_PE);
        if (!any[t] && pe_req_valid[idx] && int'(pe_req[idx].target) == t) begin
          any[t]  = 1'b1;
          pick[t] = GW'(idx);
        end
      end
      t_req_valid[t] = any[t];
      t_req[t]       = pe_req[pick[t]];
    end
    for (int p = 0; p < int'(NUM_PE); p++) begin
      pe_req_ready[p] = 1'b0;
      for (int t = 0; t < int'(NUM_TARGETS); t++)
        if (any[t] && pick[t] == GW'(p) && int'(pe_req[p].target) == t)
          pe_req_ready[p] = t_req_ready[t];
      pe_rsp_valid[p] = 1'b0;
      pe_rsp[p]       = t_rsp[0];
      for (int t = 0; t < int'(NUM_TARGETS); t++)
        if (t_rsp_valid[t] && t_rsp[t].id == 4'(p)) begin
          pe_rsp_valid[p] = 1'b1;
          pe_rsp[p]       = t_rsp[t];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(NUM_TARGETS); t++) last[t] <= GW'(NUM_PE - 1);
    end else begin
      for (int t = 0; t < int'(NUM_TARGETS); t++)
        if (any[t] && t_req_ready[t]) last[t] <= pick[t];
    end
  end

endmodule
