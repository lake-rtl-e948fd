// output_arbiter: merges normal traffic and key-value engine output.
//
// Two AXI-Stream inputs, whole packets at a time. Input 0 (normal traffic)
// has strict priority at every packet boundary, as the paper gives normal
// traffic priority over memcached traffic; input 1 (replies and forwarded
// misses from the key-value engine) is served when input 0 has nothing
// waiting. The granted input keeps the output until its tlast beat is
// accepted. Combinational path, no added latency. The merged stream goes to
// the output port lookup of the switch/NIC datapath.
module output_arbiter
  import lake_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       n_valid,
  output logic       n_ready,
  input  axis_beat_t n_beat,
  input  logic       l_valid,
  output logic       l_ready,
  input  axis_beat_t l_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);

  logic locked, grant;   // grant: 0 normal, 1 key-value engine
  logic sel;

  assign sel     = locked ? grant : !n_valid;
  assign m_valid = sel ? l_valid : n_valid;
  assign m_beat  = sel ? l_beat  : n_beat;
  assign n_ready = !sel && m_ready;
  assign l_ready = sel && m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      grant  <= 1'b0;
    end else if (m_valid && m_ready) begin
      locked <= !m_beat.tlast;
      grant  <= sel;
    end
  end

endmodule
