// input_arbiter: round-robin packet multiplexer.
//
// Merges NUM_IN AXI-Stream inputs into one, a whole packet at a time: at a
// packet boundary the next input after the last winner that has a beat waiting
// is granted, and it keeps the grant until its tlast beat is accepted. The
// path is combinational (no added latency). With STAMP_SRC = 1 the input
// number is written into the beat's src_port, as the NetFPGA input arbiter in
// front of the datapath does for RX0..RX3 and DMA RX (input 4); with
// STAMP_SRC = 0 metadata passes unchanged (used to merge PE outputs). The
// paper names this block but does not describe it; round robin is this
// design's choice.
module input_arbiter
  import lake_pkg::*;
#(
  parameter int unsigned NUM_IN    = 5,
  parameter bit          STAMP_SRC = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid [NUM_IN],
  output logic       s_ready [NUM_IN],
  input  axis_beat_t s_beat  [NUM_IN],
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);

  localparam int unsigned GW = (NUM_IN > 1) ? $clog2(NUM_IN) : 1;

  logic          locked;
  logic [GW-1:0] grant, last, pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = last;
    for (int k = 1; k <= int'(NUM_IN); k++) begin
      int idx;
      idx = (int'(last) + k) % int'(NUM_IN);
      if (!any && s_valid[idx]) begin
        any  = 1'b1;
        pick = GW'(idx);
      end
    end
  end

  logic [GW-1:0] sel;
  assign sel = locked ? grant : pick;

  always_comb begin
    m_valid = locked ? s_valid[grant] : any;
    m_beat  = s_beat[sel];
    if (STAMP_SRC) m_beat.tuser.src_port = 3'(sel);
    for (int i = 0; i < int'(NUM_IN); i++)
      s_ready[i] = (GW'(i) == sel) && (locked || any) && m_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      grant  <= '0;
      last   <= GW'(NUM_IN - 1);
    end else if (m_valid && m_ready) begin
      if (m_beat.tlast) begin
        locked <= 1'b0;
        last   <= sel;
      end else begin
        locked <= 1'b1;
        grant  <= sel;
      end
    end
  end

endmodule
