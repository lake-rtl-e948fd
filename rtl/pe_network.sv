// pe_network: spreads query packets over the processing elements and merges
// their output.
//
// Dispatch: at a packet boundary the next element after the last one served,
// among the first num_active elements, that is idle (busy low) and ready is
// chosen, and the whole packet goes to it. An element therefore holds at most
// one packet, and a packet waits in the input FIFO while every active element
// is busy. num_active (1..NUM_PE; 0 counts as 1) can be changed at any time;
// it is applied at the next packet boundary, which is how the number of
// elements in use is changed on the fly. Collection: a round-robin packet
// multiplexer (input_arbiter without source stamping) merges element outputs.
// The paper builds this from an AXI-Stream interconnect core; this
// dispatcher is a plain stand-in with the same role.
module pe_network
  import lake_pkg::*;
#(
  parameter int unsigned NUM_PE = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] num_active,
  // from the input FIFO
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  // to the elements
  output logic       pe_in_valid [NUM_PE],
  input  logic       pe_in_ready [NUM_PE],
  output axis_beat_t pe_in_beat  [NUM_PE],
  input  logic       pe_busy     [NUM_PE],
  // from the elements
  input  logic       pe_out_valid [NUM_PE],
  output logic       pe_out_ready [NUM_PE],
  input  axis_beat_t pe_out_beat  [NUM_PE],
  // merged output
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);

  localparam int unsigned GW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;

  logic          locked;
  logic [GW-1:0] grant, last, pick;
  logic          found;
  logic [3:0]    n_act;

  always_comb begin
    n_act = (num_active == 4'd0) ? 4'd1 :
            (num_active > 4'(NUM_PE)) ? 4'(NUM_PE) : num_active;
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= int'(NUM_PE); k++) begin
      int idx;
      idx = (int'(last) + k) % int'(NUM_PE);
      if (!found && idx < int'(n_act) && !pe_busy[idx] && pe_in_ready[idx]) begin
        found = 1'b1;
        pick  = GW'(idx);
      end
    end
  end

  logic [GW-1:0] sel;
  logic          go;
  assign sel     = locked ? grant : pick;
  assign go      = locked || found;
  assign s_ready = go && pe_in_ready[sel];

  always_comb begin
    for (int i = 0; i < int'(NUM_PE); i++) begin
      pe_in_valid[i] = s_valid && go && (GW'(i) == sel);
      pe_in_beat[i]  = s_beat;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      grant  <= '0;
      last   <= GW'(NUM_PE - 1);
    end else if (s_valid && s_ready) begin
      if (s_beat.tlast) begin
        locked <= 1'b0;
        last   <= sel;
      end else begin
        locked <= 1'b1;
        grant  <= sel;
      end
    end
  end

  input_arbiter #(.NUM_IN(NUM_PE), .STAMP_SRC(1'b0)) u_merge (
    .clk, .rst_n,
    .s_valid(pe_out_valid), .s_ready(pe_out_ready), .s_beat(pe_out_beat),
    .m_valid, .m_ready, .m_beat);

endmodule
