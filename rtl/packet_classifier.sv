// packet_classifier: splits memcached traffic from normal traffic.
//
// Looks at the first 64-byte beat of each packet, which holds every header
// field needed. A packet is memcached if it is IPv4 (no options) / UDP and
// either a request (UDP destination port 11211, magic 0x80) or a response
// (UDP source port 11211, magic 0x81). Then:
//   GET request                        -> key-value engine only
//   SET or DELETE request              -> both paths (host copy updates the
//                                         memcached server)
//   GET response with status 0 (host)  -> both paths (engine learns value)
//   anything else                      -> normal path only
// Packets longer than the engine's buffer, or with keys over MAX_KEY bytes,
// stay on the normal path. The engine copy is admitted only if the engine's
// input FIFO has room for a maximum-size packet (lake_room); otherwise it is
// dropped and drops counts it, so normal traffic is never stalled by the
// engine. A GET request that is dropped is lost (UDP; the client retries).
// The decision is taken combinationally on the first beat and held for the
// rest of the packet. Input ready follows the normal path when the packet
// goes there, and is 1 otherwise. Port 11211 and the admission rule are this
// design's choices; the split of GET/SET/DELETE/replies follows the paper.
module packet_classifier
  import lake_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  axis_beat_t  s_beat,
  output logic        n_valid,
  input  logic        n_ready,
  output axis_beat_t  n_beat,
  output logic        l_valid,
  output axis_beat_t  l_beat,
  input  logic        lake_room,
  output logic [31:0] drops,
  output logic [31:0] to_lake
);

  function automatic logic [7:0] b(input logic [DATA_W-1:0] d, input int unsigned i);
    return d[i*8 +: 8];
  endfunction

  logic first;               // next beat starts a packet
  logic keep_n, keep_l;      // decision for the current packet
  logic dec_n, dec_l, want_l;

  always_comb begin
    logic [DATA_W-1:0] d;
    logic [15:0] sport, dport, iplen, klen;
    logic ipudp, req, rsp, fits;
    d     = s_beat.tdata;
    sport = {b(d, OFF_SPORT), b(d, OFF_SPORT+1)};
    dport = {b(d, OFF_DPORT), b(d, OFF_DPORT+1)};
    iplen = {b(d, OFF_IPLEN), b(d, OFF_IPLEN+1)};
    klen  = {b(d, OFF_KEYLEN), b(d, OFF_KEYLEN+1)};
    ipudp = ({b(d, OFF_ETYPE), b(d, OFF_ETYPE+1)} == 16'h0800) && (b(d, 14) == 8'h45) &&
            (b(d, OFF_IPPROT) == 8'd17);
    req   = ipudp && dport == MC_PORT && b(d, OFF_MAGIC) == MAGIC_REQ;
    rsp   = ipudp && sport == MC_PORT && b(d, OFF_MAGIC) == MAGIC_RSP;
    fits  = (32'(iplen) + 32'd14 <= 32'(PKT_BYTES)) && (klen <= 16'(MAX_KEY));
    dec_n  = 1'b1;
    want_l = 1'b0;
    if (fits && req && b(d, OFF_OPCODE) == OPC_GET) begin
      dec_n = 1'b0; want_l = 1'b1;
    end else if (fits && req && (b(d, OFF_OPCODE) == OPC_SET || b(d, OFF_OPCODE) == OPC_DELETE)) begin
      want_l = 1'b1;
    end else if (fits && rsp && b(d, OFF_OPCODE) == OPC_GET &&
                 {b(d, OFF_STATUS), b(d, OFF_STATUS+1)} == 16'd0) begin
      want_l = 1'b1;
    end
    dec_l = want_l && lake_room;
  end

  logic cur_n, cur_l;
  assign cur_n = first ? dec_n : keep_n;
  assign cur_l = first ? dec_l : keep_l;

  assign s_ready = cur_n ? n_ready : 1'b1;
  assign n_valid = s_valid && cur_n;
  assign n_beat  = s_beat;
  assign l_valid = s_valid && s_ready && cur_l;
  assign l_beat  = s_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first   <= 1'b1;
      keep_n  <= 1'b1;
      keep_l  <= 1'b0;
      drops   <= '0;
      to_lake <= '0;
    end else if (s_valid && s_ready) begin
      first <= s_beat.tlast;
      if (first) begin
        keep_n <= dec_n;
        keep_l <= dec_l;
        if (want_l && !lake_room) drops <= drops + 1;
        if (dec_l) to_lake <= to_lake + 1;
      end
    end
  end

endmodule
