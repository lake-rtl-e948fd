// packet_deparser: builds the GET response sent to a client on a hit.
//
// Combinational. From the buffered request it keeps the EtherType, IP
// identification/TTL/protocol, the memcached UDP frame header (request id)
// and the opaque field, and it swaps the MAC addresses, IP addresses and UDP
// ports so the reply returns to the sender. The memcached binary header
// becomes a response (magic 0x81, opcode GET, status 0, key length 0, 4 bytes
// of extras holding flags = 0, CAS 0) followed by the value. IPv4 total
// length, UDP length and the IPv4 header checksum are recomputed; the UDP
// checksum is set to 0 (no checksum), which IPv4 allows. The response layout
// is the memcached binary protocol; the paper does not describe it, and it
// stores no flags, hence flags = 0.
// rsp_len is the reply length in bytes (78 + value_len).
module packet_deparser
  import lake_pkg::*;
#(
  parameter int unsigned PKT_BYTES_P = lake_pkg::PKT_BYTES,
  parameter int unsigned VAL_BYTES   = lake_pkg::CHUNK_MAX
) (
  input  logic [PKT_BYTES_P*8-1:0] req,
  input  logic [VAL_BYTES*8-1:0]   value,
  input  logic [15:0]              value_len,
  output logic [PKT_BYTES_P*8-1:0] rsp,
  output logic [15:0]              rsp_len
);

  localparam int unsigned HDR = OFF_EXTRAS + 4;   // 78 bytes before the value

  logic [7:0]  hb [HDR];
  logic [15:0] ip_len, udp_len;
  logic [31:0] body, sum;
  logic [15:0] csum;
  logic [PKT_BYTES_P*8-1:0] vplaced;

  function automatic logic [7:0] rb(input int unsigned i);
    return req[i*8 +: 8];
  endfunction

  always_comb begin
    ip_len  = 16'(HDR - 14) + value_len;
    udp_len = 16'(HDR - 34) + value_len;
    body    = 32'd4 + 32'(value_len);
    rsp_len = 16'(HDR) + value_len;

    for (int i = 0; i < int'(HDR); i++) hb[i] = 8'h00;
    for (int i = 0; i < 6; i++) begin
      hb[i]     = rb(6 + i);          // destination MAC = request source
      hb[6 + i] = rb(i);              // source MAC = request destination
    end
    hb[12] = rb(12); hb[13] = rb(13);
    hb[14] = 8'h45;  hb[15] = rb(15);
    hb[16] = ip_len[15:8]; hb[17] = ip_len[7:0];
    for (int i = 18; i < 24; i++) hb[i] = rb(i);   // id, flags/fragment, TTL, protocol
    for (int i = 0; i < 4; i++) begin
      hb[OFF_SRCIP + i] = rb(OFF_DSTIP + i);
      hb[OFF_DSTIP + i] = rb(OFF_SRCIP + i);
    end
    hb[OFF_SPORT] = rb(OFF_DPORT); hb[OFF_SPORT+1] = rb(OFF_DPORT+1);
    hb[OFF_DPORT] = rb(OFF_SPORT); hb[OFF_DPORT+1] = rb(OFF_SPORT+1);
    hb[OFF_UDPLEN] = udp_len[15:8]; hb[OFF_UDPLEN+1] = udp_len[7:0];
    for (int i = OFF_FRAME; i < OFF_FRAME + 8; i++) hb[i] = rb(i);
    hb[OFF_FRAME+2] = 8'h00; hb[OFF_FRAME+3] = 8'h00;   // sequence number 0
    hb[OFF_FRAME+4] = 8'h00; hb[OFF_FRAME+5] = 8'h01;   // one datagram
    hb[OFF_MAGIC]  = MAGIC_RSP;
    hb[OFF_OPCODE] = OPC_GET;
    hb[OFF_EXTLEN] = 8'd4;
    for (int i = 0; i < 4; i++) begin
      hb[OFF_BODYLEN + i] = body[31 - 8*i -: 8];
      hb[OFF_OPAQUE + i]  = rb(OFF_OPAQUE + i);
    end

    sum = '0;
    for (int i = 14; i < 34; i += 2) sum += {16'd0, hb[i], hb[i+1]};
    sum  = {16'd0, sum[15:0]} + {16'd0, sum[31:16]};
    sum  = {16'd0, sum[15:0]} + {16'd0, sum[31:16]};
    csum = ~sum[15:0];
    hb[OFF_IPCSUM] = csum[15:8]; hb[OFF_IPCSUM+1] = csum[7:0];

    vplaced = '0;
    vplaced[VAL_BYTES*8-1:0] = value;
    vplaced = vplaced << (8 * HDR);
    rsp = '0;
    for (int i = 0; i < int'(PKT_BYTES_P); i++)
      if (i < int'(HDR))               rsp[i*8 +: 8] = hb[i];
      else if (16'(i) < rsp_len)       rsp[i*8 +: 8] = vplaced[i*8 +: 8];
  end

endmodule
