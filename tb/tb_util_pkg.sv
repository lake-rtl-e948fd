// tb_util_pkg: packet builders and reference models shared by the testbenches.
//
// Packets are byte queues (byte 0 first). mc_packet builds an
// Ethernet/IPv4/UDP memcached binary-protocol packet; beat_of cuts a packet
// into 64-byte AXI-Stream beats; crc32_ref is a bit-serial CRC-32 written
// independently of the RTL hash unit.
package tb_util_pkg;
  import lake_pkg::*;

  typedef byte unsigned bq_t[$];

  function automatic bq_t str_bytes(input string s);
    bq_t q;
    for (int i = 0; i < s.len(); i++) q.push_back(byte'(s[i]));
    return q;
  endfunction

  function automatic bq_t rand_bytes(input int n);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(byte'($urandom_range(0, 255)));
    return q;
  endfunction

  // is_req: request (to port 11211) or response (from port 11211).
  function automatic bq_t mc_packet(input bit is_req, input byte unsigned opcode,
                                    input bq_t key, input bq_t value, input int unsigned opaque,
                                    input int unsigned client_port, input int unsigned extlen,
                                    input int unsigned status = 0, input byte unsigned client_id = 8'h11);
    bq_t p;
    int unsigned iplen, udplen, body;
    int unsigned sport, dport;
    body   = extlen + key.size() + value.size();
    udplen = 8 + 8 + 24 + body;
    iplen  = 20 + udplen;
    sport  = is_req ? client_port : 11211;
    dport  = is_req ? 11211 : client_port;
    // Ethernet
    for (int i = 0; i < 6; i++) p.push_back(is_req ? 8'hA0 + i : client_id);          // dst MAC
    for (int i = 0; i < 6; i++) p.push_back(is_req ? client_id : 8'hA0 + i);          // src MAC
    p.push_back(8'h08); p.push_back(8'h00);
    // IPv4
    p.push_back(8'h45); p.push_back(8'h00); p.push_back(iplen[15:8]); p.push_back(iplen[7:0]);
    p.push_back(8'h12); p.push_back(8'h34); p.push_back(8'h40); p.push_back(8'h00);
    p.push_back(8'd64); p.push_back(8'd17); p.push_back(8'h00); p.push_back(8'h00);
    p.push_back(8'd10); p.push_back(8'd0); p.push_back(8'd0); p.push_back(is_req ? client_id : 8'd1);
    p.push_back(8'd10); p.push_back(8'd0); p.push_back(8'd0); p.push_back(is_req ? 8'd1 : client_id);
    // UDP
    p.push_back(sport[15:8]); p.push_back(sport[7:0]); p.push_back(dport[15:8]); p.push_back(dport[7:0]);
    p.push_back(udplen[15:8]); p.push_back(udplen[7:0]); p.push_back(8'h00); p.push_back(8'h00);
    // memcached UDP frame header: request id, seq 0, 1 datagram, reserved
    p.push_back(opaque[7:0]); p.push_back(8'h5A); p.push_back(0); p.push_back(0);
    p.push_back(0); p.push_back(1); p.push_back(0); p.push_back(0);
    // binary header
    p.push_back(is_req ? 8'h80 : 8'h81); p.push_back(opcode);
    p.push_back(8'(key.size() >> 8)); p.push_back(8'(key.size()));
    p.push_back(8'(extlen)); p.push_back(8'h00);
    p.push_back(8'(status >> 8)); p.push_back(8'(status));
    p.push_back(body[31:24]); p.push_back(body[23:16]); p.push_back(body[15:8]); p.push_back(body[7:0]);
    p.push_back(opaque[31:24]); p.push_back(opaque[23:16]); p.push_back(opaque[15:8]); p.push_back(opaque[7:0]);
    for (int i = 0; i < 8; i++) p.push_back(8'h00);   // CAS
    for (int i = 0; i < int'(extlen); i++) p.push_back(8'hE0 + 8'(i));
    foreach (key[i]) p.push_back(key[i]);
    foreach (value[i]) p.push_back(value[i]);
    return p;
  endfunction

  function automatic bq_t get_req(input bq_t key, input int unsigned opaque, input int unsigned port);
    bq_t e;
    return mc_packet(1'b1, OPC_GET, key, e, opaque, port, 0);
  endfunction

  function automatic bq_t set_req(input bq_t key, input bq_t value, input int unsigned opaque, input int unsigned port);
    return mc_packet(1'b1, OPC_SET, key, value, opaque, port, 8);
  endfunction

  function automatic bq_t del_req(input bq_t key, input int unsigned opaque, input int unsigned port);
    bq_t e;
    return mc_packet(1'b1, OPC_DELETE, key, e, opaque, port, 0);
  endfunction

  function automatic bq_t host_reply(input bq_t value, input int unsigned opaque, input int unsigned port);
    bq_t e;
    return mc_packet(1'b0, OPC_GET, e, value, opaque, port, 4);
  endfunction

  // A plain (non-memcached) UDP packet of n bytes.
  function automatic bq_t plain_packet(input int n, input byte unsigned tag);
    bq_t p;
    p = mc_packet(1'b1, OPC_GET, '{tag}, '{}, 0, 5000, 0);
    p[36] = 8'h13; p[37] = 8'h88;         // destination port 5000, not memcached
    while (p.size() < n) p.push_back(tag);
    return p;
  endfunction

  function automatic int nbeats(input bq_t p);
    return (p.size() + 63) / 64;
  endfunction

  function automatic axis_beat_t beat_of(input bq_t p, input int i, input logic [2:0] src = 3'd0);
    axis_beat_t b;
    b = '0;
    for (int j = 0; j < 64; j++)
      if (i*64 + j < p.size()) begin
        b.tdata[j*8 +: 8] = p[i*64 + j];
        b.tkeep[j] = 1'b1;
      end
    b.tlast = (i == nbeats(p) - 1);
    b.tuser.src_port = src;
    return b;
  endfunction

  function automatic logic [PKT_BYTES*8-1:0] to_vec(input bq_t p);
    logic [PKT_BYTES*8-1:0] v;
    v = '0;
    foreach (p[i]) if (i < int'(PKT_BYTES)) v[i*8 +: 8] = p[i];
    return v;
  endfunction

  function automatic logic [31:0] crc32_ref(input bq_t d);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (d[i]) begin
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = c[0] ^ d[i][k];
        c  = c >> 1;
        if (fb) c = c ^ 32'hEDB8_8320;
      end
    end
    return ~c;
  endfunction

  // Expected GET reply for a request and a value (flags 0).
  function automatic bq_t expected_reply(input bq_t req, input bq_t value);
    bq_t r;
    int unsigned iplen, udplen, body;
    logic [31:0] sum;
    body = 4 + value.size(); udplen = 8 + 8 + 24 + body; iplen = 20 + udplen;
    for (int i = 0; i < 6; i++) r.push_back(req[6+i]);
    for (int i = 0; i < 6; i++) r.push_back(req[i]);
    r.push_back(req[12]); r.push_back(req[13]);
    r.push_back(8'h45); r.push_back(req[15]); r.push_back(iplen[15:8]); r.push_back(iplen[7:0]);
    for (int i = 18; i < 24; i++) r.push_back(req[i]);
    r.push_back(0); r.push_back(0);
    for (int i = 0; i < 4; i++) r.push_back(req[30+i]);
    for (int i = 0; i < 4; i++) r.push_back(req[26+i]);
    r.push_back(req[36]); r.push_back(req[37]); r.push_back(req[34]); r.push_back(req[35]);
    r.push_back(udplen[15:8]); r.push_back(udplen[7:0]); r.push_back(0); r.push_back(0);
    r.push_back(req[42]); r.push_back(req[43]); r.push_back(0); r.push_back(0);
    r.push_back(0); r.push_back(1); r.push_back(req[48]); r.push_back(req[49]);
    r.push_back(8'h81); r.push_back(8'h00); r.push_back(0); r.push_back(0);
    r.push_back(4); r.push_back(0); r.push_back(0); r.push_back(0);
    r.push_back(body[31:24]); r.push_back(body[23:16]); r.push_back(body[15:8]); r.push_back(body[7:0]);
    for (int i = 0; i < 4; i++) r.push_back(req[62+i]);
    for (int i = 0; i < 8; i++) r.push_back(0);
    for (int i = 0; i < 4; i++) r.push_back(0);
    foreach (value[i]) r.push_back(value[i]);
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += {r[i], r[i+1]};
    while (sum[31:16] != 0) sum = sum[15:0] + sum[31:16];
    r[24] = ~sum[15:8]; r[25] = ~sum[7:0];
    return r;
  endfunction

endpackage
