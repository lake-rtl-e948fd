// packet_parser: field extraction for a buffered memcached packet.
//
// Purely combinational. The packet buffer of a processing element presents the
// whole packet as one flat vector (byte 0 in bits 7:0) and this block pulls out
// what the rest of the element needs: whether it is a memcached binary packet
// over UDP, request or response, opcode, status, key length, extras length,
// body length, opaque, UDP ports, the key (up to MAX_KEY bytes, zero padded)
// and the value length. Multi-byte header fields are big-endian on the wire.
// The key starts after the extras (offset 74 + extras length); the value
// starts after the key and its bytes are taken by the caller with a shift.
// The field layout is the standard memcached binary protocol; the paper only
// says that the binary protocol over UDP is used.
module packet_parser
  import lake_pkg::*;
#(
  parameter int unsigned PKT_BYTES_P = lake_pkg::PKT_BYTES
) (
  input  logic [PKT_BYTES_P*8-1:0] pkt,
  output parsed_t                  f
);

  function automatic logic [7:0] b(input int unsigned i);
    return pkt[i*8 +: 8];
  endfunction

  logic [15:0] etype, klen16;
  logic [7:0]  prot, ext;
  logic [31:0] body;
  logic [PKT_BYTES_P*8-1:0] shifted;
  logic [MAX_KEY*8-1:0] key_mask;

  always_comb begin
    etype  = {b(OFF_ETYPE), b(OFF_ETYPE+1)};
    prot   = b(OFF_IPPROT);
    klen16 = {b(OFF_KEYLEN), b(OFF_KEYLEN+1)};
    ext    = b(OFF_EXTLEN);
    body   = {b(OFF_BODYLEN), b(OFF_BODYLEN+1), b(OFF_BODYLEN+2), b(OFF_BODYLEN+3)};

    f          = '0;
    f.sport    = {b(OFF_SPORT), b(OFF_SPORT+1)};
    f.dport    = {b(OFF_DPORT), b(OFF_DPORT+1)};
    f.is_req   = (b(OFF_MAGIC) == MAGIC_REQ);
    f.is_mc    = (etype == 16'h0800) && (prot == 8'd17) &&
                 (((f.dport == MC_PORT) && f.is_req) ||
                  ((f.sport == MC_PORT) && (b(OFF_MAGIC) == MAGIC_RSP)));
    f.opcode   = b(OFF_OPCODE);
    f.status   = {b(OFF_STATUS), b(OFF_STATUS+1)};
    f.key_len  = klen16;
    f.ext_len  = ext;
    f.body_len = body;
    f.opaque   = {b(OFF_OPAQUE), b(OFF_OPAQUE+1), b(OFF_OPAQUE+2), b(OFF_OPAQUE+3)};
    f.value_len = 16'(body - 32'(ext) - 32'(klen16));

    shifted  = pkt >> (8 * (OFF_EXTRAS + int'(ext)));
    key_mask = '0;
    for (int i = 0; i < int'(MAX_KEY); i++)
      if (16'(i) < klen16) key_mask[i*8 +: 8] = 8'hFF;
    f.key = shifted[MAX_KEY*8-1:0] & key_mask;
  end

endmodule
