// key_value_access: key-value chunk logic of a processing element.
//
// A chunk in the data store holds the key bytes followed directly by the
// value bytes, starting at chunk byte 0 (this layout is this design's choice).
// Keys are at most 64 bytes, so the whole key is in the first 64-byte line of
// the chunk and one line read decides a match.
//   match     : the first klen bytes of line0 equal the requested key.
//   chunk_out : image to write for a SET or a learned host reply: key, then
//               value, zero beyond klen + vlen bytes.
//   rd_value  : value bytes of a chunk read back (chunk >> 8*klen).
// Combinational.
module key_value_access
  import lake_pkg::*;
#(
  parameter int unsigned CHUNK_BYTES = lake_pkg::CHUNK_MAX
) (
  input  logic [MAX_KEY*8-1:0]     key,
  input  logic [7:0]               key_len,
  input  logic [LINE_BYTES*8-1:0]  line0,
  output logic                     match,
  input  logic [CHUNK_BYTES*8-1:0] value,
  input  logic [15:0]              value_len,
  output logic [CHUNK_BYTES*8-1:0] chunk_out,
  input  logic [CHUNK_BYTES*8-1:0] rd_chunk,
  output logic [CHUNK_BYTES*8-1:0] rd_value
);

  logic [CHUNK_BYTES*8-1:0] placed;
  logic [15:0]              total;

  always_comb begin
    match = 1'b1;
    for (int i = 0; i < int'(MAX_KEY); i++)
      if ((8'(i) < key_len) && (line0[i*8 +: 8] != key[i*8 +: 8])) match = 1'b0;

    total  = 16'(key_len) + value_len;
    placed = value << (8 * int'(key_len));
    for (int i = 0; i < int'(MAX_KEY); i++)
      if (8'(i) < key_len) placed[i*8 +: 8] = key[i*8 +: 8];
    chunk_out = '0;
    for (int i = 0; i < int'(CHUNK_BYTES); i++)
      if (16'(i) < total) chunk_out[i*8 +: 8] = placed[i*8 +: 8];

    rd_value = rd_chunk >> (8 * int'(key_len));
  end

endmodule
