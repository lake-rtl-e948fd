// hash_table_access: bucket logic of a processing element.
//
// A hash-table bucket is one 512-bit DRAM line holding eight 64-bit
// descriptors (descriptor i in bits 64*i+63 .. 64*i), so one memory read gives
// an 8-way set. Each descriptor holds a valid bit, the value length, the key
// length and the DRAM address of the key-value chunk (layout in lake_pkg).
// Following the paper, a key is only fetched from DRAM for ways whose stored
// key length equals the requested one: cand marks those ways. free_way is the
// lowest invalid way. For writing, the descriptor wr_desc is placed in way
// wr_way of the bucket, giving bucket_out (the rest of the line unchanged).
// Combinational; the element's controller sequences reads and writes.
module hash_table_access
  import lake_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  logic [WAYS*64-1:0]     bucket,
  input  logic [14:0]            key_len,
  output logic [WAYS-1:0]        cand,
  output logic [$clog2(WAYS)-1:0] free_way,
  output logic                   has_free,
  output desc_t                  way_desc [WAYS],
  input  logic [$clog2(WAYS)-1:0] wr_way,
  input  desc_t                  wr_desc,
  output logic [WAYS*64-1:0]     bucket_out
);

  always_comb begin
    has_free = 1'b0;
    free_way = '0;
    for (int i = 0; i < int'(WAYS); i++) begin
      way_desc[i] = desc_t'(bucket[i*64 +: 64]);
      cand[i]     = way_desc[i].valid && (way_desc[i].klen == key_len);
    end
    for (int i = int'(WAYS) - 1; i >= 0; i--)
      if (!way_desc[i].valid) begin
        has_free = 1'b1;
        free_way = ($clog2(WAYS))'(i);
      end
    bucket_out = bucket;
    bucket_out[int'(wr_way)*64 +: 64] = wr_desc;
  end

endmodule
