// tb_hash_table_access: random buckets; checks the candidate mask, first free
// way, decoded descriptors (Fig. 4 bit layout) and descriptor insertion
// against a model computed here.
module tb_hash_table_access;
  import lake_pkg::*;

  logic [511:0] bucket, bucket_out;
  logic [14:0]  key_len;
  logic [7:0]   cand;
  logic [2:0]   free_way, wr_way;
  logic         has_free;
  desc_t        way_desc [8];
  desc_t        wr_desc;
  int checks = 0, failures = 0;

  hash_table_access #(.WAYS(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [7:0] exp_c; int exp_f; logic [511:0] exp_b;
      logic [63:0] d [8];
      key_len = 15'($urandom_range(1, 4));
      for (int i = 0; i < 8; i++) begin
        d[i] = {$urandom, $urandom};
        d[i][62] = ($urandom_range(0, 3) != 0);
        d[i][46:32] = 15'($urandom_range(1, 4));
        bucket[i*64 +: 64] = d[i];
      end
      wr_way  = 3'($urandom_range(0, 7));
      wr_desc = desc_t'({$urandom, $urandom});
      #1;
      exp_c = '0; exp_f = -1;
      for (int i = 0; i < 8; i++) begin
        exp_c[i] = d[i][62] && d[i][46:32] == key_len;
        if (exp_f < 0 && !d[i][62]) exp_f = i;
      end
      exp_b = bucket; exp_b[wr_way*64 +: 64] = wr_desc;
      checks++; if (cand !== exp_c) begin failures++; $display("FAIL cand %b %b", cand, exp_c); end
      checks++; if (has_free !== (exp_f >= 0)) failures++;
      if (exp_f >= 0) begin checks++; if (free_way !== 3'(exp_f)) failures++; end
      checks++; if (bucket_out !== exp_b) failures++;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (way_desc[i].valid !== d[i][62] || way_desc[i].vlen !== d[i][61:47] ||
            way_desc[i].klen !== d[i][46:32] || way_desc[i].addr !== d[i][31:0]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
