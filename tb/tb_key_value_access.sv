// tb_key_value_access: builds chunk images from random keys and values and
// checks them byte by byte, checks the key comparison on matching and on
// single-byte-different keys, and the value read back from a chunk.
module tb_key_value_access;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic [511:0]  key, line0;
  logic [7:0]    key_len;
  logic          match;
  logic [4095:0] value, chunk_out, rd_chunk, rd_value;
  logic [15:0]   value_len;
  int checks = 0, failures = 0;

  key_value_access #(.CHUNK_BYTES(512)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++) begin
      bq_t k, v;
      automatic int kl = $urandom_range(1, 64);
      automatic int vl = $urandom_range(0, 512 - kl);
      k = rand_bytes(kl); v = rand_bytes(vl);
      key = {16{$urandom}};           // bytes beyond key_len must be ignored
      foreach (k[i]) key[i*8 +: 8] = k[i];
      key_len = 8'(kl);
      value = {128{$urandom}};
      foreach (v[i]) value[i*8 +: 8] = v[i];
      value_len = 16'(vl);
      #1;
      checks++;
      for (int i = 0; i < 512; i++) begin
        logic [7:0] e;
        e = (i < kl) ? k[i] : (i < kl + vl) ? v[i - kl] : 8'h00;
        if (chunk_out[i*8 +: 8] !== e) begin failures++; $display("FAIL chunk byte %0d", i); break; end
      end
      // compare: equal line
      line0 = chunk_out[511:0];
      for (int i = kl; i < 64; i++) line0[i*8 +: 8] = 8'hFF;
      #1; checks++; if (match !== 1'b1) begin failures++; $display("FAIL match"); end
      begin
        automatic int fb = $urandom_range(0, kl - 1);
        line0[fb*8 +: 8] = line0[fb*8 +: 8] ^ 8'h01;
      end
      #1; checks++; if (match !== 1'b0) begin failures++; $display("FAIL mismatch"); end
      rd_chunk = chunk_out;
      #1; checks++;
      for (int i = 0; i < vl; i++)
        if (rd_value[i*8 +: 8] !== v[i]) begin failures++; $display("FAIL rd_value"); break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
