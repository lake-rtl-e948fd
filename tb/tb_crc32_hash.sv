// tb_crc32_hash: checks the hash unit against the CRC-32 check value of
// "123456789" (0xCBF43926) and against a bit-serial reference for random keys
// of 1..64 bytes, and checks the ceil(len/4)+1-clock latency.
module tb_crc32_hash;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [MAX_KEY*8-1:0] key;
  logic [7:0] key_len;
  logic [31:0] hash;
  int checks = 0, failures = 0;

  crc32_hash #(.MAX_KEY(MAX_KEY)) dut (.*);

  task automatic run(input bq_t k, input logic [31:0] expect_h);
    int cyc;
    key = '0;
    foreach (k[i]) key[i*8 +: 8] = k[i];
    key_len = 8'(k.size());
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (hash !== expect_h) begin
      failures++; $display("FAIL len=%0d hash=%08x exp=%08x", k.size(), hash, expect_h);
    end
    checks++;
    if (cyc != ((k.size() + 3) / 4 == 0 ? 1 : (k.size() + 3) / 4) + 1) begin
      failures++; $display("FAIL latency len=%0d cycles=%0d", k.size(), cyc);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k;
    start = 0; key = '0; key_len = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    k = str_bytes("123456789");
    run(k, 32'hCBF43926);
    checks++; if (crc32_ref(k) !== 32'hCBF43926) failures++;
    for (int n = 1; n <= 64; n++) begin
      k = rand_bytes(n);
      run(k, crc32_ref(k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
