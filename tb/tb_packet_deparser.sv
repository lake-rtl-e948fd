// tb_packet_deparser: for random GET requests and values, compares the reply
// with an independently built expected packet (addresses swapped, response
// header, IPv4 checksum) byte by byte, and the reply length.
module tb_packet_deparser;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic [PKT_BYTES*8-1:0] req, rsp;
  logic [4095:0] value;
  logic [15:0]   value_len, rsp_len;
  int checks = 0, failures = 0;

  packet_deparser dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      bq_t k, v, rq, ex;
      k = rand_bytes($urandom_range(1, 64));
      v = rand_bytes($urandom_range(0, 500));
      rq = get_req(k, $urandom, $urandom_range(1024, 60000));
      req = to_vec(rq);
      value = {128{$urandom}};
      foreach (v[i]) value[i*8 +: 8] = v[i];
      value_len = 16'(v.size());
      ex = expected_reply(rq, v);
      #1;
      checks++; if (rsp_len !== 16'(ex.size())) begin failures++; $display("FAIL len %0d %0d", rsp_len, ex.size()); end
      checks++;
      for (int i = 0; i < int'(PKT_BYTES); i++) begin
        automatic logic [7:0] e = (i < ex.size()) ? ex[i] : 8'h00;
        if (rsp[i*8 +: 8] !== e) begin failures++; $display("FAIL byte %0d %02x %02x", i, rsp[i*8 +: 8], e); break; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
