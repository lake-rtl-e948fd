// tb_packet_parser: parses GET, SET, DELETE requests, a host GET reply and a
// non-memcached packet, and compares every field with the values the packets
// were built from.
module tb_packet_parser;
  import lake_pkg::*;
  import tb_util_pkg::*;

  logic [PKT_BYTES*8-1:0] pkt;
  parsed_t f;
  int checks = 0, failures = 0;

  packet_parser dut (.pkt, .f);

  task automatic chk(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got=%0h exp=%0h", what, got, exp); end
  endtask

  function automatic logic [MAX_KEY*8-1:0] kvec(input bq_t k);
    logic [MAX_KEY*8-1:0] v = '0;
    foreach (k[i]) v[i*8 +: 8] = k[i];
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t k, v, p;
    for (int t = 0; t < 40; t++) begin
      automatic int kl = $urandom_range(1, 64);
      automatic int vl = $urandom_range(0, 400);
      automatic int unsigned op = $urandom_range(0, 3);
      automatic int unsigned opq = $urandom;
      automatic int unsigned port = $urandom_range(1024, 65535);
      k = rand_bytes(kl); v = rand_bytes(vl);
      case (op)
        0: p = get_req(k, opq, port);
        1: p = set_req(k, v, opq, port);
        2: p = del_req(k, opq, port);
        default: p = host_reply(v, opq, port);
      endcase
      pkt = to_vec(p);
      #1;
      chk("is_mc", f.is_mc, 1);
      chk("is_req", f.is_req, op != 3);
      chk("opcode", f.opcode, op == 0 ? OPC_GET : op == 1 ? OPC_SET : op == 2 ? OPC_DELETE : OPC_GET);
      chk("opaque", f.opaque, opq);
      chk("sport", f.sport, op == 3 ? 11211 : port);
      chk("dport", f.dport, op == 3 ? port : 11211);
      chk("key_len", f.key_len, op == 3 ? 0 : kl);
      chk("ext_len", f.ext_len, op == 1 ? 8 : op == 3 ? 4 : 0);
      chk("value_len", f.value_len, (op == 1 || op == 3) ? vl : 0);
      checks++;
      if (op != 3 && f.key !== kvec(k)) begin failures++; $display("FAIL key op=%0d", op); end
    end
    p = plain_packet(100, 8'h33);
    pkt = to_vec(p);
    #1;
    chk("plain not mc", f.is_mc, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
