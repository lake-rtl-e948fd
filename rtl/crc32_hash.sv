// crc32_hash: hash unit of a processing element.
//
// Computes the CRC-32 of a key of 1..MAX_KEY bytes; the low bits of the result
// select the hash-table bucket. The paper names CRC32 as the hash; the variant
// (IEEE 802.3 reflected polynomial 0xEDB88320, initial value and final xor
// 0xFFFFFFFF, the one used by Ethernet and zlib) and the rate of four key bytes
// per clock are this design's choices.
//
// Interface: pulse start with key/key_len stable for that cycle (they are
// captured on that clock edge). done pulses, with hash valid, ceil(key_len/4)+1
// clocks after start (two for a zero-length key). start is ignored while busy.
module crc32_hash #(
  parameter int unsigned MAX_KEY = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [MAX_KEY*8-1:0] key,
  input  logic [7:0]           key_len,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          hash
);

  localparam logic [31:0] POLY = 32'hEDB88320;

  function automatic logic [31:0] crc_byte(input logic [31:0] c, input logic [7:0] b);
    logic [31:0] r;
    r = c ^ {24'd0, b};
    for (int i = 0; i < 8; i++) r = r[0] ? ((r >> 1) ^ POLY) : (r >> 1);
    return r;
  endfunction

  logic [MAX_KEY*8-1:0] kbuf;
  logic [7:0]           remain;
  logic [31:0]          crc;
  logic [31:0]          crc_next;

  // Fold up to four bytes from the bottom of the key buffer.
  always_comb begin
    crc_next = crc;
    for (int i = 0; i < 4; i++)
      if (8'(i) < remain) crc_next = crc_byte(crc_next, kbuf[i*8 +: 8]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      remain <= '0;
      crc    <= '1;
      kbuf   <= '0;
      hash   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          kbuf   <= key;
          remain <= key_len;
          crc    <= '1;
        end
      end else begin
        crc  <= crc_next;
        kbuf <= kbuf >> 32;
        if (remain <= 8'd4) begin
          remain <= '0;
          busy   <= 1'b0;
          done   <= 1'b1;
          hash   <= ~crc_next;
        end else begin
          remain <= remain - 8'd4;
        end
      end
    end
  end

endmodule
