// axis_fifo: beat FIFO for AXI-Stream packets.
//
// DEPTH beats of storage in a circular buffer. has_room is high while at
// least ROOM beats are free, which lets a producer admit a whole packet of up
// to ROOM beats without ever being back-pressured in the middle of it; the
// packet classifier uses this to drop instead of stall. Input ready is
// "not full"; output valid is "not empty"; data out is the head entry.
module axis_fifo
  import lake_pkg::*;
#(
  parameter int unsigned DEPTH = 40,
  parameter int unsigned ROOM  = lake_pkg::PKT_BEATS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat,
  output logic       has_room
);

  localparam int unsigned AW = $clog2(DEPTH);

  axis_beat_t         mem [DEPTH];
  logic [AW-1:0]      rd, wr;
  logic [AW:0]        cnt;
  logic               do_w, do_r;

  assign s_ready  = (cnt != (AW+1)'(DEPTH));
  assign m_valid  = (cnt != '0);
  assign m_beat   = mem[rd];
  assign has_room = ((AW+1)'(DEPTH) - cnt) >= (AW+1)'(ROOM);
  assign do_w     = s_valid && s_ready;
  assign do_r     = m_valid && m_ready;

  always_ff @(posedge clk) if (do_w) mem[wr] <= s_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (do_w) wr <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (do_r) rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      cnt <= cnt + (AW+1)'(do_w) - (AW+1)'(do_r);
    end
  end

endmodule
