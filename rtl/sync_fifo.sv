// sync_fifo: single-clock FIFO used to hold the candidates whose far-memory or storage
// reads are outstanding.
//
// A circular buffer of DEPTH entries of type T with a valid/ready style interface:
// push when !full, pop when !empty; rd_data shows the oldest entry combinationally.
// A push and a pop may happen in the same cycle; a push into a full FIFO is refused.
// Reset empties it. The paper does not describe how outstanding reads are tracked;
// this FIFO is this design's choice.
module sync_fifo #(
  parameter  type T     = logic [31:0],
  parameter  int  DEPTH = 64,
  localparam int  AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [AW:0] level
);

  T             mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= wr_data;
        wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + AW'(1);
      end
      if (pop && !empty) rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + AW'(1);
      level <= level + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assign rd_data = mem[rp];
  assign full    = (int'(level) == DEPTH);
  assign empty   = (level == '0);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("sync_fifo: push into a full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop from an empty FIFO");

endmodule
