// query_buffer: on-device copy of the query vector, read by the residual distance
// estimator and by the full-precision distance unit.
//
// The paper places a query buffer in front of the estimator's multiplexers; its
// organisation is this design's choice. It is a D-entry register array of signed
// 16-bit elements, written one element per cycle by the host while a query is
// loaded, with two independent combinational read ports. Read port A returns the
// slice of A_LANES consecutive elements starting at a_slice*A_LANES (one code beat of
// the estimator); read port B returns B_LANES elements starting at b_slice*B_LANES
// (one raw-vector beat). Positions at or beyond D read as zero, so a partly filled
// last beat contributes nothing.
//
// Timing: a write takes effect at the next clock edge; reads are combinational.
// Reset clears the buffer.
module query_buffer
  import fatrq_pkg::*;
#(
  parameter int D       = 768,
  parameter int A_LANES = 160,
  parameter int B_LANES = 16,
  localparam int AW     = $clog2(D),
  localparam int A_SL   = (D + A_LANES - 1) / A_LANES,
  localparam int B_SL   = (D + B_LANES - 1) / B_LANES,
  localparam int ASW    = (A_SL > 1) ? $clog2(A_SL) : 1,
  localparam int BSW    = (B_SL > 1) ? $clog2(B_SL) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  elem_t           wr_data,
  input  logic [ASW-1:0]  a_slice,
  output elem_t           a_data [A_LANES],
  input  logic [BSW-1:0]  b_slice,
  output elem_t           b_data [B_LANES]
);

  elem_t mem [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) mem[i] <= '0;
    end else if (wr_en && int'(wr_addr) < D) begin
      mem[wr_addr] <= wr_data;
    end
  end

  always_comb begin
    for (int l = 0; l < A_LANES; l++) begin
      int idx;
      idx = int'(a_slice) * A_LANES + l;
      a_data[l] = (idx < D) ? mem[idx] : '0;
    end
    for (int l = 0; l < B_LANES; l++) begin
      int idx;
      idx = int'(b_slice) * B_LANES + l;
      b_data[l] = (idx < D) ? mem[idx] : '0;
    end
  end

endmodule
