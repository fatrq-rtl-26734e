// ternary_adder_tree: multiplication-free inner product of a query slice with a slice
// of ternary residual code.
//
// Each lane holds a query element q_i and a ternary digit c_i in {-1,0,+1}. A
// multiplexer per lane selects +q_i, -q_i or 0 (so no multiplier is needed, as the
// paper describes), and a balanced binary adder tree of depth log2(LANES) sums the
// selected values: sum_o = sum_i c_i * q_i. Alongside, the tree counts the non-zero
// digits (nnz_o), which the estimator needs to normalise the code by sqrt(k).
//
// Interface: LANES query elements and LANES digits in, the signed sum and the count out.
// Timing: combinational. The lane count is this design's choice (one code beat);
// the paper gives no adder-tree width.
module ternary_adder_tree
  import fatrq_pkg::*;
#(
  parameter  int LANES = 160,
  localparam int LVL   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int NP    = 1 << LVL,             // lanes padded to a power of two
  localparam int SW    = QUERY_W + LVL + 1,    // width of the sum
  localparam int CW    = LVL + 1               // width of the non-zero count
) (
  input  elem_t               q_i    [LANES],
  input  trit_t               trit_i [LANES],
  output logic signed [SW-1:0] sum_o,
  output logic        [CW-1:0] nnz_o
);

  // level 0: lane multiplexers (lanes padded to a power of two with zeros)
  logic signed [SW-1:0] s0 [NP];
  logic        [CW-1:0] c0 [NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      s0[i] = '0;
      c0[i] = '0;
      if (i < LANES) begin
        unique case (trit_i[i])
          T_POS:   begin s0[i] = SW'(q_i[i]);  c0[i] = CW'(1); end
          T_NEG:   begin s0[i] = -SW'(q_i[i]); c0[i] = CW'(1); end
          default: begin s0[i] = '0;           c0[i] = '0;     end
        endcase
      end
    end
  end

  // levels 1..LVL: the adder tree, one signal array per level
  for (genvar l = 1; l <= LVL; l++) begin : g_lvl
    logic signed [SW-1:0] s [NP >> l];
    logic        [CW-1:0] c [NP >> l];
    for (genvar n = 0; n < (NP >> l); n++) begin : g_node
      if (l == 1) begin : g_leaf
        assign s[n] = s0[2*n] + s0[2*n+1];
        assign c[n] = c0[2*n] + c0[2*n+1];
      end else begin : g_inner
        assign s[n] = g_lvl[l-1].s[2*n] + g_lvl[l-1].s[2*n+1];
        assign c[n] = g_lvl[l-1].c[2*n] + g_lvl[l-1].c[2*n+1];
      end
    end
  end

  assign sum_o = g_lvl[LVL].s[0];
  assign nnz_o = g_lvl[LVL].c[0];

endmodule
