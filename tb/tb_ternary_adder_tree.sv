// tb_ternary_adder_tree: random query slices and ternary digits (160 lanes); the sum
// and the non-zero count are compared with a direct loop.
module tb_ternary_adder_tree;
  import fatrq_pkg::*;
  localparam int LANES = 160;
  int checks = 0, failures = 0;
  elem_t q [LANES];
  trit_t t [LANES];
  logic signed [QUERY_W+8:0] sum;
  logic [8:0] nnz;

  ternary_adder_tree #(.LANES(LANES)) dut (.q_i(q), .trit_i(t), .sum_o(sum), .nnz_o(nnz));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      automatic longint es = 0;
      automatic int ek = 0;
      for (int l = 0; l < LANES; l++) begin
        automatic int r = $urandom_range(2);
        q[l] = (n == 0) ? 16'sh8000 : elem_t'($urandom);
        t[l] = (r == 0) ? T_NEG : (r == 1) ? T_ZERO : T_POS;
        if (n == 1) t[l] = T_NEG;
        if (t[l] == T_POS) begin es += longint'(q[l]); ek++; end
        if (t[l] == T_NEG) begin es -= longint'(q[l]); ek++; end
      end
      #1;
      checks += 2;
      if (longint'(sum) != es) begin failures++; $display("FAIL sum %0d want %0d", sum, es); end
      if (int'(nnz) != ek)     begin failures++; $display("FAIL nnz %0d want %0d", nnz, ek); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
