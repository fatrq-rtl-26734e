// tb_query_buffer: writes a random query into a small buffer (D = 20) and checks
// every slice of both read ports against the written values, with zeros past D.
module tb_query_buffer;
  import fatrq_pkg::*;
  localparam int D = 20, A = 8, B = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0;
  elem_t wr_data = '0;
  logic [1:0] a_slice = '0;
  logic [2:0] b_slice = '0;
  elem_t a_data [A];
  elem_t b_data [B];
  elem_t ref_q [D];

  query_buffer #(.D(D), .A_LANES(A), .B_LANES(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++) begin
      ref_q[i] = elem_t'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = 5'(i); wr_data = ref_q[i];
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 3; s++) begin
      a_slice = 2'(s); #1;
      for (int l = 0; l < A; l++) begin
        automatic elem_t e = (s * A + l < D) ? ref_q[s * A + l] : '0;
        checks++;
        if (a_data[l] !== e) begin failures++; $display("FAIL A slice %0d lane %0d", s, l); end
      end
    end
    for (int s = 0; s < 7; s++) begin
      b_slice = 3'(s); #1;
      for (int l = 0; l < B; l++) begin
        automatic elem_t e = (s * B + l < D) ? ref_q[s * B + l] : '0;
        checks++;
        if (b_data[l] !== e) begin failures++; $display("FAIL B slice %0d lane %0d", s, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
