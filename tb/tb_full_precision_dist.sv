// tb_full_precision_dist: random 768-element query and raw vectors, streamed back to
// back in 16-element beats; each exact squared distance must match a direct sum and
// appear one cycle after the last beat.
module tb_full_precision_dist;
  import fatrq_pkg::*;
  localparam int D = 768, L = 16, BEATS = D / L, NV = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  elem_t in_data [L];
  id_t in_id = '0;
  logic [5:0] q_slice;
  elem_t q_data [L];
  logic out_valid;
  cand_t out_cand;
  elem_t q [D];
  longint exp_q [$];
  int exp_t [$];
  int cyc = 0;

  full_precision_dist #(.D(D), .LANES(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb for (int l = 0; l < L; l++) q_data[l] = q[int'(q_slice) * L + l];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic longint e = exp_q.pop_front();
      automatic int t = exp_t.pop_front();
      if (longint'(out_cand.score) != e) begin failures++; $display("FAIL %0d want %0d", out_cand.score, e); end
      if (cyc - t != 1) begin failures++; $display("FAIL latency %0d cyc %0d t %0d time %0t", cyc - t, cyc, t, $time); end
    end
  end

  initial begin
    for (int i = 0; i < D; i++) q[i] = elem_t'($signed($urandom_range(4000)) - 2000);
    foreach (in_data[l]) in_data[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      elem_t x [D];
      automatic longint e = 0;
      automatic int amp = (v == NV - 1) ? 32767 : 400 * (v + 1);
      for (int i = 0; i < D; i++) begin
        x[i] = elem_t'($signed($urandom_range(2 * amp)) - amp);
        e += (longint'(x[i]) - longint'(q[i])) * (longint'(x[i]) - longint'(q[i]));
      end
      if (e > 64'sd2147483647) e = 64'sd2147483647;
      exp_q.push_back(e);
      for (int b = 0; b < BEATS; b++) begin
        @(negedge clk);
        in_valid = 1; in_first = (b == 0); in_last = (b == BEATS - 1); in_id = id_t'(v);
        for (int l = 0; l < L; l++) in_data[l] = x[b * L + l];
      end
      exp_t.push_back(cyc);
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
