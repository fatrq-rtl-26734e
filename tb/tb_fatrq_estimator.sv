// tb_fatrq_estimator: random 768-dimensional queries and residual records through the
// estimator at its default size. Each record's ternary digits are packed with
// y = sum 3^i (x_i + 1) into 154 bytes (5 beats of 32), sent back to back or with
// gaps, and the calibrated estimate is compared with the reference computed from the
// digits; the result must appear 4 cycles after the last beat.
module tb_fatrq_estimator;
  import fatrq_pkg::*;
  import fatrq_ref_pkg::*;
  localparam int D = 768, BB = 32, LANES = BB * 5, BYTES = 154, BEATS = 5, NR = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  calib_w_t weights;
  logic in_valid = 0, in_first = 0, in_last = 0, in_ready;
  logic [7:0] in_code [BB];
  id_t in_id = '0;
  dist_t in_d0 = '0;
  rec_meta_t in_meta = '0;
  logic [2:0] q_slice;
  elem_t q_data [LANES];
  logic out_valid;
  cand_t out_cand;
  elem_t q [BEATS * LANES];
  longint exp_q [$];
  int exp_i [$];
  int exp_t [$];
  int cyc = 0;
  dist_t d0;
  rec_meta_t meta;

  fatrq_estimator #(.D(D), .BEAT_BYTES(BB)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb for (int l = 0; l < LANES; l++) q_data[l] = q[int'(q_slice) * LANES + l];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic longint e = exp_q.pop_front();
      automatic int i = exp_i.pop_front();
      automatic int t = exp_t.pop_front();
      if (longint'(out_cand.score) != e) begin failures++; $display("FAIL rec %0d: %0d want %0d", i, out_cand.score, e); end
      if (int'(out_cand.id) != i) begin failures++; $display("FAIL id %0d want %0d", out_cand.id, i); end
      if (cyc - t != 4) begin failures++; $display("FAIL latency %0d", cyc - t); end
    end
  end

  initial begin
    weights.w_d0 = 32'sd65536; weights.w_ip = 32'sd72090; weights.w_dnorm2 = 32'sd60000; weights.w_xcd = 32'sd131072;
    for (int i = 0; i < BEATS * LANES; i++) q[i] = (i < D) ? elem_t'($signed($urandom_range(2048)) - 1024) : '0;
    foreach (in_code[b]) in_code[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (!in_ready) failures++;
    for (int r = 0; r < NR; r++) begin
      int x [BEATS * LANES];
      logic [7:0] bytes [BEATS * BB];
      automatic longint s = 0;
      automatic int k = 0;
      automatic int density = (r == 0) ? 0 : (r == 1) ? 100 : $urandom_range(5, 60);
      for (int i = 0; i < BEATS * LANES; i++) begin
        x[i] = 0;
        if (i < D && $urandom_range(99) < density) x[i] = ($urandom_range(1) == 0) ? -1 : 1;
        s += longint'(x[i]) * longint'(q[i]);
        if (x[i] != 0) k++;
      end
      for (int b = 0; b < BEATS * BB; b++)
        bytes[b] = (b < BYTES) ? 8'(encode5(x[5*b], x[5*b+1], x[5*b+2], x[5*b+3], x[5*b+4])) : 8'd0;
      d0 = dist_t'($urandom_range(32'h0fff_ffff));
      meta.delta_norm   = meta_t'($urandom_range(32'h0004_ffff));
      meta.xc_dot_delta = meta_t'($signed($urandom_range(32'h0001_ffff)) - 32'sh0001_0000);
      exp_q.push_back(estimate(s, k, longint'(d0), longint'(meta.delta_norm),
                               longint'(meta.xc_dot_delta), longint'(weights.w_d0),
                               longint'(weights.w_ip), longint'(weights.w_dnorm2), longint'(weights.w_xcd)));
      exp_i.push_back(r);
      for (int bt = 0; bt < BEATS; bt++) begin
        @(negedge clk);
        in_valid = 1; in_first = (bt == 0); in_last = (bt == BEATS - 1);
        in_id   = (bt == 0) ? id_t'(r) : id_t'($urandom);
        in_d0   = (bt == 0) ? d0 : dist_t'($urandom);
        in_meta = (bt == BEATS - 1) ? meta : rec_meta_t'({$urandom, $urandom});
        for (int b = 0; b < BB; b++) in_code[b] = bytes[bt * BB + b];
        if (bt > 0 && $urandom_range(4) == 0) begin
          in_valid = 0; @(negedge clk); in_valid = 1;
        end
      end
      exp_t.push_back(cyc);
      if ($urandom_range(2) == 0) begin @(negedge clk); in_valid = 0; in_first = 0; in_last = 0; end
    end
    @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
