// tb_weighted_accumulation: random candidates, one per cycle, through the calibrated
// estimator; each output is compared with the reference formula and must appear
// exactly 4 cycles after its input.
module tb_weighted_accumulation;
  import fatrq_pkg::*;
  import fatrq_ref_pkg::*;
  localparam int D = 768, SW = 28, N = 300, LAT = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  calib_w_t weights;
  logic in_valid = 0;
  id_t in_id = '0;
  dist_t in_d0 = '0;
  logic signed [SW-1:0] in_sum = '0;
  logic [9:0] in_nnz = '0;
  rec_meta_t in_meta = '0;
  logic out_valid;
  cand_t out_cand;
  longint exp_q [$];
  int     exp_t [$];
  int cyc = 0;

  weighted_accumulation #(.D(D), .SW(SW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    int t;
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = exp_q.pop_front();
      t = exp_t.pop_front();
      if (longint'(out_cand.score) != e) begin
        failures++; $display("FAIL id %0d score %0d want %0d", out_cand.id, out_cand.score, e);
      end
      if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
    end
  end

  initial begin
    weights.w_d0     = 32'sd65536;            // 1.0
    weights.w_ip     = 32'sd58982;            // 0.9
    weights.w_dnorm2 = 32'sd62259;            // 0.95
    weights.w_xcd    = 32'sd131072;           // 2.0
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_id  = id_t'(n);
      in_d0  = dist_t'($urandom_range(32'h00ff_ffff));
      in_sum = SW'($signed($urandom_range(32'h3ff_ffff)) - 32'sh200_0000);
      in_nnz = (n < 3) ? 10'(n) : (n == 3) ? 10'd768 : 10'($urandom_range(768));
      in_meta.delta_norm   = meta_t'($urandom_range(32'h000f_ffff));
      in_meta.xc_dot_delta = meta_t'($signed($urandom_range(32'h001f_ffff)) - 32'sh0010_0000);
      if (n == 4) begin in_sum = {1'b0, {(SW-1){1'b1}}}; in_nnz = 10'd1; in_meta.delta_norm = 32'sh7fff_ffff; end
      exp_q.push_back(estimate(longint'(in_sum), int'(in_nnz), longint'(in_d0),
                               longint'(in_meta.delta_norm), longint'(in_meta.xc_dot_delta),
                               longint'(weights.w_d0), longint'(weights.w_ip),
                               longint'(weights.w_dnorm2), longint'(weights.w_xcd)));
      exp_t.push_back(cyc);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
