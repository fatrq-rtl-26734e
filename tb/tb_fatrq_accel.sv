// tb_fatrq_accel: end-to-end test of the refinement accelerator at reduced sizes (D = 40, 16-entry Top-nK, 8-entry Top-K queue).
//
// The testbench plays the front stage (candidate list with coarse distances), the
// far-memory controller (residual records returned in order after REC_LAT cycles,
// with random request backpressure and gaps between beats), the storage controller
// (raw vectors after SSD_LAT cycles) and the result consumer (random res_ready). For
// every query it computes the expected outcome independently: the calibrated
// estimate of every candidate from its ternary digits, a stable sort keeping the best
// NK_DEPTH, exact distances of the first n_refine of those, and a sort keeping the
// best min(k_out, K_DEPTH). Every result's distance and pointer are checked, and the
// mechanisms of the design are counted; one that never happened counts as a failure:
// candidate stalls on a full request FIFO, far-memory and storage backpressure,
// pruning out of the Top-nK queue, overflow of the Top-K queue, refinement cut short
// by n_refine, refinement stopped by an empty Top-nK queue, result backpressure,
// all-zero residual codes.
module tb_fatrq_accel;
  import fatrq_pkg::*;
  import fatrq_ref_pkg::*;

  localparam int D = 40, BEAT_BYTES = 4, FP_LANES = 8;
  localparam int NK_DEPTH = 16, K_DEPTH = 8, PEND_DEPTH = 4;
  localparam int LANES = BEAT_BYTES * 5;
  localparam int CODE_BYTES = (D + 4) / 5;
  localparam int CODE_BEATS = (CODE_BYTES + BEAT_BYTES - 1) / BEAT_BYTES;
  localparam int RAW_BEATS = (D + FP_LANES - 1) / FP_LANES;
  localparam int AW = $clog2(D), NKW = $clog2(NK_DEPTH + 1), KKW = $clog2(K_DEPTH + 1);
  localparam int NC = 40;                 // candidates per query (max)
  localparam int REC_LAT = 30, SSD_LAT = 60;
  localparam int NQ = 3;
  localparam int WATCHDOG = 200000;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic clk = 0, rst_n = 0;

  // DUT ports
  logic q_wr_en = 0;
  logic [AW-1:0] q_wr_addr = '0;
  elem_t q_wr_data = '0;
  calib_w_t weights;
  logic [NKW-1:0] n_refine = '0;
  logic [KKW-1:0] k_out = '0;
  logic start = 0;
  phase_t phase;
  logic done;
  logic cand_valid = 0, cand_ready, cand_last = 0;
  id_t cand_id = '0;
  dist_t cand_d0 = '0;
  logic rec_req_valid, rec_req_ready = 0;
  id_t rec_req_id;
  logic rec_rsp_valid = 0, rec_rsp_first = 0, rec_rsp_last = 0;
  logic [7:0] rec_rsp_code [BEAT_BYTES];
  rec_meta_t rec_rsp_meta = '0;
  logic raw_req_valid, raw_req_ready = 0;
  id_t raw_req_id;
  logic raw_rsp_valid = 0, raw_rsp_first = 0, raw_rsp_last = 0;
  elem_t raw_rsp_data [FP_LANES];
  logic res_valid, res_ready = 0, res_last;
  cand_t res_cand;
  logic nk_drop, k_drop;

  fatrq_accel #(.D(D), .BEAT_BYTES(BEAT_BYTES), .FP_LANES(FP_LANES), .NK_DEPTH(NK_DEPTH), .K_DEPTH(K_DEPTH), .PEND_DEPTH(PEND_DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- data set
  elem_t     q      [D];
  int        dig    [NC][CODE_BYTES * 5];
  logic [7:0] code  [NC][CODE_BEATS * BEAT_BYTES];
  elem_t     raw    [NC][RAW_BEATS * FP_LANES];
  dist_t     d0s    [NC];
  rec_meta_t metas  [NC];
  longint    est    [NC];
  longint    exact  [NC];
  int        zero_codes = 0;

  function automatic id_t id_of(int i);  return id_t'(i * 7 + 3); endfunction
  function automatic int  idx_of(id_t id); return (int'(id) - 3) / 7; endfunction

  // ---------------------------------------------------------------- mechanism counters
  int n_fifo_stall = 0, n_rec_bp = 0, n_raw_bp = 0, n_nk_drop = 0, n_k_drop = 0;
  int n_res_bp = 0, n_cut = 0, n_empty_stop = 0;

  always @(posedge clk) if (rst_n) begin
    if (phase == PH_FILTER && cand_valid && rec_req_ready && !cand_ready) n_fifo_stall++;
    if (rec_req_valid && !rec_req_ready) n_rec_bp++;
    if (raw_req_valid && !raw_req_ready) n_raw_bp++;
    if (nk_drop) n_nk_drop++;
    if (k_drop) n_k_drop++;
    if (res_valid && !res_ready) n_res_bp++;
  end

  // ---------------------------------------------------------------- far-memory model
  id_t rq [$];
  int  rq_t [$];
  always @(posedge clk) if (rst_n && rec_req_valid && rec_req_ready) begin
    rq.push_back(rec_req_id);
    rq_t.push_back(cyc + REC_LAT);
  end
  initial begin
    foreach (rec_rsp_code[b]) rec_rsp_code[b] = '0;
    forever begin
      @(negedge clk);
      rec_req_ready = ($urandom_range(7) != 0);
      rec_rsp_valid = 0; rec_rsp_first = 0; rec_rsp_last = 0;
      if (rq.size() > 0 && cyc >= rq_t[0]) begin
        automatic int i = idx_of(rq.pop_front());
        void'(rq_t.pop_front());
        for (int bt = 0; bt < CODE_BEATS; bt++) begin
          if (bt > 0) begin
            @(negedge clk);
            rec_req_ready = ($urandom_range(7) != 0);
            while ($urandom_range(5) == 0) begin
              rec_rsp_valid = 0; @(negedge clk); rec_req_ready = ($urandom_range(7) != 0);
            end
          end
          rec_rsp_valid = 1; rec_rsp_first = (bt == 0); rec_rsp_last = (bt == CODE_BEATS - 1);
          for (int b = 0; b < BEAT_BYTES; b++) rec_rsp_code[b] = code[i][bt * BEAT_BYTES + b];
          rec_rsp_meta = (bt == CODE_BEATS - 1) ? metas[i] : rec_meta_t'({$urandom, $urandom});
        end
      end
    end
  end

  // ---------------------------------------------------------------- storage model
  id_t sq [$];
  int  sq_t [$];
  always @(posedge clk) if (rst_n && raw_req_valid && raw_req_ready) begin
    sq.push_back(raw_req_id);
    sq_t.push_back(cyc + SSD_LAT);
  end
  initial begin
    foreach (raw_rsp_data[l]) raw_rsp_data[l] = '0;
    forever begin
      @(negedge clk);
      raw_req_ready = ($urandom_range(3) != 0);
      raw_rsp_valid = 0; raw_rsp_first = 0; raw_rsp_last = 0;
      if (sq.size() > 0 && cyc >= sq_t[0]) begin
        automatic int i = idx_of(sq.pop_front());
        void'(sq_t.pop_front());
        for (int bt = 0; bt < RAW_BEATS; bt++) begin
          if (bt > 0) begin @(negedge clk); raw_req_ready = ($urandom_range(3) != 0); end
          raw_rsp_valid = 1; raw_rsp_first = (bt == 0); raw_rsp_last = (bt == RAW_BEATS - 1);
          for (int l = 0; l < FP_LANES; l++) raw_rsp_data[l] = raw[i][bt * FP_LANES + l];
        end
      end
    end
  end

  // ---------------------------------------------------------------- result consumer
  cand_t got [$];
  int    got_last [$];
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    got.push_back(res_cand);
    got_last.push_back(int'(res_last));
  end
  initial forever begin
    @(negedge clk);
    res_ready = ($urandom_range(2) != 0);
  end

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog at cycle %0d, phase %s", cyc, phase.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- one query
  task automatic make_data(int n);
    for (int d = 0; d < D; d++) q[d] = elem_t'($signed($urandom_range(1024)) - 512);
    for (int i = 0; i < n; i++) begin
      longint s = 0;
      int k = 0;
      int dens = (i % 17 == 5) ? 0 : $urandom_range(10, 70);
      for (int d = 0; d < CODE_BYTES * 5; d++) begin
        dig[i][d] = 0;
        if (d < D && $urandom_range(99) < dens) dig[i][d] = ($urandom_range(1) == 0) ? -1 : 1;
        if (d < D) s += longint'(dig[i][d]) * longint'(q[d]);
        if (dig[i][d] != 0) k++;
      end
      if (k == 0) zero_codes++;
      for (int b = 0; b < CODE_BEATS * BEAT_BYTES; b++)
        code[i][b] = (b < CODE_BYTES) ?
          8'(encode5(dig[i][5*b], dig[i][5*b+1], dig[i][5*b+2], dig[i][5*b+3], dig[i][5*b+4])) :
          8'($urandom_range(255));
      d0s[i] = dist_t'($urandom_range(32'h01ff_ffff));
      metas[i].delta_norm   = meta_t'($urandom_range(32'h0003_ffff));
      metas[i].xc_dot_delta = meta_t'($signed($urandom_range(32'h0003_ffff)) - 32'sh0002_0000);
      est[i] = estimate(s, k, longint'(d0s[i]), longint'(metas[i].delta_norm),
                        longint'(metas[i].xc_dot_delta), longint'(weights.w_d0),
                        longint'(weights.w_ip), longint'(weights.w_dnorm2), longint'(weights.w_xcd));
      exact[i] = 0;
      for (int d = 0; d < RAW_BEATS * FP_LANES; d++) begin
        raw[i][d] = (d < D) ? elem_t'($signed($urandom_range(2048)) - 1024) : elem_t'($urandom);
        if (d < D) exact[i] += (longint'(raw[i][d]) - longint'(q[d])) * (longint'(raw[i][d]) - longint'(q[d]));
      end
      if (exact[i] > 64'sd2147483647) exact[i] = 64'sd2147483647;
    end
  endtask

  task automatic run_query(int n, int nref, int kout);
    int order [$];
    int refl [$];
    int fin [$];
    int exp_n;
    make_data(n);
    // load the query
    for (int d = 0; d < D; d++) begin
      @(negedge clk); q_wr_en = 1; q_wr_addr = AW'(d); q_wr_data = q[d];
    end
    @(negedge clk); q_wr_en = 0;
    n_refine = NKW'(nref); k_out = KKW'(kout);
    got.delete(); got_last.delete();
    start = 1; @(negedge clk); start = 0;
    // reference
    for (int i = 0; i < n; i++) begin
      int p = order.size();
      while (p > 0 && est[order[p-1]] > est[i]) p--;
      order.insert(p, i);
    end
    while (order.size() > NK_DEPTH) void'(order.pop_back());
    if (nref < order.size()) n_cut++;
    if (nref > order.size()) n_empty_stop++;
    for (int r = 0; r < nref && r < order.size(); r++) begin
      int p = refl.size();
      while (p > 0 && exact[refl[p-1]] > exact[order[r]]) p--;
      refl.insert(p, order[r]);
    end
    exp_n = refl.size();
    if (exp_n > K_DEPTH) exp_n = K_DEPTH;
    if (exp_n > kout) exp_n = kout;
    // stream the candidates
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while ($urandom_range(4) == 0) begin cand_valid = 0; @(negedge clk); end
      cand_valid = 1; cand_id = id_of(i); cand_d0 = d0s[i]; cand_last = (i == n - 1);
      @(posedge clk);
      while (!cand_ready) @(posedge clk);
    end
    @(negedge clk); cand_valid = 0; cand_last = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    // compare
    checks++;
    if (got.size() != exp_n) begin failures++; $display("FAIL %0d results, want %0d", got.size(), exp_n); end
    for (int r = 0; r < got.size() && r < exp_n; r++) begin
      int gi = idx_of(got[r].id);
      checks += 3;
      if (longint'(got[r].score) != exact[refl[r]]) begin
        failures++; $display("FAIL rank %0d score %0d want %0d", r, got[r].score, exact[refl[r]]);
      end
      if (gi < 0 || gi >= n || exact[gi] != longint'(got[r].score)) begin
        failures++; $display("FAIL rank %0d pointer %0d does not hold that distance", r, got[r].id);
      end
      if (got_last[r] != int'(r == exp_n - 1)) begin failures++; $display("FAIL res_last at rank %0d", r); end
    end
    $display("query n=%0d n_refine=%0d k_out=%0d: %0d results, done at cycle %0d", n, nref, kout, got.size(), cyc);
  endtask

  initial begin
    weights.w_d0 = 32'sd65536; weights.w_ip = 32'sd70000; weights.w_dnorm2 = 32'sd64000; weights.w_xcd = 32'sd120000;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    run_query(40, 10, 5);
    run_query(12, 16, 8);
    run_query(30, 3, 10);
    checks += 8;
    if (n_fifo_stall == 0) begin failures++; $display("FAIL no stall on a full request FIFO"); end
    if (n_rec_bp == 0)     begin failures++; $display("FAIL no far-memory backpressure"); end
    if (n_raw_bp == 0)     begin failures++; $display("FAIL no storage backpressure"); end
    if (n_nk_drop == 0) begin failures++; $display("FAIL no candidate pruned from Top-nK"); end
    if (n_res_bp == 0)     begin failures++; $display("FAIL no result backpressure"); end
    if (n_cut == 0)        begin failures++; $display("FAIL refinement never cut by n_refine"); end
    if (zero_codes == 0)   begin failures++; $display("FAIL no all-zero residual code"); end
    if (n_k_drop == 0) begin failures++; $display("FAIL Top-K overflow never happened"); end
    if (n_empty_stop == 0) begin failures++; $display("FAIL refinement never stopped on an empty Top-nK queue"); end
    checks++;
    $display("mechanisms: fifo_stall=%0d rec_bp=%0d raw_bp=%0d nk_drop=%0d k_drop=%0d res_bp=%0d cut=%0d empty_stop=%0d zero_codes=%0d",
             n_fifo_stall, n_rec_bp, n_raw_bp, n_nk_drop, n_k_drop, n_res_bp, n_cut, n_empty_stop, zero_codes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
