// fatrq_accel: refinement accelerator of a tiered-residual-quantization ANNS pipeline,
// as it would sit in a CXL Type-2 far-memory device.
//
// A front-stage index (on a GPU) produces a long candidate list with a coarse
// distance d0 per candidate. Instead of reading every candidate's full-precision
// vector from the SSD, the accelerator streams each candidate's compact residual
// record (ternary code + two scalars) from far memory, refines d0 into a calibrated
// estimate, and keeps the best candidates in the Top-nK priority queue; candidates
// pushed out of that queue are pruned without any storage access. Only the first
// n_refine candidates of that queue are then fetched from the SSD, their exact L2
// distances computed, and ranked in the Top-K queue, whose first k_out entries are
// returned.
//
// Blocks (paper's block diagram): query buffer, residual distance estimator
// (ternary decoders, multiplexer/adder tree, weighted accumulation), Top-nK queue,
// full-precision distance unit, Top-K queue. The CXL Type-2 IP, DRAM controller,
// NVMe controller and their memories are not part of this RTL: their traffic is
// brought out as plain valid/ready ports. The phase sequencing, the request/response
// port framing and the outstanding-request FIFOs are this design's choices.
//
// Operation, per query (phases in fatrq_pkg::phase_t):
//   IDLE   : load the query with q_wr_*; set weights, n_refine, k_out; pulse start.
//   FILTER : accept (cand_id, cand_d0) on cand_*; each accepted candidate issues one
//            residual-record read (rec_req_*) and waits in a FIFO; records return in
//            request order on rec_rsp_* (CODE_BEATS beats, metadata with the last),
//            one beat per cycle, never stalled. cand_last marks the last candidate.
//   FDRAIN : wait for all records and for the Top-nK queue to settle.
//   REFINE : pop up to n_refine candidates from the Top-nK queue, issue a raw-vector
//            read for each (raw_req_*); raw vectors return in order on raw_rsp_*
//            (RAW_BEATS beats of FP_LANES elements); exact distances go to Top-K.
//   RDRAIN : wait for all raw vectors and for the Top-K queue to settle.
//   OUTPUT : stream up to k_out results (ascending distance) on res_*; res_last
//            marks the last one; then back to IDLE with done pulsing once.
// Throughput: one record beat and one raw-vector beat per cycle, one queue insertion
// per cycle.
module fatrq_accel
  import fatrq_pkg::*;
#(
  parameter  int D          = 768,   // vector dimension (768 in both evaluated datasets)
  parameter  int BEAT_BYTES = 32,    // code bytes per far-memory beat
  parameter  int FP_LANES   = 16,    // raw-vector elements per storage beat
  parameter  int NK_DEPTH   = 1024,  // Top-nK queue entries
  parameter  int K_DEPTH    = 1024,  // Top-K queue entries
  parameter  int PEND_DEPTH = 64,    // outstanding far-memory / storage reads
  localparam int LANES      = BEAT_BYTES * TRITS_PER_BYTE,
  localparam int CODE_BYTES = (D + TRITS_PER_BYTE - 1) / TRITS_PER_BYTE,
  localparam int CODE_BEATS = (CODE_BYTES + BEAT_BYTES - 1) / BEAT_BYTES,
  localparam int RAW_BEATS  = (D + FP_LANES - 1) / FP_LANES,
  localparam int AW         = $clog2(D),
  localparam int NKW        = $clog2(NK_DEPTH + 1),
  localparam int KKW        = $clog2(K_DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration and control
  input  logic             q_wr_en,
  input  logic [AW-1:0]    q_wr_addr,
  input  elem_t            q_wr_data,
  input  calib_w_t         weights,
  input  logic [NKW-1:0]   n_refine,
  input  logic [KKW-1:0]   k_out,
  input  logic             start,
  output phase_t           phase,
  output logic             done,
  // candidate list from the front stage
  input  logic             cand_valid,
  output logic             cand_ready,
  input  id_t              cand_id,
  input  dist_t            cand_d0,
  input  logic             cand_last,
  // residual-record reads (far memory)
  output logic             rec_req_valid,
  input  logic             rec_req_ready,
  output id_t              rec_req_id,
  input  logic             rec_rsp_valid,
  input  logic             rec_rsp_first,
  input  logic             rec_rsp_last,
  input  logic [7:0]       rec_rsp_code [BEAT_BYTES],
  input  rec_meta_t        rec_rsp_meta,
  // raw-vector reads (storage)
  output logic             raw_req_valid,
  input  logic             raw_req_ready,
  output id_t              raw_req_id,
  input  logic             raw_rsp_valid,
  input  logic             raw_rsp_first,
  input  logic             raw_rsp_last,
  input  elem_t            raw_rsp_data [FP_LANES],
  // results
  output logic             res_valid,
  input  logic             res_ready,
  output cand_t            res_cand,
  output logic             res_last,
  // observability
  output logic             nk_drop,    // a candidate was pruned out of the Top-nK queue
  output logic             k_drop      // an entry was pushed out of the Top-K queue
);

  typedef struct packed {
    id_t   id;
    dist_t d0;
  } pend_t;

  localparam int ESW = (CODE_BEATS > 1) ? $clog2(CODE_BEATS) : 1;
  localparam int FSW = (RAW_BEATS > 1) ? $clog2(RAW_BEATS) : 1;
  localparam int OW  = $clog2(PEND_DEPTH + 1);

  phase_t ph;
  assign phase = ph;

  // ---------------------------------------------------------------- query buffer
  logic [ESW-1:0] est_slice;
  logic [FSW-1:0] fp_slice;
  elem_t          est_q [LANES];
  elem_t          fp_q  [FP_LANES];

  query_buffer #(.D(D), .A_LANES(LANES), .B_LANES(FP_LANES)) u_qbuf (
    .clk, .rst_n,
    .wr_en   (q_wr_en && ph == PH_IDLE),
    .wr_addr (q_wr_addr),
    .wr_data (q_wr_data),
    .a_slice (est_slice), .a_data (est_q),
    .b_slice (fp_slice),  .b_data (fp_q)
  );

  // ---------------------------------------------------------------- FILTER: requests
  pend_t rec_head;
  logic  rec_full, rec_empty;
  logic  cand_fire;

  assign cand_ready    = (ph == PH_FILTER) && rec_req_ready && !rec_full;
  assign rec_req_valid = (ph == PH_FILTER) && cand_valid && !rec_full;
  assign rec_req_id    = cand_id;
  assign cand_fire     = cand_valid && cand_ready;

  sync_fifo #(.T(pend_t), .DEPTH(PEND_DEPTH)) u_rec_pend (
    .clk, .rst_n,
    .push    (cand_fire),
    .wr_data ('{id: cand_id, d0: cand_d0}),
    .pop     (rec_rsp_valid && rec_rsp_first),
    .rd_data (rec_head),
    .full    (rec_full), .empty (rec_empty), .level ()
  );

  // ---------------------------------------------------------------- estimator
  logic  est_valid, est_in_ready;
  cand_t est_cand;

  fatrq_estimator #(.D(D), .BEAT_BYTES(BEAT_BYTES)) u_est (
    .clk, .rst_n, .weights,
    .in_valid (rec_rsp_valid),
    .in_first (rec_rsp_first),
    .in_last  (rec_rsp_last),
    .in_code  (rec_rsp_code),
    .in_id    (rec_head.id),
    .in_d0    (rec_head.d0),
    .in_meta  (rec_rsp_meta),
    .in_ready (est_in_ready),
    .q_slice  (est_slice),
    .q_data   (est_q),
    .out_valid(est_valid),
    .out_cand (est_cand)
  );

  // records requested but not yet scored
  logic [OW+1:0] rec_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rec_out <= '0;
    else        rec_out <= rec_out + (OW+2)'(cand_fire) - (OW+2)'(est_valid);
  end

  // ---------------------------------------------------------------- Top-nK queue
  logic  nk_head_v, nk_busy, nk_pop, nk_clear;
  cand_t nk_head;
  logic [NKW-1:0] nk_count;

  priority_queue #(.DEPTH(NK_DEPTH)) u_topnk (
    .clk, .rst_n,
    .clear (nk_clear),
    .push (est_valid), .push_cand (est_cand),
    .pop (nk_pop),
    .head_valid (nk_head_v), .head_o (nk_head),
    .busy (nk_busy), .drop (nk_drop), .count (nk_count)
  );

  // ---------------------------------------------------------------- REFINE: requests
  logic [NKW-1:0] issued;
  id_t   raw_head;
  logic  raw_full, raw_empty;
  logic  raw_fire;

  assign raw_req_valid = (ph == PH_REFINE) && nk_head_v && (issued < n_refine) && !raw_full;
  assign raw_req_id    = nk_head.id;
  assign raw_fire      = raw_req_valid && raw_req_ready;
  assign nk_pop        = raw_fire;

  sync_fifo #(.T(id_t), .DEPTH(PEND_DEPTH)) u_raw_pend (
    .clk, .rst_n,
    .push    (raw_fire),
    .wr_data (nk_head.id),
    .pop     (raw_rsp_valid && raw_rsp_first),
    .rd_data (raw_head),
    .full    (raw_full), .empty (raw_empty), .level ()
  );

  // ---------------------------------------------------------------- exact distances
  logic  fp_valid;
  cand_t fp_cand;

  full_precision_dist #(.D(D), .LANES(FP_LANES)) u_fpd (
    .clk, .rst_n,
    .in_valid (raw_rsp_valid),
    .in_first (raw_rsp_first),
    .in_last  (raw_rsp_last),
    .in_data  (raw_rsp_data),
    .in_id    (raw_head),
    .q_slice  (fp_slice),
    .q_data   (fp_q),
    .out_valid(fp_valid),
    .out_cand (fp_cand)
  );

  logic [OW+1:0] raw_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) raw_out <= '0;
    else        raw_out <= raw_out + (OW+2)'(raw_fire) - (OW+2)'(fp_valid);
  end

  // ---------------------------------------------------------------- Top-K queue
  logic  k_head_v, k_busy, k_pop;
  cand_t k_head;
  logic [KKW-1:0] k_count;

  priority_queue #(.DEPTH(K_DEPTH)) u_topk (
    .clk, .rst_n,
    .clear (nk_clear),
    .push (fp_valid), .push_cand (fp_cand),
    .pop (k_pop),
    .head_valid (k_head_v), .head_o (k_head),
    .busy (k_busy), .drop (k_drop), .count (k_count)
  );

  // ---------------------------------------------------------------- OUTPUT
  logic [KKW-1:0] emitted;
  assign res_valid = (ph == PH_OUTPUT) && k_head_v && (emitted < k_out);
  assign res_cand  = k_head;
  assign res_last  = res_valid && ((emitted + KKW'(1) == k_out) || (k_count == KKW'(1)));
  assign k_pop     = res_valid && res_ready;

  // ---------------------------------------------------------------- phase control
  assign nk_clear = (ph == PH_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE; issued <= '0; emitted <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph)
        PH_IDLE: if (start) begin
          ph <= PH_FILTER; issued <= '0; emitted <= '0;
        end
        PH_FILTER: if (cand_fire && cand_last) ph <= PH_FDRAIN;
        PH_FDRAIN: if (rec_out == '0 && !est_valid && !nk_busy) ph <= PH_REFINE;
        PH_REFINE: begin
          if (raw_fire) issued <= issued + NKW'(1);
          if ((issued + NKW'(raw_fire) >= n_refine) || (!nk_head_v && !raw_fire)
              || (raw_fire && nk_count == NKW'(1)))
            ph <= PH_RDRAIN;
        end
        PH_RDRAIN: if (raw_out == '0 && !fp_valid && !k_busy) ph <= PH_OUTPUT;
        PH_OUTPUT: begin
          if (k_pop) emitted <= emitted + KKW'(1);
          if ((k_pop && res_last) || !k_head_v || emitted >= k_out) begin
            ph   <= PH_IDLE;
            done <= 1'b1;
          end
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- handshake rules
  a_rec_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
      rec_rsp_valid && rec_rsp_first |-> !rec_empty)
    else $error("fatrq_accel: residual record returned that was never requested");
  a_raw_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
      raw_rsp_valid && raw_rsp_first |-> !raw_empty)
    else $error("fatrq_accel: raw vector returned that was never requested");
  a_est_accepts: assert property (@(posedge clk) disable iff (!rst_n)
      rec_rsp_valid |-> est_in_ready)
    else $error("fatrq_accel: record beat offered while the estimator cannot take it");
  a_cand_stable: assert property (@(posedge clk) disable iff (!rst_n)
      cand_valid && !cand_ready && ph == PH_FILTER |=> cand_valid && $stable(cand_id))
    else $error("fatrq_accel: candidate withdrawn before it was accepted");

endmodule
