// fatrq_estimator: the residual distance estimator of the refinement accelerator.
//
// It refines a candidate's coarse distance d0 from the residual record streamed out
// of far memory, without reconstructing the vector. A record is the packed ternary
// code of the residual direction (five digits per byte, ceil(D/5) bytes) plus the
// two scalars ||delta|| and <x_c, delta>. The record arrives as CODE_BEATS beats of
// BEAT_BYTES code bytes. Per beat, BEAT_BYTES ternary decoders (256-entry tables)
// unpack 5*BEAT_BYTES digits, the matching slice of the query is read from the query
// buffer, and the multiplexer/adder tree forms the partial inner product and the
// partial non-zero count. These are accumulated over the beats; on the last beat the
// totals, d0 and the scalars enter the weighted accumulation unit, which emits the
// calibrated estimate for the Top-nK queue.
//
// Interface: in_valid/in_first/in_last frame a record, one beat per cycle, with no
// backpressure (in_ready is always 1: the datapath is fully pipelined). in_id and
// in_d0 are taken on the first beat, in_meta on the last. q_slice selects the query
// slice for the current beat (beat b uses query elements [b*LANES, (b+1)*LANES)).
// Timing: out_valid rises 4 cycles after the last beat of a record; a new record
// may start in the cycle after the previous last beat.
// Beat width and framing are this design's choices; decoder, query buffer, adder
// tree and weighted accumulation follow the paper's block diagram.
module fatrq_estimator
  import fatrq_pkg::*;
#(
  parameter  int D          = 768,
  parameter  int BEAT_BYTES = 32,
  localparam int LANES      = BEAT_BYTES * TRITS_PER_BYTE,
  localparam int CODE_BYTES = (D + TRITS_PER_BYTE - 1) / TRITS_PER_BYTE,
  localparam int CODE_BEATS = (CODE_BYTES + BEAT_BYTES - 1) / BEAT_BYTES,
  localparam int ASW        = (CODE_BEATS > 1) ? $clog2(CODE_BEATS) : 1,
  localparam int TSW        = QUERY_W + ((LANES > 1) ? $clog2(LANES) : 1) + 1,
  localparam int TCW        = ((LANES > 1) ? $clog2(LANES) : 1) + 1,
  localparam int ACC_W      = QUERY_W + $clog2(D) + 2,
  localparam int KW         = $clog2(D + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  calib_w_t       weights,
  // residual record stream from far memory
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  logic [7:0]     in_code [BEAT_BYTES],
  input  id_t            in_id,
  input  dist_t          in_d0,
  input  rec_meta_t      in_meta,
  output logic           in_ready,
  // query buffer read port
  output logic [ASW-1:0] q_slice,
  input  elem_t          q_data [LANES],
  // refined candidate
  output logic           out_valid,
  output cand_t          out_cand
);

  assign in_ready = 1'b1;

  // ---- beat position
  logic [ASW-1:0] beat_q;
  assign q_slice = in_first ? '0 : beat_q;

  // ---- ternary decoders; digits at positions >= D (padding of the last beat) are
  // forced to zero so that they count neither in S nor in k
  trit_t trits [LANES];
  for (genvar b = 0; b < BEAT_BYTES; b++) begin : g_dec
    trit_t t5 [TRITS_PER_BYTE];
    ternary_decoder u_dec (.code_i(in_code[b]), .trits_o(t5));
    for (genvar j = 0; j < TRITS_PER_BYTE; j++) begin : g_t
      assign trits[b*TRITS_PER_BYTE + j] =
        (int'(q_slice) * LANES + b*TRITS_PER_BYTE + j < D) ? t5[j] : T_ZERO;
    end
  end

  // ---- multiplexers + adder tree
  logic signed [TSW-1:0] beat_sum;
  logic        [TCW-1:0] beat_nnz;
  ternary_adder_tree #(.LANES(LANES)) u_tree (
    .q_i(q_data), .trit_i(trits), .sum_o(beat_sum), .nnz_o(beat_nnz)
  );

  // ---- accumulation over the beats of a record
  logic signed [ACC_W-1:0] acc_sum, tot_sum;
  logic        [KW-1:0]    acc_nnz, tot_nnz;
  id_t                     cur_id,  rec_id;
  dist_t                   cur_d0,  rec_d0;

  assign tot_sum = (in_first ? '0 : acc_sum) + ACC_W'(beat_sum);
  assign tot_nnz = (in_first ? '0 : acc_nnz) + KW'(beat_nnz);
  assign rec_id  = in_first ? in_id : cur_id;
  assign rec_d0  = in_first ? in_d0 : cur_d0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_q <= '0; acc_sum <= '0; acc_nnz <= '0; cur_id <= '0; cur_d0 <= '0;
    end else if (in_valid) begin
      acc_sum <= tot_sum;
      acc_nnz <= tot_nnz;
      cur_id  <= rec_id;
      cur_d0  <= rec_d0;
      beat_q  <= in_last ? '0 : q_slice + ASW'(1);
    end
  end

  // ---- weighted accumulation (calibrated estimate)
  weighted_accumulation #(.D(D), .SW(ACC_W)) u_wacc (
    .clk, .rst_n, .weights,
    .in_valid (in_valid && in_last),
    .in_id    (rec_id),
    .in_d0    (rec_d0),
    .in_sum   (tot_sum),
    .in_nnz   (tot_nnz),
    .in_meta  (in_meta),
    .out_valid, .out_cand
  );

endmodule
