// full_precision_dist: exact squared L2 distance between the query and a raw vector.
//
// After the estimator has trimmed the candidate list, only the best candidates are
// fetched from the SSD; this unit computes their exact distance ||x - q||^2 for the
// final Top-K queue. A raw vector arrives as ceil(D/LANES) beats of LANES signed
// 16-bit elements (8 fractional bits; the paper's vectors are 32-bit floats, fixed
// point is this design's choice). Per beat, LANES subtractors and squarers and an
// adder sum (x_i - q_i)^2 with the matching query slice; the beats are accumulated
// and the 16-fraction-bit result is saturated to a 32-bit distance.
//
// Interface: in_valid/in_first/in_last frame one vector, one beat per cycle, never
// stalled; in_id is taken on the first beat. q_slice selects the query slice of the
// current beat. Timing: out_valid pulses one cycle after the last beat.
module full_precision_dist
  import fatrq_pkg::*;
#(
  parameter  int D     = 768,
  parameter  int LANES = 16,
  localparam int BEATS = (D + LANES - 1) / LANES,
  localparam int BSW   = (BEATS > 1) ? $clog2(BEATS) : 1,
  localparam int ACC_W = 2 * QUERY_W + 2 + $clog2(D + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  elem_t          in_data [LANES],
  input  id_t            in_id,
  output logic [BSW-1:0] q_slice,
  input  elem_t          q_data [LANES],
  output logic           out_valid,
  output cand_t          out_cand
);

  logic [BSW-1:0]          beat_q;
  logic [ACC_W-1:0]        acc;
  logic [ACC_W-1:0]        beat_sum;
  logic [ACC_W-1:0]        tot;
  id_t                     cur_id;

  assign q_slice = in_first ? '0 : beat_q;

  always_comb begin
    beat_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [QUERY_W:0]     diff;
      logic        [2*QUERY_W+1:0] sq;
      diff = {in_data[l][QUERY_W-1], in_data[l]} - {q_data[l][QUERY_W-1], q_data[l]};
      sq   = $unsigned((2*QUERY_W+2)'(diff) * (2*QUERY_W+2)'(diff));
      beat_sum = beat_sum + ACC_W'(sq);
    end
  end

  assign tot = (in_first ? '0 : acc) + beat_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_q <= '0; acc <= '0; cur_id <= '0; out_valid <= 1'b0; out_cand <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc    <= tot;
        beat_q <= in_last ? '0 : q_slice + BSW'(1);
        if (in_first) cur_id <= in_id;
        if (in_last) begin
          out_cand.id    <= in_first ? in_id : cur_id;
          out_cand.score <= (tot > ACC_W'(32'h7fff_ffff)) ? 32'sh7fff_ffff : dist_t'(tot[DIST_W-1:0]);
        end
      end
    end
  end

endmodule
