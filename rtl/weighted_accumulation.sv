// weighted_accumulation: the calibrated refinement estimator, d_est = A . W.
//
// For one candidate it receives the coarse distance d0 = ||q - x_c||^2 (sent by the
// front-stage GPU), the ternary inner product S = <q, c> of the query with the
// un-normalised residual code c, the number k of non-zero digits in c, and the two
// precomputed scalars ||delta|| and <x_c, delta> stored with the code. It forms the
// paper's feature vector
//     A = [ d0,  d_ip,  ||delta||^2,  <x_c, delta> ],
//     d_ip = -2 * ||delta|| * S / sqrt(k)          (estimate of -2 <q, delta>)
// and returns sum_i W_i * A_i with the calibration weights W learned offline.
// S / sqrt(k) equals ||q|| <e_q, e_dc>; the paper's remaining factor
// <e_dc, e_delta> is not stored per record, so this design leaves it to the learned
// weight W_ip. 1/sqrt(k) comes from a (D+1)-entry table,
// rsqrt[k] = floor(2^16 / sqrt(k)) = isqrt(floor(2^32 / k)), rsqrt[0] = 0, built by a
// constant function; ||delta||^2 is squared on the fly from the stored ||delta||.
//
// The datapath is a small MAC array: four multipliers (one per feature) feeding an
// adder. Each product is shifted back to the 16-bit fraction and results are
// saturated to 32 bits. Pipeline (this design's choice): 4 stages, one candidate
// accepted per cycle, no backpressure.
//   stage 1: S*rsqrt[k], ||delta||^2      stage 2: d_ip, feature vector A
//   stage 3: W_i * A_i                     stage 4: sum, saturate -> out
module weighted_accumulation
  import fatrq_pkg::*;
#(
  parameter  int D  = 768,
  parameter  int SW = 25,                      // width of the ternary sum S
  localparam int KW = $clog2(D + 1)            // width of the non-zero count k
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  calib_w_t             weights,
  input  logic                 in_valid,
  input  id_t                  in_id,
  input  dist_t                in_d0,
  input  logic signed [SW-1:0] in_sum,
  input  logic        [KW-1:0] in_nnz,
  input  rec_meta_t            in_meta,
  output logic                 out_valid,
  output cand_t                out_cand
);

  typedef logic signed [79:0] wide_t;
  typedef logic [RS_FRAC:0] rs_t;

  function automatic longint unsigned isqrt(input longint unsigned n);
    longint unsigned r;
    r = 0;
    for (int b = 31; b >= 0; b--) begin
      longint unsigned t;
      t = r | (64'd1 << b);
      if (t * t <= n) r = t;
    end
    return r;
  endfunction

  typedef rs_t rs_tab_t [D+1];

  function automatic rs_tab_t build_rsqrt();
    rs_tab_t t;
    t[0] = '0;
    for (int k = 1; k <= D; k++)
      t[k] = rs_t'(isqrt((64'd1 << (2*RS_FRAC)) / longint'(k)));
    return t;
  endfunction

  localparam rs_tab_t RSQRT = build_rsqrt();

  // ---------------- stage 1
  logic      v1;
  id_t       id1;
  dist_t     d0_1, xcd1, dn1;
  wide_t     ipn1, dn2_1;
  rs_t       rs;

  assign rs = (int'(in_nnz) <= D) ? RSQRT[in_nnz] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; id1 <= '0; d0_1 <= '0; xcd1 <= '0; dn1 <= '0; ipn1 <= '0; dn2_1 <= '0;
    end else begin
      v1    <= in_valid;
      id1   <= in_id;
      d0_1  <= in_d0;
      xcd1  <= in_meta.xc_dot_delta;
      dn1   <= in_meta.delta_norm;
      // <q, e_dc> * ||q||: S has QFRAC fraction bits, rsqrt has RS_FRAC
      ipn1  <= (wide_t'(in_sum) * wide_t'($signed({1'b0, rs}))) >>> (QFRAC + RS_FRAC - FRAC);
      dn2_1 <= (wide_t'(in_meta.delta_norm) * wide_t'(in_meta.delta_norm)) >>> FRAC;
    end
  end

  // ---------------- stage 2: feature vector
  logic  v2;
  id_t   id2;
  dist_t a2 [NUM_FEAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; id2 <= '0;
      for (int i = 0; i < NUM_FEAT; i++) a2[i] <= '0;
    end else begin
      v2    <= v1;
      id2   <= id1;
      a2[0] <= d0_1;
      a2[1] <= sat_dist(-((ipn1 * wide_t'(dn1)) >>> (FRAC - 1)));  // -2 * ipn * ||delta||
      a2[2] <= sat_dist(dn2_1);
      a2[3] <= xcd1;
    end
  end

  // ---------------- stage 3: products
  logic  v3;
  id_t   id3;
  wide_t p3 [NUM_FEAT];
  dist_t w  [NUM_FEAT];

  assign w[0] = weights.w_d0;
  assign w[1] = weights.w_ip;
  assign w[2] = weights.w_dnorm2;
  assign w[3] = weights.w_xcd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0; id3 <= '0;
      for (int i = 0; i < NUM_FEAT; i++) p3[i] <= '0;
    end else begin
      v3  <= v2;
      id3 <= id2;
      for (int i = 0; i < NUM_FEAT; i++) p3[i] <= wide_t'(w[i]) * wide_t'(a2[i]);
    end
  end

  // ---------------- stage 4: accumulate
  wide_t acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < NUM_FEAT; i++) acc = acc + p3[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cand  <= '0;
    end else begin
      out_valid      <= v3;
      out_cand.id    <= id3;
      out_cand.score <= sat_dist(acc >>> FRAC);
    end
  end

endmodule
