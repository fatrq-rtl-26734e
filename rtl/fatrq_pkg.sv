// fatrq_pkg: types and number formats shared by the tiered-residual refinement
// accelerator.
//
// Number formats (this design's choice; the paper gives only the 4-byte width of a
// distance and of each of the two per-record scalars):
//   * distances, per-record metadata and calibration weights are signed 32-bit
//     fixed point with FRAC = 16 fractional bits;
//   * query and raw-vector elements are signed 16-bit fixed point with QFRAC = 8
//     fractional bits;
//   * a ternary digit (trit) is a 2-bit two's-complement value in {-1, 0, +1}.
// Candidate pointers (vector IDs) are 32 bits wide.
package fatrq_pkg;

  localparam int DIST_W   = 32;  // 4-byte distance, as sent by the front-stage GPU
  localparam int META_W   = 32;  // each of the two per-record scalars (8 bytes total)
  localparam int ID_W     = 32;  // vector pointer stored next to each queue entry
  localparam int QUERY_W  = 16;  // query / raw-vector element width
  localparam int FRAC     = 16;  // fractional bits of distances, metadata, weights
  localparam int QFRAC    = 8;   // fractional bits of query / raw-vector elements
  localparam int RS_FRAC  = 16;  // fractional bits of the 1/sqrt(k) table
  localparam int TRITS_PER_BYTE = 5;  // five base-3 digits packed per byte
  localparam int NUM_FEAT = 4;   // calibration features [d0, d_ip, |delta|^2, <xc,delta>]

  typedef logic signed [DIST_W-1:0]  dist_t;
  typedef logic signed [META_W-1:0]  meta_t;
  typedef logic        [ID_W-1:0]    id_t;
  typedef logic signed [QUERY_W-1:0] elem_t;

  // Ternary digit, encoded as a 2-bit signed number.
  typedef enum logic [1:0] {
    T_ZERO = 2'b00,
    T_POS  = 2'b01,
    T_NEG  = 2'b11
  } trit_t;

  // One priority-queue entry: a distance and the pointer of its vector.
  typedef struct packed {
    id_t   id;
    dist_t score;
  } cand_t;

  // The two precomputed scalars stored with each residual code in far memory.
  typedef struct packed {
    meta_t xc_dot_delta;  // <x_c, delta>
    meta_t delta_norm;    // ||delta||
  } rec_meta_t;

  // Calibration weights W, applied to the feature vector A.
  typedef struct packed {
    dist_t w_d0;      // weight of d0 = ||q - x_c||^2 (coarse distance from the GPU)
    dist_t w_ip;      // weight of d_ip, the ternary estimate of -2<q, delta>
    dist_t w_dnorm2;  // weight of ||delta||^2
    dist_t w_xcd;     // weight of <x_c, delta>
  } calib_w_t;

  // Phases of one query in the accelerator (this design's sequencing).
  typedef enum logic [2:0] {
    PH_IDLE,     // waiting for a query; query buffer may be loaded
    PH_FILTER,   // candidate list streams in, residual records are scored
    PH_FDRAIN,   // last records finishing, Top-nK queue settling
    PH_REFINE,   // best candidates fetched from storage, exact distances computed
    PH_RDRAIN,   // last raw vectors finishing, Top-K queue settling
    PH_OUTPUT    // Top-K results streamed out
  } phase_t;

  // Saturate a wide signed value to a distance.
  function automatic dist_t sat_dist(input logic signed [79:0] v);
    localparam logic signed [79:0] MAXV = 80'sd2147483647;
    localparam logic signed [79:0] MINV = -80'sd2147483648;
    if (v > MAXV)      return dist_t'(MAXV[DIST_W-1:0]);
    else if (v < MINV) return dist_t'(MINV[DIST_W-1:0]);
    else               return dist_t'(v[DIST_W-1:0]);
  endfunction

endpackage
