// ternary_decoder: unpacks one byte of packed residual code into five ternary digits.
//
// The residual code stores five ternary digits x_0..x_4 in {-1,0,+1} per byte as the
// base-3 number y = sum_{i=0..4} 3^i * (x_i + 1), so y lies in 0..242. Following the
// paper, the decoder is a 256-entry lookup table indexed by the byte. The table is
// built at elaboration time by a constant function that takes the base-3 digits of
// each index and subtracts one from each. The 13 unused codes 243..255 are this
// design's choice: they decode to five zeros, so they add nothing to a distance.
//
// Interface: code_i is the packed byte, trits_o[i] is digit x_i (2-bit signed).
// Timing: purely combinational (one table read).
module ternary_decoder
  import fatrq_pkg::*;
(
  input  logic [7:0] code_i,
  output trit_t      trits_o [TRITS_PER_BYTE]
);

  typedef logic [2*TRITS_PER_BYTE-1:0] lut_word_t;

  function automatic lut_word_t entry(input int y);
    lut_word_t w;
    int r;
    w = '0;
    r = y;
    if (y < 243) begin
      for (int i = 0; i < TRITS_PER_BYTE; i++) begin
        case (r % 3)
          0:       w[2*i +: 2] = T_NEG;
          1:       w[2*i +: 2] = T_ZERO;
          default: w[2*i +: 2] = T_POS;
        endcase
        r = r / 3;
      end
    end
    return w;
  endfunction

  function automatic logic [256*2*TRITS_PER_BYTE-1:0] build_lut();
    logic [256*2*TRITS_PER_BYTE-1:0] t;
    for (int y = 0; y < 256; y++) t[y*2*TRITS_PER_BYTE +: 2*TRITS_PER_BYTE] = entry(y);
    return t;
  endfunction

  localparam logic [256*2*TRITS_PER_BYTE-1:0] LUT = build_lut();

  lut_word_t word;
  assign word = LUT[code_i*2*TRITS_PER_BYTE +: 2*TRITS_PER_BYTE];

  always_comb begin
    for (int i = 0; i < TRITS_PER_BYTE; i++) trits_o[i] = trit_t'(word[2*i +: 2]);
  end

endmodule
