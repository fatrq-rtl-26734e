// tb_ternary_decoder: exhaustive check of the 256-entry ternary decoder.
// Every one of the 243 digit combinations is encoded with y = sum 3^i (x_i + 1) and
// must decode back to the same digits; codes 243..255 must decode to zeros.
module tb_ternary_decoder;
  import fatrq_pkg::*;
  import fatrq_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] code;
  trit_t      trits [TRITS_PER_BYTE];

  ternary_decoder dut (.code_i(code), .trits_o(trits));

  function automatic int tval(trit_t t);
    return (t == T_POS) ? 1 : (t == T_NEG) ? -1 : (t == T_ZERO) ? 0 : 99;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x [5];
    for (int a = 0; a < 243; a++) begin
      automatic int r = a;
      for (int i = 0; i < 5; i++) begin x[i] = (r % 3) - 1; r /= 3; end
      code = 8'(encode5(x[0], x[1], x[2], x[3], x[4]));
      #1;
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (tval(trits[i]) != x[i]) begin
          failures++;
          $display("FAIL code %0d digit %0d: got %0d want %0d", code, i, tval(trits[i]), x[i]);
        end
      end
    end
    for (int y = 243; y < 256; y++) begin
      code = 8'(y);
      #1;
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (trits[i] != T_ZERO) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
