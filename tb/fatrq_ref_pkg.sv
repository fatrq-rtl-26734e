// fatrq_ref_pkg: reference arithmetic for the testbenches.
//
// Computes the expected results of the refinement datapath directly from ternary
// digits and integers, with 128-bit intermediates and a floating-point 1/sqrt(k), so
// that the checks do not reuse the decoder table, the adder tree or the rsqrt table
// of the design.
package fatrq_ref_pkg;
  typedef logic signed [127:0] big_t;

  function automatic longint sat32(input big_t v);
    if (v > 128'sd2147483647)  return 64'sd2147483647;
    if (v < -128'sd2147483648) return -64'sd2147483648;
    return longint'(v);
  endfunction

  function automatic longint rsqrt16(input int k);
    if (k == 0) return 0;
    return longint'($floor(65536.0 / $sqrt(real'(k))));
  endfunction

  // packed byte from five digits in {-1,0,1}: y = sum 3^i (x_i + 1)
  function automatic int encode5(input int x0, x1, x2, x3, x4);
    return (x0 + 1) + 3 * (x1 + 1) + 9 * (x2 + 1) + 27 * (x3 + 1) + 81 * (x4 + 1);
  endfunction

  // calibrated estimate from the raw ingredients
  function automatic longint estimate(input longint s, input int k, input longint d0,
                                      input longint dnorm, input longint xcd,
                                      input longint w0, w1, w2, w3);
    big_t ipn, dn2, dip, acc;
    ipn = (big_t'(s) * big_t'(rsqrt16(k))) >>> 8;
    dn2 = sat32((big_t'(dnorm) * big_t'(dnorm)) >>> 16);
    dip = sat32(-((ipn * big_t'(dnorm)) >>> 15));
    acc = big_t'(w0) * big_t'(d0) + big_t'(w1) * dip + big_t'(w2) * dn2 + big_t'(w3) * big_t'(xcd);
    return sat32(acc >>> 16);
  endfunction
endpackage
