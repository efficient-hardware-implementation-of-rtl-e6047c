// gf2_ref_pkg -- reference arithmetic for the testbenches.
//
// Plain bit-serial algorithms, written independently of the RTL structure:
//   clmul    shift-and-XOR multiplication of binary polynomials
//   polymod  long division by P(x) = x^m + r(x), one coefficient at a time
//            from the top, as in textbook reduction
//   modmul   MSB-first interleaved multiply-and-reduce (a different
//            algorithm again, used to check the complete multiplier)
//   rand_vec random vector of n bits from $urandom
// All values are held in a fixed 1152-bit container, enough for 2*571-1.
package gf2_ref_pkg;

  localparam int unsigned WMAX = 1152;
  typedef logic [WMAX-1:0] wide_t;

  function automatic wide_t clmul(input wide_t a, input wide_t b, input int unsigned n);
    wide_t r = '0;
    for (int unsigned i = 0; i < n; i++) begin
      if (b[i]) r = r ^ (a << i);
    end
    return r;
  endfunction

  function automatic wide_t polymod(input wide_t c, input int unsigned m, input wide_t rpoly);
    wide_t r = c;
    for (int i = 2 * int'(m) - 2; i >= int'(m); i--) begin
      if (r[i]) begin
        r[i] = 1'b0;
        r    = r ^ (rpoly << (i - int'(m)));
      end
    end
    return r;
  endfunction

  function automatic wide_t modmul(input wide_t a, input wide_t b, input int unsigned m,
                                   input wide_t rpoly);
    wide_t acc = '0;
    for (int i = int'(m) - 1; i >= 0; i--) begin
      acc = acc << 1;
      if (acc[m]) begin
        acc[m] = 1'b0;
        acc    = acc ^ rpoly;
      end
      if (b[i]) acc = acc ^ a;
    end
    return acc;
  endfunction

  function automatic wide_t rand_vec(input int unsigned n);
    wide_t r = '0;
    for (int unsigned i = 0; i < n; i += 32) begin
      r[i +: 32] = $urandom();
    end
    for (int unsigned i = n; i < WMAX; i++) r[i] = 1'b0;
    return r;
  endfunction

  function automatic wide_t ones(input int unsigned n);
    wide_t r = '0;
    for (int unsigned i = 0; i < n; i++) r[i] = 1'b1;
    return r;
  endfunction

endpackage
