// gf2m_reduce -- reduction of a 2m-1-bit product modulo P(x) = x^m + r(x).
//
// Because x^m = r(x) mod P(x), every coefficient at or above x^m can be
// folded down by multiplying it by r(x). For the sparse NIST trinomials and
// pentanomials r(x) has only 2 or 4 terms of low degree, so the fold is a
// few shifted copies of the high half XORed onto the low half. Two folds are
// enough:
//   step 1:  t = C[m-1:0] + C[2m-2:m] * r(x)      (t may reach degree m-2+deg r)
//   step 2:  C' = t[m-1:0] + t[.. :m] * r(x)       (now below degree m)
// For B-163, r(x) = x^7 + x^6 + x^3 + 1, step 1 folds C[324:163] and step 2
// clears the few coefficients t[168:163] that step 1 pushed above x^162.
// For a trinomial x^m + x^n + 1 the same two steps are the W + X + Y + Z
// scheme: W = C[m-1:0], X = C[2m-2:m], Y = C[2m-2:m] x^n, and Z = the bits
// that Y pushes past x^(m-1), folded back once more (at x^0 and x^n).
// The two-step fold is exact whenever 2 deg r(x) <= m + 1, which holds for
// every NIST polynomial; elaboration stops with an error otherwise.
//
// Timing: purely combinational.
module gf2m_reduce #(
  parameter int unsigned     M     = 163,                              // field degree m
  parameter logic [M-1:0]    RPOLY = M'(gf2_pkg::R_B163[M-1:0])        // r(x), bit i = coeff. of x^i
) (
  input  logic [2*M-2:0] c,   // unreduced product, degree <= 2m-2
  output logic [M-1:0]   r    // c mod P(x)
);
  localparam int unsigned W = 2 * M - 1;

  function automatic int unsigned rdeg(input logic [M-1:0] p);
    int unsigned d = 0;
    for (int unsigned i = 0; i < M; i++) if (p[i]) d = i;
    return d;
  endfunction

  localparam int unsigned DEG_R = rdeg(RPOLY);

  if (2 * DEG_R > M + 1) begin : g_bad_poly
    $error("gf2m_reduce: r(x) degree too high for two-step reduction");
  end

  logic [W-1:0] hi1, hi2;  // coefficients at x^m and above, moved down to x^0
  logic [W-1:0] t;         // after step 1
  logic [M-1:0] res;       // after step 2

  always_comb begin
    // Step 1: fold C[2m-2:m].
    hi1 = W'(c[W-1:M]);
    t   = W'(c[M-1:0]);
    for (int unsigned j = 0; j < M; j++) begin
      if (RPOLY[j]) t = t ^ (hi1 << j);
    end
    // Step 2: fold what step 1 left at x^m and above.
    hi2 = W'(t[W-1:M]);
    res = t[M-1:0];
    for (int unsigned j = 0; j < M; j++) begin
      if (RPOLY[j]) res = res ^ M'(hi2 << j);
    end
  end

  assign r = res;
endmodule
