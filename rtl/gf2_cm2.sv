// gf2_cm2 -- 2-bit conventional (schoolbook) multiplier of binary polynomials.
//
// Multiplies a(x) = a1 x + a0 by b(x) = b1 x + b0 over GF(2), without
// reduction, giving the degree-2 product c(x) = c2 x^2 + c1 x + c0:
//   c0 = a0 b0,   c1 = a0 b1 xor a1 b0,   c2 = a1 b1.
// That is four AND gates and one XOR gate, the cell drawn as the basic
// building block of the conventional multiplier. Purely combinational.
module gf2_cm2 (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [2:0] c
);
  logic p00, p01, p10, p11;

  assign p00  = a[0] & b[0];
  assign p01  = a[0] & b[1];
  assign p10  = a[1] & b[0];
  assign p11  = a[1] & b[1];

  assign c[0] = p00;
  assign c[1] = p01 ^ p10;
  assign c[2] = p11;
endmodule
