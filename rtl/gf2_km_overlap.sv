// gf2_km_overlap -- Karatsuba overlap circuit.
//
// One Karatsuba level splits N-bit operands into a low half of L bits and a
// high half of N-L bits, A = x^L A_H + A_L, and forms three sub-products
//   m0  = A_L B_L,   m1 = A_H B_H,   mm = (A_L + A_H)(B_L + B_H),
// each 2L-1 bits wide. This block merges them into the 2N-1-bit product
//   C = m1 x^(2L) + (mm + m0 + m1) x^L + m0.
// The middle term overlaps the upper L-1 bits of m0 and the lower L-1 bits
// of m1, hence the name: only those overlapping columns need XOR gates beyond
// the middle-term sum (one XOR level for mm+m0+m1, one for the overlap).
//
// Timing: purely combinational.
module gf2_km_overlap #(
  parameter int unsigned N = 163,        // width of the full operands
  parameter int unsigned L = (N + 1) / 2 // width of the low half (and of the sub-multipliers)
) (
  input  logic [2*L-2:0] m0,  // A_L * B_L
  input  logic [2*L-2:0] m1,  // A_H * B_H (A_H, B_H zero-extended to L bits)
  input  logic [2*L-2:0] mm,  // (A_L + A_H) * (B_L + B_H)
  output logic [2*N-2:0] c
);
  localparam int unsigned W = 2 * L + 2 * L - 1; // room for m1 shifted by 2L

  logic [2*L-2:0] mid;
  logic [W-1:0]   sum;

  assign mid = mm ^ m0 ^ m1;

  always_comb begin
    sum = W'(m0);
    sum = sum ^ (W'(mid) << L);
    sum = sum ^ (W'(m1) << (2 * L));
  end

  // A_H and B_H have at most N-L bits, so every term lies below bit 2N-1.
  assign c = sum[2*N-2:0];
endmodule
