// gf2_cm_mul -- N-bit conventional multiplier (Stage I of the hybrid design).
//
// Computes the unreduced product c(x) = a(x) b(x) of two binary polynomials
// of degree < N; c has 2N-1 bits. This is the quadratic "conventional
// multiplication" (CM) used below the Karatsuba/CM crossover point (41 bits
// for the 163-bit field).
//
// How it works: both operands are zero-padded to an even width and cut into
// 2-bit digits. Every digit pair (i, j) is multiplied by a gf2_cm2 cell and
// its 3-bit partial product is XORed into the result at bit 2(i+j). This
// tiles the 2-bit CM cell over the operand, as the conventional stage is
// described ("2/4/8-bit onwards up to the optimum point"); the exact way the
// cells are grouped inside the stage is this design's choice. Gate count is
// N^2 ANDs and about (N-1)^2 XORs.
//
// Timing: purely combinational, no clock.
module gf2_cm_mul #(
  parameter int unsigned N = 41   // operand width (Stage I optimum point for B-163)
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] c
);
  localparam int unsigned D  = (N + 1) / 2;  // number of 2-bit digits
  localparam int unsigned NP = 2 * D;        // padded width
  localparam int unsigned PW = 2 * NP - 1;   // padded product width

  logic [NP-1:0] ap, bp;
  assign ap = NP'(a);
  assign bp = NP'(b);

  // Partial product of digit pair (i, j).
  logic [2:0] pp [D][D];

  for (genvar i = 0; i < D; i++) begin : g_row
    for (genvar j = 0; j < D; j++) begin : g_col
      gf2_cm2 u_cell (
        .a (ap[2*i +: 2]),
        .b (bp[2*j +: 2]),
        .c (pp[i][j])
      );
    end
  end

  // XOR accumulation of the shifted partial products.
  logic [PW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int i = 0; i < D; i++) begin
      for (int j = 0; j < D; j++) begin
        acc[2*(i+j) +: 3] = acc[2*(i+j) +: 3] ^ pp[i][j];
      end
    end
  end

  // The padding bits are zero, so the bits above 2N-2 are zero as well.
  assign c = acc[2*N-2:0];
endmodule
