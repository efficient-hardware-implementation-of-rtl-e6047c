// gf2_km_mul -- recursive hybrid Karatsuba multiplier (Stage II of the design).
//
// Computes the unreduced product c(x) = a(x) b(x) of two binary polynomials
// of degree < N (2N-1-bit result). While N is above CM_MAX the operands are
// split into a low half of L = ceil(N/2) bits and a high half of N-L bits,
// three L-bit products are formed by instances of this same module, and the
// overlap circuit (gf2_km_overlap) merges them. Once N <= CM_MAX the
// recursion stops and a conventional multiplier (gf2_cm_mul) takes over,
// no further Karatsuba splitting being done. With the defaults
// (N = 163, CM_MAX = 41) this gives 163 -> 82 -> 41: two Karatsuba levels
// and nine 41-bit conventional multipliers.
//
// The split size, ceil(N/2), follows the published sequences
// 163 -> 82, 233 -> 117 -> 59 and 283 -> 142 -> 71.
//
// Timing: purely combinational.
//
// Lint note: Verilator, when it lints this module on its own as the top,
// reports m0/m1/mm as undriven and a_sum/b_sum as unused. It checks a
// template copy of the module with the self-instances removed; every
// elaborated instance is fully connected (synthesis and simulation of the
// parameterised copies confirm this), so the warning stands.
module gf2_km_mul #(
  parameter int unsigned N      = 163, // operand width
  parameter int unsigned CM_MAX = 41   // largest width multiplied conventionally
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-2:0] c
);
  if (N <= CM_MAX || N < 2) begin : g_cm
    // Stage I: conventional multiplier.
    gf2_cm_mul #(.N(N)) u_cm (.a(a), .b(b), .c(c));
  end else begin : g_km
    // Stage II: one Karatsuba level.
    localparam int unsigned L = (N + 1) / 2;
    localparam int unsigned H = N - L;

    logic [L-1:0]   a_lo, b_lo, a_hi, b_hi, a_sum, b_sum;
    logic [2*L-2:0] m0, m1, mm;

    assign a_lo  = a[L-1:0];
    assign b_lo  = b[L-1:0];
    assign a_hi  = L'(a[N-1:L]);
    assign b_hi  = L'(b[N-1:L]);
    assign a_sum = a_lo ^ a_hi;
    assign b_sum = b_lo ^ b_hi;

    gf2_km_mul #(.N(L), .CM_MAX(CM_MAX)) u_lo  (.a(a_lo),  .b(b_lo),  .c(m0));
    gf2_km_mul #(.N(L), .CM_MAX(CM_MAX)) u_hi  (.a(a_hi),  .b(b_hi),  .c(m1));
    gf2_km_mul #(.N(L), .CM_MAX(CM_MAX)) u_mid (.a(a_sum), .b(b_sum), .c(mm));

    gf2_km_overlap #(.N(N), .L(L)) u_ovl (.m0(m0), .m1(m1), .mm(mm), .c(c));

    // H is only used to document the uneven split (e.g. 163 = 82 + 81).
    if (H > L) begin : g_bad_split
      $error("gf2_km_mul: high half wider than low half");
    end
  end
endmodule
