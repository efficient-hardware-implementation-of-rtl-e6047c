// hybrid_modmul -- hybrid CM-KM modular multiplier over GF(2^m), top level.
//
// Computes Y = A(x) * B(x) mod P(x) for field elements A, B of GF(2^m) in
// polynomial basis (bit i = coefficient of x^i). The datapath is the
// three-stage hybrid: Karatsuba splitting (Stage II) down to the crossover
// size CM_MAX, conventional multipliers (Stage I) below it, then reduction by
// the NIST polynomial (final stage). With the defaults (B-163) the product
// path is 163 -> 82 -> 41, giving a 325-bit product C[324:0] that is reduced
// to C'[162:0].
//
// Interface (the port names of the multiplier core on the FPGA test set-up):
//   clk, rst   clock and synchronous active-high reset
//   en         A and B are sampled on a rising edge where en is high
//   A, B       operands, m bits
//   ready      high for one cycle per accepted operand pair, when Y is valid
//   Y          reduced product, m bits; holds its value until the next result
// Timing: the multiplier itself is combinational. Operands are registered on
// the rising edge where en is high and the reduced product is registered on
// the following rising edge, so ready and Y are valid one clock after the
// operands are accepted (the whole multiply-and-reduce is one register-to-
// register path) and a new operand pair can be accepted on every cycle
// (throughput 1 per clock). The
// register placement, the reset style and the one-cycle ready pulse are
// this design's choices; the published core only shows the port list.
module hybrid_modmul
  import gf2_pkg::*;
#(
  parameter int unsigned  M      = M_B163,                 // field degree m
  parameter int unsigned  CM_MAX = CM_MAX_B163,            // Stage I / Stage II crossover
  parameter logic [M-1:0] RPOLY  = M'(R_B163[M-1:0])       // r(x) of P(x) = x^m + r(x)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  input  logic [M-1:0] A,
  input  logic [M-1:0] B,
  output logic         ready,
  output logic [M-1:0] Y
);
  // Operand registers.
  logic [M-1:0] a_q, b_q;
  logic         v_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      a_q <= '0;
      b_q <= '0;
      v_q <= 1'b0;
    end else begin
      v_q <= en;
      if (en) begin
        a_q <= A;
        b_q <= B;
      end
    end
  end

  // Stage I + II: unreduced product C(x) = a(x) b(x).
  logic [2*M-2:0] c_full;
  gf2_km_mul #(.N(M), .CM_MAX(CM_MAX)) u_mul (.a(a_q), .b(b_q), .c(c_full));

  // Final stage: C'(x) = C(x) mod P(x).
  logic [M-1:0] c_red;
  gf2m_reduce #(.M(M), .RPOLY(RPOLY)) u_red (.c(c_full), .r(c_red));

  // Result register.
  always_ff @(posedge clk) begin
    if (rst) begin
      Y     <= '0;
      ready <= 1'b0;
    end else begin
      ready <= v_q;
      if (v_q) Y <= c_red;
    end
  end

  // ready is only raised for an accepted operand pair.
  assert property (@(posedge clk) disable iff (rst) ready |-> $past(v_q));
endmodule
