// tb_gf2m_reduce -- checks the reduction block.
// dut    : defaults, B-163 pentanomial x^163 + x^7 + x^6 + x^3 + 1.
// dut_t  : B-233 trinomial x^233 + x^70 + 1 (largest r(x) degree of the
//          NIST set, so the second fold step does the most work).
// Inputs are random 2m-1-bit vectors, all-ones and single top bits; the
// reference is bit-at-a-time long division. Known answers: x^(2m-2) and
// x^m reduce as worked out by hand for B-163 (x^163 = x^7+x^6+x^3+1).
module tb_gf2m_reduce;
  import gf2_ref_pkg::*;
  import gf2_pkg::*;

  localparam int unsigned M  = 163;
  localparam int unsigned MT = 233;

  logic [2*M-2:0]  c;
  logic [M-1:0]    r;
  logic [2*MT-2:0] ct;
  logic [MT-1:0]   rt;
  int checks = 0, failures = 0;

  gf2m_reduce dut (.c(c), .r(r));
  gf2m_reduce #(.M(MT), .RPOLY(MT'(R_B233[MT-1:0]))) dut_t (.c(ct), .r(rt));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input wide_t x);
    wide_t e, et;
    c  = x[2*M-2:0];
    ct = x[2*MT-2:0];
    #1;
    e  = polymod(wide_t'(c), M, wide_t'(R_B163));
    et = polymod(wide_t'(ct), MT, wide_t'(R_B233));
    checks += 2;
    if (r !== e[M-1:0]) begin
      failures++;
      $display("FAIL m=%0d c=%h r=%h exp=%h", M, c, r, e[M-1:0]);
    end
    if (rt !== et[MT-1:0]) begin
      failures++;
      $display("FAIL m=%0d c=%h", MT, ct);
    end
  endtask

  initial begin
    // Known answer: x^163 mod P = x^7 + x^6 + x^3 + 1 = 0xC9.
    c = '0;
    c[163] = 1'b1;
    #1;
    checks++;
    if (r !== M'(8'hC9)) begin
      failures++;
      $display("FAIL x^163 -> %h", r);
    end
    // Known answer: x^170 = x^7 * x^163 = x^14+x^13+x^10+x^7.
    c = '0;
    c[170] = 1'b1;
    #1;
    checks++;
    if (r !== M'(16'h6480)) begin
      failures++;
      $display("FAIL x^170 -> %h", r);
    end
    check(ones(2 * MT - 1));
    check(wide_t'(1) << (2 * M - 2));
    check(wide_t'(1) << (2 * MT - 2));
    check(ones(2 * M - 1) ^ ones(M));
    for (int i = 0; i < 400; i++) check(rand_vec(2 * MT - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
