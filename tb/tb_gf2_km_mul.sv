// tb_gf2_km_mul -- checks the recursive hybrid Karatsuba multiplier.
// dut    : defaults, N = 163 split 163 -> 82 -> 41 onto 41-bit CM blocks.
// dut_d  : N = 23, CM_MAX = 3, a deep recursion with odd splits
//          (23 -> 12 -> 6 -> 3), to exercise the uneven high half at
//          several levels.
// Reference: shift-and-XOR product. Corner cases plus random pairs.
module tb_gf2_km_mul;
  import gf2_ref_pkg::*;

  localparam int unsigned N  = 163;
  localparam int unsigned ND = 23;

  logic [N-1:0]    a, b;
  logic [2*N-2:0]  c;
  logic [ND-1:0]   ad, bd;
  logic [2*ND-2:0] cd;
  int checks = 0, failures = 0;

  gf2_km_mul dut (.a(a), .b(b), .c(c));
  gf2_km_mul #(.N(ND), .CM_MAX(3)) dut_d (.a(ad), .b(bd), .c(cd));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input wide_t x, input wide_t y);
    wide_t exp, expd;
    a  = x[N-1:0];
    b  = y[N-1:0];
    ad = x[ND-1:0];
    bd = y[ND-1:0];
    #1;
    exp  = clmul(wide_t'(a), wide_t'(b), N);
    expd = clmul(wide_t'(ad), wide_t'(bd), ND);
    checks += 2;
    if (c !== exp[2*N-2:0]) begin
      failures++;
      $display("FAIL N=%0d a=%h b=%h", N, a, b);
    end
    if (cd !== expd[2*ND-2:0]) begin
      failures++;
      $display("FAIL N=%0d a=%h b=%h c=%h exp=%h", ND, ad, bd, cd, expd[2*ND-2:0]);
    end
  endtask

  initial begin
    check('0, ones(N));
    check(1, ones(N));
    check(ones(N), ones(N));
    check(wide_t'(1) << (N - 1), wide_t'(1) << (N - 1));
    check(ones(N) ^ ones(82), ones(N));
    for (int i = 0; i < 400; i++) check(rand_vec(N), rand_vec(N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
