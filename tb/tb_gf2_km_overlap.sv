// tb_gf2_km_overlap -- checks the Karatsuba overlap circuit for the top
// level of B-163 (N = 163, L = 82). For random operands A, B the three
// sub-products are formed with the reference multiplier, fed to the block,
// and its output must equal the reference product A*B. Two corner cases
// (all ones, and only the top bits set) make every overlapping column carry.
module tb_gf2_km_overlap;
  import gf2_ref_pkg::*;

  localparam int unsigned N = 163;
  localparam int unsigned L = (N + 1) / 2;

  logic [2*L-2:0] m0, m1, mm;
  logic [2*N-2:0] c;
  int checks = 0, failures = 0;

  gf2_km_overlap dut (.m0(m0), .m1(m1), .mm(mm), .c(c));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input wide_t x, input wide_t y);
    wide_t al, ah, bl, bh, exp, t0, t1, tm;
    al = x & ones(L);
    ah = (x >> L) & ones(N - L);
    bl = y & ones(L);
    bh = (y >> L) & ones(N - L);
    t0 = clmul(al, bl, L);
    t1 = clmul(ah, bh, L);
    tm = clmul(al ^ ah, bl ^ bh, L);
    m0 = t0[2*L-2:0];
    m1 = t1[2*L-2:0];
    mm = tm[2*L-2:0];
    #1;
    exp = clmul(x, y, N);
    checks++;
    if (c !== exp[2*N-2:0]) begin
      failures++;
      $display("FAIL x=%h y=%h", x[N-1:0], y[N-1:0]);
    end
  endtask

  initial begin
    check(ones(N), ones(N));
    check(ones(N) ^ ones(L), ones(N) ^ ones(L));
    check(ones(L), ones(N));
    for (int i = 0; i < 300; i++) check(rand_vec(N), rand_vec(N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
