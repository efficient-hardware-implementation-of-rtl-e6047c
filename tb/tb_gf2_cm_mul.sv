// tb_gf2_cm_mul -- checks the conventional (Stage I) multiplier.
// The 41-bit default instance gets directed corner cases (zero, one, all
// ones, single high bits) and 300 random pairs; a 5-bit instance (odd width,
// so the digit padding is exercised) is checked exhaustively. Reference:
// shift-and-XOR product.
module tb_gf2_cm_mul;
  import gf2_ref_pkg::*;

  localparam int unsigned N  = 41;
  localparam int unsigned NS = 5;

  logic [N-1:0]    a, b;
  logic [2*N-2:0]  c;
  logic [NS-1:0]   as, bs;
  logic [2*NS-2:0] cs;
  int checks = 0, failures = 0;

  gf2_cm_mul dut (.a(a), .b(b), .c(c));
  gf2_cm_mul #(.N(NS)) dut_s (.a(as), .b(bs), .c(cs));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_big(input wide_t x, input wide_t y);
    wide_t exp;
    a = x[N-1:0];
    b = y[N-1:0];
    #1;
    exp = clmul(wide_t'(a), wide_t'(b), N);
    checks++;
    if (c !== exp[2*N-2:0]) begin
      failures++;
      $display("FAIL N=%0d a=%h b=%h c=%h exp=%h", N, a, b, c, exp[2*N-2:0]);
    end
  endtask

  initial begin
    wide_t exp;
    check_big('0, ones(N));
    check_big(1, ones(N));
    check_big(ones(N), ones(N));
    check_big(wide_t'(1) << (N - 1), wide_t'(1) << (N - 1));
    check_big(wide_t'(1) << (N - 1), 3);
    for (int i = 0; i < 300; i++) check_big(rand_vec(N), rand_vec(N));

    for (int i = 0; i < (1 << NS); i++) begin
      for (int j = 0; j < (1 << NS); j++) begin
        as = NS'(i);
        bs = NS'(j);
        #1;
        exp = clmul(wide_t'(as), wide_t'(bs), NS);
        checks++;
        if (cs !== exp[2*NS-2:0]) begin
          failures++;
          $display("FAIL N=%0d a=%h b=%h c=%h exp=%h", NS, as, bs, cs, exp[2*NS-2:0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
