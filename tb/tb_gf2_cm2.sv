// tb_gf2_cm2 -- exhaustive check of the 2-bit conventional multiplier cell.
// All 16 operand pairs are applied and compared with a shift-and-XOR
// reference product.
module tb_gf2_cm2;
  import gf2_ref_pkg::*;

  logic [1:0] a, b;
  logic [2:0] c;
  int checks = 0, failures = 0;

  gf2_cm2 dut (.a(a), .b(b), .c(c));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wide_t exp;
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        a = 2'(i);
        b = 2'(j);
        #1;
        exp = clmul(wide_t'(a), wide_t'(b), 2);
        checks++;
        if (c !== exp[2:0]) begin
          failures++;
          $display("FAIL a=%b b=%b c=%b exp=%b", a, b, c, exp[2:0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
