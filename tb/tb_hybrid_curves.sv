// tb_hybrid_curves -- runs the hybrid modular multiplier on two more NIST
// binary fields, B-233 and B-283, each with its own Stage I / Stage II
// crossover:
//   B-233: x^233 + x^70 + 1,             233 -> 117 -> 59 (CM)
//   B-283: x^283 + x^12 + x^7 + x^5 + 1, 283 -> 142 -> 71 (CM)
// (B-571 elaborates the same way, 571 -> 286 -> 143 -> 72, but its 35,000
// 2-bit cells make a simulation build take several minutes, so it is not
// part of this test.)
// Both instances get the same stream of operand pairs (truncated to
// their field size), issued back to back, and every result is checked
// against an interleaved multiply-and-reduce reference one clock after it
// was accepted (two falling edges after it was driven). A known answer,
// x^(m-1) * x = r(x), is checked per field.
module tb_hybrid_curves;
  import gf2_ref_pkg::*;
  import gf2_pkg::*;

  localparam int unsigned M1 = M_B233;
  localparam int unsigned M2 = M_B283;
  localparam int unsigned NOPS = 60;

  logic clk = 1'b0;
  logic rst, en;
  logic [M1-1:0] a1, b1, y1;
  logic [M2-1:0] a2, b2, y2;
  logic rdy1, rdy2;
  int checks = 0, failures = 0;

  hybrid_modmul #(.M(M1), .CM_MAX(CM_MAX_B233), .RPOLY(M1'(R_B233[M1-1:0]))) u233
    (.clk(clk), .rst(rst), .en(en), .A(a1), .B(b1), .ready(rdy1), .Y(y1));
  hybrid_modmul #(.M(M2), .CM_MAX(CM_MAX_B283), .RPOLY(M2'(R_B283[M2-1:0]))) u283
    (.clk(clk), .rst(rst), .en(en), .A(a2), .B(b2), .ready(rdy2), .Y(y2));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected results of pairs driven on earlier falling edges. A pair driven
  // on falling edge n is accepted on the next rising edge and its result is
  // visible from falling edge n+2 on.
  typedef struct {
    wide_t e1, e2;
    int    t;
  } exp_t;
  exp_t q[$];
  int   tneg = 0;

  always @(negedge clk) tneg++;

  task automatic compare(input exp_t x);
    checks += 2;
    if (!(rdy1 && rdy2)) begin
      failures++;
      $display("FAIL ready %b%b", rdy1, rdy2);
    end
    if (y1 !== x.e1[M1-1:0]) begin failures++; $display("FAIL B-233"); end
    if (y2 !== x.e2[M2-1:0]) begin failures++; $display("FAIL B-283"); end
  endtask

  task automatic drain_due();
    while (q.size() > 0 && q[0].t + 2 <= tneg) compare(q.pop_front());
  endtask

  task automatic issue(input wide_t x, input wide_t y);
    exp_t n;
    @(negedge clk);
    #1;
    drain_due();
    en = 1'b1;
    a1 = x[M1-1:0]; b1 = y[M1-1:0];
    a2 = x[M2-1:0]; b2 = y[M2-1:0];
    n.e1 = modmul(wide_t'(a1), wide_t'(b1), M1, wide_t'(R_B233));
    n.e2 = modmul(wide_t'(a2), wide_t'(b2), M2, wide_t'(R_B283));
    n.t  = tneg;
    q.push_back(n);
  endtask

  initial begin
    rst = 1'b1;
    en  = 1'b0;
    a1 = '0; b1 = '0; a2 = '0; b2 = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // Known answers: x^(m-1) * x = x^m = r(x).
    @(negedge clk);
    en = 1'b1;
    a1 = M1'(1) << (M1 - 1); b1 = M1'(2);
    a2 = M2'(1) << (M2 - 1); b2 = M2'(2);
    @(negedge clk);
    en = 1'b0;
    @(negedge clk);
    checks += 2;
    if (y1 !== M1'(R_B233[M1-1:0])) begin failures++; $display("FAIL x^233"); end
    if (y2 !== M2'(R_B283[M2-1:0])) begin failures++; $display("FAIL x^283"); end

    issue(ones(M2), ones(M2));
    for (int i = 0; i < NOPS; i++) issue(rand_vec(M2), rand_vec(M2));
    @(negedge clk);
    #1;
    drain_due();
    en = 1'b0;
    repeat (2) begin
      @(negedge clk);
      #1;
      drain_due();
    end
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results not checked", q.size());
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
