// tb_hybrid_modmul -- end-to-end test of the hybrid modular multiplier at its
// default (B-163) parameters.
//
// Operands are driven on the falling clock edge; a scoreboard records every
// pair accepted on a rising edge with en high, together with the expected
// result from an MSB-first interleaved multiply-and-reduce reference. On each
// falling edge the outputs are checked: when ready is high, Y must match the
// oldest outstanding result and must arrive on the rising edge right after
// the one that accepted its operands; when ready is low, Y must hold its last value.
//
// Phases and the mechanisms they exercise (each counted, a failure if never
// seen): known answers (x^162 * x, 1 * A, 0 * A), back-to-back issue (en
// high on consecutive cycles, one result per clock), idle gaps with Y held,
// and a reset that arrives while results are in flight and must drop them.
module tb_hybrid_modmul;
  import gf2_ref_pkg::*;
  import gf2_pkg::*;

  localparam int unsigned M       = M_B163;
  localparam int unsigned LATENCY = 1;

  logic         clk = 1'b0;
  logic         rst;
  logic         en;
  logic [M-1:0] A, B;
  logic         ready;
  logic [M-1:0] Y;

  hybrid_modmul dut (.clk(clk), .rst(rst), .en(en), .A(A), .B(B), .ready(ready), .Y(Y));

  always #5 clk = ~clk;

  typedef struct {
    logic [M-1:0] exp;
    int           cyc;
  } item_t;

  item_t        q[$];
  int           cyc = 0;
  int           checks = 0, failures = 0;
  int           n_results = 0, n_back_to_back = 0, n_hold = 0, n_reset_flush = 0;
  logic         en_prev = 1'b0;
  logic [M-1:0] y_last = '0;

  // Watchdog.
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard input side: what the DUT accepts on this rising edge.
  always @(posedge clk) begin
    wide_t e;
    cyc++;
    if (rst) begin
      if (q.size() > 0) n_reset_flush++;
      q.delete();
      en_prev <= 1'b0;
    end else begin
      if (en) begin
        e = modmul(wide_t'(A), wide_t'(B), M, wide_t'(R_B163));
        q.push_back('{exp: e[M-1:0], cyc: cyc});
        if (en_prev) n_back_to_back++;
      end
      en_prev <= en;
    end
  end

  // Scoreboard output side: outputs settled after the rising edge.
  always @(negedge clk) begin
    item_t it;
    if (ready) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL cycle %0d: ready without a pending operation", cyc);
      end else begin
        it = q.pop_front();
        n_results++;
        if (Y !== it.exp) begin
          failures++;
          $display("FAIL cycle %0d: Y=%h exp=%h", cyc, Y, it.exp);
        end
        checks++;
        if (cyc - it.cyc != LATENCY) begin
          failures++;
          $display("FAIL cycle %0d: latency %0d, expected %0d", cyc, cyc - it.cyc, LATENCY);
        end
      end
      y_last = Y;
    end else if (!rst && cyc > 4) begin
      checks++;
      n_hold++;
      if (Y !== y_last) begin
        failures++;
        $display("FAIL cycle %0d: Y changed without ready", cyc);
      end
    end
  end

  task automatic issue(input logic [M-1:0] x, input logic [M-1:0] y);
    @(negedge clk);
    en = 1'b1;
    A  = x;
    B  = y;
  endtask

  task automatic idle(input int n);
    repeat (n) begin
      @(negedge clk);
      en = 1'b0;
      A  = M'(rand_vec(M));   // garbage while en is low must be ignored
      B  = M'(rand_vec(M));
    end
  endtask

  initial begin
    logic [M-1:0] r;
    rst = 1'b1;
    en  = 1'b0;
    A   = '0;
    B   = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (ready !== 1'b0 || Y !== '0) begin
      failures++;
      $display("FAIL reset state ready=%b Y=%h", ready, Y);
    end
    rst = 1'b0;

    // Known answers.
    issue(M'(1) << (M - 1), M'(2));           // x^162 * x = x^163 = x^7+x^6+x^3+1
    idle(3);
    checks++;
    if (Y !== M'(8'hC9)) begin
      failures++;
      $display("FAIL x^163 -> %h", Y);
    end
    r = M'(rand_vec(M));
    issue(M'(1), r);
    idle(3);
    checks++;
    if (Y !== r) begin
      failures++;
      $display("FAIL 1*A -> %h", Y);
    end
    issue('0, r);
    idle(3);
    checks++;
    if (Y !== '0) begin
      failures++;
      $display("FAIL 0*A -> %h", Y);
    end

    // Back-to-back stream, including all-ones operands.
    issue(M'(ones(M)), M'(ones(M)));
    for (int i = 0; i < 100; i++) issue(M'(rand_vec(M)), M'(rand_vec(M)));
    idle(4);

    // Random issue with idle gaps.
    for (int i = 0; i < 300; i++) begin
      if ($urandom_range(1, 0) == 1) issue(M'(rand_vec(M)), M'(rand_vec(M)));
      else idle(1);
    end
    idle(4);

    // Reset while two results are in flight: both must be dropped.
    issue(M'(rand_vec(M)), M'(rand_vec(M)));
    issue(M'(rand_vec(M)), M'(rand_vec(M)));
    @(negedge clk);
    en  = 1'b0;
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    checks++;
    if (ready !== 1'b0 || Y !== '0) begin
      failures++;
      $display("FAIL after reset ready=%b Y=%h", ready, Y);
    end
    y_last = '0;
    idle(4);

    // A few more after reset.
    for (int i = 0; i < 20; i++) issue(M'(rand_vec(M)), M'(rand_vec(M)));
    idle(4);

    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("FAIL %0d results never delivered", q.size());
    end
    $display("mechanisms: results=%0d back_to_back=%0d hold=%0d reset_flush=%0d",
             n_results, n_back_to_back, n_hold, n_reset_flush);
    checks += 4;
    if (n_results == 0)      failures++;
    if (n_back_to_back == 0) failures++;
    if (n_hold == 0)         failures++;
    if (n_reset_flush == 0)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
