// tb_ecc_core: self-checking test of the elliptic-curve core.
//
// Known answers from an independent software model: P + Q, 2P and K*P for
// random subgroup points. It also checks the exact special cases: P + inf,
// inf + P, P + (-P) = inf, P + P (routed to doubling), that every result
// lies on y^2 = x^3 + x, and that lam_valid marks sloped lines only.
module tb_ecc_core;
  import agencid_pkg::*;
  import tb_vectors_pkg::*;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          start = 1'b0;
  ec_op_e        op = EC_ADD;
  ec_point_t     p = POINT_INF, q = POINT_INF, r;
  logic [RW-1:0] k = '0;
  logic          busy, done, lam_valid;
  fq_t           lam;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  ecc_core dut (.clk, .rst_n, .start, .op, .p, .q, .k, .busy, .done, .r, .lam, .lam_valid);

  function automatic fq_t mm(fq_t x, fq_t y);
    logic [2*QW-1:0] t;
    t = ({{QW{1'b0}}, x} * {{QW{1'b0}}, y}) % {{QW{1'b0}}, Q_PRIME};
    return t[QW-1:0];
  endfunction

  function automatic bit on_curve(ec_point_t pt);
    if (pt.inf) return 1'b1;
    return mm(pt.y, pt.y) == fq_add(mm(mm(pt.x, pt.x), pt.x), pt.x);
  endfunction

  task automatic run(input ec_op_e o, input ec_point_t x, input ec_point_t y,
                     input logic [RW-1:0] kk);
    @(negedge clk);
    op = o; p = x; q = y; k = kk; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  task automatic expect_pt(input string what, input ec_point_t e, input logic lv);
    checks++;
    if (r != e || !on_curve(r)) begin
      failures++;
      $display("FAIL %s: got inf=%0d x=%h", what, r.inf, r.x);
    end
    checks++;
    if (lam_valid != lv) begin
      failures++;
      $display("FAIL %s: lam_valid=%0d", what, lam_valid);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ec_point_t pp, qq, pn;
    pp = '{inf: 1'b0, x: P_X, y: P_Y};
    qq = '{inf: 1'b0, x: Q_X, y: Q_Y};
    pn = '{inf: 1'b0, x: P_X, y: fq_neg(P_Y)};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(EC_ADD, pp, qq, '0);
    expect_pt("P+Q", '{inf: 1'b0, x: SUM_X, y: SUM_Y}, 1'b1);
    checks++;   // slope of the chord
    if (mm(lam, fq_sub(Q_X, P_X)) != fq_sub(Q_Y, P_Y)) begin
      failures++; $display("FAIL chord slope");
    end
    run(EC_DBL, pp, POINT_INF, '0);
    expect_pt("2P", '{inf: 1'b0, x: DBL_X, y: DBL_Y}, 1'b1);
    run(EC_ADD, pp, pp, '0);
    expect_pt("P+P", '{inf: 1'b0, x: DBL_X, y: DBL_Y}, 1'b1);
    run(EC_ADD, pp, POINT_INF, '0);
    expect_pt("P+inf", pp, 1'b0);
    run(EC_ADD, POINT_INF, qq, '0);
    expect_pt("inf+Q", qq, 1'b0);
    run(EC_ADD, pp, pn, '0);
    expect_pt("P-P", POINT_INF, 1'b0);
    run(EC_DBL, POINT_INF, POINT_INF, '0);
    expect_pt("2inf", POINT_INF, 1'b0);
    run(EC_SMUL, pp, POINT_INF, K_SCALAR);
    expect_pt("K*P", '{inf: 1'b0, x: KP_X, y: KP_Y}, 1'b1);
    run(EC_SMUL, pp, POINT_INF, R_ORDER);
    checks++;   // r * P = inf: P has order r
    if (!r.inf) begin failures++; $display("FAIL r*P not at infinity"); end
    run(EC_SMUL, pp, POINT_INF, '0);
    checks++;
    if (!r.inf) begin failures++; $display("FAIL 0*P not at infinity"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
