// tb_pairing_core: self-checking test of the pairing core.
//
// Checks e(P, Q) against the value of an independent software model (textbook
// Miller loop with vertical lines and the plain exponent (q^2-1)/r), checks
// symmetry e(Q, P) = e(P, Q), that an input at infinity gives 1, that
// e(P, Q)^r = 1 (the result lies in G_T), and bilinearity in each argument:
// e(K*P, Q) = e(Q, K*P) = e(P, Q)^K, with K*P taken from the same model and
// the power computed here by plain square-and-multiply. Prints the cycle
// count; the published core's pairing latency is not a target of this
// bit-serial design, so cycles are reported, not checked.
module tb_pairing_core;
  import agencid_pkg::*;
  import tb_vectors_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  logic      start = 1'b0;
  ec_point_t p = POINT_INF, q = POINT_INF;
  fq2_t      e;
  logic      busy, done;
  int        checks = 0, failures = 0;
  longint    cyc;

  always #5 clk = ~clk;

  pairing_core dut (.clk, .rst_n, .start, .p, .q, .busy, .done, .e);

  function automatic fq_t mm(fq_t x, fq_t y);
    logic [2*QW-1:0] t;
    t = ({{QW{1'b0}}, x} * {{QW{1'b0}}, y}) % {{QW{1'b0}}, Q_PRIME};
    return t[QW-1:0];
  endfunction

  function automatic fq2_t ref_mul(fq2_t x, fq2_t y);
    fq2_t o;
    o.re = fq_sub(mm(x.re, y.re), mm(x.im, y.im));
    o.im = fq_add(mm(x.re, y.im), mm(x.im, y.re));
    return o;
  endfunction

  function automatic fq2_t ref_pow(fq2_t x, logic [RW-1:0] k);
    fq2_t acc = FQ2_ONE;
    for (int i = RW - 1; i >= 0; i--) begin
      acc = ref_mul(acc, acc);
      if (k[i]) acc = ref_mul(acc, x);
    end
    return acc;
  endfunction

  task automatic run(input ec_point_t x, input ec_point_t y);
    @(negedge clk);
    p = x; q = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ec_point_t pp, qq;
    ec_point_t kp;
    fq2_t      e_ref, e_k;
    pp = '{inf: 1'b0, x: P_X, y: P_Y};
    qq = '{inf: 1'b0, x: Q_X, y: Q_Y};
    kp = '{inf: 1'b0, x: KP_X, y: KP_Y};
    e_ref = '{re: E_RE, im: E_IM};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(pp, qq);
    $display("pairing took %0d cycles", cyc);
    checks++;
    if (e != e_ref) begin failures++; $display("FAIL e(P,Q) = %h", e); end
    checks++;
    if (ref_pow(e, R_ORDER) != FQ2_ONE) begin failures++; $display("FAIL e^r != 1"); end
    run(qq, pp);
    checks++;
    if (e != e_ref) begin failures++; $display("FAIL e(Q,P) != e(P,Q)"); end
    run(POINT_INF, qq);
    checks++;
    if (e != FQ2_ONE) begin failures++; $display("FAIL e(inf,Q) != 1"); end
    e_k = ref_pow(e_ref, K_SCALAR);
    run(kp, qq);
    checks++;
    if (e != e_k) begin failures++; $display("FAIL e(K*P,Q) != e(P,Q)^K"); end
    run(qq, kp);
    checks++;
    if (e != e_k) begin failures++; $display("FAIL e(Q,K*P) != e(P,Q)^K"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
