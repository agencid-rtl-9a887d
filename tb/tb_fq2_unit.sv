// tb_fq2_unit: self-checking test of the Fq2 multiplier/inverter.
//
// Random elements are multiplied and the result compared with the schoolbook
// product (a.re*b.re - a.im*b.im) + (a.re*b.im + a.im*b.re) i formed with the
// simulator's wide arithmetic; inverses are checked by a * z = 1; the inverse
// of zero must be zero. A multiplication must take exactly 3*(QW+3) + 1 cycles.
module tb_fq2_unit;
  import agencid_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   start = 1'b0;
  f2_op_e op = F2_MUL;
  fq2_t   a = '0, b = '0, z;
  logic   busy, done;
  int     checks = 0, failures = 0;

  localparam int MUL_CYCLES = 3 * (QW + 3) + 1;

  always #5 clk = ~clk;

  fq2_unit dut (.clk, .rst_n, .start, .op, .a, .b, .busy, .done, .z);

  function automatic fq_t rand_fq();
    logic [QW+63:0] x;
    for (int w = 0; w < QW/32 + 2; w++) x[w*32 +: 32] = $urandom;
    return fq_t'(x % {64'b0, Q_PRIME});
  endfunction

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

  task automatic run(input f2_op_e o, input fq2_t x, input fq2_t y, output int cyc);
    @(negedge clk);
    op = o; a = x; b = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fq2_t x, y, e;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 8; n++) begin
      x = '{re: rand_fq(), im: rand_fq()};
      y = '{re: rand_fq(), im: rand_fq()};
      if (n == 0) y = FQ2_ONE;
      run(F2_MUL, x, y, cyc);
      e = ref_mul(x, y);
      checks++;
      if (z != e) begin failures++; $display("FAIL mul %0d", n); end
      checks++;
      if (cyc != MUL_CYCLES) begin
        failures++; $display("FAIL mul latency %0d, expected %0d", cyc, MUL_CYCLES);
      end
      run(F2_INV, x, '0, cyc);
      checks++;
      if (ref_mul(x, z) != FQ2_ONE) begin failures++; $display("FAIL inv %0d", n); end
    end
    run(F2_INV, '0, '0, cyc);
    checks++;
    if (z != '0) begin failures++; $display("FAIL inverse of zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
