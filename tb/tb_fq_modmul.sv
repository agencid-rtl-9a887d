// tb_fq_modmul: self-checking test of the Fq modular multiplier.
//
// Drives edge operands (0, 1, q-1) and random reduced operands, compares each
// product with (a*b) mod q formed by the simulator's wide arithmetic, and
// checks that every product takes exactly QW + 1 clock cycles from the start edge
// to the done pulse.
module tb_fq_modmul;
  import agencid_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  fq_t  a = '0, b = '0, p;
  logic busy, done;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  fq_modmul dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .p);

  function automatic fq_t rand_fq();
    logic [QW+63:0] x;
    for (int w = 0; w < QW/32 + 2; w++) x[w*32 +: 32] = $urandom;
    return fq_t'(x % {64'b0, Q_PRIME});
  endfunction

  task automatic run(input fq_t x, input fq_t y);
    logic [2*QW-1:0] ref_p;
    int cyc;
    ref_p = ({{QW{1'b0}}, x} * {{QW{1'b0}}, y}) % {{QW{1'b0}}, Q_PRIME};
    @(negedge clk);
    a = x; b = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (p != ref_p[QW-1:0]) begin
      failures++;
      $display("FAIL product a=%h b=%h got %h exp %h", x, y, p, ref_p[QW-1:0]);
    end
    checks++;
    if (cyc != QW + 1) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", cyc, QW + 1);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0, Q_PRIME - 1);
    run(fq_t'(1), Q_PRIME - 1);
    run(Q_PRIME - 1, Q_PRIME - 1);
    for (int n = 0; n < 20; n++) run(rand_fq(), rand_fq());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
