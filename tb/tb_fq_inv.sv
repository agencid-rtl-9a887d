// tb_fq_inv: self-checking test of the Fq inverter.
//
// For edge and random inputs it checks a * z = 1 (mod q) with the simulator's
// wide arithmetic, that zero is flagged and answered with 0, and that no
// inversion takes longer than the documented bound of 4*QW + 2 cycles.
module tb_fq_inv;
  import agencid_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  fq_t  a = '0, z;
  logic busy, done, zero_in;
  int   checks = 0, failures = 0;
  int   max_cyc = 0;

  always #5 clk = ~clk;

  fq_inv dut (.clk, .rst_n, .start, .a, .busy, .done, .zero_in, .z);

  function automatic fq_t rand_fq();
    logic [QW+63:0] x;
    for (int w = 0; w < QW/32 + 2; w++) x[w*32 +: 32] = $urandom;
    return fq_t'(x % {64'b0, Q_PRIME});
  endfunction

  task automatic run(input fq_t x);
    logic [2*QW-1:0] prod;
    int cyc;
    @(negedge clk);
    a = x; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    if (cyc > max_cyc) max_cyc = cyc;
    checks++;
    if (x == '0) begin
      if (!(zero_in && z == '0)) begin
        failures++;
        $display("FAIL zero input not flagged");
      end
    end else begin
      prod = ({{QW{1'b0}}, x} * {{QW{1'b0}}, z}) % {{QW{1'b0}}, Q_PRIME};
      if (prod != 1 || zero_in) begin
        failures++;
        $display("FAIL inverse of %h: got %h", x, z);
      end
    end
    checks++;
    if (cyc > 4*QW + 2) begin
      failures++;
      $display("FAIL latency %0d cycles", cyc);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0);
    run(fq_t'(1));
    run(fq_t'(2));
    run(Q_PRIME - 1);
    for (int n = 0; n < 30; n++) run(rand_fq());
    $display("longest inversion: %0d cycles", max_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
