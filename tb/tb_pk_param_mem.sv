// tb_pk_param_mem: self-checking test of the public-parameter memory.
//
// Writes a distinct point to every address 1..2n, reads all back (one cycle
// of read latency), and checks that writes to address 0 and beyond 2n are
// dropped without disturbing stored words.
module tb_pk_param_mem;
  import agencid_pkg::*;

  localparam int N  = N_BOARDS;
  localparam int AW = $clog2(2*N + 1);

  logic          clk = 1'b0;
  logic          wr_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  ec_point_t     wr_data = POINT_INF, rd_data;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  pk_param_mem dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  function automatic ec_point_t pat(int k);
    return '{inf: 1'b0, x: {16{32'(k * 7919 + 1)}}, y: {16{32'(k * 104729 + 5)}}};
  endfunction

  task automatic wr(input int a, input ec_point_t d);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = AW'(a); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic rd_check(input int a, input ec_point_t e);
    @(negedge clk);
    rd_en = 1'b1; rd_addr = AW'(a);
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_data.x != e.x || rd_data.y != e.y || rd_data.inf) begin
      failures++; $display("FAIL address %0d", a);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 1; k <= 2*N; k++) wr(k, pat(k));
    wr(0, pat(99));
    for (int k = 2*N + 1; k < (1 << AW); k++) wr(k, pat(100 + k));
    for (int k = 2*N; k >= 1; k--) rd_check(k, pat(k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
