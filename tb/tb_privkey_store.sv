// tb_privkey_store: self-checking test of the write-once private-key slot.
//
// Checks that the slot starts empty after power-on, takes the first write,
// refuses (and flags) a second one without changing the key, keeps the key
// while prog_en is low, and is emptied only by the power-on reset.
module tb_privkey_store;
  import agencid_pkg::*;

  localparam int IDXW = 5;

  logic            clk = 1'b0;
  logic            por_n = 1'b0;
  logic            prog_en = 1'b0;
  logic [IDXW-1:0] prog_index = '0;
  ec_point_t       prog_key = POINT_INF;
  logic            prog_err, valid;
  logic [IDXW-1:0] index;
  ec_point_t       key;
  int              checks = 0, failures = 0;

  always #5 clk = ~clk;

  privkey_store #(.IDXW(IDXW)) dut (.clk, .por_n, .prog_en, .prog_index, .prog_key,
                                     .prog_err, .valid, .index, .key);

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(input logic [IDXW-1:0] i, input fq_t x, input fq_t y);
    @(negedge clk);
    prog_en = 1'b1; prog_index = i; prog_key = '{inf: 1'b0, x: x, y: y};
    @(negedge clk);
    prog_en = 1'b0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    por_n = 1'b1;
    @(negedge clk);
    check("blank after power-on", !valid && key.inf);
    write(5'd3, fq_t'(111), fq_t'(222));
    check("first write stored", valid && index == 5'd3 && !key.inf && key.x == fq_t'(111) && key.y == fq_t'(222));
    check("first write not flagged", !prog_err);
    write(5'd9, fq_t'(333), fq_t'(444));
    check("second write flagged", prog_err);
    check("second write ignored", index == 5'd3 && key.x == fq_t'(111) && key.y == fq_t'(222));
    repeat (5) @(negedge clk);
    check("key held", valid && key.x == fq_t'(111) && !prog_err);
    por_n = 1'b0;
    @(negedge clk);
    por_n = 1'b1;
    check("power-on reset empties", !valid && key.inf);
    write(5'd9, fq_t'(333), fq_t'(444));
    check("new write after blanking", valid && index == 5'd9 && key.x == fq_t'(333));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
