// tb_workload_exp2: the three-family cluster workload (scenario 2).
//
// A system of n = 10 boards from three families, F1 = {1,2,3},
// F2 = {4,5,6}, F3 = {7,8,9,10}. Each family's bitstream key is encrypted
// once for the whole family. For each family the testbench blanks the core,
// provisions it as one board of that family (boards 2, 6 and 7), loads the
// public points, decrypts the family's ciphertext and checks the AES key;
// it then offers the next family's ciphertext, which must be refused (null).
// Vectors come from an independent software model of the scheme.
module tb_workload_exp2;
  import agencid_pkg::*;

  localparam int N    = 10;
  localparam int IDXW = $clog2(N + 1);
  localparam int AW   = $clog2(2*N + 1);

  logic              clk = 1'b0;
  logic              rst_n = 1'b0, por_n = 1'b0;
  logic              key_prog_en = 1'b0;
  logic [IDXW-1:0]   key_prog_index = '0;
  ec_point_t         key_prog_d = POINT_INF;
  logic              key_prog_err, key_valid;
  logic              prm_wr_en = 1'b0;
  logic [AW-1:0]     prm_wr_addr = '0;
  ec_point_t         prm_wr_data = POINT_INF;
  logic              dec_start = 1'b0;
  logic [N-1:0]      dec_set = '0;
  ec_point_t         dec_c1 = POINT_INF, dec_c2 = POINT_INF;
  fq2_t              dec_c3 = '0;
  logic              dec_busy, dec_done, dec_null, aes_key_valid;
  logic [AES_KW-1:0] aes_key;
  fq2_t              gt_msg;
  logic [IDXW:0]     dec_adds;
  int                checks = 0, failures = 0;

  fq_t vec [3][80];
  fq_t v0 [80], v1 [80], v2 [80];

  always #5 clk = ~clk;

  agencid_pl_top #(.N(N)) dut (
    .clk, .rst_n, .por_n, .key_prog_en, .key_prog_index, .key_prog_d,
    .key_prog_err, .key_valid, .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .dec_start, .dec_set, .dec_c1, .dec_c2, .dec_c3, .dec_busy, .dec_done,
    .dec_null, .aes_key, .aes_key_valid, .gt_msg, .dec_adds
  );

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic set_ct(input int f);
    dec_set = N'(vec[f][2]);
    dec_c1  = '{inf: 1'b0, x: vec[f][5], y: vec[f][6]};
    dec_c2  = '{inf: 1'b0, x: vec[f][7], y: vec[f][8]};
    dec_c3  = '{re: vec[f][9], im: vec[f][10]};
  endtask

  task automatic decrypt(output longint cyc);
    @(negedge clk);
    dec_start = 1'b1;
    @(negedge clk);
    dec_start = 1'b0;
    cyc = 1;
    while (!dec_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cyc;
    for (int k = 0; k < 80; k++) begin v0[k] = '0; v1[k] = '0; v2[k] = '0; end
    $readmemh("tb/vec_exp2_f1.hex", v0);
    $readmemh("tb/vec_exp2_f2.hex", v1);
    $readmemh("tb/vec_exp2_f3.hex", v2);
    for (int k = 0; k < 80; k++) begin vec[0][k] = v0[k]; vec[1][k] = v1[k]; vec[2][k] = v2[k]; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 3; f++) begin
      check("vector file matches n", vec[f][0] == fq_t'(N));
      // blank device, provision the board of family f
      por_n = 1'b0;
      @(negedge clk);
      por_n = 1'b1;
      @(negedge clk);
      key_prog_en = 1'b1;
      key_prog_index = IDXW'(vec[f][1]);
      key_prog_d = '{inf: 1'b0, x: vec[f][3], y: vec[f][4]};
      @(negedge clk);
      key_prog_en = 1'b0;
      for (int k = 0; k < int'(vec[f][13]); k++) begin
        @(negedge clk);
        prm_wr_en   = 1'b1;
        prm_wr_addr = AW'(vec[f][14 + 3*k]);
        prm_wr_data = '{inf: 1'b0, x: vec[f][15 + 3*k], y: vec[f][16 + 3*k]};
      end
      @(negedge clk);
      prm_wr_en = 1'b0;
      set_ct(f);
      decrypt(cyc);
      $display("family F%0d, board %0d: %0d cycles", f + 1, vec[f][1], cyc);
      check("family key recovered", !dec_null && aes_key_valid && aes_key == vec[f][11][AES_KW-1:0]
                                    && gt_msg == '{re: vec[f][11], im: vec[f][12]});
      set_ct((f + 1) % 3);
      decrypt(cyc);
      check("other family's ciphertext refused", dec_null && !aes_key_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
