// tb_agencid_pl_top: end-to-end test of the board's key-decryption core at its
// default sizes (n = 20 boards, 512-bit field).
//
// Plays the FPGA vendor, the host and the cloud side around one board:
//   1. asks for a decryption before any private key exists   -> null;
//   2. provisions board 3 with its key d_3, then tries to overwrite it
//      (refused: the slot is write-once);
//   3. loads the public points g_k and decrypts the key of the example
//      cluster S = {1,3,4}: the AES key must equal the encrypted message's
//      key bits, and two point additions must have been made;
//   4. offers a ciphertext for a set without board 3                -> null;
//   5. blanks the device (power-on reset), provisions it as board 7 and
//      decrypts a key shared by all 20 boards (19 point additions).
// Every mechanism is counted; one that never happened counts a failure.
// Vectors come from an independent software model of the scheme.
module tb_agencid_pl_top;
  import agencid_pkg::*;

  localparam int N    = N_BOARDS;
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
  // mechanism counters
  int n_ok = 0, n_null_set = 0, n_null_nokey = 0, n_refused = 0, n_adds = 0;

  fq_t vec [80];

  always #5 clk = ~clk;

  agencid_pl_top dut (
    .clk, .rst_n, .por_n, .key_prog_en, .key_prog_index, .key_prog_d,
    .key_prog_err, .key_valid, .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .dec_start, .dec_set, .dec_c1, .dec_c2, .dec_c3, .dec_busy, .dec_done,
    .dec_null, .aes_key, .aes_key_valid, .gt_msg, .dec_adds
  );

  task automatic check(input string what, input logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // reads a scenario file, loads its public points, sets up the ciphertext
  task automatic load(input string fname, output logic [IDXW-1:0] i,
                      output ec_point_t d, output fq2_t m_exp);
    for (int k = 0; k < 80; k++) vec[k] = '0;
    $readmemh(fname, vec);
    check("vector file matches n", vec[0] == fq_t'(N));
    i       = IDXW'(vec[1]);
    dec_set = N'(vec[2]);
    d       = '{inf: 1'b0, x: vec[3], y: vec[4]};
    dec_c1  = '{inf: 1'b0, x: vec[5], y: vec[6]};
    dec_c2  = '{inf: 1'b0, x: vec[7], y: vec[8]};
    dec_c3  = '{re: vec[9], im: vec[10]};
    m_exp   = '{re: vec[11], im: vec[12]};
    for (int k = 0; k < int'(vec[13]); k++) begin
      @(negedge clk);
      prm_wr_en   = 1'b1;
      prm_wr_addr = AW'(vec[14 + 3*k]);
      prm_wr_data = '{inf: 1'b0, x: vec[15 + 3*k], y: vec[16 + 3*k]};
    end
    @(negedge clk);
    prm_wr_en = 1'b0;
  endtask

  task automatic provision(input logic [IDXW-1:0] i, input ec_point_t d);
    @(negedge clk);
    key_prog_en = 1'b1; key_prog_index = i; key_prog_d = d;
    @(negedge clk);
    key_prog_en = 1'b0;
    if (key_prog_err) n_refused++;
  endtask

  task automatic decrypt(output longint cyc);
    @(negedge clk);
    dec_start = 1'b1;
    @(negedge clk);
    dec_start = 1'b0;
    cyc = 1;
    while (!dec_done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    n_adds += int'(dec_adds);
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [IDXW-1:0] i;
    ec_point_t       d;
    fq2_t            m_exp;
    longint          cyc;
    repeat (3) @(negedge clk);
    por_n = 1'b1;
    rst_n = 1'b1;

    // 1. no key yet
    load("tb/vec_cluster_fig3.hex", i, d, m_exp);
    decrypt(cyc);
    check("no key gives null", dec_null && !aes_key_valid && !key_valid);
    if (dec_null) n_null_nokey++;

    // 2. provision board 3, try to overwrite
    provision(i, d);
    check("key provisioned", key_valid && !key_prog_err);
    provision(IDXW'(5), dec_c1);
    check("second provisioning refused", n_refused == 1);

    // 3. example cluster {1,3,4}
    decrypt(cyc);
    $display("cluster {1,3,4}, board 3: %0d cycles", cyc);
    check("AES key of cluster {1,3,4}", !dec_null && aes_key_valid && aes_key == m_exp.re[AES_KW-1:0]);
    check("G_T message of cluster {1,3,4}", gt_msg == m_exp);
    check("two additions for b_{3,S}", dec_adds == 2);
    if (!dec_null && gt_msg == m_exp) n_ok++;

    // 4. a set without board 3
    dec_set = N'({1'b1, 3'b0, 1'b1, 1'b0});    // boards 2 and 5
    decrypt(cyc);
    check("board outside the set gets null", dec_null && !aes_key_valid);
    if (dec_null) n_null_set++;

    // 5. blank device, becomes board 7 of the 20-board cluster
    por_n = 1'b0;
    @(negedge clk);
    por_n = 1'b1;
    check("blank after power-on reset", !key_valid);
    load("tb/vec_cluster_20.hex", i, d, m_exp);
    provision(i, d);
    decrypt(cyc);
    $display("20-board cluster, board 7: %0d cycles", cyc);
    check("AES key of the 20-board cluster", !dec_null && aes_key_valid && aes_key == m_exp.re[AES_KW-1:0]);
    check("19 additions for b_{7,S}", dec_adds == 19);
    if (!dec_null && gt_msg == m_exp) n_ok++;

    $display("mechanisms: decrypted=%0d null(not in S)=%0d null(no key)=%0d refused writes=%0d point additions=%0d",
             n_ok, n_null_set, n_null_nokey, n_refused, n_adds);
    check("decryption happened", n_ok == 2);
    check("null for board outside S happened", n_null_set > 0);
    check("null without key happened", n_null_nokey > 0);
    check("refused re-provisioning happened", n_refused > 0);
    check("b_{i,S} additions happened", n_adds > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
