// tb_agencid_decrypt: self-checking test of the Decrypt engine.
//
// Test data come from an independent software model of AgEncID with n = 20
// boards (Setup, KeyGen, Extract and Encrypt done there): for a cluster S the
// files hold the board index i, its private key d_i, the set mask, the
// ciphertext (c1, c2, c3), the message m that was encrypted, and the public
// points g_k that Decrypt reads. The testbench plays the parameter memory
// (one cycle of read latency) and checks:
//   - the example cluster S = {1,3,4} decrypted on board 3 returns m;
//   - a 20-board cluster decrypted on board 7 returns m;
//   - board 2 (not in {1,3,4}) gets a null answer at once;
//   - a wrong private key does not return m;
//   - the number of point additions is |S| - 1 and the latency of a null
//     answer is 2 cycles.
module tb_agencid_decrypt;
  import agencid_pkg::*;

  localparam int N    = N_BOARDS;
  localparam int IDXW = $clog2(N + 1);
  localparam int AW   = $clog2(2*N + 1);

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start = 1'b0;
  logic [IDXW-1:0]   idx = '0;
  logic [N-1:0]      set = '0;
  ec_point_t         d_key = POINT_INF, c1 = POINT_INF, c2 = POINT_INF;
  fq2_t              c3 = '0;
  logic              prm_rd_en;
  logic [AW-1:0]     prm_rd_addr;
  ec_point_t         prm_rd_data = POINT_INF;
  logic              busy, done, null_out;
  fq2_t              m;
  logic [AES_KW-1:0] key;
  logic [IDXW:0]     adds_done;
  int                checks = 0, failures = 0;

  ec_point_t         params [2*N + 1];
  fq_t               vec    [80];

  always #5 clk = ~clk;

  agencid_decrypt dut (
    .clk, .rst_n, .start, .idx, .set, .d_key, .c1, .c2, .c3,
    .prm_rd_en, .prm_rd_addr, .prm_rd_data, .busy, .done, .null_out, .m, .key,
    .adds_done
  );

  // parameter memory model
  always_ff @(posedge clk) if (prm_rd_en) prm_rd_data <= params[prm_rd_addr];

  // loads one scenario file, returns the expected message
  task automatic load(input string fname, output fq2_t m_exp, output int nset);
    int cnt;
    for (int k = 0; k <= 2*N; k++) params[k] = POINT_INF;
    for (int k = 0; k < 80; k++) vec[k] = '0;
    $readmemh(fname, vec);
    if (vec[0] != fq_t'(N)) $display("FAIL vector file made for n = %0d", vec[0]);
    idx   = IDXW'(vec[1]);
    set   = N'(vec[2]);
    d_key = '{inf: 1'b0, x: vec[3], y: vec[4]};
    c1    = '{inf: 1'b0, x: vec[5], y: vec[6]};
    c2    = '{inf: 1'b0, x: vec[7], y: vec[8]};
    c3    = '{re: vec[9], im: vec[10]};
    m_exp = '{re: vec[11], im: vec[12]};
    cnt   = int'(vec[13]);
    for (int k = 0; k < cnt; k++)
      params[int'(vec[14 + 3*k])] = '{inf: 1'b0, x: vec[15 + 3*k], y: vec[16 + 3*k]};
    nset = $countones(set);
  endtask

  task automatic run(output longint cyc);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fq2_t   m_exp;
    int     nset;
    longint cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // example cluster {1,3,4}, board 3
    load("tb/vec_cluster_fig3.hex", m_exp, nset);
    run(cyc);
    $display("decrypt on board %0d of a %0d-board cluster: %0d cycles", idx, nset, cyc);
    checks++;
    if (null_out || m != m_exp) begin failures++; $display("FAIL cluster {1,3,4} board 3"); end
    checks++;
    if (key != m_exp.re[AES_KW-1:0]) begin failures++; $display("FAIL AES key bits"); end
    checks++;
    if (int'(adds_done) != nset - 1) begin failures++; $display("FAIL adds %0d", adds_done); end

    // board 2 is not in {1,3,4}
    idx = IDXW'(2);
    run(cyc);
    checks++;
    if (!null_out || cyc != 2) begin
      failures++; $display("FAIL board outside S: null=%0d after %0d cycles", null_out, cyc);
    end

    // right board, wrong private key
    idx   = IDXW'(3);
    d_key = c2;
    run(cyc);
    checks++;
    if (null_out || m == m_exp) begin failures++; $display("FAIL wrong key decrypted"); end

    // cluster of all 20 boards, board 7
    load("tb/vec_cluster_20.hex", m_exp, nset);
    run(cyc);
    $display("decrypt on board %0d of a %0d-board cluster: %0d cycles", idx, nset, cyc);
    checks++;
    if (null_out || m != m_exp) begin failures++; $display("FAIL 20-board cluster"); end
    checks++;
    if (int'(adds_done) != nset - 1) begin failures++; $display("FAIL adds %0d", adds_done); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
