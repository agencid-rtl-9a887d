// agencid_decrypt: the AgEncID Decrypt(S, i, d_i, C) engine.
//
// Recovers the G_T message carried by a ciphertext C = (c1, c2, c3) that was
// encrypted for the board set S, using this board's index i and private key
// d_i:
//     b_{i,S} = sum over j in S, j != i, of g_(n+1-j+i)
//     m       = c3 * e(d_i + b_{i,S}, c1) / e(g_i, c2)
// If i is not in S (or i is outside 1..n) the answer is null: `null_out` is
// set and no pairing is computed. The AES key handed to the bitstream
// decryptor is the low AES_KW bits of the real part of m.
//
// Order of work (one step at a time):
//   1. acc <- d_i; for j = 1..n with S[j] and j != i: read g_(n+1-j+i) from
//      the parameter memory and acc <- acc + g (ecc_core point addition);
//   2. e1 <- e(acc, c1);  3. read g_i, e2 <- e(g_i, c2)   (pairing_core);
//   4. e2 <- 1/e2;  m <- (c3 * e1) * e2                    (fq2_unit).
// Latency: two pairings (about 1.93 million cycles each at the default
// sizes) plus |S| - 1 point additions and three G_T operations.
//
// Interface: pulse `start` with i, set (bit j-1 = board j in S), d_i, c1, c2,
// c3 valid (sampled then); `done` pulses once with null_out, m and key valid;
// they hold until the next start. The parameter memory is read through
// prm_rd_en / prm_rd_addr with data back one cycle later on prm_rd_data.
//
// The formula, the null rule and the set arithmetic are the paper's. The
// step order, the interfaces and the mapping of m to the 256-bit AES key (the
// paper only says the key is "the message") are this design's choices.
module agencid_decrypt
  import agencid_pkg::*;
#(
  parameter int N    = N_BOARDS,            // boards in the system (n)
  parameter int IDXW = $clog2(N + 1),       // bits of a board index
  parameter int AW   = $clog2(2*N + 1)      // parameter-memory address bits
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [IDXW-1:0]   idx,            // this board's index i (1..n)
  input  logic [N-1:0]      set,            // S as a bit mask, bit j-1 = board j
  input  ec_point_t         d_key,          // private key d_i
  input  ec_point_t         c1,
  input  ec_point_t         c2,
  input  fq2_t              c3,
  output logic              prm_rd_en,
  output logic [AW-1:0]     prm_rd_addr,
  input  ec_point_t         prm_rd_data,
  output logic              busy,
  output logic              done,
  output logic              null_out,
  output fq2_t              m,
  output logic [AES_KW-1:0] key,
  output logic [IDXW:0]     adds_done       // point additions made for b_{i,S}
);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN, S_RD_WAIT, S_ADD, S_PAIR1, S_RD_GI, S_PAIR2,
    S_INV, S_MUL1, S_MUL2, S_FIN
  } state_e;

  state_e          state;
  logic            issued;
  logic [IDXW-1:0] i_q;
  logic [N-1:0]    set_q;
  ec_point_t       c1_q, c2_q, acc, gpt;
  fq2_t            c3_q, e1, e2;
  logic [IDXW:0]   j;

  logic      ec_start, ec_busy, ec_done, ec_lam_valid;
  ec_point_t ec_r;
  fq_t       ec_lam;
  logic      pr_start, pr_busy, pr_done;
  ec_point_t pr_p, pr_q;
  fq2_t      pr_e;
  logic      f2_start, f2_busy, f2_done;
  f2_op_e    f2_op;
  fq2_t      f2_a, f2_b, f2_z;

  ecc_core #(.KW(1)) u_ecc (
    .clk, .rst_n, .start(ec_start), .op(EC_ADD), .p(acc), .q(gpt), .k(1'b0),
    .busy(ec_busy), .done(ec_done), .r(ec_r), .lam(ec_lam), .lam_valid(ec_lam_valid)
  );

  pairing_core u_pair (
    .clk, .rst_n, .start(pr_start), .p(pr_p), .q(pr_q),
    .busy(pr_busy), .done(pr_done), .e(pr_e)
  );

  fq2_unit u_f2 (
    .clk, .rst_n, .start(f2_start), .op(f2_op), .a(f2_a), .b(f2_b),
    .busy(f2_busy), .done(f2_done), .z(f2_z)
  );

  assign busy = (state != S_IDLE);
  assign key  = m.re[AES_KW-1:0];

  // index of g for board j: n + 1 - j + i
  function automatic logic [AW-1:0] b_addr(logic [IDXW:0] jj, logic [IDXW-1:0] ii);
    return AW'(N + 1 - int'(jj) + int'(ii));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      issued      <= 1'b0;
      done        <= 1'b0;
      null_out    <= 1'b0;
      m           <= '0;
      i_q         <= '0;
      set_q       <= '0;
      c1_q        <= POINT_INF;
      c2_q        <= POINT_INF;
      c3_q        <= '0;
      acc         <= POINT_INF;
      gpt         <= POINT_INF;
      e1          <= '0;
      e2          <= '0;
      j           <= '0;
      adds_done   <= '0;
      prm_rd_en   <= 1'b0;
      prm_rd_addr <= '0;
      ec_start    <= 1'b0;
      pr_start    <= 1'b0;
      pr_p        <= POINT_INF;
      pr_q        <= POINT_INF;
      f2_start    <= 1'b0;
      f2_op       <= F2_MUL;
      f2_a        <= '0;
      f2_b        <= '0;
    end else begin
      done      <= 1'b0;
      prm_rd_en <= 1'b0;
      ec_start  <= 1'b0;
      pr_start  <= 1'b0;
      f2_start  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          i_q       <= idx;
          set_q     <= set;
          c1_q      <= c1;
          c2_q      <= c2;
          c3_q      <= c3;
          acc       <= d_key;
          j         <= (IDXW+1)'(1);
          adds_done <= '0;
          issued    <= 1'b0;
          null_out  <= 1'b0;
          if (idx == '0 || int'(idx) > N || !set[int'(idx) - 1]) begin
            null_out <= 1'b1;
            m        <= '0;
            state    <= S_FIN;
          end else begin
            state <= S_SCAN;
          end
        end

        // ---- b_{i,S} accumulated onto d_i ----
        S_SCAN: begin
          if (int'(j) > N) begin
            state <= S_PAIR1;
          end else if (set_q[int'(j) - 1] && j != {1'b0, i_q}) begin
            prm_rd_en   <= 1'b1;
            prm_rd_addr <= b_addr(j, i_q);
            state       <= S_RD_WAIT;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_RD_WAIT: state <= S_ADD;      // memory data arrives this cycle
        S_ADD: if (!issued) begin
            gpt      <= prm_rd_data;
            ec_start <= 1'b1;
            issued   <= 1'b1;
          end else if (ec_done) begin
            acc       <= ec_r;
            adds_done <= adds_done + 1'b1;
            j         <= j + 1'b1;
            issued    <= 1'b0;
            state     <= S_SCAN;
          end

        // ---- the two pairings ----
        S_PAIR1: if (!issued) begin
            pr_start <= 1'b1;
            pr_p     <= acc;
            pr_q     <= c1_q;
            issued   <= 1'b1;
          end else if (pr_done) begin
            e1          <= pr_e;
            issued      <= 1'b0;
            prm_rd_en   <= 1'b1;
            prm_rd_addr <= AW'(i_q);
            state       <= S_RD_GI;
          end
        S_RD_GI: state <= S_PAIR2;
        S_PAIR2: if (!issued) begin
            pr_start <= 1'b1;
            pr_p     <= prm_rd_data;
            pr_q     <= c2_q;
            issued   <= 1'b1;
          end else if (pr_done) begin
            e2     <= pr_e;
            issued <= 1'b0;
            state  <= S_INV;
          end

        // ---- m = c3 * e1 / e2 ----
        S_INV: if (!issued) begin
            f2_start <= 1'b1;
            f2_op    <= F2_INV;
            f2_a     <= e2;
            issued   <= 1'b1;
          end else if (f2_done) begin
            e2     <= f2_z;
            issued <= 1'b0;
            state  <= S_MUL1;
          end
        S_MUL1: if (!issued) begin
            f2_start <= 1'b1;
            f2_op    <= F2_MUL;
            f2_a     <= c3_q;
            f2_b     <= e1;
            issued   <= 1'b1;
          end else if (f2_done) begin
            e1     <= f2_z;
            issued <= 1'b0;
            state  <= S_MUL2;
          end
        S_MUL2: if (!issued) begin
            f2_start <= 1'b1;
            f2_op    <= F2_MUL;
            f2_a     <= e1;
            f2_b     <= e2;
            issued   <= 1'b1;
          end else if (f2_done) begin
            m      <= f2_z;
            issued <= 1'b0;
            state  <= S_FIN;
          end
        S_FIN: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
