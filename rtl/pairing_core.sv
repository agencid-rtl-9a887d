// pairing_core: symmetric bilinear pairing e : G x G -> G_T on the Type A
// curve E : y^2 = x^3 + x over Fq (embedding degree 2).
//
// e(P, Q) is the reduced Tate pairing of P with the distorted point
// phi(Q) = (-xQ, i*yQ), a point of E(Fq2); the distortion makes the pairing
// symmetric and non-degenerate on G.
//   Miller loop over the bits of r (top bit first, the top bit skipped):
//     f <- f^2 * l_{T,T}(phi(Q)),  T <- 2T
//     if bit set:  f <- f * l_{T,P}(phi(Q)),  T <- T + P
//   with the line through T of slope lambda evaluated at phi(Q):
//     l = (lambda * (xQ + xT) - yT) + yQ * i
//   Vertical lines (and the last addition, which reaches T = -P and then
//   infinity) give values in Fq, which the final exponentiation removes, so
//   they are skipped.
//   Final exponentiation by (q^2 - 1)/r = (q - 1) * h:
//     f <- conj(f) / f     (f^(q-1), since f^q = conj(f) in Fq2)
//     f <- f^h             (left-to-right square and multiply, h = (q+1)/r)
// Either input at infinity gives e = 1.
//
// Sub-units: one ecc_core (point doubling/addition and slopes), one
// fq_modmul (line value) and one fq2_unit (G_T arithmetic), used one at a
// time.
//
// Interface: pulse `start` with p, q valid (sampled then); `done` pulses once
// with `e` valid, held until the next start. Latency is about 7,000 cycles per
// bit of r plus about 1,600 cycles per bit of h (about 2.3 million cycles at
// the default sizes; the tb prints the measured count).
//
// The paper takes its pairing core from a Duursma-Lee style design it cites
// and gives neither its insides nor its field; it does fix the Type A curve
// y^2 = x^3 + x with k = 2 for the scheme. This core therefore computes the
// Tate pairing for that curve with Miller's algorithm, which is this design's
// choice; the paper's core takes 57,456 cycles, this one far more because it
// uses a single bit-serial multiplier.
module pairing_core
  import agencid_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  ec_point_t p,
  input  ec_point_t q,
  output logic      busy,
  output logic      done,
  output fq2_t      e
);

  typedef enum logic [3:0] {
    S_IDLE, S_DBL, S_SQR, S_LINE, S_FMUL, S_ADD, S_NEXT,
    S_FINV, S_FCONJ, S_EXP_SQ, S_EXP_MUL, S_DONE
  } state_e;

  state_e    state;
  logic      issued;
  logic      add_step;      // the line in hand comes from the addition step
  ec_point_t p_q, q_q;      // operands
  ec_point_t t_pt, t_new;   // Miller point T and its update
  fq_t       lam_q;
  logic      lam_ok;
  fq2_t      f, line, g;
  logic [$clog2(RW)-1:0] r_idx;
  logic [$clog2(HW)-1:0] h_idx;

  // sub-units
  logic      ec_start, ec_busy, ec_done, ec_lam_valid;
  ec_op_e    ec_op;
  ec_point_t ec_p, ec_q, ec_r;
  fq_t       ec_lam;
  logic      mul_start, mul_busy, mul_done;
  fq_t       mul_a, mul_b, mul_p;
  logic      f2_start, f2_busy, f2_done;
  f2_op_e    f2_op;
  fq2_t      f2_a, f2_b, f2_z;

  ecc_core #(.KW(1)) u_ecc (
    .clk, .rst_n, .start(ec_start), .op(ec_op), .p(ec_p), .q(ec_q), .k(1'b0),
    .busy(ec_busy), .done(ec_done), .r(ec_r), .lam(ec_lam), .lam_valid(ec_lam_valid)
  );

  fq_modmul u_mul (
    .clk, .rst_n, .start(mul_start), .a(mul_a), .b(mul_b),
    .busy(mul_busy), .done(mul_done), .p(mul_p)
  );

  fq2_unit u_f2 (
    .clk, .rst_n, .start(f2_start), .op(f2_op), .a(f2_a), .b(f2_b),
    .busy(f2_busy), .done(f2_done), .z(f2_z)
  );

  assign busy = (state != S_IDLE);

  // Handshake rules, off while in reset (rst_n is read here as well as by
  // the flip-flops, which verilator notes as SYNCASYNCNET; only these checks
  // use it so): a sub-unit is started only when idle.
  a_ec_idle:  assert property (@(posedge clk) disable iff (!rst_n) ec_start |-> !ec_busy);
  a_mul_idle: assert property (@(posedge clk) disable iff (!rst_n) mul_start |-> !mul_busy);
  a_f2_idle:  assert property (@(posedge clk) disable iff (!rst_n) f2_start |-> !f2_busy);

  task automatic issue_ec(input ec_op_e o, input ec_point_t x, input ec_point_t y);
    ec_start <= 1'b1;
    ec_op    <= o;
    ec_p     <= x;
    ec_q     <= y;
  endtask

  task automatic issue_f2(input f2_op_e o, input fq2_t x, input fq2_t y);
    f2_start <= 1'b1;
    f2_op    <= o;
    f2_a     <= x;
    f2_b     <= y;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      issued    <= 1'b0;
      add_step  <= 1'b0;
      done      <= 1'b0;
      e         <= FQ2_ONE;
      p_q       <= POINT_INF;
      q_q       <= POINT_INF;
      t_pt      <= POINT_INF;
      t_new     <= POINT_INF;
      lam_q     <= '0;
      lam_ok    <= 1'b0;
      f         <= FQ2_ONE;
      line      <= FQ2_ONE;
      g         <= FQ2_ONE;
      r_idx     <= '0;
      h_idx     <= '0;
      ec_start  <= 1'b0;
      ec_op     <= EC_ADD;
      ec_p      <= POINT_INF;
      ec_q      <= POINT_INF;
      mul_start <= 1'b0;
      mul_a     <= '0;
      mul_b     <= '0;
      f2_start  <= 1'b0;
      f2_op     <= F2_MUL;
      f2_a      <= FQ2_ONE;
      f2_b      <= FQ2_ONE;
    end else begin
      done      <= 1'b0;
      ec_start  <= 1'b0;
      mul_start <= 1'b0;
      f2_start  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          p_q    <= p;
          q_q    <= q;
          t_pt   <= p;
          f      <= FQ2_ONE;
          issued <= 1'b0;
          r_idx  <= ($clog2(RW))'(RW - 2);
          if (p.inf || q.inf) begin
            e     <= FQ2_ONE;
            state <= S_DONE;
          end else begin
            state <= S_DBL;
          end
        end

        // ---- Miller loop ----
        S_DBL: if (!issued) begin issue_ec(EC_DBL, t_pt, t_pt); issued <= 1'b1; end
          else if (ec_done) begin
            t_new    <= ec_r;
            lam_q    <= ec_lam;
            lam_ok   <= ec_lam_valid;
            add_step <= 1'b0;
            issued   <= 1'b0;
            state    <= S_SQR;
          end
        S_SQR: if (!issued) begin issue_f2(F2_MUL, f, f); issued <= 1'b1; end
          else if (f2_done) begin
            f      <= f2_z;
            issued <= 1'b0;
            state  <= S_LINE;
          end
        // line value at phi(Q); skipped for vertical lines
        S_LINE: if (!lam_ok) begin
            t_pt  <= t_new;
            state <= add_step ? S_NEXT : S_ADD;
          end else if (!issued) begin
            mul_start <= 1'b1;
            mul_a     <= lam_q;
            mul_b     <= fq_add(q_q.x, t_pt.x);
            issued    <= 1'b1;
          end else if (mul_done) begin
            line   <= '{re: fq_sub(mul_p, t_pt.y), im: q_q.y};
            issued <= 1'b0;
            state  <= S_FMUL;
          end
        S_FMUL: if (!issued) begin issue_f2(F2_MUL, f, line); issued <= 1'b1; end
          else if (f2_done) begin
            f      <= f2_z;
            t_pt   <= t_new;
            issued <= 1'b0;
            state  <= add_step ? S_NEXT : S_ADD;
          end
        S_ADD: if (!R_ORDER[r_idx]) begin
            state <= S_NEXT;
          end else if (!issued) begin
            issue_ec(EC_ADD, t_pt, p_q);
            issued <= 1'b1;
          end else if (ec_done) begin
            t_new    <= ec_r;
            lam_q    <= ec_lam;
            lam_ok   <= ec_lam_valid;
            add_step <= 1'b1;
            issued   <= 1'b0;
            state    <= S_LINE;
          end
        S_NEXT: begin
          if (r_idx == '0) begin
            state <= S_FINV;
          end else begin
            r_idx <= r_idx - 1'b1;
            state <= S_DBL;
          end
        end

        // ---- final exponentiation ----
        S_FINV: if (!issued) begin issue_f2(F2_INV, f, f); issued <= 1'b1; end
          else if (f2_done) begin
            g      <= f2_z;
            issued <= 1'b0;
            state  <= S_FCONJ;
          end
        S_FCONJ: if (!issued) begin issue_f2(F2_MUL, '{re: f.re, im: fq_neg(f.im)}, g); issued <= 1'b1; end
          else if (f2_done) begin
            g      <= f2_z;       // f^(q-1)
            f      <= f2_z;       // running power, top bit of h consumed
            h_idx  <= ($clog2(HW))'(HW - 2);
            issued <= 1'b0;
            state  <= S_EXP_SQ;
          end
        S_EXP_SQ: if (!issued) begin issue_f2(F2_MUL, f, f); issued <= 1'b1; end
          else if (f2_done) begin
            f      <= f2_z;
            issued <= 1'b0;
            state  <= S_EXP_MUL;
          end
        S_EXP_MUL: if (!H_COFACTOR[h_idx]) begin
            if (h_idx == '0) begin
              e     <= f;
              state <= S_DONE;
            end else begin
              h_idx <= h_idx - 1'b1;
              state <= S_EXP_SQ;
            end
          end else if (!issued) begin
            issue_f2(F2_MUL, f, g);
            issued <= 1'b1;
          end else if (f2_done) begin
            issued <= 1'b0;
            if (h_idx == '0) begin
              e     <= f2_z;
              state <= S_DONE;
            end else begin
              f     <= f2_z;
              h_idx <= h_idx - 1'b1;
              state <= S_EXP_SQ;
            end
          end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
