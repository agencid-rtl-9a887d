// ecc_core: point arithmetic on the Type A curve E : y^2 = x^3 + x over Fq.
//
// Operations (selected by `op` at start):
//   EC_ADD   r = p + q
//   EC_DBL   r = 2p
//   EC_SMUL  r = k * p  (left-to-right double-and-add over the KW bits of k)
// Points are affine with an infinity flag. Every addition or doubling forms
// the slope lambda of the chord (or tangent) with one field inversion:
//   add:     lambda = (y2 - y1) / (x2 - x1)
//   double:  lambda = (3 x1^2 + 1) / (2 y1)          (curve coefficient a = 1)
//   x3 = lambda^2 - x1 - x2,   y3 = lambda (x1 - x3) - y1
// The special cases are handled exactly: an operand at infinity, p = q
// (switches to doubling), p = -q and y1 = 0 (result at infinity).
//
// For the Miller loop of the pairing the core also returns the slope of the
// last addition or doubling (`lam`), with `lam_valid` low when no sloped line
// was involved (an operand at infinity, or a vertical line).
//
// Interface: pulse `start` with op, p, q, k valid (sampled then). `done`
// pulses once with r (and lam) valid; they hold until the next start.
// Timing: a doubling takes 4 products, an addition 3, each QW + 3 cycles,
// plus one inversion (data dependent, below 4*QW cycles) and a few cycles of
// control; EC_SMUL takes KW doublings plus one addition per set bit of k.
//
// The paper states that its hardware Decrypt core includes point addition and
// scalar multiplication on a pairing-friendly curve; the affine formulas, the
// shared single multiplier and the double-and-add order are this design's.
module ecc_core
  import agencid_pkg::*;
#(
  parameter int KW = RW            // scalar width for EC_SMUL
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  ec_op_e          op,
  input  ec_point_t       p,
  input  ec_point_t       q,
  input  logic [KW-1:0]   k,
  output logic            busy,
  output logic            done,
  output ec_point_t       r,
  output fq_t             lam,
  output logic            lam_valid
);

  typedef enum logic [3:0] {
    S_IDLE, S_SM_STEP, S_PT_START, S_PT_SQ, S_PT_INV, S_PT_LAM, S_PT_X3,
    S_PT_Y3, S_PT_DONE
  } state_e;

  state_e          state;
  logic            issued;
  ec_op_e          op_q;
  ec_point_t       base;          // p of EC_SMUL
  logic [KW-1:0]   k_q;
  logic [$clog2(KW+1)-1:0] bits_left;
  logic            sm_phase;      // 0: doubling of this bit done next, 1: addition
  // operands and intermediates of one point operation
  ec_point_t       o1, o2;
  logic            dbl;
  fq_t             num, den, tmp, x3;

  logic mul_start, mul_busy, mul_done;
  fq_t  mul_a, mul_b, mul_p;
  logic inv_start, inv_busy, inv_done, inv_zero;
  fq_t  inv_a, inv_z;

  fq_modmul u_mul (
    .clk, .rst_n, .start(mul_start), .a(mul_a), .b(mul_b),
    .busy(mul_busy), .done(mul_done), .p(mul_p)
  );

  fq_inv u_inv (
    .clk, .rst_n, .start(inv_start), .a(inv_a),
    .busy(inv_busy), .done(inv_done), .zero_in(inv_zero), .z(inv_z)
  );

  assign busy = (state != S_IDLE);

  // Handshake rules, off while in reset (rst_n is read here as well as by
  // the flip-flops, which verilator notes as SYNCASYNCNET; only these checks
  // use it so): a sub-unit is started only when idle, and the special-case
  // handling of the controller keeps a zero from ever reaching the inverter.
  a_mul_idle: assert property (@(posedge clk) disable iff (!rst_n) mul_start |-> !mul_busy);
  a_inv_idle: assert property (@(posedge clk) disable iff (!rst_n) inv_start |-> !inv_busy);
  a_inv_nz:   assert property (@(posedge clk) disable iff (!rst_n) inv_done |-> !inv_zero);

  task automatic issue_mul(input fq_t x, input fq_t y);
    mul_start <= 1'b1;
    mul_a     <= x;
    mul_b     <= y;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      issued    <= 1'b0;
      done      <= 1'b0;
      op_q      <= EC_ADD;
      base      <= POINT_INF;
      k_q       <= '0;
      bits_left <= '0;
      sm_phase  <= 1'b0;
      o1        <= POINT_INF;
      o2        <= POINT_INF;
      dbl       <= 1'b0;
      num       <= '0;
      den       <= '0;
      tmp       <= '0;
      x3        <= '0;
      r         <= POINT_INF;
      lam       <= '0;
      lam_valid <= 1'b0;
      mul_start <= 1'b0;
      mul_a     <= '0;
      mul_b     <= '0;
      inv_start <= 1'b0;
      inv_a     <= '0;
    end else begin
      done      <= 1'b0;
      mul_start <= 1'b0;
      inv_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q   <= op;
          issued <= 1'b0;
          if (op == EC_SMUL) begin
            base      <= p;
            k_q       <= k;
            bits_left <= ($clog2(KW+1))'(KW);
            sm_phase  <= 1'b0;
            r         <= POINT_INF;
            state     <= S_SM_STEP;
          end else begin
            o1    <= p;
            o2    <= (op == EC_DBL) ? p : q;
            dbl   <= (op == EC_DBL);
            state <= S_PT_START;
          end
        end

        // ---- scalar multiplication sequencing (r is the accumulator) ----
        S_SM_STEP: begin
          if (!sm_phase) begin
            if (bits_left == '0) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              o1    <= r;
              o2    <= r;
              dbl   <= 1'b1;
              state <= S_PT_START;
            end
          end else begin
            // addition phase of the current bit
            if (k_q[KW-1]) begin
              o1    <= r;
              o2    <= base;
              dbl   <= 1'b0;
              state <= S_PT_START;
            end else begin
              sm_phase  <= 1'b0;
              k_q       <= k_q << 1;
              bits_left <= bits_left - 1'b1;
            end
          end
        end

        // ---- one point addition / doubling on (o1, o2) ----
        S_PT_START: begin
          lam_valid <= 1'b0;
          if (dbl) begin
            if (o1.inf || o1.y == '0) begin
              r     <= POINT_INF;
              state <= S_PT_DONE;
            end else begin
              state <= S_PT_SQ;
            end
          end else if (o1.inf) begin
            r     <= o2;
            state <= S_PT_DONE;
          end else if (o2.inf) begin
            r     <= o1;
            state <= S_PT_DONE;
          end else if (o1.x == o2.x) begin
            if (o1.y == o2.y && o1.y != '0) begin
              dbl   <= 1'b1;
              state <= S_PT_SQ;
            end else begin
              r     <= POINT_INF;
              state <= S_PT_DONE;
            end
          end else begin
            num   <= fq_sub(o2.y, o1.y);
            den   <= fq_sub(o2.x, o1.x);
            state <= S_PT_INV;
          end
        end
        S_PT_SQ: if (!issued) begin issue_mul(o1.x, o1.x); issued <= 1'b1; end
          else if (mul_done) begin
            num    <= fq_add(fq_add(fq_add(mul_p, mul_p), mul_p), fq_t'(1));
            den    <= fq_add(o1.y, o1.y);
            o2     <= o1;
            issued <= 1'b0;
            state  <= S_PT_INV;
          end
        S_PT_INV: if (!issued) begin
            inv_start <= 1'b1;
            inv_a     <= den;
            issued    <= 1'b1;
          end else if (inv_done) begin
            tmp    <= inv_z;
            issued <= 1'b0;
            state  <= S_PT_LAM;
          end
        S_PT_LAM: if (!issued) begin issue_mul(num, tmp); issued <= 1'b1; end
          else if (mul_done) begin
            lam    <= mul_p;
            issued <= 1'b0;
            state  <= S_PT_X3;
          end
        S_PT_X3: if (!issued) begin issue_mul(lam, lam); issued <= 1'b1; end
          else if (mul_done) begin
            x3     <= fq_sub(fq_sub(mul_p, o1.x), o2.x);
            issued <= 1'b0;
            state  <= S_PT_Y3;
          end
        S_PT_Y3: if (!issued) begin issue_mul(lam, fq_sub(o1.x, x3)); issued <= 1'b1; end
          else if (mul_done) begin
            r         <= '{inf: 1'b0, x: x3, y: fq_sub(mul_p, o1.y)};
            lam_valid <= 1'b1;
            issued    <= 1'b0;
            state     <= S_PT_DONE;
          end
        S_PT_DONE: begin
          if (op_q == EC_SMUL) begin
            if (!sm_phase) begin
              sm_phase <= 1'b1;
            end else begin
              sm_phase  <= 1'b0;
              k_q       <= k_q << 1;
              bits_left <= bits_left - 1'b1;
            end
            state <= S_SM_STEP;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
