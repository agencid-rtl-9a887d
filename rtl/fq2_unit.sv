// fq2_unit: arithmetic in Fq2 = Fq[i]/(i^2 + 1), the field holding G_T.
//
// Two operations, selected by `op` at start:
//   F2_MUL  z = a * b   Karatsuba form, three Fq products:
//           t0 = a.re*b.re, t1 = a.im*b.im, t2 = (a.re+a.im)*(b.re+b.im),
//           z = (t0 - t1) + (t2 - t0 - t1) i
//   F2_INV  z = 1 / a   via the norm: n = a.re^2 + a.im^2 (an Fq element),
//           z = (a.re * n^-1) - (a.im * n^-1) i ; a = 0 gives z = 0.
// One fq_modmul and one fq_inv are shared by the steps, which run one after
// another. F2_MUL takes 3*(QW+3) + 1 cycles; F2_INV four products plus one
// field inversion.
//
// Interface: pulse `start` with op, a, b valid (sampled then); `done` pulses
// once with `z` valid, and z holds until the next start.
//
// The paper fixes G_T inside the degree-2 extension (embedding degree 2 of the
// Type A curve) and needs products and one quotient of G_T elements in
// Decrypt; how they are computed is this design's choice.
module fq2_unit
  import agencid_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  f2_op_e op,
  input  fq2_t   a,
  input  fq2_t   b,
  output logic   busy,
  output logic   done,
  output fq2_t   z
);

  typedef enum logic [3:0] {
    S_IDLE, S_M0, S_M1, S_M2, S_N0, S_N1, S_NINV, S_R0, S_R1
  } state_e;

  state_e state;
  logic   issued;
  fq2_t   a_q, b_q;
  fq_t    t0, t1;

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
  // use it so): a sub-unit is started only when idle.
  a_mul_idle: assert property (@(posedge clk) disable iff (!rst_n) mul_start |-> !mul_busy);
  a_inv_idle: assert property (@(posedge clk) disable iff (!rst_n) inv_start |-> !inv_busy);

  // Issue a product (first visit of a state), or report its arrival
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
      z         <= '0;
      a_q       <= '0;
      b_q       <= '0;
      t0        <= '0;
      t1        <= '0;
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
          a_q    <= a;
          b_q    <= b;
          issued <= 1'b0;
          state  <= (op == F2_MUL) ? S_M0 : S_N0;
        end
        // ---- multiplication ----
        S_M0: if (!issued) begin issue_mul(a_q.re, b_q.re); issued <= 1'b1; end
              else if (mul_done) begin t0 <= mul_p; issued <= 1'b0; state <= S_M1; end
        S_M1: if (!issued) begin issue_mul(a_q.im, b_q.im); issued <= 1'b1; end
              else if (mul_done) begin t1 <= mul_p; issued <= 1'b0; state <= S_M2; end
        S_M2: if (!issued) begin issue_mul(fq_add(a_q.re, a_q.im), fq_add(b_q.re, b_q.im)); issued <= 1'b1; end
              else if (mul_done) begin
                z.re   <= fq_sub(t0, t1);
                z.im   <= fq_sub(fq_sub(mul_p, t0), t1);
                issued <= 1'b0;
                done   <= 1'b1;
                state  <= S_IDLE;
              end
        // ---- inversion ----
        S_N0: if (!issued) begin issue_mul(a_q.re, a_q.re); issued <= 1'b1; end
              else if (mul_done) begin t0 <= mul_p; issued <= 1'b0; state <= S_N1; end
        S_N1: if (!issued) begin issue_mul(a_q.im, a_q.im); issued <= 1'b1; end
              else if (mul_done) begin t1 <= mul_p; issued <= 1'b0; state <= S_NINV; end
        S_NINV: if (!issued) begin
                inv_start <= 1'b1;
                inv_a     <= fq_add(t0, t1);
                issued    <= 1'b1;
              end else if (inv_done) begin
                t0     <= inv_z;
                issued <= 1'b0;
                state  <= S_R0;
              end
        S_R0: if (!issued) begin issue_mul(a_q.re, t0); issued <= 1'b1; end
              else if (mul_done) begin z.re <= mul_p; issued <= 1'b0; state <= S_R1; end
        S_R1: if (!issued) begin issue_mul(a_q.im, t0); issued <= 1'b1; end
              else if (mul_done) begin
                z.im   <= fq_neg(mul_p);
                issued <= 1'b0;
                done   <= 1'b1;
                state  <= S_IDLE;
              end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
