// fq_modmul: sequential modular multiplier for the base field Fq.
//
// Computes p = a * b mod q with the interleaved (shift-and-add) method, one bit
// of b per clock, most significant bit first: acc <- 2*acc (+ a) with at most
// one conditional subtraction of q after the doubling and one after the
// addition, so the accumulator stays below q throughout. Operands must be
// reduced (a, b < q).
//
// Interface: pulse `start` for one cycle with a and b valid (sampled then);
// `busy` is high while the product is formed; `done` pulses for one cycle
// with `p` valid, exactly QW + 1 cycles after the start edge. `p` holds its
// value until the next start. A start while busy is ignored.
//
// The paper states only that the hardware Decrypt core performs elliptic-curve
// and pairing arithmetic over the Type A curve; the bit-serial multiplier is
// this design's own (smallest) choice, and it sets the latency of every
// higher block.
module fq_modmul
  import agencid_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fq_t  a,
  input  fq_t  b,
  output logic busy,
  output logic done,
  output fq_t  p
);

  fq_t                   a_q, b_q;
  logic [$clog2(QW)-1:0] bit_idx;

  // One interleaved step: acc*2 + bit*a, kept below q
  function automatic fq_t mm_step(fq_t acc, fq_t addend, logic bit_in);
    logic [QW:0] t;
    t = {acc, 1'b0};
    if (t >= {1'b0, Q_PRIME}) t = t - {1'b0, Q_PRIME};
    if (bit_in) begin
      t = t + {1'b0, addend};
      if (t >= {1'b0, Q_PRIME}) t = t - {1'b0, Q_PRIME};
    end
    return t[QW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      p       <= '0;
      a_q     <= '0;
      b_q     <= '0;
      bit_idx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          a_q     <= a;
          b_q     <= b;
          p       <= '0;
          bit_idx <= $clog2(QW)'(QW - 1);
          busy    <= 1'b1;
        end
      end else begin
        p <= mm_step(p, a_q, b_q[bit_idx]);
        if (bit_idx == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bit_idx <= bit_idx - 1'b1;
        end
      end
    end
  end

endmodule
