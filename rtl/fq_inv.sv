// fq_inv: sequential inverter for the base field Fq.
//
// Computes z = a^-1 mod q with the binary extended Euclidean algorithm for an
// odd modulus. It keeps (u, x1) and (v, x2) with invariants x1*a = u and
// x2*a = v (mod q), starting from (a, 1) and (q, 0). Each clock does one of:
// halve an even u (and x1 mod q), halve an even v (and x2), or subtract the
// smaller of u, v from the larger (and the matching x). It stops when u or v
// reaches 1; the matching x is the inverse. This takes at most about 2*QW
// subtractions plus 2*QW halvings, so the latency depends on the operand
// (bounded by 4*QW + 2 cycles).
//
// Interface: pulse `start` with `a` valid; `done` pulses once with `z` valid.
// An input of zero has no inverse: the unit answers z = 0 with `zero_in` set,
// two cycles after start.
//
// The paper gives only that the Decrypt core adds points (which needs a field
// division); the choice of the binary Euclidean inverter is this design's.
module fq_inv
  import agencid_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fq_t  a,
  output logic busy,
  output logic done,
  output logic zero_in,
  output fq_t  z
);

  fq_t u, v, x1, x2;

  // (x / 2) mod q for odd q
  function automatic fq_t half_mod(fq_t x);
    logic [QW:0] t;
    t = x[0] ? ({1'b0, x} + {1'b0, Q_PRIME}) : {1'b0, x};
    return t[QW:1];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      zero_in <= 1'b0;
      z       <= '0;
      u       <= '0;
      v       <= '0;
      x1      <= '0;
      x2      <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          u       <= a;
          v       <= Q_PRIME;
          x1      <= fq_t'(1);
          x2      <= '0;
          zero_in <= (a == '0);
          busy    <= 1'b1;
        end
      end else if (u == '0) begin
        z    <= '0;
        busy <= 1'b0;
        done <= 1'b1;
      end else if (u == fq_t'(1)) begin
        z    <= x1;
        busy <= 1'b0;
        done <= 1'b1;
      end else if (v == fq_t'(1)) begin
        z    <= x2;
        busy <= 1'b0;
        done <= 1'b1;
      end else if (!u[0]) begin
        u  <= u >> 1;
        x1 <= half_mod(x1);
      end else if (!v[0]) begin
        v  <= v >> 1;
        x2 <= half_mod(x2);
      end else if (u >= v) begin
        u  <= u - v;
        x1 <= fq_sub(x1, x2);
      end else begin
        v  <= v - u;
        x2 <= fq_sub(x2, x1);
      end
    end
  end

endmodule
