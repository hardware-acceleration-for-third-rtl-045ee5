// modmul: combinational modular multiplier r = a * b mod Q using Barrett
// reduction with a runtime modulus.
//
// The host supplies Q, its bit length k and mu = floor(2^(2k) / Q). The
// product x = a*b (< Q^2 < 2^(2k)) is reduced as
//   q3 = ((x >> (k-1)) * mu) >> (k+1),  r = x - q3*Q,
// which leaves r < 3Q, so at most two conditional subtractions follow.
// Barrett reduction is what the accelerator uses; the word size (54 bit) is
// the published maximum. The unit is purely combinational in this RTL
// (no pipeline registers), a choice made for simplicity: the surrounding
// control schedules one result per cycle with no extra latency.
// Inputs a and b must be below Q.
module modmul
  import fhe_pkg::*;
(
  input  coeff_t      a,
  input  coeff_t      b,
  input  coeff_t      q,
  input  logic [55:0] mu,
  input  logic [5:0]  qbits,
  output coeff_t      r
);
  logic [127:0] x, q1, q2, q3, rr;

  always_comb begin
    x  = 128'(a) * 128'(b);
    q1 = x >> (qbits - 6'd1);
    q2 = q1 * 128'(mu);
    q3 = q2 >> (qbits + 6'd1);
    rr = x - q3 * 128'(q);
    if (rr >= 128'(q)) rr = rr - 128'(q);
    if (rr >= 128'(q)) rr = rr - 128'(q);
    r  = COEFF_W'(rr);
  end
endmodule
