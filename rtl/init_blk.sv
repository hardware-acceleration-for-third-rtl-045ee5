// init_blk: generates the initial homomorphic accumulator of the bootstrap,
// directly in the INTT (coefficient) domain, one quad of coefficients of the
// b polynomial per cycle (polynomial a of the accumulator is all zero).
//
// The accelerator initialises the accumulator "based on b of the LWE"; the
// exact test vector is not specified, so this block uses the simplest FHEW
// style choice: ACC = (0, X^r * t) with t = (c, c, ..., c), c = init_val and
// r = b_lwe * 2N / q the LWE phase scaled to the 2N-th roots (q = 2^lwe_logq).
// Multiplication by X^r is negacyclic, so coefficient j is
//   r <  N:  -c for j < r,   +c for j >= r
//   r >= N:  +c for j < r-N, -c for j >= r-N
// Combinational; beat selects coefficients 4*beat .. 4*beat+3.
module init_blk
  import fhe_pkg::*;
(
  input  logic [3:0]          logn,
  input  logic [3:0]          lwe_logq,
  input  logic [10:0]         b_lwe,
  input  coeff_t              init_val,
  input  coeff_t              q,
  input  logic [LOGN_MAX-3:0] beat,
  output quad_t               b_quad
);
  logic [LOGN_MAX+1:0] r, r_pos;
  logic                neg_low;
  logic [LOGN_MAX+1:0] two_n;
  logic [LOGN_MAX-1:0] j;

  always_comb begin
    two_n = (LOGN_MAX+2)'(1) << (logn + 4'd1);
    // r = b * 2N / q, with q and N powers of two
    if (lwe_logq <= logn + 4'd1)
      r = (LOGN_MAX+2)'(32'(b_lwe) << (logn + 4'd1 - lwe_logq)) & (two_n - 1'b1);
    else
      r = (LOGN_MAX+2)'(32'(b_lwe) >> (lwe_logq - logn - 4'd1)) & (two_n - 1'b1);
    neg_low = (r < (two_n >> 1));
    r_pos   = neg_low ? r : r - (two_n >> 1);
    for (int k = 0; k < 4; k++) begin
      j = LOGN_MAX'({beat, 2'(k)});
      if ((LOGN_MAX+2)'(j) < r_pos) b_quad[k] = neg_low ? mod_neg(init_val, q) : init_val;
      else                          b_quad[k] = neg_low ? init_val : mod_neg(init_val, q);
    end
  end
endmodule
