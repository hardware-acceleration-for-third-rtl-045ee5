// butterfly: one radix-2 butterfly of the NTT/INTT, selectable at run time.
//
//   gs = 0  Cooley-Tukey (forward NTT):  x = u + v*S,  y = u - v*S
//   gs = 1  Gentleman-Sande (INTT):      x = u + v,    y = (u - v)*S
//
// All arithmetic is modulo the runtime Q; the single multiplier is a Barrett
// modmul. The two butterfly forms are those of the NTT and INTT algorithms the
// accelerator implements; sharing one unit between them is this design's own
// choice. Combinational, one butterfly per cycle.
module butterfly
  import fhe_pkg::*;
(
  input  logic        gs,
  input  coeff_t      u,
  input  coeff_t      v,
  input  coeff_t      s,
  input  coeff_t      q,
  input  logic [55:0] mu,
  input  logic [5:0]  qbits,
  output coeff_t      x,
  output coeff_t      y
);
  coeff_t m_in, prod, diff;

  assign diff = mod_sub(u, v, q);
  assign m_in = gs ? diff : v;

  modmul u_mul (.a(m_in), .b(s), .q(q), .mu(mu), .qbits(qbits), .r(prod));

  always_comb begin
    if (gs) begin
      x = mod_add(u, v, q);
      y = prod;
    end else begin
      x = mod_add(u, prod, q);
      y = mod_sub(u, prod, q);
    end
  end
endmodule
