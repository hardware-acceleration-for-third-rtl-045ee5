// poly_buffer: one polynomial buffer, a true dual-port RAM of DEPTH lines,
// each line holding two consecutive coefficients (line i = coefficients 2i
// and 2i+1). With N = 2048 this is the 1024 x 108 bit buffer of the
// prototype, built from block RAM there.
//
// Each port reads or writes one line per cycle. Reads are registered: the
// data of the address presented in cycle t appears in cycle t+1. A write and
// a read of the same address on different ports in one cycle return the old
// data. Writing the same address from both ports in one cycle is not allowed.
module poly_buffer
  import fhe_pkg::*;
#(
  parameter int unsigned DEPTH = N_MAX / 2,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  line_t         wdata_a,
  output line_t         rdata_a,
  // port B
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  line_t         wdata_b,
  output line_t         rdata_b
);
  line_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_a) mem[addr_a] <= wdata_a;
    if (we_b) mem[addr_b] <= wdata_b;
    rdata_a <= mem[addr_a];
    rdata_b <= mem[addr_b];
  end

  // Two writes to one line in the same cycle would be lost.
  always_ff @(posedge clk) begin
    assert (!(we_a && we_b && addr_a == addr_b))
      else $error("poly_buffer: both ports write line %0d", addr_a);
  end
endmodule
