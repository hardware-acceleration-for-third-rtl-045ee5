// rlwe_fifo: RLWE FIFO of the accelerator, a synchronous first-word-fall-
// through FIFO of quad beats (four coefficients). An RLWE of length N is
// N/2 beats, polynomial a then b. The default depth holds twelve RLWEs of
// N = 2048, the number of ciphertexts the pipeline can work on at once in
// bootstrap mode. Two instances exist: the in/out FIFO and the output FIFO;
// which one the pipeline writes depends on the mode and is decided outside.
// The occupancy (in beats) is readable by the host through the config port.
// Full-word-fall-through read: rd_data is valid whenever rd_valid is high and
// is consumed by rd_ready. Depth is this design's reading of the published
// parallelism; the FIFO itself is only named there.
module rlwe_fifo
  import fhe_pkg::*;
#(
  parameter int unsigned DEPTH = 12 * N_MAX / 2,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  input  quad_t       wr_data,
  output logic        wr_ready,
  output logic        rd_valid,
  output quad_t       rd_data,
  input  logic        rd_ready,
  output logic [AW:0] count
);
  quad_t mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic wfire, rfire;

  assign wr_ready = (count < (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign wfire    = wr_valid && wr_ready;
  assign rfire    = rd_valid && rd_ready;
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) if (wfire) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wfire) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rfire) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wfire) - (AW+1)'(rfire);
    end
  end
endmodule
