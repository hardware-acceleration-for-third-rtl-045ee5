// rob: instruction buffer at the head of the compute pipeline.
//
// The host pushes instructions (one per RLWE pass through the pipeline). Each
// entry is read by two consumers, each with its own pointer, in program
// order: the INTT dispatcher and the key loader (which therefore runs ahead
// and prefetches keys). An entry is retired when the poly MAC has streamed
// out the result of the oldest instruction. Because the pipeline keeps
// instructions in order, no reordering is ever needed; the buffer bounds the
// number of instructions in flight and reports it to the host.
// The ROB is only named in the published design; this in-order structure
// with two read pointers is this design's own reading of it.
module rob
  import fhe_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_valid,
  input  inst_t       push_inst,
  output logic        push_ready,
  // dispatch to the INTT modules
  output logic        disp_valid,
  output inst_t       disp_inst,
  input  logic        disp_ready,
  // key loader
  output logic        key_valid,
  output inst_t       key_inst,
  input  logic        key_ready,
  // retire (result of the oldest instruction left the MAC)
  input  logic        retire,
  output logic [AW:0] in_flight
);
  inst_t mem [DEPTH];
  logic [AW:0] wp, dp, kp, rp;     // one wrap bit each

  assign in_flight  = wp - rp;
  assign push_ready = (in_flight != (AW+1)'(DEPTH));
  assign disp_valid = (dp != wp);
  assign key_valid  = (kp != wp);
  assign disp_inst  = mem[dp[AW-1:0]];
  assign key_inst   = mem[kp[AW-1:0]];

  always_ff @(posedge clk) if (push_valid && push_ready) mem[wp[AW-1:0]] <= push_inst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; dp <= '0; kp <= '0; rp <= '0;
    end else begin
      if (push_valid && push_ready) wp <= wp + 1'b1;
      if (disp_valid && disp_ready) dp <= dp + 1'b1;
      if (key_valid && key_ready)   kp <= kp + 1'b1;
      if (retire)                   rp <= rp + 1'b1;
    end
  end

  a_retire: assert property (@(posedge clk) disable iff (!rst_n)
                             retire |-> (rp != dp))
    else $error("rob: retire of an instruction never dispatched");
endmodule
