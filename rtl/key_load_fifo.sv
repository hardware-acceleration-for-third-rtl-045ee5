// key_load_fifo: fetches the key each instruction needs from the FPGA DDR
// into a FIFO, ahead of the poly MAC that consumes it, so that DDR latency
// is hidden behind the INTT/NTT work of the same instruction.
//
// For an instruction it reads (2*dc for RLWE x RGSW, dc for key switch) key
// RLWEs, N/4 beats each, from consecutive DDR beat addresses starting at
// inst.key_addr. One key beat carries four coefficients of the key RLWE's
// polynomial a and the same four of polynomial b. Read requests are
// valid/ready; responses come back in order, one per request, and are never
// refused: a request is only issued while the FIFO has room for it and for
// all responses still outstanding. FIFO output is first-word-fall-through.
// The block's purpose and its place follow the published design; the key
// layout in DDR, the request protocol and the depth are this design's own.
module key_load_fifo
  import fhe_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  // instruction from the ROB
  input  logic              inst_valid,
  input  inst_t             inst,
  output logic              inst_ready,
  // DDR read port
  output logic              ddr_req_valid,
  output logic [KEY_AW-1:0] ddr_req_addr,
  input  logic              ddr_req_ready,
  input  logic              ddr_resp_valid,
  input  key_beat_t         ddr_resp_data,
  // key stream to the MAC
  output logic              key_valid,
  output key_beat_t         key_data,
  input  logic              key_ready
);
  key_beat_t mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count, outstanding;
  logic [15:0]   left;            // beats still to request
  logic [KEY_AW-1:0] addr;
  logic req_fire, rfire;

  assign inst_ready    = (left == '0);
  assign ddr_req_valid = (left != '0) && ((count + outstanding) < (AW+1)'(DEPTH));
  assign ddr_req_addr  = addr;
  assign req_fire      = ddr_req_valid && ddr_req_ready;
  assign key_valid     = (count != '0);
  assign key_data      = mem[rp];
  assign rfire         = key_valid && key_ready;

  always_ff @(posedge clk) if (ddr_resp_valid) mem[wp] <= ddr_resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; outstanding <= '0;
      left <= '0; addr <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        addr <= inst.key_addr;
        left <= 16'((inst.op == OP_KS) ? 32'(cfg.dc) : 32'(cfg.dc) * 2) << (cfg.logn - 4'd2);
      end else if (req_fire) begin
        addr <= addr + 1'b1;
        left <= left - 1'b1;
      end
      if (ddr_resp_valid) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rfire)          rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count       <= count + (AW+1)'(ddr_resp_valid) - (AW+1)'(rfire);
      outstanding <= outstanding + (AW+1)'(req_fire) - (AW+1)'(ddr_resp_valid);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  ddr_resp_valid |-> outstanding != '0)
    else $error("key_load_fifo: response without request");
endmodule
