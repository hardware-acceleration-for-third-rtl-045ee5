// accel_top: the FHE accelerator as it sits in the FPGA: AXI-Lite
// configuration port, in/out RLWE FIFO, output RLWE FIFO, key load FIFO,
// instruction buffer (ROB) and the compute pipeline.
//
// The host shell, DMA engine, AXI crossbar and DDR controller of the FPGA
// platform are not part of this RTL; their connections are brought out as
// plain ports: an RLWE input stream and an RLWE output stream (what the DMA
// reads and writes through the crossbar) and a key read port towards DDR.
//
// Two modes route the results (ctrl register bit 0):
//   RLWE mode (0)      the in/out FIFO only feeds the pipeline; results go to
//                      the output FIFO and from there to the host.
//   bootstrap mode (1) the output FIFO is off; results are written back into
//                      the in/out FIFO, so an accumulator circulates through
//                      the pipeline once per instruction (n times for a
//                      bootstrap, its first pass starting from the init block).
// Setting drain (ctrl bit 1) sends the in/out FIFO to the host instead of
// the pipeline, to stream the accumulators out after the loop. In bootstrap
// mode the pipeline's write-back takes priority over host writes.
// The mode switch and the FIFO arrangement follow the published design; the
// drain bit and the write priority are this design's own.
module accel_top
  import fhe_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite configuration port
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [7:0]        s_axil_awaddr,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  input  logic [31:0]       s_axil_wdata,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  output logic [1:0]        s_axil_bresp,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  input  logic [7:0]        s_axil_araddr,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  // RLWE streams to / from the host DMA
  input  logic              host_in_valid,
  input  quad_t             host_in_data,
  output logic              host_in_ready,
  output logic              host_out_valid,
  output quad_t             host_out_data,
  input  logic              host_out_ready,
  // key reads from the FPGA DDR
  output logic              ddr_req_valid,
  output logic [KEY_AW-1:0] ddr_req_addr,
  input  logic              ddr_req_ready,
  input  logic              ddr_resp_valid,
  input  key_beat_t         ddr_resp_data
);
  localparam int unsigned FIFO_DEPTH = 12 * N_MAX / 2;
  localparam int unsigned FAW        = $clog2(FIFO_DEPTH);

  cfg_t  cfg;
  logic  mode_boot, drain;
  logic  push_valid, push_ready;
  inst_t push_inst;
  logic  tf_we_fwd, tf_we_inv;
  logic [LOGN_MAX-1:0] tf_addr;
  coeff_t tf_data;
  logic [FAW:0] io_count, of_count;
  logic [4:0]   rob_count;

  config_axil u_cfg (
    .clk, .rst_n,
    .awvalid(s_axil_awvalid), .awready(s_axil_awready), .awaddr(s_axil_awaddr),
    .wvalid(s_axil_wvalid), .wready(s_axil_wready), .wdata(s_axil_wdata),
    .bvalid(s_axil_bvalid), .bready(s_axil_bready), .bresp(s_axil_bresp),
    .arvalid(s_axil_arvalid), .arready(s_axil_arready), .araddr(s_axil_araddr),
    .rvalid(s_axil_rvalid), .rready(s_axil_rready), .rdata(s_axil_rdata), .rresp(s_axil_rresp),
    .cfg, .mode_boot, .drain,
    .inst_valid(push_valid), .inst(push_inst), .inst_ready(push_ready),
    .tf_we_fwd, .tf_we_inv, .tf_addr, .tf_data,
    .st_inout(32'(io_count)), .st_output(32'(of_count)), .st_rob(32'(rob_count)));

  // ------------------------------------------------------------------ ROB
  logic  disp_valid, disp_ready, kq_valid, kq_ready, retire;
  inst_t disp_inst, kq_inst;

  rob #(.DEPTH(16)) u_rob (
    .clk, .rst_n,
    .push_valid, .push_inst, .push_ready,
    .disp_valid, .disp_inst, .disp_ready,
    .key_valid(kq_valid), .key_inst(kq_inst), .key_ready(kq_ready),
    .retire, .in_flight(rob_count));

  // ------------------------------------------------------------- key load
  logic      key_valid, key_ready;
  key_beat_t key_data;

  key_load_fifo u_key (
    .clk, .rst_n, .cfg,
    .inst_valid(kq_valid), .inst(kq_inst), .inst_ready(kq_ready),
    .ddr_req_valid, .ddr_req_addr, .ddr_req_ready, .ddr_resp_valid, .ddr_resp_data,
    .key_valid, .key_data, .key_ready);

  // ----------------------------------------------------------- RLWE FIFOs
  logic  io_wv, io_wr, io_rv, io_rr, of_wv, of_wr, of_rv, of_rr;
  quad_t io_wd, io_rd, of_rd;
  logic  p_in_valid, p_in_ready, p_out_valid, p_out_ready, p_out_last;
  quad_t p_out_data;

  rlwe_fifo #(.DEPTH(FIFO_DEPTH)) u_inout (
    .clk, .rst_n, .wr_valid(io_wv), .wr_data(io_wd), .wr_ready(io_wr),
    .rd_valid(io_rv), .rd_data(io_rd), .rd_ready(io_rr), .count(io_count));

  rlwe_fifo #(.DEPTH(FIFO_DEPTH)) u_output (
    .clk, .rst_n, .wr_valid(of_wv), .wr_data(p_out_data), .wr_ready(of_wr),
    .rd_valid(of_rv), .rd_data(of_rd), .rd_ready(of_rr), .count(of_count));

  // mode routing
  always_comb begin
    // in/out FIFO write side: pipeline result (bootstrap) or host
    if (mode_boot && p_out_valid) begin
      io_wv         = 1'b1;
      io_wd         = p_out_data;
      host_in_ready = 1'b0;
    end else begin
      io_wv         = host_in_valid;
      io_wd         = host_in_data;
      host_in_ready = io_wr;
    end
    of_wv       = !mode_boot && p_out_valid;
    p_out_ready = mode_boot ? io_wr : of_wr;
    // in/out FIFO read side: pipeline, or host when draining
    p_in_valid  = io_rv && !drain;
    io_rr       = drain ? host_out_ready : p_in_ready;
    // host output
    host_out_valid = drain ? io_rv : of_rv;
    host_out_data  = drain ? io_rd : of_rd;
    of_rr          = !drain && host_out_ready;
  end

  // ------------------------------------------------------ compute pipeline
  compute_pipeline u_pipe (
    .clk, .rst_n, .cfg, .tf_we_fwd, .tf_we_inv, .tf_addr, .tf_data,
    .inst_valid(disp_valid), .inst(disp_inst), .inst_ready(disp_ready),
    .in_valid(p_in_valid), .in_data(io_rd), .in_ready(p_in_ready),
    .key_valid, .key_data, .key_ready,
    .out_valid(p_out_valid), .out_data(p_out_data), .out_last(p_out_last),
    .out_ready(p_out_ready), .done(retire));
endmodule
