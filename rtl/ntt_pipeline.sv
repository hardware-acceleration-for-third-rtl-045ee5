// ntt_pipeline: the pipelined forward NTT, log N stages in a chain
// (ntt_stage STAGE = LOGN_MAX-1 first, down to 0 last). Each stage handles
// one outer loop, so a new polynomial can enter every pass time (N/4 + 3
// cycles) while log N polynomials are in flight.
//
// The input is the read side of a double-banked coefficient-domain buffer
// (here the poly_subs buffer); the output is the read side of the last
// stage's double-banked buffer, holding NTT-domain polynomials in bit-reversed
// order with their tags. For N = 1024 (cfg.logn = 10) the first stage is
// skipped: a MUX connects the input buffer straight to the second stage,
// which then also does the decomposition. Both of the two leading stages
// therefore carry decomposition logic. Stage chain, skip MUX and leading
// decomposition follow the published design.
module ntt_pipeline
  import fhe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  cfg_t                cfg,
  input  logic                tf_we,
  input  logic [LOGN_MAX-1:0] tf_addr,
  input  coeff_t              tf_data,
  // input buffer (coefficient domain), read side
  input  logic [1:0]          in_full,
  input  tag_t [1:0]          in_tag,
  output logic                in_rd_bank,
  output logic [LOGN_MAX-2:0] in_rd_addr0,
  output logic [LOGN_MAX-2:0] in_rd_addr1,
  input  line_t               in_rd_data0,
  input  line_t               in_rd_data1,
  output logic                in_release,
  output logic                in_release_bank,
  // output buffer (NTT domain), read side
  output logic [1:0]          out_full,
  output tag_t [1:0]          out_tag,
  input  logic                out_rd_bank,
  input  logic [LOGN_MAX-2:0] out_rd_addr0,
  input  logic [LOGN_MAX-2:0] out_rd_addr1,
  output line_t               out_rd_data0,
  output line_t               out_rd_data1,
  input  logic                out_release,
  input  logic                out_release_bank
);
  localparam int unsigned S = LOGN_MAX;
  // index i = stage number; "up" signals are what stage i sees upstream,
  // "dn" signals are stage i's own buffer.
  logic [1:0]          up_full  [S], dn_full  [S];
  tag_t [1:0]          up_tag   [S], dn_tag   [S];
  logic                up_bank  [S], dn_bank  [S];
  logic [LOGN_MAX-2:0] up_a0 [S], up_a1 [S], dn_a0 [S], dn_a1 [S];
  line_t               up_d0 [S], up_d1 [S], dn_d0 [S], dn_d1 [S];
  logic                up_rel [S], up_rel_b [S], dn_rel [S], dn_rel_b [S];
  logic                skip;

  assign skip = (cfg.logn != 4'(LOGN_MAX));

  for (genvar i = 0; i < S; i++) begin : g_st
    ntt_stage #(.STAGE(i), .LEADING(i >= S - 2)) u_stage (
      .clk, .rst_n, .clr, .cfg, .tf_we, .tf_addr, .tf_data,
      .up_full(up_full[i]), .up_tag(up_tag[i]), .up_rd_bank(up_bank[i]),
      .up_rd_addr0(up_a0[i]), .up_rd_addr1(up_a1[i]),
      .up_rd_data0(up_d0[i]), .up_rd_data1(up_d1[i]),
      .up_release(up_rel[i]), .up_release_bank(up_rel_b[i]),
      .dn_full(dn_full[i]), .dn_tag(dn_tag[i]), .dn_rd_bank(dn_bank[i]),
      .dn_rd_addr0(dn_a0[i]), .dn_rd_addr1(dn_a1[i]),
      .dn_rd_data0(dn_d0[i]), .dn_rd_data1(dn_d1[i]),
      .dn_release(dn_rel[i]), .dn_release_bank(dn_rel_b[i]));
  end

  // stages 0 .. S-3 always read the stage above
  for (genvar i = 0; i < S - 2; i++) begin : g_chain
    assign up_full[i]    = dn_full[i+1];
    assign up_tag[i]     = dn_tag[i+1];
    assign dn_bank[i+1]  = up_bank[i];
    assign dn_a0[i+1]    = up_a0[i];
    assign dn_a1[i+1]    = up_a1[i];
    assign up_d0[i]      = dn_d0[i+1];
    assign up_d1[i]      = dn_d1[i+1];
    assign dn_rel[i+1]   = up_rel[i];
    assign dn_rel_b[i+1] = up_rel_b[i];
  end

  // first stage always reads the input buffer (it is idle for N = 1024)
  assign up_full[S-1] = skip ? 2'b00 : in_full;
  assign up_tag[S-1]  = in_tag;
  assign up_d0[S-1]   = in_rd_data0;
  assign up_d1[S-1]   = in_rd_data1;

  // skip MUX in front of the second stage
  assign up_full[S-2]    = skip ? in_full : dn_full[S-1];
  assign up_tag[S-2]     = skip ? in_tag  : dn_tag[S-1];
  assign up_d0[S-2]      = skip ? in_rd_data0 : dn_d0[S-1];
  assign up_d1[S-2]      = skip ? in_rd_data1 : dn_d1[S-1];
  assign dn_bank[S-1]    = up_bank[S-2];
  assign dn_a0[S-1]      = up_a0[S-2];
  assign dn_a1[S-1]      = up_a1[S-2];
  assign dn_rel[S-1]     = !skip && up_rel[S-2];
  assign dn_rel_b[S-1]   = up_rel_b[S-2];

  assign in_rd_bank      = skip ? up_bank[S-2] : up_bank[S-1];
  assign in_rd_addr0     = skip ? up_a0[S-2]   : up_a0[S-1];
  assign in_rd_addr1     = skip ? up_a1[S-2]   : up_a1[S-1];
  assign in_release      = skip ? up_rel[S-2]  : up_rel[S-1];
  assign in_release_bank = skip ? up_rel_b[S-2] : up_rel_b[S-1];

  // last stage to the output
  assign out_full     = dn_full[0];
  assign out_tag      = dn_tag[0];
  assign dn_bank[0]   = out_rd_bank;
  assign dn_a0[0]     = out_rd_addr0;
  assign dn_a1[0]     = out_rd_addr1;
  assign out_rd_data0 = dn_d0[0];
  assign out_rd_data1 = dn_d1[0];
  assign dn_rel[0]    = out_release;
  assign dn_rel_b[0]  = out_release_bank;
endmodule
