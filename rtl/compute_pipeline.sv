// compute_pipeline: the asymmetric compute pipeline, which evaluates
// RLWE x RGSW (bootstrap accumulation, CMUX, LUT) and RLWE substitution with
// key switching on the same hardware.
//
//   input RLWE --> N_INTT x intt_module --(N_INTT:1 MUX)--> poly_subs
//              --> ntt_pipeline (log N stages, decomposition up front)
//              --> poly_mac (x key RLWEs from the key load FIFO) --> output RLWE
//
// The non-pipelined INTT modules each need about log N pass times per RLWE,
// while the pipelined NTT accepts a polynomial every pass time but receives
// 2*dc (or dc + 1) of them per RLWE, so log N / dc INTT modules keep the NTT
// busy. Instructions are dispatched to the INTT modules in round-robin order
// and their outputs are collected in the same order, so RLWEs leave the
// pipeline in program order. An instruction is dispatched when the target
// INTT module is idle and the previous input RLWE has been fully read (the
// input stream goes to one INTT module at a time). Init instructions read no
// input. The structure (INTT bank, MUX, poly subs with bypass, pipelined NTT,
// poly MAC, key input) follows the published design; dispatch order and
// hand-shakes are this design's own.
module compute_pipeline
  import fhe_pkg::*;
#(
  parameter int unsigned NI = N_INTT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  input  logic                tf_we_fwd,
  input  logic                tf_we_inv,
  input  logic [LOGN_MAX-1:0] tf_addr,
  input  coeff_t              tf_data,
  // instructions from the ROB
  input  logic                inst_valid,
  input  inst_t               inst,
  output logic                inst_ready,
  // input RLWE stream
  input  logic                in_valid,
  input  quad_t               in_data,
  output logic                in_ready,
  // keys
  input  logic                key_valid,
  input  key_beat_t           key_data,
  output logic                key_ready,
  // output RLWE stream
  output logic                out_valid,
  output quad_t               out_data,
  output logic                out_last,
  input  logic                out_ready,
  output logic                done
);
  localparam int unsigned SW = (NI > 1) ? $clog2(NI) : 1;

  // ----------------------------------------------------------- INTT bank
  logic  i_inst_valid [NI], i_inst_ready [NI], i_in_valid [NI], i_in_ready [NI];
  logic  i_out_valid [NI], i_out_is_b [NI], i_out_last [NI], i_out_ready [NI];
  quad_t i_out_data [NI];
  inst_t i_out_inst [NI];

  logic [SW-1:0] disp_sel, load_sel, coll_sel;
  logic [15:0]   in_left;          // input beats still owed to load_sel

  for (genvar g = 0; g < NI; g++) begin : g_intt
    intt_module u_intt (
      .clk, .rst_n, .cfg,
      .tf_we(tf_we_inv), .tf_addr, .tf_data,
      .inst_valid(i_inst_valid[g]), .inst, .inst_ready(i_inst_ready[g]),
      .in_valid(i_in_valid[g]), .in_data, .in_ready(i_in_ready[g]),
      .out_valid(i_out_valid[g]), .out_data(i_out_data[g]), .out_is_b(i_out_is_b[g]),
      .out_last(i_out_last[g]), .out_inst(i_out_inst[g]), .out_ready(i_out_ready[g]));
    assign i_inst_valid[g] = inst_valid && (in_left == '0) && (disp_sel == SW'(g));
    assign i_in_valid[g]   = in_valid && (in_left != '0) && (load_sel == SW'(g));
  end

  assign inst_ready = i_inst_ready[disp_sel] && (in_left == '0);
  assign in_ready   = (in_left != '0) && i_in_ready[load_sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_sel <= '0;
      load_sel <= '0;
      in_left  <= '0;
    end else begin
      if (inst_valid && inst_ready) begin
        disp_sel <= (disp_sel == SW'(NI - 1)) ? '0 : disp_sel + 1'b1;
        load_sel <= disp_sel;
        if (!inst.init) in_left <= 16'(32'd1 << (cfg.logn - 4'd1));
      end else if (in_valid && in_ready) begin
        in_left <= in_left - 1'b1;
      end
    end
  end

  // ------------------------------------------------- N_INTT:1 output MUX
  logic  s_valid, s_ready, s_is_b, s_last;
  quad_t s_data;
  inst_t s_inst;
  assign s_valid = i_out_valid[coll_sel];
  assign s_data  = i_out_data[coll_sel];
  assign s_is_b  = i_out_is_b[coll_sel];
  assign s_last  = i_out_last[coll_sel];
  assign s_inst  = i_out_inst[coll_sel];
  for (genvar g = 0; g < NI; g++) begin : g_rdy
    assign i_out_ready[g] = s_ready && (coll_sel == SW'(g));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coll_sel <= '0;
    else if (s_valid && s_ready && s_last)
      coll_sel <= (coll_sel == SW'(NI - 1)) ? '0 : coll_sel + 1'b1;
  end

  // ------------------------------------------- bank re-alignment on N change
  // Changing N moves the reader of the poly-subs buffer between the first and
  // the second NTT stage; all double-buffer bank pointers are cleared so that
  // writer and reader agree again. N may only change while the pipe is empty.
  logic [3:0] logn_q;
  logic       clr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) logn_q <= 4'(LOGN_MAX);
    else        logn_q <= cfg.logn;
  end
  assign clr = (logn_q != cfg.logn);

  // ------------------------------------------------------------ poly subs
  logic [1:0]          sb_full;
  tag_t [1:0]          sb_tag;
  logic                sb_bank, sb_rel, sb_rel_b;
  logic [LOGN_MAX-2:0] sb_a0, sb_a1;
  line_t               sb_d0, sb_d1;

  poly_subs u_subs (
    .clk, .rst_n, .clr, .cfg,
    .in_valid(s_valid), .in_data(s_data), .in_is_b(s_is_b), .in_last(s_last),
    .in_inst(s_inst), .in_ready(s_ready),
    .full(sb_full), .tag(sb_tag), .rd_bank(sb_bank), .rd_addr0(sb_a0), .rd_addr1(sb_a1),
    .rd_data0(sb_d0), .rd_data1(sb_d1), .release_i(sb_rel), .release_bank(sb_rel_b));

  // ---------------------------------------------------------- NTT pipeline
  logic [1:0]          nt_full;
  tag_t [1:0]          nt_tag;
  logic                nt_bank, nt_rel, nt_rel_b;
  logic [LOGN_MAX-2:0] nt_a0, nt_a1;
  line_t               nt_d0, nt_d1;

  ntt_pipeline u_ntt (
    .clk, .rst_n, .clr, .cfg, .tf_we(tf_we_fwd), .tf_addr, .tf_data,
    .in_full(sb_full), .in_tag(sb_tag), .in_rd_bank(sb_bank),
    .in_rd_addr0(sb_a0), .in_rd_addr1(sb_a1), .in_rd_data0(sb_d0), .in_rd_data1(sb_d1),
    .in_release(sb_rel), .in_release_bank(sb_rel_b),
    .out_full(nt_full), .out_tag(nt_tag), .out_rd_bank(nt_bank),
    .out_rd_addr0(nt_a0), .out_rd_addr1(nt_a1), .out_rd_data0(nt_d0), .out_rd_data1(nt_d1),
    .out_release(nt_rel), .out_release_bank(nt_rel_b));

  // -------------------------------------------------------------- poly MAC
  logic out_is_b;
  poly_mac u_mac (
    .clk, .rst_n, .clr, .cfg,
    .in_full(nt_full), .in_tag(nt_tag), .rd_bank(nt_bank), .rd_addr0(nt_a0), .rd_addr1(nt_a1),
    .rd_data0(nt_d0), .rd_data1(nt_d1), .release_o(nt_rel), .release_bank(nt_rel_b),
    .key_valid, .key_data, .key_ready,
    .out_valid, .out_data, .out_is_b, .out_last, .out_ready, .done);
endmodule
