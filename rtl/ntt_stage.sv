// ntt_stage: one outer loop of the forward negacyclic NTT (Cooley-Tukey),
// as one stage of the pipelined NTT. Stage STAGE has the fixed butterfly
// distance t = 2^STAGE; stages run from STAGE = log N - 1 (first) to 0 (last).
//
// The stage reads a polynomial from the buffer of the stage before it
// (two lines, i.e. four coefficients, per cycle), passes them through its two
// butterflies and writes the results to the same line addresses of its own
// output buffer. The output buffer has two banks (ping-pong), so the stage
// can write one polynomial while the next stage reads the previous one. A
// bank is "full" from the end of the pass that wrote it until the next stage
// releases it; the upstream bank is released when this stage is done with it.
// The access pattern is fixed per stage (pattern 1 for t >= 2, pattern 2 for
// t = 1); only the polynomial length (log N = 10 or 11) is chosen at run time.
// The stage stores only the twiddle factors its loop uses, TF[m .. 2m-1] with
// m = N/(2t); it captures them from the global TF load bus, so cfg.logn must
// be set before the twiddles are loaded.
//
// LEADING stages can be the first active stage (log N - 1 == STAGE). There
// they also do the gadget decomposition: the upstream bank then holds one
// coefficient-domain polynomial and is read dc times, each pass keeping digit
// d of every coefficient, (x >> d*bg_bits) & (B_G - 1); the b polynomial of a
// key-switch instruction is read once, undecomposed. The stage computes the
// tag (first/last/direct) that tells the poly MAC what to do with each
// output polynomial. Other stages copy the tag.
// Timing: one pass takes N/4 + 3 cycles (N/4 reads, one write-back, one
// cycle to hand over the bank, one to start the next pass). The clr input
// resets the bank pointers and digit counter; it is pulsed when N changes,
// while the pipeline is empty, because the first active stage then reads a
// different upstream buffer.
// The stage structure, per-stage TF memory and decomposition in the leading
// stages follow the published design; the bank hand-shake and tags are this
// design's own.
module ntt_stage
  import fhe_pkg::*;
#(
  parameter int unsigned STAGE   = 0,
  parameter bit          LEADING = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,      // re-align bank pointers (idle only)
  input  cfg_t                cfg,
  input  logic                tf_we,
  input  logic [LOGN_MAX-1:0] tf_addr,
  input  coeff_t              tf_data,
  // upstream buffer (read side)
  input  logic [1:0]          up_full,
  input  tag_t [1:0]          up_tag,
  output logic                up_rd_bank,
  output logic [LOGN_MAX-2:0] up_rd_addr0,
  output logic [LOGN_MAX-2:0] up_rd_addr1,
  input  line_t               up_rd_data0,
  input  line_t               up_rd_data1,
  output logic                up_release,
  output logic                up_release_bank,
  // own output buffer, read by the next stage
  output logic [1:0]          dn_full,
  output tag_t [1:0]          dn_tag,
  input  logic                dn_rd_bank,
  input  logic [LOGN_MAX-2:0] dn_rd_addr0,
  input  logic [LOGN_MAX-2:0] dn_rd_addr1,
  output line_t               dn_rd_data0,
  output line_t               dn_rd_data1,
  input  logic                dn_release,
  input  logic                dn_release_bank
);
  localparam int unsigned TFN = 1 << (LOGN_MAX - 1 - STAGE);
  localparam int unsigned TW  = (TFN > 1) ? $clog2(TFN) : 1;
  localparam int unsigned CW  = LOGN_MAX - 2;
  localparam int unsigned AW  = LOGN_MAX - 1;

  // ------------------------------------------------------------ twiddles
  coeff_t tf_mem [TFN];
  logic [LOGN_MAX-1:0] m_cur;
  assign m_cur = LOGN_MAX'(1) << (cfg.logn - 4'(STAGE) - 4'd1);

  always_ff @(posedge clk)
    if (tf_we && tf_addr >= m_cur && {1'b0, tf_addr} < {m_cur, 1'b0})
      tf_mem[TW'(tf_addr - m_cur)] <= tf_data;

  // ------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WB, S_DONE} state_e;
  state_e state;
  logic          ib, ob;             // upstream bank, own bank
  logic [CW-1:0] cnt, c_last;
  logic [3:0]    dig, ndig;
  logic          decomp;             // this stage decomposes
  tag_t          cur_tag;
  logic [1:0]    full_q;
  tag_t [1:0]    tag_q;
  pass_addr_t    pa, pa_q;
  logic          wv;                 // write-back valid

  assign c_last = CW'((32'd1 << (cfg.logn - 4'd2)) - 1);
  assign decomp = LEADING && (cfg.logn == 4'(STAGE + 1));
  assign ndig   = (decomp && !(up_tag[ib].op_ks && up_tag[ib].is_b)) ? cfg.dc : 4'd1;
  assign pa     = pass_addr(cfg.logn, 4'(STAGE), cnt);

  assign up_rd_bank  = ib;
  assign up_rd_addr0 = pa.l0;
  assign up_rd_addr1 = pa.l1;

  always_comb begin
    cur_tag = up_tag[ib];
    if (decomp) begin
      cur_tag.digit  = dig;
      cur_tag.direct = up_tag[ib].op_ks && up_tag[ib].is_b;
      cur_tag.first  = !up_tag[ib].is_b && dig == 4'd0;
      cur_tag.last   = up_tag[ib].is_b && dig == ndig - 4'd1;
    end
  end

  // ---------------------------------------------- decomposition + butterflies
  line_t  d0, d1;
  coeff_t bu [2], bv [2], bs [2], bx [2], by [2];
  logic [7:0] shamt;
  coeff_t     dmask;
  assign shamt = 8'(dig) * 8'(cfg.bg_bits);
  assign dmask = (COEFF_W'(1) << cfg.bg_bits) - 1'b1;

  always_comb begin
    d0 = up_rd_data0;
    d1 = up_rd_data1;
    if (decomp && !(up_tag[ib].op_ks && up_tag[ib].is_b)) begin
      for (int k = 0; k < 2; k++) begin
        d0[k] = (up_rd_data0[k] >> shamt) & dmask;
        d1[k] = (up_rd_data1[k] >> shamt) & dmask;
      end
    end
    if (STAGE == 0) begin   // pattern 2: both inputs of a butterfly in one line
      bu[0] = d0[0]; bv[0] = d0[1]; bs[0] = tf_mem[TW'(pa_q.tf0 - m_cur)];
      bu[1] = d1[0]; bv[1] = d1[1]; bs[1] = tf_mem[TW'(pa_q.tf1 - m_cur)];
    end else begin          // pattern 1: same slot of two lines
      bu[0] = d0[0]; bv[0] = d1[0]; bs[0] = tf_mem[TW'(pa_q.tf0 - m_cur)];
      bu[1] = d0[1]; bv[1] = d1[1]; bs[1] = bs[0];
    end
  end

  for (genvar g = 0; g < 2; g++) begin : g_bf
    butterfly u_bf (.gs(1'b0), .u(bu[g]), .v(bv[g]), .s(bs[g]), .q(cfg.q),
                    .mu(cfg.mu), .qbits(cfg.qbits), .x(bx[g]), .y(by[g]));
  end

  line_t w0, w1;
  always_comb begin
    if (STAGE == 0) begin
      w0 = {by[0], bx[0]};
      w1 = {by[1], bx[1]};
    end else begin
      w0 = {bx[1], bx[0]};
      w1 = {by[1], by[0]};
    end
  end

  // ------------------------------------------------------ output buffer
  logic  we [2];
  logic [AW-1:0] a0 [2], a1 [2];
  line_t r0 [2], r1 [2];
  logic  rd_bank_q;

  for (genvar g = 0; g < 2; g++) begin : g_buf
    always_comb begin
      we[g] = wv && (ob == 1'(g));
      a0[g] = we[g] ? pa_q.l0 : dn_rd_addr0;
      a1[g] = we[g] ? pa_q.l1 : dn_rd_addr1;
    end
    poly_buffer #(.DEPTH(N_MAX/2)) u_buf (
      .clk, .we_a(we[g]), .addr_a(a0[g]), .wdata_a(w0), .rdata_a(r0[g]),
      .we_b(we[g]), .addr_b(a1[g]), .wdata_b(w1), .rdata_b(r1[g]));
  end

  always_ff @(posedge clk) rd_bank_q <= dn_rd_bank;
  assign dn_rd_data0 = rd_bank_q ? r0[1] : r0[0];
  assign dn_rd_data1 = rd_bank_q ? r1[1] : r1[0];
  assign dn_full     = full_q;
  assign dn_tag      = tag_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ib     <= 1'b0;
      ob     <= 1'b0;
      cnt    <= '0;
      dig    <= '0;
      full_q <= '0;
      tag_q  <= '0;
      pa_q   <= '0;
      wv     <= 1'b0;
      up_release      <= 1'b0;
      up_release_bank <= 1'b0;
    end else begin
      up_release <= 1'b0;
      if (clr) begin
        ib  <= 1'b0;
        ob  <= 1'b0;
        dig <= '0;
      end
      if (dn_release) full_q[dn_release_bank] <= 1'b0;
      wv   <= (state == S_RUN);
      pa_q <= pa;
      unique case (state)
        S_IDLE: if (up_full[ib] && !full_q[ob]) begin
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          cnt <= cnt + 1'b1;
          if (cnt == c_last) state <= S_WB;
        end
        S_WB: state <= S_DONE;          // last write-back happens here
        S_DONE: begin
          full_q[ob] <= 1'b1;
          tag_q[ob]  <= cur_tag;
          ob         <= !ob;
          if (dig == ndig - 4'd1) begin
            dig             <= '0;
            up_release      <= 1'b1;
            up_release_bank <= ib;
            ib              <= !ib;
          end else begin
            dig <= dig + 4'd1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
