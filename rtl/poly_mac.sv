// poly_mac: Poly MULT and Poly ACC of the compute pipeline, the inner
// product of the decomposed input RLWE with the key RLWEs.
//
// It reads NTT-domain polynomials from the last NTT stage's buffer, two lines
// (four coefficients) per cycle, and for each polynomial x with key RLWE
// (ka, kb) streamed from the key load FIFO it computes, element-wise mod Q,
//   RLWE x RGSW:  (acc_a, acc_b) += (x*ka, x*kb)     over 2*dc polynomials
//   key switch:   (acc_a, acc_b) -= (x*ka, x*kb)     over the dc digits of a,
//                 acc_b += x                          for the undecomposed b
// The tag of each polynomial says whether it is the first one of the RLWE
// (the accumulator is then overwritten), the last one (the RLWE is then
// streamed out, polynomial a then b, one quad per cycle) and whether it is
// the key-less b term. Eight modular multipliers work in parallel. While the
// result streams out the MAC takes no new polynomial (single accumulator).
// Timing: N/4 + 3 cycles per polynomial when keys never run dry; N/2 cycles
// to stream out. The multiply-accumulate structure (one poly-mult-RLWE unit
// and an RLWE accumulator looped dc times) follows the published design;
// the key-switch sign handling, the single accumulator and the stream format
// are this design's own choices.
module poly_mac
  import fhe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,      // re-align bank pointer (idle only)
  input  cfg_t                cfg,
  // NTT output buffer, read side
  input  logic [1:0]          in_full,
  input  tag_t [1:0]          in_tag,
  output logic                rd_bank,
  output logic [LOGN_MAX-2:0] rd_addr0,
  output logic [LOGN_MAX-2:0] rd_addr1,
  input  line_t               rd_data0,
  input  line_t               rd_data1,
  output logic                release_o,
  output logic                release_bank,
  // key stream
  input  logic                key_valid,
  input  key_beat_t           key_data,
  output logic                key_ready,
  // result stream
  output logic                out_valid,
  output quad_t               out_data,
  output logic                out_is_b,
  output logic                out_last,
  input  logic                out_ready,
  output logic                done
);
  localparam int unsigned D  = N_MAX / 4;
  localparam int unsigned CW = LOGN_MAX - 2;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_WB, S_DONE, S_OUT} state_e;
  state_e state;

  quad_t acc_a [D], acc_b [D];
  quad_t ra, rb;                        // registered accumulator reads
  logic  bank;
  tag_t  tg;
  logic [CW-1:0] cnt, c_last, w_addr, o_cnt;
  logic  issue, w_v, o_v, o_pol, o_last, pol, o_adv;
  key_beat_t key_q;

  assign c_last = CW'((32'd1 << (cfg.logn - 4'd2)) - 1);
  assign tg     = in_tag[bank];
  assign issue  = (state == S_RUN) && (tg.direct || key_valid);
  assign key_ready = issue && !tg.direct;

  assign rd_bank  = bank;
  assign rd_addr0 = {cnt, 1'b0};
  assign rd_addr1 = {cnt, 1'b1};

  // ------------------------------------------------------ multiply-accumulate
  quad_t x, pa, pb, na, nb;
  assign x = {rd_data1, rd_data0};
  for (genvar k = 0; k < 4; k++) begin : g_mul
    modmul u_ma (.a(x[k]), .b(key_q[0][k]), .q(cfg.q), .mu(cfg.mu), .qbits(cfg.qbits), .r(pa[k]));
    modmul u_mb (.a(x[k]), .b(key_q[1][k]), .q(cfg.q), .mu(cfg.mu), .qbits(cfg.qbits), .r(pb[k]));
  end

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      if (tg.direct) begin
        na[k] = ra[k];
        nb[k] = mod_add(rb[k], x[k], cfg.q);
      end else if (tg.first) begin
        na[k] = tg.op_ks ? mod_neg(pa[k], cfg.q) : pa[k];
        nb[k] = tg.op_ks ? mod_neg(pb[k], cfg.q) : pb[k];
      end else if (tg.op_ks) begin
        na[k] = mod_sub(ra[k], pa[k], cfg.q);
        nb[k] = mod_sub(rb[k], pb[k], cfg.q);
      end else begin
        na[k] = mod_add(ra[k], pa[k], cfg.q);
        nb[k] = mod_add(rb[k], pb[k], cfg.q);
      end
    end
  end

  // accumulator memories: read port (RUN / OUT) and write port (write-back)
  logic [CW-1:0] acc_ra;
  always_comb begin
    if (state == S_OUT) acc_ra = o_adv ? cnt : o_cnt;
    else                acc_ra = cnt;
  end
  always_ff @(posedge clk) begin
    if (w_v) begin
      acc_a[w_addr] <= na;
      acc_b[w_addr] <= nb;
    end
    ra <= acc_a[acc_ra];
    rb <= acc_b[acc_ra];
  end

  // --------------------------------------------------------------- output
  assign o_adv     = !o_v || out_ready;
  assign out_valid = o_v;
  assign out_data  = o_pol ? rb : ra;
  assign out_is_b  = o_pol;
  assign out_last  = o_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bank  <= 1'b0;
      cnt   <= '0;
      w_v   <= 1'b0;
      w_addr <= '0;
      key_q <= '0;
      release_o    <= 1'b0;
      release_bank <= 1'b0;
      done  <= 1'b0;
      o_v   <= 1'b0;
      o_pol <= 1'b0;
      o_last <= 1'b0;
      o_cnt <= '0;
      pol   <= 1'b0;
    end else begin
      release_o <= 1'b0;
      done      <= 1'b0;
      w_v       <= issue;
      w_addr    <= cnt;
      if (clr) bank <= 1'b0;
      if (key_ready) key_q <= key_data;
      unique case (state)
        S_IDLE: if (in_full[bank]) begin
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: if (issue) begin
          cnt <= cnt + 1'b1;
          if (cnt == c_last) state <= S_WB;
        end
        S_WB: state <= S_DONE;
        S_DONE: begin
          release_o    <= 1'b1;
          release_bank <= bank;
          bank         <= !bank;
          cnt          <= '0;
          pol          <= 1'b0;
          state        <= tg.last ? S_OUT : S_IDLE;
        end
        S_OUT: if (o_adv) begin
          if (o_v && o_last) begin
            o_v   <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            o_v    <= 1'b1;
            o_pol  <= pol;
            o_cnt  <= cnt;
            o_last <= pol && (cnt == c_last);
            cnt    <= cnt + 1'b1;
            if (cnt == c_last) begin
              cnt <= '0;
              pol <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
