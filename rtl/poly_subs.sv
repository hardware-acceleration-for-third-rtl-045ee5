// poly_subs: the substitution X -> X^k of RLWE substitution, together with
// the double-banked buffer that feeds the pipelined NTT.
//
// Coefficient-domain polynomials arrive as a stream of quads (four
// consecutive coefficients per beat, polynomial a then b). Coefficient i is
// written to position e = i*k mod 2N, negated when e >= N (because X^N = -1)
// and stored at e - N. For RLWE x RGSW instructions, or k = 1, the block is
// bypassed (e = i). Because k is odd, the four positions of one beat are
// distinct modulo 4, so the buffer is split into four sub-banks by position
// mod 4 and one beat is written per cycle with one write per sub-bank.
// The read side looks like any stage buffer: two line reads per cycle with
// one cycle latency, full flags and tags per bank, release by the consumer.
// Each polynomial goes to the next bank in turn; the input stalls (in_ready
// low) while that bank is still full.
// The function (substitution with a bypass ahead of the NTT) follows the
// published design; the banked storage that makes one beat per cycle possible
// is this design's own.
module poly_subs
  import fhe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,      // re-align bank pointer (idle only)
  input  cfg_t                cfg,
  // input stream
  input  logic                in_valid,
  input  quad_t               in_data,
  input  logic                in_is_b,
  input  logic                in_last,
  input  inst_t               in_inst,
  output logic                in_ready,
  // read side
  output logic [1:0]          full,
  output tag_t [1:0]          tag,
  input  logic                rd_bank,
  input  logic [LOGN_MAX-2:0] rd_addr0,
  input  logic [LOGN_MAX-2:0] rd_addr1,
  output line_t               rd_data0,
  output line_t               rd_data1,
  input  logic                release_i,
  input  logic                release_bank
);
  localparam int unsigned D  = N_MAX / 4;
  localparam int unsigned DW = $clog2(D);
  localparam int unsigned CW = LOGN_MAX - 2;


  logic          wb;                  // bank being written
  logic [CW-1:0] cnt, c_last;
  logic [1:0]    full_q;
  tag_t [1:0]    tag_q;
  logic          fire, bypass;

  assign c_last   = CW'((32'd1 << (cfg.logn - 4'd2)) - 1);
  assign in_ready = !full_q[wb];
  assign fire     = in_valid && in_ready;
  assign bypass   = (in_inst.op == OP_RGSW) || (in_inst.subs_k == (LOGN_MAX+1)'(1));
  assign full     = full_q;
  assign tag      = tag_q;

  // target position and sign of each coefficient of the beat
  logic [LOGN_MAX:0]   e    [4];
  logic [LOGN_MAX-1:0] pos  [4];
  coeff_t              val  [4];
  logic [LOGN_MAX:0]   nmask;
  always_comb begin
    nmask = ((LOGN_MAX+1)'(1) << (cfg.logn + 4'd1)) - 1'b1;   // mod 2N
    for (int k = 0; k < 4; k++) begin
      logic [LOGN_MAX-1:0] i;
      logic [2*LOGN_MAX+1:0] prod;
      i    = LOGN_MAX'({cnt, 2'(k)});
      prod = (2*LOGN_MAX+2)'(i) * (2*LOGN_MAX+2)'(in_inst.subs_k);
      e[k] = bypass ? (LOGN_MAX+1)'(i) : (LOGN_MAX+1)'(prod) & nmask;
      if (e[k] >= ((LOGN_MAX+1)'(1) << cfg.logn)) begin
        pos[k] = LOGN_MAX'(e[k] - ((LOGN_MAX+1)'(1) << cfg.logn));
        val[k] = mod_neg(in_data[k], cfg.q);
      end else begin
        pos[k] = LOGN_MAX'(e[k]);
        val[k] = in_data[k];
      end
    end
  end

  // one write per sub-bank
  logic          swe [4];
  logic [DW-1:0] swa [4];
  coeff_t        swd [4];
  always_comb begin
    for (int s = 0; s < 4; s++) begin
      swe[s] = 1'b0; swa[s] = '0; swd[s] = '0;
      for (int k = 0; k < 4; k++)
        if (pos[k][1:0] == 2'(s)) begin
          swe[s] = fire;
          swa[s] = DW'(pos[k] >> 2);
          swd[s] = val[k];
        end
    end
  end

  // reads: line l -> coefficients 2l (sub-bank 2*l[0]) and 2l+1.
  // Eight separate RAMs (bank x sub-bank), each with one write port and two
  // registered read ports; the bank is selected after the read.
  logic       p0_q, p1_q, rbank_q;
  coeff_t     qa [2][4], qb [2][4];  // per-RAM read data, line 0 / line 1
  coeff_t     ra [4], rb [4];
  for (genvar g = 0; g < 2; g++) begin : g_bank
    for (genvar h = 0; h < 4; h++) begin : g_sub
      coeff_t m [D];
      always_ff @(posedge clk) begin
        if (swe[h] && wb == 1'(g)) m[swa[h]] <= swd[h];
        qa[g][h] <= m[DW'(rd_addr0 >> 1)];
        qb[g][h] <= m[DW'(rd_addr1 >> 1)];
      end
    end
  end
  always_ff @(posedge clk) begin
    p0_q    <= rd_addr0[0];
    p1_q    <= rd_addr1[0];
    rbank_q <= rd_bank;
  end
  always_comb
    for (int h = 0; h < 4; h++) begin
      ra[h] = rbank_q ? qa[1][h] : qa[0][h];
      rb[h] = rbank_q ? qb[1][h] : qb[0][h];
    end
  assign rd_data0 = p0_q ? {ra[3], ra[2]} : {ra[1], ra[0]};
  assign rd_data1 = p1_q ? {rb[3], rb[2]} : {rb[1], rb[0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb     <= 1'b0;
      cnt    <= '0;
      full_q <= '0;
      tag_q  <= '0;
    end else begin
      if (clr) wb <= 1'b0;
      if (release_i) full_q[release_bank] <= 1'b0;
      if (fire) begin
        cnt <= cnt + 1'b1;
        if (cnt == c_last) begin
          cnt              <= '0;
          full_q[wb]       <= 1'b1;
          tag_q[wb]        <= '0;
          tag_q[wb].op_ks  <= (in_inst.op == OP_KS);
          tag_q[wb].is_b   <= in_is_b;
          wb               <= !wb;
        end
      end
    end
  end

  // the stream must mark the last beat of polynomial b
  a_last: assert property (@(posedge clk) disable iff (!rst_n)
                           fire |-> in_last == (in_is_b && cnt == c_last))
    else $error("poly_subs: in_last out of place");
endmodule
