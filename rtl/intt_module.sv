// intt_module: non-pipelined inverse NTT of one RLWE ciphertext (two
// polynomials) with two butterflies, two time-interleaved polynomial
// buffers, its own full copy of the inverse twiddle factors and an init
// block for the bootstrap accumulator.
//
// Operation for one instruction (inst_valid while idle):
//   LOAD  The first outer loop (t = 1) is computed straight from the input
//         stream: every beat (four coefficients) feeds both butterflies and
//         the results go to buffer 0 (polynomial a, first N/4 beats) or
//         buffer 1 (polynomial b, next N/4 beats).
//   INIT  (inst.init) instead of LOAD: the init block writes the accumulator
//         (a = 0, b = X^r * test vector) into the buffers; no INTT passes.
//   PASS  Outer loops t = 2 .. N/2 (Gentleman-Sande). Steps alternate between
//         the two buffers: in one cycle buffer p is read while buffer !p is
//         written with the butterfly results of the previous cycle, so the two
//         butterflies work every cycle although each buffer only reads or
//         writes in a given cycle. Pattern 1 (t >= 2) pairs the same slot of
//         two lines, pattern 2 (t = 1, LOAD only) pairs the two slots of one
//         line; the data MUXes in front of the butterflies select between them.
//   OUT   Polynomial a then b, one beat per cycle, each coefficient scaled by
//         N^-1 (the final loop of the INTT) on the way out; init values are
//         sent unscaled. Output is a valid/ready stream with the instruction.
// Latency for N = 2^logn, counted from the cycle the instruction is taken to
// the cycle the last beat leaves: (logn+1)*N/2 + 3 cycles when the streams
// never stall (LOAD N/2, PASS (logn-1)*N/2, one drain cycle, OUT N/2). The INTT algorithm and the buffer
// organisation follow the published design; performing the N^-1 scaling while
// streaming out and the exact state sequence are this design's choices.
module intt_module
  import fhe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_t                cfg,
  // inverse twiddle factor load: TF[i] = psi^-bitrev(i)
  input  logic                tf_we,
  input  logic [LOGN_MAX-1:0] tf_addr,
  input  coeff_t              tf_data,
  // instruction
  input  logic                inst_valid,
  input  inst_t               inst,
  output logic                inst_ready,
  // input RLWE stream (NTT domain)
  input  logic                in_valid,
  input  quad_t               in_data,
  output logic                in_ready,
  // output RLWE stream (coefficient domain)
  output logic                out_valid,
  output quad_t               out_data,
  output logic                out_is_b,
  output logic                out_last,
  output inst_t               out_inst,
  input  logic                out_ready
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_INIT, S_PASS, S_DRAIN, S_OUT} state_e;
  state_e state;

  localparam int unsigned CW = LOGN_MAX - 2;   // step counter width (N/4 steps)
  localparam int unsigned AW = LOGN_MAX - 1;   // buffer line address width

  inst_t             inst_q;
  logic [CW-1:0]     cnt;       // beat / step within a polynomial
  logic              pol;       // polynomial being read
  logic [3:0]        lt;        // log2 t of the current pass
  logic [CW-1:0]     c_last;
  logic [CW-1:0]     o_cnt;     // beat on display in OUT
  coeff_t            tf_mem [N_MAX];

  always_ff @(posedge clk) if (tf_we) tf_mem[tf_addr] <= tf_data;

  assign c_last = CW'((32'd1 << (cfg.logn - 4'd2)) - 1);

  // -------------------------------------------------------------- buffers
  logic  we_a [2], we_b [2];
  logic [AW-1:0] addr_a [2], addr_b [2];
  line_t wd_a [2], wd_b [2], rd_a [2], rd_b [2];

  for (genvar g = 0; g < 2; g++) begin : g_buf
    poly_buffer #(.DEPTH(N_MAX/2)) u_buf (
      .clk, .we_a(we_a[g]), .addr_a(addr_a[g]), .wdata_a(wd_a[g]), .rdata_a(rd_a[g]),
      .we_b(we_b[g]), .addr_b(addr_b[g]), .wdata_b(wd_b[g]), .rdata_b(rd_b[g]));
  end

  // ----------------------------------------------------------- butterflies
  coeff_t bu [2], bv [2], bs [2], bx [2], by [2];
  for (genvar g = 0; g < 2; g++) begin : g_bf
    butterfly u_bf (.gs(1'b1), .u(bu[g]), .v(bv[g]), .s(bs[g]), .q(cfg.q),
                    .mu(cfg.mu), .qbits(cfg.qbits), .x(bx[g]), .y(by[g]));
  end

  // delayed read information for the write-back half of a PASS step
  logic       wb_v, wb_pol;
  pass_addr_t wb_pa;
  pass_addr_t rd_pa, ld_pa;
  quad_t      init_q;

  assign rd_pa = pass_addr(cfg.logn, lt, cnt);
  assign ld_pa = pass_addr(cfg.logn, 4'd0, cnt);

  init_blk u_init (.logn(cfg.logn), .lwe_logq(cfg.lwe_logq), .b_lwe(inst_q.b_lwe),
                   .init_val(cfg.init_val), .q(cfg.q), .beat(cnt), .b_quad(init_q));

  line_t l0, l1;
  logic  in_fire, out_adv, rd_v;

  assign in_ready   = (state == S_LOAD);
  assign in_fire    = in_valid && in_ready;
  assign inst_ready = (state == S_IDLE);

  // butterfly operand MUX: pattern 2 in LOAD, pattern 1 in PASS
  always_comb begin
    l0 = wb_pol ? rd_a[1] : rd_a[0];
    l1 = wb_pol ? rd_b[1] : rd_b[0];
    if (state == S_LOAD) begin
      bu[0] = in_data[0]; bv[0] = in_data[1]; bs[0] = tf_mem[ld_pa.tf0];
      bu[1] = in_data[2]; bv[1] = in_data[3]; bs[1] = tf_mem[ld_pa.tf1];
    end else begin
      bu[0] = l0[0]; bv[0] = l1[0]; bs[0] = tf_mem[wb_pa.tf0];
      bu[1] = l0[1]; bv[1] = l1[1]; bs[1] = tf_mem[wb_pa.tf1];
    end
  end

  // buffer port MUX
  always_comb begin
    for (int g = 0; g < 2; g++) begin
      we_a[g] = 1'b0; we_b[g] = 1'b0;
      addr_a[g] = '0; addr_b[g] = '0;
      wd_a[g] = '0;   wd_b[g] = '0;
    end
    unique case (state)
      S_LOAD: begin
        for (int g = 0; g < 2; g++) begin
          we_a[g]   = in_fire && (pol == 1'(g));
          we_b[g]   = in_fire && (pol == 1'(g));
          addr_a[g] = ld_pa.l0;
          addr_b[g] = ld_pa.l1;
          wd_a[g]   = {by[0], bx[0]};
          wd_b[g]   = {by[1], bx[1]};
        end
      end
      S_INIT: begin
        we_a[0] = 1'b1; we_b[0] = 1'b1;
        we_a[1] = 1'b1; we_b[1] = 1'b1;
        for (int g = 0; g < 2; g++) begin
          addr_a[g] = {cnt, 1'b0};
          addr_b[g] = {cnt, 1'b1};
        end
        wd_a[1] = {init_q[1], init_q[0]};
        wd_b[1] = {init_q[3], init_q[2]};
      end
      S_PASS, S_DRAIN: begin
        for (int g = 0; g < 2; g++) begin
          if (wb_v && wb_pol == 1'(g)) begin
            we_a[g] = 1'b1; we_b[g] = 1'b1;
            addr_a[g] = wb_pa.l0; addr_b[g] = wb_pa.l1;
            wd_a[g] = {bx[1], bx[0]};
            wd_b[g] = {by[1], by[0]};
          end else begin
            addr_a[g] = rd_pa.l0; addr_b[g] = rd_pa.l1;
          end
        end
      end
      S_OUT: begin
        // while the consumer stalls, re-read the beat on display
        for (int g = 0; g < 2; g++) begin
          addr_a[g] = out_adv ? {cnt, 1'b0} : {o_cnt, 1'b0};
          addr_b[g] = out_adv ? {cnt, 1'b1} : {o_cnt, 1'b1};
        end
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ output path
  logic  o_pol;
  logic  o_last;
  line_t o0, o1;
  quad_t o_raw;
  assign o0    = o_pol ? rd_a[1] : rd_a[0];
  assign o1    = o_pol ? rd_b[1] : rd_b[0];
  assign o_raw = {o1[1], o1[0], o0[1], o0[0]};

  for (genvar k = 0; k < 4; k++) begin : g_scale
    coeff_t sc;
    modmul u_sc (.a(o_raw[k]), .b(cfg.n_inv), .q(cfg.q), .mu(cfg.mu), .qbits(cfg.qbits), .r(sc));
    assign out_data[k] = inst_q.init ? o_raw[k] : sc;
  end

  assign out_valid = rd_v;
  assign out_is_b  = o_pol;
  assign out_last  = o_last;
  assign out_inst  = inst_q;
  assign out_adv   = !rd_v || out_ready;     // may present the next read

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      inst_q <= '0;
      cnt    <= '0;
      pol    <= 1'b0;
      lt     <= 4'd1;
      wb_v   <= 1'b0;
      wb_pol <= 1'b0;
      wb_pa  <= '0;
      rd_v   <= 1'b0;
      o_pol  <= 1'b0;
      o_last <= 1'b0;
      o_cnt  <= '0;
    end else begin
      wb_v <= 1'b0;
      unique case (state)
        S_IDLE: if (inst_valid) begin
          inst_q <= inst;
          cnt    <= '0;
          pol    <= 1'b0;
          lt     <= 4'd1;
          state  <= inst.init ? S_INIT : S_LOAD;
        end
        S_LOAD: if (in_fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == c_last) begin
            cnt <= '0;
            pol <= !pol;
            if (pol) state <= S_PASS;
          end
        end
        S_INIT: begin
          cnt <= cnt + 1'b1;
          if (cnt == c_last) begin
            cnt   <= '0;
            state <= S_OUT;
          end
        end
        S_PASS: begin
          wb_v   <= 1'b1;
          wb_pol <= pol;
          wb_pa  <= rd_pa;
          pol    <= !pol;
          if (pol) begin
            cnt <= cnt + 1'b1;
            if (cnt == c_last) begin
              cnt <= '0;
              lt  <= lt + 4'd1;
              if (lt == cfg.logn - 4'd1) state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin                      // last write-back of polynomial b
          cnt   <= '0;
          pol   <= 1'b0;
          state <= S_OUT;
        end
        S_OUT: begin
          if (out_adv) begin
            if (rd_v && o_last) begin
              rd_v  <= 1'b0;
              state <= S_IDLE;
            end else begin
              rd_v   <= 1'b1;
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
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
