// ntt_pipeline_tb: checks the pipelined NTT with its leading decomposition.
// The testbench models the input buffer (two banks, one-cycle read) and the
// consumer of the output buffer. It sends coefficient-domain polynomials
// tagged as a/b of RLWE x RGSW (dc digits each) and of key switch (a: dc
// digits, b: one undecomposed pass), for N = 2048 and N = 1024 (first stage
// skipped), and compares every output polynomial and its tag with the
// reference NTT of the expected digit. It also checks the steady-state rate:
// one polynomial per N/4 + 3 cycles.
module ntt_pipeline_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  cfg_t cfg;
  logic tf_we = 0, clr = 0;
  logic [LOGN_MAX-1:0] tf_addr = '0;
  coeff_t tf_data = '0;
  logic [1:0] in_full = '0;
  tag_t [1:0] in_tag = '0;
  logic in_rd_bank, in_release, in_release_bank;
  logic [LOGN_MAX-2:0] in_rd_addr0, in_rd_addr1;
  line_t in_rd_data0, in_rd_data1;
  logic [1:0] out_full;
  tag_t [1:0] out_tag;
  logic out_rd_bank = 0, out_release = 0, out_release_bank = 0;
  logic [LOGN_MAX-2:0] out_rd_addr0 = '0, out_rd_addr1 = '0;
  line_t out_rd_data0, out_rd_data1;

  ntt_pipeline dut (.*);

  localparam u64 Q = 64'd18014398509404161;
  int unsigned LOGN, N;
  u64 inbuf [2][N_MAX];

  always @(posedge clk) begin
    in_rd_data0 <= {coeff_t'(inbuf[in_rd_bank][2*in_rd_addr0+1]), coeff_t'(inbuf[in_rd_bank][2*in_rd_addr0])};
    in_rd_data1 <= {coeff_t'(inbuf[in_rd_bank][2*in_rd_addr1+1]), coeff_t'(inbuf[in_rd_bank][2*in_rd_addr1])};
    if (in_release) in_full[in_release_bank] <= 1'b0;
  end

  task automatic check(string what, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  task automatic setup(int unsigned logn, int unsigned dc);
    poly_t tf;
    LOGN = logn; N = 1 << logn;
    cfg = '0;
    cfg.q = Q; cfg.mu = barrett_mu(Q); cfg.qbits = 6'(bitlen(Q));
    cfg.logn = 4'(logn); cfg.dc = 4'(dc); cfg.bg_bits = 4'd9;
    tf = make_tf(find_psi(Q, N), logn, Q);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); tf_we = 1; tf_addr = LOGN_MAX'(i); tf_data = tf[i];
    end
    @(negedge clk); tf_we = 0; clr = 1;
    @(negedge clk); clr = 0;
  endtask

  // expected output stream, filled by the producer
  poly_t  exp_p [$];
  tag_t   exp_t [$];
  longint pass_t [$];

  task automatic produce(poly_t p [], bit ks [], bit isb [], int unsigned dc);
    poly_t tf = make_tf(find_psi(Q, N), LOGN, Q);
    int bank = 0;
    foreach (p[i]) begin
      int nd = (ks[i] && isb[i]) ? 1 : dc;
      @(negedge clk);
      while (in_full[bank]) @(negedge clk);
      for (int j = 0; j < N; j++) inbuf[bank][j] = p[i][j];
      in_tag[bank] = '0;
      in_tag[bank].op_ks = ks[i];
      in_tag[bank].is_b = isb[i];
      in_full[bank] = 1'b1;
      for (int d = 0; d < nd; d++) begin
        tag_t t = '0;
        t.op_ks = ks[i]; t.is_b = isb[i]; t.digit = 4'(d);
        t.first = !isb[i] && d == 0;
        t.last = isb[i] && d == nd - 1;
        t.direct = ks[i] && isb[i];
        exp_t.push_back(t);
        exp_p.push_back(nd == 1 && ks[i] ? ntt(p[i], tf, Q) : ntt(digit(p[i], d, 9), tf, Q));
      end
      bank = 1 - bank;
    end
  endtask

  task automatic consume(int total);
    int bank = 0;
    for (int n = 0; n < total; n++) begin
      poly_t e;
      tag_t t;
      @(negedge clk);
      while (!out_full[bank]) @(negedge clk);
      pass_t.push_back(cycle);
      e = exp_p.pop_front();
      t = exp_t.pop_front();
      check("tag", out_tag[bank], t);
      out_rd_bank = 1'(bank);
      for (int c = 0; c < N / 4; c++) begin
        out_rd_addr0 = LOGN_MAX'(2 * c); out_rd_addr1 = LOGN_MAX'(2 * c + 1);
        @(negedge clk);
        check("c0", out_rd_data0[0], e[4*c]);
        check("c1", out_rd_data0[1], e[4*c+1]);
        check("c2", out_rd_data1[0], e[4*c+2]);
        check("c3", out_rd_data1[1], e[4*c+3]);
      end
      out_release = 1; out_release_bank = 1'(bank);
      @(negedge clk); out_release = 0;
      bank = 1 - bank;
    end
  endtask

  task automatic run(int unsigned logn, int unsigned dc, bit check_rate);
    poly_t p [4];
    bit ks [4] = '{0, 0, 1, 1};
    bit isb [4] = '{0, 1, 0, 1};
    int total = 3 * dc + 1;
    setup(logn, dc);
    foreach (p[i]) p[i] = rand_poly(N, Q);
    pass_t.delete();
    fork
      produce(p, ks, isb, dc);
      consume(total);
    join
    if (check_rate) begin
      // once the pipeline is full every stage delivers one pass per N/4 + 3
      // cycles (N/4 butterfly cycles, write-back, hand-over); the consumer's
      // negedge alignment may add one cycle to a single interval
      for (int i = 3; i < total; i++) begin
        longint d = pass_t[i] - pass_t[i-1];
        check("rate", u64'(d >= N / 4 + 3 && d <= N / 4 + 4), 1);
      end
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(11, 6, 1);
    run(10, 3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
