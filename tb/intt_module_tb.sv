// intt_module_tb: checks the INTT module against the reference INTT.
// Runs N = 16 and N = 2048 with a 54-bit NTT-friendly prime, random input
// RLWEs, with and without output back-pressure, plus one accumulator
// initialisation. Also checks the stall-free latency
// (log N + 1) * N/2 + 3 cycles from instruction to last output beat.
module intt_module_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  cfg_t  cfg;
  logic  tf_we = 0;
  logic [LOGN_MAX-1:0] tf_addr;
  coeff_t tf_data;
  logic  inst_valid = 0, inst_ready;
  inst_t inst;
  logic  in_valid = 0, in_ready;
  quad_t in_data;
  logic  out_valid, out_is_b, out_last, out_ready;
  quad_t out_data;
  inst_t out_inst;

  intt_module dut (.*);

  localparam u64 Q = 64'd18014398509404161;   // prime, Q = 1 mod 4096

  task automatic check(string what, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  task automatic setup(int unsigned logn);
    u64 psi;
    poly_t tfi;
    int unsigned n = 1 << logn;
    psi = find_psi(Q, n);
    tfi = make_tf(invm(psi, Q), logn, Q);
    cfg = '0;
    cfg.q = Q; cfg.mu = barrett_mu(Q); cfg.qbits = 6'(bitlen(Q));
    cfg.logn = 4'(logn); cfg.n_inv = invm(u64'(n), Q);
    cfg.lwe_logq = 4'd9; cfg.init_val = Q / 8;
    for (int unsigned i = 0; i < n; i++) begin
      @(negedge clk); tf_we = 1; tf_addr = LOGN_MAX'(i); tf_data = tfi[i];
    end
    @(negedge clk); tf_we = 0;
  endtask

  // run one RLWE through; returns cycles from instruction to last beat
  task automatic run(int unsigned logn, bit stall, bit do_init, logic [10:0] b_lwe);
    int unsigned n = 1 << logn;
    poly_t a, b, ea, eb, tfi;
    u64 psi;
    int cyc = 0, got_beats = 0;
    psi = find_psi(Q, n);
    tfi = make_tf(invm(psi, Q), logn, Q);
    a = rand_poly(n, Q); b = rand_poly(n, Q);
    if (do_init) begin
      int unsigned r = (b_lwe << (logn + 1)) >> 9;   // b * 2N / q, q = 2^9
      ea = new[n]; eb = new[n];
      for (int unsigned j = 0; j < n; j++) begin
        ea[j] = 0;
        // X^r * (c, ..., c): coefficient j comes from j - r with sign
        if (r < n) eb[j] = (j >= r) ? Q / 8 : Q - Q / 8;
        else       eb[j] = (j >= r - n) ? Q - Q / 8 : Q / 8;
      end
    end else begin
      ea = intt(a, tfi, Q); eb = intt(b, tfi, Q);
    end
    inst = '0; inst.init = do_init; inst.b_lwe = b_lwe;
    @(negedge clk); inst_valid = 1;
    fork
      begin
        @(negedge clk); inst_valid = 0;
        if (!do_init)
          for (int i = 0; i < n / 2; i++) begin
            in_valid = 1;
            for (int k = 0; k < 4; k++) in_data[k] = (i < n / 4) ? a[4*i+k] : b[4*(i-n/4)+k];
            @(posedge clk); while (!in_ready) @(posedge clk);
            @(negedge clk); in_valid = 0;
          end
      end
      begin
        while (got_beats < n / 2) begin
          @(posedge clk); cyc++;
          if (out_valid && out_ready) begin
            for (int k = 0; k < 4; k++)
              if (got_beats < n / 4) check("a", out_data[k], ea[4*got_beats+k]);
              else                   check("b", out_data[k], eb[4*(got_beats-n/4)+k]);
            check("is_b", out_is_b, got_beats >= n / 4);
            check("last", out_last, got_beats == n / 2 - 1);
            got_beats++;
          end
        end
      end
      begin
        while (got_beats < n / 2) begin
          @(negedge clk); out_ready = stall ? ($urandom % 3 != 0) : 1'b1;
        end
      end
    join
    if (!stall && !do_init) check("latency", cyc, (logn + 1) * n / 2 + 3);
    @(negedge clk);
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 1; tf_addr = '0; tf_data = '0; in_data = '0; inst = '0;
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    setup(4);
    run(4, 0, 0, 0);
    run(4, 1, 0, 0);
    run(4, 0, 1, 11'd100);
    run(4, 1, 1, 11'd400);
    setup(11);
    run(11, 0, 0, 0);
    run(11, 0, 1, 11'd77);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
