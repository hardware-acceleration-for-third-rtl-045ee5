// compute_pipeline_tb: checks the datapath between the reorder buffer and the
// FIFOs: INTT bank, N_INTT:1 MUX, substitution, pipelined NTT and poly MAC.
// Instructions, input RLWEs and key beats are driven directly (keys with
// random gaps, output with random ready). A batch mixes RLWE x RGSW, key
// switching with k = 1 and with other odd k, and accumulator
// initialisations, at N = 2048; a second batch runs at N = 1024. Every
// output RLWE is compared with the reference model, done must pulse once per
// instruction, and with keys and output never stalling, the steady-state
// spacing of RLWE x RGSW results must equal 2*dc NTT passes plus the result
// streaming: between 2*dc*(N/4+3) and 2*dc*(N/4+3) + N/2 + 16 cycles. At
// least two INTT modules must be seen busy at the same time.
module compute_pipeline_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;
  cfg_t cfg = '0;
  logic tf_we_fwd = 0, tf_we_inv = 0;
  logic [LOGN_MAX-1:0] tf_addr = '0;
  coeff_t tf_data = '0;
  logic inst_valid = 0, inst_ready, in_valid = 0, in_ready, key_valid = 0, key_ready;
  inst_t inst = '0;
  quad_t in_data = '0, out_data;
  key_beat_t key_data = '0;
  logic out_valid, out_last, out_ready = 1, done;
  int checks = 0, failures = 0, n_done = 0, max_busy = 0;
  bit stall = 1;
  int LOGN, N, DC, BG;
  compute_pipeline dut (.*);

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d (cycle %0d)", w, got, exp, cycle);
    end
  endtask

  // keys: a queue of beats in consumption order
  key_beat_t keyq [$];
  always @(posedge clk) begin
    int busy;
    if (key_valid && key_ready) void'(keyq.pop_front());
    if (done) n_done++;
    busy = 0;
    busy = int'(!dut.i_inst_ready[0]) + int'(!dut.i_inst_ready[1]) +
           int'(!dut.i_inst_ready[2]) + int'(!dut.i_inst_ready[3]);
    if (busy > max_busy) max_busy = busy;
  end
  always @(negedge clk) begin
    key_valid = (keyq.size() != 0) && (!stall || $urandom_range(3) != 0);
    key_data = (keyq.size() != 0) ? keyq[0] : '0;
    out_ready = !stall || ($urandom_range(2) != 0);
  end

  typedef struct { bit ks; bit init; int b_lwe; int k; } op_t;

  task automatic ref_op(op_t o, poly_t a, poly_t b, output poly_t ra, output poly_t rb);
    poly_t tf, tfi, ia, ib, x, ka, kb;
    u64 psi = find_psi(Q, N);
    tf  = make_tf(psi, LOGN, Q);
    tfi = make_tf(invm(psi, Q), LOGN, Q);
    ra = new[N]; rb = new[N];
    foreach (ra[i]) begin ra[i] = 0; rb[i] = 0; end
    if (o.init) begin
      int unsigned r = (o.b_lwe << (LOGN + 1)) >> 9;
      ia = new[N]; ib = new[N];
      for (int unsigned j = 0; j < N; j++) begin
        ia[j] = 0;
        if (r < N) ib[j] = (j >= r) ? Q / 8 : Q - Q / 8;
        else       ib[j] = (j >= r - N) ? Q - Q / 8 : Q / 8;
      end
    end else begin
      ia = intt(a, tfi, Q); ib = intt(b, tfi, Q);
    end
    for (int d = 0; d < (o.ks ? DC : 2 * DC); d++) begin
      ka = rand_poly(N, Q); kb = rand_poly(N, Q);
      for (int i = 0; i < N / 4; i++) begin
        key_beat_t kbt;
        for (int m = 0; m < 4; m++) begin kbt[0][m] = ka[4*i+m]; kbt[1][m] = kb[4*i+m]; end
        keyq.push_back(kbt);
      end
      if (o.ks) begin
        x  = ntt(digit(subs(ia, o.k, Q), d, BG), tf, Q);
        ra = pw_sub(ra, pw_mul(x, ka, Q), Q);
        rb = pw_sub(rb, pw_mul(x, kb, Q), Q);
      end else begin
        x  = ntt(digit(d < DC ? ia : ib, d % DC, BG), tf, Q);
        ra = pw_add(ra, pw_mul(x, ka, Q), Q);
        rb = pw_add(rb, pw_mul(x, kb, Q), Q);
      end
    end
    if (o.ks) rb = pw_add(rb, ntt(subs(ib, o.k, Q), tf, Q), Q);
  endtask

  task automatic configure(int logn, int dc);
    u64 psi;
    poly_t tf, tfi;
    LOGN = logn; N = 1 << logn; DC = dc; BG = 9;
    cfg = '0; cfg.q = Q; cfg.mu = barrett_mu(Q); cfg.qbits = 6'(bitlen(Q));
    cfg.logn = 4'(logn); cfg.n_inv = invm(u64'(N), Q); cfg.dc = 4'(dc); cfg.bg_bits = 4'(BG);
    cfg.lwe_logq = 4'd9; cfg.init_val = Q / 8;
    psi = find_psi(Q, N);
    tf = make_tf(psi, logn, Q); tfi = make_tf(invm(psi, Q), logn, Q);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); tf_addr = 11'(i);
      tf_we_fwd = 1; tf_data = tf[i]; @(negedge clk); tf_we_fwd = 0;
      tf_we_inv = 1; tf_data = tfi[i];
    end
    @(negedge clk); tf_we_inv = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic batch(op_t ops [], bit timing);
    poly_t a [], b [], ea [], eb [];
    longint t_last [$];
    a = new[ops.size()]; b = new[ops.size()]; ea = new[ops.size()]; eb = new[ops.size()];
    foreach (ops[i]) begin
      a[i] = rand_poly(N, Q); b[i] = rand_poly(N, Q);
      ref_op(ops[i], a[i], b[i], ea[i], eb[i]);
    end
    n_done = 0;
    fork
      foreach (ops[i]) begin
        @(negedge clk);
        inst_valid = 1;
        inst = '0; inst.op = ops[i].ks ? OP_KS : OP_RGSW; inst.init = ops[i].init;
        inst.b_lwe = 11'(ops[i].b_lwe); inst.subs_k = 12'(ops[i].k);
        @(posedge clk); while (!inst_ready) @(posedge clk);
        @(negedge clk); inst_valid = 0;
        if (!ops[i].init)
          for (int j = 0; j < N / 2; j++) begin
            @(negedge clk);
            in_valid = 1;
            for (int m = 0; m < 4; m++) in_data[m] = (j < N / 4) ? a[i][4*j+m] : b[i][4*(j-N/4)+m];
            @(posedge clk); while (!in_ready) @(posedge clk);
            @(negedge clk); in_valid = 0;
          end
      end
      foreach (ops[i]) begin
        int got = 0;
        while (got < N / 2) begin
          @(posedge clk);
          if (out_valid && out_ready) begin
            for (int m = 0; m < 4; m++)
              chk($sformatf("op%0d", i), out_data[m], got < N / 4 ? ea[i][4*got+m] : eb[i][4*(got-N/4)+m]);
            chk("out_last", out_last, got == N / 2 - 1);
            got++;
          end
        end
        t_last.push_back(cycle);
      end
    join
    repeat (5) @(negedge clk);
    chk("done pulses", n_done, ops.size());
    if (timing)
      for (int i = 3; i < t_last.size(); i++) begin
        longint d = t_last[i] - t_last[i-1];
        int lo = 2 * DC * (N / 4 + 3);
        checks++;
        if (d < lo || d > lo + N / 2 + 16) begin
          failures++;
          $display("FAIL result spacing %0d outside %0d..%0d", d, lo, lo + N / 2 + 16);
        end
      end
  endtask

  initial begin
    op_t mix [] = '{'{0, 0, 0, 1}, '{1, 0, 0, 1}, '{1, 0, 0, 7}, '{0, 1, 100, 1},
                    '{0, 0, 0, 1}, '{1, 0, 0, 4093}, '{0, 1, 400, 1}};
    op_t rgsw [] = '{'{0, 0, 0, 1}, '{0, 0, 0, 1}, '{0, 0, 0, 1}, '{0, 0, 0, 1},
                     '{0, 0, 0, 1}, '{0, 0, 0, 1}};
    op_t sml [] = '{'{0, 0, 0, 1}, '{1, 0, 0, 3}, '{0, 1, 300, 1}};
    repeat (3) @(negedge clk); rst_n = 1;
    configure(11, 6);
    stall = 1;
    batch(mix, 0);
    stall = 0;
    batch(rgsw, 1);
    configure(10, 3);
    stall = 1;
    batch(sml, 0);
    chk("INTT modules busy in parallel", max_busy >= 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
