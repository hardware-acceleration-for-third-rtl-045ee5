// poly_mac_tb: checks the poly MAC. An input-buffer model presents
// NTT-domain polynomials with their tags as the NTT pipeline would (RLWE x
// RGSW: 2*dc key-multiplied polynomials; key switch: dc subtracted
// polynomials plus the key-less b term); a key model streams key beats with
// random gaps and the output consumer has random ready. Each streamed RLWE is
// compared with the reference inner product, done must pulse once per RLWE,
// exactly one key beat must be used per quad of each keyed polynomial, and
// with keys always available a polynomial must take N/4 + 3 cycles.
module poly_mac_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;
  cfg_t cfg = '0;
  logic clr = 0;
  logic [1:0] in_full = '0;
  tag_t [1:0] in_tag = '0;
  logic rd_bank, release_o, release_bank;
  logic [LOGN_MAX-2:0] rd_addr0, rd_addr1;
  line_t rd_data0, rd_data1;
  logic key_valid = 0, key_ready, out_valid, out_is_b, out_last, out_ready = 0, done;
  key_beat_t key_data = '0;
  quad_t out_data;
  int checks = 0, failures = 0, n_done = 0, n_keys = 0;
  bit key_gaps = 1;
  poly_mac dut (.*);

  initial begin
    #50_000_000;
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

  u64 ibuf [2][N_MAX];
  longint rel_t [$];
  always @(posedge clk) begin
    rd_data0 <= {coeff_t'(ibuf[rd_bank][2*rd_addr0+1]), coeff_t'(ibuf[rd_bank][2*rd_addr0])};
    rd_data1 <= {coeff_t'(ibuf[rd_bank][2*rd_addr1+1]), coeff_t'(ibuf[rd_bank][2*rd_addr1])};
    if (release_o) begin in_full[release_bank] <= 1'b0; rel_t.push_back(cycle); end
    if (done) n_done++;
    if (key_valid && key_ready) n_keys++;
  end

  // key stream
  key_beat_t keyq [$];
  always @(posedge clk) if (key_valid && key_ready) void'(keyq.pop_front());
  always @(negedge clk) begin
    key_valid = (keyq.size() != 0) && (!key_gaps || $urandom_range(3) != 0);
    key_data = (keyq.size() != 0) ? keyq[0] : '0;
    out_ready = ($urandom_range(2) != 0);
  end

  poly_t exp_a [$], exp_b [$];
  int n;

  task automatic put_poly(poly_t x, tag_t t, ref int bank);
    @(negedge clk);
    while (in_full[bank]) @(negedge clk);
    for (int j = 0; j < n; j++) ibuf[bank][j] = x[j];
    in_tag[bank] = t;
    in_full[bank] = 1;
    bank = 1 - bank;
  endtask

  task automatic push_key(poly_t ka, poly_t kb);
    for (int i = 0; i < n / 4; i++) begin
      key_beat_t kbt;
      for (int m = 0; m < 4; m++) begin kbt[0][m] = ka[4*i+m]; kbt[1][m] = kb[4*i+m]; end
      keyq.push_back(kbt);
    end
  endtask

  task automatic producer(bit ks [], int dc);
    int bank = 0;
    foreach (ks[r]) begin
      poly_t ra = new[n], rb = new[n];
      int np = ks[r] ? dc : 2 * dc;
      foreach (ra[i]) begin ra[i] = 0; rb[i] = 0; end
      for (int j = 0; j < np; j++) begin
        poly_t x = rand_poly(n, Q), ka = rand_poly(n, Q), kb = rand_poly(n, Q);
        tag_t t = '0;
        t.op_ks = ks[r]; t.is_b = (j >= dc); t.digit = 4'(j % dc);
        t.first = (j == 0); t.last = !ks[r] && (j == np - 1);
        push_key(ka, kb);
        if (ks[r]) begin
          ra = pw_sub(ra, pw_mul(x, ka, Q), Q);
          rb = pw_sub(rb, pw_mul(x, kb, Q), Q);
        end else begin
          ra = pw_add(ra, pw_mul(x, ka, Q), Q);
          rb = pw_add(rb, pw_mul(x, kb, Q), Q);
        end
        put_poly(x, t, bank);
      end
      if (ks[r]) begin
        poly_t x = rand_poly(n, Q);
        tag_t t = '0;
        t.op_ks = 1; t.is_b = 1; t.last = 1; t.direct = 1;
        rb = pw_add(rb, x, Q);
        put_poly(x, t, bank);
      end
      exp_a.push_back(ra); exp_b.push_back(rb);
    end
  endtask

  task automatic consumer(int total);
    for (int r = 0; r < total; r++) begin
      poly_t ea, eb;
      int got = 0;
      while (exp_b.size() == 0) @(posedge clk);
      ea = exp_a.pop_front();
      eb = exp_b.pop_front();
      while (got < n / 2) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          chk("is_b", out_is_b, got >= n / 4);
          chk("last", out_last, got == n / 2 - 1);
          for (int m = 0; m < 4; m++)
            chk(got < n / 4 ? "acc a" : "acc b", out_data[m],
                got < n / 4 ? ea[4*got+m] : eb[4*(got-n/4)+m]);
          got++;
        end
      end
    end
  endtask

  task automatic run(int logn, int dc, bit gaps);
    bit ks [4] = '{0, 1, 0, 1};
    n = 1 << logn;
    key_gaps = gaps;
    cfg = '0; cfg.q = Q; cfg.mu = barrett_mu(Q); cfg.qbits = 6'(bitlen(Q));
    cfg.logn = 4'(logn); cfg.dc = 4'(dc);
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    n_done = 0; n_keys = 0; rel_t.delete();
    fork
      producer(ks, dc);
      consumer(4);
    join
    repeat (5) @(negedge clk);
    chk("done pulses", n_done, 4);
    chk("key beats used", n_keys, (2 * dc + dc + 2 * dc + dc) * n / 4);
    if (!gaps) chk("poly time", rel_t[1] - rel_t[0], n / 4 + 3);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(11, 3, 1);
    run(11, 2, 0);
    run(10, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
