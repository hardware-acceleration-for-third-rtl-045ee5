// workload_tb: runs the bootstrap parameter sets of the evaluation on the
// full-size accelerator, one after the other without rebuilding it: each set
// has its own N, modulus width and decomposition base, so it exercises the
// run-time configuration (Barrett constants, N^-1, dc, B_G, twiddles).
//   MEDIUM / STD128_AP  N = 1024, log2 Q = 27, B_G = 2^9  (dc = 3)
//   STD192              N = 2048, log2 Q = 37, B_G = 2^13 (dc = 3)
//   STD256              N = 2048, log2 Q = 29, B_G = 2^10 (dc = 3)
//   STD192Q             N = 2048, log2 Q = 35, B_G = 2^12 (dc = 3)
//   STD256Q             N = 2048, log2 Q = 27, B_G = 2^7  (dc = 4)
//   PSI                 N = 2048, log2 Q = 54, B_G = 2^9  (dc = 6)
// For each set the testbench picks the smallest prime Q = c*2N + 1 with the
// given bit length (trial division), programs it over AXI-Lite and runs one
// RLWE x RGSW, one substitution + key switch and one accumulator
// initialisation in RLWE mode, comparing every coefficient with the same
// software model as the end-to-end test (dc = ceil(log2 Q / log2 B_G)).
// It also checks that the single RLWE x RGSW of every N = 2048 set takes the
// same number of cycles for the same dc, i.e. the time does not depend on Q.
module workload_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #4 clk = !clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic s_axil_bvalid, s_axil_bready = 1, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 1;
  quad_t host_in_data = '0, host_out_data;
  logic ddr_req_valid, ddr_req_ready = 1, ddr_resp_valid = 0;
  logic [KEY_AW-1:0] ddr_req_addr;
  key_beat_t ddr_resp_data = '0;

  accel_top dut (.*);

  u64 Q = 64'd18014398509404161;
  int unsigned LOGN, N, DC, BG;
  bit stall_host = 0, stall_ddr = 0;

  // mechanism counters
  int n_key_stall = 0, n_out_stall = 0, n_ddr_stall = 0, n_in_stall = 0;
  int n_par_intt = 0, n_subs = 0, n_bypass = 0, n_init = 0, n_boot_wb = 0;
  int n_drain = 0, n_skip = 0, n_decomp_multi = 0;

  task automatic check(string what, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d (cycle %0d)", what, got, exp, cycle);
    end
  endtask

  // ---------------------------------------------------------------- AXI-Lite
  task automatic axw(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awvalid = 1; s_axil_wvalid = 1; s_axil_awaddr = a; s_axil_wdata = d;
    @(posedge clk); while (!s_axil_awready) @(posedge clk);
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(posedge clk);
  endtask
  task automatic axr(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_axil_arvalid = 1; s_axil_araddr = a;
    @(posedge clk); while (!s_axil_arready) @(posedge clk);
    @(negedge clk); s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(posedge clk);
    d = s_axil_rdata;
  endtask
  task automatic axw64(logic [7:0] a, u64 d);
    axw(a, d[31:0]); axw(a + 8'd4, d[63:32]);
  endtask

  task automatic configure(int unsigned logn, int unsigned dc, int unsigned bg);
    u64 psi; poly_t tf, tfi;
    LOGN = logn; N = 1 << logn; DC = dc; BG = bg;
    axw64(8'h00, Q); axw64(8'h08, u64'(barrett_mu(Q))); axw(8'h10, bitlen(Q));
    axw(8'h14, logn); axw64(8'h18, invm(u64'(N), Q)); axw(8'h20, dc); axw(8'h24, bg);
    axw(8'h2C, 9); axw64(8'h30, Q / 8);
    psi = find_psi(Q, N);
    tf  = make_tf(psi, logn, Q);
    tfi = make_tf(invm(psi, Q), logn, Q);
    for (int i = 0; i < N; i++) begin
      axw(8'h50, i); axw(8'h54, tf[i][31:0]); axw(8'h58, tf[i][63:32]);
      axw(8'h50, 32'h8000_0000 | i); axw(8'h54, tfi[i][31:0]); axw(8'h58, tfi[i][63:32]);
    end
  endtask

  task automatic push_inst(bit ks, bit init, int b_lwe, int k, int key_addr);
    axw(8'h40, (k << 13) | (b_lwe << 2) | (int'(init) << 1) | int'(ks));
    axw(8'h44, key_addr);
  endtask

  // --------------------------------------------------------------- DDR model
  function automatic u64 key_coef(longint unsigned addr, int p, int k);
    u64 h = (addr * 8 + p * 4 + k) * 64'h9E37_79B9_7F4A_7C15 + 64'd12345;
    h = h ^ (h >> 29);
    return h % Q;
  endfunction
  function automatic poly_t key_poly(int key_addr, int j, int p);
    poly_t r = new[N];
    for (int i = 0; i < N; i++) r[i] = key_coef(key_addr + j * (N / 4) + i / 4, p, i % 4);
    return r;
  endfunction

  int unsigned ddr_q [$];
  int unsigned ddr_t [$];
  always @(posedge clk) begin
    if (rst_n && ddr_req_valid && ddr_req_ready) begin
      ddr_q.push_back(ddr_req_addr);
      ddr_t.push_back(cycle + 6);
    end
    if (ddr_req_valid && !ddr_req_ready) n_ddr_stall++;
  end
  always @(negedge clk) begin
    ddr_resp_valid <= 0;
    if (ddr_q.size() > 0 && ddr_t[0] <= cycle) begin
      int unsigned a;
      a = ddr_q.pop_front();
      void'(ddr_t.pop_front());
      ddr_resp_valid <= 1;
      for (int p = 0; p < 2; p++)
        for (int k = 0; k < 4; k++) ddr_resp_data[p][k] <= key_coef(a, p, k);
    end
    ddr_req_ready <= stall_ddr ? ($urandom % 4 != 0) : 1'b1;
    host_out_ready <= stall_host ? ($urandom % 3 != 0) : 1'b1;
  end

  // ------------------------------------------------------ mechanism probes
  always @(posedge clk) begin
    int busy;
    busy = 0;
    if (dut.u_pipe.u_mac.state == 3'd1 && !dut.u_pipe.u_mac.issue) n_key_stall++;
    if (host_out_valid && !host_out_ready) n_out_stall++;
    if (host_in_valid && !host_in_ready) n_in_stall++;
    if (!dut.u_pipe.g_intt[0].u_intt.inst_ready) busy++;
    if (!dut.u_pipe.g_intt[1].u_intt.inst_ready) busy++;
    if (!dut.u_pipe.g_intt[2].u_intt.inst_ready) busy++;
    if (!dut.u_pipe.g_intt[3].u_intt.inst_ready) busy++;
    if (busy >= 2) n_par_intt++;
    if (dut.io_wv && dut.mode_boot && dut.p_out_valid) n_boot_wb++;
    if (host_out_valid && host_out_ready && dut.drain) n_drain++;
  end

  // ------------------------------------------------------------ references
  function automatic void ref_op(bit ks, bit init, int b_lwe, int k, int key_addr,
                                 poly_t a, poly_t b, output poly_t ra, output poly_t rb);
    poly_t tf, tfi, ia, ib, x;
    u64 psi = find_psi(Q, N);
    tf  = make_tf(psi, LOGN, Q);
    tfi = make_tf(invm(psi, Q), LOGN, Q);
    ra = new[N]; rb = new[N];
    foreach (ra[i]) begin ra[i] = 0; rb[i] = 0; end
    if (init) begin
      int unsigned r = (b_lwe << (LOGN + 1)) >> 9;
      ia = new[N]; ib = new[N];
      for (int unsigned j = 0; j < N; j++) begin
        ia[j] = 0;
        if (r < N) ib[j] = (j >= r) ? Q / 8 : Q - Q / 8;
        else       ib[j] = (j >= r - N) ? Q - Q / 8 : Q / 8;
      end
    end else begin
      ia = intt(a, tfi, Q); ib = intt(b, tfi, Q);
    end
    if (ks) begin
      ia = subs(ia, k, Q); ib = subs(ib, k, Q);
      for (int d = 0; d < DC; d++) begin
        x  = ntt(digit(ia, d, BG), tf, Q);
        ra = pw_sub(ra, pw_mul(x, key_poly(key_addr, d, 0), Q), Q);
        rb = pw_sub(rb, pw_mul(x, key_poly(key_addr, d, 1), Q), Q);
      end
      rb = pw_add(rb, ntt(ib, tf, Q), Q);
    end else begin
      for (int d = 0; d < 2 * DC; d++) begin
        x  = ntt(digit(d < DC ? ia : ib, d % DC, BG), tf, Q);
        ra = pw_add(ra, pw_mul(x, key_poly(key_addr, d, 0), Q), Q);
        rb = pw_add(rb, pw_mul(x, key_poly(key_addr, d, 1), Q), Q);
      end
    end
  endfunction

  task automatic send_rlwe(poly_t a, poly_t b);
    for (int i = 0; i < N / 2; i++) begin
      @(negedge clk);
      host_in_valid = 1;
      for (int k = 0; k < 4; k++) host_in_data[k] = (i < N / 4) ? a[4*i+k] : b[4*(i-N/4)+k];
      @(posedge clk); while (!host_in_ready) @(posedge clk);
    end
    @(negedge clk); host_in_valid = 0;
  endtask

  task automatic recv_check(string what, poly_t ea, poly_t eb);
    int got = 0;
    while (got < N / 2) begin
      @(posedge clk);
      if (host_out_valid && host_out_ready) begin
        for (int k = 0; k < 4; k++)
          if (got < N / 4) check({what, ".a"}, host_out_data[k], ea[4*got+k]);
          else             check({what, ".b"}, host_out_data[k], eb[4*(got-N/4)+k]);
        got++;
      end
    end
  endtask

  // ------------------------------------------------------------------ tests
  typedef struct { bit ks; bit init; int b_lwe; int k; int key; } op_t;

  task automatic rlwe_batch(op_t ops [], bit check_latency, bit hold_inst = 0);
    poly_t a [], b [], ea [], eb [];
    longint t0;
    a = new[ops.size()]; b = new[ops.size()]; ea = new[ops.size()]; eb = new[ops.size()];
    foreach (ops[i]) begin
      a[i] = rand_poly(N, Q); b[i] = rand_poly(N, Q);
      ref_op(ops[i].ks, 0, 0, ops[i].k, ops[i].key, a[i], b[i], ea[i], eb[i]);
      if (ops[i].ks && ops[i].k != 1) n_subs++;
      else n_bypass++;
      if (LOGN == 10) n_skip++;
    end
    t0 = cycle;
    fork
      begin
        // hold_inst: let the host fill the in/out FIFO (12 RLWEs) until it
        // pushes back, and only then issue the instructions
        if (hold_inst) wait (n_in_stall > 0);
        foreach (ops[i]) push_inst(ops[i].ks, 0, 0, ops[i].k, ops[i].key);
      end
      foreach (ops[i]) send_rlwe(a[i], b[i]);
      foreach (ops[i]) recv_check($sformatf("op%0d", i), ea[i], eb[i]);
    join
    if (check_latency) begin
      longint lat = cycle - t0;
      $display("single RLWE x RGSW latency: %0d cycles", lat);
      checks++;
      if (lat < 17700 || lat > 29500) begin
        failures++;
        $display("FAIL latency %0d outside 17700..29500", lat);
      end
    end
  endtask

  function automatic bit is_prime(u64 x);
    if (x < 2) return 0;
    for (u64 d = 2; d * d <= x; d++) if (x % d == 0) return 0;
    return 1;
  endfunction

  function automatic u64 prime_for(int bits, int n);
    u64 c = ((u64'(1) << (bits - 1)) + u64'(2 * n) - 1) / u64'(2 * n);
    while (!is_prime(c * u64'(2 * n) + 1)) c++;
    return c * u64'(2 * n) + 1;
  endfunction

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { string name; int logn; int logq; int bg; } set_t;

  initial begin
    static set_t sets [] = '{'{"MEDIUM/STD128_AP", 10, 27, 9}, '{"STD192", 11, 37, 13},
                      '{"STD256", 11, 29, 10}, '{"STD192Q", 11, 35, 12},
                      '{"STD256Q", 11, 27, 7}, '{"PSI", 11, 54, 9}};
    static op_t ops [] = '{'{0, 0, 0, 1, 100}, '{1, 0, 0, 5, 20000}};
    static longint lat3 = -1;
    repeat (4) @(negedge clk); rst_n = 1;
    axw(8'h28, 0);
    foreach (sets[s]) begin
      int dc;
      dc = (sets[s].logq + sets[s].bg - 1) / sets[s].bg;
      Q = prime_for(sets[s].logq, 1 << sets[s].logn);
      $display("%s: N = %0d, Q = %0d (%0d bits), B_G = 2^%0d, dc = %0d",
               sets[s].name, 1 << sets[s].logn, Q, bitlen(Q), sets[s].bg, dc);
      check("prime width", bitlen(Q), sets[s].logq);
      configure(sets[s].logn, dc, sets[s].bg);
      begin
        longint t0, lat;
        op_t one [];
        one = '{'{0, 0, 0, 1, 300}};
        t0 = cycle;
        rlwe_batch(one, 0);
        lat = cycle - t0;
        if (sets[s].logn == 11 && dc == 3) begin
          if (lat3 < 0) lat3 = lat;
          check("latency independent of Q", u64'(lat), u64'(lat3));
        end
      end
      rlwe_batch(ops, 0);
      // accumulator initialisation
      begin
        poly_t za, zb, ea, eb;
        za = new[N]; foreach (za[i]) za[i] = 0;
        zb = za;
        ref_op(0, 1, 77, 1, 9000, za, zb, ea, eb);
        push_inst(0, 1, 77, 1, 9000);
        recv_check("init", ea, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
