// accel_top_tb: end-to-end test of the accelerator at its default size
// (N up to 2048, 54-bit modulus, four INTT modules, 12-RLWE FIFOs).
//
// The testbench plays host and DDR: it programs the registers and twiddle
// factors over AXI-Lite, streams RLWE ciphertexts in and out and answers key
// reads from a DDR model whose contents are a fixed pseudo-random function of
// the address. Every result is compared with a software model built from the
// reference NTT/INTT, digit decomposition and substitution in fhe_ref_pkg.
//   1. RLWE mode, N = 2048, dc = 6, B_G = 2^9: a single RLWE x RGSW (latency
//      checked against the published ~189 us = 23.6k cycles at 125 MHz of
//      processing for one input, +-25%), then five instructions back to back
//      mixing RLWE x RGSW, substitution + key switch (k = 5, 2N-1) and plain
//      key switch (k = 1, bypass), with host and DDR back-pressure.
//   1b. Thirteen RLWEs are sent before any instruction is issued, so the
//      in/out FIFO (12 RLWEs) fills and pushes back on the host; then the
//      instructions run them all.
//   2. Bootstrap mode: two accumulators started by the init block, each
//      looped twice through the pipeline via the in/out FIFO, then drained.
//   3. RLWE mode at N = 1024 (first NTT stage skipped), dc = 3, B_G = 2^9.
// Counts how often each mechanism occurred and fails if one never did.
module accel_top_tb;
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

  localparam u64 Q = 64'd18014398509404161;
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

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_t one [] = '{'{0, 0, 0, 1, 0}};
    op_t mix [] = '{'{0, 0, 0, 1, 1000}, '{1, 0, 0, 5, 5000}, '{0, 0, 0, 1, 9000},
                    '{1, 0, 0, 4095, 20000}, '{1, 0, 0, 1, 30000}};
    op_t sml [] = '{'{0, 0, 0, 1, 100}, '{1, 0, 0, 3, 7000}};
    logic [31:0] rd;
    repeat (4) @(negedge clk); rst_n = 1;

    // 1. RLWE mode, N = 2048
    configure(11, 6, 9);
    axw(8'h28, 0);
    rlwe_batch(one, 1);
    stall_host = 1; stall_ddr = 1;
    rlwe_batch(mix, 0);
    stall_host = 0; stall_ddr = 0;
    begin
      op_t full [] = new[13];
      foreach (full[i]) full[i] = '{i % 2, 0, 0, 2 * i + 1, 50000 + 3000 * i};
      rlwe_batch(full, 0, 1);
    end

    // 2. bootstrap mode: accumulators A (b = 100) and B (b = 333), two loops
    begin
      poly_t za, zb, a1, b1, a2, b2, c1, d1, c2, d2, e0, f0;
      za = new[N]; foreach (za[i]) za[i] = 0;
      zb = za;
      ref_op(0, 1, 100, 1, 40000, za, zb, a1, b1);
      ref_op(0, 1, 333, 1, 41000, za, zb, c1, d1);
      ref_op(0, 0, 0, 1, 42000, a1, b1, a2, b2);
      ref_op(0, 0, 0, 1, 43000, c1, d1, c2, d2);
      axw(8'h28, 1);
      push_inst(0, 1, 100, 1, 40000); n_init++;
      push_inst(0, 1, 333, 1, 41000); n_init++;
      push_inst(0, 0, 0, 1, 42000);
      push_inst(0, 0, 0, 1, 43000);
      do begin
        axr(8'h68, rd);
        repeat (200) @(posedge clk);
      end while (rd != 0);
      axr(8'h60, rd);
      check("inout count", rd, N);        // two RLWEs of N/2 beats
      axw(8'h28, 3);                      // drain
      recv_check("bootA", a2, b2);
      recv_check("bootB", c2, d2);
      axw(8'h28, 0);
    end

    // 3. N = 1024, first NTT stage skipped
    configure(10, 3, 9);
    rlwe_batch(sml, 0);

    // every mechanism must have happened
    begin
      string names [] = '{"key stall", "host out stall", "ddr stall", "parallel INTT",
                          "substitution", "subs bypass", "init", "bootstrap write-back",
                          "drain", "N=1024 skip", "host in stall"};
      int cnts [];
      cnts = '{n_key_stall, n_out_stall, n_ddr_stall, n_par_intt, n_subs, n_bypass,
               n_init, n_boot_wb, n_drain, n_skip, n_in_stall};
      foreach (names[i]) begin
        $display("mechanism %-22s %0d", names[i], cnts[i]);
        checks++;
        if (cnts[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", names[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
