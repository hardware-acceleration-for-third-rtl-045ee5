// ntt_stage_tb: checks single NTT stages in isolation. Two instances run in
// parallel, each with its own model of the upstream buffer and of the
// downstream reader:
//   - stage 0 (t = 1, pattern 2, plain butterflies), N = 2048 and N = 1024;
//   - stage 10 (t = 1024, leading stage) at N = 2048, where it decomposes
//     each input polynomial into dc digits of base 2^bg_bits (one pass per
//     digit) and passes the b polynomial of a key switch undecomposed.
// Each output is compared with one Cooley-Tukey layer of the reference,
// applied to the expected digit. The pass time (start to full) must be
// N/4 + 3 cycles, and the upstream bank must be released only after the
// last digit.
module ntt_stage_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;
  int checks = 0, failures = 0;
  bit done [2] = '{0, 0};

  task automatic chk(string w, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d (cycle %0d)", w, got, exp, cycle);
    end
  endtask

  // one CT layer with t = 2^st on polynomial p
  function automatic poly_t layer(poly_t p, int st, poly_t tf);
    int n = p.size(), t = 1 << st, m = n / (2 * t);
    poly_t r = p;
    for (int i = 0; i < m; i++)
      for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
        u64 v = mulm(p[j+t], tf[m+i], Q);
        r[j]   = addm(p[j], v, Q);
        r[j+t] = subm(p[j], v, Q);
      end
    return r;
  endfunction

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_dut
    localparam int ST = g ? 10 : 0;
    cfg_t cfg = '0;
    logic clr = 0, tf_we = 0;
    logic [LOGN_MAX-1:0] tf_addr = '0;
    coeff_t tf_data = '0;
    logic [1:0] up_full = '0, dn_full;
    tag_t [1:0] up_tag = '0, dn_tag;
    logic up_rd_bank, up_release, up_release_bank;
    logic [LOGN_MAX-2:0] up_rd_addr0, up_rd_addr1;
    line_t up_rd_data0, up_rd_data1, dn_rd_data0, dn_rd_data1;
    logic dn_rd_bank = 0, dn_release = 0, dn_release_bank = 0;
    logic [LOGN_MAX-2:0] dn_rd_addr0 = '0, dn_rd_addr1 = '0;
    u64 ubuf [2][N_MAX];
    int nrel = 0;

    ntt_stage #(.STAGE(ST), .LEADING(g == 1)) dut (
      .clk, .rst_n, .clr, .cfg, .tf_we, .tf_addr, .tf_data,
      .up_full, .up_tag, .up_rd_bank, .up_rd_addr0, .up_rd_addr1,
      .up_rd_data0, .up_rd_data1, .up_release, .up_release_bank,
      .dn_full, .dn_tag, .dn_rd_bank, .dn_rd_addr0, .dn_rd_addr1,
      .dn_rd_data0, .dn_rd_data1, .dn_release, .dn_release_bank);

    // pass monitor: a pass runs for N/4 + 3 cycles from leaving idle to its
    // bank reading full, and the upstream bank is released exactly when the
    // last digit of the polynomial has been produced
    int cur_nd = 1, produced = 0;
    longint t_start = 0;
    logic [1:0] full_d = '0;
    always @(negedge clk) begin
      for (int b = 0; b < 2; b++)
        if (dn_full[b] && !full_d[b]) begin
          produced++;
          chk("pass time", cycle - t_start, (1 << cfg.logn) / 4 + 3);
        end
      full_d = dn_full;
      if (dut.state == dut.S_IDLE && dut.up_full[dut.ib] && !dut.full_q[dut.ob]) t_start = cycle;
      if (up_release) begin
        chk("release after last digit", produced, cur_nd);
        produced = 0;
      end
    end

    always @(posedge clk) begin
      up_rd_data0 <= {coeff_t'(ubuf[up_rd_bank][2*up_rd_addr0+1]), coeff_t'(ubuf[up_rd_bank][2*up_rd_addr0])};
      up_rd_data1 <= {coeff_t'(ubuf[up_rd_bank][2*up_rd_addr1+1]), coeff_t'(ubuf[up_rd_bank][2*up_rd_addr1])};
      if (up_release) begin up_full[up_release_bank] <= 1'b0; nrel++; end
    end

    task automatic run(int logn, int dc);
      int n = 1 << logn;
      poly_t tf = make_tf(find_psi(Q, n), logn, Q);
      poly_t p [3];
      bit isb [3] = '{0, 1, 1};
      bit ks [3] = '{0, 0, 1};
      int ob = 0;
      cfg = '0; cfg.q = Q; cfg.mu = barrett_mu(Q); cfg.qbits = 6'(bitlen(Q));
      cfg.logn = 4'(logn); cfg.dc = 4'(dc); cfg.bg_bits = 4'd9;
      for (int i = 0; i < n; i++) begin
        @(negedge clk); tf_we = 1; tf_addr = 11'(i); tf_data = tf[i];
      end
      @(negedge clk); tf_we = 0; clr = 1;
      @(negedge clk); clr = 0;
      foreach (p[i]) begin
        bit dec = (g == 1) && (logn == ST + 1);
        int nd = (dec && !(ks[i] && isb[i])) ? dc : 1;
        cur_nd = nd;
        p[i] = rand_poly(n, Q);
        for (int j = 0; j < n; j++) ubuf[i%2][j] = p[i][j];
        up_tag[i%2] = '0; up_tag[i%2].is_b = isb[i]; up_tag[i%2].op_ks = ks[i];
        up_full[i%2] = 1;
        for (int d = 0; d < nd; d++) begin
          poly_t e = layer(dec && nd > 1 ? digit(p[i], d, 9) : p[i], ST, tf);
          while (!dn_full[ob]) @(negedge clk);
          if (dec) begin
            chk("tag digit", dn_tag[ob].digit, d);
            chk("tag first", dn_tag[ob].first, !isb[i] && d == 0);
            chk("tag last", dn_tag[ob].last, isb[i] && d == nd - 1);
            chk("tag direct", dn_tag[ob].direct, ks[i] && isb[i]);
          end
          dn_rd_bank = 1'(ob);
          for (int c = 0; c < n / 2; c++) begin
            dn_rd_addr0 = 10'(c);
            @(negedge clk);
            chk("coef0", dn_rd_data0[0], e[2*c]);
            chk("coef1", dn_rd_data0[1], e[2*c+1]);
          end
          dn_release = 1; dn_release_bank = 1'(ob);
          @(negedge clk); dn_release = 0;
          ob = 1 - ob;
        end
        while (up_full[i%2]) @(negedge clk);
      end
    endtask

    initial begin
      repeat (3) @(negedge clk);
      rst_n = 1;
      run(11, 4);
      if (g == 0) run(10, 2);
      done[g] = 1;
    end
  end

  initial begin
    wait (done[0] && done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
