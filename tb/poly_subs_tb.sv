// poly_subs_tb: checks the substitution block and its double-banked buffer.
// RLWEs (a then b, one quad per beat) are streamed in with random valid gaps
// for RLWE x RGSW (bypass), key switch with k = 1 (bypass) and key switch
// with random odd k, at N = 2048 and N = 1024. A reader model waits for a
// full bank, reads it line by line with random pauses, compares it with the
// reference substitution and the tag, and releases it. Also checked: the
// input stalls while the next bank is still full, and an uninterrupted
// polynomial is written in N/4 cycles (one beat per cycle).
module poly_subs_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;
  cfg_t cfg = '0;
  logic clr = 0, in_valid = 0, in_is_b = 0, in_last = 0, in_ready;
  quad_t in_data = '0;
  inst_t in_inst = '0;
  logic [1:0] full;
  tag_t [1:0] tag;
  logic rd_bank = 0, release_i = 0, release_bank = 0;
  logic [LOGN_MAX-2:0] rd_addr0 = '0, rd_addr1 = '0;
  line_t rd_data0, rd_data1;
  int checks = 0, failures = 0, n_stall = 0;
  poly_subs dut (.*);

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

  always @(posedge clk) if (in_valid && !in_ready) n_stall++;

  poly_t exp_p [$];
  tag_t  exp_t [$];

  task automatic send(int n, bit ks, int k, bit gaps);
    poly_t a = rand_poly(n, Q), b = rand_poly(n, Q);
    tag_t t = '0;
    t.op_ks = ks;
    in_inst = '0; in_inst.op = ks ? OP_KS : OP_RGSW; in_inst.subs_k = 12'(k);
    for (int p = 0; p < 2; p++) begin
      poly_t src = p ? b : a;
      longint t0 = -1;
      t.is_b = p;
      exp_p.push_back(ks ? subs(src, k, Q) : src);
      exp_t.push_back(t);
      for (int i = 0; i < n / 4; i++) begin
        @(negedge clk);
        if (gaps) while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_is_b = p; in_last = p && (i == n / 4 - 1);
        for (int m = 0; m < 4; m++) in_data[m] = src[4*i+m];
        @(posedge clk); while (!in_ready) @(posedge clk);
        if (i == 0) t0 = cycle;
        if (i == n / 4 - 1 && !gaps) chk("write rate", cycle - t0, n / 4 - 1);
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  task automatic reader(int n, int total, bit slow);
    int bank = 0;
    for (int j = 0; j < total; j++) begin
      poly_t e;
      tag_t t;
      @(negedge clk);
      while (!full[bank]) @(negedge clk);
      if (slow) repeat (n) @(negedge clk);
      e = exp_p.pop_front(); t = exp_t.pop_front();
      chk("tag", tag[bank], t);
      rd_bank = 1'(bank);
      for (int c = 0; c < n / 4; c++) begin
        rd_addr0 = 10'(2 * c); rd_addr1 = 10'(2 * c + 1);
        @(negedge clk);
        for (int m = 0; m < 2; m++) begin
          chk("line0", rd_data0[m], e[4*c+m]);
          chk("line1", rd_data1[m], e[4*c+2+m]);
        end
      end
      release_i = 1; release_bank = 1'(bank);
      @(negedge clk); release_i = 0;
      bank = 1 - bank;
    end
  endtask

  task automatic run(int logn, bit slow);
    int n = 1 << logn;
    cfg = '0; cfg.q = Q; cfg.logn = 4'(logn);
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    fork
      begin
        send(n, 0, 1, 0);
        send(n, 1, 1, 1);
        send(n, 1, 5, 0);
        for (int i = 0; i < 3; i++) send(n, 1, 2 * $urandom_range(n - 1) + 1, 1);
        send(n, 1, 2 * n - 1, 0);
      end
      reader(n, 14, slow);
    join
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(11, 1);
    run(10, 0);
    chk("input stalled on full buffer", n_stall > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
