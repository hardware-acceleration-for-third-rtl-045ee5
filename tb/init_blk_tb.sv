// init_blk_tb: checks the accumulator initialisation block. For random LWE
// values b, moduli 2^lwe_logq (smaller, equal and larger than 2N) and both
// N = 1024 and 2048, the reference polynomial X^r * (c, ..., c) is built by a
// negacyclic rotation in the testbench and compared quad by quad with the
// block output. Combinational; each beat is checked after #1.
module init_blk_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic [3:0] logn, lwe_logq;
  logic [10:0] b_lwe;
  coeff_t init_val, q;
  logic [LOGN_MAX-3:0] beat;
  quad_t b_quad;
  int checks = 0, failures = 0;
  init_blk dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ln, int lq, int b, u64 c);
    int n = 1 << ln;
    int r;
    poly_t t = new[n], e = new[n];
    // r = b * 2N / 2^lq
    r = (lq <= ln + 1) ? (b << (ln + 1 - lq)) : (b >> (lq - ln - 1));
    r = r % (2 * n);
    foreach (t[i]) t[i] = c;
    for (int i = 0; i < n; i++) begin   // e = X^r * t (negacyclic)
      int j = (i + r) % (2 * n);
      if (j < n) e[j] = t[i];
      else       e[j-n] = subm(0, t[i], Q);
    end
    logn = 4'(ln); lwe_logq = 4'(lq); b_lwe = 11'(b); init_val = c; q = Q;
    for (int k = 0; k < n / 4; k++) begin
      beat = 9'(k); #1;
      for (int m = 0; m < 4; m++) begin
        checks++;
        if (b_quad[m] !== coeff_t'(e[4*k+m])) begin
          failures++;
          if (failures < 10)
            $display("FAIL logn=%0d lq=%0d b=%0d coeff %0d: got %0d exp %0d",
                     ln, lq, b, 4*k+m, b_quad[m], e[4*k+m]);
        end
      end
    end
  endtask

  initial begin
    int lqs [4] = '{9, 10, 11, 12};
    for (int i = 0; i < 40; i++) begin
      int ln = 10 + (i % 2);
      int lq = lqs[$urandom_range(3)];
      if (lq > ln + 1) lq = ln + 1;
      run(ln, lq, $urandom_range((1 << lq) - 1), {$urandom, $urandom} % Q);
    end
    run(11, 11, 0, 5); run(11, 11, 1024, 5); run(10, 11, 2047, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
