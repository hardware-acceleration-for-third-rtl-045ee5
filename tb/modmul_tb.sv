// modmul_tb: checks the Barrett modular multiplier against a reference
// product for random operands under three moduli (the 54-bit working prime,
// a 32-bit prime and a small prime), including the corner operands 0, 1 and
// q-1. The multiplier is combinational, so each check is taken after a #1
// settle delay; no clock is used.
module modmul_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  coeff_t a, b, q, r;
  logic [55:0] mu;
  logic [5:0] qbits;
  int checks = 0, failures = 0;
  modmul dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(u64 x, u64 y);
    a = x; b = y; #1;
    checks++;
    if (r !== coeff_t'(mulm(x, y, q))) begin
      failures++;
      if (failures < 10) $display("FAIL %0d*%0d mod %0d: got %0d", x, y, q, r);
    end
  endtask

  initial begin
    u64 qs [3] = '{64'd18014398509404161, 64'd4294955009, 64'd12289};
    foreach (qs[j]) begin
      q = qs[j]; mu = 56'(barrett_mu(qs[j])); qbits = 6'(bitlen(qs[j]));
      one(0, 0); one(1, qs[j] - 1); one(qs[j] - 1, qs[j] - 1);
      for (int i = 0; i < 20000; i++)
        one({$urandom, $urandom} % qs[j], {$urandom, $urandom} % qs[j]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
