// butterfly_tb: checks both butterfly types on random inputs modulo the 54-bit
// working prime. Cooley-Tukey (gs = 0): x = u + v*s, y = u - v*s.
// Gentleman-Sande (gs = 1): x = u + v, y = (u - v)*s. Combinational; each
// check is taken after a #1 settle delay.
module butterfly_tb;
  import fhe_pkg::*;
  import fhe_ref_pkg::*;
  localparam u64 Q = 64'd18014398509404161;
  logic gs;
  coeff_t u, v, s, q, x, y;
  logic [55:0] mu;
  logic [5:0] qbits;
  int checks = 0, failures = 0;
  butterfly dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, u64 got, u64 exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s gs=%0d: got %0d exp %0d", w, gs, got, exp);
    end
  endtask

  initial begin
    q = Q; mu = 56'(barrett_mu(Q)); qbits = 6'(bitlen(Q));
    for (int i = 0; i < 20000; i++) begin
      automatic u64 uu = {$urandom, $urandom} % Q, vv = {$urandom, $urandom} % Q, ss = {$urandom, $urandom} % Q;
      if (i == 0) begin uu = Q - 1; vv = Q - 1; end
      u = uu; v = vv; s = ss;
      gs = 0; #1;
      chk("ct.x", x, addm(uu, mulm(vv, ss, Q), Q));
      chk("ct.y", y, subm(uu, mulm(vv, ss, Q), Q));
      gs = 1; #1;
      chk("gs.x", x, addm(uu, vv, Q));
      chk("gs.y", y, mulm(subm(uu, vv, Q), ss, Q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
