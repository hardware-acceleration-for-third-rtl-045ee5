// poly_buffer_tb: checks the dual-port line buffer. It writes every line
// through alternating ports (two different lines per cycle), then reads all
// lines back on both ports and checks that read data appear exactly one
// cycle after the address (registered read), and that a write on one port
// does not disturb a line read on the other.
module poly_buffer_tb;
  import fhe_pkg::*;
  localparam int unsigned DEPTH = N_MAX / 2;
  logic clk = 0;
  always #5 clk = !clk;
  logic we_a = 0, we_b = 0;
  logic [$clog2(DEPTH)-1:0] addr_a = '0, addr_b = '0;
  line_t wdata_a = '0, wdata_b = '0, rdata_a, rdata_b;
  line_t model [DEPTH];
  int checks = 0, failures = 0;
  poly_buffer dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd();
    return {COEFF_W'({$urandom, $urandom}), COEFF_W'({$urandom, $urandom})};
  endfunction

  task automatic chk(string w, line_t got, line_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", w, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      we_a = 1; addr_a = i[$clog2(DEPTH)-1:0]; wdata_a = rnd(); model[i] = wdata_a;
      we_b = 1; addr_b = 10'(i + 1); wdata_b = rnd(); model[i+1] = wdata_b;
    end
    @(negedge clk); we_a = 0; we_b = 0;
    for (int i = 0; i < DEPTH; i++) begin
      addr_a = 10'(i); addr_b = 10'(DEPTH - 1 - i);
      @(negedge clk);
      chk("port a", rdata_a, model[i]);
      chk("port b", rdata_b, model[DEPTH-1-i]);
    end
    // read on A while B writes another line
    for (int i = 0; i < 200; i++) begin
      automatic int ra = $urandom_range(DEPTH - 1), wb;
      do wb = $urandom_range(DEPTH - 1); while (wb == ra);
      addr_a = 10'(ra); we_b = 1; addr_b = 10'(wb); wdata_b = rnd();
      @(negedge clk);
      chk("read during write", rdata_a, model[ra]);
      model[wb] = wdata_b;
      we_b = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
