// rob_tb: checks the instruction reorder buffer. Random instructions are
// pushed while the dispatch port, the key port and the retire input are
// driven by independent random consumers (retire only for dispatched
// entries). Both ports must present the instructions in push order, the
// buffer must refuse pushes exactly when DEPTH entries are in flight, and
// in_flight must equal pushes minus retires.
module rob_tb;
  import fhe_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic push_valid = 0, push_ready, disp_valid, disp_ready = 0, key_valid, key_ready = 0, retire = 0;
  inst_t push_inst = '0, disp_inst, key_inst;
  logic [4:0] in_flight;
  int checks = 0, failures = 0;
  rob #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", w, got, exp);
    end
  endtask

  inst_t hist [$];
  int np = 0, nd = 0, nk = 0, nr = 0, nfull = 0;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      push_valid = ($urandom_range(3) != 0);
      push_inst = inst_t'({$urandom, $urandom});
      disp_ready = ($urandom_range(3) == 0);
      key_ready = ($urandom_range(2) == 0);
      retire = (nr < nd) && ($urandom_range(3) == 0);
      #1;
      chk("in_flight", in_flight, np - nr);
      chk("push_ready", push_ready, (np - nr) != DEPTH);
      chk("disp_valid", disp_valid, nd < np);
      chk("key_valid", key_valid, nk < np);
      if (disp_valid) chk("disp order", disp_inst, hist[nd]);
      if (key_valid) chk("key order", key_inst, hist[nk]);
      @(posedge clk);
      if (push_valid && push_ready) begin hist.push_back(push_inst); np++; end
      if (!push_ready) nfull++;
      if (disp_valid && disp_ready) nd++;
      if (key_valid && key_ready) nk++;
      if (retire) nr++;
    end
    chk("buffer became full", nfull > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
