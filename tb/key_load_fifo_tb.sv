// key_load_fifo_tb: checks the key load FIFO against a DDR model with random
// latency and random request back-pressure, for a sequence of RLWE x RGSW and
// key-switch instructions at N = 2048 and N = 1024. Each instruction must
// produce exactly (2dc or dc) * N/4 requests at consecutive addresses from
// its key address; the consumer (random ready) must receive the DDR data in
// order. With a slow consumer the FIFO must never hold more than DEPTH beats
// (the outstanding-request limit), which the DDR model checks.
module key_load_fifo_tb;
  import fhe_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  cfg_t cfg = '0;
  logic inst_valid = 0, inst_ready, ddr_req_valid, ddr_req_ready = 0, ddr_resp_valid = 0;
  logic key_valid, key_ready = 0;
  inst_t inst = '0;
  logic [KEY_AW-1:0] ddr_req_addr;
  key_beat_t ddr_resp_data = '0, key_data;
  int checks = 0, failures = 0;
  key_load_fifo dut (.*);

  initial begin
    #50_000_000;
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

  function automatic key_beat_t beat_of(logic [31:0] a);
    key_beat_t b;
    for (int k = 0; k < 8; k++) b[k/4][k%4] = COEFF_W'({a, 8'(k)});
    return b;
  endfunction

  // DDR: requests accepted randomly, answered after 1..8 cycles, in order
  logic [31:0] exp_req [$];          // addresses the instructions should request
  logic [31:0] exp_key [$];          // addresses whose data the consumer should see
  longint pend_t [$];
  logic [31:0] pend_a [$];
  longint cycle = 0;
  int held = 0, max_held = 0;
  always @(posedge clk) begin
    cycle++;
    if (ddr_req_valid && ddr_req_ready) begin
      logic [31:0] e;
      e = exp_req.pop_front();
      chk("request address", ddr_req_addr, e);
      pend_a.push_back(ddr_req_addr);
      pend_t.push_back(cycle + $urandom_range(1, 8));
    end
  end
  always @(negedge clk) begin
    ddr_req_ready = ($urandom_range(3) != 0);
    ddr_resp_valid = 0;
    if (pend_t.size() != 0 && pend_t[0] <= cycle) begin
      logic [31:0] a;
      void'(pend_t.pop_front());
      a = pend_a.pop_front();
      ddr_resp_valid = 1;
      ddr_resp_data = beat_of(a);
    end
  end

  task automatic issue(bit ks, int logn, int dc, logic [31:0] ka);
    int n = (ks ? dc : 2 * dc) << (logn - 2);
    @(negedge clk);
    while (!inst_ready) @(negedge clk);
    cfg.logn = 4'(logn); cfg.dc = 4'(dc);
    inst = '0; inst.op = ks ? OP_KS : OP_RGSW; inst.key_addr = ka;
    inst_valid = 1;
    for (int i = 0; i < n; i++) begin exp_req.push_back(ka + i); exp_key.push_back(ka + i); end
    @(negedge clk); inst_valid = 0;
  endtask

  initial begin
    int got = 0, total;
    bit slow = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin
        issue(0, 11, 6, 32'h1000);
        issue(1, 11, 6, 32'h9000);
        issue(0, 10, 3, 32'h20000);
        issue(1, 10, 2, 32'h30000);
      end
      begin
        total = (12 + 6) * 512 + (6 + 2) * 256;
        while (got < total) begin
          @(negedge clk);
          key_ready = slow ? ($urandom_range(15) == 0) : ($urandom_range(1) == 0);
          if (got > 3000) slow = 0;
          #1;
          if (key_valid && key_ready) begin
            logic [31:0] e;
            e = exp_key.pop_front();
            chk("key data", key_data, beat_of(e));
            got++;
          end
          max_held = (dut.count > max_held) ? int'(dut.count) : max_held;
        end
      end
    join
    chk("fifo filled to its depth", max_held, DEPTH);
    chk("no extra request", exp_req.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
