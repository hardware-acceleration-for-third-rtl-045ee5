// rlwe_fifo_tb: checks the RLWE FIFO at its default depth (12 RLWEs of
// N = 2048, 12288 beats). The writer first fills it until wr_ready drops,
// which must happen at exactly DEPTH entries; then writer and reader run
// with random valid/ready. Data must come out in order (first word fall
// through) and count must track the occupancy.
module rlwe_fifo_tb;
  import fhe_pkg::*;
  localparam int DEPTH = 12 * N_MAX / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  quad_t wr_data = '0, rd_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  rlwe_fifo dut (.*);

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

  quad_t model [$];
  function automatic quad_t rnd();
    quad_t d;
    for (int k = 0; k < 4; k++) d[k] = COEFF_W'({$urandom, $urandom});
    return d;
  endfunction

  initial begin
    int nw = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // fill
    forever begin
      @(negedge clk);
      wr_valid = 1; wr_data = rnd(); #1;
      if (!wr_ready) break;
      @(posedge clk); model.push_back(wr_data); nw++;
    end
    chk("capacity", nw, DEPTH);
    chk("count full", count, DEPTH);
    // random traffic
    for (int cyc = 0; cyc < 40000; cyc++) begin
      @(negedge clk);
      wr_valid = ($urandom_range(1) == 0); wr_data = rnd();
      rd_ready = ($urandom_range(2) != 0); #1;
      chk("count", count, model.size());
      chk("rd_valid", rd_valid, model.size() != 0);
      if (rd_valid) chk("data", rd_data, model[0]);
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
