// config_axil_tb: checks the AXI4-Lite register file. Random values are
// written to every configuration register and checked on the cfg outputs
// and, where readable, by read-back; mode and drain bits are toggled; an
// instruction write must hold its write response until the instruction is
// accepted (inst_ready is held low for a random time); a twiddle-factor
// write must pulse exactly one of the forward/inverse write strobes with the
// right address and value; status registers read back the status inputs.
module config_axil_tb;
  import fhe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [7:0] awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  cfg_t cfg;
  logic mode_boot, drain, inst_valid, inst_ready = 0, tf_we_fwd, tf_we_inv;
  inst_t inst;
  logic [LOGN_MAX-1:0] tf_addr;
  coeff_t tf_data;
  logic [31:0] st_inout = '0, st_output = '0, st_rob = '0;
  int checks = 0, failures = 0, n_fwd = 0, n_inv = 0;
  config_axil dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h exp %0h", w, got, exp);
    end
  endtask

  task automatic axw(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    @(posedge clk); while (!awready) @(posedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(posedge clk);
    chk("bresp", bresp, 0);
  endtask
  task automatic axr(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    chk("rresp", rresp, 0);
  endtask

  logic [LOGN_MAX-1:0] tf_a_seen;
  coeff_t tf_d_seen;
  always @(posedge clk) begin
    if (tf_we_fwd) begin n_fwd++; tf_a_seen = tf_addr; tf_d_seen = tf_data; end
    if (tf_we_inv) begin n_inv++; tf_a_seen = tf_addr; tf_d_seen = tf_data; end
  end

  initial begin
    logic [31:0] rd;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      automatic logic [53:0] q = {$urandom, $urandom}, ni = {$urandom, $urandom}, iv = {$urandom, $urandom};
      automatic logic [55:0] mu = {$urandom, $urandom};
      automatic logic [3:0] logn = 4'($urandom), dc = 4'($urandom), bg = 4'($urandom), lq = 4'($urandom);
      automatic logic [5:0] qb = 6'($urandom);
      automatic logic [1:0] ctl = 2'($urandom);
      axw(8'h00, q[31:0]); axw(8'h04, 32'(q[53:32]));
      axw(8'h08, mu[31:0]); axw(8'h0C, 32'(mu[55:32]));
      axw(8'h10, 32'(qb)); axw(8'h14, 32'(logn));
      axw(8'h18, ni[31:0]); axw(8'h1C, 32'(ni[53:32]));
      axw(8'h20, 32'(dc)); axw(8'h24, 32'(bg)); axw(8'h28, 32'(ctl)); axw(8'h2C, 32'(lq));
      axw(8'h30, iv[31:0]); axw(8'h34, 32'(iv[53:32]));
      chk("q", cfg.q, q); chk("mu", cfg.mu, mu); chk("qbits", cfg.qbits, qb);
      chk("logn", cfg.logn, logn); chk("n_inv", cfg.n_inv, ni); chk("dc", cfg.dc, dc);
      chk("bg", cfg.bg_bits, bg); chk("lwe_logq", cfg.lwe_logq, lq); chk("init", cfg.init_val, iv);
      chk("mode", mode_boot, ctl[0]); chk("drain", drain, ctl[1]);
      axr(8'h00, rd); chk("rd q lo", rd, q[31:0]);
      axr(8'h04, rd); chk("rd q hi", rd, 32'(q[53:32]));
      axr(8'h14, rd); chk("rd logn", rd, 32'(logn));
      axr(8'h20, rd); chk("rd dc", rd, 32'(dc));
      axr(8'h28, rd); chk("rd ctrl", rd, 32'(ctl));
      // instruction push with a held write response
      begin
        automatic logic [31:0] w0 = $urandom, ka = $urandom;
        automatic int hold = $urandom_range(1, 20), seen_b = 0;
        axw(8'h40, w0);
        fork
          begin
            @(negedge clk); awvalid = 1; wvalid = 1; awaddr = 8'h44; wdata = ka;
            @(posedge clk); while (!awready) @(posedge clk);
            @(negedge clk); awvalid = 0; wvalid = 0;
          end
          begin
            while (!inst_valid) @(negedge clk);
            repeat (hold) begin
              @(negedge clk);
              if (bvalid) seen_b++;
            end
            chk("inst op", inst.op, w0[0]); chk("inst init", inst.init, w0[1]);
            chk("inst b", inst.b_lwe, w0[12:2]); chk("inst k", inst.subs_k, w0[24:13]);
            chk("inst key", inst.key_addr, ka);
            inst_ready = 1; @(negedge clk); inst_ready = 0;
            chk("inst_valid dropped", inst_valid, 0);
            while (!bvalid) @(posedge clk);
          end
        join
        chk("bresp held until accepted", seen_b, 0);
      end
      // twiddle factor
      begin
        automatic bit inv = $urandom_range(1);
        automatic logic [10:0] a = 11'($urandom);
        automatic logic [53:0] d = {$urandom, $urandom};
        automatic int f0 = n_fwd, i0 = n_inv;
        axw(8'h50, {inv, 20'd0, a}); axw(8'h54, d[31:0]); axw(8'h58, 32'(d[53:32]));
        repeat (2) @(negedge clk);
        chk("tf fwd strobes", n_fwd - f0, !inv); chk("tf inv strobes", n_inv - i0, inv);
        chk("tf addr", tf_a_seen, a); chk("tf data", tf_d_seen, d);
      end
      st_inout = $urandom; st_output = $urandom; st_rob = $urandom;
      axr(8'h60, rd); chk("st inout", rd, st_inout);
      axr(8'h64, rd); chk("st output", rd, st_output);
      axr(8'h68, rd); chk("st rob", rd, st_rob);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
