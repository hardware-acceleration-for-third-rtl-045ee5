// config_axil: AXI4-Lite register file through which the host programs the
// accelerator: configuration (modulus, Barrett constant, N, dc, B_G, mode),
// instructions, twiddle factors, and through which it reads the FIFO states.
//
// Register map (32-bit words, byte addresses):
//   0x00/0x04 Q low/high        0x08/0x0C mu low/high     0x10 qbits
//   0x14 log N                  0x18/0x1C N^-1 low/high   0x20 dc
//   0x24 log2 B_G               0x28 ctrl: bit0 bootstrap mode, bit1 drain
//   0x2C log2 q of the LWE      0x30/0x34 init test-vector value low/high
//   0x40 inst word 0: bit0 op (1 = key switch), bit1 init, [12:2] b of LWE,
//        [24:13] substitution exponent k
//   0x44 inst word 1: key DDR beat address; writing it pushes the instruction
//        (the write response waits until the ROB accepts it)
//   0x50 TF select/address: bit31 = 1 inverse (INTT), 0 forward (NTT), [10:0]
//   0x54/0x58 TF value low/high; writing 0x58 writes the twiddle factor
//   0x60 in/out FIFO beats (read only)   0x64 output FIFO beats (read only)
//   0x68 instructions in flight (read only)
// Write address and data are taken together; one write and one read are
// served at a time, with OKAY responses. The existence of the AXI-Lite
// configuration/instruction/status port follows the published design; the
// register map is this design's own.
module config_axil
  import fhe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // AXI4-Lite slave
  input  logic                awvalid,
  output logic                awready,
  input  logic [7:0]          awaddr,
  input  logic                wvalid,
  output logic                wready,
  input  logic [31:0]         wdata,
  output logic                bvalid,
  input  logic                bready,
  output logic [1:0]          bresp,
  input  logic                arvalid,
  output logic                arready,
  input  logic [7:0]          araddr,
  output logic                rvalid,
  input  logic                rready,
  output logic [31:0]         rdata,
  output logic [1:0]          rresp,
  // configuration
  output cfg_t                cfg,
  output logic                mode_boot,
  output logic                drain,
  // instruction push
  output logic                inst_valid,
  output inst_t               inst,
  input  logic                inst_ready,
  // twiddle factor load
  output logic                tf_we_fwd,
  output logic                tf_we_inv,
  output logic [LOGN_MAX-1:0] tf_addr,
  output coeff_t              tf_data,
  // status
  input  logic [31:0]         st_inout,
  input  logic [31:0]         st_output,
  input  logic [31:0]         st_rob
);
  logic [31:0] inst0;
  logic        tf_inv;
  logic        wfire, rfire;

  assign awready = awvalid && wvalid && !bvalid && !inst_valid;
  assign wready  = awready;
  assign wfire   = awready;
  assign arready = !rvalid;
  assign rfire   = arvalid && arready;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '0;
      mode_boot  <= 1'b0;
      drain      <= 1'b0;
      inst0      <= '0;
      inst       <= '0;
      inst_valid <= 1'b0;
      tf_inv     <= 1'b0;
      tf_addr    <= '0;
      tf_data    <= '0;
      tf_we_fwd  <= 1'b0;
      tf_we_inv  <= 1'b0;
      bvalid     <= 1'b0;
      rvalid     <= 1'b0;
      rdata      <= '0;
    end else begin
      tf_we_fwd <= 1'b0;
      tf_we_inv <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (inst_valid && inst_ready) begin
        inst_valid <= 1'b0;
        bvalid     <= 1'b1;
      end
      if (wfire) begin
        if (awaddr != 8'h44) bvalid <= 1'b1;
        unique case (awaddr)
          8'h00: cfg.q[31:0]         <= wdata;
          8'h04: cfg.q[53:32]        <= wdata[21:0];
          8'h08: cfg.mu[31:0]        <= wdata;
          8'h0C: cfg.mu[55:32]       <= wdata[23:0];
          8'h10: cfg.qbits           <= wdata[5:0];
          8'h14: cfg.logn            <= wdata[3:0];
          8'h18: cfg.n_inv[31:0]     <= wdata;
          8'h1C: cfg.n_inv[53:32]    <= wdata[21:0];
          8'h20: cfg.dc              <= wdata[3:0];
          8'h24: cfg.bg_bits         <= wdata[3:0];
          8'h28: {drain, mode_boot}  <= wdata[1:0];
          8'h2C: cfg.lwe_logq        <= wdata[3:0];
          8'h30: cfg.init_val[31:0]  <= wdata;
          8'h34: cfg.init_val[53:32] <= wdata[21:0];
          8'h40: inst0               <= wdata;
          8'h44: begin
            inst.op       <= op_e'(inst0[0]);
            inst.init     <= inst0[1];
            inst.b_lwe    <= inst0[12:2];
            inst.subs_k   <= inst0[24:13];
            inst.key_addr <= wdata;
            inst_valid    <= 1'b1;
          end
          8'h50: begin
            tf_inv  <= wdata[31];
            tf_addr <= wdata[LOGN_MAX-1:0];
          end
          8'h54: tf_data[31:0]       <= wdata;
          8'h58: begin
            tf_data[53:32] <= wdata[21:0];
            tf_we_fwd      <= !tf_inv;
            tf_we_inv      <= tf_inv;
          end
          default: ;
        endcase
      end
      if (rvalid && rready) rvalid <= 1'b0;
      if (rfire) begin
        rvalid <= 1'b1;
        unique case (araddr)
          8'h00: rdata <= cfg.q[31:0];
          8'h04: rdata <= 32'(cfg.q[53:32]);
          8'h10: rdata <= 32'(cfg.qbits);
          8'h14: rdata <= 32'(cfg.logn);
          8'h20: rdata <= 32'(cfg.dc);
          8'h24: rdata <= 32'(cfg.bg_bits);
          8'h28: rdata <= {30'd0, drain, mode_boot};
          8'h60: rdata <= st_inout;
          8'h64: rdata <= st_output;
          8'h68: rdata <= st_rob;
          default: rdata <= 32'd0;
        endcase
      end
    end
  end
endmodule
