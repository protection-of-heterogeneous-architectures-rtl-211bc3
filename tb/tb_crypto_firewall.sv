// tb_crypto_firewall: test of the Cryptographic Firewall (Firewall Interface,
// Security Builder, policy BRAM and AES-GCM module) in front of a memory.
//
// Sections: [0x8000_0000,+1M[ C+I read/write, [0x8010_0000,+1M[ I-only
// read/write, [0x8020_0000,+1M[ plaintext read only. Checked: a C+I write
// reaches the memory 6 + 22 + 1 cycles after the master raised it, as the
// standard AES-GCM ciphertext; I-only and plaintext words are stored in
// clear; reads come back; a write to the read-only section raises cF and an
// unmapped address nF, neither reaching the memory; a tampered word raises
// aF and is refused; keys are loaded through the key port.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_crypto_firewall;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #5_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] LO [10] = '{0: 32'h8000_0000, 1: 32'h8010_0000, 2: 32'h8020_0000, default: 32'h0};
  localparam logic [31:0] HI [10] = '{0: 32'h8010_0000, 1: 32'h8020_0000, 2: 32'h8030_0000, default: 32'h0};
  localparam logic [3:0]  PO [10] = '{0: 4'd1, 1: 4'd2, 2: 4'd3, default: 4'd0};
  localparam logic [31:0] SPI [16] = '{1: mk_policy(ACC_RW, 3'd2, 8'd0, 1'b1, 1'b1, 2'd0),
                                       2: mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b1, 2'd0),
                                       3: mk_policy(ACC_RO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0),
                                       default: 32'h0};

  axi_req_t m_req, s_req;
  axi_rsp_t m_rsp, s_rsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic        upd_en, upd_we, recfg_we, recfg_wdata, key_we;
  logic        recfg_en, frozen, ready_event, flag_cf, flag_nf, flag_af;
  logic [3:0]  upd_addr;
  logic [4:0]  key_addr;
  logic [31:0] upd_wdata, upd_rdata, key_wdata;

  crypto_firewall #(.RANGE_LOW(LO), .RANGE_HIGH(HI), .RANGE_OUT(PO), .SP_INIT(SPI)) dut (
    .clk, .rst_n, .up_req(m_req), .up_rsp(m_rsp), .mem_req(mreq), .mem_rsp(mrsp),
    .upd_en, .upd_we, .upd_addr, .upd_wdata, .upd_rdata, .recfg_we, .recfg_wdata,
    .key_we, .key_addr, .key_wdata,
    .recfg_en, .frozen, .ready_event, .flag_cf, .flag_nf, .flag_af
  );

  `include "tb_axi_tasks.svh"
  assign s_req = '0;

  logic [31:0] ddr [logic [31:0]];
  int t_mem = -1, n_mem = 0;
  assign mrsp.ready = 1'b1;
  always @(posedge clk) begin
    mrsp.rvalid <= 1'b0;
    if (mreq.valid) n_mem++;
    if (mreq.valid && mreq.we) ddr[mreq.addr] = mreq.wdata;
    if (mreq.valid && !mreq.we) begin
      mrsp.rvalid <= 1'b1;
      mrsp.rdata  <= ddr.exists(mreq.addr) ? ddr[mreq.addr] : 32'h0;
    end
  end
  always @(posedge clk) begin #1; if (t_mem < 0 && mreq.valid && mreq.we) t_mem = cyc; end

  int n_cf = 0, n_nf = 0, n_af = 0;
  always @(posedge clk) begin
    if (flag_cf) n_cf++;
    if (flag_nf) n_nf++;
    if (flag_af) n_af++;
  end

  task automatic unfreeze();
    recfg_we = 1; recfg_wdata = 1; step(); recfg_wdata = 0; step(); recfg_we = 0;
    repeat (3) step();
    `CHECK(!frozen, "update releases the freeze")
  endtask

  initial begin
    logic [127:0] k, h;
    logic [31:0] d;
    logic [1:0] resp;
    int t0, nm0;
    m_req = '0; upd_en = 0; upd_we = 0; upd_addr = 0; upd_wdata = 0; recfg_we = 0; recfg_wdata = 0;
    key_we = 0; key_addr = 0; key_wdata = 0; mrsp.rvalid = 0; mrsp.rdata = 0;
    k = 128'h000102030405060708090a0b0c0d0e0f;
    h = 128'hc6a13b37878f5b826f4f8162a1c8d879;
    step(); rst_n = 1; step();
    for (int i = 0; i < 4; i++) begin
      key_we = 1; key_addr = 5'(i);     key_wdata = k[127 - 32 * i -: 32]; step();
      key_we = 1; key_addr = 5'(4 + i); key_wdata = h[127 - 32 * i -: 32]; step();
    end
    key_we = 0;

    t_mem = -1;
    axi_write(32'h8000_0010, 32'hDEAD_BEEF, 0, 3'd2, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "C+I write")
    `CHECK_EQ(ddr[32'h8000_0010], 32'h1cbc_f785, "C+I ciphertext in memory")
    `CHECK_EQ(t_mem - t0, 6 + 22 + 1, "check + AES-GCM + output cycle")
    axi_read(32'h8000_0010, 0, 3'd2, d, resp, t0);
    `CHECK_EQ(d, 32'hDEAD_BEEF, "C+I read back")
    `CHECK_EQ(resp, RESP_OKAY, "C+I read authenticates")

    t_mem = -1;
    axi_write(32'h8010_0040, 32'h0BAD_C0DE, 0, 3'd2, resp, t0);
    `CHECK_EQ(ddr[32'h8010_0040], 32'h0BAD_C0DE, "I-only word in clear")
    `CHECK_EQ(t_mem - t0, 6 + 12 + 1, "check + GMAC + output cycle")
    axi_read(32'h8010_0040, 0, 3'd2, d, resp, t0);
    `CHECK_EQ(d, 32'h0BAD_C0DE, "I-only read back")

    ddr[32'h8020_0000] = 32'h7777_0000;
    axi_read(32'h8020_0000, 0, 3'd2, d, resp, t0);
    `CHECK_EQ(d, 32'h7777_0000, "plaintext read")

    nm0 = n_mem;
    axi_write(32'h8020_0000, 32'h1, 0, 3'd2, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "write to read-only section refused")
    `CHECK_EQ(n_cf, 1, "cF raised")
    `CHECK_EQ(n_mem, nm0, "refused write never reaches memory")
    unfreeze();
    axi_read(32'h9000_0000, 0, 3'd2, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "unmapped address refused")
    `CHECK_EQ(n_nf, 1, "nF raised")
    unfreeze();

    ddr[32'h8000_0010] ^= 32'h8000_0000;
    axi_read(32'h8000_0010, 0, 3'd2, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "tampered word refused")
    `CHECK_EQ(d, 32'h0, "tampered word not returned")
    `CHECK_EQ(n_af, 1, "aF raised")
    for (int n = 0; n < 20; n++) begin
      logic [31:0] a, w;
      a = 32'h8000_0000 + 4 * $urandom_range(32'h7FFFF);
      w = $urandom;
      axi_write(a, w, 0, 3'd2, resp, t0);
      axi_read(a, 0, 3'd2, d, resp, t0);
      `CHECK_EQ(d, w, "random round trip")
      `CHECK_EQ(resp, RESP_OKAY, "random round trip authenticates")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
