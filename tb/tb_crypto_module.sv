// tb_crypto_module: test of the AES-GCM cryptographic module.
//
// The key file is loaded with K = 000102..0f and H = E_K(0) (pair 0) and the
// same pair at index 1. Against values from a standard AES-GCM
// implementation (IV = {0, address, timestamp}, 32-bit word, tag cut to 32
// bits) the test checks: the ciphertext of a C+I write in the external
// memory and its tag in the on-chip MAC memory, the next timestamp on a
// rewrite, the GMAC tag of an I-only write with the word left in clear, a
// plaintext write passed unchanged; that reads decrypt and authenticate; that
// a flipped bit or a replayed old word gives auth_fail and SLVERR with data
// 0. Latency from acceptance to the memory write: 22 cycles of AES-GCM (the
// paper's 10 + 12N for N = 1) plus one output cycle; 12 + 1 for integrity
// only; 1 for plaintext.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_crypto_module;
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

  axi_req_t m_req, s_req;
  axi_rsp_t m_rsp, s_rsp;
  policy_t  sp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic     key_we, auth_fail;
  logic [4:0]  key_addr;
  logic [31:0] key_wdata;

  crypto_module dut (
    .clk, .rst_n, .s_req(m_req), .s_rsp(m_rsp), .sp, .m_req(mreq), .m_rsp(mrsp),
    .key_we, .key_addr, .key_wdata, .auth_fail
  );

  `include "tb_axi_tasks.svh"
  assign s_req = '0;   // the shared slave model is not used here

  // external memory
  logic [31:0] ddr [logic [31:0]];
  int t_mem = -1;
  assign mrsp.ready = 1'b1;
  always @(posedge clk) begin
    mrsp.rvalid <= 1'b0;
    if (mreq.valid && mreq.we) ddr[mreq.addr] = mreq.wdata;
    if (mreq.valid && !mreq.we) begin
      mrsp.rvalid <= 1'b1;
      mrsp.rdata  <= ddr.exists(mreq.addr) ? ddr[mreq.addr] : 32'h0;
    end
  end
  always @(posedge clk) begin #1; if (t_mem < 0 && mreq.valid && mreq.we) t_mem = cyc; end

  int n_af = 0;
  always @(posedge clk) if (auth_fail) n_af++;

  localparam policy_t CI = policy_t'(mk_policy(ACC_RW, 3'd2, 8'd0, 1'b1, 1'b1, 2'd0));
  localparam policy_t IO = policy_t'(mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b1, 2'd1));
  localparam policy_t PL = policy_t'(mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0));

  task automatic wr(input policy_t p, input logic [31:0] a, input logic [31:0] d, input int lat);
    logic [1:0] resp; int t0;
    sp = p; t_mem = -1;
    axi_write(a, d, 0, 3'd2, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "write response")
    `CHECK_EQ(t_mem - t0, lat, "latency to the memory write")
  endtask

  task automatic rd(input policy_t p, input logic [31:0] a, input logic [31:0] exp, input logic good);
    logic [31:0] d; logic [1:0] resp; int t0, af0;
    sp = p; af0 = n_af;
    axi_read(a, 0, 3'd2, d, resp, t0);
    if (good) begin
      `CHECK_EQ(resp, RESP_OKAY, "read authenticates")
      `CHECK_EQ(d, exp, "read data")
      `CHECK_EQ(n_af, af0, "no authenticationFlag")
    end else begin
      `CHECK_EQ(resp, RESP_SLVERR, "forged word refused")
      `CHECK_EQ(d, 32'h0, "no data for a forged word")
      `CHECK_EQ(n_af, af0 + 1, "authenticationFlag raised once")
    end
  endtask

  initial begin
    logic [127:0] k, h;
    logic [31:0] w;
    m_req = '0; sp = '0; key_we = 0; key_addr = 0; key_wdata = 0;
    mrsp.rvalid = 0; mrsp.rdata = 0;
    k = 128'h000102030405060708090a0b0c0d0e0f;
    h = 128'hc6a13b37878f5b826f4f8162a1c8d879;
    step(); rst_n = 1; step();
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < 4; i++) begin
        key_we = 1; key_addr = 5'(8 * p + i);     key_wdata = k[127 - 32 * i -: 32]; step();
        key_we = 1; key_addr = 5'(8 * p + 4 + i); key_wdata = h[127 - 32 * i -: 32]; step();
      end
    key_we = 0;

    wr(CI, 32'h8000_0010, 32'hDEAD_BEEF, 23);
    `CHECK_EQ(ddr[32'h8000_0010], 32'h1cbc_f785, "C+I ciphertext")
    `CHECK_EQ(dut.mac_mem[4], 32'hd05e_9a3b, "C+I tag")
    rd(CI, 32'h8000_0010, 32'hDEAD_BEEF, 1);
    wr(CI, 32'h8000_0010, 32'h1234_5678, 23);
    `CHECK_EQ(ddr[32'h8000_0010], 32'he050_7d9f, "ciphertext with timestamp 2")
    `CHECK_EQ(dut.mac_mem[4], 32'h94cb_5e86, "tag with timestamp 2")
    wr(CI, 32'h8400_0020, 32'hCAFE_F00D, 23);
    `CHECK_EQ(ddr[32'h8400_0020], 32'hb61e_d498, "C+I ciphertext, second address")
    `CHECK_EQ(dut.mac_mem[8], 32'h0c8e_ac88, "C+I tag, second address")
    wr(IO, 32'h8800_0040, 32'h0BAD_C0DE, 13);
    `CHECK_EQ(ddr[32'h8800_0040], 32'h0BAD_C0DE, "I-only word in clear")
    `CHECK_EQ(dut.mac_mem[16], 32'hfd23_c7b3, "GMAC tag")
    rd(IO, 32'h8800_0040, 32'h0BAD_C0DE, 1);
    wr(PL, 32'h8200_0000, 32'h5555_AAAA, 1);
    `CHECK_EQ(ddr[32'h8200_0000], 32'h5555_AAAA, "plaintext word")
    rd(PL, 32'h8200_0000, 32'h5555_AAAA, 1);
    // attacks
    ddr[32'h8800_0040] ^= 32'h1;
    rd(IO, 32'h8800_0040, 0, 0);
    ddr[32'h8000_0010] = 32'h1cbc_f785;          // replay of the first ciphertext
    rd(CI, 32'h8000_0010, 0, 0);
    // random round trips
    for (int n = 0; n < 30; n++) begin
      logic [31:0] a;
      policy_t p;
      a = 32'h8000_0000 + 4 * $urandom_range(1023);
      w = $urandom;
      p = ($urandom_range(1) == 0) ? CI : IO;
      wr(p, a, w, p.cmode ? 23 : 13);
      rd(p, a, w, 1);
      if (p.cmode) `CHECK(ddr[a] != w, "C+I word leaves the chip encrypted")
      if ($urandom_range(3) == 0) begin
        ddr[a] ^= (32'h1 << $urandom_range(31));
        rd(p, a, 0, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
