// tb_bram_ctrl: test of the BRAM controller of the update path (and of the
// AXI-Lite front end it shares with the other security-bus slaves).
//
// A policy Block RAM (sp_bram) and a recfgEn register model sit behind it.
// Checks: writing N policy words gives exactly N one-cycle port-B writes
// (the paper: N policies in N cycles) with the right address and data; the
// words read back over AXI-Lite; writing 0x100 sets and clears recfgEn and
// reads return it; writes at 0x200 + 4k produce a one-cycle key write with
// key address k.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_bram_ctrl;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  axil_req_t   lreq;
  axil_rsp_t   lrsp;
  logic        upd_en, upd_we, recfg_we, recfg_wdata, key_we;
  logic        recfg_en;
  logic [3:0]  upd_addr;
  logic [4:0]  key_addr;
  logic [31:0] upd_wdata, upd_rdata, key_wdata;

  bram_ctrl dut (.clk, .rst_n, .s_req(lreq), .s_rsp(lrsp), .upd_en, .upd_we, .upd_addr,
                 .upd_wdata, .upd_rdata, .recfg_we, .recfg_wdata, .recfg_en,
                 .key_we, .key_addr, .key_wdata);

  sp_bram u_bram (.clk, .a_en(1'b0), .a_addr(4'd0), .a_rdata(),
                  .b_en(upd_en), .b_we(upd_we), .b_addr(upd_addr), .b_wdata(upd_wdata),
                  .b_rdata(upd_rdata));

  always @(posedge clk or negedge rst_n)
    if (!rst_n) recfg_en <= 1'b0; else if (recfg_we) recfg_en <= recfg_wdata;

  `include "tb_axil_tasks.svh"

  int n_bwr = 0, n_kwr = 0;
  logic [4:0]  last_key;
  logic [31:0] last_kdata;
  always @(posedge clk) begin
    if (upd_en && upd_we) n_bwr++;
    if (key_we) begin n_kwr++; last_key = key_addr; last_kdata = key_wdata; end
  end

  initial begin
    logic [31:0] d, model [16];
    logic [1:0] resp;
    lreq = '0;
    step(); rst_n = 1; step();
    for (int n = 1; n <= 15; n++) begin
      int w0;
      w0 = n_bwr;
      for (int p = 0; p < n; p++) begin
        model[p] = $urandom;
        axil_write(4 * p, model[p], resp);
        `CHECK_EQ(resp, RESP_OKAY, "policy write OKAY")
      end
      `CHECK_EQ(n_bwr - w0, n, "N policies take N BRAM write cycles")
      for (int p = 0; p < n; p++) begin
        axil_read(4 * p, d, resp);
        `CHECK_EQ(d, model[p], "policy word read back")
      end
    end
    axil_write(32'h100, 32'h1, resp);
    `CHECK(recfg_en, "recfgEn set")
    axil_read(32'h100, d, resp);
    `CHECK_EQ(d, 32'h1, "recfgEn read back")
    axil_write(32'h100, 32'h0, resp);
    `CHECK(!recfg_en, "recfgEn cleared")
    axil_read(32'h100, d, resp);
    `CHECK_EQ(d, 32'h0, "recfgEn read back 0")
    for (int k = 0; k < 32; k++) begin
      int k0;
      k0 = n_kwr;
      d = $urandom;
      axil_write(32'h200 + 4 * k, d, resp);
      `CHECK_EQ(n_kwr - k0, 1, "one key write")
      `CHECK_EQ(last_key, 5'(k), "key address")
      `CHECK_EQ(last_kdata, d, "key data")
    end
    `CHECK_EQ(n_bwr, 120, "no stray BRAM writes")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
