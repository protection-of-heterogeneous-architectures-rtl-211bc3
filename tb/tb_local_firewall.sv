// tb_local_firewall: test of a Local Firewall (Firewall Interface, Security
// Builder and policy BRAM together) between a master and a memory.
//
// Policies: [0x1000,0x2000[ read/write, [0x2000,0x3000[ read only,
// [0x3000,0x3100[ write only with AxLEN 0. Random accesses, about half of
// them illegal, are compared with the expected decision: a legal access
// reaches the memory exactly 6 cycles after the master raised it (the
// paper's S0) and returns its data; an illegal one never reaches the memory,
// is answered SLVERR with data 0, pulses cF or nF once, freezes the firewall
// and is released by an update (recfgEn 1 then 0). During a freeze a new
// request sets readyEvent and is served after the update. A policy rewritten
// through the update port (one write cycle) governs the following checks.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_local_firewall;
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

  localparam logic [31:0] LO [10] = '{0: 32'h1000, 1: 32'h2000, 2: 32'h3000, default: 32'h0};
  localparam logic [31:0] HI [10] = '{0: 32'h2000, 1: 32'h3000, 2: 32'h3100, default: 32'h0};
  localparam logic [3:0]  PO [10] = '{0: 4'd1, 1: 4'd2, 2: 4'd3, default: 4'd0};
  localparam logic [31:0] SPI [16] = '{1: mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0),
                                       2: mk_policy(ACC_RO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0),
                                       3: mk_policy(ACC_WO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0),
                                       default: 32'h0};

  axi_req_t m_req, s_req;
  axi_rsp_t m_rsp, s_rsp;
  logic        upd_en, upd_we, recfg_we, recfg_wdata, recfg_en, frozen, ready_event, flag_cf, flag_nf;
  logic [3:0]  upd_addr;
  logic [31:0] upd_wdata, upd_rdata;

  local_firewall #(.RANGE_LOW(LO), .RANGE_HIGH(HI), .RANGE_OUT(PO), .SP_INIT(SPI)) dut (
    .clk, .rst_n, .up_req(m_req), .up_rsp(m_rsp), .dn_req(s_req), .dn_rsp(s_rsp),
    .upd_en, .upd_we, .upd_addr, .upd_wdata, .upd_rdata, .recfg_we, .recfg_wdata,
    .recfg_en, .frozen, .ready_event, .flag_cf, .flag_nf
  );

  `include "tb_axi_tasks.svh"

  int n_cf = 0, n_nf = 0;
  always @(posedge clk) begin
    if (flag_cf) n_cf++;
    if (flag_nf) n_nf++;
  end

  logic [31:0] pol [4];

  task automatic recfg(input logic v);
    recfg_we = 1; recfg_wdata = v; step(); recfg_we = 0; step();
  endtask

  // expected: 0 pass, 1 cF, 2 nF
  function automatic int decide(logic [31:0] a, logic rnw, logic [7:0] len);
    int p;
    policy_t s;
    p = 0;
    for (int i = 0; i < 3; i++) if (a >= LO[i] && a < HI[i]) p = PO[i];
    if (p == 0) return 2;
    s = policy_t'(pol[p]);
    return ((rnw ? s.sp_rnw[0] : s.sp_rnw[1]) && len == s.sp_param && s.sp_format == 3'd2) ? 0 : 1;
  endfunction

  task automatic access(input logic [31:0] a, input logic rnw, input logic [7:0] len);
    logic [31:0] d, wd;
    logic [1:0] resp;
    int t0, e, ns0, cf0, nf0;
    e = decide(a, rnw, len);
    ns0 = n_slave; cf0 = n_cf; nf0 = n_nf; t_slave = -1;
    wd = $urandom;
    if (rnw) axi_read(a, len, 3'd2, d, resp, t0);
    else     axi_write(a, wd, len, 3'd2, resp, t0);
    if (e == 0) begin
      `CHECK_EQ(resp, RESP_OKAY, "legal access passes")
      `CHECK_EQ(n_slave, ns0 + 1, "legal access reaches the target once")
      `CHECK_EQ(t_slave - t0, 6, "Local Firewall latency 6 cycles")
      if (rnw) `CHECK_EQ(d, smem.exists(a) ? smem[a] : 32'h0, "read data")
      else     `CHECK_EQ(smem[a], wd, "written data")
      `CHECK(!frozen, "no freeze after a legal access")
    end else begin
      `CHECK_EQ(resp, RESP_SLVERR, "illegal access answered SLVERR")
      if (rnw) `CHECK_EQ(d, 32'h0, "no data for an illegal read")
      `CHECK_EQ(n_slave, ns0, "illegal access never reaches the target")
      `CHECK_EQ(n_cf - cf0, e == 1 ? 1 : 0, "checkingFlag")
      `CHECK_EQ(n_nf - nf0, e == 2 ? 1 : 0, "notFoundFlag")
      step();
      `CHECK(frozen, "firewall frozen after an attack")
      recfg(1); recfg(0);
      step();
      `CHECK(!frozen, "update releases the freeze")
    end
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    int t0;
    m_req = '0; upd_en = 0; upd_we = 0; upd_addr = 0; upd_wdata = 0; recfg_we = 0; recfg_wdata = 0;
    for (int i = 0; i < 4; i++) pol[i] = SPI[i];
    step(); rst_n = 1; step();
    access(32'h1000, 0, 0); access(32'h1000, 1, 0); access(32'h2000, 0, 0); access(32'h2000, 1, 0);
    access(32'h3000, 0, 0); access(32'h3000, 1, 0); access(32'h3000, 0, 8'd1); access(32'h4000, 1, 0);
    for (int n = 0; n < 150; n++)
      access(32'h0F00 + 4 * $urandom_range(32'h900), 1'($urandom), ($urandom_range(7) == 0) ? 8'd2 : 8'd0);
    // readyEvent: request while frozen, served after the update
    axi_write(32'h2000, 32'h1, 0, 3'd2, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "write to read-only region")
    fork
      axi_read(32'h1000, 0, 3'd2, d, resp, t0);
      begin
        repeat (5) step();
        `CHECK(ready_event, "readyEvent set during the freeze")
        `CHECK(!s_req.ar_valid, "nothing forwarded while frozen")
        recfg(1);
        // rewrite policy 2 to read/write: one BRAM write cycle
        upd_en = 1; upd_we = 1; upd_addr = 4'd2; upd_wdata = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
        step();
        upd_en = 1; upd_we = 0;
        step();
        upd_en = 0;
        `CHECK_EQ(upd_rdata, mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0), "policy read back")
        pol[2] = upd_rdata;
        recfg(0);
      end
    join
    `CHECK_EQ(resp, RESP_OKAY, "held request served after the update")
    `CHECK(!ready_event, "readyEvent cleared")
    access(32'h2010, 0, 0);
    `CHECK(n_cf > 0 && n_nf > 0, "both flags seen")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
