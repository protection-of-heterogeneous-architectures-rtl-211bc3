// tb_security_builder: test of the Security Builder (FSM, table, reading and
// checking modules together).
//
// A one-cycle memory in the testbench holds the policies: [0x1000,0x2000[
// read/write, [0x2000,0x3000[ read only, [0x3000,0x4000[ write only with
// AxLEN 3; other addresses are not in the table. Random requests are checked
// for res_valid exactly 4 cycles after chk_start (the paper's 4-cycle check;
// 2 cycles when the table has no entry and the FSM goes from Addr to FAIL),
// check_out, the notFoundFlag and the policy handed out. The update protocol
// is checked too: writing recfgEn = 1 drops ready and raises in_update, a
// policy rewritten meanwhile governs the next check, writing 0 releases it.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_security_builder;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] LO [10] = '{0: 32'h1000, 1: 32'h2000, 2: 32'h3000, default: 32'h0};
  localparam logic [31:0] HI [10] = '{0: 32'h2000, 1: 32'h3000, 2: 32'h4000, default: 32'h0};
  localparam logic [3:0]  PO [10] = '{0: 4'd1, 1: 4'd2, 2: 4'd3, default: 4'd0};

  logic        chk_start, ready, res_valid, check_out, not_found, bram_en;
  logic        recfg_we, recfg_wdata, recfg_en, in_update;
  chk_req_t    chk_req;
  policy_t     res_sp;
  logic [3:0]  bram_addr;
  logic [31:0] bram_rdata;
  logic [31:0] mem [16];

  security_builder #(.RANGE_LOW(LO), .RANGE_HIGH(HI), .RANGE_OUT(PO)) dut (.*);

  always @(posedge clk) if (bram_en) bram_rdata <= mem[bram_addr];

  task automatic step(); @(posedge clk); #1; endtask

  function automatic logic [1:0] expect_res(logic [31:0] a, logic rnw, logic [2:0] sz, logic [7:0] ln);
    // returns {found, pass}
    int p;
    policy_t s;
    p = 0;
    for (int i = 0; i < 3; i++) if (a >= LO[i] && a < HI[i]) p = PO[i];
    if (p == 0) return 2'b00;
    s = policy_t'(mem[p]);
    return {1'b1, (rnw ? s.sp_rnw[0] : s.sp_rnw[1]) && sz == s.sp_format && ln == s.sp_param};
  endfunction

  logic last_out;  // check_out of the last check, sampled with res_valid

  task automatic check_one(logic [31:0] a, logic rnw, logic [2:0] sz, logic [7:0] ln);
    logic [1:0] e;
    int lat;
    e = expect_res(a, rnw, sz, ln);
    `CHECK(ready, "ready before a check")
    chk_req.addr = a; chk_req.rnw = rnw; chk_req.size = sz; chk_req.len = ln;
    chk_start = 1;
    step();
    chk_start = 0;
    lat = 1;
    while (!res_valid && lat < 20) begin step(); lat++; end
    `CHECK_EQ(lat, e[1] ? 4 : 2, "check takes 4 cycles (2 when the address is not found)")
    `CHECK_EQ(check_out, e[0], "check_out")
    last_out = check_out;
    `CHECK_EQ(not_found, !e[1], "notFoundFlag")
    if (e[1]) `CHECK_EQ(32'(res_sp), mem[dut.pa], "policy handed out")
    step();
    `CHECK(!res_valid, "res_valid is a pulse")
  endtask

  initial begin
    chk_start = 0; chk_req = '0; recfg_we = 0; recfg_wdata = 0; bram_rdata = 0;
    for (int i = 0; i < 16; i++) mem[i] = 32'h0;
    mem[1] = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
    mem[2] = mk_policy(ACC_RO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
    mem[3] = mk_policy(ACC_WO, 3'd2, 8'd3, 1'b1, 1'b0, 2'd2);
    step(); rst_n = 1; step();
    check_one(32'h1004, 1, 3'd2, 8'd0);   // pass
    check_one(32'h2004, 0, 3'd2, 8'd0);   // write to read only
    check_one(32'h3004, 0, 3'd2, 8'd3);   // pass, write with len 3
    check_one(32'h3004, 0, 3'd2, 8'd0);   // wrong length
    check_one(32'h1004, 1, 3'd1, 8'd0);   // wrong size
    check_one(32'h5000, 1, 3'd2, 8'd0);   // not found
    for (int n = 0; n < 200; n++)
      check_one(32'h0800 + $urandom_range(32'h4000), 1'($urandom), ($urandom_range(3) == 0) ? 3'($urandom) : 3'd2,
                ($urandom_range(3) == 0) ? 8'd3 : 8'd0);
    // update protocol
    recfg_we = 1; recfg_wdata = 1; step(); recfg_we = 0;
    `CHECK(recfg_en, "recfgEn set")
    `CHECK(in_update, "in_update during the update")
    `CHECK(!ready, "not ready during the update")
    mem[2] = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
    repeat (5) step();
    `CHECK(!ready, "still not ready")
    recfg_we = 1; recfg_wdata = 0; step(); recfg_we = 0;
    `CHECK(!recfg_en, "recfgEn cleared")
    step();
    `CHECK(!in_update, "update over")
    check_one(32'h2004, 0, 3'd2, 8'd0);   // now allowed
    `CHECK(last_out, "new policy in force")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
