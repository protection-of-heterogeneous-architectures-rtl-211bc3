// tb_firewall_interface: test of the Firewall Interface (Decision and
// Synchronization Modules) with a modelled Security Builder.
//
// The model answers each chk_start 4 cycles later (the paper's check time)
// and allows an access when address bit 12 is clear; the policy it hands out
// is derived from the address. Checked: a request is captured once and
// reaches the target exactly 6 cycles after it was raised (the paper's
// 2 + 4 cycles); the forwarded request carries address, data and id
// unchanged and fwd_sp holds its policy; a refused request never reaches the
// target and is answered SLVERR; the interface freezes after a refusal and
// only the end of an update releases it; a request during a freeze or an
// update sets readyEvent and waits.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_firewall_interface;
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
  logic     chk_start, sb_ready, res_valid, check_out, in_update, frozen, ready_event;
  chk_req_t chk_req;
  policy_t  res_sp, fwd_sp;

  firewall_interface dut (
    .clk, .rst_n, .up_req(m_req), .up_rsp(m_rsp), .dn_req(s_req), .dn_rsp(s_rsp),
    .chk_start, .chk_req, .sb_ready, .res_valid, .check_out, .res_sp, .in_update,
    .fwd_sp, .frozen, .ready_event
  );

  `include "tb_axi_tasks.svh"

  // Security Builder model
  int sb_cnt = 0;
  int n_chk = 0;
  logic [31:0] sb_addr;
  assign sb_ready  = (sb_cnt == 0) && !in_update;
  assign res_valid = (sb_cnt == 4);
  assign check_out = res_valid && !sb_addr[12];
  assign res_sp    = policy_t'({sb_addr[15:0], 16'h0});
  always @(posedge clk) begin
    if (chk_start) begin sb_cnt <= 1; sb_addr <= chk_req.addr; n_chk++; end
    else if (sb_cnt == 4) sb_cnt <= 0;
    else if (sb_cnt != 0) sb_cnt <= sb_cnt + 1;
  end

  task automatic access(input logic [31:0] a, input logic rnw);
    logic [31:0] d, wd;
    logic [1:0] resp;
    int t0, ns0, nc0;
    logic ok;
    ok = !a[12];
    ns0 = n_slave; nc0 = n_chk; t_slave = -1;
    wd = $urandom;
    if (rnw) axi_read(a, 0, 3'd2, d, resp, t0);
    else     axi_write(a, wd, 0, 3'd2, resp, t0);
    `CHECK_EQ(n_chk, nc0 + 1, "one check per request")
    if (ok) begin
      `CHECK_EQ(resp, RESP_OKAY, "allowed request passes")
      `CHECK_EQ(t_slave - t0, 6, "request reaches the target 6 cycles after it was raised")
      `CHECK_EQ(n_slave, ns0 + 1, "forwarded exactly once")
      `CHECK_EQ(fwd_sp, policy_t'({a[15:0], 16'h0}), "policy of the forwarded request")
      if (rnw) `CHECK_EQ(d, smem.exists(a) ? smem[a] : 32'h0, "read data")
      else     `CHECK_EQ(smem[a], wd, "write data")
    end else begin
      `CHECK_EQ(resp, RESP_SLVERR, "refused request answered SLVERR")
      `CHECK_EQ(n_slave, ns0, "refused request not forwarded")
      `CHECK(frozen, "frozen after a refusal")
      // release: an update
      in_update = 1; step(); step();
      `CHECK(frozen, "still frozen during the update")
      in_update = 0; step(); step();
      `CHECK(!frozen, "released at the end of the update")
    end
  endtask

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    int t0;
    m_req = '0; in_update = 0;
    step(); rst_n = 1; step();
    for (int n = 0; n < 200; n++) access(32'h4000 + 4 * $urandom_range(2047), 1'($urandom));
    // a request during an update waits and sets readyEvent
    in_update = 1;
    fork
      axi_read(32'h4100, 0, 3'd2, d, resp, t0);
      begin
        repeat (6) step();
        `CHECK(ready_event, "readyEvent during an update")
        `CHECK(n_chk == 200, "no check during the update")
        in_update = 0;
      end
    join
    `CHECK_EQ(resp, RESP_OKAY, "request served after the update")
    `CHECK(!ready_event, "readyEvent cleared when served")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
