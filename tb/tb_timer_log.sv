// tb_timer_log: test of the timer and event log.
//
// The counter must advance by one per cycle between two reads taken a known
// number of cycles apart; appended events must read back with their codes,
// their count, and timestamps that increase in the order of appending and
// match the counter at the time of the write (to within the fixed AXI-Lite
// access time); the log wraps after 32 entries.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_timer_log;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  axil_req_t lreq;
  axil_rsp_t lrsp;
  timer_log dut (.clk, .rst_n, .s_req(lreq), .s_rsp(lrsp));

  `include "tb_axil_tasks.svh"

  initial begin
    logic [31:0] d, d2, ts, prev, code [40];
    logic [1:0] resp;
    lreq = '0;
    step(); rst_n = 1; step();
    axil_read(32'h0, d, resp);
    repeat (10) step();
    axil_read(32'h0, d2, resp);
    `CHECK(d2 - d > 10 && d2 - d < 20, "counter advances with the clock")
    axil_read(32'h0, d, resp);
    axil_read(32'h0, d2, resp);
    `CHECK_EQ(d2 - d, 32'd3, "three cycles per back-to-back read (address, fetch, response)")
    prev = 0;
    for (int e = 0; e < 40; e++) begin
      code[e] = $urandom;
      axil_read(32'h0, d, resp);
      axil_write(32'h4, code[e], resp);
      axil_read(32'h8, d2, resp);
      `CHECK_EQ(d2, 32'(e + 1), "event count")
      axil_read(32'h100 + 4 * (e % 32), ts, resp);
      `CHECK_EQ(ts - d, 32'd3, "timestamp taken at the write, 3 cycles after the preceding read sampled the counter")
      `CHECK(ts > prev, "timestamps increase")
      prev = ts;
      axil_read(32'h200 + 4 * (e % 32), d, resp);
      `CHECK_EQ(d, code[e], "event code")
    end
    axil_read(32'h200 + 4 * 7, d, resp);
    `CHECK_EQ(d, code[39], "log wraps after 32 entries")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
