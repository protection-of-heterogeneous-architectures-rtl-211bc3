// tb_checking_module: test of the Checking Module.
//
// Random transactions (direction, AxSIZE, AxLEN) against random policies,
// biased so that about half of them match. The expected result is the AND of
// the three comparators: direction allowed by sp_rnw, AxSIZE equal to
// sp_format, AxLEN equal to sp_param. Checks the paper's two-cycle timing:
// done and check_out two cycles after start, check_next one cycle after.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_checking_module;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic       start, rnw, check_out, check_next, done;
  logic [2:0] arsize, awsize;
  logic [7:0] axlen;
  policy_t    sp;

  checking_module dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  int n_ok = 0, n_bad = 0;
  initial begin
    start = 0; rnw = 0; arsize = 0; awsize = 0; axlen = 0; sp = '0;
    step(); rst_n = 1; step();
    for (int n = 0; n < 400; n++) begin
      logic exp;
      sp = policy_t'($urandom);
      rnw = 1'($urandom);
      arsize = ($urandom_range(3) == 0) ? 3'($urandom) : sp.sp_format;
      awsize = ($urandom_range(3) == 0) ? 3'($urandom) : sp.sp_format;
      axlen  = ($urandom_range(3) == 0) ? 8'($urandom) : sp.sp_param;
      exp = (rnw ? sp.sp_rnw[0] : sp.sp_rnw[1]) &&
            ((rnw ? arsize : awsize) == sp.sp_format) && (axlen == sp.sp_param);
      start = 1;
      step();
      start = 0;
      `CHECK(!done, "not done after one cycle")
      `CHECK_EQ(check_next, exp, "comparator result in the second cycle")
      step();
      `CHECK(done, "done two cycles after start")
      `CHECK_EQ(check_out, exp, "check_out")
      if (exp) n_ok++; else n_bad++;
      step();
      `CHECK(!done, "done is a pulse")
    end
    `CHECK(n_ok > 50 && n_bad > 50, "both outcomes exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
