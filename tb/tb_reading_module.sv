// tb_reading_module: test of the Reading Module.
//
// A synchronous one-cycle memory in the testbench stands for the policy
// Block RAM. For random policy addresses and words the test checks that the
// module reads the address it was given, that the policy fields come out of
// the word in the fw_pkg layout, and that sp_valid rises and sp is loaded
// exactly two cycles after rd_en (BRAM read, then the reading buffer).
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_reading_module;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic        rd_en, bram_en, sp_valid;
  logic [3:0]  pa, bram_addr;
  logic [31:0] bram_rdata;
  policy_t     sp;
  logic [31:0] mem [16];

  reading_module dut (.*);

  always @(posedge clk) if (bram_en) bram_rdata <= mem[bram_addr];

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    rd_en = 0; pa = 0; bram_rdata = 0;
    for (int i = 0; i < 16; i++) mem[i] = $urandom;
    step(); rst_n = 1; step();
    `CHECK(!sp_valid, "no policy after reset")
    for (int n = 0; n < 100; n++) begin
      int a;
      a = $urandom_range(15);
      rd_en = 1; pa = 4'(a);
      step();
      rd_en = 0;
      `CHECK(!sp_valid, "sp_valid not yet after one cycle")
      step();
      `CHECK(sp_valid, "sp_valid two cycles after rd_en")
      `CHECK_EQ(32'(sp), mem[a], "policy word")
      `CHECK_EQ(sp.sp_rnw, mem[a][1:0], "sp_rnw field")
      `CHECK_EQ(sp.sp_format, mem[a][4:2], "sp_format field")
      `CHECK_EQ(sp.sp_param, mem[a][12:5], "sp_param field")
      step();
      `CHECK(!sp_valid, "sp_valid is a single pulse")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
