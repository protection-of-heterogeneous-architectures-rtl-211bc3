// tb_interrupt_controller: test of the interrupt controller.
//
// irq must rise exactly two cycles after any bit of reg_m goes to 0 (the
// paper's 2-cycle interrupt), stay high while a bit is 0 and fall two cycles
// after reg_m is all ones again. Random single-bit and multi-bit patterns.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_interrupt_controller;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic [31:0] reg_m;
  logic        irq;
  interrupt_controller dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    reg_m = '1;
    step(); rst_n = 1; step(); step();
    `CHECK(!irq, "no interrupt with reg_m all ones")
    for (int n = 0; n < 100; n++) begin
      reg_m = ($urandom_range(1) == 0) ? ~(32'h1 << $urandom_range(31)) : ($urandom | 32'h1) & ~32'h1;
      step();
      `CHECK(!irq, "irq not yet after one cycle")
      step();
      `CHECK(irq, "irq two cycles after a zero bit")
      repeat ($urandom_range(3)) begin step(); `CHECK(irq, "irq holds") end
      reg_m = '1;
      step();
      `CHECK(irq, "irq still high one cycle after clearing")
      step();
      `CHECK(!irq, "irq low two cycles after clearing")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
