// tb_gf128_mul: test of the GF(2^128) multiplier (mult_H).
//
// Three products computed with a reference implementation of the GCM field
// multiplication, the identity (the field's 1 is bit 127 in GCM order), zero,
// and commutativity on random operands. Checks the paper's one-cycle latency:
// valid and p one cycle after en.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_gf128_mul;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic         en, valid;
  logic [127:0] x, h, p;

  gf128_mul dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  task automatic mul(input logic [127:0] a, input logic [127:0] b, output logic [127:0] r);
    en = 1; x = a; h = b;
    step();
    en = 0;
    `CHECK(valid, "product valid one cycle after en")
    r = p;
    step();
    `CHECK(!valid, "valid is a pulse")
  endtask

  initial begin
    logic [127:0] r, r2, a, b;
    en = 0; x = 0; h = 0;
    step(); rst_n = 1; step();
    mul(128'h6513270e269e0d37f2a74de452e6b438, 128'hd23f0824128b2f330c5c7fd0a6a3a450, r);
    `CHECK_EQ(r, 128'ha22b0c0816080796050aee5cfe7ef784, "reference product 1")
    mul(128'h9531985d5d9dc9f81818e811892f902b, 128'h36f675cc81e74ef5e8e25d940ed90475, r);
    `CHECK_EQ(r, 128'h6c8f624f2bc5d9b96e3220c6ad73cbbb, "reference product 2")
    mul(128'h6b0d549b6f03675a1600a35a099950d8, 128'h8d116ece1738f7d93d9c172411e20b8f, r);
    `CHECK_EQ(r, 128'h5d50b33cfcc311d8edb6a81a3e411a7a, "reference product 3")
    for (int n = 0; n < 30; n++) begin
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      mul(a, {1'b1, 127'b0}, r);
      `CHECK_EQ(r, a, "multiplication by one")
      mul(a, 128'h0, r);
      `CHECK_EQ(r, 128'h0, "multiplication by zero")
      mul(a, b, r); mul(b, a, r2);
      `CHECK_EQ(r, r2, "commutative")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
