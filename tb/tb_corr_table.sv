// tb_corr_table: test of the Correspondence Table.
//
// Loads three ranges (policy addresses 1, 2, 3) and a gap, looks up random
// addresses inside, outside and at the edges of the ranges, and compares
// bram_addr / not_found with a reference that walks the ranges. Checks the
// one-cycle latency: the result appears at the first clock edge after
// lookup_en and holds while lookup_en is low. The table runs at its default
// size (10 entries, seven of them empty).
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_corr_table;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] LO [10] = '{0: 32'h1000, 1: 32'h2000, 2: 32'h8000_0000, default: 32'h0};
  localparam logic [31:0] HI [10] = '{0: 32'h1100, 1: 32'h3000, 2: 32'h8200_0000, default: 32'h0};
  localparam logic [3:0]  PO [10] = '{0: 4'd1, 1: 4'd2, 2: 4'd3, default: 4'd0};

  logic        lookup_en;
  logic [31:0] bus_addr;
  logic [3:0]  bram_addr;
  logic        not_found;

  corr_table #(.RANGE_LOW(LO), .RANGE_HIGH(HI), .RANGE_OUT(PO)) dut (.*);

  function automatic logic [3:0] ref_pa(logic [31:0] a);
    for (int i = 0; i < 10; i++) if (a >= LO[i] && a < HI[i]) return PO[i];
    return 4'd0;
  endfunction

  task automatic step(); @(posedge clk); #1; endtask

  task automatic look(logic [31:0] a);
    logic [3:0] e;
    e = ref_pa(a);
    lookup_en = 1'b1; bus_addr = a;
    step();
    lookup_en = 1'b0;
    `CHECK_EQ(bram_addr, e, "policy address")
    `CHECK_EQ(not_found, e == 0, "notFoundFlag")
    bus_addr = $urandom;
    step();
    `CHECK_EQ(bram_addr, e, "result holds without lookup_en")
  endtask

  initial begin
    lookup_en = 1'b0; bus_addr = '0;
    step(); rst_n = 1'b1; step();
    look(32'h1000); look(32'h10FF); look(32'h1100); look(32'h0FFF);
    look(32'h2000); look(32'h2FFF); look(32'h3000);
    look(32'h8000_0000); look(32'h81FF_FFFC); look(32'h8200_0000); look(32'h0);
    for (int i = 0; i < 200; i++) begin
      int k;
      k = $urandom_range(3);
      unique case (k)
        0: look(32'h1000 + $urandom_range(32'h1FF) - 32'h80);
        1: look(32'h2000 + $urandom_range(32'h11FF) - 32'h100);
        2: look(32'h8000_0000 + $urandom_range(32'h0220_0000) - 32'h10_0000);
        default: look($urandom);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
