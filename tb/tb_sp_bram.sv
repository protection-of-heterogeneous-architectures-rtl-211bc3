// tb_sp_bram: test of the dual-port policy Block RAM.
//
// Checks the initial contents given by INIT on port A, the one-cycle read
// latency of both ports, that a port-B write is visible on port A on the
// next read (updating N policies takes N write cycles), and random
// write/read traffic against a reference array. Default size (16 words).
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_sp_bram;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] INIT [16] = '{0: 32'h1111_0001, 1: 32'h2222_0002, 2: 32'h3333_0003, default: 32'hA5A5_A5A5};

  logic        a_en, b_en, b_we;
  logic [3:0]  a_addr, b_addr;
  logic [31:0] a_rdata, b_wdata, b_rdata;
  logic [31:0] model [16];

  sp_bram #(.INIT(INIT)) dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    a_en = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; b_wdata = 0;
    model = INIT;
    step();
    for (int i = 0; i < 16; i++) begin
      a_en = 1; a_addr = 4'(i);
      step();
      a_en = 0;
      `CHECK_EQ(a_rdata, model[i], "initial policy word on port A")
    end
    // update 4 policies in 4 cycles, then read them back
    for (int i = 4; i < 8; i++) begin
      b_en = 1; b_we = 1; b_addr = 4'(i); b_wdata = $urandom; model[i] = b_wdata;
      step();
    end
    b_en = 0; b_we = 0;
    for (int i = 4; i < 8; i++) begin
      a_en = 1; a_addr = 4'(i); b_en = 1; b_addr = 4'(i);
      step();
      `CHECK_EQ(a_rdata, model[i], "updated word on port A")
      `CHECK_EQ(b_rdata, model[i], "updated word on port B")
    end
    a_en = 0; b_en = 0;
    // port A output holds while not enabled
    a_en = 1; a_addr = 4'd1; step(); a_en = 0; a_addr = 4'd2; step();
    `CHECK_EQ(a_rdata, model[1], "port A output holds")
    for (int i = 0; i < 300; i++) begin
      a_en = 1'($urandom); a_addr = 4'($urandom);
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 4'($urandom); b_wdata = $urandom;
      if (b_en && b_we && b_addr == a_addr) a_en = 1'b0;
      begin
        logic [31:0] ea; logic aen;
        ea = model[a_addr]; aen = a_en;
        if (b_en && b_we) model[b_addr] = b_wdata;
        step();
        if (aen) `CHECK_EQ(a_rdata, ea, "random port A read")
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
