// tb_shared_bram: test of the shared Block RAM slave.
//
// Random single-word writes (with random byte strobes) and reads against a
// reference array over the whole default-size memory; checks that a request
// is accepted in the cycle it is presented and answered in the next one, and
// that the response id is the request id.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_shared_bram;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #5_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  axi_req_t s_req;
  axi_rsp_t s_rsp;
  shared_bram dut (.*);

  logic [31:0] model [4096];
  logic        known [4096];

  task automatic step(); @(posedge clk); #1; endtask

  initial begin
    s_req = '0;
    for (int i = 0; i < 4096; i++) known[i] = 1'b0;
    step(); rst_n = 1; step();
    for (int n = 0; n < 2000; n++) begin
      int w;
      logic [3:0] id;
      w = $urandom_range(4095);
      id = 4'($urandom);
      if (!known[w] || $urandom_range(1) == 0) begin
        logic [31:0] d; logic [3:0] st;
        d = $urandom; st = known[w] ? 4'($urandom) : 4'hF;
        s_req.aw_valid = 1; s_req.w_valid = 1; s_req.aw_addr = 32'h4000_0000 + 4 * w;
        s_req.w_data = d; s_req.w_strb = st; s_req.aw_id = id; s_req.b_ready = 1;
        #1;
        `CHECK(s_rsp.aw_ready && s_rsp.w_ready, "write accepted at once")
        step();
        s_req.aw_valid = 0; s_req.w_valid = 0;
        `CHECK(s_rsp.b_valid, "B one cycle later")
        `CHECK_EQ(s_rsp.b_id, id, "B id")
        for (int b = 0; b < 4; b++) if (st[b]) model[w][8*b +: 8] = d[8*b +: 8];
        known[w] = 1'b1;
        step();
        s_req.b_ready = 0;
      end else begin
        s_req.ar_valid = 1; s_req.ar_addr = 32'h4000_0000 + 4 * w; s_req.ar_id = id; s_req.r_ready = 1;
        #1;
        `CHECK(s_rsp.ar_ready, "read accepted at once")
        step();
        s_req.ar_valid = 0;
        `CHECK(s_rsp.r_valid, "R one cycle later")
        `CHECK_EQ(s_rsp.r_data, model[w], "read data")
        `CHECK_EQ(s_rsp.r_id, id, "R id")
        step();
        s_req.r_ready = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
