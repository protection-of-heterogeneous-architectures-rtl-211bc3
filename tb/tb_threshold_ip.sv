// tb_threshold_ip: test of the thresholding image IP.
//
// Writes random pixel words (and the edge values THRESHOLD-1 and THRESHOLD)
// into random registers and reads them back: each pixel must come back as
// 8'hFF when it is at or above the default threshold of 128, else 8'h00.
// Checks acceptance in the presented cycle and the response one cycle later.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_threshold_ip;
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
  threshold_ip dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  function automatic logic [31:0] thr(logic [31:0] p);
    logic [31:0] o;
    for (int b = 0; b < 4; b++) o[8*b +: 8] = (p[8*b +: 8] >= 8'd128) ? 8'hFF : 8'h00;
    return o;
  endfunction

  initial begin
    s_req = '0;
    step(); rst_n = 1; step();
    for (int n = 0; n < 300; n++) begin
      int r;
      logic [31:0] px;
      r = $urandom_range(15);
      px = (n < 4) ? 32'h7F80_807F : $urandom;
      s_req.aw_valid = 1; s_req.w_valid = 1; s_req.aw_addr = 32'h4400_0000 + 4 * r;
      s_req.w_data = px; s_req.w_strb = 4'hF; s_req.b_ready = 1;
      #1;
      `CHECK(s_rsp.aw_ready, "write accepted")
      step();
      s_req.aw_valid = 0; s_req.w_valid = 0;
      `CHECK(s_rsp.b_valid && s_rsp.b_resp == RESP_OKAY, "write response")
      step();
      s_req.b_ready = 0;
      s_req.ar_valid = 1; s_req.ar_addr = 32'h4400_0000 + 4 * r; s_req.r_ready = 1;
      #1;
      `CHECK(s_rsp.ar_ready, "read accepted")
      step();
      s_req.ar_valid = 0;
      `CHECK(s_rsp.r_valid, "read response one cycle later")
      `CHECK_EQ(s_rsp.r_data, thr(px), "thresholded pixels")
      step();
      s_req.r_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
