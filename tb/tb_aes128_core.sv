// tb_aes128_core: test of the AES-128 encryption core.
//
// Known answers: the FIPS-197 Appendix C.1 vector and the GCM hash key
// E_K(0) for K = 000102..0f (from a standard AES implementation). Checks the
// paper's 10-cycle latency (done exactly 10 cycles after start, busy in
// between), that a start while busy is ignored, and back-to-back runs with
// random plaintexts whose results are compared with a second run.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_aes128_core;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic         start, done, busy;
  logic [127:0] pt, key, ct;

  aes128_core dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  task automatic enc(input logic [127:0] p, input logic [127:0] k, output logic [127:0] c);
    int lat;
    pt = p; key = k; start = 1;
    step();
    start = 0; pt = $urandom; key = $urandom;
    lat = 1;
    while (!done && lat < 30) begin
      `CHECK(busy, "busy while encrypting")
      if (lat == 4) begin start = 1; step(); start = 0; lat++; end   // ignored
      else begin step(); lat++; end
    end
    `CHECK_EQ(lat, 10, "AES latency 10 cycles")
    c = ct;
    step();
    `CHECK(!busy && !done, "idle after done")
  endtask

  initial begin
    logic [127:0] c, c2, p;
    start = 0; pt = 0; key = 0;
    step(); rst_n = 1; step();
    enc(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f, c);
    `CHECK_EQ(c, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1")
    enc(128'h0, 128'h000102030405060708090a0b0c0d0e0f, c);
    `CHECK_EQ(c, 128'hc6a13b37878f5b826f4f8162a1c8d879, "E_K(0)")
    for (int n = 0; n < 20; n++) begin
      p = {$urandom, $urandom, $urandom, $urandom};
      enc(p, 128'h000102030405060708090a0b0c0d0e0f, c);
      enc(p, 128'h000102030405060708090a0b0c0d0e0f, c2);
      `CHECK_EQ(c, c2, "deterministic")
      `CHECK(c != p, "output differs from input")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
