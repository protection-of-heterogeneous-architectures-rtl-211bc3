// tb_monitoring_ip: test of the monitoring IP.
//
// Five firewalls, the last one cryptographic. Reports arrive on the modelled
// custom bus; the test checks that each lands in its reg_i and, packed, in
// reg_m at the next clock edge (FW0 bits 31:30, FW1 29:28, FW2 27:26,
// FW3 25:24, FW4 23:21 with iF, unused bits 1), that a recorded flag stays
// until the update processor rewrites reg_i over AXI-Lite, and that reg_m and
// every reg_i read back over AXI-Lite.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_monitoring_ip;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  logic        bus_valid;
  logic [3:0]  bus_addr;
  logic [31:0] bus_data, reg_m;
  axil_req_t   lreq;
  axil_rsp_t   lrsp;

  monitoring_ip #(.N_FW(5), .FW_CRYPTO(5'b10000)) dut (
    .clk, .rst_n, .bus_valid, .bus_addr, .bus_data, .s_req(lreq), .s_rsp(lrsp), .reg_m
  );

  `include "tb_axil_tasks.svh"

  logic [2:0] st [5];   // expected active-low {cF, nF, iF} per firewall
  function automatic logic [31:0] exp_m();
    logic [31:0] m;
    m = '1;
    m[31:30] = st[0][2:1]; m[29:28] = st[1][2:1]; m[27:26] = st[2][2:1]; m[25:24] = st[3][2:1];
    m[23:21] = st[4];
    return m;
  endfunction

  initial begin
    logic [31:0] d;
    logic [1:0] resp;
    lreq = '0; bus_valid = 0; bus_addr = 0; bus_data = '1;
    for (int i = 0; i < 5; i++) st[i] = 3'b111;
    step(); rst_n = 1; step();
    `CHECK_EQ(reg_m, 32'hFFFF_FFFF, "reg_m after reset")
    for (int n = 0; n < 200; n++) begin
      int f, k;
      f = $urandom_range(4);
      k = (f == 4) ? $urandom_range(2) : $urandom_range(1);
      bus_valid = 1; bus_addr = 4'(f); bus_data = ~(32'h8000_0000 >> k);
      step();
      bus_valid = 0; bus_data = '1;
      st[f][2 - k] = 1'b0;
      `CHECK_EQ(reg_m, exp_m(), "reg_m one cycle after the report")
      if ($urandom_range(3) == 0) begin
        axil_read(32'h40, d, resp);
        `CHECK_EQ(d, exp_m(), "reg_m read over AXI-Lite")
        axil_read(4 * f, d, resp);
        `CHECK_EQ(d[31:29], (f == 4) ? st[f] : {st[f][2:1], 1'b0}, "reg_i read over AXI-Lite")
        axil_write(4 * f, 32'hFFFF_FFFF, resp);
        st[f] = 3'b111;
        `CHECK_EQ(reg_m, exp_m(), "reg_i cleared by the update processor")
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
