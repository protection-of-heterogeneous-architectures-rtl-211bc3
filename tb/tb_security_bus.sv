// tb_security_bus: test of the AXI-Lite security bus decoder.
//
// Three modelled slaves at 0x0000, 0x1000 and 0x2000 (4 KB each); a read of a
// slave returns {slave index, low address bits}, a write is recorded by the
// addressed slave only. Random reads and writes over the three windows and
// outside them check the routing, that no other slave sees the access, and
// that an unmapped address is answered DECERR by the bus.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_security_bus;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #2_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] BASE [3] = '{32'h0000, 32'h1000, 32'h2000};
  localparam logic [31:0] SIZE [3] = '{32'h1000, 32'h1000, 32'h1000};

  axil_req_t lreq;
  axil_rsp_t lrsp;
  axil_req_t s_req [3];
  axil_rsp_t s_rsp [3];

  security_bus #(.N_SLAVES(3), .SLV_BASE(BASE), .SLV_SIZE(SIZE)) dut (
    .clk, .rst_n, .m_req(lreq), .m_rsp(lrsp), .s_req, .s_rsp
  );

  int n_wr [3];
  logic [31:0] last_wa [3], last_wd [3];
  for (genvar s = 0; s < 3; s++) begin : g_slv
    logic rp = 1'b0, bp = 1'b0;
    logic [31:0] rd = '0;
    always_comb begin
      s_rsp[s] = '0;
      s_rsp[s].ar_ready = !rp && !bp;
      s_rsp[s].aw_ready = !rp && !bp && s_req[s].w_valid && !s_req[s].ar_valid;
      s_rsp[s].w_ready  = s_rsp[s].aw_ready;
      s_rsp[s].r_valid  = rp;
      s_rsp[s].r_data   = rd;
      s_rsp[s].b_valid  = bp;
    end
    always @(posedge clk) begin
      if (s_req[s].ar_valid && s_rsp[s].ar_ready) begin rp <= 1; rd <= {16'(s), s_req[s].ar_addr[15:0]}; end
      else if (rp && s_req[s].r_ready) rp <= 0;
      if (s_req[s].aw_valid && s_rsp[s].aw_ready) begin
        bp <= 1; n_wr[s]++; last_wa[s] = s_req[s].aw_addr; last_wd[s] = s_req[s].w_data;
      end else if (bp && s_req[s].b_ready) bp <= 0;
    end
  end

  `include "tb_axil_tasks.svh"

  initial begin
    logic [31:0] d, a;
    logic [1:0] resp;
    int w0 [3];
    lreq = '0;
    for (int s = 0; s < 3; s++) n_wr[s] = 0;
    step(); rst_n = 1; step();
    for (int n = 0; n < 400; n++) begin
      int s;
      a = $urandom_range(32'h3FFF) & ~32'h3;
      s = (a < 32'h3000) ? int'(a >> 12) : -1;
      if ($urandom_range(1) == 0) begin
        axil_read(a, d, resp);
        if (s >= 0) begin
          `CHECK_EQ(resp, RESP_OKAY, "read routed")
          `CHECK_EQ(d, {16'(s), a[15:0]}, "read answered by the addressed slave")
        end else `CHECK_EQ(resp, RESP_DECERR, "unmapped read DECERR")
      end else begin
        for (int k = 0; k < 3; k++) w0[k] = n_wr[k];
        d = $urandom;
        axil_write(a, d, resp);
        for (int k = 0; k < 3; k++) `CHECK_EQ(n_wr[k] - w0[k], (k == s) ? 1 : 0, "write reaches only its slave")
        if (s >= 0) begin
          `CHECK_EQ(resp, RESP_OKAY, "write routed")
          `CHECK_EQ(last_wa[s], a, "write address")
          `CHECK_EQ(last_wd[s], d, "write data")
        end else `CHECK_EQ(resp, RESP_DECERR, "unmapped write DECERR")
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
