// tb_axi_interconnect: test of the system AXI bus.
//
// Two masters issue random single-beat reads and writes at the same time to
// three modelled memory slaves (windows 0x1000, 0x2000, 0x3000, 4 KB each)
// and to unmapped addresses. Each master keeps its own part of every window,
// so its reads must return what it wrote. Checked: data integrity through the
// bus, DECERR for unmapped addresses, each access reaching exactly the
// addressed slave, and fair arbitration (under contention both masters
// complete and neither waits more than one other transaction).
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_axi_interconnect;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #5_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  localparam logic [31:0] BASE [3] = '{32'h1000, 32'h2000, 32'h3000};
  localparam logic [31:0] SIZE [3] = '{32'h1000, 32'h1000, 32'h1000};

  axi_req_t m_req [2];
  axi_rsp_t m_rsp [2];
  axi_req_t s_req [3];
  axi_rsp_t s_rsp [3];

  axi_interconnect #(.N_MASTERS(2), .N_SLAVES(3), .SLV_BASE(BASE), .SLV_SIZE(SIZE)) dut (.*);

  int n_acc [3];
  for (genvar s = 0; s < 3; s++) begin : g_slv
    logic rp = 1'b0, bp = 1'b0;
    logic [31:0] rd = '0;
    logic [31:0] mem [logic [31:0]];
    always_comb begin
      s_rsp[s] = '0;
      s_rsp[s].ar_ready = !rp && !bp;
      s_rsp[s].aw_ready = !rp && !bp && s_req[s].w_valid && !s_req[s].ar_valid;
      s_rsp[s].w_ready  = s_rsp[s].aw_ready;
      s_rsp[s].r_valid  = rp;
      s_rsp[s].r_data   = rd;
      s_rsp[s].r_last   = 1'b1;
      s_rsp[s].b_valid  = bp;
    end
    always @(posedge clk) begin
      if (s_req[s].ar_valid && s_rsp[s].ar_ready) begin
        rp <= 1; n_acc[s]++;
        rd <= mem.exists(s_req[s].ar_addr) ? mem[s_req[s].ar_addr] : 32'h0;
      end else if (rp && s_req[s].r_ready) rp <= 0;
      if (s_req[s].aw_valid && s_rsp[s].aw_ready) begin
        bp <= 1; n_acc[s]++; mem[s_req[s].aw_addr] = s_req[s].w_data;
      end else if (bp && s_req[s].b_ready) bp <= 0;
    end
  end

  task automatic step(); @(posedge clk); #1; endtask

  int done_cnt [2];
  int max_wait [2];

  task automatic master(input int m);
    logic [31:0] model [logic [31:0]];
    for (int n = 0; n < 150; n++) begin
      logic [31:0] a, d;
      int s, w, acc0;
      s = $urandom_range(3);                              // 3 = unmapped
      a = (s == 3) ? 32'h8000_0000 + 4 * $urandom_range(255) : BASE[s] + 32'h800 * m + 4 * $urandom_range(63);
      acc0 = (s < 3) ? n_acc[s] : 0;
      w = 0;
      if ($urandom_range(1) == 0) begin
        d = $urandom;
        m_req[m].aw_valid = 1; m_req[m].w_valid = 1; m_req[m].aw_addr = a; m_req[m].w_data = d;
        m_req[m].w_strb = 4'hF; m_req[m].w_last = 1;
        #1;
        while (!(m_rsp[m].aw_ready && m_rsp[m].w_ready)) begin step(); w++; end
        step();
        m_req[m].aw_valid = 0; m_req[m].w_valid = 0; m_req[m].b_ready = 1;
        #1;
        while (!m_rsp[m].b_valid) step();
        `CHECK_EQ(m_rsp[m].b_resp, (s == 3) ? RESP_DECERR : RESP_OKAY, "write response")
        if (s < 3) model[a] = d;
        step();
        m_req[m].b_ready = 0;
      end else begin
        m_req[m].ar_valid = 1; m_req[m].ar_addr = a;
        #1;
        while (!m_rsp[m].ar_ready) begin step(); w++; end
        step();
        m_req[m].ar_valid = 0; m_req[m].r_ready = 1;
        #1;
        while (!m_rsp[m].r_valid) step();
        `CHECK_EQ(m_rsp[m].r_resp, (s == 3) ? RESP_DECERR : RESP_OKAY, "read response")
        if (s < 3) `CHECK_EQ(m_rsp[m].r_data, model.exists(a) ? model[a] : 32'h0, "read data through the bus")
        step();
        m_req[m].r_ready = 0;
      end
      if (w > max_wait[m]) max_wait[m] = w;
      done_cnt[m]++;
      if ($urandom_range(3) == 0) step();
    end
  endtask

  initial begin
    m_req[0] = '0; m_req[1] = '0;
    for (int s = 0; s < 3; s++) n_acc[s] = 0;
    done_cnt = '{0, 0}; max_wait = '{0, 0};
    step(); rst_n = 1; step();
    fork
      master(0);
      master(1);
    join
    `CHECK_EQ(done_cnt[0], 150, "master 0 completed")
    `CHECK_EQ(done_cnt[1], 150, "master 1 completed")
    `CHECK(max_wait[0] < 10 && max_wait[1] < 10, "round-robin: no master waits more than one transaction")
    `CHECK(n_acc[0] > 0 && n_acc[1] > 0 && n_acc[2] > 0, "every slave used")
    $display("max wait %0d %0d", max_wait[0], max_wait[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
