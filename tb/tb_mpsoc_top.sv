// tb_mpsoc_top: end-to-end test of the protected MPSoC, at full size.
//
// Plays the parts the chip leaves outside: two processors (tasks driving the
// MB1 and MB2 AXI ports), the update processor (tasks on the security bus)
// and the external DDR (an associative-array memory behind the memory port
// that answers one cycle after a read). The run follows the case study:
//   - Table 3 rights: allowed accesses pass, a write to read-only memory and a
//     read of a write-only IP raise cF, an address outside a processor's
//     table raises nF; the requester always gets SLVERR.
//   - monitoring: the flag reaches reg_m and the interrupt, the update
//     processor reads reg_m, clears it and the interrupt drops.
//   - freeze and readyEvent: after an attack the firewall blocks; a request
//     made meanwhile sets readyEvent and is served once the update processor
//     has raised recfgEn, rewritten a policy and dropped recfgEn.
//   - external memory: a C+I word leaves the chip as the AES-GCM ciphertext
//     (compared with standard GCM values), an I-only and a plaintext word
//     leave in clear, all read back; a tampered or replayed word raises aF.
//   - the timer log records an event.
//   - security modes: the update processor puts the shared memory's firewall
//     in the read-only (intermediate) mode, then in quarantine (no access),
//     then restores it.
// Each mechanism is counted; one that never happened is a failure. Cycle
// counts are checked against this design's latencies: 6 for one Local
// Firewall (the paper's S0), 6 + 1 + 6 for two firewalls with the bus grant
// between them (paper's S1: 12); a write to the external memory takes
// 6 + 1 + 6 cycles, then 22 (C+I), 12 (I only) or 0 cycles of AES-GCM, then
// one output cycle to the memory port (36, 26, 14; the paper's S2, S3, S4
// are 28, 18, 16). The top runs with its default parameters.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_mpsoc_top;
  import fw_pkg::*;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  axi_req_t  mb_req [2];
  axi_rsp_t  mb_rsp [2];
  axil_req_t upd_req;
  axil_rsp_t upd_rsp;
  logic      irq;
  mem_req_t  mem_req;
  mem_rsp_t  mem_rsp;
  logic [31:0] reg_m;
  logic [4:0]  fw_frozen, fw_ready_event, fw_recfg_en;

  mpsoc_top dut (.*);

  // ------------------------------------------------------------ DDR model
  logic [31:0] ddr [logic [31:0]];
  int n_mem_wr = 0, n_mem_rd = 0;
  assign mem_rsp.ready = 1'b1;
  always @(posedge clk) begin
    mem_rsp.rvalid <= 1'b0;
    if (mem_req.valid) begin
      if (mem_req.we) begin
        ddr[mem_req.addr] = mem_req.wdata;
        n_mem_wr++;
      end else begin
        mem_rsp.rvalid <= 1'b1;
        mem_rsp.rdata  <= ddr.exists(mem_req.addr) ? ddr[mem_req.addr] : 32'h0;
        n_mem_rd++;
      end
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    #2_000_000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ------------------------------------------------ cycle-stamp monitors
  // first cycle at which a point of the path sees the request, after arm
  int t_bm0, t_bm1, t_sh, t_mem, t_mem_rd;
  task automatic arm();
    t_bm0 = -1; t_bm1 = -1; t_sh = -1; t_mem = -1; t_mem_rd = -1;
  endtask
  always @(posedge clk) begin
    #1;
    if (t_bm0 < 0 && (dut.bm_req[0].ar_valid || dut.bm_req[0].aw_valid)) t_bm0 = cyc;
    if (t_bm1 < 0 && (dut.bm_req[1].ar_valid || dut.bm_req[1].aw_valid)) t_bm1 = cyc;
    if (t_sh < 0 && (dut.sh_req.ar_valid || dut.sh_req.aw_valid)) t_sh = cyc;
    if (t_mem < 0 && mem_req.valid && mem_req.we) t_mem = cyc;
    if (t_mem_rd < 0 && mem_req.valid && !mem_req.we) t_mem_rd = cyc;
  end

  // ------------------------------------------------------------ processors
  task automatic step();
    @(posedge clk); #1;
  endtask

  task automatic mb_read(input int m, input logic [31:0] a, output logic [31:0] d,
                         output logic [1:0] resp, output int t0);
    mb_req[m].ar_valid = 1'b1;
    mb_req[m].ar_addr  = a;
    mb_req[m].ar_id    = ID_W'(m);
    mb_req[m].ar_size  = 3'd2;
    mb_req[m].ar_len   = 8'd0;
    t0 = cyc;
    #1;
    while (!mb_rsp[m].ar_ready) step();
    step();
    mb_req[m].ar_valid = 1'b0;
    mb_req[m].r_ready  = 1'b1;
    #1;
    while (!mb_rsp[m].r_valid) step();
    d    = mb_rsp[m].r_data;
    resp = mb_rsp[m].r_resp;
    step();
    mb_req[m].r_ready = 1'b0;
  endtask

  task automatic mb_write(input int m, input logic [31:0] a, input logic [31:0] d,
                          output logic [1:0] resp, output int t0);
    mb_req[m].aw_valid = 1'b1;
    mb_req[m].aw_addr  = a;
    mb_req[m].aw_id    = ID_W'(m);
    mb_req[m].aw_size  = 3'd2;
    mb_req[m].aw_len   = 8'd0;
    mb_req[m].w_valid  = 1'b1;
    mb_req[m].w_data   = d;
    mb_req[m].w_strb   = 4'hF;
    mb_req[m].w_last   = 1'b1;
    t0 = cyc;
    #1;
    while (!mb_rsp[m].aw_ready) step();
    step();
    mb_req[m].aw_valid = 1'b0;
    mb_req[m].w_valid  = 1'b0;
    mb_req[m].b_ready  = 1'b1;
    #1;
    while (!mb_rsp[m].b_valid) step();
    resp = mb_rsp[m].b_resp;
    step();
    mb_req[m].b_ready = 1'b0;
  endtask

  // ------------------------------------------------------ update processor
  task automatic sec_write(input logic [31:0] a, input logic [31:0] d);
    upd_req.aw_valid = 1'b1; upd_req.aw_addr = a;
    upd_req.w_valid  = 1'b1; upd_req.w_data  = d;
    #1;
    while (!upd_rsp.aw_ready) step();
    step();
    upd_req.aw_valid = 1'b0; upd_req.w_valid = 1'b0; upd_req.b_ready = 1'b1;
    #1;
    while (!upd_rsp.b_valid) step();
    step();
    upd_req.b_ready = 1'b0;
  endtask

  task automatic sec_read(input logic [31:0] a, output logic [31:0] d);
    upd_req.ar_valid = 1'b1; upd_req.ar_addr = a;
    #1;
    while (!upd_rsp.ar_ready) step();
    step();
    upd_req.ar_valid = 1'b0; upd_req.r_ready = 1'b1;
    #1;
    while (!upd_rsp.r_valid) step();
    d = upd_rsp.r_data;
    step();
    upd_req.r_ready = 1'b0;
  endtask

  localparam logic [31:0] MON = 32'h0000, TMR = 32'h1000;
  function automatic logic [31:0] ctrl(int fw);
    return 32'h2000 + 32'h1000 * fw;
  endfunction

  // --------------------------------------------------------- mechanisms
  int n_pass, n_cf, n_nf, n_af, n_ci, n_io, n_plain, n_freeze, n_ready_ev, n_upd, n_irq,
      n_recfg, n_replay, n_log, n_thresh, n_ro_mode, n_quarantine;

  // irq timing: reg_m changes, irq follows two cycles later
  int t_regm_fall, t_irq_rise;
  logic [31:0] regm_q;
  logic irq_q;
  always @(posedge clk) begin
    #1;
    if (rst_n && reg_m != '1 && regm_q == '1) t_regm_fall = cyc;
    if (rst_n && irq && !irq_q) begin
      t_irq_rise = cyc;
      n_irq++;
      `CHECK_EQ(t_irq_rise - t_regm_fall, 2, "interrupt 2 cycles after reg_m")
    end
    regm_q = reg_m;
    irq_q  = irq;
  end

  // clear the monitoring registers of the given firewalls and check irq drops
  task automatic clear_monitor(input int fw_lo, input int fw_hi);
    logic [31:0] r;
    for (int f = fw_lo; f <= fw_hi; f++) sec_write(MON + 4 * f, 32'hFFFF_FFFF);
    sec_read(MON + 32'h40, r);
    `CHECK_EQ(r, 32'hFFFF_FFFF, "reg_m cleared by the update processor")
    repeat (3) step();
    `CHECK(!irq, "interrupt drops after clearing")
  endtask

  // recfgEn up, optional policy rewrite, recfgEn down
  task automatic reconfigure(input int fw, input int pol, input logic [31:0] word);
    logic [31:0] r;
    sec_write(ctrl(fw) + 32'h100, 32'h1);
    `CHECK(fw_recfg_en[fw], "recfgEn set")
    if (pol >= 0) begin
      sec_write(ctrl(fw) + 4 * pol, word);
      sec_read(ctrl(fw) + 4 * pol, r);
      `CHECK_EQ(r, word, "policy word read back")
      n_upd++;
    end
    sec_write(ctrl(fw) + 32'h100, 32'h0);
    `CHECK(!fw_recfg_en[fw], "recfgEn cleared")
    n_recfg++;
    step();
  endtask

  localparam logic [31:0] SH = 32'h4000_0000, TH = 32'h4400_0000;
  localparam logic [31:0] C11 = 32'h8000_0000, D21 = 32'h8200_0000, D11 = 32'h8400_0000,
                          C21 = 32'h8600_0000, D12 = 32'h8800_0000;

  initial begin
    logic [31:0] d, r, wd;
    logic [1:0]  resp;
    int t0;
    mb_req[0] = '0; mb_req[1] = '0; upd_req = '0;
    mem_rsp.rvalid = 1'b0; mem_rsp.rdata = '0;
    n_pass = 0; n_cf = 0; n_nf = 0; n_af = 0; n_ci = 0; n_io = 0; n_plain = 0; n_freeze = 0;
    n_ready_ev = 0; n_upd = 0; n_irq = 0; n_recfg = 0; n_replay = 0; n_log = 0; n_thresh = 0;
    n_ro_mode = 0; n_quarantine = 0;
    t_regm_fall = 0; t_irq_rise = 0; regm_q = '1; irq_q = 1'b0;
    arm();
    repeat (3) step();
    rst_n = 1'b1;
    repeat (2) step();
    `CHECK_EQ(reg_m, 32'hFFFF_FFFF, "reg_m all ones after reset")
    `CHECK(!irq, "no interrupt after reset")

    // keys of the Cryptographic Firewall: pairs 0 and 1 = (K, H = E_K(0))
    for (int p = 0; p < 2; p++) begin
      logic [127:0] k, h;
      k = 128'h000102030405060708090a0b0c0d0e0f;
      h = 128'hc6a13b37878f5b826f4f8162a1c8d879;
      for (int w = 0; w < 4; w++) begin
        sec_write(ctrl(4) + 32'h200 + 4 * (8 * p + w),     k[127 - 32 * w -: 32]);
        sec_write(ctrl(4) + 32'h200 + 4 * (8 * p + 4 + w), h[127 - 32 * w -: 32]);
      end
    end

    // ---- 1. MB2 writes the shared BRAM, MB1 reads it (two firewalls each)
    for (int i = 0; i < 4; i++) begin
      wd = $urandom;
      arm();
      mb_write(1, SH + 32'h100 + 4 * i, wd, resp, t0);
      `CHECK_EQ(resp, RESP_OKAY, "MB2 write to shared memory passes")
      `CHECK_EQ(t_bm1 - t0, 6, "S0: one Local Firewall = 6 cycles")
      `CHECK_EQ(t_sh - t0, 13, "S1: two Local Firewalls + bus grant = 13 cycles")
      arm();
      mb_read(0, SH + 32'h100 + 4 * i, d, resp, t0);
      `CHECK_EQ(resp, RESP_OKAY, "MB1 read of shared memory passes")
      `CHECK_EQ(d, wd, "shared memory data")
      `CHECK_EQ(t_bm0 - t0, 6, "S0 on a read")
      `CHECK_EQ(t_sh - t0, 13, "S1 on a read")
      n_pass += 2;
    end

    // ---- 2. image IP: MB1 writes and reads (rw), MB2 writes (write only)
    mb_write(0, TH + 32'h8, 32'h10FF_807F, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "MB1 write to threshold IP")
    mb_read(0, TH + 32'h8, d, resp, t0);
    `CHECK_EQ(d, 32'h00FF_FF00, "threshold result")
    mb_write(1, TH + 32'hC, 32'hC0C0_0101, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "MB2 write to threshold IP (write only)")
    mb_read(0, TH + 32'hC, d, resp, t0);
    `CHECK_EQ(d, 32'hFFFF_0000, "threshold result of MB2's pixels")
    n_pass += 4; n_thresh++;

    // ---- 3. cF: MB1 writes the shared memory it may only read
    mb_write(0, SH + 32'h100, 32'hBAD0_BAD0, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "MB1 write to read-only memory refused")
    mb_read(1, SH + 32'h100, d, resp, t0);
    `CHECK(d != 32'hBAD0_BAD0, "refused write never reached memory")
    repeat (4) step();
    `CHECK_EQ(reg_m[31:30], 2'b01, "reg_m: cF of FW0")
    `CHECK(irq, "interrupt raised after cF")
    `CHECK(fw_frozen[0], "FW0 frozen after the attack")
    if (reg_m[31:30] == 2'b01) n_cf++;
    if (fw_frozen[0]) n_freeze++;
    sec_read(MON + 32'h40, r);
    `CHECK_EQ(r[31:30], 2'b01, "update processor reads reg_m")
    sec_read(MON + 32'h0, r);
    `CHECK_EQ(r, 32'h4000_0000, "update processor reads reg_0 (cF at bit 31 low, nF high)")

    // blocked request, readyEvent, policy update that grants MB1 write access
    fork
      begin
        mb_write(0, SH + 32'h200, 32'h600D_0001, resp, t0);
      end
      begin
        repeat (4) step();
        `CHECK(fw_ready_event[0], "readyEvent set by a request during the freeze")
        `CHECK(dut.bm_req[0].aw_valid == 1'b0, "no request leaves a frozen firewall")
        if (fw_ready_event[0]) n_ready_ev++;
        reconfigure(0, 1, mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0));
      end
    join
    `CHECK_EQ(resp, RESP_OKAY, "held request passes under the new policy")
    `CHECK(!fw_ready_event[0], "readyEvent cleared when the request is served")
    mb_read(1, SH + 32'h200, d, resp, t0);
    `CHECK_EQ(d, 32'h600D_0001, "held write reached memory")
    n_pass++;
    clear_monitor(0, 0);

    // ---- 4. nF: MB1 reads MB2's plaintext section C21
    mb_read(0, C21 + 32'h4, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "MB1 access to C21 refused")
    `CHECK_EQ(d, 32'h0, "refused read returns 0")
    repeat (4) step();
    `CHECK_EQ(reg_m[31:30], 2'b10, "reg_m: nF of FW0")
    if (reg_m[31:30] == 2'b10) n_nf++;
    reconfigure(0, -1, 32'h0);
    `CHECK(!fw_frozen[0], "freeze released by the update")
    clear_monitor(0, 0);

    // MB2: read of the write-only IP (cF at FW1), access to C11 (nF at FW1)
    mb_read(1, TH + 32'h8, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "MB2 read of write-only IP refused")
    repeat (4) step();
    `CHECK_EQ(reg_m[29:28], 2'b01, "reg_m: cF of FW1")
    if (reg_m[29:28] == 2'b01) n_cf++;
    reconfigure(1, -1, 32'h0);
    mb_write(1, C11, 32'h1, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "MB2 access to C11 refused")
    repeat (4) step();
    `CHECK_EQ(reg_m[29:28], 2'b00, "reg_m: cF and nF of FW1")
    if (reg_m[29:28] == 2'b00) n_nf++;
    reconfigure(1, -1, 32'h0);
    clear_monitor(1, 1);

    // ---- 5. C+I section C11: ciphertext off chip, plaintext back
    arm();
    mb_write(0, C11 + 32'h10, 32'hDEAD_BEEF, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "C+I write")
    `CHECK_EQ(ddr[C11 + 32'h10], 32'h1cbc_f785, "C+I word stored as AES-GCM ciphertext")
    `CHECK_EQ(dut.u_fw4.u_cm.mac_mem[4], 32'hd05e_9a3b, "C+I tag kept on chip")
    `CHECK_EQ(t_mem - t0, 6 + 1 + 6 + 22 + 1, "S2: LF + bus + CF check + 22-cycle AES-GCM + output stage")
    arm();
    mb_read(0, C11 + 32'h10, d, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "C+I read authenticates")
    `CHECK_EQ(d, 32'hDEAD_BEEF, "C+I read decrypts")
    if (d == 32'hDEAD_BEEF) n_ci++;
    mb_write(0, D11 + 32'h20, 32'hCAFE_F00D, resp, t0);
    `CHECK_EQ(ddr[D11 + 32'h20], 32'hb61e_d498, "second C+I section (D11)")
    mb_read(0, D11 + 32'h20, d, resp, t0);
    `CHECK_EQ(d, 32'hCAFE_F00D, "D11 read back")

    // ---- 6. I-only section D12 and plaintext section D21
    arm();
    mb_write(0, D12 + 32'h40, 32'h0BAD_C0DE, resp, t0);
    `CHECK_EQ(ddr[D12 + 32'h40], 32'h0BAD_C0DE, "I-only word stored in clear")
    `CHECK_EQ(dut.u_fw4.u_cm.mac_mem[16], 32'hfd23_c7b3, "I-only tag is the GMAC")
    `CHECK_EQ(t_mem - t0, 6 + 1 + 6 + 12 + 1, "S3: LF + bus + CF check + 12-cycle GMAC + output stage")
    mb_read(0, D12 + 32'h40, d, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "I-only read authenticates")
    `CHECK_EQ(d, 32'h0BAD_C0DE, "I-only read data")
    if (resp == RESP_OKAY && d == 32'h0BAD_C0DE) n_io++;
    arm();
    mb_write(1, D21 + 32'h80, 32'h5555_AAAA, resp, t0);
    `CHECK_EQ(ddr[D21 + 32'h80], 32'h5555_AAAA, "plaintext word stored in clear")
    `CHECK_EQ(t_mem - t0, 6 + 1 + 6 + 1, "S4: LF + bus + CF check + output stage")
    mb_read(1, D21 + 32'h80, d, resp, t0);
    `CHECK_EQ(d, 32'h5555_AAAA, "plaintext read")
    if (d == 32'h5555_AAAA) n_plain++;

    // ---- 7. aF: the attacker flips a bit of the C+I word in the DDR
    ddr[C11 + 32'h10] = ddr[C11 + 32'h10] ^ 32'h0000_0100;
    mb_read(0, C11 + 32'h10, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "tampered word refused")
    `CHECK_EQ(d, 32'h0, "tampered word not returned")
    repeat (4) step();
    `CHECK_EQ(reg_m[23:21], 3'b110, "reg_m: iF of the Cryptographic Firewall")
    `CHECK(irq, "interrupt raised after aF")
    if (reg_m[23:21] == 3'b110) n_af++;
    clear_monitor(4, 4);

    // replay: an old (ciphertext) word is put back after a new write
    mb_write(0, C11 + 32'h10, 32'h1234_5678, resp, t0);
    `CHECK_EQ(ddr[C11 + 32'h10], 32'he050_7d9f, "rewrite uses the next timestamp")
    ddr[C11 + 32'h10] = 32'h1cbc_f785;
    mb_read(0, C11 + 32'h10, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "replayed old word refused")
    if (resp == RESP_SLVERR) n_replay++;
    repeat (4) step();
    clear_monitor(4, 4);

    // ---- 8. timer and event log
    sec_write(TMR + 32'h4, 32'h0000_00AF);
    sec_read(TMR + 32'h8, r);
    `CHECK_EQ(r, 32'd1, "one event logged")
    sec_read(TMR + 32'h200, r);
    `CHECK_EQ(r, 32'h0000_00AF, "event code logged")
    sec_read(TMR + 32'h100, d);
    sec_read(TMR + 32'h0, r);
    `CHECK(d != 0 && d < r, "event timestamp earlier than the current time")
    n_log++;

    // ---- 9. security modes set by the update processor on the shared
    // memory's firewall (FW2): the intermediate mode lets only reads through,
    // the quarantine mode lets nothing through
    reconfigure(2, 1, mk_policy(ACC_RO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0));
    mb_read(1, SH + 32'h200, d, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "read-only mode: read passes")
    `CHECK_EQ(d, 32'h600D_0001, "read-only mode: read data")
    mb_write(1, SH + 32'h200, 32'h0BAD_0002, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "read-only mode: write refused")
    repeat (4) step();
    `CHECK_EQ(reg_m[29:26], 4'b1101, "reg_m: cF raised by FW2, not by FW1")
    `CHECK(fw_frozen[2], "FW2 frozen after the refused write")
    if (resp == RESP_SLVERR && d == 32'h600D_0001) n_ro_mode++;
    reconfigure(2, 1, mk_policy(ACC_NONE, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0));
    clear_monitor(2, 2);
    mb_read(1, SH + 32'h200, d, resp, t0);
    `CHECK_EQ(resp, RESP_SLVERR, "quarantine mode: read refused")
    `CHECK_EQ(d, 32'h0, "quarantine mode: no data returned")
    repeat (4) step();
    `CHECK_EQ(reg_m[27:26], 2'b01, "reg_m: cF of FW2 in quarantine")
    if (resp == RESP_SLVERR) n_quarantine++;
    reconfigure(2, 1, mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0));
    clear_monitor(2, 2);
    mb_read(1, SH + 32'h200, d, resp, t0);
    `CHECK_EQ(resp, RESP_OKAY, "shared memory readable again after restoring the policy")
    `CHECK_EQ(d, 32'h600D_0001, "refused write in read-only mode never reached memory")

    // ---- mechanism coverage
    $display("mechanisms: pass=%0d cF=%0d nF=%0d aF=%0d C+I=%0d I=%0d plain=%0d freeze=%0d readyEvent=%0d update=%0d recfgEn=%0d irq=%0d replay=%0d log=%0d threshold=%0d read-only=%0d quarantine=%0d",
             n_pass, n_cf, n_nf, n_af, n_ci, n_io, n_plain, n_freeze, n_ready_ev, n_upd, n_recfg,
             n_irq, n_replay, n_log, n_thresh, n_ro_mode, n_quarantine);
    `CHECK(n_pass > 0, "mechanism: allowed access")
    `CHECK(n_cf > 0, "mechanism: checkingFlag")
    `CHECK(n_nf > 0, "mechanism: notFoundFlag")
    `CHECK(n_af > 0, "mechanism: authenticationFlag")
    `CHECK(n_ci > 0, "mechanism: confidentiality + integrity")
    `CHECK(n_io > 0, "mechanism: integrity only")
    `CHECK(n_plain > 0, "mechanism: plaintext section")
    `CHECK(n_freeze > 0, "mechanism: freeze after attack")
    `CHECK(n_ready_ev > 0, "mechanism: readyEvent")
    `CHECK(n_upd > 0, "mechanism: policy update")
    `CHECK(n_recfg > 0, "mechanism: recfgEn")
    `CHECK(n_irq > 0, "mechanism: interrupt")
    `CHECK(n_replay > 0, "mechanism: replay detection")
    `CHECK(n_log > 0, "mechanism: event log")
    `CHECK(n_thresh > 0, "mechanism: threshold IP")
    `CHECK(n_ro_mode > 0, "mechanism: read-only security mode")
    `CHECK(n_quarantine > 0, "mechanism: quarantine security mode")
    `CHECK(n_mem_wr > 0 && n_mem_rd > 0, "mechanism: external memory traffic")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
