// mpsoc_top: the protected MPSoC of the case study (paper, Fig. 14).
//
// Two processors (MB1, MB2) share an AXI-4 bus with a shared Block RAM, an
// image-processing IP (a thresholding core) and the external DDR memory. Every
// boundary to the bus is guarded by a hardware firewall:
//   FW0  Local Firewall between MB1 and the bus   (MB1's access rights)
//   FW1  Local Firewall between MB2 and the bus   (MB2's access rights)
//   FW2  Local Firewall in front of the shared BRAM
//   FW3  Local Firewall in front of the threshold IP
//   FW4  Cryptographic Firewall in front of the external memory
// The firewalls report attacks over the custom bus to the monitoring IP,
// whose main register reg_m drives the interrupt controller. The update
// processor reaches the monitoring IP, a timer/log and the policy BRAMs,
// recfgEn registers and key files of all firewalls over the AXI-Lite
// security bus, so it can read attack flags and rewrite policies at run time.
//
// Not built here, and therefore brought out as ports: the two MicroBlaze
// processors (mb_req/mb_rsp, AXI-4 single-beat master ports, each entering
// its own firewall), the update processor (upd_req/upd_rsp, AXI-Lite master
// of the security bus; irq is its interrupt), and the memory controller with
// the DDR (mem_req/mem_rsp, one 32-bit word per request; the word leaves the
// chip encrypted or with an on-chip tag as its section requires).
//
// System address map (an assumption; the paper gives no addresses):
//   0x4000_0000  shared BRAM, 16 KB
//   0x4400_0000  threshold IP, 16 registers
//   0x8000_0000  external memory, five 32 MB sections in the paper's order
//                C11 (C+I), D21 (plain), D11 (C+I), C21 (plain), D12 (I only)
// Security-bus map: monitoring IP 0x0000, timer/log 0x1000, BRAM controller
// of FWi at 0x2000 + 0x1000*i.
// Access rights are those of the paper's Table 3: MB1 reads the shared
// memory, reads/writes the image IP and its own external sections C11, D11,
// D12 and may not reach C21, D21; MB2 reads/writes the shared memory, only
// writes the image IP, reads/writes C21, D21 and may not reach C11, D11, D12.
// An address missing from a firewall's Correspondence Table raises nF; a
// present address with the wrong right, size or length raises cF.
//
// Timing: one Local Firewall adds 6 cycles; a request from MB1 to the shared
// BRAM crosses two of them plus the bus grant; protected external accesses
// add the AES-GCM latency of the Cryptographic Firewall (22 cycles for C+I,
// 12 for integrity only).
module mpsoc_top
  import fw_pkg::*;
#(
  parameter int unsigned BRAM_WORDS = 4096,
  parameter int unsigned TS_DEPTH   = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // MicroBlaze processors
  input  axi_req_t    mb_req [2],
  output axi_rsp_t    mb_rsp [2],
  // update processor
  input  axil_req_t   upd_req,
  output axil_rsp_t   upd_rsp,
  output logic        irq,
  // memory controller of the external DDR
  output mem_req_t    mem_req,
  input  mem_rsp_t    mem_rsp,
  // status of the firewalls, FWi at bit i
  output logic [31:0] reg_m,
  output logic [4:0]  fw_frozen,
  output logic [4:0]  fw_ready_event,
  output logic [4:0]  fw_recfg_en
);

  localparam int unsigned NE = 10;
  localparam int unsigned PW = 4;

  localparam logic [31:0] SH_BASE = 32'h4000_0000;
  localparam logic [31:0] SH_END  = SH_BASE + 32'(4 * BRAM_WORDS);
  localparam logic [31:0] TH_BASE = 32'h4400_0000;
  localparam logic [31:0] TH_END  = TH_BASE + 32'h40;
  localparam logic [31:0] EX_BASE = 32'h8000_0000;
  localparam logic [31:0] SEC     = 32'h0200_0000;
  localparam logic [31:0] C11 = EX_BASE;
  localparam logic [31:0] D21 = EX_BASE + SEC;
  localparam logic [31:0] D11 = EX_BASE + 2 * SEC;
  localparam logic [31:0] C21 = EX_BASE + 3 * SEC;
  localparam logic [31:0] D12 = EX_BASE + 4 * SEC;
  localparam logic [31:0] EX_END = EX_BASE + 5 * SEC;

  // policies: single 32-bit words (AxSIZE = 2), no bursts (AxLEN = 0); policy
  // address 0 is reserved for "not found" and stays empty
  localparam logic [31:0] P_RO  = mk_policy(ACC_RO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
  localparam logic [31:0] P_WO  = mk_policy(ACC_WO, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
  localparam logic [31:0] P_RW  = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b0, 2'd0);
  localparam logic [31:0] P_CI  = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b1, 1'b1, 2'd0);
  localparam logic [31:0] P_IO  = mk_policy(ACC_RW, 3'd2, 8'd0, 1'b0, 1'b1, 2'd1);

  // ---------------------------------------------------------------- FW0: MB1
  localparam logic [31:0]   F0_LO [NE] = '{SH_BASE, TH_BASE, C11, D11, D12, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F0_HI [NE] = '{SH_END, TH_END, C11 + SEC, D11 + SEC, D12 + SEC, 0, 0, 0, 0, 0};
  localparam logic [PW-1:0] F0_PA [NE] = '{4'd1, 4'd2, 4'd2, 4'd2, 4'd2, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F0_SP [16] = '{1: P_RO, 2: P_RW, default: 32'h0};
  // ---------------------------------------------------------------- FW1: MB2
  localparam logic [31:0]   F1_LO [NE] = '{SH_BASE, TH_BASE, D21, C21, 0, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F1_HI [NE] = '{SH_END, TH_END, D21 + SEC, C21 + SEC, 0, 0, 0, 0, 0, 0};
  localparam logic [PW-1:0] F1_PA [NE] = '{4'd1, 4'd2, 4'd1, 4'd1, 0, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F1_SP [16] = '{1: P_RW, 2: P_WO, default: 32'h0};
  // --------------------------------------------------------- FW2: shared BRAM
  localparam logic [31:0]   F2_LO [NE] = '{SH_BASE, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F2_HI [NE] = '{SH_END, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [PW-1:0] F2_PA [NE] = '{0: 4'd1, default: 4'd0};
  localparam logic [31:0]   F2_SP [16] = '{1: P_RW, default: 32'h0};
  // --------------------------------------------------------- FW3: threshold IP
  localparam logic [31:0]   F3_LO [NE] = '{TH_BASE, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F3_HI [NE] = '{TH_END, 0, 0, 0, 0, 0, 0, 0, 0, 0};
  localparam logic [PW-1:0] F3_PA [NE] = '{0: 4'd1, default: 4'd0};
  localparam logic [31:0]   F3_SP [16] = '{1: P_RW, default: 32'h0};
  // ---------------------------------------------------- FW4: external memory
  localparam logic [31:0]   F4_LO [NE] = '{C11, D21, D11, C21, D12, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F4_HI [NE] = '{C11 + SEC, D21 + SEC, D11 + SEC, C21 + SEC, D12 + SEC,
                                           0, 0, 0, 0, 0};
  localparam logic [PW-1:0] F4_PA [NE] = '{4'd1, 4'd2, 4'd1, 4'd2, 4'd3, 0, 0, 0, 0, 0};
  localparam logic [31:0]   F4_SP [16] = '{1: P_CI, 2: P_RW, 3: P_IO, default: 32'h0};

  // --------------------------------------------------------------- security bus
  localparam int unsigned NSEC = 7;
  localparam logic [31:0] SEC_BASE [NSEC] = '{32'h0000, 32'h1000, 32'h2000, 32'h3000,
                                              32'h4000, 32'h5000, 32'h6000};
  localparam logic [31:0] SEC_SIZE [NSEC] = '{default: 32'h1000};

  axil_req_t sec_req [NSEC];
  axil_rsp_t sec_rsp [NSEC];

  security_bus #(.N_SLAVES(NSEC), .SLV_BASE(SEC_BASE), .SLV_SIZE(SEC_SIZE)) u_secbus (
    .clk, .rst_n, .m_req(upd_req), .m_rsp(upd_rsp), .s_req(sec_req), .s_rsp(sec_rsp)
  );

  // per-firewall update signals
  logic          upd_en    [5];
  logic          upd_we    [5];
  logic [PW-1:0] upd_addr  [5];
  logic [31:0]   upd_wdata [5];
  logic [31:0]   upd_rdata [5];
  logic          recfg_we  [5];
  logic          recfg_wd  [5];
  logic          key_we    [5];
  logic [4:0]    key_addr  [5];
  logic [31:0]   key_wdata [5];
  flags_t        flags     [5];

  for (genvar i = 0; i < 5; i++) begin : g_ctrl
    bram_ctrl #(.PA_W(PW), .KA_W(5)) u_ctrl (
      .clk, .rst_n, .s_req(sec_req[2+i]), .s_rsp(sec_rsp[2+i]),
      .upd_en(upd_en[i]), .upd_we(upd_we[i]), .upd_addr(upd_addr[i]),
      .upd_wdata(upd_wdata[i]), .upd_rdata(upd_rdata[i]),
      .recfg_we(recfg_we[i]), .recfg_wdata(recfg_wd[i]), .recfg_en(fw_recfg_en[i]),
      .key_we(key_we[i]), .key_addr(key_addr[i]), .key_wdata(key_wdata[i])
    );
  end

  timer_log u_timer (.clk, .rst_n, .s_req(sec_req[1]), .s_rsp(sec_rsp[1]));

  // ----------------------------------------------------------------- system bus
  localparam logic [31:0] SYS_BASE [3] = '{SH_BASE, TH_BASE, EX_BASE};
  localparam logic [31:0] SYS_SIZE [3] = '{SH_END - SH_BASE, TH_END - TH_BASE, EX_END - EX_BASE};

  axi_req_t bm_req [2];
  axi_rsp_t bm_rsp [2];
  axi_req_t bs_req [3];
  axi_rsp_t bs_rsp [3];

  axi_interconnect #(.N_MASTERS(2), .N_SLAVES(3), .SLV_BASE(SYS_BASE), .SLV_SIZE(SYS_SIZE)) u_bus (
    .clk, .rst_n, .m_req(bm_req), .m_rsp(bm_rsp), .s_req(bs_req), .s_rsp(bs_rsp)
  );

  // ------------------------------------------------------------ firewalls
  local_firewall #(.N_ENTRIES(NE), .PA_W(PW), .RANGE_LOW(F0_LO), .RANGE_HIGH(F0_HI),
                   .RANGE_OUT(F0_PA), .SP_INIT(F0_SP)) u_fw0 (
    .clk, .rst_n, .up_req(mb_req[0]), .up_rsp(mb_rsp[0]), .dn_req(bm_req[0]), .dn_rsp(bm_rsp[0]),
    .upd_en(upd_en[0]), .upd_we(upd_we[0]), .upd_addr(upd_addr[0]), .upd_wdata(upd_wdata[0]),
    .upd_rdata(upd_rdata[0]), .recfg_we(recfg_we[0]), .recfg_wdata(recfg_wd[0]),
    .recfg_en(fw_recfg_en[0]), .frozen(fw_frozen[0]), .ready_event(fw_ready_event[0]),
    .flag_cf(flags[0].cf), .flag_nf(flags[0].nf)
  );
  assign flags[0].af = 1'b0;

  local_firewall #(.N_ENTRIES(NE), .PA_W(PW), .RANGE_LOW(F1_LO), .RANGE_HIGH(F1_HI),
                   .RANGE_OUT(F1_PA), .SP_INIT(F1_SP)) u_fw1 (
    .clk, .rst_n, .up_req(mb_req[1]), .up_rsp(mb_rsp[1]), .dn_req(bm_req[1]), .dn_rsp(bm_rsp[1]),
    .upd_en(upd_en[1]), .upd_we(upd_we[1]), .upd_addr(upd_addr[1]), .upd_wdata(upd_wdata[1]),
    .upd_rdata(upd_rdata[1]), .recfg_we(recfg_we[1]), .recfg_wdata(recfg_wd[1]),
    .recfg_en(fw_recfg_en[1]), .frozen(fw_frozen[1]), .ready_event(fw_ready_event[1]),
    .flag_cf(flags[1].cf), .flag_nf(flags[1].nf)
  );
  assign flags[1].af = 1'b0;

  axi_req_t sh_req, th_req;
  axi_rsp_t sh_rsp, th_rsp;

  local_firewall #(.N_ENTRIES(NE), .PA_W(PW), .RANGE_LOW(F2_LO), .RANGE_HIGH(F2_HI),
                   .RANGE_OUT(F2_PA), .SP_INIT(F2_SP)) u_fw2 (
    .clk, .rst_n, .up_req(bs_req[0]), .up_rsp(bs_rsp[0]), .dn_req(sh_req), .dn_rsp(sh_rsp),
    .upd_en(upd_en[2]), .upd_we(upd_we[2]), .upd_addr(upd_addr[2]), .upd_wdata(upd_wdata[2]),
    .upd_rdata(upd_rdata[2]), .recfg_we(recfg_we[2]), .recfg_wdata(recfg_wd[2]),
    .recfg_en(fw_recfg_en[2]), .frozen(fw_frozen[2]), .ready_event(fw_ready_event[2]),
    .flag_cf(flags[2].cf), .flag_nf(flags[2].nf)
  );
  assign flags[2].af = 1'b0;

  local_firewall #(.N_ENTRIES(NE), .PA_W(PW), .RANGE_LOW(F3_LO), .RANGE_HIGH(F3_HI),
                   .RANGE_OUT(F3_PA), .SP_INIT(F3_SP)) u_fw3 (
    .clk, .rst_n, .up_req(bs_req[1]), .up_rsp(bs_rsp[1]), .dn_req(th_req), .dn_rsp(th_rsp),
    .upd_en(upd_en[3]), .upd_we(upd_we[3]), .upd_addr(upd_addr[3]), .upd_wdata(upd_wdata[3]),
    .upd_rdata(upd_rdata[3]), .recfg_we(recfg_we[3]), .recfg_wdata(recfg_wd[3]),
    .recfg_en(fw_recfg_en[3]), .frozen(fw_frozen[3]), .ready_event(fw_ready_event[3]),
    .flag_cf(flags[3].cf), .flag_nf(flags[3].nf)
  );
  assign flags[3].af = 1'b0;

  crypto_firewall #(.N_ENTRIES(NE), .PA_W(PW), .RANGE_LOW(F4_LO), .RANGE_HIGH(F4_HI),
                    .RANGE_OUT(F4_PA), .SP_INIT(F4_SP), .TS_DEPTH(TS_DEPTH), .KEYS(4)) u_fw4 (
    .clk, .rst_n, .up_req(bs_req[2]), .up_rsp(bs_rsp[2]), .mem_req, .mem_rsp,
    .upd_en(upd_en[4]), .upd_we(upd_we[4]), .upd_addr(upd_addr[4]), .upd_wdata(upd_wdata[4]),
    .upd_rdata(upd_rdata[4]), .recfg_we(recfg_we[4]), .recfg_wdata(recfg_wd[4]),
    .key_we(key_we[4]), .key_addr(key_addr[4]), .key_wdata(key_wdata[4]),
    .recfg_en(fw_recfg_en[4]), .frozen(fw_frozen[4]), .ready_event(fw_ready_event[4]),
    .flag_cf(flags[4].cf), .flag_nf(flags[4].nf), .flag_af(flags[4].af)
  );

  // ------------------------------------------------------------ bus targets
  shared_bram #(.WORDS(BRAM_WORDS)) u_shared (.clk, .rst_n, .s_req(sh_req), .s_rsp(sh_rsp));
  threshold_ip u_thresh (.clk, .rst_n, .s_req(th_req), .s_rsp(th_rsp));

  // ------------------------------------------------------------ monitoring
  logic        cb_valid;
  logic [3:0]  cb_addr;
  logic [31:0] cb_data;

  custom_bus #(.N_FW(5)) u_cbus (
    .clk, .rst_n, .flags, .bus_valid(cb_valid), .bus_addr(cb_addr), .bus_data(cb_data)
  );

  monitoring_ip #(.N_FW(5), .FW_CRYPTO(5'b10000)) u_mon (
    .clk, .rst_n, .bus_valid(cb_valid), .bus_addr(cb_addr), .bus_data(cb_data),
    .s_req(sec_req[0]), .s_rsp(sec_rsp[0]), .reg_m
  );

  interrupt_controller u_irq (.clk, .rst_n, .reg_m, .irq);

endmodule
