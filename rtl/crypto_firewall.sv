// crypto_firewall: Cryptographic Firewall in front of the external memory.
//
// A Local Firewall whose target is the external memory controller, extended
// with the AES-GCM crypto module (paper, Fig. 8). Every access is first
// checked against its security policy exactly as in a Local Firewall
// (Firewall Interface + Security Builder + policy Block RAM, 6 cycles); the
// policy of the section then selects the protection: confidentiality and
// integrity, integrity only or plaintext (Cmode / Imode bits).
//
// Data path: a write passes the check, is encrypted and/or tagged and only
// then written to the external memory; a read passes the check, the stored
// word is read, its tag is verified and it is decrypted before it is
// returned. A tag mismatch raises flag_af (authenticationFlag) and the read is
// answered with SLVERR. The paper orders a read as "decipher, then check
// access rights"; here the access check comes first for both directions, so
// that a forbidden read never reaches the external memory at all.
//
// Interface: up_* is the AXI slave port from the system bus; mem_* goes to the
// memory controller. upd_* / recfg_* are the update port of the policy BRAM
// and the recfgEn register; key_* loads the key / hash-key register file.
module crypto_firewall
  import fw_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 10,
  parameter int unsigned PA_W      = 4,
  parameter logic [31:0]     RANGE_LOW  [N_ENTRIES] = '{default: '0},
  parameter logic [31:0]     RANGE_HIGH [N_ENTRIES] = '{default: '0},
  parameter logic [PA_W-1:0] RANGE_OUT  [N_ENTRIES] = '{default: '0},
  parameter logic [31:0]     SP_INIT    [2**PA_W]  = '{default: '0},
  parameter int unsigned TS_DEPTH = 4096,
  parameter int unsigned KEYS     = 4,
  parameter bit FREEZE_ON_ATTACK  = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axi_req_t        up_req,
  output axi_rsp_t        up_rsp,
  output mem_req_t        mem_req,
  input  mem_rsp_t        mem_rsp,
  // update port
  input  logic            upd_en,
  input  logic            upd_we,
  input  logic [PA_W-1:0] upd_addr,
  input  logic [31:0]     upd_wdata,
  output logic [31:0]     upd_rdata,
  input  logic            recfg_we,
  input  logic            recfg_wdata,
  input  logic            key_we,
  input  logic [$clog2(KEYS)+2:0] key_addr,
  input  logic [31:0]     key_wdata,
  // status
  output logic            recfg_en,
  output logic            frozen,
  output logic            ready_event,
  output logic            flag_cf,
  output logic            flag_nf,
  output logic            flag_af
);

  logic            chk_start, sb_ready, res_valid, check_out, not_found, in_update;
  chk_req_t        chk_req;
  policy_t         res_sp, fwd_sp;
  logic            bram_en;
  logic [PA_W-1:0] bram_addr;
  logic [31:0]     bram_rdata;
  axi_req_t        cm_req;
  axi_rsp_t        cm_rsp;

  firewall_interface #(.FREEZE_ON_ATTACK(FREEZE_ON_ATTACK)) u_fi (
    .clk, .rst_n,
    .up_req, .up_rsp, .dn_req(cm_req), .dn_rsp(cm_rsp),
    .chk_start, .chk_req, .sb_ready, .res_valid, .check_out, .res_sp, .in_update,
    .fwd_sp, .frozen, .ready_event
  );

  security_builder #(
    .N_ENTRIES(N_ENTRIES), .PA_W(PA_W),
    .RANGE_LOW(RANGE_LOW), .RANGE_HIGH(RANGE_HIGH), .RANGE_OUT(RANGE_OUT)
  ) u_sb (
    .clk, .rst_n,
    .chk_start, .chk_req, .ready(sb_ready), .res_valid, .check_out, .not_found, .res_sp,
    .bram_en, .bram_addr, .bram_rdata,
    .recfg_we, .recfg_wdata, .recfg_en, .in_update
  );

  sp_bram #(.DEPTH(2**PA_W), .DATA_W(32), .INIT(SP_INIT)) u_bram (
    .clk,
    .a_en(bram_en), .a_addr(bram_addr), .a_rdata(bram_rdata),
    .b_en(upd_en), .b_we(upd_we), .b_addr(upd_addr), .b_wdata(upd_wdata), .b_rdata(upd_rdata)
  );

  crypto_module #(.TS_DEPTH(TS_DEPTH), .KEYS(KEYS)) u_cm (
    .clk, .rst_n,
    .s_req(cm_req), .s_rsp(cm_rsp), .sp(fwd_sp),
    .m_req(mem_req), .m_rsp(mem_rsp),
    .key_we, .key_addr, .key_wdata,
    .auth_fail(flag_af)
  );

  assign flag_nf = res_valid && not_found;
  assign flag_cf = res_valid && !check_out && !not_found;

endmodule
