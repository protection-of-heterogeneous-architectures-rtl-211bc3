// local_firewall: Local Firewall, the per-IP hardware firewall of the MPSoC.
//
// Sits between one IP (processor, memory, peripheral) and the AXI bus and
// lets through only the transactions that its security policies allow. It is
// the paper's Fig. 3 / Fig. 11: a Firewall Interface (Decision and
// Synchronization Modules), a Security Builder (Correspondence Table, Reading
// Module, Checking Module, FSM, recfgEn register) and a dual-port policy
// Block RAM whose second port is reserved for the update path.
//
// Interface: up_* is the requester side, dn_* the target side (for a
// processor's firewall the processor is upstream; for a slave's firewall the
// bus is upstream). upd_* is port B of the policy BRAM (one word per cycle)
// and recfg_we/recfg_wdata write the recfgEn register; both come from the
// firewall's BRAM controller on the security bus. The flags cf (checking
// failed) and nf (address not found) pulse for one cycle when a check fails;
// they go to the monitoring IP.
//
// Latency: 6 cycles from a request at the upstream port to the same request
// at the downstream port (2 in the Firewall Interface, 4 in the Security
// Builder), the paper's figure for one Local Firewall.
module local_firewall
  import fw_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 10,
  parameter int unsigned PA_W      = 4,
  parameter logic [31:0]     RANGE_LOW  [N_ENTRIES] = '{default: '0},
  parameter logic [31:0]     RANGE_HIGH [N_ENTRIES] = '{default: '0},
  parameter logic [PA_W-1:0] RANGE_OUT  [N_ENTRIES] = '{default: '0},
  parameter logic [31:0]     SP_INIT    [2**PA_W]  = '{default: '0},
  parameter bit FREEZE_ON_ATTACK = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axi_req_t        up_req,
  output axi_rsp_t        up_rsp,
  output axi_req_t        dn_req,
  input  axi_rsp_t        dn_rsp,
  // update port
  input  logic            upd_en,
  input  logic            upd_we,
  input  logic [PA_W-1:0] upd_addr,
  input  logic [31:0]     upd_wdata,
  output logic [31:0]     upd_rdata,
  input  logic            recfg_we,
  input  logic            recfg_wdata,
  // status
  output logic            recfg_en,
  output logic            frozen,
  output logic            ready_event,
  output logic            flag_cf,
  output logic            flag_nf
);

  logic            chk_start, sb_ready, res_valid, check_out, not_found, in_update;
  chk_req_t        chk_req;
  policy_t         res_sp, fwd_sp;
  logic            bram_en;
  logic [PA_W-1:0] bram_addr;
  logic [31:0]     bram_rdata;

  firewall_interface #(.FREEZE_ON_ATTACK(FREEZE_ON_ATTACK)) u_fi (
    .clk, .rst_n,
    .up_req, .up_rsp, .dn_req, .dn_rsp,
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

  assign flag_nf = res_valid && not_found;
  assign flag_cf = res_valid && !check_out && !not_found;

  policy_t unused_sp;
  assign unused_sp = fwd_sp;

endmodule
