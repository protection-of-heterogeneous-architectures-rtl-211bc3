// security_builder: Security Builder of a firewall (policy manager).
//
// Holds the Correspondence Table, the Reading Module, the Checking Module and
// the finite state machine of Fig. 7 of the paper, plus the recfgEn register
// of the update protocol (Fig. 13). The policy Block RAM itself sits beside
// it in the firewall; this module drives its read port.
//
// One check, started by a one-cycle chk_start with the request in chk_req:
//   cycle 0  IDLE  Correspondence Table lookup (registered)
//   cycle 1  ADDR  policy address known; not found -> FAIL, else BRAM read
//   cycle 2  PAR   reading buffer filled; preliminary read/write test
//   cycle 3  CHK   parameters transmitted; comparators
//   cycle 4  OK or FAIL, res_valid = 1 with check_out and the flags
// so checking one 32-bit word takes 4 cycles, as in the paper; OK and FAIL
// return to IDLE. The paper's Chk state lasts two cycles; here the first of
// them overlaps with the Par state's buffer cycle, which is how the total
// stays at the paper's 4 cycles.
//
// Update protocol: the update processor writes 1 into recfgEn (recfg_we /
// recfg_wdata, from the BRAM controller); the FSM leaves its monitoring
// states for UPDATE as soon as no check is in flight and stays there until a
// 0 is written. in_update tells the Firewall Interface to hold its ready
// signals low. A request that arrives during the update waits and is checked
// against the new policy afterwards.
//
// res_sp carries the policy of the last check so that a cryptographic
// firewall can read its Cmode, Imode and key index.
//
// The concurrent assertion at the end is disabled while rst_n is low; the
// lint tool reports rst_n as used both as an asynchronous reset and as a
// synchronous signal because of it. That use is in the assertion only, not
// in the circuit.
module security_builder
  import fw_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 10,
  parameter int unsigned PA_W      = 4,
  parameter logic [31:0]     RANGE_LOW  [N_ENTRIES] = '{default: '0},
  parameter logic [31:0]     RANGE_HIGH [N_ENTRIES] = '{default: '0},
  parameter logic [PA_W-1:0] RANGE_OUT  [N_ENTRIES] = '{default: '0}
) (
  input  logic            clk,
  input  logic            rst_n,
  // from the Firewall Interface
  input  logic            chk_start,
  input  chk_req_t        chk_req,
  output logic            ready,       // idle and not updating
  output logic            res_valid,
  output logic            check_out,
  output logic            not_found,
  output policy_t         res_sp,
  // policy BRAM port A
  output logic            bram_en,
  output logic [PA_W-1:0] bram_addr,
  input  logic [31:0]     bram_rdata,
  // update control
  input  logic            recfg_we,
  input  logic            recfg_wdata,
  output logic            recfg_en,
  output logic            in_update
);

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_PAR, S_CHK, S_OK, S_FAIL, S_UPDATE} state_t;
  state_t state, state_n;

  chk_req_t req_q;
  logic [PA_W-1:0] pa;
  logic nf;
  policy_t sp;
  logic sp_valid;
  logic chk_done, chk_ok, chk_next;

  corr_table #(
    .N_ENTRIES (N_ENTRIES), .ADDR_W(32), .PA_W(PA_W),
    .RANGE_LOW (RANGE_LOW), .RANGE_HIGH(RANGE_HIGH), .RANGE_OUT(RANGE_OUT)
  ) u_ct (
    .clk, .rst_n,
    .lookup_en (state == S_IDLE && chk_start && !recfg_en),
    .bus_addr  (chk_req.addr),
    .bram_addr (pa),
    .not_found (nf)
  );

  reading_module #(.AW(PA_W)) u_rd (
    .clk, .rst_n,
    .rd_en     (state == S_ADDR && !nf),
    .pa        (pa),
    .bram_en   (bram_en),
    .bram_addr (bram_addr),
    .bram_rdata(bram_rdata),
    .sp        (sp),
    .sp_valid  (sp_valid)
  );

  checking_module u_chk (
    .clk, .rst_n,
    .start     (state == S_PAR),
    .rnw       (req_q.rnw),
    .arsize    (req_q.size),
    .awsize    (req_q.size),
    .axlen     (req_q.len),
    .sp        (sp),
    .check_out (chk_ok),
    .check_next(chk_next),
    .done      (chk_done)
  );

  // recfgEn register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        recfg_en <= 1'b0;
    else if (recfg_we) recfg_en <= recfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) req_q <= '0;
    else if (state == S_IDLE && chk_start && !recfg_en) req_q <= chk_req;
  end

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:   if (recfg_en)       state_n = S_UPDATE;
                else if (chk_start) state_n = S_ADDR;
      S_ADDR:   state_n = nf ? S_FAIL : S_PAR;
      S_PAR:    state_n = S_CHK;
      S_CHK:    state_n = chk_next ? S_OK : S_FAIL;
      S_OK:     state_n = S_IDLE;
      S_FAIL:   state_n = S_IDLE;
      S_UPDATE: if (!recfg_en)      state_n = S_IDLE;
      default:  state_n = S_IDLE;
    endcase
  end

  logic nf_fail_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      nf_fail_q <= 1'b0;
    end else begin
      state <= state_n;
      if (state == S_ADDR) nf_fail_q <= nf;
      else if (state == S_IDLE) nf_fail_q <= 1'b0;
    end
  end

  assign ready     = (state == S_IDLE) && !recfg_en;
  assign res_valid = (state == S_OK) || (state == S_FAIL);
  assign check_out = (state == S_OK);
  assign not_found = (state == S_FAIL) && nf_fail_q;
  assign res_sp    = sp;
  assign in_update = recfg_en || (state == S_UPDATE);

  // a result always follows the comparators by exactly one cycle
  a_chk_timing: assert property (@(posedge clk) disable iff (!rst_n)
                                 (state == S_OK) |-> (chk_done && chk_ok));

  logic unused;
  assign unused = sp_valid;

endmodule
