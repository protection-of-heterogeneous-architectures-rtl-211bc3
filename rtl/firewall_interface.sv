// firewall_interface: Firewall Interface of a hardware firewall.
//
// The mandatory checkpoint between an IP (or a processor) and the AXI bus.
// Every transaction that crosses it is first checked by the Security Builder;
// only a transaction that matches its policy is passed on. It contains:
//   Decision Module   captures the request (AR, or AW together with its W
//                     beat), starts the check and, from check_out, either
//                     forwards the request or answers it itself with an
//                     error response (SLVERR, read data 0): the paper's
//                     "error code mode"; the data never reaches the target.
//   Synchronization   a bank of flip-flops that present the forwarded
//   Module            request and return the ready handshakes only once the
//                     check is done, so data stays aligned with its control
//                     signals (no loss, no duplication).
//   update freeze     while the Security Builder is in its update state, or
//                     after an attack until the next update ends, the ready
//                     signals towards the requester stay low. A request that
//                     arrives meanwhile sets the readyEvent register and is
//                     checked against the new policy once the update is over.
//
// Timing: with the request valid at cycle T the Decision Module captures it
// (T), the Security Builder checks it in 4 cycles (T+1..T+4, result at T+5)
// and the Synchronization Module presents it downstream at T+6: the 2-cycle
// Firewall Interface plus the 4-cycle check give the paper's 6-cycle latency
// of one Local Firewall. The upstream AxREADY / WREADY pulse one cycle after
// the downstream handshake; the response channel (R or B) is then passed
// straight through. One transaction is in flight at a time, and bursts are
// not supported (AxLEN must match the policy's parameter field, 0 by default).
//
// The paper's Synchronization Module clocks its flip-flops with check_out;
// this design keeps a single clock and uses check_out as the enable.
//
// The concurrent assertion at the end is disabled while rst_n is low; the
// lint tool reports rst_n as used both as an asynchronous reset and as a
// synchronous signal because of it. That use is in the assertion only, not
// in the circuit.
module firewall_interface
  import fw_pkg::*;
#(
  parameter bit FREEZE_ON_ATTACK = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  // requester side (processor or bus)
  input  axi_req_t  up_req,
  output axi_rsp_t  up_rsp,
  // target side (bus or IP)
  output axi_req_t  dn_req,
  input  axi_rsp_t  dn_rsp,
  // Security Builder
  output logic      chk_start,
  output chk_req_t  chk_req,
  input  logic      sb_ready,
  input  logic      res_valid,
  input  logic      check_out,
  input  policy_t   res_sp,
  input  logic      in_update,
  // policy of the forwarded transaction (for a crypto module)
  output policy_t   fwd_sp,
  // status
  output logic      frozen,
  output logic      ready_event
);

  typedef enum logic [2:0] {F_IDLE, F_START, F_CHECK, F_FWD, F_ACK, F_RSP, F_ERR_ACK, F_ERR_RSP} fstate_t;
  fstate_t st;

  // captured request (Decision Module buffer)
  logic              rnw_q;
  logic [ADDR_W-1:0] addr_q;
  logic [ID_W-1:0]   id_q;
  logic [2:0]        size_q;
  logic [7:0]        len_q;
  logic [DATA_W-1:0] wdata_q;
  logic [3:0]        wstrb_q;
  logic              aw_done, w_done, ar_done;
  logic              upd_q;

  logic rd_req, wr_req, blocked;
  assign rd_req  = up_req.ar_valid;
  assign wr_req  = up_req.aw_valid && up_req.w_valid;
  assign blocked = in_update || frozen;

  assign chk_start    = (st == F_START);
  assign chk_req.addr = addr_q;
  assign chk_req.rnw  = rnw_q;
  assign chk_req.size = size_q;
  assign chk_req.len  = len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= F_IDLE;
      rnw_q       <= 1'b0;
      addr_q      <= '0;
      id_q        <= '0;
      size_q      <= '0;
      len_q       <= '0;
      wdata_q     <= '0;
      wstrb_q     <= '0;
      aw_done     <= 1'b0;
      w_done      <= 1'b0;
      ar_done     <= 1'b0;
      fwd_sp      <= '0;
      frozen      <= 1'b0;
      ready_event <= 1'b0;
      upd_q       <= 1'b0;
    end else begin
      upd_q <= in_update;
      // end of an update releases a freeze
      if (upd_q && !in_update) frozen <= 1'b0;
      unique case (st)
        F_IDLE: begin
          if (blocked) begin
            if (rd_req || wr_req) ready_event <= 1'b1;
          end else if (sb_ready && (rd_req || wr_req)) begin
            ready_event <= 1'b0;
            rnw_q   <= rd_req;
            addr_q  <= rd_req ? up_req.ar_addr : up_req.aw_addr;
            id_q    <= rd_req ? up_req.ar_id   : up_req.aw_id;
            size_q  <= rd_req ? up_req.ar_size : up_req.aw_size;
            len_q   <= rd_req ? up_req.ar_len  : up_req.aw_len;
            wdata_q <= up_req.w_data;
            wstrb_q <= up_req.w_strb;
            st      <= F_START;
          end
        end
        F_START: st <= F_CHECK;
        F_CHECK: if (res_valid) begin
          if (check_out) begin
            fwd_sp  <= res_sp;
            aw_done <= 1'b0;
            w_done  <= 1'b0;
            ar_done <= 1'b0;
            st      <= F_FWD;
          end else begin
            st <= F_ERR_ACK;
          end
        end
        F_FWD: begin
          if (rnw_q) begin
            if (dn_rsp.ar_ready) st <= F_ACK;
          end else begin
            if (dn_rsp.aw_ready) aw_done <= 1'b1;
            if (dn_rsp.w_ready)  w_done  <= 1'b1;
            if ((aw_done || dn_rsp.aw_ready) && (w_done || dn_rsp.w_ready)) st <= F_ACK;
          end
        end
        F_ACK: st <= F_RSP;
        F_RSP: begin
          if (rnw_q && dn_rsp.r_valid && up_req.r_ready)  st <= F_IDLE;
          if (!rnw_q && dn_rsp.b_valid && up_req.b_ready) st <= F_IDLE;
        end
        F_ERR_ACK: begin
          st <= F_ERR_RSP;
          if (FREEZE_ON_ATTACK) frozen <= 1'b1;
        end
        F_ERR_RSP: begin
          if (rnw_q && up_req.r_ready)  st <= F_IDLE;
          if (!rnw_q && up_req.b_ready) st <= F_IDLE;
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  // downstream request (Synchronization Module outputs)
  always_comb begin
    dn_req          = '0;
    dn_req.aw_addr  = addr_q;
    dn_req.aw_id    = id_q;
    dn_req.aw_size  = size_q;
    dn_req.aw_len   = len_q;
    dn_req.w_data   = wdata_q;
    dn_req.w_strb   = wstrb_q;
    dn_req.w_last   = 1'b1;
    dn_req.ar_addr  = addr_q;
    dn_req.ar_id    = id_q;
    dn_req.ar_size  = size_q;
    dn_req.ar_len   = len_q;
    dn_req.ar_valid = (st == F_FWD) && rnw_q;
    dn_req.aw_valid = (st == F_FWD) && !rnw_q && !aw_done;
    dn_req.w_valid  = (st == F_FWD) && !rnw_q && !w_done;
    dn_req.r_ready  = (st == F_RSP) && rnw_q && up_req.r_ready;
    dn_req.b_ready  = (st == F_RSP) && !rnw_q && up_req.b_ready;
  end

  // upstream response
  always_comb begin
    up_rsp          = '0;
    up_rsp.ar_ready = (st == F_ACK || st == F_ERR_ACK) && rnw_q;
    up_rsp.aw_ready = (st == F_ACK || st == F_ERR_ACK) && !rnw_q;
    up_rsp.w_ready  = (st == F_ACK || st == F_ERR_ACK) && !rnw_q;
    if (st == F_RSP) begin
      up_rsp.r_valid = rnw_q && dn_rsp.r_valid;
      up_rsp.r_data  = dn_rsp.r_data;
      up_rsp.r_resp  = dn_rsp.r_resp;
      up_rsp.r_id    = dn_rsp.r_id;
      up_rsp.r_last  = dn_rsp.r_last;
      up_rsp.b_valid = !rnw_q && dn_rsp.b_valid;
      up_rsp.b_resp  = dn_rsp.b_resp;
      up_rsp.b_id    = dn_rsp.b_id;
    end else if (st == F_ERR_RSP) begin
      up_rsp.r_valid = rnw_q;
      up_rsp.r_resp  = RESP_SLVERR;
      up_rsp.r_id    = id_q;
      up_rsp.r_last  = 1'b1;
      up_rsp.b_valid = !rnw_q;
      up_rsp.b_resp  = RESP_SLVERR;
      up_rsp.b_id    = id_q;
    end
  end

  // AXI rule: a forwarded request stays valid until it is accepted
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                dn_req.ar_valid && !dn_rsp.ar_ready |=> dn_req.ar_valid);

endmodule
