// security_bus: AXI-Lite security bus of the update services.
//
// Connects the update processor (the only master) to the security-bus slaves:
// the monitoring IP, the timer log and one BRAM controller per firewall
// (paper, Fig. 10). Slave s owns the window [SLV_BASE[s], SLV_BASE[s] +
// SLV_SIZE[s][; the master's access is routed there and its response routed
// back. One access at a time; an address no slave decodes is answered with
// DECERR by the bus. The address seen by a slave is the full address; slaves
// decode only their low bits. The paper uses a vendor AXI-Lite bus; this is
// the simplest decoder that serves the design.
module security_bus
  import fw_pkg::*;
#(
  parameter int unsigned N_SLAVES = 7,
  parameter logic [31:0] SLV_BASE [N_SLAVES] = '{default: '0},
  parameter logic [31:0] SLV_SIZE [N_SLAVES] = '{default: '0}
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t m_req,
  output axil_rsp_t m_rsp,
  output axil_req_t s_req [N_SLAVES],
  input  axil_rsp_t s_rsp [N_SLAVES]
);

  localparam int unsigned SW = $clog2(N_SLAVES + 1);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_ERR} sstate_t;
  sstate_t st;
  logic [SW-1:0] sel;
  logic          rnw, a_done, aw_done, w_done;

  function automatic logic [SW-1:0] decode(logic [31:0] a);
    logic [SW-1:0] r;
    r = SW'(N_SLAVES);
    for (int s = 0; s < N_SLAVES; s++)
      if (a >= SLV_BASE[s] && (a - SLV_BASE[s]) < SLV_SIZE[s]) r = SW'(s);
    return r;
  endfunction

  logic          start;
  logic [SW-1:0] dec;
  assign start = (st == S_IDLE) && (m_req.ar_valid || (m_req.aw_valid && m_req.w_valid));
  assign dec   = decode(m_req.ar_valid ? m_req.ar_addr : m_req.aw_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; sel <= '0; rnw <= 1'b0; a_done <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          sel <= dec;
          rnw <= m_req.ar_valid;
          a_done <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
          st  <= (dec == SW'(N_SLAVES)) ? S_ERR : S_BUSY;
        end
        S_BUSY: begin
          if (rnw) begin
            if (m_req.ar_valid && s_rsp[sel].ar_ready) a_done <= 1'b1;
            if (s_rsp[sel].r_valid && m_req.r_ready) st <= S_IDLE;
          end else begin
            if (m_req.aw_valid && s_rsp[sel].aw_ready) aw_done <= 1'b1;
            if (m_req.w_valid && s_rsp[sel].w_ready)   w_done  <= 1'b1;
            if (s_rsp[sel].b_valid && m_req.b_ready)   st <= S_IDLE;
          end
        end
        S_ERR: begin
          if (!a_done) a_done <= 1'b1;
          else if (rnw ? m_req.r_ready : m_req.b_ready) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int s = 0; s < N_SLAVES; s++) begin
      s_req[s] = '0;
      if (st == S_BUSY && sel == SW'(s)) begin
        s_req[s] = m_req;
        s_req[s].ar_valid = rnw && m_req.ar_valid && !a_done;
        s_req[s].aw_valid = !rnw && m_req.aw_valid && !aw_done;
        s_req[s].w_valid  = !rnw && m_req.w_valid && !w_done;
        s_req[s].r_ready  = rnw && m_req.r_ready;
        s_req[s].b_ready  = !rnw && m_req.b_ready;
      end
    end
    m_rsp = '0;
    if (st == S_BUSY) begin
      m_rsp = s_rsp[sel];
      m_rsp.ar_ready = rnw && !a_done && s_rsp[sel].ar_ready;
      m_rsp.aw_ready = !rnw && !aw_done && s_rsp[sel].aw_ready;
      m_rsp.w_ready  = !rnw && !w_done && s_rsp[sel].w_ready;
      m_rsp.r_valid  = rnw && s_rsp[sel].r_valid;
      m_rsp.b_valid  = !rnw && s_rsp[sel].b_valid;
    end else if (st == S_ERR) begin
      m_rsp.ar_ready = rnw && !a_done;
      m_rsp.aw_ready = !rnw && !a_done;
      m_rsp.w_ready  = !rnw && !a_done;
      m_rsp.r_valid  = rnw && a_done;
      m_rsp.r_resp   = RESP_DECERR;
      m_rsp.b_valid  = !rnw && a_done;
      m_rsp.b_resp   = RESP_DECERR;
    end
  end

endmodule
