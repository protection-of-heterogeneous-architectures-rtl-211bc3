// axi_interconnect: the system AXI-4 bus of the MPSoC.
//
// A shared bus (the paper assumes one bus is enough for its small and
// medium MPSoCs): N_MASTERS masters, N_SLAVES slaves, one transaction at a
// time. An idle bus grants the next master with a pending AR, or AW+W,
// request in round-robin order, decodes the address against the slaves'
// [SLV_BASE, SLV_BASE+SLV_SIZE[ windows and then connects that master to that
// slave until the response (R or B) has been handshaken. An address that no
// slave decodes is answered by the bus itself with DECERR.
//
// Only single-beat transactions are carried, which is all the firewalls
// forward. Grant takes one cycle; afterwards the channels are combinational
// between master and slave. The paper does not design the bus (it uses the
// vendor AXI interconnect); this is the simplest bus that serves the design.
module axi_interconnect
  import fw_pkg::*;
#(
  parameter int unsigned N_MASTERS = 2,
  parameter int unsigned N_SLAVES  = 3,
  parameter logic [31:0] SLV_BASE [N_SLAVES] = '{default: '0},
  parameter logic [31:0] SLV_SIZE [N_SLAVES] = '{default: '0}
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t m_req [N_MASTERS],
  output axi_rsp_t m_rsp [N_MASTERS],
  output axi_req_t s_req [N_SLAVES],
  input  axi_rsp_t s_rsp [N_SLAVES]
);

  localparam int unsigned MW = (N_MASTERS > 1) ? $clog2(N_MASTERS) : 1;
  localparam int unsigned SW = $clog2(N_SLAVES + 1);

  typedef enum logic [1:0] {B_IDLE, B_BUSY, B_DECERR} bstate_t;
  bstate_t st;
  logic [MW-1:0] gnt, last_gnt;
  logic [SW-1:0] sel;       // N_SLAVES = no slave
  logic          rnw;
  logic          aw_done, w_done, a_done;

  function automatic logic [SW-1:0] decode(logic [31:0] a);
    logic [SW-1:0] r;
    r = SW'(N_SLAVES);
    for (int s = 0; s < N_SLAVES; s++)
      if (a >= SLV_BASE[s] && (a - SLV_BASE[s]) < SLV_SIZE[s]) r = SW'(s);
    return r;
  endfunction

  // round-robin choice among pending masters
  logic          any_req;
  logic [MW-1:0] pick;
  always_comb begin
    any_req = 1'b0;
    pick    = '0;
    for (int k = 1; k <= N_MASTERS; k++) begin
      int unsigned m;
      m = (int'(last_gnt) + k) % N_MASTERS;
      if (!any_req && (m_req[m].ar_valid || (m_req[m].aw_valid && m_req[m].w_valid))) begin
        any_req = 1'b1;
        pick    = MW'(m);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= B_IDLE;
      gnt      <= '0;
      last_gnt <= MW'(N_MASTERS - 1);
      sel      <= '0;
      rnw      <= 1'b0;
      aw_done  <= 1'b0;
      w_done   <= 1'b0;
      a_done   <= 1'b0;
    end else begin
      unique case (st)
        B_IDLE: if (any_req) begin
          gnt      <= pick;
          last_gnt <= pick;
          rnw      <= m_req[pick].ar_valid;
          sel      <= decode(m_req[pick].ar_valid ? m_req[pick].ar_addr : m_req[pick].aw_addr);
          aw_done  <= 1'b0;
          w_done   <= 1'b0;
          a_done   <= 1'b0;
          st       <= (decode(m_req[pick].ar_valid ? m_req[pick].ar_addr : m_req[pick].aw_addr)
                       == SW'(N_SLAVES)) ? B_DECERR : B_BUSY;
        end
        B_BUSY: begin
          if (rnw) begin
            if (m_req[gnt].ar_valid && s_rsp[sel].ar_ready) a_done <= 1'b1;
            if (s_rsp[sel].r_valid && m_req[gnt].r_ready) st <= B_IDLE;
          end else begin
            if (m_req[gnt].aw_valid && s_rsp[sel].aw_ready) aw_done <= 1'b1;
            if (m_req[gnt].w_valid && s_rsp[sel].w_ready)   w_done  <= 1'b1;
            if (s_rsp[sel].b_valid && m_req[gnt].b_ready)   st <= B_IDLE;
          end
        end
        B_DECERR: begin
          if (!a_done) a_done <= 1'b1;
          else if (rnw ? m_req[gnt].r_ready : m_req[gnt].b_ready) st <= B_IDLE;
        end
        default: st <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int s = 0; s < N_SLAVES; s++) begin
      s_req[s] = '0;
      if (st == B_BUSY && sel == SW'(s)) begin
        s_req[s] = m_req[gnt];
        s_req[s].ar_valid = rnw && m_req[gnt].ar_valid && !a_done;
        s_req[s].aw_valid = !rnw && m_req[gnt].aw_valid && !aw_done;
        s_req[s].w_valid  = !rnw && m_req[gnt].w_valid && !w_done;
        s_req[s].r_ready  = rnw && m_req[gnt].r_ready;
        s_req[s].b_ready  = !rnw && m_req[gnt].b_ready;
      end
    end
    for (int m = 0; m < N_MASTERS; m++) begin
      m_rsp[m] = '0;
      if (gnt == MW'(m)) begin
        if (st == B_BUSY) begin
          m_rsp[m] = s_rsp[sel];
          m_rsp[m].ar_ready = rnw && !a_done && s_rsp[sel].ar_ready;
          m_rsp[m].aw_ready = !rnw && !aw_done && s_rsp[sel].aw_ready;
          m_rsp[m].w_ready  = !rnw && !w_done && s_rsp[sel].w_ready;
          m_rsp[m].r_valid  = rnw && s_rsp[sel].r_valid;
          m_rsp[m].b_valid  = !rnw && s_rsp[sel].b_valid;
        end else if (st == B_DECERR) begin
          m_rsp[m].ar_ready = rnw && !a_done;
          m_rsp[m].aw_ready = !rnw && !a_done;
          m_rsp[m].w_ready  = !rnw && !a_done;
          m_rsp[m].r_valid  = rnw && a_done;
          m_rsp[m].r_resp   = RESP_DECERR;
          m_rsp[m].r_last   = 1'b1;
          m_rsp[m].b_valid  = !rnw && a_done;
          m_rsp[m].b_resp   = RESP_DECERR;
        end
      end
    end
  end

endmodule
