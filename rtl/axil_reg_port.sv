// axil_reg_port: AXI-Lite slave front end shared by the security-bus slaves.
//
// Turns AXI-Lite accesses into a simple register interface: a write is
// presented as one wr_en cycle with wr_addr / wr_data once both AW and W
// have arrived, then B is returned; a read is presented as one rd_en cycle
// with rd_addr, and the slave's rd_data is sampled in the next cycle and
// returned on R. One access at a time; every access answers OKAY. This is the
// glue the paper's IPIF interface provides in front of its monitoring IP.
module axil_reg_port
  import fw_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   s_req,
  output axil_rsp_t   s_rsp,
  output logic        wr_en,
  output logic [31:0] wr_addr,
  output logic [31:0] wr_data,
  output logic        rd_en,
  output logic [31:0] rd_addr,
  input  logic [31:0] rd_data
);

  typedef enum logic [1:0] {P_IDLE, P_RD, P_RRSP, P_BRSP} pstate_t;
  pstate_t st;
  logic [31:0] rdata_q;

  assign wr_en   = (st == P_IDLE) && s_req.aw_valid && s_req.w_valid && !s_req.ar_valid;
  assign wr_addr = s_req.aw_addr;
  assign wr_data = s_req.w_data;
  assign rd_en   = (st == P_IDLE) && s_req.ar_valid;
  assign rd_addr = s_req.ar_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= P_IDLE;
      rdata_q <= '0;
    end else begin
      unique case (st)
        P_IDLE: if (rd_en) st <= P_RD;
                else if (wr_en) st <= P_BRSP;
        P_RD:   begin rdata_q <= rd_data; st <= P_RRSP; end
        P_RRSP: if (s_req.r_ready) st <= P_IDLE;
        P_BRSP: if (s_req.b_ready) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  always_comb begin
    s_rsp          = '0;
    s_rsp.ar_ready = rd_en;
    s_rsp.aw_ready = wr_en;
    s_rsp.w_ready  = wr_en;
    s_rsp.r_valid  = (st == P_RRSP);
    s_rsp.r_data   = rdata_q;
    s_rsp.b_valid  = (st == P_BRSP);
  end

endmodule
