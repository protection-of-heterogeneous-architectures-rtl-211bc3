// threshold_ip: image-processing IP of the case study (thresholding).
//
// A single-beat AXI slave with N_REGS programmable 32-bit pixel registers.
// Each register holds four 8-bit grey-level pixels. Writing register i stores
// the pixels; reading register i returns the thresholded pixels: 8'hFF where
// the pixel is at or above THRESHOLD, 8'h00 below it. The threshold logic is
// applied when a register is written (one cycle), so reads return at once.
//
// Register i sits at byte offset 4*i inside the IP's address window (address
// bits [2 +: log2(N_REGS)]). The paper says both that the IP "contains
// several programmable registers and performs a threshold function on a
// picture" and that "the threshold value is hardcoded in the IP"; this design
// follows both: the pixel registers are programmable, the threshold is the
// THRESHOLD parameter. Register count, pixel packing and the 0/255 output
// levels are this design's choices. Timing matches shared_bram: accept in
// the cycle presented, respond from the next cycle.
module threshold_ip
  import fw_pkg::*;
#(
  parameter int unsigned N_REGS    = 16,
  parameter logic [7:0]  THRESHOLD = 8'd128
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_req,
  output axi_rsp_t s_rsp
);

  localparam int unsigned AW = $clog2(N_REGS);

  logic [31:0] result [N_REGS];
  logic        r_pend, b_pend;
  logic [31:0] rdata;
  logic [ID_W-1:0] id_q;

  logic acc_rd, acc_wr;
  assign acc_rd = !r_pend && !b_pend && s_req.ar_valid;
  assign acc_wr = !r_pend && !b_pend && !s_req.ar_valid && s_req.aw_valid && s_req.w_valid;

  function automatic logic [31:0] threshold4(logic [31:0] px);
    logic [31:0] o;
    for (int b = 0; b < 4; b++) o[8*b +: 8] = (px[8*b +: 8] >= THRESHOLD) ? 8'hFF : 8'h00;
    return o;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REGS; i++) result[i] <= '0;
      r_pend <= 1'b0;
      b_pend <= 1'b0;
      id_q   <= '0;
      rdata  <= '0;
    end else begin
      if (acc_wr) begin
        result[s_req.aw_addr[2 +: AW]] <= threshold4(s_req.w_data);
        b_pend <= 1'b1;
        id_q   <= s_req.aw_id;
      end else if (b_pend && s_req.b_ready) b_pend <= 1'b0;
      if (acc_rd) begin
        rdata  <= result[s_req.ar_addr[2 +: AW]];
        r_pend <= 1'b1;
        id_q   <= s_req.ar_id;
      end else if (r_pend && s_req.r_ready) r_pend <= 1'b0;
    end
  end

  always_comb begin
    s_rsp          = '0;
    s_rsp.ar_ready = acc_rd;
    s_rsp.aw_ready = acc_wr;
    s_rsp.w_ready  = acc_wr;
    s_rsp.r_valid  = r_pend;
    s_rsp.r_data   = rdata;
    s_rsp.r_resp   = RESP_OKAY;
    s_rsp.r_id     = id_q;
    s_rsp.r_last   = 1'b1;
    s_rsp.b_valid  = b_pend;
    s_rsp.b_resp   = RESP_OKAY;
    s_rsp.b_id     = id_q;
  end

endmodule
