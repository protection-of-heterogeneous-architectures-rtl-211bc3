// shared_bram: shared on-chip Block RAM memory of the case-study MPSoC.
//
// A single-beat AXI slave over a WORDS x 32-bit memory that both processors
// use for temporary pictures, code and user profiles (the paper's case
// study). The word is selected by address bits [2 +: log2(WORDS)]; bits above
// the window are ignored (the bus has already decoded them). Byte strobes are
// honoured on writes.
//
// Timing: a request is accepted in the cycle it is presented when the slave
// is idle (AxREADY combinational), the memory is accessed at the end of that
// cycle and the R or B response is valid from the next cycle until it is
// accepted. The paper does not give the memory size; WORDS is this design's
// choice (16 KiB, four 36-kbit Block RAMs).
module shared_bram
  import fw_pkg::*;
#(
  parameter int unsigned WORDS = 4096
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_req,
  output axi_rsp_t s_rsp
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic        r_pend, b_pend;
  logic [31:0] rdata;
  logic [ID_W-1:0] id_q;

  logic acc_rd, acc_wr;
  assign acc_rd = !r_pend && !b_pend && s_req.ar_valid;
  assign acc_wr = !r_pend && !b_pend && !s_req.ar_valid && s_req.aw_valid && s_req.w_valid;

  always_ff @(posedge clk) begin
    if (acc_wr) begin
      for (int b = 0; b < 4; b++)
        if (s_req.w_strb[b]) mem[s_req.aw_addr[2 +: AW]][8*b +: 8] <= s_req.w_data[8*b +: 8];
    end
    if (acc_rd) rdata <= mem[s_req.ar_addr[2 +: AW]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_pend <= 1'b0;
      b_pend <= 1'b0;
      id_q   <= '0;
    end else begin
      if (acc_rd) begin r_pend <= 1'b1; id_q <= s_req.ar_id; end
      else if (r_pend && s_req.r_ready) r_pend <= 1'b0;
      if (acc_wr) begin b_pend <= 1'b1; id_q <= s_req.aw_id; end
      else if (b_pend && s_req.b_ready) b_pend <= 1'b0;
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
