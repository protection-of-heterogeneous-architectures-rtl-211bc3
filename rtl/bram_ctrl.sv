// bram_ctrl: security-bus controller of one firewall's policy Block RAM.
//
// The update processor reaches each firewall through one of these AXI-Lite
// slaves (paper, Fig. 10, "BRAM controller"). Address map, byte offsets:
//   0x000 + 4*p  policy word p: a write goes to port B of the policy BRAM in
//                a single cycle (paper: updating N policies takes N cycles),
//                a read returns the stored word
//   0x100        recfgEn: writing bit 0 sets or clears the recfgEn register
//                of the firewall's Security Builder; reads return its value
//   0x200 + 4*k  key word k of a cryptographic firewall (write only): word
//                k[2] = 0 selects the AES key, 1 the hash key H, k[1:0] the
//                32-bit slice (0 = most significant), k[KA+2:3] the key pair
// The recfgEn register itself lives in the Security Builder (Fig. 13); this
// controller only decodes the write. A read returns the BRAM word one cycle
// after the read is presented, through the AXI-Lite front end.
module bram_ctrl
  import fw_pkg::*;
#(
  parameter int unsigned PA_W = 4,
  parameter int unsigned KA_W = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  axil_req_t       s_req,
  output axil_rsp_t       s_rsp,
  // policy BRAM port B
  output logic            upd_en,
  output logic            upd_we,
  output logic [PA_W-1:0] upd_addr,
  output logic [31:0]     upd_wdata,
  input  logic [31:0]     upd_rdata,
  // recfgEn
  output logic            recfg_we,
  output logic            recfg_wdata,
  input  logic            recfg_en,
  // key file
  output logic            key_we,
  output logic [KA_W-1:0] key_addr,
  output logic [31:0]     key_wdata
);

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [1:0]  rd_sel_q;

  axil_reg_port u_port (
    .clk, .rst_n, .s_req, .s_rsp,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  logic wr_pol, wr_rcf, wr_key, rd_pol;
  assign wr_pol = wr_en && wr_addr[9:8] == 2'b00;
  assign wr_rcf = wr_en && wr_addr[9:8] == 2'b01;
  assign wr_key = wr_en && wr_addr[9:8] == 2'b10;
  assign rd_pol = rd_en && rd_addr[9:8] == 2'b00;

  assign upd_en      = wr_pol || rd_pol;
  assign upd_we      = wr_pol;
  assign upd_addr    = wr_pol ? wr_addr[2 +: PA_W] : rd_addr[2 +: PA_W];
  assign upd_wdata   = wr_data;
  assign recfg_we    = wr_rcf;
  assign recfg_wdata = wr_data[0];
  assign key_we      = wr_key;
  assign key_addr    = wr_addr[2 +: KA_W];
  assign key_wdata   = wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_sel_q <= '0;
    else if (rd_en) rd_sel_q <= rd_addr[9:8];
  end

  assign rd_data = (rd_sel_q == 2'b00) ? upd_rdata :
                   (rd_sel_q == 2'b01) ? {31'd0, recfg_en} : 32'd0;

endmodule
