// monitoring_ip: attack-monitoring IP of the update services.
//
// Collects the flags that the firewalls report over the custom bus (paper,
// Fig. 12). Each firewall i has a 32-bit register reg_i of which only the top
// bits are significant: cF (bit 31), nF (bit 30) and, for a cryptographic
// firewall, iF (bit 29); a 0 bit records an attack. A report ANDs its flag
// word into reg_i, so a recorded attack stays until the update processor
// rewrites reg_i over the security bus. The main register reg_m concatenates
// the significant bits of all reg_i from bit 31 downwards (2 bits for a local
// firewall, 3 for a cryptographic one, as FW_CRYPTO says); unused low bits
// read 1. With a 32-bit reg_m this covers up to 10 firewalls, the paper's
// limit. reg_m goes to the interrupt controller.
//
// Security-bus map (AXI-Lite): reg_i at byte offset 4*i (read/write; a write
// stores the significant bits), reg_m at offset 0x40 (read only).
// Timing: a report on the bus is in reg_i and reg_m at the next clock edge.
module monitoring_ip
  import fw_pkg::*;
#(
  parameter int unsigned N_FW = 5,
  parameter logic [N_FW-1:0] FW_CRYPTO = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  // custom bus
  input  logic        bus_valid,
  input  logic [3:0]  bus_addr,
  input  logic [31:0] bus_data,
  // security bus
  input  axil_req_t   s_req,
  output axil_rsp_t   s_rsp,
  output logic [31:0] reg_m
);

  logic [31:0] regs [N_FW];
  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;

  axil_reg_port u_port (
    .clk, .rst_n, .s_req, .s_rsp,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  function automatic logic [31:0] sig_mask(int i);
    return FW_CRYPTO[i] ? 32'hE000_0000 : 32'hC000_0000;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FW; i++) regs[i] <= sig_mask(i);
    end else begin
      for (int i = 0; i < N_FW; i++) begin
        if (wr_en && wr_addr[7:2] == 6'(i) && !wr_addr[6])
          regs[i] <= wr_data & sig_mask(i);
        else if (bus_valid && bus_addr == 4'(i))
          regs[i] <= regs[i] & bus_data & sig_mask(i);
      end
    end
  end

  always_comb begin
    int pos;
    reg_m = '1;
    pos   = 31;
    for (int i = 0; i < N_FW; i++) begin
      reg_m[pos]     = regs[i][31];
      reg_m[pos - 1] = regs[i][30];
      if (FW_CRYPTO[i]) begin
        reg_m[pos - 2] = regs[i][29];
        pos = pos - 3;
      end else begin
        pos = pos - 2;
      end
    end
  end

  always_comb begin
    rd_data = reg_m;
    for (int i = 0; i < N_FW; i++)
      if (!rd_addr[6] && rd_addr[5:2] == 4'(i)) rd_data = regs[i];
  end

  initial assert (N_FW <= 10) else $error("monitoring_ip: reg_m holds at most 10 firewalls");

endmodule
