// custom_bus: monitoring bus from the firewalls to the monitoring IP.
//
// Every firewall reports attack flags on a shared (address, data) bus
// (paper, Fig. 10 and Fig. 12): the address is the firewall's index, the
// data is its flag word in the register layout of Fig. 12, with a flag bit
// at 0 for a failed check: bit 31 cF (Checking Module), bit 30 nF (address not
// in the Correspondence Table), bit 29 iF (authentication, cryptographic
// firewall only), other bits 1.
//
// Each firewall's one-cycle flag pulses are caught in a pending register in
// the cycle they occur (flags of several cycles accumulate). The bus carries
// one report per cycle; when several firewalls are pending the lowest index
// goes first and the others wait. So a single report reaches the monitoring
// IP one cycle after the attack, the paper's one-cycle flag extraction.
// The arbitration is this design's choice; the paper only draws the bus.
module custom_bus
  import fw_pkg::*;
#(
  parameter int unsigned N_FW = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flags_t      flags [N_FW],   // one-cycle pulses from the firewalls
  output logic        bus_valid,
  output logic [3:0]  bus_addr,
  output logic [31:0] bus_data
);

  flags_t pend [N_FW];
  flags_t     cur;
  logic [3:0] sel;

  always_comb begin
    bus_valid = 1'b0;
    sel       = '0;
    cur       = '0;
    for (int i = N_FW - 1; i >= 0; i--)
      if (pend[i] != '0) begin
        bus_valid = 1'b1;
        sel       = 4'(i);
        cur       = pend[i];
      end
  end

  assign bus_addr = sel;
  assign bus_data = {~cur.cf, ~cur.nf, ~cur.af, 29'h1FFF_FFFF};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FW; i++) pend[i] <= '0;
    end else begin
      for (int i = 0; i < N_FW; i++) begin
        if (bus_valid && sel == 4'(i)) pend[i] <= flags[i];
        else                           pend[i] <= pend[i] | flags[i];
      end
    end
  end

  initial assert (N_FW <= 16) else $error("custom_bus: at most 16 firewalls");

endmodule
