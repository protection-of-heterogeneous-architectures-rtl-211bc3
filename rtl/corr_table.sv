// corr_table: Correspondence Table of a firewall's Security Builder.
//
// Translates the bus address of a transaction into the Block RAM address of
// the security policy that governs it. Each of the N_ENTRIES sub-modules holds
// three registers, reg_low, reg_high and reg_out; a sub-module whose half-open
// range [reg_low, reg_high[ contains the address drives reg_out, every other
// sub-module drives zero, and the outputs of all sub-modules are ORed into
// bram_addr (Fig. 5 and Algorithm 1 of the paper). Policy address 0 is
// reserved: when no range matches the result is 0 and not_found
// (notFoundFlag) is raised.
//
// Timing: the lookup is combinational and its result is registered when
// lookup_en is high, so bram_addr / not_found are valid in the cycle after
// lookup_en (the Addr state of the Security Builder FSM, one cycle).
//
// Following the paper, the table is not updated at run time (only the policy
// Block RAM is), so the three "registers" of each sub-module hold constants
// set by the RANGE_LOW, RANGE_HIGH and RANGE_OUT parameters, which stand for
// the configuration bitstream; synthesis folds them into the comparators.
// Ranges are assumed not to overlap; if they do, the outputs are ORed exactly
// as in the paper's figure.
module corr_table #(
  parameter int unsigned N_ENTRIES = 10,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned PA_W      = 4,
  parameter logic [ADDR_W-1:0] RANGE_LOW  [N_ENTRIES] = '{default: '0},
  parameter logic [ADDR_W-1:0] RANGE_HIGH [N_ENTRIES] = '{default: '0},
  parameter logic [PA_W-1:0]   RANGE_OUT  [N_ENTRIES] = '{default: '0}
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lookup_en,
  input  logic [ADDR_W-1:0] bus_addr,
  output logic [PA_W-1:0]   bram_addr,
  output logic              not_found
);

  logic [ADDR_W-1:0] reg_low  [N_ENTRIES];
  logic [ADDR_W-1:0] reg_high [N_ENTRIES];
  logic [PA_W-1:0]   reg_out  [N_ENTRIES];

  // contents fixed by the bitstream (see above)
  assign reg_low  = RANGE_LOW;
  assign reg_high = RANGE_HIGH;
  assign reg_out  = RANGE_OUT;

  logic [PA_W-1:0] or_tree;
  always_comb begin
    or_tree = '0;
    for (int i = 0; i < N_ENTRIES; i++) begin
      if (bus_addr >= reg_low[i] && bus_addr < reg_high[i])
        or_tree = or_tree | reg_out[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bram_addr <= '0;
      not_found <= 1'b0;
    end else if (lookup_en) begin
      bram_addr <= or_tree;
      not_found <= (or_tree == '0);
    end
  end

endmodule
