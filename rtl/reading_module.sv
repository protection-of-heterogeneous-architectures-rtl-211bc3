// reading_module: Reading Module (ReadMod) of a firewall's Security Builder.
//
// Reads the policy word selected by the Correspondence Table out of the
// policy Block RAM and hands its fields to the Checking Module (and, in the
// cryptographic firewall, the Cmode/Imode bits and key index to the crypto
// module). As in the paper, filling the reading buffer from the 32-bit BRAM
// word takes one cycle and passing the extracted parameters on takes one more:
//   cycle 0  rd_en = 1: port A read of policy address pa (the BRAM output
//            register is the reading buffer)
//   cycle 1  the buffer holds the word; it is decoded into policy_t and
//            registered into sp, valid from cycle 2 (sp_valid)
// The FSM of the Security Builder overlaps cycle 1 with the first Chk cycle.
// The field positions of the policy word are this design's own (see fw_pkg).
module reading_module
  import fw_pkg::*;
#(
  parameter int unsigned AW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_en,      // Par state: read policy pa
  input  logic [AW-1:0] pa,
  // policy BRAM port A
  output logic          bram_en,
  output logic [AW-1:0] bram_addr,
  input  logic [31:0]   bram_rdata,
  // extracted security parameters
  output policy_t       sp,
  output logic          sp_valid
);

  logic buf_full;

  assign bram_en   = rd_en;
  assign bram_addr = pa;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_full <= 1'b0;
      sp_valid <= 1'b0;
      sp       <= '0;
    end else begin
      buf_full <= rd_en;
      sp_valid <= buf_full;
      if (buf_full) sp <= policy_t'(bram_rdata);
    end
  end

endmodule
