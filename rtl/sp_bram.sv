// sp_bram: dual-port Block RAM holding a firewall's security policies.
//
// One 32-bit word per policy. Port A belongs to the firewall: the Reading
// Module reads it (synchronous read, data in the cycle after a_en). Port B
// belongs to the update path: the BRAM controller on the security bus writes
// a new policy word in one clock cycle (paper, Sec. 4.2: updating N policies
// takes N cycles) and can read it back. The two ports share no logic, as in a
// Xilinx true dual-port Block RAM; the paper avoids simultaneous accesses to
// one word by freezing the firewall during an update, not inside the memory.
//
// The initial contents, which the paper ships in the bitstream, come from the
// INIT parameter. Word 0 is never used as a policy (address 0 means "not
// found" in the Correspondence Table). DEPTH is this design's choice (the
// paper gives none); 16 words cover the largest table of 10 policies.
module sp_bram #(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned AW     = $clog2(DEPTH),
  parameter logic [DATA_W-1:0] INIT [DEPTH] = '{default: '0}
) (
  input  logic              clk,
  // port A: firewall read port
  input  logic              a_en,
  input  logic [AW-1:0]     a_addr,
  output logic [DATA_W-1:0] a_rdata,
  // port B: update port
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [DATA_W-1:0] b_wdata,
  output logic [DATA_W-1:0] b_rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = INIT[i];
  end

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end

endmodule
