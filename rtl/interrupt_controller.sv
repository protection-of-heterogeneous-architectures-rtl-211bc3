// interrupt_controller: raises the update processor's interrupt on an attack.
//
// The interrupt detector watches the monitoring IP's main register reg_m and
// notices when any of its bits is 0 (a firewall recorded an attack); the
// interrupt generator then drives irq to the update processor. Both are one
// register stage, so irq rises 2 cycles after reg_m shows the attack: the
// paper's "an interrupt request is sent in 2 cycles". irq stays high while
// reg_m holds a 0 bit, i.e. until the update processor has cleared the flag
// register concerned (a level interrupt, this design's choice).
module interrupt_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] reg_m,
  output logic        irq
);

  logic detect;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      detect <= 1'b0;
      irq    <= 1'b0;
    end else begin
      detect <= (reg_m != '1);
      irq    <= detect;
    end
  end

endmodule
