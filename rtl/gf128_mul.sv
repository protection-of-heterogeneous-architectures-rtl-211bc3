// gf128_mul: multiplication by the hash key H in GF(2^128) (mult_H of GCM).
//
// Computes p = x * h in the field GF(2^128) defined by
// x^128 + x^7 + x^2 + x + 1, with GCM's bit order (bit 127 of the vector is
// the coefficient of x^0), which is the universal hash of the AES-GCM MAC.
// The paper names the block and gives its latency: one clock cycle. The
// product is computed combinationally (the textbook shift-and-add
// algorithm of the GCM specification, unrolled 128 times) and registered:
// en in cycle 0 gives p and valid in cycle 1.
module gf128_mul (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [127:0] x,
  input  logic [127:0] h,
  output logic [127:0] p,
  output logic         valid
);

  function automatic logic [127:0] gmul128(logic [127:0] a, logic [127:0] b);
    logic [127:0] z, v;
    z = '0;
    v = b;
    for (int i = 0; i < 128; i++) begin
      if (a[127-i]) z = z ^ v;
      v = v[0] ? ((v >> 1) ^ {8'he1, 120'd0}) : (v >> 1);
    end
    return z;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p     <= '0;
      valid <= 1'b0;
    end else begin
      valid <= en;
      if (en) p <= gmul128(x, h);
    end
  end

endmodule
