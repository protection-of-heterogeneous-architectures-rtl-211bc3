// aes128_core: AES-128 block encryption (the E_k blocks of the AES-GCM core).
//
// Encrypts one 128-bit block with a 128-bit key, one round per clock cycle
// with the round keys expanded on the fly. The paper only names this block
// and gives its latency (10 cycles); the round structure is standard AES
// (FIPS-197), written here in its simplest iterative form.
//
// Timing: start is a one-cycle pulse with pt and key valid. The initial
// AddRoundKey and round 1 are computed in the start cycle, rounds 2..10 in
// the next nine, so ct is valid and done pulses 10 cycles after start. start
// is ignored while busy. Bytes are numbered big-endian: byte 0 is bits
// [127:120], and column c holds bytes 4c..4c+3, as in the FIPS-197 vectors.
//
// The S-box is the 256-entry FIPS-197 table written out as a constant.
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] pt,
  input  logic [127:0] key,
  output logic [127:0] ct,
  output logic         done,
  output logic         busy
);

  typedef logic [7:0] byte_t;

  function automatic byte_t xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  typedef byte_t sbox_t [256];

  // FIPS-197 S-box, byte 16*row + column
  localparam sbox_t SBOX = '{
    8'h63, 8'h7c, 8'h77, 8'h7b, 8'hf2, 8'h6b, 8'h6f, 8'hc5, 8'h30, 8'h01, 8'h67, 8'h2b, 8'hfe, 8'hd7, 8'hab, 8'h76,
    8'hca, 8'h82, 8'hc9, 8'h7d, 8'hfa, 8'h59, 8'h47, 8'hf0, 8'had, 8'hd4, 8'ha2, 8'haf, 8'h9c, 8'ha4, 8'h72, 8'hc0,
    8'hb7, 8'hfd, 8'h93, 8'h26, 8'h36, 8'h3f, 8'hf7, 8'hcc, 8'h34, 8'ha5, 8'he5, 8'hf1, 8'h71, 8'hd8, 8'h31, 8'h15,
    8'h04, 8'hc7, 8'h23, 8'hc3, 8'h18, 8'h96, 8'h05, 8'h9a, 8'h07, 8'h12, 8'h80, 8'he2, 8'heb, 8'h27, 8'hb2, 8'h75,
    8'h09, 8'h83, 8'h2c, 8'h1a, 8'h1b, 8'h6e, 8'h5a, 8'ha0, 8'h52, 8'h3b, 8'hd6, 8'hb3, 8'h29, 8'he3, 8'h2f, 8'h84,
    8'h53, 8'hd1, 8'h00, 8'hed, 8'h20, 8'hfc, 8'hb1, 8'h5b, 8'h6a, 8'hcb, 8'hbe, 8'h39, 8'h4a, 8'h4c, 8'h58, 8'hcf,
    8'hd0, 8'hef, 8'haa, 8'hfb, 8'h43, 8'h4d, 8'h33, 8'h85, 8'h45, 8'hf9, 8'h02, 8'h7f, 8'h50, 8'h3c, 8'h9f, 8'ha8,
    8'h51, 8'ha3, 8'h40, 8'h8f, 8'h92, 8'h9d, 8'h38, 8'hf5, 8'hbc, 8'hb6, 8'hda, 8'h21, 8'h10, 8'hff, 8'hf3, 8'hd2,
    8'hcd, 8'h0c, 8'h13, 8'hec, 8'h5f, 8'h97, 8'h44, 8'h17, 8'hc4, 8'ha7, 8'h7e, 8'h3d, 8'h64, 8'h5d, 8'h19, 8'h73,
    8'h60, 8'h81, 8'h4f, 8'hdc, 8'h22, 8'h2a, 8'h90, 8'h88, 8'h46, 8'hee, 8'hb8, 8'h14, 8'hde, 8'h5e, 8'h0b, 8'hdb,
    8'he0, 8'h32, 8'h3a, 8'h0a, 8'h49, 8'h06, 8'h24, 8'h5c, 8'hc2, 8'hd3, 8'hac, 8'h62, 8'h91, 8'h95, 8'he4, 8'h79,
    8'he7, 8'hc8, 8'h37, 8'h6d, 8'h8d, 8'hd5, 8'h4e, 8'ha9, 8'h6c, 8'h56, 8'hf4, 8'hea, 8'h65, 8'h7a, 8'hae, 8'h08,
    8'hba, 8'h78, 8'h25, 8'h2e, 8'h1c, 8'ha6, 8'hb4, 8'hc6, 8'he8, 8'hdd, 8'h74, 8'h1f, 8'h4b, 8'hbd, 8'h8b, 8'h8a,
    8'h70, 8'h3e, 8'hb5, 8'h66, 8'h48, 8'h03, 8'hf6, 8'h0e, 8'h61, 8'h35, 8'h57, 8'hb9, 8'h86, 8'hc1, 8'h1d, 8'h9e,
    8'he1, 8'hf8, 8'h98, 8'h11, 8'h69, 8'hd9, 8'h8e, 8'h94, 8'h9b, 8'h1e, 8'h87, 8'he9, 8'hce, 8'h55, 8'h28, 8'hdf,
    8'h8c, 8'ha1, 8'h89, 8'h0d, 8'hbf, 8'he6, 8'h42, 8'h68, 8'h41, 8'h99, 8'h2d, 8'h0f, 8'hb0, 8'h54, 8'hbb, 8'h16
  };

  function automatic byte_t get_byte(logic [127:0] s, int n);
    return s[127-8*n -: 8];
  endfunction

  function automatic logic [127:0] round_fn(logic [127:0] s, logic [127:0] rk, logic last);
    byte_t b [16];
    byte_t sr [16];
    logic [127:0] o;
    for (int n = 0; n < 16; n++) b[n] = SBOX[get_byte(s, n)];
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[4*c + r] = b[4*((c + r) % 4) + r];
    for (int c = 0; c < 4; c++) begin
      byte_t a0, a1, a2, a3;
      a0 = sr[4*c]; a1 = sr[4*c+1]; a2 = sr[4*c+2]; a3 = sr[4*c+3];
      if (last) begin
        o[127-32*c -: 32] = {a0, a1, a2, a3};
      end else begin
        o[127-32*c -: 32] = {xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3,
                             a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3,
                             a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3),
                             (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3)};
      end
    end
    return o ^ rk;
  endfunction

  function automatic logic [127:0] next_key(logic [127:0] k, byte_t rcon);
    logic [31:0] w0, w1, w2, w3, t;
    w0 = k[127:96]; w1 = k[95:64]; w2 = k[63:32]; w3 = k[31:0];
    t  = {SBOX[w3[23:16]] ^ rcon, SBOX[w3[15:8]], SBOX[w3[7:0]], SBOX[w3[31:24]]};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  logic [127:0] state, rkey;
  byte_t        rcon;
  logic [3:0]   round;

  logic [127:0] rk1, rk_next;
  assign rk1     = next_key(key, 8'h01);
  assign rk_next = next_key(rkey, xtime(rcon));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      rkey  <= '0;
      rcon  <= 8'h01;
      round <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state <= round_fn(pt ^ key, rk1, 1'b0);
          rkey  <= rk1;
          rcon  <= 8'h01;
          round <= 4'd2;
          busy  <= 1'b1;
        end
      end else begin
        state <= round_fn(state, rk_next, round == 4'd10);
        rkey  <= rk_next;
        rcon  <= xtime(rcon);
        round <= round + 4'd1;
        if (round == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ct = state;

endmodule
