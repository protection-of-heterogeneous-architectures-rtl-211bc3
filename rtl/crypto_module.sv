// crypto_module: AES-GCM cryptographic module of the Cryptographic Firewall.
//
// Protects each 32-bit word of the external memory in one of three modes,
// chosen per memory section by the Cmode and Imode bits of its security
// policy (paper, Fig. 9):
//   Cmode=1, Imode=1  confidentiality + integrity: AES-GCM. The word is
//                     encrypted in counter mode and a tag is computed over
//                     the ciphertext.
//   Cmode=0, Imode=1  integrity only: the plaintext word is authenticated as
//                     GCM additional authenticated data (AAD), i.e. GMAC.
//   Cmode=0, Imode=0  plaintext: the module is bypassed.
// (Cmode=1 with Imode=0 is treated as confidentiality + integrity.)
//
// GCM framing, which is standard GCM with a 96-bit IV, one 32-bit data word
// and a tag cut to 32 bits (Fig. 9 draws the tag path 32 bits wide):
//   IV    = {32'h0, byte address, timestamp}           (96 bits)
//   CPT0  = {IV, 32'h1}, CPT1 = CPT0 + 1               (Fig. 9: incr (+1))
//   CT    = PT xor E_k(CPT1)[127:96]
//   GHASH = ((D * H) xor L) * H, D = {word, 96'h0} (CT, or PT as AAD),
//           L = {64-bit AAD length, 64-bit text length} in bits
//   TAG   = (GHASH xor E_k(CPT0))[127:96]
// The timestamp is a per-word counter in the timestamp memory, incremented on
// every protected write so that an old (ciphertext, tag) pair replayed into
// the external memory no longer authenticates. The tag goes to the on-chip
// MAC memory, never to the external memory. A read recomputes the tag from
// the stored word; a mismatch raises auth_fail (the authenticationFlag) and
// the read is answered with SLVERR and data 0.
//
// Keys: KEYS pairs (K, H = E_K(0^128)) are held in a key register file
// selected by the policy's key index and written through key_we (eight
// 32-bit words per pair: K then H, most significant word first). The paper
// says keys and MAC information come from the security policies; a separate
// register file loaded by the update path is this design's choice, as is
// having software supply H.
//
// Timing, from acceptance of a request to the external-memory access (write)
// or to the response (read, after the memory returned the word):
//   C+I    10 (E_k(CPT0)) + 10 (E_k(CPT1)) + 2 (two mult_H) = 22 cycles,
//          the paper's latency(N) = 10 + (10+2)N for N = 1
//   I only 10 + 2 = 12 cycles, plaintext 0.
// One AES core is used for both counter blocks, so they are encrypted one
// after the other, which is what the paper's formula counts.
//
// Upstream is a single-beat AXI slave port (from the Firewall Interface),
// with the checked policy in sp; downstream is the memory-controller port.
// TS_DEPTH words (timestamps and tags) are indexed by the word address
// modulo TS_DEPTH, so only TS_DEPTH distinct words can be protected at once;
// the paper also notes that on-chip tag storage bounds the protected size.
module crypto_module
  import fw_pkg::*;
#(
  parameter int unsigned TS_DEPTH = 4096,
  parameter int unsigned KEYS     = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  axi_req_t    s_req,
  output axi_rsp_t    s_rsp,
  input  policy_t     sp,
  output mem_req_t    m_req,
  input  mem_rsp_t    m_rsp,
  input  logic        key_we,
  input  logic [$clog2(KEYS)+2:0] key_addr,
  input  logic [31:0] key_wdata,
  output logic        auth_fail
);

  localparam int unsigned TS_AW = $clog2(TS_DEPTH);
  localparam int unsigned KA_W  = $clog2(KEYS);

  typedef enum logic [3:0] {
    C_IDLE, C_MEMRD, C_EK0, C_EK1, C_WAITD, C_M2, C_TAG, C_MEMWR, C_RRSP, C_BRSP
  } cstate_t;
  cstate_t st;

  logic [31:0] ts_mem  [TS_DEPTH];
  logic [31:0] mac_mem [TS_DEPTH];
  logic [127:0] key_k [KEYS];
  logic [127:0] key_h [KEYS];

  logic              rnw_q, cm_q;
  logic [ADDR_W-1:0] addr_q;
  logic [ID_W-1:0]   id_q;
  logic [31:0]       data_q;     // write data
  logic [31:0]       rdata_q;    // word read from the external memory
  logic              have_data;  // rdata_q valid (reads) / always for writes
  logic              mrd_issued;
  logic [31:0]       out_q;      // word to memory (write) or to requester (read)
  logic [31:0]       ts_q;
  logic [KA_W-1:0]   kidx_q;
  logic [127:0]      s0_q;       // E_k(CPT0)
  logic              bad_q;

  // request being accepted
  logic              acc_rd, acc_wr, acc_prot;
  logic [ADDR_W-1:0] in_addr;
  logic [31:0]       in_ts;
  assign acc_rd   = (st == C_IDLE) && s_req.ar_valid;
  assign acc_wr   = (st == C_IDLE) && !s_req.ar_valid && s_req.aw_valid && s_req.w_valid;
  assign acc_prot = sp.cmode | sp.imode;
  assign in_addr  = s_req.ar_valid ? s_req.ar_addr : s_req.aw_addr;
  // a write takes a fresh timestamp, a read uses the stored one
  assign in_ts    = ts_mem[in_addr[2 +: TS_AW]] + (s_req.ar_valid ? 32'd0 : 32'd1);

  logic [TS_AW-1:0] idx;
  assign idx = addr_q[2 +: TS_AW];

  // key register file
  always_ff @(posedge clk) begin
    if (key_we) begin
      if (key_addr[2] == 1'b0) key_k[key_addr[KA_W+2:3]][127-32*key_addr[1:0] -: 32] <= key_wdata;
      else                     key_h[key_addr[KA_W+2:3]][127-32*key_addr[1:0] -: 32] <= key_wdata;
    end
  end

  // AES core: CPT0 at acceptance, CPT1 = CPT0 + 1 right after
  logic         aes_start, aes_done, aes_busy;
  logic [127:0] aes_pt, aes_ct;
  logic [KA_W-1:0] aes_kidx;
  assign aes_kidx  = (st == C_IDLE) ? KA_W'(sp.key_idx) : kidx_q;
  assign aes_start = ((acc_rd || acc_wr) && acc_prot) || ((st == C_EK0) && aes_done && cm_q);
  assign aes_pt    = (st == C_IDLE) ? {32'h0, in_addr, in_ts, 32'h1}
                                    : {32'h0, addr_q, ts_q, 32'h2};

  aes128_core u_aes (
    .clk, .rst_n, .start(aes_start), .pt(aes_pt), .key(key_k[aes_kidx]),
    .ct(aes_ct), .done(aes_done), .busy(aes_busy)
  );

  // GHASH: ((D * H) xor L) * H
  logic [127:0] m1_p, m2_p, len_blk;
  logic         m1_en, m1_v, m2_en, m2_v;
  logic [31:0]  ks_word, gh_word, plain_word;
  logic         keys_ready;
  assign ks_word    = cm_q ? aes_ct[127:96] : 32'h0;
  // word the tag covers: the ciphertext (C+I) or the plaintext as AAD (I only)
  assign gh_word    = rnw_q ? rdata_q : (data_q ^ ks_word);
  assign plain_word = rnw_q ? (rdata_q ^ ks_word) : data_q;
  assign len_blk    = cm_q ? {64'd0, 64'd32} : {64'd32, 64'd0};
  assign keys_ready = ((st == C_EK0) && aes_done && !cm_q) || ((st == C_EK1) && aes_done) ||
                      (st == C_WAITD);
  assign m1_en      = keys_ready && have_data;
  assign m2_en      = (st == C_M2);

  gf128_mul u_m1 (.clk, .rst_n, .en(m1_en), .x({gh_word, 96'd0}), .h(key_h[kidx_q]),
                  .p(m1_p), .valid(m1_v));
  gf128_mul u_m2 (.clk, .rst_n, .en(m2_en), .x(m1_p ^ len_blk), .h(key_h[kidx_q]),
                  .p(m2_p), .valid(m2_v));

  logic [31:0] tag;
  assign tag = m2_p[127:96] ^ s0_q[127:96];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE;
      rnw_q <= 1'b0; cm_q <= 1'b0;
      addr_q <= '0; id_q <= '0; data_q <= '0; rdata_q <= '0; have_data <= 1'b0;
      mrd_issued <= 1'b0; out_q <= '0; ts_q <= '0;
      kidx_q <= '0; s0_q <= '0; bad_q <= 1'b0;
      auth_fail <= 1'b0;
    end else begin
      auth_fail <= 1'b0;
      if (m_req.valid && !m_req.we && m_rsp.ready) mrd_issued <= 1'b1;
      if (rnw_q && m_rsp.rvalid) begin
        rdata_q   <= m_rsp.rdata;
        have_data <= 1'b1;
      end
      unique case (st)
        C_IDLE: begin
          bad_q      <= 1'b0;
          mrd_issued <= 1'b0;
          if (acc_rd || acc_wr) begin
            rnw_q     <= acc_rd;
            have_data <= acc_wr;
            addr_q    <= in_addr;
            id_q      <= acc_rd ? s_req.ar_id : s_req.aw_id;
            data_q    <= s_req.w_data;
            out_q     <= s_req.w_data;
            ts_q      <= in_ts;
            cm_q      <= sp.cmode;
            kidx_q    <= KA_W'(sp.key_idx);
            st        <= acc_prot ? C_EK0 : (acc_rd ? C_MEMRD : C_MEMWR);
          end
        end
        C_MEMRD: if (have_data) begin
          out_q <= rdata_q;
          st    <= C_RRSP;
        end
        C_EK0: if (aes_done) begin
          s0_q <= aes_ct;
          st   <= cm_q ? C_EK1 : (have_data ? C_M2 : C_WAITD);
        end
        C_EK1: if (aes_done) st <= have_data ? C_M2 : C_WAITD;
        C_WAITD: if (have_data) st <= C_M2;
        C_M2: st <= C_TAG;
        C_TAG: begin
          if (rnw_q) begin
            bad_q     <= (tag != mac_mem[idx]);
            auth_fail <= (tag != mac_mem[idx]);
            st        <= C_RRSP;
          end else begin
            st <= C_MEMWR;
          end
        end
        C_MEMWR: if (m_rsp.ready) st <= C_BRSP;
        C_RRSP:  if (s_req.r_ready) st <= C_IDLE;
        C_BRSP:  if (s_req.b_ready) st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
      // the plaintext / ciphertext word is latched with the first multiplication
      if (m1_en) out_q <= rnw_q ? plain_word : gh_word;
    end
  end

  // a protected write stores its tag and timestamp on chip
  always_ff @(posedge clk) begin
    if (st == C_TAG && !rnw_q) begin
      mac_mem[idx] <= tag;
      ts_mem[idx]  <= ts_q;
    end
  end

  // timestamp and MAC memories start cleared (on-chip BRAM initial contents)
  initial begin
    for (int i = 0; i < TS_DEPTH; i++) begin
      ts_mem[i]  = '0;
      mac_mem[i] = '0;
    end
  end

  always_comb begin
    m_req       = '0;
    m_req.addr  = addr_q;
    m_req.wdata = out_q;
    m_req.we    = (st == C_MEMWR);
    m_req.valid = (st == C_MEMWR) ||
                  (rnw_q && !mrd_issued &&
                   (st == C_MEMRD || st == C_EK0 || st == C_EK1 || st == C_WAITD));
  end

  always_comb begin
    s_rsp          = '0;
    s_rsp.ar_ready = acc_rd;
    s_rsp.aw_ready = acc_wr;
    s_rsp.w_ready  = acc_wr;
    s_rsp.r_valid  = (st == C_RRSP);
    s_rsp.r_data   = bad_q ? '0 : out_q;
    s_rsp.r_resp   = bad_q ? RESP_SLVERR : RESP_OKAY;
    s_rsp.r_id     = id_q;
    s_rsp.r_last   = 1'b1;
    s_rsp.b_valid  = (st == C_BRSP);
    s_rsp.b_resp   = RESP_OKAY;
    s_rsp.b_id     = id_q;
  end

  logic unused;
  assign unused = aes_busy ^ m2_v;

endmodule
