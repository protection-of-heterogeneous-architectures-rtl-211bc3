// fw_pkg: types and constants shared by the hardware-firewall MPSoC.
//
// The system bus is AXI4 restricted to single-beat transactions (AxLEN = 0),
// carried as two packed structs: axi_req_t (master to slave: AW, W, AR
// channels and the B/R ready signals) and axi_rsp_t (slave to master). The
// external-memory side of the cryptographic firewall uses the simpler
// mem_req_t / mem_rsp_t pair.
//
// A security policy is one 32-bit Block RAM word. The paper says that the
// access rights of a policy fit in a 32-bit word and that the Checking Module
// compares an access right (sp_rnw), a data format (sp_format) and a further
// parameter (sp_param); the bit positions of these fields, the 2-bit access
// right encoding and the crypto-mode bits are this design's own choice:
//   [1:0]   sp_rnw    access right: 00 none, 01 read only, 10 write only, 11 read/write
//   [4:2]   sp_format allowed AxSIZE (2 = 32-bit words)
//   [12:5]  sp_param  allowed AxLEN (0 = single beat)
//   [13]    cmode     confidentiality (AES-CTR) for this section
//   [14]    imode     integrity (GHASH tag) for this section
//   [16:15] key_idx   index of the AES key / hash key pair in the crypto firewall
//
// Flag register layout (Fig. 12 of the paper): cF in bit 31, nF in bit 30 and,
// for a cryptographic firewall, iF (authentication flag) in bit 29; the rest
// is zero. A flag bit is 1 while its check passes, so a 0 bit signals an
// attack (the interrupt rule of the monitoring IP).
package fw_pkg;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned DATA_W = 32;
  localparam int unsigned ID_W   = 4;

  // AXI response codes
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  typedef struct packed {
    logic              aw_valid;
    logic [ADDR_W-1:0] aw_addr;
    logic [ID_W-1:0]   aw_id;
    logic [2:0]        aw_size;
    logic [7:0]        aw_len;
    logic              w_valid;
    logic [DATA_W-1:0] w_data;
    logic [3:0]        w_strb;
    logic              w_last;
    logic              b_ready;
    logic              ar_valid;
    logic [ADDR_W-1:0] ar_addr;
    logic [ID_W-1:0]   ar_id;
    logic [2:0]        ar_size;
    logic [7:0]        ar_len;
    logic              r_ready;
  } axi_req_t;

  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [1:0]        b_resp;
    logic [ID_W-1:0]   b_id;
    logic              ar_ready;
    logic              r_valid;
    logic [DATA_W-1:0] r_data;
    logic [1:0]        r_resp;
    logic [ID_W-1:0]   r_id;
    logic              r_last;
  } axi_rsp_t;

  // AXI-Lite (security bus)
  typedef struct packed {
    logic              aw_valid;
    logic [ADDR_W-1:0] aw_addr;
    logic              w_valid;
    logic [DATA_W-1:0] w_data;
    logic              b_ready;
    logic              ar_valid;
    logic [ADDR_W-1:0] ar_addr;
    logic              r_ready;
  } axil_req_t;

  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [1:0]        b_resp;
    logic              ar_ready;
    logic              r_valid;
    logic [DATA_W-1:0] r_data;
    logic [1:0]        r_resp;
  } axil_rsp_t;

  // External memory controller port (word addressed by byte address)
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic              ready;   // request accepted
    logic              rvalid;  // read data valid (one pulse per read)
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  // Access-right encoding of sp_rnw
  typedef enum logic [1:0] {
    ACC_NONE = 2'b00,
    ACC_RO   = 2'b01,
    ACC_WO   = 2'b10,
    ACC_RW   = 2'b11
  } access_t;

  typedef struct packed {
    logic [14:0] unused;
    logic [1:0]  key_idx;
    logic        imode;
    logic        cmode;
    logic [7:0]  sp_param;
    logic [2:0]  sp_format;
    access_t     sp_rnw;
  } policy_t;

  // Request presented by a Firewall Interface to its Security Builder
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic              rnw;     // 1 = read (AR channel), 0 = write (AW channel)
    logic [2:0]        size;
    logic [7:0]        len;
  } chk_req_t;

  // Flags exported to the monitoring IP
  typedef struct packed {
    logic cf;   // check failed in the Checking Module
    logic nf;   // address not found in the Correspondence Table
    logic af;   // authentication failed (cryptographic firewall only)
  } flags_t;

  function automatic logic [DATA_W-1:0] mk_policy(access_t rnw, logic [2:0] fmt, logic [7:0] prm,
                                                  logic cm, logic im, logic [1:0] key);
    policy_t p;
    p = '0;
    p.sp_rnw    = rnw;
    p.sp_format = fmt;
    p.sp_param  = prm;
    p.cmode     = cm;
    p.imode     = im;
    p.key_idx   = key;
    return DATA_W'(p);
  endfunction

endpackage
