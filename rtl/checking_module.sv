// checking_module: Checking Module (CheckMod) of a firewall's Security Builder.
//
// Compares the transaction with the security policy read by the Reading
// Module. A preliminary test tells a read from a write and drives the select
// of a multiplexer that picks the format field of the right channel (ARSIZE
// for a read, AWSIZE for a write). Three comparators then run in parallel:
//   access right  the policy's sp_rnw must allow the direction (read needs
//                 bit 0, write needs bit 1)
//   data format   the AxSIZE of the transaction must equal sp_format
//   parameter     the AxLEN of the transaction must equal sp_param
// check_out is 1 only when every comparator agrees and 0 if any one of them
// fails, which is the behaviour the paper describes for its inverters and
// gate in Fig. 6.
//
// Timing (paper: two cycles, one for the preliminary test and one for the
// comparators): start in cycle 0 registers the test result and the selected
// format; check_out and done are registered at the end of cycle 1.
//
// The paper derives the read/write test from ARID (non-zero = read); its
// Fig. 3 and Fig. 6 feed an AXI4_rnw signal instead. This module takes the
// rnw bit that the Firewall Interface derives from the channel the request
// came on, which is what the test is meant to produce. Which field the third
// comparator checks is not given; AxLEN is this design's choice.
module checking_module
  import fw_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     rnw,        // 1 = read
  input  logic [2:0] arsize,
  input  logic [2:0] awsize,
  input  logic [7:0] axlen,
  input  policy_t  sp,
  output logic     check_out,
  output logic     check_next, // comparator result, valid while done is about to rise
  output logic     done
);

  // stage 1: preliminary test and format multiplexer
  logic       is_read_q;
  logic [2:0] fmt_q;
  logic [7:0] len_q;
  logic       stage1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_read_q <= 1'b0;
      fmt_q     <= '0;
      len_q     <= '0;
      stage1_q  <= 1'b0;
    end else begin
      stage1_q <= start;
      if (start) begin
        is_read_q <= rnw;
        fmt_q     <= rnw ? arsize : awsize;
        len_q     <= axlen;
      end
    end
  end

  // stage 2: comparators combined into one result
  logic rnw_ok, fmt_ok, prm_ok;
  always_comb begin
    rnw_ok = is_read_q ? sp.sp_rnw[0] : sp.sp_rnw[1];
    fmt_ok = (fmt_q == sp.sp_format);
    prm_ok = (len_q == sp.sp_param);
  end

  assign check_next = rnw_ok & fmt_ok & prm_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      check_out <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= stage1_q;
      if (stage1_q) check_out <= check_next;
    end
  end

endmodule
