// tb_defs: checking macros shared by the testbenches.
//
// CHECK counts one check and, when its condition is false, one failure with
// a message naming it. CHECK_EQ does the same for an expected value and
// prints both values. Each testbench declares the int counters checks and
// failures and prints the TB_RESULT line from them at the end.
`ifndef TB_DEFS_SVH
`define TB_DEFS_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end end
`define CHECK_EQ(got, exp, msg) \
  begin checks++; if ((got) !== (exp)) begin failures++; \
    $display("FAIL: %s got %0h expected %0h (t=%0t)", msg, got, exp, $time); end end
`endif
