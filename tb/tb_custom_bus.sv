// tb_custom_bus: test of the custom bus from the firewalls to the monitor.
//
// Random flag pulses from the five firewalls, several at once. Every
// reported flag must appear exactly once on the bus, with the firewall's
// index as address and the flag as an active-low bit (cF bit 31, nF bit 30,
// iF bit 29, all other bits 1); flags raised together are sent lowest index
// first, one firewall per cycle, and a lone flag is sent the cycle after its
// pulse.
`timescale 1ns/1ps
`include "tb_defs.svh"
module tb_custom_bus;
  import fw_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin
    #1_000_000; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end

  flags_t      flags [5];
  logic        bus_valid;
  logic [3:0]  bus_addr;
  logic [31:0] bus_data;
  custom_bus dut (.*);

  task automatic step(); @(posedge clk); #1; endtask

  int sent [5][3];
  int seen [5][3];
  always @(posedge clk) if (rst_n && bus_valid) begin
    `CHECK(bus_addr < 5, "address in range")
    `CHECK_EQ(bus_data[28:0], 29'h1FFF_FFFF, "unused bits read 1")
    if (!bus_data[31]) seen[bus_addr][0]++;
    if (!bus_data[30]) seen[bus_addr][1]++;
    if (!bus_data[29]) seen[bus_addr][2]++;
  end

  initial begin
    for (int i = 0; i < 5; i++) begin flags[i] = '0; for (int k = 0; k < 3; k++) begin sent[i][k] = 0; seen[i][k] = 0; end end
    step(); rst_n = 1; step();
    // lone flag: on the bus the next cycle
    flags[3].nf = 1; step(); flags[3] = '0;
    `CHECK(bus_valid && bus_addr == 4'd3 && bus_data[31:29] == 3'b101, "lone nF of firewall 3")
    sent[3][1]++;
    step();
    `CHECK(!bus_valid, "bus idle afterwards")
    // simultaneous flags: lowest index first
    flags[4].af = 1; flags[1].cf = 1; step(); flags[4] = '0; flags[1] = '0;
    `CHECK(bus_valid && bus_addr == 4'd1, "firewall 1 first")
    step();
    `CHECK(bus_valid && bus_addr == 4'd4 && bus_data[29] == 1'b0, "then firewall 4 with iF")
    sent[1][0]++; sent[4][2]++;
    step();
    // random traffic
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 5; i++) begin
        flags[i] = '0;
        if ($urandom_range(7) == 0) begin
          int k;
          k = $urandom_range(2);
          if (k == 0) flags[i].cf = 1; else if (k == 1) flags[i].nf = 1; else flags[i].af = 1;
          sent[i][k]++;
        end
      end
      step();
      for (int i = 0; i < 5; i++) flags[i] = '0;
      repeat (6) step();
    end
    repeat (10) step();
    for (int i = 0; i < 5; i++) for (int k = 0; k < 3; k++)
      `CHECK_EQ(seen[i][k], sent[i][k], "every flag reported once")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
