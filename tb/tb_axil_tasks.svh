// tb_axil_tasks: AXI-Lite master tasks for the security-bus testbenches.
//
// Included inside a testbench module that declares clk and axil_req_t lreq /
// axil_rsp_t lrsp (the master side of the device). Each task holds its
// request until it is accepted, then waits for the response; lat returns the
// cycles from raising the request to the response.
task automatic step(); @(posedge clk); #1; endtask

task automatic axil_write(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
  lreq.aw_valid = 1'b1; lreq.aw_addr = a; lreq.w_valid = 1'b1; lreq.w_data = d;
  #1;
  while (!lrsp.aw_ready) step();
  step();
  lreq.aw_valid = 1'b0; lreq.w_valid = 1'b0; lreq.b_ready = 1'b1;
  #1;
  while (!lrsp.b_valid) step();
  resp = lrsp.b_resp;
  step();
  lreq.b_ready = 1'b0;
endtask

task automatic axil_read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
  lreq.ar_valid = 1'b1; lreq.ar_addr = a;
  #1;
  while (!lrsp.ar_ready) step();
  step();
  lreq.ar_valid = 1'b0; lreq.r_ready = 1'b1;
  #1;
  while (!lrsp.r_valid) step();
  d = lrsp.r_data; resp = lrsp.r_resp;
  step();
  lreq.r_ready = 1'b0;
endtask
