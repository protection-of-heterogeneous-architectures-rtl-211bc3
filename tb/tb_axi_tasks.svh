// tb_axi_tasks: single-beat AXI master tasks and a memory slave model for the
// firewall testbenches.
//
// Included inside a testbench module that declares clk, the int cyc counter,
// and axi_req_t m_req / axi_rsp_t m_rsp (the master side of the device) and
// axi_req_t s_req / axi_rsp_t s_rsp (its slave side, served by the model
// below). axi_read / axi_write hold the request until it is accepted, then
// wait for the response and return it with the cycle at which the request
// was raised. The slave model accepts at once and answers one cycle later
// from an associative array; it counts the requests that reach it.
task automatic step(); @(posedge clk); #1; endtask

task automatic axi_read(input logic [31:0] a, input logic [7:0] len, input logic [2:0] size,
                        output logic [31:0] d, output logic [1:0] resp, output int t0);
  m_req.ar_valid = 1'b1; m_req.ar_addr = a; m_req.ar_len = len; m_req.ar_size = size;
  m_req.ar_id = 4'h3;
  t0 = cyc;
  #1;
  while (!m_rsp.ar_ready) step();
  step();
  m_req.ar_valid = 1'b0; m_req.r_ready = 1'b1;
  #1;
  while (!m_rsp.r_valid) step();
  d = m_rsp.r_data; resp = m_rsp.r_resp;
  step();
  m_req.r_ready = 1'b0;
endtask

task automatic axi_write(input logic [31:0] a, input logic [31:0] d, input logic [7:0] len,
                         input logic [2:0] size, output logic [1:0] resp, output int t0);
  m_req.aw_valid = 1'b1; m_req.aw_addr = a; m_req.aw_len = len; m_req.aw_size = size;
  m_req.aw_id = 4'h5;
  m_req.w_valid = 1'b1; m_req.w_data = d; m_req.w_strb = 4'hF; m_req.w_last = 1'b1;
  t0 = cyc;
  #1;
  while (!m_rsp.aw_ready) step();
  step();
  m_req.aw_valid = 1'b0; m_req.w_valid = 1'b0; m_req.b_ready = 1'b1;
  #1;
  while (!m_rsp.b_valid) step();
  resp = m_rsp.b_resp;
  step();
  m_req.b_ready = 1'b0;
endtask

// memory slave
logic [31:0] smem [logic [31:0]];
int n_slave = 0;
int t_slave = -1;   // cycle at which the last request reached the slave
logic s_rpend = 1'b0, s_bpend = 1'b0;
logic [31:0] s_rdata = '0;
always_comb begin
  s_rsp = '0;
  s_rsp.ar_ready = !s_rpend && !s_bpend;
  s_rsp.aw_ready = !s_rpend && !s_bpend && !s_req.ar_valid && s_req.w_valid;
  s_rsp.w_ready  = !s_rpend && !s_bpend && !s_req.ar_valid && s_req.aw_valid;
  s_rsp.r_valid  = s_rpend;
  s_rsp.r_data   = s_rdata;
  s_rsp.r_last   = 1'b1;
  s_rsp.b_valid  = s_bpend;
end
always @(posedge clk) begin
  if (s_req.ar_valid && s_rsp.ar_ready) begin
    s_rdata <= smem.exists(s_req.ar_addr) ? smem[s_req.ar_addr] : 32'h0;
    s_rpend <= 1'b1; n_slave++;
  end else if (s_rpend && s_req.r_ready) s_rpend <= 1'b0;
  if (s_req.aw_valid && s_req.w_valid && s_rsp.aw_ready) begin
    smem[s_req.aw_addr] = s_req.w_data;
    s_bpend <= 1'b1; n_slave++;
  end else if (s_bpend && s_req.b_ready) s_bpend <= 1'b0;
end
always @(posedge clk) begin
  #1;
  if ((s_req.ar_valid || s_req.aw_valid) && t_slave < 0) t_slave = cyc;
end
