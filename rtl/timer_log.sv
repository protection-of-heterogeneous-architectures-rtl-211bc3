// timer_log: timer and event log of the update services.
//
// The update processor records every important event (attacks, update
// progress) with a timestamp (paper, Sec. 4.3 and Fig. 10). This slave keeps
// a free-running 32-bit cycle counter and a circular log of LOG_DEPTH
// entries; writing an event code appends the code together with the counter
// value at the time of the write. AXI-Lite map, byte offsets:
//   0x000  counter (read)
//   0x004  append an event: write the 32-bit event code
//   0x008  number of events appended so far (read)
//   0x100 + 4*e  timestamp of log entry e (read)
//   0x200 + 4*e  event code of log entry e (read)
// The paper gives the function only; the map and the circular log are this
// design's choices.
module timer_log
  import fw_pkg::*;
#(
  parameter int unsigned LOG_DEPTH = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_req,
  output axil_rsp_t s_rsp
);

  localparam int unsigned LW = $clog2(LOG_DEPTH);

  logic        wr_en, rd_en;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [31:0] counter, n_events;
  logic [31:0] log_ts [LOG_DEPTH];
  logic [31:0] log_ev [LOG_DEPTH];

  axil_reg_port u_port (
    .clk, .rst_n, .s_req, .s_rsp,
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counter  <= '0;
      n_events <= '0;
    end else begin
      counter <= counter + 32'd1;
      if (wr_en && wr_addr[9:0] == 10'h004) n_events <= n_events + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr[9:0] == 10'h004) begin
      log_ts[n_events[LW-1:0]] <= counter;
      log_ev[n_events[LW-1:0]] <= wr_data;
    end
  end

  // registered read of the addressed word
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_data <= '0;
    else if (rd_en) begin
      unique case (rd_addr[9:8])
        2'b01:   rd_data <= log_ts[rd_addr[2 +: LW]];
        2'b10:   rd_data <= log_ev[rd_addr[2 +: LW]];
        default: rd_data <= (rd_addr[3:2] == 2'd2) ? n_events : counter;
      endcase
    end
  end

endmodule
