// burst_channel: one memory access pipeline with a fixed burst length (the paper's
// "Long Burst" and "Short Burst" modules are two instances of it).
//
// Burst commands (a col_index line number) are queued; a command is issued to the memory
// port as one request of BURST beats at col_base + line, but only when the data buffer
// has room reserved for all BURST beats, so returned data is never refused.  Returned
// beats are buffered in order and handed to the intra burst merge.  The paper gives the
// function and the burst lengths; command queueing and the space reservation are this
// design's choices.
//
// Interface: cmd valid/ready; memory request valid/ready {addr, len}; memory response
// valid/ready {data}; data out valid/ready.
module burst_channel #(
  parameter int BURST      = 32,
  parameter int DATA_DEPTH = 64,
  parameter int CMD_DEPTH  = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  col_base,
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  logic [31:0]  cmd_line,
  output logic         rd_req_valid,
  input  logic         rd_req_ready,
  output logic [31:0]  rd_req_addr,
  output logic [7:0]   rd_req_len,
  input  logic         rd_resp_valid,
  output logic         rd_resp_ready,
  input  logic [511:0] rd_resp_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [511:0] out_data
);
  localparam int RW = $clog2(DATA_DEPTH + 1) + 1;

  logic        q_valid;
  logic [31:0] q_line;
  logic [RW-1:0] reserved;   // beats in flight plus beats in the buffer

  sync_fifo #(.WIDTH(32), .DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd_line),
    .out_valid(q_valid), .out_ready(rd_req_valid && rd_req_ready), .out_data(q_line),
    .count()
  );

  assign rd_req_valid = q_valid && (reserved + RW'(BURST) <= RW'(DATA_DEPTH));
  assign rd_req_addr  = col_base + q_line;
  assign rd_req_len   = 8'(BURST);

  sync_fifo #(.WIDTH(512), .DEPTH(DATA_DEPTH)) u_dataq (
    .clk, .rst_n,
    .in_valid(rd_resp_valid), .in_ready(rd_resp_ready), .in_data(rd_resp_data),
    .out_valid, .out_ready, .out_data,
    .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) reserved <= '0;
    else reserved <= reserved + ((rd_req_valid && rd_req_ready) ? RW'(BURST) : '0)
                              - ((out_valid && out_ready) ? RW'(1) : '0);
  end

endmodule
