// neighbor_info_loader: finds where the neighbors of the walker's current vertex are.
//
// Takes a step request (query context, whose v_curr is the vertex) and produces the
// vertex's {address, degree} from row_index, looked up through the degree-aware cache.
// On a cache miss it reads the 512-bit row_index line that holds the vertex
// (line = row_base + vid/8, entry vid%8 of 64 bits: {degree, address}).
// The answer is forked: {address, degree} to the dynamic burst engine, and
// {context, degree} to the context queue read by the weight updater; both must accept in
// the same cycle.  The line layout and the fork are this design's choices; the paper gives
// the loader's function and its cache.
//
// Memory port: request (line address, length 1 beat) / response (one 512-bit line), both
// valid/ready.
module neighbor_info_loader #(
  parameter int LINES = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [31:0]         row_base,
  // step requests from the query scheduler
  input  logic                in_valid,
  output logic                in_ready,
  input  lightrw_pkg::ctx_t   in_ctx,
  // to the dynamic burst engine
  output logic                info_valid,
  input  logic                info_ready,
  output lightrw_pkg::ninfo_t info,
  // to the context queue
  output logic                ctx_valid,
  input  logic                ctx_ready,
  output lightrw_pkg::ctx_t   ctx_out,
  // row_index read port
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [31:0]         rd_req_addr,
  output logic [7:0]          rd_req_len,
  input  logic                rd_resp_valid,
  output logic                rd_resp_ready,
  input  logic [511:0]        rd_resp_data,
  // statistics
  output logic [31:0]         n_hit,
  output logic [31:0]         n_miss,
  output logic [31:0]         n_replace
);
  import lightrw_pkg::*;

  logic        c_valid, c_ready;
  ninfo_t      c_info;
  ctx_t        c_ctx;
  logic [31:0] miss_vid;
  ninfo_t      fill_info;

  degree_aware_cache #(.LINES(LINES), .SIDE_W(CTX_W)) u_cache (
    .clk, .rst_n,
    .req_valid(in_valid), .req_ready(in_ready), .req_vid(in_ctx.v_curr), .req_side(in_ctx),
    .resp_valid(c_valid), .resp_ready(c_ready), .resp_info(c_info), .resp_side(c_ctx),
    .miss_valid(rd_req_valid), .miss_ready(rd_req_ready), .miss_vid,
    .fill_valid(rd_resp_valid), .fill_ready(rd_resp_ready), .fill_info,
    .n_hit, .n_miss, .n_replace
  );

  assign rd_req_addr = row_base + (miss_vid >> 3);
  assign rd_req_len  = 8'd1;
  assign fill_info   = rd_resp_data[64*miss_vid[2:0] +: 64];

  // fork
  assign info_valid = c_valid && ctx_ready;
  assign ctx_valid  = c_valid && info_ready;
  assign c_ready    = info_ready && ctx_ready;
  assign info       = c_info;
  assign ctx_out    = c_ctx;

endmodule
