// lightrw_instance: one complete LightRW random-walk pipeline on one DRAM channel.
//
//   query_scheduler -> neighbor_info_loader (degree-aware cache, row_index)
//        ^                 |  {address, degree}            | query context
//        |                 v                               v
//        |          dynamic_burst_engine (col_index) -> weight_updater -> wrs_sampler
//        +------------------------------------------------------------------ sample
//
// Every stage is connected to the next through valid/ready handshakes and FIFOs and all
// run at the same time, so neighbors stream from DRAM through weight calculation into
// the sampler without being written back to memory (fine-grained pipelining).  Many
// queries are in flight at once; steps of different queries follow each other in the
// pipeline, and each query's state travels with its step.
//
// Memory: five ports toward the DRAM channel (query read, result write, row_index read,
// col_index long-burst read, col_index short-burst read).  Read ports use line (512-bit)
// addresses with a beat count; the write port writes 32-bit words.  Base addresses and
// the walk parameters come from the host.  For Node2Vec builds `n2v_prev_adj` carries,
// per lane of the beat entering the weight updater, whether the neighbor is adjacent to
// the previous vertex; MetaPath builds ignore it.
module lightrw_instance #(
  parameter lightrw_pkg::app_e APP          = lightrw_pkg::APP_METAPATH,
  parameter int                K            = 16,
  parameter int                CACHE_LINES  = 4096,
  parameter int                S1           = 32,
  parameter int                S2           = 1,
  parameter int                MAX_INFLIGHT = 64,
  parameter logic [63:0]       SEED         = 64'd1
) (
  input  logic         clk,
  input  logic         rst_n,
  // host configuration
  input  logic         start,
  input  logic [31:0]  num_queries,
  input  logic [7:0]   query_len,
  input  logic [31:0]  query_base,
  input  logic [31:0]  result_base,
  input  logic [31:0]  row_base,
  input  logic [31:0]  col_base,
  input  logic [lightrw_pkg::REL_W-1:0] rel_path [lightrw_pkg::MAX_PATH],
  output logic         done,
  // query read port
  output logic         q_req_valid,
  input  logic         q_req_ready,
  output logic [31:0]  q_req_addr,
  output logic [7:0]   q_req_len,
  input  logic         q_resp_valid,
  output logic         q_resp_ready,
  input  logic [511:0] q_resp_data,
  // result write port
  output logic         wr_valid,
  input  logic         wr_ready,
  output logic [31:0]  wr_addr,
  output logic [31:0]  wr_data,
  // row_index read port
  output logic         r_req_valid,
  input  logic         r_req_ready,
  output logic [31:0]  r_req_addr,
  output logic [7:0]   r_req_len,
  input  logic         r_resp_valid,
  output logic         r_resp_ready,
  input  logic [511:0] r_resp_data,
  // col_index long burst port
  output logic         l_req_valid,
  input  logic         l_req_ready,
  output logic [31:0]  l_req_addr,
  output logic [7:0]   l_req_len,
  input  logic         l_resp_valid,
  output logic         l_resp_ready,
  input  logic [511:0] l_resp_data,
  // col_index short burst port
  output logic         s_req_valid,
  input  logic         s_req_ready,
  output logic [31:0]  s_req_addr,
  output logic [7:0]   s_req_len,
  input  logic         s_resp_valid,
  output logic         s_resp_ready,
  input  logic [511:0] s_resp_data,
  // Node2Vec adjacency of the current beat (unused for MetaPath)
  input  logic [K-1:0] n2v_prev_adj,
  // statistics
  output logic [31:0]  n_steps,
  output logic [31:0]  n_dead_ends,
  output logic [31:0]  n_cache_hit,
  output logic [31:0]  n_cache_miss,
  output logic [31:0]  n_cache_replace,
  output logic [31:0]  n_long_burst,
  output logic [31:0]  n_short_burst
);
  import lightrw_pkg::*;

  // scheduler <-> loader
  logic    st_valid, st_ready;
  ctx_t    st_ctx;
  // loader -> burst engine, loader -> context queue
  logic    ni_valid, ni_ready, nc_valid, nc_ready;
  ninfo_t  ni;
  ctx_t    nc;
  logic    cq_valid, cq_ready;
  ctx_t    cq;
  // burst engine -> weight updater
  logic           nb_valid, nb_ready, nb_last;
  logic [31:0]    nb_items [K];
  logic [K-1:0]   nb_mask;
  // weight updater -> sampler
  logic           wb_valid, wb_ready, wb_last;
  logic [31:0]    wb_items [K];
  logic [31:0]    wb_w     [K];
  ctx_t           wb_ctx;
  // sampler -> scheduler
  logic           sm_valid, sm_ready;
  sample_t        sm;

  query_scheduler #(.MAX_INFLIGHT(MAX_INFLIGHT)) u_sched (
    .clk, .rst_n, .start, .num_queries, .query_len, .query_base, .result_base, .done,
    .q_req_valid, .q_req_ready, .q_req_addr, .q_req_len,
    .q_resp_valid, .q_resp_ready, .q_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .step_valid(st_valid), .step_ready(st_ready), .step_ctx(st_ctx),
    .smp_valid(sm_valid), .smp_ready(sm_ready), .smp(sm),
    .n_steps, .n_dead_ends
  );

  neighbor_info_loader #(.LINES(CACHE_LINES)) u_nil (
    .clk, .rst_n, .row_base,
    .in_valid(st_valid), .in_ready(st_ready), .in_ctx(st_ctx),
    .info_valid(ni_valid), .info_ready(ni_ready), .info(ni),
    .ctx_valid(nc_valid), .ctx_ready(nc_ready), .ctx_out(nc),
    .rd_req_valid(r_req_valid), .rd_req_ready(r_req_ready), .rd_req_addr(r_req_addr),
    .rd_req_len(r_req_len), .rd_resp_valid(r_resp_valid), .rd_resp_ready(r_resp_ready),
    .rd_resp_data(r_resp_data),
    .n_hit(n_cache_hit), .n_miss(n_cache_miss), .n_replace(n_cache_replace)
  );

  sync_fifo #(.WIDTH(CTX_W), .DEPTH(32)) u_ctxq (
    .clk, .rst_n,
    .in_valid(nc_valid), .in_ready(nc_ready), .in_data(nc),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq), .count()
  );

  dynamic_burst_engine #(.K(K), .S1(S1), .S2(S2)) u_dbe (
    .clk, .rst_n, .col_base,
    .in_valid(ni_valid), .in_ready(ni_ready), .in_info(ni),
    .l_req_valid, .l_req_ready, .l_req_addr, .l_req_len,
    .l_resp_valid, .l_resp_ready, .l_resp_data,
    .s_req_valid, .s_req_ready, .s_req_addr, .s_req_len,
    .s_resp_valid, .s_resp_ready, .s_resp_data,
    .out_valid(nb_valid), .out_ready(nb_ready), .out_items(nb_items), .out_mask(nb_mask),
    .out_last(nb_last), .n_long(n_long_burst), .n_short(n_short_burst)
  );

  weight_updater #(.K(K), .APP(APP)) u_wu (
    .clk, .rst_n, .rel_path,
    .in_valid(nb_valid), .in_ready(nb_ready), .in_items(nb_items), .in_mask(nb_mask),
    .in_last(nb_last), .prev_adj(n2v_prev_adj),
    .ctx_valid(cq_valid), .ctx_ready(cq_ready), .ctx(cq),
    .out_valid(wb_valid), .out_ready(wb_ready), .out_items(wb_items), .out_w(wb_w),
    .out_last(wb_last), .out_ctx(wb_ctx)
  );

  wrs_sampler #(.K(K), .W_W(32), .SUM_W(32), .SEED(SEED)) u_wrs (
    .clk, .rst_n,
    .in_valid(wb_valid), .in_ready(wb_ready), .in_items(wb_items), .in_w(wb_w),
    .in_last(wb_last), .in_ctx(wb_ctx),
    .out_valid(sm_valid), .out_ready(sm_ready), .out_sample(sm)
  );

endmodule
