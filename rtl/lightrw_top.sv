// lightrw_top: the LightRW accelerator as deployed on a four-channel FPGA card.
//
// NUM_INST independent LightRW pipelines (default 4), one per DRAM channel.  Each holds
// a private copy of the graph in its channel and serves its own share of the queries;
// the host splits the queries evenly and programs every instance's base addresses.  The
// instances share nothing but the clock and reset, so every port of lightrw_instance is
// repeated here as an array indexed by instance.  The memory crossbar and the DRAM
// controllers sit outside; each instance's five memory ports are brought out.
// Each instance gets its own random seed so that the walks of different instances are
// independent.
module lightrw_top #(
  parameter int NUM_INST = 4,
  parameter int K        = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start        [NUM_INST],
  input  logic [31:0]  num_queries  [NUM_INST],
  input  logic [7:0]   query_len,
  input  logic [31:0]  query_base   [NUM_INST],
  input  logic [31:0]  result_base  [NUM_INST],
  input  logic [31:0]  row_base     [NUM_INST],
  input  logic [31:0]  col_base     [NUM_INST],
  input  logic [lightrw_pkg::REL_W-1:0] rel_path [lightrw_pkg::MAX_PATH],
  output logic         done         [NUM_INST],
  output logic         q_req_valid  [NUM_INST],
  input  logic         q_req_ready  [NUM_INST],
  output logic [31:0]  q_req_addr   [NUM_INST],
  output logic [7:0]   q_req_len    [NUM_INST],
  input  logic         q_resp_valid [NUM_INST],
  output logic         q_resp_ready [NUM_INST],
  input  logic [511:0] q_resp_data  [NUM_INST],
  output logic         wr_valid     [NUM_INST],
  input  logic         wr_ready     [NUM_INST],
  output logic [31:0]  wr_addr      [NUM_INST],
  output logic [31:0]  wr_data      [NUM_INST],
  output logic         r_req_valid  [NUM_INST],
  input  logic         r_req_ready  [NUM_INST],
  output logic [31:0]  r_req_addr   [NUM_INST],
  output logic [7:0]   r_req_len    [NUM_INST],
  input  logic         r_resp_valid [NUM_INST],
  output logic         r_resp_ready [NUM_INST],
  input  logic [511:0] r_resp_data  [NUM_INST],
  output logic         l_req_valid  [NUM_INST],
  input  logic         l_req_ready  [NUM_INST],
  output logic [31:0]  l_req_addr   [NUM_INST],
  output logic [7:0]   l_req_len    [NUM_INST],
  input  logic         l_resp_valid [NUM_INST],
  output logic         l_resp_ready [NUM_INST],
  input  logic [511:0] l_resp_data  [NUM_INST],
  output logic         s_req_valid  [NUM_INST],
  input  logic         s_req_ready  [NUM_INST],
  output logic [31:0]  s_req_addr   [NUM_INST],
  output logic [7:0]   s_req_len    [NUM_INST],
  input  logic         s_resp_valid [NUM_INST],
  output logic         s_resp_ready [NUM_INST],
  input  logic [511:0] s_resp_data  [NUM_INST],
  input  logic [K-1:0] n2v_prev_adj [NUM_INST],
  output logic [31:0]  n_steps      [NUM_INST],
  output logic [31:0]  n_dead_ends  [NUM_INST],
  output logic [31:0]  n_cache_hit  [NUM_INST],
  output logic [31:0]  n_cache_miss [NUM_INST],
  output logic [31:0]  n_cache_replace [NUM_INST],
  output logic [31:0]  n_long_burst [NUM_INST],
  output logic [31:0]  n_short_burst [NUM_INST]
);
  for (genvar i = 0; i < NUM_INST; i++) begin : g_inst
    lightrw_instance #(.K(K), .SEED(64'd1 + 64'(i) * 64'h9E37_79B9_7F4A_7C15)) u_inst (
      .clk, .rst_n,
      .start(start[i]), .num_queries(num_queries[i]), .query_len,
      .query_base(query_base[i]), .result_base(result_base[i]),
      .row_base(row_base[i]), .col_base(col_base[i]), .rel_path, .done(done[i]),
      .q_req_valid(q_req_valid[i]), .q_req_ready(q_req_ready[i]), .q_req_addr(q_req_addr[i]),
      .q_req_len(q_req_len[i]), .q_resp_valid(q_resp_valid[i]), .q_resp_ready(q_resp_ready[i]),
      .q_resp_data(q_resp_data[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i]),
      .r_req_valid(r_req_valid[i]), .r_req_ready(r_req_ready[i]), .r_req_addr(r_req_addr[i]),
      .r_req_len(r_req_len[i]), .r_resp_valid(r_resp_valid[i]), .r_resp_ready(r_resp_ready[i]),
      .r_resp_data(r_resp_data[i]),
      .l_req_valid(l_req_valid[i]), .l_req_ready(l_req_ready[i]), .l_req_addr(l_req_addr[i]),
      .l_req_len(l_req_len[i]), .l_resp_valid(l_resp_valid[i]), .l_resp_ready(l_resp_ready[i]),
      .l_resp_data(l_resp_data[i]),
      .s_req_valid(s_req_valid[i]), .s_req_ready(s_req_ready[i]), .s_req_addr(s_req_addr[i]),
      .s_req_len(s_req_len[i]), .s_resp_valid(s_resp_valid[i]), .s_resp_ready(s_resp_ready[i]),
      .s_resp_data(s_resp_data[i]),
      .n2v_prev_adj(n2v_prev_adj[i]),
      .n_steps(n_steps[i]), .n_dead_ends(n_dead_ends[i]),
      .n_cache_hit(n_cache_hit[i]), .n_cache_miss(n_cache_miss[i]),
      .n_cache_replace(n_cache_replace[i]),
      .n_long_burst(n_long_burst[i]), .n_short_burst(n_short_burst[i])
    );
  end
endmodule
