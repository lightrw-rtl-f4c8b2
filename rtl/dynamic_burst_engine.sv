// dynamic_burst_engine: the neighbor loader, streaming a vertex's neighbors K per beat.
//
// Built as in the paper from a burst command generator, a long-burst pipeline
// (S1 = 32 beats), a short-burst pipeline (S2 = 1 beat) and an intra burst merge.  The
// bulk of a long neighbor list is read with long bursts, which reach high DRAM
// bandwidth; the tail, and short lists, are read with short bursts, which waste little
// data.  The two pipelines have memory ports of their own (toward a memory crossbar that
// is not part of this design).
//
// Input: {address, degree} valid/ready.  Output: beats {items[K], mask, last},
// valid/ready, in col_index order, exactly one `last` per input.  Counters give the
// number of long and short bursts issued.
module dynamic_burst_engine #(
  parameter int K  = 16,
  parameter int S1 = 32,
  parameter int S2 = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [31:0]         col_base,
  input  logic                in_valid,
  output logic                in_ready,
  input  lightrw_pkg::ninfo_t in_info,
  // long burst memory port
  output logic                l_req_valid,
  input  logic                l_req_ready,
  output logic [31:0]         l_req_addr,
  output logic [7:0]          l_req_len,
  input  logic                l_resp_valid,
  output logic                l_resp_ready,
  input  logic [511:0]        l_resp_data,
  // short burst memory port
  output logic                s_req_valid,
  input  logic                s_req_ready,
  output logic [31:0]         s_req_addr,
  output logic [7:0]          s_req_len,
  input  logic                s_resp_valid,
  output logic                s_resp_ready,
  input  logic [511:0]        s_resp_data,
  // neighbor beats
  output logic                out_valid,
  input  logic                out_ready,
  output logic [31:0]         out_items [K],
  output logic [K-1:0]        out_mask,
  output logic                out_last,
  output logic [31:0]         n_long,
  output logic [31:0]         n_short
);
  import lightrw_pkg::*;

  logic        lc_valid, lc_ready, sc_valid, sc_ready;
  logic [31:0] lc_line, sc_line;
  logic        g_ord_valid, g_ord_ready, m_ord_valid, m_ord_ready;
  burst_ord_t  g_ord, m_ord;
  logic        ld_valid, ld_ready, sd_valid, sd_ready;
  logic [511:0] ld_data, sd_data;

  burst_cmd_generator #(.K(K), .S1(S1), .S2(S2)) u_gen (
    .clk, .rst_n, .in_valid, .in_ready, .in_info,
    .long_valid(lc_valid), .long_ready(lc_ready), .long_line(lc_line),
    .short_valid(sc_valid), .short_ready(sc_ready), .short_line(sc_line),
    .ord_valid(g_ord_valid), .ord_ready(g_ord_ready), .ord(g_ord),
    .n_long, .n_short
  );

  sync_fifo #(.WIDTH($bits(burst_ord_t)), .DEPTH(16)) u_ordq (
    .clk, .rst_n,
    .in_valid(g_ord_valid), .in_ready(g_ord_ready), .in_data(g_ord),
    .out_valid(m_ord_valid), .out_ready(m_ord_ready), .out_data(m_ord), .count()
  );

  burst_channel #(.BURST(S1), .DATA_DEPTH(2*S1)) u_long (
    .clk, .rst_n, .col_base,
    .cmd_valid(lc_valid), .cmd_ready(lc_ready), .cmd_line(lc_line),
    .rd_req_valid(l_req_valid), .rd_req_ready(l_req_ready), .rd_req_addr(l_req_addr),
    .rd_req_len(l_req_len), .rd_resp_valid(l_resp_valid), .rd_resp_ready(l_resp_ready),
    .rd_resp_data(l_resp_data),
    .out_valid(ld_valid), .out_ready(ld_ready), .out_data(ld_data)
  );

  burst_channel #(.BURST(S2), .DATA_DEPTH((2*S2 < 8) ? 8 : 2*S2)) u_short (
    .clk, .rst_n, .col_base,
    .cmd_valid(sc_valid), .cmd_ready(sc_ready), .cmd_line(sc_line),
    .rd_req_valid(s_req_valid), .rd_req_ready(s_req_ready), .rd_req_addr(s_req_addr),
    .rd_req_len(s_req_len), .rd_resp_valid(s_resp_valid), .rd_resp_ready(s_resp_ready),
    .rd_resp_data(s_resp_data),
    .out_valid(sd_valid), .out_ready(sd_ready), .out_data(sd_data)
  );

  intra_burst_merge #(.K(K)) u_merge (
    .clk, .rst_n,
    .ord_valid(m_ord_valid), .ord_ready(m_ord_ready), .ord(m_ord),
    .long_valid(ld_valid), .long_ready(ld_ready), .long_data(ld_data),
    .short_valid(sd_valid), .short_ready(sd_ready), .short_data(sd_data),
    .out_valid, .out_ready, .out_items, .out_mask, .out_last
  );

endmodule
