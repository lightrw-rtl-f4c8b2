// tb_lightrw_instance: one LightRW instance built for Node2Vec (p = 2, q = 0.5) with a
// small 64-line cache, running 256 walks of 80 steps (the query length used for
// Node2Vec) on a random graph in a behavioural DRAM.  The testbench supplies the
// adjacency bits of each neighbor beat itself: for every lane of the beat entering
// the weight updater it looks up, in its own copy of the graph, whether the candidate
// is a neighbor of the query's previous vertex.
// Checks, independently of the design:
//   * every result vertex is a neighbor of the previous one over an edge with non-zero
//     weight; a dead-end marker appears only when no such edge exists, and nothing
//     follows it;
//   * the second-order bias: 160 walks start at vertex A, whose heavy edge leads to B;
//     B's neighbors are A (return), C (also a neighbor of A) and D (not a neighbor of A),
//     all with weight 8.  Node2Vec gives them 1/p : 1 : 1/q = 1 : 2 : 4, so the second
//     step out of A->B must pick A, C, D about 1/7, 2/7, 4/7 of the time.
module tb_lightrw_instance;
  import lightrw_pkg::*;
  localparam int K = 16, NV = 400, NQ = 256, QLEN = 80;
  localparam int R_BASE = 64, C_BASE = 128, RES_LINE = 1024, DEPTH = 2560;
  localparam int MAXE = (RES_LINE - C_BASE) * 16;
  localparam int VA = 1, VB = 2, VC = 3, VD = 4;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  int unsigned deg [NV], off [NV], n_edges;
  logic [31:0] edges [MAXE];
  logic [31:0] starts [NQ];
  logic [REL_W-1:0] rel_path [MAX_PATH];

  logic start, done;
  logic rqv [4], rqr [4], rsv [4], rsr [4];
  logic [31:0] rqa [4];
  logic [7:0] rql [4];
  logic [511:0] rsd [4];
  logic wv, wrdy;
  logic [31:0] wa, wd;
  logic [K-1:0] adj;
  logic [31:0] n_steps, n_dead, n_hit, n_miss, n_repl, n_long, n_short;

  lightrw_instance #(.APP(APP_NODE2VEC), .CACHE_LINES(64), .SEED(64'd77)) dut (
    .clk, .rst_n, .start, .num_queries(32'(NQ)), .query_len(8'(QLEN)), .query_base(32'd0),
    .result_base(32'(RES_LINE * 16)), .row_base(32'(R_BASE)), .col_base(32'(C_BASE)), .rel_path, .done,
    .q_req_valid(rqv[0]), .q_req_ready(rqr[0]), .q_req_addr(rqa[0]), .q_req_len(rql[0]),
    .q_resp_valid(rsv[0]), .q_resp_ready(rsr[0]), .q_resp_data(rsd[0]),
    .wr_valid(wv), .wr_ready(wrdy), .wr_addr(wa), .wr_data(wd),
    .r_req_valid(rqv[1]), .r_req_ready(rqr[1]), .r_req_addr(rqa[1]), .r_req_len(rql[1]),
    .r_resp_valid(rsv[1]), .r_resp_ready(rsr[1]), .r_resp_data(rsd[1]),
    .l_req_valid(rqv[2]), .l_req_ready(rqr[2]), .l_req_addr(rqa[2]), .l_req_len(rql[2]),
    .l_resp_valid(rsv[2]), .l_resp_ready(rsr[2]), .l_resp_data(rsd[2]),
    .s_req_valid(rqv[3]), .s_req_ready(rqr[3]), .s_req_addr(rqa[3]), .s_req_len(rql[3]),
    .s_resp_valid(rsv[3]), .s_resp_ready(rsr[3]), .s_resp_data(rsd[3]),
    .n2v_prev_adj(adj), .n_steps, .n_dead_ends(n_dead), .n_cache_hit(n_hit), .n_cache_miss(n_miss),
    .n_cache_replace(n_repl), .n_long_burst(n_long), .n_short_burst(n_short));

  dram_model #(.DEPTH(DEPTH), .NRD(4)) mem (.clk, .rd_req_valid(rqv), .rd_req_ready(rqr),
    .rd_req_addr(rqa), .rd_req_len(rql), .rd_resp_valid(rsv), .rd_resp_ready(rsr), .rd_resp_data(rsd),
    .wr_valid(wv), .wr_ready(wrdy), .wr_addr(wa), .wr_data(wd));

  function automatic bit has_edge(int u, logic [31:0] v, bit need_w);
    if (u < 0 || u >= NV) return 0;
    for (int e = 0; e < int'(deg[u]); e++) begin
      logic [31:0] w = edges[off[u] + e];
      if (32'(w[VID_W-1:0]) == v && (!need_w || w[31:28] != 0)) return 1;
    end
    return 0;
  endfunction

  function automatic bit any_weight(int u);
    for (int e = 0; e < int'(deg[u]); e++) if (edges[off[u] + e][31:28] != 0) return 1;
    return 0;
  endfunction

  // adjacency of the beat at the weight updater's input to the query's previous vertex
  always_comb
    for (int j = 0; j < K; j++)
      adj[j] = has_edge(int'(dut.u_wu.ctx.v_prev), 32'(dut.u_wu.in_items[j][VID_W-1:0]), 0);

  task automatic add_edge(int u, int v, int w);
    edges[off[u] + deg[u]] = {4'(w), 3'd0, 25'(v)};
    deg[u]++;
  endtask

  initial begin
    int cnt [3];
    cnt = '{0, 0, 0};
    for (int s = 0; s < MAX_PATH; s++) rel_path[s] = '0;
    // hand-made part for the bias check, then a random graph
    n_edges = 0;
    for (int v = 0; v < NV; v++) begin
      off[v] = n_edges; deg[v] = 0;
      if (v == VA) begin add_edge(VA, VB, 15); add_edge(VA, VC, 1); end
      else if (v == VB) begin add_edge(VB, VA, 8); add_edge(VB, VC, 8); add_edge(VB, VD, 8); end
      else if (v == VC || v == VD) add_edge(v, VA, 5);
      else if (v % 11 == 7) ;                                  // no neighbors
      else begin
        int d;
        d = (v % 50 == 9) ? 520 + $urandom_range(200) : 1 + $urandom_range(9);
        for (int e = 0; e < d; e++)
          add_edge(v, ($urandom_range(2) == 0) ? 10 + $urandom_range(20) : $urandom_range(NV - 1),
                   ($urandom_range(7) == 0) ? 0 : $urandom_range(15));
      end
      n_edges = off[v] + deg[v];
    end
    for (int v = 0; v < NV; v++) mem.mem[R_BASE + v / 8][64*(v%8) +: 64] = {32'(deg[v]), 32'(off[v])};
    for (int e = 0; e < int'(n_edges); e++) mem.mem[C_BASE + e / 16][32*(e%16) +: 32] = edges[e];
    for (int w = 0; w < NQ * QLEN; w++) mem.mem[RES_LINE + w / 16][32*(w%16) +: 32] = 32'hDEAD_BEEF;
    for (int q = 0; q < NQ; q++) begin
      starts[q] = (q < 160) ? 32'(VA) : 32'($urandom_range(NV - 1));
      mem.mem[q / 16][32*(q%16) +: 32] = starts[q];
    end
    start = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    repeat (4) @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      logic [31:0] prev, v;
      bit ended;
      prev = starts[q]; ended = 0;
      for (int s = 0; s < QLEN; s++) begin
        v = mem.mem[RES_LINE + (q * QLEN + s) / 16][32*((q * QLEN + s) % 16) +: 32];
        if (ended) check(v == 32'hDEAD_BEEF, $sformatf("q %0d step %0d written after end", q, s));
        else if (v == NO_VERTEX) begin
          check(!any_weight(int'(prev)), $sformatf("q %0d step %0d false dead end at %0d", q, s, prev));
          ended = 1;
        end else begin
          check(has_edge(int'(prev), v, 1), $sformatf("q %0d step %0d: %0d -> %0d not an edge", q, s, prev, v));
          if (s == 1 && q < 160 && prev == VB) begin
            if (v == VA) cnt[0]++; else if (v == VC) cnt[1]++; else if (v == VD) cnt[2]++;
          end
          prev = v;
        end
      end
    end
    begin
      int tot;
      tot = cnt[0] + cnt[1] + cnt[2];
      $display("after A->B: back to A %0d, to C %0d, to D %0d (of %0d)", cnt[0], cnt[1], cnt[2], tot);
      check(tot > 120, "enough A->B walks");
      check(cnt[0] > 0 && real'(cnt[0]) < real'(tot) * 2.5 / 7.0, "return share near 1/7");
      check(real'(cnt[1]) > real'(tot) * 1.2 / 7.0 && real'(cnt[1]) < real'(tot) * 3.0 / 7.0, "share of C near 2/7");
      check(real'(cnt[2]) > real'(tot) * 3.2 / 7.0 && real'(cnt[2]) < real'(tot) * 4.8 / 7.0, "share of D near 4/7");
    end
    $display("steps %0d dead ends %0d hits %0d misses %0d replacements %0d long %0d short %0d",
             n_steps, n_dead, n_hit, n_miss, n_repl, n_long, n_short);
    check(n_dead > 0 && n_long > 0 && n_short > 0 && n_repl > 0 && n_hit > 0, "mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
