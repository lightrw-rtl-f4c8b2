// tb_lightrw_top: end-to-end test of the four-instance LightRW accelerator at its default
// parameters (K = 16, 4096-line degree-aware cache, bursts of 32 and 1 beats).
//
// The testbench builds a random graph with a power-law-like degree mix (a few vertices of
// 600..1000 neighbors, vertices without neighbors, many small ones with edges pointing
// mostly at a hot set), stores it in CSR form in a behavioural DRAM model per instance
// (each instance has a private copy, as on the card), gives every instance its own set
// of queries and runs MetaPath walks of QLEN steps.  Afterwards it checks every result
// word against the graph, independently of the design:
//   * a step's vertex is a neighbor of the previous vertex whose edge carries the relation
//     required at that step and a non-zero weight;
//   * a 0xFFFFFFFF marks a real dead end (no such neighbor), and nothing follows it.
// It also checks that each mechanism of the design happened at least once: cache hits,
// misses, replacements, misses that kept the old line, long and short bursts, empty
// neighbor lists, dead ends and write back-pressure.
module tb_lightrw_top;
  import lightrw_pkg::*;

  localparam int NI     = 4;
  localparam int K      = 16;
  localparam int NV     = 5000;
  localparam int NQ     = 48;      // queries per instance
  localparam int QLEN   = 5;
  localparam int DEPTH  = 8192;
  localparam int Q_BASE = 0;
  localparam int R_BASE = 64;
  localparam int C_BASE = 1024;
  localparam int RES_LINE = 7600;
  localparam int MAXE   = (RES_LINE - C_BASE) * 16;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset

  int checks = 0, failures = 0;

  // graph held by the testbench
  int unsigned deg [NV];
  int unsigned off [NV];
  logic [31:0] edges [MAXE];
  int unsigned n_edges;
  logic [31:0] starts [NI][NQ];
  logic [REL_W-1:0] rel_path [MAX_PATH];

  // DUT wiring
  logic         start [NI];
  logic [31:0]  num_queries [NI], query_base [NI], result_base [NI], row_base [NI], col_base [NI];
  logic         done [NI];
  logic         rq_valid [NI][4], rq_ready [NI][4], rs_valid [NI][4], rs_ready [NI][4];
  logic [31:0]  rq_addr [NI][4];
  logic [7:0]   rq_len [NI][4];
  logic [511:0] rs_data [NI][4];
  logic         wr_valid [NI], wr_ready [NI];
  logic [31:0]  wr_addr [NI], wr_data [NI];
  logic [K-1:0] adj [NI];
  logic [31:0]  n_steps [NI], n_dead [NI], n_hit [NI], n_miss [NI], n_repl [NI], n_long [NI], n_short [NI];

  // flattened port views for the DUT (port order: 0 query, 1 row, 2 long, 3 short)
  logic q_req_valid[NI], q_req_ready[NI], q_resp_valid[NI], q_resp_ready[NI];
  logic r_req_valid[NI], r_req_ready[NI], r_resp_valid[NI], r_resp_ready[NI];
  logic l_req_valid[NI], l_req_ready[NI], l_resp_valid[NI], l_resp_ready[NI];
  logic s_req_valid[NI], s_req_ready[NI], s_resp_valid[NI], s_resp_ready[NI];
  logic [31:0] q_req_addr[NI], r_req_addr[NI], l_req_addr[NI], s_req_addr[NI];
  logic [7:0]  q_req_len[NI], r_req_len[NI], l_req_len[NI], s_req_len[NI];
  logic [511:0] q_resp_data[NI], r_resp_data[NI], l_resp_data[NI], s_resp_data[NI];

  lightrw_top dut (
    .clk, .rst_n, .start, .num_queries, .query_len(8'(QLEN)), .query_base, .result_base,
    .row_base, .col_base, .rel_path, .done,
    .q_req_valid, .q_req_ready, .q_req_addr, .q_req_len, .q_resp_valid, .q_resp_ready, .q_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .r_req_valid, .r_req_ready, .r_req_addr, .r_req_len, .r_resp_valid, .r_resp_ready, .r_resp_data,
    .l_req_valid, .l_req_ready, .l_req_addr, .l_req_len, .l_resp_valid, .l_resp_ready, .l_resp_data,
    .s_req_valid, .s_req_ready, .s_req_addr, .s_req_len, .s_resp_valid, .s_resp_ready, .s_resp_data,
    .n2v_prev_adj(adj), .n_steps, .n_dead_ends(n_dead), .n_cache_hit(n_hit), .n_cache_miss(n_miss),
    .n_cache_replace(n_repl), .n_long_burst(n_long), .n_short_burst(n_short)
  );

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      rq_valid[i][0] = q_req_valid[i]; rq_addr[i][0] = q_req_addr[i]; rq_len[i][0] = q_req_len[i];
      rq_valid[i][1] = r_req_valid[i]; rq_addr[i][1] = r_req_addr[i]; rq_len[i][1] = r_req_len[i];
      rq_valid[i][2] = l_req_valid[i]; rq_addr[i][2] = l_req_addr[i]; rq_len[i][2] = l_req_len[i];
      rq_valid[i][3] = s_req_valid[i]; rq_addr[i][3] = s_req_addr[i]; rq_len[i][3] = s_req_len[i];
      q_req_ready[i] = rq_ready[i][0]; r_req_ready[i] = rq_ready[i][1];
      l_req_ready[i] = rq_ready[i][2]; s_req_ready[i] = rq_ready[i][3];
      q_resp_valid[i] = rs_valid[i][0]; r_resp_valid[i] = rs_valid[i][1];
      l_resp_valid[i] = rs_valid[i][2]; s_resp_valid[i] = rs_valid[i][3];
      q_resp_data[i] = rs_data[i][0]; r_resp_data[i] = rs_data[i][1];
      l_resp_data[i] = rs_data[i][2]; s_resp_data[i] = rs_data[i][3];
      rs_ready[i][0] = q_resp_ready[i]; rs_ready[i][1] = r_resp_ready[i];
      rs_ready[i][2] = l_resp_ready[i]; rs_ready[i][3] = s_resp_ready[i];
      adj[i] = '0;
    end
  end

  int unsigned wr_stall = 0;
  always @(posedge clk) for (int i = 0; i < NI; i++) if (wr_valid[i] && !wr_ready[i]) wr_stall++;

  logic loaded = 0;
  logic [511:0] line_img [DEPTH];

  for (genvar i = 0; i < NI; i++) begin : g_mem
    dram_model #(.DEPTH(DEPTH), .NRD(4)) u_dram (
      .clk, .rd_req_valid(rq_valid[i]), .rd_req_ready(rq_ready[i]), .rd_req_addr(rq_addr[i]),
      .rd_req_len(rq_len[i]), .rd_resp_valid(rs_valid[i]), .rd_resp_ready(rs_ready[i]),
      .rd_resp_data(rs_data[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i])
    );
    initial begin
      wait (loaded);
      for (int l = 0; l < DEPTH; l++) u_dram.mem[l] = line_img[l];
      for (int q = 0; q < NQ; q++) u_dram.mem[Q_BASE + q / 16][32*(q%16) +: 32] = starts[i][q];
    end
  end

  function automatic logic [31:0] res_word(int inst, int waddr);
    case (inst)
      0: return g_mem[0].u_dram.mem[waddr / 16][32*(waddr%16) +: 32];
      1: return g_mem[1].u_dram.mem[waddr / 16][32*(waddr%16) +: 32];
      2: return g_mem[2].u_dram.mem[waddr / 16][32*(waddr%16) +: 32];
      default: return g_mem[3].u_dram.mem[waddr / 16][32*(waddr%16) +: 32];
    endcase
  endfunction

  // does vertex u have an edge to v with relation rel and non-zero weight?
  function automatic bit good_edge(int u, logic [31:0] v, int rel);
    for (int e = 0; e < int'(deg[u]); e++) begin
      logic [31:0] w = edges[off[u] + e];
      if (32'(w[VID_W-1:0]) == v && int'(w[27:25]) == rel && w[31:28] != 0) return 1;
    end
    return 0;
  endfunction

  function automatic bit any_edge(int u, int rel);
    for (int e = 0; e < int'(deg[u]); e++) begin
      logic [31:0] w = edges[off[u] + e];
      if (int'(w[27:25]) == rel && w[31:28] != 0) return 1;
    end
    return 0;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic mech(string name, longint n);
    checks++;
    $display("mechanism %-28s : %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism %s never happened", name); end
  endtask

  initial begin
    longint cyc;
    // ---- build the graph ----
    n_edges = 0;
    for (int v = 0; v < NV; v++) begin
      if (v % 13 == 5)      deg[v] = 0;
      else if (v % 997 == 3) deg[v] = 600 + 100 * ((v / 997) % 5);
      else                  deg[v] = 1 + $urandom_range(11);
      off[v] = n_edges + (v % 7);            // unaligned lists
      n_edges = off[v] + deg[v];
    end
    if (n_edges > MAXE) $fatal(1, "graph too large");
    for (int v = 0; v < NV; v++)
      for (int e = 0; e < int'(deg[v]); e++) begin
        int unsigned dst;
        dst = ($urandom_range(9) < 4) ? $urandom_range(63) : $urandom_range(NV - 1);
        if ($urandom_range(19) == 0) dst = 3 + 997 * $urandom_range(4);
        edges[off[v] + e] = {4'($urandom_range(15)), 3'($urandom_range(1)), 25'(dst)};
      end
    for (int s = 0; s < MAX_PATH; s++) rel_path[s] = REL_W'(s % 2);
    for (int l = 0; l < DEPTH; l++) line_img[l] = '0;
    for (int v = 0; v < NV; v++) line_img[R_BASE + v / 8][64*(v%8) +: 64] = {32'(deg[v]), 32'(off[v])};
    for (int e = 0; e < int'(n_edges); e++) line_img[C_BASE + e / 16][32*(e%16) +: 32] = edges[e];
    for (int w = 0; w < NQ * QLEN; w++) line_img[RES_LINE + w / 16][32*(w%16) +: 32] = 32'hDEAD_BEEF;
    for (int i = 0; i < NI; i++)
      for (int q = 0; q < NQ; q++)
        starts[i][q] = (q % 4 == 0) ? 32'(3 + 997 * ((q / 4) % 5)) : 32'($urandom_range(NV - 1));
    starts[0][1] = 32'd5;   // a start vertex without neighbors
    for (int i = 0; i < NI; i++) begin
      start[i] = 0; num_queries[i] = NQ; query_base[i] = Q_BASE; result_base[i] = RES_LINE * 16;
      row_base[i] = R_BASE; col_base[i] = C_BASE;
    end
    loaded = 1;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < NI; i++) start[i] = 1;
    @(posedge clk);
    for (int i = 0; i < NI; i++) start[i] = 0;
    cyc = 0;
    while (!(done[0] && done[1] && done[2] && done[3])) begin @(posedge clk); cyc++; end
    repeat (4) @(posedge clk);
    $display("all instances done after %0d cycles", cyc);

    // ---- check every walk ----
    for (int i = 0; i < NI; i++)
      for (int q = 0; q < NQ; q++) begin
        logic [31:0] prev;
        bit ended;
        prev = starts[i][q];
        ended = 0;
        for (int s = 0; s < QLEN; s++) begin
          logic [31:0] v;
          v = res_word(i, RES_LINE * 16 + q * QLEN + s);
          if (ended) begin
            check(v == 32'hDEAD_BEEF, $sformatf("inst %0d q %0d step %0d written after end", i, q, s));
          end else if (v == NO_VERTEX) begin
            check(!any_edge(int'(prev), s % 2), $sformatf("inst %0d q %0d step %0d false dead end at %0d", i, q, s, prev));
            ended = 1;
          end else begin
            check(v < NV && good_edge(int'(prev), v, s % 2),
                  $sformatf("inst %0d q %0d step %0d: %0d -> %0d not a valid edge", i, q, s, prev, v));
            prev = v;
          end
        end
      end
    begin
      longint st = 0, dd = 0, h = 0, m = 0, r = 0, lb = 0, sb = 0;
      for (int i = 0; i < NI; i++) begin
        st += n_steps[i]; dd += n_dead[i]; h += n_hit[i]; m += n_miss[i]; r += n_repl[i];
        lb += n_long[i]; sb += n_short[i];
      end
      mech("steps sampled", st);
      mech("dead ends", dd);
      mech("cache hits", h);
      mech("cache misses", m);
      mech("cache line replacements", r);
      mech("misses keeping old line", m - r);
      mech("long bursts", lb);
      mech("short bursts", sb);
      mech("empty neighbor lists (inst 0)", n_empty);
      mech("result write back-pressure", wr_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count degree-0 vertices sent through the burst engine
  longint n_empty = 0;
  always @(posedge clk)
      if (dut.g_inst[0].u_inst.u_dbe.in_valid && dut.g_inst[0].u_inst.u_dbe.in_ready
          && dut.g_inst[0].u_inst.u_dbe.in_info.deg == 0) n_empty++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
