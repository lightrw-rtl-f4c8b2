// tb_weight_updater: checks both weight functions on random beats.
// A MetaPath instance and a Node2Vec instance see the same random edge words, masks,
// contexts and adjacency bits; expected weights are computed here from the equations
// (MetaPath: w* if relation == R[step] else 0; Node2Vec with p = 2, q = 0.5, scaled by 2:
// previous vertex -> w*, adjacent to previous -> 2w*, otherwise 4w*, first step -> 2w*),
// masked lanes 0.  Also checks that the context is released only with `last`.
module tb_weight_updater;
  import lightrw_pkg::*;
  localparam int K = 16;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic [REL_W-1:0] rel_path [MAX_PATH];
  logic iv, last, cv;
  logic [31:0] items [K];
  logic [K-1:0] mask, adj;
  ctx_t ctx;
  logic m_ir, m_cr, m_ov, m_ol, n_ir, n_cr, n_ov, n_ol;
  logic [31:0] m_items [K], m_w [K], n_items [K], n_w [K];
  ctx_t m_ctx, n_ctx;

  weight_updater #(.K(K), .APP(APP_METAPATH)) u_mp (.clk, .rst_n, .rel_path, .in_valid(iv), .in_ready(m_ir),
    .in_items(items), .in_mask(mask), .in_last(last), .prev_adj(adj), .ctx_valid(cv), .ctx_ready(m_cr),
    .ctx, .out_valid(m_ov), .out_ready(1'b1), .out_items(m_items), .out_w(m_w), .out_last(m_ol), .out_ctx(m_ctx));
  weight_updater #(.K(K), .APP(APP_NODE2VEC)) u_nv (.clk, .rst_n, .rel_path, .in_valid(iv), .in_ready(n_ir),
    .in_items(items), .in_mask(mask), .in_last(last), .prev_adj(adj), .ctx_valid(cv), .ctx_ready(n_cr),
    .ctx, .out_valid(n_ov), .out_ready(1'b1), .out_items(n_items), .out_w(n_w), .out_last(n_ol), .out_ctx(n_ctx));

  initial begin
    int nz_mp, nz_cases [3];
    nz_mp = 0; nz_cases = '{0, 0, 0};
    for (int s = 0; s < MAX_PATH; s++) rel_path[s] = REL_W'($urandom_range(7));
    iv = 0; cv = 0; last = 0; mask = 0; adj = 0; ctx = '0;
    for (int j = 0; j < K; j++) items[j] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      int unsigned mp_exp [K], nv_exp [K];
      ctx = '0;
      ctx.qid = 32'(n); ctx.step = 8'($urandom_range(15)); ctx.len = 8'd20;
      ctx.v_curr = $urandom_range(1000);
      ctx.v_prev = (ctx.step == 0) ? NO_VERTEX : 32'($urandom_range(1000));
      last = ($urandom_range(2) == 0);
      mask = 16'($urandom);
      adj  = 16'($urandom);
      for (int j = 0; j < K; j++) begin
        int unsigned v, w, rl;
        v  = ($urandom_range(4) == 0 && ctx.v_prev != NO_VERTEX) ? ctx.v_prev : $urandom_range(1000);
        w  = $urandom_range(15);
        rl = ($urandom_range(1) == 0) ? int'(rel_path[ctx.step[3:0]]) : $urandom_range(7);
        items[j] = {4'(w), 3'(rl), 25'(v)};
        mp_exp[j] = (mask[j] && rl == int'(rel_path[ctx.step[3:0]])) ? w : 0;
        if (!mask[j]) nv_exp[j] = 0;
        else if (ctx.v_prev == NO_VERTEX) nv_exp[j] = 2 * w;
        else if (v == ctx.v_prev) begin nv_exp[j] = w; nz_cases[0]++; end
        else if (adj[j]) begin nv_exp[j] = 2 * w; nz_cases[1]++; end
        else begin nv_exp[j] = 4 * w; nz_cases[2]++; end
        if (mp_exp[j] != 0) nz_mp++;
      end
      iv = 1; cv = 1;
      #1 check(m_ir && n_ir && m_cr == last && n_cr == last, "accept, context released only on last");
      @(posedge clk); #1 iv = 0; cv = 0;
      check(m_ov && n_ov && m_ol == last && m_ctx.qid == 32'(n) && n_ctx.qid == 32'(n), "output registered");
      for (int j = 0; j < K; j++) begin
        check(m_w[j] == 32'(mp_exp[j]), $sformatf("beat %0d lane %0d MetaPath w %0d expected %0d", n, j, m_w[j], mp_exp[j]));
        check(n_w[j] == 32'(nv_exp[j]), $sformatf("beat %0d lane %0d Node2Vec w %0d expected %0d", n, j, n_w[j], nv_exp[j]));
        check(m_items[j] == 32'(items[j][24:0]), "item forwarded as vertex id");
      end
    end
    check(nz_mp > 100 && nz_cases[0] > 10 && nz_cases[1] > 10 && nz_cases[2] > 10, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
