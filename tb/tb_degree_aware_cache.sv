// tb_degree_aware_cache: checks the degree-aware replacement policy against a model.
// A 16-line cache serves 2000 random look-ups over 256 vertices whose {address, degree}
// the testbench keeps; misses are answered after a random delay.  A reference model of
// a direct-mapped cache that replaces a line only for a larger degree predicts, for every
// look-up, hit or miss; the answer must equal the table entry and carry its side-band.
// Starts with the example of the paper's cache figure: a line holding address 0x0e4,
// degree 3 is replaced by a vertex with address 0xae8, degree 31, which a later
// low-degree vertex of the same line does not displace.  Also checks the 1-cycle hit
// latency and the hit/miss/replace counters.
module tb_degree_aware_cache;
  import lightrw_pkg::*;
  localparam int L = 16;
  localparam int NV = 256;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic req_valid, req_ready, resp_valid, resp_ready, miss_valid, miss_ready, fill_valid, fill_ready;
  logic [31:0] req_vid, miss_vid, n_hit, n_miss, n_replace;
  logic [7:0] req_side, resp_side;
  ninfo_t resp_info, fill_info;

  degree_aware_cache #(.LINES(L), .SIDE_W(8)) dut (.clk, .rst_n, .req_valid, .req_ready, .req_vid,
    .req_side, .resp_valid, .resp_ready, .resp_info, .resp_side, .miss_valid, .miss_ready, .miss_vid,
    .fill_valid, .fill_ready, .fill_info, .n_hit, .n_miss, .n_replace);

  ninfo_t tbl [NV];
  // reference model
  bit          m_valid [L];
  int unsigned m_vid [L];
  int unsigned m_deg [L];
  int e_hit = 0, e_miss = 0, e_repl = 0;

  // memory side: answer misses after a random delay
  initial begin
    miss_ready = 0; fill_valid = 0; fill_info = '0;
    forever begin
      @(posedge clk); #1;
      if (miss_valid) begin
        int unsigned v;
        v = miss_vid;
        miss_ready = 1;
        @(posedge clk); #1 miss_ready = 0;
        repeat ($urandom_range(6)) @(posedge clk);
        #1 fill_valid = 1; fill_info = tbl[v];
        @(posedge clk);
        while (!fill_ready) @(posedge clk);
        #1 fill_valid = 0;
      end
    end
  end

  task automatic lookup(int unsigned v, int n);
    int idx, t;
    bit exp_hit;
    idx = v % L;
    exp_hit = m_valid[idx] && m_vid[idx] == v;
    req_valid = 1; req_vid = v; req_side = 8'(n);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    t = 0;
    while (!resp_valid) begin @(posedge clk); #1 t++; end
    check(resp_info == tbl[v] && resp_side == 8'(n), $sformatf("lookup %0d vertex %0d: wrong answer", n, v));
    if (exp_hit) begin
      e_hit++;
      check(t == 0, $sformatf("hit latency %0d", t + 1));
    end else begin
      e_miss++;
      if (!m_valid[idx] || tbl[v].deg > m_deg[idx]) begin
        m_valid[idx] = 1; m_vid[idx] = v; m_deg[idx] = tbl[v].deg; e_repl++;
      end
    end
    if (!resp_ready) begin
      repeat ($urandom_range(3)) @(posedge clk);
      #1 check(resp_valid && resp_info == tbl[v], "answer held while not ready");
      resp_ready = 1;
    end
    @(posedge clk); #1;
    check(n_hit == 32'(e_hit) && n_miss == 32'(e_miss) && n_replace == 32'(e_repl),
          $sformatf("lookup %0d counters %0d/%0d/%0d vs %0d/%0d/%0d", n, n_hit, n_miss, n_replace, e_hit, e_miss, e_repl));
  endtask

  initial begin
    req_valid = 0; req_vid = 0; req_side = 0; resp_ready = 1;
    for (int v = 0; v < NV; v++) begin
      tbl[v].deg = $urandom_range(40);
      tbl[v].addr = $urandom;
    end
    for (int i = 0; i < L; i++) begin m_valid[i] = 0; m_vid[i] = 0; m_deg[i] = 0; end
    // figure example in line 10: vertex 10 (0e4, 3), vertex 26 (ae8, 31), vertex 42 (degree 2)
    tbl[10] = '{deg: 3, addr: 32'h0e4};
    tbl[26] = '{deg: 31, addr: 32'hae8};
    tbl[42] = '{deg: 2, addr: 32'h02f};
    repeat (2) @(posedge clk); #1 rst_n = 1;
    lookup(10, 0);
    lookup(10, 1);
    check(n_hit == 1, "0e4/3 cached");
    lookup(26, 2);
    lookup(26, 3);
    check(n_hit == 2 && n_replace == 2, "ae8/31 replaced 0e4/3");
    lookup(42, 4);
    lookup(26, 5);
    check(n_hit == 3 && n_replace == 2, "degree 2 did not displace degree 31");
    for (int n = 6; n < 2000; n++) begin
      resp_ready = ($urandom_range(3) != 0);
      #1;
      lookup(($urandom_range(3) == 0) ? $urandom_range(15) : $urandom_range(NV - 1), n);
      resp_ready = 1;
    end
    check(e_hit > 100 && e_miss - e_repl > 100, "hits and kept lines exercised");
    // back-to-back hits: every cached vertex three times, one answer per cycle
    begin
      int unsigned vs [$];
      int got, cyc;
      for (int r = 0; r < 3; r++) for (int i = 0; i < L; i++) if (m_valid[i]) vs.push_back(m_vid[i]);
      got = 0; cyc = 0;
      @(posedge clk); #1;
      fork
        for (int n = 0; n < vs.size(); n++) begin
          req_valid = 1; req_vid = vs[n]; req_side = 8'(n);
          @(posedge clk);
          while (!req_ready) @(posedge clk);
          #1;
          if (n == vs.size() - 1) req_valid = 0;
        end
        while (got < vs.size()) begin
          @(posedge clk); cyc++;
          if (resp_valid && resp_ready) begin
            check(resp_info == tbl[vs[got]] && resp_side == 8'(got), $sformatf("streamed hit %0d wrong", got));
            got++;
          end
        end
      join
      #1 check(cyc == vs.size() + 1, $sformatf("%0d streamed hits took %0d cycles", vs.size(), cyc));
      check(n_hit == 32'(e_hit + vs.size()) && n_miss == 32'(e_miss), "streamed hits counted as hits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
